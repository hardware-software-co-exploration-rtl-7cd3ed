// tb_shift_counter: self-checking testbench for shift_counter (Fig. 12/14).
// For every valid log weight d in -7..7: load d, step NB-D + NB+2D times
// (the pre-roll plus the shift-and-add cycles of one shift-based multiply)
// and check that shift_en is high on exactly NB steps, on steps
// d+NB+1 .. d+2NB (1-based), i.e. that the track starts moving d+D+1 cycles
// into the active phase and then moves once per cycle. Also checks that the
// counter holds without step, and runs the check with gaps between steps.
module tb_shift_counter;
  localparam int NB = 8, D = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic load, step, shift_en;
  logic signed [3:0] ds;
  logic [4:0] cnt;
  shift_counter #(.NB(NB), .SH_W(4)) dut (.clk, .rst_n, .load, .ds, .step, .shift_en, .cnt);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t d=%0d: %s", $time, ds, what);
    end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    load = 0; step = 0; ds = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int d = -D; d <= D; d++) begin
        int s, n_en;
        @(negedge clk);
        load = 1'b1; ds = 4'(d);
        @(negedge clk);
        load = 1'b0;
        s = 0; n_en = 0;
        while (s < (NB - D) + (NB + 2 * D)) begin
          logic [4:0] c0;
          if (pass == 1 && ($urandom % 3) == 0) begin
            step = 1'b0;
            c0 = cnt;
            #1;
            check(!shift_en, "no shift without step");
            @(negedge clk);
            check(cnt == c0, "counter holds without step");
            continue;
          end
          step = 1'b1;
          s++;
          #1;
          check(shift_en == (s >= d + NB + 1 && s <= d + 2 * NB), "shift on the expected step");
          n_en += int'(shift_en);
          @(negedge clk);
        end
        step = 1'b0;
        check(n_en == NB, "NB shifts per multiply");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
