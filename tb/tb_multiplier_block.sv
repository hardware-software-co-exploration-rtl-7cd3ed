// tb_multiplier_block: self-checking testbench for multiplier_block.
// Runs Booth multiplications of random signed 8-bit weights and activations
// through the block (product = s0 + s1, 16 bits, first bit 2N+2 cycles after
// start), and, independently, loads the two shift-based-multiplier counters
// with different log weights and checks each counter's shift-enable pattern
// (NB enables, starting at step d+NB+1).
module tb_multiplier_block;
  import rm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic b_start, b_act_valid, b_out_valid, b_out_first, b_busy, sh_step;
  logic [NB-1:0] b_w;
  logic [TRACKS-1:0] b_act_bits, lane_en, b_s0, b_s1;
  logic [1:0] sh_load, sh_en;
  logic signed [SH_W-1:0] sh_ds;
  multiplier_block dut (.clk, .rst_n, .b_start, .b_w, .b_act_valid, .b_act_bits, .lane_en,
    .b_out_valid, .b_out_first, .b_s0, .b_s1, .b_busy, .sh_load, .sh_ds, .sh_step, .sh_en);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    b_start = 0; b_act_valid = 0; b_w = '0; b_act_bits = '0; lane_en = '1;
    sh_load = '0; sh_ds = '0; sh_step = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int r = 0; r < 60; r++) begin
      logic signed [NB-1:0] w, x [TRACKS];
      logic [2*NB-1:0] a0 [TRACKS], a1 [TRACKS];
      int cyc, nb;
      w = NB'($urandom);
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = NB'($urandom);
        if (x[l] == -8'sd128) x[l] = 8'sd5;
        a0[l] = '0; a1[l] = '0;
      end
      @(negedge clk);
      b_start = 1; b_w = w;
      @(negedge clk);
      b_start = 0; cyc = 1;
      for (int i = 0; i < NB; i++) begin
        b_act_valid = 1;
        for (int l = 0; l < TRACKS; l++) b_act_bits[l] = x[l][i];
        @(negedge clk);
        cyc++;
      end
      b_act_valid = 0;
      nb = 0;
      while (nb < 2 * NB && cyc < 100) begin
        if (b_out_valid) begin
          if (nb == 0) check(cyc == 2 * NB + 2 && b_out_first, $sformatf("first product bit at %0d", cyc));
          for (int l = 0; l < TRACKS; l++) begin
            a0[l][nb] = b_s0[l];
            a1[l][nb] = b_s1[l];
          end
          nb++;
        end
        @(negedge clk);
        cyc++;
      end
      for (int l = 0; l < TRACKS; l++) begin
        logic [2*NB-1:0] got, prod;
        got  = a0[l] + a1[l];
        prod = (2*NB)'(w) * (2*NB)'(x[l]);
        check(got == prod, $sformatf("%0d x %0d", w, x[l]));
      end
      @(negedge clk);
      check(!b_busy, "Booth multiplier idle");
    end
    // shift-based multiplier counters
    for (int r = 0; r < 40; r++) begin
      int d0, d1, n0, n1;
      d0 = int'($urandom % 15) - 7;
      d1 = int'($urandom % 15) - 7;
      @(negedge clk);
      sh_load = 2'b01; sh_ds = SH_W'(d0);
      @(negedge clk);
      sh_load = 2'b10; sh_ds = SH_W'(d1);
      @(negedge clk);
      sh_load = 2'b00;
      n0 = 0; n1 = 0;
      for (int s = 1; s <= (NB - SHIFT_D) + (NB + 2 * SHIFT_D); s++) begin
        sh_step = 1;
        #1;
        check(sh_en[0] == (s >= d0 + NB + 1 && s <= d0 + 2 * NB), "counter 0 enable");
        check(sh_en[1] == (s >= d1 + NB + 1 && s <= d1 + 2 * NB), "counter 1 enable");
        n0 += int'(sh_en[0]);
        n1 += int'(sh_en[1]);
        @(negedge clk);
      end
      sh_step = 0;
      check(n0 == NB && n1 == NB, "NB shifts per track");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
