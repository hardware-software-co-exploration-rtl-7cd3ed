// tb_ws_input_cell: self-checking testbench for ws_input_cell.
// Drives random load/next-bit sequences into one cell with the write-shift
// transformation and one without, and checks against a reference model that
// (a) the stored bit follows the loaded bit, (b) with write-shift a shift
// pulse is issued only when the new bit differs from the stored one, in the
// direction of the new bit, and no MTJ write is ever issued, and (c) without
// write-shift every load is one MTJ write. Also checks that write-shift needs
// fewer operations than writes on random data (the point of Fig. 15).
// Inputs change on the falling edge; outputs are checked before and after
// the rising edge (the cell has a one-cycle load latency).
module tb_ws_input_cell;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic load, nxt;
  logic q1, sp1, sd1, wp1, q0, sp0, sd0, wp0;
  ws_input_cell #(.WRITE_SHIFT(1'b1)) dut_ws (.clk, .rst_n, .load, .nxt,
    .q(q1), .shift_pulse(sp1), .shift_dir(sd1), .write_pulse(wp1));
  ws_input_cell #(.WRITE_SHIFT(1'b0)) dut_wr (.clk, .rst_n, .load, .nxt,
    .q(q0), .shift_pulse(sp0), .shift_dir(sd0), .write_pulse(wp0));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic model;
    int n_shift, n_write;
    model = 1'b0; n_shift = 0; n_write = 0;
    load = 1'b0; nxt = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      check(q1 == model && q0 == model, "stored bit");
      load = ($urandom % 4) != 0;
      nxt  = 1'($urandom);
      #1;
      check(sp1 == (load && nxt != model), "shift only on a differing bit");
      check(!sp1 || sd1 == nxt, "shift direction");
      check(!wp1, "no MTJ write with write-shift");
      check(wp0 == load && !sp0, "write on every load without write-shift");
      n_shift += int'(sp1);
      n_write += int'(wp0);
      if (load) model = nxt;
    end
    check(n_shift < n_write, "write-shift issues fewer operations");
    $display("shifts=%0d writes=%0d", n_shift, n_write);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
