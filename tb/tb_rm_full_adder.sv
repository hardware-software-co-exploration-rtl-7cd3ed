// tb_rm_full_adder: self-checking testbench for rm_full_adder.
// Exhaustive and random inputs: one cycle after each load the sum and carry
// must equal the full-adder truth table (Fig. 6: one-cycle latency), and hold
// while load is low. In the load cycle the shift count must equal the number
// of the seven input MTJs (A1, A2, A2, Cin | A1, A2, Cin) whose bit changes;
// the instance without write-shift must issue seven writes instead.
module tb_rm_full_adder;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic load, a1, a2, cin, s, cout, s_w, cout_w;
  logic [2:0] n_shift, n_write, n_shift_w, n_write_w;
  rm_full_adder #(.WRITE_SHIFT(1'b1)) dut (.clk, .rst_n, .load, .a1, .a2, .cin, .s, .cout,
    .n_shift, .n_write);
  rm_full_adder #(.WRITE_SHIFT(1'b0)) dut_w (.clk, .rst_n, .load, .a1, .a2, .cin, .s(s_w),
    .cout(cout_w), .n_shift(n_shift_w), .n_write(n_write_w));

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
    logic [2:0] m, v;
    int exp_sh, tot;
    m = '0;
    load = 0; a1 = 0; a2 = 0; cin = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1200; i++) begin
      @(negedge clk);
      tot = int'(m[0]) + int'(m[1]) + int'(m[2]);
      check(s == tot[0] && cout == tot[1], "full-adder result");
      check(s_w == s && cout_w == cout, "same result without write-shift");
      load = (i < 16) ? 1'b1 : (($urandom % 3) != 0);
      v    = (i < 16) ? 3'(i) : 3'($urandom);
      {cin, a2, a1} = v;
      #1;
      exp_sh = load ? 2 * int'(v[0] != m[0]) + 3 * int'(v[1] != m[1]) + 2 * int'(v[2] != m[2]) : 0;
      check(int'(n_shift) == exp_sh && n_write == 0, "shift count");
      check(n_shift_w == 0 && int'(n_write_w) == (load ? 7 : 0), "write count");
      if (load) m = v;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
