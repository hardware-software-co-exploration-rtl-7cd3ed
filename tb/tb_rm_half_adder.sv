// tb_rm_half_adder: self-checking testbench for rm_half_adder.
// Applies random bit pairs, some cycles without load, and checks one cycle
// after each load that sum = a1 ^ a2 and carry = a1 & a2, that the outputs
// hold when there is no load, and that the shift count in the load cycle
// equals the number of the four input MTJs whose stored bit changes
// (write-shift). A second instance without write-shift must write all four.
module tb_rm_half_adder;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic load, a1, a2, s, cout, s_w, cout_w;
  logic [2:0] n_shift, n_write, n_shift_w, n_write_w;
  rm_half_adder #(.WRITE_SHIFT(1'b1)) dut (.clk, .rst_n, .load, .a1, .a2, .s, .cout,
    .n_shift, .n_write);
  rm_half_adder #(.WRITE_SHIFT(1'b0)) dut_w (.clk, .rst_n, .load, .a1, .a2, .s(s_w),
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
    logic m1, m2;
    int exp_sh;
    m1 = 0; m2 = 0;
    load = 0; a1 = 0; a2 = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      check(s == (m1 ^ m2) && cout == (m1 & m2), "half-adder result");
      check(s_w == s && cout_w == cout, "same result without write-shift");
      load = ($urandom % 3) != 0;
      a1 = 1'($urandom);
      a2 = 1'($urandom);
      #1;
      exp_sh = load ? 2 * (int'(a1 != m1) + int'(a2 != m2)) : 0;
      check(int'(n_shift) == exp_sh && n_write == 0, "shift count");
      check(n_shift_w == 0 && int'(n_write_w) == (load ? 4 : 0), "write count");
      if (load) begin
        m1 = a1;
        m2 = a2;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
