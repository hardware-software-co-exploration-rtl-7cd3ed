// tb_adder_tree: self-checking testbench for adder_tree (bank adder tree).
// Streams 16 random L-bit words per lane (L = 1..16, four lanes), LSB first,
// and checks that the output stream is their sum modulo 2^L, that it starts
// exactly log2(16) = 4 cycles after the inputs (one cycle per bit-serial
// adder level), and that valid_o/first_o mark it.
module tb_adder_tree;
  localparam int N_IN = 16, LANES = 4, LV = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic valid, first, valid_o, first_o;
  logic [LANES-1:0] lane_en, z;
  logic [LANES-1:0] in [N_IN];
  adder_tree #(.N_IN(N_IN), .LANES(LANES)) dut (.clk, .rst_n, .valid, .first, .lane_en,
    .in, .z, .valid_o, .first_o);

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
    valid = 0; first = 0; lane_en = '1;
    for (int j = 0; j < N_IN; j++) in[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int op = 0; op < 100; op++) begin
      int L;
      logic [15:0] x [N_IN][LANES];
      logic [15:0] sum [LANES];
      L = 1 + int'($urandom % 16);
      for (int l = 0; l < LANES; l++) sum[l] = '0;
      for (int j = 0; j < N_IN; j++)
        for (int l = 0; l < LANES; l++) begin
          x[j][l] = 16'($urandom);
          sum[l] += x[j][l];
        end
      for (int c = 0; c < L + LV + 1; c++) begin
        valid = (c < L);
        first = (c == 0);
        for (int j = 0; j < N_IN; j++)
          for (int l = 0; l < LANES; l++) in[j][l] = (c < L) ? x[j][l][c] : 1'b0;
        @(negedge clk);
        // after this edge, output bit c-LV+1 is visible if it exists
        check(valid_o == (c >= LV - 1 && c < L + LV - 1), "output valid window");
        check(first_o == (c == LV - 1), "first output bit after 4 levels");
        if (valid_o)
          for (int l = 0; l < LANES; l++)
            check(z[l] == sum[l][c - LV + 1], $sformatf("sum bit %0d lane %0d", c - LV + 1, l));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
