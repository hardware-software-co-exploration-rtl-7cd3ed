// tb_booth_multiplier: self-checking testbench for booth_multiplier.
// Multiplies one 8-bit signed weight by four 8-bit signed activations (one per
// lane) and checks that the two 2N-bit output streams add up to the product
// modulo 2^16 in every lane. Covers the worked example of Fig. 7
// (41 x 107 = 4387, both operand orders), all-zero/all-one weights, and random
// operands; activations avoid -128, which the N-bit partial products cannot
// negate (a limitation the paper shares). Cycle checks: the first output bit
// appears N (generation) + 1 (incrementer) + N-1 (alignment) + 1 + 1 (tree)
// cycles after `start` when the activation bits come back to back, and the
// 2N output bits come on consecutive cycles; `busy` covers the operation.
// Activation bits are also fed with random gaps.
module tb_booth_multiplier;
  localparam int N = 8, LANES = 4;
  localparam int LAT = N + 1 + (N - 1) + 1 + 1;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic start, act_valid, out_valid, out_first, busy;
  logic [N-1:0] w;
  logic [LANES-1:0] act_bits, lane_en, s0, s1;
  booth_multiplier #(.N(N), .LANES(LANES)) dut (.clk, .rst_n, .start, .w, .act_valid,
    .act_bits, .lane_en, .out_valid, .out_first, .s0, .s1, .busy);

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

  task automatic run(input logic signed [N-1:0] wt, input logic signed [N-1:0] x [LANES],
                     input bit gaps);
    logic [2*N-1:0] acc0 [LANES], acc1 [LANES];
    int cyc, first_at, nbits;
    logic signed [2*N-1:0] prod;
    @(negedge clk);
    start = 1'b1; w = wt;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    check(busy, "busy after start");
    for (int i = 0; i < N; i++) begin
      while (gaps && ($urandom % 3) == 0) begin
        act_valid = 1'b0;
        @(negedge clk);
        cyc++;
      end
      act_valid = 1'b1;
      for (int l = 0; l < LANES; l++) act_bits[l] = x[l][i];
      @(negedge clk);
      cyc++;
      check(!out_valid, "no output during generation");
    end
    act_valid = 1'b0;
    for (int l = 0; l < LANES; l++) begin
      acc0[l] = '0;
      acc1[l] = '0;
    end
    first_at = -1; nbits = 0;
    while (nbits < 2 * N && cyc < 200) begin
      if (out_valid) begin
        if (nbits == 0) begin
          first_at = cyc;
          check(out_first, "out_first on the first bit");
        end else begin
          check(!out_first, "out_first only once");
        end
        for (int l = 0; l < LANES; l++) begin
          acc0[l][nbits] = s0[l];
          acc1[l][nbits] = s1[l];
        end
        nbits++;
      end else if (nbits > 0) begin
        check(0, "output bits not consecutive");
        nbits = 2 * N;
      end
      @(negedge clk);
      cyc++;
    end
    if (!gaps) check(first_at == LAT, $sformatf("latency %0d, expected %0d", first_at, LAT));
    check(!out_valid, "exactly 2N output bits");
    for (int l = 0; l < LANES; l++) begin
      logic [2*N-1:0] got;
      got  = acc0[l] + acc1[l];
      prod = (2*N)'(wt) * (2*N)'(x[l]);
      check(got == prod, $sformatf("%0d x %0d: got %0d", wt, x[l], $signed(got)));
    end
    repeat (2) @(negedge clk);
    check(!busy, "idle after the operation");
  endtask

  initial begin
    logic signed [N-1:0] x [LANES];
    start = 0; w = '0; act_valid = 0; act_bits = '0; lane_en = '1;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // Fig. 7: 41 x 107
    x = '{8'sd107, 8'sd41, -8'sd107, 8'sd0};
    run(8'sd41, x, 1'b0);
    x = '{8'sd41, 8'sd107, -8'sd41, 8'sd127};
    run(8'sd107, x, 1'b0);
    x = '{8'sd1, -8'sd1, 8'sd127, -8'sd127};
    run(8'sd0, x, 1'b0);
    run(-8'sd1, x, 1'b0);
    run(-8'sd128, x, 1'b0);
    run(8'sd127, x, 1'b0);
    for (int r = 0; r < 200; r++) begin
      for (int l = 0; l < LANES; l++) begin
        x[l] = 8'($urandom);
        if (x[l] == -8'sd128) x[l] = -8'sd127;
      end
      run(8'($urandom), x, r % 2 == 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
