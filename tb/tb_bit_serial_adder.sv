// tb_bit_serial_adder: self-checking testbench for bit_serial_adder.
// Adds random L-bit operands (L = 1..16) on four lanes at once, LSB first,
// with a random carry-in on the first bit and random idle cycles inside the
// stream (the carry must be held across them). Checks every sum bit one cycle
// after its operands (the one-cycle full-adder latency of Fig. 6), that
// valid_o/first_o follow valid/first by exactly one cycle, and that a lane
// with lane_en low keeps its old output. A second instance in incrementer
// mode (half-adder lanes, INCREMENT = 1) gets the same stream and must give
// x + cin0, ignoring b.
module tb_bit_serial_adder;
  localparam int LANES = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic valid, first, valid_o, first_o;
  logic [LANES-1:0] lane_en, a, b, cin0, z;
  logic [$clog2(7*LANES+1)-1:0] n_shift;
  bit_serial_adder #(.LANES(LANES)) dut (.clk, .rst_n, .valid, .first, .lane_en, .a, .b,
    .cin0, .z, .valid_o, .first_o, .n_shift);
  logic [LANES-1:0] zi;
  bit_serial_adder #(.LANES(LANES), .INCREMENT(1'b1)) inc (.clk, .rst_n, .valid, .first,
    .lane_en, .a, .b, .cin0, .z(zi), .valid_o(), .first_o(), .n_shift());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #2000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    valid = 0; first = 0; lane_en = '1; a = '0; b = '0; cin0 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int op = 0; op < 300; op++) begin
      int L;
      logic [16:0] x [LANES], y [LANES], sum [LANES], isum [LANES];
      logic [LANES-1:0] en, zprev;
      L  = 1 + int'($urandom % 16);
      en = (op % 5 == 4) ? 4'($urandom) : '1;
      for (int l = 0; l < LANES; l++) begin
        x[l] = 17'($urandom) & ((17'd1 << L) - 1);
        y[l] = 17'($urandom) & ((17'd1 << L) - 1);
      end
      cin0 = 4'($urandom);
      for (int l = 0; l < LANES; l++) sum[l] = x[l] + y[l] + 17'(cin0[l]);
      for (int l = 0; l < LANES; l++) isum[l] = x[l] + 17'(cin0[l]);
      lane_en = en;
      zprev = z;
      for (int i = 0; i < L; i++) begin
        while (($urandom % 4) == 0) begin
          valid = 0; first = 0;
          @(negedge clk);
          check(!valid_o, "no output without valid");
        end
        valid = 1; first = (i == 0);
        for (int l = 0; l < LANES; l++) begin
          a[l] = x[l][i];
          b[l] = y[l][i];
        end
        @(negedge clk);
        check(valid_o && first_o == (i == 0), "valid_o/first_o one cycle later");
        for (int l = 0; l < LANES; l++)
          if (en[l]) begin
            check(z[l] == sum[l][i], "sum bit");
            check(zi[l] == isum[l][i], "increment bit");
          end
          else       check(z[l] == zprev[l], "disabled lane holds");
      end
      valid = 0; first = 0;
      @(negedge clk);
      check(!valid_o, "valid_o drops");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
