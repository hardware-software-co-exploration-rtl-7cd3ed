// tb_booth_decoder: self-checking testbench for booth_decoder.
// For all eight radix-4 Booth blocks checks ZERO/COMP/INCR/LS against
// Table 1, and checks that the partial product the controls describe
// (zero, else multiplicand or its complement plus INCR, shifted by LS)
// equals digit x multiplicand for random 8-bit signed multiplicands, where
// digit = -2*B2 + B1 + B0.
module tb_booth_decoder;
  int checks = 0, failures = 0;
  logic [2:0] blk;
  logic zero, comp, incr, ls;
  booth_decoder dut (.blk, .zero, .comp, .incr, .ls);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL blk=%b: %s", blk, what);
    end
  endtask

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // Table 1: {ZERO, COMP, INCR, LS} per block 000..111
  localparam logic [3:0] TABLE1 [8] = '{4'b1000, 4'b0000, 4'b0000, 4'b0001,
                                        4'b0111, 4'b0110, 4'b0110, 4'b1100};
  initial begin
    for (int b = 0; b < 8; b++) begin
      int digit;
      blk = 3'(b);
      #1;
      check({zero, comp, incr, ls} == TABLE1[b], "control bits of Table 1");
      digit = -2 * int'(blk[2]) + int'(blk[1]) + int'(blk[0]);
      for (int r = 0; r < 50; r++) begin
        logic signed [7:0]  x;
        logic signed [15:0] xe, pp;
        x  = 8'($urandom);
        if (x == -128) x = -127;   // -2^(N-1) cannot be negated in N bits
        xe = 16'(x);
        pp = zero ? 16'sd0 : ((comp ? ~xe : xe) + 16'(incr)) <<< ls;
        check(pp == 16'(digit * int'(x)), "partial product value");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
