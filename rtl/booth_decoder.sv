// booth_decoder: radix-4 Booth block decode (Table 1, Eq. 8-11).
//
// A three-bit multiplier block B2 B1 B0 selects the transformation applied to
// the multiplicand: ZERO (set to zero), COMP (invert every bit), INCR (add one,
// completing the two's complement) and LS (left shift by one). "Remain" is
// all four outputs at 0. ZERO has priority over COMP, so COMP is simply B2.
// Purely combinational; the equations are the paper's.
module booth_decoder (
  input  logic [2:0] blk,
  output logic       zero,
  output logic       comp,
  output logic       incr,
  output logic       ls
);
  always_comb begin
    zero = (blk[2] & blk[1] & blk[0]) | (~blk[2] & ~blk[1] & ~blk[0]);
    comp = blk[2];
    incr = comp & ~zero;
    ls   = (blk[2] & ~blk[1] & ~blk[0]) | (~blk[2] & blk[1] & blk[0]);
  end
endmodule
