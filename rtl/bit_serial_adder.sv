// bit_serial_adder: an adder unit of LANES bit-serial full adders (Fig. 6, left).
//
// Each lane adds two operands presented least significant bit first, one bit
// per cycle, with the full adder's carry-out fed back as the next carry-in. In
// the accelerator an adder unit has four lanes, one per track of a Macro Unit,
// so the four words read from one MU are added in parallel (Sec. 4.1.2); lanes
// are never crossed. Lanes whose `lane_en` bit is 0 are switched off (no MTJ
// activity), as in fully-connected layers where only one track is used.
//
// Interface and timing: in a cycle with `valid`, bits a[i], b[i] enter lane i;
// `first` marks bit 0 of a word, where the carry-in is `cin0[i]` instead of the
// fed-back carry (cin0 = 1 gives the "increment" of two's complement). The sum
// bit z[i] appears one cycle later with `valid_o` (and `first_o` for bit 0). A word of L bits takes L
// cycles plus one cycle of latency; sums wrap modulo 2^L.
//
// With INCREMENT = 1 the unit is the "increment" of the Booth multiplier's
// two's complement: it adds only `a` and the carry, so each lane is the
// four-MTJ half adder (A1 = a, A2 = carry) instead of the seven-MTJ full
// adder, and `b` is not used. The paper says a bit-serial adder unit does the
// increment; using its half adder there is this design's choice.
//
// Lint notes: the adders' `n_write` outputs are left open: with the
// write-shift transformation the input MTJs are shifted, not written, so only
// the shift count is brought out. With INCREMENT = 1, `b` is unused.
module bit_serial_adder #(
  parameter int unsigned LANES       = 4,
  parameter bit          WRITE_SHIFT = 1'b1,
  parameter bit          INCREMENT   = 1'b0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             first,
  input  logic [LANES-1:0] lane_en,
  input  logic [LANES-1:0] a,
  input  logic [LANES-1:0] b,
  input  logic [LANES-1:0] cin0,
  output logic [LANES-1:0] z,
  output logic             valid_o,
  output logic             first_o,
  output logic [$clog2(7*LANES+1)-1:0] n_shift
);
  logic [LANES-1:0] cout;
  logic [2:0]       ns [LANES];

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    logic load, cin;
    assign load = valid && lane_en[i];
    assign cin  = first ? cin0[i] : cout[i];
    if (INCREMENT) begin : g_ha
      rm_half_adder #(.WRITE_SHIFT(WRITE_SHIFT)) u_ha (
        .clk, .rst_n, .load, .a1(a[i]), .a2(cin),
        .s(z[i]), .cout(cout[i]), .n_shift(ns[i]), .n_write());
    end else begin : g_fa
      rm_full_adder #(.WRITE_SHIFT(WRITE_SHIFT)) u_fa (
        .clk, .rst_n, .load, .a1(a[i]), .a2(b[i]), .cin,
        .s(z[i]), .cout(cout[i]), .n_shift(ns[i]), .n_write());
    end
  end

  always_comb begin
    n_shift = '0;
    for (int i = 0; i < LANES; i++) n_shift += ($bits(n_shift))'(ns[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_o <= 1'b0;
      first_o <= 1'b0;
    end else begin
      valid_o <= valid;
      first_o <= valid && first;
    end
  end
endmodule
