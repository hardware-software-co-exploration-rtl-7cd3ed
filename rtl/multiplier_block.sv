// multiplier_block: the multiplication circuitry shared by one half of a mat
// group (Fig. 20): a bit-serial Booth multiplier with its partial-product
// tracks, and the shift-based multiplier's two decrementing counters.
//
// Booth mode: the block takes a weight from a weight mat and the activation
// bits of one activation mat, and returns two bit streams that a mat adder
// sums into the 2N-bit products (see booth_multiplier).
// Shift mode (Sec. 4.2.2): two logarithmic weights d_s0, d_s1 are written into
// the counters, which then gate the shift circuitry of the two subarrays of an
// activation-mat pair while both are read; the mat adder sums the two shifted
// activations. The paper places the shift-based multiplier in this block and
// says its only added hardware is the decrementing counter.
//
// Timing: see booth_multiplier and shift_counter; `sh_step` advances both
// counters and `sh_en[i]` is valid in the same cycle.
//
// Lint note: the shift counters' `cnt` outputs are left open; only their shift
// enables are needed here.
module multiplier_block
  import rm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // Booth multiplier
  input  logic              b_start,
  input  logic [NB-1:0]     b_w,
  input  logic              b_act_valid,
  input  logic [TRACKS-1:0] b_act_bits,
  input  logic [TRACKS-1:0] lane_en,
  output logic              b_out_valid,
  output logic              b_out_first,
  output logic [TRACKS-1:0] b_s0,
  output logic [TRACKS-1:0] b_s1,
  output logic              b_busy,
  // shift-based multiplier
  input  logic [1:0]             sh_load,
  input  logic signed [SH_W-1:0] sh_ds,
  input  logic                   sh_step,
  output logic [1:0]             sh_en
);
  booth_multiplier #(.N(NB), .LANES(TRACKS)) u_booth (
    .clk, .rst_n, .start(b_start), .w(b_w), .act_valid(b_act_valid),
    .act_bits(b_act_bits), .lane_en, .out_valid(b_out_valid),
    .out_first(b_out_first), .s0(b_s0), .s1(b_s1), .busy(b_busy));

  for (genvar i = 0; i < 2; i++) begin : g_cnt
    shift_counter #(.NB(NB), .SH_W(SH_W)) u_cnt (
      .clk, .rst_n, .load(sh_load[i]), .ds(sh_ds), .step(sh_step),
      .shift_en(sh_en[i]), .cnt());
  end
endmodule
