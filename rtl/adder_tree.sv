// adder_tree: bank-level bit-serial adder tree (Sec. 4.1.2, Sec. 4.2.3).
//
// Sums one bit stream from each of N_IN mat groups (16 in a bank, so four
// levels) with bit-serial adder units of LANES lanes; lane i is summed only
// with lane i. Each level adds one cycle of latency. Inputs that take no part
// must be held at 0. Used to accumulate partial sums of different input
// channels held by different mat groups.
//
// Timing: bits of all inputs enter together with `valid` (`first` on bit 0);
// the sum bit leaves log2(N_IN) cycles later with `valid_o`/`first_o`. Sums
// wrap modulo 2^L for L-bit words.
//
// Lint notes: all adders of the tree run in lock step, so only the first
// adder's valid/first outputs (vo, fo) are used, and the adders' shift-count
// outputs are left open.
module adder_tree
  import rm_pkg::*;
#(
  parameter int unsigned N_IN  = N_MG,
  parameter int unsigned LANES = TRACKS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             first,
  input  logic [LANES-1:0] lane_en,
  input  logic [LANES-1:0] in [N_IN],
  output logic [LANES-1:0] z,
  output logic             valid_o,
  output logic             first_o
);
  localparam int unsigned LV = $clog2(N_IN);
  localparam int unsigned P  = 1 << LV;

  logic [LANES-1:0] st [LV+1][P];
  logic             sv [LV+1];
  logic             sf [LV+1];

  always_comb begin
    for (int i = 0; i < P; i++) st[0][i] = (i < N_IN) ? in[i] : '0;
    sv[0] = valid;
    sf[0] = first;
  end

  for (genvar v = 0; v < LV; v++) begin : g_lvl
    for (genvar j = 0; j < (P >> (v + 1)); j++) begin : g_add
      logic vo, fo;
      bit_serial_adder #(.LANES(LANES)) u_add (
        .clk, .rst_n, .valid(sv[v]), .first(sf[v]), .lane_en,
        .a(st[v][2*j]), .b(st[v][2*j+1]), .cin0('0),
        .z(st[v+1][j]), .valid_o(vo), .first_o(fo), .n_shift());
      if (j == 0) begin : g_v
        assign sv[v+1] = vo;
        assign sf[v+1] = fo;
      end
    end
    for (genvar j = (P >> (v + 1)); j < P; j++) begin : g_unused
      assign st[v+1][j] = '0;
    end
  end

  assign z       = st[LV][0];
  assign valid_o = sv[LV];
  assign first_o = sf[LV];
endmodule
