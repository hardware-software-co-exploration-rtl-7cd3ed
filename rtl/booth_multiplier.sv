// booth_multiplier: bit-serial radix-4 Booth multiplier built from racetrack
// storage and bit-serial full adders (Sec. 3.2, Fig. 7-9).
//
// One weight (the multiplier, stored bit-parallel) multiplies LANES activations
// (the multiplicands, one per track of an MU, streamed LSB first) at once. The
// weight, with a 0 appended below its LSB, is cut into N/2 overlapping
// three-bit blocks; booth_decoder turns each into ZERO/COMP/INCR/LS (Table 1).
// The operation runs in three stages:
//   generation - for N cycles every activation bit is selected or inverted per
//                partial product, and a bit-serial incrementer (half-adder
//                lanes, carry-in INCR) completes the two's complement; the
//                N-bit partial products are
//                written, one per racetrack, into the partial-product tracks
//                (the multiplier block's four MUs, Fig. 8);
//   alignment  - each partial-product track T is shifted by 2T positions, plus
//                one for LS (x2), with zeros padded behind (Fig. 9); this takes
//                N-1 cycles, the largest offset;
//   addition   - for 2N cycles all tracks are read bit by bit into an adder
//                tree; a track stops shifting once its MSB is under the port, so
//                its sign bit is re-read (sign extension).
// This block holds the adder-tree levels down to two streams, s0 and s1; the
// last addition is done by a mat adder unit, which the paper also uses as the
// final stage of Booth accumulation (Sec. 4.1.2). The product is the 2N-bit sum
// s0 + s1, wrapped to 2N bits.
//
// As in the paper, partial products are N bits wide and x2 is realised in the
// alignment. Hence a multiplicand of -2^(N-1) with a negating block overflows
// its partial product; the paper's symmetric activation quantisation never
// produces that value. The partial-product track registers stand for the
// racetrack domains (a shift of the track is a shift of the register).
//
// Timing: `start` latches `w`; the next N cycles with `act_valid` deliver the
// activation bits. The first s0/s1 bit (`out_first`) follows after the
// incrementer (1 cycle), the rest of generation, N-1 alignment cycles and the
// tree latency; 2N output bits come on consecutive cycles with `out_valid`.
//
// Lint notes: the four incrementers run in lock step, so only lane 0's valid
// flag is used (inc_v[3:1] unused). Unused shift-count, valid and first outputs
// of adder units are left open.
module booth_multiplier
  import rm_pkg::*;
#(
  parameter int unsigned N     = NB,      // operand bits (even)
  parameter int unsigned LANES = TRACKS
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [N-1:0]     w,
  input  logic             act_valid,
  input  logic [LANES-1:0] act_bits,
  input  logic [LANES-1:0] lane_en,
  output logic             out_valid,
  output logic             out_first,
  output logic [LANES-1:0] s0,
  output logic [LANES-1:0] s1,
  output logic             busy
);
  localparam int unsigned NPP    = N / 2;
  localparam int unsigned P      = (NPP < 2) ? 2 : (1 << $clog2(NPP));
  localparam int unsigned LV     = $clog2(P) - 1;     // tree levels in this block
  localparam int unsigned OFFMAX = 2 * (NPP - 1) + 1; // largest alignment offset
  localparam int unsigned PPW    = N + OFFMAX;        // track length incl. padding
  localparam int unsigned CW     = $clog2(2 * N + 1);

  typedef enum logic [1:0] { S_IDLE, S_GEN, S_ALIGN, S_ADD } state_e;
  state_e state;

  logic [N-1:0]   w_q;
  logic [CW-1:0]  cnt;       // bits seen (GEN), alignment cycles, addition cycles
  logic [CW-1:0]  wptr;      // partial-product bits written

  logic [NPP-1:0] zero, comp, incr, ls;
  logic [PPW-1:0] pp [NPP][LANES];
  logic [LANES-1:0] inc_z [NPP];
  logic [NPP-1:0]   inc_v;

  for (genvar t = 0; t < NPP; t++) begin : g_pp
    logic [2:0] blk;
    logic [LANES-1:0] x;
    assign blk = {w_q[2*t+1], w_q[2*t], (t == 0) ? 1'b0 : w_q[(t == 0) ? 0 : 2*t-1]};
    booth_decoder u_dec (.blk, .zero(zero[t]), .comp(comp[t]), .incr(incr[t]), .ls(ls[t]));
    // "set-to-zero" has priority over "complement"
    assign x = zero[t] ? '0 : (comp[t] ? ~act_bits : act_bits);
    bit_serial_adder #(.LANES(LANES), .INCREMENT(1'b1)) u_inc (
      .clk, .rst_n, .valid(state == S_GEN && act_valid), .first(cnt == '0),
      .lane_en, .a(x), .b('0), .cin0({LANES{incr[t]}}),
      .z(inc_z[t]), .valid_o(inc_v[t]), .first_o(), .n_shift());
  end

  // alignment offset of track t: 2t, plus 1 for a x2 block
  function automatic logic [CW-1:0] offset(int t, logic l);
    return CW'(2 * t) + CW'(l);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      wptr  <= '0;
      w_q   <= '0;
      for (int t = 0; t < NPP; t++)
        for (int l = 0; l < LANES; l++) pp[t][l] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_GEN;
          w_q   <= w;
          cnt   <= '0;
          wptr  <= '0;
          for (int t = 0; t < NPP; t++)
            for (int l = 0; l < LANES; l++) pp[t][l] <= '0;   // padded zeros
        end
        S_GEN: begin
          if (act_valid) cnt <= cnt + 1'b1;
          if (inc_v[0]) begin
            for (int t = 0; t < NPP; t++)
              for (int l = 0; l < LANES; l++) pp[t][l][$clog2(PPW)'(wptr)] <= inc_z[t][l];
            wptr <= wptr + 1'b1;
            if (wptr == CW'(N - 1)) begin
              state <= S_ALIGN;
              cnt   <= '0;
            end
          end
        end
        S_ALIGN: begin
          for (int t = 0; t < NPP; t++)
            if (cnt < offset(t, ls[t]))
              for (int l = 0; l < LANES; l++) pp[t][l] <= pp[t][l] << 1;
          cnt <= cnt + 1'b1;
          if (cnt == CW'(OFFMAX - 1)) begin
            state <= S_ADD;
            cnt   <= '0;
          end
        end
        S_ADD: begin
          // shift right until the MSB is under the port, then hold it there
          for (int t = 0; t < NPP; t++)
            if (cnt < offset(t, ls[t]) + CW'(N - 1))
              for (int l = 0; l < LANES; l++) pp[t][l] <= pp[t][l] >> 1;
          cnt <= cnt + 1'b1;
          if (cnt == CW'(2 * N - 1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // adder tree from P streams down to two
  logic [LANES-1:0] st [LV+1][P];
  logic             sv [LV+1];
  logic             sf [LV+1];

  always_comb begin
    for (int t = 0; t < P; t++)
      for (int l = 0; l < LANES; l++)
        st[0][t][l] = (t < NPP) ? pp[t][l][0] : 1'b0;
    sv[0] = (state == S_ADD);
    sf[0] = (state == S_ADD) && (cnt == '0);
  end

  for (genvar v = 0; v < LV; v++) begin : g_lvl
    for (genvar j = 0; j < (P >> (v + 1)); j++) begin : g_add
      if (j == 0) begin : g_first
        bit_serial_adder #(.LANES(LANES)) u_add (
          .clk, .rst_n, .valid(sv[v]), .first(sf[v]), .lane_en,
          .a(st[v][2*j]), .b(st[v][2*j+1]), .cin0('0),
          .z(st[v+1][j]), .valid_o(sv[v+1]), .first_o(sf[v+1]), .n_shift());
      end else begin : g_other
        bit_serial_adder #(.LANES(LANES)) u_add (
          .clk, .rst_n, .valid(sv[v]), .first(sf[v]), .lane_en,
          .a(st[v][2*j]), .b(st[v][2*j+1]), .cin0('0),
          .z(st[v+1][j]), .valid_o(), .first_o(), .n_shift());
      end
    end
    for (genvar j = (P >> (v + 1)); j < P; j++) begin : g_unused
      assign st[v+1][j] = '0;
    end
  end

  assign s0        = st[LV][0];
  assign s1        = st[LV][1];
  assign out_valid = sv[LV];
  assign out_first = sf[LV];

  initial assert (N % 2 == 0) else $error("booth_multiplier: N must be even");
endmodule
