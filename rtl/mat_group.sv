// mat_group: a mat group (MG) of the accelerator bank (Fig. 18, Fig. 20,
// Table 8) with the sequencer that runs one operation at a time on it.
//
// Contents: eight activation mats and eight weight mats split into two halves;
// each half has one multiplier block (Booth multiplier with its
// partial-product MUs, plus the shift-based multiplier's counters) serving its
// four activation and four weight mats; one MG adder combines a stream from
// each half on its way to the bank adder tree. Capacity: 16 mats x 8 KB =
// 128 KB (Fig. 20).
//
// Operations (rm_pkg::op_e); the paper leaves sequencing to software, so the
// command set and its encoding are this design's own, built only from the
// data paths the paper describes:
//   OP_WRITE / OP_READ  host access to TRACKS words of `len` bits in one
//                       activation subarray (bit-serial, then position reset);
//   OP_WWRITE           host write of one weight word;
//   OP_ADD              mat adder: ADD0 adds SAR0+SAR1 or ADD1 adds SAR2+SAR3
//                       (sar_a[1] picks the pair), sum into subarray sar_d;
//   OP_SUB              as OP_ADD with the second operand negated (even
//                       minus odd subarray): max-pooling comparison, batch-
//                       normalisation mean subtraction;
//   OP_BOOTH            weight (weight mat `mat`, waddr0) x four activations
//                       (activation mat `mat`, sar_a) through the Booth
//                       multiplier and ADD0 of activation mat `dst_mat`, 2N-bit
//                       products into sar_d;
//   OP_SHIFT            shift-based multiply-add: log weights at waddr0/waddr1
//                       steer the shifting of the pair's two subarrays; the sum
//                       of the two shifted activations, with the SHIFT_D bits
//                       below the activation LSB dropped, goes to sar_d;
//   OP_TREE             stream a word (plus, with tree_b, the same word of the
//                       other half) through the MG adder to the bank tree; with
//                       tree_dst this MG also writes the tree's result.
// A subarray still in its position-reset phase delays an operation that needs
// it (counted by ev_wait) and otherwise resets while other subarrays work
// (ev_hidden), which is how alternating subarrays hide the reset latency.
//
// Interface: `cmd` is accepted when `cmd_valid && cmd_ready`; `done` pulses
// one cycle after the operation's last step, and READ data stays in `rdata`
// from then on. Counted in clock edges from the accepting edge to the edge
// after which `done` is high, with idle subarrays: READ/WRITE L + 3,
// ADD L + 4, BOOTH 4N + 6, SHIFT 7 + (NB - SHIFT_D) + NB + 2*SHIFT_D,
// TREE (as seen from one group) L + 4.
//
// Lint notes: the activation mats' adder sums (`add_z`, used inside each
// mat for write-back) and the adders' shift-count outputs are left open.
// rst_n also disables assertions (SYNCASYNCNET).
module mat_group
  import rm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  mg_cmd_t           cmd,
  input  logic [SEG-1:0]    wdata [TRACKS],
  output logic              done,
  output logic [SEG-1:0]    rdata [TRACKS],
  // bank adder tree
  output logic [TRACKS-1:0] tree_bits,
  output logic              tree_valid,
  output logic              tree_first,
  input  logic [TRACKS-1:0] tree_in,
  input  logic              tree_in_valid,
  // one pulse per mechanism, for statistics
  output logic              ev_booth,
  output logic              ev_shift,
  output logic              ev_add,
  output logic              ev_tree,
  output logic              ev_fc,
  output logic              ev_wait,
  output logic              ev_hidden
);
  localparam int unsigned NAM  = 2 * MATS_HALF;
  localparam int unsigned KW   = 8;
  localparam int unsigned L0   = NB - SHIFT_D;         // counter pre-roll cycles
  localparam int unsigned TSH  = NB + 2 * SHIFT_D;     // shift-and-add cycles
  localparam int unsigned PW   = 2 * NB;               // Booth product bits
  localparam int unsigned SEG_IW = $clog2(SEG);

  // ---------------------------------------------------------------- datapath
  sar_ctl_t          sc   [NAM][SAR_PER_MAT];
  add_ctl_t          ac   [NAM][2];
  logic [TRACKS-1:0] rd   [NAM][SAR_PER_MAT];
  logic [SAR_PER_MAT-1:0] busy [NAM];
  logic [SAR_PER_MAT-1:0] rsting [NAM];
  logic [1:0]        add_v [NAM];
  logic [TRACKS-1:0] ext_bits;
  logic [TRACKS-1:0] lanes;

  logic              wm_re [NAM], wm_we [NAM];
  logic [WADDR_W-1:0] wm_raddr, wm_waddr;
  logic [NB-1:0]     wm_rdata [NAM];
  logic [NB-1:0]     wm_wdata;

  logic              mb_start [2], mb_actv [2], mb_ov [2], mb_of [2], mb_busy [2], mb_step [2];
  logic [TRACKS-1:0] mb_act [2], mb_s0 [2], mb_s1 [2];
  logic [1:0]        mb_load [2], mb_shen [2];
  logic [NB-1:0]     mb_w;
  logic signed [SH_W-1:0] mb_ds;

  for (genvar i = 0; i < NAM; i++) begin : g_mat
    act_mat u_am (
      .clk, .rst_n, .sar_ctl(sc[i]), .add_ctl(ac[i]), .lane_en(lanes),
      .ext_bits, .booth_s0(mb_s0[i / MATS_HALF]), .booth_s1(mb_s1[i / MATS_HALF]),
      .rd(rd[i]), .busy(busy[i]), .resetting(rsting[i]),
      .add_z(), .add_valid(add_v[i]));
    weight_mat u_wm (
      .clk, .re(wm_re[i]), .raddr(wm_raddr), .rdata(wm_rdata[i]),
      .we(wm_we[i]), .waddr(wm_waddr), .wdata(wm_wdata));
  end

  for (genvar h = 0; h < 2; h++) begin : g_mb
    multiplier_block u_mb (
      .clk, .rst_n, .b_start(mb_start[h]), .b_w(mb_w), .b_act_valid(mb_actv[h]),
      .b_act_bits(mb_act[h]), .lane_en(lanes), .b_out_valid(mb_ov[h]),
      .b_out_first(mb_of[h]), .b_s0(mb_s0[h]), .b_s1(mb_s1[h]), .b_busy(mb_busy[h]),
      .sh_load(mb_load[h]), .sh_ds(mb_ds), .sh_step(mb_step[h]), .sh_en(mb_shen[h]));
  end

  // MG adder: sum of one stream from each half on the way to the bank tree
  logic              mga_v, mga_f, mga_vo;
  logic [TRACKS-1:0] mga_a, mga_b, mga_z;
  bit_serial_adder #(.LANES(TRACKS)) u_mg_adder (
    .clk, .rst_n, .valid(mga_v), .first(mga_f), .lane_en(lanes),
    .a(mga_a), .b(mga_b), .cin0('0), .z(mga_z), .valid_o(mga_vo),
    .first_o(tree_first), .n_shift());
  assign tree_valid = mga_vo;
  assign tree_bits  = mga_vo ? mga_z : '0;

  // -------------------------------------------------------------- sequencer
  typedef enum logic [1:0] { S_IDLE, S_WAIT, S_RUN } state_e;
  state_e         state;
  mg_cmd_t        c;
  assign lanes = c.lanes;
  logic [SEG-1:0] wbuf [TRACKS];
  logic [SEG-1:0] rbuf [TRACKS];
  logic [KW-1:0]  k;
  logic [KW-1:0]  wcnt;       // destination bits written
  logic           fin;        // operation ends this cycle
  logic           dst_wr;     // destination write this cycle
  logic           rd_cap;     // READ captures this cycle

  // indices of the mats an operation uses
  logic [2:0] am_a, am_b, am_d;
  logic [1:0] u_pair;
  logic [KW-1:0] len;
  always_comb begin
    am_a   = {c.half, c.mat};
    am_b   = {~c.half, c.mat};
    am_d   = (c.op == OP_TREE)  ? {c.dst_half, c.dst_mat} :
             (c.op == OP_BOOTH) ? {c.half, c.dst_mat} : am_a;
    u_pair = {c.sar_a[1], 1'b0};
    len    = KW'(c.len);
  end

  // The sequencer drives at most five "roles" per cycle: source A, source B
  // (partner subarray of A), source T (same subarray in the other half),
  // destination D and one adder unit X. Each role has one location; the
  // per-subarray controls are then decoded with constant indices, which keeps
  // the control logic small.
  sar_ctl_t   rA, rB, rT, rD;
  add_ctl_t   rX;
  logic [1:0] s_a;            // subarray of role A
  logic [2:0] am_x;           // mat of adder unit X
  logic       u_x;            // adder unit X within its mat
  logic       add_v_x;
  logic       wm_re_r, wm_we_r;
  logic       mb_start_r, mb_actv_r, mb_step_r, mb_ov_r, mb_of_r;
  logic [TRACKS-1:0] mb_act_r;
  logic [1:0] mb_load_r, mb_shen_r;
  always_comb begin
    s_a     = (c.op inside {OP_ADD, OP_SUB, OP_SHIFT}) ? u_pair : c.sar_a;
    am_x    = (c.op == OP_BOOTH) ? am_d : am_a;
    u_x     = (c.op == OP_BOOTH) ? 1'b0 : c.sar_a[1];
    add_v_x = add_v[am_x][u_x];
    mb_ov_r   = mb_ov[c.half];
    mb_of_r   = mb_of[c.half];
    mb_shen_r = mb_shen[c.half];
  end

  always_comb begin
    for (int i = 0; i < NAM; i++) begin
      for (int s = 0; s < SAR_PER_MAT; s++) begin
        logic [$bits(sar_ctl_t)-1:0] v;
        v = '0;
        if (3'(i) == am_a && 2'(s) == s_a)             v |= rA;
        if (3'(i) == am_a && 2'(s) == u_pair + 2'd1)   v |= rB;
        if (3'(i) == am_b && 2'(s) == c.sar_a)         v |= rT;
        if (3'(i) == am_d && 2'(s) == c.sar_d)         v |= rD;
        sc[i][s]       = sar_ctl_t'(v);
        sc[i][s].wmask = lanes;
      end
      for (int u = 0; u < 2; u++) ac[i][u] = (3'(i) == am_x && 1'(u) == u_x) ? rX : '0;
      wm_re[i] = wm_re_r && 3'(i) == am_a;
      wm_we[i] = wm_we_r && 3'(i) == am_a;
    end
    for (int h = 0; h < 2; h++) begin
      logic sel;
      sel = (1'(h) == c.half);
      mb_start[h] = sel && mb_start_r;
      mb_actv[h]  = sel && mb_actv_r;
      mb_act[h]   = sel ? mb_act_r : '0;
      mb_load[h]  = sel ? mb_load_r : '0;
      mb_step[h]  = sel && mb_step_r;
    end
  end

  // subarrays the operation needs, to wait for their position reset
  logic need_busy;
  always_comb begin
    need_busy = 1'b0;
    unique case (c.op)
      OP_WRITE, OP_READ: need_busy = busy[am_a][c.sar_a];
      OP_ADD, OP_SUB, OP_SHIFT:  need_busy = busy[am_a][u_pair] | busy[am_a][u_pair + 2'd1] |
                                     busy[am_a][c.sar_d];
      OP_BOOTH:          need_busy = busy[am_a][c.sar_a] | busy[am_d][c.sar_d] |
                                     mb_busy[c.half];
      OP_TREE:           need_busy = busy[am_a][c.sar_a] | (c.tree_b & busy[am_b][c.sar_a]) |
                                     (c.tree_dst & busy[am_d][c.sar_d]);
      default:           need_busy = 1'b0;
    endcase
  end

  always_comb begin
    // defaults: nothing happens
    rA = '0; rB = '0; rT = '0; rD = '0; rX = '0;
    wm_re_r    = 1'b0;
    wm_we_r    = 1'b0;
    mb_start_r = 1'b0;
    mb_actv_r  = 1'b0;
    mb_act_r   = '0;
    mb_load_r  = '0;
    mb_step_r  = 1'b0;
    mb_w     = wm_rdata[am_a];
    mb_ds    = SH_W'(wm_rdata[am_a]);
    wm_raddr = c.waddr0;
    wm_waddr = c.waddr0;
    wm_wdata = wbuf[0][NB-1:0];
    ext_bits = '0;
    mga_v    = 1'b0;
    mga_f    = 1'b0;
    mga_a    = '0;
    mga_b    = '0;
    fin      = 1'b0;
    dst_wr   = 1'b0;
    rd_cap   = 1'b0;

    if (state == S_RUN) begin
      unique case (c.op)
        OP_WRITE: begin
          if (k == 0) begin
            rA.start = 1'b1;
            rA.addr  = c.addr_a;
          end else begin
            rA.wr    = 1'b1;
            rA.wsel  = WS_EXT;
            rA.shift = 1'b1;
            for (int l = 0; l < TRACKS; l++) ext_bits[l] = wbuf[l][SEG_IW'(k - 1'b1)];
            if (k == len) begin
              rA.stop = 1'b1;
              fin = 1'b1;
            end
          end
        end
        OP_READ: begin
          if (k == 0) begin
            rA.start = 1'b1;
            rA.addr  = c.addr_a;
          end else begin
            rA.shift = 1'b1;
            rd_cap = 1'b1;
            if (k == len) begin
              rA.stop = 1'b1;
              fin = 1'b1;
            end
          end
        end
        OP_WWRITE: begin
          wm_we_r = 1'b1;
          fin = 1'b1;
        end
        OP_ADD, OP_SUB: begin
          if (k == 0) begin
            rA.start        = 1'b1;
            rA.addr         = c.addr_a;
            rB.start = 1'b1;
            rB.addr  = c.addr_b;
            rD.start       = 1'b1;
            rD.addr        = c.addr_d;
          end
          if (k >= 1 && k <= len) begin
            rA.shift        = 1'b1;
            rB.shift = 1'b1;
            rX.valid    = 1'b1;
            rX.first    = (k == 1);
            rX.sub      = (c.op == OP_SUB);
            if (k == len) begin
              rA.stop        = 1'b1;
              rB.stop = 1'b1;
            end
          end
          if (k >= 2 && k <= len + 1) begin
            rD.wr    = 1'b1;
            rD.wsel  = c.sar_a[1] ? WS_ADD1 : WS_ADD0;
            rD.shift = 1'b1;
            if (k == len + 1) begin
              rD.stop = 1'b1;
              fin = 1'b1;
            end
          end
        end
        OP_BOOTH: begin
          if (k == 0) wm_re_r = 1'b1;
          if (k == 1) begin
            mb_start_r         = 1'b1;
            rA.start  = 1'b1;
            rA.addr   = c.addr_a;
            rD.start  = 1'b1;
            rD.addr   = c.addr_d;
          end
          if (k >= 2 && k <= KW'(NB + 1)) begin
            mb_actv_r          = 1'b1;
            mb_act_r           = rd[am_a][c.sar_a];
            rA.shift  = 1'b1;
            rA.stop   = (k == KW'(NB + 1));
          end
          // final accumulation stage in ADD0 of the destination mat
          rX.valid = mb_ov_r;
          rX.first = mb_of_r;
          rX.booth = 1'b1;
          if (add_v_x && k > 1) begin
            dst_wr = 1'b1;
            rD.wr    = 1'b1;
            rD.wsel  = WS_ADD0;
            rD.shift = 1'b1;
            if (wcnt == KW'(PW - 1)) begin
              rD.stop = 1'b1;
              fin = 1'b1;
            end
          end
        end
        OP_SHIFT: begin
          if (k == 0) wm_re_r = 1'b1;
          if (k == 1) begin
            wm_re_r          = 1'b1;
            wm_raddr             = c.waddr1;
            mb_load_r[0]   = 1'b1;
          end
          if (k == 2) begin
            mb_load_r[1]               = 1'b1;
            rA.start           = 1'b1;
            rA.addr            = c.addr_a;
            rA.zero_lead       = 1'b1;
            rB.start    = 1'b1;
            rB.addr     = c.addr_b;
            rB.zero_lead = 1'b1;
            rD.start          = 1'b1;
            rD.addr           = c.addr_d;
          end
          if (k >= 3 && k <= KW'(2 + L0 + TSH)) begin
            mb_step_r               = 1'b1;
            rA.shift        = mb_shen_r[0];
            rB.shift = mb_shen_r[1];
          end
          if (k >= KW'(4 + L0) && k <= KW'(3 + L0 + TSH)) begin
            rX.valid = 1'b1;
            rX.first = (k == KW'(4 + L0));
            if (k == KW'(3 + L0 + TSH)) begin
              rA.stop        = 1'b1;
              rB.stop = 1'b1;
            end
          end
          // bits below the activation LSB (the first SHIFT_D sum bits) are dropped
          if (k >= KW'(5 + L0 + SHIFT_D) && k <= KW'(4 + L0 + TSH)) begin
            rD.wr    = 1'b1;
            rD.wsel  = c.sar_a[1] ? WS_ADD1 : WS_ADD0;
            rD.shift = 1'b1;
            if (k == KW'(4 + L0 + TSH)) begin
              rD.stop = 1'b1;
              fin = 1'b1;
            end
          end
        end
        OP_TREE: begin
          if (k == 0) begin
            rA.start = 1'b1;
            rA.addr  = c.addr_a;
            if (c.tree_b) begin
              rT.start = 1'b1;
              rT.addr  = c.addr_a;
            end
            if (c.tree_dst) begin
              rD.start = 1'b1;
              rD.addr  = c.addr_d;
            end
          end
          if (k >= 1 && k <= len) begin
            rA.shift = 1'b1;
            rA.stop  = (k == len);
            if (c.tree_b) begin
              rT.shift = 1'b1;
              rT.stop  = (k == len);
            end
            mga_v = 1'b1;
            mga_f = (k == 1);
            mga_a = rd[am_a][c.sar_a];
            mga_b = c.tree_b ? rd[am_b][c.sar_a] : '0;
          end
          if (c.tree_dst && tree_in_valid && k > 0) begin
            dst_wr   = 1'b1;
            ext_bits = tree_in;
            rD.wr    = 1'b1;
            rD.wsel  = WS_EXT;
            rD.shift = 1'b1;
            if (wcnt == len - 1'b1) begin
              rD.stop = 1'b1;
              fin = 1'b1;
            end
          end
          if (!c.tree_dst && k == len + 1'b1) fin = 1'b1;
        end
        default: fin = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      done  <= 1'b0;
      c     <= '0;
      k     <= '0;
      wcnt  <= '0;
      for (int l = 0; l < TRACKS; l++) begin
        wbuf[l] <= '0;
        rbuf[l] <= '0;
      end
    end else begin
      done <= (state == S_RUN) && fin;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c     <= cmd;
          wbuf  <= wdata;
          state <= S_WAIT;
          if (cmd.op == OP_READ)
            for (int l = 0; l < TRACKS; l++) rbuf[l] <= '0;
        end
        S_WAIT: if (!need_busy) begin
          state <= S_RUN;
          k     <= '0;
          wcnt  <= '0;
        end
        S_RUN: begin
          k <= k + 1'b1;
          if (dst_wr) wcnt <= wcnt + 1'b1;
          if (rd_cap)
            for (int l = 0; l < TRACKS; l++) rbuf[l][SEG_IW'(k - 1'b1)] <= rd[am_a][c.sar_a][l];
          if (fin) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    logic any_reset;
    any_reset = 1'b0;
    for (int i = 0; i < NAM; i++) any_reset |= |rsting[i];
    cmd_ready = (state == S_IDLE);
    rdata     = rbuf;
    ev_booth  = (state == S_IDLE) && cmd_valid && cmd.op == OP_BOOTH;
    ev_shift  = (state == S_IDLE) && cmd_valid && cmd.op == OP_SHIFT;
    ev_add    = (state == S_IDLE) && cmd_valid && cmd.op inside {OP_ADD, OP_SUB};
    ev_tree   = (state == S_IDLE) && cmd_valid && cmd.op == OP_TREE;
    ev_fc     = (state == S_IDLE) && cmd_valid && $countones(cmd.lanes) == 1 &&
                (cmd.op inside {OP_ADD, OP_SUB, OP_BOOTH, OP_SHIFT});
    ev_wait   = (state == S_WAIT) && need_busy;
    ev_hidden = (state == S_RUN) && any_reset;
  end

  // operand rules of the sequencer
  assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_WAIT && c.op inside {OP_ADD, OP_SUB, OP_SHIFT}) |-> c.sar_d[1] != c.sar_a[1])
    else $error("mat_group: adder destination must lie outside the source pair");
  assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_WAIT && c.op == OP_BOOTH) |-> (am_d != am_a || c.sar_d != c.sar_a))
    else $error("mat_group: Booth destination equals its source");
endmodule
