// rm_bank: top level, one bank of the racetrack-memory CNN accelerator
// (Fig. 17, Fig. 19): 16 mat groups of 128 KB (2 MB) and the bank adder tree
// that sums the MG adders' outputs in four bit-serial levels.
//
// How it works: the host issues one command (rm_pkg::mg_cmd_t, packed into
// `cmd`) to a set of mat groups (`mg_mask`); all selected groups run it in
// lock step, which is the data-parallel way the paper maps output channels
// onto mat groups. `done` pulses when every selected group has finished.
// For OP_TREE each selected group streams its word through its MG adder into
// the bank adder tree; the tree's sum appears on `tree_out` and, if the
// command has tree_dst set, is written back by group `dst_mg` only (which must
// be in the mask). READ data comes from the lowest selected group.
//
// Interface (plain signals): cmd_valid/cmd_ready handshake; wdata/rdata hold
// TRACKS words of SEG bits, word l in bits [l*SEG +: SEG]. Statistics
// counters count accepted commands per kind (Booth, shift, add or subtract,
// tree, single-lane FC), cycles spent waiting for a subarray position reset, and
// cycles in which a position reset ran in the background of an operation.
// Tree latency: 4 adder levels of one cycle each, after the MG adder's cycle.
//
// Paper vs. own choices: the structure and sizes follow Fig. 19/20 (the
// 16 KB/256 KB of Table 8 disagree with the 2 MB bank and are not used);
// the command interface, lock-step broadcast and counters are this design's.
// The multi-bank system and the DRAM are not here. Pooling and batch
// normalisation have no blocks of their own: they run as sequences of these
// operations, with OP_SUB for comparisons and mean subtraction.
//
// Lint note: rst_n also disables assertions (SYNCASYNCNET); sub-module
// warnings are explained in their own headers.
module rm_bank
  import rm_pkg::*;
#(
  parameter int unsigned N_MGS = N_MG,
  localparam int unsigned CMD_W = $bits(mg_cmd_t),
  localparam int unsigned MGW   = $clog2(N_MGS)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   cmd_valid,
  output logic                   cmd_ready,
  input  logic [CMD_W-1:0]       cmd,
  input  logic [N_MGS-1:0]       mg_mask,
  input  logic [MGW-1:0]         dst_mg,
  input  logic [TRACKS*SEG-1:0]  wdata,
  output logic                   done,
  output logic [TRACKS*SEG-1:0]  rdata,
  output logic [TRACKS-1:0]      tree_out,
  output logic                   tree_out_valid,
  output logic                   tree_out_first,
  output logic [31:0]            cnt_booth,
  output logic [31:0]            cnt_shift,
  output logic [31:0]            cnt_add,
  output logic [31:0]            cnt_tree,
  output logic [31:0]            cnt_fc,
  output logic [31:0]            cnt_reset_wait,
  output logic [31:0]            cnt_reset_hidden
);
  mg_cmd_t        cmd_s;
  logic [SEG-1:0] wd [TRACKS];
  assign cmd_s = mg_cmd_t'(cmd);
  always_comb for (int l = 0; l < TRACKS; l++) wd[l] = wdata[l*SEG +: SEG];

  logic [N_MGS-1:0]  ready, mg_done, tv, tf, e_booth, e_shift, e_add, e_tree, e_fc, e_wait, e_hid;
  logic [TRACKS-1:0] tb_bits [N_MGS];
  logic [SEG-1:0]    rd_mg [N_MGS][TRACKS];
  logic [TRACKS-1:0] tsum;
  logic              tsum_v, tsum_f;
  logic [N_MGS-1:0]  pending;
  logic [TRACKS-1:0] lanes_q;
  logic              accept;

  assign cmd_ready = (&ready) && (pending == '0);
  assign accept    = cmd_valid && cmd_ready;

  for (genvar g = 0; g < N_MGS; g++) begin : g_mg
    mg_cmd_t c_g;
    always_comb begin
      c_g          = cmd_s;
      c_g.tree_dst = cmd_s.tree_dst && (MGW'(g) == dst_mg);
    end
    mat_group u_mg (
      .clk, .rst_n, .cmd_valid(accept && mg_mask[g]), .cmd_ready(ready[g]), .cmd(c_g),
      .wdata(wd), .done(mg_done[g]), .rdata(rd_mg[g]),
      .tree_bits(tb_bits[g]), .tree_valid(tv[g]), .tree_first(tf[g]),
      .tree_in(tsum), .tree_in_valid(tsum_v),
      .ev_booth(e_booth[g]), .ev_shift(e_shift[g]), .ev_add(e_add[g]), .ev_tree(e_tree[g]),
      .ev_fc(e_fc[g]), .ev_wait(e_wait[g]), .ev_hidden(e_hid[g]));
  end

  adder_tree #(.N_IN(N_MGS), .LANES(TRACKS)) u_tree (
    .clk, .rst_n, .valid(|tv), .first(|tf), .lane_en(lanes_q), .in(tb_bits),
    .z(tsum), .valid_o(tsum_v), .first_o(tsum_f));
  assign tree_out       = tsum_v ? tsum : '0;
  assign tree_out_valid = tsum_v;
  assign tree_out_first = tsum_f;

  // lowest selected group answers a READ
  logic [MGW-1:0] rsel;
  logic [N_MGS-1:0] mask_q;
  always_comb begin
    rsel = '0;
    for (int g = N_MGS - 1; g >= 0; g--) if (mask_q[g]) rsel = MGW'(g);
    for (int l = 0; l < TRACKS; l++) rdata[l*SEG +: SEG] = rd_mg[rsel][l];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending          <= '0;
      mask_q           <= '0;
      lanes_q          <= '0;
      done             <= 1'b0;
      cnt_booth        <= '0;
      cnt_shift        <= '0;
      cnt_add          <= '0;
      cnt_tree         <= '0;
      cnt_fc           <= '0;
      cnt_reset_wait   <= '0;
      cnt_reset_hidden <= '0;
    end else begin
      done <= (pending != '0) && ((pending & ~mg_done) == '0);
      if (accept) begin
        pending <= mg_mask;
        mask_q  <= mg_mask;
        lanes_q <= cmd_s.lanes;
      end else begin
        pending <= pending & ~mg_done;
      end
      cnt_booth        <= cnt_booth + 32'(|e_booth);
      cnt_shift        <= cnt_shift + 32'(|e_shift);
      cnt_add          <= cnt_add + 32'(|e_add);
      cnt_tree         <= cnt_tree + 32'(|e_tree);
      cnt_fc           <= cnt_fc + 32'(|e_fc);
      cnt_reset_wait   <= cnt_reset_wait + 32'(|e_wait);
      cnt_reset_hidden <= cnt_reset_hidden + 32'(|e_hid);
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n)
      accept |-> (mg_mask != '0))
    else $error("rm_bank: command with an empty group mask");
  assert property (@(posedge clk) disable iff (!rst_n)
      (accept && cmd_s.tree_dst) |-> mg_mask[dst_mg])
    else $error("rm_bank: tree destination group is not selected");
  initial assert (N_MGS == (1 << MGW)) else $fatal(1, "rm_bank: N_MGS must be a power of two");
endmodule
