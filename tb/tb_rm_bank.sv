// tb_rm_bank: end-to-end, full-size testbench of the bank (rm_bank with its
// default parameters: 16 mat groups, 2 MB). It runs a small inference-style
// sequence and checks results against integer arithmetic:
//   1. per-group activations and weights are loaded (WRITE / WWRITE with a
//      one-group mask);
//   2. all 16 groups run a Booth multiply in lock step (each product checked
//      by READ, including 41 x 107 = 4387 in group 0);
//   3. the partial products are accumulated inside each group (OP_ADD);
//   4. the groups' sums are reduced over the bank adder tree (OP_TREE with the
//      other half added in each MG) and written back by one group; the result
//      is the sum over 32 words; the tree output stream is checked as well;
//   5. shift-based multiply-adds with log weights run on all groups;
//   6. a fully-connected step uses a single lane (only that lane changes);
//      then a max-pooling comparison (OP_SUB) runs in all groups, and the
//      difference's sign bit must pick the larger activation;
//   7. commands issued back to back on the same subarray wait for the
//      position reset, and resets of other subarrays run hidden.
// Every mechanism is counted (Booth, shift, add, tree, FC, reset wait,
// hidden reset, tree write-back, broadcast to several groups, comparison);
// the test fails if any count is zero. Cycle counts checked (clock edges
// from acceptance to done): BOOTH 4N + 7, ADD of L bits L + 5, SUB L + 5,
// TREE with write-back L + 9 (4 tree levels).
module tb_rm_bank;
  import rm_pkg::*;
  localparam int CMD_W = $bits(mg_cmd_t);
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, tree_out_valid, tree_out_first;
  logic [CMD_W-1:0] cmd;
  logic [N_MG-1:0] mg_mask;
  logic [$clog2(N_MG)-1:0] dst_mg;
  logic [TRACKS*SEG-1:0] wdata, rdata;
  logic [TRACKS-1:0] tree_out;
  logic [31:0] cnt_booth, cnt_shift, cnt_add, cnt_tree, cnt_fc, cnt_reset_wait, cnt_reset_hidden;
  rm_bank dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .mg_mask, .dst_mg, .wdata, .done,
    .rdata, .tree_out, .tree_out_valid, .tree_out_first, .cnt_booth, .cnt_shift, .cnt_add,
    .cnt_tree, .cnt_fc, .cnt_reset_wait, .cnt_reset_hidden);

  int n_writeback = 0, n_broadcast = 0, n_compare = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #50000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // tree output stream capture
  logic [SEG-1:0] tree_cap [TRACKS];
  int tree_bits_seen = 0;
  always @(posedge clk) begin
    if (tree_out_valid) begin
      if (tree_out_first) tree_bits_seen = 0;
      for (int l = 0; l < TRACKS; l++) tree_cap[l][tree_bits_seen % SEG] <= tree_out[l];
      tree_bits_seen++;
    end
  end

  function automatic sa_addr_t ad(int row, int col, int port, int off);
    sa_addr_t a;
    a.row = ROW_W'(row); a.col = COL_W'(col); a.port = PORT_W'(port); a.off = OFF_W'(off);
    return a;
  endfunction

  function automatic mg_cmd_t mk(op_e op, int half, int mat, int len);
    mg_cmd_t c;
    c = '0;
    c.op = op; c.half = 1'(half); c.mat = 2'(mat); c.lanes = '1; c.len = LEN_W'(len);
    return c;
  endfunction

  task automatic issue(input mg_cmd_t c, input logic [N_MG-1:0] mask, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = CMD_W'(c); mg_mask = mask; cmd_valid = 1'b1;
    if ($countones(mask) > 1) n_broadcast++;
    @(negedge clk);
    cmd_valid = 1'b0;
    cycles = 1;
    while (!done && cycles < 1000) begin
      @(negedge clk);
      cycles++;
    end
    check(done, "command finished");
  endtask

  task automatic put(input int g, input int half, input int mat, input int sar, input sa_addr_t a,
                     input int len, input logic [SEG-1:0] w [TRACKS]);
    mg_cmd_t c;
    int cyc;
    c = mk(OP_WRITE, half, mat, len);
    c.sar_a = 2'(sar); c.addr_a = a;
    for (int l = 0; l < TRACKS; l++) wdata[l*SEG +: SEG] = w[l];
    issue(c, N_MG'(1) << g, cyc);
  endtask

  task automatic get(input int g, input int half, input int mat, input int sar, input sa_addr_t a,
                     input int len, output logic [SEG-1:0] w [TRACKS]);
    mg_cmd_t c;
    int cyc;
    c = mk(OP_READ, half, mat, len);
    c.sar_a = 2'(sar); c.addr_a = a;
    issue(c, N_MG'(1) << g, cyc);
    for (int l = 0; l < TRACKS; l++) w[l] = rdata[l*SEG +: SEG];
  endtask

  task automatic wweight(input int g, input int half, input int mat, input int waddr, input logic [NB-1:0] v);
    mg_cmd_t c;
    int cyc;
    c = mk(OP_WWRITE, half, mat, 0);
    c.waddr0 = WADDR_W'(waddr);
    wdata = '0;
    wdata[NB-1:0] = v;
    issue(c, N_MG'(1) << g, cyc);
  endtask

  task automatic settle();
    repeat (2 * DOMAINS) @(negedge clk);
  endtask

  logic signed [NB-1:0] wt [N_MG], act [N_MG][TRACKS], act2 [N_MG][TRACKS];
  logic [SEG-1:0] acc [N_MG][TRACKS], other [N_MG][TRACKS];

  initial begin
    logic [SEG-1:0] v [TRACKS], r [TRACKS];
    mg_cmd_t c;
    int cyc;
    cmd = '0; cmd_valid = 0; mg_mask = '0; dst_mg = '0; wdata = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---- 1. load per-group weights and activations (half 0, mat 1)
    for (int g = 0; g < N_MG; g++) begin
      wt[g] = (g == 0) ? 8'sd41 : NB'($urandom);
      wweight(g, 0, 1, 5, wt[g]);
      for (int l = 0; l < TRACKS; l++) begin
        act[g][l]  = (g == 0 && l == 0) ? 8'sd107 : NB'($urandom);
        act2[g][l] = NB'($urandom);
        if (act[g][l] == -8'sd128) act[g][l] = 8'sd1;
        if (act2[g][l] == -8'sd128) act2[g][l] = 8'sd2;
        v[l] = SEG'(act[g][l]);
      end
      put(g, 0, 1, 0, ad(1, 1, 0, 0), NB, v);
      for (int l = 0; l < TRACKS; l++) v[l] = SEG'(act2[g][l]);
      put(g, 0, 1, 2, ad(1, 1, 0, 0), NB, v);
    end
    settle();

    // ---- 2. Booth multiply in all groups: act * wt -> mat 2, SAR0
    c = mk(OP_BOOTH, 0, 1, 0);
    c.sar_a = 2'd0; c.addr_a = ad(1, 1, 0, 0); c.waddr0 = WADDR_W'(5);
    c.dst_mat = 2'd2; c.sar_d = 2'd0; c.addr_d = ad(0, 0, 0, 0);
    issue(c, '1, cyc);
    check(cyc == 1 + 4 * NB + 6, $sformatf("BOOTH took %0d cycles", cyc));
    // second product act2 * wt -> mat 2, SAR1
    c.sar_a = 2'd2; c.sar_d = 2'd1;
    issue(c, '1, cyc);
    for (int g = 0; g < N_MG; g++) begin
      get(g, 0, 2, 0, ad(0, 0, 0, 0), 2 * NB, r);
      for (int l = 0; l < TRACKS; l++) begin
        logic [SEG-1:0] p;
        p = SEG'(wt[g]) * SEG'(act[g][l]);
        check(r[l] == p, $sformatf("MG%0d Booth %0d x %0d = %0d, got %0d", g, wt[g], act[g][l],
                                   $signed(p), $signed(r[l])));
      end
    end
    settle();

    // ---- 3. accumulate the two products in each group: SAR0 + SAR1 -> SAR3
    c = mk(OP_ADD, 0, 2, SEG);
    c.sar_a = 2'd0; c.sar_d = 2'd3;
    c.addr_a = ad(0, 0, 0, 0); c.addr_b = ad(0, 0, 0, 0); c.addr_d = ad(0, 0, 0, 0);
    issue(c, '1, cyc);
    check(cyc == 1 + SEG + 4, $sformatf("ADD took %0d cycles", cyc));
    for (int g = 0; g < N_MG; g++)
      for (int l = 0; l < TRACKS; l++)
        acc[g][l] = SEG'(wt[g]) * SEG'(act[g][l]) + SEG'(wt[g]) * SEG'(act2[g][l]);
    // the matching word in the other half (half 1, mat 2, SAR3) of each group
    for (int g = 0; g < N_MG; g++) begin
      for (int l = 0; l < TRACKS; l++) begin
        other[g][l] = SEG'($urandom % 4096);
        v[l] = other[g][l];
      end
      put(g, 1, 2, 3, ad(0, 0, 0, 0), SEG, v);
    end
    settle();

    // ---- 4. reduce over the bank adder tree, write back by group 7 (half 0, mat 0, SAR1)
    c = mk(OP_TREE, 0, 2, SEG);
    c.sar_a = 2'd3; c.addr_a = ad(0, 0, 0, 0); c.tree_b = 1'b1;
    c.tree_dst = 1'b1; c.dst_half = 1'b0; c.dst_mat = 2'd0; c.sar_d = 2'd1; c.addr_d = ad(2, 2, 2, 0);
    dst_mg = 4'd7;
    issue(c, '1, cyc);
    check(cyc == 1 + SEG + 8, $sformatf("TREE took %0d cycles", cyc));
    n_writeback++;
    get(7, 0, 0, 1, ad(2, 2, 2, 0), SEG, r);
    for (int l = 0; l < TRACKS; l++) begin
      logic [SEG-1:0] s;
      s = '0;
      for (int g = 0; g < N_MG; g++) s += acc[g][l] + other[g][l];
      check(r[l] == s, $sformatf("tree sum lane %0d: exp %0h got %0h", l, s, r[l]));
      check(tree_cap[l] == s, "tree output stream");
    end
    check(tree_bits_seen == SEG, "tree stream length");
    settle();

    // ---- 5. shift-based multiply-add in all groups (half 1, mat 3, SAR0/SAR1 -> SAR2)
    begin
      int d0, d1;
      logic [NB-1:0] a0 [TRACKS], a1 [TRACKS];
      d0 = -3; d1 = 4;
      for (int g = 0; g < N_MG; g++) begin
        wweight(g, 1, 3, 9, NB'(d0));
        wweight(g, 1, 3, 10, NB'(d1));
      end
      for (int l = 0; l < TRACKS; l++) begin
        a0[l] = NB'($urandom); a1[l] = NB'($urandom);
        v[l] = SEG'(a0[l]);
      end
      c = mk(OP_WRITE, 1, 3, NB);
      c.sar_a = 2'd0; c.addr_a = ad(3, 0, 1, 1);
      for (int l = 0; l < TRACKS; l++) wdata[l*SEG +: SEG] = v[l];
      issue(c, '1, cyc);
      c.sar_a = 2'd1;
      for (int l = 0; l < TRACKS; l++) wdata[l*SEG +: SEG] = SEG'(a1[l]);
      issue(c, '1, cyc);
      settle();
      c = mk(OP_SHIFT, 1, 3, 0);
      c.sar_a = 2'd0; c.sar_d = 2'd2; c.waddr0 = WADDR_W'(9); c.waddr1 = WADDR_W'(10);
      c.addr_a = ad(3, 0, 1, 1); c.addr_b = ad(3, 0, 1, 1); c.addr_d = ad(0, 1, 0, 0);
      issue(c, '1, cyc);
      for (int g = 0; g < N_MG; g += 5) begin
        get(g, 1, 3, 2, ad(0, 1, 0, 0), NB + SHIFT_D, r);
        for (int l = 0; l < TRACKS; l++) begin
          logic [NB+2*SHIFT_D-1:0] full;
          full = ((NB+2*SHIFT_D)'($signed(a0[l])) << (d0 + SHIFT_D)) +
                 ((NB+2*SHIFT_D)'($signed(a1[l])) << (d1 + SHIFT_D));
          check(r[l][NB+SHIFT_D-1:0] == full[NB+2*SHIFT_D-1:SHIFT_D], $sformatf("MG%0d shift-add lane %0d", g, l));
        end
      end
    end

    // ---- 6. fully-connected step: one lane of a Booth multiply
    begin
      logic [SEG-1:0] prev_r [TRACKS];
      settle();
      get(3, 0, 3, 2, ad(0, 0, 0, 0), 2 * NB, prev_r);
      c = mk(OP_BOOTH, 0, 1, 0);
      c.sar_a = 2'd0; c.addr_a = ad(1, 1, 0, 0); c.waddr0 = WADDR_W'(5);
      c.dst_mat = 2'd3; c.sar_d = 2'd2; c.addr_d = ad(0, 0, 0, 0); c.lanes = 4'b0010;
      issue(c, N_MG'(1) << 3, cyc);
      get(3, 0, 3, 2, ad(0, 0, 0, 0), 2 * NB, r);
      for (int l = 0; l < TRACKS; l++)
        if (l == 1) check(r[l] == SEG'(SEG'(wt[3]) * SEG'(act[3][l])), "FC lane product");
        else        check(r[l] == prev_r[l], "FC leaves other lanes");
    end

    // ---- 6b. max-pooling comparison in all groups: p - q with the negating
    // adder (half 1, mat 0, SAR2 - SAR3 -> SAR0); the sign bit picks the maximum
    begin
      logic [NB-1:0] pa [N_MG][TRACKS], qa [N_MG][TRACKS];
      settle();
      for (int g = 0; g < N_MG; g++) begin
        for (int l = 0; l < TRACKS; l++) begin
          pa[g][l] = NB'($urandom_range(0, 127)); qa[g][l] = NB'($urandom_range(0, 127));
          v[l] = SEG'(pa[g][l]);
        end
        put(g, 1, 0, 2, ad(4, 3, 2, 0), NB, v);
        for (int l = 0; l < TRACKS; l++) v[l] = SEG'(qa[g][l]);
        put(g, 1, 0, 3, ad(4, 3, 2, 0), NB, v);
      end
      settle();
      c = mk(OP_SUB, 1, 0, NB);
      c.sar_a = 2'd2; c.sar_d = 2'd0;
      c.addr_a = ad(4, 3, 2, 0); c.addr_b = ad(4, 3, 2, 0); c.addr_d = ad(5, 0, 0, 0);
      issue(c, '1, cyc);
      check(cyc == 1 + NB + 4, $sformatf("SUB took %0d cycles", cyc));
      n_compare++;
      for (int g = 0; g < N_MG; g += 3) begin
        get(g, 1, 0, 0, ad(5, 0, 0, 0), NB, r);
        for (int l = 0; l < TRACKS; l++) begin
          logic [NB-1:0] dq;
          dq = pa[g][l] - qa[g][l];
          check(r[l][NB-1:0] == dq, $sformatf("MG%0d compare lane %0d", g, l));
          check(r[l][NB-1] == (pa[g][l] < qa[g][l]), $sformatf("MG%0d max select lane %0d", g, l));
        end
      end
    end

    // ---- 7. back-to-back accesses of one subarray wait for its position reset
    begin
      int w0;
      settle();
      w0 = cnt_reset_wait;
      get(0, 0, 1, 0, ad(1, 1, 0, 0), SEG, r);
      get(0, 0, 1, 0, ad(1, 1, 0, 0), SEG, r);
      check(cnt_reset_wait > w0, "second access waited for the reset");
    end

    @(negedge clk);
    $display("mechanisms: booth=%0d shift=%0d add=%0d tree=%0d fc=%0d reset_wait=%0d reset_hidden=%0d writeback=%0d broadcast=%0d compare=%0d",
             cnt_booth, cnt_shift, cnt_add, cnt_tree, cnt_fc, cnt_reset_wait, cnt_reset_hidden,
             n_writeback, n_broadcast, n_compare);
    check(cnt_booth > 0, "Booth multiply happened");
    check(cnt_shift > 0, "shift-based multiply happened");
    check(cnt_add > 0, "in-mat addition happened");
    check(cnt_tree > 0, "bank tree reduction happened");
    check(cnt_fc > 0, "single-lane FC operation happened");
    check(cnt_reset_wait > 0, "a position-reset stall happened");
    check(cnt_reset_hidden > 0, "a hidden position reset happened");
    check(n_writeback > 0, "tree write-back happened");
    check(n_broadcast > 0, "broadcast to several groups happened");
    check(n_compare > 0, "max-pooling comparison (subtraction) happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
