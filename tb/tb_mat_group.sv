// tb_mat_group: self-checking testbench for mat_group (one MG and its
// sequencer). Runs every operation and checks data and cycle counts:
//   WRITE/READ round trip of 4 words per subarray (READ of L bits: done L+3
//     clock edges after the accepting edge);
//   OP_ADD of two words into a third subarray, value and L+4 edges;
//   OP_SUB (negated second operand), full words and 8-bit max-pooling
//     comparisons, value, sign and L+4 edges;
//   OP_BOOTH of a weight and four activations, 16-bit products including the
//     Fig. 7 example 41 x 107 = 4387, in 4N+6 edges;
//   OP_SHIFT of two signed 8-bit activations with log weights d0, d1, checking
//     floor((a0*2^(d0+7) + a1*2^(d1+7)) / 2^7) mod 2^15 (a track that has
//     brought its MSB under the port keeps it there: sign extension), in
//     (NB-D)+(NB+2D)+7 edges;
//   OP_TREE with the other half's word added, fed back to tree_in so the MG
//     writes the tree result (a one-input tree), checked by READ;
//   a single-lane (FC) operation that must leave the other lanes untouched;
//   back-to-back commands on one subarray, which must wait for its position
//     reset (ev_wait), and reset phases hidden under other work (ev_hidden).
module tb_mat_group;
  import rm_pkg::*;
  localparam int L0 = NB - SHIFT_D, TSH = NB + 2 * SHIFT_D;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, done, tree_valid, tree_first, tree_in_valid;
  mg_cmd_t cmd;
  logic [SEG-1:0] wdata [TRACKS], rdata [TRACKS];
  logic [TRACKS-1:0] tree_bits, tree_in;
  logic ev_booth, ev_shift, ev_add, ev_tree, ev_fc, ev_wait, ev_hidden;
  mat_group dut (.clk, .rst_n, .cmd_valid, .cmd_ready, .cmd, .wdata, .done, .rdata,
    .tree_bits, .tree_valid, .tree_first, .tree_in, .tree_in_valid,
    .ev_booth, .ev_shift, .ev_add, .ev_tree, .ev_fc, .ev_wait, .ev_hidden);
  // one-input "bank tree": the MG adder output goes straight back
  assign tree_in       = tree_bits;
  assign tree_in_valid = tree_valid;

  int n_wait = 0, n_hidden = 0;
  always @(posedge clk) begin
    n_wait   += int'(ev_wait);
    n_hidden += int'(ev_hidden);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #20000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // issue one command, return the cycles from acceptance to done
  task automatic issue(input mg_cmd_t c, output int cycles);
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
    cmd = c; cmd_valid = 1'b1;
    @(negedge clk);
    cmd_valid = 1'b0;
    cycles = 1;
    while (!done && cycles < 500) begin
      @(negedge clk);
      cycles++;
    end
    check(done, "operation finished");
  endtask

  function automatic sa_addr_t ad(int row, int col, int port, int off);
    sa_addr_t a;
    a.row = ROW_W'(row); a.col = COL_W'(col); a.port = PORT_W'(port); a.off = OFF_W'(off);
    return a;
  endfunction

  function automatic mg_cmd_t base_cmd(op_e op, int half, int mat);
    mg_cmd_t c;
    c = '0;
    c.op = op; c.half = 1'(half); c.mat = 2'(mat); c.lanes = '1; c.len = LEN_W'(SEG);
    return c;
  endfunction

  task automatic wr_words(input int half, input int mat, input int sar, input sa_addr_t a,
                          input int len, input logic [SEG-1:0] w [TRACKS]);
    mg_cmd_t c;
    int cyc;
    c = base_cmd(OP_WRITE, half, mat);
    c.sar_a = 2'(sar); c.addr_a = a; c.len = LEN_W'(len);
    wdata = w;
    issue(c, cyc);
  endtask

  task automatic rd_words(input int half, input int mat, input int sar, input sa_addr_t a,
                          input int len, output logic [SEG-1:0] w [TRACKS], output int cyc);
    mg_cmd_t c;
    c = base_cmd(OP_READ, half, mat);
    c.sar_a = 2'(sar); c.addr_a = a; c.len = LEN_W'(len);
    issue(c, cyc);
    w = rdata;
  endtask

  task automatic settle();
    repeat (2 * DOMAINS) @(negedge clk);
  endtask

  logic [SEG-1:0] x [TRACKS], y [TRACKS], r [TRACKS];
  initial begin
    int cyc, w0;
    cmd = '0; cmd_valid = 0;
    for (int l = 0; l < TRACKS; l++) wdata[l] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // ---- WRITE / READ round trip in every half, mat and subarray
    for (int h = 0; h < 2; h++)
      for (int m = 0; m < MATS_HALF; m++)
        for (int s = 0; s < SAR_PER_MAT; s++) begin
          sa_addr_t a;
          a = ad($urandom % SA_ROWS, $urandom % SA_COLS, $urandom % PORTS, 0);
          for (int l = 0; l < TRACKS; l++) x[l] = SEG'($urandom);
          wr_words(h, m, s, a, SEG, x);
          rd_words(h, m, s, a, SEG, r, cyc);
          for (int l = 0; l < TRACKS; l++) check(r[l] == x[l], $sformatf("read back %0d/%0d/%0d lane %0d: %h vs %h", h, m, s, l, r[l], x[l]));
        end
    settle();
    rd_words(1, 3, 2, ad(0, 0, 0, 0), 8, r, cyc);
    check(cyc == 1 + 8 + 2, $sformatf("READ of 8 bits took %0d cycles", cyc));

    // ---- OP_ADD: SAR0 + SAR1 -> SAR2 and SAR2 + SAR3 -> SAR0
    for (int u = 0; u < 2; u++) begin
      mg_cmd_t c;
      logic [SEG-1:0] sum;
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = SEG'($urandom);
        y[l] = SEG'($urandom);
      end
      wr_words(0, 1, 2 * u, ad(3, 1, 2, 0), SEG, x);
      wr_words(0, 1, 2 * u + 1, ad(5, 2, 1, 0), SEG, y);
      settle();
      c = base_cmd(OP_ADD, 0, 1);
      c.sar_a = 2'(2 * u); c.sar_d = 2'(2 - 2 * u);
      c.addr_a = ad(3, 1, 2, 0); c.addr_b = ad(5, 2, 1, 0); c.addr_d = ad(7, 3, 3, 0);
      issue(c, cyc);
      check(cyc == 1 + SEG + 3, $sformatf("ADD of %0d bits took %0d cycles", SEG, cyc));
      rd_words(0, 1, 2 - 2 * u, ad(7, 3, 3, 0), SEG, r, cyc);
      for (int l = 0; l < TRACKS; l++) begin
        sum = x[l] + y[l];
        check(r[l] == sum, $sformatf("ADD lane %0d: %0h + %0h = %0h, got %0h", l, x[l], y[l], sum, r[l]));
      end
    end

    // ---- OP_SUB: SAR0 - SAR1 -> SAR3 and SAR2 - SAR3 -> SAR1; the 8-bit case
    // is the max-pooling comparison of two non-negative activations, whose
    // difference's sign bit tells which one is larger
    for (int t = 0; t < 6; t++) begin
      mg_cmd_t c;
      logic [SEG-1:0] dif;
      int u, n;
      u = t % 2; n = (t < 2) ? SEG : NB;
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = (n == NB) ? SEG'($urandom_range(0, 127)) : SEG'($urandom);
        y[l] = (n == NB) ? SEG'($urandom_range(0, 127)) : SEG'($urandom);
        if (t == 2 && l == 0) y[l] = x[l];
      end
      wr_words(1, 2, 2 * u, ad(4, 0, 3, 0), SEG, x);
      wr_words(1, 2, 2 * u + 1, ad(6, 1, 0, 0), SEG, y);
      settle();
      c = base_cmd(OP_SUB, 1, 2);
      c.sar_a = 2'(2 * u); c.sar_d = 2'(3 - 2 * u); c.len = LEN_W'(n);
      c.addr_a = ad(4, 0, 3, 0); c.addr_b = ad(6, 1, 0, 0); c.addr_d = ad(8, 2, 2, 0);
      issue(c, cyc);
      check(cyc == 1 + n + 3, $sformatf("SUB of %0d bits took %0d cycles", n, cyc));
      rd_words(1, 2, 3 - 2 * u, ad(8, 2, 2, 0), n, r, cyc);
      for (int l = 0; l < TRACKS; l++) begin
        dif = x[l] - y[l];
        if (n == NB) begin
          check(r[l][NB-1] == (x[l] < y[l]), $sformatf("SUB sign lane %0d: %0d vs %0d", l, x[l], y[l]));
        end
        if (n == NB) check(r[l][NB-1:0] == dif[NB-1:0], $sformatf("SUB lane %0d: %0h - %0h = %0h, got %0h", l, x[l], y[l], dif, r[l]));
        else check(r[l] == dif, $sformatf("SUB lane %0d: %0h - %0h = %0h, got %0h", l, x[l], y[l], dif, r[l]));
      end
    end

    // ---- OP_BOOTH
    for (int t = 0; t < 12; t++) begin
      mg_cmd_t c;
      logic signed [NB-1:0] w, a [TRACKS];
      int h, m, dm;
      h = t % 2; m = (t / 2) % 4; dm = (m + 1 + t % 3) % 4;
      w = (t == 0) ? 8'sd41 : NB'($urandom);
      for (int l = 0; l < TRACKS; l++) begin
        a[l] = (t == 0 && l == 0) ? 8'sd107 : NB'($urandom);
        if (a[l] == -8'sd128) a[l] = -8'sd3;
        x[l] = SEG'(a[l]);
      end
      c = base_cmd(OP_WWRITE, h, m);
      c.waddr0 = WADDR_W'(100 + t);
      wdata[0] = SEG'(w);
      issue(c, cyc);
      wr_words(h, m, 1, ad(2, 0, 1, 0), NB, x);
      settle();
      c = base_cmd(OP_BOOTH, h, m);
      c.sar_a = 2'd1; c.addr_a = ad(2, 0, 1, 0); c.waddr0 = WADDR_W'(100 + t);
      c.dst_mat = 2'(dm); c.sar_d = 2'd3; c.addr_d = ad(9, 1, 0, 0);
      issue(c, cyc);
      check(cyc == 1 + 4 * NB + 5, $sformatf("BOOTH took %0d cycles", cyc));
      rd_words(h, dm, 3, ad(9, 1, 0, 0), 2 * NB, r, cyc);
      for (int l = 0; l < TRACKS; l++) begin
        logic [2*NB-1:0] p;
        p = (2*NB)'(w) * (2*NB)'(a[l]);
        check(r[l] == p, $sformatf("BOOTH %0d x %0d = %0d, got %0d", w, a[l], $signed(p), $signed(r[l])));
      end
    end

    // ---- OP_SHIFT
    for (int t = 0; t < 20; t++) begin
      mg_cmd_t c;
      int d0, d1;
      logic [NB-1:0] a0 [TRACKS], a1 [TRACKS];
      d0 = (t == 0) ? -SHIFT_D : (t == 1) ? SHIFT_D : int'($urandom % 15) - 7;
      d1 = (t == 0) ? SHIFT_D : (t == 1) ? -SHIFT_D : int'($urandom % 15) - 7;
      for (int l = 0; l < TRACKS; l++) begin
        a0[l] = NB'($urandom); a1[l] = NB'($urandom);
        x[l] = SEG'(a0[l]); y[l] = SEG'(a1[l]);
      end
      c = base_cmd(OP_WWRITE, 1, 2); c.waddr0 = WADDR_W'(7); wdata[0] = SEG'(d0); issue(c, cyc);
      c = base_cmd(OP_WWRITE, 1, 2); c.waddr0 = WADDR_W'(8); wdata[0] = SEG'(d1); issue(c, cyc);
      // operands sit one domain after the separator position (offset 1)
      wr_words(1, 2, 2, ad(4, 2, 0, 1), NB, x);
      wr_words(1, 2, 3, ad(6, 1, 2, 1), NB, y);
      settle();
      c = base_cmd(OP_SHIFT, 1, 2);
      c.sar_a = 2'd2; c.sar_d = 2'd0; c.waddr0 = WADDR_W'(7); c.waddr1 = WADDR_W'(8);
      c.addr_a = ad(4, 2, 0, 1); c.addr_b = ad(6, 1, 2, 1); c.addr_d = ad(1, 1, 1, 0);
      issue(c, cyc);
      check(cyc == 1 + 6 + L0 + TSH, $sformatf("SHIFT took %0d cycles", cyc));
      rd_words(1, 2, 0, ad(1, 1, 1, 0), NB + SHIFT_D, r, cyc);
      for (int l = 0; l < TRACKS; l++) begin
        logic [TSH-1:0] full;
        logic [NB+SHIFT_D-1:0] e;
        full = (TSH'($signed(a0[l])) << (d0 + SHIFT_D)) + (TSH'($signed(a1[l])) << (d1 + SHIFT_D));
        e = full[TSH-1:SHIFT_D];
        check(r[l][NB+SHIFT_D-1:0] == e,
              $sformatf("SHIFT %0d<<%0d + %0d<<%0d: exp %0h got %0h", a0[l], d0, a1[l], d1, e, r[l]));
      end
    end

    // ---- OP_TREE with write-back of the (one-input) tree result
    begin
      mg_cmd_t c;
      int tv;
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = SEG'($urandom); y[l] = SEG'($urandom);
      end
      wr_words(0, 3, 1, ad(8, 0, 3, 0), SEG, x);
      wr_words(1, 3, 1, ad(8, 0, 3, 0), SEG, y);
      settle();
      c = base_cmd(OP_TREE, 0, 3);
      c.sar_a = 2'd1; c.addr_a = ad(8, 0, 3, 0); c.tree_b = 1'b1;
      c.tree_dst = 1'b1; c.dst_half = 1'b1; c.dst_mat = 2'd0; c.sar_d = 2'd2; c.addr_d = ad(0, 3, 1, 0);
      issue(c, cyc);
      check(cyc == 1 + SEG + 3, $sformatf("TREE took %0d cycles", cyc));
      rd_words(1, 0, 2, ad(0, 3, 1, 0), SEG, r, cyc);
      for (int l = 0; l < TRACKS; l++) check(r[l] == SEG'(x[l] + y[l]), "TREE sum written back");
    end

    // ---- single-lane (FC) ADD: only lane 2 changes
    begin
      mg_cmd_t c;
      logic [SEG-1:0] old [TRACKS], z [TRACKS];
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = SEG'($urandom); y[l] = SEG'($urandom); old[l] = SEG'($urandom);
      end
      wr_words(0, 0, 0, ad(1, 0, 0, 0), SEG, x);
      wr_words(0, 0, 1, ad(1, 0, 0, 0), SEG, y);
      wr_words(0, 0, 3, ad(1, 0, 0, 0), SEG, old);
      settle();
      c = base_cmd(OP_ADD, 0, 0);
      c.sar_a = 2'd0; c.sar_d = 2'd3; c.lanes = 4'b0100;
      c.addr_a = ad(1, 0, 0, 0); c.addr_b = ad(1, 0, 0, 0); c.addr_d = ad(1, 0, 0, 0);
      issue(c, cyc);
      rd_words(0, 0, 3, ad(1, 0, 0, 0), SEG, z, cyc);
      for (int l = 0; l < TRACKS; l++)
        check(z[l] == ((l == 2) ? SEG'(x[l] + y[l]) : old[l]), $sformatf("FC lane %0d", l));
    end

    // ---- position reset: an immediate second access to the same subarray
    // waits; an access to another subarray proceeds while the first resets
    begin
      int wait0, hid0;
      settle();
      wait0 = n_wait; hid0 = n_hidden;
      rd_words(0, 2, 0, ad(0, 0, 0, 0), SEG, r, cyc);
      rd_words(0, 2, 1, ad(0, 0, 0, 0), SEG, r, cyc);     // other subarray: no wait
      check(cyc == 1 + SEG + 2, "no wait on another subarray");
      check(n_wait == wait0, "no wait counted");
      check(n_hidden > hid0, "position reset hidden under the second read");
      // same subarray: its SEG-cycle position reset began two cycles before
      // the new command could be seen (done pulse, then the issue cycle)
      rd_words(0, 2, 1, ad(0, 0, 0, 0), SEG, r, cyc);
      check(cyc == 1 + (SEG - 2) + SEG + 2, $sformatf("read after reset wait took %0d cycles", cyc));
      check(n_wait - wait0 == SEG - 2, $sformatf("waited %0d cycles", n_wait - wait0));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
