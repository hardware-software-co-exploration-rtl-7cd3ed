// tb_act_mat: self-checking testbench for act_mat (one activation mat).
// Writes words into subarrays through the external write path, then runs the
// mat's two adder units with their [SAR] inputs (ADD0: SAR0+SAR1 -> SAR2,
// ADD1: SAR2+SAR3 -> SAR0, sums written back through the ADD write path) and
// with the [Booth] input mux selected (sum of two random streams). Checks sum
// values, that each adder output is one cycle behind its inputs, and that two
// subarrays can be in their position-reset phase while others are accessed.
module tb_act_mat;
  import rm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  sar_ctl_t sar_ctl [SAR_PER_MAT];
  add_ctl_t add_ctl [2];
  logic [TRACKS-1:0] lane_en, ext_bits, booth_s0, booth_s1;
  logic [TRACKS-1:0] rd [SAR_PER_MAT], add_z [2];
  logic [SAR_PER_MAT-1:0] busy, resetting;
  logic [1:0] add_valid;
  act_mat dut (.clk, .rst_n, .sar_ctl, .add_ctl, .lane_en, .ext_bits, .booth_s0, .booth_s1,
    .rd, .busy, .resetting, .add_z, .add_valid);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0t: %s", $time, what);
    end
  endtask

  initial begin
    #5000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic idle_ctl();
    for (int s = 0; s < SAR_PER_MAT; s++) begin
      sar_ctl[s] = '0;
      sar_ctl[s].wmask = '1;
    end
    add_ctl[0] = '0;
    add_ctl[1] = '0;
  endtask

  task automatic wait_idle();
    while (busy != '0) @(negedge clk);
  endtask

  task automatic write_word(input int s, input sa_addr_t a, input logic [SEG-1:0] w [TRACKS]);
    wait_idle();
    idle_ctl();
    sar_ctl[s].start = 1; sar_ctl[s].addr = a;
    @(negedge clk);
    for (int i = 0; i < SEG; i++) begin
      idle_ctl();
      sar_ctl[s].wr = 1; sar_ctl[s].shift = 1; sar_ctl[s].wsel = WS_EXT; sar_ctl[s].stop = (i == SEG - 1);
      for (int l = 0; l < TRACKS; l++) ext_bits[l] = w[l][i];
      @(negedge clk);
    end
    idle_ctl();
  endtask

  task automatic read_word(input int s, input sa_addr_t a, output logic [SEG-1:0] w [TRACKS]);
    wait_idle();
    idle_ctl();
    sar_ctl[s].start = 1; sar_ctl[s].addr = a;
    @(negedge clk);
    for (int i = 0; i < SEG; i++) begin
      idle_ctl();
      for (int l = 0; l < TRACKS; l++) w[l][i] = rd[s][l];
      sar_ctl[s].shift = 1; sar_ctl[s].stop = (i == SEG - 1);
      @(negedge clk);
    end
    idle_ctl();
  endtask

  // one adder unit u: SAR 2u + SAR 2u+1 -> SAR d
  task automatic add_op(input int u, input int d, input sa_addr_t a);
    int sa, sb;
    sa = 2 * u; sb = 2 * u + 1;
    wait_idle();
    idle_ctl();
    sar_ctl[sa].start = 1; sar_ctl[sa].addr = a;
    sar_ctl[sb].start = 1; sar_ctl[sb].addr = a;
    sar_ctl[d].start  = 1; sar_ctl[d].addr  = a;
    @(negedge clk);
    for (int k = 1; k <= SEG + 1; k++) begin
      idle_ctl();
      if (k <= SEG) begin
        sar_ctl[sa].shift = 1; sar_ctl[sb].shift = 1;
        sar_ctl[sa].stop = (k == SEG); sar_ctl[sb].stop = (k == SEG);
        add_ctl[u].valid = 1; add_ctl[u].first = (k == 1);
      end
      if (k >= 2) begin
        check(add_valid[u], "adder output one cycle after its inputs");
        sar_ctl[d].wr = 1; sar_ctl[d].shift = 1; sar_ctl[d].wsel = u ? WS_ADD1 : WS_ADD0;
        sar_ctl[d].stop = (k == SEG + 1);
      end
      @(negedge clk);
    end
    idle_ctl();
    check(resetting[sa] && resetting[sb] && resetting[d], "position reset after the add");
  endtask

  initial begin
    logic [SEG-1:0] x [TRACKS], y [TRACKS], r [TRACKS];
    sa_addr_t a;
    idle_ctl();
    lane_en = '1; ext_bits = '0; booth_s0 = '0; booth_s1 = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 16; t++) begin
      int u, d;
      u = t % 2;
      d = u ? 0 : 2;
      a.row = ROW_W'($urandom); a.col = COL_W'($urandom); a.port = PORT_W'($urandom); a.off = '0;
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = SEG'($urandom); y[l] = SEG'($urandom);
      end
      write_word(2 * u, a, x);
      write_word(2 * u + 1, a, y);
      add_op(u, d, a);
      read_word(d, a, r);
      for (int l = 0; l < TRACKS; l++) check(r[l] == SEG'(x[l] + y[l]), $sformatf("ADD%0d lane %0d", u, l));
    end
    // Booth input mux: ADD0 adds the two multiplier-block streams
    wait_idle();
    for (int t = 0; t < 20; t++) begin
      for (int l = 0; l < TRACKS; l++) begin
        x[l] = SEG'($urandom); y[l] = SEG'($urandom);
      end
      for (int i = 0; i <= SEG; i++) begin
        idle_ctl();
        if (i < SEG) begin
          add_ctl[0].valid = 1; add_ctl[0].first = (i == 0); add_ctl[0].booth = 1;
          for (int l = 0; l < TRACKS; l++) begin
            booth_s0[l] = x[l][i];
            booth_s1[l] = y[l][i];
          end
        end
        @(negedge clk);
        if (i >= 0 && i < SEG) begin
          logic [SEG-1:0] sm;
          for (int l = 0; l < TRACKS; l++) begin
            sm = x[l] + y[l];
            check(add_z[0][l] == sm[i], "Booth-mux sum bit");
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
