// tb_rt_subarray: self-checking testbench for rt_subarray.
// Writes random words of 1..16 bits on the four tracks of random MUs, ports
// and offsets (some with a partial track mask), reads them back and compares
// with a reference copy. Checks the access protocol timing: read data valid
// the cycle after `start`, one bit per shift, and a position-reset phase of
// exactly as many cycles as the access shifted (busy/resetting high for that
// long). Also checks a zero-lead read (a 0 before the first shift) and reads
// in which shifting is withheld for some cycles (the bit stays under the port).
module tb_rt_subarray;
  import rm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  sar_ctl_t ctl;
  logic [TRACKS-1:0] wdata, rd;
  logic busy, resetting;
  rt_subarray dut (.clk, .rst_n, .ctl, .wdata, .rd, .busy, .resetting);

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

  // reference: bits of the words by (MU, port, offset) domain index
  logic [TRACKS-1:0] ref_mem [SA_ROWS*SA_COLS*DOMAINS];
  bit                known   [SA_ROWS*SA_COLS*DOMAINS];

  function automatic int dom(sa_addr_t a, int i);
    return (int'(a.row) * SA_COLS + int'(a.col)) * DOMAINS + int'(a.port) * SEG + int'(a.off) + i;
  endfunction

  task automatic wait_reset(input int shifts);
    int n;
    n = 0;
    while (resetting) begin
      n++;
      @(negedge clk);
    end
    check(n == shifts, $sformatf("position reset took %0d cycles, expected %0d", n, shifts));
    check(!busy, "idle after the position reset");
  endtask

  task automatic do_write(input sa_addr_t a, input int L, input logic [TRACKS-1:0] mask);
    @(negedge clk);
    ctl = '0; ctl.start = 1'b1; ctl.addr = a;
    @(negedge clk);
    ctl = '0;
    check(busy && !resetting, "access phase after start");
    for (int i = 0; i < L; i++) begin
      ctl.wr = 1'b1; ctl.shift = 1'b1; ctl.wmask = mask; ctl.stop = (i == L - 1);
      wdata = 4'($urandom);
      for (int t = 0; t < TRACKS; t++)
        if (mask[t]) ref_mem[dom(a, i)][t] = wdata[t];
      if (mask == '1) known[dom(a, i)] = 1'b1;
      @(negedge clk);
    end
    ctl = '0;
    wait_reset(L);
  endtask

  task automatic do_read(input sa_addr_t a, input int L, input bit zl, input bit stalls);
    int i, shifts;
    @(negedge clk);
    ctl = '0; ctl.start = 1'b1; ctl.addr = a; ctl.zero_lead = zl;
    @(negedge clk);
    ctl = '0;
    if (zl) begin
      check(rd == '0, "zero-lead read shows the separator 0");
      ctl.shift = 1'b1;
      @(negedge clk);
      ctl = '0;
    end
    i = 0; shifts = int'(zl);
    while (i < L) begin
      if (known[dom(a, i)]) check(rd == ref_mem[dom(a, i)], $sformatf("read bit %0d", i));
      ctl.shift = !(stalls && ($urandom % 3) == 0);
      ctl.stop  = (i == L - 1) && ctl.shift;
      if (ctl.shift) begin
        i++;
        shifts++;
      end
      @(negedge clk);
      ctl = '0;
    end
    // zero-lead reads end one domain short of the word: the port started one early
    wait_reset(shifts);
  endtask

  initial begin
    for (int i = 0; i < SA_ROWS*SA_COLS*DOMAINS; i++) known[i] = 1'b0;
    ctl = '0; wdata = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!busy && !resetting && rd == '0, "idle after reset");
    for (int r = 0; r < 150; r++) begin
      sa_addr_t a;
      int L;
      L = 1 + int'($urandom % SEG);
      a.row  = ROW_W'($urandom);
      a.col  = COL_W'($urandom);
      a.port = PORT_W'($urandom);
      a.off  = OFF_W'($urandom % (SEG - L + 1));
      do_write(a, L, (r % 4 == 3) ? 4'($urandom) : '1);
      do_read(a, L, 1'b0, r % 2 == 1);
      if (a.off > 0) begin
        // zero-lead read starting one domain earlier sees the separator first
        a.off = a.off - 1'b1;
        @(negedge clk);
        ctl = '0; ctl.start = 1'b1; ctl.addr = a; ctl.addr.off = a.off + 1'b1; ctl.zero_lead = 1'b1;
        @(negedge clk);
        ctl = '0;
        check(rd == '0, "zero-lead separator");
        ctl.shift = 1'b1;
        @(negedge clk);
        ctl = '0;
        a.off = a.off + 1'b1;
        if (known[dom(a, 0)]) check(rd == ref_mem[dom(a, 0)], "first bit after the separator");
        ctl.stop = 1'b1;
        @(negedge clk);
        ctl = '0;
        wait_reset(1);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
