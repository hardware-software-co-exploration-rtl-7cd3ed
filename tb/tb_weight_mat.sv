// tb_weight_mat: self-checking testbench for weight_mat.
// Random writes and reads against a reference array; checks the one-cycle
// read latency, that rdata holds while re is low, and that a read and a write
// in the same cycle to the same word return the old word.
module tb_weight_mat;
  import rm_pkg::*;
  logic clk = 1'b0;
  int   checks = 0, failures = 0;
  always #5 clk = ~clk;

  logic re, we;
  logic [WADDR_W-1:0] raddr, waddr;
  logic [NB-1:0] rdata, wdata;
  weight_mat dut (.clk, .re, .raddr, .rdata, .we, .waddr, .wdata);

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

  logic [NB-1:0] ref_mem [WM_WORDS];
  initial begin
    logic [NB-1:0] expect_q;
    logic pend;
    re = 0; we = 0; raddr = '0; waddr = '0; wdata = '0; pend = 0; expect_q = '0;
    // fill the whole mat first, so every word is known
    for (int i = 0; i < WM_WORDS; i++) begin
      @(negedge clk);
      we = 1; waddr = WADDR_W'(i); wdata = NB'($urandom); ref_mem[i] = wdata;
    end
    @(negedge clk);
    // a first read, so rdata is known before it is compared
    we = 0; re = 1; raddr = '0; expect_q = ref_mem[0]; pend = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if (pend) check(rdata == expect_q, "read data one cycle after re");
      else      check(rdata == expect_q, "rdata holds without re");
      re = ($urandom % 2) == 0;
      we = ($urandom % 2) == 0;
      raddr = WADDR_W'($urandom % 64);
      waddr = (i % 8 == 0) ? raddr : WADDR_W'($urandom % 64);
      wdata = NB'($urandom);
      pend = re;
      if (re) expect_q = ref_mem[raddr];
      if (we) ref_mem[waddr] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
