// rt_subarray: a subarray of racetrack-memory Macro Units (MU), modelled at the
// level of domains, access ports and shift operations.
//
// An MU (Sec. 2.1, Table 7) holds TRACKS racetracks of DOMAINS domains; each
// track has PORTS access ports, each serving DOMAINS/PORTS domains, and the
// four tracks of an MU are always shifted together, so one access reads or
// writes one bit on every track: four words are accessed in parallel, bit
// serially (Fig. 17). The subarray holds ROWS x COLS MUs and accesses one MU at
// a time. An access has two phases:
//   access phase         - each `shift` moves the selected MU by one domain,
//                          bringing the next bit of the words under the port;
//   position-reset phase - after `stop`, the MU is shifted back one domain per
//                          cycle until its words are home again (as many cycles
//                          as it was shifted); `busy` stays high meanwhile.
// Shifting may be withheld in some cycles: the shift-based multiplier uses this
// to delay a track and to keep its MSB under the port (sign extension).
//
// The data array stands for the domains of all MUs; rather than moving the
// array, the model keeps the shift position `pos` of the accessed MU, which is
// equivalent because only that MU moves. With `zero_lead` the access starts
// with the separator 0 domain (Fig. 12) under the port: the port reads 0 until
// the first shift. The separator is not stored in the array (this design's
// simplification). Sensing, drivers and decoders are abstracted away.
//
// Timing: `start` in cycle t, then from cycle t+1 `rd` shows the bits under the
// port; `wr` writes them at the clock edge; `shift` advances the position at
// the same edge (write, then shift). `stop` ends the access at the edge; the
// position reset then takes `pos` cycles. Memory contents are not reset
// (non-volatile).
//
// Lint notes: ctl.wsel (ctl[2:1]) selects the write data in the activation
// mat, one level up, and is not used here. rst_n both resets flops and disables
// the assertions (`disable iff`), which verilator reports as SYNCASYNCNET.
module rt_subarray
  import rm_pkg::*;
#(
  parameter int unsigned ROWS    = SA_ROWS,
  parameter int unsigned COLS    = SA_COLS,
  parameter int unsigned NTRK    = TRACKS,
  parameter int unsigned NDOM    = DOMAINS,
  parameter int unsigned NPORT   = PORTS
) (
  input  logic            clk,
  input  logic            rst_n,
  input  sar_ctl_t        ctl,
  input  logic [NTRK-1:0] wdata,
  output logic [NTRK-1:0] rd,
  output logic            busy,
  output logic            resetting
);
  localparam int unsigned NSEG  = NDOM / NPORT;
  localparam int unsigned DEPTH = ROWS * COLS * NDOM;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned PW    = $clog2(NDOM) + 1;

  typedef enum logic [1:0] { S_IDLE, S_ACCESS, S_RESET } state_e;
  state_e         state;
  logic [AW-1:0]  base;
  logic [PW-1:0]  pos;
  logic           zl;

  logic [NTRK-1:0] mem [DEPTH];

  logic [AW-1:0] ridx, widx;
  always_comb begin
    widx = base + AW'(pos);
    ridx = base + AW'(pos) - AW'(zl);
    rd   = (state == S_ACCESS && !(zl && pos == '0)) ? mem[ridx] : '0;
    busy      = (state != S_IDLE);
    resetting = (state == S_RESET);
  end

  // base domain of a word: MU index, then port segment, then offset
  function automatic logic [AW-1:0] word_base(sa_addr_t a);
    logic [AW-1:0] mu;
    mu = AW'(a.row) * AW'(COLS) + AW'(a.col);
    return mu * AW'(NDOM) + AW'(a.port) * AW'(NSEG) + AW'(a.off);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      base  <= '0;
      pos   <= '0;
      zl    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (ctl.start) begin
          state <= S_ACCESS;
          base  <= word_base(ctl.addr);
          pos   <= '0;
          zl    <= ctl.zero_lead;
        end
        S_ACCESS: begin
          logic [PW-1:0] p;
          p = ctl.shift ? pos + 1'b1 : pos;
          pos <= p;
          if (ctl.stop) state <= (p == '0) ? S_IDLE : S_RESET;
        end
        S_RESET: begin
          pos <= pos - 1'b1;
          if (pos == PW'(1)) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the write port: one bit per track at the domain under the port
  always_ff @(posedge clk) begin
    if (state == S_ACCESS && ctl.wr) begin
      for (int t = 0; t < NTRK; t++)
        if (ctl.wmask[t]) mem[widx][t] <= wdata[t];
    end
  end

  // a new access may only start when the MU is home (Sec. 4.1.1)
  assert property (@(posedge clk) disable iff (!rst_n) ctl.start |-> state == S_IDLE)
    else $error("rt_subarray: access started during access or position reset");
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_ACCESS && ctl.shift) |-> pos < PW'(NDOM))
    else $error("rt_subarray: shifted beyond the track");
endmodule
