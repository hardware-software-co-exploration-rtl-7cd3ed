// weight_mat: a weight mat, storing filter weights in bit-parallel form.
//
// Weights are the multiplier operand of Booth multiplication (all bits decoded
// at once) or the shift distance of shift-based multiplication, so the paper
// stores them transposed across several racetracks such that a whole weight is
// under the access ports in one cycle (Sec. 3.2.1, Fig. 8). This model holds
// the mat's 8 KB as WORDS words of WIDTH bits with one read and one write port;
// the racetrack-level layout of the bits is not modelled (this design's
// abstraction). Weights are never accumulated, so the mat has no adders.
//
// Timing: `re` with `raddr` in cycle t gives `rdata` in cycle t+1; `we` writes
// `wdata` at `waddr` at the clock edge. Contents are not reset (non-volatile).
module weight_mat
  import rm_pkg::*;
#(
  parameter int unsigned WIDTH = NB,
  parameter int unsigned WORDS = WM_WORDS
) (
  input  logic                     clk,
  input  logic                     re,
  input  logic [$clog2(WORDS)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata
);
  logic [WIDTH-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
