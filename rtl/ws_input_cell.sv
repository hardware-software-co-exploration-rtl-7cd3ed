// ws_input_cell: one input MTJ of a racetrack logic gate, set by the
// write-shift transformation.
//
// Each input MTJ of the adders sits on a short three-domain track that already
// holds a "1" and a "0" domain. Instead of writing the MTJ (about 1 pJ), the
// control pair of Fig. 15 compares the bit now aligned with the MTJ (A_in^t)
// with the bit the next cycle needs (A_in^t+1): equal bits draw no current,
// different bits drive a one-domain shift towards the needed value. This model
// keeps the aligned bit in a flip-flop and reports, per load, whether a shift
// (or, with WRITE_SHIFT=0, a plain MTJ write) took place so that energy can be
// counted by the surrounding logic.
//
// Interface: `load` with `nxt` in cycle t makes `q` equal `nxt` from cycle t+1.
// `shift_pulse`/`shift_dir` (1 = move the "1" domain under the MTJ) and
// `write_pulse` are combinational in the load cycle. Reset aligns the "0"
// domain; the paper does not state a reset position (this design's choice).
module ws_input_cell #(
  parameter bit WRITE_SHIFT = 1'b1  // 1: write-shift transformation, 0: MTJ writes
) (
  input  logic clk,
  input  logic rst_n,
  input  logic load,
  input  logic nxt,
  output logic q,
  output logic shift_pulse,
  output logic shift_dir,
  output logic write_pulse
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= 1'b0;
    else if (load) q <= nxt;
  end

  always_comb begin
    shift_pulse = WRITE_SHIFT && load && (nxt != q);
    shift_dir   = nxt;
    write_pulse = !WRITE_SHIFT && load;
  end
endmodule
