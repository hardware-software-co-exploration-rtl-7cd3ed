// shift_counter: decrementing counter that gates a track's shift circuitry in
// shift-based (logarithmic-weight) multiplication (Sec. 3.3, Fig. 14).
//
// The signed shift amount d_s of a power-of-two weight is written into the
// counter, sign-extended to CW bits. Every `step` the counter decrements by
// one, and shifting of the controlled track is enabled while the two most
// significant counter bits are "10": a window of 2^(CW-2) consecutive values.
// Tracks with the most negative d_s enter the window first, and each leaves it
// after exactly NB shifts, so its MSB stays under the port (sign extension).
// With CW = log2(NB)+2 the window is NB values long, as the paper requires; the
// counter range 2^CW must be at least NB + 2(max|d_s|+1).
//
// Timing: `load` (with `ds`) in cycle t sets the counter to ds. In each later
// cycle with `step`, the counter decrements and `shift_en` (combinational, from
// the decremented value) tells the track to shift in that cycle.
module shift_counter #(
  parameter int unsigned NB   = 8,             // activation bits
  parameter int unsigned SH_W = 4,             // signed width of d_s
  parameter int unsigned CW   = $clog2(NB) + 2 // counter width
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   load,
  input  logic signed [SH_W-1:0] ds,
  input  logic                   step,
  output logic                   shift_en,
  output logic [CW-1:0]          cnt
);
  logic [CW-1:0] dec;
  assign dec      = cnt - 1'b1;
  assign shift_en = step && (dec[CW-1:CW-2] == 2'b10);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    cnt <= '0;
    else if (load) cnt <= CW'(ds);   // sign extension
    else if (step) cnt <= dec;
  end

  initial begin
    assert (2 ** (CW - 2) == NB) else $error("shift window must be NB values long");
  end
endmodule
