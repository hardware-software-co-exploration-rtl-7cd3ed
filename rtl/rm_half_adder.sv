// rm_half_adder: racetrack/MTJ half adder (Fig. 4, Eq. 3-4).
//
// Two sense-amplifier halves read the addends A1, A2 from MTJ pairs: the sum
// half gives S = A1 xor A2, the carry half Cout = A1 and A2. The four input
// MTJs (Table 9: four MTJ writes) are ws_input_cell instances, so the
// write-shift transformation applies to them as to the full adder. The
// transistor-level sensing is abstracted to the two logic equations.
//
// Timing: `load` with a1/a2 in cycle t gives s/cout in cycle t+1.
//
// Lint note: `sd` (shift direction) is an input of the MTJ shift circuitry
// only; the logic value of a cell does not depend on it, so it is unused here.
module rm_half_adder #(
  parameter bit WRITE_SHIFT = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       a1,
  input  logic       a2,
  output logic       s,
  output logic       cout,
  output logic [2:0] n_shift,
  output logic [2:0] n_write
);
  logic [3:0] nxt, q, sp, sd, wp;
  assign nxt = {a2, a1, a2, a1};   // sum half A1, A2; carry half A1, A2

  for (genvar i = 0; i < 4; i++) begin : g_mtj
    ws_input_cell #(.WRITE_SHIFT(WRITE_SHIFT)) u_cell (
      .clk, .rst_n, .load, .nxt(nxt[i]), .q(q[i]),
      .shift_pulse(sp[i]), .shift_dir(sd[i]), .write_pulse(wp[i]));
  end

  always_comb begin
    s       = q[0] ^ q[1];
    cout    = q[2] & q[3];
    n_shift = 3'($countones(sp));
    n_write = 3'($countones(wp));
  end
endmodule
