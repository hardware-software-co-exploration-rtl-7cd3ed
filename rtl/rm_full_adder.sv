// rm_full_adder: racetrack/MTJ full adder with seven input MTJs.
//
// The paper's full adder (Fig. 5) evaluates the sum and carry with two
// pre-charge sense-amplifier halves, each reading a stack of input MTJs against
// a reference resistance (R_S, R_CO); the sum half uses four MTJs (A1, A2, A2,
// Cin) and a 2-2 MUX steered by Cout, the carry half three (A1, A2, Cin). Seven
// MTJs are set per addition (Table 9). This model keeps the seven inputs as
// ws_input_cell instances, so the write-shift energy optimisation is part of it,
// and computes the logic function of a full adder from the aligned bits: the
// transistor-level sensing is abstracted to S = A1^A2^Cin, Cout = majority.
//
// Timing: inputs presented with `load` in cycle t are aligned under the MTJs
// at the clock edge; `s`/`cout` are valid during cycle t+1 (one cycle latency,
// matching Fig. 6: inputs written in cycle 1, added in cycle 2).
// `n_shift`/`n_write` count the MTJ shifts or writes of the load cycle.
//
// Lint notes: q[2] is the second A2 MTJ of the sum half. It always holds the
// same bit as q[1] and exists for the resistive weighting of the sum, which the
// XOR evaluation does not need, so it reads as unused. `sd` only steers the
// shift direction of the device and is unused by the logic.
module rm_full_adder #(
  parameter bit WRITE_SHIFT = 1'b1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load,
  input  logic       a1,
  input  logic       a2,
  input  logic       cin,
  output logic       s,
  output logic       cout,
  output logic [2:0] n_shift,
  output logic [2:0] n_write
);
  // MTJ order: sum half A1, A2, A2, Cin; carry half A1, A2, Cin
  logic [6:0] nxt, q, sp, sd, wp;
  assign nxt = {cin, a2, a1, cin, a2, a2, a1};

  for (genvar i = 0; i < 7; i++) begin : g_mtj
    ws_input_cell #(.WRITE_SHIFT(WRITE_SHIFT)) u_cell (
      .clk, .rst_n, .load, .nxt(nxt[i]), .q(q[i]),
      .shift_pulse(sp[i]), .shift_dir(sd[i]), .write_pulse(wp[i]));
  end

  always_comb begin
    // sum half: A1, A2, Cin (the second A2 MTJ duplicates A2 in the stack)
    s    = q[0] ^ q[1] ^ q[3];
    // carry half
    cout = (q[4] & q[5]) | (q[4] & q[6]) | (q[5] & q[6]);
    n_shift = 3'($countones(sp));
    n_write = 3'($countones(wp));
  end
endmodule
