// act_mat: an activation mat - four racetrack subarrays and two bit-serial
// adder units (Fig. 19).
//
// Activations are stored bit-serially, four words per MU access (one per
// track). Adder unit ADD0 takes its two inputs from SAR0 and SAR1, ADD1 from
// SAR2 and SAR3; an input mux per operand lets each unit take the two streams
// of the Booth multiplier instead, so the mat adder is the last stage of Booth
// partial-product accumulation. Either adder's sum, or an external bit stream
// (host data or the bank adder tree), can be written into any of the four
// subarrays. Lanes never cross: track i of one subarray adds only to track i
// of the other (Sec. 4.1.2).
//
// With add_ctl.sub an adder computes SAR0 - SAR1 (SAR2 - SAR3): the second
// operand is inverted and the first carry-in is 1, the negation the Booth
// path already uses. The paper reuses this for the max-pooling comparison
// and the mean subtraction of batch normalisation (Sec. 4.2); building it
// into the operand mux is this design's choice.
//
// Interface: every cycle the mat-group sequencer drives one sar_ctl_t per
// subarray and one add_ctl_t per adder unit; `lane_en` switches lanes off.
// Timing: subarray reads appear the cycle after `start`; an adder sum appears
// one cycle after its operands; a write lands at the clock edge.
//
// Lint notes: the adder units' `first_o` and `n_shift` outputs are left open,
// because the mat group tracks word boundaries itself. rst_n also disables
// assertions (SYNCASYNCNET).
module act_mat
  import rm_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  sar_ctl_t          sar_ctl [SAR_PER_MAT],
  input  add_ctl_t          add_ctl [2],
  input  logic [TRACKS-1:0] lane_en,
  input  logic [TRACKS-1:0] ext_bits,
  input  logic [TRACKS-1:0] booth_s0,
  input  logic [TRACKS-1:0] booth_s1,
  output logic [TRACKS-1:0] rd      [SAR_PER_MAT],
  output logic [SAR_PER_MAT-1:0] busy,
  output logic [SAR_PER_MAT-1:0] resetting,
  output logic [TRACKS-1:0] add_z   [2],
  output logic [1:0]        add_valid
);
  logic [TRACKS-1:0] wdata [SAR_PER_MAT];

  for (genvar s = 0; s < SAR_PER_MAT; s++) begin : g_sar
    always_comb begin
      unique case (sar_ctl[s].wsel)
        WS_ADD0: wdata[s] = add_z[0];
        WS_ADD1: wdata[s] = add_z[1];
        default: wdata[s] = ext_bits;
      endcase
    end
    rt_subarray u_sar (
      .clk, .rst_n, .ctl(sar_ctl[s]), .wdata(wdata[s]),
      .rd(rd[s]), .busy(busy[s]), .resetting(resetting[s]));
  end

  for (genvar u = 0; u < 2; u++) begin : g_add
    logic [TRACKS-1:0] a, b;
    // input muxes of Fig. 19: [SAR] or [Booth]
    assign a = add_ctl[u].booth ? booth_s0 : rd[2*u];
    // subtraction reuses the negation of the Booth path: ~b with carry-in 1
    assign b = add_ctl[u].booth ? booth_s1 :
               add_ctl[u].sub   ? ~rd[2*u+1] : rd[2*u+1];
    bit_serial_adder #(.LANES(TRACKS)) u_add (
      .clk, .rst_n, .valid(add_ctl[u].valid), .first(add_ctl[u].first),
      .lane_en, .a, .b, .cin0({TRACKS{add_ctl[u].sub}}),
      .z(add_z[u]), .valid_o(add_valid[u]), .first_o(), .n_shift());
  end
endmodule
