// tdl_dff_bank -- the D flip-flop bank that reads out the tapped delay line.
//
// One flip-flop per tap (400 in the published design), all on the 400 MHz
// sampling clock: each rising edge takes a snapshot of the position of the
// 4-edge waveform in the chain. In the FPGA each flip-flop sits next to its
// CARRY4 tap; the clock skew between the two clock regions the chain
// crosses is a physical property of that placement and is reproduced by the
// delay-line model, not here. One cycle of latency, no reset (the snapshot
// is rewritten every cycle).
module tdl_dff_bank #(
  parameter int unsigned N_TAPS = 400
) (
  input  logic              clk_i,   // 400 MHz sampling clock
  input  logic [N_TAPS-1:0] taps_i,  // carry-chain outputs
  output logic [N_TAPS-1:0] q_o      // sampled raw thermometer-like code
);
  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk_i) q_o <= taps_i;

endmodule
