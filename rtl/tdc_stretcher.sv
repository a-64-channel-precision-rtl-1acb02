// tdc_stretcher -- pulse stretcher of the 4-edge wave generator.
//
// Three flip-flops, as in the published wave generator: the first has its
// D input tied high and is clocked by the hit itself, so any hit edge sets
// it at once, whatever the phase of the sampling clock. Its output
// `release_o` drives the select inputs of the four injection muxes of the
// carry chain and so releases the static 4-edge waveform into the delay
// line. The second and third flip-flops, on the 400 MHz sampling clock,
// form a two-stage delay of `release_o`; the output of the third
// asynchronously resets the first. While that reset is asserted a new hit
// cannot set the first flip-flop: hits in that window are shielded.
//
// Timing (sampling-clock edges after the hit: c1, c2, ...): `release_o`
// rises at the hit and falls just after c2, i.e. it lasts 1-2 clock cycles.
// The reset is high from c2 to c4. The published text counts the reset as
// one cycle and the dead time as 3 cycles (7.5 ns); wired as drawn, the
// reset here lasts two cycles, so the stretcher is blind for up to 4 cycles
// after a hit. `dead_o` is high while hits are shielded.
//
// The flip-flops have no reset of their own (the second and third have
// their reset pins grounded in the published circuit); the loop clears
// itself within three sampling cycles of power-up.
module tdc_stretcher (
  input  logic hit_i,      // hit input (edge to be measured is the rising one)
  input  logic clk_i,      // 400 MHz sampling clock
  output logic release_o,  // stretched hit: mux select of the wave generator
  output logic dead_o      // reset of the first flip-flop: hits are shielded
);
  timeunit 1ps;
  timeprecision 1ps;

  logic ff2_q, ff3_q;

  // First flip-flop: D = 1, clock = hit, asynchronous reset from the third.
  always_ff @(posedge hit_i or posedge ff3_q) begin
    if (ff3_q) release_o <= 1'b0;
    else       release_o <= 1'b1;
  end

  // Second and third flip-flops: delay line on the sampling clock.
  always_ff @(posedge clk_i) begin
    ff2_q <= release_o;
    ff3_q <= ff2_q;
  end

  assign dead_o = ff3_q;

endmodule
