// tdl_carry_chain -- BEHAVIOURAL MODEL (not synthesizable) of the 400-tap
// carry-chain delay line, including the four injection muxes of the 4-edge
// wave generator and the clock skew seen by the flip-flops that sample it.
//
// In the FPGA this is 100 cascaded CARRY4 primitives (400 MUXCY outputs).
// The muxes at taps 0, 32, 64 and 96 have their select driven by the
// stretcher (`release_i`). With the select low they drive the constants
// printed in the published wave-generator circuit: 0 at tap 0, 1 at tap 32,
// 0 at tap 64, 1 at tap 96, so the chain holds a static pattern
// 0^32 1^32 0^32 1^304 (three transitions). With the select high every mux
// passes the carry from below and tap 0 receives a 1: the four boundaries
// start to travel up the chain together, giving four edges 32 taps apart
// at the start. The sum of their positions is what the encoder measures.
//
// The model is analytic. Each tap m has a delay d[m] (mean TAP_PS, spread
// +/- TAP_SPREAD/2 around it, fixed per tap from SEED, standing in for the
// strong nonlinearity of real carry chains). The value at tap i at time t
// is found by walking down the chain: the segment input at the bottom of
// tap i's 32-tap segment, delayed by the path delay, is either the
// segment's constant (select low) or the output of the tap below it.
//
// Clock skew: the flip-flops of taps >= REGION_TAP sit in a second clock
// region whose clock arrives REGION_SKEW_PS later (the cause of severe
// bubbles); every tap also has a small fixed offset of up to
// +/- TAP_SKEW_PS/2 (the within-region skew and carry look-ahead that cause
// mild bubbles). Because the flip-flop bank itself is a plain register on
// one clock, the model presents at `taps_o` the value each tap has at its
// own flip-flop's clock instant: the next rising edge of `clk_i` plus that
// tap's offset. It re-evaluates at every rising clock edge (for the next
// edge, whose time it predicts from the measured period) and whenever
// `release_i` changes. Only the most recent release pulse is kept: the
// stretcher's dead time exceeds the time a wave needs to leave the chain.
//
// Numbers: the mean tap delay of 15 ps is the MUXCY delay the published
// design quotes ("about 15 ps"), and the 173 ps region skew is the largest
// clock-region-edge skew it quotes; with it a severe bubble is more than
// 10 taps wide, as described there. The +/-20 % spread of the tap delays
// and the +/-15 ps within-region offsets (mild bubbles of a few taps) are
// this model's own choices. At 15 ps per tap an edge travels about 167
// taps per 2.5 ns sampling period, well inside the 304 delay taps.
module tdl_carry_chain #(
  parameter int unsigned N_TAPS         = 400,
  parameter int unsigned EDGE_PITCH     = 32,
  parameter int unsigned N_EDGES        = 4,
  parameter real         TAP_PS         = 15.0,
  parameter real         TAP_SPREAD     = 0.4,
  parameter int unsigned REGION_TAP     = 200,
  parameter real         REGION_SKEW_PS = 173.0,
  parameter real         TAP_SKEW_PS    = 30.0,
  parameter real         CLK_PS         = 2500.0,
  parameter int unsigned SEED           = 1
) (
  input  logic              release_i,  // mux select from the stretcher
  input  logic              clk_i,      // sampling clock of the flip-flops
  output logic [N_TAPS-1:0] taps_o      // tap values at each flip-flop's clock instant
);
  timeunit 1ps;
  timeprecision 1ps;

  real     cum_ps [N_TAPS];   // delay from the tap-0 mux input to tap i's output
  real     off_ps [N_TAPS];   // sampling instant offset of tap i's flip-flop
  realtime t_rise, t_fall, last_edge, period;
  logic    rel_seen, clk_seen, have_edge;
  logic [N_TAPS-1:0] static_taps;

  // Deterministic per-tap pseudo-random number in [0,1).
  function automatic real frand(int unsigned s, int unsigned i);
    logic [31:0] x;
    x = s * 32'h9E3779B9 + i * 32'h85EBCA6B + 32'h2545F491;
    x = x ^ (x >> 16); x = x * 32'h7FEB352D;
    x = x ^ (x >> 15); x = x * 32'h846CA68B;
    x = x ^ (x >> 16);
    return real'(x[31:8]) / 16777216.0;
  endfunction

  function automatic logic seg_const(int unsigned k);
    return (k % 2) == 1;  // 0, 1, 0, 1 for the segments at taps 0, 32, 64, 96
  endfunction

  function automatic int unsigned seg_of(int unsigned i);
    int unsigned k = i / EDGE_PITCH;
    return (k > N_EDGES - 1) ? N_EDGES - 1 : k;
  endfunction

  function automatic logic sel_at(realtime t);
    if (t < t_rise) return 1'b0;
    if (t_fall >= t_rise && t >= t_fall) return 1'b0;
    return 1'b1;
  endfunction

  // Value at the output of tap i at time t.
  function automatic logic tap_value(int unsigned i, realtime t);
    int unsigned ii = i;
    realtime     tt = t;
    for (int step = 0; step < int'(N_EDGES); step++) begin
      int unsigned k    = seg_of(ii);
      int unsigned base = k * EDGE_PITCH;
      tt = tt - (cum_ps[ii] - ((base == 0) ? 0.0 : cum_ps[base-1]));
      if (!sel_at(tt)) return seg_const(k);
      if (k == 0) return 1'b1;
      ii = base - 1;
    end
    return 1'b1;
  endfunction

  function automatic logic [N_TAPS-1:0] evaluate(realtime t_edge);
    logic [N_TAPS-1:0] v;
    // Quiet chain: the last wave has left, the static pattern is back.
    if (!rel_seen && (t_edge - t_fall) > (cum_ps[N_TAPS-1] + REGION_SKEW_PS + 2.0 * TAP_SKEW_PS + 100.0)
        && (t_edge - t_rise) > (cum_ps[N_TAPS-1] + REGION_SKEW_PS + 2.0 * TAP_SKEW_PS + 100.0))
      return static_taps;
    for (int unsigned i = 0; i < N_TAPS; i++) v[i] = tap_value(i, t_edge + off_ps[i]);
    return v;
  endfunction

  initial begin
    automatic real acc = 0.0;
    for (int unsigned i = 0; i < N_TAPS; i++) begin
      acc       = acc + TAP_PS * (1.0 + TAP_SPREAD * (frand(SEED, 2*i) - 0.5));
      cum_ps[i] = acc;
      off_ps[i] = ((i >= REGION_TAP) ? REGION_SKEW_PS : 0.0)
                + TAP_SKEW_PS * (frand(SEED, 2*i + 1) - 0.5);
      static_taps[i] = seg_const(seg_of(i));
    end
    t_rise    = -1.0e9;
    t_fall    = -1.0e9 + 1.0;
    last_edge = 0.0;
    period    = CLK_PS;
    rel_seen  = 1'b0;
    clk_seen  = 1'b0;
    have_edge = 1'b0;
    taps_o    = static_taps;
  end

  always @(clk_i or release_i) begin
    logic changed;
    changed = 1'b0;
    if (release_i != rel_seen) begin
      rel_seen = release_i;
      if (release_i) t_rise = $realtime;
      else           t_fall = $realtime;
      changed = 1'b1;
    end
    if (clk_i && !clk_seen) begin
      if (have_edge) period = $realtime - last_edge;
      last_edge = $realtime;
      have_edge = 1'b1;
      changed   = 1'b1;
    end
    clk_seen = clk_i;
    if (changed) taps_o <= evaluate(last_edge + period);
  end

endmodule
