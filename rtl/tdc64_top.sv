// tdc64_top -- 64-channel TDC: 32 channels time rising edges, 32 channels
// time falling edges.
//
// Every channel is a complete, independent 4-edge TDC (`tdc_channel`); the
// falling-edge channels only add an inverter at their input. The same
// sampling signal may be fanned out to all 64 inputs, which measures both
// edges of it at once, or each input may carry its own signal. All
// channels share the 400 MHz sampling clock, the 200 MHz encoding clock
// (both from the FPGA PLL, which is outside this module) and the reset, so
// their coarse counters run in step and timestamps of different channels
// can be compared.
//
// Outputs are per channel, on the 200 MHz clock: a one-cycle valid and the
// measured hit (coarse count, 11-bit fine code, encoder error flag), plus
// the severe-bubble status of that hit. The readout to the host (TCP in the
// published system) is not part of this module. Channel index c in
// 0..N_RISE-1 is a rising-edge channel, N_RISE..N_RISE+N_FALL-1 a
// falling-edge channel. Each channel's delay-line model gets its own seed.
module tdc64_top
  import tdc_pkg::*;
#(
  parameter int unsigned N_RISE         = 32,
  parameter int unsigned N_FALL         = 32,
  parameter real         TAP_PS         = 15.0,
  parameter real         TAP_SPREAD     = 0.4,
  parameter real         REGION_SKEW_PS = 173.0,
  parameter real         TAP_SKEW_PS    = 30.0,
  localparam int unsigned N_CH          = N_RISE + N_FALL
) (
  input  logic            clk_s_i,               // 400 MHz sampling clock
  input  logic            clk_e_i,               // 200 MHz encoding clock
  input  logic            rst_i,                 // synchronous reset, active high
  input  logic [N_CH-1:0] hit_i,                 // sampling signals
  output logic [N_CH-1:0] hit_valid_o,           // clk_e
  output tdc_hit_t        hit_o     [N_CH],      // clk_e, with hit_valid_o
  output logic [N_CH-1:0] sb_swap_o,             // clk_e, with hit_valid_o
  output sb_case_e        sb_case_o [N_CH],      // clk_e, with hit_valid_o
  output logic [N_CH-1:0] captured_o,            // clk_s: hit captured
  output logic [N_CH-1:0] drop_o,                // clk_s: hit lost to dead time
  output logic [N_CH-1:0] dead_o                 // stretcher shielding hits
);
  timeunit 1ps;
  timeprecision 1ps;

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    tdc_channel #(
      .FALLING        (c >= N_RISE),
      .TAP_PS         (TAP_PS),
      .TAP_SPREAD     (TAP_SPREAD),
      .REGION_SKEW_PS (REGION_SKEW_PS),
      .TAP_SKEW_PS    (TAP_SKEW_PS),
      .SEED           (c + 1)
    ) u_ch (
      .clk_s_i     (clk_s_i),
      .clk_e_i     (clk_e_i),
      .rst_i       (rst_i),
      .hit_i       (hit_i[c]),
      .hit_valid_o (hit_valid_o[c]),
      .hit_o       (hit_o[c]),
      .drop_o      (drop_o[c]),
      .dead_o      (dead_o[c]),
      .sb_swap_o   (sb_swap_o[c]),
      .sb_case_o   (sb_case_o[c]),
      .captured_o  (captured_o[c])
    );
  end

endmodule
