// tdc_channel -- one complete 4-edge wave-union-A TDC channel.
//
// Data path, as in the published channel structure:
//   hit -> (inverter on falling-edge channels) -> stretcher -> carry chain
//   with 4-edge wave generator -> 400 flip-flop bank (400 MHz)
//   -> hit capture -> severe bubble solution (200 MHz, 2 cycles)
//   -> multi-edge decomposition encoder (200 MHz, 2 cycles) -> 11-bit code,
// with a coarse counter on the 400 MHz clock giving the coarse timestamp.
// The channel outputs, per hit, the coarse count of the capturing sample
// and the fine code (sum of the four edge positions). Converting the code
// into a time is the job of the offline code-density calibration, which is
// not part of the FPGA logic.
//
// A falling-edge channel differs from a rising-edge one only by the
// inverter at its input (FALLING = 1). The delay line is the behavioural
// model `tdl_carry_chain`; its parameters (tap delays, clock-region skew)
// are passed through, SEED giving each channel its own nonlinearity.
//
// Timing: a hit is sampled on the first 400 MHz edge after it (plus up to
// one edge if it arrives within a few ps of that edge), crosses to the
// 200 MHz domain within two 400 MHz cycles, and leaves the encoder
// 2 + 2 = 4 encoding cycles after the severe-bubble block took it.
// `hit_valid_o` is a one-cycle pulse on the 200 MHz clock.
//
// Tool notes. The stretcher output `release_s` is set asynchronously by
// the hit and also sampled by the stretcher's own clocked flip-flops; a
// lint tool reports it as flopped both synchronously and asynchronously.
// That is the principle of the TDC (the hit is asynchronous to the clock
// by definition) and is intended. The coarse counter's roll-over pin is
// deliberately left open: the 32-bit count travels with each hit and the
// reader resolves roll-over. The channel as a whole does not synthesize
// because it contains the behavioural delay-line model; on silicon that
// instance is the placed carry chain.
module tdc_channel
  import tdc_pkg::*;
#(
  parameter bit          FALLING        = 1'b0,
  parameter real         TAP_PS         = 15.0,
  parameter real         TAP_SPREAD     = 0.4,
  parameter real         REGION_SKEW_PS = 173.0,
  parameter real         TAP_SKEW_PS    = 30.0,
  parameter int unsigned SEED           = 1
) (
  input  logic     clk_s_i,      // 400 MHz sampling clock
  input  logic     clk_e_i,      // 200 MHz encoding clock
  input  logic     rst_i,        // synchronous reset, active high
  input  logic     hit_i,        // sampling signal
  output logic     hit_valid_o,  // clk_e: one measured hit
  output tdc_hit_t hit_o,        // its coarse count and fine code
  output logic     drop_o,       // clk_s: hit lost to the encoder's dead time
  output logic     dead_o,       // stretcher is shielding hits
  output logic     sb_swap_o,    // clk_e, with hit_valid_o: tap swapping applied
  output sb_case_e sb_case_o,    // clk_e, with hit_valid_o: flowchart branch
  output logic     captured_o    // clk_s: a hit was captured for encoding
);
  timeunit 1ps;
  timeprecision 1ps;

  logic                hit_in, release_s;
  logic [N_TAPS-1:0]   taps, sample, cap_code, sb_code;
  logic [COARSE_W-1:0] coarse, cap_coarse, sb_coarse;
  logic                cap_valid, sb_ready, sb_valid;
  logic                sb_swap, sb_swap_d;
  sb_case_e            sb_case, sb_case_d;

  assign hit_in = FALLING ? ~hit_i : hit_i;

  tdc_stretcher u_stretcher (
    .hit_i     (hit_in),
    .clk_i     (clk_s_i),
    .release_o (release_s),
    .dead_o    (dead_o)
  );

  tdl_carry_chain #(
    .N_TAPS         (N_TAPS),
    .EDGE_PITCH     (EDGE_PITCH),
    .N_EDGES        (N_EDGES),
    .TAP_PS         (TAP_PS),
    .TAP_SPREAD     (TAP_SPREAD),
    .REGION_TAP     (R2_LO),
    .REGION_SKEW_PS (REGION_SKEW_PS),
    .TAP_SKEW_PS    (TAP_SKEW_PS),
    .SEED           (SEED)
  ) u_tdl (
    .release_i (release_s),
    .clk_i     (clk_s_i),
    .taps_o    (taps)
  );

  tdl_dff_bank #(.N_TAPS(N_TAPS)) u_dff (
    .clk_i  (clk_s_i),
    .taps_i (taps),
    .q_o    (sample)
  );

  tdc_coarse_counter #(.COARSE_W(COARSE_W)) u_coarse (
    .clk_i   (clk_s_i),
    .rst_i   (rst_i),
    .count_o (coarse),
    .wrap_o  ()           // roll-over is resolved by the reader
  );

  tdc_hit_capture #(.N(N_TAPS)) u_cap (
    .clk_s_i  (clk_s_i),
    .clk_e_i  (clk_e_i),
    .rst_i    (rst_i),
    .sample_i (sample),
    .coarse_i (coarse),
    .drop_o   (drop_o),
    .hit_o    (captured_o),
    .ready_i  (sb_ready),
    .valid_o  (cap_valid),
    .code_o   (cap_code),
    .coarse_o (cap_coarse)
  );

  severe_bubble_solution #(.SIDE_W(COARSE_W)) u_sbs (
    .clk_i       (clk_e_i),
    .rst_i       (rst_i),
    .in_valid_i  (cap_valid),
    .in_ready_o  (sb_ready),
    .in_code_i   (cap_code),
    .in_side_i   (cap_coarse),
    .out_valid_o (sb_valid),
    .out_code_o  (sb_code),
    .out_side_o  (sb_coarse),
    .out_case_o  (sb_case),
    .out_swap_o  (sb_swap)
  );

  // Severe-bubble status delayed by the encoder's two stages, so that it
  // lines up with the hit it belongs to.
  always_ff @(posedge clk_e_i) begin
    if (rst_i) begin
      sb_swap_d <= 1'b0;  sb_case_d <= SB_NONE;
      sb_swap_o <= 1'b0;  sb_case_o <= SB_NONE;
    end else begin
      sb_swap_d <= sb_swap;   sb_case_d <= sb_case;
      sb_swap_o <= sb_swap_d; sb_case_o <= sb_case_d;
    end
  end

  multi_edge_encoder #(.N(N_TAPS), .SIDE_W(COARSE_W)) u_enc (
    .clk_i       (clk_e_i),
    .rst_i       (rst_i),
    .in_valid_i  (sb_valid),
    .in_code_i   (sb_code),
    .in_side_i   (sb_coarse),
    .out_valid_o (hit_valid_o),
    .out_code_o  (hit_o.code),
    .out_err_o   (hit_o.err),
    .out_side_o  (hit_o.coarse)
  );

endmodule
