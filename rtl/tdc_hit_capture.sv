// tdc_hit_capture -- picks the one sample of the flip-flop bank that holds a
// released waveform and hands it to the 200 MHz encoding clock domain.
//
// The flip-flop bank takes a snapshot every 2.5 ns; only the first snapshot
// after the stretcher released the wave carries the fine time (the leading
// edge is then less than one period into the chain). Before release the
// lowest 32 taps hold the static 0 of the wave generator, after release the
// lowest taps read 1. A hit is therefore detected on the cycle where any of
// the lowest TRIG_W taps reads 1 and none did in the previous snapshot.
// The snapshot and the coarse count are stored and a toggle flag is
// flipped; the encoding domain takes the data when it sees the toggle and
// its severe-bubble block is ready, and returns the toggle as an
// acknowledge. A hit detected while the previous one is still waiting
// (`pending`) is dropped and reported on `drop_o`: this is the extra dead
// time that the non-pipelined severe-bubble block adds.
//
// The published design states the two clocks (400 MHz sampling, 200 MHz
// encoding, both from one PLL) but not how data crosses between them. The
// detection rule, the toggle handshake and the drop policy are this
// design's choices. The two clocks are taken to be phase-aligned with a
// 2:1 ratio, so the flags are simply registered in the other domain.
module tdc_hit_capture
  import tdc_pkg::*;
#(
  parameter int unsigned N      = 400,
  parameter int unsigned TRIG_W = 8
) (
  input  logic                clk_s_i,    // 400 MHz sampling clock
  input  logic                clk_e_i,    // 200 MHz encoding clock
  input  logic                rst_i,      // synchronous reset (both domains)
  input  logic [N-1:0]        sample_i,   // flip-flop bank output
  input  logic [COARSE_W-1:0] coarse_i,   // coarse count
  output logic                drop_o,     // clk_s: hit lost, previous one pending
  output logic                hit_o,      // clk_s: a hit was captured
  // encoding-domain side
  input  logic                ready_i,    // clk_e: consumer takes data now if valid
  output logic                valid_o,    // clk_e: data below is a new hit
  output logic [N-1:0]        code_o,
  output logic [COARSE_W-1:0] coarse_o
);
  timeunit 1ps;
  timeprecision 1ps;

  logic trig, trig_q;
  logic req_tgl, ack_s;   // clk_s domain
  logic req_e, ack_tgl;   // clk_e domain
  logic pending, new_hit;

  assign trig    = |sample_i[TRIG_W-1:0];
  assign pending = req_tgl ^ ack_s;
  assign new_hit = trig && !trig_q;

  always_ff @(posedge clk_s_i) begin
    if (rst_i) begin
      trig_q   <= 1'b1;
      req_tgl  <= 1'b0;
      ack_s    <= 1'b0;
      code_o   <= '0;
      coarse_o <= '0;
      drop_o   <= 1'b0;
      hit_o    <= 1'b0;
    end else begin
      trig_q <= trig;
      ack_s  <= ack_tgl;
      drop_o <= new_hit && pending;
      hit_o  <= new_hit && !pending;
      if (new_hit && !pending) begin
        code_o   <= sample_i;
        coarse_o <= coarse_i;
        req_tgl  <= ~req_tgl;
      end
    end
  end

  always_ff @(posedge clk_e_i) begin
    if (rst_i) begin
      req_e   <= 1'b0;
      ack_tgl <= 1'b0;
    end else begin
      req_e <= req_tgl;
      if (valid_o && ready_i) ack_tgl <= req_e;
    end
  end

  assign valid_o = req_e ^ ack_tgl;

endmodule
