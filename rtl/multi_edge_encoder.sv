// multi_edge_encoder -- multi-edge decomposition encoder of the 4-edge TDL.
//
// Input: the 400-bit code after severe-bubble removal. It holds four edges
// of alternating polarity (ones below edge 1, zeros up to edge 2, ones up
// to edge 3, zeros up to edge 4, ones above), each possibly blurred by a
// mild bubble narrower than RUN taps. Output: one 11-bit number, the sum of
// the four edge positions, in which every bubble is absorbed without a
// one-hot step.
//
// The published design names this encoder and gives its function (online
// de-bubbling and encoding of a multi-edge code into the sum of edge
// positions, 2 pipeline cycles); its inside comes from earlier work and is
// not given. This implementation is the simplest construction that does
// the job. It decomposes the code into four single-edge sub-codes and
// ones-counts each:
//   stage 1: find three window boundaries. b1 = lowest tap starting a run
//            of RUN zeros, b2 = lowest tap >= b1 starting a run of RUN ones,
//            b3 = lowest tap >= b2 starting a run of RUN zeros. A run of RUN
//            equal bits cannot lie inside a mild bubble, so each boundary
//            lies on the flat stretch between two edges (edges at least 28
//            taps apart leave at least 16 clean taps there).
//   stage 2: sum = b1 + b2 + b3 + ones[0,b1) + zeros[b1,b2) + ones[b2,b3)
//            + zeros[b3,N). Each term pair is the ones-counter position of
//            one edge in its window, so the result equals the sum of the
//            four ones-counter positions. If a boundary is missing (the code
//            does not hold four edges) `err_o` is set.
// Fully pipelined: a code per cycle, result 2 cycles after the input.
module multi_edge_encoder
  import tdc_pkg::*;
#(
  parameter int unsigned N      = 400,
  parameter int unsigned RUN    = 8,
  parameter int unsigned SIDE_W = 32
) (
  input  logic              clk_i,       // 200 MHz encoding clock
  input  logic              rst_i,       // synchronous reset, active high
  input  logic              in_valid_i,
  input  logic [N-1:0]      in_code_i,
  input  logic [SIDE_W-1:0] in_side_i,
  output logic              out_valid_o,
  output logic [CODE_W-1:0] out_code_o,  // sum of the four edge positions
  output logic              out_err_o,   // fewer than four edges found
  output logic [SIDE_W-1:0] out_side_o
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned BW = $clog2(N + 1);

  // ---- stage 1: window boundaries ------------------------------------
  logic [N-1:0]  zrun, orun;   // a run of RUN zeros / ones starts here
  logic [BW-1:0] b1_c, b2_c, b3_c;
  logic          f1_c, f2_c, f3_c;

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      logic a0, a1;
      a0 = 1'b1; a1 = 1'b1;
      for (int unsigned k = 0; k < RUN; k++) begin
        if (i + k < N) begin
          a0 &= ~in_code_i[i+k];
          a1 &=  in_code_i[i+k];
        end else begin
          a0 = 1'b0; a1 = 1'b0;
        end
      end
      zrun[i] = a0;
      orun[i] = a1;
    end
    f1_c = 1'b0; f2_c = 1'b0; f3_c = 1'b0;
    b1_c = '0;   b2_c = '0;   b3_c = '0;
    for (int unsigned i = 0; i < N; i++) begin
      if (!f1_c && zrun[i]) begin
        f1_c = 1'b1; b1_c = BW'(i);
      end
    end
    for (int unsigned i = 0; i < N; i++) begin
      if (f1_c && !f2_c && i >= 32'(b1_c) && orun[i]) begin
        f2_c = 1'b1; b2_c = BW'(i);
      end
    end
    for (int unsigned i = 0; i < N; i++) begin
      if (f2_c && !f3_c && i >= 32'(b2_c) && zrun[i]) begin
        f3_c = 1'b1; b3_c = BW'(i);
      end
    end
  end

  logic              s1_valid;
  logic [N-1:0]      s1_code;
  logic [SIDE_W-1:0] s1_side;
  logic [BW-1:0]     s1_b1, s1_b2, s1_b3;
  logic              s1_ok;

  always_ff @(posedge clk_i) begin
    if (rst_i) begin
      s1_valid <= 1'b0;
      s1_code  <= '0;
      s1_side  <= '0;
      s1_b1    <= '0;
      s1_b2    <= '0;
      s1_b3    <= '0;
      s1_ok    <= 1'b0;
    end else begin
      s1_valid <= in_valid_i;
      s1_code  <= in_code_i;
      s1_side  <= in_side_i;
      s1_b1    <= b1_c;
      s1_b2    <= b2_c;
      s1_b3    <= b3_c;
      s1_ok    <= f1_c && f2_c && f3_c;
    end
  end

  // ---- stage 2: ones-count of the four sub-codes and sum -------------
  logic [CODE_W:0] sum_c;
  always_comb begin
    sum_c = (CODE_W+1)'(s1_b1) + (CODE_W+1)'(s1_b2) + (CODE_W+1)'(s1_b3);
    for (int unsigned i = 0; i < N; i++) begin
      logic inv;  // windows 2 and 4 count zeros, windows 1 and 3 count ones
      inv = ((i >= 32'(s1_b1)) && (i < 32'(s1_b2))) || (i >= 32'(s1_b3));
      sum_c += (CODE_W+1)'(s1_code[i] ^ inv);
    end
  end

  always_ff @(posedge clk_i) begin
    if (rst_i) begin
      out_valid_o <= 1'b0;
      out_code_o  <= '0;
      out_err_o   <= 1'b0;
      out_side_o  <= '0;
    end else begin
      out_valid_o <= s1_valid;
      out_code_o  <= sum_c[CODE_W-1:0];
      out_err_o   <= !s1_ok || sum_c[CODE_W];
      out_side_o  <= s1_side;
    end
  end

endmodule
