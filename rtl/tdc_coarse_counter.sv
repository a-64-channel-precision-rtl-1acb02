// tdc_coarse_counter -- coarse time base of a TDC channel.
//
// A free-running binary counter on the 400 MHz sampling clock, the same
// clock as the tapped delay line, so that one count is exactly the time
// span the fine code interpolates. The count of the sample that captured a
// hit is that hit's coarse timestamp. The width (COARSE_W, 32 bits, 10.7 s
// at 2.5 ns) and the synchronous reset to zero are this design's choices;
// the published design gives neither. `wrap_o` pulses for one cycle when
// the counter rolls over.
module tdc_coarse_counter #(
  parameter int unsigned COARSE_W = 32
) (
  input  logic                clk_i,    // 400 MHz sampling clock
  input  logic                rst_i,    // synchronous reset, active high
  output logic [COARSE_W-1:0] count_o,  // coarse count
  output logic                wrap_o    // count rolled over to zero this cycle
);
  timeunit 1ps;
  timeprecision 1ps;

  always_ff @(posedge clk_i) begin
    if (rst_i) begin
      count_o <= '0;
      wrap_o  <= 1'b0;
    end else begin
      count_o <= count_o + 1'b1;
      wrap_o  <= &count_o;
    end
  end

endmodule
