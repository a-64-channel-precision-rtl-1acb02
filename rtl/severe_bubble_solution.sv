// severe_bubble_solution -- detection and removal of the severe bubble that
// clock-region skew creates where the delay line crosses the region
// boundary at tap 200.
//
// When the two halves of the chain are clocked at instants more than about
// 100 ps apart, an edge close to tap 200 is seen twice, once by each
// region, and the raw code shows a bubble of up to ~16 taps. This block
// follows the published detection scheme. Four inspection regions are
// checked for a 0-1 or 1-0 transition ("true" when the bits of the region
// are not all equal): region 1 = [215:207], region 2 = [207:200],
// region 3 = [199:192], region 4 = [192:184]. Then, in this order:
//   regions 1 and 4 true -> two ordinary edges, leave the code alone;
//   regions 2 and 4 true -> severe bubble if bit 207 != bit 178, polarity
//                           from {bit 207, bit 184};
//   regions 1 and 3 true -> severe bubble if bit 221 != bit 192, polarity
//                           from {bit 215, bit 192};
//   regions 2 and 3 true -> severe bubble, polarity from {bit 207, bit 192};
//   otherwise            -> no severe bubble.
// A polarity pair "10" is a falling edge (ones on the high side of the
// window), "01" a rising edge (ones on the low side). For a confirmed
// severe bubble, taps [215:184] are replaced by a thermometer code with the
// same number of ones, packed against the side the polarity names (tap
// swapping). Its encoding is the one a ones-counter would give. A polarity
// pair "00" or "11" is not covered by the published flowchart; here the code
// is then left unchanged (own choice).
//
// Timing: not pipelined, like the published block. A code is accepted when
// `in_valid_i && in_ready_o`; one cycle later the region flags, the branch,
// the polarity and the ones-count are registered; one more cycle and the
// repaired code is presented with `out_valid_o` for one cycle: 2 cycles of
// the 200 MHz encoding clock. A new code can be accepted in the cycle the
// result is produced, so the block takes one hit per 2 cycles; the
// handshake (`in_ready_o`) is this design's choice. `SIDE_W` bits of side
// information (the coarse timestamp) travel with the code.
module severe_bubble_solution
  import tdc_pkg::*;
#(
  parameter int unsigned SIDE_W = 32
) (
  input  logic               clk_i,       // 200 MHz encoding clock
  input  logic               rst_i,       // synchronous reset, active high
  input  logic               in_valid_i,  // a raw code is offered
  output logic               in_ready_o,  // block can take it this cycle
  input  logic [N_TAPS-1:0]  in_code_i,   // raw code from the flip-flop bank
  input  logic [SIDE_W-1:0]  in_side_i,   // side information (coarse count)
  output logic               out_valid_o, // repaired code valid (one cycle)
  output logic [N_TAPS-1:0]  out_code_o,  // code with the severe bubble removed
  output logic [SIDE_W-1:0]  out_side_o,
  output sb_case_e           out_case_o,  // flowchart branch taken
  output logic               out_swap_o   // tap swapping was applied
);
  timeunit 1ps;
  timeprecision 1ps;

  typedef enum logic [1:0] {ST_IDLE, ST_CLASSIFY, ST_SWAP} state_e;

  state_e              state;
  logic [N_TAPS-1:0]   code_q;
  logic [SIDE_W-1:0]   side_q;
  sb_case_e            case_q;
  logic                swap_q;    // severe bubble confirmed, polarity valid
  logic                high_q;    // ones packed on the high side ("falling")
  logic [5:0]          ones_q;    // ones in [215:184], 0..32

  // ---- classification (combinational on the stored code) --------------
  sb_case_e   cls_case;
  logic       cls_severe;
  logic [1:0] cls_pol;
  logic [5:0] cls_ones;
  logic       r1, r2, r3, r4;

  function automatic logic has_transition(logic [8:0] bits, int unsigned w);
    logic all1, all0;
    all1 = 1'b1; all0 = 1'b1;
    for (int unsigned i = 0; i < 9; i++) begin
      if (i < w) begin
        all1 &= bits[i];
        all0 &= ~bits[i];
      end
    end
    return !(all1 || all0);
  endfunction

  always_comb begin
    r1 = has_transition(code_q[R1_HI:R1_LO], R1_HI - R1_LO + 1);
    r2 = has_transition({1'b0, code_q[R2_HI:R2_LO]}, R2_HI - R2_LO + 1);
    r3 = has_transition({1'b0, code_q[R3_HI:R3_LO]}, R3_HI - R3_LO + 1);
    r4 = has_transition(code_q[R4_HI:R4_LO], R4_HI - R4_LO + 1);

    cls_case   = SB_NONE;
    cls_severe = 1'b0;
    cls_pol    = 2'b00;
    if (r1 && r4) begin
      cls_case = SB_EDGES_14;
    end else if (r2 && r4) begin
      if (code_q[R2_HI] != code_q[CHK_LO_BIT]) begin
        cls_case   = SB_SWAP_24;
        cls_severe = 1'b1;
        cls_pol    = {code_q[R2_HI], code_q[R4_LO]};
      end else begin
        cls_case = SB_EDGES_24;
      end
    end else if (r1 && r3) begin
      if (code_q[CHK_HI_BIT] != code_q[R3_LO]) begin
        cls_case   = SB_SWAP_13;
        cls_severe = 1'b1;
        cls_pol    = {code_q[R1_HI], code_q[R3_LO]};
      end else begin
        cls_case = SB_EDGES_13;
      end
    end else if (r2 && r3) begin
      cls_case   = SB_SWAP_23;
      cls_severe = 1'b1;
      cls_pol    = {code_q[R2_HI], code_q[R3_LO]};
    end

    cls_ones = '0;
    for (int unsigned i = SWAP_LO; i <= SWAP_HI; i++) cls_ones += 6'(code_q[i]);
  end

  // ---- tap swapping (combinational on the stored code and decision) -----
  logic [N_TAPS-1:0] swapped;
  always_comb begin
    swapped = code_q;
    if (swap_q) begin
      for (int unsigned j = 0; j < SWAP_W; j++) begin
        if (high_q) swapped[SWAP_LO + j] = (j + 32'(ones_q) >= SWAP_W);
        else        swapped[SWAP_LO + j] = (j < 32'(ones_q));
      end
    end
  end

  assign in_ready_o = (state == ST_IDLE) || (state == ST_SWAP);

  always_ff @(posedge clk_i) begin
    if (rst_i) begin
      state       <= ST_IDLE;
      out_valid_o <= 1'b0;
      out_swap_o  <= 1'b0;
      out_case_o  <= SB_NONE;
      out_code_o  <= '0;
      out_side_o  <= '0;
      code_q      <= '0;
      side_q      <= '0;
      case_q      <= SB_NONE;
      swap_q      <= 1'b0;
      high_q      <= 1'b0;
      ones_q      <= '0;
    end else begin
      out_valid_o <= 1'b0;
      unique case (state)
        ST_CLASSIFY: begin
          case_q <= cls_case;
          swap_q <= cls_severe && (cls_pol == 2'b10 || cls_pol == 2'b01);
          high_q <= (cls_pol == 2'b10);
          ones_q <= cls_ones;
          state  <= ST_SWAP;
        end
        ST_SWAP: begin
          out_valid_o <= 1'b1;
          out_code_o  <= swapped;
          out_side_o  <= side_q;
          out_case_o  <= case_q;
          out_swap_o  <= swap_q;
          state       <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
      if (in_valid_i && in_ready_o) begin
        code_q <= in_code_i;
        side_q <= in_side_i;
        state  <= ST_CLASSIFY;
      end
    end
  end

  // The result of one code is a single-cycle pulse; results never abut.
  assert property (@(posedge clk_i) disable iff (rst_i) out_valid_o |=> !out_valid_o);

endmodule
