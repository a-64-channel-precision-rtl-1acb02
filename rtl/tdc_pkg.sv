// tdc_pkg -- constants and types shared by the blocks of the 4-edge
// wave-union-A tapped-delay-line TDC.
//
// The numbers here are the ones the design is built around: a 400-tap
// carry chain, a 4-edge wave generator that injects edges at taps 0, 32, 64
// and 96, the clock-region boundary at tap 200 with its four inspection
// regions, and the 11-bit fine code. Everything that is a number taken from
// the published design is marked as such; the coarse-counter width is this
// implementation's own choice. A module that imports the package uses only
// some of these constants, so a lint run on one module alone lists the
// others as unused; that is expected.
package tdc_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  // Carry chain: 100 CARRY4 = 400 MUXCY outputs, each with a flip-flop.
  localparam int unsigned N_TAPS      = 400;
  // Injection muxes of the wave generator (taps 0, 32, 64, 96); the
  // generator occupies the first 96 taps, the other 304 are delay line.
  localparam int unsigned N_EDGES     = 4;
  localparam int unsigned EDGE_PITCH  = 32;

  // Fine code: sum of the four edge positions, 11 bits.
  localparam int unsigned CODE_W      = 11;
  // Coarse counter width (own choice; the published design gives none).
  localparam int unsigned COARSE_W    = 32;

  // Severe-bubble inspection around the clock-region boundary (tap 200).
  // Region 1 = [215:207], region 2 = [207:200], region 3 = [199:192],
  // region 4 = [192:184]; tap swapping acts on [215:184].
  localparam int unsigned R1_HI = 215, R1_LO = 207;
  localparam int unsigned R2_HI = 207, R2_LO = 200;
  localparam int unsigned R3_HI = 199, R3_LO = 192;
  localparam int unsigned R4_HI = 192, R4_LO = 184;
  localparam int unsigned SWAP_HI = 215, SWAP_LO = 184;
  localparam int unsigned SWAP_W  = SWAP_HI - SWAP_LO + 1;   // 32
  // Extra bits compared to tell a severe bubble from two ordinary edges:
  // 199-16-6+1 = 178 and 200+16+6-1 = 221.
  localparam int unsigned CHK_LO_BIT = 178;
  localparam int unsigned CHK_HI_BIT = 221;

  // Which branch of the severe-bubble flowchart fired.
  typedef enum logic [2:0] {
    SB_NONE     = 3'd0,  // no region pair matched
    SB_EDGES_14 = 3'd1,  // regions 1 and 4: two ordinary edges, no bubble
    SB_SWAP_24  = 3'd2,  // regions 2 and 4, bit 207 != bit 178
    SB_SWAP_13  = 3'd3,  // regions 1 and 3, bit 221 != bit 192
    SB_SWAP_23  = 3'd4,  // regions 2 and 3
    SB_EDGES_24 = 3'd5,  // regions 2 and 4 but two ordinary edges
    SB_EDGES_13 = 3'd6   // regions 1 and 3 but two ordinary edges
  } sb_case_e;

  // One measured hit as it leaves a channel.
  typedef struct packed {
    logic [COARSE_W-1:0] coarse;  // coarse count at the capturing sample
    logic [CODE_W-1:0]   code;    // sum of the four edge positions
    logic                err;     // encoder could not find all four edges
  } tdc_hit_t;

endpackage
