# 64-channel 4-edge Wave Union A TDC

This is SystemVerilog for the tapped-delay-line TDC described in "A 64-Channel
Precision Time-to-Digital Converter with Average 4.77 ps RMS Implemented in a
28 nm FPGA" (Kintex-7). Each channel times one edge of its input with a
400-tap carry chain. A 4-edge wave generator (Wave Union A) sends four edges
down that chain. A severe-bubble repair stage cleans the code near the
clock-region boundary at tap 200. A multi-edge decomposition encoder then
produces an 11-bit fine code, the sum of the four edge positions. The fine
code comes out together with a coarse count on the 400 MHz clock.

There are 64 channels: 32 time rising edges and 32 time falling edges.

## Structure

```
hit ─(inverter on falling channels)─> tdc_stretcher ──release──> tdl_carry_chain (model)
                                                                   │ 400 taps
                                          tdc_coarse_counter       v
                                                  │           tdl_dff_bank   (400 MHz)
                                                  v                │
                                              tdc_hit_capture <────┘   (400 MHz -> 200 MHz)
                                                  │
                                      severe_bubble_solution           (200 MHz, 2 cycles, not pipelined)
                                                  │
                                        multi_edge_encoder             (200 MHz, 2 stages, pipelined)
                                                  │
                                   hit_valid / {coarse, code[10:0], err}
```

| File | Contents |
|---|---|
| `rtl/tdc_pkg.sv` | Constants: 400 taps, 4 edges at a pitch of 32, the inspection regions, the check bits 178 and 221, and the 11-bit code. Types: `tdc_hit_t` and `sb_case_e`. |
| `rtl/tdc_stretcher.sv` | Three-flip-flop stretcher. FF1 is set by the hit and cleared by FF3. |
| `rtl/tdl_carry_chain.sv` | Behavioural model of the 400-tap carry chain. It includes the wave generator and the sampling skews. It is not synthesizable. |
| `rtl/tdl_dff_bank.sv` | 400 sampling flip-flops. |
| `rtl/tdc_coarse_counter.sv` | 32-bit coarse counter on the sampling clock. |
| `rtl/tdc_hit_capture.sv` | Hit detection and the hand-over to the encoding clock. |
| `rtl/severe_bubble_solution.sv` | Region checks, the decision flowchart, and tap swapping over `[215:184]`. |
| `rtl/multi_edge_encoder.sv` | De-bubbling and encoding to the sum of the edge positions. |
| `rtl/tdc_channel.sv` | One complete channel. |
| `rtl/tdc64_top.sv` | 64 channels: 32 rising and 32 falling. |

## Top-level interface (`tdc64_top`)

| Port | Dir | Clock | Meaning |
|---|---|---|---|
| `clk_s_i` | in | – | 400 MHz sampling clock |
| `clk_e_i` | in | – | 200 MHz encoding clock, phase-aligned with `clk_s_i` (2:1) |
| `rst_i` | in | both | Synchronous reset, active high |
| `hit_i[63:0]` | in | async | Hit inputs. Channels 0–31 time the rising edge; channels 32–63 time the falling edge. |
| `hit_valid_o[63:0]` | out | clk_e | One-cycle pulse per measured hit |
| `hit_o[64]` (`tdc_hit_t`) | out | clk_e | `coarse` (32 b), `code` (11 b) and `err` |
| `sb_swap_o[63:0]`, `sb_case_o[64]` | out | clk_e | Severe-bubble status of the same hit: whether taps were swapped, and which branch of the flowchart applied |
| `captured_o`, `drop_o` | out | clk_s | A hit was captured, or it was lost while the previous hit was still waiting |
| `dead_o` | out | – | The stretcher is shielding hits |

Parameters (default values in brackets):
- `N_RISE` and `N_FALL` (32/32).
- Delay-line model settings:
  - `TAP_PS`: mean tap delay (15 ps).
  - `TAP_SPREAD`: relative spread of the tap delay (0.4).
  - `REGION_SKEW_PS`: clock-region skew (173 ps).
  - `TAP_SKEW_PS`: within-region sampling skew (30 ps).

Meaning of a hit record:
- The snapshot was taken on the 400 MHz edge whose coarse count is `coarse - 1`.
- The hit arrived between 0 and one period (2.5 ns) before that edge.
- A larger `code` means the hit arrived earlier.
- To turn the code into a time you need a per-channel code-density calibration table. The published system builds that table offline from 100,000 random hits.

## How it works

**Wave generator and stretcher.**
- Muxes at taps 0, 32, 64 and 96 hold the static pattern `0^32 1^32 0^32 1^304` (tap 0 first). Their constants 0, 1, 0, 1 are the ones in the published circuit.
- A hit sets FF1, and FF1's output switches all four muxes to pass the carry. Four boundaries then travel up the chain together, 32 taps apart.
- Two flip-flops on the sampling clock delay FF1's output; the third of them clears FF1.
- As drawn, this gives a release lasting 1–2 cycles. It is followed by up to 2 cycles in which FF1 is held in reset, and hits arriving then are ignored.
- The published text gives a dead time of 3 cycles (one reset cycle). The circuit is implemented as drawn, so this design's worst-case stretcher dead time is 4 cycles (10 ns).
- FF1 is set asynchronously by the hit, which is how a TDC works. A lint tool may report its output as a net that is used both synchronously and asynchronously. This is expected.

**Delay-line model.**
- Each tap has a fixed delay. The mean is 15 ps (the typical MUXCY delay) with a ±20% spread, seeded per channel.
- Flip-flops of taps at 200 and above are clocked 173 ps late. This is the worst-case skew at a clock-region edge, and it produces severe bubbles of 10–15 taps.
- Each tap also has a fixed sampling offset of ±15 ps, which produces mild bubbles of a few taps.
- An edge covers about 167 taps per 2.5 ns sampling period, so the 304 delay taps are never run out of.

**Hit capture.**
- A hit is recognised on the first snapshot in which any of taps 0–7 reads 1, when none did in the snapshot before.
- The snapshot and the coarse count are stored, and a toggle request is sent to the encoding clock domain.
- A hit detected while the previous one is still waiting is dropped and reported on `drop_o`.
- This whole stage is this design's own choice. The published design does not describe it.

**Severe bubble solution.** The regions are:

| Region | Taps |
|---|---|
| R1 | [215:207] |
| R2 | [207:200] |
| R3 | [199:192] |
| R4 | [192:184] |

A region is "true" if it contains a transition. The flowchart is checked in this order:
- R1 & R4: no severe bubble.
- R2 & R4: severe if bit 207 ≠ bit 178.
- R1 & R3: severe if bit 221 ≠ bit 192.
- R2 & R3: severe.

For a severe bubble:
- Taps `[215:184]` are rewritten as a thermometer code with the same number of ones. This is tap swapping, and it gives the same result as a ones-counter.
- The bits at the window boundary give the side on which the ones are placed.
- The block is not pipelined. It takes one code every 2 cycles at 200 MHz, and the result is ready 2 cycles after acceptance.

**Multi-edge decomposition encoder.** The encoder works in two pipelined stages at 200 MHz and takes one code per cycle.

Stage 1 finds three window boundaries:
- `b1`: the first run of 8 zeros.
- `b2`: the first run of 8 ones at or above `b1`.
- `b3`: the first run of 8 zeros at or above `b2`.

A mild bubble (narrower than 8 taps) cannot contain such a run. Edges that are at least 28 taps apart always leave one between them.

Stage 2 computes `b1 + b2 + b3 + ones[0,b1) + zeros[b1,b2) + ones[b2,b3) + zeros[b3,400)`:
- This is the sum of the four ones-counter edge positions, so mild bubbles are absorbed.
- `err` is set if a boundary is missing.
- The published design gives only this encoder's function. The construction is this design's own.

**Latency.**
- From the snapshot edge to `hit_valid_o` takes 12–13 sampling cycles.
- That is 2 encoding cycles for the severe-bubble block, 2 for the encoder, and the clock-domain hand-over.

**Dead time.**
- The stretcher blocks hits for up to 4 sampling cycles.
- A capture then waits until the severe-bubble block is free, which takes 2 encoding cycles.
- So hits closer together than about 5 sampling cycles (12.5 ns) can be shielded or dropped. At the 500 Hz rate of the published tests this has no effect.

## Deviations and own choices

- Region 4 is `[192:184]`. The published text says "[182:184]", which is read as a typo: `[191:185]` extended by one tap on each side is `[192:184]`.
- The stretcher's dead time is 4 cycles, not 3 (see above).
- A boundary polarity of `00` or `11` is not covered by the published flowchart. In that case the code is left unchanged.
- These are all this design's choices:
  - the coarse counter width (32 bits);
  - the clock-domain crossing and drop policy;
  - the encoder's internal construction;
  - the falling-edge input inverter;
  - the delay-line spread and within-region skew values.

## Not implemented

These parts are not implemented, and each reason is given:
- **Code-density calibration and timestamp formation.** In the published system this is offline PC software. The testbenches carry out the same calibration to check the codes.
- **PLL, BUFG/BUFH clock tree, input pads, external clock board and TCP readout.** These are vendor primitives, off-chip parts or unspecified logic. Their clocks and signals are top-level ports, and the clock-tree skew is reproduced inside the delay-line model.
- **Synthesizable carry chain.** `tdl_carry_chain` is a timing model. On silicon it would be 100 `CARRY4` primitives with placement constraints.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints `TB_RESULT checks=N failures=M`.

| Testbench | What is checked |
|---|---|
| `tb_tdc_stretcher` | Release rises with the hit and falls at the 2nd clock edge. Dead from edge 2 to edge 4. Hits during release or dead time are shielded. |
| `tb_tdl_carry_chain` | The static pattern and its return after release. Four edges are present. Edge 1 moves monotonically over one period. Severe and mild bubbles both occur. |
| `tb_tdl_dff_bank`, `tb_tdc_coarse_counter` | Register timing; counting and roll-over. |
| `tb_tdc_hit_capture` | Every hit is either captured and delivered once with the right snapshot, or dropped. |
| `tb_severe_bubble_solution` | Built severe bubbles within the published bounds, plus two-edge look-alikes (R1&R4, R2&R4, R1&R3, far edges). Checks the output code, the swap flag, the 2-cycle latency, and that a back-to-back second code waits. |
| `tb_multi_edge_encoder` | 4-edge codes with random mild bubbles compared against a reference sum. Checks the 2-cycle latency, a stream of one code per cycle, and the error flag. |
| `tb_tdc_channel` | A rising and a falling channel with 20,000 asynchronous hits. Checks the coarse count, a fixed latency, drops, shielding, and every swap branch. An in-test calibration gives about 620 bins and about 2.1 ps RMS; the model has no jitter, so this is the quantisation and mild-bubble error only. |
| `tb_tdc_code_density` | The published evaluation on two channels. 100,000 random hits build a bin-width table from the code histogram alone. 20,000 more hits give the coincidence resolution: about 620 bins, an average LSB of about 4 ps, DNL max 3–5 LSB, and 2.1 ps RMS per channel (the model has no jitter). |
| `tb_tdc64_top` | The full-size top at its defaults: 64 channels fed from one hit signal, 10,000 hits. Runs every per-channel check plus a coincidence RMS between channels (about 3.1 ps). |

To run a testbench with Verilator:

```
verilator --binary --timing --assert -Irtl --top-module tb_tdc64_top \
  rtl/tdc_pkg.sv rtl/tdc_stretcher.sv rtl/tdl_carry_chain.sv rtl/tdl_dff_bank.sv \
  rtl/tdc_coarse_counter.sv rtl/tdc_hit_capture.sv rtl/severe_bubble_solution.sv \
  rtl/multi_edge_encoder.sv rtl/tdc_channel.sv rtl/tdc64_top.sv tb/tb_tdc64_top.sv
./obj_dir/Vtb_tdc64_top
```

The 64-channel run takes well under a minute.
