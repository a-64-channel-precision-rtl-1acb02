// tb_severe_bubble_solution -- self-checking test of the severe-bubble block.
//
// Codes are built edge by edge around the clock-region boundary (tap 200),
// in five families whose correct treatment is known from how they were
// built, not from the block's decision logic:
//   severe  : one edge seen at p < 200 by the lower region and at p+s >= 200
//             by the upper one (a real severe bubble). Expected: taps
//             [215:184] become a thermometer code with the same ones-count,
//             ones on the side where the code is 1 outside the window.
//   two-edge: two ordinary edges in regions 1+4, 2+4 or 1+3 (flowchart
//             branches that must leave the code alone), or one ordinary edge
//             far from tap 200. Expected: code unchanged, no swap.
// Other edges 32 taps away are added so the whole code looks like a real
// 4-edge code. Checks: output code, swap flag, the 2-cycle latency, and that
// a second code offered back-to-back waits for the block (not pipelined).
module tb_severe_bubble_solution;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  logic clk = 1'b0, rst = 1'b1;
  always #2500 clk = ~clk;   // 200 MHz

  logic              in_valid, in_ready, out_valid, out_swap;
  logic [N_TAPS-1:0] in_code, out_code;
  logic [31:0]       in_side, out_side;
  sb_case_e          out_case;

  severe_bubble_solution dut (
    .clk_i(clk), .rst_i(rst),
    .in_valid_i(in_valid), .in_ready_o(in_ready), .in_code_i(in_code), .in_side_i(in_side),
    .out_valid_o(out_valid), .out_code_o(out_code), .out_side_o(out_side),
    .out_case_o(out_case), .out_swap_o(out_swap));

  int checks = 0, failures = 0;
  int n_fam[5];
  int n_case[7];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // Code with ones below `lo_edge` when ones_low, toggling at each listed edge.
  function automatic logic [N_TAPS-1:0] edges_code(bit start_val, int e[$]);
    logic [N_TAPS-1:0] c;
    logic v;
    v = start_val;
    for (int i = 0; i < N_TAPS; i++) begin
      foreach (e[k]) if (e[k] == i) v = ~v;
      c[i] = v;
    end
    return c;
  endfunction

  // Build one test code; returns the expected output and swap flag.
  task automatic make_case(int fam, output logic [N_TAPS-1:0] code,
                           output logic [N_TAPS-1:0] exp_code, output bit exp_swap);
    int p, s, a, b, n;
    bit v0;
    logic [N_TAPS-1:0] lo_view, hi_view;
    v0 = 1'($urandom_range(0, 1));
    exp_swap = 1'b0;
    case (fam)
      0: begin  // severe bubble
        // Short side < 8 taps, long side < 15, whole bubble < 16 (the
        // published bounds).
        do begin
          p = $urandom_range(186, 199);
          s = $urandom_range(201 - p, 214 - p);
        end while (!((200 - p < 8 || p + s - 200 < 8) && (200 - p < 15) && (p + s - 200 < 15) && s < 16));
        lo_view = edges_code(v0, '{p - 32, p, p + 32});
        hi_view = edges_code(v0, '{p - 32, p + s, p + s + 32});
        code = lo_view;
        for (int i = 200; i < N_TAPS; i++) code[i] = hi_view[i];
        n = 0;
        for (int i = SWAP_LO; i <= SWAP_HI; i++) n += code[i];
        exp_code = code;
        // Value below the window (tap 183) is the value the ones sit next to.
        for (int j = 0; j < 32; j++)
          exp_code[SWAP_LO + j] = code[183] ? (j < n) : (j >= 32 - n);
        exp_swap = 1'b1;
      end
      1: begin  // regions 1 and 4
        a = $urandom_range(185, 192); b = $urandom_range(208, 215);
        code = edges_code(v0, '{a - 32, a, b, b + 32});
        exp_code = code;
      end
      2: begin  // regions 2 and 4, bit 207 == bit 178
        a = $urandom_range(185, 192); b = $urandom_range(201, 207);
        code = edges_code(v0, '{a - 40, a, b, b + 40});
        exp_code = code;
      end
      3: begin  // regions 1 and 3, bit 221 == bit 192
        a = $urandom_range(193, 199); b = $urandom_range(209, 215);
        code = edges_code(v0, '{a - 40, a, b, b + 40});
        exp_code = code;
      end
      default: begin  // ordinary edges away from tap 200
        a = $urandom_range(140, 170); b = a + $urandom_range(50, 60);
        code = edges_code(v0, '{a - 32, a, b, b + 32});
        exp_code = code;
      end
    endcase
  endtask

  initial begin
    #(5000 * 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N_TAPS-1:0] code, exp_code, code2, exp_code2;
    bit exp_swap, exp_swap2;
    int t_in, t_out, fam, fam2;
    in_valid = 0; in_code = '0; in_side = '0;
    repeat (3) @(posedge clk);
    rst <= 1'b0;
    @(posedge clk);
    for (int it = 0; it < 3000; it++) begin
      fam = it % 5;
      make_case(fam, code, exp_code, exp_swap);
      n_fam[fam]++;
      // offer it (inputs change and outputs are read away from the clock edge)
      @(negedge clk);
      in_valid = 1'b1; in_code = code; in_side = 32'(it);
      while (!in_ready) @(negedge clk);
      @(negedge clk);
      t_in = it;
      in_valid = 1'b0;
      // count cycles to the result
      t_out = 0;  // cycles after the accepting clock edge
      while (!out_valid && t_out < 10) begin @(negedge clk); t_out++; end
      check(out_valid, $sformatf("no result for code %0d", it));
      check(t_out == 2, $sformatf("latency %0d cycles, expected 2", t_out));
      check(out_code == exp_code, $sformatf("family %0d code %0d: output code wrong", fam, it));
      check(out_swap == exp_swap, $sformatf("family %0d code %0d: swap=%0b expected %0b", fam, it, out_swap, exp_swap));
      check(out_side == 32'(t_in), "side information lost");
      n_case[out_case]++;
    end
    // Back-to-back: second code must wait until the first is done.
    begin
      int acc_cycles;
      make_case(0, code, exp_code, exp_swap);
      make_case(1, code2, exp_code2, exp_swap2);
      @(negedge clk);
      in_valid = 1'b1; in_code = code;
      @(negedge clk);
      in_code = code2;
      acc_cycles = 0;
      check(!in_ready, "ready while classifying: block would be pipelined");
      while (!in_ready) begin @(negedge clk); acc_cycles++; end
      @(negedge clk);
      in_valid = 1'b0;
      check(acc_cycles == 1, $sformatf("second code accepted after %0d extra cycles, expected 1", acc_cycles));
      check(out_valid && out_code == exp_code, "first back-to-back result wrong");
      repeat (2) @(negedge clk);
      check(out_valid && out_code == exp_code2, "second back-to-back result wrong");
    end
    for (int f = 0; f < 5; f++) check(n_fam[f] > 0, "family never generated");
    check(n_case[SB_SWAP_24] > 0 && n_case[SB_SWAP_13] > 0 && n_case[SB_SWAP_23] > 0,
          "not every severe-bubble branch was taken");
    $display("branches: none=%0d 1&4=%0d 2&4swap=%0d 1&3swap=%0d 2&3swap=%0d 2&4edges=%0d 1&3edges=%0d",
             n_case[0], n_case[1], n_case[2], n_case[3], n_case[4], n_case[5], n_case[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
