// tb_tdl_carry_chain -- self-checking test of the carry-chain delay-line
// model with its 4-edge wave generator.
//
// The release (mux select) is raised at a chosen time dt before a 400 MHz
// clock edge, for dt swept across one clock period in small steps, and the
// tap values presented for that edge are examined. Checks:
//   - with the chain quiet the static pattern 0^32 1^32 0^32 1^304 is shown,
//     and it comes back after the release drops;
//   - after release the code holds four edges: ones below edge 1, and
//     edges 2..4 about 32 taps above one another;
//   - edge 1 moves up the chain monotonically with dt (within the
//     width of a mild bubble) and, after a whole period, has travelled
//     more than 130 taps but stays inside the chain;
//   - severe bubbles (taps at and above 200 seen 173 ps late) and mild
//     bubbles (non-thermometer bits near an edge) both occur.
module tb_tdl_carry_chain;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 400;
  localparam int T = 2500;
  logic clk = 1'b0, rel = 1'b0;
  logic [N-1:0] taps;
  always #(T/2) clk = ~clk;

  tdl_carry_chain dut (.release_i(rel), .clk_i(clk), .taps_o(taps));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [N-1:0] static_code();
    logic [N-1:0] s;
    for (int i = 0; i < N; i++) s[i] = !(i < 32 || (i >= 64 && i < 96));
    return s;
  endfunction

  // Lowest tap starting a run of 8 equal bits of value v, at or above `from`.
  function automatic int run_at(logic [N-1:0] c, int from, logic v);
    for (int i = from; i + 8 <= N; i++) begin
      bit ok = 1;
      for (int k = 0; k < 8; k++) if (c[i+k] != v) ok = 0;
      if (ok) return i;
    end
    return -1;
  endfunction

  initial begin
    #(T * 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] c;
    int b1, b2, b3, p1, p_prev, n_severe, n_mild, p_max;
    n_severe = 0; n_mild = 0; p_prev = -1; p_max = 0;
    repeat (4) @(posedge clk);
    #1 check(taps == static_code(), "static pattern wrong with the chain quiet");
    for (int dt = 20; dt < T; dt += 7) begin
      @(posedge clk);
      #(T - dt);
      rel = 1'b1;
      #(dt - 1);
      c = taps;                     // value the flip-flops take at this edge
      @(posedge clk);
      #(T);
      rel = 1'b0;
      repeat (6) @(posedge clk);
      #1 check(taps == static_code(), "static pattern did not come back");
      // window boundaries between the four edges
      b1 = run_at(c, 0, 1'b0);
      b2 = (b1 < 0) ? -1 : run_at(c, b1, 1'b1);
      b3 = (b2 < 0) ? -1 : run_at(c, b2, 1'b0);
      check(c[0] == 1'b1, "tap 0 not 1 after release");
      check(b1 > 0 && b2 > b1 && b3 > b2 && c[N-1] == 1'b1,
            $sformatf("dt=%0d: code does not hold four edges", dt));
      if (b1 > 0) begin
        p1 = 0;
        for (int i = 0; i < b1; i++) p1 += c[i];
        check(p1 + 4 >= p_prev, $sformatf("dt=%0d: edge 1 moved back from %0d to %0d", dt, p_prev, p1));
        if (p1 > p_prev) p_prev = p1;
        if (p1 > p_max) p_max = p1;
        // spacing of edges 2..4 from edge 1 (severe bubbles aside)
        check(b3 + 8 < N, "edge 4 left the chain");
        // mild bubble: a 0 below a 1 inside edge 1's window
        for (int i = 1; i < b1; i++) if (c[i] && !c[i-1]) begin n_mild++; break; end
      end
      // severe bubble: the boundary taps 192..207 are not a clean step
      begin
        int flips = 0;
        for (int i = 185; i <= 215; i++) flips += (c[i] != c[i-1]);
        if (flips >= 3 && !(c[199] == c[200])) n_severe++;
      end
    end
    check(p_max > 130 && p_max < 304, $sformatf("edge 1 reached tap %0d after one period", p_max));
    check(n_severe > 0, "no severe bubble seen");
    check(n_mild > 0, "no mild bubble seen");
    $display("edge1 max=%0d severe=%0d mild=%0d", p_max, n_severe, n_mild);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
