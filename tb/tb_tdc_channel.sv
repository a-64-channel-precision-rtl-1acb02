// tb_tdc_channel -- end-to-end test of single TDC channels.
//
// Two channels see the same hit signal: a rising-edge channel (FALLING=0)
// and a falling-edge channel (FALLING=1, its own delay-line seed). Hits are
// pulses of random width 500..1000 ps at random, asynchronous times; the
// rising channel measures their start, the falling channel their end. Most
// hits are 8..30 sampling cycles apart; some follow the previous one after
// only 1.2..5 cycles so that the dead time (stretcher, then the capture
// waiting for the non-pipelined severe-bubble block) is exercised.
//
// The testbench keeps its own copy of the coarse count to know the time of
// every 400 MHz edge. For each result it checks:
//   - no encoder error;
//   - the snapshot edge (the edge before the stored coarse count) lies 0 to
//     one period + 100 ps after a generated hit, i.e. the coarse count
//     belongs to that hit;
//   - the latency from the snapshot edge to the result is fixed (the
//     2-cycle severe-bubble block plus the 2-cycle encoder).
// At the end a code-density style calibration is done inside the test:
// half of the (code, true phase) pairs build a code -> time table, the
// other half is measured with it; the RMS error must stay below 6 ps
// (the model has no jitter; mild bubbles and within-region skew set it).
// Every mechanism must be seen at least once: results on both channels,
// stretcher-shielded hits, hits dropped while the previous one waits, and
// every severe-bubble swap branch (regions 2&4, 1&3, 2&3).
module tb_tdc_channel;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int    T      = 2500;
  localparam int    N_HITS = 20000;
  localparam int    NCH    = 2;

  logic clk_s = 1'b0, clk_e = 1'b0, rst = 1'b1, hit = 1'b0;
  always #(T/2) clk_s = ~clk_s;
  always @(posedge clk_s) clk_e <= ~clk_e;

  logic [NCH-1:0] valid, drop, dead, swap, captured;
  tdc_hit_t       res  [NCH];
  sb_case_e       cas  [NCH];

  // channel 0: defaults (rising edge, seed 1); channel 1: falling edge
  tdc_channel u_rise (
    .clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .hit_i(hit),
    .hit_valid_o(valid[0]), .hit_o(res[0]), .drop_o(drop[0]), .dead_o(dead[0]),
    .sb_swap_o(swap[0]), .sb_case_o(cas[0]), .captured_o(captured[0]));
  tdc_channel #(.FALLING(1'b1), .SEED(2)) u_fall (
    .clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .hit_i(hit),
    .hit_valid_o(valid[1]), .hit_o(res[1]), .drop_o(drop[1]), .dead_o(dead[1]),
    .sb_swap_o(swap[1]), .sb_case_o(cas[1]), .captured_o(captured[1]));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endtask

  // time of each sampling edge, keyed by the coarse count before the edge
  longint t_of[int];
  int     cnt_model = 0, edge_no = 0;
  longint edge_t[int];
  always @(posedge clk_s) begin
    t_of[cnt_model] = $time;
    cnt_model = rst ? 0 : cnt_model + 1;
  end

  // generated measured-edge times per channel
  longint hit_t[NCH][$];
  int     ptr[NCH];
  int     n_res[NCH], n_drop[NCH], n_case[NCH][7], lat_min[NCH], lat_max[NCH];
  int     codes[NCH][$];
  int     phases[NCH][$];
  int     n_ecycle = 0;
  always @(posedge clk_e) n_ecycle++;

  initial begin
    #(longint'(T) * 40 * N_HITS);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk_s) if (!rst) for (int c = 0; c < NCH; c++) n_drop[c] += drop[c];

  // result checker (outputs are stable at the falling edge of clk_e)
  always @(negedge clk_e) if (!rst) begin
    for (int c = 0; c < NCH; c++) if (valid[c]) begin
      longint ts, ph;
      int     cc;
      bit     found;
      cc = int'(res[c].coarse);
      n_res[c]++;
      n_case[c][cas[c]]++;
      check(!res[c].err, $sformatf("ch%0d: encoder error", c));
      check(t_of.exists(cc - 1), $sformatf("ch%0d: coarse %0d not a past edge", c, cc));
      if (t_of.exists(cc - 1)) begin
        ts = t_of[cc - 1];
        // latency: from the snapshot edge to this result
        begin
          int lat;
          lat = int'(($time - ts) / T);
          if (n_res[c] == 1) begin lat_min[c] = lat; lat_max[c] = lat; end
          if (lat < lat_min[c]) lat_min[c] = lat;
          if (lat > lat_max[c]) lat_max[c] = lat;
        end
        while (ptr[c] < hit_t[c].size() && hit_t[c][ptr[c]] < ts - T - 100) ptr[c]++;
        found = ptr[c] < hit_t[c].size() && hit_t[c][ptr[c]] <= ts;
        check(found, $sformatf("ch%0d: result with coarse %0d matches no hit", c, cc));
        if (found) begin
          ph = ts - hit_t[c][ptr[c]];
          codes[c].push_back(int'(res[c].code));
          phases[c].push_back(int'(ph));
          ptr[c]++;
        end
      end
    end
  end

  // code -> time calibration on even samples, measured on odd samples
  function automatic real calib_rms(int c, output int n_bins);
    real sum_t[int];
    int  n_t[int];
    real err2;
    int  n;
    for (int i = 0; i < codes[c].size(); i += 2) begin
      if (!n_t.exists(codes[c][i])) begin n_t[codes[c][i]] = 0; sum_t[codes[c][i]] = 0.0; end
      n_t[codes[c][i]]++;
      sum_t[codes[c][i]] += real'(phases[c][i]);
    end
    n_bins = n_t.size();
    err2 = 0.0; n = 0;
    for (int i = 1; i < codes[c].size(); i += 2)
      if (n_t.exists(codes[c][i])) begin
        real d = real'(phases[c][i]) - sum_t[codes[c][i]] / real'(n_t[codes[c][i]]);
        err2 += d * d;
        n++;
      end
    return (n > 0) ? $sqrt(err2 / real'(n)) : 1.0e9;
  endfunction

  initial begin
    int gap, w, nbins;
    real rms;
    for (int c = 0; c < NCH; c++) begin ptr[c] = 0; n_res[c] = 0; n_drop[c] = 0; end
    repeat (8) @(posedge clk_s);
    @(negedge clk_s) rst = 1'b0;
    repeat (8) @(posedge clk_s);
    for (int h = 0; h < N_HITS; h++) begin
      if ($urandom_range(0, 6) == 0) gap = $urandom_range(3000, 12500);
      else                           gap = $urandom_range(20000, 75000);
      w = $urandom_range(500, 1000);
      #(gap - w);
      hit = 1'b1; hit_t[0].push_back($time);
      #(w);
      hit = 1'b0; hit_t[1].push_back($time);
    end
    repeat (40) @(posedge clk_s);
    for (int c = 0; c < NCH; c++) begin
      int shielded;
      shielded = N_HITS - n_res[c] - n_drop[c];
      rms = calib_rms(c, nbins);
      $display("ch%0d: hits=%0d results=%0d dropped=%0d shielded=%0d bins=%0d rms=%0.2f ps latency=%0d..%0d clk400",
               c, N_HITS, n_res[c], n_drop[c], shielded, nbins, rms, lat_min[c], lat_max[c]);
      $display("ch%0d: branches none=%0d r1r4=%0d swap24=%0d swap13=%0d swap23=%0d edges24=%0d edges13=%0d",
               c, n_case[c][0], n_case[c][1], n_case[c][2], n_case[c][3], n_case[c][4], n_case[c][5], n_case[c][6]);
      check(n_res[c] > N_HITS / 2, $sformatf("ch%0d: too few results", c));
      check(n_drop[c] > 0, $sformatf("ch%0d: no hit was ever dropped", c));
      check(shielded > 0, $sformatf("ch%0d: no hit was ever shielded", c));
      check(n_case[c][SB_SWAP_24] > 0, $sformatf("ch%0d: swap branch regions 2&4 never taken", c));
      check(n_case[c][SB_SWAP_13] > 0, $sformatf("ch%0d: swap branch regions 1&3 never taken", c));
      check(n_case[c][SB_SWAP_23] > 0, $sformatf("ch%0d: swap branch regions 2&3 never taken", c));
      check(nbins > 500 && nbins < 800, $sformatf("ch%0d: %0d effective bins", c, nbins));
      check(rms < 6.0, $sformatf("ch%0d: calibrated RMS %0.2f ps", c, rms));
      check(lat_max[c] - lat_min[c] <= 1, $sformatf("ch%0d: latency varies %0d..%0d", c, lat_min[c], lat_max[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
