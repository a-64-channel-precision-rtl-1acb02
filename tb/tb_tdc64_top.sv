// tb_tdc64_top -- end-to-end, full-size test of the 64-channel TDC.
//
// The top is instantiated at its defaults (32 rising-edge and 32
// falling-edge channels). As in the published 64-channel test, one hit
// signal is fanned out to all inputs: pulses of random width 500..1000 ps
// at random, asynchronous times. Rising channels measure the start of each
// pulse, falling channels its end. Most hits are 8..30 sampling cycles
// apart; some follow the previous one after only 1.2..5 cycles so that the
// dead time (stretcher, then the capture waiting for the non-pipelined
// severe-bubble block) is exercised.
//
// The testbench keeps its own copy of the coarse count to know the time of
// every 400 MHz edge. For each result of each channel it checks:
//   - no encoder error;
//   - the snapshot edge (the edge before the stored coarse count) lies 0 to
//     one period + 100 ps after the generated edge, i.e. the coarse count
//     belongs to that hit;
//   - the latency from the snapshot edge to the result is fixed.
// At the end every channel gets its own code-density style calibration:
// half of its (code, true phase) pairs build a code -> time table, the
// other half is measured with it; the RMS error must stay below 6 ps
// (the model has no jitter). Coincidence: for every hit measured by both a
// channel and the reference channel of the same edge (channel 0 or 32),
// the difference of their calibrated time errors must have an RMS below
// 9 ps. This mirrors the published 64-channel test, where rising channel 0
// is compared with the other 31 rising channels and falling channel 0 with
// the other 31 falling channels.
// Every mechanism must be seen at least once in every channel: results,
// stretcher-shielded hits, hits dropped while the previous one waits, and
// every severe-bubble swap branch (regions 2&4, 1&3, 2&3).
module tb_tdc64_top;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int    T      = 2500;
  localparam int    N_HITS = 10000;
  localparam int    NCH    = 64;
  localparam int    NRISE  = 32;

  logic clk_s = 1'b0, clk_e = 1'b0, rst = 1'b1, hit = 1'b0;
  always #(T/2) clk_s = ~clk_s;
  always @(posedge clk_s) clk_e <= ~clk_e;

  logic [NCH-1:0] valid, drop, dead, swap, captured;
  tdc_hit_t       res  [NCH];
  sb_case_e       cas  [NCH];

  tdc64_top dut (
    .clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .hit_i({NCH{hit}}),
    .hit_valid_o(valid), .hit_o(res), .sb_swap_o(swap), .sb_case_o(cas),
    .captured_o(captured), .drop_o(drop), .dead_o(dead));

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
  int     hidx[NCH][$];       // index of the generated hit of each result
  real    cal[NCH][int];      // code -> mean phase (ps), from even samples
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
          hidx[c].push_back(ptr[c]);
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
    foreach (n_t[k]) cal[c][k] = sum_t[k] / real'(n_t[k]);
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
      hit = 1'b1;
      for (int c = 0; c < NRISE; c++) hit_t[c].push_back($time);
      #(w);
      hit = 1'b0;
      for (int c = NRISE; c < NCH; c++) hit_t[c].push_back($time);
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
    // Coincidence: calibrated time error of channel c minus that of the
    // reference channel of the same edge (0 or NRISE), hit by hit.
    begin
      real sum_rms;
      sum_rms = 0.0;
      for (int c = 0; c < NCH; c++) begin
        int  r, n;
        real e_ref[int];
        real d2;
        r = (c < NRISE) ? 0 : NRISE;
        if (c == r) continue;
        for (int i = 0; i < codes[r].size(); i++)
          if (cal[r].exists(codes[r][i])) e_ref[hidx[r][i]] = real'(phases[r][i]) - cal[r][codes[r][i]];
        d2 = 0.0; n = 0;
        for (int i = 0; i < codes[c].size(); i++)
          if (cal[c].exists(codes[c][i]) && e_ref.exists(hidx[c][i])) begin
            real d;
            d = (real'(phases[c][i]) - cal[c][codes[c][i]]) - e_ref[hidx[c][i]];
            d2 += d * d; n++;
          end
        check(n > 1000, $sformatf("ch%0d: too few coincident hits (%0d)", c, n));
        if (n > 0) begin
          check($sqrt(d2 / n) < 9.0, $sformatf("ch%0d: coincidence RMS %0.2f ps", c, $sqrt(d2 / n)));
          sum_rms += $sqrt(d2 / n);
        end
      end
      $display("average coincidence RMS against the reference channel: %0.2f ps", sum_rms / real'(NCH - 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
