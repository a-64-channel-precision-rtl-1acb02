// tb_tdc_code_density -- the published evaluation of a channel pair: code-
// density calibration followed by a coincidence time-resolution test.
//
// Two rising-edge channels with different delay-line seeds receive the same
// hit signal. Phase 1 sends 100,000 hits at random, asynchronous times
// (the number used for calibration in the published system) and builds, per
// channel, the histogram of fine codes. Each code's bin width is
// count / hits * 2.5 ns; the fine time of a code is the summed width of all
// smaller codes plus half its own width (larger code = hit further up the
// chain = earlier hit). From the histogram the test reports the number of
// non-empty bins, the average LSB and the largest DNL and INL.
// Phase 2 sends 20,000 more hits. Each channel forms the timestamp
// coarse * 2.5 ns - fine time. Since both channels see the same edge, the
// spread of the difference of their timestamps, divided by sqrt(2), is the
// single-channel RMS resolution (the published figure of merit). Unlike the
// end-to-end tests, nothing here uses the true hit times: only the codes.
// Checks: every hit is measured by both channels (hits are at least 8
// sampling cycles apart, beyond the dead time), no encoder error, average
// LSB between 2 and 6 ps, single-channel RMS below 6 ps and a mean offset
// between the channels of less than one clock period.
module tb_tdc_code_density;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int T       = 2500;
  localparam int N_CAL   = 100000;
  localparam int N_MEAS  = 20000;
  localparam int NCODE   = 1 << CODE_W;

  logic clk_s = 1'b0, clk_e = 1'b0, rst = 1'b1, hit = 1'b0;
  always #(T/2) clk_s = ~clk_s;
  always @(posedge clk_s) clk_e <= ~clk_e;

  logic [1:0] valid, drop, dead, swap, captured;
  tdc_hit_t   res [2];
  sb_case_e   cas [2];

  tdc_channel u_a (
    .clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .hit_i(hit),
    .hit_valid_o(valid[0]), .hit_o(res[0]), .drop_o(drop[0]), .dead_o(dead[0]),
    .sb_swap_o(swap[0]), .sb_case_o(cas[0]), .captured_o(captured[0]));
  tdc_channel #(.SEED(7)) u_b (
    .clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .hit_i(hit),
    .hit_valid_o(valid[1]), .hit_o(res[1]), .drop_o(drop[1]), .dead_o(dead[1]),
    .sb_swap_o(swap[1]), .sb_case_o(cas[1]), .captured_o(captured[1]));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // results in arrival order
  int     codes [2][$];
  longint coarse[2][$];
  int     n_err = 0;
  always @(negedge clk_e) if (!rst)
    for (int c = 0; c < 2; c++) if (valid[c]) begin
      codes[c].push_back(int'(res[c].code));
      coarse[c].push_back(longint'(res[c].coarse));
      n_err += res[c].err;
    end

  initial begin
    #(longint'(T) * 40 * (N_CAL + N_MEAS));
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real fine [2][NCODE];

  initial begin
    int  hist [2][NCODE];
    int  n_bins [2];
    real lsb, dnl_max, inl, inl_max, w, acc;
    real sum_d, sum_d2, mean_d, rms;
    int  n;
    repeat (8) @(posedge clk_s);
    @(negedge clk_s) rst = 1'b0;
    repeat (8) @(posedge clk_s);
    for (int h = 0; h < N_CAL + N_MEAS; h++) begin
      #($urandom_range(20000, 75000) - 800);
      hit = 1'b1; #800; hit = 1'b0;
    end
    repeat (40) @(posedge clk_s);
    for (int c = 0; c < 2; c++)
      check(codes[c].size() == N_CAL + N_MEAS,
            $sformatf("channel %0d measured %0d of %0d hits", c, codes[c].size(), N_CAL + N_MEAS));
    check(n_err == 0, $sformatf("%0d encoder errors", n_err));
    // ---- code density calibration ----
    for (int c = 0; c < 2; c++) begin
      for (int k = 0; k < NCODE; k++) hist[c][k] = 0;
      for (int i = 0; i < N_CAL && i < codes[c].size(); i++) hist[c][codes[c][i]]++;
      n_bins[c] = 0;
      for (int k = 0; k < NCODE; k++) n_bins[c] += (hist[c][k] != 0);
      lsb = real'(T) / real'(n_bins[c]);
      acc = 0.0; dnl_max = 0.0; inl = 0.0; inl_max = 0.0;
      for (int k = 0; k < NCODE; k++) begin
        w = real'(hist[c][k]) * real'(T) / real'(N_CAL);
        fine[c][k] = acc + w / 2.0;
        acc += w;
        if (hist[c][k] != 0) begin
          if (w / lsb - 1.0 > dnl_max) dnl_max = w / lsb - 1.0;
          inl += w / lsb - 1.0;
          if (inl > inl_max) inl_max = inl;
          if (-inl > inl_max) inl_max = -inl;
        end
      end
      $display("channel %0d: %0d bins, average LSB %0.3f ps, DNL max %0.2f LSB, INL max %0.2f LSB",
               c, n_bins[c], lsb, dnl_max, inl_max);
      check(lsb > 2.0 && lsb < 6.0, $sformatf("channel %0d: average LSB %0.3f ps", c, lsb));
    end
    // ---- coincidence test ----
    sum_d = 0.0; sum_d2 = 0.0; n = 0;
    for (int i = N_CAL; i < codes[0].size() && i < codes[1].size(); i++) begin
      real ta, tb, d;
      ta = real'(coarse[0][i]) * real'(T) - fine[0][codes[0][i]];
      tb = real'(coarse[1][i]) * real'(T) - fine[1][codes[1][i]];
      d = ta - tb;
      sum_d += d; sum_d2 += d * d; n++;
    end
    check(n == N_MEAS, $sformatf("%0d coincident measurements", n));
    if (n > 0) begin
      mean_d = sum_d / real'(n);
      rms = $sqrt(sum_d2 / real'(n) - mean_d * mean_d) / $sqrt(2.0);
      $display("coincidence: %0d hits, mean offset %0.2f ps, single-channel RMS %0.3f ps", n, mean_d, rms);
      check(rms < 6.0, $sformatf("single-channel RMS %0.3f ps", rms));
      check(mean_d < real'(T) && mean_d > -real'(T), "channels disagree by more than a clock period");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
