// tb_tdc_hit_capture -- self-checking test of the hit capture and clock-
// domain crossing between the 400 MHz sampling and 200 MHz encoding clocks.
//
// The flip-flop bank output is driven directly: the static pattern (lowest
// taps 0) most of the time, and for a random number of cycles a random
// "released" code whose low taps are 1. The encoding side takes data when a
// random ready signal is high. Checks:
//   - every rising of the low taps gives exactly one hit: captured (and
//     then delivered once, with the snapshot and coarse count of the first
//     released cycle) or dropped because the previous hit is still pending;
//   - nothing is delivered twice and nothing is lost silently.
module tb_tdc_hit_capture;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int N = 400;
  logic clk_s = 1'b0, clk_e = 1'b0, rst = 1'b1;
  always #1250 clk_s = ~clk_s;
  always @(posedge clk_s) clk_e <= ~clk_e;   // 200 MHz, phase-aligned

  logic [N-1:0]        sample, code;
  logic [COARSE_W-1:0] coarse_in, coarse;
  logic                drop, hit, ready, valid;

  tdc_hit_capture dut (.clk_s_i(clk_s), .clk_e_i(clk_e), .rst_i(rst), .sample_i(sample),
    .coarse_i(coarse_in), .drop_o(drop), .hit_o(hit), .ready_i(ready), .valid_o(valid),
    .code_o(code), .coarse_o(coarse));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  logic [N-1:0] static_code;
  initial for (int i = 0; i < N; i++) static_code[i] = !(i < 32 || (i >= 64 && i < 96));

  // expected deliveries, keyed by coarse count
  logic [N-1:0] exp_code[int];
  int n_hits = 0, n_cap = 0, n_drop = 0, n_got = 0;

  initial begin
    #(2500 * 200000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // coarse count in the sampling domain
  always @(posedge clk_s) coarse_in <= rst ? '0 : coarse_in + 1'b1;

  // consumer: random ready, checks what it receives
  always @(posedge clk_e) begin
    if (!rst && valid && ready) begin
      int k;
      k = int'(coarse);
      n_got++;
      check(exp_code.exists(k), $sformatf("delivered hit with unknown coarse %0d", k));
      if (exp_code.exists(k)) begin
        check(code == exp_code[k], "delivered snapshot differs from the released sample");
        exp_code.delete(k);
      end
    end
  end
  always @(negedge clk_e) ready <= ($urandom_range(0, 3) != 0);

  // monitor of captures / drops (registered one cycle after the sample)
  always @(negedge clk_s) if (!rst) begin
    n_cap  += hit;
    n_drop += drop;
    check(!(hit && drop), "hit both captured and dropped");
  end

  initial begin
    logic [N-1:0] r;
    sample = static_code; coarse_in = '0; ready = 1'b0;
    repeat (4) @(posedge clk_s);
    @(negedge clk_s) rst = 1'b0;
    for (int it = 0; it < 4000; it++) begin
      repeat ($urandom_range(1, 6)) @(negedge clk_s);
      // one released cycle: random code with taps 0..7 containing a 1
      for (int i = 0; i < N; i += 16) r[i +: 16] = 16'($urandom);
      r[$urandom_range(0, 7)] = 1'b1;
      sample = r;
      n_hits++;
      // the capture register takes it at the next posedge with coarse_in+1
      // (coarse_in increments on the same edge, sampled before update)
      @(posedge clk_s);
      if (!dut.pending) exp_code[int'(coarse_in)] = r;
      @(negedge clk_s);
      // the wave stays in the chain for a random 0..2 more cycles
      repeat ($urandom_range(0, 2)) begin
        sample[7:0] = 8'hFF;
        @(negedge clk_s);
      end
      sample = static_code;
    end
    repeat (20) @(negedge clk_s);
    check(n_cap + n_drop == n_hits, $sformatf("hits=%0d captured=%0d dropped=%0d", n_hits, n_cap, n_drop));
    check(n_got == n_cap, $sformatf("captured %0d but delivered %0d", n_cap, n_got));
    check(exp_code.size() == 0, "captured hits never delivered");
    check(n_drop > 0 && n_cap > 1000, "drops or captures never happened");
    $display("hits=%0d captured=%0d dropped=%0d", n_hits, n_cap, n_drop);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
