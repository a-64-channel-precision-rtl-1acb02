// tb_tdc_stretcher -- self-checking test of the hit stretcher.
//
// Hits (short pulses, 300..1500 ps wide) arrive at random times, never
// within 50 ps of a 400 MHz clock edge. For each hit the test checks the
// timing implied by the three flip-flops of the stretcher:
//   - release_o rises with the hit itself (no clock involved),
//   - release_o falls right after the 2nd rising clock edge that follows the
//     hit (FF2, then FF3 see it; FF3 clears FF1),
//   - dead_o is high from that 2nd edge until the 4th edge,
//   - a hit arriving while release_o or dead_o is high leaves no trace.
// Gaps between hits are random so that both shielded and accepted hits occur.
module tb_tdc_stretcher;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int T = 2500;
  logic clk = 1'b0, hit = 1'b0;
  logic rel, dead;
  always #(T/2) clk = ~clk;

  tdc_stretcher dut (.hit_i(hit), .clk_i(clk), .release_o(rel), .dead_o(dead));

  int checks = 0, failures = 0;
  int n_acc = 0, n_shield = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // Count rising clock edges.
  int edges = 0;
  always @(posedge clk) edges++;

  initial begin
    #(T * 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e0, ph, w;
    bit busy;
    // Let the random power-up state clear itself (at most 4 edges).
    repeat (6) @(posedge clk);
    check(!rel && !dead, "stretcher did not return to idle after power-up");
    for (int it = 0; it < 4000; it++) begin
      // random phase, away from the clock edges
      @(posedge clk);
      repeat ($urandom_range(0, 6)) @(posedge clk);
      ph = $urandom_range(50, T - 50);
      #(ph);
      busy = rel || dead;
      e0 = edges;
      w = $urandom_range(300, 1500);
      hit = 1'b1;
      #1;
      if (busy) begin
        n_shield++;
        hit = 1'b0;
        continue;
      end
      n_acc++;
      check(rel, "release did not follow the hit at once");
      #(w - 1);
      hit = 1'b0;
      // sometimes a second hit while the stretcher is still busy
      if ($urandom_range(0, 2) == 0) begin
        #50 hit = 1'b1; #100 hit = 1'b0;
        n_shield++;
      end
      // fall after the 2nd edge following the hit
      while (edges < e0 + 2) begin
        check(rel && !dead, "release ended early or dead too soon");
        @(posedge clk); #1;
      end
      check(!rel && dead, $sformatf("release not cleared at 2nd edge (rel=%0b dead=%0b)", rel, dead));
      @(posedge clk); #1;
      check(!rel && dead, "dead time shorter than 2 cycles");
      @(posedge clk); #1;
      check(!rel && !dead, "dead time longer than 2 cycles");
    end
    // Hit during dead time: must be shielded.
    @(posedge clk); #100;
    hit = 1'b1; #500; hit = 1'b0;
    @(posedge clk); @(posedge clk); #100;  // now dead
    check(dead, "expected dead state");
    hit = 1'b1; #300; hit = 1'b0;
    #1 check(!rel, "hit during dead time was not shielded");
    repeat (3) @(posedge clk); #1;
    check(!rel && !dead, "did not return to idle");
    check(n_acc > 500 && n_shield > 50, $sformatf("too few accepted (%0d) or shielded (%0d) hits", n_acc, n_shield));
    $display("accepted=%0d shielded=%0d", n_acc, n_shield);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
