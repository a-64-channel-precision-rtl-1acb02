// tb_tdl_dff_bank -- self-checking test of the 400-bit sampling register.
//
// Random 400-bit words are applied between clock edges. The test checks
// that q_o takes exactly the word present at each rising edge (one cycle of
// latency), and that a change of the input between edges is not seen at the
// output until the next edge.
module tb_tdl_dff_bank;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N = 400;
  logic clk = 1'b0;
  always #1250 clk = ~clk;   // 400 MHz

  logic [N-1:0] d, q, prev;
  tdl_dff_bank dut (.clk_i(clk), .taps_i(d), .q_o(q));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] r;
    for (int i = 0; i < N; i += 32) r[i +: 16] = 16'($urandom);
    for (int i = 16; i < N; i += 32) r[i +: 16] = 16'($urandom);
    return r;
  endfunction

  initial begin
    #(2500 * 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d = rnd();
    @(posedge clk);
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      prev = d;
      d = rnd();
      #1 check(q == prev, "output changed between edges");
      @(posedge clk); #1;
      check(q == d, "output is not the word present at the clock edge");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
