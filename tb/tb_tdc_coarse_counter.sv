// tb_tdc_coarse_counter -- self-checking test of the coarse counter.
//
// Checks that the counter is 0 after reset, increments by exactly one per
// 400 MHz clock cycle, and that wrap_o pulses for one cycle when it rolls
// over. Roll-over is reached by a second instance with a 6-bit width so it
// happens in reasonable time; the full 32-bit instance is checked over
// 20000 cycles and against the elapsed cycle count.
module tb_tdc_coarse_counter;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 1'b0, rst = 1'b1;
  always #1250 clk = ~clk;

  logic [31:0] cnt;
  logic        wrap;
  logic [5:0]  cnt6;
  logic        wrap6;
  tdc_coarse_counter dut (.clk_i(clk), .rst_i(rst), .count_o(cnt), .wrap_o(wrap));
  tdc_coarse_counter #(.COARSE_W(6)) dut6 (.clk_i(clk), .rst_i(rst), .count_o(cnt6), .wrap_o(wrap6));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #(2500 * 100000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_wrap = 0;
    logic [31:0] prev;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    check(cnt == 0 && cnt6 == 0 && !wrap, "not zero after reset");
    for (int c = 1; c <= 20000; c++) begin
      prev = cnt;
      @(negedge clk);
      check(cnt == prev + 1, "count did not advance by one");
      check(cnt == 32'(c), $sformatf("count %0d after %0d cycles", cnt, c));
      check(32'(cnt6) == (c % 64), "6-bit counter wrong");
      check(wrap6 == (c % 64 == 0), "wrap flag wrong");
      n_wrap += wrap6;
    end
    check(n_wrap == 20000 / 64, $sformatf("%0d roll-overs, expected %0d", n_wrap, 20000 / 64));
    // reset in the middle
    rst = 1'b1;
    @(negedge clk);
    rst = 1'b0;
    check(cnt == 0, "synchronous reset failed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
