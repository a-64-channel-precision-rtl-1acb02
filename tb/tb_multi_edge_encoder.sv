// tb_multi_edge_encoder -- self-checking test of the multi-edge decomposition
// encoder.
//
// Random 4-edge codes: edge 1 anywhere in [0,300], the next edges 28..36
// taps apart (the design keeps at least 28), polarity as the wave generator
// makes it (ones below edge 1). Around each edge a mild bubble of up to 7
// taps is drawn at random. The expected result is the sum of ones-counter
// positions of the four edges, computed by the testbench with windows cut
// at the midpoints between the known edges; the encoder has to find its own
// windows. Also checked: the 2-cycle latency, one code per cycle
// (back-to-back stream), and the error flag for a code without edges.
module tb_multi_edge_encoder;
  timeunit 1ps;
  timeprecision 1ps;
  import tdc_pkg::*;

  localparam int N = 400;
  logic clk = 1'b0, rst = 1'b1;
  always #2500 clk = ~clk;

  logic              in_valid, out_valid, out_err;
  logic [N-1:0]      in_code;
  logic [31:0]       in_side, out_side;
  logic [CODE_W-1:0] out_code;

  multi_edge_encoder dut (
    .clk_i(clk), .rst_i(rst), .in_valid_i(in_valid), .in_code_i(in_code), .in_side_i(in_side),
    .out_valid_o(out_valid), .out_code_o(out_code), .out_err_o(out_err), .out_side_o(out_side));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // Expected results, indexed by the side tag.
  int exp_q[int];
  bit exp_err[int];
  int n_bubbly = 0;

  task automatic make_code(output logic [N-1:0] c, output int expv);
    int p[4], m[5];
    p[0] = $urandom_range(0, 300);
    for (int k = 1; k < 4; k++) p[k] = p[k-1] + $urandom_range(28, 36);
    if (p[3] > 399) begin
      int sh = p[3] - 399;
      for (int k = 0; k < 4; k++) p[k] -= sh;
      if (p[0] < 0) p[0] = 0;
    end
    // ideal: ones below p0, zeros to p1, ones to p2, zeros to p3, ones above
    for (int i = 0; i < N; i++) begin
      int n_passed = 0;
      for (int k = 0; k < 4; k++) if (i >= p[k]) n_passed++;
      c[i] = (n_passed % 2) == 0;
    end
    // mild bubbles: random bits in up to 7 taps around each edge
    for (int k = 0; k < 4; k++) begin
      int w = $urandom_range(0, 7);
      int lo = p[k] - w / 2;
      for (int i = lo; i < lo + w; i++)
        if (i >= 0 && i < N && i != p[k] && i != p[k] - 1) c[i] = 1'($urandom_range(0, 1));
      if (w > 2) n_bubbly++;
    end
    // windows at the midpoints between edges
    m[0] = 0; m[4] = N;
    for (int k = 1; k < 4; k++) m[k] = (p[k-1] + p[k]) / 2;
    expv = 0;
    for (int k = 0; k < 4; k++) begin
      int cnt = 0;
      for (int i = m[k]; i < m[k+1]; i++) cnt += ((k % 2) == 0) ? c[i] : !c[i];
      expv += m[k] + cnt;
    end
  endtask

  initial begin
    #(5000 * 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Scoreboard: latency from input to output must be exactly 2 cycles.
  int in_cycle[int];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(negedge clk) begin
    if (!rst && out_valid) begin
      int tag;
      tag = int'(out_side);
      check(exp_q.exists(tag), $sformatf("unexpected result tag %0d", tag));
      if (exp_q.exists(tag)) begin
        check(cyc - in_cycle[tag] == 2, $sformatf("latency %0d, expected 2", cyc - in_cycle[tag]));
        check(out_err == exp_err[tag], $sformatf("tag %0d: err=%0b expected %0b", tag, out_err, exp_err[tag]));
        if (!exp_err[tag])
          check(int'(out_code) == exp_q[tag], $sformatf("tag %0d: code %0d expected %0d", tag, out_code, exp_q[tag]));
        exp_q.delete(tag);
      end
    end
  end

  initial begin
    logic [N-1:0] c;
    int e;
    in_valid = 0; in_code = '0; in_side = '0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    // back-to-back stream of random codes, with occasional gaps
    for (int it = 0; it < 5000; it++) begin
      @(negedge clk);
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 1'b0;
        @(negedge clk);
      end
      make_code(c, e);
      in_valid = 1'b1; in_code = c; in_side = 32'(it);
      exp_q[it] = e; exp_err[it] = 1'b0; in_cycle[it] = cyc;
    end
    // a code with no edge at all
    @(negedge clk);
    in_valid = 1'b1; in_code = '0; in_side = 32'(9999);
    exp_q[9999] = 0; exp_err[9999] = 1'b1; in_cycle[9999] = cyc;
    @(negedge clk);
    in_valid = 1'b0;
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, $sformatf("%0d codes never produced a result", exp_q.size()));
    check(n_bubbly > 1000, "too few codes with mild bubbles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
