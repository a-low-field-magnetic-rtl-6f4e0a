// tb_cic_decim: self-checking test of the CIC decimator (N=3, R=8, M=1 and
// N=3, R=4). The reference is the CIC's definition: three cascaded length-RM
// moving sums of the input, sampled at every R-th input, divided by (RM)^N
// with an arithmetic shift. Inputs come on every cycle (as at the ADC rate)
// and with gaps; full-scale inputs check that integrator wrap-around cancels.
// Also checks the 1-cycle output latency.
`timescale 1ns/1ps
module tb_cic_decim;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0;
  logic signed [15:0] x = 0;
  logic ov8, ov4;
  logic signed [15:0] y8, y4;

  cic_decim #(.N(3), .R(8), .M(1), .W(16)) dut8 (.clk, .rst_n, .in_valid, .x, .out_valid(ov8), .y(y8));
  cic_decim #(.N(3), .R(4), .M(1), .W(16)) dut4 (.clk, .rst_n, .in_valid, .x, .out_valid(ov4), .y(y4));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  longint xs [$];
  int nin = 0;
  int e8 [$], e4 [$];
  realtime t8 [$], t4 [$];

  function automatic int ref_cic(int R, int N);
    // moving sums computed directly from the input history (zero before start)
    longint s [] = new[xs.size()];
    longint acc;
    for (int k = 0; k < xs.size(); k++) s[k] = xs[k];
    for (int st = 0; st < N; st++) begin
      longint t [] = new[xs.size()];
      for (int k = 0; k < xs.size(); k++) begin
        acc = 0;
        for (int d = 0; d < R; d++) if (k - d >= 0) acc += s[k - d];
        t[k] = acc;
      end
      s = t;
    end
    return int'(s[xs.size() - 1] >>> (N * $clog2(R)));
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ov8) begin
      if (e8.size() == 0) chk(0, "unexpected R8 output");
      else begin
        automatic int e = e8.pop_front();
        automatic realtime t = t8.pop_front();
        chk(int'(y8) == e, $sformatf("R8 y=%0d exp %0d", y8, e));
        chk($realtime - t == 15.0, "R8 latency");
      end
    end
    if (ov4) begin
      if (e4.size() == 0) chk(0, "unexpected R4 output");
      else begin
        automatic int e = e4.pop_front();
        automatic realtime t = t4.pop_front();
        chk(int'(y4) == e, $sformatf("R4 y=%0d exp %0d", y4, e));
        chk($realtime - t == 15.0, "R4 latency");
      end
    end
  end

  task automatic feed(int v, bit gap);
    in_valid = 1; x = 16'(v);
    xs.push_back(v);
    nin++;
    if (nin % 8 == 0) begin e8.push_back(ref_cic(8, 3)); t8.push_back($realtime); end
    if (nin % 4 == 0) begin e4.push_back(ref_cic(4, 3)); t4.push_back($realtime); end
    @(posedge clk); #1;
    in_valid = 0;
    if (gap) begin repeat ($urandom_range(1, 3)) @(posedge clk); #1; end
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    for (int k = 0; k < 160; k++) feed(int'($urandom_range(0, 65535)) - 32768, 0);
    for (int k = 0; k < 96; k++) feed(32767, 0);          // full scale: wrap-around
    for (int k = 0; k < 96; k++) feed(-32768, k % 2);
    for (int k = 0; k < 160; k++) feed(int'($urandom_range(0, 2000)) - 1000, 1);
    repeat (4) @(posedge clk);
    chk(e8.size() == 0 && e4.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
