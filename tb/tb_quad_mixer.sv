// tb_quad_mixer: self-checking test of the quadrature mixer.
// Random samples and oscillator values, including the extreme codes, are
// checked against I = (x*cos) >>> 12 and Q = -(x*sin) >>> 12 one cycle later.
// A synthetic MR signal zi*cos - zq*sin mixed with its own carrier must give
// a mean I of zi/2 and a mean Q of zq/2 (the demodulation property).
`timescale 1ns/1ps
module tb_quad_mixer;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [13:0] x = 0, c = 0, s = 0;
  logic signed [15:0] i, q;
  quad_mixer #(.IN_W(14), .LO_W(14), .OUT_W(16)) dut (.clk, .rst_n, .in_valid, .x, .lo_cos(c), .lo_sin(s),
    .out_valid, .i, .q);
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    longint si = 0, sq = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 500; k++) begin
      automatic int xv = (k < 4) ? ((k % 2) ? 8191 : -8192) : int'($urandom_range(0, 16383)) - 8192;
      automatic int cv = (k < 4) ? -8191 : int'($urandom_range(0, 16382)) - 8191;
      automatic int sv = (k < 4) ? 8191 : int'($urandom_range(0, 16382)) - 8191;
      in_valid = 1; x = 14'(xv); c = 14'(cv); s = 14'(sv);
      @(posedge clk); #1;
      in_valid = 0;
      chk(out_valid, "out_valid after 1 cycle");
      chk(int'(i) == ((xv * cv) >>> 12), $sformatf("I %0d exp %0d", i, (xv * cv) >>> 12));
      chk(int'(q) == ((-(xv * sv)) >>> 12), $sformatf("Q %0d exp %0d", q, (-(xv * sv)) >>> 12));
      @(posedge clk); #1;
      chk(!out_valid, "out_valid one cycle");
    end
    // demodulation of zi = 3000, zq = -2000 over whole carrier periods
    for (int n = 0; n < 64 * 16; n++) begin
      automatic real ph = 2.0 * 3.14159265358979 * n / 16.0;
      automatic int cv = $rtoi($floor(8191.0 * $cos(ph) + 0.5));
      automatic int sv = $rtoi($floor(8191.0 * $sin(ph) + 0.5));
      automatic int xv = $rtoi($floor(3000.0 * $cos(ph) + 2000.0 * $sin(ph) + 0.5));
      in_valid = 1; x = 14'(xv); c = 14'(cv); s = 14'(sv);
      @(posedge clk); #1;
      si += i; sq += q;
    end
    in_valid = 0;
    // x = zi cos - zq sin with zi = 3000, zq = -2000; after the >>> 12 scaling
    // the means are zi and zq (the factor 1/2 of the mixing is undone by 2^13/2^12)
    chk((si / 1024) inside {[2990:3010]} , $sformatf("mean I %0d ", si / 1024));
    chk((sq / 1024) inside {[-2010:-1990]}, $sformatf("mean Q %0d", sq / 1024));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
