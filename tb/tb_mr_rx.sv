// tb_mr_rx: self-checking test of the eight-channel receiver with its own
// local-oscillator DDS.
// After 'sync', channel c receives A_c cos(w0 (n+1) + phi_c), A_c = 1000+400c,
// phi_c = c*pi/4 (the DDS output of the n-th sample after sync carries phase
// (n+1)*K). With lo_ftw for 13.88 MHz at 65 MS/s, every channel must deliver
// I = A_c cos(phi_c), Q = A_c sin(phi_c) within 1.5 % of A_c (phase
// coherence and per-channel independence). Then lo_phase is set to a quarter
// turn, which must rotate every channel's output by -90 degrees.
`timescale 1ns/1ps
module tb_mr_rx;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic sync = 0, in_valid = 0, out_valid;
  logic [31:0] ftw = 32'd917140708;
  logic [13:0] lo_phase = 0;
  logic signed [7:0][13:0] x = '0;
  iq_t [7:0] iq;
  mr_rx dut (.clk, .rst_n, .sync, .lo_ftw(ftw), .lo_phase, .in_valid, .x, .out_valid, .iq);
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  localparam real PI = 3.14159265358979323846;
  int nout = 0;
  longint n = 0;
  always @(posedge clk) if (rst_n && out_valid) nout++;

  function automatic real fabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

  task automatic run(int nsets);
    int start = nout, slot = 0;
    while (nout - start < nsets) begin
      @(posedge clk); #1;
      slot = (slot + 1) % 125;
      if ((slot * 65) % 125 < 65) begin
        // phase of the DDS for this sample, from the tuning word itself
        automatic real p0 = 2.0 * PI * real'((n + 1) * longint'(ftw) % (64'd1 << 32)) / 4294967296.0;
        for (int c = 0; c < 8; c++)
          x[c] = 14'($rtoi($floor((1000.0 + 400.0 * c) * $cos(p0 + c * PI / 4.0) + 0.5)));
        in_valid = 1;
        n++;
      end else in_valid = 0;
    end
    // let the last driven sample be taken before stopping
    @(posedge clk); #1;
    in_valid = 0;
  endtask

  initial begin
    #100000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1 sync = 1; @(posedge clk); #1 sync = 0; n = 0;
    run(40);
    for (int c = 0; c < 8; c++) begin
      automatic real a = 1000.0 + 400.0 * c, ph = c * PI / 4.0;
      chk(fabs(real'(iq[c].i) - a * $cos(ph)) < 0.015 * a, $sformatf("ch%0d I %0d exp %f", c, iq[c].i, a * $cos(ph)));
      chk(fabs(real'(iq[c].q) - a * $sin(ph)) < 0.015 * a, $sformatf("ch%0d Q %0d exp %f", c, iq[c].q, a * $sin(ph)));
    end
    // a quarter-turn LO phase offset rotates the baseband by -90 degrees
    lo_phase = 14'd4096;
    run(40);
    for (int c = 0; c < 8; c++) begin
      automatic real a = 1000.0 + 400.0 * c, ph = c * PI / 4.0 - PI / 2.0;
      chk(fabs(real'(iq[c].i) - a * $cos(ph)) < 0.015 * a, $sformatf("rot ch%0d I %0d exp %f", c, iq[c].i, a * $cos(ph)));
      chk(fabs(real'(iq[c].q) - a * $sin(ph)) < 0.015 * a, $sformatf("rot ch%0d Q %0d exp %f", c, iq[c].q, a * $sin(ph)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
