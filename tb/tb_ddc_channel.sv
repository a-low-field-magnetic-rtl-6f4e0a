// tb_ddc_channel: self-checking test of one down-conversion channel.
// The ADC input is a synthetic MR signal x[n] = A cos(w0 n + w_d n + phi)
// at 65 MS/s (13.88 MHz carrier, strobes spread as 65 of every 125 clocks);
// the local oscillator is computed here as round(8191 cos/sin(w0 n)). The
// complex baseband z = A e^{j(w_d n + phi)} must come out as I + jQ:
//   on resonance   : I = A cos(phi), Q = A sin(phi) within 1 %
//   5 kHz offset   : |I + jQ| = A within 3 % (inside the 20 kHz band)
//   150 kHz offset : |I + jQ| < 1 % of A (rejected)
// and exactly one output per 1024 input samples. The I/Q conditions are
// checked on every output from the 25th after a tone starts (filters settled)
// and again on the last one.
`timescale 1ns/1ps
module tb_ddc_channel;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [13:0] x = 0, lc = 0, ls = 0;
  iq_t out;
  ddc_channel dut (.clk, .rst_n, .in_valid, .x, .lo_cos(lc), .lo_sin(ls), .out_valid, .out);
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  localparam real PI = 3.14159265358979323846;
  localparam real FS = 65.0e6, F0 = 13.88e6;
  longint n = 0;
  int nout = 0;
  longint nin = 0;
  always @(posedge clk) if (rst_n && out_valid) nout++;

  // per-output checks once a tone has settled (25 outputs after it starts)
  int mode = 0, tone_start = 0;
  longint last_nin = -1;
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic real vi = real'(out.i), vq = real'(out.q);
    automatic real m = $sqrt(vi * vi + vq * vq);
    // outputs lag their inputs by a few cycles, during which 0..2 more
    // strobes may arrive, so the spacing seen here varies by +-2
    if (last_nin >= 0) chk(nin - last_nin >= 1022 && nin - last_nin <= 1026, $sformatf("output spacing %0d inputs", nin - last_nin));
    last_nin = nin;
    if (nout - tone_start >= 25) begin
      case (mode)
        1: chk(vi > 0.99 * 2000.0 && vi < 1.01 * 2000.0 && vq > 0.99 * 3464.1 && vq < 1.01 * 3464.1,
               $sformatf("settled I/Q %f %f", vi, vq));
        2: chk(m > 0.97 * 4000.0 && m < 1.03 * 4000.0, $sformatf("settled 5 kHz magnitude %f", m));
        3: chk(m < 40.0, $sformatf("settled 150 kHz magnitude %f", m));
        default: ;
      endcase
    end
  end

  // run 'nsets' output samples of a tone at offset df; return the last output
  task automatic tone(real a, real df, real phi, int nsets, output real oi, output real oq);
    int start = nout;
    int slot = 0;
    tone_start = nout;
    while (nout - start < nsets) begin
      @(posedge clk); #1;
      slot = (slot + 1) % 125;
      if ((slot * 65) % 125 < 65) begin
        automatic real p0 = 2.0 * PI * F0 * n / FS;
        automatic real pd = 2.0 * PI * df * n / FS + phi;
        in_valid = 1;
        x  = 14'($rtoi($floor(a * $cos(p0 + pd) + 0.5)));
        lc = 14'($rtoi($floor(8191.0 * $cos(p0) + 0.5)));
        ls = 14'($rtoi($floor(8191.0 * $sin(p0) + 0.5)));
        n++; nin++;
      end else in_valid = 0;
    end
    in_valid = 0;
    oi = real'(out.i); oq = real'(out.q);
  endtask

  initial begin
    #100000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real oi, oq, mag;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    mode = 1;
    tone(4000.0, 0.0, PI / 3.0, 40, oi, oq);
    chk(oi > 0.99 * 2000.0 && oi < 1.01 * 2000.0, $sformatf("I %f exp 2000", oi));
    chk(oq > 0.99 * 3464.1 && oq < 1.01 * 3464.1, $sformatf("Q %f exp 3464", oq));
    chk(nout * 1024 <= nin && nin < (nout + 1) * 1024, $sformatf("rate: %0d out for %0d in", nout, nin));
    mode = 2;
    tone(4000.0, 5.0e3, 0.0, 40, oi, oq);
    mag = $sqrt(oi * oi + oq * oq);
    chk(mag > 0.97 * 4000.0 && mag < 1.03 * 4000.0, $sformatf("5 kHz magnitude %f", mag));
    mode = 3;
    tone(4000.0, 150.0e3, 0.0, 40, oi, oq);
    mag = $sqrt(oi * oi + oq * oq);
    chk(mag < 40.0, $sformatf("150 kHz magnitude %f", mag));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
