// tb_dds: self-checking test of the DDS.
// A reference phase accumulator runs beside the DUT; every output is
// compared with round(8191*sin(2 pi a/16384)) (and the quarter-turn cosine)
// scaled by the amplitude, for random tuning words, phases and amplitudes.
// Also checks the 3-cycle latency, the wrap flag, the clear input and the
// sinc table of a second instance at its centre, zero crossings and edges.
`timescale 1ns/1ps
module tb_dds;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;

  logic en, clear;
  logic [31:0] ftw;
  logic [13:0] ph, amp;
  logic signed [13:0] wi, wq, si, sq;
  logic ov, wr, sv, swr;

  dds #(.WAVE(WAVE_SINE)) dut (.clk, .rst_n, .en, .clear, .ftw, .phase_ofs(ph), .amp,
    .wave_i(wi), .wave_q(wq), .out_valid(ov), .wrap(wr));
  dds #(.WAVE(WAVE_SINC), .SINC_LOBES(3)) dut_sinc (.clk, .rst_n, .en, .clear, .ftw, .phase_ofs(14'd0),
    .amp(14'h3FFF), .wave_i(si), .wave_q(sq), .out_valid(sv), .wrap(swr));

  function automatic int sine_tab(int a);
    return $rtoi($floor(8191.0 * $sin(2.0 * 3.14159265358979323846 * (a % 16384) / 16384.0) + 0.5));
  endfunction
  function automatic int scale(int t, int a);
    longint p = longint'(t) * a;
    return int'(p >>> 14);
  endfunction

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // reference: expected outputs queued at each accumulator step
  logic [31:0] racc;
  int exp_q[$], exp_i[$], exp_w[$];
  realtime exp_t[$];

  task automatic run(int n);
    for (int k = 0; k < n; k++) begin
      automatic logic [32:0] s;
      en = 1;
      s = {1'b0, racc} + {1'b0, ftw};
      racc = s[31:0];
      exp_q.push_back(scale(sine_tab(int'(racc[31:18]) + int'(ph)), int'(amp)));
      exp_i.push_back(scale(sine_tab(int'(racc[31:18]) + int'(ph) + 4096), int'(amp)));
      exp_w.push_back(int'(s[32]));
      exp_t.push_back($realtime);
      @(posedge clk); #1;
    end
    en = 0;
    repeat (5) @(posedge clk);
    #1;
  endtask

  bit checking = 1;
  int sinc_seen [16384];
  always @(posedge clk) if (rst_n && ov && checking) begin
    if (exp_q.size() == 0) chk(0, "unexpected output");
    else begin
      automatic int eq = exp_q.pop_front(), ei = exp_i.pop_front(), ew = exp_w.pop_front();
      automatic realtime et = exp_t.pop_front();
      chk(int'(wq) == eq, $sformatf("sine %0d exp %0d", wq, eq));
      chk(int'(wi) == ei, $sformatf("cosine %0d exp %0d", wi, ei));
      chk(int'(wr) == ew, "wrap flag");
      // en is set 1 ns after edge 0; the step is taken at edge 1, outputs are
      // registered at edge 3 and seen here at edge 4
      chk($realtime - et == 31.0, $sformatf("latency %0t", $realtime - et));
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clear = 0; ftw = 0; ph = 0; amp = 14'h3FFF; racc = 0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // frequency register needs one cycle to take the word
    ftw = 32'd476913168; @(posedge clk); #1;
    run(200);
    for (int t = 0; t < 6; t++) begin
      ftw = $urandom; ph = 14'($urandom); amp = 14'($urandom);
      @(posedge clk); #1;
      run(150);
    end
    // clear returns the phase to zero
    clear = 1; @(posedge clk); #1 clear = 0; racc = 0;
    ftw = 32'h4000_0000; ph = 0; amp = 14'h3FFF; @(posedge clk); #1;
    run(8);
    chk(exp_q.size() == 0, "all outputs seen");
    checking = 0;

    // sinc table: step one entry (2^18) per cycle from zero and sample
    clear = 1; @(posedge clk); #1 clear = 0;
    ftw = 32'd1 << 18; @(posedge clk); #1;
    en = 1;
    begin
      automatic int n = 0, peak = 0, pk_at = 0;
      for (int k = 0; k < 16384 + 10; k++) begin
        @(posedge clk);
        if (sv) begin
          automatic int v = int'(sq);
          n++;
          if (n < 16384) sinc_seen[n] = v;
          if (v > peak) begin peak = v; pk_at = n; end
        end
      end
      en = 0;
      // step n gives address n (mod 16384); centre address 8192 -> sinc(0)
      chk(peak >= 8180 && peak <= 8191, $sformatf("sinc peak %0d", peak));
      chk((pk_at % 16384) inside {[8192-64:8192]}, $sformatf("sinc peak at %0d", pk_at));
    end
    // direct table checks of zero crossings: x = +-pi at address 8192 +- 8192/3
    chk(sinc_seen[8192 + 2731] inside {[-20:20]}, "sinc zero at +pi");
    chk(sinc_seen[8192 - 2731] inside {[-20:20]}, "sinc zero at -pi");
    chk(sinc_seen[8192] == (8191 * 16383) / 16384, "sinc centre");
    chk(sinc_seen[8192 + 4096] < -1000, "sinc negative lobe");
    chk(sinc_seen[8192 + 2*2731] inside {[-20:20]}, "sinc zero at +2pi");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
