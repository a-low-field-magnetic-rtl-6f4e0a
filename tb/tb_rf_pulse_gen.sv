// tb_rf_pulse_gen: self-checking test of the RF pulse transmitter.
// A short pulse (envelope FTW = 2^32/1000, about 1000 cycles) is played twice.
// Checks: the DAC sits at mid-scale (8192) outside the pulse; the pulse has
// ceil(2^32/FTW) - 1 RF samples and 'done' comes one cycle after the last;
// the envelope follows the sinc table (RF zero near the sinc zero crossings,
// largest magnitude near the middle, close to full scale); the RF sign
// pattern follows the carrier (right number of zero crossings for the carrier
// frequency); a start during the pulse is ignored; 'sync' restarts the
// carrier so that two pulses after identical sync-to-start delays are equal.
`timescale 1ns/1ps
module tb_rf_pulse_gen;
  import mri_pkg::*;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  tx_cfg_t cfg;
  logic sync = 0, start = 0, busy, done;
  logic signed [13:0] rf;
  logic [13:0] dac;
  rf_pulse_gen dut (.clk, .rst_n, .cfg, .sync, .start, .busy, .done, .rf, .dac_data(dac));
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  localparam int ENV_FTW = 4294967;            // 2^32 / 1000 (rounded down)
  localparam int CAR_FTW = 32'h0800_0000;      // 1/32 of the clock
  localparam int NSTEP   = (64'd1 << 32) / ENV_FTW + 1;   // step that wraps
  int rec [2][$];

  task automatic pulse(int which);
    int n, seen_done, t;
    sync = 1; @(posedge clk); #1 sync = 0;
    repeat (37) @(posedge clk);
    #1 start = 1; @(posedge clk); #1 start = 0;
    // RF is zero until the pulse reaches the DAC; record from now on
    n = 0; seen_done = 0; t = 0;
    while (!seen_done && t < 3000) begin
      @(posedge clk);
      t++;
      if (t == 100) begin start = 1; end          // ignored while busy
      if (t == 101) begin start = 0; end
      rec[which].push_back(int'(rf));
      if (done) seen_done = 1;
    end
    chk(seen_done, "done seen");
    @(posedge clk); #1;
    chk(!busy, "idle after done");
    chk(dac == 14'd8192 && rf == 0, "mid-scale after pulse");
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg = '0;
    cfg.env_ftw = ENV_FTW; cfg.env_amp = 14'h3FFF;
    cfg.car_ftw = CAR_FTW; cfg.car_amp = 14'h3FFF;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (5) @(posedge clk);
    #1;
    chk(dac == 14'd8192, "mid-scale before pulse");
    pulse(0);
    repeat (20) @(posedge clk);
    #1;
    pulse(1);
    begin
      int first = -1, last = -1, peak = 0, peak_at = 0, zc = 0, prev = 0;
      for (int k = 0; k < rec[0].size(); k++) begin
        automatic int v = rec[0][k];
        if (v != 0 && first < 0) first = k;
        if (v != 0) last = k;
        if ((v < 0 ? -v : v) > peak) begin peak = (v < 0 ? -v : v); peak_at = k; end
      end
      // samples from first to the cycle before 'done': NSTEP - 1 of them
      chk(rec[0].size() - 1 - first == NSTEP - 1, $sformatf("pulse length %0d exp %0d", rec[0].size() - 1 - first, NSTEP - 1));
      chk(peak > 8000, $sformatf("peak %0d", peak));
      chk(peak_at - first inside {[NSTEP/2 - 20 : NSTEP/2 + 20]}, $sformatf("peak at %0d", peak_at - first));
      // sinc zero crossing at 1/2 +- 1/6 of the pulse: envelope small there
      for (int d = -3; d <= 3; d++) begin
        automatic int v1 = rec[0][first + NSTEP/2 - NSTEP/6 + d];
        automatic int v2 = rec[0][first + NSTEP/2 + NSTEP/6 + d];
        chk((v1 < 0 ? -v1 : v1) < 300 && (v2 < 0 ? -v2 : v2) < 300, "envelope zero at +-pi");
      end
      // carrier: 32 cycles per period -> about 2 sign changes per 32 samples
      for (int k = first + 1; k <= last; k++) begin
        automatic int v = rec[0][k];
        if (v != 0 && prev != 0 && ((v > 0) != (prev > 0))) zc++;
        if (v != 0) prev = v;
      end
      chk(zc inside {[(NSTEP * 2) / 32 - 4 : (NSTEP * 2) / 32 + 2]}, $sformatf("carrier zero crossings %0d", zc));
      chk(rec[0].size() == rec[1].size(), "equal pulse lengths");
      for (int k = 0; k < rec[0].size() && k < rec[1].size(); k++)
        if (rec[0][k] != rec[1][k]) begin chk(0, $sformatf("pulses differ at %0d", k)); break; end
      checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
