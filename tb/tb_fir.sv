// tb_fir: self-checking test of fir_decim configured as the final 31-tap channel FIR (decimate 2).
// Random input samples (some at full scale, to exercise saturation) are fed
// with random gaps of at least one idle cycle; a reference convolution with the
// same coefficient list (round half up, >>> 17, saturate to 16 bits) predicts
// every FIR_DEC-th output. Also checks the 2-cycle latency from the input that
// completes a group to out_valid, and the DC gain of the filter.
`timescale 1ns/1ps
module tb_fir;
  import mri_pkg::*;
  localparam int TAPS = FIR_TAPS;
  localparam int DEC  = FIR_DEC;
  localparam logic signed [COEF_W-1:0] C [TAPS] = FIR_COEF;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_valid;
  logic signed [15:0] x = 0, y;

  fir_decim #(.TAPS(FIR_TAPS), .DEC(FIR_DEC), .W(16), .COEF(FIR_COEF)) dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  int hist [$];          // newest first
  int nin = 0, exp_y [$];
  realtime exp_t [$];

  function automatic int ref_out();
    longint acc = 64'sd1 <<< (COEF_FRAC - 1);
    for (int k = 0; k < TAPS; k++) acc += longint'(C[k]) * (k < hist.size() ? hist[k] : 0);
    acc = acc >>> COEF_FRAC;
    if (acc > 32767) acc = 32767;
    if (acc < -32768) acc = -32768;
    return int'(acc);
  endfunction

  always @(posedge clk) if (rst_n && out_valid) begin
    if (exp_y.size() == 0) chk(0, "unexpected output");
    else begin
      automatic int e = exp_y.pop_front();
      automatic realtime t = exp_t.pop_front();
      chk(int'(y) == e, $sformatf("y=%0d exp %0d", y, e));
      chk($realtime - t == 23.0, $sformatf("latency %0t", $realtime - t));
    end
  end

  task automatic feed(int v);
    in_valid = 1; x = 16'(v);
    hist.push_front(v);
    nin++;
    if (nin % DEC == 0) begin exp_y.push_back(ref_out()); exp_t.push_back($realtime); end
    @(posedge clk); #1;
    in_valid = 0;
    repeat (1 + $urandom_range(0, 2)) @(posedge clk);
    #1;
  endtask

  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (2) @(posedge clk);
    #1;
    for (int k = 0; k < 600; k++) begin
      case ($urandom_range(0, 9))
        0: feed(32767);
        1: feed(-32768);
        default: feed(int'($urandom_range(0, 40000)) - 20000);
      endcase
    end
    // DC: a constant input settles to the constant times the coefficient sum
    for (int k = 0; k < TAPS * 2 + DEC; k++) feed(10000);
    repeat (4) @(posedge clk);
    chk(y inside {[9980:10020]}, $sformatf("DC gain y=%0d", y));
    chk(exp_y.size() == 0, "all outputs seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
