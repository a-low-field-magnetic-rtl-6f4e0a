// tb_am_modulator: self-checking test of the AM modulator.
// Random envelope and carrier codes, with the gate on and off, are checked
// one cycle later against rf = sat((env*carrier) >>> 13) (0 when gated off)
// and against the offset-binary DAC code rf + 8192.
`timescale 1ns/1ps
module tb_am_modulator;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic gate = 0;
  logic signed [13:0] env = 0, car = 0, rf;
  logic [13:0] dac;
  am_modulator #(.DATA_W(14)) dut (.clk, .rst_n, .gate, .env, .carrier(car), .rf, .dac_data(dac));
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int k = 0; k < 1000; k++) begin
      automatic int e = (k == 0) ? -8192 : int'($urandom_range(0, 16383)) - 8192;
      automatic int c = (k == 0) ? -8192 : int'($urandom_range(0, 16383)) - 8192;
      automatic bit g = (k < 2) || ($urandom_range(0, 3) != 0);
      automatic int p = (e * c) >>> 13;
      automatic int r = !g ? 0 : (p > 8191) ? 8191 : (p < -8192) ? -8192 : p;
      gate = g; env = 14'(e); car = 14'(c);
      @(posedge clk); #1;
      chk(int'(rf) == r, $sformatf("rf %0d exp %0d", rf, r));
      chk(int'(dac) == r + 8192, $sformatf("dac %0d exp %0d", dac, r + 8192));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
