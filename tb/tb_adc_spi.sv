// tb_adc_spi: self-checking test of the ADC SPI write master.
// A testbench SPI slave samples SDIO on each rising SCLK while CSB is low.
// For random addresses and data each frame must carry exactly 24 bits equal
// to {0, 00, addr, data}, SCLK must idle low with a period of 2*CLK_DIV
// clocks, and busy must cover the frame; a start while busy is ignored.
`timescale 1ns/1ps
module tb_adc_spi;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, sclk, csb, sdio;
  logic [12:0] addr = 0;
  logic [7:0] data = 0;
  adc_spi #(.CLK_DIV(8)) dut (.clk, .rst_n, .start, .addr, .data, .busy, .sclk, .csb, .sdio);
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  logic [31:0] rx;
  int nbits;
  realtime last_rise;
  always @(posedge sclk) begin
    if (!csb) begin
      if (nbits > 0) chk($realtime - last_rise == 128.0, "SCLK period 16 clocks");
      rx = {rx[30:0], sdio};
      nbits++;
      last_rise = $realtime;
    end else chk(0, "SCLK while CSB high");
  end
  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    @(posedge clk); #1;
    chk(csb && !sclk && !busy, "idle state");
    for (int k = 0; k < 20; k++) begin
      automatic logic [12:0] a = 13'($urandom);
      automatic logic [7:0]  d = 8'($urandom);
      if (k == 0) begin a = 13'h0014; d = 8'h01; end
      nbits = 0; rx = 0;
      addr = a; data = d; start = 1;
      @(posedge clk); #1 start = 0;
      chk(busy, "busy after start");
      addr = ~a; data = ~d;
      repeat (50) @(posedge clk);
      #1 start = 1; @(posedge clk); #1 start = 0;   // ignored
      wait (!busy);
      @(posedge clk); #1;
      chk(csb && !sclk, "released");
      chk(nbits == 24, $sformatf("%0d bits", nbits));
      chk(rx[23:0] == {1'b0, 2'b00, a, d}, $sformatf("frame %h", rx[23:0]));
      repeat ($urandom_range(0, 5)) @(posedge clk);
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
