// tb_adc_deser: self-checking test of the ADC lane capture and clock crossing.
// adc_model streams random 14-bit word sets at 65 MS/s (bit clock 910 MHz,
// 14 bits per frame) while the system clock runs at 125 MHz. Every word set
// that reaches 'sample' is compared, in order, with what was sent; none may
// be lost or duplicated, and the average strobe rate must equal the frame
// rate.
`timescale 1ns/1ps
module tb_adc_deser;
  logic clk = 0, rst_n = 0;
  always #4 clk = ~clk;
  int checks = 0, failures = 0;
  logic run = 0, bit_clk, frame, taken, valid;
  logic [7:0] din;
  logic signed [7:0][13:0] nxt, sample;
  logic [7:0][13:0] sent [$];

  adc_model #(.BIT_PS(1099)) u_adc (.run, .next_sample(nxt), .bit_clk, .frame, .din, .taken);
  adc_deser dut (.bit_clk, .frame, .din, .clk, .rst_n, .sample, .valid);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  always @(posedge taken) begin
    sent.push_back(nxt);
    for (int c = 0; c < 8; c++) nxt[c] = 14'($urandom);
  end

  int nvalid = 0;
  always @(posedge clk) if (rst_n && valid) begin
    nvalid++;
    if (sent.size() == 0) chk(0, "unexpected sample");
    else chk(sample == sent.pop_front(), "sample set");
  end

  initial begin
    #2000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++) nxt[c] = 14'($urandom);
    nxt[0] = 14'h2000; nxt[1] = 14'h1FFF;       // extreme codes first
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    repeat (3) @(posedge clk);
    run = 1;
    #20000;                                     // 20 us: about 1300 frames
    run = 0;
    #200;
    chk(sent.size() == 0, $sformatf("%0d sets not delivered", sent.size()));
    chk(nvalid inside {[1290:1310]}, $sformatf("%0d sets in 20 us", nvalid));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
