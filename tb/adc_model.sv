// adc_model: behavioural model of the eight-lane serial ADC output, for
// testbenches only. It generates the bit clock (period BIT_PS picoseconds)
// and, for every sample, shifts the eight 14-bit words of 'next_sample' out
// MSB first on the lanes, one bit per bit clock; 'frame' is high while the MSB
// is on the lanes. Data and frame change on the falling bit-clock edge so the
// receiver can sample on the rising edge. 'taken' pulses (one bit clock) when
// a new word set is loaded, so the testbench can supply the next one.
// Dropping 'run' takes effect at the next frame boundary.
`timescale 1ns/1ps
module adc_model #(
  parameter int BIT_PS = 1100
) (
  input  logic                     run,
  input  logic signed [7:0][13:0]  next_sample,
  output logic                     bit_clk,
  output logic                     frame,
  output logic [7:0]               din,
  output logic                     taken
);
  logic [7:0][13:0] sh;
  int bitn;
  initial begin
    bit_clk = 0; frame = 0; din = '0; taken = 0; bitn = 0; sh = '0;
    forever begin
      #(BIT_PS * 0.5ps) bit_clk = 1;
      #(BIT_PS * 0.5ps) bit_clk = 0;
      taken = 0;
      if (run || bitn != 0) begin
        if (bitn == 0) begin
          sh = next_sample;
          taken = 1;
        end
        for (int c = 0; c < 8; c++) din[c] = sh[c][13 - bitn];
        frame = (bitn == 0);
        bitn = (bitn == 13) ? 0 : bitn + 1;
      end else begin
        frame = 0;
        din = '0;
      end
    end
  end
endmodule
