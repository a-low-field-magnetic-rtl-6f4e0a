// adc_spi: register-write master for the ADC's 3-wire SPI port.
//
// One 'start' sends one 24-bit write frame, MSB first: R/W = 0 (write),
// W1:W0 = 00 (one data byte), the 13-bit register address, then the 8 data
// bits. CSB is low for the frame, SCLK idles low, SDIO changes after each
// falling SCLK edge and is stable at each rising edge. SCLK period is
// 2*CLK_DIV system clocks. 'busy' is high from the cycle after 'start' until
// CSB has returned high; 'start' is ignored while busy.
// The frame layout is the converter's standard write format; which registers
// to write is left to the host (through reg_config). This module is this
// design's own realisation of the ADC configuration function.
module adc_spi #(
  parameter int CLK_DIV = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [12:0] addr,
  input  logic [7:0]  data,
  output logic        busy,
  output logic        sclk,
  output logic        csb,
  output logic        sdio
);
  localparam int DW = $clog2(CLK_DIV + 1);
  logic [23:0]   shreg;
  logic [4:0]    nbit;     // rising edges still to come
  logic [DW-1:0] div;

  assign sdio = shreg[23];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      sclk  <= 1'b0;
      csb   <= 1'b1;
      shreg <= '0;
      nbit  <= '0;
      div   <= '0;
    end else if (!busy) begin
      if (start) begin
        busy  <= 1'b1;
        csb   <= 1'b0;
        sclk  <= 1'b0;
        shreg <= {1'b0, 2'b00, addr, data};
        nbit  <= 5'd24;
        div   <= '0;
      end
    end else begin
      if (div == DW'(CLK_DIV - 1)) begin
        div <= '0;
        if (!sclk && nbit != 0) begin
          sclk <= 1'b1;                  // rising edge: ADC samples sdio
          nbit <= nbit - 1'b1;
        end else if (sclk) begin
          sclk  <= 1'b0;                 // falling edge: next bit
          shreg <= {shreg[22:0], 1'b0};
        end else begin
          // a half period with SCLK low after the last bit, then release CSB
          csb  <= 1'b1;
          busy <= 1'b0;
        end
      end else begin
        div <= div + 1'b1;
      end
    end
  end
endmodule
