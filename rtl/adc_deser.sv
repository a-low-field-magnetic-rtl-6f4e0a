// adc_deser: serial-to-parallel capture of the eight ADC lanes.
//
// The converter sends each channel's 14-bit sample on its own serial lane,
// MSB first, with a frame signal that rises with the MSB. In the bit_clk
// domain a per-lane shift register collects the bits; a bit counter restarted
// by the frame's rising edge marks the LSB, at which point all eight words are
// pushed as one entry into a dual-clock FIFO (async_fifo). In the system
// clock domain every entry is popped as soon as it is visible, loaded into
// 'sample' and announced by a one-cycle 'valid'. The system clock must be
// faster than the sample rate (125 MHz against 65 MS/s here); strobes may
// then come in consecutive cycles but on average at the sample rate.
// Latency: about 3 system clocks after the LSB edge.
// Single-data-rate capture and two's-complement coding are this design's
// choices; the converter's double-data-rate LVDS lanes would need the FPGA's
// input buffers and DDR flops in front of this module.
module adc_deser
  import mri_pkg::*;
(
  input  logic                            bit_clk,
  input  logic                            frame,
  input  logic [NCH-1:0]                  din,
  input  logic                            clk,
  input  logic                            rst_n,
  output logic signed [NCH-1:0][ADC_W-1:0] sample,
  output logic                            valid
);
  // ---- bit clock domain ----
  logic [NCH-1:0][ADC_W-1:0] sr, word;
  logic [3:0]                cnt;
  logic                      frame_d, push, full_unused;

  always_ff @(posedge bit_clk or negedge rst_n) begin
    if (!rst_n) begin
      sr      <= '0;
      cnt     <= '0;
      frame_d <= 1'b0;
    end else begin
      frame_d <= frame;
      for (int c = 0; c < NCH; c++) sr[c] <= {sr[c][ADC_W-2:0], din[c]};
      if (frame && !frame_d) cnt <= 4'd1;
      else if (cnt != 0 && cnt != 4'(ADC_W - 1)) cnt <= cnt + 1'b1;
      else cnt <= '0;
    end
  end

  // the LSB is on the lanes now: the complete words are the shifted registers
  always_comb for (int c = 0; c < NCH; c++) word[c] = {sr[c][ADC_W-2:0], din[c]};
  assign push = cnt == 4'(ADC_W - 1);

  // ---- crossing into the system clock domain ----
  logic                      empty;
  logic [NCH-1:0][ADC_W-1:0] rword;

  async_fifo #(.W(NCH * ADC_W), .DEPTH(8)) u_cdc (
    .wclk(bit_clk), .wrst_n(rst_n), .push, .wdata(word), .full(full_unused),
    .rclk(clk), .rrst_n(rst_n), .pop(!empty), .rdata(rword), .empty);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid  <= 1'b0;
      sample <= '0;
    end else begin
      valid <= !empty;
      if (!empty) sample <= rword;
    end
  end
endmodule
