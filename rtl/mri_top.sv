// mri_top: digital system of a low-field MR spectrometer (transmit and
// receive on one FPGA).
//
// Transmit: rf_pulse_gen multiplies a sinc envelope DDS with a sine carrier
// DDS and drives a 14-bit DAC. Receive: adc_deser captures eight serial ADC
// lanes, mr_rx mixes each channel with a local oscillator that is phase
// locked to the transmit carrier (both cleared by the same sync pulse) and
// decimates it by 1024 to baseband I/Q. storage_ctrl parks the I/Q words in
// external memory and eth_tx sends them to the PC in Ethernet frames.
// reg_config holds the host settings; adc_spi writes ADC registers.
// An acquisition starts on a host command or, with auto_acq set, at the end
// of each RF pulse (this design's choice).
// All logic runs on one 125 MHz clock 'clk' except the ADC lane capture,
// which runs on the ADC bit clock. The host register bus, the memory port
// (in front of which a DDR3 controller would sit) and the PHY's GMII port
// are brought out as plain ports.
module mri_top
  import mri_pkg::*;
#(
  parameter int MEM_AW      = 26,
  parameter int FRAME_WORDS = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  // host register bus
  input  logic              host_wr_en,
  input  logic [7:0]        host_addr,
  input  logic [31:0]       host_wdata,
  output logic [31:0]       host_rdata,
  // DAC
  output logic [WAVE_W-1:0] dac_data,
  // ADC data lanes and configuration port
  input  logic              adc_bit_clk,
  input  logic              adc_frame,
  input  logic [NCH-1:0]    adc_din,
  output logic              adc_sclk,
  output logic              adc_csb,
  output logic              adc_sdio,
  // external memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_req_we,
  output logic [MEM_AW-1:0] mem_req_addr,
  output logic [31:0]       mem_req_wdata,
  input  logic              mem_rsp_valid,
  input  logic [31:0]       mem_rsp_rdata,
  // Ethernet PHY transmit
  output logic [7:0]        gmii_txd,
  output logic              gmii_tx_en
);
  tx_cfg_t            tx_cfg;
  logic [ACC_W-1:0]   lo_ftw;
  logic [PHASE_W-1:0] lo_phase;
  logic [31:0]        acq_len, ovf_count;
  logic               auto_acq, tx_start, acq_cmd, sync, spi_start;
  logic [12:0]        spi_addr;
  logic [7:0]         spi_data;
  logic               tx_busy, tx_done, acq_busy, spi_busy;

  reg_config u_regs (
    .clk, .rst_n, .wr_en(host_wr_en), .addr(host_addr), .wdata(host_wdata), .rdata(host_rdata),
    .tx_busy, .acq_busy, .spi_busy, .ovf_count,
    .tx_cfg, .lo_ftw, .lo_phase, .acq_len, .auto_acq,
    .tx_start, .acq_start(acq_cmd), .sync, .spi_start, .spi_addr, .spi_data);

  // ---------------- transmit ----------------
  logic signed [WAVE_W-1:0] rf_unused;
  rf_pulse_gen u_tx (
    .clk, .rst_n, .cfg(tx_cfg), .sync, .start(tx_start),
    .busy(tx_busy), .done(tx_done), .rf(rf_unused), .dac_data);

  // ---------------- ADC ----------------
  adc_spi u_spi (
    .clk, .rst_n, .start(spi_start), .addr(spi_addr), .data(spi_data),
    .busy(spi_busy), .sclk(adc_sclk), .csb(adc_csb), .sdio(adc_sdio));

  logic signed [NCH-1:0][ADC_W-1:0] adc_sample;
  logic                             adc_valid;
  adc_deser u_deser (
    .bit_clk(adc_bit_clk), .frame(adc_frame), .din(adc_din),
    .clk, .rst_n, .sample(adc_sample), .valid(adc_valid));

  // ---------------- receive ----------------
  logic          rx_valid;
  iq_t [NCH-1:0] rx_iq;
  mr_rx u_rx (
    .clk, .rst_n, .sync, .lo_ftw, .lo_phase,
    .in_valid(adc_valid), .x(adc_sample), .out_valid(rx_valid), .iq(rx_iq));

  // ---------------- storage and Ethernet ----------------
  logic        st_valid, st_ready, st_last;
  logic [31:0] st_data;
  logic [15:0] frames_unused;

  storage_ctrl #(.MEM_AW(MEM_AW), .FRAME_WORDS(FRAME_WORDS)) u_store (
    .clk, .rst_n, .acq_start(acq_cmd | (auto_acq & tx_done)), .acq_len,
    .acq_busy, .ovf_count, .in_valid(rx_valid), .in_iq(rx_iq),
    .mem_req_valid, .mem_req_ready, .mem_req_we, .mem_req_addr, .mem_req_wdata,
    .mem_rsp_valid, .mem_rsp_rdata,
    .out_valid(st_valid), .out_ready(st_ready), .out_data(st_data), .out_last(st_last));

  eth_tx #(.FRAME_WORDS(FRAME_WORDS)) u_eth (
    .clk, .rst_n, .in_valid(st_valid), .in_ready(st_ready), .in_data(st_data), .in_last(st_last),
    .txd(gmii_txd), .tx_en(gmii_tx_en), .frames_sent(frames_unused));
endmodule
