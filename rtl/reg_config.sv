// reg_config: host register file of the spectrometer.
//
// Holds every setting that the host writes: the transmit carrier and
// envelope tuning words, initial phases and amplitudes, the receive local
// oscillator word and phase, the acquisition length, and the ADC register
// writes. Writing REG_CTRL produces one-cycle control pulses (bit 0 start an
// RF pulse, bit 1 start an acquisition, bit 2 clear all oscillator phases) and
// holds bit 3 (open the acquisition automatically at the end of each pulse).
// Writing REG_ADC_SPI pulses spi_start with its address and data.
// Bus: synchronous write (wr_en, addr, wdata); rdata is the register at
// 'addr' (combinational), status bits read live. Register map in mri_pkg.
// Reset values: carrier 13.88 MHz at a 125 MHz clock (FTW 476913168), pulse
// length 2.58 ms (envelope FTW 13317), receive LO 13.88 MHz at 65 MS/s
// (FTW 917140708), full amplitudes, 256 output samples per acquisition.
// Tuning words are truncated, FTW = floor(f_out / f_clk * 2^32), as in the
// design's DDS equation.
// The register map and reset values are this design's choices; the 13.88 MHz
// and 2.58 ms figures are the pulse the design was demonstrated with.
module reg_config
  import mri_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [7:0]         addr,
  input  logic [31:0]        wdata,
  output logic [31:0]        rdata,
  // status inputs
  input  logic               tx_busy,
  input  logic               acq_busy,
  input  logic               spi_busy,
  input  logic [31:0]        ovf_count,
  // settings
  output tx_cfg_t            tx_cfg,
  output logic [ACC_W-1:0]   lo_ftw,
  output logic [PHASE_W-1:0] lo_phase,
  output logic [31:0]        acq_len,
  output logic               auto_acq,
  // control pulses
  output logic               tx_start,
  output logic               acq_start,
  output logic               sync,
  output logic               spi_start,
  output logic [12:0]        spi_addr,
  output logic [7:0]         spi_data
);
  localparam logic [ACC_W-1:0] RST_CAR_FTW = 32'd476913168;
  localparam logic [ACC_W-1:0] RST_ENV_FTW = 32'd13318;
  localparam logic [ACC_W-1:0] RST_LO_FTW  = 32'd917140708;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx_cfg.car_ftw   <= RST_CAR_FTW;
      tx_cfg.car_phase <= '0;
      tx_cfg.car_amp   <= '1;
      tx_cfg.env_ftw   <= RST_ENV_FTW;
      tx_cfg.env_phase <= '0;
      tx_cfg.env_amp   <= '1;
      lo_ftw    <= RST_LO_FTW;
      lo_phase  <= '0;
      acq_len   <= 32'd256;
      auto_acq  <= 1'b0;
      tx_start  <= 1'b0;
      acq_start <= 1'b0;
      sync      <= 1'b0;
      spi_start <= 1'b0;
      spi_addr  <= '0;
      spi_data  <= '0;
    end else begin
      tx_start  <= 1'b0;
      acq_start <= 1'b0;
      sync      <= 1'b0;
      spi_start <= 1'b0;
      if (wr_en) begin
        unique case (addr)
          REG_CTRL: begin
            tx_start  <= wdata[0];
            acq_start <= wdata[1];
            sync      <= wdata[2];
            auto_acq  <= wdata[3];
          end
          REG_CAR_FTW:   tx_cfg.car_ftw   <= wdata;
          REG_CAR_PHASE: tx_cfg.car_phase <= wdata[PHASE_W-1:0];
          REG_CAR_AMP:   tx_cfg.car_amp   <= wdata[AMP_W-1:0];
          REG_ENV_FTW:   tx_cfg.env_ftw   <= wdata;
          REG_ENV_PHASE: tx_cfg.env_phase <= wdata[PHASE_W-1:0];
          REG_ENV_AMP:   tx_cfg.env_amp   <= wdata[AMP_W-1:0];
          REG_LO_FTW:    lo_ftw           <= wdata;
          REG_LO_PHASE:  lo_phase         <= wdata[PHASE_W-1:0];
          REG_ACQ_LEN:   acq_len          <= wdata;
          REG_ADC_SPI: begin
            spi_addr  <= wdata[20:8];
            spi_data  <= wdata[7:0];
            spi_start <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  always_comb begin
    unique case (addr)
      REG_CTRL:      rdata = {28'd0, auto_acq, 3'd0};
      REG_CAR_FTW:   rdata = tx_cfg.car_ftw;
      REG_CAR_PHASE: rdata = 32'(tx_cfg.car_phase);
      REG_CAR_AMP:   rdata = 32'(tx_cfg.car_amp);
      REG_ENV_FTW:   rdata = tx_cfg.env_ftw;
      REG_ENV_PHASE: rdata = 32'(tx_cfg.env_phase);
      REG_ENV_AMP:   rdata = 32'(tx_cfg.env_amp);
      REG_LO_FTW:    rdata = lo_ftw;
      REG_LO_PHASE:  rdata = 32'(lo_phase);
      REG_ACQ_LEN:   rdata = acq_len;
      REG_ADC_SPI:   rdata = {11'd0, spi_addr, spi_data};
      REG_STATUS:    rdata = {29'd0, spi_busy, acq_busy, tx_busy};
      REG_OVF:       rdata = ovf_count;
      default:       rdata = 32'd0;
    endcase
  end
endmodule
