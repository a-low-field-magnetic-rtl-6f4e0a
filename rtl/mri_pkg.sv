// mri_pkg: types and constants shared by the MR spectrometer digital system.
//
// Holds the widths of the DDS (32-bit frequency word, 14-bit phase, amplitude
// and table entries, as the design specifies), the waveform-table selector,
// the transmit configuration bundle, the I/Q sample type, the host register
// map, the fixed filter coefficients of the receive chain and a CRC-32 step
// function for the Ethernet sender.
//
// The register map, the sample format and all filter coefficients are this
// design's own choices. Coefficients are signed fractions with COEF_FRAC = 17
// fractional bits (2^17 = 1.0):
//   COMP1/COMP2: 15-tap symmetric least-squares fit to 1/|H_cic(f)| with
//                H_cic(f) = |sin(pi f R) / (R sin(pi f))|^3, R = 8 resp. 4,
//                over 0..0.1 of the compensator input rate, stop band from
//                0.25 weighted 0.3.
//   HB:          11-tap half-band, h[n] = 0.5 sinc(n/2) w_hamming[n],
//                normalised to unit DC gain (odd taps away from centre are 0).
//   FIR:         31-tap Hamming-windowed low pass, cutoff 14 kHz at an input
//                rate of 65 MHz / 512, normalised to unit DC gain.
package mri_pkg;

  // ---------------- DDS ----------------
  localparam int ACC_W   = 32;  // frequency register / phase accumulator
  localparam int PHASE_W = 14;  // table address and initial phase
  localparam int WAVE_W  = 14;  // table entry
  localparam int AMP_W   = 14;  // amplitude register

  typedef enum logic [1:0] {
    WAVE_SINE  = 2'd0,
    WAVE_SINC  = 2'd1,
    WAVE_GAUSS = 2'd2
  } wave_e;

  typedef struct packed {
    logic [ACC_W-1:0]   car_ftw;
    logic [PHASE_W-1:0] car_phase;
    logic [AMP_W-1:0]   car_amp;
    logic [ACC_W-1:0]   env_ftw;
    logic [PHASE_W-1:0] env_phase;
    logic [AMP_W-1:0]   env_amp;
  } tx_cfg_t;

  // ---------------- receive chain ----------------
  localparam int NCH      = 8;   // receive channels
  localparam int ADC_W    = 14;  // ADC sample width
  localparam int SAMP_W   = 16;  // I and Q width between filter stages
  localparam int COEF_W   = 18;
  localparam int COEF_FRAC = 17;

  typedef struct packed {
    logic signed [SAMP_W-1:0] i;
    logic signed [SAMP_W-1:0] q;
  } iq_t;

  // Decimation plan: CIC1, COMP1, CIC2, COMP2, HB1..3, FIR = 8*1*4*2*2*2*2*2
  localparam int CIC_N     = 3;
  localparam int CIC1_R    = 8;
  localparam int COMP1_DEC = 1;
  localparam int CIC2_R    = 4;
  localparam int COMP2_DEC = 2;
  localparam int FIR_DEC   = 2;
  localparam int TOTAL_DEC = CIC1_R * COMP1_DEC * CIC2_R * COMP2_DEC * 8 * FIR_DEC;

  localparam int COMP1_TAPS = 15;
  localparam logic signed [COEF_W-1:0] COMP1_COEF [COMP1_TAPS] = '{
    18'sd1437, 18'sd1626, -18'sd2387, -18'sd7692, -18'sd4338, 18'sd13926, 18'sd38253,
    18'sd49683, 18'sd38253, 18'sd13926, -18'sd4338, -18'sd7692, -18'sd2387, 18'sd1626,
    18'sd1437};
  localparam int COMP2_TAPS = 15;
  localparam logic signed [COEF_W-1:0] COMP2_COEF [COMP2_TAPS] = '{
    18'sd1427, 18'sd1612, -18'sd2379, -18'sd7642, -18'sd4272, 18'sd13944, 18'sd38188,
    18'sd49575, 18'sd38188, 18'sd13944, -18'sd4272, -18'sd7642, -18'sd2379, 18'sd1612,
    18'sd1427};
  localparam int HB_TAPS = 11;
  localparam logic signed [COEF_W-1:0] HB_COEF [HB_TAPS] = '{
    18'sd663, 18'sd0, -18'sd5498, 18'sd0, 18'sd37812, 18'sd65116, 18'sd37812, 18'sd0,
    -18'sd5498, 18'sd0, 18'sd663};
  localparam int FIR_TAPS = 31;
  localparam logic signed [COEF_W-1:0] FIR_COEF [FIR_TAPS] = '{
    -18'sd183, -18'sd73, 18'sd156, 18'sd523, 18'sd857, 18'sd779, -18'sd87, -18'sd1731,
    -18'sd3473, -18'sd4033, -18'sd2039, 18'sd3199, 18'sd11089, 18'sd19698, 18'sd26394,
    18'sd28921, 18'sd26394, 18'sd19698, 18'sd11089, 18'sd3199, -18'sd2039, -18'sd4033,
    -18'sd3473, -18'sd1731, -18'sd87, 18'sd779, 18'sd857, 18'sd523, 18'sd156, -18'sd73,
    -18'sd183};

  // ---------------- host register map (word addresses) ----------------
  localparam logic [7:0] REG_CTRL      = 8'h00; // W: [0] tx_start [1] acq_start [2] sync (self-clearing)
                                                //    [3] auto_acq (held)
  localparam logic [7:0] REG_CAR_FTW   = 8'h01;
  localparam logic [7:0] REG_CAR_PHASE = 8'h02;
  localparam logic [7:0] REG_CAR_AMP   = 8'h03;
  localparam logic [7:0] REG_ENV_FTW   = 8'h04;
  localparam logic [7:0] REG_ENV_PHASE = 8'h05;
  localparam logic [7:0] REG_ENV_AMP   = 8'h06;
  localparam logic [7:0] REG_LO_FTW    = 8'h07;
  localparam logic [7:0] REG_LO_PHASE  = 8'h08;
  localparam logic [7:0] REG_ACQ_LEN   = 8'h09; // output sample sets per acquisition
  localparam logic [7:0] REG_ADC_SPI   = 8'h0A; // W: [20:8] address [7:0] data, starts a write
  localparam logic [7:0] REG_STATUS    = 8'h0B; // R: [0] tx_busy [1] acq_busy [2] spi_busy
  localparam logic [7:0] REG_OVF       = 8'h0C; // R: lost sample sets

  // ---------------- Ethernet ----------------
  // One step of the reflected CRC-32 (polynomial 0x04C11DB7) over a byte.
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] b);
    logic [31:0] c;
    c = crc ^ {24'd0, b};
    for (int k = 0; k < 8; k++)
      c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
    return c;
  endfunction

endpackage
