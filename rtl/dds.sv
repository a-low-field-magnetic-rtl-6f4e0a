// dds: direct digital synthesizer with a 16384-entry waveform memory.
//
// Three stages, in the order of the classic DDS: a frequency register holds
// the 32-bit tuning word K; the phase accumulator adds K on every enabled
// cycle (f_out = K * f_step / 2^32); the top 14 accumulator bits plus a 14-bit
// initial phase address the waveform memory, and the 14-bit table value is
// scaled by a 14-bit amplitude register. Widths (32-bit frequency word, 14-bit
// phase and amplitude, 16384 x 14 table) follow the design description.
//
// The table is filled at elaboration (stands in for the waveform file that a
// numerical tool would generate):
//   WAVE_SINE : round(8191 * sin(2 pi k / 16384))
//   WAVE_SINC : round(8191 * sinc(x)),  x = (k - 8192) / 8192 * SINC_LOBES * pi
//   WAVE_GAUSS: round(8191 * exp(-0.5 * ((k - 8192) / 2731)^2))
// A second read port looks a quarter turn (4096 entries) ahead, so a sine
// table also yields the cosine for quadrature local oscillators.
//
// Interface and timing: 'clear' zeroes the accumulator (phase sync between
// several DDS instances); 'en' advances it by the registered K. The scaled
// outputs wave_q (table at phase) and wave_i (table at phase + 1/4 turn)
// appear 2 cycles after the accumulator step, i.e. 3 cycles after 'en', with
// out_valid. 'wrap' flags, with the same alignment, the step whose addition
// carried out of the accumulator (end of one table period). Amplitude:
// out = (table * amp) >>> 14, amp unsigned. Scaling rule, quarter-turn read,
// latency and table contents are this design's choices.
module dds
  import mri_pkg::*;
#(
  parameter wave_e WAVE       = WAVE_SINE,
  parameter int    SINC_LOBES = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      clear,
  input  logic [ACC_W-1:0]          ftw,
  input  logic [PHASE_W-1:0]        phase_ofs,
  input  logic [AMP_W-1:0]          amp,
  output logic signed [WAVE_W-1:0]  wave_i,
  output logic signed [WAVE_W-1:0]  wave_q,
  output logic                      out_valid,
  output logic                      wrap
);
  localparam int DEPTH = 1 << PHASE_W;
  localparam real PI   = 3.14159265358979323846;

  logic signed [WAVE_W-1:0] rom [DEPTH];

  initial begin
    for (int k = 0; k < DEPTH; k++) begin
      real x, v;
      case (WAVE)
        WAVE_SINE: v = $sin(2.0 * PI * k / DEPTH);
        WAVE_SINC: begin
          x = (real'(k) - DEPTH / 2) / (DEPTH / 2) * SINC_LOBES * PI;
          v = (k == DEPTH / 2) ? 1.0 : $sin(x) / x;
        end
        default: begin
          x = (real'(k) - DEPTH / 2) / (DEPTH / 6.0);
          v = $exp(-0.5 * x * x);
        end
      endcase
      rom[k] = WAVE_W'($rtoi($floor(8191.0 * v + 0.5)));
    end
  end

  // stage 0: frequency register
  logic [ACC_W-1:0] ftw_r;
  // stage 1: phase accumulator
  logic [ACC_W-1:0] acc;
  logic             step_d, wrap_d;
  // stage 2: table read
  logic signed [WAVE_W-1:0] tab_i, tab_q;
  logic                     step_dd, wrap_dd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ftw_r  <= '0;
      acc    <= '0;
      step_d <= 1'b0;
      wrap_d <= 1'b0;
    end else begin
      ftw_r  <= ftw;
      step_d <= en & ~clear;
      wrap_d <= 1'b0;
      if (clear) acc <= '0;
      else if (en) {wrap_d, acc} <= {1'b0, acc} + {1'b0, ftw_r};
    end
  end

  logic [PHASE_W-1:0] addr_q, addr_i;
  assign addr_q = acc[ACC_W-1 -: PHASE_W] + phase_ofs;
  assign addr_i = addr_q + PHASE_W'(DEPTH / 4);

  always_ff @(posedge clk) begin
    tab_q <= rom[addr_q];
    tab_i <= rom[addr_i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step_dd   <= 1'b0;
      wrap_dd   <= 1'b0;
      out_valid <= 1'b0;
      wrap      <= 1'b0;
    end else begin
      step_dd   <= step_d;
      wrap_dd   <= wrap_d;
      out_valid <= step_dd;
      wrap      <= wrap_dd;
    end
  end

  logic signed [WAVE_W+AMP_W:0] prod_i, prod_q;
  assign prod_i = tab_i * $signed({1'b0, amp});
  assign prod_q = tab_q * $signed({1'b0, amp});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wave_i <= '0;
      wave_q <= '0;
    end else begin
      wave_i <= WAVE_W'(prod_i >>> AMP_W);
      wave_q <= WAVE_W'(prod_q >>> AMP_W);
    end
  end
endmodule
