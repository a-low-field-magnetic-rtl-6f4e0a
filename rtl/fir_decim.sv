// fir_decim: direct-form FIR filter with optional decimation.
//
// A TAPS-long delay line shifts on every in_valid; every DEC-th input the
// full convolution y = sum_k COEF[k] * d[k] is formed (all taps in parallel),
// rounded, shifted right by COEF_FRAC and saturated to W bits. Coefficients
// are signed fractions with COEF_FRAC fractional bits (2^17 = 1.0 by default)
// and are fixed at build time as a parameter array.
// Timing: out_valid and y follow the in_valid that completes a group of DEC
// inputs by 2 cycles (shift, then multiply-accumulate). The input strobes must
// be at least 2 cycles apart, which the decimated rates here guarantee.
// Used both as the CIC compensation filter (COMP1_COEF / COMP2_COEF) and as
// the final channel filter (FIR_COEF); the coefficients are this design's own
// (see mri_pkg).
module fir_decim
  import mri_pkg::*;
#(
  parameter int TAPS = FIR_TAPS,
  parameter int DEC  = FIR_DEC,
  parameter int W    = SAMP_W,
  parameter logic signed [COEF_W-1:0] COEF [TAPS] = FIR_COEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic                out_valid,
  output logic signed [W-1:0] y
);
  localparam int AW = W + COEF_W + $clog2(TAPS) + 1;
  localparam int PW = (DEC > 1) ? $clog2(DEC) : 1;
  localparam logic signed [AW-1:0] MAXV = AW'((1 <<< (W-1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(1 <<< (W-1));

  logic signed [W-1:0] d [TAPS];
  logic [PW-1:0]       phase;
  logic                calc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) d[k] <= '0;
      phase <= '0;
      calc  <= 1'b0;
    end else begin
      calc <= 1'b0;
      if (in_valid) begin
        d[0] <= x;
        for (int k = 1; k < TAPS; k++) d[k] <= d[k-1];
        if (phase == PW'(DEC - 1)) begin
          phase <= '0;
          calc  <= 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
      end
    end
  end

  logic signed [AW-1:0] acc, sh;
  always_comb begin
    acc = AW'(1) <<< (COEF_FRAC - 1);            // rounding
    for (int k = 0; k < TAPS; k++) acc += AW'(COEF[k]) * AW'(d[k]);
    sh = acc >>> COEF_FRAC;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= calc;
      if (calc) y <= (sh > MAXV) ? MAXV[W-1:0] : (sh < MINV) ? MINV[W-1:0] : sh[W-1:0];
    end
  end
endmodule
