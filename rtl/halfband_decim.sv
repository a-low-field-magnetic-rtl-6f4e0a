// halfband_decim: half-band low-pass filter, decimating by 2.
//
// A half-band filter has its cut-off at a quarter of the input rate, so every
// second coefficient away from the centre tap is zero and the rest are
// symmetric. This implementation uses both facts: for each non-zero
// coefficient pair the two delay-line samples are added first, so an 11-tap
// filter needs 3 pair multiplies plus the centre tap instead of 11 multiplies.
// The output is computed for every second input (decimation by 2), rounded,
// shifted by COEF_FRAC and saturated to W bits. TAPS must be odd with
// (TAPS-1)/2 odd (3, 7, 11, 15, ...).
// Timing: out_valid and y follow every second in_valid by 2 cycles. Input
// strobes must be at least 2 cycles apart.
// Three of these run in cascade in each receive chain; the coefficients are
// this design's own (see mri_pkg).
module halfband_decim
  import mri_pkg::*;
#(
  parameter int TAPS = HB_TAPS,
  parameter int W    = SAMP_W,
  parameter logic signed [COEF_W-1:0] COEF [TAPS] = HB_COEF
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x,
  output logic                out_valid,
  output logic signed [W-1:0] y
);
  localparam int C  = (TAPS - 1) / 2;               // centre tap
  localparam int AW = W + COEF_W + $clog2(TAPS) + 2;
  localparam logic signed [AW-1:0] MAXV = AW'((1 <<< (W-1)) - 1);
  localparam logic signed [AW-1:0] MINV = -AW'(1 <<< (W-1));

  initial begin
    if (TAPS % 2 != 1 || C % 2 != 1) $error("halfband_decim: TAPS must be 4k+3");
    for (int k = 0; k < TAPS; k++) begin
      if (k != C && ((C - k) % 2 == 0) && COEF[k] != 0)
        $error("halfband_decim: coefficient %0d must be zero", k);
      if (COEF[k] != COEF[TAPS-1-k]) $error("halfband_decim: coefficients not symmetric");
    end
  end

  logic signed [W-1:0] d [TAPS];
  logic                phase, calc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS; k++) d[k] <= '0;
      phase <= 1'b0;
      calc  <= 1'b0;
    end else begin
      calc <= 1'b0;
      if (in_valid) begin
        d[0] <= x;
        for (int k = 1; k < TAPS; k++) d[k] <= d[k-1];
        phase <= ~phase;
        calc  <= phase;
      end
    end
  end

  logic signed [AW-1:0] acc, sh;
  always_comb begin
    acc = (AW'(1) <<< (COEF_FRAC - 1)) + AW'(COEF[C]) * AW'(d[C]);
    for (int k = 0; k < C; k += 2)                    // non-zero pairs: C-k odd
      acc += AW'(COEF[k]) * (AW'(d[k]) + AW'(d[TAPS-1-k]));
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
