// ddc_channel: one receive channel of the digital down-converter.
//
// The ADC sample is mixed with the shared quadrature local oscillator
// (quad_mixer); I and Q then pass through identical decimating filter chains:
//   CIC1 (N=3, R=8) -> COMP1 (15 taps) -> CIC2 (N=3, R=4) -> COMP2 (15 taps,
//   decimate 2) -> HB1 -> HB2 -> HB3 (each decimate 2) -> FIR (31 taps,
//   decimate 2)
// for a total rate reduction of 1024 (65 MS/s in, 63.5 kS/s out). The stage
// types and their count (two CIC, two compensators, three half-band, one
// FIR) follow the design; the interleaving of CIC and compensator stages,
// all decimation factors and all coefficients are this design's choices.
// Timing: out_valid pulses once per 1024 in_valid strobes; I and Q are
// produced together. Inputs lo_cos/lo_sin must belong to the sample x.
module ddc_channel
  import mri_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [ADC_W-1:0]  x,
  input  logic signed [WAVE_W-1:0] lo_cos,
  input  logic signed [WAVE_W-1:0] lo_sin,
  output logic                     out_valid,
  output iq_t                      out
);
  logic                     mix_valid;
  logic signed [SAMP_W-1:0] mix [2];

  quad_mixer #(.IN_W(ADC_W), .LO_W(WAVE_W), .OUT_W(SAMP_W)) u_mix (
    .clk, .rst_n, .in_valid, .x, .lo_cos, .lo_sin,
    .out_valid(mix_valid), .i(mix[0]), .q(mix[1]));

  logic                     v   [2][9];
  logic signed [SAMP_W-1:0] s   [2][9];

  for (genvar p = 0; p < 2; p++) begin : g_path
    assign v[p][0] = mix_valid;
    assign s[p][0] = mix[p];

    cic_decim #(.N(CIC_N), .R(CIC1_R), .M(1), .W(SAMP_W)) u_cic1 (
      .clk, .rst_n, .in_valid(v[p][0]), .x(s[p][0]), .out_valid(v[p][1]), .y(s[p][1]));
    fir_decim #(.TAPS(COMP1_TAPS), .DEC(COMP1_DEC), .W(SAMP_W), .COEF(COMP1_COEF)) u_comp1 (
      .clk, .rst_n, .in_valid(v[p][1]), .x(s[p][1]), .out_valid(v[p][2]), .y(s[p][2]));
    cic_decim #(.N(CIC_N), .R(CIC2_R), .M(1), .W(SAMP_W)) u_cic2 (
      .clk, .rst_n, .in_valid(v[p][2]), .x(s[p][2]), .out_valid(v[p][3]), .y(s[p][3]));
    fir_decim #(.TAPS(COMP2_TAPS), .DEC(COMP2_DEC), .W(SAMP_W), .COEF(COMP2_COEF)) u_comp2 (
      .clk, .rst_n, .in_valid(v[p][3]), .x(s[p][3]), .out_valid(v[p][4]), .y(s[p][4]));
    for (genvar h = 0; h < 3; h++) begin : g_hb
      halfband_decim #(.TAPS(HB_TAPS), .W(SAMP_W), .COEF(HB_COEF)) u_hb (
        .clk, .rst_n, .in_valid(v[p][5+h-1]), .x(s[p][5+h-1]),
        .out_valid(v[p][5+h]), .y(s[p][5+h]));
    end
    fir_decim #(.TAPS(FIR_TAPS), .DEC(FIR_DEC), .W(SAMP_W), .COEF(FIR_COEF)) u_fir (
      .clk, .rst_n, .in_valid(v[p][7]), .x(s[p][7]), .out_valid(v[p][8]), .y(s[p][8]));
  end

  assign out_valid = v[0][8];
  assign out.i     = s[0][8];
  assign out.q     = s[1][8];
endmodule
