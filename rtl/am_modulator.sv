// am_modulator: amplitude modulator and DAC formatter of the RF transmitter.
//
// Multiplies the envelope (sinc) sample by the carrier (sine) sample, which
// shifts the envelope spectrum to the carrier frequency, and formats the
// result for a 14-bit current-output DAC. rf = sat((env * carrier) >>> 13),
// forced to zero while 'gate' is low so the DAC idles at mid-scale between
// pulses. dac_data is rf in offset binary (sign bit inverted).
// Timing: one register stage; rf and dac_data follow the inputs by 1 cycle.
// The multiplier follows the design description; the scaling, gating and
// DAC code format are this design's choices.
module am_modulator #(
  parameter int DATA_W = 14
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     gate,
  input  logic signed [DATA_W-1:0] env,
  input  logic signed [DATA_W-1:0] carrier,
  output logic signed [DATA_W-1:0] rf,
  output logic        [DATA_W-1:0] dac_data
);
  localparam logic signed [2*DATA_W-1:0] MAXV = (2*DATA_W)'((1 <<< (DATA_W-1)) - 1);
  localparam logic signed [2*DATA_W-1:0] MINV = -(2*DATA_W)'(1 <<< (DATA_W-1));

  logic signed [2*DATA_W-1:0] prod, scaled;
  assign prod   = env * carrier;
  assign scaled = prod >>> (DATA_W - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            rf <= '0;
    else if (!gate)        rf <= '0;
    else if (scaled > MAXV) rf <= MAXV[DATA_W-1:0];
    else if (scaled < MINV) rf <= MINV[DATA_W-1:0];
    else                   rf <= scaled[DATA_W-1:0];
  end

  assign dac_data = {~rf[DATA_W-1], rf[DATA_W-2:0]};
endmodule
