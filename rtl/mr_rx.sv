// mr_rx: eight-channel MR signal receiver.
//
// One DDS with a sine table generates the quadrature local oscillator
// (cosine and sine) for all eight channels; it advances once per ADC sample
// with the tuning word lo_ftw (f_LO = lo_ftw * f_ADC / 2^32) and is cleared by
// 'sync' together with the transmit carrier, so the receiver is phase
// coherent with the RF pulse. The ADC samples are delayed by the DDS latency
// (3 cycles) so that each meets the oscillator value of its own sample
// instant, then each channel is down-converted and decimated by ddc_channel.
// Timing: one out_valid per 1024 in_valid strobes, all channels together.
// Sharing one oscillator among the channels is this design's choice.
// Lint note: the assertions are disabled during reset (disable iff), so a
// linter sees rst_n used both as the asynchronous reset and in a clocked
// expression; the assertions are not part of the circuit.
module mr_rx
  import mri_pkg::*;
(
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             sync,
  input  logic [ACC_W-1:0]                 lo_ftw,
  input  logic [PHASE_W-1:0]               lo_phase,
  input  logic                             in_valid,
  input  logic signed [NCH-1:0][ADC_W-1:0] x,
  output logic                             out_valid,
  output iq_t [NCH-1:0]                    iq
);
  logic signed [WAVE_W-1:0] lo_cos, lo_sin;
  logic                     lo_valid, lo_wrap_unused;

  dds #(.WAVE(WAVE_SINE)) u_lo (
    .clk, .rst_n, .en(in_valid), .clear(sync),
    .ftw(lo_ftw), .phase_ofs(lo_phase), .amp({AMP_W{1'b1}}),
    .wave_i(lo_cos), .wave_q(lo_sin), .out_valid(lo_valid), .wrap(lo_wrap_unused));

  // align samples with the oscillator pipeline
  logic signed [NCH-1:0][ADC_W-1:0] xd [3];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < 3; k++) xd[k] <= '0;
    end else begin
      if (in_valid) xd[0] <= x;
      xd[1] <= xd[0];
      xd[2] <= xd[1];
    end
  end

  logic [NCH-1:0] ch_valid;
  for (genvar c = 0; c < NCH; c++) begin : g_ch
    ddc_channel u_ch (
      .clk, .rst_n, .in_valid(lo_valid), .x(xd[2][c]), .lo_cos, .lo_sin,
      .out_valid(ch_valid[c]), .out(iq[c]));
  end
  assign out_valid = &ch_valid;

  // all channels share one rate and must stay in step
  a_in_step: assert property (@(posedge clk) disable iff (!rst_n) ch_valid == '0 || &ch_valid);
endmodule
