// rf_pulse_gen: RF pulse transmitter (envelope DDS x carrier DDS).
//
// Two DDS instances share the structure of dds: the envelope DDS reads a
// sinc (or gaussian) table, the carrier DDS a sine table. Each has its own
// frequency word, initial phase and amplitude (tx_cfg_t). The product of the
// two, from am_modulator, is the RF pulse sent to the DAC.
//
// Pulse control (this design's choice): 'start' clears the envelope
// accumulator and runs it until it carries out, so one pulse plays the whole
// envelope table once; its length is 2^32 / env_ftw clock cycles (minus the
// wrapping step), e.g. env_ftw = 13317 gives 2.58 ms at 125 MHz. The carrier
// DDS runs continuously and is cleared only by 'sync', the same pulse that
// clears the receive local oscillator, so transmit and receive phases stay
// locked. 'start' is ignored while 'busy'. 'done' pulses for one cycle, one cycle
// after the last RF sample; dac_data follows the envelope output by 1 cycle.
module rf_pulse_gen
  import mri_pkg::*;
#(
  parameter wave_e ENV_WAVE = WAVE_SINC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  tx_cfg_t                  cfg,
  input  logic                     sync,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output logic signed [WAVE_W-1:0] rf,
  output logic        [WAVE_W-1:0] dac_data
);
  logic run, play;
  logic env_valid, env_wrap, car_valid_unused, car_wrap_unused;
  logic signed [WAVE_W-1:0] env_q, env_i_unused, car_q, car_i_unused;
  logic launch;

  assign launch = start & ~run & ~play;

  dds #(.WAVE(ENV_WAVE)) u_env (
    .clk, .rst_n, .en(run), .clear(launch),
    .ftw(cfg.env_ftw), .phase_ofs(cfg.env_phase), .amp(cfg.env_amp),
    .wave_i(env_i_unused), .wave_q(env_q), .out_valid(env_valid), .wrap(env_wrap));

  dds #(.WAVE(WAVE_SINE)) u_car (
    .clk, .rst_n, .en(1'b1), .clear(sync),
    .ftw(cfg.car_ftw), .phase_ofs(cfg.car_phase), .amp(cfg.car_amp),
    .wave_i(car_i_unused), .wave_q(car_q), .out_valid(car_valid_unused), .wrap(car_wrap_unused));

  // run: accumulator enable; play: envelope outputs belong to the pulse.
  // The accumulator stops when the wrapping step reaches the output; the two
  // steps taken beyond it arrive after 'play' has dropped and are masked.

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      play <= 1'b0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (launch) begin
        run  <= 1'b1;
        play <= 1'b1;
      end else begin
        if (env_valid && env_wrap) run <= 1'b0;
        if (play && env_valid && env_wrap) begin
          play <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign busy = run | play;

  am_modulator #(.DATA_W(WAVE_W)) u_am (
    .clk, .rst_n, .gate(play & env_valid & ~env_wrap),
    .env(env_q), .carrier(car_q), .rf, .dac_data);
endmodule
