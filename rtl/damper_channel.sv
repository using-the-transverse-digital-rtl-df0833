// damper_channel: one transverse plane of the bunch-by-bunch damper.
//
// Datapath, one RF bucket per clock:
//   ADC samples -> ddc (Q = position) -> fir_filter (five-turn filter)
//   -> exciter (output gain, bunch mask, tune-monitor excitation)
//   -> kick_delay (programmable delay, 14-bit saturation) -> DAC word.
// Filter gains, output gain and delay come from cycle_ramp, so they follow the
// Booster cycle. The DDC position and its tag are also handed to the tune
// monitor. Latency ADC -> DAC: 1 (ddc) + 2 (filter) + 1 (exciter) + delay + 1
// clocks. The chain is the damper's block diagram; the placement of the
// excitation between the output gain and the output delay is this design's
// choice (the excitation then reaches the kicker with the same timing as the
// damping kick).
module damper_channel
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [ADC_W-1:0]   adc [SPB],
  input  tag_t                      tag_i,         // bucket of the ADC samples
  input  ramp_entry_t               ramp,
  input  logic [HARMONIC-1:0]       damp_mask,
  input  logic [BUNCH_W-1:0]        sel_bunch,
  input  logic                      tm_running,
  input  logic [TURN_W-1:0]         tm_start_turn,
  input  meas_entry_t               tm_entry,
  input  logic [NOISE_W-1:0]        noise_amp,
  output logic signed [POS_W-1:0]   pos_o,         // Q of the DDC
  output tag_t                      pos_tag_o,
  output logic signed [DAC_W-1:0]   dac_o,
  output tag_t                      dac_tag_o,
  output logic                      ad_on_o,
  output logic                      noise_on_o
);
  logic signed [POS_W-1:0]  i_unused;
  logic signed [FILT_W-1:0] y;
  tag_t                     y_tag, k_tag;
  logic signed [KICK_W-1:0] kick;
  logic signed [GAIN_W-1:0] gains [4];

  assign gains[0] = ramp.gain0;
  assign gains[1] = ramp.gain1;
  assign gains[2] = ramp.gain2;
  assign gains[3] = ramp.gain3;

  ddc u_ddc (.clk, .rst, .adc, .tag_i, .i_o(i_unused), .q_o(pos_o), .tag_o(pos_tag_o));

  fir_filter u_fir (.clk, .rst, .x_i(pos_o), .tag_i(pos_tag_o), .gain(gains),
                    .y_o(y), .tag_o(y_tag));

  exciter u_exc (.clk, .rst, .y_i(y), .tag_i(y_tag), .out_gain(ramp.out_gain),
                 .damp_mask, .sel_bunch, .tm_running, .tm_start_turn, .tm_entry,
                 .noise_amp, .kick_o(kick), .tag_o(k_tag), .ad_on_o, .noise_on_o);

  kick_delay u_dly (.clk, .rst, .kick_i(kick), .tag_i(k_tag), .delay(ramp.delay),
                    .dac_o, .tag_o(dac_tag_o));
endmodule
