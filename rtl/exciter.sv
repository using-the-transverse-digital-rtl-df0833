// exciter: output gain, bunch selection and tune-monitor excitation.
//
// For ordinary bunches the kick is the damping kick (y * out_gain) >>> 14 if the
// bunch is enabled in damp_mask, else zero. For the bunch selected by the tune
// monitor, while a measurement is running (tm_running), damping is switched off
// and, counted from the measurement's first turn (tm_start_turn):
//   * for the first ad_turns turns the kick is the anti-damping kick
//     -(y * ad_gain) >>> 14,
//   * for the first noise_turns turns a random value from a 32-bit LFSR,
//     scaled by noise_amp (1.0 = 32768), is added.
// Either, both or none may be programmed per measurement. Latency one clock,
// the tag travels with the kick.
// That the excitation is random noise, anti-damping or both, set by a number of
// turns (and a gain for anti-damping), follows the paper. The sign convention,
// the LFSR (x^32+x^22+x^2+x+1), the noise scaling, and leaving the selected bunch
// undamped for the whole measurement are this design's choices.
module exciter
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [FILT_W-1:0]  y_i,
  input  tag_t                      tag_i,
  input  logic signed [GAIN_W-1:0]  out_gain,
  input  logic [HARMONIC-1:0]       damp_mask,
  input  logic [BUNCH_W-1:0]        sel_bunch,
  input  logic                      tm_running,
  input  logic [TURN_W-1:0]         tm_start_turn,
  input  meas_entry_t               tm_entry,
  input  logic [NOISE_W-1:0]        noise_amp,
  output logic signed [KICK_W-1:0]  kick_o,
  output tag_t                      tag_o,
  output logic                      ad_on_o,     // anti-damping applied on this kick
  output logic                      noise_on_o   // noise applied on this kick
);
  logic [31:0] lfsr;
  always_ff @(posedge clk) begin
    if (rst) lfsr <= 32'h1;
    else     lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
  end

  logic [TURN_W-1:0] rel;
  logic is_sel, ad_on, noise_on;
  assign is_sel   = tm_running && (tag_i.bunch == sel_bunch);
  assign rel      = tag_i.turn - tm_start_turn;
  assign ad_on    = is_sel && (rel < TURN_W'(tm_entry.ad_turns));
  assign noise_on = is_sel && (rel < TURN_W'(tm_entry.noise_turns));

  logic signed [47:0] damp_k, ad_k, noise_k, sum;
  always_comb begin
    damp_k  = (48'(y_i) * 48'(out_gain)) >>> GAIN_FRAC;
    ad_k    = -((48'(y_i) * 48'(tm_entry.ad_gain)) >>> GAIN_FRAC);
    noise_k = (48'($signed(lfsr[15:0])) * $signed({1'b0, noise_amp})) >>> 15;
    if (ad_on)                        sum = ad_k;
    else if (is_sel)                  sum = '0;
    else if (damp_mask[tag_i.bunch])  sum = damp_k;
    else                              sum = '0;
    if (noise_on) sum += noise_k;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      kick_o     <= '0;
      tag_o      <= '0;
      ad_on_o    <= 1'b0;
      noise_on_o <= 1'b0;
    end else begin
      kick_o     <= sat_kick(sum);
      tag_o      <= tag_i;
      ad_on_o    <= ad_on;
      noise_on_o <= noise_on;
    end
  end
endmodule
