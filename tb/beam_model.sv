// beam_model: behavioural model of the Booster beam, pickup and kickers for
// the damper testbenches (not synthesizable, not part of the design).
//
// Each of the 84 bunches of each plane is a linear betatron oscillator in
// normalised coordinates (x, px) that turns by 2*pi*TUNE[plane] per revolution.
// On the clock of its bucket a bunch first receives the kick of the DAC word
// then present (px += KSCALE * dac), is then rotated, and its position x plus
// a closed-orbit offset appears as ADC samples: s1 = x + ORBIT, s3 = 0 (so the
// DDC's Q equals the position), s0/s2 small noise. With the damper's output
// delay set to 79 buckets, the DAC word present at a bunch's bucket is the one
// computed from that bunch on the previous turn. The bucket counter follows
// cycle_start exactly like the damper's. Initial amplitudes are set with
// set_amp(); the tunes start at TUNE_H/TUNE_V and may be changed through
// `tune` while running, as they change through a Booster cycle. `couple`
// (default 0) adds that fraction of a bunch's position in the other plane to
// the position seen in each plane: a simple stand-in for the betatron coupling
// that makes the other plane's tune show up in a spectrum.
module beam_model
  import booster_pkg::*;
#(
  parameter real TUNE_H = 0.6953125,   // 89/128
  parameter real TUNE_V = 0.8046875,   // 103/128
  parameter real KSCALE = 0.1,
  parameter int  ORBIT  = 150
) (
  input  logic                     clk,
  input  logic                     cycle_start,
  input  logic signed [DAC_W-1:0]  dac [2],
  output logic signed [ADC_W-1:0]  adc [2][SPB]
);
  real tune [2] = '{TUNE_H, TUNE_V};
  real couple = 0.0;
  real x  [2][HARMONIC];
  real px [2][HARMONIC];
  int  bucket = 0;

  always @(posedge clk) begin
    if (cycle_start) bucket <= 0;
    else             bucket <= (bucket == HARMONIC - 1) ? 0 : bucket + 1;
  end

  function automatic void set_amp(input int p, input int b, input real a, input real ph);
    x[p][b]  = a * $cos(ph);
    px[p][b] = -a * $sin(ph);
  endfunction

  function automatic real amp(input int p, input int b);
    return $sqrt(x[p][b] * x[p][b] + px[p][b] * px[p][b]);
  endfunction

  initial begin
    for (int p = 0; p < 2; p++)
      for (int b = 0; b < HARMONIC; b++) begin x[p][b] = 0.0; px[p][b] = 0.0; end
    for (int p = 0; p < 2; p++) foreach (adc[p][k]) adc[p][k] = '0;
  end

  always @(negedge clk) begin
    real mu, c, s, xn, v;
    // both planes turn first, then each sees its own and the coupled position
    for (int p = 0; p < 2; p++) begin
      mu = 6.283185307179586 * tune[p];
      c = $cos(mu); s = $sin(mu);
      px[p][bucket] = px[p][bucket] + KSCALE * real'(dac[p]);
      xn            = x[p][bucket] * c + px[p][bucket] * s;
      px[p][bucket] = -x[p][bucket] * s + px[p][bucket] * c;
      x[p][bucket]  = xn;
    end
    for (int p = 0; p < 2; p++) begin
      v = $floor(x[p][bucket] + couple * x[1 - p][bucket] + 0.5) + ORBIT;
      if (v > 2047.0)  v = 2047.0;
      if (v < -2048.0) v = -2048.0;
      adc[p][0] = ADC_W'($urandom_range(0, 15));
      adc[p][1] = ADC_W'($rtoi(v));
      adc[p][2] = ADC_W'($urandom_range(0, 15));
      adc[p][3] = '0;
    end
  end
endmodule
