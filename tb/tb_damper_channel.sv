// tb_damper_channel: one damper plane from ADC samples to the DAC word.
// Random samples for every bucket; filter gains g0 = 1, g1 = -0.5, g2 = 0.25,
// g3 = -0.25, output gain 1.95, delay 10, bunches 0..41 damped. For bunch 9 a
// measurement runs with anti-damping gain 0.75 for the first 3 turns. The DAC
// word of every bucket from turn 4 on is compared with a reference worked out
// from the samples, and must leave 5 + delay clocks after its samples.
module tb_damper_channel;
  import booster_pkg::*;
  localparam int TURNS = 10, DLY = 10, SEL = 9;
  logic clk = 0, rst = 1, cycle_start = 0;
  logic signed [ADC_W-1:0] adc [SPB];
  tag_t tag_i, pos_tag_o, dac_tag_o;
  ramp_entry_t ramp;
  logic [HARMONIC-1:0] damp_mask;
  logic [BUNCH_W-1:0] sel_bunch = 7'(SEL);
  logic tm_running;
  logic [TURN_W-1:0] tm_start_turn = 16'd5;
  meas_entry_t tm_entry;
  logic [NOISE_W-1:0] noise_amp = '0;
  logic signed [POS_W-1:0] pos_o;
  logic signed [DAC_W-1:0] dac_o;
  logic ad_on_o, noise_on_o;
  int checks = 0, failures = 0, n_ad = 0, n_sat = 0;
  int q [TURNS][HARMONIC];
  int cyc = 0, t_in [TURNS][HARMONIC];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  bunch_timing u_t (.clk, .rst, .cycle_start, .tag(tag_i));
  damper_channel dut (.*);

  assign tm_running = (tag_i.turn >= 5);

  // record the samples of every bucket
  always @(negedge clk) if (!rst && tag_i.turn < TURNS) begin
    q[tag_i.turn][tag_i.bunch] = int'(adc[1]) - int'(adc[3]);
    t_in[tag_i.turn][tag_i.bunch] = cyc;
  end

  always @(negedge clk) begin
    foreach (adc[k]) adc[k] = ADC_W'($urandom);
  end

  always begin
    longint y, k;
    int n, b;
    @(posedge clk); #1;
    n = dac_tag_o.turn; b = dac_tag_o.bunch;
    if (!rst && n >= 4 && n < TURNS && cyc - t_in[n][b] == 5 + DLY) begin
      y = (16384 * longint'(q[n][b]) - 8192 * longint'(q[n-1][b]) + 4096 * longint'(q[n-2][b])
           - 4096 * longint'(q[n-4][b])) >>> 14;
      if (b == SEL && n >= 5) begin
        k = (n < 8) ? -((y * 12288) >>> 14) : 0;
        if (n < 8) n_ad++;
      end else begin
        k = (b < 42) ? (y * 32000) >>> 14 : 0;
      end
      if (k > 8191)  begin k = 8191;  n_sat++; end
      if (k < -8192) begin k = -8192; n_sat++; end
      checks++;
      if (longint'(dac_o) != k) begin
        failures++; $display("FAIL turn %0d bunch %0d: dac %0d want %0d", n, b, dac_o, k);
      end
    end else if (!rst && n >= 4 && n < TURNS) begin
      checks++; failures++;
      $display("FAIL turn %0d bunch %0d: latency %0d", n, b, cyc - t_in[n][b]);
    end
  end

  initial begin
    ramp = '0;
    ramp.gain0 = 16384; ramp.gain1 = -8192; ramp.gain2 = 4096; ramp.gain3 = -4096;
    ramp.out_gain = 32000; ramp.delay = 8'(DLY);
    damp_mask = {42'd0, {42{1'b1}}};
    tm_entry = '0; tm_entry.ad_turns = 8'd3; tm_entry.ad_gain = 16'sd12288;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    repeat (84 * TURNS + 30) @(negedge clk);
    checks++;
    if (n_ad != 3 || n_sat == 0) begin failures++; $display("FAIL: %0d anti-damped turns, %0d saturated", n_ad, n_sat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
