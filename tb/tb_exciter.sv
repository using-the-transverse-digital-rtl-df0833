// tb_exciter: random filter outputs, buckets and settings. Checks the kick of
// ordinary bunches (masked damping), of the selected bunch during a measurement
// (no damping, anti-damping for ad_turns, noise for noise_turns, counted from
// the start turn) and the saturation, one clock after the input. The noise is
// compared with a separate model of the same 32-bit LFSR.
module tb_exciter;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [FILT_W-1:0] y_i;
  tag_t tag_i, tag_o;
  logic signed [GAIN_W-1:0] out_gain;
  logic [HARMONIC-1:0] damp_mask;
  logic [BUNCH_W-1:0] sel_bunch;
  logic tm_running;
  logic [TURN_W-1:0] tm_start_turn;
  meas_entry_t tm_entry;
  logic [NOISE_W-1:0] noise_amp;
  logic signed [KICK_W-1:0] kick_o;
  logic ad_on_o, noise_on_o;
  int checks = 0, failures = 0;
  int n_ad = 0, n_noise = 0, n_both = 0, n_sat = 0;
  always #5 clk = ~clk;
  exciter dut (.*);

  logic [31:0] lfsr_m;
  always @(posedge clk)
    if (rst) lfsr_m <= 32'h1;
    else     lfsr_m <= {lfsr_m[30:0], lfsr_m[31] ^ lfsr_m[21] ^ lfsr_m[1] ^ lfsr_m[0]};

  initial begin
    longint e, noise;
    bit sel, ad, nz;
    int rel;
    y_i = '0; tag_i = '0; out_gain = '0; damp_mask = '0; sel_bunch = 7'd5;
    tm_running = 0; tm_start_turn = '0; tm_entry = '0; noise_amp = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      y_i        = FILT_W'($urandom_range(0, 65535)) - FILT_W'(32768);
      if (n % 97 == 0) y_i = 18'sh1FFFF;
      tag_i.bunch = 7'($urandom_range(0, 83));
      if ($urandom_range(0, 2) == 0) tag_i.bunch = sel_bunch;
      tag_i.turn  = 16'($urandom_range(100, 180));
      if (n % 500 == 0) begin
        out_gain  = GAIN_W'($urandom);
        damp_mask = {20'($urandom), 32'($urandom), 32'($urandom)};
        sel_bunch = 7'($urandom_range(0, 83));
        tm_start_turn = 16'($urandom_range(100, 140));
        tm_entry.noise_turns = 8'($urandom_range(0, 40));
        tm_entry.ad_turns    = 8'($urandom_range(0, 40));
        tm_entry.ad_gain     = GAIN_W'($urandom);
        noise_amp = NOISE_W'($urandom);
      end
      tm_running = ($urandom_range(0, 3) != 0);
      // expected kick
      sel = tm_running && tag_i.bunch == sel_bunch;
      rel = int'(16'(tag_i.turn - tm_start_turn));
      ad  = sel && rel < int'(tm_entry.ad_turns);
      nz  = sel && rel < int'(tm_entry.noise_turns);
      if (ad)                          e = -((longint'(y_i) * longint'(tm_entry.ad_gain)) >>> 14);
      else if (sel)                    e = 0;
      else if (damp_mask[tag_i.bunch]) e = (longint'(y_i) * longint'(out_gain)) >>> 14;
      else                             e = 0;
      noise = (longint'($signed(lfsr_m[15:0])) * longint'(noise_amp)) >>> 15;
      if (nz) e += noise;
      if (e > 131071)  begin e = 131071;  n_sat++; end
      if (e < -131072) begin e = -131072; n_sat++; end
      n_ad += ad; n_noise += nz; n_both += (ad && nz);
      @(posedge clk); #1;
      checks++;
      if (longint'(kick_o) != e || ad_on_o != ad || noise_on_o != nz || tag_o != tag_i) begin
        failures++;
        $display("FAIL n=%0d kick %0d want %0d ad %0b/%0b noise %0b/%0b", n, kick_o, e, ad_on_o, ad, noise_on_o, nz);
      end
    end
    checks++;
    if (n_ad == 0 || n_noise == 0 || n_both == 0 || n_sat == 0) begin
      failures++; $display("FAIL: coverage ad %0d noise %0d both %0d sat %0d", n_ad, n_noise, n_both, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
