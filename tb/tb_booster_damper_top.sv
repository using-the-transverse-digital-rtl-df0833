// tb_booster_damper_top: the whole damper and tune monitor against a model of
// the beam (beam_model), configured over the host bus as an operator would.
//
// Both planes damp all bunches but a three-bucket notch (81-83) with a
// two-tap filter set for the plane's tune, output delay 79 buckets (one turn
// of loop latency in total), and halve the output gain at turn 300 through the
// ramp table. The tune monitor measures bunch 40 (H) three times and bunch 41
// (V) twice: noise for 16 turns, noise plus anti-damping, 128 turns of noise,
// and a second V measurement whose start turn falls inside the first capture
// so it must wait for the FFT. Checks: the highest peak of every spectrum is
// at the model tune (bin 39 for H, 25 for V), the stored spectrum has its
// maximum there, damped bunches lose their oscillation, notch bunches keep it
// and get no kick, the segment switch, status counters, and that each
// mechanism (damping, noise, anti-damping, ramp switch, FFT wait, peak store)
// happened.
module tb_booster_damper_top;
  import booster_pkg::*;
  localparam int SEL_H = 40, SEL_V = 41, TURNS = 620;
  localparam int WANT_BIN [2] = '{39, 25};

  logic clk = 0, rst = 1, cycle_start = 0;
  logic signed [ADC_W-1:0] adc [2][SPB];
  logic signed [DAC_W-1:0] dac [2];
  logic bus_req = 0, bus_we = 0, bus_ack;
  logic [17:0] bus_addr = '0;
  logic [31:0] bus_wdata = '0, bus_rdata;
  logic tm_running [2], exc_ad [2], exc_noise [2], peak_done [2];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  booster_damper_top dut (.*);
  beam_model beam (.clk, .cycle_start, .dac, .adc);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic bus_write(input int a, input int d);
    @(negedge clk); bus_req = 1; bus_we = 1; bus_addr = 18'(a); bus_wdata = 32'(d);
    @(negedge clk); bus_req = 0; bus_we = 0;
    @(negedge clk);
  endtask
  task automatic bus_read(input int a, output logic [31:0] d);
    @(negedge clk); bus_req = 1; bus_we = 0; bus_addr = 18'(a);
    @(negedge clk); bus_req = 0;
    @(posedge clk); #1;
    check(bus_ack, "bus ack");
    d = bus_rdata;
  endtask

  // ---- mechanism counters ----
  int turn = 0, bucket = 0;
  int n_damp [2], n_noise [2], n_ad [2], n_peaks [2], n_wait = 0, n_switch = 0, n_notch [2];
  int cap_start [2][4], n_cap [2];
  logic run_q [2];
  always @(posedge clk) begin
    if (cycle_start) begin bucket <= 0; turn <= 0; end
    else if (bucket == HARMONIC - 1) begin bucket <= 0; turn <= turn + 1; end
    else bucket <= bucket + 1;
  end
  bit synced = 0;   // bucket numbering and kick timing settled after the cycle start
  always @(negedge clk) if (!rst && synced) begin
    for (int p = 0; p < 2; p++) begin
      // the DAC word present now belongs to the bunch of this bucket
      if (bucket >= 81) begin
        n_notch[p]++;
        check(dac[p] == 0, $sformatf("kick on notch bucket %0d plane %0d", bucket, p));
      end else if (dac[p] != 0 && bucket != (p == 0 ? SEL_H : SEL_V)) n_damp[p]++;
      if (exc_noise[p]) n_noise[p]++;
      if (exc_ad[p])    n_ad[p]++;
      if (peak_done[p]) n_peaks[p]++;
      if (tm_running[p] && !run_q[p]) begin cap_start[p][n_cap[p]] = turn; n_cap[p]++; end
      run_q[p] = tm_running[p];
    end
  end

  // measurement table: {start, noise turns, anti-damping turns, anti-damping gain}
  int tbl_h [3][4] = '{'{20, 16, 0, 0}, '{200, 4, 24, 24576}, '{420, 128, 0, 0}};
  int tbl_v [2][4] = '{'{20, 16, 0, 0}, '{140, 4, 20, 24576}};

  initial begin
    logic [31:0] d, lo, hi;
    real mu, g0, g1, a0, pk_mag, mx;
    int base, mxb, pk_bin;
    for (int p = 0; p < 2; p++) begin
      n_damp[p] = 0; n_noise[p] = 0; n_ad[p] = 0; n_peaks[p] = 0; n_cap[p] = 0; n_notch[p] = 0; run_q[p] = 0;
    end
    repeat (3) @(posedge clk);
    rst = 0;
    bus_read(0, d); check(d == 32'hB0057E12, "ID");
    for (int p = 0; p < 2; p++) begin
      base = (p + 1) << 16;
      // kick = -G * px from the last two turns: g0 = G cos(mu)/sin(mu)... (see README)
      mu = 6.283185307179586 * ((p == 0) ? beam.TUNE_H : beam.TUNE_V);
      g0 = -0.5 * $cos(mu) / $sin(mu);
      g1 = 0.5 / $sin(mu);
      for (int s = 0; s < 2; s++) begin
        bus_write(base + 16'h1000 + s * 8 + 0, s == 0 ? 0 : 300);
        bus_write(base + 16'h1000 + s * 8 + 1, $rtoi($floor(g0 * 16384.0 + 0.5)));
        bus_write(base + 16'h1000 + s * 8 + 2, $rtoi($floor(g1 * 16384.0 + 0.5)));
        bus_write(base + 16'h1000 + s * 8 + 3, 0);
        bus_write(base + 16'h1000 + s * 8 + 4, 0);
        bus_write(base + 16'h1000 + s * 8 + 5, s == 0 ? 16384 : 8192);
        bus_write(base + 16'h1000 + s * 8 + 6, 79);
      end
      bus_write(base + 9, 2);
      bus_write(base + 6, -1); bus_write(base + 7, -1); bus_write(base + 8, 32'h1FFFF);  // bunches 0..80
      bus_write(base + 1, p == 0 ? SEL_H : SEL_V);
      bus_write(base + 2, p == 0 ? 3 : 2);
      bus_write(base + 3, 10); bus_write(base + 4, 60);
      bus_write(base + 5, 16384);
      for (int i = 0; i < 3; i++) begin
        if (p == 1 && i == 2) break;
        for (int f = 0; f < 4; f++) bus_write(base + 16'h2000 + i * 4 + f, p == 0 ? tbl_h[i][f] : tbl_v[i][f]);
      end
      for (int k = 0; k < FFT_N; k++) bus_write(base + 16'h3000 + k, 65535);
      bus_write(base + 0, 1);
      bus_read(base + 2, d); check(d == 32'(p == 0 ? 3 : 2), "n_meas readback");
    end
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    // two turns on, the kicks of each bunch come from its own positions
    wait (turn == 2);
    synced = 1;
    // beam: bunch 5 (damped) and 82 (notch) get an oscillation
    for (int p = 0; p < 2; p++) begin
      beam.set_amp(p, 5, 300.0, 0.3);
      beam.set_amp(p, 82, 300.0, 1.1);
    end

    wait (turn == 200);
    for (int p = 0; p < 2; p++) begin
      check(beam.amp(p, 5) < 30.0, $sformatf("plane %0d bunch 5 damped to %0.1f", p, beam.amp(p, 5)));
      check(beam.amp(p, 82) > 290.0 && beam.amp(p, 82) < 310.0, $sformatf("plane %0d notch bunch amplitude %0.1f", p, beam.amp(p, 82)));
      bus_read(((p + 1) << 16) + 11, d); check(d == 0, "segment 0 before turn 300");
    end
    wait (turn == 305);
    for (int p = 0; p < 2; p++) begin
      bus_read(((p + 1) << 16) + 11, d);
      check(d == 1, "segment 1 after turn 300");
      if (d == 1) n_switch++;
    end
    wait (turn == TURNS);
    // ---- results ----
    for (int p = 0; p < 2; p++) begin
      base = (p + 1) << 16;
      bus_read(base + 10, d);
      check(d[6:0] == 7'(p == 0 ? 3 : 2) && d[14:8] == 7'(p == 0 ? 3 : 2), $sformatf("status %h", d));
      for (int m = 0; m < (p == 0 ? 3 : 2); m++) begin
        bus_read(base + 16'h4000 + m * 8 + 1, hi);
        bus_read(base + 16'h4000 + m * 8, lo);
        // 128 turns of noise drive the bunch through the whole capture: the
        // forced response may put the top within one bin of the tune
        check(int'(hi[21:16]) == WANT_BIN[p] || (p == 0 && m == 2 && (int'(hi[21:16]) - WANT_BIN[p]) inside {-1, 1}), $sformatf("plane %0d measurement %0d: highest peak at bin %0d, want %0d", p, m, hi[21:16], WANT_BIN[p]));
        pk_mag = real'(hi[9:0]) * 4294967296.0 + real'(lo);
        pk_bin = int'(hi[21:16]);
        // whole stored spectrum: its maximum inside the tune window is that peak
        mx = 0; mxb = -1;
        for (int b = 10; b <= 60; b++) begin
          real v;
          bus_read(base + 16'h8000 + (m * 64 + b) * 2, lo);
          bus_read(base + 16'h8000 + (m * 64 + b) * 2 + 1, hi);
          v = real'(hi) * 4294967296.0 + real'(lo);
          if (v > mx) begin mx = v; mxb = b; end
        end
        check(mxb == pk_bin && mx == pk_mag, $sformatf("plane %0d measurement %0d: spectrum maximum at bin %0d", p, m, mxb));
      end
    end
    // the second V measurement had to wait for the FFT
    check(n_cap[1] == 2 && cap_start[1][1] > tbl_v[1][0] && cap_start[1][1] > cap_start[1][0] + 128,
          $sformatf("V capture 2 started turn %0d", cap_start[1][1]));
    if (cap_start[1][1] > tbl_v[1][0]) n_wait++;
    check(cap_start[0][0] == 20 && cap_start[0][1] == 200 && cap_start[0][2] == 420, "H capture start turns");
    // mechanisms
    for (int p = 0; p < 2; p++) begin
      check(n_damp[p] > 0,  $sformatf("plane %0d damping kicks: %0d", p, n_damp[p]));
      check(n_noise[p] > 0, $sformatf("plane %0d noise kicks: %0d", p, n_noise[p]));
      check(n_ad[p] > 0,    $sformatf("plane %0d anti-damping kicks: %0d", p, n_ad[p]));
      check(n_peaks[p] == (p == 0 ? 3 : 2), $sformatf("plane %0d spectra stored: %0d", p, n_peaks[p]));
      check(n_notch[p] > 0, "notch buckets seen");
    end
    check(n_noise[0] == 16 + 4 + 128 && n_ad[0] == 24 && n_noise[1] == 16 + 4 && n_ad[1] == 20,
          $sformatf("excitation turns H %0d/%0d V %0d/%0d", n_noise[0], n_ad[0], n_noise[1], n_ad[1]));
    check(n_switch == 2, "ramp switch");
    check(n_wait == 1, "FFT wait");
    $display("mechanisms: damping %0d/%0d noise %0d/%0d anti-damping %0d/%0d spectra %0d/%0d ramp switches %0d fft waits %0d",
             n_damp[0], n_damp[1], n_noise[0], n_noise[1], n_ad[0], n_ad[1], n_peaks[0], n_peaks[1], n_switch, n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (84 * (TURNS + 200)) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
