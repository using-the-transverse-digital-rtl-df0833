// tb_booster_cycle: a whole Booster cycle of tune monitoring, the design's
// main use. Both planes run the full table of 64 measurements, one every 260
// turns from turn 1500 to about turn 18000, each exciting its bunch with 16
// turns of noise. The beam model's tunes step through the cycle (the
// horizontal one over bins 37..41, the vertical one over bins 23..27, i.e.
// fractional tunes 1 - bin/128), and every one of the 2 x 64 highest stored
// peaks, read back over the host bus, must sit on the tune of its measurement.
// Both planes measure the same bunch and the beam model couples a quarter of
// each plane's motion into the other plane's pickup, so each spectrum also
// holds the other plane's tune, smaller: the second stored peak must sit there
// and be lower than the first. So that the two planes' amplitudes are
// comparable, the testbench gives the bunch an oscillation of 500 in both
// planes when a capture starts, on top of which the 16 turns of noise act
// (noise amplitude 1/64, kicks of up to 512). About 1.6 million clocks.
module tb_booster_cycle;
  import booster_pkg::*;
  localparam int NM = N_MEAS, FIRST = 1500, STEP = 260;
  localparam int SEL [2] = '{40, 40};
  localparam int BIN0 [2] = '{39, 25};

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

  function automatic int want_bin(input int p, input int m);
    return BIN0[p] + ((m / 4) % 5) - 2;
  endfunction

  int turn = 0, bucket = 0, n_peaks [2] = '{0, 0};
  always @(posedge clk) begin
    if (cycle_start) begin bucket <= 0; turn <= 0; end
    else if (bucket == HARMONIC - 1) begin bucket <= 0; turn <= turn + 1; end
    else bucket <= bucket + 1;
    for (int p = 0; p < 2; p++) if (!rst && peak_done[p]) n_peaks[p]++;
  end

  // a starting oscillation for both planes when a capture begins
  logic run_q = 0;
  always @(negedge clk) begin
    if (!rst && tm_running[0] && !run_q)
      for (int p = 0; p < 2; p++) beam.set_amp(p, SEL[p], 500.0, 0.0);
    run_q <= !rst && tm_running[0];
  end

  // tune of the measurement being taken (set a few turns before it starts)
  always @(negedge clk) if (bucket == 0) begin
    int m;
    m = (turn + 20 - FIRST) / STEP;
    if (turn + 20 >= FIRST && m < NM)
      for (int p = 0; p < 2; p++) beam.tune[p] = 1.0 - real'(want_bin(p, m)) / 128.0;
  end

  initial begin
    logic [31:0] d;
    logic [41:0] hi1, hi2;
    real mu, g0, g1;
    int base;
    beam.couple = 0.25;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int p = 0; p < 2; p++) begin
      base = (p + 1) << 16;
      mu = 6.283185307179586 * (1.0 - real'(BIN0[p]) / 128.0);
      g0 = -0.5 * $cos(mu) / $sin(mu);
      g1 = 0.5 / $sin(mu);
      bus_write(base + 16'h1000 + 0, 0);
      bus_write(base + 16'h1000 + 1, $rtoi($floor(g0 * 16384.0 + 0.5)));
      bus_write(base + 16'h1000 + 2, $rtoi($floor(g1 * 16384.0 + 0.5)));
      bus_write(base + 16'h1000 + 3, 0);
      bus_write(base + 16'h1000 + 4, 0);
      bus_write(base + 16'h1000 + 5, 16384);
      bus_write(base + 16'h1000 + 6, 79);
      bus_write(base + 9, 1);
      bus_write(base + 6, -1); bus_write(base + 7, -1); bus_write(base + 8, 32'h1FFFF);
      bus_write(base + 1, SEL[p]);
      bus_write(base + 2, NM);
      bus_write(base + 3, 10); bus_write(base + 4, 60);
      bus_write(base + 5, 512);
      for (int i = 0; i < NM; i++) begin
        bus_write(base + 16'h2000 + i * 4 + 0, FIRST + i * STEP);
        bus_write(base + 16'h2000 + i * 4 + 1, 16);
        bus_write(base + 16'h2000 + i * 4 + 2, 0);
        bus_write(base + 16'h2000 + i * 4 + 3, 0);
      end
      // Hann window
      for (int k = 0; k < FFT_N; k++)
        bus_write(base + 16'h3000 + k, $rtoi($floor(65535.0 * 0.5 * (1.0 - $cos(6.283185307179586 * k / FFT_N)) + 0.5)));
      bus_write(base + 0, 1);
    end
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    wait (turn == FIRST + (NM - 1) * STEP + 140);
    for (int p = 0; p < 2; p++) begin
      base = (p + 1) << 16;
      check(n_peaks[p] == NM, $sformatf("plane %0d: %0d spectra", p, n_peaks[p]));
      bus_read(base + 10, d);
      check(d[6:0] == 7'(NM) && d[14:8] == 7'(NM), $sformatf("plane %0d status %h", p, d));
      for (int m = 0; m < NM; m++) begin
        bus_read(base + 16'h4000 + m * 8 + 1, d);
        check(int'(d[21:16]) == want_bin(p, m),
              $sformatf("plane %0d measurement %0d: peak at bin %0d, want %0d", p, m, d[21:16], want_bin(p, m)));
        hi1 = {d[9:0], 32'h0};
        bus_read(base + 16'h4000 + m * 8 + 0, d);
        hi1 = hi1 | 42'(d);
        bus_read(base + 16'h4000 + m * 8 + 3, d);
        check(int'(d[21:16]) == want_bin(1 - p, m),
              $sformatf("plane %0d measurement %0d: second peak at bin %0d, want %0d", p, m, d[21:16], want_bin(1 - p, m)));
        hi2 = {d[9:0], 32'h0};
        bus_read(base + 16'h4000 + m * 8 + 2, d);
        hi2 = hi2 | 42'(d);
        check(hi2 > 0 && hi2 < hi1, $sformatf("plane %0d measurement %0d: peak heights %0d, %0d", p, m, hi1, hi2));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (84 * 20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
