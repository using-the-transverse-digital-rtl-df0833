// tb_tune_monitor: one plane's tune measurement from bunch positions to stored
// spectra and peaks. The selected bunch (30) carries three betatron lines at
// bins 27, 45 and 10 (amplitudes 1500, 700, 300) on top of a closed-orbit
// offset; other bunches carry noise. Two measurements: a rectangular window
// with tune window 5..60, then a Hann window with tune window 20..63 and a
// start turn inside the first capture. Checks: every stored bin against a
// DFT of the windowed samples worked out here, the three peaks of each
// measurement, the excitation controls while capturing, and that the peaks are
// stored 519 clocks after the sequencer emits the last sample (window 2 +
// FFT 450 + 63 more bins + magnitude 2 + peak decision 2), i.e. 516 clocks
// after `running` falls.
module tb_tune_monitor;
  import booster_pkg::*;
  localparam int SEL = 30;
  logic clk = 0, rst = 1, cycle_start = 0;
  logic enable = 1;
  logic [BUNCH_W-1:0] sel_bunch = 7'(SEL);
  logic [MEAS_W:0] n_meas = 7'd2;
  logic [BIN_W-1:0] win_lo = 6'd5, win_hi = 6'd60;
  logic signed [POS_W-1:0] pos_i;
  tag_t tag_i;
  logic meas_we = 0, win_we = 0;
  logic [MEAS_W+1:0] meas_waddr = '0;
  logic [FFT_LOG-1:0] win_waddr = '0;
  logic [31:0] wdata = '0;
  logic [MEAS_W+BIN_W-1:0] spec_raddr = '0;
  logic [MAG_W-1:0] spec_rdata;
  logic [MEAS_W-1:0] peak_raddr = '0;
  logic [1:0] peak_rsel = '0;
  peak_t peak_rdata;
  logic running, peak_done;
  logic [TURN_W-1:0] start_turn;
  meas_entry_t entry;
  logic [MEAS_W:0] meas_count, spec_count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bunch_timing u_t (.clk, .rst, .cycle_start, .tag(tag_i));
  tune_monitor dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int tone(input int turn);
    real t = real'(turn);
    return int'($floor(200.0 + 1500.0 * $cos(6.283185307179586 * 27.0 * t / 128.0)
                       + 700.0 * $cos(6.283185307179586 * 45.0 * t / 128.0 + 1.0)
                       + 300.0 * $sin(6.283185307179586 * 10.0 * t / 128.0) + 0.5));
  endfunction

  assign pos_i = (tag_i.bunch == 7'(SEL)) ? POS_W'(tone(int'(tag_i.turn))) : POS_W'($signed(9'($urandom)));

  int win [2][FFT_N];
  int cap_turn [2], cap_n = 0;
  int cyc = 0, t_last = 0, t_done [2], n_done = 0;
  logic running_q = 0;
  always @(posedge clk) begin
    cyc++;
    running_q <= running;
    if (!rst && running && !running_q) cap_turn[cap_n] = int'(start_turn);
    // running drops three clocks after the 128th sample
    if (!rst && !running && running_q) begin cap_n++; t_last = cyc; end
    if (peak_done && !rst) begin t_done[n_done] = cyc - t_last; n_done++; end
  end

  // check the excitation controls while capturing
  always @(negedge clk) if (!rst && running && running_q) begin
    check(entry.noise_turns == 8'(20 + cap_n) && entry.ad_gain == 16'(1000 + cap_n) &&
          int'(start_turn) == cap_turn[cap_n], $sformatf("excitation controls: cap %0d noise %0d gain %0d start %0d/%0d", cap_n, entry.noise_turns, entry.ad_gain, start_turn, cap_turn[cap_n]));
  end

  initial begin
    real xr, xi, ang, w, got;
    int x;
    // measurement table: start turns 3 and 60
    for (int i = 0; i < 2; i++) begin
      @(negedge clk); meas_we = 1; meas_waddr = 8'(i * 4 + 0); wdata = (i == 0) ? 32'd3 : 32'd60;
      @(negedge clk); meas_waddr = 8'(i * 4 + 1); wdata = 32'(20 + i);
      @(negedge clk); meas_waddr = 8'(i * 4 + 2); wdata = 32'(4 + i);
      @(negedge clk); meas_waddr = 8'(i * 4 + 3); wdata = 32'(1000 + i);
    end
    @(negedge clk); meas_we = 0;
    for (int k = 0; k < FFT_N; k++) begin
      win[0][k] = 65535;
      win[1][k] = int'($floor(65535.0 * 0.5 * (1.0 - $cos(6.283185307179586 * k / FFT_N)) + 0.5));
    end
    // rectangular window for the first measurement
    for (int k = 0; k < FFT_N; k++) begin
      @(negedge clk); win_we = 1; win_waddr = 7'(k); wdata = 32'(win[0][k]);
    end
    @(negedge clk); win_we = 0;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    // switch to the Hann window and the second tune window once the first
    // capture is done
    wait (cap_n == 1);
    for (int k = 0; k < FFT_N; k++) begin
      @(negedge clk); win_we = 1; win_waddr = 7'(k); wdata = 32'(win[1][k]);
    end
    @(negedge clk); win_we = 0;
    wait (n_done == 1);
    @(negedge clk); win_lo = 6'd20; win_hi = 6'd63;
    wait (n_done == 2);
    repeat (5) @(negedge clk);
    check(cap_n == 2 && spec_count == 7'd2 && meas_count == 7'd2, "two measurements stored");
    check(cap_turn[0] == 3, $sformatf("first capture at turn %0d", cap_turn[0]));
    check(cap_turn[1] > 131, $sformatf("second capture at turn %0d", cap_turn[1]));
    for (int m = 0; m < 2; m++) begin
      check(t_done[m] == 516, $sformatf("peaks of %0d stored %0d clocks after the last sample", m, t_done[m]));
      for (int b = 0; b < N_BINS; b++) begin
        xr = 0; xi = 0;
        for (int n = 0; n < FFT_N; n++) begin
          x = (tone(cap_turn[m] + n) * win[m][n]) >>> 16;
          ang = 6.283185307179586 * b * n / FFT_N;
          xr += x * $cos(ang); xi -= x * $sin(ang);
        end
        w = $sqrt(xr * xr + xi * xi);
        @(negedge clk); spec_raddr = 12'(m * 64 + b);
        @(posedge clk); #1;
        got = $sqrt(real'(spec_rdata));
        check(got - w < 20.0 && w - got < 20.0, $sformatf("meas %0d bin %0d: |X| %0.1f want %0.1f", m, b, got, w));
      end
    end
    // peaks
    begin
      int want [2][3] = '{'{27, 45, 10}, '{27, 45, -1}};
      peak_t pk [3];
      for (int m = 0; m < 2; m++) begin
        for (int r = 0; r < 3; r++) begin
          @(negedge clk); peak_raddr = 6'(m); peak_rsel = 2'(r);
          @(posedge clk); #1;
          pk[r] = peak_rdata;
          if (want[m][r] >= 0)
            check(int'(pk[r].bin) == want[m][r], $sformatf("meas %0d peak %0d at bin %0d want %0d", m, r, pk[r].bin, want[m][r]));
        end
        check(pk[0].mag >= pk[1].mag && pk[1].mag >= pk[2].mag, "peaks ordered");
        check(m == 0 || (pk[2].bin >= 20 && pk[2].mag < pk[1].mag / 4), "third peak of measurement 1");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (84 * 400) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
