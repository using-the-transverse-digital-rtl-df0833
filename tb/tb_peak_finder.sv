// tb_peak_finder: 300 random spectra (some with plateaus and ties, some with a
// narrow window, some with fewer than three peaks). The reference collects all
// local maxima inside the window, sorts them by height keeping bin order for
// equal heights, and takes the first three. `done` must come one clock after
// the last bin.
module tb_peak_finder;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic in_valid, in_last, done;
  logic [BIN_W-1:0] in_bin, win_lo, win_hi;
  logic [MAG_W-1:0] in_mag;
  peak_t peaks [N_PEAKS];
  int checks = 0, failures = 0, n_short = 0;
  always #5 clk = ~clk;
  peak_finder dut (.*);

  longint m [N_BINS];

  initial begin
    peak_t e [N_PEAKS];
    longint l, r, tm_;
    int cb [N_BINS];
    longint cm [N_BINS];
    int nc, tb_;
    in_valid = 0; in_last = 0; in_bin = '0; in_mag = '0; win_lo = '0; win_hi = '1;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int s = 0; s < 300; s++) begin
      int kind;
      kind = s % 4;
      for (int k = 0; k < N_BINS; k++)
        m[k] = (kind == 0) ? longint'($urandom_range(0, 6)) :
               (kind == 1) ? longint'($urandom) * 1000 :
               (kind == 2) ? longint'(k < 32 ? k : 63 - k) : longint'($urandom_range(0, 3));
      win_lo = 6'($urandom_range(0, 30));
      win_hi = 6'($urandom_range(int'(win_lo), 63));
      if (kind == 1) begin win_lo = 0; win_hi = 63; end
      // reference
      nc = 0;
      for (int k = 0; k < N_BINS; k++) begin
        l = (k == 0) ? 0 : m[k-1];
        r = (k == N_BINS - 1) ? 0 : m[k+1];
        if (m[k] > l && m[k] >= r && k >= int'(win_lo) && k <= int'(win_hi)) begin
          cb[nc] = k; cm[nc] = m[k]; nc++;
        end
      end
      // stable insertion sort by height, highest first
      for (int i = 1; i < nc; i++)
        for (int j = i; j > 0; j--)
          if (cm[j] > cm[j-1]) begin
            tb_ = cb[j]; cb[j] = cb[j-1]; cb[j-1] = tb_;
            tm_ = cm[j]; cm[j] = cm[j-1]; cm[j-1] = tm_;
          end
      for (int k = 0; k < N_PEAKS; k++) begin
        e[k].bin = (k < nc) ? 6'(cb[k]) : '0;
        e[k].mag = (k < nc) ? MAG_W'(cm[k]) : '0;
      end
      if (nc < 3) n_short++;
      // stream the spectrum
      for (int k = 0; k < N_BINS; k++) begin
        @(negedge clk);
        in_valid = 1; in_bin = 6'(k); in_mag = MAG_W'(m[k]); in_last = (k == N_BINS - 1);
      end
      @(negedge clk); in_valid = 0; in_last = 0;
      @(posedge clk); #1;
      checks++;
      if (!done) begin failures++; $display("FAIL spectrum %0d: done missing", s); end
      for (int k = 0; k < N_PEAKS; k++) begin
        checks++;
        if (peaks[k] != e[k]) begin
          failures++;
          $display("FAIL spectrum %0d rank %0d: bin %0d mag %0d want bin %0d mag %0d", s, k,
                   peaks[k].bin, peaks[k].mag, e[k].bin, e[k].mag);
        end
      end
      repeat ($urandom_range(0, 3)) @(negedge clk);
    end
    checks++;
    if (n_short == 0) begin failures++; $display("FAIL: no spectrum with fewer than 3 peaks"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
