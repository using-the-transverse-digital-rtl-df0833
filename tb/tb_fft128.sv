// tb_fft128: checks the 128-point burst FFT against a direct DFT computed with
// real arithmetic in the testbench. Three frames: a cosine on bin 10, a random
// frame at full scale (bins must agree within a rounding tolerance) and a
// constant full-negative frame (worst-case DC growth). Also checks the burst
// timing: after the last sample, 448 compute clocks, then 64 output bins on
// consecutive clocks, and ready low from the last sample until the last bin.
module tb_fft128;
  import booster_pkg::*;
  localparam int N = FFT_N;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic in_valid = 0;
  logic [6:0] in_idx = 0;
  logic signed [FFT_IN_W-1:0] in_data = 0;
  logic ready, out_valid, out_last;
  logic [5:0] out_bin;
  logic signed [FFT_W-1:0] out_re, out_im;

  fft128 dut (.*);

  int checks = 0, failures = 0;
  real xin [N];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int cyc = 0, t_in = 0, t_out = 0;
  always @(posedge clk) begin
    cyc++;
    if (in_valid && in_idx == 7'd127 && ready) t_in = cyc;
    if (out_valid && out_bin == 0) t_out = cyc;
  end

  task automatic run_frame(input string name, input real tol);
    int t_last, nbins;
    real er, ei, ang;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      in_valid = 1; in_idx = 7'(n); in_data = FFT_IN_W'($rtoi(xin[n]));
    end
    @(negedge clk); in_valid = 0;
    t_last = 0; nbins = 0;
    while (!out_valid) begin
      @(posedge clk); #1; t_last++;
      if (!out_valid) check(!ready || t_last < 2, {name, ": ready during compute"});
    end
    while (out_valid) begin
      er = 0; ei = 0;
      for (int n = 0; n < N; n++) begin
        ang = 6.283185307179586 * real'(out_bin) * n / N;
        er += xin[n] * $cos(ang);
        ei -= xin[n] * $sin(ang);
      end
      check(int'(out_bin) == nbins, $sformatf("%s: bin order %0d", name, out_bin));
      check((real'(out_re) - er) < tol && (er - real'(out_re)) < tol &&
            (real'(out_im) - ei) < tol && (ei - real'(out_im)) < tol,
            $sformatf("%s: bin %0d got %0d,%0d want %0.1f,%0.1f", name, out_bin, out_re, out_im, er, ei));
      check(out_last == (nbins == N/2 - 1), {name, ": out_last"});
      nbins++;
      @(posedge clk); #1;
    end
    // 448 butterfly clocks, one to register bin 0; t_out is sampled on the
    // edge after bin 0 appears
    check(t_out - t_in == 450, $sformatf("%s: first bin %0d clocks after last sample", name, t_out - t_in));
    check(nbins == N/2, $sformatf("%s: %0d bins", name, nbins));
    check(ready, {name, ": ready after output"});
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst = 0;
    for (int n = 0; n < N; n++) xin[n] = $floor(1000.0 * $cos(6.283185307179586 * 10 * n / N) + 0.5);
    run_frame("cosine", 8.0);
    for (int n = 0; n < N; n++) xin[n] = real'($signed(13'($urandom)));
    run_frame("random", 40.0);
    for (int n = 0; n < N; n++) xin[n] = -4096.0;
    run_frame("dc", 8.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
