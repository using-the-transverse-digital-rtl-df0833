// tb_tm_sequencer: three table entries (start turns 2, 140 and 200, the last
// one inside the second capture) on bunch 17. A stand-in for the FFT drops
// ready for 600 clocks after each 128th sample. Checks: samples are the
// selected bunch's positions on consecutive turns, indices 0..127, numbered by
// measurement; each capture starts on the first turn at or after its start
// turn on which the FFT was ready; `running`, `start_turn` and `entry` describe
// the capture; exactly three captures; nothing while disabled; cycle_start
// restarts the table.
module tb_tm_sequencer;
  import booster_pkg::*;
  localparam int SEL = 17;
  logic clk = 0, rst = 1, cycle_start = 0, enable = 0, we = 0;
  logic fft_ready;
  logic [BUNCH_W-1:0] sel_bunch = 7'(SEL);
  logic [MEAS_W:0] n_meas = '0;
  logic signed [POS_W-1:0] pos_i;
  tag_t tag_i;
  logic [MEAS_W+1:0] waddr = '0;
  logic [31:0] wdata = '0;
  logic smp_valid, running;
  logic signed [POS_W-1:0] smp_data;
  logic [FFT_LOG-1:0] smp_idx;
  logic [MEAS_W-1:0] smp_meas;
  logic [TURN_W-1:0] start_turn;
  meas_entry_t entry;
  logic [MEAS_W:0] meas_count;
  int checks = 0, failures = 0;
  int starts [3] = '{2, 140, 200};
  always #5 clk = ~clk;

  bunch_timing u_t (.clk, .rst, .cycle_start, .tag(tag_i));
  assign pos_i = POS_W'((int'(tag_i.bunch) * 37 + int'(tag_i.turn) * 11) % 4000 - 2000);
  tm_sequencer dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // FFT stand-in
  int busy = 0;
  always @(posedge clk) begin
    if (smp_valid && smp_idx == 7'd127) busy <= 600;
    else if (busy > 0) busy <= busy - 1;
  end
  assign fft_ready = (busy == 0);

  // running must stay high on the clock of the last sample and the two after
  int n_tail = 0, tail_run = -1;
  always @(negedge clk) begin
    if (smp_valid && smp_idx == 7'd127) tail_run = 0;
    if (tail_run >= 0) begin
      if (running) tail_run++;
      else begin
        check(tail_run == 3, $sformatf("running held %0d clocks after the last sample", tail_run));
        n_tail++;
        tail_run = -1;
      end
    end
  end

  // sample checker
  tag_t tag_q;
  int nsmp = 0, ncap = 0, last_turn = -1, ready_turn = 0, cap_turn0 = 0;
  logic ready_q;
  always @(posedge clk) begin
    tag_q   <= tag_i;
    ready_q <= fft_ready;
    if (fft_ready && !ready_q) ready_turn = int'(tag_i.turn);
  end
  always @(negedge clk) if (!rst && enable && smp_valid) begin
    int want_start;
    check(tag_q.bunch == 7'(SEL), $sformatf("sample from bunch %0d", tag_q.bunch));
    check(smp_data == POS_W'((SEL * 37 + int'(tag_q.turn) * 11) % 4000 - 2000), "sample value");
    check(int'(smp_idx) == nsmp % 128, $sformatf("index %0d want %0d", smp_idx, nsmp % 128));
    check(int'(smp_meas) == ncap, $sformatf("meas %0d want %0d", smp_meas, ncap));
    if (smp_idx == 0) begin
      // first turn at/after the entry's start on which the FFT was ready
      want_start = (starts[ncap] > ready_turn) ? starts[ncap] : ready_turn;
      if (ncap > 0 && want_start <= last_turn) want_start = last_turn + 1;
      check(int'(tag_q.turn) == want_start || (int'(tag_q.turn) == want_start + 1 && ready_turn == want_start),
            $sformatf("capture %0d starts turn %0d want %0d", ncap, tag_q.turn, want_start));
      cap_turn0 = int'(tag_q.turn);
    end else begin
      check(int'(tag_q.turn) == last_turn + 1, "consecutive turns");
      check(running && int'(start_turn) == cap_turn0, "running / start_turn");
      check(entry.noise_turns == 8'(10 + ncap) && entry.ad_gain == 16'(300 + ncap), "entry");
    end
    last_turn = int'(tag_q.turn);
    nsmp++;
    if (smp_idx == 7'd127) ncap++;
  end

  task automatic wr(input int a, input int v);
    @(negedge clk); we = 1; waddr = 8'(a); wdata = 32'(v);
    @(negedge clk); we = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst = 0;
    for (int i = 0; i < 3; i++) begin
      wr(i * 4 + 0, starts[i]); wr(i * 4 + 1, 10 + i); wr(i * 4 + 2, 5 + i); wr(i * 4 + 3, 300 + i);
    end
    n_meas = 7'd3;
    // disabled: nothing may be captured
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    repeat (84 * 10) @(negedge clk);
    check(nsmp == 0 && !smp_valid && meas_count == 0, "disabled sequencer captured");
    enable = 1;
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    repeat (84 * 500) @(negedge clk);
    check(ncap == 3 && nsmp == 384, $sformatf("%0d captures, %0d samples", ncap, nsmp));
    check(meas_count == 7'd3 && !running, "meas_count / running at end");
    check(n_tail == 3, "tail of every capture checked");
    // a new cycle starts over
    ncap = 0; nsmp = 0; last_turn = -1; ready_turn = 0;
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    repeat (84 * 140) @(negedge clk);
    check(ncap == 1, $sformatf("new cycle: %0d captures", ncap));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (84 * 700) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
