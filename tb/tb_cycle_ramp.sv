// tb_cycle_ramp: loads four segments (start turns 0, 3, 5, 9) with distinct
// settings, uses three of them, and follows a cycle: the active settings must
// be those of the last segment whose start turn has been reached, switching
// two clocks after bucket 0 of that turn; cycle_start returns to segment 0.
module tb_cycle_ramp;
  import booster_pkg::*;
  logic clk = 0, rst = 1, cycle_start = 0;
  tag_t tag;
  logic [SEG_W:0] n_seg;
  logic we;
  logic [SEG_W+2:0] waddr;
  logic [31:0] wdata;
  ramp_entry_t cfg;
  logic [SEG_W-1:0] seg_o;
  int checks = 0, failures = 0, switches = 0;
  always #5 clk = ~clk;
  bunch_timing u_t (.clk, .rst, .cycle_start, .tag);
  cycle_ramp dut (.*);

  int starts [4] = '{0, 3, 5, 9};

  task automatic wr(input int s, input int f, input int v);
    @(negedge clk); we = 1; waddr = (SEG_W+3)'(s * 8 + f); wdata = 32'(v);
    @(negedge clk); we = 0;
  endtask

  function automatic int want_seg(input int turn);
    int s = 0;
    for (int k = 1; k < 3; k++) if (turn >= starts[k]) s = k;
    return s;
  endfunction

  initial begin
    int ws;
    tag_t prev;
    we = 0; waddr = '0; wdata = '0; n_seg = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int s = 0; s < 4; s++) begin
      wr(s, 0, starts[s]);
      for (int f = 1; f <= 5; f++) wr(s, f, 1000 * s + f);
      wr(s, 6, 10 + s);
    end
    n_seg = (SEG_W+1)'(3);
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    for (int n = 0; n < 84 * 12; n++) begin
      @(posedge clk); #1;
      // cfg reflects the segment chosen at bucket 0, two clocks into the turn
      if (tag.bunch >= 2) begin
        ws = want_seg(tag.turn);
        checks++;
        if (cfg.gain0 != 16'(1000 * ws + 1) || cfg.gain3 != 16'(1000 * ws + 4) ||
            cfg.out_gain != 16'(1000 * ws + 5) || cfg.delay != 8'(10 + ws) ||
            cfg.start_turn != 16'(starts[ws])) begin
          failures++;
          $display("FAIL turn %0d bucket %0d: gain0 %0d delay %0d, want segment %0d", tag.turn, tag.bunch, cfg.gain0, cfg.delay, ws);
        end
        if (tag.bunch == 2 && tag.turn > 0 && ws != want_seg(tag.turn - 1)) switches++;
      end
    end
    checks++;
    if (switches != 2) begin failures++; $display("FAIL: %0d switches", switches); end
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    repeat (3) @(posedge clk); #1;
    checks++;
    if (cfg.gain0 != 16'd1) begin failures++; $display("FAIL: no return to segment 0"); end
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
