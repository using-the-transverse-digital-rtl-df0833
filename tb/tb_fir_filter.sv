// tb_fir_filter: random positions for every bucket and turn, random gains
// (changed once); from turn 4 on every output must equal
// (g0 x[n] + g1 x[n-1] + g2 x[n-2] + g3 x[n-4]) >>> 14 for its bunch, two clocks
// after the input, with the input's tag.
module tb_fir_filter;
  import booster_pkg::*;
  localparam int TURNS = 12;
  logic clk = 0, rst = 1;
  logic signed [POS_W-1:0] x_i;
  tag_t tag_i, tag_o;
  logic signed [GAIN_W-1:0] gain [4];
  logic signed [FILT_W-1:0] y_o;
  int checks = 0, failures = 0;
  int xs [TURNS][HARMONIC];
  int cyc = 0, t_in [TURNS][HARMONIC];
  always #5 clk = ~clk;
  always @(posedge clk) cyc++;
  fir_filter dut (.*);

  // model, sampled just after the rising edge (gains then hold the values the
  // edge used)
  always begin
    longint acc;
    int b, n;
    @(posedge clk); #1;
    if (!rst && tag_o.turn >= 4 && tag_o.turn < TURNS) begin
    b = tag_o.bunch; n = tag_o.turn;
    acc = longint'(gain[0]) * xs[n][b] + longint'(gain[1]) * xs[n-1][b] +
          longint'(gain[2]) * xs[n-2][b] + longint'(gain[3]) * xs[n-4][b];
    acc = acc >>> GAIN_FRAC;
    checks++;
    if (longint'(y_o) != acc || cyc - t_in[n][b] != 2) begin
      failures++;
      $display("FAIL turn %0d bunch %0d: got %0d want %0d, latency %0d", n, b, y_o, acc, cyc - t_in[n][b]);
    end
    end
  end

  initial begin
    for (int k = 0; k < 4; k++) gain[k] = GAIN_W'($urandom);
    x_i = '0; tag_i = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int n = 0; n < TURNS; n++)
      for (int b = 0; b < HARMONIC; b++) begin
        @(negedge clk);
        if (n == 8 && b == 0) for (int k = 0; k < 4; k++) gain[k] = GAIN_W'($urandom);
        xs[n][b] = (n == 5 && b == 7) ? -4096 : int'($signed(13'($urandom)));
        x_i = POS_W'(xs[n][b]);
        tag_i.bunch = 7'(b); tag_i.turn = 16'(n);
        t_in[n][b] = cyc;
      end
    @(negedge clk); x_i = '0; tag_i.turn = 16'(TURNS + 5);
    repeat (4) @(negedge clk);
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
