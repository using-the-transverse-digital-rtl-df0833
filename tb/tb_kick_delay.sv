// tb_kick_delay: random kicks through delays 0, 1, 79 and 255 buckets; the DAC
// word must be the kick of delay+1 clocks before, saturated to 14 bits, with
// its tag.
module tb_kick_delay;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [KICK_W-1:0] kick_i;
  tag_t tag_i, tag_o;
  logic [DLY_W-1:0] delay;
  logic signed [DAC_W-1:0] dac_o;
  int checks = 0, failures = 0, n_sat = 0;
  int hk [$];
  tag_t ht [$];
  always #5 clk = ~clk;
  kick_delay dut (.*);

  initial begin
    int d, e;
    int dl [4] = '{0, 1, 79, 255};
    kick_i = '0; tag_i = '0; delay = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    foreach (dl[j]) begin
      @(negedge clk);
      delay = DLY_W'(dl[j]);
      hk.delete(); ht.delete();
      for (int n = 0; n < 700; n++) begin
        kick_i = KICK_W'($urandom_range(0, 40000)) - KICK_W'(20000);
        tag_i  = tag_t'($urandom);
        hk.push_back(int'(kick_i)); ht.push_back(tag_i);
        @(posedge clk); #1;
        // output now = input of (delay) clocks before the one just taken
        d = dl[j];
        if (hk.size() > d + 1 || (hk.size() == d + 1)) begin
          e = hk[hk.size() - 1 - d];
          if (e > 8191)  begin e = 8191;  n_sat++; end
          if (e < -8192) begin e = -8192; n_sat++; end
          if (n > d + 2) begin
            checks++;
            if (int'(dac_o) != e || tag_o != ht[ht.size() - 1 - d]) begin
              failures++; $display("FAIL delay %0d n %0d: %0d want %0d", d, n, dac_o, e);
            end
          end
        end
        @(negedge clk);
      end
    end
    checks++;
    if (n_sat == 0) begin failures++; $display("FAIL: no saturation seen"); end
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
