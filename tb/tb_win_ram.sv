// tb_win_ram: writes all 128 coefficients, reads them back in random order
// (one clock read latency), rewrites some and reads again.
module tb_win_ram;
  import booster_pkg::*;
  logic clk = 0, we = 0;
  logic [FFT_LOG-1:0] waddr = '0, raddr = '0;
  logic [WIN_W-1:0] wdata = '0, rdata;
  logic [WIN_W-1:0] ref_m [FFT_N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  win_ram dut (.*);

  initial begin
    for (int pass = 0; pass < 2; pass++) begin
      for (int a = 0; a < FFT_N; a++) begin
        if (pass == 1 && a % 3 != 0) continue;
        @(negedge clk); we = 1; waddr = 7'(a); wdata = 16'($urandom); ref_m[a] = wdata;
      end
      @(negedge clk); we = 0;
      for (int n = 0; n < 300; n++) begin
        raddr = 7'($urandom);
        @(posedge clk); #1;
        checks++;
        if (rdata != ref_m[raddr]) begin failures++; $display("FAIL addr %0d: %h want %h", raddr, rdata, ref_m[raddr]); end
        @(negedge clk);
      end
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
