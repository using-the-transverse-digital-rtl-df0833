// tb_spectrum_ram: writes random spectra to all 64 x 64 words, reads back
// random addresses (one clock latency), also while writing.
module tb_spectrum_ram;
  import booster_pkg::*;
  localparam int D = N_MEAS * N_BINS;
  logic clk = 0, we = 0;
  logic [MEAS_W+BIN_W-1:0] waddr = '0, raddr = '0;
  logic [MAG_W-1:0] wdata = '0, rdata;
  logic [MAG_W-1:0] ref_m [D];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spectrum_ram dut (.*);

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 12'(a); wdata = {10'($urandom), 32'($urandom)}; ref_m[a] = wdata;
    end
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      we = ($urandom_range(0, 1) == 1);
      waddr = 12'($urandom); wdata = {10'($urandom), 32'($urandom)};
      raddr = 12'($urandom);
      if (raddr == waddr) we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata != ref_m[raddr]) begin failures++; $display("FAIL addr %0d", raddr); end
      if (we) ref_m[waddr] = wdata;
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
