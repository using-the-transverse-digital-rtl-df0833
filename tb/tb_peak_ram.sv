// tb_peak_ram: writes three ranked peaks for all 64 measurements and reads
// every (measurement, rank) back; rank select and address share one clock of
// latency.
module tb_peak_ram;
  import booster_pkg::*;
  logic clk = 0, we = 0;
  logic [MEAS_W-1:0] waddr = '0, raddr = '0;
  logic [1:0] rsel = '0;
  peak_t wdata [N_PEAKS];
  peak_t rdata;
  peak_t ref_m [N_MEAS][N_PEAKS];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  peak_ram dut (.*);

  initial begin
    foreach (wdata[k]) wdata[k] = '0;
    for (int pass = 0; pass < 2; pass++) begin
      for (int m = 0; m < N_MEAS; m++) begin
        if (pass == 1 && m % 4 != 1) continue;
        @(negedge clk); we = 1; waddr = 6'(m);
        for (int k = 0; k < N_PEAKS; k++) begin
          wdata[k] = {6'($urandom), 10'($urandom), 32'($urandom)};
          ref_m[m][k] = wdata[k];
        end
      end
      @(negedge clk); we = 0;
      for (int m = 0; m < N_MEAS; m++)
        for (int k = 0; k < N_PEAKS; k++) begin
          @(negedge clk); raddr = 6'(m); rsel = 2'(k);
          @(posedge clk); #1;
          checks++;
          if (rdata != ref_m[m][k]) begin failures++; $display("FAIL meas %0d rank %0d", m, k); end
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
