// tb_mag_sq: random and extreme Re/Im values; the output two clocks later must
// be Re^2 + Im^2 (after the second clock edge) with the bin number, last flag and valid carried along.
module tb_mag_sq;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic in_valid, in_last, out_valid, out_last;
  logic [BIN_W-1:0] in_bin, out_bin;
  logic signed [FFT_W-1:0] re, im;
  logic [MAG_W-1:0] mag;
  int checks = 0, failures = 0;
  longint em [$];
  int eb [$], ev [$];
  always #5 clk = ~clk;
  mag_sq dut (.*);

  initial begin
    in_valid = 0; in_last = 0; in_bin = '0; re = '0; im = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 3) != 0);
      in_bin = BIN_W'($urandom); in_last = (in_bin == '1);
      re = FFT_W'($urandom); im = FFT_W'($urandom);
      if (n % 100 == 0) begin re = {1'b1, {(FFT_W-1){1'b0}}}; im = re; end
      em.push_back(longint'(re) * longint'(re) + longint'(im) * longint'(im));
      eb.push_back(int'(in_bin)); ev.push_back(int'(in_valid));
      @(posedge clk); #1;
      if (em.size() == 2) begin
        checks++;
        if (longint'(mag) != em[0] || int'(out_bin) != eb[0] || int'(out_valid) != ev[0] ||
            out_last != (eb[0] == 63)) begin
          failures++; $display("FAIL: mag %0d want %0d", mag, em[0]);
        end
        void'(em.pop_front()); void'(eb.pop_front()); void'(ev.pop_front());
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
