// tb_ddc: random samples; I = s0 - s2 and Q = s1 - s3 one clock later, with the
// tag carried along.
module tb_ddc;
  import booster_pkg::*;
  logic clk = 0, rst = 1;
  logic signed [ADC_W-1:0] adc [SPB];
  tag_t tag_i, tag_o;
  logic signed [POS_W-1:0] i_o, q_o;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  ddc dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int ei, eq;
    tag_t et;
    foreach (adc[k]) adc[k] = '0;
    tag_i = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      foreach (adc[k]) adc[k] = ADC_W'($urandom);
      if (n % 50 == 0) begin adc[0] = 12'sh7FF; adc[2] = -12'sh800; end
      tag_i = tag_t'($urandom);
      ei = int'(adc[0]) - int'(adc[2]);
      eq = int'(adc[1]) - int'(adc[3]);
      et = tag_i;
      @(negedge clk);
      check(int'(i_o) == ei && int'(q_o) == eq && tag_o == et,
            $sformatf("I %0d/%0d Q %0d/%0d", i_o, ei, q_o, eq));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
