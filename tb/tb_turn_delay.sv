// tb_turn_delay: a one-turn (84-word) delay line returns each word 85 clocks
// after it went in (DEPTH + 1 with the output register).
module tb_turn_delay;
  logic clk = 0, rst = 1;
  logic [12:0] din, dout;
  logic [12:0] hist [$];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  turn_delay #(.W(13), .DEPTH(84)) dut (.*);

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst = 0;
    for (int n = 0; n < 1000; n++) begin
      @(negedge clk);
      if (hist.size() == 86) begin
        // hist[0] entered at clock n-86 ... dout now = din of n-85 -> hist[1]
        checks++;
        if (dout != hist[1]) begin failures++; $display("FAIL n=%0d got %0h want %0h", n, dout, hist[1]); end
        void'(hist.pop_front());
      end
      din = 13'($urandom);
      hist.push_back(din);
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
