// tb_bunch_timing: bucket and turn counting against a cycle count, and restart
// by cycle_start in the middle of a turn.
module tb_bunch_timing;
  import booster_pkg::*;
  logic clk = 0, rst = 1, cycle_start = 0;
  tag_t tag;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bunch_timing dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int n;
    repeat (2) @(posedge clk);
    rst = 0;
    @(negedge clk); cycle_start = 1; @(negedge clk); cycle_start = 0;
    // clock n after the cycle start: bucket n % 84, turn n / 84
    for (n = 0; n < 84 * 7 + 30; n++) begin
      check(tag.bunch == 7'(n % HARMONIC) && tag.turn == 16'(n / HARMONIC),
            $sformatf("n=%0d bunch %0d turn %0d", n, tag.bunch, tag.turn));
      @(negedge clk);
    end
    cycle_start = 1; @(negedge clk); cycle_start = 0;
    for (n = 0; n < 200; n++) begin
      check(tag.bunch == 7'(n % HARMONIC) && tag.turn == 16'(n / HARMONIC),
            $sformatf("restart n=%0d bunch %0d turn %0d", n, tag.bunch, tag.turn));
      @(negedge clk);
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
