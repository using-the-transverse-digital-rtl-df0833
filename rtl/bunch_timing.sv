// bunch_timing: RF bucket and turn counter of the Booster cycle.
//
// The whole board runs on a clock locked to the Booster RF, so one clock is one
// RF bucket and every HARMONIC (84) clocks are one turn, whatever the RF
// frequency is during the sweep. cycle_start (one-clock pulse at the start of
// a Booster cycle, 15 Hz) restarts the count: on the clock after it, bunch = 0
// and turn = 0. The turn count saturates at its maximum.
// The 84 buckets per turn are the Booster's harmonic number; deriving the bucket
// index by counting from the cycle start (instead of from a revolution marker)
// is this design's choice.
module bunch_timing
  import booster_pkg::*;
(
  input  logic clk,
  input  logic rst,
  input  logic cycle_start,
  output tag_t tag          // bucket and turn of the current clock
);
  always_ff @(posedge clk) begin
    if (rst || cycle_start) begin
      tag.bunch <= '0;
      tag.turn  <= '0;
    end else if (tag.bunch == BUNCH_W'(HARMONIC - 1)) begin
      tag.bunch <= '0;
      if (tag.turn != '1) tag.turn <= tag.turn + 1'b1;
    end else begin
      tag.bunch <= tag.bunch + 1'b1;
    end
  end
endmodule
