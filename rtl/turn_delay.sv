// turn_delay: fixed delay line built on a memory of DEPTH words.
//
// dout on the clock after din is presented at time t equals the din of time
// t - DEPTH, i.e. the latency is DEPTH + 1 clocks. The damper uses DEPTH =
// 84 * k so that, next to a one-clock register on the undelayed path, it yields
// the same bunch k turns earlier. The memory is not reset: its first DEPTH
// outputs are whatever it held, which the damper's first turns ignore.
module turn_delay #(
  parameter int W     = 13,
  parameter int DEPTH = 84
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  localparam int AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] ptr;

  always_ff @(posedge clk) begin
    if (rst) ptr <= '0;
    else     ptr <= (ptr == AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
  end

  always_ff @(posedge clk) begin
    dout     <= mem[ptr];
    mem[ptr] <= din;
  end
endmodule
