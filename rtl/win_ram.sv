// win_ram: window-function RAM of the tune monitor ("Win RAM").
//
// FFT_N (128) unsigned coefficients, written by the host, read once per
// captured turn with the sample index; 65535 stands for 1.0 (a rectangular
// window is all 65535). Synchronous read: rdata is valid one clock after raddr.
// The contents are not reset; the host loads the window before measuring.
// A window RAM between the state machine and the FFT is in the paper; the
// coefficient format is this design's choice.
module win_ram
  import booster_pkg::*;
(
  input  logic                   clk,
  input  logic                   we,
  input  logic [FFT_LOG-1:0]     waddr,
  input  logic [WIN_W-1:0]       wdata,
  input  logic [FFT_LOG-1:0]     raddr,
  output logic [WIN_W-1:0]       rdata
);
  logic [WIN_W-1:0] mem [FFT_N];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
