// spectrum_ram: the tune monitor's "Data RAM".
//
// Holds the magnitude spectrum (N_BINS = 64 bins of MAG_W bits) of each of the
// N_MEAS (64) measurements of a Booster cycle, addressed {measurement, bin}.
// One write port fed by the magnitude pipeline, one synchronous read port for
// the host (rdata one clock after raddr). Storing every spectrum for readout
// follows the paper; depth and word layout are this design's choices.
module spectrum_ram
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      we,
  input  logic [MEAS_W+BIN_W-1:0]   waddr,
  input  logic [MAG_W-1:0]          wdata,
  input  logic [MEAS_W+BIN_W-1:0]   raddr,
  output logic [MAG_W-1:0]          rdata
);
  logic [MAG_W-1:0] mem [N_MEAS * N_BINS];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
