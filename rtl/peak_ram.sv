// peak_ram: the tune monitor's three "Peak RAMs".
//
// One RAM per peak rank (highest, second, third), each N_MEAS deep, holding the
// bin and height of that peak for every measurement. All three are written
// together when the peak finder finishes a spectrum; the host reads one rank
// at a time (rdata one clock after raddr/rsel). Three peak RAMs are in the
// paper; the entry format is this design's choice.
module peak_ram
  import booster_pkg::*;
(
  input  logic               clk,
  input  logic               we,
  input  logic [MEAS_W-1:0]  waddr,
  input  peak_t              wdata [N_PEAKS],
  input  logic [MEAS_W-1:0]  raddr,
  input  logic [1:0]         rsel,      // 0, 1, 2: rank of the peak
  output peak_t              rdata
);
  peak_t mem0 [N_MEAS];
  peak_t mem1 [N_MEAS];
  peak_t mem2 [N_MEAS];
  peak_t r0, r1, r2;
  logic [1:0] sel_q;

  always_ff @(posedge clk) begin
    if (we) begin
      mem0[waddr] <= wdata[0];
      mem1[waddr] <= wdata[1];
      mem2[waddr] <= wdata[2];
    end
    r0    <= mem0[raddr];
    r1    <= mem1[raddr];
    r2    <= mem2[raddr];
    sel_q <= rsel;
  end

  always_comb begin
    unique case (sel_q)
      2'd0:    rdata = r0;
      2'd1:    rdata = r1;
      default: rdata = r2;
    endcase
  end
endmodule
