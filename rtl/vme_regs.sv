// vme_regs: host register and memory map of the damper / tune monitor.
//
// The host (the VME crate CPU) sets up the per-plane configuration and reads
// back spectra and peaks through this map. The bus is the FPGA-side view of the
// VME slave: a one-clock request (bus_req, bus_we, 18-bit word address, 32-bit
// data) answered two clocks later by bus_ack with bus_rdata (reads), which
// leaves one clock for the synchronous RAMs. Map (word addresses):
//   0x00000  ID (read only, 0xB0057E12)      0x00001  bucket/turn now (RO)
//   plane P = 1 (horizontal) or 2 (vertical), base P<<16:
//   +0x0000..  0 tune-monitor enable, 1 selected bunch, 2 measurements in use,
//              3 tune window low bin, 4 high bin, 5 noise amplitude,
//              6..8 damping mask bunches 0-31, 32-63, 64-83,
//              9 ramp segments in use, 10 status {spectra<<8 | captures} (RO),
//              11 active ramp segment (RO)
//   +0x1000..  ramp table   {segment[3:0], field[2:0]}
//   +0x2000..  measurement table {entry[5:0], field[1:0]}
//   +0x3000..  window RAM   [6:0]
//   +0x4000..  peak RAMs    {meas[5:0], rank[1:0], half}   (RO)
//   +0x8000..  spectra      {meas[5:0], bin[5:0], half}    (RO)
// Where a value is wider than 32 bits, half 0 is bits 31:0 and half 1 the rest
// (for a peak, half 1 also carries the bin in bits 21:16).
// The paper has a VME slave interface in the FPGA through which all settings
// are made and spectra and peaks are read. The tables' write data and
// addresses are the bus's own bits passed through; only the write strobes are
// decoded, so those outputs follow the inputs directly. The backplane protocol
// (address strobes, DTACK) is outside this block, and the map is this design's
// own.
module vme_regs
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  // bus
  input  logic                      bus_req,
  input  logic                      bus_we,
  input  logic [17:0]               bus_addr,
  input  logic [31:0]               bus_wdata,
  output logic                      bus_ack,
  output logic [31:0]               bus_rdata,
  // per-plane configuration
  output logic                      tm_enable [2],
  output logic [BUNCH_W-1:0]        sel_bunch [2],
  output logic [MEAS_W:0]           n_meas    [2],
  output logic [BIN_W-1:0]          win_lo    [2],
  output logic [BIN_W-1:0]          win_hi    [2],
  output logic [NOISE_W-1:0]        noise_amp [2],
  output logic [HARMONIC-1:0]       damp_mask [2],
  output logic [SEG_W:0]            n_seg     [2],
  // table writes
  output logic [31:0]               wdata,
  output logic                      ramp_we   [2],
  output logic [SEG_W+2:0]          ramp_waddr,
  output logic                      meas_we   [2],
  output logic [MEAS_W+1:0]         meas_waddr,
  output logic                      win_we    [2],
  output logic [FFT_LOG-1:0]        win_waddr,
  // memory reads
  output logic [MEAS_W+BIN_W-1:0]   spec_raddr,
  input  logic [MAG_W-1:0]          spec_rdata [2],
  output logic [MEAS_W-1:0]         peak_raddr,
  output logic [1:0]                peak_rsel,
  input  peak_t                     peak_rdata [2],
  // status
  input  tag_t                      tag,
  input  logic [MEAS_W:0]           meas_count [2],
  input  logic [MEAS_W:0]           spec_count [2],
  input  logic [SEG_W-1:0]          seg        [2]
);
  localparam logic [31:0] ID = 32'hB0057E12;

  typedef enum logic [1:0] {R_REG, R_SPEC, R_PEAK, R_NONE} rsrc_t;

  logic [1:0] region;
  logic       pl;
  assign region = bus_addr[17:16];
  assign pl     = (region == 2'd2);

  assign wdata      = bus_wdata;
  assign ramp_waddr = bus_addr[SEG_W+2:0];
  assign meas_waddr = bus_addr[MEAS_W+1:0];
  assign win_waddr  = bus_addr[FFT_LOG-1:0];
  assign spec_raddr = bus_addr[MEAS_W+BIN_W:1];
  assign peak_raddr = bus_addr[MEAS_W+2:3];
  assign peak_rsel  = bus_addr[2:1];

  logic wr, is_plane;
  assign wr       = bus_req && bus_we;
  assign is_plane = (region == 2'd1) || (region == 2'd2);

  always_comb begin
    for (int p = 0; p < 2; p++) begin
      ramp_we[p] = wr && is_plane && (pl == p[0]) && !bus_addr[15] && bus_addr[14:12] == 3'd1;
      meas_we[p] = wr && is_plane && (pl == p[0]) && !bus_addr[15] && bus_addr[14:12] == 3'd2;
      win_we[p]  = wr && is_plane && (pl == p[0]) && !bus_addr[15] && bus_addr[14:12] == 3'd3;
    end
  end

  // configuration registers
  always_ff @(posedge clk) begin
    if (rst) begin
      for (int p = 0; p < 2; p++) begin
        tm_enable[p] <= 1'b0; sel_bunch[p] <= '0; n_meas[p] <= '0;
        win_lo[p] <= '0; win_hi[p] <= '1; noise_amp[p] <= '0;
        damp_mask[p] <= '0; n_seg[p] <= (SEG_W + 1)'(1);
      end
    end else if (wr && is_plane && bus_addr[15:12] == 4'd0) begin
      unique case (bus_addr[3:0])
        4'd0: tm_enable[pl] <= bus_wdata[0];
        4'd1: sel_bunch[pl] <= bus_wdata[BUNCH_W-1:0];
        4'd2: n_meas[pl]    <= bus_wdata[MEAS_W:0];
        4'd3: win_lo[pl]    <= bus_wdata[BIN_W-1:0];
        4'd4: win_hi[pl]    <= bus_wdata[BIN_W-1:0];
        4'd5: noise_amp[pl] <= bus_wdata[NOISE_W-1:0];
        4'd6: damp_mask[pl][31:0]  <= bus_wdata;
        4'd7: damp_mask[pl][63:32] <= bus_wdata;
        4'd8: damp_mask[pl][HARMONIC-1:64] <= bus_wdata[HARMONIC-65:0];
        4'd9: n_seg[pl]     <= bus_wdata[SEG_W:0];
        default: ;
      endcase
    end
  end

  // read pipeline: request -> (RAM read) -> answer
  rsrc_t      src_q;
  logic       half_q, pl_q, req_q, we_q;
  logic [31:0] reg_val;
  always_comb begin
    reg_val = '0;
    if (region == 2'd0) begin
      if (bus_addr[15:0] == 16'd0)      reg_val = ID;
      else if (bus_addr[15:0] == 16'd1) reg_val = {tag.turn, 9'd0, tag.bunch};
    end else if (is_plane && bus_addr[15:12] == 4'd0) begin
      unique case (bus_addr[3:0])
        4'd0:  reg_val = 32'(tm_enable[pl]);
        4'd1:  reg_val = 32'(sel_bunch[pl]);
        4'd2:  reg_val = 32'(n_meas[pl]);
        4'd3:  reg_val = 32'(win_lo[pl]);
        4'd4:  reg_val = 32'(win_hi[pl]);
        4'd5:  reg_val = 32'(noise_amp[pl]);
        4'd6:  reg_val = damp_mask[pl][31:0];
        4'd7:  reg_val = damp_mask[pl][63:32];
        4'd8:  reg_val = 32'(damp_mask[pl][HARMONIC-1:64]);
        4'd9:  reg_val = 32'(n_seg[pl]);
        4'd10: reg_val = {16'd0, 1'b0, spec_count[pl], 1'b0, meas_count[pl]};
        4'd11: reg_val = 32'(seg[pl]);
        default: ;
      endcase
    end
  end

  logic [31:0] reg_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      src_q <= R_NONE; half_q <= 1'b0; pl_q <= 1'b0; req_q <= 1'b0; we_q <= 1'b0;
      reg_d <= '0; bus_ack <= 1'b0; bus_rdata <= '0;
    end else begin
      req_q  <= bus_req;
      we_q   <= bus_we;
      pl_q   <= pl;
      half_q <= bus_addr[0];
      reg_d  <= reg_val;
      if (is_plane && bus_addr[15])                    src_q <= R_SPEC;
      else if (is_plane && bus_addr[15:12] == 4'd4)    src_q <= R_PEAK;
      else                                             src_q <= R_REG;

      bus_ack <= req_q;
      if (req_q && !we_q) begin
        unique case (src_q)
          R_SPEC:  bus_rdata <= half_q ? 32'(spec_rdata[pl_q][MAG_W-1:32])
                                       : spec_rdata[pl_q][31:0];
          R_PEAK:  bus_rdata <= half_q ? {10'd0, peak_rdata[pl_q].bin, 16'(peak_rdata[pl_q].mag[MAG_W-1:32])}
                                       : peak_rdata[pl_q].mag[31:0];
          default: bus_rdata <= reg_d;
        endcase
      end else begin
        bus_rdata <= '0;
      end
    end
  end
endmodule
