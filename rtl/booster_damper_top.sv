// booster_damper_top: FPGA logic of the Booster transverse digital damper with
// the real-time tune monitor, horizontal (plane 0) and vertical (plane 1).
//
// Per plane: a damper_channel turns the ADC samples of every RF bucket into a
// position (DDC), a five-turn FIR kick, output gain and delay, and a 14-bit DAC
// word; its gains and delay follow the Booster cycle through a cycle_ramp; a
// tune_monitor takes the selected bunch's position for 128 turns per
// measurement, windows and Fourier-transforms it, and stores the spectrum and
// its three highest peaks, while telling the damper channel to excite that
// bunch (noise and/or anti-damping). bunch_timing numbers the buckets (84 per
// turn) and turns from cycle_start. vme_regs is the host's register map.
// Clock: the RF-locked bucket clock (37-52.8 MHz through the ramp); each clock
// carries the four ADC samples of one bucket per plane. ADC -> DAC latency:
// 5 + delay clocks. Bus: see vme_regs.
// The converters, RF clock generation, analog front end and host are outside;
// their signals are this module's ports.
// From the paper: two independent planes, the damper chain and the tune
// monitor chain, 84 buckets, 128-turn FFT, 64 measurements, three peaks.
// This design's own: the bus, the register map and the status outputs. The
// channel's DAC tag (which bucket a DAC word is for) is a debug aid of the
// channel testbench and is left open here: the DAC needs only the word.
module booster_damper_top
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic                      cycle_start,
  input  logic signed [ADC_W-1:0]   adc [2][SPB],     // [plane][sample in bucket]
  output logic signed [DAC_W-1:0]   dac [2],
  // host bus
  input  logic                      bus_req,
  input  logic                      bus_we,
  input  logic [17:0]               bus_addr,
  input  logic [31:0]               bus_wdata,
  output logic                      bus_ack,
  output logic [31:0]               bus_rdata,
  // monitor outputs
  output logic                      tm_running [2],   // measurement capturing
  output logic                      exc_ad     [2],   // anti-damping kick issued
  output logic                      exc_noise  [2],   // noise kick issued
  output logic                      peak_done  [2]    // peaks of a spectrum stored
);
  tag_t tag;
  bunch_timing u_timing (.clk, .rst, .cycle_start, .tag);

  logic                     tm_enable [2];
  logic [BUNCH_W-1:0]       sel_bunch [2];
  logic [MEAS_W:0]          n_meas    [2];
  logic [BIN_W-1:0]         win_lo    [2];
  logic [BIN_W-1:0]         win_hi    [2];
  logic [NOISE_W-1:0]       noise_amp [2];
  logic [HARMONIC-1:0]      damp_mask [2];
  logic [SEG_W:0]           n_seg     [2];
  logic [31:0]              wdata;
  logic                     ramp_we   [2];
  logic [SEG_W+2:0]         ramp_waddr;
  logic                     meas_we   [2];
  logic [MEAS_W+1:0]        meas_waddr;
  logic                     win_we    [2];
  logic [FFT_LOG-1:0]       win_waddr;
  logic [MEAS_W+BIN_W-1:0]  spec_raddr;
  logic [MAG_W-1:0]         spec_rdata [2];
  logic [MEAS_W-1:0]        peak_raddr;
  logic [1:0]               peak_rsel;
  peak_t                    peak_rdata [2];
  logic [MEAS_W:0]          meas_count [2];
  logic [MEAS_W:0]          spec_count [2];
  logic [SEG_W-1:0]         seg        [2];

  vme_regs u_regs (
    .clk, .rst, .bus_req, .bus_we, .bus_addr, .bus_wdata, .bus_ack, .bus_rdata,
    .tm_enable, .sel_bunch, .n_meas, .win_lo, .win_hi, .noise_amp, .damp_mask, .n_seg,
    .wdata, .ramp_we, .ramp_waddr, .meas_we, .meas_waddr, .win_we, .win_waddr,
    .spec_raddr, .spec_rdata, .peak_raddr, .peak_rsel, .peak_rdata,
    .tag, .meas_count, .spec_count, .seg);

  for (genvar p = 0; p < 2; p++) begin : g_plane
    ramp_entry_t              ramp;
    logic signed [POS_W-1:0]  pos;
    tag_t                     pos_tag;
    logic [TURN_W-1:0]        start_turn;
    meas_entry_t              entry;

    cycle_ramp u_ramp (.clk, .rst, .cycle_start, .tag, .n_seg(n_seg[p]),
                       .we(ramp_we[p]), .waddr(ramp_waddr), .wdata, .cfg(ramp), .seg_o(seg[p]));

    damper_channel u_damp (
      .clk, .rst, .adc(adc[p]), .tag_i(tag), .ramp, .damp_mask(damp_mask[p]),
      .sel_bunch(sel_bunch[p]), .tm_running(tm_running[p]), .tm_start_turn(start_turn),
      .tm_entry(entry), .noise_amp(noise_amp[p]), .pos_o(pos), .pos_tag_o(pos_tag),
      .dac_o(dac[p]), .dac_tag_o(), .ad_on_o(exc_ad[p]), .noise_on_o(exc_noise[p]));

    tune_monitor u_tm (
      .clk, .rst, .cycle_start, .enable(tm_enable[p]), .sel_bunch(sel_bunch[p]),
      .n_meas(n_meas[p]), .win_lo(win_lo[p]), .win_hi(win_hi[p]),
      .pos_i(pos), .tag_i(pos_tag),
      .meas_we(meas_we[p]), .meas_waddr, .win_we(win_we[p]), .win_waddr, .wdata,
      .spec_raddr, .spec_rdata(spec_rdata[p]), .peak_raddr, .peak_rsel,
      .peak_rdata(peak_rdata[p]), .running(tm_running[p]), .start_turn, .entry,
      .meas_count(meas_count[p]), .spec_count(spec_count[p]), .peak_done(peak_done[p]));
  end
endmodule
