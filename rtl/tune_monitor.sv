// tune_monitor: tune measurement of one transverse plane.
//
// Works beside the damper on the same RF clock:
//   tm_sequencer picks the selected bunch's position for 128 turns per
//   measurement -> the sample is multiplied by the window coefficient of its
//   turn (win_ram) -> fft128 (burst mode) -> mag_sq -> the spectrum is written
//   to spectrum_ram and scanned by peak_finder, whose three highest peaks in
//   the tune window go to peak_ram, both indexed by the measurement number.
// While a measurement captures, running/start_turn/entry tell the damper how to
// excite the bunch. Timing: a sample reaches the FFT two clocks after the
// sequencer emits it; the peaks of a measurement are in peak_ram 519 clocks
// (about six turns) after its 128th sample was emitted, the spectrum one clock
// earlier. The next capture waits for the FFT, so at most one spectrum is in
// flight.
// The chain (state machine, window RAM, multiplier, FFT, A^2+B^2, peak finder,
// peak RAMs, data RAM) follows the paper's block diagram of the tune
// measurement; the interfaces between the blocks are this design's.
module tune_monitor
  import booster_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cycle_start,
  // configuration
  input  logic                     enable,
  input  logic [BUNCH_W-1:0]       sel_bunch,
  input  logic [MEAS_W:0]          n_meas,
  input  logic [BIN_W-1:0]         win_lo,
  input  logic [BIN_W-1:0]         win_hi,
  // bunch positions from the damper's DDC
  input  logic signed [POS_W-1:0]  pos_i,
  input  tag_t                     tag_i,
  // host writes
  input  logic                     meas_we,
  input  logic [MEAS_W+1:0]        meas_waddr,
  input  logic                     win_we,
  input  logic [FFT_LOG-1:0]       win_waddr,
  input  logic [31:0]              wdata,
  // host reads
  input  logic [MEAS_W+BIN_W-1:0]  spec_raddr,
  output logic [MAG_W-1:0]         spec_rdata,
  input  logic [MEAS_W-1:0]        peak_raddr,
  input  logic [1:0]               peak_rsel,
  output peak_t                    peak_rdata,
  // excitation control to the damper
  output logic                     running,
  output logic [TURN_W-1:0]        start_turn,
  output meas_entry_t              entry,
  // status
  output logic [MEAS_W:0]          meas_count,   // captures finished this cycle
  output logic [MEAS_W:0]          spec_count,   // spectra stored this cycle
  output logic                     peak_done
);
  // ---- sequencer ----
  logic                     fft_ready;
  logic                     s_valid;
  logic signed [POS_W-1:0]  s_data;
  logic [FFT_LOG-1:0]       s_idx;
  logic [MEAS_W-1:0]        s_meas;

  tm_sequencer u_sm (
    .clk, .rst, .cycle_start, .enable, .sel_bunch, .n_meas, .pos_i, .tag_i,
    .fft_ready, .we(meas_we), .waddr(meas_waddr), .wdata,
    .smp_valid(s_valid), .smp_data(s_data), .smp_idx(s_idx), .smp_meas(s_meas),
    .running, .start_turn, .entry, .meas_count);

  // ---- window ----
  logic [WIN_W-1:0] win;
  win_ram u_win (.clk, .we(win_we), .waddr(win_waddr), .wdata(wdata[WIN_W-1:0]),
                 .raddr(s_idx), .rdata(win));

  logic                     w_valid, f_valid;
  logic signed [POS_W-1:0]  w_data;
  logic [FFT_LOG-1:0]       w_idx, f_idx;
  logic [MEAS_W-1:0]        w_meas, f_meas, spec_meas;
  logic signed [FFT_IN_W-1:0] f_data;
  logic signed [POS_W+WIN_W:0] prod;

  assign prod = w_data * $signed({1'b0, win});

  always_ff @(posedge clk) begin
    if (rst) begin
      w_valid <= 1'b0; w_data <= '0; w_idx <= '0; w_meas <= '0;
      f_valid <= 1'b0; f_data <= '0; f_idx <= '0; f_meas <= '0;
      spec_meas <= '0;
    end else begin
      w_valid <= s_valid; w_data <= s_data; w_idx <= s_idx; w_meas <= s_meas;
      f_valid <= w_valid; f_idx <= w_idx; f_meas <= w_meas;
      f_data  <= FFT_IN_W'(prod >>> WIN_W);
      if (f_valid && f_idx == '1 && fft_ready) spec_meas <= f_meas;
    end
  end

  // ---- FFT and magnitude ----
  logic                    x_valid, x_last;
  logic [BIN_W-1:0]        x_bin;
  logic signed [FFT_W-1:0] x_re, x_im;

  fft128 u_fft (.clk, .rst, .in_valid(f_valid), .in_idx(f_idx), .in_data(f_data),
                .ready(fft_ready), .out_valid(x_valid), .out_bin(x_bin),
                .out_last(x_last), .out_re(x_re), .out_im(x_im));

  logic             m_valid, m_last;
  logic [BIN_W-1:0] m_bin;
  logic [MAG_W-1:0] m_mag;
  mag_sq u_mag (.clk, .rst, .in_valid(x_valid), .in_bin(x_bin), .in_last(x_last),
                .re(x_re), .im(x_im), .out_valid(m_valid), .out_bin(m_bin),
                .out_last(m_last), .mag(m_mag));

  // ---- storage ----
  spectrum_ram u_data (.clk, .we(m_valid), .waddr({spec_meas, m_bin}), .wdata(m_mag),
                       .raddr(spec_raddr), .rdata(spec_rdata));

  peak_t pk [N_PEAKS];
  peak_finder u_pf (.clk, .rst, .in_valid(m_valid), .in_bin(m_bin), .in_last(m_last),
                    .in_mag(m_mag), .win_lo, .win_hi, .done(peak_done), .peaks(pk));

  peak_ram u_pram (.clk, .we(peak_done), .waddr(spec_meas), .wdata(pk),
                   .raddr(peak_raddr), .rsel(peak_rsel), .rdata(peak_rdata));

  always_ff @(posedge clk) begin
    if (rst || cycle_start) spec_count <= '0;
    else if (peak_done)     spec_count <= spec_count + 1'b1;
  end
endmodule
