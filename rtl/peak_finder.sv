// peak_finder: the three highest peaks of a spectrum inside a tune window.
//
// The magnitude spectrum streams in, bin 0 first, one bin per valid. A bin is a
// peak when it is higher than the bin below it and not lower than the bin above
// it (bins outside 0..N_BINS-1 count as zero). Peaks whose bin lies inside
// [win_lo, win_hi] are kept in a list of three sorted by height; a new peak
// displaces those it strictly exceeds. Each peak of bin k is decided when bin
// k+1 arrives; the last bin is decided on the clock after out_last. Then `done`
// pulses for one clock with the list on `peaks` (peaks[0] highest; unused
// entries have height 0). Bin k corresponds to a fractional tune of k/128 or,
// folded, 1 - k/128.
// Keeping the three highest peaks within a selected tune window is the paper's;
// the local-maximum rule and tie handling are this design's choices.
module peak_finder
  import booster_pkg::*;
(
  input  logic               clk,
  input  logic               rst,
  input  logic               in_valid,
  input  logic [BIN_W-1:0]   in_bin,
  input  logic               in_last,
  input  logic [MAG_W-1:0]   in_mag,
  input  logic [BIN_W-1:0]   win_lo,
  input  logic [BIN_W-1:0]   win_hi,
  output logic               done,
  output peak_t              peaks [N_PEAKS]
);
  logic [MAG_W-1:0] m1, m2;      // bins k-1 and k-2
  logic [BIN_W-1:0] b1;          // bin number of m1
  logic             flush;
  peak_t            list [N_PEAKS];

  // candidate: bin b1 with neighbours (left, right)
  logic             cand_ok;
  logic [MAG_W-1:0] left, right;
  always_comb begin
    left  = (b1 == '0) ? '0 : m2;
    right = flush ? '0 : in_mag;
    cand_ok = ((in_valid && in_bin != '0) || flush) &&
              (m1 > left) && (m1 >= right) && (b1 >= win_lo) && (b1 <= win_hi);
  end

  // list after inserting the candidate
  peak_t ins [N_PEAKS];
  always_comb begin
    peak_t c;
    c = '{bin: b1, mag: m1};
    ins = list;
    if (cand_ok) begin
      if (c.mag > list[0].mag) begin
        ins[0] = c; ins[1] = list[0]; ins[2] = list[1];
      end else if (c.mag > list[1].mag) begin
        ins[1] = c; ins[2] = list[1];
      end else if (c.mag > list[2].mag) begin
        ins[2] = c;
      end
    end
  end

  // stream rule: bins arrive in order 0, 1, .., N_BINS-1, in_last with the last
  always_ff @(posedge clk)
    if (!rst && in_valid) begin
      assert (in_bin == '0 || in_bin == b1 + 1'b1) else $error("peak_finder: bin out of order");
      assert (in_last == (in_bin == BIN_W'(N_BINS - 1))) else $error("peak_finder: in_last misplaced");
    end

  always_ff @(posedge clk) begin
    if (rst) begin
      m1 <= '0; m2 <= '0; b1 <= '0; flush <= 1'b0; done <= 1'b0;
      for (int i = 0; i < N_PEAKS; i++) begin
        list[i]  <= '0;
        peaks[i] <= '0;
      end
    end else begin
      done  <= 1'b0;
      flush <= in_valid && in_last;
      if (in_valid) begin
        m2 <= m1;
        m1 <= in_mag;
        b1 <= in_bin;
        if (in_bin == '0) begin
          for (int i = 0; i < N_PEAKS; i++) list[i] <= '0;
        end else begin
          list <= ins;
        end
      end else if (flush) begin
        peaks <= ins;
        done  <= 1'b1;
        for (int i = 0; i < N_PEAKS; i++) list[i] <= '0;
      end
    end
  end
endmodule
