// cycle_ramp: damper settings that change through the Booster cycle.
//
// A table of N_SEG segments, each holding a start turn, the four filter gains,
// the output gain and the output delay. At the cycle start segment 0 is active;
// on the first clock of every turn (bunch 0) the next segment takes over once
// the turn count has reached its start turn, up to n_seg segments. The active
// settings are registered on cfg: a segment switch shows two clocks after
// bunch 0 of the switching turn, and a host write to the active segment shows
// two clocks after the write, so settings can be changed live.
// Write port: we with waddr = {segment, field}; fields 0 start_turn, 1..4
// gain0..gain3, 5 out_gain, 6 delay, taken from the low bits of wdata. The
// table resets to zeros (damper off).
// That gains and delay change through the cycle follows the paper ("per-state"
// settings); the segment table, its size and the switching rule are this
// design's choices.
module cycle_ramp
  import booster_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 cycle_start,
  input  tag_t                 tag,
  input  logic [SEG_W:0]       n_seg,       // segments in use, 1..N_SEG
  input  logic                 we,
  input  logic [SEG_W+2:0]     waddr,
  input  logic [31:0]          wdata,
  output ramp_entry_t          cfg,
  output logic [SEG_W-1:0]     seg_o
);
  ramp_entry_t      tbl [N_SEG];
  logic [SEG_W-1:0] seg, nxt;
  assign nxt   = seg + 1'b1;
  assign seg_o = seg;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int s = 0; s < N_SEG; s++) tbl[s] <= '0;
    end else if (we) begin
      case (waddr[2:0])
        3'd0: tbl[waddr[SEG_W+2:3]].start_turn <= wdata[TURN_W-1:0];
        3'd1: tbl[waddr[SEG_W+2:3]].gain0      <= wdata[GAIN_W-1:0];
        3'd2: tbl[waddr[SEG_W+2:3]].gain1      <= wdata[GAIN_W-1:0];
        3'd3: tbl[waddr[SEG_W+2:3]].gain2      <= wdata[GAIN_W-1:0];
        3'd4: tbl[waddr[SEG_W+2:3]].gain3      <= wdata[GAIN_W-1:0];
        3'd5: tbl[waddr[SEG_W+2:3]].out_gain   <= wdata[GAIN_W-1:0];
        3'd6: tbl[waddr[SEG_W+2:3]].delay      <= wdata[DLY_W-1:0];
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst || cycle_start) begin
      seg <= '0;
    end else if (tag.bunch == '0 && seg != SEG_W'(N_SEG - 1) &&
                 (SEG_W + 1)'(nxt) < n_seg && tag.turn >= tbl[nxt].start_turn) begin
      seg <= nxt;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) cfg <= '0;
    else     cfg <= tbl[seg];
  end
endmodule
