// tm_sequencer: state machine of the tune monitor ("SM").
//
// Holds the table of up to N_MEAS (64) measurements of one plane. Entry i says
// at which turn of the Booster cycle measurement i starts and how its bunch is
// excited (turns of noise, turns and gain of anti-damping). After cycle_start
// the sequencer waits, in IDLE, until the turn count has reached the start turn
// of the next entry and the FFT can take a new block; it then passes the
// position of the selected bunch, once per turn, to the FFT for 128 turns
// (CAPTURE), with the sample index 0..127 and the measurement number. While it
// captures, `running`, `start_turn` and `entry` tell the damper to excite the
// bunch; they hold for three clocks after the last sample, because the damper
// sees a bunch two clocks after the sequencer does and must still treat it on
// the last captured turn. It then moves to the next entry until n_meas entries
// have been done. Timing: the sample leaves one clock after its position
// arrives.
// Table write port: waddr = {entry, field}; fields 0 start_turn, 1 noise_turns,
// 2 ad_turns, 3 ad_gain.
// The 64 entries, the selected bunch, 128 turns per measurement and the three
// kinds of excitation follow the paper; the start-turn format, the wait for a
// free FFT and the table layout are this design's choices.
module tm_sequencer
  import booster_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     cycle_start,
  input  logic                     enable,
  input  logic [BUNCH_W-1:0]       sel_bunch,
  input  logic [MEAS_W:0]          n_meas,        // 0..64 entries in use
  input  logic signed [POS_W-1:0]  pos_i,
  input  tag_t                     tag_i,
  input  logic                     fft_ready,
  input  logic                     we,
  input  logic [MEAS_W+1:0]        waddr,
  input  logic [31:0]              wdata,
  output logic                     smp_valid,
  output logic signed [POS_W-1:0]  smp_data,
  output logic [FFT_LOG-1:0]       smp_idx,
  output logic [MEAS_W-1:0]        smp_meas,
  output logic                     running,
  output logic [TURN_W-1:0]        start_turn,
  output meas_entry_t              entry,
  output logic [MEAS_W:0]          meas_count      // measurements captured this cycle
);
  typedef enum logic [1:0] {S_IDLE, S_CAPTURE, S_DONE} state_t;

  meas_entry_t       tbl [N_MEAS];
  state_t            state;
  logic [MEAS_W:0]   cur;        // entry being run / waited for
  logic [FFT_LOG-1:0] idx;
  logic              hit;
  logic [MEAS_W-1:0] run_idx;    // entry of the capture in progress
  logic [1:0]        tail;       // clocks `running` outlasts the capture

  assign entry   = tbl[run_idx];
  assign running = (state == S_CAPTURE) || (tail != '0);
  assign hit     = enable && (tag_i.bunch == sel_bunch);
  assign meas_count = cur;

  always_ff @(posedge clk) begin
    if (we) begin
      case (waddr[1:0])
        2'd0: tbl[waddr[MEAS_W+1:2]].start_turn  <= wdata[TURN_W-1:0];
        2'd1: tbl[waddr[MEAS_W+1:2]].noise_turns <= wdata[7:0];
        2'd2: tbl[waddr[MEAS_W+1:2]].ad_turns    <= wdata[7:0];
        default: tbl[waddr[MEAS_W+1:2]].ad_gain  <= wdata[GAIN_W-1:0];
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst || cycle_start) begin
      state      <= S_IDLE;
      cur        <= '0;
      idx        <= '0;
      start_turn <= '0;
      smp_valid  <= 1'b0;
      smp_data   <= '0;
      smp_idx    <= '0;
      smp_meas   <= '0;
      run_idx    <= '0;
      tail       <= '0;
    end else begin
      smp_valid <= 1'b0;
      if (tail != '0) tail <= tail - 1'b1;
      unique case (state)
        S_IDLE: begin
          if (cur >= n_meas) begin
            state <= S_DONE;
          end else if (hit && fft_ready && tail == '0 &&
                       tag_i.turn >= tbl[cur[MEAS_W-1:0]].start_turn) begin
            state      <= S_CAPTURE;
            run_idx    <= cur[MEAS_W-1:0];
            start_turn <= tag_i.turn;
            smp_valid  <= 1'b1;
            smp_data   <= pos_i;
            smp_idx    <= '0;
            smp_meas   <= cur[MEAS_W-1:0];
            idx        <= FFT_LOG'(1);
          end
        end
        S_CAPTURE: begin
          if (hit) begin
            smp_valid <= 1'b1;
            smp_data  <= pos_i;
            smp_idx   <= idx;
            smp_meas  <= cur[MEAS_W-1:0];
            idx       <= idx + 1'b1;
            if (idx == '1) begin
              state <= S_IDLE;
              cur   <= cur + 1'b1;
              tail  <= 2'd3;
            end
          end
        end
        default: ;   // S_DONE: wait for the next cycle
      endcase
    end
  end
endmodule
