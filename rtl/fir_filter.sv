// fir_filter: five-turn bunch-by-bunch FIR of the transverse damper.
//
// For each bunch the kick is a weighted sum of its position on this turn and
// on the turns one, two and four revolutions earlier:
//   y[n] = (g0*x[n] + g1*x[n-1] + g2*x[n-2] + g3*x[n-4]) >>> GAIN_FRAC
// (n counts turns, the bunch is the same). The coefficients are chosen by the
// user to remove the closed orbit and to give the pickup-to-kicker phase advance.
// The tap structure (gains 0..3, delays of 1, 2 and 4 turns, a sum) is the one
// of the damper's block diagram; word widths, the Q.14 gain format and the
// saturation are this design's own.
// Timing: x and its tag in at clock t; y and the same tag out at t + 2. The
// delay taps hold garbage during the first four turns after power-up.
module fir_filter
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [POS_W-1:0]   x_i,
  input  tag_t                      tag_i,
  input  logic signed [GAIN_W-1:0]  gain [4],   // taps at 0, 1, 2, 4 turns
  output logic signed [FILT_W-1:0]  y_o,
  output tag_t                      tag_o
);
  localparam int TURN = HARMONIC;
  localparam int PW   = POS_W + GAIN_W + 2;

  logic signed [POS_W-1:0] tap [4];
  tag_t tag_d;

  turn_delay #(.W(POS_W), .DEPTH(TURN))     u_d1 (.clk, .rst, .din(x_i), .dout(tap[1]));
  turn_delay #(.W(POS_W), .DEPTH(2 * TURN)) u_d2 (.clk, .rst, .din(x_i), .dout(tap[2]));
  turn_delay #(.W(POS_W), .DEPTH(4 * TURN)) u_d4 (.clk, .rst, .din(x_i), .dout(tap[3]));

  always_ff @(posedge clk) begin
    if (rst) begin
      tap[0] <= '0;
      tag_d  <= '0;
    end else begin
      tap[0] <= x_i;
      tag_d  <= tag_i;
    end
  end

  logic signed [PW-1:0] acc;
  always_comb begin
    acc = '0;
    for (int k = 0; k < 4; k++) acc += PW'(tap[k] * gain[k]);
  end

  logic signed [PW-1:0] acc_s;
  assign acc_s = acc >>> GAIN_FRAC;

  always_ff @(posedge clk) begin
    if (rst) begin
      y_o   <= '0;
      tag_o <= '0;
    end else begin
      if (acc_s > PW'((1 <<< (FILT_W - 1)) - 1))   y_o <= FILT_W'((1 <<< (FILT_W - 1)) - 1);
      else if (acc_s < -PW'(1 <<< (FILT_W - 1)))   y_o <= FILT_W'(-(1 <<< (FILT_W - 1)));
      else                                         y_o <= acc_s[FILT_W-1:0];
      tag_o <= tag_d;
    end
  end
endmodule
