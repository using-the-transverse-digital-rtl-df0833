// kick_delay: programmable output delay and DAC word formation.
//
// The kick of every bucket is written into a circular memory of 2^DLY_W words
// and read back `delay` clocks (RF buckets) later, so the kick reaches the
// kicker when its bunch does; the delay is reprogrammed through the cycle as
// the RF sweeps. The result is saturated from KICK_W to the 14-bit DAC word.
// Latency from kick_i to dac_o: delay + 1 clocks; the tag is delayed with it.
// The programmable delay before the DAC follows the paper; its depth (0..255
// buckets, about three turns) is this design's choice.
module kick_delay
  import booster_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst,
  input  logic signed [KICK_W-1:0]  kick_i,
  input  tag_t                      tag_i,
  input  logic [DLY_W-1:0]          delay,
  output logic signed [DAC_W-1:0]   dac_o,
  output tag_t                      tag_o
);
  typedef struct packed {
    tag_t                     tag;
    logic signed [KICK_W-1:0] kick;
  } slot_t;

  localparam int DEPTH = 1 << DLY_W;
  slot_t             mem [DEPTH];
  logic [DLY_W-1:0]  wp;
  slot_t             rd;
  logic [DLY_W-1:0]  ra;

  assign ra = wp - delay;
  assign rd = (delay == '0) ? slot_t'{tag: tag_i, kick: kick_i} : mem[ra];

  function automatic logic signed [DAC_W-1:0] sat_dac(input logic signed [KICK_W-1:0] v);
    if (v > KICK_W'((1 <<< (DAC_W - 1)) - 1))  return DAC_W'((1 <<< (DAC_W - 1)) - 1);
    else if (v < -KICK_W'(1 <<< (DAC_W - 1)))  return DAC_W'(-(1 <<< (DAC_W - 1)));
    else                                       return v[DAC_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    mem[wp] <= slot_t'{tag: tag_i, kick: kick_i};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wp    <= '0;
      dac_o <= '0;
      tag_o <= '0;
    end else begin
      wp    <= wp + 1'b1;
      dac_o <= sat_dac(rd.kick);
      tag_o <= rd.tag;
    end
  end
endmodule
