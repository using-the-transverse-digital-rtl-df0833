// ddc: digital down converter, one RF bucket per clock.
//
// The ADC samples at four times the RF (212 Msps at 52.8 MHz), so each bucket
// brings four samples s0..s3, delivered here in parallel on one RF clock. Mixing
// with the sampled carrier cos/sin at a quarter of the sampling rate reduces to
//   I = s0 - s2,   Q = s1 - s3.
// With the system phased so that Q is proportional to the beam position (as in
// the damper), Q is the bunch position used downstream. Latency: one clock; the
// bucket tag travels with the data.
// The paper names the DDC and the phasing of Q; the four-samples-per-bucket
// scheme and these sums are this design's choice.
module ddc
  import booster_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [ADC_W-1:0]  adc [SPB],
  input  tag_t                     tag_i,
  output logic signed [POS_W-1:0]  i_o,
  output logic signed [POS_W-1:0]  q_o,
  output tag_t                     tag_o
);
  always_ff @(posedge clk) begin
    if (rst) begin
      i_o   <= '0;
      q_o   <= '0;
      tag_o <= '0;
    end else begin
      i_o   <= POS_W'(adc[0]) - POS_W'(adc[2]);
      q_o   <= POS_W'(adc[1]) - POS_W'(adc[3]);
      tag_o <= tag_i;
    end
  end
endmodule
