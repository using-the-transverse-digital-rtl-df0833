// mag_sq: squared magnitude of a spectral bin, |X|^2 = Re^2 + Im^2.
//
// Two pipeline stages (squares, then sum); valid, bin number and last flag
// travel alongside. No square root is taken: peak search and display only
// need an ordering and a relative scale. The A^2+B^2 block is the paper's;
// the pipelining is this design's choice.
module mag_sq
  import booster_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [BIN_W-1:0]        in_bin,
  input  logic                    in_last,
  input  logic signed [FFT_W-1:0] re,
  input  logic signed [FFT_W-1:0] im,
  output logic                    out_valid,
  output logic [BIN_W-1:0]        out_bin,
  output logic                    out_last,
  output logic [MAG_W-1:0]        mag
);
  logic [MAG_W-1:0] re2, im2;
  logic             v1, l1;
  logic [BIN_W-1:0] b1;

  always_ff @(posedge clk) begin
    if (rst) begin
      v1 <= 1'b0; l1 <= 1'b0; b1 <= '0; re2 <= '0; im2 <= '0;
      out_valid <= 1'b0; out_last <= 1'b0; out_bin <= '0; mag <= '0;
    end else begin
      re2       <= MAG_W'(re * re);
      im2       <= MAG_W'(im * im);
      v1        <= in_valid;
      l1        <= in_last;
      b1        <= in_bin;
      mag       <= re2 + im2;
      out_valid <= v1;
      out_last  <= l1;
      out_bin   <= b1;
    end
  end
endmodule
