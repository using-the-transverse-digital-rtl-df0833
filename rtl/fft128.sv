// fft128: burst-mode radix-2 FFT of FFT_N (128) real samples.
//
// Burst mode: the block first collects a whole frame, then transforms it, then
// streams the spectrum out, and only then accepts the next frame.
//   LOAD     in_valid/in_idx/in_data write sample in_idx at its bit-reversed
//            address (imaginary part 0); ready is high. Sample FFT_N-1 starts
//            the transform, so the samples may come at any rate (here one per
//            turn).
//   COMPUTE  in-place decimation-in-time: log2(N) stages of N/2 butterflies,
//            one butterfly per clock, X[a], X[b] <- X[a] +- W^k X[b] with
//            W = exp(-j 2 pi / N). 7 x 64 = 448 clocks.
//   OUTPUT   bins 0 .. N/2-1 (a real input's spectrum is symmetric), one per
//            clock, on out_re/out_im with out_bin and out_last.
// Twiddles are Q2.14 (16384 = 1.0, exact) values of cos and sin computed at
// elaboration; products are rounded to nearest. No scaling between stages: FFT_W = input width + log2(N) + 1 so
// that |Re|, |Im| <= N * max|x| cannot overflow.
// A 128-point burst-mode FFT giving real and imaginary parts is the paper's; the
// radix-2 in-place architecture, widths and output of half the bins are this
// design's choices.
module fft128
  import booster_pkg::*;
#(
  parameter int N    = FFT_N,
  parameter int IN_W = FFT_IN_W,
  parameter int OW   = IN_W + $clog2(N) + 1
) (
  input  logic                    clk,
  input  logic                    rst,
  input  logic                    in_valid,
  input  logic [$clog2(N)-1:0]    in_idx,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    ready,
  output logic                    out_valid,
  output logic [$clog2(N)-2:0]    out_bin,
  output logic                    out_last,
  output logic signed [OW-1:0]    out_re,
  output logic signed [OW-1:0]    out_im
);
  localparam int LG = $clog2(N);
  localparam int TW = 16;

  typedef logic signed [TW-1:0] tw_tab_t [N/2];
  function automatic tw_tab_t mk_tw(input bit use_sin);
    tw_tab_t t;
    for (int k = 0; k < N / 2; k++) begin
      real ang;
      ang  = 6.283185307179586 * k / N;
      t[k] = TW'($rtoi($floor((use_sin ? $sin(ang) : $cos(ang)) * 16384.0 + 0.5)));
    end
    return t;
  endfunction
  localparam tw_tab_t COS_T = mk_tw(1'b0);
  localparam tw_tab_t SIN_T = mk_tw(1'b1);

  function automatic logic [LG-1:0] bitrev(input logic [LG-1:0] v);
    for (int i = 0; i < LG; i++) bitrev[i] = v[LG-1-i];
  endfunction

  typedef enum logic [1:0] {S_LOAD, S_COMPUTE, S_OUTPUT} state_t;
  state_t state;

  logic signed [OW-1:0] xr [N];
  logic signed [OW-1:0] xi [N];
  logic [$clog2(LG)-1:0] stg;
  logic [LG-2:0]         bfy;
  logic [LG-2:0]         obin;

  // butterfly addresses and twiddle index for (stg, bfy)
  logic [LG-1:0]   a, b;
  logic [LG-2:0]   pos, grp, half_m;
  logic [LG-2:0]   k;
  always_comb begin
    half_m = (LG-1)'((1 << stg) - 1);
    pos    = bfy & half_m;
    grp    = bfy >> stg;
    a      = (LG'(grp) << (stg + 1)) | LG'(pos);
    b      = a | (LG'(1) << stg);
    k      = pos << (($clog2(LG))'(LG - 1) - stg);
  end

  localparam int PW = OW + TW;
  logic signed [PW-1:0]  pr, pi;
  logic signed [OW-1:0]  tr, ti;
  always_comb begin
    pr = PW'(xr[b]) * PW'(COS_T[k]) + PW'(xi[b]) * PW'(SIN_T[k]);
    pi = PW'(xi[b]) * PW'(COS_T[k]) - PW'(xr[b]) * PW'(SIN_T[k]);
    tr = OW'((pr + PW'(1 << (TW - 3))) >>> (TW - 2));
    ti = OW'((pi + PW'(1 << (TW - 3))) >>> (TW - 2));
  end

  assign ready = (state == S_LOAD);

  // handshake rule: samples are offered only while the block is loading
  always_ff @(posedge clk)
    if (!rst && in_valid) assert (ready) else $error("fft128: sample offered while busy");

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_LOAD;
      stg       <= '0;
      bfy       <= '0;
      obin      <= '0;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      out_bin   <= '0;
      out_re    <= '0;
      out_im    <= '0;
    end else begin
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      unique case (state)
        S_LOAD: begin
          if (in_valid) begin
            xr[bitrev(in_idx)] <= OW'(in_data);
            xi[bitrev(in_idx)] <= '0;
            if (in_idx == '1) begin
              state <= S_COMPUTE;
              stg   <= '0;
              bfy   <= '0;
            end
          end
        end
        S_COMPUTE: begin
          xr[a] <= xr[a] + tr;
          xi[a] <= xi[a] + ti;
          xr[b] <= xr[a] - tr;
          xi[b] <= xi[a] - ti;
          bfy   <= bfy + 1'b1;
          if (bfy == '1) begin
            if (stg == ($clog2(LG))'(LG - 1)) begin
              state <= S_OUTPUT;
              obin  <= '0;
            end else begin
              stg <= stg + 1'b1;
            end
          end
        end
        default: begin  // S_OUTPUT
          out_valid <= 1'b1;
          out_bin   <= obin;
          out_re    <= xr[LG'(obin)];
          out_im    <= xi[LG'(obin)];
          out_last  <= (obin == '1);
          obin      <= obin + 1'b1;
          if (obin == '1) state <= S_LOAD;
        end
      endcase
    end
  end
endmodule
