// fft_sdf: streaming N-point FFT of the PFB, one sample per clock.
//
// A pipeline of log2(N) radix-2 decimation-in-frequency stages (fft_stage) with
// delays N/2, N/4, ..., 1 computes X[b] = sum_n x[n] exp(-j*2*pi*n*b/N) scaled by
// 2^-(number of shifting stages). Data and twiddles are 18+18 bit complex. Bit s of
// `shift` divides the output of stage s by 2; with all bits set (the default use)
// the FFT divides by N and cannot overflow. `ovf` flags a saturated butterfly.
//
// The pipeline emits bins in bit-reversed order; `out_bin` gives the natural bin
// number of each output sample, so a consumer can write it to the right address.
// Input: whole frames of N samples, `in_sop` on sample 0. Output: `out_sop` on the
// first sample of each frame, N-1+log2(N) clocks after the matching `in_sop`.
// The real PFB output is fed with zero imaginary part; bins N/2..N-1 (the mirror
// image) are then discarded downstream. That is this design's simplification; the
// paper gives the size, the widths and the divide-by-2 per stage.
module fft_sdf #(
  parameter int unsigned N    = leda_pkg::NFFT,
  parameter int unsigned W    = leda_pkg::DATA_W,
  parameter int unsigned TW_W = leda_pkg::COEF_W,
  localparam int unsigned S   = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [S-1:0]        shift,
  input  logic                in_valid,
  input  logic                in_sop,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic                out_sop,
  output logic [S-1:0]        out_bin,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  output logic                ovf
);
  logic                v  [S+1];
  logic                sp [S+1];
  logic signed [W-1:0] re [S+1];
  logic signed [W-1:0] im [S+1];
  logic [S-1:0]        st_ovf;

  assign v[0]  = in_valid;
  assign sp[0] = in_sop;
  assign re[0] = in_re;
  assign im[0] = in_im;

  for (genvar s = 0; s < int'(S); s++) begin : g_stage
    fft_stage #(.N(N), .L(N >> (s + 1)), .W(W), .TW_W(TW_W)) u_stage (
      .clk, .rst_n, .shift(shift[s]),
      .in_valid(v[s]),   .in_sop(sp[s]),   .in_re(re[s]),   .in_im(im[s]),
      .out_valid(v[s+1]), .out_sop(sp[s+1]), .out_re(re[s+1]), .out_im(im[s+1]),
      .ovf(st_ovf[s])
    );
  end

  logic [S-1:0] o_cnt, o_idx;
  assign o_idx     = sp[S] ? '0 : o_cnt;
  assign out_valid = v[S];
  assign out_sop   = sp[S];
  assign out_re    = re[S];
  assign out_im    = im[S];
  assign ovf       = |st_ovf;

  always_comb
    for (int i = 0; i < int'(S); i++) out_bin[i] = o_idx[S-1-i];

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)        o_cnt <= '0;
    else if (v[S])     o_cnt <= o_idx + 1'b1;
endmodule
