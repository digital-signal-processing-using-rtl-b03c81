// pfb_fir: polyphase FIR front end of the polyphase filterbank (PFB), one input.
//
// A PFB is an FIR filter followed by an FFT. The prototype low-pass filter has
// TAPS*N coefficients, a sinc of N-point main lobe weighted by a Hamming window,
// quantized to COEF_W bits (scale 2^(COEF_W-1)-1, peak 1.0). For frame m of N
// samples the filter produces, for every point k,
//
//   y_m[k] = sum_{t=0..TAPS-1} h[t*N + k] * x[(m-TAPS+1+t)*N + k]
//
// so the oldest frame meets tap 0 and the newest frame tap TAPS-1. TAPS-1 previous
// frames are kept in delay lines of N samples (block RAM on an FPGA), addressed by
// the point index k. The sum is rounded, shifted right by SHIFT and saturated to
// OUT_W bits: with the defaults an 8-bit input comes out with 9 fraction bits.
//
// Interface: one sample per `in_valid`; `in_sop` marks point k = 0 of a frame.
// Output: one sample per input sample, two clocks later, with `out_sop` on k = 0;
// `out_valid` stays low until TAPS frames have entered (the delay lines are full).
// Coefficients are computed when the ROM is initialized, from the formula above.
// What follows the paper: 4 taps, 8192 points, 18-bit coefficients, Hamming window.
// This design's choices: tap ordering, output scaling and rounding.
module pfb_fir #(
  parameter int unsigned N      = leda_pkg::NFFT,
  parameter int unsigned TAPS   = leda_pkg::PFB_TAPS,
  parameter int unsigned IN_W   = leda_pkg::ADC_W,
  parameter int unsigned COEF_W = leda_pkg::COEF_W,
  parameter int unsigned OUT_W  = leda_pkg::DATA_W,
  parameter int unsigned SHIFT  = leda_pkg::FIR_SHIFT
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic                    in_sop,
  input  logic signed [IN_W-1:0]  in_data,
  output logic                    out_valid,
  output logic                    out_sop,
  output logic signed [OUT_W-1:0] out_data
);
  localparam int unsigned AW    = $clog2(N);
  localparam int unsigned ACC_W = IN_W + COEF_W + $clog2(TAPS) + 1;
  localparam int unsigned FW    = $clog2(TAPS + 1);

  logic signed [COEF_W-1:0] coef [TAPS][N];
  logic signed [IN_W-1:0]   dly  [TAPS-1][N];

  initial begin
    for (int t = 0; t < int'(TAPS); t++)
      for (int k = 0; k < int'(N); k++)
        coef[t][k] = COEF_W'(int'(leda_pkg::pfb_coef_real(t * int'(N) + k, int'(N), int'(TAPS))
                                   * real'((1 << (COEF_W - 1)) - 1)));
  end

  logic [AW-1:0] k_cnt, k_idx;
  logic [FW-1:0] frames, frames_now;

  assign k_idx      = in_sop ? '0 : k_cnt;
  assign frames_now = (in_sop && frames < FW'(TAPS)) ? frames + 1'b1 : frames;

  // stage 1: read the delay lines, shift the new sample in
  logic                   s1_valid, s1_sop;
  logic [AW-1:0]          s1_k;
  logic signed [IN_W-1:0] s1_x [TAPS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k_cnt    <= '0;
      frames   <= '0;
      s1_valid <= 1'b0;
      s1_sop   <= 1'b0;
      s1_k     <= '0;
    end else begin
      s1_valid <= in_valid && (frames_now == FW'(TAPS));
      s1_sop   <= in_valid && in_sop && (frames_now == FW'(TAPS));
      if (in_valid) begin
        k_cnt  <= k_idx + 1'b1;
        frames <= frames_now;
        s1_k   <= k_idx;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      s1_x[TAPS-1] <= in_data;
      for (int j = 0; j < int'(TAPS) - 1; j++) begin
        s1_x[TAPS-2-j] <= dly[j][k_idx];
        dly[j][k_idx]  <= (j == 0) ? in_data : dly[j-1][k_idx];
      end
    end
  end

  // stage 2: multiply-accumulate, round, scale, saturate
  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] scaled;

  always_comb begin
    acc = '0;
    for (int t = 0; t < int'(TAPS); t++)
      acc += ACC_W'(s1_x[t]) * ACC_W'(coef[t][s1_k]);
    scaled = (acc + (ACC_W'(1) <<< (SHIFT - 1))) >>> SHIFT;
  end

  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (OUT_W - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_data  <= '0;
    end else begin
      out_valid <= s1_valid;
      out_sop   <= s1_sop;
      if (s1_valid)
        out_data <= (scaled > MAXV) ? MAXV[OUT_W-1:0] :
                    (scaled < MINV) ? MINV[OUT_W-1:0] : scaled[OUT_W-1:0];
    end
  end
endmodule
