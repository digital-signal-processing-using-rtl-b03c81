// fft_stage: one radix-2 decimation-in-frequency butterfly stage with a single
// delay-feedback path (SDF), the building block of fft_sdf.
//
// The stage works on blocks of 2L samples inside an N-point frame. During the first
// L samples of a block the inputs are written into an L-deep delay line while the
// differences of the previous block, already multiplied by their twiddles, are read
// out. During the second L samples each input b meets its partner a = x[k] from the
// delay line: a+b goes out at once and (a-b)*W_2L^k is written back, where
// W_2L^k = exp(-j*2*pi*k/(2L)), k = 0..L-1. Twiddles have TW_W bits (scale
// 2^(TW_W-1)-1) and are computed when the ROM is initialized.
//
// When `shift` is set both butterfly outputs are divided by 2 (arithmetic shift,
// the product is rounded); otherwise they are saturated to W bits. `ovf` flags
// a sample that saturated.
// Timing: latency L+1 clocks of valid input; `out_sop` marks point 0 of an output
// frame. Input is expected as whole frames with `in_sop` on point 0.
module fft_stage #(
  parameter int unsigned N    = 8192,  // frame length (FFT size)
  parameter int unsigned L    = 4096,  // delay length: half the butterfly span
  parameter int unsigned W    = leda_pkg::DATA_W,
  parameter int unsigned TW_W = leda_pkg::COEF_W
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                shift,
  input  logic                in_valid,
  input  logic                in_sop,
  input  logic signed [W-1:0] in_re,
  input  logic signed [W-1:0] in_im,
  output logic                out_valid,
  output logic                out_sop,
  output logic signed [W-1:0] out_re,
  output logic signed [W-1:0] out_im,
  output logic                ovf
);
  localparam int unsigned FW = $clog2(N);
  localparam int unsigned PW = W + TW_W + 2;  // product width

  logic signed [W-1:0]    d_re [L];
  logic signed [W-1:0]    d_im [L];
  logic signed [TW_W-1:0] tw_re [L];
  logic signed [TW_W-1:0] tw_im [L];

  initial begin
    for (int k = 0; k < int'(L); k++) begin
      tw_re[k] = TW_W'(int'( $cos(2.0 * 3.14159265358979323846 * real'(k) / real'(2 * L))
                            * real'((1 << (TW_W - 1)) - 1)));
      tw_im[k] = TW_W'(int'(-$sin(2.0 * 3.14159265358979323846 * real'(k) / real'(2 * L))
                            * real'((1 << (TW_W - 1)) - 1)));
    end
  end

  logic [FW-1:0] f_cnt, f_idx;
  int unsigned   pos, ptr;
  logic          second;
  logic          primed;

  assign f_idx  = in_sop ? '0 : f_cnt;
  assign pos    = int'(f_idx) % (2 * L);
  assign ptr    = pos % L;
  assign second = pos >= L;

  // saturate a wide value to W bits
  function automatic logic signed [W-1:0] sat(input logic signed [PW-1:0] val, output logic o);
    logic signed [PW-1:0] mx, mn;
    mx = PW'((1 << (W - 1)) - 1);
    mn = -PW'(1 << (W - 1));
    o  = (val > mx) || (val < mn);
    return (val > mx) ? mx[W-1:0] : (val < mn) ? mn[W-1:0] : val[W-1:0];
  endfunction

  logic signed [PW-1:0] a_re, a_im, b_re, b_im;
  logic signed [PW-1:0] s_re, s_im, df_re, df_im, p_re, p_im, w_re, w_im;
  logic signed [W-1:0]  sum_re, sum_im, fb_re, fb_im;
  logic                 o1, o2, o3, o4;

  always_comb begin
    a_re  = PW'(d_re[ptr]);
    a_im  = PW'(d_im[ptr]);
    b_re  = PW'(in_re);
    b_im  = PW'(in_im);
    w_re  = PW'(tw_re[ptr]);
    w_im  = PW'(tw_im[ptr]);
    s_re  = (a_re + b_re) >>> shift;
    s_im  = (a_im + b_im) >>> shift;
    df_re = a_re - b_re;
    df_im = a_im - b_im;
    p_re  = (df_re * w_re - df_im * w_im + (PW'(1) <<< (TW_W - 2 + 32'(shift)))) >>> (TW_W - 1 + 32'(shift));
    p_im  = (df_re * w_im + df_im * w_re + (PW'(1) <<< (TW_W - 2 + 32'(shift)))) >>> (TW_W - 1 + 32'(shift));
    sum_re = sat(s_re, o1);
    sum_im = sat(s_im, o2);
    fb_re  = sat(p_re, o3);
    fb_im  = sat(p_im, o4);
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      d_re[ptr] <= second ? fb_re : in_re;
      d_im[ptr] <= second ? fb_im : in_im;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_cnt     <= '0;
      primed    <= 1'b0;
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_re    <= '0;
      out_im    <= '0;
      ovf       <= 1'b0;
    end else begin
      out_valid <= in_valid && (primed || (in_sop ? 1'b0 : f_idx >= FW'(L)));
      out_sop   <= in_valid && (f_idx == FW'(L));
      ovf       <= in_valid && second && (o1 || o2 || o3 || o4);
      if (in_valid) begin
        f_cnt <= f_idx + 1'b1;
        if (f_idx == FW'(L)) primed <= 1'b1;
        out_re <= second ? sum_re : d_re[ptr];
        out_im <= second ? sum_im : d_im[ptr];
      end
    end
  end
endmodule
