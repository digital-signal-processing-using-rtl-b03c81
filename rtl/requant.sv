// requant: band-wide digital gain ("equalization") and 4+4 bit requantization.
//
// Each 18+18 bit PFB output is multiplied by one unsigned gain that is the same for
// every channel, scaled by 2^-GAIN_SHIFT, rounded to nearest (ties away from zero)
// and saturated to the symmetric 4-bit range -7..+7, separately for the real and
// imaginary parts. The result is packed as one byte {re[3:0], im[3:0]}.
// Requantizing to 4+4 bits cuts the data rate by 4.5x; the gain makes good use of
// the four bits. `clip` is high for a sample whose real or imaginary part saturated.
// Timing: one clock of latency; valid, sop and bin number travel with the data.
// What follows the paper: a single average gain across the band, 18+18 -> 4+4 bit.
// This design's choices: gain format, rounding and the symmetric clip level.
module requant #(
  parameter int unsigned IN_W       = leda_pkg::DATA_W,
  parameter int unsigned GAIN_W     = leda_pkg::GAIN_W,
  parameter int unsigned GAIN_SHIFT = leda_pkg::GAIN_SHIFT,
  parameter int unsigned BIN_W      = $clog2(leda_pkg::NFFT)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [GAIN_W-1:0]      gain,
  input  logic                   in_valid,
  input  logic                   in_sop,
  input  logic [BIN_W-1:0]       in_bin,
  input  logic signed [IN_W-1:0] in_re,
  input  logic signed [IN_W-1:0] in_im,
  output logic                   out_valid,
  output logic                   out_sop,
  output logic [BIN_W-1:0]       out_bin,
  output leda_pkg::q4_t          out_q,
  output logic                   clip
);
  import leda_pkg::*;
  localparam int unsigned PW = IN_W + GAIN_W + 2;
  localparam int          QMAX = (1 << (Q_W - 1)) - 1;  // 7

  function automatic logic signed [Q_W-1:0] quant(input logic signed [IN_W-1:0] x,
                                                  input logic [GAIN_W-1:0] g,
                                                  output logic c);
    logic signed [PW-1:0] p, mag, r;
    p   = PW'(x) * $signed({2'b00, g});
    mag = (p < 0) ? -p : p;
    r   = (mag + (PW'(1) <<< (GAIN_SHIFT - 1))) >>> GAIN_SHIFT;  // round |p|
    c   = r > PW'(QMAX);
    if (c) r = PW'(QMAX);
    if (p < 0) r = -r;
    return r[Q_W-1:0];
  endfunction

  logic c_re, c_im;
  q4_t  q;
  always_comb begin
    q.re = quant(in_re, gain, c_re);
    q.im = quant(in_im, gain, c_im);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_sop   <= 1'b0;
      out_bin   <= '0;
      out_q     <= '0;
      clip      <= 1'b0;
    end else begin
      out_valid <= in_valid;
      out_sop   <= in_valid && in_sop;
      clip      <= in_valid && (c_re || c_im);
      if (in_valid) begin
        out_bin <= in_bin;
        out_q   <= q;
      end
    end
  end
endmodule
