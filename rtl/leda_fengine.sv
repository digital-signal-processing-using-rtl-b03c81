// leda_fengine: one F-engine of the LEDA 512-input FX correlator (one ROACH2 board).
//
// The correlator splits the work in two: F-engines turn each antenna signal into a
// spectrum (O(N) work, FPGAs) and X-engines cross-multiply and average every pair of
// inputs per channel (O(N^2) work, GPUs). Sixteen F-engines of 32 inputs serve the
// 512 inputs (256 dual-polarization antennas). This module is one F-engine:
//
//   ADC (32 x 8 bit, 196.608 MS/s) -> adc_delay (per-chip alignment)
//     -> pfb_fir -> fft_sdf   (4-tap 8192-point PFB)
//     -> requant (band-wide gain, 4+4 bit) -> chan_buffer (2398 channels from
//     chan_start, double-buffered) -> packetizer (22 packets of 109 channels
//     per 2 spectra, sent alternately on two 10GbE lanes)
//
// Each X-engine receives one packet index from every F-engine, so the corner turn
// (from "all channels of some inputs" to "some channels of all inputs") is done by
// the network switch; the packet index equals the destination X-engine.
// sync_ctrl starts processing at the PPS after `arm`; one sample per input enters
// every clock while running. Every input has its own FIR and FFT; all run in lock
// step, so input 0's control signals stand for all of them.
//
// Interface: `adc_data[i]` is input i's sample, taken every clock. Run-time
// registers: `adc_dly[c]` (delay of ADC chip c, inputs 4c..4c+3, 0..7 clocks), `feng_id`, `chan_start` (default use 1250, channels 1250..3647),
// `fft_shift` (one divide-by-2 bit per FFT stage), `gain` (x/2^16). Outputs: two
// valid/ready 64-bit streams for the 10GbE MACs, plus status counters: dropped
// groups (buffer overflow), clipped requantizer samples, FFT saturations, PPS
// edges seen since the start and packetizer activity.
// Latency from ADC sample to its spectrum at the buffer: 1 + adc_dly clocks of
// alignment, (TAPS-1) frames to fill the FIR, then 2 + N-1+log2(N) + 1 clocks.
module leda_fengine #(
  parameter int unsigned N_IN  = leda_pkg::N_INPUTS,
  parameter int unsigned NFFT  = leda_pkg::NFFT,
  parameter int unsigned TAPS  = leda_pkg::PFB_TAPS,
  parameter int unsigned NCHAN = leda_pkg::NCHAN_SEL,
  parameter int unsigned CPP   = leda_pkg::CHANS_PER_PKT,
  parameter int unsigned TIMES = leda_pkg::TIMES_PER_PKT,
  localparam int unsigned BIN_W = $clog2(NFFT),
  localparam int unsigned NPORT = leda_pkg::N_PORTS,
  localparam int unsigned NCHIP = N_IN / 4
) (
  input  logic                                  clk,
  input  logic                                  rst_n,
  input  logic signed [N_IN-1:0][leda_pkg::ADC_W-1:0] adc_data,
  input  logic [NCHIP-1:0][2:0]                 adc_dly,
  input  logic                                  pps,
  input  logic                                  arm,
  input  logic                                  stop,
  input  logic [15:0]                           feng_id,
  input  logic [BIN_W-1:0]                      chan_start,
  input  logic [BIN_W-1:0]                      fft_shift,
  input  logic [leda_pkg::GAIN_W-1:0]           gain,
  output logic [NPORT-1:0]                      tx_valid,
  output logic [63:0]                           tx_data [NPORT],
  output logic [NPORT-1:0]                      tx_sop,
  output logic [NPORT-1:0]                      tx_eop,
  input  logic [NPORT-1:0]                      tx_ready,
  output logic                                  armed,
  output logic                                  running,
  output logic [47:0]                           frame_cnt,
  output logic [31:0]                           pps_cnt,
  output logic                                  pkt_busy,
  output logic [31:0]                           drop_cnt,
  output logic [31:0]                           clip_cnt,
  output logic [31:0]                           fft_ovf_cnt
);
  import leda_pkg::*;
  localparam int unsigned ROW_W  = 8 * N_IN;
  localparam int unsigned ADDR_W = $clog2(2 * TIMES * NCHAN);

  logic        frame_sop;

  sync_ctrl #(.NFFT(NFFT)) u_sync (
    .clk, .rst_n, .pps, .arm, .stop, .armed, .run(running), .frame_sop,
    .frame_cnt, .pps_cnt
  );

  // ---- ADC chip alignment -------------------------------------------------
  logic signed [N_IN-1:0][ADC_W-1:0] adc_al;

  adc_delay #(.N_IN(N_IN), .W(ADC_W), .INPUTS_PER_CHIP(4), .DMAX(7)) u_dly (
    .clk, .adc_in(adc_data), .delay(adc_dly), .adc_out(adc_al)
  );

  // ---- per-input PFB and requantizer ---------------------------------------
  // All inputs run in lock step; only input 0's valid, sop and bin are used, the
  // copies in the other lanes are left unread.
  logic [N_IN-1:0]  q_valid, q_sop, q_clip, f_ovf;
  logic [BIN_W-1:0] q_bin [N_IN];
  q4_t [N_IN-1:0]   q_data;

  for (genvar i = 0; i < int'(N_IN); i++) begin : g_in
    logic                     fir_valid, fir_sop, fft_valid, fft_sop;
    logic signed [DATA_W-1:0] fir_data, fft_re, fft_im;
    logic [BIN_W-1:0]         fft_bin;

    pfb_fir #(.N(NFFT), .TAPS(TAPS)) u_fir (
      .clk, .rst_n, .in_valid(running), .in_sop(frame_sop), .in_data(adc_al[i]),
      .out_valid(fir_valid), .out_sop(fir_sop), .out_data(fir_data)
    );
    fft_sdf #(.N(NFFT)) u_fft (
      .clk, .rst_n, .shift(fft_shift), .in_valid(fir_valid), .in_sop(fir_sop),
      .in_re(fir_data), .in_im('0), .out_valid(fft_valid), .out_sop(fft_sop),
      .out_bin(fft_bin), .out_re(fft_re), .out_im(fft_im), .ovf(f_ovf[i])
    );
    requant #(.BIN_W(BIN_W)) u_rq (
      .clk, .rst_n, .gain, .in_valid(fft_valid), .in_sop(fft_sop), .in_bin(fft_bin),
      .in_re(fft_re), .in_im(fft_im), .out_valid(q_valid[i]), .out_sop(q_sop[i]),
      .out_bin(q_bin[i]), .out_q(q_data[i]), .clip(q_clip[i])
    );
  end

  // ---- channel selection and packetization ---------------------------------
  logic [1:0]        bank_full, bank_release;
  logic [63:0]       bank_seq [2];
  logic [ADDR_W-1:0] rd_addr [NPORT];
  logic [ROW_W-1:0]  rd_data [NPORT];

  chan_buffer #(.N_IN(N_IN), .NFFT(NFFT), .NCHAN(NCHAN), .TIMES(TIMES), .NRD(NPORT)) u_buf (
    .clk, .rst_n, .chan_start, .in_valid(q_valid[0]), .in_sop(q_sop[0]),
    .in_bin(q_bin[0]), .in_data(q_data), .bank_full, .bank_seq, .bank_release,
    .rd_addr, .rd_data, .drop(), .drop_cnt
  );

  packetizer #(.NPORT(NPORT), .N_IN(N_IN), .NCHAN(NCHAN), .TIMES(TIMES), .CPP(CPP),
               .BIN_W(BIN_W)) u_pkt (
    .clk, .rst_n, .feng_id, .chan_start, .bank_full, .bank_seq, .bank_release,
    .rd_addr, .rd_data, .tx_valid, .tx_data, .tx_sop, .tx_eop, .tx_ready, .busy(pkt_busy)
  );

  // ---- status counters -----------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      clip_cnt    <= '0;
      fft_ovf_cnt <= '0;
    end else begin
      if (|q_clip) clip_cnt    <= clip_cnt + 1'b1;
      if (|f_ovf)  fft_ovf_cnt <= fft_ovf_cnt + 1'b1;
    end
  end
endmodule
