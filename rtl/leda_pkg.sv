// leda_pkg: constants, types and helper functions shared by the LEDA F-engine.
//
// The numbers are those of one ROACH2 F-engine of the 512-input LEDA correlator:
// 32 ADC inputs (two 16-input 8-bit ADC boards) sampled at 196.608 MHz, a 4-tap
// 8192-point polyphase filterbank giving 4096 channels of 24.0 kHz, requantization
// to 4+4 bit complex, selection of 2398 channels starting at channel 1250, and UDP
// payloads of a 128-bit header plus 109 channels (6976 bytes) sent alternately on
// two 10GbE lanes. The number of spectra per packet (2) and the header layout are
// this design's own choices; see the comments below and in packetizer.sv.
package leda_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int unsigned N_INPUTS           = 32;    // 2x16 input ADCs per ROACH2
  localparam int unsigned ADC_W              = 8;     // 8-bit ADC
  localparam int unsigned NFFT               = 8192;  // PFB points
  localparam int unsigned PFB_TAPS           = 4;
  localparam int unsigned COEF_W             = 18;    // FIR and FFT coefficient width
  localparam int unsigned DATA_W             = 18;    // 18+18 bit complex spectra
  localparam int unsigned FIR_SHIFT          = 8;     // FIR output keeps 9 fraction bits
  localparam int unsigned Q_W                = 4;     // 4+4 bit requantized output
  localparam int unsigned NCHAN_SEL          = 2398;  // selected channels
  localparam int unsigned CHAN_START_DEFAULT = 1250;  // first selected channel
  localparam int unsigned CHANS_PER_PKT      = 109;   // channels per packet
  localparam int unsigned TIMES_PER_PKT      = 2;     // spectra per packet (assumed)
  localparam int unsigned N_PORTS            = 2;     // 10GbE lanes used
  localparam int unsigned WORD_W             = 64;    // 10GbE core word
  localparam int unsigned HDR_WORDS          = 2;     // 128-bit header
  localparam int unsigned GAIN_W             = 16;    // digital gain register
  localparam int unsigned GAIN_SHIFT         = 16;    // gain is applied as x*gain/2^16

  // One requantized sample: 4-bit two's complement real and imaginary parts.
  typedef struct packed {
    logic signed [Q_W-1:0] re;
    logic signed [Q_W-1:0] im;
  } q4_t;

  // Second header word. The first header word is the 64-bit spectrum counter.
  typedef struct packed {
    logic [15:0] feng_id;     // which F-engine (ROACH2) sent the packet
    logic [15:0] pkt_idx;     // sub-band index 0..21, i.e. destination X-engine
    logic [15:0] first_chan;  // absolute channel number of the first channel
    logic [15:0] n_chan;      // channels in the packet (109)
  } hdr1_t;

  // Bit reversal of the low `bits` bits of v.
  function automatic int unsigned bitrev(input int unsigned v, input int unsigned bits);
    int unsigned r;
    r = 0;
    for (int unsigned i = 0; i < bits; i++) r = (r << 1) | ((v >> i) & 1);
    return r;
  endfunction

  // PFB prototype filter: Hamming-windowed sinc over TAPS*N points, peak 1.0.
  function automatic real pfb_coef_real(input int n, input int n_pts, input int taps);
    real pi, x, s, w;
    pi = 3.14159265358979323846;
    x  = (real'(n) - real'(n_pts * taps) / 2.0) / real'(n_pts);
    s  = (x == 0.0) ? 1.0 : $sin(pi * x) / (pi * x);
    w  = 0.54 - 0.46 * $cos(2.0 * pi * real'(n) / real'(n_pts * taps - 1));
    return s * w;
  endfunction

endpackage
