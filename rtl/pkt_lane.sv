// pkt_lane: one 10GbE output lane of the packetizer.
//
// On `go` the lane sends packets LANE, LANE+NPORT, LANE+2*NPORT, ... of the NPKT
// packets that one buffer bank makes. Each packet is HDR_WORDS 64-bit header words
// followed by CPP*TIMES*WPR payload words:
//   word 0: spectrum number of the first spectrum in the packet (time tag)
//   word 1: {feng_id, packet index, first channel number, channels per packet}
//   payload: for each channel c, for each spectrum t, the WPR words of that row of
//            the buffer (8 inputs of 4+4 bits per word, input 0 in the low byte).
// With the defaults a packet carries 109 channels in 872 words: 16 bytes of header
// and 6976 bytes of data.
// The output is a valid/ready stream with start (`tx_sop`) and end (`tx_eop`)
// flags, for a 10GbE MAC; while `tx_ready` is low the lane holds its word (stall).
// The buffer is read combinationally at `rd_addr`. `idle` is high when the lane has
// sent its share of the bank.
module pkt_lane #(
  parameter int unsigned LANE   = 0,
  parameter int unsigned NPORT  = leda_pkg::N_PORTS,
  parameter int unsigned N_IN   = leda_pkg::N_INPUTS,
  parameter int unsigned NCHAN  = leda_pkg::NCHAN_SEL,
  parameter int unsigned TIMES  = leda_pkg::TIMES_PER_PKT,
  parameter int unsigned CPP    = leda_pkg::CHANS_PER_PKT,
  parameter int unsigned BIN_W  = $clog2(leda_pkg::NFFT),
  localparam int unsigned NPKT   = NCHAN / CPP,
  localparam int unsigned ROW_W  = 8 * N_IN,
  localparam int unsigned WPR    = ROW_W / 64,
  localparam int unsigned ADDR_W = $clog2(2 * TIMES * NCHAN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              go,
  input  logic              bank,
  input  logic [63:0]       seq,
  input  logic [15:0]       feng_id,
  input  logic [BIN_W-1:0]  chan_start,
  output logic [ADDR_W-1:0] rd_addr,
  input  logic [ROW_W-1:0]  rd_data,
  output logic              tx_valid,
  output logic [63:0]       tx_data,
  output logic              tx_sop,
  output logic              tx_eop,
  input  logic              tx_ready,
  output logic              idle
);
  import leda_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_HDR0, S_HDR1, S_DATA} state_t;
  state_t      state;
  int unsigned pkt, ch, t, w;
  logic        adv, last_word;
  hdr1_t       h1;

  assign idle      = (state == S_IDLE);
  assign adv       = (state != S_IDLE) && (!tx_valid || tx_ready);
  assign last_word = (ch == CPP - 1) && (t == TIMES - 1) && (w == WPR - 1);
  assign rd_addr   = ADDR_W'((32'(bank) * TIMES + t) * NCHAN + pkt * CPP + ch);

  always_comb begin
    h1.feng_id    = feng_id;
    h1.pkt_idx    = 16'(pkt);
    h1.first_chan = 16'(32'(chan_start) + pkt * CPP);
    h1.n_chan     = 16'(CPP);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pkt      <= LANE;
      ch       <= 0;
      t        <= 0;
      w        <= 0;
      tx_valid <= 1'b0;
      tx_data  <= '0;
      tx_sop   <= 1'b0;
      tx_eop   <= 1'b0;
    end else begin
      if (tx_valid && tx_ready && !adv) tx_valid <= 1'b0;
      if (state == S_IDLE && go) begin
        state <= (LANE < NPKT) ? S_HDR0 : S_IDLE;
        pkt   <= LANE;
      end else if (adv) begin
        tx_valid <= 1'b1;
        tx_sop   <= (state == S_HDR0);
        tx_eop   <= 1'b0;
        unique case (state)
          S_HDR0: begin tx_data <= seq;         state <= S_HDR1; end
          S_HDR1: begin tx_data <= 64'(h1);     state <= S_DATA; ch <= 0; t <= 0; w <= 0; end
          S_DATA: begin
            tx_data <= rd_data[w*64 +: 64];
            if (last_word) begin
              tx_eop <= 1'b1;
              pkt    <= pkt + NPORT;
              state  <= (pkt + NPORT < NPKT) ? S_HDR0 : S_IDLE;
            end else if (w != WPR - 1) begin
              w <= w + 1;
            end else begin
              w <= 0;
              if (t != TIMES - 1) t <= t + 1;
              else begin t <= 0; ch <= ch + 1; end
            end
          end
          default: ;
        endcase
      end
    end
  end

  // stream rule: a word offered and not taken stays on the bus unchanged
  assert property (@(posedge clk) disable iff (!rst_n)
                   tx_valid && !tx_ready |=> tx_valid && $stable(tx_data) && $stable(tx_eop))
    else $error("pkt_lane %0d: word changed while stalled", LANE);
endmodule
