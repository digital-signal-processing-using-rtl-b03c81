// packetizer: turns full buffer banks into UDP payloads on two 10GbE lanes.
//
// A bank of the channel buffer holds TIMES spectra of NCHAN channels for all N_IN
// inputs. It is cut into NPKT = NCHAN/CPP packets of CPP channels each (22 packets
// of 109 channels with the defaults), packet p going to X-engine p. Packets are
// sent alternately from the lanes: lane 0 sends the even packets, lane 1 the odd
// ones, both at once, each through its own pkt_lane. One lane alone could not keep
// up: a group of 2 spectra lasts 16384 clocks and makes 22*874 = 19228 words. Each
// lane is busy 9614 of those clocks, 7.38 Gbit/s at 196.608 MHz.
// When both lanes have finished, the bank is handed back (`bank_release`) and the
// next full bank, in order, is started. `busy` is high while a bank is being sent.
// Timing: the first header word leaves two clocks after the bank becomes full.
// What follows the paper: 128-bit header, 109 channels and 6976 data bytes per packet,
// two lanes used alternately. This design's choices: header fields, payload order,
// spectra per packet and the lane-per-parity scheme.
module packetizer #(
  parameter int unsigned NPORT = leda_pkg::N_PORTS,
  parameter int unsigned N_IN  = leda_pkg::N_INPUTS,
  parameter int unsigned NCHAN = leda_pkg::NCHAN_SEL,
  parameter int unsigned TIMES = leda_pkg::TIMES_PER_PKT,
  parameter int unsigned CPP   = leda_pkg::CHANS_PER_PKT,
  parameter int unsigned BIN_W = $clog2(leda_pkg::NFFT),
  localparam int unsigned ROW_W  = 8 * N_IN,
  localparam int unsigned ADDR_W = $clog2(2 * TIMES * NCHAN)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [15:0]       feng_id,
  input  logic [BIN_W-1:0]  chan_start,
  input  logic [1:0]        bank_full,
  input  logic [63:0]       bank_seq [2],
  output logic [1:0]        bank_release,
  output logic [ADDR_W-1:0] rd_addr [NPORT],
  input  logic [ROW_W-1:0]  rd_data [NPORT],
  output logic [NPORT-1:0]  tx_valid,
  output logic [63:0]       tx_data [NPORT],
  output logic [NPORT-1:0]  tx_sop,
  output logic [NPORT-1:0]  tx_eop,
  input  logic [NPORT-1:0]  tx_ready,
  output logic              busy
);
  logic             rbank, go, started;
  logic [63:0]      seq;
  logic [NPORT-1:0] lane_idle;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbank        <= 1'b0;
      busy         <= 1'b0;
      go           <= 1'b0;
      started      <= 1'b0;
      seq          <= '0;
      bank_release <= '0;
    end else begin
      go           <= 1'b0;
      started      <= go;
      bank_release <= '0;
      if (!busy && bank_full[rbank] && !bank_release[rbank]) begin
        busy <= 1'b1;
        go   <= 1'b1;
        seq  <= bank_seq[rbank];
      end else if (busy && !go && !started && (&lane_idle)) begin
        busy                <= 1'b0;
        bank_release[rbank] <= 1'b1;
        rbank               <= ~rbank;
      end
    end
  end

  for (genvar l = 0; l < int'(NPORT); l++) begin : g_lane
    pkt_lane #(.LANE(l), .NPORT(NPORT), .N_IN(N_IN), .NCHAN(NCHAN), .TIMES(TIMES),
               .CPP(CPP), .BIN_W(BIN_W)) u_lane (
      .clk, .rst_n, .go, .bank(rbank), .seq, .feng_id, .chan_start,
      .rd_addr(rd_addr[l]), .rd_data(rd_data[l]),
      .tx_valid(tx_valid[l]), .tx_data(tx_data[l]), .tx_sop(tx_sop[l]),
      .tx_eop(tx_eop[l]), .tx_ready(tx_ready[l]), .idle(lane_idle[l])
    );
  end

  initial begin
    assert (NCHAN % CPP == 0) else $error("packetizer: NCHAN must be a multiple of CPP");
    assert (ROW_W % 64 == 0)  else $error("packetizer: N_IN must be a multiple of 8");
  end
endmodule
