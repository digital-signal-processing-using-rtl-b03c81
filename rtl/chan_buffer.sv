// chan_buffer: channel selection and the double-buffered spectrum store that feeds
// the packetizer.
//
// All inputs of the F-engine run in lock step, so each clock brings one bin of one
// spectrum for every input: N_IN requantized bytes, with the bin number `in_bin`
// (the FFT delivers bins in bit-reversed order). Only bins chan_start ..
// chan_start+NCHAN-1 are kept; `chan_start` is a run-time register, so any block of
// NCHAN channels of the 0..NFFT/2-1 baseband can be chosen without rebuilding.
// Kept bins are written to row (bank*TIMES + t)*NCHAN + (bin - chan_start), where t
// is the spectrum's slot in a group of TIMES spectra; writing by bin number also
// undoes the bit-reversed order. A row holds the N_IN bytes of one channel and one
// spectrum, input 0 in the low byte.
//
// There are two banks. When a group of TIMES spectra is complete the bank is marked
// full (with the number of its first spectrum in `bank_seq`) and the writer moves
// to the other bank. The packetizer empties a full bank and returns it with
// `bank_release`. If the writer has to start a group on a bank that is still full,
// the packetizer is behind: that whole group is dropped, `drop_cnt` counts it and
// `drop` pulses. Spectra are counted from the first one after start-up.
// Read ports are combinational (distributed-RAM style), two of them, one per lane.
// What follows the paper: 2398 selected channels, start selectable at run time,
// packet data buffered in block RAM. This design's choices: the bank scheme, the
// group size TIMES and dropping whole groups on overflow.
module chan_buffer #(
  parameter int unsigned N_IN  = leda_pkg::N_INPUTS,
  parameter int unsigned NFFT  = leda_pkg::NFFT,
  parameter int unsigned NCHAN = leda_pkg::NCHAN_SEL,
  parameter int unsigned TIMES = leda_pkg::TIMES_PER_PKT,
  parameter int unsigned NRD   = leda_pkg::N_PORTS,
  localparam int unsigned BIN_W  = $clog2(NFFT),
  localparam int unsigned ROWS   = 2 * TIMES * NCHAN,
  localparam int unsigned ADDR_W = $clog2(ROWS),
  localparam int unsigned ROW_W  = 8 * N_IN
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [BIN_W-1:0]     chan_start,
  input  logic                 in_valid,
  input  logic                 in_sop,
  input  logic [BIN_W-1:0]     in_bin,
  input  leda_pkg::q4_t [N_IN-1:0] in_data,
  output logic [1:0]           bank_full,
  output logic [63:0]          bank_seq [2],
  input  logic [1:0]           bank_release,
  input  logic [ADDR_W-1:0]    rd_addr [NRD],
  output logic [ROW_W-1:0]     rd_data [NRD],
  output logic                 drop,
  output logic [31:0]          drop_cnt
);
  logic [ROW_W-1:0] mem [ROWS];

  logic [BIN_W-1:0]          f_cnt, f_idx;
  logic [$clog2(TIMES+1)-1:0] tslot;
  logic                      wbank;
  logic                      dropping, dropping_now;
  logic [63:0]               spec_cnt, group_seq;
  logic                      grp_start, frame_end, in_range, do_write;
  logic [BIN_W:0]            rel;
  logic [ADDR_W-1:0]         waddr;

  assign f_idx     = in_sop ? '0 : f_cnt;
  assign grp_start = in_valid && (f_idx == '0) && (tslot == '0);
  assign frame_end = in_valid && (f_idx == BIN_W'(NFFT - 1));
  assign dropping_now = grp_start ? bank_full[wbank] : dropping;
  assign rel       = {1'b0, in_bin} - {1'b0, chan_start};
  assign in_range  = (in_bin >= chan_start) && (rel < (BIN_W+1)'(NCHAN)) &&
                     (in_bin < BIN_W'(NFFT / 2));
  assign do_write  = in_valid && in_range && !dropping_now;
  assign waddr     = ADDR_W'((32'(wbank) * TIMES + 32'(tslot)) * NCHAN + 32'(rel));

  always_ff @(posedge clk)
    if (do_write) mem[waddr] <= in_data;

  for (genvar p = 0; p < int'(NRD); p++) begin : g_rd
    assign rd_data[p] = mem[rd_addr[p]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_cnt       <= '0;
      tslot       <= '0;
      wbank       <= 1'b0;
      dropping    <= 1'b0;
      spec_cnt    <= '0;
      group_seq   <= '0;
      bank_full   <= '0;
      bank_seq[0] <= '0;
      bank_seq[1] <= '0;
      drop        <= 1'b0;
      drop_cnt    <= '0;
    end else begin
      drop      <= 1'b0;
      bank_full <= bank_full & ~bank_release;
      if (in_valid) f_cnt <= f_idx + 1'b1;
      if (grp_start) begin
        dropping  <= bank_full[wbank];
        group_seq <= spec_cnt;
        if (bank_full[wbank]) begin
          drop     <= 1'b1;
          drop_cnt <= drop_cnt + 1'b1;
        end
      end
      if (frame_end) begin
        spec_cnt <= spec_cnt + 1'b1;
        if (tslot == ($clog2(TIMES+1))'(TIMES - 1)) begin
          tslot <= '0;
          if (!dropping_now) begin
            bank_full[wbank] <= 1'b1;
            bank_seq[wbank]  <= grp_start ? spec_cnt : group_seq;
            wbank            <= ~wbank;
          end
        end else begin
          tslot <= tslot + 1'b1;
        end
      end
    end
  end

  // the selected block must lie inside the first Nyquist zone
  assert property (@(posedge clk) disable iff (!rst_n)
                   in_valid |-> (32'(chan_start) + NCHAN <= NFFT / 2))
    else $error("chan_buffer: chan_start %0d leaves the 0..NFFT/2-1 band", chan_start);
endmodule
