// tb_packetizer: self-checking test of the packet format and the two lanes, at
// 16 inputs (2 words per row), 8 channels, 2 channels per packet (4 packets) and
// 2 spectra per packet. The buffer is modelled by a function of the row address.
// Checked for every word: header fields, payload order (channel, spectrum, word),
// sop/eop, even packets on lane 0 and odd on lane 1, bank release and bank order.
// The first bank is sent with the lanes always ready, and must take exactly one
// clock per word; the second with random stalls on both lanes.
module tb_packetizer;
  localparam int N_IN = 16, NCHAN = 8, CPP = 2, TIMES = 2, BW = 13, NP = 2;
  localparam int WPR = N_IN * 8 / 64, NPKT = NCHAN / CPP;
  localparam int PKT_WORDS = 2 + CPP * TIMES * WPR;
  localparam int AW = $clog2(2 * TIMES * NCHAN);
  logic clk = 0, rst_n = 0;
  logic [15:0] feng_id = 16'h00a5;
  logic [BW-1:0] chan_start = 1250;
  logic [1:0] bank_full = 0, bank_release;
  logic [63:0] bank_seq [2];
  logic [AW-1:0] rd_addr [NP];
  logic [8*N_IN-1:0] rd_data [NP];
  logic [NP-1:0] tx_valid, tx_sop, tx_eop, tx_ready = '1;
  logic [63:0] tx_data [NP];
  logic busy;
  int checks = 0, failures = 0;

  packetizer #(.NPORT(NP), .N_IN(N_IN), .NCHAN(NCHAN), .TIMES(TIMES), .CPP(CPP), .BIN_W(BW))
    dut (.*);
  always #5 clk = ~clk;

  function automatic logic [8*N_IN-1:0] row(int a);
    logic [8*N_IN-1:0] r;
    for (int i = 0; i < N_IN; i++) r[8*i +: 8] = 8'((a * 13 + i * 7 + 1) & 255);
    return r;
  endfunction
  for (genvar p = 0; p < NP; p++) begin : g_mem
    assign rd_data[p] = row(int'(rd_addr[p]));
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // expected word w of packet p for bank b
  function automatic logic [63:0] exp_word(int b, int p, int w, logic [63:0] seq);
    int d, c, t, k;
    if (w == 0) return seq;
    if (w == 1) return {feng_id, 16'(p), 16'(int'(chan_start) + p * CPP), 16'(CPP)};
    d = w - 2;
    k = d % WPR; t = (d / WPR) % TIMES; c = d / (WPR * TIMES);
    return row((b * TIMES + t) * NCHAN + p * CPP + c)[64*k +: 64];
  endfunction

  int cur_bank = 0;
  logic [63:0] cur_seq;
  int wcnt [NP], pcnt [NP], words [NP];
  bit stall_mode = 0;

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < NP; l++) if (tx_valid[l] && tx_ready[l]) begin
      automatic int p = l + NP * pcnt[l];
      check(tx_data[l] == exp_word(cur_bank, p, wcnt[l], cur_seq),
            $sformatf("lane %0d packet %0d word %0d: %h", l, p, wcnt[l], tx_data[l]));
      check(tx_sop[l] == (wcnt[l] == 0), "sop");
      check(tx_eop[l] == (wcnt[l] == PKT_WORDS - 1), "eop");
      words[l]++;
      if (wcnt[l] == PKT_WORDS - 1) begin wcnt[l] = 0; pcnt[l]++; end
      else wcnt[l]++;
    end
    if (stall_mode) tx_ready <= NP'($urandom_range(0, (1 << NP) - 1));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t0, t1;
  initial begin
    bank_seq[0] = 64'd1000; bank_seq[1] = 64'd1002;
    for (int l = 0; l < NP; l++) begin wcnt[l] = 0; pcnt[l] = 0; words[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // bank 0, no stalls
    cur_bank = 0; cur_seq = bank_seq[0];
    bank_full = 2'b11;   // both full: bank 0 must go first
    t0 = $time;
    while (bank_release != 2'b01) begin
      @(posedge clk); #1;
      check(bank_release != 2'b10, "bank 1 released before bank 0");
    end
    t1 = $time;
    bank_full[0] = 0;
    for (int l = 0; l < NP; l++) begin
      check(pcnt[l] == NPKT / NP, $sformatf("lane %0d sent %0d packets", l, pcnt[l]));
      check(words[l] == NPKT / NP * PKT_WORDS, "word count per lane");
    end
    // one word per clock per lane, plus start and release overhead
    check((t1 - t0) / 10 <= NPKT / NP * PKT_WORDS + 4,
          $sformatf("bank took %0d clocks for %0d words per lane", (t1 - t0) / 10,
                    NPKT / NP * PKT_WORDS));
    // bank 1 with random stalls
    @(negedge clk);
    for (int l = 0; l < NP; l++) begin wcnt[l] = 0; pcnt[l] = 0; words[l] = 0; end
    cur_bank = 1; cur_seq = bank_seq[1];
    stall_mode = 1;
    while (bank_release != 2'b10) @(posedge clk);
    #1 bank_full[1] = 0;
    for (int l = 0; l < NP; l++)
      check(pcnt[l] == NPKT / NP, $sformatf("stalled lane %0d sent %0d packets", l, pcnt[l]));
    repeat (5) @(posedge clk); #1;
    check(!busy && tx_valid == '0, "idle after both banks");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
