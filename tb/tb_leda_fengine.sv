// tb_leda_fengine: end-to-end test of one F-engine at full size (32 inputs, 8192-point
// PFB, 2398 channels from 1250, 109 channels per packet, two 10GbE lanes).
//
// Every input carries a pure tone centred on one channel, with its own channel,
// amplitude and phase. Inputs 0..29 have tones inside the selected band, input 30 a
// tone so strong that the requantizer clips, input 31 a tone below the band. The
// reference works out, independently of the RTL, the FIR output of each tone (the
// tone repeats every frame, so each point k is x[k] times the sum of its four taps),
// its DFT at the tone channel and two channels either side, and the 4-bit value the
// band-wide gain gives; all other channels must come out as 0. Every payload byte of
// every packet received is compared, within one LSB, together with the header.
//
// ADC chips get different alignment delays (0..7 clocks), which the reference
// follows as a shift of each tone. Mechanisms driven and counted: a PPS before arming (ignored), the PPS start, the
// FIR fill (no data for 3 frames), requantizer clipping, the channel window (input
// 31's tone never appears), both lanes in use, lane stalls, a buffer overflow that
// drops a group (a long stall on lane 1) with the matching gap in the time tags,
// FFT saturation once the stage shifts are turned off, and stop. Rates: one group
// of 2 spectra every 16384 clocks and 9614 words per lane per group, which is
// 7.38 Gbit/s per lane at 196.608 MHz.
module tb_leda_fengine;
  import leda_pkg::*;
  localparam int N = NFFT, NI = N_INPUTS, CS = CHAN_START_DEFAULT, NP = N_PORTS;
  localparam int PKT_WORDS = HDR_WORDS + CHANS_PER_PKT * TIMES_PER_PKT * (NI / 8);
  localparam int NPKT = NCHAN_SEL / CHANS_PER_PKT;
  localparam real PI = 3.14159265358979323846;
  localparam int GROUPS_OK = 3;        // groups received before the long stall

  logic clk = 0, rst_n = 0, pps = 0, arm = 0, stop = 0;
  logic signed [NI-1:0][ADC_W-1:0] adc_data = '0;
  logic [NI/4-1:0][2:0] adc_dly;
  logic [15:0] feng_id = 16'd7;
  logic [12:0] chan_start = 13'(CS);
  logic [12:0] fft_shift = '1;
  logic [GAIN_W-1:0] gain = 0;
  logic [NP-1:0] tx_valid, tx_sop, tx_eop, tx_ready = '1;
  logic [63:0] tx_data [NP];
  logic armed, running;
  logic [47:0] frame_cnt;
  logic [31:0] pps_cnt;
  logic pkt_busy;
  logic [31:0] drop_cnt, clip_cnt, fft_ovf_cnt;

  leda_fengine dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 30) $display("FAIL: %s", what);
    end
  endtask

  // ---- stimulus and reference --------------------------------------------
  int  tone_bin [NI];
  real tone_amp [NI];
  byte x [NI][N];
  int  hsum [N];
  byte exp_re [NI][N/2], exp_im [NI][N/2];
  bit  exp_set [NI][N/2];

  function automatic int rnd_away(real v);
    return (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
  endfunction

  task automatic build_reference();
    real xr0, xi0, mag0;
    int  fir [N];
    // tap sums of the prototype filter, coded here from its definition
    for (int k = 0; k < N; k++) begin
      hsum[k] = 0;
      for (int t = 0; t < PFB_TAPS; t++) begin
        real n, xx, s, w;
        n  = real'(t * N + k);
        xx = (n - real'(N * PFB_TAPS) / 2.0) / real'(N);
        s  = (t * N + k == N * PFB_TAPS / 2) ? 1.0 : $sin(PI * xx) / (PI * xx);
        w  = 0.54 - 0.46 * $cos(2.0 * PI * n / real'(N * PFB_TAPS - 1));
        hsum[k] += int'(s * w * 131071.0);
      end
    end
    for (int i = 0; i < NI; i++) begin
      tone_bin[i] = (i < 31) ? CS + 3 + 77 * i : 1000;
      tone_amp[i] = (i == 30) ? 120.0 : 30.0 + real'(i);
      for (int k = 0; k < N; k++)
        x[i][k] = byte'(rnd_away(tone_amp[i] *
                   $cos(2.0 * PI * real'(tone_bin[i]) * real'(k) / real'(N) + 0.3 * real'(i))));
    end
    // gain: about 5.5 LSB for input 0's tone
    begin
      int f0 [N];
      for (int k = 0; k < N; k++) f0[k] = (int'(x[0][(k - 1 + N) % N]) * hsum[k] + 128) >>> 8;
      xr0 = 0; xi0 = 0;
      for (int k = 0; k < N; k++) begin
        xr0 += real'(f0[k]) * $cos(2.0 * PI * real'(k * tone_bin[0] % N) / real'(N));
        xi0 -= real'(f0[k]) * $sin(2.0 * PI * real'(k * tone_bin[0] % N) / real'(N));
      end
      mag0 = $sqrt(xr0 * xr0 + xi0 * xi0) / real'(N);
      gain = GAIN_W'(int'(5.5 * 65536.0 / mag0));
    end
    for (int i = 0; i < NI; i++) begin
      for (int b = 0; b < N / 2; b++) begin exp_re[i][b] = 0; exp_im[i][b] = 0; exp_set[i][b] = 0; end
      // the FIR's point k sees the sample driven 1 + delay clocks earlier
      for (int k = 0; k < N; k++)
        fir[k] = (int'(x[i][(k - 1 - int'(adc_dly[i/4]) + N) % N]) * hsum[k] + 128) >>> 8;
      for (int b = tone_bin[i] - 2; b <= tone_bin[i] + 2; b++) begin
        real re, im;
        int  qr, qi;
        re = 0; im = 0;
        for (int k = 0; k < N; k++) begin
          re += real'(fir[k]) * $cos(2.0 * PI * real'((k * b) % N) / real'(N));
          im -= real'(fir[k]) * $sin(2.0 * PI * real'((k * b) % N) / real'(N));
        end
        qr = rnd_away(re / real'(N) * real'(gain) / 65536.0);
        qi = rnd_away(im / real'(N) * real'(gain) / 65536.0);
        exp_re[i][b] = byte'((qr > 7) ? 7 : (qr < -7) ? -7 : qr);
        exp_im[i][b] = byte'((qi > 7) ? 7 : (qi < -7) ? -7 : qi);
        exp_set[i][b] = 1;
      end
    end
    $display("gain %0d, input 0 tone at channel %0d -> (%0d,%0d)", gain, tone_bin[0],
             exp_re[0][tone_bin[0]], exp_im[0][tone_bin[0]]);
  endtask

  int n_samp = 0;
  always @(negedge clk) if (running) begin
    for (int i = 0; i < NI; i++) adc_data[i] <= x[i][n_samp % N];
    n_samp <= n_samp + 1;
  end

  // ---- packet checker -------------------------------------------------------
  int wcnt [NP], pkt_idx [NP], lane_pkts [NP], lane_words [NP];
  logic [63:0] pkt_seq [NP];
  int groups_seen [$];          // time tags of packet 0 of each group
  int seq_gap = 0, tone_hits = 0, outside_hits = 0, stall_cycles = 0;
  bit checking = 1;

  function automatic int s4(logic [3:0] v);
    return int'($signed(v));
  endfunction

  always @(posedge clk) if (rst_n && checking) begin
    for (int l = 0; l < NP; l++) begin
      if (tx_valid[l] && !tx_ready[l]) stall_cycles++;
      if (tx_valid[l] && tx_ready[l]) begin
        lane_words[l]++;
        check(tx_sop[l] == (wcnt[l] == 0), $sformatf("lane %0d sop at word %0d", l, wcnt[l]));
        check(tx_eop[l] == (wcnt[l] == PKT_WORDS - 1), $sformatf("lane %0d eop", l));
        if (wcnt[l] == 0) pkt_seq[l] = tx_data[l];
        else if (wcnt[l] == 1) begin
          hdr1_t h;
          h = tx_data[l];
          pkt_idx[l] = int'(h.pkt_idx);
          check(h.feng_id == feng_id, "header feng_id");
          check(int'(h.pkt_idx) % NP == l, $sformatf("packet %0d on lane %0d", h.pkt_idx, l));
          check(int'(h.first_chan) == CS + int'(h.pkt_idx) * CHANS_PER_PKT, "header first_chan");
          check(int'(h.n_chan) == CHANS_PER_PKT, "header n_chan");
          check(pkt_seq[l] % TIMES_PER_PKT == 0, "time tag is a group start");
          if (h.pkt_idx == 0) groups_seen.push_back(int'(pkt_seq[l]));
        end else begin
          int d, c, w, ch;
          d = wcnt[l] - 2;
          w = d % (NI / 8);
          c = d / (NI / 8 * TIMES_PER_PKT);
          ch = CS + pkt_idx[l] * CHANS_PER_PKT + c;
          for (int j = 0; j < 8; j++) begin
            int i, gr, gi, er, ei;
            i  = w * 8 + j;
            gr = s4(tx_data[l][8*j+4 +: 4]);
            gi = s4(tx_data[l][8*j +: 4]);
            er = exp_re[i][ch]; ei = exp_im[i][ch];
            checks++;
            if (gr - er > 1 || er - gr > 1 || gi - ei > 1 || ei - gi > 1) begin
              failures++;
              if (failures < 30)
                $display("FAIL: input %0d channel %0d seq %0d got (%0d,%0d) expected (%0d,%0d)",
                         i, ch, pkt_seq[l], gr, gi, er, ei);
            end
            if (ch == tone_bin[i] && (gr != 0 || gi != 0)) tone_hits++;
            if (i == 31 && (gr != 0 || gi != 0)) outside_hits++;
          end
        end
        if (wcnt[l] == PKT_WORDS - 1) begin wcnt[l] = 0; lane_pkts[l]++; end
        else wcnt[l]++;
      end
    end
  end

  // ---- clock counter and bank-full times (rate) -------------------------------
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // ---- watchdog ----------------------------------------------------------------
  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int m_pps_ignored = 0, m_start = 0, m_fill = 0, m_clip = 0, m_window = 0;
  int m_lanes = 0, m_stall = 0, m_drop = 0, m_gap = 0, m_ovf = 0, m_stop = 0;
  int t_full [$];
  always @(posedge clk) if (rst_n && running && dut.u_buf.bank_full != $past(dut.u_buf.bank_full) &&
                            ((dut.u_buf.bank_full & ~$past(dut.u_buf.bank_full)) != 0))
    t_full.push_back(cyc);

  initial begin
    for (int l = 0; l < NP; l++) begin
      wcnt[l] = 0; pkt_idx[l] = 0; lane_pkts[l] = 0; lane_words[l] = 0;
    end
    for (int c = 0; c < NI / 4; c++) adc_dly[c] = 3'((c * 5) % 8);  // chip 0 undelayed
    build_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // PPS while not armed: ignored
    repeat (5) @(negedge clk);
    pps = 1; repeat (5) @(negedge clk); pps = 0;
    repeat (10) @(negedge clk);
    if (!running) m_pps_ignored++;
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    repeat (20) @(negedge clk);
    pps = 1;
    wait (running);
    m_start++;
    @(negedge clk) pps = 0;
    // FIR fill: nothing reaches the FFT for 3 frames
    repeat (3 * N - 10) begin
      @(posedge clk);
      if (dut.g_in[0].fir_valid) m_fill = -1000;
    end
    if (m_fill == 0) m_fill = 1;
    // normal running: GROUPS_OK groups
    wait (lane_pkts[0] == GROUPS_OK * NPKT / NP && lane_pkts[1] == GROUPS_OK * NPKT / NP);
    // rate: per lane words per group and time between groups
    for (int l = 0; l < NP; l++)
      check(lane_words[l] == GROUPS_OK * NPKT / NP * PKT_WORDS,
            $sformatf("lane %0d words %0d", l, lane_words[l]));
    check(t_full.size() >= GROUPS_OK, "banks filled");
    for (int g = 1; g < t_full.size(); g++)
      check(t_full[g] - t_full[g-1] == TIMES_PER_PKT * N,
            $sformatf("group interval %0d clocks", t_full[g] - t_full[g-1]));
    $display("per-lane rate %f Gbit/s at 196.608 MHz",
             real'(NPKT / NP * PKT_WORDS * 64) * 196.608e6 / real'(TIMES_PER_PKT * N) / 1e9);
    // stall lane 1 for long enough that the buffer overflows
    @(negedge clk) tx_ready = 2'b01;
    repeat (3 * TIMES_PER_PKT * N) @(negedge clk);
    tx_ready = 2'b11;
    // random short stalls afterwards
    repeat (6 * TIMES_PER_PKT * N) begin
      @(negedge clk);
      tx_ready = NP'($urandom_range(0, 3)) | NP'($urandom_range(0, 3));
    end
    tx_ready = 2'b11;
    repeat (3 * TIMES_PER_PKT * N) @(negedge clk);
    wait (wcnt[0] == 0 && wcnt[1] == 0);
    checking = 0;
    // time tags: consecutive groups step by TIMES, one dropped group makes a gap
    for (int g = 1; g < groups_seen.size(); g++) begin
      check(groups_seen[g] > groups_seen[g-1], "time tags increase");
      seq_gap += (groups_seen[g] - groups_seen[g-1]) / TIMES_PER_PKT - 1;  // groups missing
    end
    // FFT saturation with the stage shifts turned off
    fft_shift = '0;
    repeat (2 * N) @(negedge clk);
    m_ovf = (fft_ovf_cnt != 0);
    fft_shift = '1;
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    @(negedge clk) m_stop = !running;

    m_clip   = (clip_cnt != 0);
    m_window = (outside_hits == 0) && (tone_hits > 0);
    m_lanes  = (lane_pkts[0] > 0) && (lane_pkts[1] > 0);
    m_stall  = stall_cycles;
    m_drop   = drop_cnt;
    m_gap    = seq_gap;
    $display("mechanisms: pps_ignored=%0d start=%0d fir_fill=%0d clip=%0d window=%0d lanes=%0d stall=%0d drop=%0d gap=%0d fft_ovf=%0d stop=%0d",
             m_pps_ignored, m_start, m_fill, m_clip, m_window, m_lanes, m_stall, m_drop,
             m_gap, m_ovf, m_stop);
    $display("%0d clocks simulated; groups received %0d, packets %0d+%0d, tone hits %0d", cyc, groups_seen.size(),
             lane_pkts[0], lane_pkts[1], tone_hits);
    check(m_pps_ignored > 0, "mechanism: PPS ignored while not armed");
    check(m_start > 0, "mechanism: PPS start");
    check(m_fill > 0, "mechanism: FIR fill");
    check(m_clip > 0, "mechanism: requantizer clipping");
    check(m_window > 0, "mechanism: channel window");
    check(m_lanes > 0, "mechanism: both lanes");
    check(m_stall > 0, "mechanism: lane stall");
    check(m_drop > 0, "mechanism: buffer overflow drop");
    check(m_gap == m_drop, $sformatf("groups missing from the time tags %0d, drops %0d", m_gap, m_drop));
    check(m_ovf > 0, "mechanism: FFT saturation");
    check(m_stop > 0, "mechanism: stop");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
