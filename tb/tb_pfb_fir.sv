// tb_pfb_fir: self-checking test of the polyphase FIR at N=16 points, 4 taps.
// Random 8-bit samples stream in continuously, one per clock. The reference builds
// its own Hamming-windowed sinc coefficients, forms
// y_m[k] = sum_t h[t*N+k] x[(m-3+t)*N+k], rounds, shifts and saturates, and must
// match every output exactly. Also checked: no output before 4 frames have entered,
// and the two-clock latency from input to output.
module tb_pfb_fir;
  localparam int N = 16, TAPS = 4, SHIFT = 8, FRAMES = 10;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sop = 0;
  logic signed [7:0] in_data = 0;
  logic out_valid, out_sop;
  logic signed [17:0] out_data;
  int checks = 0, failures = 0;

  pfb_fir #(.N(N), .TAPS(TAPS)) dut (.*);
  always #5 clk = ~clk;

  int x [FRAMES*N];
  int h [TAPS*N];
  int n_out = 0, cyc = 0, sop_cyc[$], in_sop_cyc[$];

  function automatic int ref_y(int m, int k);
    longint acc;
    acc = 0;
    for (int t = 0; t < TAPS; t++) acc += longint'(h[t*N+k]) * x[(m-TAPS+1+t)*N+k];
    acc = (acc + (1 << (SHIFT-1))) >>> SHIFT;
    if (acc > 131071) acc = 131071;
    if (acc < -131072) acc = -131072;
    return int'(acc);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int m = TAPS - 1 + n_out / N, k = n_out % N;
    checks++;
    if (out_sop != (k == 0)) begin failures++; $display("FAIL: out_sop at k=%0d", k); end
    if (int'(out_data) != ref_y(m, k)) begin
      failures++;
      $display("FAIL: frame %0d k %0d got %0d expected %0d", m, k, out_data, ref_y(m, k));
    end
    if (out_sop) sop_cyc.push_back(cyc);
    n_out++;
  end

  initial begin
    for (int n = 0; n < TAPS*N; n++) begin
      real xx, s, w;
      xx = (real'(n) - real'(N*TAPS)/2.0) / real'(N);
      s = (n == N*TAPS/2) ? 1.0 : $sin(PI*xx)/(PI*xx);
      w = 0.54 - 0.46*$cos(2.0*PI*real'(n)/real'(N*TAPS-1));
      h[n] = int'(s * w * 131071.0);
    end
    for (int n = 0; n < FRAMES*N; n++) x[n] = int'($urandom_range(0, 255)) - 128;
    x[5] = 127; x[N+5] = 127; x[2*N+5] = 127; x[3*N+5] = 127;  // large values too
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < FRAMES*N; n++) begin
      in_valid = 1; in_sop = (n % N == 0); in_data = 8'(x[n]);
      if (in_sop && n / N >= TAPS - 1) in_sop_cyc.push_back(cyc);
      @(negedge clk);
    end
    in_valid = 0; in_sop = 0;
    repeat (5) @(negedge clk);
    checks++;
    if (n_out != (FRAMES - TAPS + 1) * N) begin
      failures++; $display("FAIL: %0d outputs, expected %0d", n_out, (FRAMES-TAPS+1)*N);
    end
    for (int i = 0; i < sop_cyc.size() && i < in_sop_cyc.size(); i++) begin
      checks++;
      if (sop_cyc[i] - in_sop_cyc[i] != 2) begin
        failures++; $display("FAIL: latency %0d, expected 2", sop_cyc[i] - in_sop_cyc[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
