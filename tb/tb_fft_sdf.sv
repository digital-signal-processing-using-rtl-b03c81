// tb_fft_sdf: self-checking test of the streaming FFT at N=64.
// Random complex frames stream in back to back with every stage shifting. Each
// output bin, located by `out_bin`, is compared with a floating-point DFT divided
// by N, within a few LSB of rounding error. Also checked: every bin appears once
// per frame, out_sop comes N-1+log2(N) clocks after in_sop, and with shifting
// turned off large inputs raise `ovf`.
module tb_fft_sdf;
  localparam int N = 64, S = 6, FRAMES = 5, TOL = 4;
  localparam real PI = 3.14159265358979323846;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sop = 0;
  logic [S-1:0] shift = '1;
  logic signed [17:0] in_re = 0, in_im = 0;
  logic out_valid, out_sop, ovf;
  logic [S-1:0] out_bin;
  logic signed [17:0] out_re, out_im;
  int checks = 0, failures = 0;

  fft_sdf #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  int xr [FRAMES][N], xi [FRAMES][N];
  real rr [FRAMES][N], ri [FRAMES][N];
  int cyc = 0, n_out = 0, max_err = 0, first_in_sop = -1, first_out_sop = -1, ovf_seen = 0;
  bit seen [FRAMES][N];
  bit checking = 1;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid && checking) begin
    automatic int f = n_out / N;
    automatic int er, ei;
    if (out_sop && first_out_sop < 0) first_out_sop = cyc;
    if (f < FRAMES) begin
      er = int'(out_re) - int'($rtoi(rr[f][out_bin] + (rr[f][out_bin] >= 0 ? 0.5 : -0.5)));
      ei = int'(out_im) - int'($rtoi(ri[f][out_bin] + (ri[f][out_bin] >= 0 ? 0.5 : -0.5)));
      if (er < 0) er = -er;
      if (ei < 0) ei = -ei;
      if (er > max_err) max_err = er;
      if (ei > max_err) max_err = ei;
      checks++;
      if (er > TOL || ei > TOL) begin
        failures++;
        $display("FAIL: frame %0d bin %0d got (%0d,%0d) expected (%f,%f)", f, out_bin,
                 out_re, out_im, rr[f][out_bin], ri[f][out_bin]);
      end
      checks++;
      if (seen[f][out_bin]) begin failures++; $display("FAIL: bin %0d twice", out_bin); end
      seen[f][out_bin] = 1;
    end
    n_out++;
  end

  always @(posedge clk) if (rst_n && ovf) ovf_seen++;

  initial begin
    for (int f = 0; f < FRAMES; f++) begin
      for (int n = 0; n < N; n++) begin
        xr[f][n] = int'($urandom_range(0, 40000)) - 20000;
        xi[f][n] = int'($urandom_range(0, 40000)) - 20000;
      end
      for (int b = 0; b < N; b++) begin
        rr[f][b] = 0; ri[f][b] = 0;
        for (int n = 0; n < N; n++) begin
          real a;
          a = -2.0 * PI * real'(n * b) / real'(N);
          rr[f][b] += (real'(xr[f][n]) * $cos(a) - real'(xi[f][n]) * $sin(a)) / N;
          ri[f][b] += (real'(xr[f][n]) * $sin(a) + real'(xi[f][n]) * $cos(a)) / N;
        end
      end
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int f = 0; f < FRAMES; f++)
      for (int n = 0; n < N; n++) begin
        in_valid = 1; in_sop = (n == 0);
        in_re = 18'(xr[f][n]); in_im = 18'(xi[f][n]);
        if (f == 0 && n == 0) first_in_sop = cyc;
        @(negedge clk);
      end
    // one more frame to flush the last one out
    for (int n = 0; n < N; n++) begin
      in_sop = (n == 0); in_re = 0; in_im = 0; @(negedge clk);
    end
    repeat (S + 2) @(negedge clk);
    checks++;
    if (n_out < FRAMES * N) begin failures++; $display("FAIL: only %0d outputs", n_out); end
    for (int f = 0; f < FRAMES; f++)
      for (int b = 0; b < N; b++) begin
        checks++;
        if (!seen[f][b]) begin failures++; $display("FAIL: frame %0d bin %0d missing", f, b); end
      end
    checks++;
    if (first_out_sop - first_in_sop != N - 1 + S) begin
      failures++;
      $display("FAIL: latency %0d expected %0d", first_out_sop - first_in_sop, N - 1 + S);
    end
    $display("max error %0d LSB", max_err);
    // no shifting and full-scale input: butterflies must saturate
    checking = 0;
    shift = '0;
    for (int f = 0; f < 3; f++)
      for (int n = 0; n < N; n++) begin
        in_sop = (n == 0); in_re = 18'sd100000; in_im = -18'sd100000; @(negedge clk);
      end
    checks++;
    if (ovf_seen == 0) begin failures++; $display("FAIL: no overflow flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
