// tb_requant: self-checking test of the gain and 4+4 bit requantizer.
// Random 18-bit complex samples and random gains go in, one per clock; the reference
// scales by gain/2^16 in floating point, rounds half away from zero and clips to
// -7..+7. Checked: both 4-bit parts, the clip flag, the bin and sop that travel with
// the data, and the one-clock latency. Hand-picked cases cover the rounding ties.
module tb_requant;
  localparam int NT = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, in_sop = 0;
  logic [15:0] gain = 0;
  logic [12:0] in_bin = 0;
  logic signed [17:0] in_re = 0, in_im = 0;
  logic out_valid, out_sop, clip;
  logic [12:0] out_bin;
  leda_pkg::q4_t out_q;
  int checks = 0, failures = 0, n_clip = 0;

  requant dut (.*);
  always #5 clk = ~clk;

  function automatic int qref(int x, int g, output bit c);
    real v;
    int r;
    v = real'(x) * real'(g) / 65536.0;
    r = (v >= 0) ? int'($floor(v + 0.5)) : -int'($floor(-v + 0.5));
    c = (r > 7) || (r < -7);
    if (r > 7) r = 7;
    if (r < -7) r = -7;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int vr [NT], vi [NT], vg [NT];
  initial begin
    for (int i = 0; i < NT; i++) begin
      vg[i] = int'($urandom_range(0, 65535));
      // spread magnitudes so that both clipped and unclipped values occur
      vr[i] = (int'($urandom_range(0, 262143)) - 131072) >>> $urandom_range(0, 17);
      vi[i] = (int'($urandom_range(0, 262143)) - 131072) >>> $urandom_range(0, 17);
    end
    // rounding ties: 0.5 -> 1, -0.5 -> -1, 1.5 -> 2, 7.5 -> clip
    vg[0] = 32768; vr[0] = 1;  vi[0] = -1;
    vg[1] = 32768; vr[1] = 3;  vi[1] = -3;
    vg[2] = 32768; vr[2] = 15; vi[2] = -15;
    vg[3] = 65535; vr[3] = 131071; vi[3] = -131072;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < NT; i++) begin
      in_valid = 1; in_sop = (i % 64 == 0); in_bin = 13'(i);
      in_re = 18'(vr[i]); in_im = 18'(vi[i]); gain = 16'(vg[i]);
      @(posedge clk); #1;
      // one clock later the result must be at the output
      begin
        bit cr, ci;
        int er, ei;
        er = qref(vr[i], vg[i], cr);
        ei = qref(vi[i], vg[i], ci);
        checks++;
        if (!out_valid || int'(out_q.re) != er || int'(out_q.im) != ei || clip != (cr || ci)
            || out_bin != 13'(i) || out_sop != (i % 64 == 0)) begin
          failures++;
          $display("FAIL: i=%0d x=(%0d,%0d) g=%0d got (%0d,%0d,c%0d) expected (%0d,%0d,c%0d)",
                   i, vr[i], vi[i], vg[i], out_q.re, out_q.im, clip, er, ei, cr || ci);
        end
        if (cr || ci) n_clip++;
      end
      @(negedge clk);
    end
    in_valid = 0;
    @(posedge clk); #1;
    checks++;
    if (out_valid) begin failures++; $display("FAIL: valid without input"); end
    checks++;
    if (n_clip == 0 || n_clip == NT) begin failures++; $display("FAIL: clip cases %0d", n_clip); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
