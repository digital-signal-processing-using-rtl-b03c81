// tb_sync_ctrl: self-checking test of the PPS start-up and frame timing.
// Checks that a PPS without `arm` does nothing, that `run` and the first `frame_sop`
// come exactly 3 clocks after the PPS edge, that `frame_sop` then repeats every NFFT
// clocks while `frame_cnt` counts frames, that `stop` halts the engine, and that a
// re-arm re-aligns the frames to a later PPS.
module tb_sync_ctrl;
  localparam int unsigned NFFT = 16;
  logic clk = 0, rst_n = 0, pps = 0, arm = 0, stop = 0;
  logic armed, run, frame_sop;
  logic [47:0] frame_cnt;
  logic [31:0] pps_cnt;
  int checks = 0, failures = 0;

  sync_ctrl #(.NFFT(NFFT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic pulse_pps();
    @(negedge clk) pps = 1;
    repeat (4) @(negedge clk);
    pps = 0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int t_edge, t_run, n_sop, last_sop;
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // PPS without arm: nothing starts
    pulse_pps();
    repeat (10) @(negedge clk);
    check(!run && !armed, "PPS without arm must not start");
    // arm, then PPS
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    check(armed, "armed after arm pulse");
    repeat (5) @(negedge clk);
    pps = 1;
    t_edge = 0;
    while (!run) begin @(posedge clk); #1; t_edge++; end
    check(t_edge == 3, $sformatf("run %0d clocks after PPS, expected 3", t_edge));
    check(frame_sop, "frame_sop with the first running sample");
    check(frame_cnt == 0, "frame_cnt 0 in frame 0");
    @(negedge clk) pps = 0;
    // frame_sop period
    n_sop = 1; last_sop = 0;
    for (int c = 1; c <= 5 * NFFT; c++) begin
      @(posedge clk); #1;
      if (frame_sop) begin
        check(c - last_sop == NFFT, $sformatf("frame period %0d", c - last_sop));
        check(frame_cnt == 48'(n_sop), $sformatf("frame_cnt %0d expected %0d", frame_cnt, n_sop));
        last_sop = c; n_sop++;
      end
    end
    check(n_sop == 6, $sformatf("saw %0d frame starts, expected 6", n_sop));
    // PPS while running, not armed: counted, no realign
    pulse_pps();
    repeat (3) @(negedge clk);
    check(pps_cnt == 1, "pps counted while running");
    // re-arm and realign at next PPS
    @(negedge clk) arm = 1;
    @(negedge clk) arm = 0;
    repeat (7) @(negedge clk);
    pps = 1;
    repeat (3) @(posedge clk); #1;
    check(frame_sop && frame_cnt == 0, "re-arm restarts frame 0 at the PPS");
    @(negedge clk) pps = 0;
    // stop
    @(negedge clk) stop = 1;
    @(negedge clk) stop = 0;
    check(!run, "stop halts");
    repeat (2 * NFFT) begin @(posedge clk); #1; check(!frame_sop, "no frames after stop"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
