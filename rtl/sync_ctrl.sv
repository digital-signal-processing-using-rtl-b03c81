// sync_ctrl: observation start and frame timing of the F-engine.
//
// The GPS-disciplined 1 PPS pulse, distributed to every ROACH2, fixes the start of an
// observation so that all F-engines, and through the time tags all X-engines, agree
// on time. Software arms the engine (`arm` pulse); the first rising edge of the PPS
// after that starts it. From then on every clock carries one ADC sample per input
// (`run`), `frame_sop` marks the first sample of each NFFT-sample PFB frame, and
// `frame_cnt` counts frames since the start. An `arm` while running re-aligns the
// frames at the next PPS; `stop` halts the engine (the "off" command).
//
// Timing: the PPS is taken through a two-flop synchronizer; `run` and the first
// `frame_sop` rise three clocks after the PPS edge arrives at the pin.
// What follows the paper: PPS-triggered start, synchronous sampling and processing.
// This design's choice: the arm/stop handshake and the synchronizer depth.
module sync_ctrl #(
  parameter int unsigned NFFT = leda_pkg::NFFT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        pps,        // GPS 1 PPS, asynchronous
  input  logic        arm,        // software: start at next PPS
  input  logic        stop,       // software: stop
  output logic        armed,
  output logic        run,        // ADC samples are being processed
  output logic        frame_sop,  // first sample of a PFB frame (valid with run)
  output logic [47:0] frame_cnt,  // frames since the observation start
  output logic [31:0] pps_cnt     // PPS edges seen since the start
);
  localparam int unsigned AW = $clog2(NFFT);

  logic [2:0]    pps_sync;
  logic          pps_edge;
  logic [AW-1:0] sample;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) pps_sync <= '0;
    else        pps_sync <= {pps_sync[1:0], pps};

  assign pps_edge = pps_sync[1] && !pps_sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed     <= 1'b0;
      run       <= 1'b0;
      frame_sop <= 1'b0;
      sample    <= '0;
      frame_cnt <= '0;
      pps_cnt   <= '0;
    end else begin
      frame_sop <= 1'b0;
      if (stop) begin
        run   <= 1'b0;
        armed <= 1'b0;
      end else if (arm) begin
        armed <= 1'b1;
      end
      if (!stop && armed && pps_edge) begin
        // observation (re)start: sample 0 of frame 0 is the next clock
        armed     <= 1'b0;
        run       <= 1'b1;
        frame_sop <= 1'b1;
        sample    <= AW'(1);
        frame_cnt <= '0;
        pps_cnt   <= '0;
      end else if (run && !stop) begin
        frame_sop <= (sample == '0);
        sample    <= sample + 1'b1;
        if (sample == '0) frame_cnt <= frame_cnt + 1'b1;
        if (pps_edge) pps_cnt <= pps_cnt + 1'b1;
      end
    end
  end

  // frame_cnt counts completed-and-started frames: it is 0 during frame 0
  // and increments at the start of each later frame.
endmodule
