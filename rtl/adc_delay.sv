// adc_delay: per-ADC-chip sample delay for aligning the digitized inputs.
//
// The ADC boards need a delay calibration at power-up: the chips on one board can
// be up to one clock apart, and boards can be offset from each other. This block
// delays the samples of each ADC chip by its own run-time number of clocks,
// `delay[c]` = 0..DMAX, so that software can line all inputs up on a common sample.
// A chip serves INPUTS_PER_CHIP consecutive inputs (the HMCAD1511 is a quad-channel
// part, so 8 chips serve the 32 inputs of an F-engine).
// Timing: output = input registered once and then delayed by delay[c] clocks, i.e.
// 1 + delay[c] clocks of latency. A change of `delay` takes effect at once.
// What follows the paper: per-chip and per-board offsets must be removed.
// This design's choices: a delay line per input, DMAX = 7, and the register layout.
module adc_delay #(
  parameter int unsigned N_IN            = leda_pkg::N_INPUTS,
  parameter int unsigned W               = leda_pkg::ADC_W,
  parameter int unsigned INPUTS_PER_CHIP = 4,
  parameter int unsigned DMAX            = 7,
  localparam int unsigned NCHIP = N_IN / INPUTS_PER_CHIP,
  localparam int unsigned DW    = $clog2(DMAX + 1)
) (
  input  logic                      clk,
  input  logic signed [N_IN-1:0][W-1:0] adc_in,
  input  logic [NCHIP-1:0][DW-1:0]  delay,
  output logic signed [N_IN-1:0][W-1:0] adc_out
);
  logic signed [N_IN-1:0][W-1:0] sr [DMAX+1];

  always_ff @(posedge clk) begin
    sr[0] <= adc_in;
    for (int d = 1; d <= int'(DMAX); d++) sr[d] <= sr[d-1];
  end

  always_comb
    for (int i = 0; i < int'(N_IN); i++)
      adc_out[i] = sr[delay[i / INPUTS_PER_CHIP]][i];
endmodule
