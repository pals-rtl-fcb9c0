// offset_sampler: the flip-flops of one time offset measurement module.
//
// Node v measures the offset O_w = L_w - L_v of neighbour w by sampling the
// taps of w's ring oscillator with its own clock CLK_v. Tap Q^{+-i} switches
// (2i-1)*kappa -+ delta away from w's clock edge, so the sampled word is the
// thermometer code of O_w against the thresholds -+(2i-1)*kappa - delta:
// meas = {Q^{+l}..Q^{+1}, Q^{-1}..Q^{-l}}, of the form 1*0* (or 1*M0* when one
// flip-flop resolves late; a two-state simulation cannot show M).
//
// Physically these flip-flops sit inside node w, next to the shared taps, one
// set per neighbour; only their clock comes from v.
//
// Interface: clk_v is the measuring node's clock; tap_pos/tap_neg come from the
// measured node's ring (tap_pos[i-1] for Q^{+i}, tap_neg[i-1] for Q^{-i}).
// meas is valid one clk-to-q after each rising edge of clk_v.
//
// Follows the paper: one flip-flop per tap, clocked by CLK_v, no synchroniser.
// Own choices: the asynchronous active-low reset, which loads the code of two
// aligned clocks so that the controller starts in slow mode, and an assertion
// that every sample is a thermometer code (the neighbour is in range).
module offset_sampler
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS = NUM_LEVELS
) (
  input  logic                clk_v,
  input  logic                rst_n,
  input  logic [LEVELS-1:0]   tap_pos,
  input  logic [LEVELS-1:0]   tap_neg,
  output logic [2*LEVELS-1:0] meas
);
  timeunit 1fs;
  timeprecision 1fs;

  logic [2*LEVELS-1:0] sample;

  // Arrange the taps as the thermometer string Q^{+l}..Q^{+1} Q^{-1}..Q^{-l}.
  always_comb begin
    for (int i = 1; i <= LEVELS; i++) begin
      sample[LEVELS + i - 1] = tap_pos[i-1];
      sample[LEVELS - i]     = tap_neg[i-1];
    end
  end

  always_ff @(posedge clk_v or negedge rst_n) begin
    if (!rst_n) meas <= {{LEVELS{1'b1}}, {LEVELS{1'b0}}};
    else        meas <= sample;
  end

  // While the neighbour is within the measurement range, the taps switch one
  // after another and any sample is a thermometer code 1*0*. A word with a 0
  // above a 1 means the offset left the range (about +-(half period - 35 ps)):
  // more levels would be needed.
  function automatic logic is_thermometer(logic [2*LEVELS-1:0] w);
    for (int b = 0; b < 2 * LEVELS - 1; b++)
      if (!w[b+1] && w[b]) return 1'b0;
    return 1'b1;
  endfunction

  always @(posedge clk_v) begin
    assert (is_thermometer(sample))
      else $error("offset_sampler: sampled word %b is not a thermometer code", sample);
  end

endmodule
