// ft_mode: the fast trigger of the OffsetGCS algorithm.
//
// Node v must run fast when some s in {0..l} satisfies both
//   FT1: O_max >= (2s+1)*kappa - delta   (some neighbour is far enough ahead)
//   FT2: O_min >= -(2s+1)*kappa - delta  (no neighbour is too far behind).
// With i = s+1, FT1 is Q^{-i}_max and FT2 is Q^{+i}_min, so
//   MODE_v = OR_i (Q^{+i}_min AND Q^{-i}_max).
//
// Interface: qext = {Q^{+l}_min..Q^{+1}_min, Q^{-1}_max..Q^{-l}_max} from minmax;
// mode = 1 selects fast mode of the local oscillator. Purely combinational
// (about 25 ps in the 15 nm design together with minmax).
//
// Follows the paper: one two-input AND per level, one OR over the levels.
module ft_mode
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS = NUM_LEVELS
) (
  input  logic [2*LEVELS-1:0] qext,
  output logic                mode
);
  timeunit 1fs;
  timeprecision 1fs;

  logic [LEVELS-1:0] level_ok;

  always_comb begin
    for (int i = 1; i <= LEVELS; i++)
      level_ok[i-1] = qext[LEVELS + i - 1] & qext[LEVELS - i];
  end

  assign mode = |level_ok;

endmodule
