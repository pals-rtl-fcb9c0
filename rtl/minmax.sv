// minmax: minimum and maximum of the neighbours' offset thermometer codes.
//
// Node v has NBRS neighbours, each giving a measurement word
// {Q^{+l}..Q^{+1}, Q^{-1}..Q^{-l}}. Because the words are thermometer codes,
// the minimum over neighbours of the positive half is a bitwise AND, and the
// maximum of the negative half is a bitwise OR:
//   Q^{+i}_min = AND_w Q^{+i}_w   (every neighbour is above -(2i-1)k - d)
//   Q^{-i}_max = OR_w  Q^{-i}_w   (some neighbour is above +(2i-1)k - d)
// These are O_min and O_max of the algorithm, read against its thresholds.
// AND/OR also mask a late-resolving bit whenever another input decides it.
//
// Interface: meas[k] is neighbour k's word; the output qext has the same
// layout, positive half from the AND, negative half from the OR. Purely
// combinational.
//
// Follows the paper: one AND per Q^{+i} and one OR per Q^{-i} over all
// neighbours. Own choice: none beyond the word layout.
module minmax
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS = NUM_LEVELS,
  parameter int unsigned NBRS   = 2
) (
  input  logic [NBRS-1:0][2*LEVELS-1:0] meas,
  output logic [2*LEVELS-1:0]           qext
);
  timeunit 1fs;
  timeprecision 1fs;

  always_comb begin
    qext = {{LEVELS{1'b1}}, {LEVELS{1'b0}}};
    for (int k = 0; k < NBRS; k++) begin
      qext[2*LEVELS-1:LEVELS] &= meas[k][2*LEVELS-1:LEVELS];
      qext[LEVELS-1:0]        |= meas[k][LEVELS-1:0];
    end
  end

endmodule
