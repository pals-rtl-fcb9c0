// gcs_controller: the controller of one PALS node.
//
// It takes the thermometer-coded offsets of all NBRS neighbours, reduces them
// to the extreme codes with minmax (AND for the positive thresholds, OR for the
// negative ones) and evaluates the fast trigger with ft_mode. The result,
// MODE_v, drives the local oscillator: 1 = fast (rate x(1+mu)), 0 = slow.
//
// Interface: meas[k] = {Q^{+l}..Q^{+1}, Q^{-1}..Q^{-l}} of neighbour k, all
// sampled with this node's own clock; mode is a combinational function of
// them, so the controller delay T_cnt is only gate delay and the whole
// measure-and-decide loop takes one clock cycle plus that delay.
//
// Follows the paper: structure and function (AND/OR reduction, then the
// per-level AND and final OR). Nothing here is an own choice.
module gcs_controller
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS = NUM_LEVELS,
  parameter int unsigned NBRS   = 2
) (
  input  logic [NBRS-1:0][2*LEVELS-1:0] meas,
  output logic                          mode
);
  timeunit 1fs;
  timeprecision 1fs;

  logic [2*LEVELS-1:0] qext;

  minmax #(.LEVELS(LEVELS), .NBRS(NBRS)) u_minmax (
    .meas (meas),
    .qext (qext)
  );

  ft_mode #(.LEVELS(LEVELS)) u_ft (
    .qext (qext),
    .mode (mode)
  );

endmodule
