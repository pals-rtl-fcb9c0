// pals_node: one node of a PALS (plesiochronous and locally synchronous)
// clock network.
//
// A node owns a tunable local clock (ring_osc), a controller (gcs_controller)
// that sets the clock's mode, and, for each of its NBRS neighbours, a set of
// measurement flip-flops (offset_sampler). Those flip-flops sit in this node
// because they sample this node's ring taps, which all neighbours share, but
// they are clocked by the neighbour's clock: their word is the neighbour's
// measurement of this node and is sent to the neighbour's controller.
// Conversely, meas_in[k] is this node's measurement of neighbour k, sampled in
// neighbour k with this node's clock; it feeds this node's controller.
//
// Timing: meas_in changes one clk-to-q after a rising edge of clk; mode
// follows through the controller gates, and the ring applies it to the next
// lap of its wavefront. The loop delay T_meas + T_cnt + T_osc is about one and
// a half clock periods.
//
// Interface:
//   rst_n            asynchronous reset of the measurement flip-flops
//   en               starts the ring oscillator
//   nbr_clk[k]       clock of neighbour k
//   meas_out[k]      this node's offset as seen by neighbour k (clocked by nbr_clk[k])
//   meas_in[k]       neighbour k's offset as seen by this node (clocked by clk)
//   clk, mode        this node's clock and its mode (1 = fast)
//
// Follows the paper: partition into clock, controller and per-link
// flip-flops, flip-flops placed at the measured node's taps. Own choices: the
// reset and enable inputs and the port naming.
module pals_node
  import pals_pkg::*;
#(
  parameter int unsigned LEVELS    = NUM_LEVELS,
  parameter int unsigned NBRS      = 2,
  parameter int unsigned KAPPA     = KAPPA_FS,
  parameter int unsigned DELTA     = DELTA_FS,
  parameter int unsigned HALF      = HALF_PERIOD_FS,
  parameter int unsigned MU        = MU_PPM,
  parameter int unsigned DRIFT_PPM = 0
) (
  input  logic                          rst_n,
  input  logic                          en,
  input  logic [NBRS-1:0]               nbr_clk,
  output logic [NBRS-1:0][2*LEVELS-1:0] meas_out,
  input  logic [NBRS-1:0][2*LEVELS-1:0] meas_in,
  output logic                          clk,
  output logic                          mode
);
  timeunit 1fs;
  timeprecision 1fs;

  logic [LEVELS-1:0] tap_pos;
  logic [LEVELS-1:0] tap_neg;

  ring_osc #(
    .LEVELS    (LEVELS),
    .KAPPA     (KAPPA),
    .DELTA     (DELTA),
    .HALF      (HALF),
    .MU        (MU),
    .DRIFT_PPM (DRIFT_PPM)
  ) u_osc (
    .en      (en),
    .mode    (mode),
    .clk     (clk),
    .tap_pos (tap_pos),
    .tap_neg (tap_neg)
  );

  for (genvar k = 0; k < NBRS; k++) begin : g_link
    offset_sampler #(.LEVELS(LEVELS)) u_sampler (
      .clk_v   (nbr_clk[k]),
      .rst_n   (rst_n),
      .tap_pos (tap_pos),
      .tap_neg (tap_neg),
      .meas    (meas_out[k])
    );
  end

  gcs_controller #(.LEVELS(LEVELS), .NBRS(NBRS)) u_ctrl (
    .meas (meas_in),
    .mode (mode)
  );

endmodule
