// pals_grid: a PALS clock network of ROWS x COLS nodes on a grid, each node
// linked to its up to four horizontal and vertical neighbours. The default,
// one row of four nodes, is the 15 nm test system: four nodes in a line,
// node 0 to node 3, 200 um apart. Larger grids, such as the 32 x 32 grid
// for which the worst-case local skew of 3*kappa = 30 ps is derived, only
// need other ROWS and COLS.
//
// Every node runs its own ring oscillator. Each pair of adjacent nodes forms
// a link over which both measure their mutual offset: each samples its own
// ring taps with the other's clock and hands the word to the other's
// controller. All neighbours of a node share its taps but have their own
// flip-flops. From these words every controller picks slow or fast mode so
// that the local skew, the largest phase offset between neighbours, stays
// at a few kappa.
//
// Node n = r*COLS + c sits in row r, column c. Its neighbours are taken in
// the order west (c-1), east (c+1), north (r-1), south (r+1), skipping those
// outside the grid, so an end node of a line has one neighbour, an inner
// node of a line two, and an inner grid node four. For the link between
// nodes a and b, word link[a][d] is a's taps sampled with clk[b], where d is
// the direction from a to b; b's controller reads it as link[a][d].
//
// Interface: rst_n resets all measurement flip-flops (every node then starts
// in slow mode); en[n] starts node n's oscillator, so a test can give nodes
// initial phase offsets; clk[n] and mode[n] are node n's clock and mode.
// Node n's oscillator has the frequency error DRIFT_PPM[(r + c) % 4], within
// [0, rho] = [0, 10] ppm, so that both horizontal and vertical neighbours
// differ.
//
// Follows the paper: the line of four nodes, links measured in both
// directions, taps shared by up to four neighbours in a grid, one controller
// and clock per node. Own choices: the neighbour order, the drift pattern,
// and the reset and enable inputs.
module pals_grid
  import pals_pkg::*;
#(
  parameter int unsigned ROWS   = 1,
  parameter int unsigned COLS   = 4,
  parameter int unsigned LEVELS = NUM_LEVELS,
  parameter int unsigned KAPPA  = KAPPA_FS,
  parameter int unsigned DELTA  = DELTA_FS,
  parameter int unsigned HALF   = HALF_PERIOD_FS,
  parameter int unsigned MU     = MU_PPM,
  parameter int unsigned DRIFT_PPM [4] = '{3, 10, 0, 7}
) (
  input  logic                 rst_n,
  input  logic [ROWS*COLS-1:0] en,
  output logic [ROWS*COLS-1:0] clk,
  output logic [ROWS*COLS-1:0] mode
);
  timeunit 1fs;
  timeprecision 1fs;

  localparam int unsigned W = 2 * LEVELS;
  localparam int unsigned N = ROWS * COLS;

  typedef enum int {
    DIR_W = 0,
    DIR_E = 1,
    DIR_N = 2,
    DIR_S = 3
  } dir_e;

  // Whether node (r, c) has a neighbour in direction d.
  function automatic bit has_dir(int r, int c, int d);
    case (d)
      DIR_W:   return c > 0;
      DIR_E:   return c < int'(COLS) - 1;
      DIR_N:   return r > 0;
      default: return r < int'(ROWS) - 1;
    endcase
  endfunction

  function automatic int nbr_count(int r, int c);
    int cnt;
    cnt = 0;
    for (int d = 0; d < 4; d++) cnt += int'(has_dir(r, c, d));
    return cnt;
  endfunction

  // Direction of node (r, c)'s k-th neighbour.
  function automatic int dir_of(int r, int c, int k);
    int seen;
    seen = 0;
    for (int d = 0; d < 4; d++) begin
      if (has_dir(r, c, d)) begin
        if (seen == k) return d;
        seen++;
      end
    end
    return 0;
  endfunction

  // Index of the neighbour of node n in direction d.
  function automatic int nbr_index(int n, int d);
    case (d)
      DIR_W:   return n - 1;
      DIR_E:   return n + 1;
      DIR_N:   return n - int'(COLS);
      default: return n + int'(COLS);
    endcase
  endfunction

  // link[n][d]: node n's own taps sampled with the clock of its neighbour in
  // direction d, read by that neighbour's controller.
  logic [W-1:0] link [N][4];

  initial begin
    if (N < 2) $fatal(1, "pals_grid: a network needs at least two nodes");
  end

  for (genvar n = 0; n < int'(N); n++) begin : g_node
    localparam int R  = n / int'(COLS);
    localparam int C  = n % int'(COLS);
    localparam int NB = nbr_count(R, C);

    logic [NB-1:0]        nclk;
    logic [NB-1:0][W-1:0] m_out;
    logic [NB-1:0][W-1:0] m_in;

    for (genvar k = 0; k < NB; k++) begin : g_slot
      localparam int D = dir_of(R, C, k);
      localparam int M = nbr_index(n, D);
      assign nclk[k]     = clk[M];
      assign link[n][D]  = m_out[k];
      assign m_in[k]     = link[M][D ^ 1];  // the neighbour's word towards n
    end

    for (genvar d = 0; d < 4; d++) begin : g_edge
      if (!has_dir(R, C, d)) begin : g_none
        assign link[n][d] = '0;  // grid border: no neighbour on this side
      end
    end

    pals_node #(
      .LEVELS(LEVELS), .NBRS(NB), .KAPPA(KAPPA), .DELTA(DELTA),
      .HALF(HALF), .MU(MU), .DRIFT_PPM(DRIFT_PPM[(R + C) % 4])
    ) u_node (
      .rst_n    (rst_n),
      .en       (en[n]),
      .nbr_clk  (nclk),
      .meas_out (m_out),
      .meas_in  (m_in),
      .clk      (clk[n]),
      .mode     (mode[n])
    );
  end

endmodule
