// tb_pals_grid: the grid operating point, mu = 1e-3, on a 16 x 16 grid.
// A grid of side W has diameter D = 2W - 2; with mu = 1e-3 and rho = 1e-5
// the worst-case local skew is (2*ceil(log_100(1.223*D)) + 1)*kappa, which is
// 3*kappa = 30 ps for every W up to 41, the 32 x 32 grid (D = 62) included.
// Simulation time grows with the square of the node count here, so the test
// uses W = 16 (D = 30, global skew bound 1.223*kappa*D = 367 ps); set ROWS and
// COLS to 32 for the full grid.
//
// The nodes start along a phase gradient: node (r, c) is enabled
// 4 ps * (r + c) plus a random 0..8 ps after node (0, 0), so the local skew
// starts at up to 12 ps and the global skew at about 130 ps. Links more than kappa - delta = 5 ps apart must close while no
// pair of neighbours drifts apart by more than the local bound. The rule
// does not flatten a gradient below kappa - delta per link: such a grid is
// already within its bounds, so the global skew need not shrink.
//
// For every rising-edge index k (the k-th rising edge of each node's clock)
// the testbench takes the edge times of all nodes and checks:
//   - local skew, the largest |t_a(k) - t_b(k)| over all links, <= 30 ps;
//   - each node's period within [P/((1+mu)(1+rho)), P], P = 500 ps.
// At the end it checks that the global skew is within 1.223*kappa*D and has not
// grown (beyond one kappa - delta of slack), and that fast mode and mode
// switches occurred.
module tb_pals_grid;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;

  localparam int     ROWS   = 16;
  localparam int     COLS   = 16;
  localparam int     N      = ROWS * COLS;
  localparam int     MU     = 1000;               // mu = 1e-3 for the grid
  localparam longint PERIOD = 2 * HALF_PERIOD_FS;
  localparam int     EDGES  = 3000;               // rising edges checked
  localparam int     DEPTH  = 8;                  // edge-time ring buffer
  localparam longint LOCAL_BOUND  = 3 * KAPPA_FS;
  localparam longint GLOBAL_BOUND = 1223 * KAPPA_FS * (ROWS + COLS - 2) / 1000;
  // Shortest period: fast mode of the fastest oscillator, less rounding.
  localparam longint P_MIN =
      (PERIOD * 1_000_000 / (1_000_000 + MU)) * 1_000_000 / (1_000_000 + RHO_PPM) - 4;

  int checks = 0, failures = 0;

  logic         rst_n = 1'b1;
  logic [N-1:0] en    = '0;
  logic [N-1:0] clk;
  logic [N-1:0] mode;

  pals_grid #(.ROWS(ROWS), .COLS(COLS), .MU(MU)) dut (
    .rst_n(rst_n), .en(en), .clk(clk), .mode(mode)
  );

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0t fs] FAIL %s", $time, msg);
  endtask

  // Per-node edge monitor: rise[n][k % DEPTH] is the time of node n's k-th
  // rising edge; done[k % DEPTH] counts the nodes that have reached edge k.
  longint rise  [N][DEPTH];
  int     done  [DEPTH];
  int     fast_edges = 0;
  int     switches   = 0;

  for (genvar n = 0; n < N; n++) begin : g_mon
    int   cnt = 0;
    logic last_mode = 1'b0;
    always @(posedge clk[n]) begin
      rise[n][cnt % DEPTH] = $time;
      if (cnt > 0) begin
        longint p;
        p = $time - rise[n][(cnt - 1) % DEPTH];
        checks++;
        if (p < P_MIN || p > PERIOD + 4)
          fail($sformatf("node %0d period %0d fs outside [%0d, %0d]", n, p, P_MIN, PERIOD + 4));
      end
      if (mode[n]) fast_edges++;
      if (cnt > 0 && mode[n] != last_mode) switches++;
      last_mode = mode[n];
      done[cnt % DEPTH]++;
      cnt++;
    end
  end

  longint global_first, global_last, local_worst;

  // Largest local and global skew at edge index k.
  task automatic skews(int k, output longint loc, output longint glob);
    longint lo, hi, d;
    int s;
    s = k % DEPTH;
    loc = 0;
    lo = rise[0][s];
    hi = rise[0][s];
    for (int n = 0; n < N; n++) begin
      if (rise[n][s] < lo) lo = rise[n][s];
      if (rise[n][s] > hi) hi = rise[n][s];
      if (n % COLS != COLS - 1) begin
        d = rise[n][s] - rise[n+1][s];
        if (d < 0) d = -d;
        if (d > loc) loc = d;
      end
      if (n + COLS < N) begin
        d = rise[n][s] - rise[n+COLS][s];
        if (d < 0) d = -d;
        if (d > loc) loc = d;
      end
    end
    glob = hi - lo;
  endtask

  initial begin
    longint off;
    longint loc, glob;
    for (int s = 0; s < DEPTH; s++) done[s] = 0;
    local_worst = 0;
    #1000;
    rst_n = 1'b0;
    #1000;
    rst_n = 1'b1;
    #1000;
    for (int n = 0; n < N; n++) begin
      off = 4_000 * longint'(n / COLS + n % COLS) + longint'($urandom_range(0, 8_000));
      fork
        automatic int     m = n;
        automatic longint t = off;
        begin
          #(t);
          en[m] = 1'b1;
        end
      join_none
    end
    for (int k = 0; k < EDGES; k++) begin
      wait (done[k % DEPTH] == N);
      skews(k, loc, glob);
      done[k % DEPTH] = 0;
      if (k == 0) global_first = glob;
      global_last = glob;
      if (loc > local_worst) local_worst = loc;
      checks++;
      if (loc > LOCAL_BOUND)
        fail($sformatf("edge %0d: local skew %0d fs > %0d fs", k, loc, LOCAL_BOUND));
      if (k % 500 == 0)
        $display("edge %0d: local skew %0d fs, global skew %0d fs", k, loc, glob);
    end
    $display("%0dx%0d grid, mu = %0d ppm: worst local skew %0d fs; global skew %0d fs -> %0d fs",
             ROWS, COLS, MU, local_worst, global_first, global_last);
    $display("fast node-cycles %0d, mode switches %0d", fast_edges, switches);
    checks++;
    if (global_last > GLOBAL_BOUND) fail("final global skew above the bound");
    checks++;
    if (global_last > global_first + KAPPA_FS - DELTA_FS) fail("global skew grew");
    checks++;
    if (fast_edges == 0) fail("no node ever ran fast");
    checks++;
    if (switches == 0) fail("no mode switch");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Watchdog: the edges above take EDGES periods plus the start-up.
  initial begin
    #(longint'(EDGES + 20) * PERIOD);
    failures++;
    $display("watchdog: edge checks did not complete");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
