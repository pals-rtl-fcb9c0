// tb_pals_line: end-to-end test of the four-node PALS line at its default
// parameters (2 GHz, kappa = 10 ps, delta = 5 ps, mu = 1e-4, drifts up to
// rho = 1e-5).
//
// Two copies of the line run the two start-up scenarios of the 15 nm study:
//   scenario A: node 1 starts 40 ps ahead of nodes 0, 2 and 3 (1000 ns run);
//   scenario B: node 1 starts 40 ps behind them (checked up to 600 ns).
// What is checked, against values computed here from the specification:
//   * every clock period lies between 500 ps / ((1+mu)(1+rho)) and 500 ps
//     (invariant I2: logical rate between 1 and (1+mu)(1+rho));
//   * in every cycle of every node, the mode equals the fast trigger
//     evaluated on the true neighbour offsets L_w - L_v measured from the clock
//     edges (skipped only when an offset is within 0.1 ps of a threshold);
//   * the start-up pattern: in A, nodes 0 and 2 go fast while node 1 and
//     node 3 stay slow, and node 3 goes fast later; in B only node 1 goes fast;
//   * the local skew ends at or below the worst-case bound 3*kappa = 30 ps and
//     the global skew at or below 1.223*kappa*D = 36.69 ps (D = 3).
// Each mechanism (fast mode, slow mode, mode switch, skew reduced below the
// bound) is counted and must occur.
module tb_pals_line;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;
  import pals_tb_pkg::*;

  localparam int N = 4;
  localparam int S = 2;                         // scenarios A and B
  localparam longint PERIOD  = 2 * HALF_PERIOD_FS;
  localparam longint NS      = 1_000_000;       // one nanosecond in fs
  localparam longint END_A   = 1000 * NS;
  localparam longint END_B   = 600 * NS;
  localparam longint WINDOW  = 100 * NS;        // final window for the skew bounds
  localparam longint LOCAL_BOUND  = 3 * KAPPA_FS;
  localparam longint GLOBAL_BOUND = 36_690;

  int checks = 0, failures = 0;

  logic         rst_n = 1'b1;
  logic [N-1:0] en   [S];
  logic [N-1:0] clk  [S];
  logic [N-1:0] mode [S];

  pals_grid u_ahead  (.rst_n(rst_n), .en(en[0]), .clk(clk[0]), .mode(mode[0]));
  pals_grid u_behind (.rst_n(rst_n), .en(en[1]), .clk(clk[1]), .mode(mode[1]));

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0t fs] FAIL %s", $time, msg);
  endtask

  // Monitor state.
  longint last_rise [S][N];
  int     ncyc      [S][N];
  int     fast_cyc  [S][N];
  int     slow_cyc  [S][N];
  int     switches  [S][N];
  logic   prev_mode [S][N];
  longint local_max_start [S];   // largest local skew in the first 20 cycles
  longint local_max_end   [S];   // largest local skew in the final window
  longint global_max_end  [S];
  int     start_pattern   [S];   // cycles showing the expected start-up pattern
  int     mode_checks = 0, mode_skipped = 0;

  initial begin
    for (int s = 0; s < S; s++) begin
      local_max_start[s] = 0; local_max_end[s] = 0; global_max_end[s] = 0;
      start_pattern[s] = 0;
      for (int v = 0; v < N; v++) begin
        last_rise[s][v] = -1; ncyc[s][v] = 0; fast_cyc[s][v] = 0;
        slow_cyc[s][v] = 0; switches[s][v] = 0; prev_mode[s][v] = 1'b0;
      end
    end
  end

  function automatic longint scenario_end(int s);
    return (s == 0) ? END_A : END_B;
  endfunction

  for (genvar gs = 0; gs < S; gs++) begin : g_s
    for (genvar gv = 0; gv < N; gv++) begin : g_v
      // Rate check on every rising edge.
      always @(posedge clk[gs][gv]) begin
        longint p;
        real pmin;
        if (last_rise[gs][gv] >= 0) begin
          p = $time - last_rise[gs][gv];
          pmin = real'(PERIOD) / ((1.0 + MU_PPM * 1.0e-6) * (1.0 + RHO_PPM * 1.0e-6)) - 2.0;
          checks++;
          if (p > PERIOD || real'(p) < pmin)
            fail($sformatf("scenario %0d node %0d period %0d fs", gs, gv, p));
        end
        last_rise[gs][gv] = $time;
        ncyc[gs][gv]++;
      end

      // Half a period after the rising edge every neighbour's matching edge has
      // arrived: compare the mode with the fast trigger on the true offsets.
      always @(negedge clk[gs][gv]) begin
        longint t_v, o, omin, omax, lmax;
        logic near, ready, exp_mode;
        t_v  = last_rise[gs][gv];
        omin = 64'sh7fffffffffffffff;
        omax = -omin;
        near = 1'b0;
        ready = (ncyc[gs][gv] > 2);
        lmax = 0;
        for (int w = gv - 1; w <= gv + 1; w += 2) begin
          if (w >= 0 && w < N) begin
            if (ncyc[gs][w] < 2) ready = 1'b0;
            o = t_v - last_rise[gs][w];           // L_w - L_v
            if (o < omin) omin = o;
            if (o > omax) omax = o;
            if (near_threshold(o, NUM_LEVELS, KAPPA_FS, DELTA_FS, 100)) near = 1'b1;
            if (o > lmax) lmax = o;
            if (-o > lmax) lmax = -o;
          end
        end
        if (ready && $time <= scenario_end(gs)) begin
          exp_mode = fast_trigger(omin, omax, NUM_LEVELS, KAPPA_FS, DELTA_FS);
          if (!near) begin
            checks++;
            mode_checks++;
            if (mode[gs][gv] !== exp_mode)
              fail($sformatf("scenario %0d node %0d mode %b expected %b (omin %0d omax %0d)",
                             gs, gv, mode[gs][gv], exp_mode, omin, omax));
          end else begin
            mode_skipped++;
          end
          if (mode[gs][gv]) fast_cyc[gs][gv]++; else slow_cyc[gs][gv]++;
          if (mode[gs][gv] != prev_mode[gs][gv]) switches[gs][gv]++;
          prev_mode[gs][gv] = mode[gs][gv];
          if (ncyc[gs][gv] < 20 && lmax > local_max_start[gs]) local_max_start[gs] = lmax;
          if ($time > scenario_end(gs) - WINDOW && lmax > local_max_end[gs])
            local_max_end[gs] = lmax;
        end
      end
    end

    // Global skew and start-up pattern, sampled once per cycle of node 0.
    always @(negedge clk[gs][0]) begin
      longint lo, hi;
      logic all_run;
      all_run = 1'b1;
      lo = 64'sh7fffffffffffffff; hi = -lo;
      for (int v = 0; v < N; v++) begin
        if (ncyc[gs][v] < 3) all_run = 1'b0;
        if (last_rise[gs][v] < lo) lo = last_rise[gs][v];
        if (last_rise[gs][v] > hi) hi = last_rise[gs][v];
      end
      if (all_run && $time <= scenario_end(gs)) begin
        if ($time > scenario_end(gs) - WINDOW && hi - lo > global_max_end[gs])
          global_max_end[gs] = hi - lo;
        if (ncyc[gs][0] < 40) begin
          if (gs == 0 && mode[gs] == 4'b0101) start_pattern[gs]++;  // nodes 0,2 fast
          if (gs == 1 && mode[gs] == 4'b0010) start_pattern[gs]++;  // node 1 fast
        end
      end
    end
  end

  initial begin
    #(END_A + 100 * NS);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en[0] = '0;
    en[1] = '0;
    #(1_000) rst_n = 1'b0;
    #(10_000) rst_n = 1'b1;
    // Scenario A: node 1 starts 40 ps before the others; B: 40 ps after.
    #(100_000);
    en[0][1] = 1'b1;
    en[1] = 4'b1101;
    #(40_000);
    en[0] = 4'b1111;
    en[1] = 4'b1111;
    #(END_A - $time + 1);

    for (int s = 0; s < S; s++) begin
      string nm;
      int total_fast, total_slow, total_sw;
      nm = (s == 0) ? "A (node 1 ahead)" : "B (node 1 behind)";
      total_fast = 0; total_slow = 0; total_sw = 0;
      for (int v = 0; v < N; v++) begin
        total_fast += fast_cyc[s][v];
        total_slow += slow_cyc[s][v];
        total_sw   += switches[s][v];
        $display("scenario %s node %0d: %0d fast cycles, %0d slow cycles, %0d mode switches",
                 nm, v, fast_cyc[s][v], slow_cyc[s][v], switches[s][v]);
      end
      $display("scenario %s: local skew first cycles %0d fs, final %0d fs; final global skew %0d fs",
               nm, local_max_start[s], local_max_end[s], global_max_end[s]);
      checks++;
      if (local_max_start[s] < 39_000) fail($sformatf("scenario %s did not start with 40 ps skew", nm));
      checks++;
      if (local_max_end[s] > LOCAL_BOUND) fail($sformatf("scenario %s final local skew above 3 kappa", nm));
      checks++;
      if (global_max_end[s] > GLOBAL_BOUND) fail($sformatf("scenario %s final global skew above bound", nm));
      // Mechanisms: fast mode, slow mode, mode switches, start-up pattern.
      checks++;
      if (total_fast == 0) fail($sformatf("scenario %s: fast mode never used", nm));
      checks++;
      if (total_slow == 0) fail($sformatf("scenario %s: slow mode never used", nm));
      checks++;
      if (total_sw == 0) fail($sformatf("scenario %s: no mode switch", nm));
      checks++;
      if (start_pattern[s] == 0) fail($sformatf("scenario %s: start-up mode pattern not seen", nm));
    end
    // Scenario A: node 3 only sees node 2, so it goes fast later.
    checks++;
    if (fast_cyc[0][3] == 0) fail("scenario A: node 3 never caught up in fast mode");
    // Scenario B: nodes 0 and 2 only wait for node 1.
    checks++;
    if (fast_cyc[1][1] == 0) fail("scenario B: node 1 never ran fast");
    $display("mode checks %0d, skipped near a threshold %0d", mode_checks, mode_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
