// tb_ring_osc: checks the behavioural local clock.
//
// Three oscillators run side by side: a nominal one held in slow mode, one
// with +10 ppm drift (the assumed rho) and one whose mode the test toggles.
// Checked against values computed here from the specification:
//   * slow-mode period 500 ps / (1 + drift), fast-mode period divided by a
//     further (1 + mu) with mu = 1e-4, to within 2 fs of rounding;
//   * a mode change made right after a rising clock edge is in force for the
//     very next period (T_osc of at most half a period);
//   * each tap's rising edge sits at its offset from the clock edge:
//     Q^{+i} at -((2i-1)*kappa + delta), Q^{-i} at +((2i-1)*kappa - delta),
//     i.e. -35, -15, +5 and +25 ps;
//   * the clock stops when en falls.
module tb_ring_osc;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;

  int checks = 0, failures = 0;
  int fast_periods = 0, slow_periods = 0;

  logic       en = 1'b0;
  logic       mode_t = 1'b0;
  logic       clk_n, clk_d, clk_t;
  logic [1:0] tp_n, tn_n, tp_d, tn_d, tp_t, tn_t;

  ring_osc                   dut_n (.en, .mode(1'b0),  .clk(clk_n), .tap_pos(tp_n), .tap_neg(tn_n));
  ring_osc #(.DRIFT_PPM(10)) dut_d (.en, .mode(1'b0),  .clk(clk_d), .tap_pos(tp_d), .tap_neg(tn_d));
  ring_osc                   dut_t (.en, .mode(mode_t), .clk(clk_t), .tap_pos(tp_t), .tap_neg(tn_t));

  task automatic check_near(longint got, real exp, real tol, string what);
    checks++;
    if ((real'(got) - exp) > tol || (exp - real'(got)) > tol) begin
      failures++;
      if (failures < 10) $display("%s: got %0d fs expected %0.3f fs", what, got, exp);
    end
  endtask

  // Tap-to-clock offsets on the nominal oscillator.
  longint t_clk_n = -1, t_tp_n [2], t_tn_n [2];
  for (genvar j = 0; j < 2; j++) begin : g_taps
    always @(posedge tp_n[j]) t_tp_n[j] = $time;
    always @(posedge tn_n[j]) begin
      t_tn_n[j] = $time;
      if (t_clk_n >= 0)
        check_near(t_tn_n[j] - t_clk_n, real'((2 * j + 1) * KAPPA_FS - DELTA_FS), 0.0, "tap Q-");
    end
  end
  always @(posedge clk_n) begin
    t_clk_n = $time;
    for (int j = 0; j < 2; j++)
      check_near(t_clk_n - t_tp_n[j], real'((2 * j + 1) * KAPPA_FS + DELTA_FS), 0.0, "tap Q+");
  end

  // Periods.
  localparam real P_NOM  = 2.0 * HALF_PERIOD_FS;
  localparam real MU_R   = MU_PPM * 1.0e-6;
  longint last_n = -1, last_d = -1, last_t = -1;
  logic   mode_at_edge;
  always @(posedge clk_n) begin
    if (last_n >= 0) check_near($time - last_n, P_NOM, 2.0, "slow period");
    last_n = $time;
  end
  always @(posedge clk_d) begin
    if (last_d >= 0) check_near($time - last_d, P_NOM / (1.0 + 10.0e-6), 2.0, "drift period");
    last_d = $time;
  end
  always @(posedge clk_t) begin
    if (last_t >= 0) begin
      if (mode_at_edge) begin
        check_near($time - last_t, P_NOM / (1.0 + MU_R), 2.0, "fast period");
        fast_periods++;
      end else begin
        check_near($time - last_t, P_NOM, 2.0, "slow period (toggled)");
        slow_periods++;
      end
    end
    last_t = $time;
    // Toggle the mode every fourth edge, just after the edge.
    #(1_000);
    if (($time / 1000) % 4 == 0 || $urandom_range(0, 3) == 0) mode_t = ~mode_t;
    mode_at_edge = mode_t;
  end

  initial begin
    #(2_000_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint stop_time;
    int edges_after;
    mode_at_edge = 1'b0;
    #(1_000);
    en = 1'b1;
    #(200 * 500_000);
    en = 1'b0;
    #(2 * 500_000);
    stop_time = $time;
    edges_after = 0;
    fork
      begin
        @(posedge clk_n);
        edges_after++;
      end
      #(5 * 500_000);
    join_any
    disable fork;
    checks++;
    if (edges_after != 0) begin
      failures++;
      $display("clock still running after en fell");
    end
    checks++;
    if (fast_periods == 0 || slow_periods == 0) begin
      failures++;
      $display("mode toggling not exercised: fast %0d slow %0d", fast_periods, slow_periods);
    end
    $display("periods: fast %0d slow %0d", fast_periods, slow_periods);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
