// tb_pals_node: checks one inner PALS node (two neighbours) in isolation.
//
// The testbench plays both neighbours:
//   * it drives their clocks, each a fixed offset d_k away from the node's
//     predicted next edge (d_k redrawn every 20 cycles, +-90 ps), and checks
//     that the flip-flops inside the node report the node's offset seen by
//     that neighbour, L_node - L_nbr, as the thermometer code of the
//     thresholds -+(2i-1)*kappa - delta;
//   * right after each rising edge of the node clock it drives the
//     neighbours' measurements of the node (meas_in) with the codes of random
//     offsets, checks mode against the fast trigger of those offsets, and
//     checks that the following clock period is 500 ps in slow mode and
//     500 ps / (1 + mu) in fast mode.
module tb_pals_node;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;
  import pals_tb_pkg::*;

  localparam longint P_SLOW = 2 * HALF_PERIOD_FS;
  localparam real    P_FAST = real'(P_SLOW) / (1.0 + MU_PPM * 1.0e-6);

  int checks = 0, failures = 0;
  int n_fast = 0, n_slow = 0, n_meas = 0;

  logic            rst_n = 1'b1;
  logic            en = 1'b0;
  logic [1:0]      nbr_clk = 2'b00;
  logic [1:0][3:0] meas_out;
  logic [1:0][3:0] meas_in;
  logic            clk, mode;

  pals_node dut (
    .rst_n, .en, .nbr_clk, .meas_out, .meas_in, .clk, .mode
  );

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0t fs] FAIL %s", $time, msg);
  endtask

  longint r_last = -1, r_prev = -1;
  longint d [2];
  int     cyc = 0;
  logic   mode_exp_prev = 1'b0;

  initial begin
    #(2_000_000_000);
    fail("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Node clock: drive meas_in, check mode and the period, schedule the
  // neighbours' clock edges.
  always @(posedge clk) begin
    longint o0, o1, omin, omax;
    logic [15:0] c;
    logic exp_mode;
    if (r_last >= 0 && cyc > 2) begin
      checks++;
      if (mode_exp_prev) begin
        n_fast++;
        if (real'($time - r_last) > P_FAST + 2.0 || real'($time - r_last) < P_FAST - 2.0)
          fail($sformatf("fast period %0d fs", $time - r_last));
      end else begin
        n_slow++;
        if ($time - r_last > P_SLOW + 2 || $time - r_last < P_SLOW - 2)
          fail($sformatf("slow period %0d fs", $time - r_last));
      end
    end
    r_prev = r_last;
    r_last = $time;
    cyc++;
    if (cyc % 20 == 1) begin
      d[0] = longint'($urandom_range(0, 180)) * 1000 - 90_000 + 500;
      d[1] = longint'($urandom_range(0, 180)) * 1000 - 90_000 + 500;
    end
    #(1_000);
    o0 = longint'($urandom_range(0, 80)) * 1000 - 40_000 + 500;
    o1 = longint'($urandom_range(0, 80)) * 1000 - 40_000 + 500;
    c = code_of(o0, NUM_LEVELS, KAPPA_FS, DELTA_FS); meas_in[0] = c[3:0];
    c = code_of(o1, NUM_LEVELS, KAPPA_FS, DELTA_FS); meas_in[1] = c[3:0];
    omin = (o0 < o1) ? o0 : o1;
    omax = (o0 < o1) ? o1 : o0;
    exp_mode = fast_trigger(omin, omax, NUM_LEVELS, KAPPA_FS, DELTA_FS);
    #(1_000);
    checks++;
    if (mode !== exp_mode) fail($sformatf("mode %b expected %b", mode, exp_mode));
    mode_exp_prev = exp_mode;
    // Neighbour k's next rising edge: d_k after the node's predicted next edge.
    for (int k = 0; k < 2; k++) begin
      automatic int kk = k;
      automatic longint at = longint'(exp_mode ? P_FAST : real'(P_SLOW)) + d[kk] - 2_000;
      fork
        begin
          #(at) nbr_clk[kk] = 1'b1;
          #(HALF_PERIOD_FS) nbr_clk[kk] = 1'b0;
        end
      join_none
    end
  end

  // Measurements taken inside the node with the neighbours' clocks.
  for (genvar k = 0; k < 2; k++) begin : g_chk
    always @(posedge nbr_clk[k]) begin
      longint s, r, o;
      logic [15:0] c;
      s = $time;
      #(260_000);
      // The node edge nearest to the neighbour's edge.
      r = r_last;
      if ((s - r_prev) * (s - r_prev) < (s - r) * (s - r)) r = r_prev;
      o = s - r;                         // L_node - L_nbr
      if (r_prev >= 0 && !near_threshold(o, NUM_LEVELS, KAPPA_FS, DELTA_FS, 100)) begin
        c = code_of(o, NUM_LEVELS, KAPPA_FS, DELTA_FS);
        checks++;
        n_meas++;
        if (meas_out[k] !== c[3:0])
          fail($sformatf("link %0d offset %0d fs: word %b expected %b", k, o, meas_out[k], c[3:0]));
      end
    end
  end

  initial begin
    meas_in = '0;
    #(1_000) rst_n = 1'b0;
    #(1_000);
    checks++;
    if (meas_out !== {2{4'b1100}}) fail("reset value of the measurement words");
    rst_n = 1'b1;
    #(10_000) en = 1'b1;
    #(400 * P_SLOW);
    checks++;
    if (n_fast == 0 || n_slow == 0 || n_meas < 100) fail("fast, slow or measurement cases not exercised");
    $display("periods fast %0d slow %0d, link measurements %0d", n_fast, n_slow, n_meas);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
