// tb_gcs_controller: random check of the node controller.
//
// Each trial draws one offset per neighbour (L_w - L_v, up to +-90 ps), feeds
// the thermometer words and compares MODE with the OffsetGCS fast trigger
// evaluated on the numerical minimum and maximum of the offsets. Runs with
// two neighbours (inner node of a line) and four (grid node), and counts
// both outcomes so that neither mode goes untested.
module tb_gcs_controller;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;
  import pals_tb_pkg::*;

  int checks = 0, failures = 0;
  int n_fast = 0, n_slow = 0;

  logic [1:0][3:0] m2;
  logic            mode2;
  logic [3:0][3:0] m4;
  logic            mode4;

  gcs_controller                dut2 (.meas(m2), .mode(mode2));
  gcs_controller #(.NBRS(4))    dut4 (.meas(m4), .mode(mode4));

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint o;
    longint omin2, omax2, omin4, omax4;
    logic [15:0] c;
    logic e2, e4;
    for (int t = 0; t < 5000; t++) begin
      omin2 = 64'sh7fffffffffffffff; omax2 = -omin2;
      omin4 = omin2;                 omax4 = omax2;
      for (int k = 0; k < 4; k++) begin
        // Mostly small offsets, where the decision is interesting.
        o = longint'($urandom_range(0, 80)) * 1000 - 40_000 + 500;
        if (t % 4 == 0) o = o * 2;
        c = code_of(o, 2, KAPPA_FS, DELTA_FS);
        m4[k] = c[3:0];
        if (k < 2) begin
          m2[k] = c[3:0];
          if (o < omin2) omin2 = o;
          if (o > omax2) omax2 = o;
        end
        if (o < omin4) omin4 = o;
        if (o > omax4) omax4 = o;
      end
      #1;
      e2 = fast_trigger(omin2, omax2, 2, KAPPA_FS, DELTA_FS);
      e4 = fast_trigger(omin4, omax4, 2, KAPPA_FS, DELTA_FS);
      checks += 2;
      if (mode2 !== e2) begin
        failures++;
        if (failures < 10) $display("2 nbrs: omin=%0d omax=%0d mode=%b exp=%b", omin2, omax2, mode2, e2);
      end
      if (mode4 !== e4) begin
        failures++;
        if (failures < 10) $display("4 nbrs: omin=%0d omax=%0d mode=%b exp=%b", omin4, omax4, mode4, e4);
      end
      if (e2) n_fast++; else n_slow++;
    end
    checks++;
    if (n_fast == 0 || n_slow == 0) failures++;
    $display("fast decisions %0d, slow decisions %0d", n_fast, n_slow);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
