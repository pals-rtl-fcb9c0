// tb_ft_mode: exhaustive check of the fast-trigger logic.
//
// Sweeps O_min and O_max over -90 ps .. +90 ps in 1 ps steps (offset by half
// a picosecond so that no value sits on a threshold), forms the extreme
// thermometer words the min/max stage would deliver, and compares the mode
// output with the fast trigger evaluated directly from Definition FT1/FT2.
// Runs at the default l = 1 (two levels) and at three levels.
module tb_ft_mode;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;
  import pals_tb_pkg::*;

  int checks = 0, failures = 0;
  int fast_seen = 0, slow_seen = 0;

  logic [3:0] q2;
  logic       mode2;
  logic [5:0] q3;
  logic       mode3;

  ft_mode              dut2 (.qext(q2), .mode(mode2));
  ft_mode #(.LEVELS(3)) dut3 (.qext(q3), .mode(mode3));

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [15:0] cmin, cmax;
    logic exp2, exp3;
    longint omin, omax;
    for (longint a = -90; a <= 90; a++) begin
      for (longint b = -90; b <= 90; b++) begin
        omin = a * 1000 + 500;
        omax = b * 1000 + 500;
        cmin = code_of(omin, 2, KAPPA_FS, DELTA_FS);
        cmax = code_of(omax, 2, KAPPA_FS, DELTA_FS);
        q2   = {cmin[3:2], cmax[1:0]};
        cmin = code_of(omin, 3, KAPPA_FS, DELTA_FS);
        cmax = code_of(omax, 3, KAPPA_FS, DELTA_FS);
        q3   = {cmin[5:3], cmax[2:0]};
        #1;
        exp2 = fast_trigger(omin, omax, 2, KAPPA_FS, DELTA_FS);
        exp3 = fast_trigger(omin, omax, 3, KAPPA_FS, DELTA_FS);
        checks += 2;
        if (mode2 !== exp2) begin
          failures++;
          if (failures < 10) $display("L=2 omin=%0d omax=%0d mode=%b exp=%b", omin, omax, mode2, exp2);
        end
        if (mode3 !== exp3) begin
          failures++;
          if (failures < 10) $display("L=3 omin=%0d omax=%0d mode=%b exp=%b", omin, omax, mode3, exp3);
        end
        if (exp2) fast_seen++; else slow_seen++;
      end
    end
    checks++;
    if (fast_seen == 0 || slow_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
