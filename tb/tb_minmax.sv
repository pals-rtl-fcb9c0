// tb_minmax: random check of the min/max reduction over neighbours.
//
// Each trial draws an offset for every neighbour, builds the thermometer
// words, and compares the output with the words of the numerical minimum
// (positive half) and maximum (negative half) of the offsets. Also drives
// arbitrary, non-thermometer words and checks each output bit against its
// definition (all neighbours set / any neighbour set). Runs with 2 and 4
// neighbours and with two and three levels.
module tb_minmax;
  timeunit 1fs;
  timeprecision 1fs;
  import pals_pkg::*;
  import pals_tb_pkg::*;

  int checks = 0, failures = 0;

  logic [1:0][3:0] m2;
  logic [3:0]      q2;
  logic [3:0][5:0] m4;
  logic [5:0]      q4;

  minmax                           dut2 (.meas(m2), .qext(q2));
  minmax #(.LEVELS(3), .NBRS(4))   dut4 (.meas(m4), .qext(q4));

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd_offset();
    return longint'($urandom_range(0, 180)) * 1000 - 90_000 + 500;
  endfunction

  initial begin
    longint o [4];
    longint omin, omax;
    logic [15:0] cmin, cmax, c;
    logic [5:0] e4;
    for (int t = 0; t < 2000; t++) begin
      // Two neighbours, two levels.
      omin = 64'sh7fffffffffffffff; omax = -64'sh7fffffffffffffff;
      for (int k = 0; k < 2; k++) begin
        o[k] = rnd_offset();
        c = code_of(o[k], 2, KAPPA_FS, DELTA_FS);
        m2[k] = c[3:0];
        if (o[k] < omin) omin = o[k];
        if (o[k] > omax) omax = o[k];
      end
      // Four neighbours, three levels.
      for (int k = 0; k < 4; k++) begin
        o[k] = rnd_offset();
        c = code_of(o[k], 3, KAPPA_FS, DELTA_FS);
        m4[k] = c[5:0];
      end
      #1;
      cmin = code_of(omin, 2, KAPPA_FS, DELTA_FS);
      cmax = code_of(omax, 2, KAPPA_FS, DELTA_FS);
      checks++;
      if (q2 !== {cmin[3:2], cmax[1:0]}) begin
        failures++;
        if (failures < 10) $display("2x2: omin=%0d omax=%0d q=%b", omin, omax, q2);
      end
      omin = o[0]; omax = o[0];
      for (int k = 1; k < 4; k++) begin
        if (o[k] < omin) omin = o[k];
        if (o[k] > omax) omax = o[k];
      end
      cmin = code_of(omin, 3, KAPPA_FS, DELTA_FS);
      cmax = code_of(omax, 3, KAPPA_FS, DELTA_FS);
      checks++;
      if (q4 !== {cmin[5:3], cmax[2:0]}) begin
        failures++;
        if (failures < 10) $display("4x3: omin=%0d omax=%0d q=%b", omin, omax, q4);
      end
      // Arbitrary words: positive bits need every neighbour, negative bits any.
      for (int k = 0; k < 4; k++) m4[k] = 6'($urandom);
      #1;
      for (int b = 0; b < 6; b++) begin
        int ones;
        ones = 0;
        for (int k = 0; k < 4; k++) ones += int'(m4[k][b]);
        e4[b] = (b >= 3) ? (ones == 4) : (ones > 0);
      end
      checks++;
      if (q4 !== e4) begin
        failures++;
        if (failures < 10) $display("raw: q=%b exp=%b", q4, e4);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
