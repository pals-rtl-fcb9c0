// tb_offset_sampler: checks the measurement flip-flops of one link.
//
// After reset the word must be the aligned-clocks code 1100 (every node then
// starts in slow mode). Then random in-range tap values (the first c taps of
// a lap switched, c random) are applied and clk_v is pulsed: each rising edge must capture the taps in the thermometer order
// {Q^{+2}, Q^{+1}, Q^{-1}, Q^{-2}}, and tap changes between edges must not
// reach the output. A three-level instance checks the general bit order.
module tb_offset_sampler;
  timeunit 1fs;
  timeprecision 1fs;

  int checks = 0, failures = 0;

  logic       clk_v = 1'b0;
  logic       rst_n = 1'b1;
  logic [1:0] tp2, tn2;
  logic [3:0] meas2;
  logic [2:0] tp3, tn3;
  logic [5:0] meas3;

  offset_sampler               dut2 (.clk_v, .rst_n, .tap_pos(tp2), .tap_neg(tn2), .meas(meas2));
  offset_sampler #(.LEVELS(3)) dut3 (.clk_v, .rst_n, .tap_pos(tp3), .tap_neg(tn3), .meas(meas3));

  task automatic check(logic [5:0] got, logic [5:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("%s: got %b expected %b", what, got, exp);
    end
  endtask

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [3:0] e2;
    logic [5:0] e3;
    int c2, c3;
    tp2 = '0; tn2 = '1; tp3 = '0; tn3 = '1;
    #(1_000) rst_n = 1'b0;
    #(10_000);
    check({2'b00, meas2}, 6'b001100, "reset L=2");
    check(meas3, 6'b111000, "reset L=3");
    rst_n = 1'b1;
    #(10_000);
    for (int t = 0; t < 500; t++) begin
      // Taps as seen within the measurement range: the first c taps of the
      // lap (Q^{+l} first, Q^{-l} last) have switched.
      c2 = $urandom_range(0, 4);
      c3 = $urandom_range(0, 6);
      for (int i = 1; i <= 2; i++) begin
        tp2[i-1] = (c2 >= 3 - i);
        tn2[i-1] = (c2 >= 2 + i);
      end
      for (int i = 1; i <= 3; i++) begin
        tp3[i-1] = (c3 >= 4 - i);
        tn3[i-1] = (c3 >= 3 + i);
      end
      // Expected word: Q^{+l}..Q^{+1} then Q^{-1}..Q^{-l}.
      e2 = {tp2[1], tp2[0], tn2[0], tn2[1]};
      e3 = {tp3[2], tp3[1], tp3[0], tn3[0], tn3[1], tn3[2]};
      #(5_000) clk_v = 1'b1;
      #(5_000);
      check({2'b00, meas2}, {2'b00, e2}, "capture L=2");
      check(meas3, e3, "capture L=3");
      // Taps move while the clock is high or low: the word must hold.
      tp2 = 2'($urandom); tn2 = 2'($urandom); tp3 = 3'($urandom); tn3 = 3'($urandom);
      #(5_000) clk_v = 1'b0;
      #(5_000);
      check({2'b00, meas2}, {2'b00, e2}, "hold L=2");
      check(meas3, e3, "hold L=3");
    end
    // Asynchronous reset while the clock is idle.
    rst_n = 1'b0;
    #(1_000);
    check({2'b00, meas2}, 6'b001100, "async reset L=2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
