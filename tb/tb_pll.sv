// tb_pll: per 25 ns reference period the model must give 4 clk160 and 40 q0
// rising edges; q1 must rise 208.33 ps after q0 and q2 208.33 ps after q1;
// exactly one phase must be high at any time; clk160 must rise with the
// reference edge.
module tb_pll;
  timeunit 1ps; timeprecision 1fs;

  logic ref_clk = 0, q0, q1, q2, clk160;
  int n0 = 0, n160 = 0, checks = 0, failures = 0;
  realtime t0, t1, t160;

  always #12500 ref_clk = ~ref_clk;

  pll dut (.ref_clk, .q0, .q1, .q2, .clk160);

  always @(posedge q0) begin n0++; t0 = $realtime; end
  always @(posedge clk160) begin n160++; t160 = $realtime; end
  always @(posedge q1) begin
    t1 = $realtime;
    if (n0 > 0) begin
      checks++;
      if (t1 - t0 < 208.0 || t1 - t0 > 208.7) begin failures++; $display("FAIL: q0->q1 %f", t1 - t0); end
    end
  end
  always @(posedge q2) if (n0 > 0) begin
    checks++;
    if ($realtime - t1 < 208.0 || $realtime - t1 > 208.7) begin
      failures++; $display("FAIL: q1->q2 %f", $realtime - t1);
    end
  end

  initial begin
    @(posedge ref_clk); #1;
    for (int r = 0; r < 20; r++) begin
      int a0, a160;
      a0 = n0; a160 = n160;
      checks++;
      if (t160 > $realtime || $realtime - t160 > 1.5) begin
        failures++; $display("FAIL: clk160 not aligned to reference edge");
      end
      for (int i = 0; i < 97; i++) begin
        #257;
        checks++;
        if (int'(q0) + int'(q1) + int'(q2) != 1) begin failures++; $display("FAIL: phases overlap"); end
      end
      @(posedge ref_clk); #1;
      checks++;
      if (n0 - a0 != 40 || n160 - a160 != 4) begin
        failures++; $display("FAIL: %0d q0 and %0d clk160 edges per reference", n0 - a0, n160 - a160);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
