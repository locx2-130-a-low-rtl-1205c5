// tb_serializer30: the 30:1 serializer with clocks from the PLL model.
//
// A random 30-bit word is presented every 160 MHz cycle. The serial output is
// sampled 100 ps after every rising edge of q0, q1 and q2 (the middle of each
// 208 ps bit). After the first words, the stream must be the words back to
// back, bit 0 first, at a fixed offset: every bit of every word is checked.
module tb_serializer30;
  timeunit 1ps; timeprecision 1fs;

  logic ref_clk, q0, q1, q2, clk160, tx;
  logic [29:0] din;
  int checks = 0, failures = 0;

  initial begin ref_clk = 0; forever #12500 ref_clk = ~ref_clk; end

  pll u_pll (.ref_clk, .q0, .q1, .q2, .clk160);
  serializer30 dut (.clk160, .din, .q0, .q1, .q2, .tx);

  logic [29:0] words[$];
  bit rx[$];
  bit run = 0;

  always @(negedge clk160) if (run) begin
    din = 30'($urandom);
    words.push_back(din);
  end
  always @(posedge q0 or posedge q1 or posedge q2) begin
    #100;
    if (run) rx.push_back(tx);
  end

  initial begin
    int o;
    din = '0;
    repeat (3) @(posedge ref_clk);
    @(posedge clk160);
    run = 1;
    repeat (60) @(posedge clk160);
    run = 0;
    // find where word 2 starts in the stream
    o = -1;
    for (int s = 0; s < 200 && o < 0; s++) begin
      bit m;
      m = 1;
      for (int i = 2; i < 7; i++)
        for (int j = 0; j < 30; j++)
          if (rx[s + 30 * (i - 2) + j] != words[i][j]) m = 0;
      if (m) o = s;
    end
    checks++;
    if (o < 0) begin
      failures++; $display("FAIL: word stream not found in serial output");
    end else
      for (int i = 2; 30 * (i - 2) + o + 30 <= rx.size() && i < words.size(); i++)
        for (int j = 0; j < 30; j++) begin
          checks++;
          if (rx[o + 30 * (i - 2) + j] != words[i][j]) begin
            failures++;
            if (failures < 20) $display("FAIL: word %0d bit %0d", i, j);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(100_000_000.0);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
