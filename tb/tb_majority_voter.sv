// tb_majority_voter: random words, with one of the three inputs (rotating)
// replaced by garbage. The inputs change just after each rising clock edge,
// as the frame-builder registers do. While clk is high the output must still
// hold the previous word (latch closed); after the falling edge it must equal
// the uncorrupted new word (latch open); and it must not change while clk is
// low and the inputs are stable.
module tb_majority_voter;
  timeunit 1ps; timeprecision 1fs;

  logic clk;
  logic [29:0] a, b, c, y, good, prev;
  int checks = 0, failures = 0;

  initial begin clk = 0; forever #3125 clk = ~clk; end

  majority_voter dut (.clk, .a, .b, .c, .y);

  initial begin
    a = '0; b = '0; c = '0;
    @(negedge clk); #1;
    prev = '0;
    for (int t = 0; t < 300; t++) begin
      @(posedge clk); #200;
      good = 30'($urandom);
      a = good; b = good; c = good;
      case (t % 4)
        0: a = 30'($urandom);
        1: b = 30'($urandom);
        2: c = 30'($urandom);
        default: ;
      endcase
      #1000;
      checks++;
      if (y !== prev) begin failures++; $display("FAIL: t=%0d latch not holding while clk high", t); end
      @(negedge clk); #1;
      checks++;
      if (y !== good) begin failures++; $display("FAIL: t=%0d y=%h exp %h", t, y, good); end
      #2000;
      checks++;
      if (y !== good) begin failures++; $display("FAIL: t=%0d y changed while clk low", t); end
      prev = good;
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
