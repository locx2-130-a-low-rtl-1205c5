// tb_fifo_rd_ctrl: the read address must count 0,1,2,3 continuously and
// restart at 0 on the third 160 MHz edge after a rising edge of `start`
// (two synchroniser stages, then the address register; READ_DELAY = 0).
// start rises at random phases, mostly every 25 ns, sometimes after a jump.
module tb_fifo_rd_ctrl;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, rst_n = 0, start = 0;
  word_idx_t idx;
  int checks = 0, failures = 0, restarts = 0;
  int edge_no = 0, zero_at = -1, exp_idx = 0;

  always #3125 clk = ~clk;

  fifo_rd_ctrl dut (.clk, .rst_n, .start, .word_idx(idx));

  // reference: count edges, note the edge at which the address must be 0
  always @(posedge clk) begin
    edge_no++;
    #1;
    if (rst_n) begin
      exp_idx = (edge_no == zero_at) ? 0 : (exp_idx + 1) % 4;
      if (zero_at > 0 && edge_no >= zero_at) begin
        checks++;
        if (idx !== 2'(exp_idx)) begin
          failures++; $display("FAIL: edge %0d idx %0d expected %0d", edge_no, idx, exp_idx);
        end
        if (edge_no == zero_at) restarts++;
      end
    end
  end

  initial begin
    #20000 rst_n = 1;
    #1000;
    for (int f = 0; f < 60; f++) begin
      real ph;
      int  e0;
      ph = (f % 10 == 9) ? 9000.0 + ($urandom % 3000) : 0.0;
      #(ph + 500.0 + ($urandom % 50));
      // start rises now, strictly between edges: due on the 3rd edge after
      e0 = edge_no;
      if ($realtime - $floor($realtime / 6250.0) * 6250.0 < 10.0) #20;
      start = 1;
      zero_at = edge_no + 3;
      #12500 start = 0;
      #(12500 - 550.0);
    end
    checks++;
    if (restarts < 50) begin failures++; $display("FAIL: only %0d restarts", restarts); end
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
