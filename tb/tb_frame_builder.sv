// tb_frame_builder: random scrambled words, CRCs and trailers in both modes.
// One clock later dout must hold: the scrambled word (words 0-2); or for
// word 3, bit 0 first, 6 payload bits, CRC[15..0], trailer[0..7] (data mode)
// or 22 payload bits, trailer[0..7] (calibration mode).
module tb_frame_builder;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, cal;
  word_idx_t idx, idx_o;
  logic [29:0] scr, dout, exp_w;
  logic [15:0] crc;
  logic [7:0]  trl;
  int checks = 0, failures = 0;

  always #3125 clk = ~clk;

  frame_builder dut (.clk, .cal_mode(cal), .word_idx(idx), .scr, .crc, .trailer(trl),
                     .dout, .word_idx_o(idx_o));

  initial begin
    for (int t = 0; t < 400; t++) begin
      cal = t[5]; idx = 2'(t); scr = 30'($urandom); crc = 16'($urandom); trl = 8'($urandom);
      for (int i = 0; i < 30; i++) begin
        if (idx != 3)      exp_w[i] = scr[i];
        else if (cal)      exp_w[i] = (i < 22) ? scr[i] : trl[i-22];
        else               exp_w[i] = (i < 6) ? scr[i] : (i < 22) ? crc[15-(i-6)] : trl[i-22];
      end
      @(posedge clk); #1;
      checks++;
      if (dout !== exp_w || idx_o !== idx) begin
        failures++; $display("FAIL: t=%0d idx=%0d cal=%0d got %h exp %h", t, idx, cal, dout, exp_w);
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
