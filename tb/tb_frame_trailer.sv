// tb_frame_trailer: checks the 8-bit trailer over 70 frames.
//
// The word index cycles 0..3; bcid_reset is held for a few frames, then
// released. In every frame the trailer seen at word 3 must start with
// 1,0,1,0 and carry the next two bits of a bit-serial PRBS 2^5-1 (x^5+x^3+1)
// and PRBS 2^7-1 (x^7+x^6+1), both restarted from all ones by the reset.
// Frame 40 repeats the reset mid-run.
module tb_frame_trailer;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0, rst = 1;
  word_idx_t idx = 0;
  logic [7:0] trl;
  int checks = 0, failures = 0;
  prbs g5, g7;

  always #3125 clk = ~clk;

  frame_trailer dut (.clk, .bcid_reset(rst), .word_idx(idx), .trailer(trl));

  initial begin
    for (int f = 0; f < 70; f++) begin
      if (f == 3 || f == 41) begin rst = 0; g5 = new(5, 3); g7 = new(7, 6); end
      if (f == 40) rst = 1;
      for (int w = 0; w < 4; w++) begin
        idx = 2'(w);
        #1;
        if (w == 3 && !rst) begin
          bit e[8];
          e[0] = 1; e[1] = 0; e[2] = 1; e[3] = 0;
          e[4] = g5.next(); e[5] = g5.next();
          e[6] = g7.next(); e[7] = g7.next();
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (trl[i] !== e[i]) begin
              failures++; $display("FAIL: frame %0d trailer bit %0d = %b", f, i, trl[i]);
            end
          end
        end
        @(posedge clk); #1;
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
