// tb_scrambler_tmr: checks the triplicated 30-bit parallel scrambler.
//
// Random frames (four words, word 3 with 6 or 22 payload bits) are fed to all
// three copies, alternating data and calibration mode every 20 frames. Every
// payload bit leaving each copy is descrambled by a bit-serial
// x^58 + x^39 + 1 descrambler and must equal the input (after the first 58
// bits, while the descrambler synchronises); non-payload bits of word 3 must
// pass unchanged. Twice an upset is injected into the history of copy 1: the
// other two copies must stay correct and copy 1 must equal copy 0 again after
// one clock (the voters repair it).
module tb_scrambler_tmr;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0;
  logic [29:0] din [3];
  logic [29:0] dout [3];
  word_idx_t   idx [3];
  logic        cal [3];
  int checks = 0, failures = 0, upsets = 0, nbits = 0;
  descrambler ds[3];

  always #3125 clk = ~clk;

  scrambler_tmr dut (.clk, .din, .word_idx(idx), .cal_mode(cal), .dout);

  initial begin
    for (int c = 0; c < 3; c++) ds[c] = new();
    for (int f = 0; f < 80; f++) begin
      bit m;
      m = (f / 20) % 2;
      for (int w = 0; w < 4; w++) begin
        int n;
        logic [29:0] d;
        d = {$urandom, $urandom};
        n = (w == 3) ? (m ? 22 : 6) : 30;
        for (int c = 0; c < 3; c++) begin din[c] = d; idx[c] = 2'(w); cal[c] = m; end
        if ((f == 30 || f == 61) && w == 1) begin
          dut.hist[1] = ~dut.hist[1];
          upsets++;
        end
        #1;
        for (int c = 0; c < 3; c++) begin
          bit skip;
          skip = (c == 1) && (f == 30 || f == 61) && w == 1;
          for (int i = 0; i < 30; i++) begin
            if (i < n) begin
              bit r;
              r = ds[c].push(dout[c][i]);
              if (ds[c].synced() && f > 2 && !skip) begin
                checks++;
                if (r != d[i]) begin
                  failures++;
                  if (failures < 10) $display("FAIL: copy %0d frame %0d word %0d bit %0d", c, f, w, i);
                end
              end
            end else begin
              checks++;
              if (dout[c][i] !== d[i]) begin failures++; $display("FAIL: non-payload bit changed"); end
            end
          end
        end
        @(posedge clk); #1;
        if ((f == 30 || f == 61) && w == 1) begin
          checks++;
          if (dut.hist[1] !== dut.hist[0] || dut.hist[2] !== dut.hist[0]) begin
            failures++; $display("FAIL: upset in copy 1 not repaired after one clock");
          end
        end
      end
    end
    checks++;
    if (upsets != 2) failures++;
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
