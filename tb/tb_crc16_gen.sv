// tb_crc16_gen: checks the 30-bit parallel CRC against a bit-serial CRC-16
// (0x5B93, start 0) over random 96-bit payloads presented as four words
// (30, 30, 30 and the first 6 bits of word 3), back to back, one word per
// clock. The CRC must be ready in the same cycle as word 3.
module tb_crc16_gen;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk = 0;
  logic [29:0] din;
  word_idx_t   idx;
  logic [15:0] crc;
  int checks = 0, failures = 0;

  always #3125 clk = ~clk;

  crc16_gen dut (.clk, .din, .word_idx(idx), .crc);

  initial begin
    for (int f = 0; f < 200; f++) begin
      bit pay[];
      logic [15:0] exp_crc;
      pay = new[96];
      for (int j = 0; j < 96; j++) pay[j] = 1'($urandom);
      if (f == 0) foreach (pay[j]) pay[j] = 0;
      if (f == 1) foreach (pay[j]) pay[j] = (j == 95);
      exp_crc = crc16(pay, 96);
      for (int w = 0; w < 4; w++) begin
        idx = 2'(w);
        for (int i = 0; i < 30; i++)
          din[i] = (30*w + i < 96) ? pay[30*w+i] : 1'($urandom);
        #1;
        if (w == 3) begin
          checks++;
          if (crc !== exp_crc) begin
            failures++;
            $display("FAIL: frame %0d crc %h expected %h", f, crc, exp_crc);
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
