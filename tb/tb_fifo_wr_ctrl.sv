// tb_fifo_wr_ctrl: DDR capture and write-enable sequence of one write
// controller, for four formats: 16 raw bits keeping 14 (Nevis calibration) or
// 12 (Nevis data), and 12 or 14 raw bits keeping all (ADS5272/ADS5294).
//
// The testbench drives SCK with its edges in the middle of the bits and an
// aligned FCK rising with bit 0. Just before every SCK edge it checks that
// exactly the expected write enable is active (we[2i] during the SCK period
// after the rising edge that caught bit 2i, we[2i+1] half a period later, none
// for dumped bits) and that the even/odd register holds that bit.
module tb_fifo_wr_ctrl;
  timeunit 1ps; timeprecision 1fs;

  logic sck, fck, cal;
  logic [3:0] data = 0, even, odd;
  logic [13:0] we;
  int checks = 0, failures = 0;

  fifo_wr_ctrl dut (.sck, .fck, .data, .cal_mode(cal), .data_even(even), .data_odd(odd), .we);

  task automatic run(int nb, bit c, int frames);
    int keep;
    real tb;
    logic [3:0] prev;
    int prev_pos;
    keep = c ? 14 : 12;
    tb = 25000.0 / nb;
    cal = c;
    #1;
    prev_pos = -1;
    for (int f = 0; f < frames; f++)
      for (int k = 0; k < nb; k++) begin
        logic [13:0] exp_we;
        logic [3:0] d;
        d = 4'($urandom);
        data = d;
        fck = (k < nb / 2);
        #(tb / 2.0);
        // check the bit captured at the previous edge
        exp_we = '0;
        if (prev_pos >= 0 && prev_pos < keep) exp_we[prev_pos] = 1'b1;
        if (f > 0) begin
          logic [6:0] mask_e, mask_o, exp_e, exp_o;
          for (int i = 0; i < 7; i++) begin
            mask_e[i] = we[2*i];   mask_o[i] = we[2*i+1];
            exp_e[i]  = exp_we[2*i]; exp_o[i] = exp_we[2*i+1];
          end
          checks++;
          if ((k % 2 == 1) ? (mask_e !== exp_e) : (mask_o !== exp_o)) begin
            failures++;
            $display("FAIL: nb=%0d cal=%0d f=%0d k=%0d we=%b expected %b", nb, c, f, k, we, exp_we);
          end
          if (prev_pos >= 0 && prev_pos < keep) begin
            checks++;
            if (((k % 2 == 1) ? even : odd) !== prev) begin
              failures++; $display("FAIL: nb=%0d f=%0d k=%0d captured data", nb, f, k);
            end
          end
        end
        sck = (k % 2 == 0);
        prev = d;
        prev_pos = k;
        #(tb / 2.0);
      end
  endtask

  initial begin
    sck = 0; fck = 0;
    run(16, 1, 6);
    run(16, 0, 6);
    run(12, 0, 6);
    run(14, 1, 6);
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
