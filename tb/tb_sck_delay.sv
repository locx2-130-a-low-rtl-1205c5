// tb_sck_delay: for every tap 0..15 each edge of sck_out must follow the
// same edge of sck_in by tap x 50 ps (measured in 1 ps steps).
module tb_sck_delay;
  timeunit 1ps; timeprecision 1fs;

  logic sck_in, sck_out;
  logic [3:0] tap;
  int e;
  int checks = 0, failures = 0;

  sck_delay dut (.sck_in, .tap, .sck_out);

  initial begin
    sck_in = 0;
    for (int t = 0; t < 16; t++) begin
      tap = 4'(t);
      #2000;
      repeat (4) begin
        sck_in = ~sck_in;
        // step in 1 ps until the output follows
        e = 0;
        while (sck_out !== sck_in && e < 2000) begin #1; e++; end
        checks++;
        if (e < t * 50 || e > t * 50 + 1) begin
          failures++; $display("FAIL: tap %0d delay %0d ps", t, e);
        end
        #1500;
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
