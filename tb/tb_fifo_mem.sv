// tb_fifo_mem: random write enables and data on both SCK edges; after every
// edge all 14 x 4 cells must match a reference array in which even cells take
// data_even on rising edges and odd cells take data_odd on falling edges.
module tb_fifo_mem;
  timeunit 1ps; timeprecision 1fs;

  logic sck = 0;
  logic [3:0] de, dodd;
  logic [13:0] we;
  logic [13:0][3:0] cells, ref_cells;
  int checks = 0, failures = 0;

  fifo_mem dut (.sck, .data_even(de), .data_odd(dodd), .we, .cells);

  initial begin
    // fill every cell once so the reference starts known
    de = 0; dodd = 0; we = '1;
    #1000 sck = 1; #1000 sck = 0; #1000;
    ref_cells = '0;
    for (int t = 0; t < 400; t++) begin
      de = 4'($urandom); dodd = 4'($urandom); we = 14'($urandom) & 14'($urandom);
      #500;
      sck = ~sck;
      for (int i = 0; i < 14; i++)
        if (we[i] && (i % 2 == 0) == sck) ref_cells[i] = (i % 2 == 0) ? de : dodd;
      #500;
      checks++;
      if (cells !== ref_cells) begin
        failures++; $display("FAIL: t=%0d cells %h expected %h", t, cells, ref_cells);
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
