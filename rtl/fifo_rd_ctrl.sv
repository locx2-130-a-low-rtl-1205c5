// fifo_rd_ctrl: 160 MHz read controller of the FIFO.
//
// `start` is the OR of the two aligned FCKs, already delayed by one SCK period
// in the write clock domain. It is brought into the 160 MHz domain by two
// flip-flops, its rising edge is detected, and after READ_DELAY further cycles
// the read address (word index 0..3) restarts at 0. The address otherwise
// counts 0,1,2,3,0,... continuously: one frame is exactly four 160 MHz cycles,
// so once running the reads are back to back and every FCK only re-aligns
// them. word_idx is registered; the read data follow combinationally from the
// memory cells. READ_DELAY sets when, after the later ADC's writes, the reads
// happen; the paper says this time was adjusted but not to what.
module fifo_rd_ctrl
  import locx_pkg::*;
#(
  parameter int unsigned READ_DELAY = 0
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  output word_idx_t word_idx
);
  timeunit 1ps; timeprecision 1fs;

  logic [2:0] sync;
  logic       pulse, go;

  assign pulse = sync[1] & ~sync[2];

  if (READ_DELAY == 0) begin : g_nodly
    assign go = pulse;
  end else begin : g_dly
    logic [READ_DELAY-1:0] dly;
    always_ff @(posedge clk or negedge rst_n)
      if (!rst_n) dly <= '0;
      else        dly <= {dly, pulse};
    assign go = dly[READ_DELAY-1];
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      sync     <= '0;
      word_idx <= '0;
    end else begin
      sync     <= {sync[1:0], start};
      word_idx <= go ? 2'd0 : word_idx + 2'd1;
    end
endmodule
