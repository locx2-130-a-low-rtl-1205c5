// frame_builder: forms one 30-bit output word per 160 MHz cycle.
//
// Words 0-2 are scrambled payload. Word 3 is, bit 0 first:
//   data mode:        6 scrambled payload bits, CRC[15..0], trailer[0..7]
//   calibration mode: 22 scrambled payload bits, trailer[0..7]
// so the FIFO's invalid tail bits are replaced (frame bits b96-b119 in data
// mode, b112-b119 in calibration mode). The word is registered: one cycle of
// latency. word_idx_o is the index of the word now on dout. The layout follows
// the paper's frame definition; the CRC bit order (MSB first) is this design's.
module frame_builder
  import locx_pkg::*;
(
  input  logic                 clk,
  input  logic                 cal_mode,
  input  word_idx_t            word_idx,
  input  logic [WORD_BITS-1:0] scr,
  input  logic [15:0]          crc,
  input  logic [7:0]           trailer,
  output logic [WORD_BITS-1:0] dout,
  output word_idx_t            word_idx_o
);
  timeunit 1ps; timeprecision 1fs;

  logic [WORD_BITS-1:0] w;
  logic [15:0]          crc_rev;

  always_comb begin
    for (int i = 0; i < 16; i++) crc_rev[i] = crc[15-i];
    if (word_idx != 2'd3)  w = scr;
    else if (cal_mode)     w = {trailer, scr[21:0]};
    else                   w = {trailer, crc_rev, scr[5:0]};
  end

  always_ff @(posedge clk) begin
    dout       <= w;
    word_idx_o <= word_idx;
  end
endmodule
