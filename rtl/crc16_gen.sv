// crc16_gen: 30-bit parallel CRC-16 of the unscrambled payload of one frame.
//
// Polynomial x^16+x^14+x^12+x^11+x^9+x^8+x^7+x^4+x+1 (0x5B93), processed MSB
// first in transmission order (frame bit b0 first), start value 0, no final
// inversion. Words 0-2 each add 30 payload bits; word 3 adds its first 6 bits,
// completing the 96-bit payload of the data mode. The state restarts from the
// start value at every word 0, so any upset is flushed at the next frame.
// crc is combinational and valid while word 3 is presented: it already
// includes word 3's 6 bits, so the frame builder can place it in the same
// cycle (the CRC adds no latency). crc[15] is sent first (frame bit b96).
// The polynomial and the 30-bit parallel structure are the paper's; the start
// value, bit order and final-XOR choices are this design's.
module crc16_gen
  import locx_pkg::*;
#(
  parameter logic [15:0] POLY = CRC_POLY,
  parameter logic [15:0] INIT = CRC_INIT
) (
  input  logic                 clk,
  input  logic [WORD_BITS-1:0] din,
  input  word_idx_t            word_idx,
  output logic [15:0]          crc
);
  timeunit 1ps; timeprecision 1fs;

  logic [15:0] state;

  always_comb begin
    int unsigned n;
    logic [15:0] c;
    logic        fb;
    fb = 1'b0;
    n = (word_idx == 2'd3) ? (PAYLOAD_DATA - 3*WORD_BITS) : WORD_BITS;
    c = (word_idx == 2'd0) ? INIT : state;
    for (int i = 0; i < WORD_BITS; i++) begin
      if (i < n) begin
        fb = c[15] ^ din[i];
        c  = {c[14:0], 1'b0} ^ (fb ? POLY : 16'h0000);
      end
    end
    crc = c;
  end

  always_ff @(posedge clk) state <= crc;
endmodule
