// core_encoder: builds the LOCx2-130 frame from the three FIFO copies.
//
// Per 160 MHz cycle one 30-bit FIFO word (with its index in the frame) enters
// from each of the three FIFO copies. The scrambler (triplicated internally,
// with voters) and, in parallel on the unscrambled words, three CRC
// generators and three trailer generators feed three frame builders; their
// registered words are voted bit by bit and held in the output latch, which
// is open while clk is low. A FIFO word taken at rising edge n is on dout
// from the falling edge after n to the falling edge after n+1, so the next
// stage registers it at edge n+1: one clock cycle through the encoder, as in
// the chip's latency budget. word_idx_o gives the index of the word on dout
// (voted and latched the same way). The CRC, trailer and frame-builder copies
// are plain triplications without voters, as described for the chip: the CRC
// restarts every frame and the builder carries no state, so an upset is
// flushed; an upset in a trailer PRBS copy lasts until the next BCID reset.
module core_encoder
  import locx_pkg::*;
(
  input  logic                 clk,
  input  logic                 bcid_reset,   // synchronous to clk
  input  logic                 cal_mode,
  input  logic [WORD_BITS-1:0] din      [3],
  input  word_idx_t            word_idx [3],
  output logic [WORD_BITS-1:0] dout,
  output word_idx_t            word_idx_o
);
  timeunit 1ps; timeprecision 1fs;

  logic [WORD_BITS-1:0] scr [3];
  logic [WORD_BITS-1:0] fb  [3];
  logic [15:0]          crc [3];
  logic [7:0]           trl [3];
  word_idx_t            fb_idx [3];
  logic                 cal3 [3];

  assign cal3 = '{cal_mode, cal_mode, cal_mode};

  scrambler_tmr u_scr (.clk, .din, .word_idx, .cal_mode(cal3), .dout(scr));

  for (genvar c = 0; c < 3; c++) begin : g_tmr
    crc16_gen     u_crc (.clk, .din(din[c]), .word_idx(word_idx[c]), .crc(crc[c]));
    frame_trailer u_trl (.clk, .bcid_reset, .word_idx(word_idx[c]), .trailer(trl[c]));
    frame_builder u_fb  (.clk, .cal_mode, .word_idx(word_idx[c]), .scr(scr[c]),
                         .crc(crc[c]), .trailer(trl[c]), .dout(fb[c]),
                         .word_idx_o(fb_idx[c]));
  end

  majority_voter #(.WIDTH(WORD_BITS)) u_vote (.clk, .a(fb[0]), .b(fb[1]), .c(fb[2]), .y(dout));

  majority_voter #(.WIDTH(2)) u_vote_idx (.clk, .a(fb_idx[0]), .b(fb_idx[1]), .c(fb_idx[2]),
                                         .y(word_idx_o));
endmodule
