// scrambler_tmr: 30-bit parallel self-synchronous scrambler, x^58 + x^39 + 1,
// triplicated with a majority voter in front of every state flip-flop.
//
// Each payload bit is sent as s[n] = d[n] ^ s[n-39] ^ s[n-58], where s is the
// stream of already scrambled payload bits (bit 0 of a word first). Since the
// nearest tap is 39 bits back, all 30 outputs of a word depend only on the
// 58-bit history register, so one word is scrambled per 160 MHz cycle with a
// single level of XORs. Only payload bits are scrambled and shifted into the
// history: 30 per word in words 0-2, and 6 (data mode) or 22 (calibration
// mode) in word 3; the remaining bits of word 3 leave unchanged and are
// replaced by the frame builder. CRC and trailer never enter the scrambler.
//
// The scrambler has feedback and no reset, so it is the one block that is
// triplicated internally: copy k computes its next history from its own state
// and its own FIFO copy's data, and every history flip-flop of all three copies
// loads the 2-of-3 vote of the three next values. An upset in one copy is
// therefore gone after one clock. Because the scrambler is self-synchronising,
// it needs no reset: after 58 payload bits its output no longer depends on the
// power-up state. Outputs are combinational from the registered history
// (no added latency). The polynomial and the TMR scheme follow the paper; the
// history layout is this design's.
module scrambler_tmr
  import locx_pkg::*;
(
  input  logic                 clk,
  input  logic [WORD_BITS-1:0] din      [3],
  input  word_idx_t            word_idx [3],
  input  logic                 cal_mode [3],
  output logic [WORD_BITS-1:0] dout     [3]
);
  timeunit 1ps; timeprecision 1fs;

  // hist[k] = the scrambled payload bit sent k+1 bits before the current word.
  logic [SCR_LEN-1:0] hist [3];
  logic [SCR_LEN-1:0] hist_nxt [3];
  logic [SCR_LEN-1:0] hist_vote;

  for (genvar c = 0; c < 3; c++) begin : g_copy
    always_comb begin
      int unsigned n;
      n = (word_idx[c] == 2'd3) ? last_word_payload(cal_mode[c]) : WORD_BITS;
      for (int i = 0; i < WORD_BITS; i++) begin
        if (i < n) dout[c][i] = din[c][i] ^ hist[c][SCR_TAP-1-i] ^ hist[c][SCR_LEN-1-i];
        else       dout[c][i] = din[c][i];
      end
      for (int k = 0; k < SCR_LEN; k++) begin
        if (k < n) hist_nxt[c][k] = dout[c][n-1-k];
        else       hist_nxt[c][k] = hist[c][k-n];
      end
    end
  end

  // Majority voters at the flip-flop inputs.
  always_comb
    hist_vote = (hist_nxt[0] & hist_nxt[1]) | (hist_nxt[0] & hist_nxt[2]) |
                (hist_nxt[1] & hist_nxt[2]);

  always_ff @(posedge clk) begin
    hist[0] <= hist_vote;
    hist[1] <= hist_vote;
    hist[2] <= hist_vote;
  end
endmodule
