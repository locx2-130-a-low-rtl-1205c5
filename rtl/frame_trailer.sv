// frame_trailer: 8-bit frame trailer = 1010 sync code + 4-bit BCID field.
//
// trailer[0] is sent first. trailer[3:0] is the fixed code 1,0,1,0;
// trailer[5:4] are the next two bits of a PRBS 2^5-1 generator (x^5+x^3+1)
// and trailer[7:6] the next two bits of a PRBS 2^7-1 generator (x^7+x^6+1).
// Both generators step by two bits per frame, at word 3, so that four
// consecutive frames carry 8 bits of each sequence, enough to recover both
// generator states and hence the bunch-crossing number (periods 31 and 127
// frames, combined 3937 > 3564 bunches per LHC orbit). bcid_reset (already in
// the 160 MHz domain) loads both generators with all ones; the frame being
// built when it is released carries the first bits of both sequences. The
// field layout follows the paper's frame definition; the polynomials, seed and
// reset timing are this design's.
module frame_trailer
  import locx_pkg::*;
(
  input  logic      clk,
  input  logic      bcid_reset,
  input  word_idx_t word_idx,
  output logic [7:0] trailer
);
  timeunit 1ps; timeprecision 1fs;

  logic [4:0] p5;   // p5[4] is the next bit out
  logic [6:0] p7;

  function automatic logic [4:0] step5(logic [4:0] s);
    return {s[3:0], s[4] ^ s[2]};       // x^5 + x^3 + 1
  endfunction
  function automatic logic [6:0] step7(logic [6:0] s);
    return {s[5:0], s[6] ^ s[5]};       // x^7 + x^6 + 1
  endfunction

  // The next two bits of each sequence: s[msb] now, s[msb-1] after one step.
  assign trailer = {p7[5], p7[6], p5[3], p5[4], TRAILER_SYNC};

  always_ff @(posedge clk) begin
    if (bcid_reset) begin
      p5 <= '1;
      p7 <= '1;
    end else if (word_idx == 2'd3) begin
      p5 <= step5(step5(p5));
      p7 <= step7(step7(p7));
    end
  end
endmodule
