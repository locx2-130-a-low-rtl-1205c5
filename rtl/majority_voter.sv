// majority_voter: bitwise 2-of-3 vote of the three frame-builder copies,
// followed by the output latch ("Majority Voter & Latch" in the chip's block
// diagram).
//
// The vote is plain combinational logic. The latch is transparent while clk
// is low and holds while clk is high. The frame builders launch a new word
// just after a rising edge, while the latch is closed; the latch passes that
// word at the falling edge and keeps it stable through the next rising edge,
// where the serializer's input register takes it. So the voter adds half a
// cycle, not a whole one, and the word taken by the frame builders at edge n
// is registered by the serializer at edge n+1. The vote follows the paper;
// the latch's clock phase is this design's own choice (the paper names the
// latch without giving its clocking). The latch is deliberate: yosys reports
// WIDTH latch bits for this module.
module majority_voter #(
  parameter int unsigned WIDTH = 30
) (
  input  logic             clk,
  input  logic [WIDTH-1:0] a,
  input  logic [WIDTH-1:0] b,
  input  logic [WIDTH-1:0] c,
  output logic [WIDTH-1:0] y
);
  timeunit 1ps; timeprecision 1fs;

  logic [WIDTH-1:0] vote;

  assign vote = (a & b) | (a & c) | (b & c);

  always_latch
    if (!clk) y = vote;
endmodule
