// sck_delay: behavioural model of the programmable SCK delay cell.
//
// Not synthesizable: the real cell is a process-specific analog delay line.
// sck_out follows sck_in after tap * STEP_PS picoseconds (tap = 0 gives zero
// delay). The tap is a static configuration set once the system is tuned;
// the optimum is found by scanning all values. The paper gives the cell's
// purpose only; the number of taps and the step are this model's choices.
module sck_delay #(
  parameter int unsigned TAP_BITS = 4,
  parameter int unsigned STEP_PS  = 50
) (
  input  logic                sck_in,
  input  logic [TAP_BITS-1:0] tap,
  output logic                sck_out
);
  timeunit 1ps; timeprecision 1fs;

  always @(sck_in) sck_out <= #(tap * STEP_PS * 1ps) sck_in;
endmodule
