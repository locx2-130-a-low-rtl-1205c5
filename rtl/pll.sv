// pll: behavioural model of the LOCx2-130 PLL (not synthesizable).
//
// The real PLL is an analog block reused from an earlier radiation-tolerant
// design. This model locks instantly: on every rising edge of the 40 MHz
// reference it emits four periods of the 160 MHz clock and forty periods of
// the three 1.6 GHz phases. q0, q1 and q2 each have a duty cycle of one third
// and follow each other by 120 degrees (q0 high in the first third of each
// 625 ps period, q1 in the second, q2 in the last), so exactly one is high at
// any time. clk160 rises with q0 at the reference edge. The output set and
// its frequencies are the paper's; the phase relation of clk160 to q0 is
// this model's choice.
module pll #(
  parameter real REF_PERIOD_PS = 25000.0
) (
  input  logic ref_clk,
  output logic q0,
  output logic q1,
  output logic q2,
  output logic clk160
);
  timeunit 1ps; timeprecision 1fs;

  localparam real T160 = REF_PERIOD_PS / 4.0;
  localparam real T3   = REF_PERIOD_PS / 120.0;   // one third of a 1.6 GHz period

  initial begin
    q0 = 1'b0; q1 = 1'b0; q2 = 1'b0; clk160 = 1'b0;
    forever begin
      @(posedge ref_clk);
      fork
        begin
          for (int i = 0; i < 4; i++) begin
            clk160 = 1'b1;
            #(T160 / 2.0);
            clk160 = 1'b0;
            if (i < 3) #(T160 / 2.0);
          end
        end
        begin
          for (int i = 0; i < 40; i++) begin
            q2 = 1'b0; q0 = 1'b1;
            #(T3);
            q0 = 1'b0; q1 = 1'b1;
            #(T3);
            q1 = 1'b0; q2 = 1'b1;
            if (i < 39) #(T3);
          end
        end
      join
    end
  end
endmodule
