// tb_adc: behavioural model of one ADC's serial output, for testbenches.
//
// At every rising edge of the 40 MHz reference it sends one sample per lane,
// MSB first, starting off_ps after the edge: raw_bits(cfg) bits at
// 25 ns / raw_bits each (640, 480 or 560 Mbps). FCK is high for the first half
// of the sample and rises with its first bit. SCK runs at half the bit rate
// with its edges in the middle of the bits (rising edge on the first bit), as
// a source-synchronous DDR ADC output delayed to its optimum. With
// drive_clk = 0, SCK and FCK stay low (data pins of the second half of a
// single COTS ADC). Sample values come from tb_ref_pkg::sample.
module tb_adc
  import tb_ref_pkg::*;
(
  input  logic       ref_clk,
  input  int         cfg,
  input  int         adc_id,
  input  real        off_ps,
  input  logic       drive_clk,
  output logic       sck,
  output logic       fck,
  output logic [3:0] data
);
  timeunit 1ps; timeprecision 1fs;

  initial begin sck = 1'b0; fck = 1'b0; data = '0; end

  // One process per sample, so that a sample may run past the next
  // reference edge when off_ps > 0.
  always @(posedge ref_clk) begin
    int fr;
    fr = int'($floor($realtime / 25000.0));
    fork
      send(fr);
    join_none
  end

  task automatic send(int fr);
    int  nb;
    real tb;
    nb = raw_bits(cfg);
    tb = 25000.0 / nb;
    #(off_ps);
    for (int k = 0; k < nb; k++) begin
      for (int l = 0; l < 4; l++) data[l] = sample(fr, adc_id, l)[nb-1-k];
      fck = drive_clk && (k < nb / 2);
      #(tb / 2.0);
      sck = drive_clk && (k % 2 == 0);
      if (k < nb - 1) #(tb / 2.0);
    end
  endtask
endmodule
