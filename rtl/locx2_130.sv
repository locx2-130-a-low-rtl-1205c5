// locx2_130: top level of the LOCx2-130 dual-channel 4.8 Gbps transmitter.
//
// Two identical channels each take two Nevis ADCs (or one ADS5272/ADS5294),
// build one 120-bit frame per 40 MHz LHC clock in a LOCic-130 encoding unit
// and send it through a 30:1 serializer at 4.8 Gbps. One PLL, locked to the
// 40 MHz reference of the control link, supplies both channels with the
// 160 MHz encoder clock and the three 1.6 GHz serializer phases. One I2C
// target holds the configuration (ADC type/mode per channel, SCK delay taps).
// Channel 0 takes ADCs A and B, channel 1 ADCs C and D. tx[1:0] are the
// serializer outputs that drive the (analog, not modelled) line drivers.
// bcid_reset from the control link resets the trailer PRBS generators of
// both channels. rst_n is a power-on reset (this design's addition).
// The PLL, SCK delay cells and serializers are behavioural models, so this
// top is for simulation; the encoding units and the I2C target are RTL.
// The encoders' word indices (idx0, idx1) are left unused on purpose: the
// serializer needs no word marker, since the trailer's 1010 code lets the
// receiver find the frame boundary. They are kept for observation.
module locx2_130
  import locx_pkg::*;
(
  input  logic             ref_clk,      // 40 MHz LHC reference clock
  input  logic             rst_n,
  input  logic             bcid_reset,
  input  logic             scl,
  input  logic             sda_i,
  output logic             sda_oe,
  input  logic             sck_a, fck_a,
  input  logic [LANES-1:0] data_a,
  input  logic             sck_b, fck_b,
  input  logic [LANES-1:0] data_b,
  input  logic             sck_c, fck_c,
  input  logic [LANES-1:0] data_c,
  input  logic             sck_d, fck_d,
  input  logic [LANES-1:0] data_d,
  output logic [1:0]       tx
);
  timeunit 1ps; timeprecision 1fs;

  logic                 q0, q1, q2, clk160;
  logic [3:0][7:0]      regs;
  logic [WORD_BITS-1:0] word0, word1;
  word_idx_t            idx0, idx1;

  pll u_pll (.ref_clk, .q0, .q1, .q2, .clk160);

  i2c_slave u_i2c (.clk(ref_clk), .rst_n, .scl, .sda_i, .sda_oe, .regs);

  locic130 u_enc0 (
    .clk(clk160), .rst_n, .bcid_reset, .cfg(adc_cfg_e'(regs[0][1:0])),
    .tap_a(regs[2][3:0]), .tap_b(regs[2][7:4]),
    .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
    .dout(word0), .word_idx(idx0));

  locic130 u_enc1 (
    .clk(clk160), .rst_n, .bcid_reset, .cfg(adc_cfg_e'(regs[1][1:0])),
    .tap_a(regs[3][3:0]), .tap_b(regs[3][7:4]),
    .sck_a(sck_c), .fck_a(fck_c), .data_a(data_c),
    .sck_b(sck_d), .fck_b(fck_d), .data_b(data_d),
    .dout(word1), .word_idx(idx1));

  serializer30 u_ser0 (.clk160, .din(word0), .q0, .q1, .q2, .tx(tx[0]));
  serializer30 u_ser1 (.clk160, .din(word1), .q0, .q1, .q2, .tx(tx[1]));
endmodule
