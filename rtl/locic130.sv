// locic130: the LOCic-130 encoding unit of one transmitter channel.
//
// Inputs are the CMOS-level signals of two Nevis(-like) ADCs, A and B, each
// four DDR data lanes, a data clock SCK and a frame clock FCK (for a single
// COTS ADC its eight lanes arrive on the A and B lanes and its clocks on A).
// The ADC interface (SCK delay cells and uniADC), and the FIFO, are
// instantiated three times; the three FIFO outputs feed the core encoder,
// whose voted 30-bit words go to the serializer at 160 MHz. bcid_reset is
// taken into the 160 MHz domain by two flip-flops here. cfg selects the ADC
// type and frame mode; tap_a/tap_b set the SCK delays. All configuration is
// static while data flow. dout carries word word_idx of the frame
// (word 0 = frame bits b0-b29, sent first).
module locic130
  import locx_pkg::*;
#(
  parameter int unsigned READ_DELAY = 0
) (
  input  logic                 clk,          // 160 MHz from the PLL
  input  logic                 rst_n,
  input  logic                 bcid_reset,
  input  adc_cfg_e             cfg,
  input  logic [3:0]           tap_a,
  input  logic [3:0]           tap_b,
  input  logic                 sck_a,
  input  logic                 fck_a,
  input  logic [LANES-1:0]     data_a,
  input  logic                 sck_b,
  input  logic                 fck_b,
  input  logic [LANES-1:0]     data_b,
  output logic [WORD_BITS-1:0] dout,
  output word_idx_t            word_idx
);
  timeunit 1ps; timeprecision 1fs;

  logic [WORD_BITS-1:0] fifo_data [3];
  word_idx_t            fifo_idx  [3];
  logic [1:0]           bcid_sync;
  logic                 cal_mode;

  assign cal_mode = cfg_is_cal(cfg);

  for (genvar c = 0; c < 3; c++) begin : g_tmr
    logic             dsck_a, dsck_b;
    logic             usck_a, usck_b, ufck_a, ufck_b;
    logic [LANES-1:0] udat_a, udat_b;

    sck_delay u_dly_a (.sck_in(sck_a), .tap(tap_a), .sck_out(dsck_a));
    sck_delay u_dly_b (.sck_in(sck_b), .tap(tap_b), .sck_out(dsck_b));

    uniadc u_uni (.cfg,
                  .sck_a(dsck_a), .fck_a, .data_a, .sck_b(dsck_b), .fck_b, .data_b,
                  .sck_a_o(usck_a), .fck_a_o(ufck_a), .data_a_o(udat_a),
                  .sck_b_o(usck_b), .fck_b_o(ufck_b), .data_b_o(udat_b));

    fifo #(.READ_DELAY(READ_DELAY)) u_fifo (
      .clk, .rst_n, .cal_mode,
      .sck_a(usck_a), .fck_a(ufck_a), .data_a(udat_a),
      .sck_b(usck_b), .fck_b(ufck_b), .data_b(udat_b),
      .data(fifo_data[c]), .word_idx(fifo_idx[c]));
  end

  always_ff @(posedge clk) bcid_sync <= {bcid_sync[0], bcid_reset};

  core_encoder u_core (.clk, .bcid_reset(bcid_sync[1]), .cal_mode,
                       .din(fifo_data), .word_idx(fifo_idx),
                       .dout, .word_idx_o(word_idx));
endmodule
