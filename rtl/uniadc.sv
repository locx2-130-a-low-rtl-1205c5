// uniadc: makes every ADC type look like two Nevis ADCs with FCK marking the
// first valid bit.
//
// With a single ADS5272/ADS5294 (8 lanes on the A and B data pins, one SCK and
// FCK on the A pins), the A clock and frame signals are copied to the B side.
// FCK is then shifted so that it rises with the first bit the FIFO must keep:
//   Nevis, calibration mode: delayed 1 SCK period  (Nevis D15 -> D13)
//   Nevis, data mode:        delayed 2 SCK periods (Nevis D15 -> D11)
//   ADS5272 / ADS5294:       not shifted (already on D11 / D13)
// The delay is a chain of flip-flops on the rising edge of the (output) SCK
// of the same side; the data lanes pass straight through. Combinational from
// cfg and the inputs, apart from the two FCK delay stages. The shifts are the
// paper's; the mux-and-flip-flop realisation is this design's.
module uniadc
  import locx_pkg::*;
(
  input  adc_cfg_e         cfg,
  input  logic             sck_a,
  input  logic             fck_a,
  input  logic [LANES-1:0] data_a,
  input  logic             sck_b,
  input  logic             fck_b,
  input  logic [LANES-1:0] data_b,
  output logic             sck_a_o,
  output logic             fck_a_o,
  output logic [LANES-1:0] data_a_o,
  output logic             sck_b_o,
  output logic             fck_b_o,
  output logic [LANES-1:0] data_b_o
);
  timeunit 1ps; timeprecision 1fs;

  logic       cots;
  logic [1:0] shift;
  logic [2:1] fa, fb;   // FCK delayed by 1 and 2 SCK periods

  assign cots     = cfg_is_cots(cfg);
  assign shift    = cfg_fck_shift(cfg);
  assign sck_a_o  = sck_a;
  assign sck_b_o  = cots ? sck_a : sck_b;
  assign data_a_o = data_a;
  assign data_b_o = data_b;

  always_ff @(posedge sck_a_o) fa <= {fa[1], fck_a};
  always_ff @(posedge sck_b_o) fb <= {fb[1], fck_b};

  always_comb begin
    case (shift)
      2'd0:    fck_a_o = fck_a;
      2'd1:    fck_a_o = fa[1];
      default: fck_a_o = fa[2];
    endcase
    if (cots)              fck_b_o = fck_a;
    else if (shift == 2'd1) fck_b_o = fb[1];
    else                   fck_b_o = fb[2];
  end
endmodule
