// locx_pkg: types and constants shared by the LOCx2-130 encoder RTL.
//
// A LOCx2-130 frame is 120 bits, sent once per 40 MHz LHC clock cycle as four
// 30-bit words at 160 MHz. Frame bit b0 is sent first and is bit 0 of word 0;
// frame bit b(30*w+i) is bit i of word w. The frame layouts, the CRC
// polynomial, the scrambler taps and the trailer code follow the published
// frame definition; the encoding of the ADC configuration, the CRC start value
// and the trailer PRBS polynomials are this design's own choices.
package locx_pkg;
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned FRAME_BITS   = 120;
  localparam int unsigned WORD_BITS    = 30;
  localparam int unsigned WORDS        = 4;    // words per frame
  localparam int unsigned LANES        = 4;    // ADC channels per Nevis(-like) ADC
  localparam int unsigned DEPTH        = 14;   // FIFO cells per lane
  localparam int unsigned PAYLOAD_DATA = 96;   // data mode: 8 ch x 12 bit
  localparam int unsigned PAYLOAD_CAL  = 112;  // calibration mode: 8 ch x 14 bit
  localparam logic [15:0] CRC_POLY     = 16'h5B93; // x16+x14+x12+x11+x9+x8+x7+x4+x+1
  localparam logic [15:0] CRC_INIT     = 16'h0000;
  localparam int unsigned SCR_LEN      = 58;   // scrambler x^58 + x^39 + 1
  localparam int unsigned SCR_TAP      = 39;
  // Trailer sync code: b0 b1 b2 b3 = 1 0 1 0 (index 0 = first bit sent)
  localparam logic [3:0]  TRAILER_SYNC = 4'b0101;

  // ADC configuration of one encoding unit.
  typedef enum logic [1:0] {
    CFG_NEVIS_DATA = 2'd0,  // two Nevis ADCs, 12-bit data mode (CRC)
    CFG_NEVIS_CAL  = 2'd1,  // two Nevis ADCs, 14-bit calibration mode (no CRC)
    CFG_ADS5272    = 2'd2,  // one ADS5272, 12-bit, data mode
    CFG_ADS5294    = 2'd3   // one ADS5294, 14-bit, calibration mode
  } adc_cfg_e;

  typedef logic [1:0] word_idx_t;

  function automatic logic cfg_is_cal(adc_cfg_e c);
    return (c == CFG_NEVIS_CAL) || (c == CFG_ADS5294);
  endfunction

  function automatic logic cfg_is_cots(adc_cfg_e c);
    return (c == CFG_ADS5272) || (c == CFG_ADS5294);
  endfunction

  // Number of SCK periods uniADC delays FCK by.
  function automatic logic [1:0] cfg_fck_shift(adc_cfg_e c);
    case (c)
      CFG_NEVIS_CAL:  return 2'd1;
      CFG_NEVIS_DATA: return 2'd2;
      default:        return 2'd0;
    endcase
  endfunction

  // Payload bits carried by the last word of a frame (6 or 22).
  function automatic int unsigned last_word_payload(logic cal);
    return cal ? (PAYLOAD_CAL - 3*WORD_BITS) : (PAYLOAD_DATA - 3*WORD_BITS);
  endfunction

  function automatic logic [WORD_BITS-1:0] vote3(logic [WORD_BITS-1:0] a,
                                                  logic [WORD_BITS-1:0] b,
                                                  logic [WORD_BITS-1:0] c);
    return (a & b) | (a & c) | (b & c);
  endfunction
endpackage
