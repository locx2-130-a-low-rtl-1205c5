// fifo: the FIFO between the two (Nevis-like) ADC inputs and the core encoder.
//
// Two write controllers, each in its own SCK domain, DDR-capture four lanes
// and fill their own 14 x 4 flip-flop memory unit. The two aligned FCKs are
// ORed; the OR is delayed by one SCK period (a flip-flop on ADC A's SCK) and
// starts the 160 MHz read controller, which reads four 30-bit words per frame.
// A word is taken combinationally from the cells: frame bit j = 30*w + i is
// bit j/8 of channel j%8, channels 0-3 from ADC A and 4-7 from ADC B, so the
// 112 cells form frame bits b0-b111 (the most significant valid bit of all
// eight channels first) and b112-b119 read as zero. With skew of up to one SCK
// period between the ADCs, each cell holds its value for one frame period,
// and READ_DELAY places all four reads inside that window for all ADC types.
// Outputs: data (the word now read) and word_idx (its index in the frame).
// The structure follows the paper's FIFO diagram; the synchroniser and the
// read delay value are this design's.
module fifo
  import locx_pkg::*;
#(
  parameter int unsigned READ_DELAY = 0
) (
  input  logic                 clk,        // 160 MHz read clock
  input  logic                 rst_n,
  input  logic                 cal_mode,
  input  logic                 sck_a,
  input  logic                 fck_a,
  input  logic [LANES-1:0]     data_a,
  input  logic                 sck_b,
  input  logic                 fck_b,
  input  logic [LANES-1:0]     data_b,
  output logic [WORD_BITS-1:0] data,
  output word_idx_t            word_idx
);
  timeunit 1ps; timeprecision 1fs;

  logic [LANES-1:0]            even_a, odd_a, even_b, odd_b;
  logic [DEPTH-1:0]            we_a, we_b;
  logic [DEPTH-1:0][LANES-1:0] cells_a, cells_b;
  logic                        fck_or, start;
  logic [FRAME_BITS-1:0]       image;

  fifo_wr_ctrl u_wr_a (.sck(sck_a), .fck(fck_a), .data(data_a), .cal_mode,
                       .data_even(even_a), .data_odd(odd_a), .we(we_a));
  fifo_wr_ctrl u_wr_b (.sck(sck_b), .fck(fck_b), .data(data_b), .cal_mode,
                       .data_even(even_b), .data_odd(odd_b), .we(we_b));
  fifo_mem     u_mem_a (.sck(sck_a), .data_even(even_a), .data_odd(odd_a),
                        .we(we_a), .cells(cells_a));
  fifo_mem     u_mem_b (.sck(sck_b), .data_even(even_b), .data_odd(odd_b),
                        .we(we_b), .cells(cells_b));

  assign fck_or = fck_a | fck_b;
  always_ff @(posedge sck_a) start <= fck_or;

  fifo_rd_ctrl #(.READ_DELAY(READ_DELAY)) u_rd (
    .clk, .rst_n, .start, .word_idx);

  always_comb begin
    image = '0;
    for (int k = 0; k < DEPTH; k++)
      for (int c = 0; c < LANES; c++) begin
        image[8*k + c]     = cells_a[k][c];
        image[8*k + 4 + c] = cells_b[k][c];
      end
    data = image[WORD_BITS*word_idx +: WORD_BITS];
  end
endmodule
