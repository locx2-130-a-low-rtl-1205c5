// fifo_mem: one FIFO memory unit, DEPTH x LANES flip-flop cells for one ADC.
//
// Even cells are written on the rising SCK edge from data_even, odd cells on
// the falling edge from data_odd, each when its write enable from
// fifo_wr_ctrl is high. All cells are visible at once on `cells` so that the
// 160 MHz read side can pick any 30 bits of the frame without a read port.
// cells[k][c] holds bit k (counted from the first valid bit) of lane c.
module fifo_mem
#(
  parameter int unsigned DEPTH = 14,
  parameter int unsigned LANES = 4
) (
  input  logic                        sck,
  input  logic [LANES-1:0]            data_even,
  input  logic [LANES-1:0]            data_odd,
  input  logic [DEPTH-1:0]            we,
  output logic [DEPTH-1:0][LANES-1:0] cells
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned SLOTS = DEPTH / 2;

  logic [SLOTS-1:0][LANES-1:0] even_cells, odd_cells;

  always_ff @(posedge sck)
    for (int i = 0; i < SLOTS; i++)
      if (we[2*i]) even_cells[i] <= data_even;

  always_ff @(negedge sck)
    for (int i = 0; i < SLOTS; i++)
      if (we[2*i+1]) odd_cells[i] <= data_odd;

  always_comb
    for (int i = 0; i < SLOTS; i++) begin
      cells[2*i]   = even_cells[i];
      cells[2*i+1] = odd_cells[i];
    end
endmodule
