// fifo_wr_ctrl: write controller of one ADC's half of the FIFO.
//
// The four serial ADC lanes are captured in DDR: on the rising SCK edge into
// data_even, on the falling edge into data_odd. The (already aligned) FCK is
// sampled on the rising edge; its rising edge marks the first valid bit, which
// is captured into data_even at that same edge. From there the write enables
// walk through the cells: bit k of the frame (k = 0 is the first valid bit)
// goes to cell k, we[2i] being active for the SCK period after the rising edge
// that captured bit 2i, and we[2i+1] half a period later for the falling edge
// that captured bit 2i+1 (as in the published write-controller waveform).
// Only the first 12 (data mode) or 14 (calibration mode) bits after FCK are
// written; any bits after that (Nevis D15-D12 or D15-D14) are dumped simply by
// not enabling a cell. A new FCK edge restarts the sequence. The controller
// has no reset: a random power-up state is flushed by the first FCK.
module fifo_wr_ctrl
#(
  parameter int unsigned DEPTH = 14,
  parameter int unsigned LANES = 4
) (
  input  logic             sck,
  input  logic             fck,
  input  logic [LANES-1:0] data,
  input  logic             cal_mode,
  output logic [LANES-1:0] data_even,
  output logic [LANES-1:0] data_odd,
  output logic [DEPTH-1:0] we
);
  timeunit 1ps; timeprecision 1fs;

  localparam int unsigned SLOTS = DEPTH / 2;

  logic             fck_q;
  logic             start;
  logic [SLOTS-1:0] we_e, we_o;
  int unsigned      nbits;

  assign start = fck & ~fck_q;
  assign nbits = cal_mode ? DEPTH : DEPTH - 2;

  always_ff @(posedge sck) begin
    fck_q     <= fck;
    data_even <= data;
    for (int i = 0; i < SLOTS; i++) begin
      if (start) we_e[i] <= (i == 0);
      else       we_e[i] <= (i > 0) && we_e[(i > 0) ? i-1 : 0] && (2*i < nbits);
    end
  end

  always_ff @(negedge sck) begin
    data_odd <= data;
    we_o     <= we_e;
  end

  always_comb
    for (int i = 0; i < SLOTS; i++) begin
      we[2*i]   = we_e[i];
      we[2*i+1] = we_o[i];
    end
endmodule
