// serializer30: behavioural model of the 30:1 serializer of the analog core.
//
// Not synthesizable as written: it uses the three 1.6 GHz phase clocks as
// data-path select signals, as the full-custom circuit does. A 30-bit input
// register loads din on every rising edge of the 160 MHz clock. Three 10-bit
// shift registers, SR0 on q0, SR1 on q1 and SR2 on q2, hold every third bit:
// SR0 bits 0,3,...,27, SR1 bits 1,4,...,28, SR2 bits 2,5,...,29. The output
// mux passes SR0 while q1 is high, SR1 while q2 is high and SR2 while q0 is
// high, so tx shows b0,b1,b2,...,b29 at 4.8 Gbps, bit 0 first. The three
// shift registers load the input register once per ten 1.6 GHz periods, in the
// order SR0, SR1, SR2, LOAD_PHASE q2 periods after the 160 MHz rising edge;
// otherwise they shift. The bit-to-register assignment and the mux follow the
// paper's serializer diagram and timing diagram; the load timing is this
// model's.
module serializer30 #(
  parameter int unsigned LOAD_PHASE = 4
) (
  input  logic        clk160,
  input  logic [29:0] din,
  input  logic        q0,
  input  logic        q1,
  input  logic        q2,
  output logic        tx
);
  timeunit 1ps; timeprecision 1fs;

  logic [29:0] in_reg;
  logic [9:0]  sr0, sr1, sr2;
  logic [9:0]  sl0, sl1, sl2;
  logic [3:0]  cnt;
  logic        c160_q, ld;

  always_ff @(posedge clk160) in_reg <= din;

  always_comb
    for (int i = 0; i < 10; i++) begin
      sl0[i] = in_reg[3*i];
      sl1[i] = in_reg[3*i+1];
      sl2[i] = in_reg[3*i+2];
    end

  // Load strobe in the q2 domain, aligned to the 160 MHz clock.
  always_ff @(posedge q2) begin
    c160_q <= clk160;
    if (clk160 && !c160_q) cnt <= 4'd1;
    else                   cnt <= (cnt == 4'd9) ? 4'd0 : cnt + 4'd1;
    ld <= (cnt == 4'(LOAD_PHASE));
  end

  always_ff @(posedge q0) sr0 <= ld ? sl0 : {1'b0, sr0[9:1]};
  always_ff @(posedge q1) sr1 <= ld ? sl1 : {1'b0, sr1[9:1]};
  always_ff @(posedge q2) sr2 <= ld ? sl2 : {1'b0, sr2[9:1]};

  always_comb
    if (q1)      tx = sr0[0];
    else if (q2) tx = sr1[0];
    else         tx = sr2[0];
endmodule
