// i2c_slave: I2C target holding the chip's configuration registers.
//
// SCL and SDA are sampled by clk (the 40 MHz reference) through two
// flip-flops; START and STOP are recognised as SDA edges while SCL is high.
// Transfers, with 7-bit device address DEV_ADDR:
//   write: S, DEV_ADDR+W, A, reg pointer, A, data, A, data, A, ... P
//   read:  S, DEV_ADDR+W, A, reg pointer, A, Sr, DEV_ADDR+R, A, data, mA, ... P
// The pointer increments after every data byte written or read. Data bits are
// taken on the SCL rising edge; the target changes SDA after SCL falls. SDA is
// open drain: sda_oe = 1 pulls the line low. Unknown addresses are ignored;
// pointers beyond NREGS-1 write nothing and read 0. Register map (this
// design's own; the paper lists no registers):
//   reg 0 [1:0] ADC configuration of channel 0 (locx_pkg::adc_cfg_e)
//   reg 1 [1:0] ADC configuration of channel 1
//   reg 2 [3:0] SCK delay tap, ADC A   [7:4] SCK delay tap, ADC B
//   reg 3 [3:0] SCK delay tap, ADC C   [7:4] SCK delay tap, ADC D
// All registers reset to 0 (Nevis ADCs, data mode, zero delay).
module i2c_slave #(
  parameter logic [6:0]  DEV_ADDR = 7'h50,
  parameter int unsigned NREGS    = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  scl,
  input  logic                  sda_i,
  output logic                  sda_oe,
  output logic [NREGS-1:0][7:0] regs
);
  timeunit 1ps; timeprecision 1fs;

  typedef enum logic [2:0] {
    S_IDLE, S_ADDR, S_PTR, S_WDATA, S_ACK, S_RDATA, S_MACK
  } state_e;

  state_e     state, after_ack;
  logic [2:0] scl_s, sda_s;
  logic       scl_rise, scl_fall, start_c, stop_c;
  logic [7:0] shreg, ptr;
  logic [3:0] bit_cnt;
  logic       mack;
  logic [7:0] rd_cur, rd_nxt;

  assign scl_rise = scl_s[1] & ~scl_s[2];
  assign scl_fall = ~scl_s[1] & scl_s[2];
  assign start_c  = scl_s[1] & scl_s[2] & ~sda_s[1] & sda_s[2];
  assign stop_c   = scl_s[1] & scl_s[2] & sda_s[1] & ~sda_s[2];

  function automatic logic [7:0] rd_reg(logic [7:0] p, logic [NREGS-1:0][7:0] r);
    return (32'(p) < NREGS) ? r[p[$clog2(NREGS)-1:0]] : 8'h00;
  endfunction

  assign rd_cur = rd_reg(ptr, regs);
  assign rd_nxt = rd_reg(ptr + 8'd1, regs);

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      scl_s <= '1; sda_s <= '1;
      state <= S_IDLE; after_ack <= S_IDLE;
      shreg <= '0; ptr <= '0; bit_cnt <= '0; mack <= 1'b0;
      sda_oe <= 1'b0; regs <= '0;
    end else begin
      scl_s <= {scl_s[1:0], scl};
      sda_s <= {sda_s[1:0], sda_i};
      if (start_c) begin
        state <= S_ADDR; bit_cnt <= '0; sda_oe <= 1'b0;
      end else if (stop_c) begin
        state <= S_IDLE; sda_oe <= 1'b0;
      end else if (scl_rise) begin
        case (state)
          S_ADDR, S_PTR, S_WDATA: begin
            shreg   <= {shreg[6:0], sda_s[1]};
            bit_cnt <= bit_cnt + 4'd1;
          end
          S_MACK:  mack <= ~sda_s[1];
          default: ;
        endcase
      end else if (scl_fall) begin
        case (state)
          S_ADDR: if (bit_cnt == 4'd8) begin
            if (shreg[7:1] == DEV_ADDR) begin
              sda_oe    <= 1'b1;
              state     <= S_ACK;
              after_ack <= shreg[0] ? S_RDATA : S_PTR;
            end else state <= S_IDLE;
          end
          S_PTR: if (bit_cnt == 4'd8) begin
            ptr <= shreg; sda_oe <= 1'b1; state <= S_ACK; after_ack <= S_WDATA;
          end
          S_WDATA: if (bit_cnt == 4'd8) begin
            for (int i = 0; i < NREGS; i++) if (ptr == 8'(i)) regs[i] <= shreg;
            ptr <= ptr + 8'd1; sda_oe <= 1'b1; state <= S_ACK; after_ack <= S_WDATA;
          end
          S_ACK: begin
            bit_cnt <= '0;
            state   <= after_ack;
            if (after_ack == S_RDATA) begin
              shreg   <= rd_cur;
              sda_oe  <= ~rd_cur[7];
              bit_cnt <= 4'd1;
            end else sda_oe <= 1'b0;
          end
          S_RDATA: begin
            if (bit_cnt == 4'd8) begin
              sda_oe <= 1'b0; state <= S_MACK;
            end else begin
              sda_oe  <= ~shreg[3'(4'd7 - bit_cnt)];
              bit_cnt <= bit_cnt + 4'd1;
            end
          end
          S_MACK: begin
            if (mack) begin
              shreg   <= rd_nxt;
              sda_oe  <= ~rd_nxt[7];
              ptr     <= ptr + 8'd1;
              bit_cnt <= 4'd1;
              state   <= S_RDATA;
            end else state <= S_IDLE;
          end
          default: ;
        endcase
      end
    end
endmodule
