// tb_i2c_slave: I2C transfers at 1 MHz SCL against the configuration target,
// clocked at 40 MHz. The testbench acts as bus controller with an open-drain
// SDA. Checks:
//  - multi-byte writes from several start pointers land in the right
//    registers (seen on the regs outputs) and are acknowledged;
//  - reads with a repeated start return the register contents and the
//    pointer auto-increments;
//  - a transfer to another device address is not acknowledged and changes
//    nothing;
//  - pointers past the last register write nothing and read 0.
module tb_i2c_slave;
  timeunit 1ps; timeprecision 1fs;

  logic clk, rst_n, scl, m_sda, sda_oe, sda;
  logic [3:0][7:0] regs, model;
  int checks = 0, failures = 0;

  assign sda = m_sda & ~sda_oe;

  initial begin clk = 0; forever #12500 clk = ~clk; end

  i2c_slave dut (.clk, .rst_n, .scl, .sda_i(sda), .sda_oe, .regs);

  localparam real TQ = 250000.0;   // quarter SCL period

  task automatic i2c_start();
    m_sda = 1; scl = 1; #(TQ); m_sda = 0; #(TQ); scl = 0; #(TQ);
  endtask
  task automatic i2c_stop();
    m_sda = 0; #(TQ); scl = 1; #(TQ); m_sda = 1; #(2*TQ);
  endtask
  task automatic i2c_wbyte(input logic [7:0] b, output bit ack);
    for (int i = 7; i >= 0; i--) begin
      m_sda = b[i]; #(TQ); scl = 1; #(2*TQ); scl = 0; #(TQ);
    end
    m_sda = 1; #(TQ); scl = 1; #(TQ); ack = !sda; #(TQ); scl = 0; #(TQ);
  endtask
  task automatic i2c_rbyte(input bit send_ack, output logic [7:0] b);
    m_sda = 1;
    for (int i = 7; i >= 0; i--) begin
      #(TQ); scl = 1; #(TQ); b[i] = sda; #(TQ); scl = 0; #(TQ);
    end
    m_sda = !send_ack; #(TQ); scl = 1; #(2*TQ); scl = 0; #(TQ); m_sda = 1;
  endtask

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic write(logic [6:0] addr, logic [7:0] ptr, logic [7:0] d[], bit expect_ack);
    bit ack, all_ack;
    i2c_start();
    i2c_wbyte({addr, 1'b0}, ack);
    all_ack = ack;
    if (ack) begin
      i2c_wbyte(ptr, ack); all_ack &= ack;
      foreach (d[i]) begin i2c_wbyte(d[i], ack); all_ack &= ack; end
    end
    i2c_stop();
    check(all_ack == expect_ack, $sformatf("write to %h: acknowledge %0d", addr, all_ack));
    if (expect_ack)
      foreach (d[i]) if (32'(ptr) + i < 4) model[ptr + 8'(i)] = d[i];
    #1000;
    check(regs == model, $sformatf("registers %h, expected %h", regs, model));
  endtask

  task automatic read(logic [7:0] ptr, int n);
    bit ack;
    logic [7:0] b;
    i2c_start();
    i2c_wbyte({7'h50, 1'b0}, ack);
    i2c_wbyte(ptr, ack);
    i2c_start();
    i2c_wbyte({7'h50, 1'b1}, ack);
    check(ack, "read address not acknowledged");
    for (int i = 0; i < n; i++) begin
      logic [7:0] e;
      i2c_rbyte(i < n - 1, b);
      e = (32'(ptr) + i < 4) ? model[ptr + 8'(i)] : 8'h00;
      check(b === e, $sformatf("read ptr %0d: %h, expected %h", 32'(ptr) + i, b, e));
    end
    i2c_stop();
  endtask

  initial begin
    scl = 1; m_sda = 1; rst_n = 0; model = '0;
    #100000 rst_n = 1;
    #100000;
    check(regs == '0, "registers not reset to zero");
    for (int t = 0; t < 4; t++) begin
      logic [7:0] d[];
      int p, n;
      p = t % 4; n = 4 - p;
      d = new[n];
      foreach (d[i]) d[i] = 8'($urandom);
      write(7'h50, 8'(p), d, 1);
      read(8'h00, 4);
      read(8'(p), n);
    end
    begin
      logic [7:0] d[];
      d = '{8'hA5, 8'h5A};
      write(7'h51, 8'h00, d, 0);      // other device: ignored
      write(7'h28, 8'h01, d, 0);
      write(7'h50, 8'h03, d, 1);      // second byte falls past reg 3
      d = '{8'hFF};
      write(7'h50, 8'h07, d, 1);      // no such register
      read(8'h02, 4);                 // runs past the end: reads 0
      read(8'h09, 2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(2_000_000_000.0);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
