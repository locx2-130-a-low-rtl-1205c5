// tb_locx2_130: end-to-end test of the LOCx2-130 top at its default sizes.
//
// Four ADC models (A, B on channel 0; C, D on channel 1) send a hashed sample
// pattern. The configuration is written over I2C and read back. Each of the
// four ADC configurations is run on channel 0 (channel 1 runs the next one),
// with ADC B/D skewed against A/C by up to one SCK period in the two-Nevis
// cases and with the B/D clock pins idle in the single-COTS-ADC cases. The
// serial outputs are sampled at the 1.6 GHz phase edges; the testbench finds
// the 1010 trailer boundary, descrambles the payload bit by bit, checks every
// payload bit against the ADC samples of one consistent ADC frame number,
// checks the CRC (data mode) and the BCID PRBS fields after a BCID reset, and
// checks that the latency from the ADC's FCK to the frame's first serial bit
// is constant and the frame period is exactly 120 bit times. Single-bit
// upsets are injected into one copy of channel 0's triplicated logic at a
// time while frames are captured; the output must not show them.
module tb_locx2_130;
  import tb_ref_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  localparam real TREF = 25000.0;

  logic ref_clk = 1'b0, rst_n = 1'b0, bcid_reset = 1'b0;
  logic scl = 1'b1, m_sda = 1'b1, sda_oe, sda;
  logic sck_a, fck_a, sck_b, fck_b, sck_c, fck_c, sck_d, fck_d;
  logic [3:0] data_a, data_b, data_c, data_d;
  logic [1:0] tx;

  int  cfg0 = 0, cfg1 = 1;
  real off_a = 3000.0, off_b = 3000.0, off_c = 3000.0, off_d = 3000.0;

  int checks = 0, failures = 0;
  int n_mode[4] = '{0, 0, 0, 0};
  int n_skew = 0, n_bcid = 0, n_crc = 0, n_i2c = 0, n_cots_copy = 0;

  assign sda = m_sda & ~sda_oe;

  always #(TREF / 2.0) ref_clk = ~ref_clk;

  tb_adc u_adc_a (.ref_clk, .cfg(cfg0), .adc_id(0), .off_ps(off_a), .drive_clk(1'b1),
                  .sck(sck_a), .fck(fck_a), .data(data_a));
  tb_adc u_adc_b (.ref_clk, .cfg(cfg0), .adc_id(1), .off_ps(off_b), .drive_clk(!is_cots(cfg0)),
                  .sck(sck_b), .fck(fck_b), .data(data_b));
  tb_adc u_adc_c (.ref_clk, .cfg(cfg1), .adc_id(2), .off_ps(off_c), .drive_clk(1'b1),
                  .sck(sck_c), .fck(fck_c), .data(data_c));
  tb_adc u_adc_d (.ref_clk, .cfg(cfg1), .adc_id(3), .off_ps(off_d), .drive_clk(!is_cots(cfg1)),
                  .sck(sck_d), .fck(fck_d), .data(data_d));

  locx2_130 dut (.ref_clk, .rst_n, .bcid_reset, .scl, .sda_i(sda), .sda_oe,
                 .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
                 .sck_c, .fck_c, .data_c, .sck_d, .fck_d, .data_d, .tx);

  // ---------------------------------------------------------------- capture
  bit  cap_en = 0;
  bit  rxb[2][$];
  real rxt[2][$];

  always @(posedge dut.q0 or posedge dut.q1 or posedge dut.q2) begin
    #100;
    if (cap_en)
      for (int c = 0; c < 2; c++) begin
        rxb[c].push_back(tx[c]);
        rxt[c].push_back($realtime);
      end
  end

  // ------------------------------------------------------ upset injection
  // While frames are captured, bits are flipped in one copy of channel 0's
  // triplicated logic at a time: a FIFO cell of copy 0 or 1, or a history bit
  // of scrambler copy 2. Three reference periods separate two flips, so no
  // word is ever wrong in two copies; the voted output must not show them.
  int n_upset = 0;
  always @(posedge ref_clk) begin
    #(1.0 * ($urandom % 24000));
    if (cap_en && ($urandom % 2 == 0)) begin
      int k, l, h;
      k = $urandom % 7; l = $urandom % 4; h = $urandom % 58;
      case ($urandom % 3)
        0: dut.u_enc0.g_tmr[0].u_fifo.u_mem_a.even_cells[k][l] =
             ~dut.u_enc0.g_tmr[0].u_fifo.u_mem_a.even_cells[k][l];
        1: dut.u_enc0.g_tmr[1].u_fifo.u_mem_b.odd_cells[k][l] =
             ~dut.u_enc0.g_tmr[1].u_fifo.u_mem_b.odd_cells[k][l];
        default: dut.u_enc0.u_core.u_scr.hist[2][h] = ~dut.u_enc0.u_core.u_scr.hist[2][h];
      endcase
      n_upset++;
      repeat (3) @(posedge ref_clk);
    end
  end

  // -------------------------------------------------------------------- I2C
  localparam real TQ = 250000.0;   // quarter of a 1 MHz SCL period

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

  task automatic i2c_write(input logic [7:0] ptr, input logic [7:0] d[]);
    bit ack, all_ack;
    all_ack = 1;
    i2c_start();
    i2c_wbyte({7'h50, 1'b0}, ack); all_ack &= ack;
    i2c_wbyte(ptr, ack);           all_ack &= ack;
    foreach (d[i]) begin i2c_wbyte(d[i], ack); all_ack &= ack; end
    i2c_stop();
    checks++;
    if (!all_ack) begin failures++; $display("FAIL: I2C write not acknowledged"); end
  endtask

  task automatic i2c_read(input logic [7:0] ptr, input int n, output logic [7:0] d[]);
    bit ack;
    d = new[n];
    i2c_start();
    i2c_wbyte({7'h50, 1'b0}, ack);
    i2c_wbyte(ptr, ack);
    i2c_start();
    i2c_wbyte({7'h50, 1'b1}, ack);
    for (int i = 0; i < n; i++) i2c_rbyte(i < n - 1, d[i]);
    i2c_stop();
  endtask

  task automatic configure(int c0, int c1, logic [3:0] ta, tb_, tc, td);
    logic [7:0] w[], r[];
    w = '{8'(c0), 8'(c1), {tb_, ta}, {td, tc}};
    i2c_write(8'h00, w);
    i2c_read(8'h00, 4, r);
    for (int i = 0; i < 4; i++) begin
      checks++;
      if (r[i] !== w[i]) begin
        failures++; $display("FAIL: I2C readback reg%0d %h != %h", i, r[i], w[i]);
      end
    end
    n_i2c++;
  endtask

  // ----------------------------------------------------------------- decode
  // Decode captured frames of channel ch, made from ADC ids adc_a/adc_b in
  // configuration cfg, ADC A offset off (ps). bcid_frame: ADC frame number of
  // the reference edge at which bcid_reset was asserted (-1: none).
  task automatic decode(int ch, int cfg, int adc_a, int adc_b, real off, bit chk_bcid);
    int n, o, best, nfr, fr0, pb, lat_first;
    real lat, lat0;
    bit  frame[];
    descrambler ds;
    bit  bc5[$], bc7[$];
    n = rxb[ch].size();
    best = -1;
    // Frame boundary: trailer code 1010 at bits 112..115 of every frame.
    for (o = 0; o < 120 && best < 0; o++) begin
      bit ok;
      ok = 1;
      for (int m = o; m + 120 <= n; m += 120)
        if (!(rxb[ch][m+112] == 1 && rxb[ch][m+113] == 0 &&
              rxb[ch][m+114] == 1 && rxb[ch][m+115] == 0)) ok = 0;
      if (ok) best = o;
    end
    checks++;
    if (best < 0) begin
      failures++; $display("FAIL: ch%0d cfg%0d no frame boundary found", ch, cfg);
      return;
    end
    nfr = (n - best) / 120;
    pb  = payload_bits(cfg);
    ds  = new();
    fr0 = -1;
    lat0 = -1.0;
    frame = new[120];
    for (int f = 0; f < nfr; f++) begin
      int base, fr;
      bit pay[];
      base = best + 120 * f;
      pay = new[pb];
      for (int j = 0; j < 120; j++) frame[j] = rxb[ch][base+j];
      for (int j = 0; j < pb; j++) pay[j] = ds.push(frame[j]);
      bc5.push_back(frame[116]); bc5.push_back(frame[117]);
      bc7.push_back(frame[118]); bc7.push_back(frame[119]);
      if (f < 1) continue;   // descrambler synchronising
      // ADC frame number: the one whose first serial bit preceded this frame
      // by the (constant) latency; found on the first checked frame.
      if (fr0 < 0) begin
        for (int cand = int'(rxt[ch][base] / TREF) - 6; cand <= int'(rxt[ch][base] / TREF); cand++) begin
          bit match;
          match = 1;
          for (int j = 0; j < pb; j++)
            if (pay[j] != payload_bit(cfg, cand, adc_a, adc_b, j)) match = 0;
          if (match) fr0 = cand - f;
          else if ($test$plusargs("dbg")) begin
            string m; m = "";
            for (int j = 0; j < pb; j++)
              if (pay[j] != payload_bit(cfg, cand, adc_a, adc_b, j)) m = {m, $sformatf(" %0d", j)};
            $display("dbg cand %0d mismatches:%s", cand, m);
          end
        end
        checks++;
        if (fr0 < 0) begin
          failures++;
          $display("FAIL: ch%0d cfg%0d payload matches no ADC frame", ch, cfg);
          return;
        end
      end
      fr = fr0 + f;
      if ($test$plusargs("dbg")) begin
        int nbad; nbad = 0;
        for (int j = 0; j < pb; j++) if (pay[j] != payload_bit(cfg, fr, adc_a, adc_b, j)) nbad++;
        $display("dbg ch%0d frame %0d bad bits %0d", ch, fr, nbad);
      end
      for (int j = 0; j < pb; j++) begin
        checks++;
        if (pay[j] != payload_bit(cfg, fr, adc_a, adc_b, j)) begin
          failures++;
          if (failures < 10) $display("FAIL: ch%0d cfg%0d frame %0d payload bit %0d", ch, cfg, fr, j);
        end
      end
      if (!is_cal(cfg)) begin
        logic [15:0] exp_crc;
        bit pu[];
        pu = new[96];
        for (int j = 0; j < 96; j++) pu[j] = payload_bit(cfg, fr, adc_a, adc_b, j);
        exp_crc = crc16(pu, 96);
        for (int i = 0; i < 16; i++) begin
          checks++;
          if (frame[96+i] != exp_crc[15-i]) begin
            failures++; $display("FAIL: ch%0d frame %0d CRC bit %0d", ch, fr, i);
          end
        end
        n_crc++;
      end
      // Latency: from the ADC's FCK rising edge to the frame's first bit.
      lat = rxt[ch][base] - 100.0 - (TREF / 2.0 + fr * TREF + off);
      if (lat0 < 0) lat0 = lat;
      checks++;
      if (lat - lat0 > 1.0 || lat0 - lat > 1.0) begin
        failures++; $display("FAIL: ch%0d latency changed %f -> %f", ch, lat0, lat);
      end
      // Frame period: 120 bits of 208.3 ps = one 25 ns LHC period.
      checks++;
      if (f > 1) begin
        real per;
        per = rxt[ch][base] - rxt[ch][base-120];
        if (per < TREF - 1.0 || per > TREF + 1.0) begin
          failures++; $display("FAIL: ch%0d frame period %f", ch, per);
        end
      end
    end
    n_mode[cfg]++;
    $display("ch%0d cfg%0d: %0d frames checked, latency FCK->first serial bit %.1f ns",
             ch, cfg, nfr - 1, lat0 / 1000.0);
    // BCID: after the reset the fields restart from the PRBS seeds.
    if (chk_bcid) begin
      int k0;
      k0 = -1;
      for (int f = 0; f + 4 <= nfr && k0 < 0; f++) begin
        prbs g5, g7;
        bit ok;
        g5 = new(5, 3); g7 = new(7, 6);
        ok = 1;
        for (int i = 2 * f; i < 2 * nfr; i++) begin
          if (bc5[i] != g5.next()) ok = 0;
          if (bc7[i] != g7.next()) ok = 0;
        end
        if (ok) k0 = f;
      end
      checks++;
      if (k0 < 0) begin
        failures++; $display("FAIL: ch%0d BCID field does not restart after BCID reset", ch);
      end else if (ch == 0) n_bcid++;
    end
  endtask

  // ------------------------------------------------------------------- run
  task automatic run_case(int c0, int c1, real skew0, real skew1, int nframes);
    off_a = 3000.0; off_c = 3000.0;
    off_b = 3000.0 + skew0; off_d = 3000.0 + skew1;
    cfg0 = c0; cfg1 = c1;
    configure(c0, c1, 4'd0, 4'd0, 4'd1, 4'd1);
    if (is_cots(c0)) n_cots_copy++;
    if (skew0 != 0.0) n_skew++;
    repeat (6) @(posedge ref_clk);
    // BCID reset for one LHC clock, then capture.
    @(posedge ref_clk); bcid_reset <= 1'b1;
    @(posedge ref_clk); bcid_reset <= 1'b0;
    cap_en = 1;
    repeat (nframes) @(posedge ref_clk);
    cap_en = 0;
    #1000;
    decode(0, c0, 0, 1, off_a, 1);
    decode(1, c1, 2, 3, off_c, 1);
    for (int c = 0; c < 2; c++) begin rxb[c].delete(); rxt[c].delete(); end
  endtask

  // The single COTS ADC drives both halves: its lanes 4-7 are modelled as
  // adc_id of the B/D model, so expected data use that id for channels 4-7.
  task automatic run_all();
    run_case(NEVIS_DATA, NEVIS_CAL, 0.0,    1500.0, 14);
    run_case(NEVIS_CAL,  ADS5272,   3000.0, 0.0,    14);
    run_case(ADS5272,    ADS5294,   0.0,    0.0,    14);
    run_case(ADS5294,    NEVIS_DATA, 0.0,  -2500.0, 14);
    run_case(NEVIS_DATA, NEVIS_DATA, -3000.0, 3000.0, 14);
  endtask

  initial begin
    repeat (3) @(posedge ref_clk);
    rst_n = 1'b1;
    repeat (2) @(posedge ref_clk);
    run_all();
    for (int m = 0; m < 4; m++) begin
      checks++;
      if (n_mode[m] == 0) begin failures++; $display("FAIL: configuration %0d never ran", m); end
    end
    checks++; if (n_skew == 0)      begin failures++; $display("FAIL: no ADC skew case"); end
    checks++; if (n_bcid == 0)      begin failures++; $display("FAIL: no BCID reset seen"); end
    checks++; if (n_crc == 0)       begin failures++; $display("FAIL: no CRC checked"); end
    checks++; if (n_i2c == 0)       begin failures++; $display("FAIL: no I2C configuration"); end
    checks++; if (n_cots_copy == 0) begin failures++; $display("FAIL: no single-ADC SCK/FCK copy"); end
    checks++; if (n_upset == 0)     begin failures++; $display("FAIL: no upset injected"); end
    $display("mechanisms: modes %0d/%0d/%0d/%0d skew %0d bcid %0d crc-frames %0d i2c %0d cots %0d upsets %0d",
             n_mode[0], n_mode[1], n_mode[2], n_mode[3], n_skew, n_bcid, n_crc, n_i2c, n_cots_copy, n_upset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(3_000_000_000.0);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
