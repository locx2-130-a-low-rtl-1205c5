// tb_locic130: one encoder channel (triplicated delay cells, uniADC and FIFO,
// core encoder) driven by two ADC models, in all four ADC configurations and
// with non-zero SCK delay taps.
//
// Every other frame a bit in one FIFO copy's memory is flipped, at a random
// time and in a random copy, cell and lane; the voted output must be
// unaffected. The output words are collected by word_idx and descrambled; each
// frame's payload must equal the samples of consecutive ADC frames at a
// constant distance from the 160 MHz cycle count, the CRC must match in data
// mode, the 1010 sync code must be present, and after a BCID reset the PRBS
// fields must restart from their seeds.
module tb_locic130;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  localparam real TREF = 25000.0;

  logic ref_clk, clk, rst_n, bcid_reset;
  int   cfg;
  real  off_a, off_b;
  logic [3:0] tap_a, tap_b;
  logic sck_a, fck_a, sck_b, fck_b;
  logic [3:0] data_a, data_b;
  logic [29:0] dout;
  word_idx_t   widx;
  int checks = 0, failures = 0, n_upset = 0, n_bcid = 0, n_crc = 0;
  int n_cfg[4] = '{0, 0, 0, 0};

  initial begin ref_clk = 0; forever #(TREF / 2.0) ref_clk = ~ref_clk; end
  // 160 MHz clock with its rising edges 1.1 ns after the reference edges
  initial begin clk = 0; #1100; forever #3125 clk = ~clk; end

  tb_adc u_adc_a (.ref_clk, .cfg, .adc_id(0), .off_ps(off_a), .drive_clk(1'b1),
                  .sck(sck_a), .fck(fck_a), .data(data_a));
  tb_adc u_adc_b (.ref_clk, .cfg, .adc_id(1), .off_ps(off_b), .drive_clk(!is_cots(cfg)),
                  .sck(sck_b), .fck(fck_b), .data(data_b));

  locic130 dut (.clk, .rst_n, .bcid_reset, .cfg(adc_cfg_e'(cfg)), .tap_a, .tap_b,
                .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b, .dout, .word_idx(widx));

  // --------------------------------------------------------- upset injection
  bit inj_en = 0;
  always @(posedge ref_clk) begin
    #(1.0 * ($urandom % 24000));
    if (inj_en && ($urandom % 2 == 0)) begin
      int c, k, l;
      c = $urandom % 3; k = $urandom % 7; l = $urandom % 4;
      case (c)
        0: dut.g_tmr[0].u_fifo.u_mem_a.even_cells[k][l] = ~dut.g_tmr[0].u_fifo.u_mem_a.even_cells[k][l];
        1: dut.g_tmr[1].u_fifo.u_mem_b.odd_cells[k][l]  = ~dut.g_tmr[1].u_fifo.u_mem_b.odd_cells[k][l];
        default: dut.g_tmr[2].u_fifo.u_mem_a.odd_cells[k][l] = ~dut.g_tmr[2].u_fifo.u_mem_a.odd_cells[k][l];
      endcase
      n_upset++;
      @(posedge ref_clk);   // never two copies hit within one frame
    end
  end

  // ----------------------------------------------------------------- checks
  task automatic run(int c, logic [3:0] ta, logic [3:0] tb_, int nfr);
    logic [119:0] img;
    descrambler ds;
    bit bc5[$], bc7[$];
    int pb, n, got, lag, rst_at, seen0;
    cfg = c; tap_a = ta; tap_b = tb_;
    off_a = 3000.0; off_b = is_cots(c) ? 3000.0 : 3700.0;
    pb = payload_bits(c);
    ds = new();
    repeat (8) @(posedge ref_clk);
    @(negedge clk) bcid_reset = 1;
    @(negedge clk) bcid_reset = 0;
    rst_at = 0;
    inj_en = 1;
    got = 0; lag = 1 << 30; n = 0; seen0 = 0;
    while (got < nfr) begin
      @(posedge clk); #1;
      n++;
      if (widx == 2'd0) seen0 = 1;
      if (!seen0) continue;
      img[30*widx +: 30] = dout;
      if (widx != 2'd3) continue;
      got++;
      // trailer
      checks++;
      if (img[115:112] != 4'b0101) begin failures++; $display("FAIL: cfg%0d trailer sync", c); end
      bc5.push_back(img[116]); bc5.push_back(img[117]);
      bc7.push_back(img[118]); bc7.push_back(img[119]);
      begin
        bit pay[];
        int fr;
        pay = new[pb];
        for (int j = 0; j < pb; j++) pay[j] = ds.push(img[j]);
        if (got < 2) continue;   // descrambler synchronising
        if (lag == (1 << 30)) begin
          for (int cand = int'($realtime / TREF) - 5; cand <= int'($realtime / TREF); cand++) begin
            bit m;
            m = 1;
            for (int j = 0; j < pb; j++) if (pay[j] != payload_bit(c, cand, 0, 1, j)) m = 0;
            if (m) lag = n / 4 - cand;
          end
          checks++;
          if (lag == (1 << 30)) begin
            failures++; $display("FAIL: cfg%0d payload matches no ADC frame", c);
            return;
          end
        end
        fr = n / 4 - lag;
        for (int j = 0; j < pb; j++) begin
          checks++;
          if (pay[j] != payload_bit(c, fr, 0, 1, j)) begin
            failures++;
            if (failures < 20) $display("FAIL: cfg%0d frame %0d payload bit %0d", c, fr, j);
          end
        end
        if (!is_cal(c)) begin
          logic [15:0] crc;
          bit p[];
          p = new[96];
          for (int j = 0; j < 96; j++) p[j] = payload_bit(c, fr, 0, 1, j);
          crc = crc16(p, 96);
          for (int i = 0; i < 16; i++) begin
            checks++;
            if (img[96+i] != crc[15-i]) begin failures++; $display("FAIL: frame %0d CRC bit %0d", fr, i); end
          end
          n_crc++;
        end
      end
    end
    inj_en = 0;
    n_cfg[c]++;
    // PRBS fields: restart from the seeds within the first frames captured
    begin
      int k0;
      k0 = -1;
      for (int f = 0; f < 4 && k0 < 0; f++) begin
        prbs g5, g7;
        bit ok;
        g5 = new(5, 3); g7 = new(7, 6);
        ok = 1;
        for (int i = 2 * f; i < bc5.size(); i++) begin
          if (bc5[i] != g5.next()) ok = 0;
          if (bc7[i] != g7.next()) ok = 0;
        end
        if (ok) k0 = f;
      end
      checks++;
      if (k0 < 0) begin failures++; $display("FAIL: cfg%0d BCID fields do not restart", c); end
      else n_bcid++;
    end
  endtask

  initial begin
    rst_n = 0; bcid_reset = 0; cfg = 0; tap_a = 0; tap_b = 0; off_a = 3000.0; off_b = 3000.0;
    repeat (2) @(posedge ref_clk);
    rst_n = 1;
    run(NEVIS_DATA, 4'd2, 4'd4, 20);
    run(NEVIS_CAL,  4'd4, 4'd2, 20);
    run(ADS5272,    4'd3, 4'd0, 20);
    run(ADS5294,    4'd1, 4'd6, 20);
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (n_cfg[c] == 0) begin failures++; $display("FAIL: configuration %0d never ran", c); end
    end
    checks++;
    if (n_upset < 10 || n_bcid != 4 || n_crc == 0) begin
      failures++; $display("FAIL: mechanisms: upsets %0d bcid %0d crc %0d", n_upset, n_bcid, n_crc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(100_000_000.0);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
