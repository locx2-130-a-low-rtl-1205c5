// tb_fifo: the FIFO of one channel (both ADC halves, read side) with ADC
// models and the uniADC stage in front, in all four ADC configurations, with
// ADC B ahead of or behind ADC A by up to one SCK period and with several
// phases of the 160 MHz read clock against the ADC clocks.
//
// At every 160 MHz edge the testbench takes the word the FIFO presents, as the
// frame builder would, and assembles words 0..3 into a frame image. Every
// payload bit of every frame must equal the ADC samples of one ADC frame
// number, and that number must advance by exactly one per image (no lost or
// repeated samples once the read start has locked).
module tb_fifo;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  localparam real TREF = 25000.0;

  logic ref_clk, clk, rst_n;
  int   cfg;
  real  off_a, off_b, bump;
  logic sck_a, fck_a, sck_b, fck_b;
  logic [3:0] data_a, data_b;
  logic usck_a, ufck_a, usck_b, ufck_b;
  logic [3:0] udata_a, udata_b;
  logic [29:0] word;
  word_idx_t   idx;
  int checks = 0, failures = 0;
  int n_cfg[4] = '{0, 0, 0, 0};
  int n_skew = 0;

  initial begin ref_clk = 0; forever #(TREF / 2.0) ref_clk = ~ref_clk; end
  // 160 MHz read clock; `bump` stretches one low phase to move its phase.
  initial begin
    clk = 0; bump = 0.0;
    forever begin
      #3125 clk = 1;
      #3125 clk = 0;
      if (bump > 0.0) begin #(bump); bump = 0.0; end
    end
  end

  tb_adc u_adc_a (.ref_clk, .cfg, .adc_id(0), .off_ps(off_a), .drive_clk(1'b1),
                  .sck(sck_a), .fck(fck_a), .data(data_a));
  tb_adc u_adc_b (.ref_clk, .cfg, .adc_id(1), .off_ps(off_b), .drive_clk(!is_cots(cfg)),
                  .sck(sck_b), .fck(fck_b), .data(data_b));

  uniadc u_uni (.cfg(adc_cfg_e'(cfg)), .sck_a, .fck_a, .data_a, .sck_b, .fck_b, .data_b,
                .sck_a_o(usck_a), .fck_a_o(ufck_a), .data_a_o(udata_a),
                .sck_b_o(usck_b), .fck_b_o(ufck_b), .data_b_o(udata_b));

  fifo dut (.clk, .rst_n, .cal_mode(is_cal(cfg)), .sck_a(usck_a), .fck_a(ufck_a), .data_a(udata_a),
            .sck_b(usck_b), .fck_b(ufck_b), .data_b(udata_b), .data(word), .word_idx(idx));

  // ------------------------------------------------------------ checking
  bit   chk_en = 0;
  logic [119:0] img;
  int   nxt = -1, fr_prev = -1, frames = 0;

  always @(posedge clk) begin
    if (!chk_en) begin
      nxt = -1; fr_prev = -1;
    end else if (nxt < 0 && idx != 2'd0) begin
      // wait for the first word 0
    end else if (nxt >= 0 && idx != 2'(nxt)) begin
      checks++; failures++;
      $display("FAIL: cfg%0d read address %0d, expected %0d", cfg, idx, nxt);
      nxt = 0;
    end else begin
      img[30*idx +: 30] = word;
      nxt = (int'(idx) + 1) % 4;
      if (idx == 2'd3) check_image();
    end
  end

  task automatic check_image();
    int pb, fr;
    pb = payload_bits(cfg);
    fr = -1;
    if (fr_prev < 0) begin
      // first image: find its ADC frame among the recent ones
      for (int cand = int'($realtime / TREF) - 4; cand <= int'($realtime / TREF); cand++) begin
        bit m;
        m = 1;
        for (int j = 0; j < pb; j++) if (img[j] != payload_bit(cfg, cand, 0, 1, j)) m = 0;
        if (m) fr = cand;
      end
      checks++;
      if (fr < 0) begin
        failures++; $display("FAIL: cfg%0d off_b %.0f image matches no ADC frame", cfg, off_b);
        return;
      end
    end else fr = fr_prev + 1;
    for (int j = 0; j < pb; j++) begin
      checks++;
      if (img[j] != payload_bit(cfg, fr, 0, 1, j)) begin
        failures++;
        if (failures < 20) $display("FAIL: cfg%0d off_b %.0f frame %0d bit %0d", cfg, off_b, fr, j);
      end
    end
    fr_prev = fr;
    frames++;
  endtask

  task automatic run(int c, real skew, real ph);
    chk_en = 0;
    cfg = c; off_a = 4000.0; off_b = 4000.0 + skew;
    bump = ph;
    repeat (8) @(posedge ref_clk);
    frames = 0;
    chk_en = 1;
    repeat (12) @(posedge ref_clk);
    chk_en = 0;
    checks++;
    if (frames < 10) begin failures++; $display("FAIL: cfg%0d only %0d frames", c, frames); end
    else begin
      n_cfg[c]++;
      if (skew != 0.0) n_skew++;
    end
  endtask

  initial begin
    rst_n = 0; cfg = 0; off_a = 3000.0; off_b = 3000.0;
    repeat (2) @(posedge ref_clk);
    rst_n = 1;
    for (int c = 0; c < 4; c++)
      for (int p = 0; p < 3; p++) run(c, 0.0, 1000.0 + 1700.0 * p);
    for (int p = 0; p < 4; p++) begin
      run(NEVIS_DATA, 3000.0, 900.0 * p);
      run(NEVIS_DATA, -3000.0, 900.0 * p);
      run(NEVIS_CAL, 3000.0, 900.0 * p);
      run(NEVIS_CAL, -3000.0, 900.0 * p);
      run(NEVIS_DATA, 3125.0, 900.0 * p + 450.0);   // the specified limit
      run(NEVIS_CAL, -3125.0, 900.0 * p + 450.0);
    end
    for (int c = 0; c < 4; c++) begin
      checks++;
      if (n_cfg[c] == 0) begin failures++; $display("FAIL: configuration %0d never checked", c); end
    end
    checks++;
    if (n_skew == 0) begin failures++; $display("FAIL: no skew case"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(200_000_000.0);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
