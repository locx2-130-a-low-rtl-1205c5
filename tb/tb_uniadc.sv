// tb_uniadc: for each ADC configuration, FCK outputs must rise with the input
// FCK (ADS parts) or on the first (Nevis calibration) or second (Nevis data)
// rising SCK edge after it, on each side with its own SCK. With a single COTS
// ADC the B side must carry A's SCK and FCK. Data lanes pass unchanged.
module tb_uniadc;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  adc_cfg_e cfg;
  logic sck_a, fck_a, sck_b, fck_b;
  logic [3:0] da, db;
  logic sck_ao, fck_ao, sck_bo, fck_bo;
  logic [3:0] dao, dbo;
  realtime t_ao, t_bo, t_fa, t_fb;
  int checks = 0, failures = 0;

  uniadc dut (.cfg, .sck_a, .fck_a, .data_a(da), .sck_b, .fck_b, .data_b(db),
              .sck_a_o(sck_ao), .fck_a_o(fck_ao), .data_a_o(dao),
              .sck_b_o(sck_bo), .fck_b_o(fck_bo), .data_b_o(dbo));

  always @(posedge fck_ao) t_ao = $realtime;
  always @(posedge fck_bo) t_bo = $realtime;

  localparam real T = 3125.0;       // SCK period
  localparam real SKEW = 1100.0;    // B after A

  // A and B ADC signals: 16 half-period bit slots per frame.
  task automatic frame();
    fork
      begin
        t_fa = $realtime;
        for (int k = 0; k < 16; k++) begin
          fck_a = (k < 8); da = 4'($urandom);
          #(T / 4); sck_a = (k % 2 == 0); #(T / 4);
        end
      end
      begin
        #(SKEW);
        t_fb = $realtime;
        for (int k = 0; k < 16; k++) begin
          fck_b = (k < 8); db = 4'($urandom);
          #(T / 4); sck_b = (k % 2 == 0);
          if (k < 15) #(T / 4);
        end
      end
      begin
        for (int i = 0; i < 20; i++) begin
          #(T * 8 / 20.0 + 3);
          checks++;
          if (sck_ao !== sck_a || dao !== da || dbo !== db ||
              sck_bo !== (cfg_is_cots(cfg) ? sck_a : sck_b)) begin
            failures++; $display("FAIL: cfg %0d pass-through/copy", cfg);
          end
        end
      end
    join
  endtask

  initial begin
    {sck_a, fck_a, sck_b, fck_b} = '0;
    da = 0; db = 0;
    for (int c = 0; c < 4; c++) begin
      cfg = adc_cfg_e'(c);
      // the first frame flushes the random power-up state of the FCK delay
      if (c == 0) frame();
      repeat (4) begin
        real ea, eb;
        int  s;
        frame();
        s  = cfg_fck_shift(cfg);
        ea = (s == 0) ? t_fa : t_fa + T / 4 + (s - 1) * T;
        eb = cfg_is_cots(cfg) ? t_fa : t_fb + T / 4 + (s - 1) * T;
        checks++;
        if (t_ao < ea - 1.0 || t_ao > ea + 1.0) begin
          failures++; $display("FAIL: cfg %0d FCK A rose at %f, expected %f", c, t_ao, ea);
        end
        checks++;
        if (t_bo < eb - 1.0 || t_bo > eb + 1.0) begin
          failures++; $display("FAIL: cfg %0d FCK B rose at %f, expected %f", c, t_bo, eb);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
