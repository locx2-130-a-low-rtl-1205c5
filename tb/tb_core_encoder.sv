// tb_core_encoder: the triplicated encoder (scrambler, CRC, trailer, frame
// builder, output voter) fed with random payload words in data mode and then
// calibration mode, with a BCID reset in each mode.
//
// For each frame one of the three input copies (or none) is replaced by
// random words, as an upset in one FIFO copy would do; the voted output must
// not notice. Checks on the output words:
//  - the word taken at a rising edge is on dout from the next falling edge,
//    ready for the next register one cycle later (word_idx_o checked too);
//  - the descrambled payload equals the payload sent;
//  - in data mode bits 96..111 carry the CRC of the payload, MSB first;
//  - bits 112..115 are 1010 and, from the BCID reset on, bits 116..119 carry
//    the PRBS 2^5-1 and 2^7-1 sequences from their all-ones seeds.
module tb_core_encoder;
  import tb_ref_pkg::*;
  import locx_pkg::*;
  timeunit 1ps; timeprecision 1fs;

  logic clk, bcid_reset, cal;
  logic [29:0] din [3];
  word_idx_t   widx [3];
  logic [29:0] dout;
  word_idx_t   widx_o;
  int checks = 0, failures = 0, n_upset = 0, n_bcid = 0, n_crc = 0;

  initial begin clk = 0; forever #3125 clk = ~clk; end

  core_encoder dut (.clk, .bcid_reset, .cal_mode(cal), .din, .word_idx(widx),
                    .dout, .word_idx_o(widx_o));

  localparam int NF = 48;          // frames per mode
  bit pay [NF][120];

  task automatic run_mode(bit c);
    logic [119:0] img;
    descrambler ds;
    bit bc5[$], bc7[$];
    int pb, rst_frame, bad;
    pb = c ? 112 : 96;
    ds = new();
    rst_frame = 6;
    cal = c;
    for (int f = 0; f < NF; f++)
      for (int j = 0; j < 120; j++) pay[f][j] = 1'($urandom);
    // two extra frames flush the pipeline
    for (int n = 0; n < 4 * NF + 8; n++) begin
      int f, w;
      f = n / 4; w = n % 4;
      // one copy (or none) is corrupted for a whole frame
      if (w == 0) bad = (f % 4 == 3 || f >= NF - 1) ? 3 : int'($urandom % 3);
      @(negedge clk); #1;
      // the word taken at edge n-1 is on dout after the next falling edge
      if (n >= 2) begin
        int fo;
        fo = (n - 1) / 4;
        checks++;
        if (widx_o != 2'((n - 1) % 4)) begin
          failures++; $display("FAIL: cal%0d output word index %0d at cycle %0d", c, widx_o, n);
        end
        img[30*widx_o +: 30] = dout;
        if (widx_o == 2'd3 && fo < NF) begin
          for (int j = 0; j < pb; j++) begin
            bit d;
            d = ds.push(img[j]);
            if (fo >= 2) begin
              checks++;
              if (d != pay[fo][j]) begin
                failures++;
                if (failures < 20) $display("FAIL: cal%0d frame %0d payload bit %0d", c, fo, j);
              end
            end
          end
          if (!c) begin
            logic [15:0] crc;
            bit p[];
            p = new[96];
            for (int j = 0; j < 96; j++) p[j] = pay[fo][j];
            crc = crc16(p, 96);
            for (int i = 0; i < 16; i++) begin
              checks++;
              if (img[96+i] != crc[15-i]) begin
                failures++; $display("FAIL: frame %0d CRC bit %0d", fo, i);
              end
            end
            n_crc++;
          end
          checks++;
          if (img[115:112] != 4'b0101) begin
            failures++; $display("FAIL: cal%0d frame %0d trailer sync %b", c, fo, img[115:112]);
          end
          if (fo >= rst_frame) begin
            bc5.push_back(img[116]); bc5.push_back(img[117]);
            bc7.push_back(img[118]); bc7.push_back(img[119]);
          end
        end
      end
      bcid_reset = (f == rst_frame && w == 1);
      for (int cc = 0; cc < 3; cc++) begin
        widx[cc] = 2'(w);
        for (int i = 0; i < 30; i++) din[cc][i] = (f < NF) ? pay[f][30*w+i] : 1'b0;
        if (cc == bad) din[cc] = 30'($urandom);
      end
      if (bad < 3 && w == 0) n_upset++;
      @(posedge clk);
    end
    bcid_reset = 0;
    // the frame whose word 3 follows the reset starts again from the seeds
    begin
      prbs g5, g7;
      int bad;
      g5 = new(5, 3); g7 = new(7, 6);
      bad = 0;
      foreach (bc5[i]) begin
        if (bc5[i] != g5.next()) bad++;
        if (bc7[i] != g7.next()) bad++;
      end
      checks++;
      if (bad != 0 || bc5.size() < 60) begin
        failures++; $display("FAIL: cal%0d BCID fields after reset: %0d wrong bits", c, bad);
      end else n_bcid++;
    end
  endtask

  initial begin
    bcid_reset = 0; cal = 0;
    run_mode(0);
    run_mode(1);
    checks++;
    if (n_upset == 0 || n_bcid != 2 || n_crc == 0) begin
      failures++; $display("FAIL: mechanisms not exercised: upsets %0d bcid %0d crc %0d", n_upset, n_bcid, n_crc);
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
