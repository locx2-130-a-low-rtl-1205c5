// tb_ref_pkg: bit-serial reference models used by the testbenches.
//
// Everything here is written independently of the RTL: a bit-at-a-time CRC,
// a bit-at-a-time scrambler/descrambler (x^58 + x^39 + 1), PRBS 2^5-1 and
// 2^7-1 generators, the ADC sample pattern, and the expected frame payload of
// each ADC configuration. Frame bits are numbered in sending order.
package tb_ref_pkg;
  timeunit 1ps; timeprecision 1fs;

  // ADC configurations, same encoding as the configuration register.
  localparam int NEVIS_DATA = 0, NEVIS_CAL = 1, ADS5272 = 2, ADS5294 = 3;

  function automatic bit is_cal(int cfg);  return cfg == NEVIS_CAL || cfg == ADS5294; endfunction
  function automatic bit is_cots(int cfg); return cfg == ADS5272 || cfg == ADS5294;   endfunction
  // Raw serial bits per ADC sample (MSB first) as the ADC sends them.
  function automatic int raw_bits(int cfg);
    return (cfg == ADS5272) ? 12 : (cfg == ADS5294) ? 14 : 16;
  endfunction
  function automatic int payload_bits(int cfg); return is_cal(cfg) ? 112 : 96; endfunction
  // Index, within the raw sample, of the bit carried as payload bit row k.
  function automatic int bit_of_row(int cfg, int k);
    return (is_cal(cfg) ? 13 : 11) - k;
  endfunction

  // 16-bit sample of ADC `adc` (0..3), lane `lane`, frame `fr`.
  function automatic logic [15:0] sample(int fr, int adc, int lane);
    logic [31:0] h;
    h = 32'(fr) * 32'h9E3779B1 ^ 32'(adc * 4 + lane) * 32'h85EBCA6B;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h[15:0];
  endfunction

  // Unscrambled payload bit j of the frame made from frame fr of ADCs
  // adc_a (channels 0-3) and adc_b (channels 4-7).
  function automatic bit payload_bit(int cfg, int fr, int adc_a, int adc_b, int j);
    int k, c;
    logic [15:0] s;
    k = j / 8; c = j % 8;
    s = sample(fr, (c < 4) ? adc_a : adc_b, c % 4);
    return s[bit_of_row(cfg, k)];
  endfunction

  // CRC-16 0x5B93, MSB first, start 0, over the first n bits of d.
  function automatic logic [15:0] crc16(bit d[], int n);
    logic [15:0] c;
    c = 16'h0000;
    for (int i = 0; i < n; i++) begin
      bit fb;
      fb = c[15] ^ d[i];
      c = {c[14:0], 1'b0};
      if (fb) c = c ^ 16'h5B93;
    end
    return c;
  endfunction

  // Self-synchronous descrambler state: last 58 received scrambled bits.
  class descrambler;
    bit h[$];
    function bit push(bit s);
      bit d;
      d = s ^ ((h.size() >= 39) ? h[h.size()-39] : 1'b0)
            ^ ((h.size() >= 58) ? h[h.size()-58] : 1'b0);
      h.push_back(s);
      if (h.size() > 58) void'(h.pop_front());
      return d;
    endfunction
    function bit synced(); return h.size() >= 58; endfunction
  endclass

  // Bit-serial scrambler: s[n] = d[n] ^ s[n-39] ^ s[n-58].
  class scrambler;
    bit h[$];
    function new(); for (int i = 0; i < 58; i++) h.push_back(1'b0); endfunction
    function bit push(bit d);
      bit s;
      s = d ^ h[h.size()-39] ^ h[h.size()-58];
      h.push_back(s);
      void'(h.pop_front());
      return s;
    endfunction
  endclass

  // PRBS generators, Fibonacci form, seed all ones, MSB is the output bit.
  class prbs;
    int unsigned n, tap;
    logic [6:0] s;
    function new(int unsigned n_, int unsigned tap_); n = n_; tap = tap_; s = '1; endfunction
    function bit next();
      bit o, fb;
      o  = s[n-1];
      fb = s[n-1] ^ s[tap-1];
      s  = {s[5:0], fb} & 7'((1 << n) - 1);
      return o;
    endfunction
  endclass
endpackage
