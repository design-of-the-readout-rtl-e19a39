// tb_stk_ref_pkg: stimulus and reference functions shared by the testbenches.
//
// adc_value() defines the analog picture the behavioural front-end model produces: a fixed
// pedestal per strip, a common-noise offset per VA140 chip and event, a little per-strip noise,
// and two-strip clusters in some sub-parts of some events. The testbenches compute the expected
// outputs from these definitions, independently of the RTL.
package tb_stk_ref_pkg;

  function automatic int ped_of(int a, int s);
    return 150 + ((a * 37 + s * 11) % 200);
  endfunction

  function automatic int cn_of(int ev, int a, int va);
    return ((ev * 7 + a * 3 + va * 5) % 21) - 10;
  endfunction

  function automatic int noise_of(int ev, int a, int s);
    return ((ev * 13 + a * 7 + s * 3) % 5) - 2;
  endfunction

  // first strip of the cluster of sub-part a in event ev, or -1
  function automatic int clu_of(int ev, int a, int n_strip);
    if (((a + ev) % 4) != 0) return -1;
    return (ev * 17 + a * 29) % (n_strip - 3);
  endfunction

  function automatic int sig_of(int ev, int a, int s, int n_strip);
    int c;
    c = clu_of(ev, a, n_strip);
    if (c < 0) return 0;
    if (s == c) return 300;
    if (s == c + 1) return 150;
    return 0;
  endfunction

  // hot strip: one in 509 channels jumps between 300 and 3900 counts whatever the charge (a broken strip
  // that the ground marks bad)
  function automatic bit is_hot(int a, int s, int n_strip);
    return ((a * n_strip + s) % 509) == 10;
  endfunction

  function automatic int adc_value(int ev, int a, int s, int n_strip, int va_ch);
    int v;
    if (is_hot(a, s, n_strip)) return (ev & 1) ? 3900 : 300;
    v = ped_of(a, s) + cn_of(ev, a, s / va_ch) + noise_of(ev, a, s) + sig_of(ev, a, s, n_strip);
    if (v < 0) v = 0;
    if (v > 4095) v = 4095;
    return v;
  endfunction

  // CRC-16/CCITT-FALSE of one byte
  function automatic logic [15:0] crc_byte(logic [15:0] c, logic [7:0] b);
    c = c ^ {b, 8'h00};
    for (int i = 0; i < 8; i++) c = c[15] ? ((c << 1) ^ 16'h1021) : (c << 1);
    return c;
  endfunction

endpackage
