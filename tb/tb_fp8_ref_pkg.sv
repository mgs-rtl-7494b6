// tb_fp8_ref_pkg: reference arithmetic for the FP8 dMAC testbenches, written
// with real numbers so that it shares nothing with the hardware's integer
// datapath. Every value handled is exact in a double.
package tb_fp8_ref_pkg;

  // Value of an E4M3 byte (1 sign, 4 exponent bits with bias 7, 3 mantissa bits).
  function automatic real e4m3_val(input logic [7:0] b);
    real v;
    int  e = int'(b[6:3]);
    int  m = int'(b[2:0]);
    if (e == 0) v = (m / 8.0) * (2.0 ** -6);
    else        v = (1.0 + m / 8.0) * (2.0 ** (e - 7));
    return b[7] ? -v : v;
  endfunction

  function automatic bit is_nan(input logic [7:0] b);
    return b[6:0] == 7'h7f;
  endfunction

  // Round |v| to nearest-even on the grid q.
  function automatic real rne(input real a, input real q);
    real n = a / q;
    real f = $floor(n);
    real d = n - f;
    if (d > 0.5 || (d == 0.5 && ($floor(f / 2.0) * 2.0 != f))) f = f + 1.0;
    return f * q;
  endfunction

  // floor(log2(a)) for a > 0
  function automatic int flog2(input real a);
    int e = -40;
    while (2.0 ** (e + 1) <= a) e++;
    return e;
  endfunction

  // Product rounding of the FP8 multiplier: below 2^-9 -> 0, else round to
  // nearest-even E4M3, saturating at 448.
  function automatic real round_e4m3(input real v);
    real a = (v < 0.0) ? -v : v;
    real r;
    if (a < 2.0 ** -9) return 0.0;
    if (a < 2.0 ** -6) r = rne(a, 2.0 ** -9);
    else               r = rne(a, 2.0 ** (flog2(a) - 3));
    if (r > 448.0) r = 448.0;
    return (v < 0.0) ? -r : r;
  endfunction

  // Round to nearest-even binary32 (normal range only).
  function automatic real round_fp32(input real v);
    real a = (v < 0.0) ? -v : v;
    real r;
    if (a == 0.0) return 0.0;
    r = rne(a, 2.0 ** (flog2(a) - 23));
    return (v < 0.0) ? -r : r;
  endfunction

  // Value of a binary32 word (normal numbers and zero).
  function automatic real fp32_val(input logic [31:0] w);
    real v, m;
    int  e;
    if (w[30:23] == 8'd0) return 0.0;
    e = int'(w[30:23]) - 127;
    m = w[22:0];
    v = (1.0 + m / (2.0 ** 23)) * (2.0 ** e);
    return w[31] ? -v : v;
  endfunction

  // Largest product magnitude any pair with these exponent fields can have.
  function automatic real max_prod_for_exps(input logic [3:0] ea, input logic [3:0] eb);
    return e4m3_val({1'b0, ea, 3'd7}) * e4m3_val({1'b0, eb, 3'd7});
  endfunction

endpackage
