// tb_fp24_util: reference conversions between FP24 bit patterns and real
// numbers for the testbenches. They are written from the number format alone
// (value = (-1)^s * 2^(e-31) * 1.f, zero for e = 0, round to nearest-even,
// flush to zero below the smallest normal, saturate above the largest) and do
// not share code with the RTL.
package tb_fp24_util;

  function automatic real fp2r(logic [23:0] x);
    real m;
    int  e;
    if (x[22:17] == 0) return 0.0;
    m = 1.0 + real'(x[16:0]) / 131072.0;
    e = int'(x[22:17]) - 31;
    m = m * (2.0 ** e);
    return x[23] ? -m : m;
  endfunction

  function automatic logic [23:0] r2fp(real v);
    logic s;
    int   e;
    real  a, f, fr, d;
    longint unsigned mi;
    if (v == 0.0) return 24'd0;
    s = (v < 0.0);
    a = s ? -v : v;
    if (a > 1.0e30) return {s, 6'd63, 17'h1ffff};
    if (a < 1.0e-30) return 24'd0;
    e = 0;
    while (a >= 2.0) begin a = a / 2.0; e++; end
    while (a < 1.0)  begin a = a * 2.0; e--; end
    f  = (a - 1.0) * 131072.0;
    fr = $floor(f);
    d  = f - fr;
    mi = longint'(fr);
    if (d > 0.5 || (d == 0.5 && mi[0])) mi++;
    if (mi == 131072) begin mi = 0; e++; end
    if (e + 31 <= 0) return 24'd0;
    if (e + 31 > 63) return {s, 6'd63, 17'h1ffff};
    return {s, 6'(e + 31), 17'(mi)};
  endfunction

  // A random FP24 value with an exponent within +-span of 2^0.
  function automatic logic [23:0] rand_fp(int span);
    int e;
    e = 31 + int'($urandom_range(2 * span)) - span;
    return {1'($urandom), 6'(e), 17'($urandom)};
  endfunction

  function automatic real rabs(real v);
    return v < 0.0 ? -v : v;
  endfunction

endpackage
