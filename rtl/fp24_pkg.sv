// fp24_pkg: the 24-bit floating-point format used throughout the accelerator,
// plus the helpers shared by the arithmetic units.
//
// Format: 1 sign bit, 6 exponent bits and 17 fraction bits, {s, e, f}. The
// value is (-1)^s * 2^(e-31) * 1.f. An exponent field of zero means zero (no
// denormals), and there is no infinity or NaN: results that overflow saturate
// to the largest magnitude, results that underflow flush to zero. The 6/17
// split is the one chosen for the chip; bias, rounding (round to nearest,
// ties to even) and the exception handling are this design's choices.
package fp24_pkg;

  localparam int EXP_W = 6;
  localparam int MAN_W = 17;
  localparam int FP_W  = 1 + EXP_W + MAN_W;
  localparam int BIAS  = (1 << (EXP_W - 1)) - 1;   // 31
  localparam int EMAX  = (1 << EXP_W) - 1;         // 63

  typedef logic [FP_W-1:0] fp24_t;

  localparam fp24_t FP_ZERO = '0;
  localparam fp24_t FP_ONE  = {1'b0, EXP_W'(BIAS), MAN_W'(0)};
  localparam fp24_t FP_MAXM = {1'b0, EXP_W'(EMAX), {MAN_W{1'b1}}};

  function automatic logic fp_sign(fp24_t x);
    return x[FP_W-1];
  endfunction

  function automatic logic [EXP_W-1:0] fp_exp(fp24_t x);
    return x[FP_W-2 -: EXP_W];
  endfunction

  // Mantissa with the hidden bit made explicit (zero for a zero operand).
  function automatic logic [MAN_W:0] fp_man(fp24_t x);
    return (fp_exp(x) == '0) ? '0 : {1'b1, x[MAN_W-1:0]};
  endfunction

  // Round and pack. mx is normalised (mx[MAN_W+2] = 1) and holds the hidden
  // bit, MAN_W fraction bits, a guard bit mx[1] and a sticky bit mx[0]; e is
  // the biased exponent belonging to mx[MAN_W+2].
  function automatic fp24_t fp_pack(logic s, logic signed [9:0] e, logic [MAN_W+2:0] mx);
    logic [MAN_W+1:0] m;
    logic             up;
    logic signed [9:0] er;
    up = mx[1] & (mx[0] | mx[2]);
    m  = {1'b0, mx[MAN_W+2:2]} + (MAN_W+2)'(up);
    er = e;
    if (m[MAN_W+1]) begin
      m  = m >> 1;
      er = er + 10'sd1;
    end
    if (er <= 10'sd0)               return FP_ZERO;
    else if (er > 10'(EMAX))        return {s, FP_MAXM[FP_W-2:0]};
    else                            return {s, er[EXP_W-1:0], m[MAN_W-1:0]};
  endfunction

  // Exact conversion of an unsigned fixed-point number v * 2^-FRAC to FP24
  // (v must fit in MAN_W+1 bits, so no rounding is needed).
  function automatic fp24_t fp_from_ufix(logic [MAN_W:0] v, int frac);
    int msb;
    logic [MAN_W:0] n;
    msb = -1;
    for (int i = 0; i <= MAN_W; i++) if (v[i]) msb = i;
    if (msb < 0) return FP_ZERO;
    n = v << (MAN_W - msb);
    return {1'b0, EXP_W'(BIAS + msb - frac), n[MAN_W-1:0]};
  endfunction

endpackage
