// fp24_div: combinational FP24 divider, y = a / b.
//
// The mantissa quotient is formed as an integer division of the dividend
// mantissa, shifted left by MAN_W+4 bits, by the divisor mantissa; a non-zero
// remainder sets the sticky bit, and the result is normalised by at most one
// position and rounded to nearest-even. A zero dividend gives +0; a zero
// divisor saturates to the largest magnitude (it cannot occur in the filter,
// whose denominator is always at least 1.0). This is the one divider of each
// filter unit, used once per pixel in the backward recursion; its internal
// structure is this design's choice.
module fp24_div
  import fp24_pkg::*;
(
  input  fp24_t a,
  input  fp24_t b,
  output fp24_t y
);
  localparam int SH = MAN_W + 4;
  localparam int QW = MAN_W + 1 + SH;

  logic [QW-1:0] num, q, r;
  logic signed [9:0] e;
  logic [MAN_W+2:0] mx;
  logic s;

  always_comb begin
    s   = fp_sign(a) ^ fp_sign(b);
    num = QW'(fp_man(a)) << SH;
    q   = num / QW'(fp_man(b) | (MAN_W+1)'(fp_exp(b) == '0));
    r   = num % QW'(fp_man(b) | (MAN_W+1)'(fp_exp(b) == '0));
    e   = 10'(fp_exp(a)) - 10'(fp_exp(b)) + 10'(BIAS);
    // q lies in (2^(SH-1), 2^(SH+1))
    if (q[SH]) mx = {q[SH -: MAN_W+2], (|q[SH-MAN_W-2:0]) | (r != '0)};
    else begin
      mx = {q[SH-1 -: MAN_W+2], (|q[SH-MAN_W-3:0]) | (r != '0)};
      e  = e - 10'sd1;
    end
    if (fp_exp(a) == '0)      y = FP_ZERO;
    else if (fp_exp(b) == '0) y = {s, FP_MAXM[FP_W-2:0]};
    else                      y = fp_pack(s, e, mx);
  end
endmodule
