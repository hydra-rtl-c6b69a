// fp24_mul: combinational FP24 multiplier, y = a * b.
//
// The 18x18-bit mantissa product is normalised by at most one position, the
// bits below the kept mantissa become guard and sticky, and fp_pack rounds to
// nearest-even with underflow to zero and saturation on overflow. A zero
// operand gives +0. Used in the filter unit's recursion loops, the lambda
// term and the merger's weighting, each followed by a pipeline register.
module fp24_mul
  import fp24_pkg::*;
(
  input  fp24_t a,
  input  fp24_t b,
  output fp24_t y
);
  localparam int PW = 2 * (MAN_W + 1);

  logic [PW-1:0] p;
  logic signed [9:0] e;
  logic [MAN_W+2:0] mx;
  logic s;

  always_comb begin
    s = fp_sign(a) ^ fp_sign(b);
    p = PW'(fp_man(a)) * PW'(fp_man(b));
    e = 10'(fp_exp(a)) + 10'(fp_exp(b)) - 10'(BIAS);
    if (p[PW-1]) begin
      mx = {p[PW-1 -: MAN_W+2], |p[PW-MAN_W-3:0]};
      e  = e + 10'sd1;
    end else begin
      mx = {p[PW-2 -: MAN_W+2], |p[PW-MAN_W-4:0]};
    end
    if (fp_exp(a) == '0 || fp_exp(b) == '0) y = FP_ZERO;
    else                                    y = fp_pack(s, e, mx);
  end
endmodule
