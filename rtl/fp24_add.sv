// fp24_add: combinational FP24 adder/subtractor, y = a + b or a - b.
//
// The operands are ordered by magnitude, the smaller mantissa is aligned with
// a sticky bit, added or subtracted, renormalised with a leading-zero count
// and rounded to nearest-even by fp24_pkg::fp_pack. The filter unit registers
// its inputs and outputs, so this is one clock cycle of the datapath, as the
// recursive loop needs (single-cycle FP operators at the target clock).
// Exact cancellation returns +0. Format and rounding: see fp24_pkg.
module fp24_add
  import fp24_pkg::*;
(
  input  fp24_t a,
  input  fp24_t b,
  input  logic  sub,
  output fp24_t y
);
  localparam int W = MAN_W + 4;   // hidden + fraction + guard, round, sticky

  fp24_t     x0, x1;              // |x0| >= |x1|
  logic      s0, s1;
  logic [W-1:0] m0, m1, m1s;
  logic [W:0]   sum;
  logic [EXP_W:0] d;
  logic signed [9:0] e;
  logic [MAN_W+2:0] mx;
  int lz;

  always_comb begin
    logic bs;
    bs = fp_sign(b) ^ sub;
    if (a[FP_W-2:0] >= b[FP_W-2:0]) begin
      x0 = a; s0 = fp_sign(a); x1 = b; s1 = bs;
    end else begin
      x0 = b; s0 = bs;         x1 = a; s1 = fp_sign(a);
    end
    m0 = {fp_man(x0), 3'b000};
    m1 = {fp_man(x1), 3'b000};
    d  = {1'b0, fp_exp(x0)} - {1'b0, fp_exp(x1)};
    // align with sticky
    if (d >= (EXP_W+1)'(W)) m1s = {{(W-1){1'b0}}, |m1};
    else                    m1s = (m1 >> d) | {{(W-1){1'b0}}, |(m1 & ~({W{1'b1}} << d))};
    if (s0 == s1) sum = {1'b0, m0} + {1'b0, m1s};
    else          sum = {1'b0, m0} - {1'b0, m1s};
    e  = 10'(fp_exp(x0));
    lz = 0;
    mx = '0;
    y  = FP_ZERO;
    if (fp_exp(x0) == '0) begin
      y = FP_ZERO;
    end else if (sum == '0) begin
      y = FP_ZERO;
    end else if (sum[W]) begin
      // carry out: shift right by one, keep sticky
      mx = {sum[W:3], |sum[2:0]};
      y  = fp_pack(s0, e + 10'sd1, mx);
    end else begin
      for (int i = W-1; i >= 0; i--) if (sum[i] && lz == 0) lz = W - i;
      // lz-1 = number of leading zeros below bit W-1
      sum = sum << (lz - 1);
      mx  = {sum[W-1:2], |sum[1:0]};
      y   = fp_pack(s0, e - 10'(lz - 1), mx);
    end
  end
endmodule
