// filter_unit: one filter unit (FU) of the cluster. It evaluates the 1D
// permeability filter on two lines of a tile at once, one pixel per cycle,
// even line on one cycle and odd line on the next (pipeline interleaving).
//
// Per line, with pi_p the permeability from pixel p to p+1:
//   forward : F_{p+1}  = pi_p (F_p + J_p),      F^_{p+1} = pi_p (F^_p + 1)
//   backward: B_p      = pi_p S_{p+1},          S_p = B_p + J_p,  S^_p = B^_p + 1
//   output  : J'_p = (F_p + S_p + lambda (A_p - J_p)) / (F^_p + S^_p)
// which is the forward/backward recursion and the combination step of the
// filter (S_p = B_p + J_p is the backward sum before the multiply, so B_{p-1}
// = pi_{p-1} S_p). F and F^ start at zero on the first pixel, S at zero on
// the first backward pixel.
//
// The F/B and F^/B^ recursions share one adder and one multiplier each,
// with a register after both (loop pipelining). The two-register loop holds
// one value of each of the two interleaved lines. A forward pixel uses the
// adder in the cycle it sits in the input register and the multiplier in the
// next; a backward pixel uses the multiplier first, then the adder. The
// caller must therefore leave one idle cycle whenever it switches between the
// forward and backward phase (an assertion checks it). F_p and F^_p are saved
// in two 96x24 stores (48 pixels x 2 lines) during the forward phase and read
// back in the backward phase. After the loop, the numerator and denominator
// sums and the divider each take one registered stage: out_* are registered
// 5 clock edges after the edge that samples a backward pixel into the input
// register (LAT = 6 cycles from presenting in_* to out_* valid)
// Forward pixels produce no output.
//
// Following the chip: two lines interleaved, single-cycle FP24 operators, one
// divider used only in the backward phase (so it is busy half of the time),
// two 96x24 forward stores. This design's choices: the exact register
// placement after the loop and the phase-switch bubble.
module filter_unit
  import fp24_pkg::*;
#(
  parameter int LINE = 48
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_bwd,     // 0: forward phase, 1: backward phase
  input  logic       in_first,   // first pixel of this line in this phase
  input  logic       in_line,    // which of the two interleaved lines
  input  logic [5:0] in_pos,     // pixel index along the line
  input  fp24_t      in_j,
  input  fp24_t      in_a,
  input  fp24_t      in_pi,
  input  fp24_t      lambda,
  output logic       out_valid,
  output logic       out_line,
  output logic [5:0] out_pos,
  output fp24_t      out_j
);
  localparam int LAT = 6;
  localparam int SD  = 2 * LINE;

  // ---------------- stage 0: input register
  logic  v0, bwd0, first0, line0;
  logic [5:0] pos0;
  fp24_t j0, a0, pi0;
  // ---------------- stage 1
  logic  v1, bwd1, line1;
  logic [5:0] pos1;
  fp24_t j1, a1, pi1;
  // ---------------- loop registers
  fp24_t r_sum, r_sumh, r_prod, r_prodh;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v0 <= 1'b0; v1 <= 1'b0;
    end else begin
      v0 <= in_valid;
      v1 <= v0;
    end
  end

  always_ff @(posedge clk) begin
    bwd0 <= in_bwd; first0 <= in_first; line0 <= in_line; pos0 <= in_pos;
    j0 <= in_j; a0 <= in_a; pi0 <= in_pi;
    bwd1 <= bwd0; line1 <= line0; pos1 <= pos0;
    j1 <= j0; a1 <= a0; pi1 <= pi0;
  end

  // ---------------- shared recursion operators
  logic add_f, add_b, mul_b, mul_f;
  fp24_t add_x, add_xh, add_y, add_yh, add_o, add_oh;
  fp24_t mul_x, mul_xh, mul_p, mul_o, mul_oh;

  assign add_f = v0 && !bwd0;   // forward pixel in stage 0 adds
  assign add_b = v1 &&  bwd1;   // backward pixel in stage 1 adds
  assign mul_b = v0 &&  bwd0;   // backward pixel in stage 0 multiplies
  assign mul_f = v1 && !bwd1;   // forward pixel in stage 1 multiplies

  always_comb begin
    // adder operands
    if (add_f) begin
      add_x  = first0 ? FP_ZERO : r_prod;
      add_xh = first0 ? FP_ZERO : r_prodh;
      add_y  = j0;
    end else begin
      add_x  = r_prod;
      add_xh = r_prodh;
      add_y  = j1;
    end
    add_yh = FP_ONE;
    // multiplier operands
    if (mul_b) begin
      mul_x  = first0 ? FP_ZERO : r_sum;
      mul_xh = first0 ? FP_ZERO : r_sumh;
      mul_p  = pi0;
    end else begin
      mul_x  = r_sum;
      mul_xh = r_sumh;
      mul_p  = pi1;
    end
  end

  fp24_add u_add  (.a(add_x),  .b(add_y),  .sub(1'b0), .y(add_o));
  fp24_add u_addh (.a(add_xh), .b(add_yh), .sub(1'b0), .y(add_oh));
  fp24_mul u_mul  (.a(mul_x),  .b(mul_p),  .y(mul_o));
  fp24_mul u_mulh (.a(mul_xh), .b(mul_p),  .y(mul_oh));

  always_ff @(posedge clk) begin
    if (add_f || add_b) begin
      r_sum  <= add_o;
      r_sumh <= add_oh;
    end
    if (mul_b || mul_f) begin
      r_prod  <= mul_o;
      r_prodh <= mul_oh;
    end
  end

  // ---------------- forward-pass stores (F and F^), 96 x 24 each
  logic [$clog2(SD)-1:0] st_waddr, st_raddr;
  fp24_t st_f, st_fh;
  assign st_waddr = {pos0, line0};
  assign st_raddr = {pos1, line1};

  sram_2p #(.DEPTH(SD), .WIDTH(FP_W)) u_store_f (
    .clk, .re(add_b), .raddr(st_raddr), .rdata(st_f),
    .we(add_f), .waddr(st_waddr), .wdata(add_x));
  sram_2p #(.DEPTH(SD), .WIDTH(FP_W)) u_store_fh (
    .clk, .re(add_b), .raddr(st_raddr), .rdata(st_fh),
    .we(add_f), .waddr(st_waddr), .wdata(add_xh));

  // ---------------- lambda (A - J)
  fp24_t d_o, ld_o;
  fp24_t d_r;
  fp24_add u_sub (.a(a1), .b(j1), .sub(1'b1), .y(d_o));
  fp24_mul u_lam (.a(d_r), .b(lambda), .y(ld_o));

  // ---------------- numerator / denominator / division
  logic v2, v3, v4;
  logic l2, l3, l4;
  logic [5:0] p2, p3, p4;
  fp24_t n1_o, den_o, num_o, q_o;
  fp24_t n1_r, den_r, ld_r, num_r, den_r2;

  fp24_add u_n1  (.a(r_sum),  .b(st_f),  .sub(1'b0), .y(n1_o));
  fp24_add u_den (.a(r_sumh), .b(st_fh), .sub(1'b0), .y(den_o));
  fp24_add u_num (.a(n1_r),   .b(ld_r),  .sub(1'b0), .y(num_o));
  fp24_div u_div (.a(num_r),  .b(den_r2), .y(q_o));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v2 <= 1'b0; v3 <= 1'b0; v4 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v2 <= add_b;
      v3 <= v2;
      v4 <= v3;
      out_valid <= v4;
    end
  end

  always_ff @(posedge clk) begin
    d_r    <= d_o;
    l2     <= line1; p2 <= pos1;
    n1_r   <= n1_o;
    den_r  <= den_o;
    ld_r   <= ld_o;
    l3     <= l2;    p3 <= p2;
    num_r  <= num_o;
    den_r2 <= den_r;
    l4     <= l3;    p4 <= p3;
    out_j  <= q_o;
    out_line <= l4;  out_pos <= p4;
  end

  // The shared adder and multiplier may serve only one pixel per cycle.
  a_add_free: assert property (@(posedge clk) disable iff (!rst_n) !(add_f && add_b));
  a_mul_free: assert property (@(posedge clk) disable iff (!rst_n) !(mul_f && mul_b));
endmodule
