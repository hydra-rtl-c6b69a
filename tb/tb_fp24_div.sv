// tb_fp24_div: self-checking test of fp24_div. Random operands over a wide
// exponent range, plus directed corner cases (zero operands, cancellation,
// overflow, underflow), are compared bit-exactly with the real-number
// reference of tb_fp24_util rounded to FP24. The unit is combinational; the
// testbench applies one operand pair per clock cycle.
module tb_fp24_div;
  import tb_fp24_util::*;
  logic clk = 0;
  logic [23:0] a, b, y;
  logic sub;  // unused by this unit
  int checks = 0, failures = 0, cycles = 0;

  fp24_div dut (.a(a), .b(b), .y(y));

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(logic [23:0] ta, logic [23:0] tb_, logic ts);
    logic [23:0] exp_y;
    real r;
    a = ta; b = tb_; sub = ts;
    @(posedge clk);
    r = (b[22:17] == 0) ? ((a[22:17] == 0) ? 0.0 : (fp2r(a) < 0.0) != b[23] ? -1.0e31 : 1.0e31) : fp2r(a) / fp2r(b);
    exp_y = r2fp(r);
    if (r == 0.0) exp_y = 24'd0;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("MISMATCH a=%h b=%h sub=%0d got=%h exp=%h", a, b, sub, y, exp_y);
    end
  endtask

  initial begin
    a = 0; b = 0; sub = 0;
    // directed cases
    check_one(24'h3e0000, 24'h3e0000, 0);      // 1 + 1
    check_one(24'h3e0000, 24'h3e0000, 1);      // 1 - 1
    check_one(24'h000000, 24'h3e0000, 0);      // 0 op 1
    check_one(24'h3e0000, 24'h000000, 0);      // 1 op 0
    check_one(24'h7e0000, 24'h020000, 0);      // large with small
    check_one(24'h7fffff, 24'h7fffff, 0);      // overflow / saturation
    check_one(24'h020000, 24'h020000, 1);      // cancellation near underflow
    check_one(24'h040001, 24'h3c0000, 0);
    for (int i = 0; i < 20000; i++) begin
      int span;
      span = (i < 10000) ? 4 : 31;
      check_one(rand_fp(span), rand_fp(span), 1'($urandom));
    end
    // close exponents exercise cancellation in add, all ops near 1.0
    for (int i = 0; i < 5000; i++) check_one(rand_fp(0), rand_fp(0), 1'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
