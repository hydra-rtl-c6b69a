// tb_merge_unit: loads random partial sums into all 192 words through the
// transfer write port, accumulates one random result into each word (random
// order, logical position and border flags, with idle gaps), then reads all
// words back through the transfer read port. Each word must equal its start
// value plus weight * J, the weight being the product of the 1-D blending
// weights written out here, within the rounding of two 24-bit operations.
module tb_merge_unit;
  import tb_fp24_util::*;
  import tb_tpf_ref::*;
  logic clk = 0, rst_n = 1;
  logic acc_valid = 0, xr_re = 0, xw_we = 0;
  logic [7:0] acc_addr = 0, xr_addr = 0, xw_addr = 0;
  logic [5:0] acc_ly = 0, acc_lx = 0;
  logic [23:0] acc_j = 0, xr_rdata, xw_data = 0;
  logic first_x = 0, last_x = 0, first_y = 0, last_y = 0;
  int checks = 0, failures = 0;
  real model [192], mag [192];
  int order [192];

  merge_unit dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < 192; a++) begin
      @(negedge clk); xw_we = 1; xw_addr = 8'(a);
      xw_data = (a % 5 == 0) ? 24'h0 : rand_fp(3);
      model[a] = fp2r(xw_data);
      mag[a] = rabs(model[a]);
      order[a] = a;
    end
    @(negedge clk); xw_we = 0;
    order.shuffle();
    for (int n = 0; n < 192; n++) begin
      int y, x;
      @(negedge clk);
      if ($urandom_range(3) == 0) begin acc_valid = 0; @(negedge clk); end
      y = $urandom_range(47); x = $urandom_range(47);
      acc_valid = 1; acc_addr = 8'(order[n]); acc_ly = 6'(y); acc_lx = 6'(x);
      {first_x, last_x, first_y, last_y} = 4'($urandom);
      acc_j = rand_fp(3);
      begin
        real p;
        p = fp2r(acc_j) *
          real'(weight1d(y / 16, y % 16, first_y, last_y) * weight1d(x / 16, x % 16, first_x, last_x)) / 4096.0;
        model[order[n]] += p;
        mag[order[n]] += rabs(p);
      end
    end
    @(negedge clk); acc_valid = 0;
    @(negedge clk);
    for (int a = 0; a < 192; a++) begin
      real g;
      @(negedge clk); xr_re = 1; xr_addr = 8'(a);
      @(negedge clk); xr_re = 0;
      g = fp2r(xr_rdata);
      checks++;
      if (rabs(g - model[a]) > 2e-5 * mag[a] + 1e-12) begin
        failures++;
        if (failures < 10) $display("word %0d: %g expected %g", a, g, model[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
