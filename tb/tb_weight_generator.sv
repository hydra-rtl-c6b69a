// tb_weight_generator: for every pixel of a 4 x 3 tile frame (96 x 80
// pixels) it adds up the weights that the tiles covering the pixel give it
// and requires exactly 1.0 (the blend is a partition of unity, including the
// frame border). It also compares each weight with the piecewise-linear
// 1-D weights written out here (2u+1, 32, 31-2u in 1/64 units, with the
// border tile taking the missing neighbour's share), their product being
// exact in the 24-bit format.
module tb_weight_generator;
  import tb_fp24_util::*;
  import tb_tpf_ref::*;
  logic [5:0] ly, lx;
  logic first_x, last_x, first_y, last_y;
  logic [23:0] w;
  int checks = 0, failures = 0;
  localparam int TX = 4, TY = 3;
  real sum [80][96];

  weight_generator dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (sum[y, x]) sum[y][x] = 0.0;
    for (int ty = 0; ty < TY; ty++) for (int tx = 0; tx < TX; tx++) begin
      first_x = (tx == 0); last_x = (tx == TX - 1); first_y = (ty == 0); last_y = (ty == TY - 1);
      for (int y = 0; y < 48; y++) for (int x = 0; x < 48; x++) begin
        real e;
        ly = 6'(y); lx = 6'(x);
        #1;
        e = real'(weight1d(y / 16, y % 16, first_y, last_y) * weight1d(x / 16, x % 16, first_x, last_x)) / 4096.0;
        checks++;
        if (fp2r(w) != e) begin
          failures++;
          if (failures < 10) $display("tile (%0d,%0d) pixel (%0d,%0d): w %f expected %f", tx, ty, y, x, fp2r(w), e);
        end
        sum[16 * ty + y][16 * tx + x] += fp2r(w);
      end
    end
    foreach (sum[y, x]) begin
      checks++;
      if (sum[y][x] != 1.0) begin
        failures++;
        if (failures < 10) $display("pixel (%0d,%0d): weights add to %f", y, x, sum[y][x]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
