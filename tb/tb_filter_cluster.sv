// tb_filter_cluster: loads one 48x48 tile of random {A, piX, piY} into the
// cluster's data memory through the load lanes (bank and address worked out
// here from the rule bank = (i+j) mod 12 of 2x2 squares, with a non-zero
// fragmentation state), runs the eight passes and compares every final-pass
// result on the merger lanes with the real-number tiled filter. Checks that
// each of the 2304 pixels arrives exactly once, in the bank its position
// belongs to, and that the tile takes 8 x 388 cycles from start to the last
// result. A second tile with another fragmentation state and data follows,
// so retained J memory contents from the first tile must not leak into it.
module tb_filter_cluster;
  import fp24_pkg::*;
  import hydra_pkg::*;
  import tb_fp24_util::*;
  import tb_tpf_ref::*;

  logic clk = 0, rst_n = 1;
  logic start = 0, hold_last = 0;
  logic [1:0] offx, offy;
  fp24_t lambda;
  logic busy, done, holding;
  logic [3:0] ld_we = 0;
  logic [3:0][3:0] ld_bank;
  logic [3:0][7:0] ld_addr;
  logic [3:0][71:0] ld_data;
  logic [N_BANK-1:0] mg_valid;
  logic [N_BANK-1:0][7:0] mg_addr;
  logic [N_BANK-1:0][5:0] mg_ly, mg_lx;
  fp24_t [N_BANK-1:0] mg_j;

  int checks = 0, failures = 0, cycle = 0;
  tile_r A, PX, PY, J;
  logic [23:0] Af [T][T], PXf [T][T], PYf [T][T];
  int seen [T][T];
  int first_out, last_out, start_cycle;

  filter_cluster dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < N_BANK; m++) if (mg_valid[m]) begin
      int ly, lx, py, px, bank, addr;
      real got, err;
      ly = mg_ly[m]; lx = mg_lx[m];
      py = (ly + 16 * offy) % 48; px = (lx + 16 * offx) % 48;
      bank = (py / 2 + px / 2) % 12;
      addr = (py / 2) * 8 + ((px / 2) >= 12 ? 4 : 0) + (py % 2) * 2 + (px % 2);
      if (first_out < 0) first_out = cycle;
      last_out = cycle;
      checks++;
      if (bank != m || addr != mg_addr[m]) begin
        failures++;
        if (failures < 10) $display("lane %0d addr %0d for (%0d,%0d): expected bank %0d addr %0d", m, mg_addr[m], ly, lx, bank, addr);
      end
      seen[ly][lx]++;
      got = fp2r(mg_j[m]);
      err = rabs(got - J[ly][lx]) / (rabs(J[ly][lx]) + 1e-3);
      checks++;
      if (err > 2e-3) begin
        failures++;
        if (failures < 10) $display("pixel (%0d,%0d): got %g expected %g", ly, lx, got, J[ly][lx]);
      end
    end
  end

  task automatic run_tile(int ox, int oy);
    offx = 2'(ox); offy = 2'(oy);
    for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
      Af[y][x]  = r2fp(real'($urandom_range(1000)) / 250.0);
      // edge-like permeabilities: mostly high, sometimes low
      PXf[y][x] = r2fp(($urandom_range(9) == 0) ? 0.05 : 0.6 + real'($urandom_range(390)) / 1000.0);
      PYf[y][x] = r2fp(($urandom_range(9) == 0) ? 0.05 : 0.6 + real'($urandom_range(390)) / 1000.0);
      A[y][x] = fp2r(Af[y][x]); PX[y][x] = fp2r(PXf[y][x]); PY[y][x] = fp2r(PYf[y][x]);
      seen[y][x] = 0;
    end
    filter_tile(A, PX, PY, fp2r(lambda), 4, J);
    // load: four pixels per cycle, from four different banks
    for (int y = 0; y < T; y++) for (int x = 0; x < T; x += 4) begin
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        int py, px;
        py = (y + 16 * oy) % 48; px = (x + l + 16 * ox) % 48;
        ld_bank[l] = 4'((py / 2 + px / 2) % 12);
        ld_addr[l] = 8'((py / 2) * 8 + ((px / 2) >= 12 ? 4 : 0) + (py % 2) * 2 + (px % 2));
        ld_data[l] = {Af[y][x+l], PXf[y][x+l], PYf[y][x+l]};
      end
      ld_we = (y % 2 == 0 && (x / 2) % 2 == 0) ? 4'hf : 4'hf;
      // two pixels of a square share a bank: write lanes 0,2 then 1,3
      ld_we = 4'b0101;
      @(negedge clk);
      ld_we = 4'b1010;
    end
    @(negedge clk);
    ld_we = 0;
    first_out = -1;
    start = 1; start_cycle = cycle;
    @(negedge clk);
    start = 0;
    @(posedge done);
    @(negedge clk);
    for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
      checks++;
      if (seen[y][x] != 1) begin
        failures++;
        if (failures < 10) $display("pixel (%0d,%0d) seen %0d times", y, x, seen[y][x]);
      end
    end
    checks++;
    if (last_out - start_cycle != 8 * 388 + 8) begin
      failures++;
      $display("tile took %0d cycles to its last result", last_out - start_cycle);
    end
  endtask

  initial begin
    lambda = r2fp(0.2);
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(1, 2);
    run_tile(2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
