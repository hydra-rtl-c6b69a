// tb_merger: drives the merger as the controller does for two neighbouring
// tiles of a 3 x 3 tile frame, A = (1,1) at fragmentation offset (1,1) and
// B = (2,1) at offset (2,1), with out_ready and pb_valid throttled at random.
//   1. all-three-columns load for A (A is not in the first tile row, so its
//      top two block rows are read back through pb_*, the rest zeroed);
//   2. accumulate a random result for every pixel of A on the lane of its bank;
//   3. strip operation for the step right: emit A's left block column and
//      load B's right block column;
//   4. accumulate B; 5. all-three-columns emit of B.
// A model of the window kept here, indexed by physical tile position with
// bank/address worked out from the bank rule, predicts every emitted word,
// its frame coordinates and its final flag (top block row of the tile, or
// last tile row), and every read-back request. Checks counts, uniqueness,
// values within 24-bit rounding, and that a strip takes at least two cycles
// per pixel.
module tb_merger;
  import fp24_pkg::*;
  import hydra_pkg::*;
  import tb_fp24_util::*;
  import tb_tpf_ref::*;
  logic clk = 0, rst_n = 1;
  logic [11:0] mg_valid;
  logic [11:0][7:0] mg_addr;
  logic [11:0][5:0] mg_ly, mg_lx;
  fp24_t [11:0] mg_j;
  tile_t acc_tile, op_old, op_new;
  logic op_start = 0, op_all3, op_emit, op_load, busy;
  strip_t op_strip;
  logic out_valid, out_ready, out_final, pb_req, pb_valid;
  logic [11:0] out_x, out_y, pb_x, pb_y;
  fp24_t out_data, pb_data;
  int checks = 0, failures = 0;

  merger dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // window model: sum and magnitude per physical position
  real win [48][48], mag [48][48];
  // expected emissions and read-backs of the current operation, by frame coordinates
  real exp_out [int], exp_mag [int];
  bit  exp_fin [int], exp_pb [int];
  int  n_out, n_pb;

  function automatic real pbval(int x, int y);
    return 0.25 + real'((x * 7 + y * 3) % 50) / 64.0;
  endfunction
  always_comb pb_data = r2fp(pbval(pb_x, pb_y));
  always @(negedge clk) begin
    out_ready = ($urandom_range(9) < 5);
    pb_valid  = pb_req && ($urandom_range(9) < 6);
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 12) $display("%s", msg); end
  endtask

  function automatic tile_t mk(int tx, int ty, int ox, int oy);
    tile_t t;
    t = '0; t.tx = 8'(tx); t.ty = 8'(ty); t.offx = 2'(ox); t.offy = 2'(oy);
    t.first_x = (tx == 0); t.last_x = (tx == 2); t.first_y = (ty == 0); t.last_y = (ty == 2);
    return t;
  endfunction

  // operation on the physical pixels whose column block is 'blk' (or all)
  task automatic op(bit all3, int blk, bit emit, bit load, tile_t told, tile_t tnew);
    int t0, t1;
    exp_out.delete(); exp_mag.delete(); exp_fin.delete(); exp_pb.delete();
    for (int py = 0; py < 48; py++) for (int px = 0; px < 48; px++) begin
      if (!all3 && px / 16 != blk) continue;
      if (emit) begin
        int ly, lx, key;
        ly = (py - 16 * told.offy + 48) % 48; lx = (px - 16 * told.offx + 48) % 48;
        key = (16 * told.ty + ly) * 4096 + 16 * told.tx + lx;
        exp_out[key] = win[py][px]; exp_mag[key] = mag[py][px];
        exp_fin[key] = (ly < 16) || told.last_y;
      end
      if (load) begin
        int ly, lx;
        ly = (py - 16 * tnew.offy + 48) % 48; lx = (px - 16 * tnew.offx + 48) % 48;
        if (!tnew.first_y && ly < 32) begin
          int x, y;
          x = 16 * tnew.tx + lx; y = 16 * tnew.ty + ly;
          exp_pb[y * 4096 + x] = 1;
          win[py][px] = fp2r(r2fp(pbval(x, y))); mag[py][px] = win[py][px];
        end else begin
          win[py][px] = 0.0; mag[py][px] = 0.0;
        end
      end
    end
    op_all3 = all3; op_strip = '{row: 1'b0, blk: 2'(blk)}; op_emit = emit; op_load = load;
    op_old = told; op_new = tnew;
    n_out = 0; n_pb = 0;
    @(negedge clk); op_start = 1; t0 = $time; @(negedge clk); op_start = 0;
    while (busy) @(negedge clk);
    t1 = $time;
    chk(n_out == (emit ? (all3 ? 2304 : 768) : 0), $sformatf("%0d words emitted", n_out));
    chk(exp_out.num() == 0, $sformatf("%0d words never emitted", exp_out.num()));
    chk(exp_pb.num() == 0,
        $sformatf("%0d read-backs never requested", exp_pb.num()));
    chk((t1 - t0) / 10 >= 2 * (all3 ? 2304 : 768), "strip operation faster than two cycles per pixel");
  endtask

  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      int key;
      key = int'(out_y) * 4096 + int'(out_x);
      n_out++;
      if (!exp_out.exists(key)) chk(0, $sformatf("unexpected or repeated output (%0d,%0d)", out_x, out_y));
      else begin
        chk(rabs(fp2r(out_data) - exp_out[key]) <= 3e-5 * exp_mag[key] + 1e-12,
            $sformatf("output (%0d,%0d) = %g expected %g", out_x, out_y, fp2r(out_data), exp_out[key]));
        chk(out_final == exp_fin[key], $sformatf("output (%0d,%0d) wrong final flag", out_x, out_y));
        exp_out.delete(key);
      end
    end
    if (pb_req && pb_valid) begin
      int key;
      key = int'(pb_y) * 4096 + int'(pb_x);
      n_pb++;
      chk(exp_pb.exists(key), $sformatf("unexpected or repeated read-back (%0d,%0d)", pb_x, pb_y));
      exp_pb.delete(key);
    end
  end

  task automatic accumulate(tile_t t);
    acc_tile = t;
    for (int ly = 0; ly < 48; ly++) for (int lx = 0; lx < 48; lx++) begin
      int py, px, i, j, b;
      real p;
      py = (ly + 16 * t.offy) % 48; px = (lx + 16 * t.offx) % 48;
      i = py / 2; j = px / 2; b = (i + j) % 12;
      @(negedge clk);
      mg_valid = '0;
      mg_valid[b] = 1'b1;
      mg_addr[b] = 8'(8 * i + 4 * (j >= 12) + 2 * (py % 2) + px % 2);
      mg_ly[b] = 6'(ly); mg_lx[b] = 6'(lx);
      mg_j[b] = rand_fp(2);
      mg_j[b][23] = 1'b0;
      p = fp2r(mg_j[b]) * real'(weight1d(ly / 16, ly % 16, t.first_y, t.last_y)
                               * weight1d(lx / 16, lx % 16, t.first_x, t.last_x)) / 4096.0;
      win[py][px] += p; mag[py][px] += p;
    end
    @(negedge clk); mg_valid = '0;
    @(negedge clk);
  endtask

  initial begin
    tile_t ta, tb;
    mg_valid = '0; mg_addr = '0; mg_ly = '0; mg_lx = '0; mg_j = '0; acc_tile = '0;
    op_all3 = 0; op_emit = 0; op_load = 0; op_strip = '0; op_old = '0; op_new = '0;
    foreach (win[a, b]) begin win[a][b] = 0.0; mag[a][b] = 0.0; end
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ta = mk(1, 1, 1, 1);
    tb = mk(2, 1, 2, 1);
    op(1, 0, 0, 1, '0, ta);
    accumulate(ta);
    op(0, ta.offx, 1, 1, ta, tb);
    accumulate(tb);
    op(1, 0, 1, 0, tb, '0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
