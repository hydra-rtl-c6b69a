// tb_hydra_720p: one complete 1280 x 720 frame (78 x 43 tiles of 48 x 48,
// stride 16, K = 4 XY iterations) through the accelerator with every
// parameter at its default, as the chip processes a 720p video frame.
//
// Same structure as the small end-to-end test: the testbench plays the
// external memory (input words {A, piX, piY}, partially blended words
// written out and read back), and every pixel must be finished exactly once
// and equal (relative tolerance 2e-3) to the real-valued reference, the
// weighted sum of the K = 4 filtered tiles covering it. The memory answers
// at full rate here, so the frame time is the chip's own: it is reported as
// cycles per tile and as frames per second at 259 MHz, and a frame that
// takes more than 3354 * 3330 cycles counts as a failure. The mechanisms are
// counted and reported; a frame this size must see every step direction,
// fragmentation state, partial output and read-back.
module tb_hydra_720p;
  import fp24_pkg::*;
  import hydra_pkg::*;
  import tb_fp24_util::*;
  import tb_tpf_ref::*;

  localparam int TX = 78, TY = 43;
  localparam int W = 16 * (TX + 2), H = 16 * (TY + 2);
  localparam int MAX_TILE_CYCLES = 8 * 388 + 13 + 192 + 16;

  logic clk = 0, rst_n = 1, start = 0;
  logic [7:0] tiles_x = 8'(TX), tiles_y = 8'(TY);
  fp24_t lambda;
  logic busy, done;
  logic in_req, in_valid, out_valid, out_ready, out_final, pb_req, pb_valid;
  logic [11:0] in_x, in_y, out_x, out_y, pb_x, pb_y;
  logic [71:0] in_data;
  fp24_t out_data, pb_data;
  logic stall_input, stall_merger;

  hydra_top dut (.*);

  logic [23:0] fa [H][W], fpx [H][W], fpy [H][W];
  real   ref_o [H][W];
  real   res   [H][W];
  int    nfinal [H][W];
  logic [23:0] pbm [H][W];
  bit    pbw [H][W];
  int checks = 0, failures = 0, cycle = 0;
  int n_right = 0, n_left = 0, n_down = 0, n_install = 0, n_hold = 0;
  int n_partial = 0, n_pbread = 0, n_final = 0, n_tiles = 0;
  bit frag_seen [3][3];
  int last_start = -1, stall_since_start = 0, max_clean_tile = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  initial begin
    repeat (14000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // external memory model
  always_comb begin
    in_data = '0;
    if (in_req && int'(in_x) < W && int'(in_y) < H) in_data = {fa[in_y][in_x], fpx[in_y][in_x], fpy[in_y][in_x]};
    pb_data = '0;
    if (pb_req && int'(pb_x) < W && int'(pb_y) < H) pb_data = pbm[pb_y][pb_x];
  end

  always @(negedge clk) begin
    in_valid  = in_req;
    out_ready = 1'b1;
    pb_valid  = pb_req;
  end

  always @(posedge clk) if (rst_n) begin
    if (stall_input)  n_install++;
    if (stall_merger) n_hold++;
    if (stall_input || stall_merger) stall_since_start = 1;
    if (out_valid && out_ready) begin
      if (out_final) begin
        nfinal[out_y][out_x]++;
        res[out_y][out_x] = fp2r(out_data);
        n_final++;
      end else begin
        pbm[out_y][out_x] = out_data;
        pbw[out_y][out_x] = 1;
        n_partial++;
      end
    end
    if (pb_req && pb_valid) begin
      n_pbread++;
      checks++;
      if (!pbw[pb_y][pb_x]) begin
        failures++;
        $display("read-back of (%0d,%0d) that was never written", pb_x, pb_y);
      end
    end
    if (dut.cl_start) begin
      frag_seen[dut.cur.offy][dut.cur.offx] = 1;
      n_tiles++;
      if (last_start >= 0 && !stall_since_start && cycle - last_start > max_clean_tile)
        max_clean_tile = cycle - last_start;
      last_start = cycle;
      stall_since_start = 0;
    end
    if (dut.sch_adv) begin
      case (dut.nxt_move)
        MV_RIGHT: n_right++;
        MV_LEFT:  n_left++;
        MV_DOWN:  n_down++;
        default: ;
      endcase
    end
  end

  task automatic make_reference(real lam);
    tile_r A, PX, PY, J;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) ref_o[y][x] = 0.0;
    for (int ty = 0; ty < TY; ty++) for (int tx = 0; tx < TX; tx++) begin
      for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
        A[y][x]  = fp2r(fa[16*ty+y][16*tx+x]);
        PX[y][x] = fp2r(fpx[16*ty+y][16*tx+x]);
        PY[y][x] = fp2r(fpy[16*ty+y][16*tx+x]);
      end
      filter_tile(A, PX, PY, lam, 4, J);
      for (int y = 0; y < T; y++) for (int x = 0; x < T; x++) begin
        real w;
        w = real'(weight1d(y / 16, y % 16, ty == 0, ty == TY - 1)
                * weight1d(x / 16, x % 16, tx == 0, tx == TX - 1)) / 4096.0;
        ref_o[16*ty+y][16*tx+x] += w * J[y][x];
      end
    end
  endtask

  task automatic expect_seen(string what, int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else $display("  %-28s %0d", what, n);
  endtask

  initial begin
    real lam;
    lam = 0.3;
    lambda = r2fp(lam);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      fa[y][x]  = r2fp(real'($urandom_range(1000)) / 100.0);
      fpx[y][x] = r2fp(($urandom_range(7) == 0) ? 0.02 : 0.7 + real'($urandom_range(290)) / 1000.0);
      fpy[y][x] = r2fp(($urandom_range(7) == 0) ? 0.02 : 0.7 + real'($urandom_range(290)) / 1000.0);
      nfinal[y][x] = 0; pbw[y][x] = 0; pbm[y][x] = '0;
    end
    make_reference(lam);
    #2 rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    @(posedge done);
    repeat (2) @(posedge clk);
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      real err;
      checks++;
      if (nfinal[y][x] != 1) begin
        failures++;
        if (failures < 10) $display("pixel (%0d,%0d) finished %0d times", x, y, nfinal[y][x]);
      end else begin
        err = rabs(res[y][x] - ref_o[y][x]) / (rabs(ref_o[y][x]) + 1e-3);
        if (err > 2e-3) begin
          failures++;
          if (failures < 10) $display("pixel (%0d,%0d): got %g expected %g", x, y, res[y][x], ref_o[y][x]);
        end
      end
    end
    $display("frame %0dx%0d, %0d tiles, %0d cycles", W, H, n_tiles, cycle);
    checks++;
    if (n_tiles != TX * TY) begin failures++; $display("%0d tiles filtered", n_tiles); end
    checks++;
    if (max_clean_tile > MAX_TILE_CYCLES) begin
      failures++;
      $display("a tile without stalls took %0d cycles", max_clean_tile);
    end else $display("  longest tile without stalls: %0d cycles", max_clean_tile);
    expect_seen("right steps", n_right);
    expect_seen("left steps", n_left);
    expect_seen("down steps", n_down);
    $display("  input stall cycles           %0d", n_install);
    $display("  merger hold cycles           %0d", n_hold);
    $display("  cycles per tile %0.1f, %0.2f frames/s at 259 MHz", real'(cycle) / (TX * TY),
             259.0e6 / real'(cycle));
    checks++;
    if (cycle > TX * TY * 3330) begin failures++; $display("frame took %0d cycles", cycle); end
    expect_seen("partially blended outputs", n_partial);
    expect_seen("partially blended read-backs", n_pbread);
    expect_seen("finished outputs", n_final);
    for (int a = 0; a < 3; a++) for (int b = 0; b < 3; b++)
      expect_seen($sformatf("fragmentation state %0d,%0d", a, b), int'(frag_seen[a][b]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
