// tb_input_buffer: fills the buffer with two strips (a block column at
// fragmentation offset (2,1) and a block row at offset (0,2)) from a frame
// whose words are a hash of their coordinates, with in_valid throttled at
// random. Checks that each requested coordinate lies in the strip and is
// requested once, that the burst delivers all 768 pixels once, four per
// cycle in four different banks, each at the bank/address of its physical
// tile position (decoded here from the bank rule bank = (py/2 + px/2) mod 12
// and address {py/2, px/2 >= 24, py[0], px[0]}) with the word of its frame
// coordinates, and that the burst takes 192 cycles plus two of latency.
module tb_input_buffer;
  import hydra_pkg::*;
  logic clk = 0, rst_n = 1;
  logic fill_start = 0, burst_start = 0, in_valid;
  strip_t fill_strip;
  tile_t fill_tile;
  logic filling, full, in_req, bursting, burst_done;
  logic [11:0] in_x, in_y;
  logic [71:0] in_data;
  logic [3:0] ld_we;
  logic [3:0][3:0] ld_bank;
  logic [3:0][7:0] ld_addr;
  logic [3:0][71:0] ld_data;
  int checks = 0, failures = 0;

  input_buffer dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [71:0] word(int x, int y);
    return {24'(x * 4099 + y), 24'(y * 31 + x * 7), 24'(x ^ (y << 5))};
  endfunction

  always_comb in_data = word(in_x, in_y);
  always @(negedge clk) in_valid = in_req && ($urandom_range(9) < 7);

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%s", msg); end
  endtask

  function automatic bit in_strip(strip_t st, int py, int px);
    return st.row ? (py / 16 == st.blk) : (px / 16 == st.blk);
  endfunction

  task automatic run(strip_t st, tile_t t);
    bit req [48][48];
    bit got [48][48];
    int nreq, ngot, t0, t1;
    foreach (req[a, b]) begin req[a][b] = 0; got[a][b] = 0; end
    fill_strip = st; fill_tile = t;
    @(negedge clk); fill_start = 1; @(negedge clk); fill_start = 0;
    nreq = 0;
    while (!full) begin
      @(posedge clk);
      if (in_req && in_valid) begin
        int ly, lx, py, px;
        ly = int'(in_y) - 16 * t.ty; lx = int'(in_x) - 16 * t.tx;
        chk(ly >= 0 && ly < 48 && lx >= 0 && lx < 48, "request outside the tile");
        py = (ly + 16 * t.offy) % 48; px = (lx + 16 * t.offx) % 48;
        chk(in_strip(st, py, px), "request outside the strip");
        chk(!req[py][px], "pixel requested twice");
        req[py][px] = 1; nreq++;
      end
      #1;
    end
    chk(nreq == 768, "wrong number of requests");
    @(negedge clk); burst_start = 1; t0 = $time; @(negedge clk); burst_start = 0;
    ngot = 0;
    while (!burst_done) begin
      @(posedge clk); #1;
      if (ld_we != 0) begin
        bit bank_used [12];
        foreach (bank_used[b]) bank_used[b] = 0;
        chk(ld_we == 4'hf, "burst cycle with fewer than four lanes");
        for (int u = 0; u < 4; u++) begin
          int i, j, py, px, ly, lx;
          i = ld_addr[u] >> 3;
          j = (int'(ld_bank[u]) - i + 24) % 12 + 12 * ld_addr[u][2];
          py = 2 * i + ld_addr[u][1]; px = 2 * j + ld_addr[u][0];
          chk(ld_addr[u] < 192 && !bank_used[ld_bank[u]], "bank used twice in one cycle");
          bank_used[ld_bank[u]] = 1;
          chk(in_strip(st, py, px) && !got[py][px], "burst pixel outside strip or repeated");
          got[py][px] = 1; ngot++;
          ly = (py - 16 * t.offy + 48) % 48; lx = (px - 16 * t.offx + 48) % 48;
          chk(ld_data[u] == word(16 * t.tx + lx, 16 * t.ty + ly), "wrong burst data");
        end
      end
    end
    t1 = $time;
    chk(ngot == 768, "burst did not deliver 768 pixels");
    chk((t1 - t0) / 10 <= 192 + 3, $sformatf("burst took %0d cycles", (t1 - t0) / 10));
  endtask

  initial begin
    tile_t t;
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    t = '0; t.tx = 8'd3; t.ty = 8'd1; t.offx = 2'd2; t.offy = 2'd1;
    run('{row: 1'b0, blk: 2'd2}, t);
    t = '0; t.tx = 8'd0; t.ty = 8'd5; t.offx = 2'd0; t.offy = 2'd2;
    run('{row: 1'b1, blk: 2'd0}, t);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
