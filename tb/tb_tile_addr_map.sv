// tb_tile_addr_map: exhaustive check of the tile address mapping for all nine
// fragmentation states. For each state, every logical pixel must map to the
// physical pixel (ly+16*offy mod 48, lx+16*offx mod 48), to bank
// (py/2 + px/2) mod 12 and to a word address below 192, and the 2304 pixels
// must occupy 2304 different (bank, address) slots. It also checks the
// property the mapping exists for: the twelve pixels that twelve filter units
// read together (same position, lines 2(f+12k)+l, in rows for an X pass and
// in columns for a Y pass) are in twelve different banks.
module tb_tile_addr_map;
  logic [5:0] ly, lx, py, px;
  logic [1:0] offy, offx;
  logic [3:0] bank;
  logic [7:0] addr;
  int checks = 0, failures = 0;

  tile_addr_map dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("%s (ly %0d lx %0d offy %0d offx %0d)", msg, ly, lx, offy, offx);
    end
  endtask

  initial begin
    for (int oy = 0; oy < 3; oy++) for (int ox = 0; ox < 3; ox++) begin
      bit used [12][192];
      int bk [48][48];
      foreach (used[b, a]) used[b][a] = 0;
      offy = 2'(oy); offx = 2'(ox);
      for (int y = 0; y < 48; y++) for (int x = 0; x < 48; x++) begin
        int epy, epx;
        ly = 6'(y); lx = 6'(x);
        #1;
        epy = (y + 16 * oy) % 48; epx = (x + 16 * ox) % 48;
        chk(py == 6'(epy) && px == 6'(epx), "wrong physical position");
        chk(int'(bank) == (epy / 2 + epx / 2) % 12, "wrong bank");
        chk(addr < 192, "address out of range");
        chk(!used[bank][addr], "two pixels share a word");
        used[bank][addr] = 1;
        bk[y][x] = bank;
      end
      for (int pass = 0; pass < 2; pass++)
        for (int k = 0; k < 2; k++) for (int l = 0; l < 2; l++) for (int p = 0; p < 48; p++) begin
          bit hit [12];
          foreach (hit[b]) hit[b] = 0;
          for (int f = 0; f < 12; f++) begin
            int line, b;
            line = 2 * (f + 12 * k) + l;
            b = pass ? bk[p][line] : bk[line][p];
            checks++;
            if (hit[b]) begin
              failures++;
              if (failures < 10) $display("bank conflict pass %0d k %0d l %0d pos %0d", pass, k, l, p);
            end
            hit[b] = 1;
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
