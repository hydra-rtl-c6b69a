// tb_tile_scheduler: walks a 4 x 3 tile frame and a 1 x 2 frame and compares
// each tile with a plan written out here: snake order (rows left to right,
// then right to left), horizontal fragmentation offset +1 per step right and
// -1 per step left (mod 3), vertical offset +1 per step down (mod 3), the
// border flags, the move to the next tile and the last-tile flag. Also
// checks that 'init' restarts the walk and that 'advance' on the last tile
// leaves it in place.
module tb_tile_scheduler;
  import hydra_pkg::*;
  logic clk = 0, rst_n = 1, init = 0, advance = 0;
  logic [7:0] tiles_x, tiles_y;
  tile_t cur, nxt;
  move_t nxt_move;
  logic cur_last;
  int checks = 0, failures = 0;

  tile_scheduler dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit cond, string msg);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("%s at tile (%0d,%0d)", msg, cur.tx, cur.ty); end
  endtask

  task automatic walk(int TX, int TY);
    int x, y, ox, oy, n;
    tiles_x = 8'(TX); tiles_y = 8'(TY);
    @(negedge clk); init = 1; @(negedge clk); init = 0;
    x = 0; y = 0; ox = 0; oy = 0; n = 0;
    forever begin
      move_t em;
      bit last;
      #1;
      if (y % 2 == 0 && x != TX - 1) em = MV_RIGHT;
      else if (y % 2 == 1 && x != 0) em = MV_LEFT;
      else if (y != TY - 1) em = MV_DOWN;
      else em = MV_NONE;
      last = (em == MV_NONE);
      chk(int'(cur.tx) == x && int'(cur.ty) == y, "wrong tile");
      chk(int'(cur.offx) == ox && int'(cur.offy) == oy, "wrong fragmentation offset");
      chk(cur.first_x == (x == 0) && cur.last_x == (x == TX - 1) &&
          cur.first_y == (y == 0) && cur.last_y == (y == TY - 1), "wrong border flags");
      chk(nxt_move == em && cur_last == last, "wrong move");
      n++;
      @(negedge clk); advance = 1; @(negedge clk); advance = 0;
      if (last) begin
        #1 chk(int'(cur.tx) == x && int'(cur.ty) == y, "moved past the last tile");
        break;
      end
      case (em)
        MV_RIGHT: begin x++; ox = (ox + 1) % 3; end
        MV_LEFT:  begin x--; ox = (ox + 2) % 3; end
        default:  begin y++; oy = (oy + 1) % 3; end
      endcase
    end
    chk(n == TX * TY, "wrong number of tiles");
  endtask

  initial begin
    #2 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    walk(4, 3);
    walk(1, 2);
    walk(4, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
