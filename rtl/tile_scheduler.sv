// tile_scheduler: walks the tiles of a frame in row-major snake order and
// keeps the fragmentation state of the tile memories.
//
// Tiles are 48x48 and step by 16 pixels, so a frame of tiles_x * tiles_y
// tiles is 16*(tiles_x+2) x 16*(tiles_y+2) pixels (78 x 43 = 3354 tiles for
// 1280x720). Even tile rows run left to right, odd rows right to left, and a
// row ends with a step down. Each step replaces one third of the tile: a
// right step rotates the block columns by one (offx+1 mod 3), a left step by
// minus one, a down step rotates the block rows (offy+1 mod 3). 'cur' is the
// tile being processed; 'nxt' and 'nxt_move' describe the following one and
// are valid unless cur_last. 'init' loads the first tile of a frame; 'advance'
// makes nxt current. The snake order and the 3x3 rotation follow the chip;
// the rotation direction is this design's choice.
module tile_scheduler
  import hydra_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tiles_x,
  input  logic [7:0] tiles_y,
  input  logic       init,
  input  logic       advance,
  output tile_t      cur,
  output tile_t      nxt,
  output move_t      nxt_move,
  output logic       cur_last
);
  logic [7:0] tx, ty, ntx, nty;
  logic [1:0] ox, oy, nox, noy;

  function automatic logic [1:0] inc3(logic [1:0] v);
    return (v == 2'd2) ? 2'd0 : v + 2'd1;
  endfunction
  function automatic logic [1:0] dec3(logic [1:0] v);
    return (v == 2'd0) ? 2'd2 : v - 2'd1;
  endfunction

  function automatic tile_t mk(logic [7:0] x, logic [7:0] y, logic [1:0] fx, logic [1:0] fy,
                               logic [7:0] nx, logic [7:0] ny);
    tile_t t;
    t.tx = x; t.ty = y; t.offx = fx; t.offy = fy;
    t.first_x = (x == 8'd0);
    t.last_x  = (x == nx - 8'd1);
    t.first_y = (y == 8'd0);
    t.last_y  = (y == ny - 8'd1);
    return t;
  endfunction

  always_comb begin
    logic right;
    right    = !ty[0];
    ntx = tx; nty = ty; nox = ox; noy = oy;
    nxt_move = MV_NONE;
    if (right && tx != tiles_x - 8'd1) begin
      ntx = tx + 8'd1; nox = inc3(ox); nxt_move = MV_RIGHT;
    end else if (!right && tx != 8'd0) begin
      ntx = tx - 8'd1; nox = dec3(ox); nxt_move = MV_LEFT;
    end else if (ty != tiles_y - 8'd1) begin
      nty = ty + 8'd1; noy = inc3(oy); nxt_move = MV_DOWN;
    end
    cur_last = (nxt_move == MV_NONE);
    cur = mk(tx, ty, ox, oy, tiles_x, tiles_y);
    nxt = mk(ntx, nty, nox, noy, tiles_x, tiles_y);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tx <= '0; ty <= '0; ox <= '0; oy <= '0;
    end else if (init) begin
      tx <= '0; ty <= '0; ox <= '0; oy <= '0;
    end else if (advance && !cur_last) begin
      tx <= ntx; ty <= nty; ox <= nox; oy <= noy;
    end
  end
endmodule
