// weight_generator: blending weight of one tile pixel.
//
// Tiles overlap by two thirds, so every pixel away from the frame border is
// covered by three tiles in each direction, at positions in blocks 0, 1 and
// 2 of those tiles. The 1D weight, in 1/64 units with u the position inside
// the 16-pixel block, is 2u+1 in block 0, 32 in block 1 and 31-2u in block 2:
// a linear ramp up, a plateau and a linear ramp down that add to exactly 64
// over the three covering tiles. At a frame border the tile on the border
// also takes the share of the missing neighbour (block 0 of a first tile and
// block 2 of a last tile weigh 64; block 1 adds 31-2u resp. 2u+1), so the
// weights still add to 1. The 2D weight is wx*wy/4096, exact in FP24.
// Combinational. The linear profile and power-of-two scaling follow the
// chip; the exact ramp and the border rule are this design's.
module weight_generator
  import fp24_pkg::*;
(
  input  logic [5:0] ly,
  input  logic [5:0] lx,
  input  logic       first_x,
  input  logic       last_x,
  input  logic       first_y,
  input  logic       last_y,
  output fp24_t      w
);
  function automatic logic [6:0] w1d(logic [5:0] p, logic first, logic last);
    logic [1:0] b;
    logic [6:0] u2;
    b  = (p < 6'd16) ? 2'd0 : (p < 6'd32) ? 2'd1 : 2'd2;
    u2 = 7'({p[3:0], 1'b0});
    case (b)
      2'd0:    return first ? 7'd64 : u2 + 7'd1;
      2'd2:    return last  ? 7'd64 : 7'd31 - u2;
      default: return 7'd32 + (first ? 7'd31 - u2 : 7'd0) + (last ? u2 + 7'd1 : 7'd0);
    endcase
  endfunction

  logic [13:0] prod;
  always_comb begin
    prod = 14'(w1d(ly, first_y, last_y)) * 14'(w1d(lx, first_x, last_x));
    w    = fp_from_ufix(18'(prod), 12);
  end
endmodule
