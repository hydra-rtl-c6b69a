// tile_addr_map: where a pixel of the current 48x48 tile lives in the 12
// interleaved tile-memory banks.
//
// Two steps. (1) Fragmentation: the tile is a 3x3 grid of 16x16 blocks whose
// rows and columns are cyclically rotated as the tile steps through the
// frame, so that only the 16-pixel strip that leaves is overwritten. The
// logical position (ly,lx) maps to the physical one by
// py = (ly + 16*offy) mod 48, px = (lx + 16*offx) mod 48, offy,offx in 0..2
// (nine fragmentation states). (2) Interleaving: the physical tile is cut
// into 2x2 squares s(i,j), i = py/2, j = px/2, and square s(i,j) goes to bank
// (i + j) mod 12. Twelve filter units working on twelve different square rows
// (X pass) or square columns (Y pass) at the same position therefore always
// hit twelve different banks. A bank holds two squares per square row; the
// word address is i*8 + (j >= 12)*4 + (py mod 2)*2 + (px mod 2), 192 words.
// The bank rule and the 3x3 rotation follow the chip; the word address and the
// rotation direction are this design's choice. Purely combinational.
module tile_addr_map #(
  parameter int TILE   = 48,
  parameter int N_BANK = 12
) (
  input  logic [5:0] ly,
  input  logic [5:0] lx,
  input  logic [1:0] offy,
  input  logic [1:0] offx,
  output logic [5:0] py,
  output logic [5:0] px,
  output logic [3:0] bank,
  output logic [7:0] addr
);
  localparam int BLK = TILE / 3;

  logic [6:0] ty, tx;
  logic [4:0] si, sj;
  logic [5:0] s;

  always_comb begin
    ty = 7'(ly) + 7'(BLK) * 7'(offy);
    tx = 7'(lx) + 7'(BLK) * 7'(offx);
    if (ty >= 7'(TILE)) ty = ty - 7'(TILE);
    if (tx >= 7'(TILE)) tx = tx - 7'(TILE);
    py   = ty[5:0];
    px   = tx[5:0];
    si   = py[5:1];
    sj   = px[5:1];
    s    = 6'(si) + 6'(sj);
    bank = 4'(s % 6'(N_BANK));
    addr = {si, (sj >= 5'(N_BANK)), py[0], px[0]};
  end
endmodule
