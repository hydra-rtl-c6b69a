// hydra_pkg: sizes, types and small helpers shared by the accelerator blocks.
//
// Geometry: tiles of 48x48 pixels, stepping 16 pixels at a time, so each tile
// is a 3x3 grid of 16x16 blocks and a step replaces one 16x48 (or 48x16)
// strip. Twelve filter units, twelve tile-memory banks, K = 4 XY iterations
// per tile (eight 1D passes). Strip enumeration (used by the input buffer and
// the merger) visits a strip in groups of four horizontally adjacent 2x2
// squares at the same offset inside the square; the four pixels of a group lie
// in four different banks, so a group can be written in one cycle.
package hydra_pkg;

  localparam int TILE   = 48;
  localparam int BLK    = TILE / 3;          // 16
  localparam int N_FU   = 12;
  localparam int N_BANK = 12;
  localparam int K_ITER = 4;
  localparam int N_PASS = 2 * K_ITER;        // X,Y,X,Y,...
  localparam int BANK_D = TILE * TILE / N_BANK;   // 192 words per bank
  localparam int STRIP  = BLK * TILE;        // 768 pixels per strip
  localparam int GROUPS = STRIP / 4;         // 192 groups of four

  typedef logic [23:0] fp24_w;

  // One step of the cluster sequencer, common to all filter units.
  typedef struct packed {
    logic       valid;
    logic [2:0] pass;    // 0..7; odd passes run along columns (Y)
    logic       bwd;     // backward phase
    logic       pair;    // which of the FU's two line pairs
    logic [5:0] pos;     // position along the line
    logic       line;    // even/odd line of the pair
    logic       first;   // first pixel of the phase for this line
  } fu_step_t;

  // Position and fragmentation state of a tile in the frame.
  typedef struct packed {
    logic [7:0] tx;
    logic [7:0] ty;
    logic [1:0] offx;
    logic [1:0] offy;
    logic       first_x;
    logic       last_x;
    logic       first_y;
    logic       last_y;
  } tile_t;

  typedef enum logic [1:0] {MV_RIGHT, MV_LEFT, MV_DOWN, MV_NONE} move_t;

  // A strip of the tile memory in physical coordinates: a 16-wide column of
  // blocks (row = 0) or a 16-high row of blocks (row = 1), block index 0..2.
  typedef struct packed {
    logic       row;
    logic [1:0] blk;
  } strip_t;

  // Pixel u (0..3) of group g (0..191) of a strip, physical coordinates.
  function automatic logic [11:0] strip_pixel(strip_t s, logic [7:0] g, logic [1:0] u);
    int i, j, py, px, rem;
    if (!s.row) begin
      i   = int'(g) / 8;
      rem = int'(g) % 8;
      j   = int'(s.blk) * 8 + (rem / 4) * 4 + int'(u);
    end else begin
      i   = int'(s.blk) * 8 + int'(g) / 24;
      rem = int'(g) % 24;
      j   = (rem / 4) * 4 + int'(u);
    end
    py = 2 * i + (rem % 4) / 2;
    px = 2 * j + (rem % 2);
    return {6'(py), 6'(px)};
  endfunction

  // Bank and word address of a physical pixel (see tile_addr_map).
  function automatic logic [3:0] phys_bank(logic [5:0] py, logic [5:0] px);
    return 4'((int'(py[5:1]) + int'(px[5:1])) % N_BANK);
  endfunction

  function automatic logic [7:0] phys_addr(logic [5:0] py, logic [5:0] px);
    return {py[5:1], (px[5:1] >= 5'(N_BANK)), py[0], px[0]};
  endfunction

  // Physical to logical coordinate along one axis.
  function automatic logic [5:0] phys2log(logic [5:0] p, logic [1:0] off);
    int v;
    v = int'(p) + TILE - BLK * int'(off);
    if (v >= TILE) v -= TILE;
    return 6'(v);
  endfunction

endpackage
