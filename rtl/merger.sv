// merger: blends the overlapping tiles into the output frame.
//
// It keeps a tile-sized window of partial sums, one merge unit per tile
// bank, stored with the same bank/address mapping and fragmentation state as
// the tile memories. During a tile's last Y pass the cluster's results arrive
// on twelve lanes (mg_*) and each merge unit adds weight * J(K) to its stored
// sum. Between tiles the merger runs one strip operation: it walks the strip
// of the window that the step to the next tile replaces and, for each pixel,
//  - emits the stored sum with its frame coordinates (out_*), marked final
//    when no later tile covers the pixel (it lies in the tile's top block
//    row, or the tile is in the last tile row), otherwise partially blended;
//  - loads the pixel's new value for the next tile: the partially blended
//    sum read back from outside (pb_*) when an earlier tile row covered it
//    (the next tile is not in the first tile row and the pixel is in its top
//    two block rows), otherwise zero.
// The first tile of a frame loads all three block columns (zeros) and the
// last tile emits all three. The sum in the window is thus always the total
// of every processed tile that covers the pixel. Each pixel takes at least two
// cycles (read, then transfer when out_ready / pb_valid allow); a strip takes
// at least 1536 cycles and runs while the cluster filters the next tile.
// 'busy' holds the cluster before its last pass. Twelve merge units with a
// weight generator, multiplier, adder and 192x24 store each, the O/O^ outputs
// and the O^ read-back follow the chip; the strip walk, the final/partial
// rule and the handshakes are this design's.
module merger
  import fp24_pkg::*;
  import hydra_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  // accumulation lanes from the filter cluster
  input  logic [N_BANK-1:0]       mg_valid,
  input  logic [N_BANK-1:0][7:0]  mg_addr,
  input  logic [N_BANK-1:0][5:0]  mg_ly,
  input  logic [N_BANK-1:0][5:0]  mg_lx,
  input  fp24_t [N_BANK-1:0]      mg_j,
  input  tile_t                   acc_tile,
  // strip operation
  input  logic                    op_start,
  input  strip_t                  op_strip,
  input  logic                    op_all3,
  input  logic                    op_emit,
  input  logic                    op_load,
  input  tile_t                   op_old,
  input  tile_t                   op_new,
  output logic                    busy,
  // outputs O (final) and O^ (partially blended)
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic [11:0]             out_x,
  output logic [11:0]             out_y,
  output logic                    out_final,
  output fp24_t                   out_data,
  // partially blended read-back
  output logic                    pb_req,
  output logic [11:0]             pb_x,
  output logic [11:0]             pb_y,
  input  logic                    pb_valid,
  input  fp24_t                   pb_data
);
  typedef enum logic [1:0] {M_IDLE, M_READ, M_XFER} mstate_t;
  mstate_t st;
  strip_t  strip;
  logic    all3, emit, load;
  tile_t   told, tnew;
  logic [9:0] s;
  logic    out_done, pb_done;
  fp24_t   pb_keep;

  // current pixel of the walk
  logic [11:0] pp;
  logic [5:0]  py, px, oly, olx, nly, nlx;
  logic [3:0]  bank;
  logic [7:0]  addr;
  logic        need_pb;
  assign pp   = strip_pixel(strip, s[9:2], s[1:0]);
  assign py   = pp[11:6];
  assign px   = pp[5:0];
  assign bank = phys_bank(py, px);
  assign addr = phys_addr(py, px);
  assign oly  = phys2log(py, told.offy);
  assign olx  = phys2log(px, told.offx);
  assign nly  = phys2log(py, tnew.offy);
  assign nlx  = phys2log(px, tnew.offx);
  assign need_pb = load && !tnew.first_y && (nly < 6'(2 * BLK));

  assign busy = (st != M_IDLE);

  // ---------------- merge units
  logic [N_BANK-1:0] xr_re, xw_we;
  fp24_t [N_BANK-1:0] xr_rdata;
  fp24_t wval;
  assign wval = need_pb ? (pb_done ? pb_keep : pb_data) : FP_ZERO;

  for (genvar m = 0; m < N_BANK; m++) begin : g_mu
    assign xr_re[m] = (st == M_READ) && (bank == 4'(m));
    merge_unit #(.DEPTH(BANK_D)) u_mu (
      .clk, .rst_n,
      .acc_valid(mg_valid[m]), .acc_addr(mg_addr[m]), .acc_ly(mg_ly[m]), .acc_lx(mg_lx[m]),
      .acc_j(mg_j[m]),
      .first_x(acc_tile.first_x), .last_x(acc_tile.last_x),
      .first_y(acc_tile.first_y), .last_y(acc_tile.last_y),
      .xr_re(xr_re[m]), .xr_addr(addr), .xr_rdata(xr_rdata[m]),
      .xw_we(xw_we[m]), .xw_addr(addr), .xw_data(wval));
  end

  // ---------------- transfer handshakes
  logic out_ok, pb_ok, last_px;
  assign out_valid = (st == M_XFER) && emit && !out_done;
  assign out_data  = xr_rdata[bank];
  assign out_x     = 12'(BLK) * 12'(told.tx) + 12'(olx);
  assign out_y     = 12'(BLK) * 12'(told.ty) + 12'(oly);
  assign out_final = (oly < 6'(BLK)) || told.last_y;
  assign pb_req    = (st == M_XFER) && need_pb && !pb_done;
  assign pb_x      = 12'(BLK) * 12'(tnew.tx) + 12'(nlx);
  assign pb_y      = 12'(BLK) * 12'(tnew.ty) + 12'(nly);
  assign out_ok    = !emit || out_done || out_ready;
  assign pb_ok     = !need_pb || pb_done || pb_valid;
  assign last_px   = (s == 10'(STRIP - 1));

  always_comb
    for (int m = 0; m < N_BANK; m++)
      xw_we[m] = (st == M_XFER) && load && out_ok && pb_ok && (bank == 4'(m));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= M_IDLE; s <= '0; out_done <= 1'b0; pb_done <= 1'b0;
      strip <= '0; all3 <= 1'b0; emit <= 1'b0; load <= 1'b0; told <= '0; tnew <= '0;
      pb_keep <= '0;
    end else begin
      case (st)
        M_IDLE: if (op_start) begin
          st <= M_READ; s <= '0;
          strip <= op_all3 ? strip_t'{row: 1'b0, blk: 2'd0} : op_strip;
          all3 <= op_all3; emit <= op_emit; load <= op_load; told <= op_old; tnew <= op_new;
        end
        M_READ: begin
          st <= M_XFER; out_done <= 1'b0; pb_done <= 1'b0;
        end
        M_XFER: begin
          if (emit && out_valid && out_ready) out_done <= 1'b1;
          if (pb_req && pb_valid) begin pb_done <= 1'b1; pb_keep <= pb_data; end
          if (out_ok && pb_ok) begin
            st <= M_READ;
            s  <= s + 10'd1;
            if (last_px) begin
              s <= '0;
              if (all3 && strip.blk != 2'd2) strip.blk <= strip.blk + 2'd1;
              else st <= M_IDLE;
            end
          end
        end
        default: st <= M_IDLE;
      endcase
    end
  end

  a_no_acc_while_busy: assert property (@(posedge clk) disable iff (!rst_n) (|mg_valid) |-> !busy);
  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_x) && $stable(out_y));
endmodule
