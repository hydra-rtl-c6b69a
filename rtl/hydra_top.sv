// hydra_top: the tiled permeability-filter accelerator.
//
// A frame is filtered as overlapping 48x48 tiles, stepping 16 pixels in a
// row-major snake. For each tile the filter cluster runs K = 4 iterations of
// an X pass and a Y pass of the edge-aware 1D filter on its twelve filter
// units, and the merger blends the last pass into the output with a linear
// weight profile. Only the 16-pixel strip that a step uncovers is brought in
// (through the input buffer), and only the strip that a step leaves goes out
// (finished pixels O, or partially blended pixels O^ that come back when the
// next tile row covers them again).
//
// Control, per tile: (1) burst the entering strip from the input buffer into
// the cluster's data memory (all three strips for a frame's first tile);
// (2) start filling the input buffer with the next tile's strip; (3) filter:
// eight passes, the last held until the merger has finished its previous
// strip operation; (4) start the merger's strip operation for the step to the
// next tile (or the final flush) and advance the tile scheduler. Steps (2)
// and (4) run in the background of the next tile's filtering.
//
// External interfaces (all coordinates are frame pixels):
//  in_*  : {A, piX, piY} words as three FP24 values, A in bits 71:48; the
//          chip shows in_x/in_y with in_req and takes in_data when in_valid.
//  out_* : O (out_final = 1) and O^ (out_final = 0) words, valid/ready.
//  pb_*  : read-back of O^ words, pb_x/pb_y with pb_req, data with pb_valid.
// Configuration: tiles_x, tiles_y (frame of 16*(tiles_x+2) x
// 16*(tiles_y+2) pixels), lambda (FP24), sampled at start; done pulses at the
// end of the frame. Block structure follows the chip (input buffer, filter
// cluster, merger); the controller and interfaces are this design's.
module hydra_top
  import fp24_pkg::*;
  import hydra_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [7:0]  tiles_x,
  input  logic [7:0]  tiles_y,
  input  fp24_t       lambda,
  output logic        busy,
  output logic        done,
  // input data
  output logic        in_req,
  output logic [11:0] in_x,
  output logic [11:0] in_y,
  input  logic        in_valid,
  input  logic [71:0] in_data,
  // filtered output
  output logic        out_valid,
  input  logic        out_ready,
  output logic [11:0] out_x,
  output logic [11:0] out_y,
  output logic        out_final,
  output fp24_t       out_data,
  // partially blended read-back
  output logic        pb_req,
  output logic [11:0] pb_x,
  output logic [11:0] pb_y,
  input  logic        pb_valid,
  input  fp24_t       pb_data,
  // activity, for observation
  output logic        stall_input,    // waiting for the input buffer
  output logic        stall_merger    // cluster held before its last pass
);
  typedef enum logic [2:0] {C_IDLE, C_FILL, C_BURST, C_RUN, C_WAITRUN, C_FLUSH} cstate_t;
  cstate_t st;

  logic [7:0] tx_cfg, ty_cfg;
  fp24_t      lam_cfg;
  tile_t      cur, nxt;
  move_t      nxt_move;
  logic       cur_last, sch_init, sch_adv;
  logic [1:0] k;          // strips still to load for the current tile, minus one
  logic       first_tile;
  logic       first_zero_pending;

  tile_scheduler u_sched (
    .clk, .rst_n, .tiles_x(tx_cfg), .tiles_y(ty_cfg), .init(sch_init), .advance(sch_adv),
    .cur, .nxt, .nxt_move, .cur_last);

  // strip entering with the step cur -> nxt (physical; same place as the one leaving)
  strip_t step_strip;
  always_comb begin
    case (nxt_move)
      MV_RIGHT: step_strip = '{row: 1'b0, blk: cur.offx};
      MV_LEFT:  step_strip = '{row: 1'b0, blk: (cur.offx == 2'd0) ? 2'd2 : cur.offx - 2'd1};
      default:  step_strip = '{row: 1'b1, blk: cur.offy};
    endcase
  end

  // ---------------- input buffer
  logic   ib_fill, ib_filling, ib_full, ib_burst, ib_bursting, ib_done;
  strip_t ib_strip;
  tile_t  ib_tile;
  logic [3:0]       ld_we;
  logic [3:0][3:0]  ld_bank;
  logic [3:0][7:0]  ld_addr;
  logic [3:0][71:0] ld_data;

  input_buffer u_ib (
    .clk, .rst_n,
    .fill_start(ib_fill), .fill_strip(ib_strip), .fill_tile(ib_tile),
    .filling(ib_filling), .full(ib_full),
    .in_req, .in_x, .in_y, .in_valid, .in_data,
    .burst_start(ib_burst), .bursting(ib_bursting), .burst_done(ib_done),
    .ld_we, .ld_bank, .ld_addr, .ld_data);

  // ---------------- filter cluster
  logic cl_start, cl_busy, cl_done, cl_holding, mg_busy;
  logic [N_BANK-1:0]       mg_valid;
  logic [N_BANK-1:0][7:0]  mg_addr;
  logic [N_BANK-1:0][5:0]  mg_ly, mg_lx;
  fp24_t [N_BANK-1:0]      mg_j;

  filter_cluster u_cluster (
    .clk, .rst_n, .start(cl_start), .hold_last(mg_busy),
    .offx(cur.offx), .offy(cur.offy), .lambda(lam_cfg),
    .busy(cl_busy), .done(cl_done), .holding(cl_holding),
    .ld_we, .ld_bank, .ld_addr, .ld_data,
    .mg_valid, .mg_addr, .mg_ly, .mg_lx, .mg_j);

  // ---------------- merger
  logic   mo_start, mo_all3, mo_emit, mo_load;
  strip_t mo_strip;
  tile_t  mo_old, mo_new;

  merger u_merger (
    .clk, .rst_n,
    .mg_valid, .mg_addr, .mg_ly, .mg_lx, .mg_j, .acc_tile(cur),
    .op_start(mo_start), .op_strip(mo_strip), .op_all3(mo_all3), .op_emit(mo_emit),
    .op_load(mo_load), .op_old(mo_old), .op_new(mo_new), .busy(mg_busy),
    .out_valid, .out_ready, .out_x, .out_y, .out_final, .out_data,
    .pb_req, .pb_x, .pb_y, .pb_valid, .pb_data);

  assign busy         = (st != C_IDLE);
  assign stall_input  = (st == C_FILL) && !ib_full;
  assign stall_merger = cl_holding;

  // ---------------- controller
  always_comb begin
    sch_init = 1'b0; sch_adv = 1'b0;
    ib_fill = 1'b0; ib_burst = 1'b0; ib_strip = '0; ib_tile = cur;
    cl_start = 1'b0;
    mo_start = 1'b0; mo_strip = step_strip; mo_all3 = 1'b0; mo_emit = 1'b0; mo_load = 1'b0;
    mo_old = cur; mo_new = nxt;
    // zero the merger window for the first tile while it is being loaded
    if (first_zero_pending && !mg_busy) begin
      mo_start = 1'b1; mo_all3 = 1'b1; mo_load = 1'b1; mo_new = cur;
    end
    case (st)
      C_IDLE: if (start) sch_init = 1'b1;
      C_FILL: begin
        // first tile: fill the strips one by one; later tiles were prefetched
        if (first_tile && !ib_full && !ib_filling) begin
          ib_fill  = 1'b1;
          ib_strip = '{row: 1'b0, blk: 2'd2 - k};
        end
        if (ib_full) ib_burst = 1'b1;
      end
      C_BURST: begin
        if (ib_done && k == 2'd0 && !cur_last) begin
          ib_fill = 1'b1; ib_strip = step_strip; ib_tile = nxt;
        end
        if (ib_done && k == 2'd0) cl_start = 1'b1;
      end
      C_WAITRUN: if (cl_done) begin
        if (cur_last) begin
          mo_start = 1'b1; mo_all3 = 1'b1; mo_emit = 1'b1; mo_load = 1'b0;
        end else begin
          mo_start = 1'b1; mo_emit = 1'b1; mo_load = 1'b1;
          sch_adv  = 1'b1;
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= C_IDLE; k <= '0; first_tile <= 1'b0; done <= 1'b0;
      tx_cfg <= 8'd1; ty_cfg <= 8'd1; lam_cfg <= FP_ZERO;
    end else begin
      done <= 1'b0;
      case (st)
        C_IDLE: if (start) begin
          tx_cfg <= tiles_x; ty_cfg <= tiles_y; lam_cfg <= lambda;
          first_tile <= 1'b1; k <= 2'd2;
          st <= C_FILL;
        end
        C_FILL:  if (ib_full) st <= C_BURST;
        C_BURST: if (ib_done) begin
          if (k != 2'd0) begin
            k <= k - 2'd1; st <= C_FILL;
          end else begin
            st <= C_WAITRUN;
          end
        end
        C_WAITRUN: if (cl_done) begin
          first_tile <= 1'b0;
          st <= cur_last ? C_FLUSH : C_FILL;
        end
        C_FLUSH: if (!mg_busy) begin
          st <= C_IDLE; done <= 1'b1;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) first_zero_pending <= 1'b0;
    else if (st == C_IDLE && start) first_zero_pending <= 1'b1;
    else if (first_zero_pending && !mg_busy) first_zero_pending <= 1'b0;
  end
endmodule
