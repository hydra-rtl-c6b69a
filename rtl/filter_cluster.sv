// filter_cluster: twelve filter units around two banked tile memories.
//
// Memories: J (the current filter state J(k)) in 12 banks of 192x24, and
// the input data {A, piX, piY} in 12 banks of 192x72, both addressed through
// tile_addr_map (2x2 squares, bank (i+j) mod 12, 3x3 fragmentation state
// offx/offy). In X passes FU f filters logical rows 2(f+12k) and
// 2(f+12k)+1, k = 0,1; in Y passes the same-numbered columns. Because all FUs
// move in lockstep, their twelve pixels are always in twelve different banks:
// a read crossbar ('MUX for FU') hands each FU its bank's word, and a write
// crossbar ('MUX for SRAM bank') returns each FU result to the bank it came
// from. Timing: the sequencer step reads the memories in cycle c, the FUs
// receive the words in c+1 and deliver J(k+1) 6 cycles later, when the write
// address is recomputed from the FU's output position and the pass/pair
// delayed alongside.
//
// Pass 0 takes J(0) = A from the input-data memory, so the J memory needs no
// initialisation for a new tile. Passes 0..6 write J(k+1) back into the J
// memory; the last pass instead sends J(K) with its bank, address and logical
// position to the merger (mg_*, one lane per bank). The input buffer writes
// new {A, piX, piY} strips through the data memory's write port (ld_*, four
// lanes) while the cluster is idle. The memory organisation, crossbars and FU
// allocation follow the chip; the timing details are this design's.
module filter_cluster
  import fp24_pkg::*;
  import hydra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic              hold_last,
  input  logic [1:0]        offx,
  input  logic [1:0]        offy,
  input  fp24_t             lambda,
  output logic              busy,
  output logic              done,
  output logic              holding,
  // tile data writes from the input buffer
  input  logic [3:0]        ld_we,
  input  logic [3:0][3:0]   ld_bank,
  input  logic [3:0][7:0]   ld_addr,
  input  logic [3:0][71:0]  ld_data,
  // final-pass results to the merger, one lane per bank
  output logic [N_BANK-1:0]       mg_valid,
  output logic [N_BANK-1:0][7:0]  mg_addr,
  output logic [N_BANK-1:0][5:0]  mg_ly,
  output logic [N_BANK-1:0][5:0]  mg_lx,
  output fp24_t [N_BANK-1:0]      mg_j
);
  localparam int FU_LAT = 6;

  fu_step_t step, step_d;
  logic     last_pass_unused;

  cluster_sequencer u_seq (
    .clk, .rst_n, .start, .hold_last, .step, .busy,
    .last_pass(last_pass_unused), .done, .holding);

  // ---------------- read address generation (cycle c)
  logic [N_FU-1:0][3:0] rbank;
  logic [N_FU-1:0][7:0] raddr;
  logic [N_FU-1:0][3:0] rbank_d;

  for (genvar f = 0; f < N_FU; f++) begin : g_rmap
    logic [5:0] lidx, ly, lx, py_u, px_u;
    assign lidx = 6'(2 * (f + N_FU * int'(step.pair))) + 6'(step.line);
    assign ly   = step.pass[0] ? step.pos : lidx;
    assign lx   = step.pass[0] ? lidx : step.pos;
    tile_addr_map u_map (.ly, .lx, .offy, .offx, .py(py_u), .px(px_u),
                         .bank(rbank[f]), .addr(raddr[f]));
  end

  // ---------------- memories
  logic [N_BANK-1:0]        j_we, d_we;
  logic [N_BANK-1:0][7:0]   j_raddr, d_raddr, j_waddr, d_waddr;
  fp24_t [N_BANK-1:0]       j_rdata, j_wdata;
  logic [N_BANK-1:0][71:0]  d_rdata, d_wdata;

  always_comb begin
    for (int m = 0; m < N_BANK; m++) begin
      j_raddr[m] = '0;
      for (int f = 0; f < N_FU; f++)
        if (int'(rbank[f]) == m) j_raddr[m] = raddr[f];
      d_raddr[m] = j_raddr[m];
    end
  end

  for (genvar m = 0; m < N_BANK; m++) begin : g_mem
    sram_2p #(.DEPTH(BANK_D), .WIDTH(24)) u_jmem (
      .clk, .re(step.valid), .raddr(j_raddr[m]), .rdata(j_rdata[m]),
      .we(j_we[m]), .waddr(j_waddr[m]), .wdata(j_wdata[m]));
    sram_2p #(.DEPTH(BANK_D), .WIDTH(72)) u_dmem (
      .clk, .re(step.valid), .raddr(d_raddr[m]), .rdata(d_rdata[m]),
      .we(d_we[m]), .waddr(d_waddr[m]), .wdata(d_wdata[m]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) step_d <= '0;
    else        step_d <= step;
  end
  always_ff @(posedge clk) rbank_d <= rbank;

  // ---------------- filter units (cycle c+1)
  logic [N_FU-1:0]      fo_valid, fo_line;
  logic [N_FU-1:0][5:0] fo_pos;
  fp24_t [N_FU-1:0]     fo_j;

  for (genvar f = 0; f < N_FU; f++) begin : g_fu
    logic [71:0] dw;
    fp24_t jin, pin;
    assign dw  = d_rdata[rbank_d[f]];
    assign jin = (step_d.pass == 3'd0) ? dw[71:48] : j_rdata[rbank_d[f]];
    assign pin = step_d.pass[0] ? dw[23:0] : dw[47:24];
    filter_unit u_fu (
      .clk, .rst_n,
      .in_valid(step_d.valid), .in_bwd(step_d.bwd), .in_first(step_d.first),
      .in_line(step_d.line), .in_pos(step_d.pos),
      .in_j(jin), .in_a(dw[71:48]), .in_pi(pin), .lambda,
      .out_valid(fo_valid[f]), .out_line(fo_line[f]), .out_pos(fo_pos[f]), .out_j(fo_j[f]));
  end

  // pass and pair of the pixels leaving the filter units
  logic [FU_LAT-1:0][3:0] pp_dly;
  always_ff @(posedge clk) pp_dly <= {pp_dly[FU_LAT-2:0], step_d.pass, step_d.pair};
  logic [2:0] o_pass;
  logic       o_pair;
  assign {o_pass, o_pair} = pp_dly[FU_LAT-1];

  // ---------------- write-back address generation
  logic [N_FU-1:0][3:0] wbank;
  logic [N_FU-1:0][7:0] waddr;
  logic [N_FU-1:0][5:0] wly, wlx;

  for (genvar f = 0; f < N_FU; f++) begin : g_wmap
    logic [5:0] lidx, py_u, px_u;
    assign lidx   = 6'(2 * (f + N_FU * int'(o_pair))) + 6'(fo_line[f]);
    assign wly[f] = o_pass[0] ? fo_pos[f] : lidx;
    assign wlx[f] = o_pass[0] ? lidx : fo_pos[f];
    tile_addr_map u_map (.ly(wly[f]), .lx(wlx[f]), .offy, .offx, .py(py_u), .px(px_u),
                         .bank(wbank[f]), .addr(waddr[f]));
  end

  logic final_pass;
  assign final_pass = (o_pass == 3'(N_PASS - 1));

  always_comb begin
    for (int m = 0; m < N_BANK; m++) begin
      j_we[m] = 1'b0; j_waddr[m] = '0; j_wdata[m] = '0;
      mg_valid[m] = 1'b0; mg_addr[m] = '0; mg_j[m] = '0; mg_ly[m] = '0; mg_lx[m] = '0;
      for (int f = 0; f < N_FU; f++)
        if (fo_valid[f] && int'(wbank[f]) == m) begin
          j_we[m]     = !final_pass;
          j_waddr[m]  = waddr[f];
          j_wdata[m]  = fo_j[f];
          mg_valid[m] = final_pass;
          mg_addr[m]  = waddr[f];
          mg_j[m]     = fo_j[f];
          mg_ly[m]    = wly[f];
          mg_lx[m]    = wlx[f];
        end
      d_we[m] = 1'b0; d_waddr[m] = '0; d_wdata[m] = '0;
      for (int l = 0; l < 4; l++)
        if (ld_we[l] && int'(ld_bank[l]) == m) begin
          d_we[m] = 1'b1; d_waddr[m] = ld_addr[l]; d_wdata[m] = ld_data[l];
        end
    end
  end

  // The twelve FUs never address the same bank in one cycle.
  for (genvar f = 1; f < N_FU; f++) begin : g_chk
    for (genvar g = 0; g < f; g++) begin : g_pair
      a_no_conflict: assert property (@(posedge clk) disable iff (!rst_n)
        step.valid |-> rbank[f] != rbank[g]);
    end
  end
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n) (|ld_we) |-> !busy);
endmodule
