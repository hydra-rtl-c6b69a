// merge_unit: one of the twelve merge units, attached to tile bank m.
//
// Accumulate port: a final-pass result J(K) with its word address and logical
// position arrives; the weight generator gives its blending weight, the
// product w*J is registered while the stored partial sum is read, and one
// cycle later partial sum + w*J is written back to the 192x24 store. Each
// address is accumulated at most once per tile, so there is no hazard.
// Transfer port: the merger reads words (result one cycle later on xr_rdata)
// to output them and writes the partial sums read back from outside. The two
// ports are never used in the same cycle (asserted). Multiplier, adder,
// weight generator and store follow the chip; the register placement is this
// design's.
module merge_unit
  import fp24_pkg::*;
#(
  parameter int DEPTH = 192
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       acc_valid,
  input  logic [7:0] acc_addr,
  input  logic [5:0] acc_ly,
  input  logic [5:0] acc_lx,
  input  fp24_t      acc_j,
  input  logic       first_x,
  input  logic       last_x,
  input  logic       first_y,
  input  logic       last_y,
  input  logic       xr_re,
  input  logic [7:0] xr_addr,
  output fp24_t      xr_rdata,
  input  logic       xw_we,
  input  logic [7:0] xw_addr,
  input  fp24_t      xw_data
);
  fp24_t w, prod, prod_r, sum, rdata;
  logic  acc_v_r;
  logic [7:0] addr_r;

  weight_generator u_wg (.ly(acc_ly), .lx(acc_lx), .first_x, .last_x, .first_y, .last_y, .w);
  fp24_mul u_mul (.a(w), .b(acc_j), .y(prod));
  fp24_add u_add (.a(rdata), .b(prod_r), .sub(1'b0), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc_v_r <= 1'b0;
    else        acc_v_r <= acc_valid;
  end
  always_ff @(posedge clk) begin
    prod_r <= prod;
    addr_r <= acc_addr;
  end

  sram_2p #(.DEPTH(DEPTH), .WIDTH(FP_W)) u_store (
    .clk,
    .re(acc_valid || xr_re), .raddr(acc_valid ? acc_addr : xr_addr), .rdata(rdata),
    .we(acc_v_r || xw_we), .waddr(acc_v_r ? addr_r : xw_addr), .wdata(acc_v_r ? sum : xw_data));

  assign xr_rdata = rdata;

  a_ports_apart: assert property (@(posedge clk) disable iff (!rst_n)
    !((acc_valid || acc_v_r) && (xr_re || xw_we)));
endmodule
