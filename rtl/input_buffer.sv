// input_buffer: gathers the {A, piX, piY} strip that enters the next tile
// and bursts it into the filter cluster's data memory.
//
// A strip is 16x48 pixels = 768 words of 72 bits (A, piX, piY as FP24, A in
// the top bits), exactly the capacity of the four 192x72 banks. Fill: the
// address generator walks the strip in the order of hydra_pkg::strip_pixel
// (group g, pixel u), shows the frame coordinates of the word it wants on
// in_x/in_y with in_req high, and stores the word into bank u, address g
// when in_valid is high in the same cycle (the source may take any number of
// cycles per word). Burst: when the cluster is idle, all four banks are read
// at address g in one cycle and written the next cycle over four lanes into
// four different tile-memory banks, so the strip takes 192 cycles. 'full' is
// high from the end of a fill to the end of its burst. The bank count and
// size are the chip's; the walking order and handshake are this design's.
module input_buffer
  import hydra_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  // fill
  input  logic              fill_start,
  input  strip_t            fill_strip,
  input  tile_t             fill_tile,
  output logic              filling,
  output logic              full,
  output logic              in_req,
  output logic [11:0]       in_x,
  output logic [11:0]       in_y,
  input  logic              in_valid,
  input  logic [71:0]       in_data,
  // burst
  input  logic              burst_start,
  output logic              bursting,
  output logic              burst_done,
  output logic [3:0]        ld_we,
  output logic [3:0][3:0]   ld_bank,
  output logic [3:0][7:0]   ld_addr,
  output logic [3:0][71:0]  ld_data
);
  strip_t     strip;
  tile_t      tile;
  logic [9:0] s;         // fill index 0..767
  logic [7:0] g;         // burst group
  logic       rd_v;
  logic [7:0] rd_g;

  // ---------------- fill address generation
  logic [11:0] pp;
  logic [5:0]  ly, lx;
  assign pp    = strip_pixel(strip, s[9:2], s[1:0]);
  assign ly    = phys2log(pp[11:6], tile.offy);
  assign lx    = phys2log(pp[5:0],  tile.offx);
  assign in_x  = 12'(BLK) * 12'(tile.tx) + 12'(lx);
  assign in_y  = 12'(BLK) * 12'(tile.ty) + 12'(ly);
  assign in_req = filling;

  // ---------------- banks
  logic [3:0]        b_we;
  logic [3:0][71:0]  b_rdata;
  for (genvar b = 0; b < 4; b++) begin : g_bank
    assign b_we[b] = filling && in_valid && (s[1:0] == 2'(b));
    sram_2p #(.DEPTH(GROUPS), .WIDTH(72)) u_bank (
      .clk, .re(bursting && !rd_v_end), .raddr(g), .rdata(b_rdata[b]),
      .we(b_we[b]), .waddr(s[9:2]), .wdata(in_data));
  end

  logic rd_v_end;
  assign rd_v_end = (g == 8'(GROUPS));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      filling <= 1'b0; full <= 1'b0; bursting <= 1'b0; burst_done <= 1'b0;
      s <= '0; g <= '0; rd_v <= 1'b0; rd_g <= '0;
      strip <= '0; tile <= '0;
    end else begin
      burst_done <= 1'b0;
      if (fill_start && !filling && !full) begin
        filling <= 1'b1; s <= '0; strip <= fill_strip; tile <= fill_tile;
      end else if (filling && in_valid) begin
        s <= s + 10'd1;
        if (s == 10'(STRIP - 1)) begin
          filling <= 1'b0; full <= 1'b1;
        end
      end
      if (burst_start && full && !bursting) begin
        bursting <= 1'b1; g <= '0;
      end else if (bursting) begin
        rd_v <= !rd_v_end;
        rd_g <= g;
        if (!rd_v_end) g <= g + 8'd1;
        else if (!rd_v) begin
          bursting <= 1'b0; full <= 1'b0; burst_done <= 1'b1;
        end
      end else begin
        rd_v <= 1'b0;
      end
    end
  end

  // ---------------- burst write lanes
  always_comb begin
    for (int u = 0; u < 4; u++) begin
      logic [11:0] q;
      q = strip_pixel(strip, rd_g, 2'(u));
      ld_we[u]   = rd_v;
      ld_bank[u] = phys_bank(q[11:6], q[5:0]);
      ld_addr[u] = phys_addr(q[11:6], q[5:0]);
      ld_data[u] = b_rdata[u];
    end
  end

  a_no_fill_while_full: assert property (@(posedge clk) disable iff (!rst_n)
    fill_start |-> !full && !filling);
endmodule
