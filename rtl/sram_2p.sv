// sram_2p: two-port SRAM (one read port, one write port, one clock) written
// as a synthesizable array. It stands for the SRAM macros of the chip: the
// 192x24 J-memory banks, the 192x72 {A, piX, piY} banks, the 4 input-buffer
// banks, the 96x24 forward-pass stores of each filter unit and the 192x24
// merge-unit stores. Read data appear one cycle after re; a read and a write
// of the same address in one cycle return the old word.
module sram_2p #(
  parameter int DEPTH = 192,
  parameter int WIDTH = 24,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end

  // Addresses beyond DEPTH are a caller error.
  a_waddr: assert property (@(posedge clk) we |-> (int'(waddr) < DEPTH));
  a_raddr: assert property (@(posedge clk) re |-> (int'(raddr) < DEPTH));
endmodule
