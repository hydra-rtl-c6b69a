// cluster_sequencer: the time plan of the filter cluster for one tile.
//
// A tile gets 2*K_ITER passes, alternately along rows (X) and columns (Y).
// In every pass each filter unit handles two pairs of lines; for each pair
// it first streams the 48 pixels of both lines interleaved in the forward
// phase (96 cycles, position ascending, even line on even cycles), leaves one
// idle cycle, streams them again in the backward phase (96 cycles, position
// descending) and leaves one more idle cycle (the filter unit's shared
// adder/multiplier loop needs the gap when the phase changes). One pass is
// 388 cycles, a tile 8 * 388 = 3104. Before the last pass the sequencer
// waits while hold_last is high (the merger is still exchanging the strip
// of the previous tile), and after the last pass it waits DRAIN cycles for
// the datapath to empty before pulsing done. 'step' is registered and
// shared by all twelve filter units. The pass structure (forward then
// backward per line, X then Y, K = 4) is the chip's; the idle cycles and
// the hold are this design's choices.
module cluster_sequencer
  import hydra_pkg::*;
#(
  parameter int K_ITER_P = K_ITER,
  parameter int LINE     = TILE,
  parameter int DRAIN    = 12
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     start,
  input  logic     hold_last,
  output fu_step_t step,
  output logic     busy,
  output logic     last_pass,
  output logic     done,
  output logic     holding
);
  localparam int NP = 2 * K_ITER_P;
  localparam int PH = 2 * LINE;     // cycles of one phase

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_HOLD, S_DRAIN} state_t;
  state_t st;
  logic [2:0] pass;
  logic       pair, bwd;
  logic [7:0] t;               // 0..PH, PH = idle cycle
  logic [4:0] dr;

  assign busy      = (st != S_IDLE);
  assign last_pass = (pass == 3'(NP - 1));
  assign holding   = (st == S_HOLD);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; pass <= '0; pair <= 1'b0; bwd <= 1'b0; t <= '0; dr <= '0;
      step <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      step <= '0;
      case (st)
        S_IDLE: if (start) begin
          st <= S_RUN; pass <= '0; pair <= 1'b0; bwd <= 1'b0; t <= '0;
        end
        S_RUN: begin
          if (t != 8'(PH)) begin
            step.valid <= 1'b1;
            step.pass  <= pass;
            step.bwd   <= bwd;
            step.pair  <= pair;
            step.line  <= t[0];
            step.pos   <= bwd ? 6'(LINE - 1 - int'(t[7:1])) : t[6:1];
            step.first <= (t[7:1] == 7'd0);
            t <= t + 8'd1;
          end else begin
            t <= '0;
            bwd <= !bwd;
            if (bwd) begin
              pair <= !pair;
              if (pair) begin
                if (pass == 3'(NP - 1)) begin
                  st <= S_DRAIN; dr <= '0;
                end else begin
                  pass <= pass + 3'd1;
                  if (pass + 3'd1 == 3'(NP - 1) && hold_last) st <= S_HOLD;
                end
              end
            end
          end
        end
        S_HOLD: if (!hold_last) st <= S_RUN;
        S_DRAIN: begin
          dr <= dr + 5'd1;
          if (dr == 5'(DRAIN)) begin
            st <= S_IDLE; done <= 1'b1;
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end
endmodule
