// pe: one processing element, the MV-mult followed by the V-Accum.
//
// Each of the PEs owns one row of 8x8 weight tiles (one block of 8 outputs).
// In every time slot it multiplies that slot's tile by the 8 input features
// of the slot and adds the 8 partial sums into its accumulator. Latency from
// in_valid to the accumulator holding the sum is mv_latency()+1 cycles; a
// new tile can be taken every cycle. Structure as in the paper's block
// diagram (an 8x8 matrix multiplier and an 8x1 accumulator inside each PE).
module pe import fc_accl_pkg::*; #(
  parameter int TILE      = 8,
  parameter bit PIPELINED = 1'b1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic                     in_last,
  input  logic [TILE*TILE*DW-1:0]  w_bus,
  input  logic [TILE*DW-1:0]       x_bus,
  input  logic [SHIFT_W-1:0]       prod_shift,
  output q_t   [TILE-1:0]          acc,
  output logic                     done
);
  logic            mv_valid, mv_first, mv_last;
  q_t [TILE-1:0]   mv_prod;

  mv_mult #(.TILE(TILE), .PIPELINED(PIPELINED)) u_mv (
    .clk, .rst_n, .in_valid, .in_first, .in_last, .w_bus, .x_bus, .prod_shift,
    .out_valid (mv_valid),
    .out_first (mv_first),
    .out_last  (mv_last),
    .prod      (mv_prod)
  );

  v_accum #(.TILE(TILE)) u_acc (
    .clk, .rst_n,
    .in_valid (mv_valid),
    .in_first (mv_first),
    .in_last  (mv_last),
    .prod     (mv_prod),
    .acc, .done
  );
endmodule
