// mv_mult: TILE x TILE matrix-vector multiplier of one PE (MV-mult).
//
// Computes prod[r] = sum_c w[r][c] * x[c] for one tile of weights w (from the
// 1024-bit DPR-BUF register) and one TILE x 1 slice x of the input features.
// Operands are 16-bit words taken as Q(17,10); each of the TILE*TILE scalar
// products is rounded to Q(17,10) (prod_shift selects which 17 of the 34
// bits are kept) and stored in a product register. Each row is then summed
// by an adder tree of TILE-1 saturating Q(17,10) adders (7 for TILE = 8).
// A zero detector on each operand pair forces that multiplier's inputs to 0
// so it does not switch, and its product register is loaded with 0.
//
// Timing. PIPELINED = 0 (the paper's 100 MHz PE): product register, then the
// whole adder tree, then an output register: 2 cycles from in_valid to
// out_valid. PIPELINED = 1 (the paper's 662 MHz PE): a register after every
// level of the adder tree as well, 1 + log2(TILE) = 4 cycles. One tile may be
// accepted every cycle in either mode. in_first/in_last travel alongside.
//
// Follows the paper: 64 multipliers with equal-width Q(17,10) operands, a
// register at each multiplier output, configurable 17-of-34-bit selection
// with rounding, zero detection, a seven-adder tree per row, an optional
// pipelined tree. The paper says the tree was pipelined with "a seven stage
// pipeline"; a tree of seven adders has three levels, and this design puts
// one register after each level. Bus layout, half-up rounding and saturation
// are this design's choices.
//
// Bus layout: w_bus bits [16*(r*TILE+c) +: 16] hold w[r][c];
// x_bus bits [16*c +: 16] hold x[c].
module mv_mult import fc_accl_pkg::*; #(
  parameter int TILE      = 8,
  parameter bit PIPELINED = 1'b1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic                      in_last,
  input  logic [TILE*TILE*DW-1:0]   w_bus,
  input  logic [TILE*DW-1:0]        x_bus,
  input  logic [SHIFT_W-1:0]        prod_shift,
  output logic                      out_valid,
  output logic                      out_first,
  output logic                      out_last,
  output q_t   [TILE-1:0]           prod
);
  localparam int LV  = $clog2(TILE);
  localparam int LAT = PIPELINED ? 1 + LV : 2;

  // ---------------- stage 1: scalar multipliers with zero detection -----
  q_t pr [TILE][TILE];   // product registers, pr[r][c]

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int r = 0; r < TILE; r++) begin
        for (int c = 0; c < TILE; c++) begin
          logic [DW-1:0] w_raw, x_raw;
          logic          zero;
          q_t            a, b;
          w_raw = w_bus[DW*(r*TILE+c) +: DW];
          x_raw = x_bus[DW*c +: DW];
          zero  = (w_raw == '0) || (x_raw == '0);
          a     = zero ? '0 : ext_word(w_raw);   // operand isolation
          b     = zero ? '0 : ext_word(x_raw);
          pr[r][c] <= zero ? '0 : prod_round(a * b, prod_shift);
        end
      end
    end
  end

  // ---------------- stage 2: adder tree per row ----------------
  if (PIPELINED) begin : g_pipe
    // tr[l][r][i]: registered output of adder i on level l of row r
    q_t tr [LV][TILE][TILE];
    always_ff @(posedge clk) begin
      for (int l = 0; l < LV; l++) begin
        for (int r = 0; r < TILE; r++) begin
          for (int i = 0; i < (TILE >> (l + 1)); i++) begin
            if (l == 0) tr[l][r][i] <= sat_add(pr[r][2*i], pr[r][2*i+1]);
            else        tr[l][r][i] <= sat_add(tr[l-1][r][2*i], tr[l-1][r][2*i+1]);
          end
        end
      end
    end
    for (genvar r = 0; r < TILE; r++) begin : g_o
      assign prod[r] = tr[LV-1][r][0];
    end
  end else begin : g_comb
    always_ff @(posedge clk) begin
      for (int r = 0; r < TILE; r++) begin
        q_t node [TILE];
        for (int i = 0; i < TILE; i++) node[i] = pr[r][i];
        for (int l = 0; l < LV; l++) begin
          for (int i = 0; i < (TILE >> (l + 1)); i++) node[i] = sat_add(node[2*i], node[2*i+1]);
        end
        prod[r] <= node[0];
      end
    end
  end

  // ---------------- valid / first / last alongside the data ------------
  logic [LAT-1:0] v_sr, f_sr, l_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '0;
      f_sr <= '0;
      l_sr <= '0;
    end else begin
      v_sr <= {v_sr[LAT-2:0], in_valid};
      f_sr <= {f_sr[LAT-2:0], in_first};
      l_sr <= {l_sr[LAT-2:0], in_last};
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_first = f_sr[LAT-1];
  assign out_last  = l_sr[LAT-1];

endmodule
