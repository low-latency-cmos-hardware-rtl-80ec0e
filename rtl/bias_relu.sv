// bias_relu: bias addition, ReLU and output FIFO behind the PE array.
//
// Holds one Q(17,10) bias per output (N = N_PE*TILE of them, loaded through
// bias_we/bias_addr/bias_wdata). When t512_en pulses, after the last time
// slot, all N accumulator values get their bias added and are clamped at 0,
// out = max(acc + bias, 0), in that single cycle, into a result register.
// The N results are then written one per clock, output 0 first, into a
// dual-clock FIFO of OFIFO_DEPTH 16-bit entries that is drained from the
// output-memory clock domain. A ReLU result is never negative, so its 17-bit
// value fits the 16-bit FIFO word unchanged.
//
// Follows the paper: 8 adders per PE output vector, comparison with 0, both
// in one cycle, only after the last slot (t512_en), a 1024-entry FIFO
// crossing from the PE clock to the output clock, 16 bits out. This design's
// choices: the bias register file and its load port, saturation of the bias
// addition, the one-element-per-cycle serialisation (the paper's FIFO has a
// single 16-bit port) and waiting when the FIFO is full (push_stall).
module bias_relu import fc_accl_pkg::*; #(
  parameter int N           = 1024,
  parameter int OFIFO_DEPTH = 1024,
  localparam int NA_W       = (N > 1) ? $clog2(N) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              bias_we,
  input  logic [NA_W-1:0]   bias_addr,
  input  q_t                bias_wdata,
  input  logic              t512_en,
  input  q_t   [N-1:0]      acc,
  output logic              busy,
  output logic              push_stall,
  output logic              relu_clamp,   // some output was clamped to 0 by the last t512_en
  // output clock domain
  input  logic              out_clk,
  input  logic              out_rst_n,
  input  logic              fifo_rd,
  output logic [DW-1:0]     fifo_rdata,
  output logic              fifo_empty
);
  localparam int FL_W = $clog2(OFIFO_DEPTH) + 1;

  q_t            bias [N];
  logic [DW-1:0] res  [N];
  logic [NA_W:0] idx;
  logic          f_full;
  logic          push;

  always_ff @(posedge clk) begin
    if (bias_we) bias[bias_addr] <= bias_wdata;
  end

  always_ff @(posedge clk) begin
    if (t512_en) begin
      for (int n = 0; n < N; n++) res[n] <= relu16(sat_add(acc[n], bias[n]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) relu_clamp <= 1'b0;
    else if (t512_en) begin
      relu_clamp <= 1'b0;
      for (int n = 0; n < N; n++) if (sat_add(acc[n], bias[n]) < 0) relu_clamp <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      idx  <= '0;
    end else if (t512_en) begin
      busy <= 1'b1;
      idx  <= '0;
    end else if (push) begin
      idx <= idx + 1'b1;
      if (idx == (NA_W+1)'(N - 1)) busy <= 1'b0;
    end
  end

  assign push       = busy && !f_full;
  assign push_stall = busy && f_full;

  logic [FL_W-1:0] wlevel_unused, rlevel_unused;
  async_fifo #(.W(DW), .DEPTH(OFIFO_DEPTH)) u_ofifo (
    .wclk   (clk),
    .wrst_n (rst_n),
    .we     (push),
    .wdata  (res[idx[NA_W-1:0]]),
    .full   (f_full),
    .wlevel (wlevel_unused),
    .rclk   (out_clk),
    .rrst_n (out_rst_n),
    .re     (fifo_rd),
    .rdata  (fifo_rdata),
    .empty  (fifo_empty),
    .rlevel (rlevel_unused)
  );

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n) t512_en |-> !busy)
    else $error("bias_relu: t512_en while still streaming");

endmodule
