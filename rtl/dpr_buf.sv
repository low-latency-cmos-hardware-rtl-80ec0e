// dpr_buf: HBM data pre-fetch unit and 1024-bit on-chip weight buffer of one
// PE row (DPR-BUF).
//
// Function. One time slot needs one 8x8 tile of 16-bit weights, 1024 bits.
// The HBM delivers 128 bits per DQ beat, so the unit's address generator
// issues two READ commands with burst length 4 per slot, to consecutive
// column addresses Ca and Cb. The 8 returned beats go through a 1:8 demux:
// beat k is written into FIFO k. On the PE side all 8 FIFOs are popped in
// one cycle (Rd) and their outputs land in one 1024-bit register that feeds
// the MV-mult. Beat k holds row k of the tile, weight w[k][c] in bits
// [16c+15:16c] of the beat.
//
// Timing (HBM clock). Per slot: READ Ca in cycle 0, READ Cb in cycle BL,
// then one cycle "sw" before the next slot may start, i.e. 2*BL+SW_CYCLES =
// 9 cycles per slot, the m1..m8,sw cadence of the paper. A slot is only
// started when FIFO 0 has room for it counting the slots already requested
// but not yet returned, so the FIFOs never overflow whatever the HBM read
// latency; when there is no room the sequencer waits (wait_stall).
//
// Follows the paper: two BL4 reads per slot to two column addresses, 1:8
// demux, 8 FIFOs written at the HBM clock and read together at the PE clock,
// one sw cycle, a single 1024-bit register. This design's choices: the
// address layout {weight set, slot, read index}, the FIFO depth, the credit
// scheme, single-data-rate 128-bit beats, and the row-per-beat weight order.
//
// Interface. HBM side (hbm_clk): start pulse, quasi-static num_slots and
// wset (held stable during a run), READ command hbm_rd/hbm_addr, returned
// data hbm_dq_valid/hbm_dq. PE side (core_clk): buf_ready (every FIFO holds
// a beat), buf_rd (the Rd cycle), wbuf valid from the cycle after buf_rd.
module dpr_buf import fc_accl_pkg::*; #(
  parameter int TILE       = 8,
  parameter int FIFO_DEPTH = 4,
  parameter int SLOT_W     = 12,
  parameter int SET_W      = 2,
  parameter int BL         = 4,
  parameter int SW_CYCLES  = 1,
  localparam int BEATS     = TILE * TILE * DW / DQ_W,
  localparam int READS     = BEATS / BL,
  localparam int RIDX_W    = (READS > 1) ? $clog2(READS) : 1,
  localparam int ADDR_W    = SET_W + SLOT_W + RIDX_W
) (
  // HBM clock domain
  input  logic                   hbm_clk,
  input  logic                   hbm_rst_n,
  input  logic                   start,
  input  logic [SLOT_W-1:0]      num_slots,
  input  logic [SET_W-1:0]       wset,
  output logic                   hbm_rd,
  output logic [ADDR_W-1:0]      hbm_addr,
  input  logic                   hbm_dq_valid,
  input  logic [DQ_W-1:0]        hbm_dq,
  output logic                   wait_stall,
  // PE clock domain
  input  logic                   core_clk,
  input  logic                   core_rst_n,
  input  logic                   buf_rd,
  output logic                   buf_ready,
  output logic [BEATS*DQ_W-1:0]  wbuf
);
  localparam int FL_W   = $clog2(FIFO_DEPTH) + 1;
  localparam int SLOT_T = READS * BL + SW_CYCLES;   // cycles per slot
  localparam int T_W    = $clog2(SLOT_T + 1);
  localparam int B_W    = (BEATS > 1) ? $clog2(BEATS) : 1;

  // ---------------- address generator / READ sequencer ----------------
  logic              active;
  logic [SLOT_W-1:0] slot;
  logic [T_W-1:0]    t;
  logic [SLOT_W:0]   issued, received;
  logic [FL_W-1:0]   lvl0;
  logic              room;
  logic [SLOT_W:0]   inflight;

  assign inflight = issued - received;
  assign room     = ((SLOT_W+1)'(lvl0) + inflight) < (SLOT_W+1)'(FIFO_DEPTH);
  assign wait_stall = active && (t == '0) && !room;

  always_ff @(posedge hbm_clk or negedge hbm_rst_n) begin
    if (!hbm_rst_n) begin
      active <= 1'b0;
      slot   <= '0;
      t      <= '0;
      issued <= '0;
    end else if (start) begin
      active <= (num_slots != '0);
      slot   <= '0;
      t      <= '0;
      issued <= '0;
    end else if (active) begin
      if (t == '0) begin
        if (room) begin
          t      <= T_W'(1);
          issued <= issued + 1'b1;
        end
      end else if (t == T_W'(SLOT_T - 1)) begin
        t <= '0;
        if (slot == num_slots - 1'b1) active <= 1'b0;
        slot <= slot + 1'b1;
      end else begin
        t <= t + 1'b1;
      end
    end
  end

  // READ k of the slot goes out in cycle k*BL of the slot.
  always_comb begin
    hbm_rd   = 1'b0;
    hbm_addr = {wset, slot, RIDX_W'(0)};
    if (active) begin
      for (int k = 0; k < READS; k++) begin
        if (t == T_W'(k * BL) && (k != 0 || room)) begin
          hbm_rd   = 1'b1;
          hbm_addr = {wset, slot, RIDX_W'(k)};
        end
      end
    end
  end

  // ---------------- 1:8 demux into the FIFOs ----------------
  logic [B_W-1:0] beat;

  always_ff @(posedge hbm_clk or negedge hbm_rst_n) begin
    if (!hbm_rst_n) begin
      beat     <= '0;
      received <= '0;
    end else if (start) begin
      beat     <= '0;
      received <= '0;
    end else if (hbm_dq_valid) begin
      beat <= (beat == B_W'(BEATS - 1)) ? '0 : beat + 1'b1;
      if (beat == '0) received <= received + 1'b1;
    end
  end

  logic [BEATS-1:0]  f_empty;
  logic [BEATS-1:0]  f_full;
  logic [DQ_W-1:0]   f_rdata [BEATS];
  logic [FL_W-1:0]   f_wlevel [BEATS];

  for (genvar k = 0; k < BEATS; k++) begin : g_fifo
    logic [FL_W-1:0] rlevel_unused;
    async_fifo #(.W(DQ_W), .DEPTH(FIFO_DEPTH)) u_fifo (
      .wclk   (hbm_clk),
      .wrst_n (hbm_rst_n),
      .we     (hbm_dq_valid && beat == B_W'(k)),
      .wdata  (hbm_dq),
      .full   (f_full[k]),
      .wlevel (f_wlevel[k]),
      .rclk   (core_clk),
      .rrst_n (core_rst_n),
      .re     (buf_rd),
      .rdata  (f_rdata[k]),
      .empty  (f_empty[k]),
      .rlevel (rlevel_unused)
    );
  end

  assign lvl0 = f_wlevel[0];

  // ---------------- 1024-bit on-chip buffer ----------------
  assign buf_ready = ~|f_empty;

  always_ff @(posedge core_clk) begin
    if (buf_rd) begin
      for (int k = 0; k < BEATS; k++) wbuf[k*DQ_W +: DQ_W] <= f_rdata[k];
    end
  end

  a_rd_when_ready: assert property (@(posedge core_clk) disable iff (!core_rst_n) buf_rd |-> buf_ready)
    else $error("dpr_buf: Rd while a FIFO is empty");

endmodule
