// fc_accl_top: fully connected layer accelerator (FC-ACCL).
//
// Computes out = max(W*x + bias, 0) for a layer with 8*num_slots inputs and
// N_PE*TILE outputs (4096 inputs and 1000 outputs padded to 1024 for the
// FC8 layer of AlexNet/VGG16). W is cut into 8x8 tiles. PE p owns row p of
// tiles and is fed by its own weight HBM through its own pre-fetch unit
// (DPR-BUF); all PEs share the input feature memory. The controller steps
// through the columns of tiles, one column per time slot; in each slot all
// PEs multiply their tile by the same 8 input features and accumulate. After
// the last slot the bias/ReLU unit turns the N_PE*TILE sums into outputs and
// streams them through a dual-clock FIFO into the output feature memory.
//
// Clock domains: hbm_clk (HBM command and DQ side of the DPR-BUF FIFOs, 500
// MHz in the paper), core_clk (controller, PEs, bias/ReLU and output-FIFO
// write side, 662 MHz pipelined / 100 MHz non-pipelined), out_clk (output
// FIFO read side and output memory, 150 MHz). rst_n is asynchronous and is
// synchronised into each domain. Run configuration (num_slots, wset,
// prod_shift, out_base) is captured when start is accepted and held for the
// run; the other domains read the captured copy after the start pulse has
// crossed, which is safe because it does not change until the next run.
//
// Interfaces brought out because the parts are external: per weight HBM a
// READ command (hbm_rd, hbm_addr = {weight set, slot, read index}) and its
// returned data (hbm_dq_valid, hbm_dq, 128 bits); the input feature memory
// read port (in_rd, in_addr -> in_data on the next core_clk edge). The host
// loads biases (bias_we, bias_addr, bias_wdata), pulses start, and reads
// results through out_rd_addr -> out_rd_data (one out_clk later);
// out_count tells how many outputs of the current run have been written.
//
// Follows the paper: 128 PEs with 8x8 MV-mults and 8x1 accumulators, one
// HBM and DPR-BUF per PE row, a shared input memory read once per slot, one
// controller, add-bias/ReLU after the last slot, 1024-entry output FIFO,
// page (weight set) selection between runs. Run-time num_slots and out_base
// let the same hardware run other layer sizes in several passes.
module fc_accl_top import fc_accl_pkg::*; #(
  parameter int  N_PE        = 128,
  parameter int  TILE        = 8,
  parameter bit  PIPELINED   = 1'b1,
  parameter int  FIFO_DEPTH  = 4,
  parameter int  OFIFO_DEPTH = 1024,
  parameter int  OUT_DEPTH   = 4096,
  parameter int  SLOT_W      = 12,
  parameter int  SET_W       = 2,
  localparam int N_OUT       = N_PE * TILE,
  localparam int NA_W        = $clog2(N_OUT),
  localparam int OAW         = $clog2(OUT_DEPTH),
  localparam int BEATS       = TILE * TILE * DW / DQ_W,
  localparam int READS       = BEATS / 4,
  localparam int RIDX_W      = (READS > 1) ? $clog2(READS) : 1,
  localparam int ADDR_W      = SET_W + SLOT_W + RIDX_W
) (
  input  logic                          hbm_clk,
  input  logic                          core_clk,
  input  logic                          out_clk,
  input  logic                          rst_n,
  // host control (core_clk)
  input  logic                          start,
  input  logic [SLOT_W-1:0]             num_slots,
  input  logic [SET_W-1:0]              wset,
  input  logic [SHIFT_W-1:0]            prod_shift,
  input  logic [OAW-1:0]                out_base,
  input  logic                          bias_we,
  input  logic [NA_W-1:0]               bias_addr,
  input  q_t                            bias_wdata,
  output logic                          busy,
  output logic                          t512_en,
  output logic                          data_wait,
  output logic                          push_stall,
  output logic                          relu_clamp,
  // weight HBMs (hbm_clk)
  output logic [N_PE-1:0]               hbm_rd,
  output logic [N_PE-1:0][ADDR_W-1:0]   hbm_addr,
  input  logic [N_PE-1:0]               hbm_dq_valid,
  input  logic [N_PE-1:0][DQ_W-1:0]     hbm_dq,
  output logic [N_PE-1:0]               hbm_wait,
  // input feature memory (core_clk)
  output logic                          in_rd,
  output logic [SLOT_W-1:0]             in_addr,
  input  logic [TILE*DW-1:0]            in_data,
  // output feature memory (out_clk)
  input  logic [OAW-1:0]                out_rd_addr,
  output logic [DW-1:0]                 out_rd_data,
  output logic [OAW:0]                  out_count
);
  localparam int PE_LAT = mv_latency(TILE, PIPELINED) + 1;

  // ---------------- resets ----------------
  logic hbm_rst_n, core_rst_n, out_rst_n;
  rst_sync u_rs_hbm  (.clk(hbm_clk),  .rst_n, .rst_n_sync(hbm_rst_n));
  rst_sync u_rs_core (.clk(core_clk), .rst_n, .rst_n_sync(core_rst_n));
  rst_sync u_rs_out  (.clk(out_clk),  .rst_n, .rst_n_sync(out_rst_n));

  // ---------------- run configuration ----------------
  logic                 ctrl_busy, relu_busy, start_acc;
  logic [SLOT_W-1:0]    cfg_slots;
  logic [SET_W-1:0]     cfg_wset;
  logic [SHIFT_W-1:0]   cfg_shift;
  logic [OAW-1:0]       cfg_base;

  assign start_acc = start && !ctrl_busy && !relu_busy && (num_slots != '0);
  assign busy      = ctrl_busy || relu_busy;

  always_ff @(posedge core_clk or negedge core_rst_n) begin
    if (!core_rst_n) begin
      cfg_slots <= '0;
      cfg_wset  <= '0;
      cfg_shift <= SHIFT_W'(QF);
      cfg_base  <= '0;
    end else if (start_acc) begin
      cfg_slots <= num_slots;
      cfg_wset  <= wset;
      cfg_shift <= prod_shift;
      cfg_base  <= out_base;
    end
  end

  logic start_q;   // start after the configuration registers are loaded
  always_ff @(posedge core_clk or negedge core_rst_n) begin
    if (!core_rst_n) start_q <= 1'b0;
    else start_q <= start_acc;
  end

  logic start_hbm, start_out;
  pulse_sync u_ps_hbm (.src_clk(core_clk), .src_rst_n(core_rst_n), .src_pulse(start_q),
                       .dst_clk(hbm_clk), .dst_rst_n(hbm_rst_n), .dst_pulse(start_hbm));
  pulse_sync u_ps_out (.src_clk(core_clk), .src_rst_n(core_rst_n), .src_pulse(start_q),
                       .dst_clk(out_clk), .dst_rst_n(out_rst_n), .dst_pulse(start_out));

  // ---------------- controller ----------------
  logic buf_rd, pe_valid, pe_first, pe_last;
  logic [N_PE-1:0] buf_ready;

  main_ctrl #(.SLOT_W(SLOT_W), .RD_INTERVAL(4), .PE_LAT(PE_LAT)) u_ctrl (
    .clk       (core_clk),
    .rst_n     (core_rst_n),
    .start     (start_q),
    .num_slots (cfg_slots),
    .all_ready (&buf_ready),
    .relu_busy (relu_busy),
    .buf_rd    (buf_rd),
    .in_rd     (in_rd),
    .in_addr   (in_addr),
    .pe_valid  (pe_valid),
    .pe_first  (pe_first),
    .pe_last   (pe_last),
    .t512_en   (t512_en),
    .busy      (ctrl_busy),
    .data_wait (data_wait)
  );

  // ---------------- PE channels ----------------
  q_t [N_OUT-1:0]  acc_all;
  logic [N_PE-1:0] pe_done;

  for (genvar p = 0; p < N_PE; p++) begin : g_ch
    logic [BEATS*DQ_W-1:0] wbuf;
    q_t [TILE-1:0]         acc;

    dpr_buf #(.TILE(TILE), .FIFO_DEPTH(FIFO_DEPTH), .SLOT_W(SLOT_W), .SET_W(SET_W)) u_dpr (
      .hbm_clk      (hbm_clk),
      .hbm_rst_n    (hbm_rst_n),
      .start        (start_hbm),
      .num_slots    (cfg_slots),
      .wset         (cfg_wset),
      .hbm_rd       (hbm_rd[p]),
      .hbm_addr     (hbm_addr[p]),
      .hbm_dq_valid (hbm_dq_valid[p]),
      .hbm_dq       (hbm_dq[p]),
      .wait_stall   (hbm_wait[p]),
      .core_clk     (core_clk),
      .core_rst_n   (core_rst_n),
      .buf_rd       (buf_rd),
      .buf_ready    (buf_ready[p]),
      .wbuf         (wbuf)
    );

    pe #(.TILE(TILE), .PIPELINED(PIPELINED)) u_pe (
      .clk        (core_clk),
      .rst_n      (core_rst_n),
      .in_valid   (pe_valid),
      .in_first   (pe_first),
      .in_last    (pe_last),
      .w_bus      (wbuf),
      .x_bus      (in_data),
      .prod_shift (cfg_shift),
      .acc        (acc),
      .done       (pe_done[p])
    );

    assign acc_all[p*TILE +: TILE] = acc;
  end

  // ---------------- bias, ReLU, output FIFO, output memory ----------------
  logic          fifo_rd, fifo_empty;
  logic [DW-1:0] fifo_rdata;

  bias_relu #(.N(N_OUT), .OFIFO_DEPTH(OFIFO_DEPTH)) u_relu (
    .clk        (core_clk),
    .rst_n      (core_rst_n),
    .bias_we    (bias_we),
    .bias_addr  (bias_addr),
    .bias_wdata (bias_wdata),
    .t512_en    (t512_en),
    .acc        (acc_all),
    .busy       (relu_busy),
    .push_stall (push_stall),
    .relu_clamp (relu_clamp),
    .out_clk    (out_clk),
    .out_rst_n  (out_rst_n),
    .fifo_rd    (fifo_rd),
    .fifo_rdata (fifo_rdata),
    .fifo_empty (fifo_empty)
  );

  out_feature_mem #(.DEPTH(OUT_DEPTH)) u_omem (
    .clk        (out_clk),
    .rst_n      (out_rst_n),
    .run_start  (start_out),
    .out_base   (cfg_base),
    .fifo_empty (fifo_empty),
    .fifo_rdata (fifo_rdata),
    .fifo_rd    (fifo_rd),
    .out_count  (out_count),
    .rd_addr    (out_rd_addr),
    .rd_data    (out_rd_data)
  );

  // The controller's t512_en must coincide with the accumulators finishing.
  a_t512_aligned: assert property (@(posedge core_clk) disable iff (!core_rst_n) t512_en == pe_done[0])
    else $error("fc_accl_top: t512_en not aligned with the last accumulation");

endmodule
