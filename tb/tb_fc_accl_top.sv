// tb_fc_accl_top: end-to-end test of the accelerator at reduced size.
//
// 4 PE channels (32 outputs), each with its own HBM model, the input
// memory model, an 8-entry output FIFO and a 256-word output memory. Three
// layer runs with different weight sets, lengths, product shifts, output
// base addresses and clock ratios:
//   A: 64 slots, set 0, fast PE clock (662 MHz): the PEs wait for HBM data;
//      one slot must take 9 HBM cycles (18 ns), the HBM-limited rate.
//   B: 40 slots, set 1, slow PE clock (100 MHz): the HBM side must wait for
//      FIFO room; Rd every 4th PE cycle.
//   C: 24 slots, set 2, prod_shift 11, written at base 64.
// After each run all outputs are read back through the output memory port and
// compared with the integer reference; results of earlier runs must survive.
// Each mechanism (data wait, HBM back-pressure, output FIFO full, ReLU clamp,
// zero operands, weight-set switch, multi-pass base address) is counted and
// must have happened at least once.
`timescale 1ns/1ps
module tb_fc_accl_top;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;

  localparam int N_PE = 4, TILE = 8, N_OUT = N_PE * TILE;
  localparam int SLOT_W = 12, SET_W = 2, ADDR_W = SET_W + SLOT_W + 1;
  localparam int OUT_DEPTH = 256, OAW = 8;

  logic hbm_clk = 0, core_clk = 0, out_clk = 0, rst_n = 0;
  real core_half = 0.755;
  always #1 hbm_clk = ~hbm_clk;
  always #(core_half) core_clk = ~core_clk;
  always #3.333 out_clk = ~out_clk;

  logic start, bias_we, busy, t512_en, data_wait, push_stall, relu_clamp, in_rd;
  logic [SLOT_W-1:0] num_slots, in_addr;
  logic [SET_W-1:0] wset;
  logic [SHIFT_W-1:0] prod_shift;
  logic [OAW-1:0] out_base, out_rd_addr;
  logic [4:0] bias_addr;
  q_t bias_wdata;
  logic [N_PE-1:0] hbm_rd, hbm_dq_valid, hbm_wait;
  logic [N_PE-1:0][ADDR_W-1:0] hbm_addr;
  logic [N_PE-1:0][127:0] hbm_dq;
  logic [127:0] in_data;
  logic [15:0] out_rd_data;
  logic [OAW:0] out_count;

  fc_accl_top #(.N_PE(N_PE), .TILE(TILE), .PIPELINED(1'b1), .FIFO_DEPTH(4), .OFIFO_DEPTH(8),
                .OUT_DEPTH(OUT_DEPTH), .SLOT_W(SLOT_W), .SET_W(SET_W)) dut (
    .hbm_clk, .core_clk, .out_clk, .rst_n, .start, .num_slots, .wset, .prod_shift, .out_base,
    .bias_we, .bias_addr, .bias_wdata, .busy, .t512_en, .data_wait, .push_stall, .relu_clamp,
    .hbm_rd, .hbm_addr, .hbm_dq_valid, .hbm_dq, .hbm_wait, .in_rd, .in_addr, .in_data,
    .out_rd_addr, .out_rd_data, .out_count);

  for (genvar p = 0; p < N_PE; p++) begin : g_hbm
    hbm_model #(.HBM_ID(p), .RL(6), .BL(4), .SLOT_W(SLOT_W), .SET_W(SET_W), .RIDX_W(1)) u_hbm (
      .clk(hbm_clk), .rd(hbm_rd[p]), .addr(hbm_addr[p]), .dq_valid(hbm_dq_valid[p]), .dq(hbm_dq[p]));
  end
  in_mem_model #(.SLOT_W(SLOT_W)) u_in (.clk(core_clk), .rd(in_rd), .addr(in_addr), .data(in_data));

  int checks = 0, failures = 0;
  int n_data_wait = 0, n_hbm_wait = 0, n_push_stall = 0, n_clamp = 0, n_zero = 0, n_set_switch = 0, n_base = 0;
  int n_rd = 0;
  realtime first_rd, last_rd;

  always @(posedge core_clk) begin
    if (data_wait) n_data_wait++;
    if (push_stall) n_push_stall++;
    if (in_rd) begin
      if (n_rd == 0) first_rd = $realtime;
      last_rd = $realtime;
      n_rd++;
    end
  end
  always @(posedge hbm_clk) if (|hbm_wait) n_hbm_wait++;

  longint expected [OUT_DEPTH];
  bit     written  [OUT_DEPTH];

  initial begin : watchdog
    #400000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic layer(input int nslots, input int set, input int shift, input int base,
                       input real half, input real exp_ns);
    realtime per_slot;
    core_half = half;
    #50;
    for (int n = 0; n < N_OUT; n++) begin
      longint a, o;
      a = ref_acc(n / TILE, n % TILE, set, nslots, shift);
      o = ref_relu(a, bval(n));
      if (sat17(a + bval(n)) < 0) n_clamp++;
      expected[base + n] = o;
      written[base + n]  = 1;
    end
    for (int pe = 0; pe < N_PE; pe++)
      for (int s = 0; s < nslots; s++)
        for (int r = 0; r < TILE; r++)
          for (int c = 0; c < TILE; c++)
            if (wval(pe, set, s, r, c) == 0 || xval(s, c) == 0) n_zero++;
    n_rd = 0;
    @(negedge core_clk);
    num_slots = SLOT_W'(nslots); wset = SET_W'(set); prod_shift = SHIFT_W'(shift);
    out_base = OAW'(base); start = 1;
    @(negedge core_clk) start = 0;
    @(negedge core_clk);
    checks++;
    if (!busy) begin failures++; $display("FAIL start not taken"); end
    wait (t512_en);
    @(negedge out_clk);
    wait (out_count == (OAW+1)'(N_OUT));
    repeat (3) @(negedge out_clk);
    per_slot = (last_rd - first_rd) / (nslots - 1);
    $display("run: %0d slots, set %0d: %0d Rd cycles, %0.2f ns per slot", nslots, set, n_rd, per_slot);
    checks++;
    if (n_rd != nslots || per_slot < exp_ns - 0.1 || per_slot > exp_ns + 2.0 * half + 0.01) begin
      failures++;
      $display("FAIL slot rate %0.2f ns, expected %0.2f ns", per_slot, exp_ns);
    end
    // read back everything written so far
    for (int a = 0; a < OUT_DEPTH; a++) begin
      if (!written[a]) continue;
      @(negedge out_clk) out_rd_addr = OAW'(a);
      @(negedge out_clk);
      checks++;
      if (longint'(out_rd_data) != expected[a]) begin
        failures++;
        if (failures < 20) $display("FAIL out[%0d] = %0d, expected %0d", a, out_rd_data, expected[a]);
      end
    end
  endtask

  initial begin
    start = 0; bias_we = 0; bias_addr = '0; bias_wdata = '0; num_slots = '0; wset = '0;
    prod_shift = 6'd10; out_base = '0; out_rd_addr = '0;
    for (int a = 0; a < OUT_DEPTH; a++) written[a] = 0;
    #20 rst_n = 1;
    #20;
    for (int n = 0; n < N_OUT; n++) begin
      @(negedge core_clk);
      bias_we = 1; bias_addr = 5'(n); bias_wdata = q_t'(bval(n));
    end
    @(negedge core_clk) bias_we = 0;

    layer(64, 0, 10, 0, 0.755, 18.0);          // HBM-limited: 9 cycles of 2 ns
    layer(40, 1, 10, 32, 5.0, 40.0);           // PE-limited: 4 cycles of 10 ns
    n_set_switch++; n_base++;
    layer(24, 2, 11, 64, 0.755, 18.0);
    n_set_switch++; n_base++;

    $display("data_wait %0d, hbm_wait %0d, push_stall %0d, clamped %0d, zero operand pairs %0d, set switches %0d, base moves %0d",
             n_data_wait, n_hbm_wait, n_push_stall, n_clamp, n_zero, n_set_switch, n_base);
    checks++;
    if (n_data_wait == 0) begin failures++; $display("FAIL data wait never happened"); end
    checks++;
    if (n_hbm_wait == 0) begin failures++; $display("FAIL HBM back-pressure never happened"); end
    checks++;
    if (n_push_stall == 0) begin failures++; $display("FAIL output FIFO never full"); end
    checks++;
    if (n_clamp == 0) begin failures++; $display("FAIL ReLU never clamped"); end
    checks++;
    if (n_zero == 0) begin failures++; $display("FAIL no zero operands"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
