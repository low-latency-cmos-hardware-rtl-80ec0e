// tb_fc_accl_full: the accelerator at full size running one FC8 layer.
//
// Default parameters: 128 PE channels with 128 HBM models, 1024 outputs.
// The layer has 4096 inputs (512 time slots of 8 features); weights and
// features come from tb_fc_pkg. Clocks as in the paper: HBM 500 MHz, PEs
// 662 MHz, output memory 150 MHz. All 1024 outputs are read back and
// compared with the integer reference. The slot rate is checked against the
// HBM-limited rate of this design (9 HBM cycles = 18 ns per slot), and the
// layer latency and throughput are printed for comparison with the paper's
// 11 cycles at 662 MHz (16.6 ns) per slot, 8.5 us per layer.
`timescale 1ns/1ps
module tb_fc_accl_full;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;

  localparam int N_PE = 128, TILE = 8, N_OUT = N_PE * TILE, NSLOTS = 512;
  localparam int SLOT_W = 12, SET_W = 2, ADDR_W = SET_W + SLOT_W + 1, OAW = 12;

  logic hbm_clk = 0, core_clk = 0, out_clk = 0, rst_n = 0;
  always #1 hbm_clk = ~hbm_clk;
  always #0.755 core_clk = ~core_clk;
  always #3.333 out_clk = ~out_clk;

  logic start, bias_we, busy, t512_en, data_wait, push_stall, relu_clamp, in_rd;
  logic [SLOT_W-1:0] num_slots, in_addr;
  logic [SET_W-1:0] wset;
  logic [SHIFT_W-1:0] prod_shift;
  logic [OAW-1:0] out_base, out_rd_addr;
  logic [9:0] bias_addr;
  q_t bias_wdata;
  logic [N_PE-1:0] hbm_rd, hbm_dq_valid, hbm_wait;
  logic [N_PE-1:0][ADDR_W-1:0] hbm_addr;
  logic [N_PE-1:0][127:0] hbm_dq;
  logic [127:0] in_data;
  logic [15:0] out_rd_data;
  logic [OAW:0] out_count;

  fc_accl_top dut (
    .hbm_clk, .core_clk, .out_clk, .rst_n, .start, .num_slots, .wset, .prod_shift, .out_base,
    .bias_we, .bias_addr, .bias_wdata, .busy, .t512_en, .data_wait, .push_stall, .relu_clamp,
    .hbm_rd, .hbm_addr, .hbm_dq_valid, .hbm_dq, .hbm_wait, .in_rd, .in_addr, .in_data,
    .out_rd_addr, .out_rd_data, .out_count);

  for (genvar p = 0; p < N_PE; p++) begin : g_hbm
    hbm_model #(.HBM_ID(p), .RL(6), .BL(4), .SLOT_W(SLOT_W), .SET_W(SET_W), .RIDX_W(1)) u_hbm (
      .clk(hbm_clk), .rd(hbm_rd[p]), .addr(hbm_addr[p]), .dq_valid(hbm_dq_valid[p]), .dq(hbm_dq[p]));
  end
  in_mem_model #(.SLOT_W(SLOT_W)) u_in (.clk(core_clk), .rd(in_rd), .addr(in_addr), .data(in_data));

  int checks = 0, failures = 0, n_rd = 0, n_clamp = 0;
  realtime t_start, t_first_rd, t_last_rd, t_t512;
  longint expected [N_OUT];

  always @(posedge core_clk) begin
    if (in_rd) begin
      if (n_rd == 0) t_first_rd = $realtime;
      t_last_rd = $realtime;
      n_rd++;
    end
    if (t512_en) t_t512 = $realtime;
  end

  initial begin : watchdog
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime per_slot, latency;
    start = 0; bias_we = 0; bias_addr = '0; bias_wdata = '0; num_slots = '0; wset = '0;
    prod_shift = 6'd10; out_base = '0; out_rd_addr = '0;
    for (int n = 0; n < N_OUT; n++) begin
      longint a;
      a = ref_acc(n / TILE, n % TILE, 0, NSLOTS, 10);
      expected[n] = ref_relu(a, bval(n));
      if (sat17(a + bval(n)) < 0) n_clamp++;
    end
    #20 rst_n = 1;
    #20;
    for (int n = 0; n < N_OUT; n++) begin
      @(negedge core_clk);
      bias_we = 1; bias_addr = 10'(n); bias_wdata = q_t'(bval(n));
    end
    @(negedge core_clk) bias_we = 0;
    @(negedge core_clk);
    num_slots = SLOT_W'(NSLOTS); start = 1;
    t_start = $realtime;
    @(negedge core_clk) start = 0;
    wait (t512_en);
    @(negedge out_clk);
    wait (out_count == (OAW+1)'(N_OUT));
    repeat (3) @(negedge out_clk);
    for (int a = 0; a < N_OUT; a++) begin
      @(negedge out_clk) out_rd_addr = OAW'(a);
      @(negedge out_clk);
      checks++;
      if (longint'(out_rd_data) != expected[a]) begin
        failures++;
        if (failures < 20) $display("FAIL out[%0d] = %0d, expected %0d", a, out_rd_data, expected[a]);
      end
    end
    per_slot = (t_last_rd - t_first_rd) / (NSLOTS - 1);
    latency  = t_t512 - t_start;
    $display("FC8 4096-1000(1024): %0d slots, %0.2f ns per slot, %0.3f us to t512_en, %0.1f GOPS, %0d outputs clamped by ReLU",
             n_rd, per_slot, latency / 1000.0, 2.0 * 4096.0 * 1000.0 / latency, n_clamp);
    checks++;
    if (n_rd != NSLOTS || per_slot < 17.9 || per_slot > 19.6) begin
      failures++;
      $display("FAIL slot rate %0.2f ns, expected 18 ns", per_slot);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
