// tb_dpr_buf: self-checking test of the HBM pre-fetch unit with an HBM model.
//
// The HBM side runs at 500 MHz (2 ns). Run 1 (weight set 1, 40 slots) has a
// fast PE clock (1.51 ns) that takes a tile as soon as one is ready, so the
// unit must stream one slot every 9 HBM cycles: READ Ca, READ Cb 4 cycles
// later, one sw cycle. Run 2 (weight set 2, 30 slots) has a slow PE clock
// (10 ns), so the FIFOs fill and the sequencer must wait (wait_stall) without
// ever overflowing. Every 1024-bit buffer is compared with the weights the
// model holds for that slot and set, and the READ command stream is checked.
`timescale 1ns/1ps
module tb_dpr_buf;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;

  localparam int SLOT_W = 12, SET_W = 2, ADDR_W = SET_W + SLOT_W + 1;

  logic hbm_clk = 0, core_clk = 0, rst_n = 0;
  real  core_half = 0.755;
  always #1 hbm_clk = ~hbm_clk;
  always #(core_half) core_clk = ~core_clk;

  logic start, hbm_rd, dq_valid, wait_stall, buf_rd, buf_ready;
  logic [SLOT_W-1:0] num_slots;
  logic [SET_W-1:0]  wset;
  logic [ADDR_W-1:0] hbm_addr;
  logic [127:0]      dq;
  logic [1023:0]     wbuf;

  dpr_buf #(.TILE(8), .FIFO_DEPTH(4), .SLOT_W(SLOT_W), .SET_W(SET_W)) dut (
    .hbm_clk, .hbm_rst_n(rst_n), .start, .num_slots, .wset, .hbm_rd, .hbm_addr,
    .hbm_dq_valid(dq_valid), .hbm_dq(dq), .wait_stall,
    .core_clk, .core_rst_n(rst_n), .buf_rd, .buf_ready, .wbuf);

  hbm_model #(.HBM_ID(5), .RL(6), .BL(4), .SLOT_W(SLOT_W), .SET_W(SET_W), .RIDX_W(1)) u_hbm (
    .clk(hbm_clk), .rd(hbm_rd), .addr(hbm_addr), .dq_valid, .dq);

  int checks = 0, failures = 0;
  int hcyc = 0, n_stall = 0, n_exact9 = 0, n_slots_cmd = 0;
  int last_ca = -100, exp_slot = 0, exp_ridx = 0, exp_set = 0;

  always @(posedge hbm_clk) begin
    hcyc <= hcyc + 1;
    if (wait_stall) n_stall++;
    if (hbm_rd) begin
      int ridx, slot, set;
      ridx = int'(hbm_addr[0]);
      slot = int'(hbm_addr[1 +: SLOT_W]);
      set  = int'(hbm_addr[1+SLOT_W +: SET_W]);
      checks++;
      if (ridx != exp_ridx || slot != exp_slot || set != exp_set) begin
        failures++;
        $display("FAIL READ %0d/%0d/%0d expected %0d/%0d/%0d", set, slot, ridx, exp_set, exp_slot, exp_ridx);
      end
      if (ridx == 1) begin
        checks++;
        if (hcyc - last_ca != 4) begin failures++; $display("FAIL Cb %0d cycles after Ca", hcyc - last_ca); end
        exp_ridx = 0;
        exp_slot++;
      end else begin
        if (slot != 0) begin
          checks++;
          if (hcyc - last_ca < 9) begin failures++; $display("FAIL slot spacing %0d", hcyc - last_ca); end
          if (hcyc - last_ca == 9) n_exact9++;
        end
        last_ca = hcyc;
        exp_ridx = 1;
        n_slots_cmd++;
      end
    end
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int set, input int n, input real half);
    int got, gap;
    core_half = half;
    exp_set = set; exp_slot = 0; exp_ridx = 0;
    @(negedge hbm_clk);
    num_slots = SLOT_W'(n);
    wset = SET_W'(set);
    start = 1;
    @(negedge hbm_clk) start = 0;
    got = 0; gap = 4;
    while (got < n) begin
      @(negedge core_clk);
      buf_rd = 0;
      if (buf_ready && gap >= 4) begin
        buf_rd = 1;
        gap = 0;
        @(negedge core_clk);
        buf_rd = 0;
        gap = 1;
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++) begin
            checks++;
            if (wbuf[128*r + 16*c +: 16] != wval(5, set, got, r, c)) begin
              failures++;
              if (failures < 10) $display("FAIL set %0d slot %0d w[%0d][%0d]", set, got, r, c);
            end
          end
        got++;
      end else gap++;
    end
    repeat (20) @(negedge core_clk);
    checks++;
    if (buf_ready) begin failures++; $display("FAIL data left after run"); end
  endtask

  initial begin
    start = 0; buf_rd = 0; num_slots = '0; wset = '0;
    #10 rst_n = 1;
    #10;
    run(1, 40, 0.755);
    checks++;
    if (n_exact9 < 30) begin failures++; $display("FAIL only %0d slots at the 9-cycle rate", n_exact9); end
    n_stall = 0;
    run(2, 30, 5.0);
    checks++;
    if (n_stall == 0) begin failures++; $display("FAIL FIFO back-pressure never happened"); end
    $display("9-cycle slots %0d, wait_stall cycles %0d, u_hbm errors %0d", n_exact9, n_stall, u_hbm.errors);
    checks++;
    if (u_hbm.errors != 0 || n_slots_cmd != 70) begin failures++; $display("FAIL hbm errors or %0d slots", n_slots_cmd); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
