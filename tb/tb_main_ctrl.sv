// tb_main_ctrl: self-checking test of the main controller.
// all_ready is driven at random (data sometimes late, so the controller must
// wait, data_wait), and sometimes always high (Rd every 4th cycle). For each
// run: exactly num_slots Rd cycles, at least 4 cycles apart (exactly 4 when
// data is always ready), input addresses 0..num_slots-1 in order, pe_valid
// one cycle after each Rd with pe_first on slot 0 and pe_last on the last
// slot, and t512_en exactly 1+PE_LAT cycles after the last Rd. start is
// ignored while relu_busy is high.
`timescale 1ns/1ps
module tb_main_ctrl;
  localparam int SLOT_W = 12, PE_LAT = 5;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start, all_ready, relu_busy, buf_rd, in_rd, pe_valid, pe_first, pe_last, t512_en, busy, data_wait;
  logic [SLOT_W-1:0] num_slots, in_addr;

  main_ctrl #(.SLOT_W(SLOT_W), .RD_INTERVAL(4), .PE_LAT(PE_LAT)) dut (.clk, .rst_n, .start,
    .num_slots, .all_ready, .relu_busy, .buf_rd, .in_rd, .in_addr, .pe_valid, .pe_first,
    .pe_last, .t512_en, .busy, .data_wait);

  int checks = 0, failures = 0, cycle = 0, n_wait = 0;
  int n_rd, last_rd, prev_rd, n_t512, t512_cyc, exp_addr, n_first, n_last, min_gap, max_gap;
  bit prev_buf_rd;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    if (data_wait) n_wait++;
    if (pe_valid != prev_buf_rd) begin failures++; $display("FAIL pe_valid not one cycle after Rd"); end
    prev_buf_rd <= buf_rd;
    if (buf_rd) begin
      checks++;
      if (!in_rd || int'(in_addr) != exp_addr) begin failures++; $display("FAIL in_addr %0d expected %0d", in_addr, exp_addr); end
      if (n_rd > 0) begin
        if (cycle - prev_rd < min_gap) min_gap = cycle - prev_rd;
        if (cycle - prev_rd > max_gap) max_gap = cycle - prev_rd;
      end
      prev_rd = cycle;
      last_rd = cycle;
      exp_addr++;
      n_rd++;
    end
    if (pe_valid && pe_first) n_first++;
    if (pe_valid && pe_last) begin
      n_last++;
      checks++;
      if (exp_addr != int'(num_slots)) begin failures++; $display("FAIL pe_last early"); end
    end
    if (t512_en) begin
      n_t512++;
      t512_cyc = cycle;
    end
  end

  initial begin : watchdog
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input bit always_ready);
    n_rd = 0; exp_addr = 0; n_t512 = 0; n_first = 0; n_last = 0; min_gap = 1000; max_gap = 0;
    @(negedge clk);
    num_slots = SLOT_W'(n); start = 1;
    @(negedge clk) start = 0;
    while (busy) begin
      all_ready = always_ready || ($urandom % 3 == 0);
      @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (n_rd != n || n_t512 != 1 || n_first != 1 || n_last != 1) begin
      failures++;
      $display("FAIL run of %0d: %0d Rd, %0d t512_en, %0d first, %0d last", n, n_rd, n_t512, n_first, n_last);
    end
    checks++;
    if (t512_cyc - last_rd != 1 + PE_LAT) begin
      failures++;
      $display("FAIL t512_en %0d cycles after last Rd", t512_cyc - last_rd);
    end
    if (n > 1) begin
      checks++;
      if (min_gap < 4 || (always_ready && max_gap != 4)) begin
        failures++;
        $display("FAIL Rd spacing %0d..%0d", min_gap, max_gap);
      end
    end
  endtask

  initial begin
    start = 0; all_ready = 0; relu_busy = 0; num_slots = '0; prev_buf_rd = 0;
    #10 rst_n = 1;
    run(512, 1'b1);
    run(37, 1'b0);
    run(1, 1'b0);
    // start while the bias/ReLU unit is busy must be ignored
    @(negedge clk);
    relu_busy = 1; num_slots = 12'd5; start = 1;
    @(negedge clk) start = 0;
    checks++;
    if (busy) begin failures++; $display("FAIL started while relu_busy"); end
    relu_busy = 0;
    run(3000, 1'b0);
    checks++;
    if (n_wait == 0) begin failures++; $display("FAIL data_wait never seen"); end
    $display("data_wait cycles %0d", n_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
