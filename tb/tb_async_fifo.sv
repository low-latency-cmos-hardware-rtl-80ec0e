// tb_async_fifo: self-checking test of the dual-clock FIFO.
// Two unrelated clocks (7 ns write, 5 ns read, then swapped rates by
// throttling); random pushes and pops. Every word must come out once, in
// order; full and empty must both be seen, and a word written into a full
// FIFO is never requested (the writer obeys full).
`timescale 1ns/1ps
module tb_async_fifo;
  localparam int W = 16, DEPTH = 4;

  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #3.5 wclk = ~wclk;
  always #2.5 rclk = ~rclk;

  logic we, re, full, empty;
  logic [W-1:0] wdata, rdata;
  logic [$clog2(DEPTH):0] wlevel, rlevel;

  async_fifo #(.W(W), .DEPTH(DEPTH)) dut (.wclk, .wrst_n, .we, .wdata, .full, .wlevel,
    .rclk, .rrst_n, .re, .rdata, .empty, .rlevel);

  int checks = 0, failures = 0, nfull = 0, nempty = 0;
  logic [W-1:0] sent [$];
  int n_wr = 0, n_rd = 0;
  int phase = 0;
  localparam int N = 2000;

  initial begin : watchdog
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // writer
  initial begin
    we = 0; wdata = '0;
    #20 wrst_n = 1;
    while (n_wr < N) begin
      @(negedge wclk);
      if (full) nfull++;
      if (!full && ($urandom % 4 < ((phase == 0) ? 3 : 1))) begin
        we = 1;
        wdata = W'($urandom);
        sent.push_back(wdata);
        n_wr++;
      end else we = 0;
      if (n_wr == N/2) phase = 1;
    end
    @(negedge wclk) we = 0;
  end

  // reader
  initial begin
    re = 0;
    #20 rrst_n = 1;
    while (n_rd < N) begin
      @(negedge rclk);
      if (empty) nempty++;
      if (!empty && ($urandom % 4 < ((phase == 0) ? 1 : 3))) begin
        re = 1;
        checks++;
        if (sent.size() == 0 || rdata != sent[0]) begin
          failures++;
          if (failures < 10) $display("FAIL word %0d: got %h", n_rd, rdata);
        end
        if (sent.size() != 0) void'(sent.pop_front());
        n_rd++;
      end else re = 0;
      checks++;
      if (rlevel > DEPTH) begin failures++; $display("FAIL level %0d", rlevel); end
    end
    @(negedge rclk) re = 0;
    repeat (10) @(negedge rclk);
    checks++;
    if (!empty || nfull == 0 || nempty == 0) begin
      failures++;
      $display("FAIL end state: empty=%0d full seen %0d empty seen %0d", empty, nfull, nempty);
    end
    $display("full seen %0d, empty seen %0d", nfull, nempty);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
