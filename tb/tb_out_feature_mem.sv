// tb_out_feature_mem: self-checking test of the output feature memory and its
// address generator. A behavioural FIFO (a queue with an empty flag) feeds
// two runs of words, the second at a different base address; every word
// must land at base+i, out_count must count them, and the read port must
// return them one clock after the address.
`timescale 1ns/1ps
module tb_out_feature_mem;
  localparam int DEPTH = 256, AW = 8;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;

  logic run_start, fifo_empty, fifo_rd;
  logic [15:0] fifo_rdata, rd_data;
  logic [AW-1:0] out_base, rd_addr;
  logic [AW:0] out_count;

  out_feature_mem #(.DEPTH(DEPTH)) dut (.clk, .rst_n, .run_start, .out_base, .fifo_empty,
    .fifo_rdata, .fifo_rd, .out_count, .rd_addr, .rd_data);

  logic [15:0] q [$];
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  assign fifo_empty = (q.size() == 0);
  assign fifo_rdata = (q.size() == 0) ? 16'h0 : q[0];
  logic did_rd = 1'b0;
  always @(posedge clk) did_rd <= fifo_rd;
  always @(negedge clk) if (did_rd && q.size() != 0) void'(q.pop_front());

  initial begin : watchdog
    #100000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic one_run(input int base, input int n);
    @(negedge clk);
    out_base = AW'(base); run_start = 1;
    @(negedge clk) run_start = 0;
    for (int i = 0; i < n; i++) begin
      logic [15:0] v;
      v = 16'($urandom);
      model[(base + i) % DEPTH] = v;
      q.push_back(v);
      if ($urandom % 2 == 0) @(negedge clk);
    end
    while (q.size() != 0) @(negedge clk);
    @(negedge clk);
    checks++;
    if (out_count != (AW+1)'(n)) begin failures++; $display("FAIL out_count %0d, expected %0d", out_count, n); end
  endtask

  initial begin
    run_start = 0; out_base = '0; rd_addr = '0;
    #10 rst_n = 1;
    one_run(0, 100);
    one_run(128, 100);
    for (int a = 0; a < 228; a++) begin
      if (a >= 100 && a < 128) continue;
      @(negedge clk) rd_addr = AW'(a);
      @(negedge clk);
      checks++;
      if (rd_data != model[a]) begin failures++; $display("FAIL addr %0d: %h vs %h", a, rd_data, model[a]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
