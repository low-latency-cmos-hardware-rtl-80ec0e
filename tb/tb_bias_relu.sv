// tb_bias_relu: self-checking test of bias addition, ReLU and the output FIFO.
// N = 32 outputs and an 8-entry FIFO so that the FIFO fills and the unit has
// to wait (push_stall). Biases are loaded, t512_en is pulsed with random
// accumulator values (about half the results negative, some saturating),
// and the FIFO is drained on a slower, unrelated clock. The 32 words must
// arrive in order and equal max(sat(acc + bias), 0); three rounds are run.
`timescale 1ns/1ps
module tb_bias_relu;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;
  localparam int N = 32, FD = 8;

  logic clk = 0, out_clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  always #3.3 out_clk = ~out_clk;

  logic bias_we, t512_en, busy, push_stall, relu_clamp, fifo_rd, fifo_empty;
  logic [4:0] bias_addr;
  q_t bias_wdata;
  q_t [N-1:0] acc;
  logic [15:0] fifo_rdata;

  bias_relu #(.N(N), .OFIFO_DEPTH(FD)) dut (.clk, .rst_n, .bias_we, .bias_addr, .bias_wdata,
    .t512_en, .acc, .busy, .push_stall, .relu_clamp, .out_clk, .out_rst_n(rst_n), .fifo_rd,
    .fifo_rdata, .fifo_empty);

  int checks = 0, failures = 0, n_stall = 0, n_clamp = 0, n_zero = 0;
  longint expq [$];
  longint bias_v [N];

  always @(posedge clk) if (push_stall) n_stall++;

  // drain
  int n_got = 0;
  always @(negedge out_clk) begin
    fifo_rd <= 1'b0;
    if (rst_n && !fifo_empty && ($urandom % 3 != 0)) begin
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected word");
      end else begin
        longint e;
        e = expq.pop_front();
        if (e == 0) n_zero++;
        if (longint'(fifo_rdata) != e) begin
          failures++;
          $display("FAIL word %0d: got %0d expected %0d", n_got, fifo_rdata, e);
        end
      end
      n_got++;
      fifo_rd <= 1'b1;
    end
  end

  initial begin : watchdog
    #200000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bias_we = 0; bias_addr = '0; bias_wdata = '0; t512_en = 0; acc = '0; fifo_rd = 0;
    #10 rst_n = 1;
    #10;
    for (int n = 0; n < N; n++) begin
      @(negedge clk);
      bias_v[n] = (n == 3) ? 65535 : bval(n);
      bias_we = 1; bias_addr = 5'(n); bias_wdata = q_t'(bias_v[n]);
    end
    @(negedge clk) bias_we = 0;
    for (int round = 0; round < 3; round++) begin
      @(negedge clk);
      for (int n = 0; n < N; n++) begin
        longint a;
        a = longint'(int'($urandom % 20001) - 10000);
        if (n == 3) a = 60000;    // saturates on the bias addition
        acc[n] = q_t'(a);
        expq.push_back(ref_relu(a, bias_v[n]));
      end
      t512_en = 1;
      @(negedge clk) t512_en = 0;
      acc = '0;   // the result register must hold the captured values
      @(negedge clk);
      if (relu_clamp) n_clamp++;
      while (busy) @(negedge clk);
    end
    #2000;
    checks++;
    if (expq.size() != 0 || n_stall == 0 || n_clamp == 0 || n_zero == 0) begin
      failures++;
      $display("FAIL left %0d, stalls %0d, clamp flags %0d, zeros %0d", expq.size(), n_stall, n_clamp, n_zero);
    end
    $display("push stalls %0d, rounds with clamping %0d, zero outputs %0d", n_stall, n_clamp, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
