// tb_v_accum: self-checking test of the 8x1 vector accumulator.
// Runs of random length feed random partial-product vectors (some extreme,
// so the sum saturates); the first vector of a run must replace the old
// sum, done must pulse exactly one cycle after the last vector, and acc must
// then equal the saturating integer sum.
`timescale 1ns/1ps
module tb_v_accum;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;
  localparam int TILE = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, done;
  q_t [TILE-1:0] prod, acc;

  v_accum #(.TILE(TILE)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last, .prod, .acc, .done);

  int checks = 0, failures = 0, nsat = 0;
  longint ref_acc [TILE];

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; prod = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 60; run++) begin
      int len;
      bit big;
      len = 1 + int'($urandom % 40);
      big = (run % 4 == 3);
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        // idle cycles inside a run must not disturb the sum
        while ($urandom % 3 == 0) begin
          in_valid = 0;
          @(negedge clk);
          checks++;
          if (done) begin failures++; $display("FAIL done while idle"); end
        end
        in_valid = 1;
        in_first = (s == 0);
        in_last  = (s == len - 1);
        for (int r = 0; r < TILE; r++) begin
          longint v;
          v = big ? longint'(int'($urandom % 131072) - 65536) : longint'(int'($urandom % 4001) - 2000);
          prod[r] = q_t'(v);
          ref_acc[r] = (s == 0) ? v : sat17(ref_acc[r] + v);
          if (ref_acc[r] == QMAX || ref_acc[r] == QMIN) nsat++;
        end
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      checks++;
      if (!done) begin failures++; $display("FAIL done missing after run %0d", run); end
      for (int r = 0; r < TILE; r++) begin
        checks++;
        if (longint'(acc[r]) != ref_acc[r]) begin
          failures++;
          $display("FAIL run %0d row %0d: %0d vs %0d", run, r, acc[r], ref_acc[r]);
        end
      end
      @(negedge clk);
      checks++;
      if (done) begin failures++; $display("FAIL done longer than one cycle"); end
    end
    checks++;
    if (nsat == 0) begin failures++; $display("FAIL saturation never reached"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
