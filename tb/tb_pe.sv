// tb_pe: self-checking test of one processing element (MV-mult + V-Accum),
// pipelined form. Runs of random length are fed with generated tiles and
// input vectors (tb_fc_pkg data, with zeros) at random spacing, including
// back to back. After each run the 8 accumulators must equal the integer
// reference and done must come mv_latency()+1 cycles after the last input.
`timescale 1ns/1ps
module tb_pe;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;
  localparam int TILE = 8;
  localparam int LAT  = 4 + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_first, in_last, done;
  logic [TILE*TILE*16-1:0] w_bus;
  logic [TILE*16-1:0]      x_bus;
  q_t [TILE-1:0]           acc;

  pe #(.TILE(TILE), .PIPELINED(1'b1)) dut (.clk, .rst_n, .in_valid, .in_first, .in_last,
    .w_bus, .x_bus, .prod_shift(6'd10), .acc, .done);

  int checks = 0, failures = 0, cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; w_bus = '0; x_bus = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 12; run++) begin
      int len, t_last, t_done;
      len = 1 + int'($urandom % 50);
      for (int s = 0; s < len; s++) begin
        @(negedge clk);
        while ($urandom % 2 == 0 && run % 2 == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
        in_valid = 1;
        in_first = (s == 0);
        in_last  = (s == len - 1);
        for (int r = 0; r < TILE; r++)
          for (int c = 0; c < TILE; c++) w_bus[16*(r*TILE+c) +: 16] = wval(run, 0, s, r, c);
        for (int c = 0; c < TILE; c++) x_bus[16*c +: 16] = xval(s + 100*run, c);
        t_last = cycle;
      end
      @(negedge clk);
      in_valid = 0; in_first = 0; in_last = 0;
      t_done = -1;
      for (int k = 0; k < 20 && t_done < 0; k++) begin
        @(posedge clk);
        if (done) t_done = cycle;
      end
      checks++;
      if (t_done - t_last != LAT) begin
        failures++;
        $display("FAIL run %0d: done after %0d cycles, expected %0d", run, t_done - t_last, LAT);
      end
      for (int r = 0; r < TILE; r++) begin
        longint e, a, pr [16];
        e = 0;
        for (int s = 0; s < len; s++) begin
          for (int i = 0; i < 16; i++) pr[i] = 0;
          for (int c = 0; c < TILE; c++)
            pr[c] = ref_mul(longint'(wval(run, 0, s, r, c)), longint'(xval(s + 100*run, c)), 10);
          e = (s == 0) ? ref_tree(pr, TILE) : sat17(e + ref_tree(pr, TILE));
        end
        a = longint'(acc[r]);
        checks++;
        if (a != e) begin
          failures++;
          $display("FAIL run %0d row %0d: %0d vs %0d", run, r, a, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
