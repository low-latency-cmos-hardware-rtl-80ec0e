// tb_mv_mult: self-checking test of the 8x8 matrix-vector multiplier in both
// of its forms (non-pipelined, 2-cycle latency; pipelined tree, 4 cycles).
//
// Random tiles and input vectors go in on random cycles, back to back at
// times. Values include zeros (zero-detector path), small values and
// extreme ones that make products and sums saturate; prod_shift changes
// between phases. Every result is compared with an integer reference
// (tb_fc_pkg) and must come out exactly LAT cycles after its input, with its
// first/last flags.
`timescale 1ns/1ps
module tb_mv_mult;
  import fc_accl_pkg::*;
  import tb_fc_pkg::*;

  localparam int TILE = 8;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                    in_valid, in_first, in_last;
  logic [TILE*TILE*16-1:0] w_bus;
  logic [TILE*16-1:0]      x_bus;
  logic [SHIFT_W-1:0]      shift;

  logic      v0, f0, l0, v1, f1, l1;
  q_t [TILE-1:0] p0, p1;

  mv_mult #(.TILE(TILE), .PIPELINED(1'b0)) dut0 (.clk, .rst_n, .in_valid, .in_first, .in_last,
    .w_bus, .x_bus, .prod_shift(shift), .out_valid(v0), .out_first(f0), .out_last(l0), .prod(p0));
  mv_mult #(.TILE(TILE), .PIPELINED(1'b1)) dut1 (.clk, .rst_n, .in_valid, .in_first, .in_last,
    .w_bus, .x_bus, .prod_shift(shift), .out_valid(v1), .out_first(f1), .out_last(l1), .prod(p1));

  typedef struct {
    longint  exp [TILE];
    bit      first, last;
    int      cyc;
  } item_t;

  item_t q0 [$];
  item_t q1 [$];
  int checks = 0, failures = 0, cycle = 0, nzero = 0, nsat = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic logic [15:0] pick(input int mode);
    int unsigned u;
    u = $urandom;
    case (mode)
      0: return (u % 5 == 0) ? 16'h0 : 16'(int'(u % 2001) - 1000);
      default: begin
        case (u % 6)
          0: return 16'h7FFF;
          1: return 16'h8000;
          2: return 16'h0;
          default: return 16'(int'(u % 65536));
        endcase
      end
    endcase
  endfunction

  task automatic check_out(input logic v, input logic f, input logic l, input q_t [TILE-1:0] p,
                           ref item_t q [$], input int lat, input string name);
    if (v) begin
      item_t it;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL %s: output with nothing pending", name);
      end else begin
        it = q.pop_front();
        if (cycle - it.cyc != lat) begin
          failures++;
          $display("FAIL %s: latency %0d, expected %0d", name, cycle - it.cyc, lat);
        end
        if (f != it.first || l != it.last) begin
          failures++;
          $display("FAIL %s: flags", name);
        end
        for (int r = 0; r < TILE; r++) begin
          checks++;
          if (longint'(p[r]) != it.exp[r]) begin
            failures++;
            if (failures < 10) $display("FAIL %s row %0d: got %0d expected %0d", name, r, p[r], it.exp[r]);
          end
        end
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      check_out(v0, f0, l0, p0, q0, 2, "non-pipelined");
      check_out(v1, f1, l1, p1, q1, 4, "pipelined");
    end
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; w_bus = '0; x_bus = '0; shift = 6'd10;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int phase = 0; phase < 4; phase++) begin
      shift = (phase == 2) ? 6'd12 : (phase == 3) ? 6'd0 : 6'd10;
      for (int n = 0; n < 300; n++) begin
        @(negedge clk);
        if ($urandom % 4 != 0) begin
          item_t it;
          longint pr [16];
          in_valid = 1;
          in_first = ($urandom % 7 == 0);
          in_last  = ($urandom % 7 == 0);
          for (int c = 0; c < TILE; c++) x_bus[16*c +: 16] = pick(phase == 1 ? 1 : 0);
          for (int i = 0; i < TILE*TILE; i++) w_bus[16*i +: 16] = pick(phase == 1 ? 1 : 0);
          for (int r = 0; r < TILE; r++) begin
            for (int i = 0; i < 16; i++) pr[i] = 0;
            for (int c = 0; c < TILE; c++) begin
              longint a, b;
              a = longint'($signed(w_bus[16*(r*TILE+c) +: 16]));
              b = longint'($signed(x_bus[16*c +: 16]));
              if (a == 0 || b == 0) nzero++;
              pr[c] = ref_mul(a, b, int'(shift));
              if (pr[c] == QMAX || pr[c] == QMIN) nsat++;
            end
            it.exp[r] = ref_tree(pr, TILE);
          end
          it.first = in_first;
          it.last  = in_last;
          it.cyc   = cycle;
          q0.push_back(it);
          q1.push_back(it);
        end else begin
          in_valid = 0;
        end
      end
      @(negedge clk) in_valid = 0;
      repeat (8) @(posedge clk);
    end
    checks++;
    if (q0.size() != 0 || q1.size() != 0) begin
      failures++;
      $display("FAIL results missing");
    end
    checks++;
    if (nzero == 0 || nsat == 0) begin
      failures++;
      $display("FAIL stimulus did not reach zero operands or saturation");
    end
    $display("zero operand pairs %0d, saturated products %0d", nzero, nsat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
