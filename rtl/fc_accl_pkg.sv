// fc_accl_pkg: types, sizes and fixed-point helpers shared by the FC-layer
// accelerator.
//
// Number format. Operands, partial sums and results are Q(17,10): 17-bit
// two's complement with 10 fraction bits. Memories and buses carry 16-bit
// two's-complement words (64 weights fill a 1024-bit HBM word, 8 features a
// 128-bit one); a 16-bit word is taken as Q(16,10) and sign-extended to
// Q(17,10) at the multiplier. A 17x17 product has 34 bits; which 17 of them
// are kept is a run-time choice (prod_shift = number of low bits dropped,
// 10 for Q(17,10) x Q(17,10) -> Q(17,10)). Dropped bits are rounded half-up
// and the result saturates. All Q(17,10) additions saturate as well.
// The paper gives the format, the configurable selection and the rounding;
// the rounding mode and saturation are this design's choices.
package fc_accl_pkg;

  localparam int DW    = 16;   // word width in the memories and on the buses
  localparam int QW    = 17;   // Q(17,10) arithmetic width
  localparam int QF    = 10;   // fraction bits
  localparam int DQ_W  = 128;  // HBM pseudo-channel data bus DQ[127:0]
  localparam int SHIFT_W = 6;  // width of the product-selection shift

  typedef logic signed [QW-1:0]   q_t;
  typedef logic signed [2*QW-1:0] prod_t;

  localparam q_t Q_MAX = {1'b0, {(QW-1){1'b1}}};
  localparam q_t Q_MIN = {1'b1, {(QW-1){1'b0}}};

  // Saturating Q(17,10) addition.
  function automatic q_t sat_add(input q_t a, input q_t b);
    logic signed [QW:0] s;
    s = {a[QW-1], a} + {b[QW-1], b};
    return (s[QW] != s[QW-1]) ? (s[QW] ? Q_MIN : Q_MAX) : s[QW-1:0];
  endfunction

  // Sign-extend a 16-bit memory word to Q(17,10).
  function automatic q_t ext_word(input logic [DW-1:0] w);
    return {{(QW-DW){w[DW-1]}}, w};
  endfunction

  // Keep 17 of the 34 product bits: drop 'shift' low bits with half-up
  // rounding, then saturate to Q(17,10).
  function automatic q_t prod_round(input prod_t p, input logic [SHIFT_W-1:0] shift);
    logic signed [2*QW:0] pe;
    logic signed [2*QW:0] r;
    logic signed [2*QW:0] hi;
    logic signed [2*QW:0] lo;
    q_t                   res;
    hi = {{(QW+2){1'b0}}, {(QW-1){1'b1}}};
    lo = ~hi;
    pe = {p[2*QW-1], p};
    if (shift != '0) pe = pe + ((2*QW+1)'(1) << (shift - 1'b1));
    r = pe >>> shift;
    if (r > hi)      res = Q_MAX;
    else if (r < lo) res = Q_MIN;
    else             res = r[QW-1:0];
    return res;
  endfunction

  // ReLU of a Q(17,10) value. The result is never negative, so its sign bit
  // is always 0 and the low 16 bits carry it on a 16-bit bus.
  function automatic logic [DW-1:0] relu16(input q_t v);
    return v[QW-1] ? '0 : v[DW-1:0];
  endfunction

  // Cycles from a valid input of mv_mult to its valid output.
  function automatic int mv_latency(input int tile, input bit pipelined);
    return pipelined ? 1 + $clog2(tile) : 2;
  endfunction

endpackage
