// tb_fc_pkg: test data and reference arithmetic for the accelerator
// testbenches.
//
// Weights and features are generated from a hash of their indices, so the
// HBM models, the input memory model and the reference model agree without
// any data files. About one value in eleven is zero, to exercise the zero
// detectors. The reference arithmetic below is written with plain integers,
// independently of the design's package: round half-up after dropping
// 'shift' product bits, saturate to 17 bits, add the row pairwise in a tree,
// accumulate with saturation, add bias, clamp at zero.
package tb_fc_pkg;

  localparam longint QMAX = 65535;
  localparam longint QMIN = -65536;

  function automatic int unsigned mix(input int unsigned a, input int unsigned b,
                                      input int unsigned c, input int unsigned d);
    int unsigned h;
    h = a * 32'h9E3779B1 + b * 32'h85EBCA77 + c * 32'hC2B2AE3D + d * 32'h27D4EB2F + 32'h165667B1;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Weight w[r][c] of the tile of PE row 'pe', weight set 'set', slot 'slot'.
  function automatic logic signed [15:0] wval(input int pe, input int set, input int slot,
                                              input int r, input int c);
    int unsigned h;
    h = mix(pe, set * 8192 + slot, r, c);
    if (h % 11 == 0) return '0;
    return 16'(int'(h % 601) - 300);
  endfunction

  // Input feature c of slot 'slot' (feature number 8*slot + c).
  function automatic logic signed [15:0] xval(input int slot, input int c);
    int unsigned h;
    h = mix(32'h5555, slot, c, 7);
    if (h % 11 == 0) return '0;
    return 16'(int'(h % 601) - 300);
  endfunction

  function automatic longint sat17(input longint v);
    if (v > QMAX) return QMAX;
    if (v < QMIN) return QMIN;
    return v;
  endfunction

  function automatic longint ref_mul(input longint a, input longint b, input int shift);
    longint p;
    p = a * b;
    if (shift > 0) p = (p + (longint'(1) << (shift - 1))) >>> shift;
    return sat17(p);
  endfunction

  // Sum of n products by a pairwise tree (n a power of two), saturating.
  function automatic longint ref_tree(input longint v [16], input int n);
    longint t [16];
    t = v;
    for (int w = n; w > 1; w = w / 2)
      for (int i = 0; i < w / 2; i++) t[i] = sat17(t[2*i] + t[2*i+1]);
    return t[0];
  endfunction

  // Output o of a whole layer run, before and after bias/ReLU.
  function automatic longint ref_acc(input int pe, input int r, input int set,
                                     input int nslots, input int shift);
    longint acc, pr [16];
    acc = 0;
    for (int s = 0; s < nslots; s++) begin
      for (int i = 0; i < 16; i++) pr[i] = 0;
      for (int c = 0; c < 8; c++)
        pr[c] = ref_mul(longint'(wval(pe, set, s, r, c)), longint'(xval(s, c)), shift);
      acc = (s == 0) ? ref_tree(pr, 8) : sat17(acc + ref_tree(pr, 8));
    end
    return acc;
  endfunction

  function automatic longint ref_relu(input longint acc, input longint bias);
    longint v;
    v = sat17(acc + bias);
    return (v < 0) ? 0 : v;
  endfunction

  // Bias of output n.
  function automatic longint bval(input int n);
    return longint'(int'(mix(n, 99, 3, 1) % 4001) - 2000);
  endfunction

endpackage
