// hgq_lut_pkg -- shared constants, types and the constant "model" of the
// LUT-based cluster-counting network.
//
// A LUT network is compiled, not programmed: every logical LUT (L-LUT) is a
// truth table that is fixed when the hardware is generated. The contents come
// from training and are therefore not part of the architecture. To give the RTL
// something concrete and checkable, this package defines a deterministic
// stand-in model with the same structure as a trained one:
//
//   * llut_width(layer, o, i)  element-wise input bit width m of L-LUT (o, i),
//                              0..MAX_M; 0 means the input quantiser has 0 bits.
//   * llut_out_width(...)      element-wise output bit width, 0 or 2..max_ow;
//                              0 means the output quantiser has 0 bits.
//                              An L-LUT with either width 0 is pruned.
//   * llut_lsb(...)            element-wise slice position: base .. base+2,
//                              i.e. each L-LUT keeps its own number of
//                              fractional bits.
//   * llut_value(...)          entry of L-LUT (o, i) for input code x:
//                                SAT_ow( w*x + floor(c*x*x / 2) + b )
//                              i.e. an affine map of a non-linear function of the
//                              WRAP-quantised input, as in L-LUT(x) = w*phi(x)+b/N,
//                              saturated to the signed ow-bit output range at
//                              generation time (no comparator in hardware).
//   * conv_weight / conv_bias  weights of the matmul-based projection layer.
//   * time_weight_value(t)     time-dependent weight table; t = 0 is the warm-up
//                              slot of the streaming window and is 0.
//
// w, c, b and the widths are drawn from a fixed integer hash of (layer, o, i),
// so a table is reproducible by any reference model. Replacing these functions
// with tables from a trained model changes no other file.
package hgq_lut_pkg;

  // Largest L-LUT input width (bits); a table has at most 2**MAX_M entries.
  localparam int unsigned MAX_M = 4;
  // Storage width of one table entry; real outputs are narrower and saturated.
  localparam int unsigned ENTRY_W = 16;

  // One L-LUT truth table, entry k at [k].
  typedef logic [2**MAX_M-1:0][ENTRY_W-1:0] llut_table_t;

  // Layer identifiers of the cluster-counting network (select hash streams).
  localparam int unsigned LAYER_LUT_CONV   = 1;
  localparam int unsigned LAYER_LUT_DENSE1 = 2;
  localparam int unsigned LAYER_LUT_DENSE2 = 3;
  localparam int unsigned LAYER_CONV       = 4;
  localparam int unsigned LAYER_TIME       = 5;

  // 32-bit integer mixer (multiply / xor-shift); all arithmetic is mod 2**32.
  function automatic int unsigned mix3(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 + b * 32'h85EBCA77 + c * 32'hC2B2AE3D + 32'h27D4EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h;
  endfunction

  // Signed value of the low m bits of code (two's complement); 0 when m == 0.
  function automatic int signed_code(int unsigned code, int unsigned m);
    int v;
    if (m == 0) return 0;
    v = int'(code & ((32'd1 << m) - 1));
    if (v >= (1 << (m - 1))) v = v - (1 << m);
    return v;
  endfunction

  // Saturate v to the signed ow-bit range.
  function automatic int sat(int v, int unsigned ow);
    int hi;
    int lo;
    hi = (1 << (ow - 1)) - 1;
    lo = -(1 << (ow - 1));
    if (v > hi) return hi;
    if (v < lo) return lo;
    return v;
  endfunction

  // Element-wise input width of L-LUT (o, i): about 1 in 5 is pruned.
  function automatic int unsigned llut_width(int unsigned layer, int unsigned o, int unsigned i);
    int unsigned h;
    h = mix3(layer, o, i);
    if (h % 5 == 0) return 0;
    return 1 + ((h >> 8) % MAX_M);
  endfunction

  // Element-wise output width of L-LUT (o, i), at most max_ow: 1 in 16 is 0 bits.
  function automatic int unsigned llut_out_width(int unsigned layer, int unsigned o,
                                                 int unsigned i, int unsigned max_ow);
    int unsigned h;
    h = mix3(layer + 32'd200, o, i);
    if (h % 16 == 0) return 0;
    return max_ow - ((h >> 8) % (max_ow - 1));
  endfunction

  // Element-wise slice position of L-LUT (o, i): base, base+1 or base+2, kept
  // low enough that an m-bit slice fits in an in_w-bit input.
  function automatic int unsigned llut_lsb(int unsigned layer, int unsigned o, int unsigned i,
                                           int unsigned base, int unsigned m, int unsigned in_w);
    int unsigned l;
    l = base + (mix3(layer + 32'd300, o, i) % 3);
    if (l + m > in_w) l = in_w - m;
    return l;
  endfunction

  // True when L-LUT (o, i) of a layer with max output width max_ow is pruned.
  function automatic bit llut_pruned(int unsigned layer, int unsigned o, int unsigned i,
                                     int unsigned max_ow);
    return llut_width(layer, o, i) == 0 || llut_out_width(layer, o, i, max_ow) == 0;
  endfunction

  // Saturated output of L-LUT (o, i) of width ow for the m-bit input code.
  function automatic int llut_value(int unsigned layer, int unsigned o, int unsigned i,
                                    int unsigned m, int unsigned ow, int unsigned code);
    int unsigned h;
    int w;
    int c;
    int b;
    int x;
    h = mix3(layer + 32'd100, o, i);
    w = int'((h >> 4) % 15) - 7;
    c = int'((h >> 12) % 7) - 3;
    b = int'((h >> 20) % 9) - 4;
    x = signed_code(code, m);
    return sat(w * x + ((c * x * x) >>> 1) + b, ow);
  endfunction

  // Whole truth table of L-LUT (o, i); entries above 2**m are unused.
  function automatic llut_table_t llut_table(int unsigned layer, int unsigned o, int unsigned i,
                                             int unsigned m, int unsigned ow);
    llut_table_t t;
    t = '0;
    for (int unsigned k = 0; k < 2**MAX_M; k++) begin
      if (k < (32'd1 << m)) t[k] = ENTRY_W'(llut_value(layer, o, i, m, ow, k));
    end
    return t;
  endfunction

  // Projection-conv weight for feature f, sample s: signed, in [-8, 7].
  function automatic int conv_weight(int unsigned f, int unsigned s);
    return int'(mix3(LAYER_CONV, f, s) % 16) - 8;
  endfunction

  // Projection-conv bias for feature f: signed, in [-512, 511] (LSB = one sample LSB).
  function automatic int conv_bias(int unsigned f);
    return int'(mix3(LAYER_CONV, f, 32'hFFFF) % 1024) - 512;
  endfunction

  // Time-dependent weight for counter value t (0..150): 8-bit signed, slot 0 is 0.
  function automatic int time_weight_value(int unsigned t);
    if (t == 0) return 0;
    return int'(mix3(LAYER_TIME, t, 0) % 200) - 72;
  endfunction

endpackage
