// tb_ref_pkg -- integer reference model shared by the testbenches.
//
// Recomputes the LUT-network arithmetic with plain integers, straight from the
// model functions of hgq_lut_pkg (widths, slice positions and table values),
// without any of the RTL's bit slicing, table packing or adder structure:
//   wrap_code : the WRAP-quantised code of an input (arithmetic shift + mask)
//   lut_layer : y_o = sum over unpruned i of llut_value(o, i, code(x_i)), with
//               each L-LUT's own input width, slice position and output width
// Counters record how often an L-LUT input wrapped (lost high bits) and how
// often a looked-up entry sat at its saturation limit, so the testbenches can
// show that those mechanisms were exercised.
package tb_ref_pkg;
  import hgq_lut_pkg::*;

  int unsigned n_wrap;     // L-LUT input codes that wrapped
  int unsigned n_sat;      // L-LUT lookups that returned a saturated entry
  int unsigned n_lookups;  // unpruned L-LUT lookups evaluated

  function automatic int unsigned wrap_code(longint x, int unsigned lsb, int unsigned m);
    return int'((x >>> lsb) & ((64'd1 << m) - 1));
  endfunction

  function automatic void lut_layer(input int unsigned layer, input int unsigned n_in,
                                    input int unsigned n_out, input int unsigned in_w,
                                    input int unsigned lsb,
                                    input int unsigned ow, input longint x[],
                                    output longint y[]);
    y = new[n_out];
    for (int unsigned o = 0; o < n_out; o++) begin
      y[o] = 0;
      for (int unsigned i = 0; i < n_in; i++) begin
        int unsigned m;
        int unsigned w;
        int unsigned l;
        int unsigned code;
        int v;
        longint q;
        m = llut_width(layer, o, i);
        w = llut_out_width(layer, o, i, ow);
        if (m != 0 && w != 0) begin
          l = llut_lsb(layer, o, i, lsb, m, in_w);
          code = wrap_code(x[i], l, m);
          q = x[i] >>> l;
          if (q != longint'(signed_code(code, m))) n_wrap++;
          v = llut_value(layer, o, i, m, w, code);
          if (v == (1 << (w - 1)) - 1 || v == -(1 << (w - 1))) n_sat++;
          n_lookups++;
          y[o] += v;
        end
      end
    end
  endfunction

  function automatic int unsigned count_pruned(int unsigned layer, int unsigned n_in,
                                               int unsigned n_out, int unsigned ow);
    int unsigned n = 0;
    for (int unsigned o = 0; o < n_out; o++)
      for (int unsigned i = 0; i < n_in; i++)
        if (llut_pruned(layer, o, i, ow)) n++;
    return n;
  endfunction

  // Sign-extend the low w bits of a vector held in a longint.
  function automatic longint sext(longint v, int unsigned w);
    longint m;
    m = longint'(1) << (w - 1);
    v = v & ((longint'(1) << w) - 1);
    return (v ^ m) - m;
  endfunction

endpackage
