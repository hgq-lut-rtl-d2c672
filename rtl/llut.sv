// llut -- one logical LUT (L-LUT): a single-input, multi-bit truth table.
//
// The L-LUT is the only non-linear element of a LUT layer. It takes ONE logical
// input (a fixed-point number of IN_W bits) and returns a fixed-point number of
// OUT_W bits:
//
//   1. Input quantiser, WRAP mode: the M-bit code is the bit slice
//      x[IN_LSB+M-1 : IN_LSB]. Bits below IN_LSB are truncated and bits above
//      are simply dropped (two's-complement wrap), so no comparator is needed.
//   2. Truth table: 2**M entries, fixed at generation time. The output
//      quantiser runs in SAT mode, but saturation was already applied when the
//      table was filled, so the hardware is only the lookup.
//
// Interface: purely combinational, x -> y. M must be 1..MAX_M; an L-LUT whose
// input or output width was trained to 0 bits is pruned and not instantiated
// (see lut_dense). TABLE holds entry k in TABLE[k]; only its low OUT_W bits are
// used. The WRAP/SAT split, the single input and the element-wise widths follow
// the paper; expressing the input quantiser as a slice start IN_LSB chosen per
// L-LUT (by lut_dense) is this design's choice.
module llut #(
  parameter int unsigned IN_W   = 8,
  parameter int unsigned IN_LSB = 0,
  parameter int unsigned M      = 4,
  parameter int unsigned OUT_W  = 6,
  parameter hgq_lut_pkg::llut_table_t TABLE = hgq_lut_pkg::llut_table(0, 0, 0, 4, 6)
) (
  input  logic signed [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);
  import hgq_lut_pkg::*;

  initial begin
    assert (M >= 1 && M <= MAX_M) else $error("llut: M=%0d out of range", M);
    assert (IN_LSB + M <= IN_W) else $error("llut: slice outside input");
  end

  logic [M-1:0] code;  // WRAP-quantised input

  always_comb begin
    code = x[IN_LSB +: M];
    y    = TABLE[code][OUT_W-1:0];
  end

endmodule
