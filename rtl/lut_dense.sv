// lut_dense -- LUT-Dense layer: y_o = sum_i L-LUT(o,i)(x_i).
//
// The layer connects every input to every output through its own L-LUT (see
// llut) and reduces each output by plain summation, the structure of a dense
// layer with the multiply replaced by a learned one-input table. Every L-LUT has
// its own quantisers: input width M, slice position and output width are
// element-wise (hgq_lut_pkg). An L-LUT whose input or output width is 0 bits is
// pruned: it is not built and adds nothing.
// Biases and a fused batch normalisation live inside the tables, so the layer
// needs no further arithmetic.
//
// Parameters: N_IN inputs of IN_W bits; the L-LUT slices start at bit IN_LSB,
// IN_LSB+1 or IN_LSB+2; each L-LUT returns at most OUT_W signed bits, which are
// sign-extended to SUM_W = OUT_W + clog2(N_IN) bits, enough for the exact sum.
// LAYER picks the layer's tables and widths from hgq_lut_pkg.
//
// Interface and timing: combinational. x[i] is input i, y[o] is output o; the
// caller registers the result (one pipeline stage per layer in this design).
// The summation is written as a loop; the adder tree shape and any pipelining
// inside it are left to synthesis and retiming.
module lut_dense #(
  parameter int unsigned N_IN   = 16,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned IN_W   = 11,
  parameter int unsigned IN_LSB = 2,
  parameter int unsigned OUT_W  = 6,
  parameter int unsigned LAYER  = hgq_lut_pkg::LAYER_LUT_DENSE1,
  localparam int unsigned SUM_W = OUT_W + $clog2(N_IN)
) (
  input  logic [N_IN-1:0][IN_W-1:0]   x,
  output logic [N_OUT-1:0][SUM_W-1:0] y
);
  import hgq_lut_pkg::*;

  // Output of L-LUT (o, i), sign-extended to SUM_W; zero where pruned.
  logic [N_OUT-1:0][N_IN-1:0][SUM_W-1:0] term;

  for (genvar o = 0; o < N_OUT; o++) begin : g_out
    for (genvar i = 0; i < N_IN; i++) begin : g_in
      localparam int unsigned M  = llut_width(LAYER, o, i);
      localparam int unsigned OW = llut_out_width(LAYER, o, i, OUT_W);
      if (M == 0 || OW == 0) begin : g_pruned
        assign term[o][i] = '0;
      end else begin : g_lut
        logic signed [OW-1:0] v;
        llut #(
          .IN_W  (IN_W),
          .IN_LSB(llut_lsb(LAYER, o, i, IN_LSB, M, IN_W)),
          .M     (M),
          .OUT_W (OW),
          .TABLE (llut_table(LAYER, o, i, M, OW))
        ) u_llut (
          .x(x[i]),
          .y(v)
        );
        assign term[o][i] = SUM_W'(v);
      end
    end
  end

  always_comb begin
    for (int o = 0; o < N_OUT; o++) begin
      y[o] = '0;
      for (int i = 0; i < N_IN; i++) y[o] = y[o] + term[o][i];
    end
  end

endmodule
