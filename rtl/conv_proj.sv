// conv_proj -- matmul-based projection convolution of the cluster counter.
//
// The raw waveform samples are too wide to feed L-LUTs directly, so a
// conventional convolution with kernel = stride = N_SAMP first projects each
// window of N_SAMP samples onto N_FEAT features:
//
//   f[k] = bias[k] + sum_s w[k][s] * sample[s]
//
// Samples are unsigned fixed point (12 bits: 3 integer, 9 fractional); weights
// are small signed integers and the bias is in units of one sample LSB, so the
// features keep the sample LSB (2**-9). Weights come from hgq_lut_pkg and are
// constants, so each product is a constant multiplication that synthesis turns
// into shifts and adds (no DSP needed).
//
// Interface and timing: combinational, one window per call. The 20-sample
// window, 12-bit samples and 8 features follow the paper; the weight range
// [-8, 7], the bias and the feature width are this design's choices.
module conv_proj #(
  parameter int unsigned N_SAMP = 20,
  parameter int unsigned SAMP_W = 12,
  parameter int unsigned N_FEAT = 8,
  parameter int unsigned FEAT_W = 22
) (
  input  logic [N_SAMP-1:0][SAMP_W-1:0] samples,
  output logic [N_FEAT-1:0][FEAT_W-1:0] feat
);
  import hgq_lut_pkg::*;

  always_comb begin
    for (int k = 0; k < N_FEAT; k++) begin
      logic signed [FEAT_W-1:0] acc;
      acc = FEAT_W'(conv_bias(k));
      for (int s = 0; s < N_SAMP; s++) begin
        acc = acc + FEAT_W'(conv_weight(k, s)) * $signed({1'b0, samples[s]});
      end
      feat[k] = acc;
    end
  end

endmodule
