// tb_conv_proj -- self-checking test of the projection convolution.
//
// Random, all-zero and all-full-scale windows of 20 unsigned 12-bit samples
// are applied; each of the 8 features is compared with bias + sum of
// weight * sample computed with integers from the model weights.
module tb_conv_proj;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_SAMP = 20, SAMP_W = 12, N_FEAT = 8, FEAT_W = 22;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N_SAMP-1:0][SAMP_W-1:0] samples;
  logic [N_FEAT-1:0][FEAT_W-1:0] feat;

  conv_proj u_dut (.samples, .feat);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 400; n++) begin
      for (int s = 0; s < N_SAMP; s++) begin
        if (n == 0) samples[s] = '0;
        else if (n == 1) samples[s] = '1;
        else samples[s] = SAMP_W'($urandom);
      end
      @(posedge clk);
      for (int k = 0; k < N_FEAT; k++) begin
        longint e;
        e = conv_bias(k);
        for (int s = 0; s < N_SAMP; s++) e += longint'(conv_weight(k, s)) * longint'(samples[s]);
        checks++;
        if (sext(longint'(feat[k]), FEAT_W) != e) begin
          failures++;
          if (failures < 10) $display("n=%0d feat %0d: got %0d expected %0d", n, k,
                                      sext(longint'(feat[k]), FEAT_W), e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
