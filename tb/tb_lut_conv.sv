// tb_lut_conv -- self-checking test of the streaming LUT-Conv layer.
//
// Feature vectors (random, some pads, some hold cycles) are streamed into a
// 3 x 8 -> 16 LUT-Conv. A model keeps the last three vectors; the LUT-Dense
// reference over the window (input j = tap j/8, feature j%8, tap 0 newest) is
// compared with every output the cycle after each clock.
module tb_lut_conv;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned K = 3, N_FEAT = 8, FEAT_W = 22, N_OUT = 16, LSB = 13, OW = 6;
  localparam int unsigned SUM_W = OW + $clog2(K * N_FEAT);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, shift, pad;
  logic [N_FEAT-1:0][FEAT_W-1:0] din;
  logic [N_OUT-1:0][SUM_W-1:0]   y;

  lut_conv u_dut (.clk, .rst_n, .shift, .pad, .din, .y);

  int checks = 0, failures = 0;
  longint win[K][N_FEAT];

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xi[];
    longint yr[];
    xi = new[K * N_FEAT];
    rst_n = 0; shift = 0; pad = 0; din = '0;
    foreach (win[t, f]) win[t][f] = 0;
    n_wrap = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      shift = ($urandom % 8) != 0;
      pad   = ($urandom % 6) == 0;
      for (int f = 0; f < N_FEAT; f++)
        din[f] = FEAT_W'(longint'($urandom_range(0, 300000)) - 150000);
      @(posedge clk);
      if (shift) begin
        for (int t = K - 1; t > 0; t--) win[t] = win[t-1];
        for (int f = 0; f < N_FEAT; f++) win[0][f] = pad ? 0 : sext(longint'(din[f]), FEAT_W);
      end
      #1;
      for (int t = 0; t < K; t++)
        for (int f = 0; f < N_FEAT; f++) xi[t * N_FEAT + f] = win[t][f];
      lut_layer(LAYER_LUT_CONV, K * N_FEAT, N_OUT, FEAT_W, LSB, OW, xi, yr);
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (sext(longint'(y[o]), SUM_W) != yr[o]) begin
          failures++;
          if (failures < 10) $display("n=%0d out %0d: got %0d expected %0d", n, o,
                                      sext(longint'(y[o]), SUM_W), yr[o]);
        end
      end
    end
    $display("wrapped L-LUT inputs=%0d", n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
