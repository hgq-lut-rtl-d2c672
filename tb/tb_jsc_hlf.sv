// tb_jsc_hlf -- workload test: the jet-substructure classifier on high-level
// features, built from two LUT-Dense layers (16 -> 20 -> 5).
//
// The classifier of the jet-tagging benchmark is a pure LUT network: 16 input
// features, a 20-wide LUT-Dense layer (batch normalisation folded into its
// tables) and a 5-wide LUT-Dense output layer whose argmax is the class. Here
// the two layers are instantiated with stand-in tables (layer ids 6 and 7) and
// one register stage between them; random feature vectors are classified and
// every logit and the argmax are compared with the integer reference model.
// The input format (10-bit signed, L-LUT slices from bit 3) is assumed.
module tb_jsc_hlf;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_F = 16, N_H = 20, N_C = 5, IN_W = 10, OW = 6;
  localparam int unsigned H_W = OW + $clog2(N_F), C_W = OW + $clog2(N_H);

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N_F-1:0][IN_W-1:0] feat;
  logic [N_H-1:0][H_W-1:0]  h, h_q;
  logic [N_C-1:0][C_W-1:0]  logit;

  lut_dense #(.N_IN(N_F), .N_OUT(N_H), .IN_W(IN_W), .IN_LSB(3), .OUT_W(OW), .LAYER(6))
    u_l1 (.x(feat), .y(h));
  always_ff @(posedge clk) h_q <= h;
  lut_dense #(.N_IN(N_H), .N_OUT(N_C), .IN_W(H_W), .IN_LSB(2), .OUT_W(OW), .LAYER(7))
    u_l2 (.x(h_q), .y(logit));

  int checks = 0, failures = 0;
  int class_hist[N_C];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int argmax(longint v[]);
    int best = 0;
    for (int k = 1; k < v.size(); k++) if (v[k] > v[best]) best = k;
    return best;
  endfunction

  initial begin
    longint xi[];
    longint hr[], yr[], yd[];
    xi = new[N_F];
    yd = new[N_C];
    foreach (class_hist[k]) class_hist[k] = 0;
    for (int n = 0; n < 400; n++) begin
      for (int i = 0; i < N_F; i++) begin
        feat[i] = IN_W'($urandom_range(0, 255)) - IN_W'(128);
        xi[i] = sext(longint'(feat[i]), IN_W);
      end
      @(posedge clk);   // layer-1 result registered
      #1;
      lut_layer(6, N_F, N_H, IN_W, 3, OW, xi, hr);
      lut_layer(7, N_H, N_C, H_W, 2, OW, hr, yr);
      for (int c = 0; c < N_C; c++) begin
        yd[c] = sext(longint'(logit[c]), C_W);
        checks++;
        if (yd[c] != yr[c]) begin
          failures++;
          if (failures < 10) $display("n=%0d logit %0d: got %0d expected %0d", n, c, yd[c], yr[c]);
        end
      end
      checks++;
      if (argmax(yd) != argmax(yr)) failures++;
      class_hist[argmax(yd)]++;
    end
    $display("class histogram: %0d %0d %0d %0d %0d", class_hist[0], class_hist[1],
             class_hist[2], class_hist[3], class_hist[4]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
