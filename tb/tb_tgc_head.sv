// tb_tgc_head -- workload test: the LUT-Dense output head of the hybrid muon
// tracking network (50 -> 24 -> 24 -> 24).
//
// In the hybrid tracking network the feature extractor is made of conventional
// (multiplier-based) layers that end in a 50-wide hard-tanh activation; only
// the head is built from LUT-Dense layers, three of them 24 wide. This test
// covers that head: hard-tanh-bounded inputs (8-bit signed, range [-1, 1) with
// 7 fractional bits, an assumed format) pass through three LUT-Dense layers
// with a register after each, and every output is compared with the integer
// reference model three cycles later. The conventional front end and the final
// single-value output stage are not part of this test.
module tb_tgc_head;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_IN = 50, N_H = 24, IN_W = 8, OW = 6;
  localparam int unsigned H1_W = OW + $clog2(N_IN), H_W = OW + $clog2(N_H);
  localparam int LAT = 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N_IN-1:0][IN_W-1:0] x;
  logic [N_H-1:0][H1_W-1:0]  y1, r1;
  logic [N_H-1:0][H_W-1:0]   y2, r2, y3, r3;

  lut_dense #(.N_IN(N_IN), .N_OUT(N_H), .IN_W(IN_W), .IN_LSB(3), .OUT_W(OW), .LAYER(8))
    u_l1 (.x(x), .y(y1));
  lut_dense #(.N_IN(N_H), .N_OUT(N_H), .IN_W(H1_W), .IN_LSB(3), .OUT_W(OW), .LAYER(9))
    u_l2 (.x(r1), .y(y2));
  lut_dense #(.N_IN(N_H), .N_OUT(N_H), .IN_W(H_W), .IN_LSB(3), .OUT_W(OW), .LAYER(10))
    u_l3 (.x(r2), .y(y3));

  always_ff @(posedge clk) begin
    r1 <= y1;
    r2 <= y2;
    r3 <= y3;
  end

  int checks = 0, failures = 0;
  longint expq[$][];

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xi[];
    longint a[], b[], c[];
    xi = new[N_IN];
    for (int n = 0; n < 300 + LAT; n++) begin
      for (int i = 0; i < N_IN; i++) begin
        x[i] = IN_W'($urandom);
        xi[i] = sext(longint'(x[i]), IN_W);
      end
      lut_layer(8, N_IN, N_H, IN_W, 3, OW, xi, a);
      lut_layer(9, N_H, N_H, H1_W, 3, OW, a, b);
      lut_layer(10, N_H, N_H, H_W, 3, OW, b, c);
      expq.push_back(c);
      @(posedge clk);
      #1;
      if (n >= LAT - 1) begin
        longint e[];
        e = expq.pop_front();
        for (int o = 0; o < N_H; o++) begin
          checks++;
          if (sext(longint'(r3[o]), H_W) != e[o]) begin
            failures++;
            if (failures < 10) $display("n=%0d out %0d: got %0d expected %0d", n, o,
                                        sext(longint'(r3[o]), H_W), e[o]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
