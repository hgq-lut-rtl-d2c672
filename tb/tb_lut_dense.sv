// tb_lut_dense -- self-checking test of the LUT-Dense layer.
//
// A 16 -> 16 layer with 11-bit inputs sliced from bit 2 (the hidden layer of
// the cluster counter) gets random inputs, including full-scale values. Each
// output is compared with the integer reference sum over unpruned L-LUTs
// (tb_ref_pkg::lut_layer). The test also requires pruned L-LUTs to exist in
// the layer and WRAP overflow of some L-LUT inputs to occur.
module tb_lut_dense;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_IN = 16, N_OUT = 16, IN_W = 11, LSB = 2, OW = 6;
  localparam int unsigned SUM_W = OW + $clog2(N_IN);

  logic clk = 0;
  always #5 clk = ~clk;

  logic [N_IN-1:0][IN_W-1:0]   x;
  logic [N_OUT-1:0][SUM_W-1:0] y;

  lut_dense #(.N_IN(N_IN), .N_OUT(N_OUT), .IN_W(IN_W), .IN_LSB(LSB), .OUT_W(OW),
              .LAYER(LAYER_LUT_DENSE1)) u_dut (.x, .y);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint xi[];
    longint yr[];
    int unsigned pruned;
    xi = new[N_IN];
    n_wrap = 0;
    for (int n = 0; n < 500; n++) begin
      for (int i = 0; i < N_IN; i++) begin
        case (n % 4)
          0: x[i] = IN_W'($urandom);
          1: x[i] = IN_W'($urandom_range(0, 15)) - IN_W'(8);
          2: x[i] = (($urandom & 1) != 0) ? {1'b0, {(IN_W-1){1'b1}}} : {1'b1, {(IN_W-1){1'b0}}};
          default: x[i] = IN_W'($urandom_range(0, 63)) - IN_W'(32);
        endcase
        xi[i] = sext(longint'(x[i]), IN_W);
      end
      @(posedge clk);
      lut_layer(LAYER_LUT_DENSE1, N_IN, N_OUT, IN_W, LSB, OW, xi, yr);
      for (int o = 0; o < N_OUT; o++) begin
        checks++;
        if (sext(longint'(y[o]), SUM_W) != yr[o]) begin
          failures++;
          if (failures < 10) $display("n=%0d out %0d: got %0d expected %0d", n, o,
                                      sext(longint'(y[o]), SUM_W), yr[o]);
        end
      end
    end
    pruned = count_pruned(LAYER_LUT_DENSE1, N_IN, N_OUT, OW);
    $display("pruned L-LUTs=%0d of %0d, wrapped inputs=%0d", pruned, N_IN * N_OUT, n_wrap);
    checks++;
    if (pruned == 0 || n_wrap == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
