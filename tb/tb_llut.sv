// tb_llut -- self-checking test of the single L-LUT.
//
// Four instances cover input widths M = 1..4 at different slice positions and
// output widths. Random and corner inputs are applied; the expected output is
// the model value of the code obtained by arithmetic shift and mask of the
// input (tb_ref_pkg), compared bit for bit. Also counts inputs whose WRAP
// quantisation dropped high bits and lookups that returned a saturated entry;
// both must occur. Watchdog ends the run after 20000 cycles.
module tb_llut;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned IN_W = 12;
  localparam int NCFG = 4;
  localparam int unsigned M_C  [NCFG] = '{1, 2, 3, 4};
  localparam int unsigned LSB_C[NCFG] = '{0, 3, 5, 8};
  localparam int unsigned OW_C [NCFG] = '{4, 5, 6, 3};

  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [IN_W-1:0] x;
  logic [NCFG-1:0][7:0] y;

  for (genvar c = 0; c < NCFG; c++) begin : g_dut
    logic signed [OW_C[c]-1:0] yc;
    llut #(.IN_W(IN_W), .IN_LSB(LSB_C[c]), .M(M_C[c]), .OUT_W(OW_C[c]),
           .TABLE(llut_table(7, c, 3, M_C[c], OW_C[c]))) u_dut (.x(x), .y(yc));
    assign y[c] = 8'(yc);
  end

  int checks = 0, failures = 0, wraps = 0, sats = 0;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 3000; n++) begin
      if (n < 2 * 4096 / 4) x = IN_W'(n * 4 + (n & 3));
      else x = IN_W'($urandom);
      @(posedge clk);
      for (int c = 0; c < NCFG; c++) begin
        int unsigned code;
        int exp_v;
        code  = wrap_code(longint'(x), LSB_C[c], M_C[c]);
        exp_v = llut_value(7, c, 3, M_C[c], OW_C[c], code);
        if ((longint'(x) >>> LSB_C[c]) != longint'(signed_code(code, M_C[c]))) wraps++;
        if (exp_v == (1 << (OW_C[c] - 1)) - 1 || exp_v == -(1 << (OW_C[c] - 1))) sats++;
        checks++;
        if ($signed(y[c]) !== 8'(exp_v)) begin
          failures++;
          if (failures < 10)
            $display("cfg %0d x=%0d: got %0d expected %0d", c, x, $signed(y[c]), exp_v);
        end
      end
    end
    checks++;
    if (wraps == 0 || sats == 0) begin
      failures++;
      $display("mechanism not exercised: wraps=%0d saturated=%0d", wraps, sats);
    end
    $display("wrapped inputs=%0d saturated lookups=%0d", wraps, sats);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
