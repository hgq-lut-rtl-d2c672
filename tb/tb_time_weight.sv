// tb_time_weight -- self-checking test of the time-weight lookup and multiply.
//
// Every time index 0..150 (and out-of-range indices) is combined with random
// and extreme inputs; the product is compared with x * W[t] from the model
// table (W[t] = 0 outside the table). Slot 0 must weigh 0.
module tb_time_weight;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_T = 151, X_W = 10, WT_W = 8;
  localparam int unsigned T_W = $clog2(N_T), P_W = X_W + WT_W;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [T_W-1:0]        t;
  logic signed [X_W-1:0] x;
  logic signed [P_W-1:0] prod;

  time_weight u_dut (.t, .x, .prod);

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2**T_W; k++) begin
      for (int r = 0; r < 4; r++) begin
        longint e;
        t = T_W'(k);
        case (r)
          0: x = {1'b0, {(X_W-1){1'b1}}};
          1: x = {1'b1, {(X_W-1){1'b0}}};
          default: x = X_W'($urandom);
        endcase
        @(posedge clk);
        e = (k < N_T) ? longint'(x) * longint'(time_weight_value(k)) : 0;
        checks++;
        if (longint'(prod) != e) begin
          failures++;
          if (failures < 10) $display("t=%0d x=%0d: got %0d expected %0d", k, x, prod, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
