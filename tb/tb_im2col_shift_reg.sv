// tb_im2col_shift_reg -- self-checking test of the LUT-Conv receptive field.
//
// Random shift / pad / data patterns drive the register; a queue model of the
// last three vectors (zero for a pad, zero after reset) is compared with every
// tap after every clock. Counts shifts, pads and hold cycles; each must occur.
module tb_im2col_shift_reg;
  localparam int unsigned K = 3, N_FEAT = 8, FEAT_W = 22;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, shift, pad;
  logic [N_FEAT-1:0][FEAT_W-1:0] din;
  logic [K-1:0][N_FEAT-1:0][FEAT_W-1:0] win, model;

  im2col_shift_reg u_dut (.clk, .rst_n, .shift, .pad, .din, .win);

  int checks = 0, failures = 0, n_shift = 0, n_pad = 0, n_hold = 0;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; shift = 0; pad = 0; din = '0; model = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      shift = ($urandom % 4) != 0;
      pad   = ($urandom % 5) == 0;
      for (int f = 0; f < N_FEAT; f++) din[f] = FEAT_W'($urandom);
      @(posedge clk);
      if (shift) begin
        model = {model[K-2:0], (pad ? '0 : din)};
        n_shift++;
        if (pad) n_pad++;
      end else n_hold++;
      #1;
      checks++;
      if (win !== model) begin
        failures++;
        if (failures < 10) $display("n=%0d window mismatch", n);
      end
    end
    checks++;
    if (n_shift == 0 || n_pad == 0 || n_hold == 0) failures++;
    $display("shifts=%0d pads=%0d holds=%0d", n_shift, n_pad, n_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
