// tb_output_accumulator -- self-checking test of the output accumulator.
//
// Streams random products with random valid gaps; every 151st valid beat is
// flagged last. Checks that sum_valid pulses exactly on the edge after a last
// beat, that sum then equals the total of the waveform's beats, and that the
// next waveform starts from zero.
module tb_output_accumulator;
  localparam int unsigned IN_W = 18, ACC_W = 26;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, valid, last, sum_valid;
  logic signed [IN_W-1:0]  din;
  logic signed [ACC_W-1:0] sum;

  output_accumulator u_dut (.clk, .rst_n, .valid, .last, .din, .sum, .sum_valid);

  int checks = 0, failures = 0, n_sums = 0;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint total;
    int beats;
    bit expect_sum;
    longint expect_val;
    rst_n = 0; valid = 0; last = 0; din = '0;
    total = 0; beats = 0; expect_sum = 0; expect_val = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 5000; n++) begin
      valid = ($urandom % 4) != 0;
      last  = valid && (beats == 150);
      din   = IN_W'($urandom);
      if (n % 7 == 0) din = {1'b1, {(IN_W-1){1'b0}}};
      expect_sum = 0;
      if (valid) begin
        total += longint'(din);
        beats++;
        if (last) begin
          expect_sum = 1; expect_val = total; total = 0; beats = 0; n_sums++;
        end
      end
      @(posedge clk);
      #1;
      checks++;
      if (sum_valid != expect_sum || (expect_sum && longint'(sum) != expect_val)) begin
        failures++;
        if (failures < 10) $display("n=%0d sum_valid=%0d sum=%0d expected %0d/%0d",
                                    n, sum_valid, sum, expect_sum, expect_val);
      end
    end
    checks++;
    if (n_sums < 3) failures++;
    $display("sums=%0d", n_sums);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
