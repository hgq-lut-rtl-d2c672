// tb_window_counter -- self-checking test of the [0, 150] window counter.
//
// First streams windows with in_valid always high and checks the counter
// sequence, the pad cycle (in_ready low, pad and last high at count 150) and an
// initiation interval of exactly 151 cycles between pad cycles. Then applies
// random input gaps and checks the counter against a model that advances only
// on accepted windows and on the pad cycle.
module tb_window_counter;
  localparam int unsigned N_WIN = 150;
  localparam int unsigned CNT_W = $clog2(N_WIN + 1);

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_ready, beat, pad, last;
  logic [CNT_W-1:0] count;

  window_counter u_dut (.clk, .rst_n, .in_valid, .in_ready, .beat, .pad, .last, .count);

  int checks = 0, failures = 0, n_pad = 0, n_gap = 0;
  int unsigned model;
  longint cyc = 0, last_pad_cyc = -1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("cycle %0d: %s (count=%0d model=%0d)", cyc, what, count, model);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; in_valid = 0; model = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int n = 0; n < 3 * 151 + 1500; n++) begin
      in_valid = (n < 3 * 151) ? 1'b1 : (($urandom % 3) != 0);
      #1;
      check(count == CNT_W'(model), "count");
      check(in_ready == (model < N_WIN), "in_ready");
      check(pad == (model == N_WIN) && last == pad, "pad/last");
      check(beat == (pad || (in_valid && in_ready)), "beat");
      if (pad) begin
        n_pad++;
        if (n < 3 * 151 && last_pad_cyc >= 0) check(cyc - last_pad_cyc == 151, "II");
        last_pad_cyc = cyc;
      end
      if (!in_valid) n_gap++;
      @(posedge clk);
      cyc++;
      if (model == N_WIN) model = 0;
      else if (in_valid) model++;
      #1;
    end
    checks++;
    if (n_pad < 3 || n_gap == 0) failures++;
    $display("pad cycles=%0d input gaps=%0d", n_pad, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
