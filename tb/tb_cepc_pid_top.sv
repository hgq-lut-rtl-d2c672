// tb_cepc_pid_top -- end-to-end test of the streaming cluster counter at its
// full size (150 windows of 20 samples, 3000 samples per waveform).
//
// Six waveforms are generated (quiet baseline with random pulses, plus windows
// of full-range noise) and streamed one window per beat. Waveforms 0-2 are sent
// back to back with in_valid held high; waveforms 3-5 have random input gaps.
// An integer model (projection conv, the three LUT layers evaluated straight
// from the model functions, time weights, accumulation with zero padding at
// both ends of the waveform) gives the expected count of each waveform.
//
// Checked: every count; latency of 154 cycles from the first window accepted
// after reset to its count; 151 cycles between counts while the input never
// stalls. Counted, and required to happen at least once: pad (synchronisation)
// cycles, input held off by in_ready during a pad cycle, input gaps, WRAP
// overflow of an L-LUT input, saturated L-LUT entries looked up, and pruned
// L-LUTs in every layer.
module tb_cepc_pid_top;
  import hgq_lut_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_SAMP = 20, SAMP_W = 12, N_WIN = 150, N_FEAT = 8;
  localparam int unsigned N_HID = 16, OW = 6, OUT_W = 26;
  localparam int NWF = 6;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, in_valid, in_ready, out_valid;
  logic [N_SAMP-1:0][SAMP_W-1:0] samples;
  logic signed [OUT_W-1:0] out_count;

  cepc_pid_top u_dut (.clk, .rst_n, .in_valid, .in_ready, .samples, .out_valid, .out_count);

  int checks = 0, failures = 0;
  int n_pad = 0, n_backpressure = 0, n_gap = 0, n_out = 0;
  longint cyc = 0;
  longint first_accept_cyc = -1, prev_out_cyc = -1;
  longint expected[NWF];
  logic [SAMP_W-1:0] wf[NWF][N_WIN][N_SAMP];

  always @(posedge clk) cyc <= cyc + 1;

  task automatic fail(string what);
    failures++;
    if (failures < 10) $display("cycle %0d: %s", cyc, what);
  endtask

  initial begin
    repeat (NWF * 400 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus and reference ------------------------------------------------
  function automatic void make_waveforms();
    for (int w = 0; w < NWF; w++)
      for (int k = 0; k < N_WIN; k++)
        for (int s = 0; s < N_SAMP; s++) begin
          int v;
          if (k % 37 == 5) v = $urandom_range(0, 4095);          // full-range noise
          else begin
            v = $urandom_range(0, 40);                           // baseline
            if ($urandom % 50 == 0) v += $urandom_range(200, 3000);  // pulse
          end
          wf[w][k][s] = SAMP_W'(v);
        end
  endfunction

  function automatic longint ref_count(int w);
    longint c[N_WIN][N_FEAT];
    longint x[];
    longint h1[], h2[], h3[];
    longint total = 0;
    x = new[3 * N_FEAT];
    for (int k = 0; k < N_WIN; k++)
      for (int f = 0; f < N_FEAT; f++) begin
        c[k][f] = conv_bias(f);
        for (int s = 0; s < N_SAMP; s++)
          c[k][f] += longint'(conv_weight(f, s)) * longint'(wf[w][k][s]);
      end
    for (int t = 1; t <= N_WIN; t++) begin
      for (int f = 0; f < N_FEAT; f++) begin
        x[0 * N_FEAT + f] = (t < N_WIN) ? c[t][f] : 0;    // newest tap
        x[1 * N_FEAT + f] = c[t-1][f];
        x[2 * N_FEAT + f] = (t >= 2) ? c[t-2][f] : 0;     // oldest tap
      end
      lut_layer(LAYER_LUT_CONV, 3 * N_FEAT, N_HID, 22, 13, OW, x, h1);
      lut_layer(LAYER_LUT_DENSE1, N_HID, N_HID, 11, 2, OW, h1, h2);
      lut_layer(LAYER_LUT_DENSE2, N_HID, 1, 10, 2, OW, h2, h3);
      total += h3[0] * longint'(time_weight_value(t));
    end
    return total;
  endfunction

  // ---- driver -------------------------------------------------------------------
  initial begin
    rst_n = 0; in_valid = 0; samples = '0;
    n_wrap = 0; n_sat = 0; n_lookups = 0;
    make_waveforms();
    for (int w = 0; w < NWF; w++) expected[w] = ref_count(w);
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int w = 0; w < NWF; w++) begin
      for (int k = 0; k < N_WIN; k++) begin
        if (w >= 3) begin
          while ($urandom % 4 == 0) begin
            in_valid = 0;
            samples = '0;
            n_gap++;
            @(posedge clk);
            #1;
          end
        end
        in_valid = 1;
        for (int s = 0; s < N_SAMP; s++) samples[s] = wf[w][k][s];
        forever begin
          @(posedge clk);
          if (in_ready) break;
          n_backpressure++;
        end
        if (w == 0 && k == 0) first_accept_cyc = cyc;
        #1;
      end
    end
    in_valid = 0;
  end

  // ---- monitor ------------------------------------------------------------------
  always @(posedge clk) begin
    if (rst_n && !in_ready) n_pad++;   // in_ready is low only in the pad cycle
    if (rst_n && out_valid) begin
      checks++;
      if (n_out >= NWF) fail("unexpected output");
      else if (longint'(out_count) != expected[n_out])
        fail($sformatf("waveform %0d: count %0d expected %0d", n_out, out_count, expected[n_out]));
      // out_valid was registered on the previous edge, hence the -1.
      if (n_out == 0) begin
        checks++;
        if (cyc - 1 - first_accept_cyc != 154)
          fail($sformatf("latency %0d cycles, expected 154", cyc - 1 - first_accept_cyc));
      end
      if (n_out >= 1 && n_out <= 2) begin
        checks++;
        if (cyc - prev_out_cyc != 151)
          fail($sformatf("interval %0d cycles, expected 151", cyc - prev_out_cyc));
      end
      prev_out_cyc = cyc;
      n_out++;
      if (n_out == NWF) begin
        int unsigned pr1, pr2, pr3;
        pr1 = count_pruned(LAYER_LUT_CONV, 3 * N_FEAT, N_HID, OW);
        pr2 = count_pruned(LAYER_LUT_DENSE1, N_HID, N_HID, OW);
        pr3 = count_pruned(LAYER_LUT_DENSE2, N_HID, 1, OW);
        $display("outputs=%0d pad_cycles=%0d held_by_in_ready=%0d input_gaps=%0d",
                 n_out, n_pad, n_backpressure, n_gap);
        $display("lookups=%0d wrapped_inputs=%0d saturated_entries=%0d pruned=%0d/%0d/%0d",
                 n_lookups, n_wrap, n_sat, pr1, pr2, pr3);
        checks++;
        if (n_pad < NWF) fail("pad cycle not seen for every waveform");
        checks++;
        if (n_backpressure == 0) fail("in_ready never held the input");
        checks++;
        if (n_gap == 0) fail("no input gap");
        checks++;
        if (n_wrap == 0) fail("no WRAP overflow");
        checks++;
        if (n_sat == 0) fail("no saturated entry used");
        checks++;
        if (pr1 == 0 || pr2 == 0 || pr3 == 0) fail("a layer has no pruned L-LUT");
        $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
        $finish;
      end
    end
  end
endmodule
