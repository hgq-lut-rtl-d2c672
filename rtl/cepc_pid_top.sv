// cepc_pid_top -- streaming LUT-network cluster counter for drift-chamber
// waveforms (particle identification by cluster counting).
//
// A waveform of N_WIN * N_SAMP samples (150 x 20 = 3000 at 12 bits each) is
// streamed in N_SAMP samples per clock. For every window the network estimates
// how many primary ionisation clusters it holds; the estimates are weighted by
// a per-time-slot constant and summed into one count per waveform.
//
//   samples --> conv_proj (20 -> 8, matmul) --> lut_conv (3 x 8 -> 16)
//           --> lut_dense (16 -> 16) --> lut_dense (16 -> 1)
//           --> time_weight (x * W[t]) --> output_accumulator --> out_count
//                 ^ window_counter [0, 150] gives t, the pad cycle and RST
//
// Pipeline (one register stage per step, every stage carries valid/t/last):
//   edge 0 : window k enters the LUT-Conv shift register (conv is
//            combinational on the input)
//   edge 1 : LUT-Conv output registered          (h1)
//   edge 2 : first LUT-Dense output registered   (h2)
//   edge 3 : second LUT-Dense x time weight      (p)
//   edge 4 : accumulator / final sum
// The beat with counter value t produces the LUT-Conv output centred on window
// t-1 (its window spans t-2 .. t). Counter value 150 is the synchronisation
// cycle: no input is taken and a zero vector is shifted in, which completes the
// last window's right-hand padding and provides the next waveform's left-hand
// padding. Slot 0 (centred on the previous waveform's pad) has time weight 0.
// With no input gaps a waveform takes 151 cycles (II = 151) and its count
// appears 154 cycles after its first window was taken.
//
// Interface: in_valid/in_ready handshake for one window per beat, samples[s] =
// sample s of the window (unsigned, 3 integer + 9 fractional bits). in_ready is
// low during the synchronisation cycle. out_valid pulses for one cycle with the
// signed count in out_count (units of the L-LUT output LSB times the weight
// LSB). Synchronous active-low reset.
//
// Follows the paper: the layer sequence and sizes, the 20-sample input beat,
// the [0,150] counter, lookup, multiply and accumulate. This design's own
// choices: all bit widths and slice positions, the register placement, the
// handshake, and the stand-in tables of hgq_lut_pkg.
module cepc_pid_top #(
  parameter int unsigned N_SAMP  = 20,
  parameter int unsigned SAMP_W  = 12,
  parameter int unsigned N_WIN   = 150,
  parameter int unsigned N_FEAT  = 8,
  parameter int unsigned FEAT_W  = 22,
  parameter int unsigned N_HID   = 16,
  parameter int unsigned LLUT_W  = 6,
  parameter int unsigned WT_W    = 8,
  parameter int unsigned OUT_W   = 26,
  localparam int unsigned CNT_W  = $clog2(N_WIN + 1),
  localparam int unsigned H1_W   = LLUT_W + $clog2(3 * N_FEAT),
  localparam int unsigned H2_W   = LLUT_W + $clog2(N_HID),
  localparam int unsigned H3_W   = LLUT_W + $clog2(N_HID),
  localparam int unsigned P_W    = H3_W + WT_W
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [N_SAMP-1:0][SAMP_W-1:0] samples,
  output logic                          out_valid,
  output logic signed [OUT_W-1:0]       out_count
);
  import hgq_lut_pkg::*;

  // ---- stage 0: counter and projection conv --------------------------------
  logic             beat, pad, last0;
  logic [CNT_W-1:0] count;

  window_counter #(.N_WIN(N_WIN)) u_cnt (
    .clk, .rst_n, .in_valid, .in_ready,
    .beat, .pad, .last(last0), .count
  );

  logic [N_FEAT-1:0][FEAT_W-1:0] feat;

  conv_proj #(.N_SAMP(N_SAMP), .SAMP_W(SAMP_W), .N_FEAT(N_FEAT), .FEAT_W(FEAT_W)) u_conv (
    .samples, .feat
  );

  // ---- stage 1: LUT-Conv (shift register + LUT-Dense) ----------------------
  logic             v1, l1;
  logic [CNT_W-1:0] t1;
  logic [N_HID-1:0][H1_W-1:0] y1;

  lut_conv #(
    .K(3), .N_FEAT(N_FEAT), .FEAT_W(FEAT_W), .N_OUT(N_HID),
    .IN_LSB(13), .OUT_W(LLUT_W), .LAYER(LAYER_LUT_CONV)
  ) u_lut_conv (
    .clk, .rst_n, .shift(beat), .pad, .din(feat), .y(y1)
  );

  // ---- stage 2: first LUT-Dense ---------------------------------------------
  logic             v2, l2;
  logic [CNT_W-1:0] t2;
  logic [N_HID-1:0][H1_W-1:0] h1;
  logic [N_HID-1:0][H2_W-1:0] y2;

  lut_dense #(
    .N_IN(N_HID), .N_OUT(N_HID), .IN_W(H1_W), .IN_LSB(2),
    .OUT_W(LLUT_W), .LAYER(LAYER_LUT_DENSE1)
  ) u_dense1 (.x(h1), .y(y2));

  // ---- stage 3: second LUT-Dense and time weighting -------------------------
  logic             v3, l3;
  logic [CNT_W-1:0] t3;
  logic [N_HID-1:0][H2_W-1:0] h2;
  logic [0:0][H3_W-1:0]       y3;
  logic signed [P_W-1:0]      prod;

  lut_dense #(
    .N_IN(N_HID), .N_OUT(1), .IN_W(H2_W), .IN_LSB(2),
    .OUT_W(LLUT_W), .LAYER(LAYER_LUT_DENSE2)
  ) u_dense2 (.x(h2), .y(y3));

  time_weight #(.N_T(N_WIN + 1), .X_W(H3_W), .WT_W(WT_W)) u_tw (
    .t(t3), .x(y3[0]), .prod
  );

  // ---- stage 4: accumulation -------------------------------------------------
  logic                  v4, l4;
  logic signed [P_W-1:0] p4;

  output_accumulator #(.IN_W(P_W), .ACC_W(OUT_W)) u_acc (
    .clk, .rst_n, .valid(v4), .last(l4), .din(p4),
    .sum(out_count), .sum_valid(out_valid)
  );

  // ---- pipeline registers ----------------------------------------------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      {v1, v2, v3, v4} <= '0;
      {l1, l2, l3, l4} <= '0;
      t1 <= '0;
      t2 <= '0;
      t3 <= '0;
      h1 <= '0;
      h2 <= '0;
      p4 <= '0;
    end else begin
      v1 <= beat;  l1 <= beat && last0; t1 <= count;
      v2 <= v1;    l2 <= l1;            t2 <= t1;    h1 <= y1;
      v3 <= v2;    l3 <= l2;            t3 <= t2;    h2 <= y2;
      v4 <= v3;    l4 <= l3;                         p4 <= prod;
    end
  end

  // Every input beat is a window or the pad cycle, never both.
  a_beat_kind: assert property (@(posedge clk) disable iff (!rst_n)
                                beat |-> (pad != (in_valid && in_ready)));

endmodule
