// im2col_shift_reg -- streaming receptive field of the LUT-Conv layer.
//
// A LUT-Conv layer is im2col followed by a LUT-Dense layer. In the streaming
// engine the im2col is a shift register of the last K feature vectors: each
// time `shift` is high the oldest vector drops out and `din` enters, or a zero
// vector if `pad` is also high. The zero vector is the convolution's padding:
// one zero pushed between two waveforms is the right-hand pad of the last
// window of one and the left-hand pad of the first window of the next.
//
// Interface: win[0] is the newest vector, win[K-1] the oldest; win is the
// register output, valid the cycle after the shift. Reset clears all taps to
// zero (synchronous reset, active low).
// The three taps and their place in the pipeline follow the figure of the
// streaming design; the pad-by-shift scheme and the reset are this design's.
module im2col_shift_reg #(
  parameter int unsigned K      = 3,
  parameter int unsigned N_FEAT = 8,
  parameter int unsigned FEAT_W = 22
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          shift,
  input  logic                          pad,
  input  logic [N_FEAT-1:0][FEAT_W-1:0] din,
  output logic [K-1:0][N_FEAT-1:0][FEAT_W-1:0] win
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      win <= '0;
    end else if (shift) begin
      for (int t = K - 1; t > 0; t--) win[t] <= win[t-1];
      win[0] <= pad ? '0 : din;
    end
  end

endmodule
