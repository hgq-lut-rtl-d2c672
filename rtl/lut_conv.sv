// lut_conv -- streaming LUT-Conv layer (kernel K, stride 1).
//
// The layer is im2col followed by LUT-Dense: an im2col_shift_reg holds the last
// K input feature vectors and a lut_dense with K*N_FEAT inputs maps the window
// to N_OUT outputs. Input j of the LUT-Dense is tap (j / N_FEAT) feature
// (j % N_FEAT), tap 0 being the newest vector, so every (tap, feature, output)
// triple has its own L-LUT, as in a convolution with a dense kernel.
//
// Interface and timing: `shift`/`pad`/`din` as for im2col_shift_reg; y is the
// combinational LUT-Dense output of the registered window, so it is valid the
// cycle after the shift. The kernel of 3 and the 8 -> 16 widths are those of
// the cluster-counting network; the tap order is this design's choice.
module lut_conv #(
  parameter int unsigned K      = 3,
  parameter int unsigned N_FEAT = 8,
  parameter int unsigned FEAT_W = 22,
  parameter int unsigned N_OUT  = 16,
  parameter int unsigned IN_LSB = 13,
  parameter int unsigned OUT_W  = 6,
  parameter int unsigned LAYER  = hgq_lut_pkg::LAYER_LUT_CONV,
  localparam int unsigned SUM_W = OUT_W + $clog2(K * N_FEAT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          shift,
  input  logic                          pad,
  input  logic [N_FEAT-1:0][FEAT_W-1:0] din,
  output logic [N_OUT-1:0][SUM_W-1:0]   y
);

  logic [K-1:0][N_FEAT-1:0][FEAT_W-1:0] win;

  im2col_shift_reg #(.K(K), .N_FEAT(N_FEAT), .FEAT_W(FEAT_W)) u_sr (
    .clk, .rst_n, .shift, .pad, .din, .win
  );

  lut_dense #(
    .N_IN  (K * N_FEAT),
    .N_OUT (N_OUT),
    .IN_W  (FEAT_W),
    .IN_LSB(IN_LSB),
    .OUT_W (OUT_W),
    .LAYER (LAYER)
  ) u_dense (
    .x(win),
    .y(y)
  );

endmodule
