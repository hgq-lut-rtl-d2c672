// time_weight -- time-dependent output weighting (the "Einsum Dense" step).
//
// Each of the N_T time slots of a waveform has its own trained weight; the
// network output of that slot is multiplied by it before accumulation. The
// weights are constants held in a lookup table indexed by the window counter
// (entry t = hgq_lut_pkg::time_weight_value(t)); slot 0 is the warm-up slot of
// the streaming receptive field and carries weight 0.
//
// Interface and timing: combinational, prod = x * W[t]. An index at or above
// N_T reads weight 0. The table and the multiplier follow the paper's figure;
// the 8-bit weight width is this design's choice.
module time_weight #(
  parameter int unsigned N_T   = 151,
  parameter int unsigned X_W   = 10,
  parameter int unsigned WT_W  = 8,
  localparam int unsigned T_W  = $clog2(N_T),
  localparam int unsigned P_W  = X_W + WT_W
) (
  input  logic [T_W-1:0]         t,
  input  logic signed [X_W-1:0]  x,
  output logic signed [P_W-1:0]  prod
);
  import hgq_lut_pkg::*;

  typedef logic signed [WT_W-1:0] wt_t;

  function automatic wt_t [N_T-1:0] build_table();
    wt_t [N_T-1:0] tab;
    for (int k = 0; k < N_T; k++) tab[k] = WT_W'(time_weight_value(k));
    return tab;
  endfunction

  localparam wt_t [N_T-1:0] WTAB = build_table();

  wt_t w;

  always_comb begin
    w    = (32'(t) < N_T) ? WTAB[t] : '0;
    prod = P_W'(x) * P_W'(w);
  end

endmodule
