// output_accumulator -- sums the weighted window outputs of one waveform.
//
// Every valid beat adds `din` to an internal accumulator. On the beat flagged
// `last` (the synchronisation slot of the window counter) the total including
// that beat is copied to `sum` with `sum_valid` high for one cycle, and the
// accumulator restarts from zero, which is the counter's RST in the paper's
// figure.
//
// Interface and timing: registered. sum/sum_valid change on the clock edge
// that takes the last beat; sum holds until the next waveform completes.
// Synchronous active-low reset clears everything. The accumulator width is
// this design's choice (enough for N_T full-scale products).
module output_accumulator #(
  parameter int unsigned IN_W  = 18,
  parameter int unsigned ACC_W = 26
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    valid,
  input  logic                    last,
  input  logic signed [IN_W-1:0]  din,
  output logic signed [ACC_W-1:0] sum,
  output logic                    sum_valid
);

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] nxt;

  assign nxt = acc + ACC_W'(din);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc       <= '0;
      sum       <= '0;
      sum_valid <= 1'b0;
    end else begin
      sum_valid <= valid && last;
      if (valid) begin
        if (last) begin
          sum <= nxt;
          acc <= '0;
        end else begin
          acc <= nxt;
        end
      end
    end
  end

endmodule
