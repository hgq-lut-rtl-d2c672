// window_counter -- the [0, N_WIN] time counter of the streaming engine.
//
// A waveform arrives as N_WIN windows, one per accepted input beat. After the
// last window the engine spends one extra cycle on synchronisation: no input
// is accepted and a zero (padding) vector is pushed into the LUT-Conv shift
// register instead. The counter therefore runs 0 .. N_WIN and wraps, giving an
// initiation interval of N_WIN + 1 cycles per waveform when the input never
// stalls.
//
// Interface: in_ready is high while count < N_WIN; a beat happens when
// in_valid && in_ready (a window) or when count == N_WIN (the pad cycle, `pad`
// high). `beat` tells the pipeline to advance, `count` is the time index of
// the beat and `last` marks the pad beat, which ends a waveform. An input gap
// (in_valid low) simply holds the counter. Synchronous active-low reset to 0.
// The [0,150] range follows the paper's figure; the valid/ready handshake is
// this design's choice.
module window_counter #(
  parameter int unsigned N_WIN = 150,
  localparam int unsigned CNT_W = $clog2(N_WIN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  output logic             beat,
  output logic             pad,
  output logic             last,
  output logic [CNT_W-1:0] count
);

  always_comb begin
    in_ready = (count < CNT_W'(N_WIN));
    pad      = (count == CNT_W'(N_WIN));
    last     = pad;
    beat     = pad || (in_valid && in_ready);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)    count <= '0;
    else if (beat) count <= pad ? '0 : count + 1'b1;
  end

endmodule
