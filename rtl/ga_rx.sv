// ga_rx - population register RXj of the genetic algorithm.
//
// Holds chromosome x_j (M bits: px in the upper half, qx in the lower half).
// It loads the next-generation chromosome 'x_next' on the clock edge where the
// synchronisation module raises 'load'; otherwise it keeps its value, so the
// fitness pipeline sees a stable chromosome during the whole generation.
//
// The initial population is random in the source description. Here a
// synchronous active-low reset loads INIT, a per-register pseudo-random
// constant that the top level derives from the same seed hash as the LFSRs;
// this is the design's own choice of how to start from random values.
module ga_rx #(
  parameter int          M    = 20,
  parameter logic [M-1:0] INIT = '0
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic [M-1:0] x_next,
  output logic [M-1:0] x
);

  always_ff @(posedge clk) begin
    if (!rst_n)    x <= INIT;
    else if (load) x <= x_next;
  end

endmodule
