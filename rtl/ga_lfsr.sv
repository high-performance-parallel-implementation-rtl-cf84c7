// ga_lfsr - 32-bit pseudo-random number generator of the genetic algorithm.
//
// Every random value in the design (tournament indices, crossover cut points,
// mutation words) comes from an instance of this generator. It is a Fibonacci
// linear feedback shift register for the polynomial r^32 + r^22 + r^2 + 1, as
// the source description specifies; the feedback bit is state[31] ^ state[21]
// ^ state[1] and is shifted in at the bottom. Each instance is given its own
// seed so that no two produce the same sequence.
//
// Interface: 'step' advances the register by one shift on the rising clock
// edge; 'r' is the current 32-bit state, valid for the whole generation. In the
// GA, 'step' is the SyncM enable, so one new value is produced per generation
// (the source: "Every k-th generation a random variable of 32 bits ... is
// produced by each LFSR"). Synchronous active-low reset loads SEED (never 0,
// which is the one state the register cannot leave). One shift per step and
// the Fibonacci form are this design's choices.
module ga_lfsr
  import ga_pkg::*;
#(
  parameter logic [LFSR_W-1:0] SEED = 32'hACE1_2468
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              step,
  output logic [LFSR_W-1:0] r
);

  always_ff @(posedge clk) begin
    if (!rst_n)    r <= SEED;
    else if (step) r <= lfsr_next(r);
  end

  initial assert (SEED != '0) else $error("ga_lfsr: SEED must be non-zero");

endmodule
