// ga_mm - mutation module MMj.
//
// x = z XOR r, where r is an M-bit random word: the top M bits of the 32-bit
// generator MMLFSR (M <= 32). As in the source, every bit where r is 1 is
// flipped; which P chromosomes pass through a mutation module is decided at
// the top level (the first P of the new population).
//
// Timing: combinational; the LFSR steps on 'step' (the SyncM enable). Taking
// the top M bits of the generator is this design's choice.
module ga_mm
  import ga_pkg::*;
#(
  parameter int                M    = 20,
  parameter logic [LFSR_W-1:0] SEED = 32'h6B8B_4567
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [M-1:0] z,
  output logic [M-1:0] x
);

  logic [LFSR_W-1:0] r;

  ga_lfsr #(.SEED(SEED)) u_lfsr (.clk(clk), .rst_n(rst_n), .step(step), .r(r));

  assign x = z ^ r[LFSR_W-1 -: M];

  initial assert (M <= LFSR_W) else $error("ga_mm: M must not exceed 32");

endmodule
