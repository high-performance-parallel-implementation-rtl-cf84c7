// ga_sm - selection module SMj: tournament between two random chromosomes.
//
// Two LFSRs (SMLFSR1, SMLFSR2) give two indices, the top log2(N) bits of
// their 32-bit outputs. SMMUX1 and SMMUX2 pick the fitness values y[i1] and
// y[i2]; the comparator SMCOMP computes A > B (signed). SMMUX4 picks the index
// of the larger value (i1 when A > B, else i2), SMMUX5 the index of the
// smaller (i2 when A > B, else i1), SMMUX6 chooses between them with
// SMMAXMIN (0: maximise, 1: minimise) and SMMUX3 outputs the winning
// chromosome w = x[winner]. On a tie the second candidate wins a maximising
// tournament and the first a minimising one.
//
// Timing: the selection is combinational; the LFSRs step on 'step' (the SyncM
// enable), so a new pair is drawn every generation. The mux structure follows
// the source's Fig. 3; the assignment of the mux inputs, the tie rule and the
// SMMAXMIN encoding are this design's reading of it. N must be a power of two.
module ga_sm
  import ga_pkg::*;
#(
  parameter int                N     = 32,
  parameter int                M     = 20,
  parameter int                A     = 22,
  parameter logic [LFSR_W-1:0] SEED1 = 32'h1357_9BDF,
  parameter logic [LFSR_W-1:0] SEED2 = 32'h2468_ACE0,
  parameter int                LOGN  = $clog2(N)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                step,
  input  maxmin_e             maxmin,
  input  logic signed [A-1:0] y [N],
  input  logic        [M-1:0] x [N],
  output logic        [M-1:0] w,
  output logic     [LOGN-1:0] sel_idx
);

  logic [LFSR_W-1:0] r1, r2;
  logic [LOGN-1:0]   i1, i2, i_max, i_min;
  logic signed [A-1:0] ya, yb;
  logic              a_gt_b;

  ga_lfsr #(.SEED(SEED1)) u_lfsr1 (.clk(clk), .rst_n(rst_n), .step(step), .r(r1));
  ga_lfsr #(.SEED(SEED2)) u_lfsr2 (.clk(clk), .rst_n(rst_n), .step(step), .r(r2));

  assign i1 = r1[LFSR_W-1 -: LOGN];
  assign i2 = r2[LFSR_W-1 -: LOGN];

  always_comb begin
    ya      = y[i1];                      // SMMUX1
    yb      = y[i2];                      // SMMUX2
    a_gt_b  = ya > yb;                    // SMCOMP
    i_max   = a_gt_b ? i1 : i2;           // SMMUX4
    i_min   = a_gt_b ? i2 : i1;           // SMMUX5
    sel_idx = (maxmin == SEL_MIN) ? i_min : i_max;  // SMMUX6
    w       = x[sel_idx];                 // SMMUX3
  end

  initial assert (N == 2**LOGN) else $error("ga_sm: N must be a power of two");

endmodule
