// ga_cm - crossover module CMj: crosses the pair of selected chromosomes
// (w_a, w_b) = (w_{2i-1}, w_{2i}) into two children (z_a, z_b).
//
// CMDIV1..4 split each parent into its p half (upper M/2 bits) and q half
// (lower M/2 bits). CMPQ1 crosses the two p halves and CMPQ2 the two q halves,
// each with its own random cut point, so variables are only ever crossed with
// the same variable of the other parent. CMCCAT1/2 concatenate the results:
// z_a = pz_a || qz_a, z_b = pz_b || qz_b. For a one-variable problem only the
// lower half carries data and CMPQ1 crosses zeros.
//
// Timing: combinational; the two LFSRs step on 'step'. Structure follows the
// source's Fig. 4.
module ga_cm
  import ga_pkg::*;
#(
  parameter int                M     = 20,
  parameter logic [LFSR_W-1:0] SEEDP = 32'h3C3C_A5A5,
  parameter logic [LFSR_W-1:0] SEEDQ = 32'h5A5A_C3C3
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [M-1:0] w_a,
  input  logic [M-1:0] w_b,
  output logic [M-1:0] z_a,
  output logic [M-1:0] z_b
);

  localparam int H = M / 2;

  logic [H-1:0] pz_a, pz_b, qz_a, qz_b;

  ga_cmpq #(.H(H), .SEED(SEEDP)) u_cmpq1 (
    .clk(clk), .rst_n(rst_n), .step(step),
    .p_a(w_a[M-1:H]), .p_b(w_b[M-1:H]), .z_a(pz_a), .z_b(pz_b), .mask());
  ga_cmpq #(.H(H), .SEED(SEEDQ)) u_cmpq2 (
    .clk(clk), .rst_n(rst_n), .step(step),
    .p_a(w_a[H-1:0]), .p_b(w_b[H-1:0]), .z_a(qz_a), .z_b(qz_b), .mask());

  assign z_a = {pz_a, qz_a};  // CMCCAT1
  assign z_b = {pz_b, qz_b};  // CMCCAT2

endmodule
