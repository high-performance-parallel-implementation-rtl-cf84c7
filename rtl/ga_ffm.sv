// ga_ffm - fitness function module FFMj.
//
// Computes y = gamma(alpha(px) + beta(qx)) for chromosome x = px || qx, the
// general two-variable form of the source description:
//   FFMDIV1/FFMDIV2  split x into px = x[M-1:M/2] and qx = x[M/2-1:0];
//   FFMROM1/FFMROM2  look up alpha(px) and beta(qx) (C bits, signed);
//   FFMADD           delta = alpha + beta (D = C + 1 bits, signed);
//   FFMROM3          looks up gamma(delta), addressed by the top GW bits of
//                    delta (GW = min(D, 16); the resolution of this table is
//                    this design's choice, see ga_pkg).
// Timing: the two ROM stages are registered, so y reflects x two clocks after
// x changes; the adder is combinational between them. Structure and latency
// follow the source; the word widths come from ga_pkg and are this design's.
module ga_ffm
  import ga_pkg::*;
#(
  parameter int       M    = 20,
  parameter fitness_e FUNC = FIT_F3,
  parameter int       H    = M / 2,
  parameter int       C    = c_width(FUNC, M / 2),
  parameter int       D    = d_width(FUNC, M / 2),
  parameter int       A    = a_width(FUNC, M / 2),
  parameter int       GW   = gamma_aw(FUNC, M / 2)
) (
  input  logic                clk,
  input  logic        [M-1:0] x,
  output logic signed [A-1:0] y
);

  logic        [H-1:0] px, qx;
  logic signed [C-1:0] alpha_q, beta_q;
  logic signed [D-1:0] delta;
  logic        [GW-1:0] gaddr;

  // FFMDIV1 / FFMDIV2
  assign px = x[M-1:H];
  assign qx = x[H-1:0];

  ga_rom #(.AW(H), .DW(C), .H(H), .FUNC(FUNC), .WHICH(ROM_ALPHA)) u_rom1 (
    .clk(clk), .addr(px), .q(alpha_q));
  ga_rom #(.AW(H), .DW(C), .H(H), .FUNC(FUNC), .WHICH(ROM_BETA)) u_rom2 (
    .clk(clk), .addr(qx), .q(beta_q));

  // FFMADD
  assign delta = D'(alpha_q) + D'(beta_q);
  assign gaddr = delta[D-1 -: GW];

  ga_rom #(.AW(GW), .DW(A), .H(H), .FUNC(FUNC), .WHICH(ROM_GAMMA)) u_rom3 (
    .clk(clk), .addr(gaddr), .q(y));

endmodule
