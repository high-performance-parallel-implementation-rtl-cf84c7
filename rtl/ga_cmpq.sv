// ga_cmpq - crossover submodule CMPQ1j / CMPQ2j: single-point crossover of one
// H-bit variable (H = m/2) of two parents.
//
// The mask s is the all-ones constant 2^H - 1 shifted right by a random
// amount, zeros entering from the top (CMPQMUX chooses among the shifts
// >>1 ... >>H). The selector is the top ceil(log2(H+1)) bits of the LFSR
// CMPQLFSR; code c selects the shift c + 1. Codes above H - 1, which the
// selector width allows but the H-input multiplexer has no input for, are
// taken as the last input (>>H, an all-zero mask); that rule is this
// design's choice. With ~s the head mask:
//   z_a = (~s & p_a) | (s & p_b)     head of parent a, tail of parent b
//   z_b = (~s & p_b) | (s & p_a)     head of parent b, tail of parent a
// Example (H = 10, shift 3): s = 0001111111, ~s = 1110000000.
//
// Timing: combinational from p_a/p_b; the LFSR steps on 'step' (the SyncM
// enable), drawing a new cut point every generation.
module ga_cmpq
  import ga_pkg::*;
#(
  parameter int                H    = 10,
  parameter logic [LFSR_W-1:0] SEED = 32'h0F1E_2D3C,
  parameter int                SW   = $clog2(H + 1)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         step,
  input  logic [H-1:0] p_a,
  input  logic [H-1:0] p_b,
  output logic [H-1:0] z_a,
  output logic [H-1:0] z_b,
  output logic [H-1:0] mask
);

  localparam logic [H-1:0] ONES = {H{1'b1}};  // 2^H - 1

  logic [LFSR_W-1:0] r;
  logic [SW-1:0]     code;

  ga_lfsr #(.SEED(SEED)) u_lfsr (.clk(clk), .rst_n(rst_n), .step(step), .r(r));

  assign code = r[LFSR_W-1 -: SW];

  always_comb begin
    // CMPQMUX over the inputs D0..D(H-1) = ONES >> 1 .. ONES >> H
    if (int'(code) < H) mask = ONES >> (int'(code) + 1);
    else                mask = ONES >> H;
    z_a = (~mask & p_a) | (mask & p_b);
    z_b = (~mask & p_b) | (mask & p_a);
  end

endmodule
