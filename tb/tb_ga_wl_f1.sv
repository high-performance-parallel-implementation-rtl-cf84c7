// tb_ga_wl_f1 - workload: minimising the one-variable function
// F1 = x^3 - 15x^2 + 50 with N = 32 chromosomes of m = 26 bits (qx is a signed
// 13-bit number, -4096 ... 4095) for 100 generations. The minimum of the range,
// f(-4096) = -68,971,200,462 (about -6.9e10), must be reached; the fitness
// table resolution at this width is 2^24, so the target is that value rounded
// down to a multiple of 2^24. Every generation is also checked against the
// full model (see tb_ga_top_body.svh).
module tb_ga_wl_f1;
  import ga_pkg::*;
  import ga_ref_pkg::*;
  localparam int N = 32, M = 26, P = 1, K = 100, KMAX = 0;
  localparam fitness_e FUNC = FIT_F1;
  localparam bit HAS_TARGET = 1;
  localparam longint TARGET = fitness(0, longint'(26'h0001000), 13);
  localparam int A = a_width(FUNC, M / 2);
  logic clk = 0, rst_n = 0, gen_en;
  maxmin_e maxmin;
  logic [M-1:0] x [N];
  logic signed [A-1:0] y [N];
  logic [SYNC_W-1:0] sync_count;

  ga_top #(.N(N), .M(M), .FUNC(FUNC), .P(P)) dut (
    .clk(clk), .rst_n(rst_n), .maxmin(maxmin), .x(x), .y(y), .gen_en(gen_en), .sync_count(sync_count));

`include "tb_ga_top_body.svh"

  // watchdog
  initial begin
    repeat (3 * K + 100) @(posedge clk);
    failures++;
    $display("watchdog expired after %0d generations", n_gen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
