// tb_ga_top_full - end-to-end test of the genetic algorithm at its default
// size: N = 32 chromosomes of m = 20 bits, F3 tables, one mutation module;
// 100 generations minimising F3 followed by 20 maximising it, checked against
// a full model of the algorithm (see tb_ga_top_body.svh). The minimising
// phase must reach the global minimum, fitness 0.
module tb_ga_top_full;
  import ga_pkg::*;
  import ga_ref_pkg::*;
  localparam int N = 32, M = 20, P = 1, K = 120, KMAX = 20;
  localparam fitness_e FUNC = FIT_F3;
  localparam bit HAS_TARGET = 1;
  localparam longint TARGET = 0;
  localparam int A = a_width(FUNC, M / 2);
  logic clk = 0, rst_n = 0, gen_en;
  maxmin_e maxmin;
  logic [M-1:0] x [N];
  logic signed [A-1:0] y [N];
  logic [SYNC_W-1:0] sync_count;

  ga_top dut (
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
