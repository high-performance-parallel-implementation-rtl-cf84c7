// tb_ga_wl_f3 - workload: minimising F3 = sqrt(x^2 + y^2), x, y signed
// 10-bit numbers (m = 20), N = 64, 100 generations. The minimum, 0, must be
// reached. Every generation is also checked against the full model (see
// tb_ga_top_body.svh).
module tb_ga_wl_f3;
  import ga_pkg::*;
  import ga_ref_pkg::*;
  localparam int N = 64, M = 20, P = 1, K = 100, KMAX = 0;
  localparam fitness_e FUNC = FIT_F3;
  localparam bit HAS_TARGET = 1;
  localparam longint TARGET = 0;
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
