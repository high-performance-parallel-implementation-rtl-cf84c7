// ga_size_check - helper of tb_ga_sizes: one ga_top instance of size N x M
// with F3 tables, minimising, checked for G generations. At every gen_en
// pulse it checks the three-clock period and every fitness value against the
// reference formula, and at the end that the population changed and the best
// fitness did not get worse than in the first generation. 'done' rises when
// the G generations have been checked; 'checks' and 'failures' count results.
module ga_size_check
  import ga_pkg::*;
  import ga_ref_pkg::*;
#(
  parameter int N = 4,
  parameter int M = 20,
  parameter int G = 40
) (
  input  logic clk,
  input  logic rst_n,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int A = a_width(FIT_F3, M / 2);
  logic [M-1:0] x [N];
  logic signed [A-1:0] y [N];
  logic gen_en;
  logic [SYNC_W-1:0] sync_count;

  ga_top #(.N(N), .M(M), .FUNC(FIT_F3), .P(1)) dut (
    .clk(clk), .rst_n(rst_n), .maxmin(SEL_MIN), .x(x), .y(y), .gen_en(gen_en), .sync_count(sync_count));

  initial begin
    int cyc, last, gen;
    longint best, best0;
    logic [M-1:0] x0;
    logic changed;
    done = 0; checks = 0; failures = 0;
    cyc = 0; last = -1; gen = 0; changed = 0; best0 = 0; x0 = '0;
    @(posedge rst_n);
    @(negedge clk);
    cyc = 1;  // reset was released one clock edge ago
    while (gen < G) begin
      if (gen_en) begin
        checks++;
        if ((last < 0 && cyc != 2) || (last >= 0 && cyc - last != 3)) begin
          failures++; $display("FAIL N=%0d M=%0d: gen_en at clock %0d (previous %0d)", N, M, cyc, last);
        end
        last = cyc;
        best = 64'h7FFF_FFFF_FFFF_FFFF;
        for (int j = 0; j < N; j++) begin
          longint e;
          e = fitness(2, longint'(x[j]), M / 2);
          if (e < best) best = e;
          checks++;
          if (longint'(y[j]) != e) begin
            failures++; $display("FAIL N=%0d M=%0d gen %0d: y[%0d] = %0d expected %0d", N, M, gen, j, y[j], e);
          end
        end
        if (gen == 0) begin best0 = best; x0 = x[N-1]; end
        else if (x[N-1] != x0) changed = 1;
        gen++;
      end
      @(negedge clk);
      cyc++;
    end
    checks++;
    if (!changed) begin failures++; $display("FAIL N=%0d M=%0d: population never changed", N, M); end
    checks++;
    if (best > best0) begin failures++; $display("FAIL N=%0d M=%0d: best fitness %0d worse than initial %0d", N, M, best, best0); end
    $display("N=%0d M=%0d: best fitness in generation %0d: %0d (generation 1: %0d)", N, M, G, best, best0);
    done = 1;
  end
endmodule
