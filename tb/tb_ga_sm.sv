// tb_ga_sm - checks the tournament selection (N = 8) against a model with its
// own copies of the two index generators: for random fitness values and
// chromosomes, the winner must be the candidate with the larger fitness when
// maximising and the smaller when minimising; both modes and both comparator
// outcomes are counted and must occur.
module tb_ga_sm;
  import ga_pkg::*;
  import ga_ref_pkg::*;
  localparam int N = 8, M = 12, A = 10, LOGN = 3;
  localparam logic [31:0] S1 = 32'h1234_5678, S2 = 32'h9ABC_DEF1;
  logic clk = 0, rst_n = 0, step = 0;
  maxmin_e maxmin;
  logic signed [A-1:0] y [N];
  logic [M-1:0] x [N];
  logic [M-1:0] w;
  logic [LOGN-1:0] sel_idx;
  logic [31:0] m1, m2;
  int checks = 0, failures = 0, n_max = 0, n_min = 0, n_gt = 0, n_le = 0;

  ga_sm #(.N(N), .M(M), .A(A), .SEED1(S1), .SEED2(S2)) dut (
    .clk(clk), .rst_n(rst_n), .step(step), .maxmin(maxmin), .y(y), .x(x), .w(w), .sel_idx(sel_idx));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int i1, i2, win;
    maxmin = SEL_MAX;
    for (int j = 0; j < N; j++) begin y[j] = '0; x[j] = '0; end
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    m1 = S1; m2 = S2;
    for (int t = 0; t < 400; t++) begin
      for (int j = 0; j < N; j++) begin
        y[j] = A'($urandom_range(0, 7) * 64 - 256 + $urandom_range(0, 3));
        x[j] = M'($urandom);
      end
      maxmin = maxmin_e'($urandom_range(0, 1));
      #1;
      i1 = int'(m1[31:29]);
      i2 = int'(m2[31:29]);
      if (y[i1] > y[i2]) n_gt++; else n_le++;
      if (maxmin == SEL_MAX) begin win = (y[i1] > y[i2]) ? i1 : i2; n_max++; end
      else                   begin win = (y[i1] > y[i2]) ? i2 : i1; n_min++; end
      checks++;
      if (sel_idx != LOGN'(win) || w != x[win]) begin
        failures++;
        $display("FAIL t=%0d: idx %0d/%0d y %0d/%0d mode %0d got idx %0d expected %0d",
                 t, i1, i2, y[i1], y[i2], maxmin, sel_idx, win);
      end
      // winner's fitness is the best of the two candidates
      checks++;
      if ((maxmin == SEL_MAX && y[sel_idx] < y[i1]) || (maxmin == SEL_MIN && y[sel_idx] > y[i2])) begin
        failures++;
        $display("FAIL t=%0d: winner is not the fitter candidate", t);
      end
      step = $urandom_range(0, 1);
      @(negedge clk);
      if (step) begin m1 = lfsr_step(m1); m2 = lfsr_step(m2); end
      step = 0;
    end
    checks++; if (n_max == 0 || n_min == 0) begin failures++; $display("FAIL a mode never used"); end
    checks++; if (n_gt == 0 || n_le == 0) begin failures++; $display("FAIL a comparator outcome never seen"); end
    $display("modes max=%0d min=%0d, comparator A>B=%0d A<=B=%0d", n_max, n_min, n_gt, n_le);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
