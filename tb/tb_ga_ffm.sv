// tb_ga_ffm - checks the fitness function module for the three benchmark
// functions (m = 20) against the reference formulas, and its two-clock
// latency: one clock after x changes y still shows the old fitness, two
// clocks after it shows the new one.
module tb_ga_ffm;
  import ga_pkg::*;
  import ga_ref_pkg::*;
  localparam int M = 20;
  logic clk = 0;
  logic [M-1:0] x;
  logic signed [30:0] y1;
  logic signed [15:0] y2;
  logic signed [21:0] y3;
  int checks = 0, failures = 0;

  ga_ffm #(.M(M), .FUNC(FIT_F1)) u1 (.clk(clk), .x(x), .y(y1));
  ga_ffm #(.M(M), .FUNC(FIT_F2)) u2 (.clk(clk), .x(x), .y(y2));
  ga_ffm #(.M(M), .FUNC(FIT_F3)) u3 (.clk(clk), .x(x), .y(y3));

  always #5 clk = ~clk;

  task automatic cmp(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (x=%h)", what, got, exp, x);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [M-1:0] old;
    x = '0;
    repeat (3) @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      old = x;
      case (i)
        0: x = 20'h00000;
        1: x = 20'h003FF;        // qx = -1
        2: x = 20'h80200;        // px = qx = -512
        3: x = 20'hFFFFF;
        default: x = M'($urandom);
      endcase
      @(negedge clk);
      cmp(y1, fitness(0, old, M / 2), "F1 after one clock (old)");
      cmp(y2, fitness(1, old, M / 2), "F2 after one clock (old)");
      cmp(y3, fitness(2, old, M / 2), "F3 after one clock (old)");
      @(negedge clk);
      cmp(y1, fitness(0, x, M / 2), "F1");
      cmp(y2, fitness(1, x, M / 2), "F2");
      cmp(y3, fitness(2, x, M / 2), "F3");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
