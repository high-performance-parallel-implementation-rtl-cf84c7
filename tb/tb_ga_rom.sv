// tb_ga_rom - checks three fitness tables with a one-clock registered read:
// the F1 beta table (signed cubic), the F2 alpha table (8 * unsigned px) and
// the F3 gamma table (square root of the bucket value, 6-bit buckets). The
// expected values are computed here from the formulas, not from the package.
module tb_ga_rom;
  import ga_pkg::*;
  localparam int H = 10;
  logic clk = 0;
  logic [H-1:0]  a1, a2;
  logic [15:0]   a3;
  logic signed [29:0] q1;
  logic signed [14:0] q2;
  logic signed [21:0] q3;
  int checks = 0, failures = 0;

  ga_rom #(.AW(H),  .DW(30), .H(H), .FUNC(FIT_F1), .WHICH(ROM_BETA))  u1 (.clk(clk), .addr(a1), .q(q1));
  ga_rom #(.AW(H),  .DW(15), .H(H), .FUNC(FIT_F2), .WHICH(ROM_ALPHA)) u2 (.clk(clk), .addr(a2), .q(q2));
  ga_rom #(.AW(16), .DW(22), .H(H), .FUNC(FIT_F3), .WHICH(ROM_GAMMA)) u3 (.clk(clk), .addr(a3), .q(q3));

  always #5 clk = ~clk;

  function automatic longint root(longint v);
    longint r = 0;
    while ((r + 1) * (r + 1) <= v) r++;
    return r;
  endfunction

  task automatic cmp(input longint got, input longint exp, input string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e1, e2, e3, v;
    a1 = 0; a2 = 0; a3 = 0;
    @(negedge clk);
    for (int i = 0; i < 300; i++) begin
      a1 = (i < 4) ? H'(i) : H'($urandom);
      a2 = (i == 4) ? '1 : H'($urandom);
      a3 = (i < 8) ? 16'(i) : 16'($urandom_range(0, 16'h7FFF));
      v  = longint'($signed(a1));
      e1 = v * v * v - 15 * v * v + 50;
      e2 = 8 * longint'(a2);
      e3 = root(longint'(a3) * 64);
      @(posedge clk);
      #1;
      cmp(q1, e1, "F1 beta");
      cmp(q2, e2, "F2 alpha");
      cmp(q3, e3, "F3 gamma");
      // latency: output must not follow a new address before the next edge
      a1 = a1 + 1'b1;
      #1;
      cmp(q1, e1, "F1 beta holds until the clock edge");
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
