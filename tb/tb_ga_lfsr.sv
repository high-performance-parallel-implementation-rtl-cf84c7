// tb_ga_lfsr - checks the 32-bit LFSR against an independent model: the
// feedback is the parity of the state masked with the tap positions 32, 22
// and 2 (0x8020_0002). Checks the reset value, that the state holds while
// 'step' is low, and 300 consecutive steps.
module tb_ga_lfsr;
  localparam logic [31:0] SEED = 32'hDEAD_BEEF;
  logic clk = 0, rst_n = 0, step = 0;
  logic [31:0] r, model;
  int checks = 0, failures = 0;

  ga_lfsr #(.SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .step(step), .r(r));

  always #5 clk = ~clk;

  task automatic check(input logic [31:0] exp, input string what);
    checks++;
    if (r !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, r, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk);
    check(SEED, "reset value");
    rst_n = 1;
    model = SEED;
    repeat (3) @(negedge clk);
    check(SEED, "hold without step");
    for (int i = 0; i < 300; i++) begin
      step = ($urandom_range(0, 3) != 0);
      @(negedge clk);
      if (step) model = {model[30:0], ^(model & 32'h8020_0002)};
      check(model, "step sequence");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
