// tb_ga_mm - checks the mutation module (m = 20): x = z XOR (top 20 bits of
// the generator), with the generator modelled independently and stepping only
// when 'step' is high.
module tb_ga_mm;
  import ga_ref_pkg::*;
  localparam int M = 20;
  localparam logic [31:0] SEED = 32'h7777_1234;
  logic clk = 0, rst_n = 0, step = 0;
  logic [M-1:0] z, x;
  logic [31:0] model;
  int checks = 0, failures = 0;

  ga_mm #(.M(M), .SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .step(step), .z(z), .x(x));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    z = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    model = SEED;
    for (int t = 0; t < 300; t++) begin
      z = M'($urandom);
      #1;
      checks++;
      if (x != (z ^ model[31:12])) begin
        failures++;
        $display("FAIL t=%0d: x %h expected %h", t, x, z ^ model[31:12]);
      end
      step = $urandom_range(0, 1);
      @(negedge clk);
      if (step) model = lfsr_step(model);
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
