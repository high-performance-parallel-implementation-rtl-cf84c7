// tb_ga_cm - checks the crossover module (m = 20): the p halves and the q
// halves of the two parents are crossed separately, each at its own random
// cut point taken from a model of its generator, and the children are the
// concatenations pz || qz.
module tb_ga_cm;
  import ga_ref_pkg::*;
  localparam int M = 20, H = 10;
  localparam logic [31:0] SP = 32'h1111_2222, SQ = 32'h3333_4445;
  logic clk = 0, rst_n = 0, step = 0;
  logic [M-1:0] w_a, w_b, z_a, z_b, ea, eb, mk;
  logic [31:0] mp, mq;
  int checks = 0, failures = 0;

  ga_cm #(.M(M), .SEEDP(SP), .SEEDQ(SQ)) dut (
    .clk(clk), .rst_n(rst_n), .step(step), .w_a(w_a), .w_b(w_b), .z_a(z_a), .z_b(z_b));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_a = '0; w_b = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    mp = SP; mq = SQ;
    for (int t = 0; t < 400; t++) begin
      w_a = M'($urandom);
      w_b = M'($urandom);
      #1;
      mk = {H'(cut_mask(mp, H)), H'(cut_mask(mq, H))};
      ea = (w_a & ~mk) | (w_b & mk);
      eb = (w_b & ~mk) | (w_a & mk);
      checks++;
      if (z_a != ea || z_b != eb) begin
        failures++;
        $display("FAIL t=%0d: z %h %h expected %h %h", t, z_a, z_b, ea, eb);
      end
      step = $urandom_range(0, 1);
      @(negedge clk);
      if (step) begin mp = lfsr_step(mp); mq = lfsr_step(mq); end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
