// tb_ga_cmpq - checks single-point crossover of one variable (H = 10) against
// a model with its own copy of the cut-point generator: mask, both children,
// and that a child's head comes from its own parent and its tail from the
// other. Counts real cuts and the no-cut (all-zero mask) case; both must occur.
module tb_ga_cmpq;
  import ga_ref_pkg::*;
  localparam int H = 10;
  localparam logic [31:0] SEED = 32'hC0FF_EE11;
  logic clk = 0, rst_n = 0, step = 0;
  logic [H-1:0] p_a, p_b, z_a, z_b, mask, em;
  logic [31:0] model;
  int checks = 0, failures = 0, n_cut = 0, n_nocut = 0;

  ga_cmpq #(.H(H), .SEED(SEED)) dut (
    .clk(clk), .rst_n(rst_n), .step(step), .p_a(p_a), .p_b(p_b), .z_a(z_a), .z_b(z_b), .mask(mask));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    p_a = '0; p_b = '0;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    model = SEED;
    for (int t = 0; t < 400; t++) begin
      p_a = H'($urandom);
      p_b = H'($urandom);
      #1;
      em = H'(cut_mask(model, H));
      if (em == '0) n_nocut++; else n_cut++;
      checks++;
      if (mask != em) begin failures++; $display("FAIL t=%0d mask %b expected %b", t, mask, em); end
      for (int b = 0; b < H; b++) begin
        checks++;
        if (z_a[b] != (em[b] ? p_b[b] : p_a[b]) || z_b[b] != (em[b] ? p_a[b] : p_b[b])) begin
          failures++;
          $display("FAIL t=%0d bit %0d: z_a %b z_b %b p_a %b p_b %b mask %b", t, b, z_a, z_b, p_a, p_b, em);
        end
      end
      step = 1;
      @(negedge clk);
      model = lfsr_step(model);
      step = 0;
    end
    checks++;
    if (n_cut == 0 || n_nocut == 0) begin failures++; $display("FAIL cut=%0d nocut=%0d", n_cut, n_nocut); end
    $display("cuts=%0d no-cut=%0d", n_cut, n_nocut);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
