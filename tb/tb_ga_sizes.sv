// tb_ga_sizes - runs the genetic algorithm at the population sizes and
// chromosome widths of the published synthesis sweep: N = 4, 8, 16, 32, 64 at
// m = 20, and m = 22, 24, 26, 28 at N = 32, all with F3 tables and minimising.
// Each configuration is checked for 40 generations (see ga_size_check).
module tb_ga_sizes;
  logic clk = 0, rst_n = 0;
  localparam int NCFG = 9;
  logic done [NCFG];
  int   chk  [NCFG];
  int   fl   [NCFG];
  int checks, failures;

  always #5 clk = ~clk;

  ga_size_check #(.N(4),  .M(20)) c0 (.clk(clk), .rst_n(rst_n), .done(done[0]), .checks(chk[0]), .failures(fl[0]));
  ga_size_check #(.N(8),  .M(20)) c1 (.clk(clk), .rst_n(rst_n), .done(done[1]), .checks(chk[1]), .failures(fl[1]));
  ga_size_check #(.N(16), .M(20)) c2 (.clk(clk), .rst_n(rst_n), .done(done[2]), .checks(chk[2]), .failures(fl[2]));
  ga_size_check #(.N(32), .M(20)) c3 (.clk(clk), .rst_n(rst_n), .done(done[3]), .checks(chk[3]), .failures(fl[3]));
  ga_size_check #(.N(64), .M(20)) c4 (.clk(clk), .rst_n(rst_n), .done(done[4]), .checks(chk[4]), .failures(fl[4]));
  ga_size_check #(.N(32), .M(22)) c5 (.clk(clk), .rst_n(rst_n), .done(done[5]), .checks(chk[5]), .failures(fl[5]));
  ga_size_check #(.N(32), .M(24)) c6 (.clk(clk), .rst_n(rst_n), .done(done[6]), .checks(chk[6]), .failures(fl[6]));
  ga_size_check #(.N(32), .M(26)) c7 (.clk(clk), .rst_n(rst_n), .done(done[7]), .checks(chk[7]), .failures(fl[7]));
  ga_size_check #(.N(32), .M(28)) c8 (.clk(clk), .rst_n(rst_n), .done(done[8]), .checks(chk[8]), .failures(fl[8]));

  function automatic bit all_done();
    foreach (done[i]) if (!done[i]) return 0;
    return 1;
  endfunction

  task automatic report();
    checks = 0; failures = 0;
    foreach (chk[i]) begin checks += chk[i]; failures += fl[i]; end
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    report();
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    while (!all_done()) @(negedge clk);
    report();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
