// tb_ga_syncm - checks the synchronisation module: after reset the counter
// runs 0, 1, 2, 0, ... and 'enable' is high exactly when it is 2, i.e. once
// every three clocks, the generation period of the design.
module tb_ga_syncm;
  logic clk = 0, rst_n = 0, enable;
  logic [1:0] count;
  int checks = 0, failures = 0, last_en = -1, n_en = 0;

  ga_syncm dut (.clk(clk), .rst_n(rst_n), .enable(enable), .count(count));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < 300; c++) begin
      checks++;
      if (count != 2'(c % 3) || enable != (c % 3 == 2)) begin
        failures++;
        $display("FAIL cycle %0d: count %0d enable %0d", c, count, enable);
      end
      if (enable) begin
        if (last_en >= 0) begin
          checks++;
          if (c - last_en != 3) begin failures++; $display("FAIL enable period %0d", c - last_en); end
        end
        last_en = c;
        n_en++;
      end
      @(negedge clk);
    end
    checks++;
    if (n_en != 100) begin failures++; $display("FAIL %0d enables in 300 clocks", n_en); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
