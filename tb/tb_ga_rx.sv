// tb_ga_rx - checks the population register: reset to INIT, load only while
// 'load' is high, hold otherwise.
module tb_ga_rx;
  localparam int M = 20;
  localparam logic [M-1:0] INIT = 20'hA5C3E;
  logic clk = 0, rst_n = 0, load = 0;
  logic [M-1:0] x_next, x, model;
  int checks = 0, failures = 0;

  ga_rx #(.M(M), .INIT(INIT)) dut (.clk(clk), .rst_n(rst_n), .load(load), .x_next(x_next), .x(x));

  always #5 clk = ~clk;

  task automatic check(input string what);
    checks++;
    if (x !== model) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, x, model);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x_next = '0;
    @(negedge clk); @(negedge clk);
    model = INIT;
    check("reset");
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      load   = $urandom_range(0, 1);
      x_next = M'($urandom);
      @(negedge clk);
      if (load) model = x_next;
      check(load ? "load" : "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
