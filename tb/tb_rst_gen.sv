// tb_rst_gen -- checks the internal reset: held while I_RESET is high or
// Locked is low (asynchronously), released exactly HOLD + 3 clock edges
// after both clear, and re-asserted at once when lock is lost.
module tb_rst_gen;
  localparam int HOLD = 5;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;
  logic i_reset, locked, rst;

  rst_gen #(.HOLD(HOLD)) dut (.*);

  task automatic expect_rst(input logic v, input string what);
    checks++;
    if (rst !== v) begin
      failures++;
      $display("FAIL %s: rst=%b", what, rst);
    end
  endtask

  initial begin
    int n;
    i_reset = 1; locked = 0;
    repeat (3) @(posedge clk);
    #1 expect_rst(1, "during reset");
    @(negedge clk) i_reset = 0;
    repeat (10) @(posedge clk);
    #1 expect_rst(1, "not locked");
    @(negedge clk) locked = 1;
    n = 0;
    while (rst && n < 100) begin
      @(posedge clk); #1 n++;
    end
    checks++;
    if (n != HOLD + 3) begin
      failures++;
      $display("FAIL release after %0d cycles, expected %0d", n, HOLD + 3);
    end
    repeat (5) @(posedge clk);
    #1 expect_rst(0, "running");
    #2 locked = 0;
    #1 expect_rst(1, "lock lost (asynchronous)");
    #2 locked = 1;
    @(negedge clk) i_reset = 1;
    #1 expect_rst(1, "i_reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
