// tb_coarse_counter: checks that the coarse counter is 0 after reset,
// counts every clock edge, restarts on a second reset and wraps (W=8).
module tb_coarse_counter;
  timeunit 1ps; timeprecision 1ps;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  logic [7:0] count;
  int exp;

  coarse_counter #(.W(8)) dut (.clk(clk), .rst(rst), .count(count));
  always #2500 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int got, input int e, input string what);
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, e);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    @(negedge clk);
    check(count, 0, "reset");
    rst = 0;
    exp = 0;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      exp = (exp + 1) % 256;
      check(count, exp, "count");
    end
    rst = 1;
    @(negedge clk);
    check(count, 0, "second reset");
    rst = 0;
    repeat (5) @(negedge clk);
    check(count, 5, "after second reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
