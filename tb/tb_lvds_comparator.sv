// tb_lvds_comparator: checks the LVDS comparator model. The + and - inputs
// are set to random millivolt values; the output must still show the old
// comparison 1 ps before DELAY_PS has elapsed and the new one 1 ps after.
module tb_lvds_comparator;
  timeunit 1ps; timeprecision 1ps;

  localparam int DELAY_PS = 500;
  int checks = 0, failures = 0;

  tdc_pkg::mv_t p, n;
  logic out;

  lvds_comparator #(.DELAY_PS(DELAY_PS)) dut (.p_mv(p), .n_mv(n), .out(out));

  task automatic check(input logic got, input logic exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic prev_exp, exp;
    p = 16'sd100; n = 16'sd800;
    #1000;
    check(out, 1'b0, "initial low");
    prev_exp = 1'b0;
    for (int k = 0; k < 60; k++) begin
      p = 16'($urandom_range(0, 2000));
      n = 16'($urandom_range(0, 2000));
      if (k == 10) begin p = 16'sd700; n = 16'sd700; end  // equal: output 0
      exp = (int'(p) > int'(n));
      #(DELAY_PS - 1);
      check(out, prev_exp, "before delay");
      #2;
      check(out, exp, "after delay");
      #(100 + $urandom_range(0, 300));
      prev_exp = exp;
    end
    // Negative inputs are compared as signed values.
    p = -16'sd50; n = 16'sd10;
    #(DELAY_PS + 1);
    check(out, 1'b0, "signed compare low");
    p = 16'sd10; n = -16'sd50;
    #(DELAY_PS + 1);
    check(out, 1'b1, "signed compare high");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
