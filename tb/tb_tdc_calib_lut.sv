// tb_tdc_calib_lut: checks the calibration table (TAPS=64, 15 ps). After
// reset, code k must read k*15+7 one clock later; written entries must read
// back their new value while others keep the reset value; a code above
// TAPS reads the last entry. The second read port reads the table in the
// opposite order at the same time and must agree with it.
module tb_tdc_calib_lut;
  timeunit 1ps; timeprecision 1ps;

  localparam int TAPS = 64;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1, we = 0;
  logic [tdc_pkg::FINE_W-1:0] waddr = '0, code = '0, code_b = '0;
  logic [tdc_pkg::PS_W-1:0]   wdata = '0, ps, ps_b;
  int model [TAPS+1];

  tdc_calib_lut #(.TAPS(TAPS), .ELEM_PS(15)) dut (
    .clk(clk), .rst(rst), .we(we), .waddr(waddr), .wdata(wdata), .code(code), .ps(ps), .code_b(code_b), .ps_b(ps_b));
  always #2500 clk = ~clk;

  task automatic check(input int got, input int e, input string what);
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, e);
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k <= TAPS; k++) model[k] = 15 * k + 7;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int k = 0; k <= TAPS; k++) begin
      code = 9'(k);
      @(negedge clk);
      check(ps, model[k], $sformatf("reset table %0d", k));
    end
    // Write 20 random entries.
    for (int n = 0; n < 20; n++) begin
      int a, d;
      a = $urandom_range(0, TAPS);
      d = $urandom_range(0, 65535);
      we = 1; waddr = 9'(a); wdata = 16'(d);
      model[a] = d;
      @(negedge clk);
    end
    we = 0;
    for (int k = 0; k <= TAPS; k++) begin
      code = 9'(k);
      code_b = 9'(TAPS - k);
      @(negedge clk);
      check(ps, model[k], $sformatf("after writes %0d", k));
      check(ps_b, model[TAPS - k], $sformatf("port b after writes %0d", TAPS - k));
    end
    code = 9'(TAPS + 5);
    @(negedge clk);
    check(ps, model[TAPS], "out of range code");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
