// tb_carry_chain_delay_line: checks the delay-line model. A uniform line
// (TAPS=64, 15 ps) gets rising and falling edges; 15*k+7 ps after an edge
// exactly the first k taps must show the new level, forming a clean
// thermometer code. A second line with SPREAD_PS=3 is scanned in 1 ps
// steps to time every tap: each element delay must lie within 15+-3 ps and
// the delays must not all be equal. A third line with SKEW_PS=40 must show
// a bubble: tap 3 still old while taps 0-2 and 4 already hold the new level.
module tb_carry_chain_delay_line;
  timeunit 1ps; timeprecision 1ps;

  localparam int TAPS = 64;
  localparam int ELEM = 15;
  int checks = 0, failures = 0;

  logic            stop, stop2, stop3;
  logic [TAPS-1:0] taps, taps2, taps3;

  carry_chain_delay_line #(.TAPS(TAPS), .ELEM_PS(ELEM)) dut (.stop(stop), .taps(taps));
  carry_chain_delay_line #(.TAPS(TAPS), .ELEM_PS(ELEM), .SPREAD_PS(3)) dut2 (.stop(stop2), .taps(taps2));
  carry_chain_delay_line #(.TAPS(TAPS), .ELEM_PS(ELEM), .SKEW_PS(40)) dut3 (.stop(stop3), .taps(taps3));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #10_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [TAPS-1:0] exp;
    int   arrive [TAPS];
    int   t0, dmin, dmax;
    stop = 0; stop2 = 0; stop3 = 0;
    #5000;
    check(taps == '0, "settled low");
    for (int e = 0; e < 8; e++) begin
      logic lvl;
      int   k;
      lvl = (e % 2 == 0);
      k = $urandom_range(0, TAPS - 1);
      stop = lvl;
      #(ELEM * k + 7);
      for (int i = 0; i < TAPS; i++) exp[i] = (i < k) ? lvl : !lvl;
      check(taps == exp, $sformatf("thermometer k=%0d lvl=%0b", k, lvl));
      #(ELEM * TAPS + 100);
      check(taps == {TAPS{lvl}}, "fully propagated");
    end

    // Time every tap of the non-uniform line.
    for (int i = 0; i < TAPS; i++) arrive[i] = -1;
    t0 = int'($time);
    stop2 = 1;
    for (int t = 1; t < 2 * ELEM * TAPS; t++) begin
      #1;
      for (int i = 0; i < TAPS; i++) if (arrive[i] < 0 && taps2[i]) arrive[i] = int'($time) - t0;
    end
    dmin = 1000; dmax = 0;
    for (int i = 0; i < TAPS; i++) begin
      int d;
      d = (i == 0) ? arrive[0] : arrive[i] - arrive[i-1];
      if (d < dmin) dmin = d;
      if (d > dmax) dmax = d;
    end
    check(dmin >= ELEM - 3 && dmax <= ELEM + 3, $sformatf("spread within bounds %0d..%0d", dmin, dmax));
    check(dmax > dmin, "delays not uniform");
    // Routing skew: 82 ps after the edge, five elements have switched but
    // tap 3 reaches its flip-flop 40 ps late.
    stop3 = 1;
    #(ELEM * 5 + 7);
    check(taps3[5:0] == 6'b010111, $sformatf("skew bubble %b", taps3[5:0]));
    #(ELEM * 5);
    check(taps3[7:0] == 8'hff, $sformatf("bubble gone %b", taps3[7:0]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
