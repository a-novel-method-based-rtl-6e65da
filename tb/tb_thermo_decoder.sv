// tb_thermo_decoder: checks the bubble-tolerant decoder (TAPS=64, RUN=4).
// Clean thermometer codes of both polarities must decode to their
// transition index; vectors with bubbles (single wrong taps or pairs of
// them just behind the transition, as in the classic meta-stability
// picture) must decode to the same index as the clean vector.
module tb_thermo_decoder;
  timeunit 1ps; timeprecision 1ps;

  localparam int TAPS = 64;
  int checks = 0, failures = 0;

  logic [TAPS-1:0] vec;
  logic            new_level;
  logic [tdc_pkg::FINE_W-1:0] code;

  thermo_decoder #(.TAPS(TAPS)) dut (.vec(vec), .new_level(new_level), .code(code));

  task automatic check(input int got, input int e, input string what);
    checks++;
    if (got != e) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d (vec=%h)", what, got, e, vec);
    end
  endtask

  // Clean code: taps below k hold the new level.
  function automatic logic [TAPS-1:0] thermo(input int k, input logic lvl);
    logic [TAPS-1:0] v;
    for (int i = 0; i < TAPS; i++) v[i] = (i < k) ? lvl : !lvl;
    return v;
  endfunction

  initial begin
    #1_000_000;
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Every clean code, both polarities.
    for (int k = 0; k <= TAPS; k++) begin
      for (int l = 0; l < 2; l++) begin
        new_level = 1'(l);
        vec = thermo(k, new_level);
        #1;
        check(code, k, "clean");
      end
    end
    // The bubble pattern of the meta-stability example: the clean vector
    // ...0000000111111111111 and the wrong one ...0000000100101111111
    // (tap 0 at the right) must give the same code.
    new_level = 1'b1;
    vec = '0; vec[11:0] = 12'b1111_1111_1111;
    #1;
    check(code, 12, "example clean");
    vec = '0; vec[11:0] = 12'b1001_0111_1111;
    #1;
    check(code, 12, "example with bubbles");
    // Random transitions with one or two bubbles behind them.
    for (int n = 0; n < 400; n++) begin
      int k, b1, b2;
      k = $urandom_range(6, TAPS);
      new_level = 1'($urandom_range(0, 1));
      vec = thermo(k, new_level);
      b1 = k - 2 - $urandom_range(0, 3);   // never the last tap before k
      vec[b1] = !new_level;
      if (n % 2 == 1) begin
        b2 = b1 - 1;                        // a pair of bubbles
        vec[b2] = !new_level;
      end
      #1;
      check(code, k, "bubbled");
    end
    // A run of RUN old-level taps inside the new region ends the edge there.
    new_level = 1'b1;
    vec = thermo(40, 1'b1);
    vec[23:20] = 4'b0000;
    #1;
    check(code, 20, "long run ends edge");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
