// tb_tdc_channel: checks one TDC channel at its default size (384 taps,
// 15 ps, 5 ns clock). The testbench plays the delay line itself: on the
// falling clock edge before a sampling edge it drives the tap vector an
// edge would leave k element delays before that sampling edge (optionally
// with bubbles behind the transition), then the settled vector. Each hit
// must come exactly four clocks after the sampling edge, with the right
// polarity, fine code and time stamp coarse*5000 - (15k+7). Also checked:
// an edge caught only one period late (fine code above one period), a
// reprogrammed calibration entry, short pulses whose two edges fall in the
// same clock period (trailing edge on hit, leading edge on hit_pre, once,
// even when the next sample still shows the pulse further down the line),
// and that no other hits appear.
module tb_tdc_channel;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  localparam int TAPS = 384, ELEM = 15, CLK = 5000;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  logic [TAPS-1:0] taps = '0;
  logic [31:0] cyc = '0;
  logic cal_we = 0;
  logic [FINE_W-1:0] cal_addr = '0;
  logic [PS_W-1:0]   cal_data = '0;
  tdc_hit_t hit, hit_pre;

  tdc_channel #(.TAPS(TAPS), .ELEM_PS(ELEM), .CLK_PS(CLK)) dut (
    .clk(clk), .rst(rst), .taps(taps), .coarse(cyc),
    .cal_we(cal_we), .cal_addr(cal_addr), .cal_data(cal_data), .hit(hit), .hit_pre(hit_pre));

  always #(CLK / 2) clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  typedef struct { longint due; bit rising; int fine; longint ts; bit pre; int fine_b; longint ts_b; } exp_t;
  exp_t q[$];
  int late_seen = 0, bubble_seen = 0, cal_seen = 0, short_seen = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at cycle %0d", what, cyc);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Compare every hit with the expected queue.
  always @(negedge clk) begin
    if (!rst && hit.valid) begin
      if (q.size() == 0) begin
        check(0, "unexpected hit");
      end else begin
        exp_t e;
        e = q.pop_front();
        check(longint'(cyc) == e.due, $sformatf("latency: at %0d expected %0d", cyc, e.due));
        check(hit.rising == e.rising, "polarity");
        check(int'(hit.fine) == e.fine, $sformatf("fine %0d expected %0d", hit.fine, e.fine));
        check(longint'(hit.ts) == e.ts, $sformatf("ts %0d expected %0d", hit.ts, e.ts));
        check(hit_pre.valid == e.pre, "hit_pre valid");
        if (e.pre && hit_pre.valid) begin
          check(hit_pre.rising == !e.rising, "hit_pre polarity");
          check(int'(hit_pre.fine) == e.fine_b, $sformatf("pre fine %0d expected %0d", hit_pre.fine, e.fine_b));
          check(longint'(hit_pre.ts) == e.ts_b, "pre ts");
        end
      end
    end
    if (!rst && hit_pre.valid && !hit.valid) check(0, "hit_pre without hit");
  end

  function automatic logic [TAPS-1:0] thermo(input int k, input logic lvl);
    logic [TAPS-1:0] v;
    for (int i = 0; i < TAPS; i++) v[i] = (i < k) ? lvl : !lvl;
    return v;
  endfunction

  logic lvl = 0;

  // One edge, k elements before the next sampling edge.
  task automatic edge_at(input int k, input bit bubbles, input int cal_ps);
    exp_t e;
    @(negedge clk);
    lvl = !lvl;
    taps = thermo(k, lvl);
    if (bubbles && k > 8) begin
      taps[k-2] = !lvl;
      taps[k-5] = !lvl;
      taps[k-6] = !lvl;
      bubble_seen++;
    end
    e.pre = 0;
    e.due = longint'(cyc) + 5;
    e.rising = lvl;
    e.fine = k;
    e.ts = longint'(cyc) * CLK - ((cal_ps >= 0) ? cal_ps : (ELEM * k + ELEM / 2));
    q.push_back(e);
    @(negedge clk);
    taps = {TAPS{lvl}};
    repeat (7) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (6) @(negedge clk);
    for (int n = 0; n < 40; n++) edge_at($urandom_range(0, CLK / ELEM), n % 3 == 2, -1);
    // An edge that reaches tap 0 only after the sampling edge is seen one
    // period later with more than a period's worth of taps.
    begin
      exp_t e;
      int k;
      @(negedge clk);
      lvl = !lvl;
      taps = {TAPS{!lvl}};
      @(negedge clk);
      k = CLK / ELEM + 1;
      taps = thermo(k, lvl);
      e.pre = 0;
      e.due = longint'(cyc) + 5; e.rising = lvl; e.fine = k;
      e.ts = longint'(cyc) * CLK - (ELEM * k + ELEM / 2);
      q.push_back(e);
      late_seen++;
      @(negedge clk);
      taps = {TAPS{lvl}};
      repeat (7) @(negedge clk);
    end
    // Reprogram one calibration entry and hit it.
    cal_we = 1; cal_addr = 9'd100; cal_data = 16'd1234;
    @(negedge clk);
    cal_we = 0;
    cal_seen++;
    edge_at(100, 0, 1234);
    edge_at(101, 0, -1);
    // Short pulses: both edges inside one period. The sample holds the
    // current level for a taps, the other level up to b, then the current
    // level again; the next sample shows the same pulse one period on.
    for (int n = 0; n < 20; n++) begin
      exp_t e;
      int a, b, p;
      a = $urandom_range(2, CLK / ELEM - 2);
      b = a + $urandom_range(5, 300);
      if (b > TAPS - 5) b = TAPS - 5;
      p = CLK / ELEM;
      @(negedge clk);
      for (int i = 0; i < TAPS; i++) taps[i] = (i >= a && i < b) ? !lvl : lvl;
      e.pre = 1; e.due = longint'(cyc) + 5; e.rising = lvl; e.fine = a;
      e.ts = longint'(cyc) * CLK - (ELEM * a + ELEM / 2);
      e.fine_b = b; e.ts_b = longint'(cyc) * CLK - (ELEM * b + ELEM / 2);
      q.push_back(e);
      short_seen++;
      @(negedge clk);
      for (int i = 0; i < TAPS; i++) taps[i] = (i >= a + p && i < b + p) ? !lvl : lvl;
      @(negedge clk);
      taps = {TAPS{lvl}};
      repeat (6) @(negedge clk);
      if (n == 9) edge_at($urandom_range(0, CLK / ELEM), 0, -1);  // other level
    end
    repeat (10) @(negedge clk);
    check(q.size() == 0, "all expected hits seen");
    check(late_seen > 0 && bubble_seen > 0 && cal_seen > 0 && short_seen > 0, "all cases run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
