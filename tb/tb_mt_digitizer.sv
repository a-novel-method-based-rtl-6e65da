// tb_mt_digitizer: end-to-end test of the four-threshold digitizer at its
// default parameters (4 thresholds, 384 taps of 15 ps, 5 ns clock, 500 ps
// comparator delay).
//
// The testbench generates triangular analog pulses in 1 ps steps (linear
// rise, linear fall) and notes, for every threshold, the first step at which
// the signal is above it and the first at which it is back at or below it.
// Those instants plus the comparator delay, counted from the first clock
// edge after reset, are the expected leading time and trailing time; the
// record must give them within the 15 ps bin (+-10 ps) and the time over
// threshold within 20 ps. Mechanisms made to happen and counted:
//   full    - a pulse crossing all four thresholds
//   partial - a small pulse crossing only the two lowest
//   short   - narrow pulses whose times over threshold are under one clock
//             period, both edges of a threshold decoded from one sample
//   late    - an edge arriving just before a clock edge, caught one period
//             later with a fine code above one period
//   calib   - channel 0's calibration table rewritten (+100 ps per entry),
//             which must move its leading time 100 ps earlier
// A mechanism that never happened counts as a failure.
module tb_mt_digitizer;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  localparam int N = 4, CLK = 5000, CMP = 500, ELEM = 15;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  mv_t  signal_mv = '0;
  mv_t  [N-1:0] vref_mv;
  logic cal_we = 0;
  logic [2:0] cal_ch = '0;
  logic [FINE_W-1:0] cal_addr = '0;
  logic [PS_W-1:0]   cal_data = '0;
  logic rec_valid;
  thr_meas_t [N-1:0] rec;

  mt_digitizer dut (
    .clk(clk), .rst(rst), .signal_mv(signal_mv), .vref_mv(vref_mv),
    .cal_we(cal_we), .cal_ch(cal_ch), .cal_addr(cal_addr), .cal_data(cal_data),
    .rec_valid(rec_valid), .rec(rec));

  always #(CLK / 2) clk = ~clk;

  longint t_r = -1;  // first clock edge with reset released
  always @(posedge clk) if (!rst && t_r < 0) t_r = $time;

  int n_short = 0, n_full = 0, n_partial = 0, n_late = 0, n_calib = 0, n_recs = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (4000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Late catches: a fine code above one clock period on any channel.
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(negedge clk) if (dut.g_thr[i].hit.valid && int'(dut.g_thr[i].hit.fine) * ELEM > CLK) n_late++;
  end

  // Short pulses: both edges of a threshold inside one clock period.
  for (genvar i = 0; i < N; i++) begin : g_short
    always @(negedge clk) if (dut.g_thr[i].hit_pre.valid) n_short++;
  end

  // Expected record of the pulse in flight.
  typedef struct { bit crossed [N]; longint lead [N]; longint tot [N]; longint shift0; } pulse_exp_t;
  pulse_exp_t ex;
  bit         pending = 0;

  always @(negedge clk) begin
    if (rec_valid) begin
      n_recs++;
      check(pending, "record expected");
      for (int i = 0; i < N; i++) begin
        check(rec[i].valid == ex.crossed[i], $sformatf("threshold %0d crossed=%0b", i, ex.crossed[i]));
        if (ex.crossed[i] && rec[i].valid) begin
          longint el, dl, dt;
          el = ex.lead[i] - ((i == 0) ? ex.shift0 : 0);
          dl = longint'(rec[i].lead) - el;
          dt = longint'(rec[i].tot) - ex.tot[i];
          check(dl >= -10 && dl <= 10, $sformatf("thr %0d lead %0d expected %0d", i, rec[i].lead, el));
          check(dt >= -20 && dt <= 20, $sformatf("thr %0d tot %0d expected %0d", i, rec[i].tot, ex.tot[i]));
        end
      end
      if (ex.crossed[N-1]) n_full++;
      else if (ex.crossed[0]) n_partial++;
      if (ex.shift0 != 0) n_calib++;
      pending = 0;
    end
  end

  // Signal value rise_ps/fall_ps into a triangular pulse of height peak.
  function automatic int shape(input longint dt, input int peak, input int rise, input int fall);
    if (dt < 0) return 0;
    if (dt < rise) return int'(dt * peak / rise);
    if (dt < rise + fall) return int'(peak - (dt - rise) * peak / fall);
    return 0;
  endfunction

  // Play one pulse starting now and fill the expected record.
  task automatic pulse(input int peak, input int rise, input int fall, input longint shift0);
    longint t0, up [N], dn [N];
    bit     above [N];
    int     v;
    t0 = $time;
    for (int i = 0; i < N; i++) begin up[i] = -1; dn[i] = -1; above[i] = 0; end
    for (longint dt = 0; dt <= rise + fall + 1; dt++) begin
      v = shape(dt, peak, rise, fall);
      signal_mv = MV_W'(v);
      for (int i = 0; i < N; i++) begin
        if (!above[i] && v > int'(vref_mv[i])) begin above[i] = 1; if (up[i] < 0) up[i] = t0 + dt; end
        else if (above[i] && v <= int'(vref_mv[i])) begin above[i] = 0; dn[i] = t0 + dt; end
      end
      #1;
    end
    signal_mv = '0;
    for (int i = 0; i < N; i++) begin
      ex.crossed[i] = (up[i] >= 0);
      ex.lead[i] = up[i] + CMP - t_r;
      ex.tot[i]  = dn[i] - up[i];
    end
    ex.shift0 = shift0;
    pending = 1;
    repeat (12) @(negedge clk);
    check(!pending, "record arrived");
  endtask

  // Delay from pulse start until threshold A is first exceeded.
  function automatic int first_above(input int peak, input int rise, input int thr);
    for (int dt = 0; dt < rise; dt++) if (shape(dt, peak, rise, 1000) > thr) return dt;
    return -1;
  endfunction

  initial begin
    vref_mv[0] = 16'sd100; vref_mv[1] = 16'sd300; vref_mv[2] = 16'sd500; vref_mv[3] = 16'sd700;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (8) @(negedge clk);

    // Full pulses at random phases to the clock.
    for (int n = 0; n < 4; n++) begin
      #($urandom_range(0, CLK));
      pulse(1000 + 100 * n, 3000, 15000, 0);
    end
    // Narrow pulses (1 ns rise, 2 ns fall): every time over threshold is
    // under one clock period. The first starts 1 ns after a clock edge, so
    // all its crossings fall inside the same period.
    @(posedge clk);
    #1000;
    pulse(1000, 1000, 2000, 0);
    for (int n = 0; n < 3; n++) begin
      #($urandom_range(0, CLK));
      pulse(1000, 1000, 2000, 0);
    end
    // Small pulses crossing A and B only.
    for (int n = 0; n < 2; n++) begin
      #($urandom_range(0, CLK));
      pulse(400, 2000, 30000, 0);
    end
    // Threshold A reaches the line 10 ps before a clock edge.
    begin
      longint next_edge, start;
      int d;
      @(posedge clk);
      d = first_above(1000, 3000, 100);
      next_edge = $time + 3 * CLK;
      start = next_edge - 10 - CMP - d;
      #(start - $time);
      pulse(1000, 3000, 15000, 0);
    end
    // Calibration: every entry of channel 0 100 ps larger.
    @(negedge clk);
    for (int k = 0; k <= 384; k++) begin
      cal_we = 1; cal_ch = 3'd0; cal_addr = FINE_W'(k); cal_data = PS_W'(ELEM * k + ELEM / 2 + 100);
      @(negedge clk);
    end
    cal_we = 0;
    #($urandom_range(0, CLK));
    pulse(1200, 3000, 15000, 100);

    check(n_full > 0,    "mechanism full pulse happened");
    check(n_partial > 0, "mechanism partial pulse happened");
    check(n_short > 0,   "mechanism short pulse happened");
    check(n_late > 0,    "mechanism late catch happened");
    check(n_calib > 0,   "mechanism calibration happened");
    $display("mechanisms: short=%0d full=%0d partial=%0d late=%0d calib=%0d records=%0d",
             n_short, n_full, n_partial, n_late, n_calib, n_recs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
