// tb_mt_digitizer_nonideal: end-to-end test of the four-threshold
// digitizer with a non-ideal carry chain: element delays spread over
// 15+-3 ps and every eighth tap reaching its flip-flop 20 ps late, which
// produces bubbles in the sampled codes. The testbench first calibrates:
// it steps the analog input, times the edge at every element of every
// line, and loads each channel's table with the centre of every fine-code
// bin. It then plays triangular pulses as in tb_mt_digitizer and checks
// leading times within 25 ps and times over threshold within 50 ps (one
// skewed tap can move a code by one element). Mechanisms counted: full
// pulses, a partial pulse, narrow pulses with both edges of a threshold in
// one clock period, bubbles seen in decoded samples, calibration.
module tb_mt_digitizer_nonideal;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  localparam int N = 4, CLK = 5000, CMP = 500, ELEM = 15, TAPS = 384;
  localparam int SPREAD = 3, SKEW = 20, TOL = 25;
  bit ignore_rec = 0;
  int n_bubble = 0;
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

  mt_digitizer #(.SPREAD_PS(SPREAD), .SKEW_PS(SKEW)) dut (
    .clk(clk), .rst(rst), .signal_mv(signal_mv), .vref_mv(vref_mv),
    .cal_we(cal_we), .cal_ch(cal_ch), .cal_addr(cal_addr), .cal_data(cal_data),
    .rec_valid(rec_valid), .rec(rec));

  always #(CLK / 2) clk = ~clk;

  longint t_r = -1;  // first clock edge with reset released
  always @(posedge clk) if (!rst && t_r < 0) t_r = $time;

  int n_short = 0, n_full = 0, n_partial = 0, n_calib = 0, n_recs = 0;

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

  // Bubbles: a decoded sample whose taps change level more than once
  // before the end of the edge.
  for (genvar i = 0; i < N; i++) begin : g_mon
    always @(posedge clk) begin
      if (dut.g_thr[i].u_tdc.edge_now) begin
        int changes;
        changes = 0;
        for (int k = 1; k < int'(dut.g_thr[i].u_tdc.code2) && k < TAPS; k++)
          if (dut.g_thr[i].u_tdc.s2[k] != dut.g_thr[i].u_tdc.s2[k-1]) changes++;
        if (changes > 0) n_bubble++;
      end
    end
  end

  // Arrival time of the edge at every element, per channel.
  logic [TAPS-1:0] node [N];
  for (genvar i = 0; i < N; i++) begin : g_node
    assign node[i] = dut.g_thr[i].u_line.node;
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
    if (rec_valid && !ignore_rec) begin
      n_recs++;
      check(pending, "record expected");
      for (int i = 0; i < N; i++) begin
        check(rec[i].valid == ex.crossed[i], $sformatf("threshold %0d crossed=%0b", i, ex.crossed[i]));
        if (ex.crossed[i] && rec[i].valid) begin
          longint el, dl, dt;
          el = ex.lead[i] - ((i == 0) ? ex.shift0 : 0);
          dl = longint'(rec[i].lead) - el;
          dt = longint'(rec[i].tot) - ex.tot[i];
          check(dl >= -TOL && dl <= TOL, $sformatf("thr %0d lead %0d expected %0d", i, rec[i].lead, el));
          check(dt >= -2 * TOL && dt <= 2 * TOL, $sformatf("thr %0d tot %0d expected %0d", i, rec[i].tot, ex.tot[i]));
        end
      end
      if (ex.crossed[N-1]) n_full++;
      else if (ex.crossed[0]) n_partial++;
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

  initial begin
    vref_mv[0] = 16'sd100; vref_mv[1] = 16'sd300; vref_mv[2] = 16'sd500; vref_mv[3] = 16'sd700;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (8) @(negedge clk);

    // Calibration: time every element of every line with a step on the
    // input, then load each table with the bin centres.
    begin
      int arr [N][TAPS];
      longint ts;
      ignore_rec = 1;
      @(negedge clk);
      for (int i = 0; i < N; i++) for (int k = 0; k < TAPS; k++) arr[i][k] = -1;
      signal_mv = 16'sd1000;
      ts = $time + CMP;
      for (int t = 0; t < CMP + 2 * ELEM * TAPS; t++) begin
        #1;
        for (int i = 0; i < N; i++)
          for (int k = 0; k < TAPS; k++)
            if (arr[i][k] < 0 && node[i][k]) arr[i][k] = int'($time - ts);
      end
      signal_mv = '0;
      repeat (4) @(negedge clk);
      for (int i = 0; i < N; i++) begin
        for (int k = 0; k <= TAPS; k++) begin
          int lo, hi;
          lo = (k == 0) ? 0 : arr[i][k-1];
          hi = (k == TAPS) ? arr[i][TAPS-1] + ELEM : arr[i][k];
          cal_we = 1; cal_ch = 3'(i); cal_addr = FINE_W'(k); cal_data = PS_W'((lo + hi) / 2);
          @(negedge clk);
        end
      end
      cal_we = 0;
      repeat (20) @(negedge clk);
      ignore_rec = 0;
      n_calib++;
    end
    for (int n = 0; n < 12; n++) begin
      #($urandom_range(0, CLK));
      pulse(900 + 50 * n, 2000 + 100 * n, 15000, 0);
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
    #($urandom_range(0, CLK));
    pulse(400, 2000, 30000, 0);
    check(n_full > 0,    "mechanism full pulse happened");
    check(n_partial > 0, "mechanism partial pulse happened");
    check(n_short > 0,   "mechanism short pulse happened");
    check(n_bubble > 0,  "mechanism bubble happened");
    check(n_calib > 0,   "mechanism calibration happened");
    $display("mechanisms: short=%0d full=%0d partial=%0d bubble=%0d calib=%0d records=%0d",
             n_short, n_full, n_partial, n_bubble, n_calib, n_recs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
