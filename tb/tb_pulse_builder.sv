// tb_pulse_builder: checks pulse assembly with four thresholds. Measurements
// of thresholds D, C, B then A (the order in which their trailing edges
// come) must give one record, a clock after A's, with all four entries;
// a small pulse crossing only A and B gives a record with only those set;
// a stale measurement older than A's leading time is left out; entries
// arriving in the same cycle as A's are included.
module tb_pulse_builder;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  localparam int N = 4;
  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  thr_meas_t [N-1:0] meas, rec;
  logic rec_valid;
  int recs = 0;

  pulse_builder #(.NUM_THR(N)) dut (.clk(clk), .rst(rst), .meas(meas), .rec_valid(rec_valid), .rec(rec));
  always #2500 clk = ~clk;
  always @(negedge clk) if (rec_valid) recs++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic thr_meas_t m(input longint lead, input int tot);
    thr_meas_t r;
    r.valid = 1; r.lead = TS_W'(lead); r.tot = TOT_W'(tot);
    return r;
  endfunction

  initial begin
    longint base;
    thr_meas_t [N-1:0] sent;
    int n0;
    meas = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int p = 0; p < 30; p++) begin
      bit [N-1:0] mask;
      int top_thr;
      base = 64'd100_000 * (p + 1);
      top_thr = (p % 4);                  // highest threshold crossed
      sent = '0;
      for (int i = 0; i < N; i++) if (i <= top_thr) sent[i] = m(base + 300 * i, 20000 - 3000 * i);
      // Higher thresholds first, one per cycle, sometimes several together.
      for (int i = N - 1; i >= 1; i--) begin
        if (sent[i].valid) begin
          @(negedge clk);
          meas = '0;
          meas[i] = sent[i];
          if (p % 5 == 4 && i == 1) meas[0] = sent[0];
        end
      end
      if (!(p % 5 == 4 && top_thr >= 1)) begin
        @(negedge clk);
        meas = '0;
        meas[0] = sent[0];
      end
      n0 = recs;
      @(negedge clk);
      meas = '0;
      check(rec_valid, $sformatf("record %0d valid", p));
      for (int i = 0; i < N; i++) begin
        check(rec[i].valid == sent[i].valid, $sformatf("record %0d threshold %0d present", p, i));
        if (sent[i].valid) check(rec[i].lead == sent[i].lead && rec[i].tot == sent[i].tot,
                                 $sformatf("record %0d threshold %0d values", p, i));
      end
      repeat (2) @(negedge clk);
      check(recs == n0 + 1, "one record per pulse");
    end
    // A stale measurement of threshold C from before the pulse is dropped.
    @(negedge clk); meas = '0; meas[2] = m(50, 100);
    @(negedge clk); meas = '0; meas[1] = m(10_000_100, 900);
    @(negedge clk); meas = '0; meas[0] = m(10_000_000, 2000);
    @(negedge clk); meas = '0;
    check(rec_valid && rec[1].valid && !rec[2].valid && !rec[3].valid, "stale entry dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
