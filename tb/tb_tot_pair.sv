// tb_tot_pair: checks edge pairing. Random leading/trailing pairs must give
// {lead, trail-lead} one clock after the trailing hit; an unpaired trailing
// edge gives nothing; a repeated leading edge replaces the stored one; a
// long pulse saturates the time over threshold. Two edges in one cycle
// (hit_pre earlier, hit later) must be applied in that order: a leading
// edge on hit_pre and a trailing one on hit give a result at once; a
// trailing edge on hit_pre closes the stored pulse and a leading edge on
// hit starts the next.
module tb_tot_pair;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst = 1;
  tdc_hit_t  hit, hit_pre;
  thr_meas_t out;
  int outs = 0;

  tot_pair dut (.clk(clk), .rst(rst), .hit(hit), .hit_pre(hit_pre), .out(out));
  always #2500 clk = ~clk;

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

  always @(negedge clk) if (out.valid) outs++;

  task automatic send(input bit rising, input longint ts);
    @(negedge clk);
    hit = '0;
    hit.valid = 1; hit.rising = rising; hit.ts = TS_W'(ts);
    @(negedge clk);
    hit = '0;
  endtask

  initial begin
    longint lead, trail;
    int n0;
    hit = '0;
    hit_pre = '0;
    repeat (2) @(negedge clk);
    rst = 0;
    // Unpaired trailing edge.
    n0 = outs;
    send(0, 1000);
    repeat (3) @(negedge clk);
    check(outs == n0, "unpaired trailing edge dropped");
    for (int n = 0; n < 50; n++) begin
      lead  = 64'd1_000_000 * n + $urandom_range(0, 100000);
      trail = lead + $urandom_range(1, 200000);
      send(1, lead);
      repeat ($urandom_range(0, 4)) @(negedge clk);
      n0 = outs;
      @(negedge clk);
      hit = '0; hit.valid = 1; hit.rising = 0; hit.ts = TS_W'(trail);
      @(negedge clk);
      hit = '0;
      check(out.valid, "valid one clock after trailing hit");
      check(longint'(out.lead) == lead, "lead");
      check(longint'(out.tot) == trail - lead, $sformatf("tot %0d expected %0d", out.tot, trail - lead));
      @(negedge clk);
      check(!out.valid && outs == n0 + 1, "single output");
    end
    // A second leading edge replaces the first.
    send(1, 5000);
    send(1, 9000);
    send(0, 10000);
    check(longint'(out.lead) == 9000 && out.tot == 1000, "second leading edge replaces");
    // Short pulse: both edges in one cycle.
    for (int n = 0; n < 10; n++) begin
      lead = 64'd50_000_000 + 64'd100_000 * n;
      trail = lead + $urandom_range(100, 4999);
      @(negedge clk);
      hit_pre = '0; hit_pre.valid = 1; hit_pre.rising = 1; hit_pre.ts = TS_W'(lead);
      hit = '0; hit.valid = 1; hit.rising = 0; hit.ts = TS_W'(trail);
      @(negedge clk);
      hit = '0; hit_pre = '0;
      check(out.valid && longint'(out.lead) == lead && longint'(out.tot) == trail - lead,
            $sformatf("short pulse tot %0d expected %0d", out.tot, trail - lead));
    end
    // A dip: trailing edge on hit_pre closes, leading edge on hit reopens.
    send(1, 70_000_000);
    @(negedge clk);
    hit_pre = '0; hit_pre.valid = 1; hit_pre.rising = 0; hit_pre.ts = TS_W'(70_003_000);
    hit = '0; hit.valid = 1; hit.rising = 1; hit.ts = TS_W'(70_004_000);
    @(negedge clk);
    hit = '0; hit_pre = '0;
    check(out.valid && out.tot == 3000, "dip closes stored pulse");
    send(0, 70_010_000);
    check(out.valid && longint'(out.lead) == 70_004_000 && out.tot == 6000, "dip reopens pulse");
    // Saturation.
    send(1, 0);
    send(0, 64'd5_000_000);
    check(out.tot == {TOT_W{1'b1}}, "saturated tot");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
