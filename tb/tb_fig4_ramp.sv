// tb_fig4_ramp: the LVDS-discriminator test bench measurement. A ramp with a
// 25 ns rise from 0 to 2000 mV drives the + input of one LVDS comparator
// whose - input sits at a constant level N; a reference step marking the
// start of the ramp drives a second comparator. Each comparator feeds its
// own carry-chain TDC channel (default size) and both share one coarse
// counter. The time between the two channels' leading edges must grow
// linearly with N: it must equal the instant the ramp first exceeds N,
// within two 15 ps bins, for N = 400, 800, 1200 and 1600 mV, each measured
// ten times at random phases to the clock. The mean and rms of the time
// difference are printed per level.
module tb_fig4_ramp;
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  localparam int TAPS = 384, ELEM = 15, CLK = 5000;
  localparam int RISE = 25000, AMPL = 2000, REPS = 10;
  int checks = 0, failures = 0;

  logic clk = 0, rst = 1;
  mv_t  ramp = '0, level = '0, refsig = '0;
  logic d1, d2;
  logic [TAPS-1:0] t1, t2;
  logic [COARSE_W-1:0] coarse;
  tdc_hit_t h1, h2;

  always #(CLK / 2) clk = ~clk;

  coarse_counter u_cnt (.clk(clk), .rst(rst), .count(coarse));
  lvds_comparator u_c1 (.p_mv(ramp),   .n_mv(level),  .out(d1));
  lvds_comparator u_c2 (.p_mv(refsig), .n_mv(16'sd500), .out(d2));
  carry_chain_delay_line u_l1 (.stop(d1), .taps(t1));
  carry_chain_delay_line u_l2 (.stop(d2), .taps(t2));
  tdc_channel u_ch1 (.clk(clk), .rst(rst), .taps(t1), .coarse(coarse),
                     .cal_we(1'b0), .cal_addr('0), .cal_data('0), .hit(h1));
  tdc_channel u_ch2 (.clk(clk), .rst(rst), .taps(t2), .coarse(coarse),
                     .cal_we(1'b0), .cal_addr('0), .cal_data('0), .hit(h2));

  longint lead1 = -1, lead2 = -1;
  always @(negedge clk) begin
    if (h1.valid && h1.rising) lead1 = longint'(h1.ts);
    if (h2.valid && h2.rising) lead2 = longint'(h2.ts);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int levels [4] = '{400, 800, 1200, 1600};
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (8) @(negedge clk);
    foreach (levels[l]) begin
      real sum, sum2, mean;
      int  expect_dt;
      level = MV_W'(levels[l]);
      // The ramp is above N from the first step where dt*AMPL/RISE > N.
      expect_dt = 0;
      while (expect_dt * AMPL / RISE <= levels[l]) expect_dt++;
      sum = 0; sum2 = 0;
      for (int r = 0; r < REPS; r++) begin
        longint dt;
        #($urandom_range(0, CLK));
        lead1 = -1; lead2 = -1;
        refsig = 16'sd1000;
        for (int t = 0; t <= RISE; t++) begin
          ramp = MV_W'(t * AMPL / RISE);
          #1;
        end
        repeat (8) @(negedge clk);
        dt = lead1 - lead2;
        check(lead1 >= 0 && lead2 >= 0, "both channels fired");
        check(dt >= expect_dt - 20 && dt <= expect_dt + 20,
              $sformatf("N=%0d mV: dt %0d ps expected %0d", levels[l], dt, expect_dt));
        sum += real'(dt);
        sum2 += real'(dt) * real'(dt);
        ramp = '0; refsig = '0;
        repeat (3) @(negedge clk);
      end
      mean = sum / REPS;
      $display("N=%0d mV: mean dt %.1f ps (expected %0d), rms %.1f ps", levels[l], mean,
               expect_dt, $sqrt(sum2 / REPS - mean * mean));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
