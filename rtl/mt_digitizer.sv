// mt_digitizer: multi-threshold digitizer of analog detector pulses built
// only from FPGA resources.
//
// The analog signal (signal_mv) is split to NUM_THR LVDS input buffers
// used as comparators; the - input of buffer i gets reference voltage
// vref_mv[i] from an external DAC (threshold 0 the lowest). Each
// comparator output drives its own carry-chain delay line and TDC
// channel, all sharing one coarse counter, so every threshold crossing of
// the pulse, leading and trailing, is time-stamped with the resolution of
// one delay element (~15 ps). tot_pair turns each channel's edges into a
// leading time and a time over threshold, and pulse_builder gathers the
// thresholds of one pulse into a record: rec_valid for one cycle with
// rec[i] = {crossed, leading time in ps, time over threshold in ps}. This
// samples the pulse in the voltage domain: each threshold gives two
// (time, voltage) points, from which the leading edge time can be fitted
// and the charge estimated.
//
// The calibration tables of all channels are written through cal_we with
// cal_ch choosing the channel. Latency from the clock edge after a
// threshold-A trailing crossing to rec_valid is six clock cycles (four in
// the TDC channel, one in tot_pair, one in pulse_builder).
//
// SPREAD_PS and SKEW_PS only configure the delay-line model (unequal
// element delays, late taps that cause bubbles); they are 0 by default.
// The comparator and delay line are behavioural models of FPGA primitives;
// everything from the sampling flip-flops on is synthesizable. The
// structure (comparators against DAC levels, one TDC per threshold, four
// thresholds) follows the source method; clock period, widths and record
// layout are this design's.
module mt_digitizer #(
  parameter int NUM_THR  = 4,
  parameter int TAPS     = 384,
  parameter int ELEM_PS  = 15,
  parameter int CLK_PS   = 5000,
  parameter int CMP_PS   = 500,
  parameter int SPREAD_PS = 0,
  parameter int SKEW_PS  = 0
) (
  input  logic                                clk,
  input  logic                                rst,
  input  tdc_pkg::mv_t                        signal_mv,
  input  tdc_pkg::mv_t [NUM_THR-1:0]          vref_mv,
  input  logic                                cal_we,
  input  logic [$clog2(NUM_THR+1)-1:0]        cal_ch,
  input  logic [tdc_pkg::FINE_W-1:0]          cal_addr,
  input  logic [tdc_pkg::PS_W-1:0]            cal_data,
  output logic                                rec_valid,
  output tdc_pkg::thr_meas_t [NUM_THR-1:0]    rec
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  logic [COARSE_W-1:0] coarse;
  coarse_counter #(.W(COARSE_W)) u_coarse (
    .clk  (clk),
    .rst  (rst),
    .count(coarse)
  );

  thr_meas_t [NUM_THR-1:0] meas;

  for (genvar i = 0; i < NUM_THR; i++) begin : g_thr
    logic            disc;
    logic [TAPS-1:0] taps;
    tdc_hit_t        hit, hit_pre;

    lvds_comparator #(.DELAY_PS(CMP_PS)) u_cmp (
      .p_mv(signal_mv),
      .n_mv(vref_mv[i]),
      .out (disc)
    );

    carry_chain_delay_line #(.TAPS(TAPS), .ELEM_PS(ELEM_PS), .SPREAD_PS(SPREAD_PS),
                             .SKEW_PS(SKEW_PS)) u_line (
      .stop(disc),
      .taps(taps)
    );

    tdc_channel #(.TAPS(TAPS), .ELEM_PS(ELEM_PS), .CLK_PS(CLK_PS)) u_tdc (
      .clk     (clk),
      .rst     (rst),
      .taps    (taps),
      .coarse  (coarse),
      .cal_we  (cal_we && (int'(cal_ch) == i)),
      .cal_addr(cal_addr),
      .cal_data(cal_data),
      .hit     (hit),
      .hit_pre (hit_pre)
    );

    tot_pair u_tot (
      .clk    (clk),
      .rst    (rst),
      .hit    (hit),
      .hit_pre(hit_pre),
      .out    (meas[i])
    );
  end

  pulse_builder #(.NUM_THR(NUM_THR)) u_pb (
    .clk      (clk),
    .rst      (rst),
    .meas     (meas),
    .rec_valid(rec_valid),
    .rec      (rec)
  );
endmodule
