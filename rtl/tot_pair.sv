// tot_pair: pairs the leading and trailing edge of one threshold.
//
// A discriminator output goes high when the analog pulse rises through the
// threshold and low when it falls back through it. The interval between
// the two crossings, the time over threshold, grows with the pulse size
// and, taken at several thresholds, lets the charge be estimated. This
// block stores the time stamp of a leading-edge hit and, on the next
// trailing-edge hit, emits out = {valid, lead, tot = trail - lead} for one
// cycle, one clock after the trailing hit. A TDC channel can deliver two
// edges of a short pulse in the same cycle: hit_pre (the earlier edge) is
// then processed before hit, so a leading edge in hit_pre and a trailing
// edge in hit give their time over threshold at once. A trailing edge with no stored
// leading edge (for example a pulse already high when the channel came
// out of reset) is dropped; a second leading edge replaces the first; the
// time over threshold saturates at 2**TOT_W-1 ps.
//
// Pairing edges into a time over threshold follows the source method's
// four-threshold scheme; the record format and the handling of unpaired
// edges are this design's choice.
module tot_pair (
  input  logic               clk,
  input  logic               rst,
  input  tdc_pkg::tdc_hit_t  hit,
  input  tdc_pkg::tdc_hit_t  hit_pre,
  output tdc_pkg::thr_meas_t out
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  logic      have_lead, have_lead_n;
  ts_t       lead, lead_n, diff;
  thr_meas_t out_n;
  tdc_hit_t  h [2];

  assign h[0] = hit_pre;  // earlier edge first
  assign h[1] = hit;

  always_comb begin
    have_lead_n = have_lead;
    lead_n      = lead;
    out_n       = out;
    out_n.valid = 1'b0;
    diff        = '0;
    for (int k = 0; k < 2; k++) begin
      if (h[k].valid) begin
        if (h[k].rising) begin
          have_lead_n = 1'b1;
          lead_n      = h[k].ts;
        end else if (have_lead_n) begin
          diff        = h[k].ts - lead_n;
          have_lead_n = 1'b0;
          out_n.valid = 1'b1;
          out_n.lead  = lead_n;
          out_n.tot   = (diff > TS_W'({TOT_W{1'b1}})) ? {TOT_W{1'b1}} : diff[TOT_W-1:0];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      have_lead <= 1'b0;
      lead      <= '0;
      out       <= '0;
    end else begin
      have_lead <= have_lead_n;
      lead      <= lead_n;
      out       <= out_n;
    end
  end
endmodule
