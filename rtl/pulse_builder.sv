// pulse_builder: assembles the threshold measurements of one analog pulse.
//
// With NUM_THR thresholds, threshold 0 (A) the lowest, a pulse crosses
// A, B, C, ... on its rising edge and ..., C', B', A' on its falling edge,
// so the time over the lowest threshold encloses all the others and A'
// is the last crossing. The block keeps the latest measurement of every
// threshold above A in a slot. When threshold A's measurement arrives it
// emits one record, rec_valid for one cycle a clock later, holding A and
// every stored measurement whose leading time is not earlier than A's
// (older ones belong to an earlier pulse and are discarded), then clears
// the slots. rec[i].valid tells which thresholds the pulse crossed, so a
// small pulse yields a record with only the low thresholds set. The record
// is the pulse sampled in the voltage domain: 2*NUM_THR (time, threshold)
// points from which the pulse shape and charge are fitted downstream.
//
// Closing on the lowest threshold follows from the pulse geometry of the
// four-threshold scheme; slot handling and the record layout are this
// design's choice. All channels have the same pipeline latency, so the
// measurements of higher thresholds of a pulse arrive no later than A's.
module pulse_builder #(
  parameter int NUM_THR = 4
) (
  input  logic                                  clk,
  input  logic                                  rst,
  input  tdc_pkg::thr_meas_t [NUM_THR-1:0]      meas,
  output logic                                  rec_valid,
  output tdc_pkg::thr_meas_t [NUM_THR-1:0]      rec
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  thr_meas_t [NUM_THR-1:0] slot;
  thr_meas_t [NUM_THR-1:0] cur;   // slots updated with this cycle's input

  always_comb begin
    for (int i = 0; i < NUM_THR; i++) begin
      cur[i] = meas[i].valid ? meas[i] : slot[i];
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      slot      <= '0;
      rec       <= '0;
      rec_valid <= 1'b0;
    end else begin
      rec_valid <= 1'b0;
      if (meas[0].valid) begin
        rec_valid <= 1'b1;
        rec[0]    <= meas[0];
        for (int i = 1; i < NUM_THR; i++) begin
          rec[i]       <= cur[i];
          rec[i].valid <= cur[i].valid && (cur[i].lead >= meas[0].lead);
        end
        slot <= '0;
      end else begin
        slot <= cur;
      end
    end
  end
endmodule
