// tdc_calib_lut: real-time non-linearity correction of a TDC fine code.
//
// The delay elements of a carry chain are not equal, so fine code k does
// not mean exactly k element delays. The table holds, for every code
// 0..TAPS, the time in picoseconds from the edge to the sampling clock
// edge at the centre of that code's bin. After reset it holds the ideal
// table k*ELEM_PS + ELEM_PS/2; a host overwrites entries through the write
// port with values measured on the real chain (for example from a
// code-density test). A write takes effect on the next clock.
//
// Two read ports (code/ps and code_b/ps_b) serve the two edges a channel
// can resolve in one sample. Timing: ps and ps_b are registered, one clock
// after code and code_b. The table form, reset
// contents and write port are this design's choice; the source method only
// says non-linearity corrections can be applied off-line or in real time.
module tdc_calib_lut #(
  parameter int TAPS    = 384,
  parameter int ELEM_PS = 15
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       we,
  input  logic [tdc_pkg::FINE_W-1:0] waddr,
  input  logic [tdc_pkg::PS_W-1:0]   wdata,
  input  logic [tdc_pkg::FINE_W-1:0] code,
  output logic [tdc_pkg::PS_W-1:0]   ps,
  input  logic [tdc_pkg::FINE_W-1:0] code_b,
  output logic [tdc_pkg::PS_W-1:0]   ps_b
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  logic [PS_W-1:0] tbl [TAPS+1];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int k = 0; k <= TAPS; k++) tbl[k] <= PS_W'(k * ELEM_PS + ELEM_PS / 2);
    end else if (we && int'(waddr) <= TAPS) begin
      tbl[waddr] <= wdata;
    end
  end

  always_ff @(posedge clk) begin
    if (rst)                     ps <= '0;
    else if (int'(code) <= TAPS) ps <= tbl[code];
    else                         ps <= tbl[TAPS];
  end

  always_ff @(posedge clk) begin
    if (rst)                       ps_b <= '0;
    else if (int'(code_b) <= TAPS) ps_b <= tbl[code_b];
    else                           ps_b <= tbl[TAPS];
  end
endmodule
