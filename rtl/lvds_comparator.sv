// lvds_comparator: behavioural model (not synthesizable logic) of an FPGA
// LVDS input buffer used as a voltage comparator.
//
// The differential receiver drives 1 when the voltage on its + pin is
// above the voltage on its - pin and 0 otherwise; fed with the analog
// detector signal on + and a reference level on -, it is a
// leading-edge discriminator. Voltages are signed integer millivolts.
// The output follows the comparison after DELAY_PS picoseconds with
// transport semantics, so every crossing is reproduced, delayed.
//
// The comparison rule follows the source method; the switching delay value
// and the millivolt representation are this model's choice. A real buffer
// is usable for inputs between 0 and about 2 V; the model does not clip.
module lvds_comparator #(
  parameter int DELAY_PS = 500
) (
  input  tdc_pkg::mv_t p_mv,
  input  tdc_pkg::mv_t n_mv,
  output logic         out
);
  timeunit 1ps; timeprecision 1ps;

  logic cmp;
  assign cmp = (p_mv > n_mv);

  always begin
    out <= #(DELAY_PS) cmp;
    @(cmp);
  end
endmodule
