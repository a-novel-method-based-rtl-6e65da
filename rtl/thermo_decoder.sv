// thermo_decoder: bubble-tolerant decoding of a sampled delay-line vector.
//
// After an edge at the delay-line input, the first taps hold the new level
// and the rest the old one (a thermometer code, tap 0 nearest the input).
// Meta-stable flip-flops and unequal routing from the taps to the flip-flops
// can leave "bubbles": taps of the wrong level near the transition, so that
// a vector that should read 1111111111100000 reads 1111111011010000. The
// decoder takes the transition to be at the first run of RUN consecutive
// taps that hold the old level (taps past the end count as old level) and
// reports its index: the number of delay elements the edge has passed.
// Isolated bubbles, and runs of them shorter than RUN, do not move the
// result, so a bubbled vector decodes to the same code as the clean one.
//
// Purely combinational. new_level is 1 for a rising edge, 0 for a falling
// one. code is TAPS if no such run exists. The run length RUN=4 is this
// design's choice; the source method only says that decoding needs extra
// logic because of bubbles, and shows a bubble zone with runs of at most two.
module thermo_decoder #(
  parameter int TAPS = 384,
  parameter int RUN  = 4
) (
  input  logic [TAPS-1:0]            vec,
  input  logic                       new_level,
  output logic [tdc_pkg::FINE_W-1:0] code
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::FINE_W;

  logic [TAPS-1:0] is_old;
  assign is_old = new_level ? ~vec : vec;

  always_comb begin
    logic run_ok;
    code = FINE_W'(TAPS);
    for (int i = TAPS - 1; i >= 0; i--) begin
      run_ok = 1'b1;
      for (int j = 0; j < RUN; j++) begin
        if (i + j < TAPS) run_ok = run_ok & is_old[i+j];
      end
      if (run_ok) code = FINE_W'(i);
    end
  end
endmodule
