// carry_chain_delay_line: behavioural model of an FPGA carry chain used as a
// tapped delay line for time-to-digital conversion.
//
// The STOP signal enters element 0 and ripples through TAPS elements of
// about ELEM_PS picoseconds each; taps[i] is the output of element i, so
// a transition at the input reaches taps[i] after the delays of elements
// 0..i. A register bank (in tdc_channel) freezes the taps on the system
// clock edge, and the number of taps the edge has reached gives the fine
// time. With SPREAD_PS > 0 the element delays vary deterministically
// between ELEM_PS-SPREAD_PS and ELEM_PS+SPREAD_PS, which models the
// differential non-linearity that calibration has to remove.
//
// With SKEW_PS > 0, every eighth tap (taps 3, 11, 19, ...) reaches its
// sampling flip-flop SKEW_PS later than the others, as with unequal routing
// from the chain to the flip-flops; an edge sampled near such a tap then
// shows a bubble in the thermometer code.
//
// Delays use transport semantics (every input edge propagates). The element
// delay and the two causes of non-ideal codes follow the source method
// (~15 ps elements, unequal element delays, unequal paths to the
// flip-flops); the number of taps and the spread and skew patterns are this
// model's choice. In an FPGA the chain is the
// carry logic of an adder placed by hand; it is not inferred from RTL.
module carry_chain_delay_line #(
  parameter int TAPS      = 384,
  parameter int ELEM_PS   = 15,
  parameter int SPREAD_PS = 0,
  parameter int SKEW_PS   = 0
) (
  input  logic            stop,
  output logic [TAPS-1:0] taps
);
  timeunit 1ps; timeprecision 1ps;

  // Delay of element i: ELEM_PS plus a fixed pseudo-random offset.
  function automatic int elem_delay(input int i);
    if (SPREAD_PS == 0) return ELEM_PS;
    return ELEM_PS + ((i * 7 + (i / 5) * 3) % (2 * SPREAD_PS + 1)) - SPREAD_PS;
  endfunction

  logic [TAPS-1:0] node;  // element outputs inside the chain

  for (genvar i = 0; i < TAPS; i++) begin : g_elem
    localparam int D = elem_delay(i);
    localparam int S = (i % 8 == 3) ? SKEW_PS : 0;
    logic src;
    if (i == 0) begin : g_first
      assign src = stop;
    end else begin : g_next
      assign src = node[i-1];
    end
    always begin
      node[i] <= #(D) src;
      @(src);
    end
    if (S == 0) begin : g_direct
      assign taps[i] = node[i];
    end else begin : g_skew
      always begin
        taps[i] <= #(S) node[i];
        @(node[i]);
      end
    end
  end
endmodule
