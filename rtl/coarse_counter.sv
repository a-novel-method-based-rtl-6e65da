// coarse_counter: free-running count of system clock edges.
//
// The system clock is the START signal of every TDC channel: each rising
// edge freezes the delay-line taps. Counting those edges gives the coarse
// part of a time stamp, shared by all channels so that their times are
// comparable. count is 0 after reset and increments on every rising edge;
// it wraps at 2**W. A tap sample taken on a clock edge is labelled with the
// count value present just before that edge, so label v belongs to the
// (v+1)-th edge after reset was released.
//
// The counter itself is this design's choice; the source method names the
// system clock as START but says nothing of a coarse count.
module coarse_counter #(
  parameter int W = 32
) (
  input  logic         clk,
  input  logic         rst,
  output logic [W-1:0] count
);
  timeunit 1ps; timeprecision 1ps;

  always_ff @(posedge clk) begin
    if (rst) count <= '0;
    else     count <= count + 1'b1;
  end
endmodule
