// tdc_channel: one carry-chain time-to-digital converter channel.
//
// The taps of a carry-chain delay line (carry_chain_delay_line) arrive
// asynchronously. On every rising edge of the system clock, which acts as
// the START signal, a bank of D flip-flops freezes them (stage 1); a second
// bank gives meta-stable bits a clock to settle (stage 2). The level of the
// STOP signal seen in a sample is the majority of its first three taps.
//
// Stage 3 looks for edges that entered the line during the last clock
// period:
//  * Level changed since the previous sample: one edge, decoded by
//    thermo_decoder into the number of elements it has travelled (fine
//    code). If it entered in the last element delay or two before the
//    clock edge it is only seen one sample later, with a fine code above
//    one period's worth of taps; the time stamp is still right.
//  * Level unchanged, but the sample holds a complete short pulse of the
//    other level near its head (both edges in the same period): the
//    trailing edge of that pulse is the first transition (code a) and its
//    leading edge the second (code b, found by a second decoder on the
//    vector with taps below a masked). It is reported only if a is below
//    one clock period's worth of taps, so that a pulse already reported
//    in the previous sample is not reported again.
// Stage 4 translates codes into picoseconds with tdc_calib_lut (two read
// ports), and stage 5 forms the time stamps
//
//     ts = coarse * CLK_PS - fine_ps
//
// where coarse is the coarse_counter value present at the sampling edge.
//
// Outputs: hit carries the single edge, or the later (trailing) edge of a
// short pulse; hit_pre carries the earlier edge of a short pulse and is
// valid only together with hit. Both are valid for one cycle, four clock
// cycles after the sampling edge. Edges are only reported from the third
// sample after reset.
//
// Sampling the taps on the clock edge follows the source method. The
// second register stage, the majority-of-three level, the short-pulse
// decoding, the five-stage pipeline and the 200 MHz clock (CLK_PS = 5000)
// are this design's choices. TAPS*ELEM_PS must exceed CLK_PS plus two
// element delays, so that every edge is caught. Three or more edges in one
// clock period are not resolved. The two chained decoders form the longest
// combinational path of the channel. Time stamps wrap modulo 2**48 ps.
module tdc_channel #(
  parameter int TAPS    = 384,
  parameter int ELEM_PS = 15,
  parameter int CLK_PS  = 5000
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [TAPS-1:0]              taps,
  input  logic [tdc_pkg::COARSE_W-1:0] coarse,
  input  logic                         cal_we,
  input  logic [tdc_pkg::FINE_W-1:0]   cal_addr,
  input  logic [tdc_pkg::PS_W-1:0]     cal_data,
  output tdc_pkg::tdc_hit_t            hit,
  output tdc_pkg::tdc_hit_t            hit_pre
);
  timeunit 1ps; timeprecision 1ps;
  import tdc_pkg::*;

  // Largest trailing-edge code of a short pulse that belongs to this period.
  localparam int A_MAX = CLK_PS / ELEM_PS - 1;

  // Stage 1: the flip-flops that freeze the delay line on the START edge.
  logic [TAPS-1:0]     s1, s2;
  logic [COARSE_W-1:0] c1, c2, c3, c4;
  always_ff @(posedge clk) begin
    s1 <= taps;
    c1 <= coarse;
    s2 <= s1;
    c2 <= c1;
  end

  // Level of the STOP signal in the settled sample, and edge detection.
  logic       lvl, prev_lvl, armed, edge_now, short_now;
  logic [1:0] arm;
  assign lvl      = (s2[0] & s2[1]) | (s2[0] & s2[2]) | (s2[1] & s2[2]);
  assign armed    = (arm == 2'd3);
  assign edge_now = armed && (lvl != prev_lvl);

  always_ff @(posedge clk) begin
    if (rst) begin
      arm      <= '0;
      prev_lvl <= 1'b0;
    end else begin
      prev_lvl <= lvl;
      if (arm != 2'd3) arm <= arm + 1'b1;
    end
  end

  // Stage 3: bubble-tolerant decode. code2 is the first transition from the
  // head of the line (the edge to the current level); code2b the next one,
  // searched with the taps below code2 masked to the other level.
  logic [FINE_W-1:0] code2, code2b, code3, code3b, code4, code4b;
  logic [TAPS-1:0]   masked;
  logic              v3, p3, r3, v4, p4, r4;

  thermo_decoder #(.TAPS(TAPS)) u_dec (
    .vec      (s2),
    .new_level(lvl),
    .code     (code2)
  );

  always_comb begin
    for (int i = 0; i < TAPS; i++) masked[i] = (i < int'(code2)) ? !lvl : s2[i];
  end

  thermo_decoder #(.TAPS(TAPS)) u_dec_b (
    .vec      (masked),
    .new_level(!lvl),
    .code     (code2b)
  );

  assign short_now = armed && (lvl == prev_lvl) && (int'(code2) <= A_MAX) &&
                     (int'(code2b) < TAPS);

  always_ff @(posedge clk) begin
    if (rst) begin
      v3 <= 1'b0;
      p3 <= 1'b0;
      v4 <= 1'b0;
      p4 <= 1'b0;
    end else begin
      v3 <= edge_now || short_now;
      p3 <= short_now;
      v4 <= v3;
      p4 <= p3;
    end
    r3     <= lvl;
    code3  <= code2;
    code3b <= code2b;
    c3     <= c2;
    r4     <= r3;
    code4  <= code3;
    code4b <= code3b;
    c4     <= c3;
  end

  // Stage 4: non-linearity correction (registered inside the table).
  logic [PS_W-1:0] fine_ps, fine_ps_b;
  tdc_calib_lut #(.TAPS(TAPS), .ELEM_PS(ELEM_PS)) u_lut (
    .clk   (clk),
    .rst   (rst),
    .we    (cal_we),
    .waddr (cal_addr),
    .wdata (cal_data),
    .code  (code3),
    .ps    (fine_ps),
    .code_b(code3b),
    .ps_b  (fine_ps_b)
  );

  // Stage 5: time stamps.
  ts_t base;
  assign base = TS_W'(c4) * TS_W'(CLK_PS);

  always_ff @(posedge clk) begin
    if (rst) begin
      hit     <= '0;
      hit_pre <= '0;
    end else begin
      hit.valid      <= v4;
      hit.rising     <= r4;
      hit.fine       <= code4;
      hit.ts         <= base - TS_W'(fine_ps);
      hit_pre.valid  <= p4;
      hit_pre.rising <= !r4;
      hit_pre.fine   <= code4b;
      hit_pre.ts     <= base - TS_W'(fine_ps_b);
    end
  end
endmodule
