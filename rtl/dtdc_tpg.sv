// dtdc_tpg: time-to-pulse generator (Nutt interpolation with extended fractions).
//
// The asynchronous pulse tin is split into three pulses whose widths satisfy
//     width(tin) = width(tc) + width(tf1) - width(tf2).
// Two D flip-flops synchronise tin. The second one, XORed with the idle level of tin,
// is tc: it rises on the second clock edge after the leading edge of tin and falls on
// the second clock edge after the trailing edge, so tc lasts a whole number of clock
// periods. tf1 = NOR(NOT tin, tc) runs from the leading edge of tin to the rise of tc;
// tf2 = NOR(tin, NOT tc) runs from the trailing edge of tin to the fall of tc. Each
// fine pulse therefore lasts between one and two clock periods: the "extension by one
// clock period" that keeps the fine pulses from becoming arbitrarily narrow.
//
// Interface: clk, rst (synchronous, active high), tin (asynchronous); outputs tf1, tf2
// (combinational, start asynchronously), tc (registered through the XOR).
// Timing: tf1 and tc are each valid from the edges described above; the pulse tin must
// stay high and then low for at least two clock periods each.
//
// Taken from the published design: D flip-flops, NOR gates for tf1/tf2, XOR gate for tc,
// NOT gates, and the one-period extension. The exact gate wiring, the two-flip-flop
// depth and the TIN_ACTIVE_LOW option are this design's choices.
module dtdc_tpg #(
  parameter bit TIN_ACTIVE_LOW = 1'b0  // 1: measure a low-going pulse
) (
  input  logic clk,
  input  logic rst,
  input  logic tin,
  output logic tf1,
  output logic tf2,
  output logic tc
);
  timeunit 1ps;
  timeprecision 1ps;

  logic q1, q2;     // synchroniser flip-flops on raw tin
  logic tin_act;    // tin with active level 1

  always_ff @(posedge clk) begin
    if (rst) begin
      q1 <= TIN_ACTIVE_LOW;
      q2 <= TIN_ACTIVE_LOW;
    end else begin
      q1 <= tin;
      q2 <= q1;
    end
  end

  assign tin_act = tin ^ TIN_ACTIVE_LOW;
  assign tc      = q2 ^ TIN_ACTIVE_LOW;   // XOR gate
  assign tf1     = ~(~tin_act | tc);      // NOR gate (NOT on tin)
  assign tf2     = ~(tin_act | ~tc);      // NOR gate (NOT on tc)
endmodule
