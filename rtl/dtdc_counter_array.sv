// dtdc_counter_array: one array of NTAPS counters reading one delay line.
//
// Counter k counts the rising clock edges at which its input taps[k] is high while the
// array is enabled. Because taps[k] is the fine pulse delayed by (k+1) buffer delays,
// the NTAPS counters sample the same pulse at NTAPS different phases of the clock; their
// sum measures the pulse width in buffer delays (see dtdc_fine_tdc).
//
// Interface: clk, rst (synchronous), clr (synchronous clear of all counters, issued
// once a result has been taken), en (common enable of the array), taps[NTAPS-1:0]
// (asynchronous pulse inputs), cnt[NTAPS] (CNT_W-bit counts, registered).
// Timing: a count includes an edge at which the input was high just before the edge.
// rst and clr take precedence over counting. The counters wrap at 2**CNT_W.
//
// NTAPS = 20 counters per array and the shared enable follow the published design; the
// 35-bit counter width is taken from its 35-bit adders. The clear input is this
// design's choice.
module dtdc_counter_array
  import dtdc_pkg::*;
#(
  parameter int unsigned NTAPS_P = NTAPS,
  parameter int unsigned CNT_W_P = CNT_W
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic                         clr,
  input  logic                         en,
  input  logic [NTAPS_P-1:0]           taps,
  output logic [NTAPS_P-1:0][CNT_W_P-1:0] cnt
);
  timeunit 1ps;
  timeprecision 1ps;

  for (genvar k = 0; k < NTAPS_P; k++) begin : g_cnt
    always_ff @(posedge clk) begin
      if (rst || clr)          cnt[k] <= '0;
      else if (en && taps[k])  cnt[k] <= cnt[k] + 1'b1;
    end
  end
endmodule
