// dtdc_summer: summer of one counter array, a chain of NTAPS-1 two-input adders.
//
// Adder 1 adds counters 0 and 1; adder k adds counter k to the output of adder k-1.
// The output of the last adder (adder NTAPS-1, i.e. 19 for 20 counters) is the sum of
// all counter values. Purely combinational; all adders are CNT_W bits wide and the sum
// wraps at 2**CNT_W.
//
// Interface: cnt[NTAPS] (CNT_W-bit counts), sum (CNT_W bits).
// The count of 19 adders of 35-bit inputs and output per array is the published
// design's; the linear chaining is implied by its "output of the last adder".
module dtdc_summer
  import dtdc_pkg::*;
#(
  parameter int unsigned NTAPS_P = NTAPS,
  parameter int unsigned CNT_W_P = CNT_W
) (
  input  logic [NTAPS_P-1:0][CNT_W_P-1:0] cnt,
  output logic [CNT_W_P-1:0]              sum
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [NTAPS_P-1:0][CNT_W_P-1:0] acc;   // acc[k] = output of adder k (acc[0] = cnt[0])

  assign acc[0] = cnt[0];
  for (genvar k = 1; k < NTAPS_P; k++) begin : g_add
    assign acc[k] = acc[k-1] + cnt[k];
  end
  assign sum = acc[NTAPS_P-1];
endmodule
