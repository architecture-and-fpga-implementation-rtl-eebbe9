// dtdc_fine_tdc: fine TDC built from NLINES parallel multiple-delay-line channels.
//
// The one-shot pulse tf (tf1 or tf2 of the time-to-pulse generator) enters all NLINES
// delay lines at once. Each line has NTAPS buffers; buffer k drives counter k of the
// counter array belonging to that line, and a chain of NTAPS-1 adders sums the array.
// A multiplexer passes the sum of the selected array to cnt.
//
// Why the sum measures tf: tf starts asynchronously and ends on a clock edge. Tap k
// sees it delayed by (k+1) buffer delays; its counter gets 1 or 2 clock edges depending
// on where the delayed start falls within the clock period. With NTAPS buffer delays
// spanning one clock period, the sum equals NTAPS (one period) plus the number of taps
// whose delayed start is still before the first clock edge, i.e. the width of tf
// expressed in buffer delays, rounded up.
//
// Enable and select: en has one bit per counter array. Only enabled arrays count. The
// multiplexer selects the lowest-numbered enabled array; with en = 0 the output is 0.
// The arrays are meant to be enabled one at a time, in turn, from outside.
//
// Interface: clk, rst, clr (clear all counters), tf, en[NLINES], cnt (CNT_W bits,
// combinational from the counter registers).
// Timing: cnt is final one clock edge after the last tap has fallen, i.e. at most one
// clock period plus one buffer delay after tf ends.
//
// Published design: 4 lines of 20 buffers, 20 counters and 19 adders per array, a
// multiplexer after the four adder chains, arrays "triggered by order". The lowest-
// index select rule and the clear input are this design's choices. The delay lines are
// behavioural models.
module dtdc_fine_tdc
  import dtdc_pkg::*;
#(
  parameter int unsigned NLINES_P       = NLINES,
  parameter int unsigned NTAPS_P        = NTAPS,
  parameter int unsigned CNT_W_P        = CNT_W,
  parameter int unsigned BUF_DELAY_PS_P = BUF_DELAY_PS
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                clr,
  input  logic                tf,
  input  logic [NLINES_P-1:0] en,
  output logic [CNT_W_P-1:0]  cnt
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [NLINES_P-1:0][NTAPS_P-1:0]              taps;
  logic [NLINES_P-1:0][NTAPS_P-1:0][CNT_W_P-1:0] counts;
  logic [NLINES_P-1:0][CNT_W_P-1:0]              sums;

  for (genvar l = 0; l < NLINES_P; l++) begin : g_line
    dtdc_delay_line #(
      .NTAPS(NTAPS_P), .BUF_DELAY_PS(BUF_DELAY_PS_P)
    ) u_dl (
      .din(tf), .taps(taps[l])
    );
    dtdc_counter_array #(
      .NTAPS_P(NTAPS_P), .CNT_W_P(CNT_W_P)
    ) u_ca (
      .clk(clk), .rst(rst), .clr(clr), .en(en[l]), .taps(taps[l]), .cnt(counts[l])
    );
    dtdc_summer #(
      .NTAPS_P(NTAPS_P), .CNT_W_P(CNT_W_P)
    ) u_sum (
      .cnt(counts[l]), .sum(sums[l])
    );
  end

  // Output multiplexer: sum of the lowest-numbered enabled counter array.
  always_comb begin
    cnt = '0;
    for (int l = NLINES_P - 1; l >= 0; l--) begin
      if (en[l]) cnt = sums[l];
    end
  end
endmodule
