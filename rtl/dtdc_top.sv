// dtdc_top: digital time-to-digital converter with two multiple-delay-line fine TDCs.
//
// Measures the width of the pulse tin (for a sensor front end, the period or half period
// of a resistance-controlled oscillator) with a resolution of one buffer delay over a
// range limited only by the CNT_W-bit counters.
//
//   tin -> dtdc_tpg --tf1--> dtdc_fine_tdc (fine TDC1) --cnt_f1--+
//                   --tf2--> dtdc_fine_tdc (fine TDC2) --cnt_f2--+--> dtdc_alu --> dout
//                   --tc---> dtdc_coarse_counter ------ctnc------+
//
// The time-to-pulse generator splits tin into a clock-synchronous coarse part tc and two
// asynchronous fine parts tf1 (start) and tf2 (stop), each one to two clock periods long.
// The coarse counter counts tc in clock periods; each fine TDC measures its pulse in
// buffer delays by summing NTAPS counters that sample delayed copies of it; the ALU
// forms NTAPS*coarse + fine1 - fine2 and then clears the fine counters.
//
// Interface: clk (800 MHz in the published design), rst (synchronous, active high),
// tin (asynchronous pulse), en[NLINES] (counter-array enable shared by both fine TDCs:
// set one bit per measurement and step through the arrays in turn), dout (width of tin
// in buffer delays, registered), dout_valid (one-cycle pulse per result).
// Timing: dout_valid arrives SETTLE + 2 clock cycles after the coarse pulse ends, i.e.
// about 6 clock periods after the trailing edge of tin. tin must stay high at least two
// clock periods, and low at least about eight periods between pulses.
//
// Follows the published design: block structure, 4 lines x 20 buffers x 35-bit counters
// per fine TDC, 19 adders per array, output multiplexer, coarse counter rule and the
// coarse + fine1 - fine2 combination. This design's choices: the 62 ps buffer delay,
// weighting the coarse count by NTAPS, the clear/settle sequencing and dout_valid.
module dtdc_top
  import dtdc_pkg::*;
#(
  parameter int unsigned NLINES_P       = NLINES,
  parameter int unsigned NTAPS_P        = NTAPS,
  parameter int unsigned CNT_W_P        = CNT_W,
  parameter int unsigned BUF_DELAY_PS_P = BUF_DELAY_PS,
  parameter bit          TIN_ACTIVE_LOW = 1'b0
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                tin,
  input  logic [NLINES_P-1:0] en,
  output logic [CNT_W_P-1:0]  dout,
  output logic                dout_valid
);
  timeunit 1ps;
  timeprecision 1ps;

  logic               tf1, tf2, tc;
  logic [CNT_W_P-1:0] cnt_f1, cnt_f2, ctnc;
  logic               c_valid, fine_clr;

  dtdc_tpg #(.TIN_ACTIVE_LOW(TIN_ACTIVE_LOW)) u_tpg (
    .clk(clk), .rst(rst), .tin(tin), .tf1(tf1), .tf2(tf2), .tc(tc)
  );

  dtdc_fine_tdc #(
    .NLINES_P(NLINES_P), .NTAPS_P(NTAPS_P), .CNT_W_P(CNT_W_P), .BUF_DELAY_PS_P(BUF_DELAY_PS_P)
  ) u_fine1 (
    .clk(clk), .rst(rst), .clr(fine_clr), .tf(tf1), .en(en), .cnt(cnt_f1)
  );

  dtdc_fine_tdc #(
    .NLINES_P(NLINES_P), .NTAPS_P(NTAPS_P), .CNT_W_P(CNT_W_P), .BUF_DELAY_PS_P(BUF_DELAY_PS_P)
  ) u_fine2 (
    .clk(clk), .rst(rst), .clr(fine_clr), .tf(tf2), .en(en), .cnt(cnt_f2)
  );

  dtdc_coarse_counter #(.CNT_W_P(CNT_W_P)) u_coarse (
    .clk(clk), .rst(rst), .tc(tc), .ctnc(ctnc), .valid(c_valid)
  );

  dtdc_alu #(.CNT_W_P(CNT_W_P), .COARSE_WEIGHT(NTAPS_P), .SETTLE(2)) u_alu (
    .clk(clk), .rst(rst), .c_valid(c_valid), .ctnc(ctnc), .cnt_f1(cnt_f1), .cnt_f2(cnt_f2),
    .dout(dout), .dout_valid(dout_valid), .fine_clr(fine_clr)
  );
endmodule
