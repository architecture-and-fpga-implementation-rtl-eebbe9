// dtdc_alu: combines the coarse and fine results into the measured interval Dout.
//
// Equation: width(tin) = width(tc) + width(tf1) - width(tf2). The coarse count ctnc is in
// clock periods; each fine sum is in buffer delays, NTAPS of which make one period. The
// ALU therefore computes
//     dout = COARSE_WEIGHT * ctnc + cnt_f1 - cnt_f2      (COARSE_WEIGHT = NTAPS)
// which is the width of tin in buffer delays (62 ps by default, so a 100 ns pulse reads
// about 1613). Arithmetic is modulo 2**CNT_W.
//
// Sequencing: when c_valid announces a new coarse count, the ALU waits SETTLE clock
// cycles so that the last delayed copies of tf2 have been counted, then registers dout,
// pulses dout_valid and pulses fine_clr to clear the fine counter arrays for the next
// measurement. dout holds its value between results.
//
// Interface: clk, rst (synchronous), c_valid, ctnc, cnt_f1, cnt_f2 (CNT_W bits);
// dout (CNT_W bits, registered), dout_valid, fine_clr (one-cycle pulses, same cycle).
// Latency: dout_valid rises SETTLE + 1 clock edges after c_valid.
//
// The add/subtract is the published design's; the weighting of the coarse count (needed
// for the units to match), the settle wait and the clear are this design's choices.
module dtdc_alu
  import dtdc_pkg::*;
#(
  parameter int unsigned CNT_W_P       = CNT_W,
  parameter int unsigned COARSE_WEIGHT = NTAPS,
  parameter int unsigned SETTLE        = 2      // >= 1
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               c_valid,
  input  logic [CNT_W_P-1:0] ctnc,
  input  logic [CNT_W_P-1:0] cnt_f1,
  input  logic [CNT_W_P-1:0] cnt_f2,
  output logic [CNT_W_P-1:0] dout,
  output logic               dout_valid,
  output logic               fine_clr
);
  timeunit 1ps;
  timeprecision 1ps;

  localparam logic [CNT_W_P-1:0] WEIGHT = CNT_W_P'(COARSE_WEIGHT);
  localparam logic [7:0]         WAIT0  = 8'(SETTLE - 1);

  logic       pend;      // a coarse result is waiting for the fine counts to settle
  logic [7:0] wait_cnt;  // remaining settle cycles

  always_ff @(posedge clk) begin
    if (rst) begin
      pend       <= 1'b0;
      wait_cnt   <= '0;
      dout       <= '0;
      dout_valid <= 1'b0;
      fine_clr   <= 1'b0;
    end else begin
      dout_valid <= 1'b0;
      fine_clr   <= 1'b0;
      if (c_valid) begin
        pend     <= 1'b1;
        wait_cnt <= WAIT0;
      end else if (pend) begin
        if (wait_cnt == '0) begin
          dout       <= CNT_W_P'(WEIGHT * ctnc) + cnt_f1 - cnt_f2;
          dout_valid <= 1'b1;
          fine_clr   <= 1'b1;
          pend       <= 1'b0;
        end else begin
          wait_cnt <= wait_cnt - 1'b1;
        end
      end
    end
  end

  // A result and the clear of the fine counters always come together.
  a_clr_with_result: assert property (@(posedge clk) disable iff (rst) dout_valid == fine_clr)
    else $error("fine_clr and dout_valid out of step");
endmodule
