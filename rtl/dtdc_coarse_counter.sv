// dtdc_coarse_counter: coarse TDC, counts whole clock periods of the tc pulse.
//
// While tc is high the running count increments on every rising clock edge. When tc is
// back at zero and the running count is not zero, the count is copied to ctnc, valid
// pulses for one cycle and the running count restarts from zero for the next pulse.
// ctnc holds its value until the next pulse has been counted.
//
// Interface: clk, rst (synchronous), tc (from the time-to-pulse generator, synchronous
// to clk); ctnc (CNT_W bits, registered), valid (one-cycle pulse).
// Timing: ctnc and valid change on the first clock edge at which tc is seen low.
//
// The counting and the "assign the count when tc is zero and the count is not zero"
// rule are the published design's; the width, the restart from zero and the valid
// output are this design's choices.
module dtdc_coarse_counter
  import dtdc_pkg::*;
#(
  parameter int unsigned CNT_W_P = CNT_W
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               tc,
  output logic [CNT_W_P-1:0] ctnc,
  output logic               valid
);
  timeunit 1ps;
  timeprecision 1ps;

  logic [CNT_W_P-1:0] run;   // running count of the current tc pulse

  always_ff @(posedge clk) begin
    if (rst) begin
      run   <= '0;
      ctnc  <= '0;
      valid <= 1'b0;
    end else begin
      valid <= 1'b0;
      if (tc) begin
        run <= run + 1'b1;
      end else if (run != '0) begin
        ctnc  <= run;
        valid <= 1'b1;
        run   <= '0;
      end
    end
  end

  // A coarse result is never zero: a pulse always lasts at least one clock period.
  a_valid_nonzero: assert property (@(posedge clk) disable iff (rst) valid |-> ctnc != '0)
    else $error("coarse result of zero");
endmodule
