// dtdc_delay_line: behavioural model of one tapped delay line (not synthesizable).
//
// A chain of NTAPS buffers, each delaying its input by BUF_DELAY_PS picoseconds.
// Output taps[k] is the output of buffer k, i.e. din delayed by (k+1)*BUF_DELAY_PS.
// In silicon or in an FPGA the delay comes from the cells themselves (buffers, LUTs or
// carry elements), so it cannot be written as logic; this model gives the timing such
// a line would have, for simulation. Each buffer is an inertial delay: a pulse shorter
// than one buffer delay is swallowed, as in a real gate.
//
// Interface: din (one-shot pulse tf1 or tf2), taps[NTAPS-1:0].
// The published design uses 20 buffers per line; it gives no buffer delay. 62 ps is
// this design's choice: 20 x 62 ps = 1240 ps, just under one 1250 ps clock period, so
// that the taps together sample one clock period at nearly even steps without a tap
// landing exactly on a clock edge.
module dtdc_delay_line #(
  parameter int unsigned NTAPS        = 20,
  parameter int unsigned BUF_DELAY_PS = 62
) (
  input  logic             din,
  output logic [NTAPS-1:0] taps
);
  timeunit 1ps;
  timeprecision 1ps;

  assign #(BUF_DELAY_PS) taps[0] = din;
  for (genvar k = 1; k < NTAPS; k++) begin : g_buf
    assign #(BUF_DELAY_PS) taps[k] = taps[k-1];
  end
endmodule
