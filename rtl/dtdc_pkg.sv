// dtdc_pkg: constants and types shared by the digital time-to-digital converter.
//
// The converter measures the width of a pulse with a coarse clock counter and two
// fine interpolators. Each fine interpolator ("fine TDC") has NLINES parallel delay
// lines of NTAPS buffers; every buffer output feeds one CNT_W-bit counter. The counts
// of the NTAPS counters of one line are summed by a chain of NTAPS-1 adders.
// NLINES = 4, NTAPS = 20 and the 35-bit adder width are the figures of the published
// design; the 800 MHz clock (1250 ps) is its operating clock. The 62 ps buffer delay
// is this design's choice: 20 taps of 62 ps span just under one clock period.
package dtdc_pkg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned NLINES       = 4;    // parallel delay lines per fine TDC
  localparam int unsigned NTAPS        = 20;   // buffers per delay line = counters per array
  localparam int unsigned CNT_W        = 35;   // counter, adder and Dout width
  localparam int unsigned CLK_PERIOD_PS = 1250; // 800 MHz reference clock
  localparam int unsigned BUF_DELAY_PS = 62;   // delay of one buffer (design choice)

  typedef logic [CNT_W-1:0] cnt_t;
endpackage
