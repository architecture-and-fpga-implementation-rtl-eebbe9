// tb_dtdc_top: end-to-end testbench of the complete converter at its default size
// (4 delay lines x 20 buffers x 35-bit counters per fine TDC, 800 MHz clock).
//
// Sends tin pulses of various widths, including the 100 ns pulse of the published
// simulation, stepping the counter-array enable through arrays 0..3. For each pulse the
// expected dout is computed from the pulse's edge times alone:
//   e1, e2 = second rising clock edge after the leading / trailing edge of tin
//   coarse = (e2 - e1) / T
//   fine(ts, te) = sum over taps j = 1..20 of the rising edges p with
//                  ts + j*62 < p <= te + j*62
//   dout = 20*coarse + fine(t0, e1) - fine(t1, e2)
// and dout must also lie within 2 steps of the ideal width / 62.5 ps. dout_valid must
// arrive exactly 4 clock periods after e2. Every mechanism (each counter array, coarse
// result, fine-counter clear, the 100 ns case, shortest pulse) is counted and must occur.
module tb_dtdc_top;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  localparam longint T = CLK_PERIOD_PS;
  localparam longint D = BUF_DELAY_PS;
  localparam longint H = T / 2;            // rising edges at H + k*T

  logic clk = 1'b0, rst = 1'b1, tin = 1'b0;
  logic [NLINES-1:0] en = '0;
  logic [CNT_W-1:0]  dout;
  logic              dout_valid;
  int checks = 0, failures = 0;
  int used [NLINES];
  int n_coarse = 0, n_clear = 0, n_100ns = 0, n_short = 0, n_long = 0;

  dtdc_top dut (.clk(clk), .rst(rst), .tin(tin), .en(en), .dout(dout), .dout_valid(dout_valid));

  always #(H) clk = ~clk;

  // mechanism counters, observed inside the design
  always @(posedge clk) begin
    if (dut.c_valid)  n_coarse++;
    if (dut.fine_clr) n_clear++;
  end

  initial begin
    #(200_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  function automatic longint edges(input longint a, input longint b);  // rising edges in (a, b]
    return (b - H + T) / T - (a - H + T) / T;
  endfunction

  function automatic longint second_edge(input longint t);
    return ((t - H) / T + 2) * T + H;
  endfunction

  function automatic longint fine_ref(input longint ts, input longint te);
    longint s = 0;
    for (longint j = 1; j <= NTAPS; j++) s += edges(ts + j * D, te + j * D);
    return s;
  endfunction

  function automatic bit on_edge(input longint t);   // t or a delayed copy on a clock edge
    for (longint j = 0; j <= NTAPS; j++)
      if (((t + j * D) - H) % T == 0) return 1'b1;
    return 1'b0;
  endfunction

  task automatic measure(input int line, input longint gap, input longint width);
    longint t0, t1, e1, e2, exp, ideal_x2, got_t;
    en = '0;
    en[line] = 1'b1;
    t0 = $time + gap;
    while (on_edge(t0)) t0++;
    t1 = t0 + width;
    while (on_edge(t1)) t1++;
    #(t0 - $time) tin = 1'b1;
    #(t1 - t0)    tin = 1'b0;
    e1 = second_edge(t0);
    e2 = second_edge(t1);
    exp = 20 * ((e2 - e1) / T) + fine_ref(t0, e1) - fine_ref(t1, e2);
    got_t = -1;
    for (int i = 0; i < 10 && got_t < 0; i++) begin
      @(posedge clk);
      #1;
      if (dout_valid) got_t = $time - 1;
    end
    chk("dout_valid 4 periods after coarse end", got_t == e2 + 4 * T);
    chk("dout equals edge-count reference", dout == CNT_W'(exp));
    ideal_x2 = (t1 - t0) * NTAPS * 2;
    chk("dout within 2 steps of ideal",
        longint'(dout) * 2 * T - ideal_x2 <= 4 * T && ideal_x2 - longint'(dout) * 2 * T <= 4 * T);
    if (dout != CNT_W'(exp) || got_t != e2 + 4 * T)
      $display("  width=%0d dout=%0d exp=%0d valid_t=%0d e2=%0d", t1 - t0, dout, exp, got_t, e2);
    used[line]++;
    if (t1 - t0 == 100_000) begin
      n_100ns++;
      $display("100 ns pulse: dout = %0d steps of %0.1f ps (%0.1f ns)", dout, real'(T) / NTAPS,
               real'(dout) * T / NTAPS / 1000.0);
    end
    if (t1 - t0 < 3 * T) n_short++;
    if (t1 - t0 > 1_000_000) n_long++;
    repeat (2) @(negedge clk);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst = 1'b0;
    repeat (4) @(negedge clk);
    measure(0, 830_000 - $time, 100_000);     // the published 100 ns example, 830..930 ns
    measure(1, 5_000, 2_600);                 // shortest pulse: just over two periods
    measure(2, 5_000, 37_777);
    measure(3, 5_000, 2_000_017);             // 2 us
    for (int i = 0; i < 60; i++)
      measure(i % NLINES, 10_000 + longint'($urandom_range(0, 1249)),
              2_600 + longint'($urandom_range(0, 200_000)));
    for (int l = 0; l < NLINES; l++) chk("every counter array used", used[l] > 0);
    chk("coarse results produced", n_coarse == 64);
    chk("fine counters cleared after each result", n_clear == 64);
    chk("100 ns workload run", n_100ns == 1);
    chk("short pulse run", n_short > 0);
    chk("long pulse run", n_long > 0);
    $display("mechanisms: arrays %0d/%0d/%0d/%0d coarse=%0d clear=%0d 100ns=%0d short=%0d long=%0d",
             used[0], used[1], used[2], used[3], n_coarse, n_clear, n_100ns, n_short, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
