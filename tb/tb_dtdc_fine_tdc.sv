// tb_dtdc_fine_tdc: self-checking testbench of one fine TDC (4 lines x 20 taps).
//
// Generates one-shot pulses the way the time-to-pulse generator does: the pulse starts
// at an arbitrary time ts and ends on the second rising clock edge after ts. Only one
// counter array is enabled per pulse, stepping through arrays 0..3. The expected sum is
// computed independently from the clock grid: tap j (j = 1..20) is high on
// [ts + j*62, te + j*62) and its counter gets the rising edges p with
// ts + j*62 < p <= te + j*62. The result is also compared with the ideal width
// (te - ts) / 62.5 ps (one clock period = 20 steps) to within 1.5 steps. After each pulse
// the other arrays must read zero, with two arrays enabled the lower-numbered one must be
// selected, and clr must clear the enabled one.
module tb_dtdc_fine_tdc;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  localparam longint T = CLK_PERIOD_PS;
  localparam longint D = BUF_DELAY_PS;
  localparam longint H = T / 2;           // first rising edge; edges at H + k*T

  logic clk = 1'b0, rst = 1'b1, clr = 1'b0, tf = 1'b0;
  logic [NLINES-1:0] en = '0;
  logic [CNT_W-1:0]  cnt;
  int checks = 0, failures = 0;
  int used [NLINES];

  dtdc_fine_tdc dut (.clk(clk), .rst(rst), .clr(clr), .tf(tf), .en(en), .cnt(cnt));

  always #(H) clk = ~clk;

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input bit ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // number of rising edges in (a, b]
  function automatic longint edges(input longint a, input longint b);
    return (b - H + T) / T - (a - H + T) / T;
  endfunction

  function automatic longint ref_sum(input longint ts, input longint te);
    longint s = 0;
    for (longint j = 1; j <= NTAPS; j++) s += edges(ts + j * D, te + j * D);
    return s;
  endfunction

  // true if a delayed copy of time ts would land exactly on a rising clock edge
  function automatic bit on_edge(input longint ts);
    for (longint j = 0; j <= NTAPS; j++)
      if (((ts + j * D) - H) % T == 0) return 1'b1;
    return 1'b0;
  endfunction

  task automatic measure(input int line, input longint phase);
    longint ts, te, exp, ideal_x2;
    en = '0;
    en[line] = 1'b1;
    @(posedge clk);
    ts = $time + phase;
    while (on_edge(ts)) ts++;
    #(ts - $time) tf = 1'b1;
    @(posedge clk);
    @(posedge clk);
    tf = 1'b0;                   // ends on the second rising edge after ts
    te = $time;
    repeat (2) @(negedge clk);
    exp = ref_sum(ts, te);
    chk("fine sum equals edge-count reference", cnt == CNT_W'(exp));
    if (cnt != CNT_W'(exp)) $display("  line %0d ts=%0d te=%0d cnt=%0d exp=%0d", line, ts, te, cnt, exp);
    // |cnt - (te-ts)*NTAPS/T| <= 1.5, in units of 1/(2T)
    ideal_x2 = (te - ts) * NTAPS * 2;
    chk("fine sum within 1.5 steps of ideal",
        (longint'(cnt) * 2 * T - ideal_x2) <= 3 * T && (ideal_x2 - longint'(cnt) * 2 * T) <= 3 * T);
    used[line]++;
    for (int l = 0; l < NLINES; l++) begin
      if (l == line) continue;
      en = '0; en[l] = 1'b1;
      #1;
      chk("disabled array did not count", cnt == '0);
    end
    en = '0; en[line] = 1'b1;
    #1;
    chk("mux returns enabled array", cnt == CNT_W'(exp));
    // two arrays enabled: the lower-numbered one is selected
    en = '0; en[line] = 1'b1;
    if (line < NLINES - 1) en[NLINES-1] = 1'b1; else en[0] = 1'b1;
    #1;
    chk("mux selects lowest enabled array", cnt == ((line < NLINES - 1) ? CNT_W'(exp) : '0));
    en = '0;
    #1;
    chk("no enable gives zero", cnt == '0);
    en[line] = 1'b1;
    @(negedge clk) clr = 1'b1;
    @(negedge clk) clr = 1'b0;
    chk("clear", cnt == '0);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    for (int i = 0; i < 40; i++)
      measure(i % NLINES, (i < 20) ? 1 + longint'(i) * 62 : longint'($urandom_range(1, 1249)));
    for (int l = 0; l < NLINES; l++) chk("every counter array used", used[l] > 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
