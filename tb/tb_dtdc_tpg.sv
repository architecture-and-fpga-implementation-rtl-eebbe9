// tb_dtdc_tpg: self-checking testbench of the time-to-pulse generator.
//
// Drives pulses of several widths, starting at clock phases that avoid clock edges
// (the gaps and widths are chosen so that no tin edge falls on a clock edge), and
// records the times at which tf1, tf2 and tc change. Expected times are computed from
// the clock grid (posedges at 625 + k*1250 ps): tf1 = [t0, e1), tc = [e1, e2),
// tf2 = [t1, e2) with e1/e2 the second clock edge after the leading/trailing edge of tin.
// Also checks Eq. width(tin) = width(tc) + width(tf1) - width(tf2), a reset case, and
// that the TIN_ACTIVE_LOW variant driven with the inverted pulse behaves the same.
module tb_dtdc_tpg;
  timeunit 1ps;
  timeprecision 1ps;

  localparam longint T = 1250;

  logic clk = 1'b0, rst = 1'b1, tin = 1'b0;
  logic tf1, tf2, tc;
  int   checks = 0, failures = 0;

  dtdc_tpg dut (.clk(clk), .rst(rst), .tin(tin), .tf1(tf1), .tf2(tf2), .tc(tc));

  // second instance for a low-going pulse: fed with the inverted tin it must give the
  // same three outputs
  logic tf1_n, tf2_n, tc_n;
  dtdc_tpg #(.TIN_ACTIVE_LOW(1'b1)) dut_n (.clk(clk), .rst(rst), .tin(~tin), .tf1(tf1_n),
                                          .tf2(tf2_n), .tc(tc_n));
  always @(negedge clk) if (!rst) begin
    checks++;
    if ({tf1_n, tf2_n, tc_n} !== {tf1, tf2, tc}) begin
      failures++; $display("FAIL active-low instance differs at %0t", $time);
    end
  end

  always #(T/2) clk = ~clk;

  longint tf1_r, tf1_f, tf2_r, tf2_f, tc_r, tc_f;
  always @(posedge tf1) tf1_r = $time;
  always @(negedge tf1) tf1_f = $time;
  always @(posedge tf2) tf2_r = $time;
  always @(negedge tf2) tf2_f = $time;
  always @(posedge tc)  tc_r  = $time;
  always @(negedge tc)  tc_f  = $time;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // second clock posedge strictly after time t
  function automatic longint second_edge(input longint t);
    longint first;
    first = ((t - T/2) / T + 1) * T + T/2;
    return first + T;
  endfunction

  task automatic pulse(input longint gap, input longint width);
    longint t0, t1, e1, e2;
    if ((($time + gap) - T/2) % T == 0) gap++;            // keep tin edges off clock edges
    if ((($time + gap + width) - T/2) % T == 0) width++;
    #(gap);
    t0 = $time; tin = 1'b1;
    #(width);
    t1 = $time; tin = 1'b0;
    e1 = second_edge(t0);
    e2 = second_edge(t1);
    #(6*T);
    check("tf1 rise", tf1_r, t0);
    check("tf1 fall", tf1_f, e1);
    check("tc rise",  tc_r,  e1);
    check("tc fall",  tc_f,  e2);
    check("tf2 rise", tf2_r, t1);
    check("tf2 fall", tf2_f, e2);
    check("Eq.1", (tc_f - tc_r) + (tf1_f - tf1_r) - (tf2_f - tf2_r), width);
    checks++;
    if ((tf1_f - tf1_r) <= T || (tf1_f - tf1_r) > 2*T) begin
      failures++; $display("FAIL tf1 width %0d not in (T,2T]", tf1_f - tf1_r);
    end
  endtask

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // reset holds the outputs low while tin is high
    tin = 1'b1;
    repeat (4) @(posedge clk);
    #1;
    checks++; if (tf1 !== 1'b1 || tc !== 1'b0 || tf2 !== 1'b0) begin failures++; $display("FAIL reset state"); end
    tin = 1'b0;
    repeat (2) @(posedge clk);
    #3 rst = 1'b0;
    repeat (3) @(posedge clk);
    pulse(10_017,  100_000);     // 100 ns, the published example
    pulse(3_333,   2_600);       // just over two periods
    pulse(4_901,   37_777);
    pulse(5_100,   1_000_123);
    for (int i = 0; i < 20; i++)
      pulse(3_001 + longint'($urandom_range(0, 1248)), 2_600 + longint'($urandom_range(0, 40_000)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
