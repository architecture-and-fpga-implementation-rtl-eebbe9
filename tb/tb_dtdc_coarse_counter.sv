// tb_dtdc_coarse_counter: self-checking testbench of the coarse counter.
//
// Drives tc high for N whole clock periods (changed on the falling edge), for N from 1
// to a few thousand, and checks that ctnc becomes N on the first rising edge at which tc
// is low, that valid pulses for exactly one cycle there, and that ctnc then holds.
module tb_dtdc_coarse_counter;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  logic clk = 1'b0, rst = 1'b1, tc = 1'b0;
  logic [CNT_W-1:0] ctnc;
  logic valid;
  int checks = 0, failures = 0;

  dtdc_coarse_counter dut (.clk(clk), .rst(rst), .tc(tc), .ctnc(ctnc), .valid(valid));

  always #625 clk = ~clk;

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

  task automatic run_pulse(input int n);
    logic [CNT_W-1:0] prev;
    prev = ctnc;
    tc = 1'b1;
    repeat (n) begin
      @(negedge clk);
      chk("no valid while tc high", !valid);
      chk("output held while counting", ctnc == prev);
    end
    tc = 1'b0;
    @(negedge clk);              // one rising edge with tc low has passed
    chk("valid on first low edge", valid);
    chk("count value", ctnc == CNT_W'(n));
    @(negedge clk);
    chk("valid is one cycle", !valid);
    repeat (3) @(negedge clk);
    chk("output holds", ctnc == CNT_W'(n) && !valid);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (3) @(negedge clk);
    chk("no valid without a pulse", !valid && ctnc == '0);
    run_pulse(1);
    run_pulse(2);
    run_pulse(80);               // 100 ns at 800 MHz
    run_pulse(3000);
    for (int i = 0; i < 10; i++) run_pulse($urandom_range(1, 200));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
