// tb_dtdc_summer: self-checking testbench of the 19-adder summer.
//
// Applies random and corner-case counter values (zero, all ones to force 35-bit wrap,
// one non-zero input at a time) and compares the sum with a reference computed in a
// 64-bit loop and reduced modulo 2**35.
module tb_dtdc_summer;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  logic [NTAPS-1:0][CNT_W-1:0] cnt;
  logic [CNT_W-1:0]            sum;
  int checks = 0, failures = 0;

  dtdc_summer dut (.cnt(cnt), .sum(sum));

  initial begin
    #(1_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply_and_check(input string what);
    longint unsigned ref_sum = 0;
    #10;
    for (int k = 0; k < NTAPS; k++) ref_sum += longint'(cnt[k]);
    ref_sum &= (64'd1 << CNT_W) - 1;
    checks++;
    if (sum !== CNT_W'(ref_sum)) begin
      failures++;
      $display("FAIL %s: sum %0d expected %0d", what, sum, ref_sum);
    end
  endtask

  initial begin
    cnt = '0;
    apply_and_check("zero");
    for (int k = 0; k < NTAPS; k++) begin
      cnt = '0;
      cnt[k] = CNT_W'(k + 1) * CNT_W'(1000);
      apply_and_check("single input");
    end
    for (int k = 0; k < NTAPS; k++) cnt[k] = '1;
    apply_and_check("all ones (wrap)");
    for (int i = 0; i < 200; i++) begin
      for (int k = 0; k < NTAPS; k++)
        cnt[k] = (i < 100) ? CNT_W'($urandom_range(0, 3)) : {3'($urandom), $urandom};
      apply_and_check("random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
