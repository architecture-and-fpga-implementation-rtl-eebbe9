// tb_dtdc_counter_array: self-checking testbench of one 20-counter array.
//
// Drives random tap patterns (changed on the falling clock edge), random enable and
// occasional clear, and keeps an independent count per tap: a counter must increment on
// each rising edge at which en and its tap are high, and return to zero on clr or rst.
module tb_dtdc_counter_array;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  logic clk = 1'b0, rst = 1'b1, clr = 1'b0, en = 1'b0;
  logic [NTAPS-1:0]            taps = '0;
  logic [NTAPS-1:0][CNT_W-1:0] cnt;
  longint unsigned model [NTAPS];
  int checks = 0, failures = 0;

  dtdc_counter_array dut (.clk(clk), .rst(rst), .clr(clr), .en(en), .taps(taps), .cnt(cnt));

  always #625 clk = ~clk;

  initial begin
    #(100_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model, updated on the same edge as the design
  always @(posedge clk) begin
    for (int k = 0; k < NTAPS; k++) begin
      if (rst || clr)          model[k] = 0;
      else if (en && taps[k])  model[k] = model[k] + 1;
    end
  end

  task automatic compare(input string what);
    for (int k = 0; k < NTAPS; k++) begin
      checks++;
      if (cnt[k] !== CNT_W'(model[k])) begin
        failures++;
        $display("FAIL %s: counter %0d = %0d expected %0d", what, k, cnt[k], model[k]);
      end
    end
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    compare("after reset");
    // all taps high, disabled: nothing counts
    taps = '1;
    repeat (5) @(negedge clk);
    compare("disabled");
    en = 1'b1;
    repeat (7) @(negedge clk);
    compare("all taps, enabled");
    for (int i = 0; i < 400; i++) begin
      taps = NTAPS'($urandom);
      en   = ($urandom_range(0, 7) != 0);
      clr  = ($urandom_range(0, 49) == 0);
      @(negedge clk);
      compare("random");
    end
    clr = 1'b1; @(negedge clk); clr = 1'b0;
    compare("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
