// tb_dtdc_delay_line: self-checking testbench of the behavioural delay-line model.
//
// Sends pulses of several widths into the 20-buffer line and checks, just before and
// just after each expected edge, that tap k rises (k+1)*62 ps after din rises and falls
// (k+1)*62 ps after din falls.
module tb_dtdc_delay_line;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int unsigned N = 20;
  localparam int unsigned D = 62;

  logic         din = 1'b0;
  logic [N-1:0] taps;
  int           checks = 0, failures = 0;

  dtdc_delay_line #(.NTAPS(N), .BUF_DELAY_PS(D)) dut (.din(din), .taps(taps));

  initial begin
    #(10_000_000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Samples every tap 1 ps before and 1 ps after its expected edge at base + (k+1)*D.
  task automatic check_edge(input longint base, input logic exp_before, input logic exp_after);
    for (int k = 0; k < N; k++) begin
      #(base + longint'((k + 1) * D) - 1 - $time);
      checks++;
      if (taps[k] !== exp_before) begin failures++; $display("FAIL tap %0d before edge at %0t", k, $time); end
      #2;
      checks++;
      if (taps[k] !== exp_after) begin failures++; $display("FAIL tap %0d after edge at %0t", k, $time); end
    end
  endtask

  initial begin
    longint t;
    #5000;
    checks++;
    if (taps !== '0) begin failures++; $display("FAIL taps not idle"); end
    for (int i = 0; i < 4; i++) begin
      longint w;
      w = (i == 0) ? 5000 : (i == 1) ? 1300 : (i == 2) ? 100_000 : 2000 + longint'($urandom_range(0, 3000));
      t = $time + 1000;
      #(t - $time) din = 1'b1;
      fork
        check_edge(t, 1'b0, 1'b1);
        #(w) din = 1'b0;
      join
      check_edge(t + w, 1'b1, 1'b0);
      #(2 * N * D);
      checks++;
      if (taps !== '0) begin failures++; $display("FAIL taps not back to idle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
