// tb_dtdc_alu: self-checking testbench of the ALU.
//
// Presents coarse and fine values with a one-cycle c_valid, then checks that dout equals
// 20*ctnc + cnt_f1 - cnt_f2 (mod 2**35, computed in 64 bits here), that dout_valid and
// fine_clr pulse together exactly SETTLE+1 = 3 rising edges after c_valid, and that dout
// holds afterwards.
module tb_dtdc_alu;
  timeunit 1ps;
  timeprecision 1ps;
  import dtdc_pkg::*;

  logic clk = 1'b0, rst = 1'b1, c_valid = 1'b0;
  logic [CNT_W-1:0] ctnc = '0, f1 = '0, f2 = '0, dout;
  logic dout_valid, fine_clr;
  int checks = 0, failures = 0;

  dtdc_alu dut (.clk(clk), .rst(rst), .c_valid(c_valid), .ctnc(ctnc), .cnt_f1(f1),
                .cnt_f2(f2), .dout(dout), .dout_valid(dout_valid), .fine_clr(fine_clr));

  always #625 clk = ~clk;

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

  task automatic one(input longint unsigned c, input longint unsigned a, input longint unsigned b);
    longint unsigned exp;
    int lat;
    exp = (20 * c + a - b) & ((64'd1 << CNT_W) - 1);
    ctnc = CNT_W'(c); f1 = CNT_W'(a); f2 = CNT_W'(b);
    c_valid = 1'b1;
    @(negedge clk);
    c_valid = 1'b0;
    lat = 1;
    while (!dout_valid && lat < 20) begin
      chk("no clear before result", !fine_clr);
      @(negedge clk);
      lat++;
    end
    chk("latency SETTLE+1", lat == 3);
    chk("fine_clr with dout_valid", fine_clr);
    chk("dout value", dout == CNT_W'(exp));
    if (dout != CNT_W'(exp)) $display("  dout %0d expected %0d", dout, exp);
    @(negedge clk);
    chk("one-cycle pulses", !dout_valid && !fine_clr);
    ctnc = '0; f1 = '1; f2 = '0;
    repeat (2) @(negedge clk);
    chk("dout holds", dout == CNT_W'(exp));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst = 1'b0;
    repeat (2) @(negedge clk);
    chk("idle after reset", !dout_valid && !fine_clr && dout == '0);
    one(80, 31, 28);            // about 100 ns
    one(0, 21, 40);             // negative result wraps
    one(1, 20, 20);
    one(64'h7_FFFF_FFFF, 5, 3);
    for (int i = 0; i < 50; i++)
      one($urandom_range(0, 100000), $urandom_range(20, 40), $urandom_range(20, 40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
