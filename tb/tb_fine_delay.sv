// tb_fine_delay: sends pulses through the tap delay line for taps 0, 1, 8,
// 20, 36 and 63 (clamped to 36) and measures rising- and falling-edge delay
// against tap * 78 ps; the pulse width must be preserved.
`timescale 1ps / 1ps
module tb_fine_delay;
  logic din = 0, dout;
  logic [5:0] tap = 0;
  int checks = 0, failures = 0;
  time t0, t1;

  fine_delay dut (.din, .tap, .dout);

  task automatic one(int t);
    int exp;
    exp = ((t > 36) ? 36 : t) * 78;
    tap = 6'(t);
    #5000;
    din = 1; t0 = $time;
    @(posedge dout); t1 = $time;
    checks++;
    if (int'(t1 - t0) != exp) begin failures++; $display("FAIL tap %0d rise %0d expected %0d", t, t1 - t0, exp); end
    #1000 din = 0; t0 = $time;
    @(negedge dout); t1 = $time;
    checks++;
    if (int'(t1 - t0) != exp) begin failures++; $display("FAIL tap %0d fall %0d", t, t1 - t0); end
  endtask

  initial begin
    #100;
    one(1); one(8); one(20); one(36); one(63); one(2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
