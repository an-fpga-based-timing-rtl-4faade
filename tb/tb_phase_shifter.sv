// tb_phase_shifter: three-stage phase shifter (depths 5, 4, 3) on aligned
// enables of period 32, 8 and 2 clocks. A trigger is sent on every tenth
// slow enable; for several length settings the clocks from trigger to
// output are measured and compared with l0*32 + l1*8 + l2*2 + 1.
// A two-stage instance with its fast stage removed (D2 = 0) is checked too.
`timescale 1ns / 1ps
module tb_phase_shifter;
  import dcs_pkg::*;
  logic clk = 0, rst = 1;
  logic [4:0] c = 0;
  logic [2:0] ce;
  logic [3:0] k = 0;
  logic trig, out3, out2;
  delay_t len;
  int checks = 0, failures = 0;
  int cyc = 0, t_in = -1;

  // aligned enables: ce[2] every 2 clocks, ce[1] every 8, ce[0] every 32
  assign ce[2] = (c[0] == 1'b1);
  assign ce[1] = (c[2:0] == 3'b111);
  assign ce[0] = (c == 5'b11111);
  assign trig  = ce[0] && (k == 0);

  phase_shifter #(.D0(5), .D1(4), .D2(3)) dut (.clk, .rst, .ce, .trig_in(trig), .len, .trig_out(out3));
  phase_shifter #(.D0(5), .D1(4), .D2(0)) dut2 (.clk, .rst, .ce, .trig_in(trig), .len, .trig_out(out2));

  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    c <= c + 1;
    if (ce[0]) k <= (k == 4'd9) ? 4'd0 : k + 1'b1;
  end

  task automatic measure(int l0, int l1, int l2);
    int exp3, exp2, t3, t2;
    len = '{l2: 10'(l2), l1: 10'(l1), l0: 10'(l0)};
    exp3 = l0 * 32 + l1 * 8 + l2 * 2 + 1;
    exp2 = l0 * 32 + l1 * 8 + 1;
    // flush: wait for two trigger periods
    repeat (2 * 320 + 5) @(posedge clk);
    @(negedge clk);
    while (!trig) @(negedge clk);
    t3 = -1; t2 = -1;
    for (int i = 1; i <= 300; i++) begin
      @(posedge clk);
      #1;
      if (out3 && t3 < 0) t3 = i;
      if (out2 && t2 < 0) t2 = i;
    end
    checks++;
    if (t3 != exp3) begin failures++; $display("FAIL 3-stage %0d/%0d/%0d: %0d expected %0d", l0, l1, l2, t3, exp3); end
    checks++;
    if (t2 != exp2) begin failures++; $display("FAIL 2-stage %0d/%0d: %0d expected %0d", l0, l1, t2, exp2); end
  endtask

  initial begin
    len = '0;
    repeat (40) @(posedge clk);
    rst <= 0;
    measure(0, 0, 0);
    measure(1, 0, 0);
    measure(0, 1, 0);
    measure(0, 0, 1);
    measure(2, 3, 1);
    measure(4, 2, 3);
    measure(5, 4, 3);
    measure(3, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
