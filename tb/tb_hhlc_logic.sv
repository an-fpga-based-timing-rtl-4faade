// tb_hhlc_logic: HHLC divider with DRV_DIV = 20, REF_DIV = 5, PULSE_W = 4
// (reference period M = 100 clocks). Checks, against numbers worked out by
// hand: nominal driver period 20 and pulse width 4; reference every 5th
// driver tick; a target delay of 3 gives exactly three 21-clock periods
// (slip) and then 20 again; a target of 98 (= -2 mod 100) from 3 is reached
// by five 19-clock periods (advance, the shorter way); finally the reference
// tick lies 98 clocks away from its unshifted position mod 100.
`timescale 1ns / 1ps
module tb_hhlc_logic;
  logic clk = 0, rst = 1;
  logic [31:0] target = 0, now;
  logic drv, dtick, rtick, slewing;
  int checks = 0, failures = 0;
  int cyc = 0, last_d = -1, last_r = -1, nd = 0;
  int periods [$];
  int rgaps [$];
  int pw = 0, max_pw = 0;
  int first_ref = -1, last_ref_abs = -1;

  hhlc_logic #(.DRV_DIV(20), .REF_DIV(5), .PULSE_W(4)) dut (
    .clk, .rst, .phase_target(target), .drv_out(drv), .drv_tick(dtick), .ref_tick(rtick),
    .phase_now(now), .slewing);

  always #5 clk = ~clk;

  always @(negedge clk) if (!rst) begin
    cyc++;
    if (dtick) begin
      if (last_d >= 0) periods.push_back(cyc - last_d);
      last_d = cyc; nd++;
    end
    if (rtick) begin
      if (last_r >= 0) rgaps.push_back(cyc - last_r);
      if (first_ref < 0) first_ref = cyc;
      last_r = cyc;
    end
    if (drv) pw++;
    else begin if (pw > max_pw) max_pw = pw; pw = 0; end
  end

  task automatic expect_periods(int n, int val, string what);
    for (int i = 0; i < n; i++) begin
      checks++;
      if (periods.size() == 0) begin failures++; $display("FAIL %s: no period", what); end
      else begin
        if (periods[0] != val) begin failures++; $display("FAIL %s: period %0d expected %0d", what, periods[0], val); end
        void'(periods.pop_front());
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (20 * 10) @(posedge clk);
    expect_periods(periods.size(), 20, "nominal");
    checks++;
    if (max_pw != 4) begin failures++; $display("FAIL pulse width %0d", max_pw); end
    foreach (rgaps[i]) begin
      checks++;
      if (rgaps[i] != 100) begin failures++; $display("FAIL reference gap %0d", rgaps[i]); end
    end
    // slip by 3
    @(negedge clk); target = 3;
    periods.delete();
    repeat (20 * 12) @(posedge clk);
    checks++;
    if (now != 3 || slewing) begin failures++; $display("FAIL phase_now %0d", now); end
    begin
      int n21 = 0, n20 = 0;
      foreach (periods[i]) if (periods[i] == 21) n21++; else if (periods[i] == 20) n20++;
      checks++;
      if (n21 != 3 || n20 + n21 != periods.size()) begin failures++; $display("FAIL slip: %0d long periods", n21); end
    end
    // advance to 98 (5 steps down: 3,2,1,0,99,98)
    @(negedge clk); target = 98;
    periods.delete();
    repeat (20 * 12) @(posedge clk);
    checks++;
    if (now != 98) begin failures++; $display("FAIL phase_now %0d expected 98", now); end
    begin
      int n19 = 0, nother = 0;
      foreach (periods[i]) if (periods[i] == 19) n19++; else if (periods[i] != 20) nother++;
      checks++;
      if (n19 != 5 || nother != 0) begin failures++; $display("FAIL advance: %0d short periods", n19); end
    end
    // the reference moved by 3 - 5 = -2 clocks modulo 100
    checks++;
    if (((last_r - first_ref) % 100 + 100) % 100 != 98) begin
      failures++; $display("FAIL reference phase %0d", (last_r - first_ref) % 100);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
