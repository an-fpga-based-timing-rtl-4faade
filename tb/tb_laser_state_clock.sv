// tb_laser_state_clock: base enable every 4 clocks; for each state s the
// output must toggle every 4*s clocks (frequency f_base / (2 s)).
`timescale 1ns / 1ps
module tb_laser_state_clock;
  import dcs_pkg::*;
  logic clk = 0, rst = 1, ce, q, q_d = 0;
  logic [1:0] c = 0;
  laser_state_e st = ST_IDLE;
  int checks = 0, failures = 0, cyc = 0, last = -1;
  int gaps [$];

  laser_state_clock dut (.clk, .rst, .ce_base(ce), .state(st), .clk_out(q));

  always #5 clk = ~clk;
  always @(posedge clk) begin c <= c + 1; end
  assign ce = (c == 2'd3);
  always @(negedge clk) begin
    cyc++;
    if (q != q_d) begin
      if (last >= 0) gaps.push_back(cyc - last);
      last = cyc;
    end
    q_d = q;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int s = 1; s <= 5; s++) begin
      @(negedge clk); st = laser_state_e'(s);
      repeat (8 * s + 6) @(negedge clk);   // settle
      gaps.delete(); last = -1;
      repeat (4 * s * 8 + 2) @(negedge clk);
      checks++;
      if (gaps.size() < 6) begin failures++; $display("FAIL state %0d: %0d toggles", s, gaps.size()); end
      foreach (gaps[i]) begin
        checks++;
        if (gaps[i] != 4 * s) begin failures++; $display("FAIL state %0d half period %0d", s, gaps[i]); end
      end
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
