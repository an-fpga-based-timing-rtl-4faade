// tb_divider_chain: runs the divider chain with small divisors (2,3,4,2,3)
// and checks, for every output, the number of clocks between pulses
// (products of the divisors) and that each slower pulse coincides with a
// pulse of every faster output.
`timescale 1ns / 1ps
module tb_divider_chain;
  localparam int A = 2, P = 3, J = 4, T = 2, S = 3;
  logic clk = 0, rst = 1;
  logic c88, cp0, c985, c329, c2p7;
  int checks = 0, failures = 0;
  int last [5];
  int cyc = 0;
  int seen [5];
  const int per [5] = '{A, A*P, A*P*J, A*P*J*T, A*P*J*T*S};

  divider_chain #(.DIV_A(A), .DIV_P0(P), .DIV_JC(J), .DIV_329(T), .DIV_2P7(S)) dut (
    .clk, .rst, .ce_88m(c88), .ce_p0(cp0), .ce_985(c985), .ce_329(c329), .ce_2p7(c2p7));

  always #5 clk = ~clk;

  task automatic note(int i, logic v);
    if (v) begin
      if (seen[i] > 0) begin
        checks++;
        if (cyc - last[i] != per[i]) begin
          failures++; $display("FAIL output %0d period %0d expected %0d", i, cyc - last[i], per[i]);
        end
      end
      last[i] = cyc; seen[i]++;
    end
  endtask

  initial begin
    for (int i = 0; i < 5; i++) begin last[i] = 0; seen[i] = 0; end
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (A*P*J*T*S*6) begin
      @(negedge clk);
      cyc++;
      note(0, c88); note(1, cp0); note(2, c985); note(3, c329); note(4, c2p7);
      checks++;
      if ((c2p7 && !c329) || (c329 && !c985) || (c985 && !cp0) || (cp0 && !c88)) begin
        failures++; $display("FAIL alignment at %0d", cyc);
      end
    end
    checks++;
    if (seen[4] != 6) begin failures++; $display("FAIL 2.7 Hz pulses %0d", seen[4]); end
    // first slow pulse exactly one period after reset release
    checks++;
    if (last[4] != per[4] * 6) begin failures++; $display("FAIL phase of slowest output %0d", last[4]); end
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
