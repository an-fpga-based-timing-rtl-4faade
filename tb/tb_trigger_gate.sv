// tb_trigger_gate: feeds a trigger every 7 clocks through the gate and counts
// what passes in each mode: all in ALLOWED, none in NOT_ALLOWED, exactly one
// per entry into SINGLE_SHOT (checked over three entries), and fired set
// after the shot and cleared when the mode leaves SINGLE_SHOT.
`timescale 1ns / 1ps
module tb_trigger_gate;
  import dcs_pkg::*;
  logic clk = 0, rst = 1, tin = 0, tout, fired;
  gate_mode_e mode = GATE_NOT_ALLOWED;
  int checks = 0, failures = 0, n_in = 0, n_out = 0, k = 0;

  trigger_gate dut (.clk, .rst, .mode, .trig_in(tin), .trig_out(tout), .fired);

  always #5 clk = ~clk;
  always @(negedge clk) begin
    if (tin) n_in++;
    if (tout) n_out++;
  end
  always @(posedge clk) begin
    k <= (k == 6) ? 0 : k + 1;
    tin <= (k == 6) && !rst;
  end

  task automatic phase(gate_mode_e m, int len, int exp_out, string what);
    @(negedge clk); mode = m; n_in = 0; n_out = 0;
    repeat (len) @(negedge clk);
    checks++;
    if (exp_out < 0 ? (n_out != n_in) : (n_out != exp_out)) begin
      failures++; $display("FAIL %s: %0d passed of %0d", what, n_out, n_in);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    phase(GATE_ALLOWED, 100, -1, "allowed");
    phase(GATE_NOT_ALLOWED, 100, 0, "not allowed");
    for (int i = 0; i < 3; i++) begin
      phase(GATE_SINGLE_SHOT, 100, 1, "single shot");
      checks++;
      if (!fired) begin failures++; $display("FAIL fired not set"); end
      phase(GATE_NOT_ALLOWED, 20, 0, "not allowed between shots");
      checks++;
      if (fired) begin failures++; $display("FAIL fired not cleared"); end
    end
    phase(GATE_ALLOWED, 70, 10, "allowed again");
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
