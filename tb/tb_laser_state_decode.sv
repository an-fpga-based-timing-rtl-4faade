// tb_laser_state_decode: sends command bytes and checks the state and the
// three gate modes against the trigger table written out here
// (A = allowed, N = not allowed, S = single shot):
//   state        1 2 3 4 5
//   ms shutter   N N N S S
//   DG3          A A N S S
//   DG4          N N N S S
// Bytes other than '1'..'5' must leave the state unchanged.
`timescale 1ns / 1ps
module tb_laser_state_decode;
  import dcs_pkg::*;
  logic clk = 0, rst = 1, v = 0;
  logic [7:0] b = 0;
  laser_state_e st;
  gate_mode_e m_ms, m_dg3, m_dg4;
  int checks = 0, failures = 0;
  // table rows indexed by state 1..5, characters A/N/S
  string t_ms = "NNNSS", t_dg3 = "AANSS", t_dg4 = "NNNSS";

  laser_state_decode dut (.clk, .rst, .cmd_valid(v), .cmd_byte(b), .state(st),
    .mode_ms(m_ms), .mode_dg3(m_dg3), .mode_dg4(m_dg4));

  always #5 clk = ~clk;

  function automatic gate_mode_e code(byte ch);
    return (ch == "A") ? GATE_ALLOWED : (ch == "S") ? GATE_SINGLE_SHOT : GATE_NOT_ALLOWED;
  endfunction

  task automatic send(logic [7:0] x);
    @(negedge clk); v = 1; b = x;
    @(negedge clk); v = 0;
  endtask

  task automatic check_state(int s);
    checks++;
    if (int'(st) != s) begin failures++; $display("FAIL state %0d expected %0d", st, s); end
    checks++;
    if (m_ms != code(t_ms[s-1]) || m_dg3 != code(t_dg3[s-1]) || m_dg4 != code(t_dg4[s-1])) begin
      failures++; $display("FAIL modes in state %0d: %0d %0d %0d", s, m_ms, m_dg3, m_dg4);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    check_state(1);
    for (int r = 0; r < 30; r++) begin
      int s = $urandom_range(1, 5);
      send(8'h30 + 8'(s));
      check_state(s);
      send(8'h36);       // '6': ignored
      check_state(s);
      send(8'h30);       // '0': ignored
      check_state(s);
      send(8'h01 + 8'(s)); // raw binary: ignored
      check_state(s);
    end
    // a command byte without valid is ignored
    @(negedge clk); b = 8'h33; v = 0;
    @(negedge clk);
    send(8'h35); check_state(5);
    @(negedge clk); b = 8'h31;
    repeat (3) @(negedge clk);
    check_state(5);
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
