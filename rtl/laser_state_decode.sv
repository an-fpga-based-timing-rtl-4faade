// laser_state_decode: laser state register and gate decoder.
//
// The laser control system sets one of five states over a serial line:
// 1 Idle, 2 Charging, 3 At voltage, 4 Fire, 5 Diagnostics. A received byte
// (cmd_valid for one clock, cmd_byte) that is the ASCII digit '1'..'5' loads
// that state; every other byte is ignored. Reset gives Idle. From the state,
// the published trigger table gives each gated output its mode:
//   ms shutter : not allowed in 1-3, single shot in 4-5
//   DG3        : allowed in 1-2, not allowed in 3, single shot in 4-5
//   DG4        : not allowed in 1-3, single shot in 4-5
// and all other outputs are allowed in every state. The five states and the
// table follow the published design; the ASCII command encoding is this
// design's own. The state and modes are registered: they change one clock
// after the command byte.
`timescale 1ns / 1ps
module laser_state_decode
  import dcs_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         cmd_valid,
  input  logic [7:0]   cmd_byte,
  output laser_state_e state,
  output gate_mode_e   mode_ms,
  output gate_mode_e   mode_dg3,
  output gate_mode_e   mode_dg4
);
  always_ff @(posedge clk) begin
    if (rst)
      state <= ST_IDLE;
    else if (cmd_valid && cmd_byte >= 8'h31 && cmd_byte <= 8'h35)
      state <= laser_state_e'(cmd_byte[2:0]);
  end

  assign mode_ms  = ms_mode(state);
  assign mode_dg3 = dg3_mode(state);
  assign mode_dg4 = dg4_mode(state);

  a_state_legal: assert property (@(posedge clk) disable iff (rst)
    state inside {ST_IDLE, ST_CHARGING, ST_AT_VOLTAGE, ST_FIRE, ST_DIAGNOSTICS});
endmodule
