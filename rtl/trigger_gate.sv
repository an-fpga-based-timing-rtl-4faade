// trigger_gate: state-dependent gate for the ms shutter, DG3 and DG4 triggers.
//
// mode ALLOWED passes every trigger pulse, NOT_ALLOWED blocks them all, and
// SINGLE_SHOT passes only the first trigger that arrives after the mode has
// become SINGLE_SHOT; the gate re-arms only when the mode leaves SINGLE_SHOT.
// So entering Fire or Diagnostics yields exactly one shot. The three modes
// are the published ones; this meaning of "single shot" is this design's
// reading. The gate is combinational from trig_in to trig_out (no added
// latency); fired is registered and says the shot has been used.
`timescale 1ns / 1ps
module trigger_gate
  import dcs_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  gate_mode_e mode,
  input  logic       trig_in,
  output logic       trig_out,
  output logic       fired
);
  always_ff @(posedge clk) begin
    if (rst || mode != GATE_SINGLE_SHOT) fired <= 1'b0;
    else if (trig_in)                    fired <= 1'b1;
  end

  always_comb begin
    unique case (mode)
      GATE_ALLOWED:     trig_out = trig_in;
      GATE_SINGLE_SHOT: trig_out = trig_in && !fired;
      default:          trig_out = 1'b0;
    endcase
  end
endmodule
