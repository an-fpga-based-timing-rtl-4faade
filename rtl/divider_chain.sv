// divider_chain: the cascade of clock-enable dividers that derives every
// trigger rate from the 352 MHz logic clock.
//
//   352 MHz /4 -> 88 MHz /324 -> 271.6 kHz (pseudo P0) /275 -> 987.7 Hz
//   (Julich chopper) /3 -> 329.2 Hz (AWG, DG1) /120 -> 2.74 Hz (ms shutter,
//   DG2..DG4).
//
// The divisors and the order of the chain are those of the published block
// diagram. Each output is a one-clock enable pulse; because each divider
// counts the enables of the one before it, every pulse of a slower output
// coincides with a pulse of every faster output. The phase shifters depend on
// that alignment.
`timescale 1ns / 1ps
module divider_chain #(
  parameter int unsigned DIV_A   = dcs_pkg::DIV_A,
  parameter int unsigned DIV_P0  = dcs_pkg::DIV_P0,
  parameter int unsigned DIV_JC  = dcs_pkg::DIV_JC,
  parameter int unsigned DIV_329 = dcs_pkg::DIV_329,
  parameter int unsigned DIV_2P7 = dcs_pkg::DIV_2P7
) (
  input  logic clk,
  input  logic rst,
  output logic ce_88m,
  output logic ce_p0,
  output logic ce_985,
  output logic ce_329,
  output logic ce_2p7
);
  clock_divider #(.DIV(DIV_A))   u_div_a   (.clk, .rst, .ce_in(1'b1),   .ce_out(ce_88m));
  clock_divider #(.DIV(DIV_P0))  u_div_p0  (.clk, .rst, .ce_in(ce_88m), .ce_out(ce_p0));
  clock_divider #(.DIV(DIV_JC))  u_div_jc  (.clk, .rst, .ce_in(ce_p0),  .ce_out(ce_985));
  clock_divider #(.DIV(DIV_329)) u_div_329 (.clk, .rst, .ce_in(ce_985), .ce_out(ce_329));
  clock_divider #(.DIV(DIV_2P7)) u_div_2p7 (.clk, .rst, .ce_in(ce_329), .ce_out(ce_2p7));
endmodule
