// phase_shifter: programmable trigger delay made of up to three variable-length
// shift registers in cascade, each clocked by a different enable rate.
//
// Stage 0 is clocked by the slowest enable ce[0] and stage 2 by the fastest
// ce[2]; each stage is a shift_ram of depth D0, D1, D2 (a depth of 0 removes
// the stage). The input trigger must be a one-clock pulse coincident with a
// ce[0] pulse, and every ce[i] pulse must coincide with a ce[i+1] pulse (the
// divider chain guarantees this). A trigger then leaves stage i in a ce[i]
// cycle and is taken by stage i+1 in that same clock, so the total delay is
//   len.l0 * T0 + len.l1 * T1 + len.l2 * T2
// clocks, where Ti is the period of ce[i], plus one clock for the output
// register. The cascade of shift registers at different rates is the
// published scheme; the number of stages, their depths and the 10-bit length
// fields are this design's choices, sized so that one output period can be
// covered at the delay resolution the system reports.
`timescale 1ns / 1ps
module phase_shifter
  import dcs_pkg::*;
#(
  parameter int unsigned D0 = 275,
  parameter int unsigned D1 = 324,
  parameter int unsigned D2 = 0
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [2:0] ce,        // [0] slowest .. [2] fastest
  input  logic       trig_in,
  input  delay_t     len,
  output logic       trig_out   // one-clock pulse
);
  logic s0, s1, s2;

  if (D0 > 0) begin : g_s0
    shift_ram #(.DEPTH(D0), .LW(LW)) u_sr (.clk, .rst, .ce(ce[0]), .din(trig_in), .len(len.l0), .dout(s0));
  end else begin : g_b0
    assign s0 = trig_in;
  end
  if (D1 > 0) begin : g_s1
    shift_ram #(.DEPTH(D1), .LW(LW)) u_sr (.clk, .rst, .ce(ce[1]), .din(s0), .len(len.l1), .dout(s1));
  end else begin : g_b1
    assign s1 = s0;
  end
  if (D2 > 0) begin : g_s2
    shift_ram #(.DEPTH(D2), .LW(LW)) u_sr (.clk, .rst, .ce(ce[2]), .din(s1), .len(len.l2), .dout(s2));
  end else begin : g_b2
    assign s2 = s1;
  end

  always_ff @(posedge clk) begin
    if (rst) trig_out <= 1'b0;
    else     trig_out <= s2;
  end

  initial assert (D0 < 2 ** LW && D1 < 2 ** LW && D2 < 2 ** LW)
    else $error("phase_shifter: depth exceeds the length field");
endmodule
