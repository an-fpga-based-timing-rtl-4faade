// fine_delay: BEHAVIOURAL MODEL (not synthesizable) of an output tap delay
// line giving the laser triggers sub-clock delay.
//
// dout follows din delayed by tap * TAP_PS picoseconds (transport delay).
// The 78 ps step is the delay resolution the published system reports for
// its AWG and DG triggers; in an FPGA such a delay line is an I/O delay
// primitive, not logic, hence a model. TAPS = 37 taps (0 .. 36, 2.81 ns,
// about one 352 MHz period) is this design's choice; larger tap values are
// clamped to TAPS - 1.
`timescale 1ps / 1ps
module fine_delay #(
  parameter int TAP_PS = 78,
  parameter int TAPS   = 37
) (
  input  logic       din,
  input  logic [5:0] tap,
  output logic       dout
);
  int  t;
  int  dly_ps;

  initial dout = 1'b0;

  always_comb begin
    t      = (int'(tap) > TAPS - 1) ? TAPS - 1 : int'(tap);
    dly_ps = t * TAP_PS;
  end

  always @(din) dout <= #(dly_ps) din;   // time unit 1 ps
endmodule
