// pulse_stretch: turns a one-clock trigger pulse into an output pulse WIDTH
// clocks long (1 us at 352 MHz by default), wide enough for TTL line drivers
// and delay-generator inputs. A new trigger during a pulse restarts it.
// The 1 us width is the one the published design gives its HHLC driver
// output; using it for every trigger output is this design's choice.
`timescale 1ns / 1ps
module pulse_stretch #(
  parameter int unsigned WIDTH = 352,
  parameter int unsigned W     = $clog2(WIDTH + 1)
) (
  input  logic clk,
  input  logic rst,
  input  logic trig,
  output logic pulse
);
  logic [W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst)             cnt <= '0;
    else if (trig)       cnt <= W'(WIDTH);
    else if (cnt != '0)  cnt <= cnt - 1'b1;
  end

  assign pulse = (cnt != '0);
endmodule
