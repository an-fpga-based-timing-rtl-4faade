// clock_divider: clock-enable frequency divider.
//
// Counts cycles in which ce_in is high and raises ce_out for exactly one clock
// every DIV such cycles, in the same cycle as the ce_in pulse that wraps the
// counter. The output therefore drives the clock enable of slower registers
// and counters rather than a real clock, and every output pulse coincides with
// an input pulse; chained dividers stay aligned to each other.
// The divisor and counter width are parameters, as the published design has
// it; the enable-pulse format and the count-down implementation are this
// design's own. Synchronous active-high reset clears the counter so that the
// first output pulse comes DIV input enables after reset.
`timescale 1ns / 1ps
module clock_divider #(
  parameter int unsigned DIV = 4,
  parameter int unsigned W   = (DIV > 1) ? $clog2(DIV) : 1
) (
  input  logic clk,
  input  logic rst,
  input  logic ce_in,
  output logic ce_out
);
  logic [W-1:0] cnt;

  always_ff @(posedge clk) begin
    if (rst)
      cnt <= W'(DIV - 1);
    else if (ce_in)
      cnt <= (cnt == '0) ? W'(DIV - 1) : cnt - 1'b1;
  end

  assign ce_out = ce_in && (cnt == '0);

  initial assert (DIV >= 1 && (DIV - 1) < (2 ** W)) else $error("clock_divider: W too small for DIV");
endmodule
