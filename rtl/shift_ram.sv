// shift_ram: variable-length 1-bit shift register with clock enable, the role
// the vendor "c_shift_ram" core plays in the published design.
//
// It is built as a circular buffer: in each cycle with ce high the input is
// written at the write pointer and the pointer advances; the output is the
// entry written len enabled cycles earlier. dout is combinational and
// qualified by ce, so it is a one-clock pulse in an enabled cycle and a stage
// adds exactly len enable periods of delay and no pipeline latency. That lets
// a slow stage feed a faster one in the same clock, as long as every slow
// enable coincides with a fast one. len = 0 passes din straight through;
// len must not exceed DEPTH. Changing len while triggers are in flight may
// drop or repeat one of them. While rst is high the pointer sweeps the buffer
// once per clock writing zeros, so holding reset for DEPTH clocks clears it.
`timescale 1ns / 1ps
module shift_ram #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned LW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          ce,
  input  logic          din,
  input  logic [LW-1:0] len,
  output logic          dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic          mem [DEPTH];
  logic [AW-1:0] wptr;
  logic [AW-1:0] rptr;

  // rptr = (wptr - len) mod DEPTH
  always_comb begin
    if (32'(wptr) >= 32'(len)) rptr = AW'(32'(wptr) - 32'(len));
    else                       rptr = AW'(32'(wptr) + DEPTH - 32'(len));
  end

  always_ff @(posedge clk) begin
    if (rst || ce) begin
      wptr <= (32'(wptr) >= DEPTH - 1) ? '0 : wptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (ce || rst) mem[wptr] <= din & ~rst;
  end

  assign dout = ce && ((len == '0) ? din : mem[rptr]);
endmodule
