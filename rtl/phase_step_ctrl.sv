// phase_step_ctrl: steps the MMCM fine phase shift toward a programmed target.
//
// target_step is the wanted phase of the logic clock in MMCM fine steps
// (17 ps each, signed). While current_step differs from it the controller
// issues one psen pulse with psincdec = 1 (later) or 0 (earlier), waits for
// psdone, updates current_step by one and repeats; busy is high meanwhile.
// The published design gives the 17 ps fine-shift capability; this
// one-step-at-a-time controller is the simplest logic that uses it.
`timescale 1ns / 1ps
module phase_step_ctrl #(
  parameter int unsigned STEP_W = 16
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic signed [STEP_W-1:0] target_step,
  output logic                     psen,
  output logic                     psincdec,
  input  logic                     psdone,
  output logic signed [STEP_W-1:0] current_step,
  output logic                     busy
);
  logic waiting;

  assign busy = waiting || (current_step != target_step);

  always_ff @(posedge clk) begin
    if (rst) begin
      psen         <= 1'b0;
      psincdec     <= 1'b0;
      waiting      <= 1'b0;
      current_step <= '0;
    end else begin
      psen <= 1'b0;
      if (waiting) begin
        if (psdone) begin
          waiting      <= 1'b0;
          current_step <= psincdec ? current_step + 1'b1 : current_step - 1'b1;
        end
      end else if (current_step != target_step) begin
        psen     <= 1'b1;
        psincdec <= (target_step > current_step);
        waiting  <= 1'b1;
      end
    end
  end

  a_one_request: assert property (@(posedge clk) disable iff (rst) psen |=> !psen);
endmodule
