// laser_state_clock: square-wave output whose frequency tells other devices
// the present laser state.
//
// The output toggles once every (state number) ticks of the base enable, so
// its frequency is f_base / (2 * state): with the 987.7 Hz base enable, Idle
// gives 494 Hz and Diagnostics 98.8 Hz. A state change restarts the count.
// The published design says only that this output's frequency varies with
// the state; the frequency law and the choice of base are this design's.
`timescale 1ns / 1ps
module laser_state_clock
  import dcs_pkg::*;
(
  input  logic         clk,
  input  logic         rst,
  input  logic         ce_base,
  input  laser_state_e state,
  output logic         clk_out
);
  logic [2:0]   cnt;
  laser_state_e state_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt     <= '0;
      clk_out <= 1'b0;
      state_q <= ST_IDLE;
    end else begin
      state_q <= state;
      if (state != state_q) begin
        cnt <= '0;
      end else if (ce_base) begin
        if (cnt == 3'(state) - 3'd1) begin
          cnt     <= '0;
          clk_out <= ~clk_out;
        end else begin
          cnt <= cnt + 3'd1;
        end
      end
    end
  end
endmodule
