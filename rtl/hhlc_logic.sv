// hhlc_logic: high-heat-load chopper (HHLC) driver and reference.
//
// A counter on the 352 MHz clock divides by DRV_DIV = 3564 to give the
// 98.77 kHz driver clock; each driver period starts with a PULSE_W = 352 clock
// (1 us) high pulse on drv_out. The reference tick ref_tick is the driver
// divided by REF_DIV. To move the chopper phase the period is made one clock
// shorter (3563, phase advanced) or one clock longer (3565, phase slipped);
// the published design describes exactly this ±1 mechanism. Here the wanted
// phase is a register, phase_target: a delay in clocks, 0 .. M-1 with
// M = DRV_DIV * REF_DIV (one reference period). phase_now counts the delay
// applied so far; at every driver period boundary, while the two differ, the
// next period is lengthened or shortened by one clock, taking the shorter way
// round M. The slew rate is therefore one clock per driver period. The
// direction rule, the target register and slewing flag are this design's own.
// Timing: ref_tick and the start of drv_out both come in the clock in which
// the divider wraps; a reference tick falls on every REF_DIV-th driver tick.
`timescale 1ns / 1ps
module hhlc_logic #(
  parameter int unsigned DRV_DIV = dcs_pkg::HHLC_DIV,
  parameter int unsigned REF_DIV = dcs_pkg::HREF_DIV,
  parameter int unsigned PULSE_W = dcs_pkg::US_CLKS
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] phase_target,
  output logic        drv_out,
  output logic        drv_tick,
  output logic        ref_tick,
  output logic [31:0] phase_now,
  output logic        slewing
);
  localparam int unsigned M  = DRV_DIV * REF_DIV;
  localparam int unsigned CW = $clog2(DRV_DIV + 2);
  localparam int unsigned RW = (REF_DIV > 1) ? $clog2(REF_DIV) : 1;
  localparam int unsigned PW = $clog2(PULSE_W + 1);

  logic [CW-1:0] cnt;
  logic [RW-1:0] rcnt;
  logic [PW-1:0] pcnt;
  logic [31:0]   diff;
  logic          slip, advance;

  // Distance still to go, modulo one reference period.
  always_comb begin
    if (phase_target >= phase_now) diff = phase_target - phase_now;
    else                           diff = phase_target + M - phase_now;
    slip    = (diff != 0) && (diff <= M / 2);
    advance = (diff != 0) && !slip;
  end

  assign drv_tick = (cnt == '0);
  assign ref_tick = drv_tick && (rcnt == '0);
  assign slewing  = (diff != 0);

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt       <= CW'(DRV_DIV - 1);
      rcnt      <= RW'(REF_DIV - 1);
      phase_now <= '0;
    end else if (drv_tick) begin
      rcnt <= (rcnt == '0) ? RW'(REF_DIV - 1) : rcnt - 1'b1;
      if (slip) begin
        cnt       <= CW'(DRV_DIV);
        phase_now <= (phase_now == M - 1) ? '0 : phase_now + 1;
      end else if (advance) begin
        cnt       <= CW'(DRV_DIV - 2);
        phase_now <= (phase_now == 0) ? M - 1 : phase_now - 1;
      end else begin
        cnt       <= CW'(DRV_DIV - 1);
      end
    end else begin
      cnt <= cnt - 1'b1;
    end
  end

  // 1 us driver pulse.
  always_ff @(posedge clk) begin
    if (rst)           pcnt <= '0;
    else if (drv_tick) pcnt <= PW'(PULSE_W);
    else if (pcnt != 0) pcnt <= pcnt - 1'b1;
  end
  assign drv_out = (pcnt != '0);

  initial assert (PULSE_W < DRV_DIV - 1) else $error("hhlc_logic: pulse longer than the shortest period");
endmodule
