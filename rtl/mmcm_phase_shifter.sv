// mmcm_phase_shifter: BEHAVIOURAL MODEL (not synthesizable) of the FPGA's
// mixed-mode clock manager used as a fine phase shifter.
//
// In the real system the 352 MHz ring clock enters a clock manager whose
// dynamic fine phase shift moves the whole logic clock tree in 17 ps steps
// relative to the ring clock. This model keeps the primitive's phase-shift
// port: each one-clock psen pulse on psclk moves the phase one step later
// (psincdec = 1) or earlier (0), and psdone pulses PSDONE_LAT psclk cycles
// afterwards. clkout0 is clkin1 delayed by (steps * STEP_PS) modulo one clock
// period; there is no frequency synthesis and no jitter. locked goes high
// LOCK_CYCLES input clocks after rst falls. The 17 ps step is the published
// figure; latencies and port names are modelled on the vendor primitive.
`timescale 1ps / 1ps
module mmcm_phase_shifter #(
  parameter int STEP_PS       = 17,
  parameter int CLK_PERIOD_PS = 2841,
  parameter int PSDONE_LAT    = 12,
  parameter int LOCK_CYCLES   = 8
) (
  input  logic clkin1,
  input  logic rst,
  input  logic psclk,
  input  logic psen,
  input  logic psincdec,
  output logic psdone,
  output logic clkout0,
  output logic locked
);
  int  steps;
  int  lat;
  int  lock_cnt;
  int  shift_ps;

  initial begin
    clkout0 = 1'b0;
    psdone  = 1'b0;
    locked  = 1'b0;
    steps   = 0;
    lat     = 0;
    lock_cnt = 0;
  end

  // Phase-shift port.
  always @(posedge psclk) begin
    psdone <= 1'b0;
    if (rst) begin
      steps <= 0;
      lat   <= 0;
    end else if (lat > 0) begin
      lat <= lat - 1;
      if (lat == 1) psdone <= 1'b1;
    end else if (psen) begin
      steps <= psincdec ? steps + 1 : steps - 1;
      lat   <= PSDONE_LAT;
    end
  end

  always_comb begin
    shift_ps = (steps * STEP_PS) % CLK_PERIOD_PS;
    if (shift_ps < 0) shift_ps = shift_ps + CLK_PERIOD_PS;
  end

  // Delayed copy of the input clock (transport delay, time unit 1 ps).
  always @(clkin1) clkout0 <= #(shift_ps) clkin1;

  always @(posedge clkin1) begin
    if (rst) begin
      lock_cnt <= 0;
      locked   <= 1'b0;
    end else if (lock_cnt < LOCK_CYCLES) begin
      lock_cnt <= lock_cnt + 1;
    end else begin
      locked <= 1'b1;
    end
  end
endmodule
