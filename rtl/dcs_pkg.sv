// dcs_pkg: types and constants shared by the DCS timing system.
//
// The laser state numbering (1 Idle .. 5 Diagnostics) and the per-output gate
// table (allowed / not allowed / single shot) follow the published trigger
// table of the system. The divisors are those of the published block diagram.
// The register map and field widths are this design's own choice.
`timescale 1ns / 1ps
package dcs_pkg;

  // Divider chain (352 MHz ring clock).
  localparam int unsigned DIV_A    = 4;     // 352 MHz -> 88 MHz enable
  localparam int unsigned DIV_P0   = 324;   // -> 271.6 kHz (pseudo P0)
  localparam int unsigned DIV_JC   = 275;   // -> 987.7 Hz (printed as 985 Hz), Julich
  localparam int unsigned DIV_329  = 3;     // -> 329.2 Hz (AWG, DG1)
  localparam int unsigned DIV_2P7  = 120;   // -> 2.74 Hz (ms shutter, DG2..DG4)
  localparam int unsigned DIV_PIC  = 356;   // 88 MHz / 356 = 247.2 kHz PIC chopper
  localparam int unsigned HHLC_DIV = 3564;  // 352 MHz / 3564 = 98.77 kHz HHLC driver
  localparam int unsigned HREF_DIV = 356;   // HHLC reference divisor as printed
  localparam int unsigned US_CLKS  = 352;   // clocks in 1 us

  // Each phase-shifter stage length is a 10-bit field.
  localparam int unsigned LW = 10;
  typedef logic [LW-1:0] stage_len_t;
  typedef struct packed {
    stage_len_t l2;   // fastest stage
    stage_len_t l1;
    stage_len_t l0;   // slowest stage
  } delay_t;

  localparam int unsigned TAP_W = 6;
  typedef logic [TAP_W-1:0] tap_t;

  typedef enum logic [2:0] {
    ST_IDLE        = 3'd1,
    ST_CHARGING    = 3'd2,
    ST_AT_VOLTAGE  = 3'd3,
    ST_FIRE        = 3'd4,
    ST_DIAGNOSTICS = 3'd5
  } laser_state_e;

  typedef enum logic [1:0] {
    GATE_ALLOWED     = 2'd0,
    GATE_NOT_ALLOWED = 2'd1,
    GATE_SINGLE_SHOT = 2'd2
  } gate_mode_e;

  // Gate table for the three gated outputs.
  function automatic gate_mode_e ms_mode(laser_state_e s);
    return (s == ST_FIRE || s == ST_DIAGNOSTICS) ? GATE_SINGLE_SHOT : GATE_NOT_ALLOWED;
  endfunction
  function automatic gate_mode_e dg3_mode(laser_state_e s);
    case (s)
      ST_IDLE, ST_CHARGING:      return GATE_ALLOWED;
      ST_FIRE, ST_DIAGNOSTICS:   return GATE_SINGLE_SHOT;
      default:                   return GATE_NOT_ALLOWED;
    endcase
  endfunction
  function automatic gate_mode_e dg4_mode(laser_state_e s);
    return (s == ST_FIRE || s == ST_DIAGNOSTICS) ? GATE_SINGLE_SHOT : GATE_NOT_ALLOWED;
  endfunction

  // Settings written by the processor over AXI4-Lite.
  typedef struct packed {
    delay_t      julich;      // stages: 271 kHz x275, 88 MHz x324
    delay_t      pic;         // stage:  88 MHz x356
    delay_t      ms_shutter;  // stages: 329 Hz x120, 271 kHz x825
    delay_t      dg1;         // stages: 271 kHz x825, 88 MHz x324, 352 MHz x4
    delay_t      awg;         // same stages, added to the DG1 delay
    delay_t      dg3;         // stages: 329 Hz x120, 271 kHz x825, 88 MHz x324
    delay_t      dg4;         // same as DG3
    logic [31:0] hhlc_phase;  // HHLC offset in clocks
    tap_t        tap_awg;
    tap_t        tap_dg1;
    tap_t        tap_dg2;
    logic [15:0] mmcm_step;   // signed target phase in 17 ps steps
  } cfg_t;

  // Register word addresses (byte address = 4 * index).
  localparam int unsigned R_JULICH = 0;
  localparam int unsigned R_PIC    = 1;
  localparam int unsigned R_MS     = 2;
  localparam int unsigned R_DG1    = 3;
  localparam int unsigned R_AWG    = 4;
  localparam int unsigned R_DG3    = 5;
  localparam int unsigned R_DG4    = 6;
  localparam int unsigned R_HHLC   = 7;
  localparam int unsigned R_TAPS   = 8;   // [5:0] AWG, [13:8] DG1, [21:16] DG2
  localparam int unsigned R_MMCM   = 9;   // [15:0] signed step target
  localparam int unsigned R_STATUS = 10;  // read only
  localparam int unsigned NREG     = 16;

endpackage
