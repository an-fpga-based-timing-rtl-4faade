// dcs_timing_top: programmable-logic timing and trigger system of the DCS
// laser shock station, synchronous to the 352 MHz storage-ring RF clock.
//
// The ring clock rf_clk passes through the clock manager's fine phase shifter
// (17 ps steps) and becomes the logic clock clk. A divider chain makes aligned
// enables at 88 MHz, 271.6 kHz, 987.7 Hz, 329.2 Hz and 2.74 Hz. Each trigger
// is a divided enable, delayed by a phase shifter (cascaded shift registers at
// the rates of the chain), gated by the laser state where the trigger table
// asks for it, stretched to OUT_PULSE_W clocks and, for the laser triggers,
// delayed by a 78 ps tap delay line:
//   pseudo_p0   271.6 kHz, no delay
//   pic_chopper 247.2 kHz = 88 MHz / 356, delay in 11.4 ns steps
//   julich      987.7 Hz, delay in 11.4 ns steps (271 kHz x275, 88 MHz x324)
//   hhlc_drv    98.77 kHz = clk / (3564 +- 1), 1 us pulse; phase slewed
//   hhlc_ref    hhlc_drv / 356, follows the driver phase
//   ms_shutter  2.74 Hz, delay in 3.7 us steps, gated
//   dg1         329.2 Hz, delay in 2.84 ns steps + 78 ps taps
//   awg         dg1 + up to 1023 clocks + own 78 ps taps
//   dg2         2.74 Hz, 78 ps taps only
//   dg3, dg4    2.74 Hz, delay in 11.4 ns steps, gated
//   laser_state_clk  square wave at 987.7 Hz / (2 * state)
// Settings come over AXI4-Lite (control_regs); the laser state comes as an
// ASCII digit on the serial line uart_rx. Reset: rst or loss of lock holds
// the logic in reset, and reset is kept for RST_CLKS clocks afterwards so the
// shift registers are flushed. The structure follows the published block
// diagram; the divisors there are the default parameters. Register map,
// serial format, pulse width, the AWG offset range and the PIC divider
// (worked out from its 247 kHz rate) are this design's own.
// Lint notes: the three reset flops carry declaration initial values on
// purpose (FPGA power-up values), and the tap delay models react to the
// stretched pulses as events, which lint reports as a net used both
// synchronously and asynchronously; the HHLC drv_tick output is unused.
`timescale 1ns / 1ps
module dcs_timing_top
  import dcs_pkg::cfg_t, dcs_pkg::laser_state_e, dcs_pkg::gate_mode_e;
#(
  parameter int unsigned DIV_A        = dcs_pkg::DIV_A,
  parameter int unsigned DIV_P0       = dcs_pkg::DIV_P0,
  parameter int unsigned DIV_JC       = dcs_pkg::DIV_JC,
  parameter int unsigned DIV_329      = dcs_pkg::DIV_329,
  parameter int unsigned DIV_2P7      = dcs_pkg::DIV_2P7,
  parameter int unsigned DIV_PIC      = dcs_pkg::DIV_PIC,
  parameter int unsigned HHLC_DIV     = dcs_pkg::HHLC_DIV,
  parameter int unsigned HREF_DIV     = dcs_pkg::HREF_DIV,
  parameter int unsigned OUT_PULSE_W  = dcs_pkg::US_CLKS,
  parameter int unsigned CLKS_PER_BIT = 3056,
  parameter int unsigned AWG_DEPTH    = 1023,
  parameter int unsigned RST_CLKS     = 1024
) (
  input  logic        rf_clk,
  input  logic        rst,
  input  logic        uart_rx,
  // AXI4-Lite register bus (logic clock domain: clk_out)
  input  logic [5:0]  s_axi_awaddr,
  input  logic        s_axi_awvalid,
  output logic        s_axi_awready,
  input  logic [31:0] s_axi_wdata,
  input  logic [3:0]  s_axi_wstrb,
  input  logic        s_axi_wvalid,
  output logic        s_axi_wready,
  output logic [1:0]  s_axi_bresp,
  output logic        s_axi_bvalid,
  input  logic        s_axi_bready,
  input  logic [5:0]  s_axi_araddr,
  input  logic        s_axi_arvalid,
  output logic        s_axi_arready,
  output logic [31:0] s_axi_rdata,
  output logic [1:0]  s_axi_rresp,
  output logic        s_axi_rvalid,
  input  logic        s_axi_rready,
  // logic clock and status
  output logic        clk_out,
  output logic        locked,
  // trigger outputs
  output logic        pseudo_p0,
  output logic        pic_chopper,
  output logic        julich,
  output logic        hhlc_drv,
  output logic        hhlc_ref,
  output logic        ms_shutter,
  output logic        awg,
  output logic        dg1,
  output logic        dg2,
  output logic        dg3,
  output logic        dg4,
  output logic        laser_state_clk
);
  localparam int unsigned D329 = DIV_JC * DIV_329;   // 271 kHz ticks per 329 Hz period

  logic clk;
  logic psen, psincdec, psdone, ps_busy;
  logic signed [15:0] ps_step;
  // power-up values (FPGA configuration INIT): in reset until the clock runs
  logic rst_meta = 1'b1, rst_sync = 1'b1, rst_i;
  logic [$clog2(RST_CLKS + 1)-1:0] rst_cnt = '0;
  cfg_t cfg;
  logic [31:0] status;

  // ---------------- clock -------------------------------------------------
  mmcm_phase_shifter u_mmcm (
    .clkin1(rf_clk), .rst, .psclk(clk), .psen, .psincdec, .psdone,
    .clkout0(clk), .locked
  );
  assign clk_out = clk;

  always_ff @(posedge clk) begin
    rst_meta <= rst || !locked;
    rst_sync <= rst_meta;
  end
  always_ff @(posedge clk) begin
    if (rst_sync)           rst_cnt <= '0;
    else if (rst_i)         rst_cnt <= rst_cnt + 1'b1;
  end
  assign rst_i = rst_sync || (32'(rst_cnt) < RST_CLKS);

  phase_step_ctrl #(.STEP_W(16)) u_pstep (
    .clk, .rst(rst_i), .target_step(signed'(cfg.mmcm_step)),
    .psen, .psincdec, .psdone, .current_step(ps_step), .busy(ps_busy)
  );

  // ---------------- registers and laser state ----------------------------
  laser_state_e state;
  gate_mode_e   mode_ms, mode_dg3, mode_dg4;
  logic         rx_valid;
  logic [7:0]   rx_data;
  logic         fired_ms, fired_dg3, fired_dg4;
  logic         hhlc_slewing;
  logic [31:0]  hhlc_now;

  control_regs u_regs (
    .clk, .rst(rst_i),
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready, .s_axi_wdata, .s_axi_wstrb,
    .s_axi_wvalid, .s_axi_wready, .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready, .s_axi_rdata, .s_axi_rresp,
    .s_axi_rvalid, .s_axi_rready,
    .status_in(status), .cfg
  );

  // status: [2:0] laser state, [4] ms fired, [5] DG3 fired, [6] DG4 fired,
  //         [8] HHLC slewing, [9] MMCM stepping, [10] locked, [31:16] MMCM step
  assign status = {ps_step, 5'd0, locked, ps_busy, hhlc_slewing,
                   1'b0, fired_dg4, fired_dg3, fired_ms, 1'b0, 3'(state)};

  serial_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk, .rst(rst_i), .rx(uart_rx), .valid(rx_valid), .data(rx_data)
  );
  laser_state_decode u_dec (
    .clk, .rst(rst_i), .cmd_valid(rx_valid), .cmd_byte(rx_data),
    .state, .mode_ms, .mode_dg3, .mode_dg4
  );

  // ---------------- divider chain -----------------------------------------
  logic ce_88m, ce_p0, ce_985, ce_329, ce_2p7, ce_pic;

  divider_chain #(
    .DIV_A(DIV_A), .DIV_P0(DIV_P0), .DIV_JC(DIV_JC), .DIV_329(DIV_329), .DIV_2P7(DIV_2P7)
  ) u_chain (.clk, .rst(rst_i), .ce_88m, .ce_p0, .ce_985, .ce_329, .ce_2p7);

  clock_divider #(.DIV(DIV_PIC)) u_div_pic (.clk, .rst(rst_i), .ce_in(ce_88m), .ce_out(ce_pic));

  // ---------------- X-ray side --------------------------------------------
  logic t_pic, t_jc, t_ms, t_ms_g, t_href;

  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_p0 (.clk, .rst(rst_i), .trig(ce_p0), .pulse(pseudo_p0));

  phase_shifter #(.D0(DIV_PIC), .D1(0), .D2(0)) u_ps_pic (
    .clk, .rst(rst_i), .ce({1'b0, 1'b0, ce_88m}), .trig_in(ce_pic), .len(cfg.pic), .trig_out(t_pic));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_pic (.clk, .rst(rst_i), .trig(t_pic), .pulse(pic_chopper));

  phase_shifter #(.D0(DIV_JC), .D1(DIV_P0), .D2(0)) u_ps_jc (
    .clk, .rst(rst_i), .ce({1'b0, ce_88m, ce_p0}), .trig_in(ce_985), .len(cfg.julich), .trig_out(t_jc));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_jc (.clk, .rst(rst_i), .trig(t_jc), .pulse(julich));

  hhlc_logic #(.DRV_DIV(HHLC_DIV), .REF_DIV(HREF_DIV), .PULSE_W(OUT_PULSE_W)) u_hhlc (
    .clk, .rst(rst_i), .phase_target(cfg.hhlc_phase), .drv_out(hhlc_drv), .drv_tick(),
    .ref_tick(t_href), .phase_now(hhlc_now), .slewing(hhlc_slewing));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_href (.clk, .rst(rst_i), .trig(t_href), .pulse(hhlc_ref));

  phase_shifter #(.D0(DIV_2P7), .D1(D329), .D2(0)) u_ps_ms (
    .clk, .rst(rst_i), .ce({1'b0, ce_p0, ce_329}), .trig_in(ce_2p7), .len(cfg.ms_shutter), .trig_out(t_ms));
  trigger_gate u_gate_ms (.clk, .rst(rst_i), .mode(mode_ms), .trig_in(t_ms), .trig_out(t_ms_g), .fired(fired_ms));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_ms (.clk, .rst(rst_i), .trig(t_ms_g), .pulse(ms_shutter));

  // ---------------- laser side --------------------------------------------
  logic t_dg1, t_awg, t_dg3, t_dg3_g, t_dg4, t_dg4_g;
  logic p_dg1, p_awg, p_dg2;

  phase_shifter #(.D0(D329), .D1(DIV_P0), .D2(DIV_A)) u_ps_dg1 (
    .clk, .rst(rst_i), .ce({1'b1, ce_88m, ce_p0}), .trig_in(ce_329), .len(cfg.dg1), .trig_out(t_dg1));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_dg1 (.clk, .rst(rst_i), .trig(t_dg1), .pulse(p_dg1));
  fine_delay u_fd_dg1 (.din(p_dg1), .tap(cfg.tap_dg1), .dout(dg1));

  phase_shifter #(.D0(AWG_DEPTH), .D1(0), .D2(0)) u_ps_awg (
    .clk, .rst(rst_i), .ce(3'b111), .trig_in(t_dg1), .len(cfg.awg), .trig_out(t_awg));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_awg (.clk, .rst(rst_i), .trig(t_awg), .pulse(p_awg));
  fine_delay u_fd_awg (.din(p_awg), .tap(cfg.tap_awg), .dout(awg));

  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_dg2 (.clk, .rst(rst_i), .trig(ce_2p7), .pulse(p_dg2));
  fine_delay u_fd_dg2 (.din(p_dg2), .tap(cfg.tap_dg2), .dout(dg2));

  phase_shifter #(.D0(DIV_2P7), .D1(D329), .D2(DIV_P0)) u_ps_dg3 (
    .clk, .rst(rst_i), .ce({ce_88m, ce_p0, ce_329}), .trig_in(ce_2p7), .len(cfg.dg3), .trig_out(t_dg3));
  trigger_gate u_gate_dg3 (.clk, .rst(rst_i), .mode(mode_dg3), .trig_in(t_dg3), .trig_out(t_dg3_g), .fired(fired_dg3));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_dg3 (.clk, .rst(rst_i), .trig(t_dg3_g), .pulse(dg3));

  phase_shifter #(.D0(DIV_2P7), .D1(D329), .D2(DIV_P0)) u_ps_dg4 (
    .clk, .rst(rst_i), .ce({ce_88m, ce_p0, ce_329}), .trig_in(ce_2p7), .len(cfg.dg4), .trig_out(t_dg4));
  trigger_gate u_gate_dg4 (.clk, .rst(rst_i), .mode(mode_dg4), .trig_in(t_dg4), .trig_out(t_dg4_g), .fired(fired_dg4));
  pulse_stretch #(.WIDTH(OUT_PULSE_W)) u_st_dg4 (.clk, .rst(rst_i), .trig(t_dg4_g), .pulse(dg4));

  laser_state_clock u_lsclk (.clk, .rst(rst_i), .ce_base(ce_985), .state, .clk_out(laser_state_clk));
endmodule
