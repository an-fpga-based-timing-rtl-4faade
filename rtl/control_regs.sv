// control_regs: AXI4-Lite slave with the control and status registers.
//
// The processor writes every delay and phase setting here; the published
// design uses AXI4-Lite for its control and status registers, while the
// register map below is this design's own (32-bit words, byte address =
// 4 * index):
//   0 Julich delay   1 PIC delay     2 ms shutter delay   3 DG1 delay
//   4 AWG extra delay (added to DG1)  5 DG3 delay          6 DG4 delay
//     each delay word = {2'b0, l2[9:0], l1[9:0], l0[9:0]}, stage lengths
//   7 HHLC phase target in clocks
//   8 fine taps: [5:0] AWG, [13:8] DG1, [21:16] DG2 (78 ps each)
//   9 MMCM phase target, [15:0] signed, in 17 ps steps
//  10 status (read only, from status_in)
// Writes take the address and data channels together and answer OKAY one
// clock later; reads answer the next clock. One transaction at a time; the
// bus is in the logic clock domain. Reset clears every register, and no
// address is accepted while reset is high (the handshake simply waits).
`timescale 1ns / 1ps
module control_regs
  import dcs_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // AXI4-Lite slave
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
  // register contents
  input  logic [31:0] status_in,
  output cfg_t        cfg
);
  logic [31:0] regs [NREG];
  logic        do_write, do_read;
  logic [3:0]  widx, ridx;

  assign widx = s_axi_awaddr[5:2];
  assign ridx = s_axi_araddr[5:2];

  // Accept a write when both channels are valid and no response is pending.
  assign do_write      = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid && !rst;
  assign s_axi_awready = do_write;
  assign s_axi_wready  = do_write;
  assign do_read       = s_axi_arvalid && !s_axi_rvalid && !rst;
  assign s_axi_arready = do_read;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < NREG; i++) regs[i] <= '0;
      s_axi_bvalid <= 1'b0;
    end else begin
      if (do_write) begin
        for (int b = 0; b < 4; b++)
          if (s_axi_wstrb[b]) regs[widx][8*b +: 8] <= s_axi_wdata[8*b +: 8];
        s_axi_bvalid <= 1'b1;
      end else if (s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else if (do_read) begin
      s_axi_rvalid <= 1'b1;
      s_axi_rdata  <= (32'(ridx) == R_STATUS) ? status_in : regs[ridx];
    end else if (s_axi_rready) begin
      s_axi_rvalid <= 1'b0;
    end
  end

  always_comb begin
    cfg.julich     = delay_t'(regs[R_JULICH][29:0]);
    cfg.pic        = delay_t'(regs[R_PIC][29:0]);
    cfg.ms_shutter = delay_t'(regs[R_MS][29:0]);
    cfg.dg1        = delay_t'(regs[R_DG1][29:0]);
    cfg.awg        = delay_t'(regs[R_AWG][29:0]);
    cfg.dg3        = delay_t'(regs[R_DG3][29:0]);
    cfg.dg4        = delay_t'(regs[R_DG4][29:0]);
    cfg.hhlc_phase = regs[R_HHLC];
    cfg.tap_awg    = regs[R_TAPS][5:0];
    cfg.tap_dg1    = regs[R_TAPS][13:8];
    cfg.tap_dg2    = regs[R_TAPS][21:16];
    cfg.mmcm_step  = regs[R_MMCM][15:0];
  end

  // AXI handshake rules: a response, once valid, holds until taken.
  a_bvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  a_rvalid_hold: assert property (@(posedge clk) disable iff (rst)
    s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));
endmodule
