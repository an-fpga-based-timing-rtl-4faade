// tb_dcs_gui_settings: the timing system at its real sizes, programmed with
// the delay settings shown on the operator screen of the published system:
// Julich offset 1503806.82 ns (529,340 clocks, more than one 1012.5 us
// period, so 172,940 clocks modulo the period = 133 x P0 + 143 x 88 MHz),
// DG1 coarse delay 349,393 clocks (269 x P0 + 192 x 88 MHz + 1 clock) with
// fine tap 8 (624 ps), and HHLC offset 981,384 clocks. It checks the Julich
// and DG1 delays in clocks against the 987.7 Hz / 329 Hz enables, the DG1
// fine delay in picoseconds after the clock edge, and that the HHLC starts to
// slew the shorter way round (981,384 > M/2, so periods of 3563 clocks with
// the status slewing bit set). The full HHLC slew (287,400 driver periods,
// about 2.9 s) is not simulated. The register encodings are this design's.
`timescale 1ns / 1ps
module tb_dcs_gui_settings;
  import dcs_pkg::*;
  localparam int T88 = 4, TP0 = 1296, TJC = 356400, T329 = 1069200;
  localparam int CPB = 3056;
  logic rf_clk = 0, rst = 1, uart_rx = 1;
  logic [5:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0] wstrb = 4'hF;
  logic [1:0] bresp, rresp;
  logic clk, locked;
  logic pseudo_p0, pic_chopper, julich, hhlc_drv, hhlc_ref, ms_shutter, awg, dg1, dg2, dg3, dg4, lsclk;
  int checks = 0, failures = 0;

  dcs_timing_top dut (
    .rf_clk, .rst, .uart_rx,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .clk_out(clk), .locked,
    .pseudo_p0, .pic_chopper, .julich, .hhlc_drv, .hhlc_ref, .ms_shutter, .awg, .dg1, .dg2,
    .dg3, .dg4, .laser_state_clk(lsclk)
  );

  initial forever begin #1.420 rf_clk = 1; #1.421 rf_clk = 0; end

    logic [6:0] outs, outs_q = '0;
  int cyc = 0, ref_jc = 0, ref_2p7 = 0, ref_329 = 0;
  int last_rise [7];
  int prev_rise [7];
  int n_rise [7];
  assign outs = {dg4, dg3, ms_shutter, dg1, hhlc_drv, julich, pseudo_p0};

  always @(negedge clk) begin
    cyc++;
    if (dut.ce_985) ref_jc = cyc;
    if (dut.ce_2p7) ref_2p7 = cyc;
    if (dut.ce_329) ref_329 = cyc;
    for (int i = 0; i < 7; i++) if (outs[i] && !outs_q[i]) begin
      prev_rise[i] = last_rise[i]; last_rise[i] = cyc; n_rise[i]++;
    end
    outs_q = outs;
  end

  task automatic axi_write(int idx, logic [31:0] d);
    @(negedge clk);
    awaddr = 6'(idx * 4); wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic uart_send(logic [7:0] b);
    @(posedge clk); uart_rx <= 0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx <= b[i]; repeat (CPB) @(posedge clk); end
    uart_rx <= 1; repeat (2 * CPB) @(posedge clk);
  endtask

  task automatic expect_eq(string what, int got, int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: %0d expected %0d", what, got, exp); end
    else $display("ok   %s = %0d", what, got);
  endtask

  realtime t_clk = 0, t_dg1 = 0, dg1_after_clk = 0;
  always @(posedge clk) t_clk = $realtime;
  always @(posedge dg1) begin t_dg1 = $realtime; dg1_after_clk = t_dg1 - t_clk; end

  task automatic wait_rises(int o, int n);
    automatic int n0 = n_rise[o];
    while (n_rise[o] < n0 + n) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 7; i++) begin last_rise[i] = 0; prev_rise[i] = 0; n_rise[i] = 0; end
    #20 rst = 0;
    wait (locked);
    repeat (1100) @(posedge clk);
    axi_write(R_JULICH, {2'b0, 10'd0, 10'd143, 10'd133});
    axi_write(R_DG1,    {2'b0, 10'd1, 10'd192, 10'd269});
    axi_write(R_TAPS,   32'd8 << 8);
    axi_write(R_HHLC,   32'd981384);
    repeat (10) @(negedge clk);
    expect_eq("HHLC slewing bit", int'(dut.status[8]), 1);
    wait_rises(2, 3); expect_eq("HHLC advanced period", last_rise[2] - prev_rise[2], 3563);
    wait_rises(1, 2);
    expect_eq("Julich delay", ((last_rise[1] - ref_jc) % TJC + TJC) % TJC, 2 + 172940);
    expect_eq("Julich period", last_rise[1] - prev_rise[1], TJC);
    wait_rises(3, 2);
    expect_eq("DG1 delay", ((last_rise[3] - ref_329) % T329 + T329) % T329, 2 + 349393);
    expect_eq("DG1 period", last_rise[3] - prev_rise[3], T329);
    checks++;
    if (dg1_after_clk < 0.622 || dg1_after_clk > 0.626) begin
      failures++; $display("FAIL DG1 fine delay %0.3f ns expected 0.624", dg1_after_clk);
    end else $display("ok   DG1 fine delay = %0.3f ns", dg1_after_clk);
    expect_eq("HHLC still slewing", int'(dut.status[8]), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
