// tb_dcs_full: the timing system at its real sizes (352 MHz clock, dividers
// 4/324/275/3/120, HHLC 3564 and 356, 1 us pulses, 115200-baud serial line).
// It checks one full shot cycle: the output periods of pseudo P0 (1296
// clocks), Julich (356400), DG1 (1069200) and the HHLC driver (3564); a
// programmed Julich delay (5 x 271 kHz + 7 x 88 MHz); then it puts the
// laser into Fire over the serial line and waits for the single shot of the
// ms shutter, DG3 and DG4 on the next 2.7 Hz period (128304000 clocks),
// checking that each fires exactly once and at its programmed delay.
`timescale 1ns / 1ps
module tb_dcs_full;
  import dcs_pkg::*;
  localparam int T88 = 4, TP0 = 1296, TJC = 356400, T329 = 1069200, T2P7 = 128304000;
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

  localparam int NO = 6;   // 0 p0, 1 julich, 2 hhlc_drv, 3 dg1, 4 ms, 5 dg3 ... 6 dg4
  logic [6:0] outs, outs_q = '0;
  int cyc = 0, ref_jc = 0, ref_2p7 = 0;
  int last_rise [7];
  int prev_rise [7];
  int n_rise [7];
  assign outs = {dg4, dg3, ms_shutter, dg1, hhlc_drv, julich, pseudo_p0};

  always @(negedge clk) begin
    cyc++;
    if (dut.ce_985) ref_jc = cyc;
    if (dut.ce_2p7) ref_2p7 = cyc;
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

  task automatic wait_rises(int o, int n);
    automatic int n0 = n_rise[o];
    while (n_rise[o] < n0 + n) @(negedge clk);
  endtask

  initial begin
    for (int i = 0; i < 7; i++) begin last_rise[i] = 0; prev_rise[i] = 0; n_rise[i] = 0; end
    #20 rst = 0;
    wait (locked);
    // Count edges only once the reset stretch (1024 clocks) is over: before
    // the first clock edge the two-state simulator starts flops at random.
    repeat (1100) @(posedge clk);
    for (int i = 0; i < 7; i++) n_rise[i] = 0;
    // delays: Julich 5 x P0 + 7 x 88 MHz; ms shutter 1 x 329 Hz + 3 x P0;
    // DG3 2 x 329 Hz; DG4 10 x 88 MHz
    axi_write(R_JULICH, {2'b0, 10'd0, 10'd7, 10'd5});
    axi_write(R_MS,     {2'b0, 10'd0, 10'd3, 10'd1});
    axi_write(R_DG3,    {2'b0, 10'd0, 10'd0, 10'd2});
    axi_write(R_DG4,    {2'b0, 10'd10, 10'd0, 10'd0});

    wait_rises(0, 2); expect_eq("pseudo P0 period", last_rise[0] - prev_rise[0], TP0);
    wait_rises(2, 2); expect_eq("HHLC driver period", last_rise[2] - prev_rise[2], 3564);
    wait_rises(1, 2); expect_eq("Julich period", last_rise[1] - prev_rise[1], TJC);
    expect_eq("Julich delay", ((last_rise[1] - ref_jc) % TJC + TJC) % TJC, 2 + 5 * TP0 + 7 * T88);
    wait_rises(3, 2); expect_eq("DG1 period", last_rise[3] - prev_rise[3], T329);

    expect_eq("no ms shutter in Idle", n_rise[4], 0);
    uart_send(8'h34);   // Fire
    expect_eq("laser state", int'(dut.state), 4);
    wait_rises(6, 1);
    wait_rises(4, 1);
    repeat (3 * T329) @(negedge clk);
    expect_eq("ms shutter shots", n_rise[4], 1);
    expect_eq("DG4 shots", n_rise[6], 1);
    expect_eq("DG3 shots in Fire", n_rise[5] > 0 ? 1 : 0, 1);
    expect_eq("DG4 delay", last_rise[6] - ref_2p7, 2 + 10 * T88);
    expect_eq("ms shutter delay", last_rise[4] - ref_2p7, 2 + T329 + 3 * TP0);
    expect_eq("DG3 delay", last_rise[5] - ref_2p7, 2 + 2 * T329);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
