// tb_dcs_timing_top: end-to-end test of the timing system with a shortened
// divider chain (all mechanisms kept, every rate scaled down):
//   88 MHz enable every 2 clocks, P0 every 6, Julich every 24, 329 Hz every
//   48, 2.7 Hz every 144, PIC every 10, HHLC driver every 20, reference 60.
// The testbench programs the registers over AXI4-Lite, sends laser-state
// digits over the serial line and checks: output periods; every programmed
// coarse delay (time from the internal reference tick to the output edge,
// modulo the period, against the sum of stage lengths times stage periods);
// the AWG offset from DG1; 78 ps taps on DG1; the gates (not allowed,
// allowed, one single shot per entry into Fire/Diagnostics); HHLC slip and
// advance; MMCM phase stepping (170 ps after 10 steps); the laser-state
// clock frequency; the status register. Each mechanism is counted and one
// that never happened is a failure.
`timescale 1ns / 1ps
module tb_dcs_timing_top;
  import dcs_pkg::*;
  localparam int A = 2, P = 3, J = 4, T = 2, S = 3, PIC = 5, HD = 20, HR = 3, CPB = 8;
  localparam int T88 = A, TP0 = A * P, TJC = TP0 * J, T329 = TJC * T, T2P7 = T329 * S;

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

  dcs_timing_top #(
    .DIV_A(A), .DIV_P0(P), .DIV_JC(J), .DIV_329(T), .DIV_2P7(S), .DIV_PIC(PIC),
    .HHLC_DIV(HD), .HREF_DIV(HR), .OUT_PULSE_W(2), .CLKS_PER_BIT(CPB), .AWG_DEPTH(15), .RST_CLKS(64)
  ) dut (
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

  // 352 MHz ring clock: 2841 ps period
  initial forever begin #1.420 rf_clk = 1; #1.421 rf_clk = 0; end

  // ---------------- edge bookkeeping (sampled at the logic clock's negedge)
  localparam int NO = 12;
  // 0 p0, 1 pic, 2 julich, 3 hhlc_drv, 4 hhlc_ref, 5 ms, 6 awg, 7 dg1, 8 dg2, 9 dg3, 10 dg4, 11 lsclk
  logic [NO-1:0] outs, outs_q = '0;
  int cyc = 0;
  int last_rise [NO];
  int n_rise [NO];
  int ref_jc = 0, ref_329 = 0, ref_2p7 = 0, ref_pic = 0;
  assign outs = {lsclk, dg4, dg3, dg2, dg1, awg, ms_shutter, hhlc_ref, hhlc_drv, julich, pic_chopper, pseudo_p0};

  always @(negedge clk) begin
    cyc++;
    if (dut.ce_985)  ref_jc  = cyc;
    if (dut.ce_329)  ref_329 = cyc;
    if (dut.ce_2p7)  ref_2p7 = cyc;
    if (dut.ce_pic)  ref_pic = cyc;
    for (int i = 0; i < NO; i++) if (outs[i] && !outs_q[i]) begin last_rise[i] = cyc; n_rise[i]++; end
    outs_q = outs;
  end

  // mechanism counters
  int m_delay = 0, m_awg_offset = 0, m_fine = 0, m_block = 0, m_allow = 0, m_single = 0;
  int m_slip = 0, m_advance = 0, m_mmcm = 0, m_serial = 0, m_lsclk = 0, m_status = 0;

  always @(posedge clk) if (dut.u_hhlc.drv_tick) begin
    if (dut.u_hhlc.slip) m_slip++;
    if (dut.u_hhlc.advance) m_advance++;
  end

  // ---------------- bus and serial tasks
  task automatic axi_write(int idx, logic [31:0] d);
    @(negedge clk);
    awaddr = 6'(idx * 4); wdata = d; awvalid = 1; wvalid = 1; bready = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(negedge clk);
    @(negedge clk); bready = 0;
  endtask

  task automatic axi_read(int idx, output logic [31:0] d);
    @(negedge clk);
    araddr = 6'(idx * 4); arvalid = 1; rready = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic uart_send(logic [7:0] b);
    @(posedge clk); uart_rx <= 0;
    repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin uart_rx <= b[i]; repeat (CPB) @(posedge clk); end
    uart_rx <= 1; repeat (2 * CPB) @(posedge clk);
  endtask

  function automatic logic [31:0] dly(int l0, int l1, int l2);
    return {2'b0, 10'(l2), 10'(l1), 10'(l0)};
  endfunction

  // time from the latest reference tick to the latest rising edge of output o,
  // modulo the period, after waiting for a few periods
  task automatic check_delay(string what, int o, ref int refc, input int period, int exp);
    int got, e;
    repeat (3 * period + 20) @(negedge clk);
    // wait for a rising edge of the output
    begin
      automatic int n0 = n_rise[o];
      while (n_rise[o] == n0) @(negedge clk);
    end
    got = ((last_rise[o] - refc) % period + period) % period;
    e   = (exp % period + period) % period;
    checks++;
    if (got != e) begin failures++; $display("FAIL %s delay %0d expected %0d", what, got, e); end
    else m_delay++;
  endtask

  task automatic check_period(string what, int o, int period);
    int t0;
    int n0 = n_rise[o];
    while (n_rise[o] == n0) @(negedge clk);
    t0 = last_rise[o];
    n0 = n_rise[o];
    while (n_rise[o] == n0) @(negedge clk);
    checks++;
    if (last_rise[o] - t0 != period) begin failures++; $display("FAIL %s period %0d expected %0d", what, last_rise[o] - t0, period); end
  endtask

  // count rising edges of output o over n clocks
  task automatic count_over(int o, int n, output int cnt);
    int n0 = n_rise[o];
    repeat (n) @(negedge clk);
    cnt = n_rise[o] - n0;
  endtask

  task automatic set_state(int s);
    uart_send(8'h30 + 8'(s));
    repeat (4) @(negedge clk);
    checks++;
    if (int'(dut.state) != s) begin failures++; $display("FAIL laser state %0d expected %0d", dut.state, s); end
    else m_serial++;
  endtask

  // ---------------- the test
  initial begin
    logic [31:0] st;
    int c_ms, c_dg3, c_dg4;
    for (int i = 0; i < NO; i++) begin last_rise[i] = 0; n_rise[i] = 0; end
    #20;
    rst = 0;
    wait (locked);
    repeat (100) @(negedge clk);

    // output periods (all delays zero)
    check_period("pseudo P0", 0, TP0);
    check_period("PIC", 1, A * PIC);
    check_period("Julich", 2, TJC);
    check_period("HHLC driver", 3, HD);
    check_period("HHLC reference", 4, HD * HR);
    check_period("DG1", 7, T329);
    check_period("AWG", 6, T329);
    check_period("DG2", 8, T2P7);
    check_period("DG3", 9, T2P7);

    // zero-delay latency: phase-shifter register + stretcher = 2 clocks
    check_delay("Julich 0", 2, ref_jc, TJC, 2);
    axi_write(R_JULICH, dly(2, 1, 0));       check_delay("Julich", 2, ref_jc, TJC, 2 + 2 * TP0 + 1 * T88);
    axi_write(R_PIC, dly(3, 0, 0));          check_delay("PIC", 1, ref_pic, A * PIC, 2 + 3 * T88);
    axi_write(R_DG1, dly(1, 1, 1));          check_delay("DG1", 7, ref_329, T329, 2 + TP0 + T88 + 1);
    axi_write(R_AWG, dly(5, 0, 0));          check_delay("AWG", 6, ref_329, T329, 2 + TP0 + T88 + 1 + 5 + 1);
    checks++;
    if (last_rise[6] - last_rise[7] == 6) m_awg_offset++;
    else begin failures++; $display("FAIL AWG-DG1 offset %0d", last_rise[6] - last_rise[7]); end
    axi_write(R_DG3, dly(1, 3, 1));          check_delay("DG3", 9, ref_2p7, T2P7, 2 + T329 + 3 * TP0 + T88);

    // gates: state 1 (Idle): ms shutter and DG4 blocked, DG3 allowed
    axi_write(R_MS, dly(1, 2, 0));
    axi_write(R_DG4, dly(0, 1, 0));
    count_over(5, 4 * T2P7, c_ms); count_over(10, 4 * T2P7, c_dg4); count_over(9, 4 * T2P7, c_dg3);
    checks++;
    if (c_ms == 0 && c_dg4 == 0) m_block++; else begin failures++; $display("FAIL blocked outputs fired"); end
    checks++;
    if (c_dg3 == 4) m_allow++; else begin failures++; $display("FAIL DG3 allowed: %0d pulses", c_dg3); end

    // state 3 (At voltage): DG3 blocked too
    set_state(3);
    count_over(9, 4 * T2P7, c_dg3);
    checks++;
    if (c_dg3 == 0) m_block++; else begin failures++; $display("FAIL DG3 fired in state 3"); end

    // Fire, then Diagnostics: exactly one shot of each gated trigger per entry
    for (int k = 0; k < 2; k++) begin
      automatic int n_ms0 = n_rise[5], n_dg30 = n_rise[9], n_dg40 = n_rise[10];
      set_state(k == 0 ? 4 : 5);
      repeat (6 * T2P7) @(negedge clk);
      checks++;
      if (n_rise[5] - n_ms0 == 1 && n_rise[9] - n_dg30 == 1 && n_rise[10] - n_dg40 == 1) m_single++;
      else begin failures++; $display("FAIL single shot: ms %0d dg3 %0d dg4 %0d", n_rise[5] - n_ms0, n_rise[9] - n_dg30, n_rise[10] - n_dg40); end
      // ms shutter delay: 1 x 329 Hz + 2 x P0 after the 2.7 Hz tick
      checks++;
      if (((last_rise[5] - ref_2p7) % T2P7 + T2P7) % T2P7 == 2 + T329 + 2 * TP0) m_delay++;
      else begin failures++; $display("FAIL ms shutter delay"); end
      checks++;
      if (((last_rise[10] - ref_2p7) % T2P7 + T2P7) % T2P7 == 2 + TP0) m_delay++;
      else begin failures++; $display("FAIL DG4 delay"); end
      set_state(3);
    end
    set_state(1);
    count_over(9, 3 * T2P7, c_dg3);
    checks++;
    if (c_dg3 == 3) m_allow++; else begin failures++; $display("FAIL DG3 after Idle: %0d", c_dg3); end

    // laser state clock: half period = 24 * state clocks
    for (int s = 1; s <= 5; s += 3) begin
      int t0, n0;
      set_state(s);
      repeat (4 * TJC * s) @(negedge clk);
      n0 = n_rise[11]; while (n_rise[11] == n0) @(negedge clk);
      t0 = last_rise[11]; n0 = n_rise[11]; while (n_rise[11] == n0) @(negedge clk);
      checks++;
      if (last_rise[11] - t0 == 2 * TJC * s) m_lsclk++;
      else begin failures++; $display("FAIL state clock period %0d in state %0d", last_rise[11] - t0, s); end
    end

    // status register
    axi_read(R_STATUS, st);
    checks++;
    if (st[2:0] == 3'd4 && st[10]) m_status++; else begin failures++; $display("FAIL status %h", st); end

    // HHLC: slip by 4 then advance to M - 3 (7 steps back)
    axi_write(R_HHLC, 32'd4);
    repeat (HD * 10) @(negedge clk);
    checks++;
    if (dut.u_hhlc.phase_now != 4) begin failures++; $display("FAIL HHLC phase %0d", dut.u_hhlc.phase_now); end
    axi_write(R_HHLC, 32'(HD * HR - 3));
    repeat (HD * 12) @(negedge clk);
    checks++;
    if (dut.u_hhlc.phase_now != HD * HR - 3 || m_slip != 4 || m_advance != 7) begin
      failures++; $display("FAIL HHLC phase %0d slips %0d advances %0d", dut.u_hhlc.phase_now, m_slip, m_advance);
    end
    check_period("HHLC driver after slewing", 3, HD);

    // fine delay on DG1: rising edge 8 x 78 ps after the clock edge
    begin
      realtime tc, td;
      axi_write(R_TAPS, 32'h0000_0800);
      repeat (2 * T329) @(negedge clk);
      @(posedge dut.p_dg1); tc = $realtime;
      @(posedge dg1); td = $realtime;
      checks++;
      if (td - tc > 0.623 && td - tc < 0.625) m_fine++;
      else begin failures++; $display("FAIL fine delay %0.3f ns", td - tc); end
    end

    // MMCM: 10 steps of 17 ps
    begin
      realtime tr, tk;
      axi_write(R_MMCM, 32'd10);
      repeat (400) @(negedge clk);
      @(posedge rf_clk); tr = $realtime;
      @(posedge clk); tk = $realtime;
      checks++;
      if (tk - tr > 0.169 && tk - tr < 0.171 && dut.ps_step == 10) m_mmcm++;
      else begin failures++; $display("FAIL MMCM shift %0.3f ns, step %0d", tk - tr, dut.ps_step); end
    end

    // every mechanism must have happened
    begin
      automatic int m [12] = '{m_delay, m_awg_offset, m_fine, m_block, m_allow, m_single,
                     m_slip, m_advance, m_mmcm, m_serial, m_lsclk, m_status};
      string nm [12] = '{"coarse delay", "AWG offset", "fine delay", "gate block", "gate allow",
                         "single shot", "HHLC slip", "HHLC advance", "MMCM step", "serial command",
                         "state clock", "status read"};
      for (int i = 0; i < 12; i++) begin
        $display("mechanism %-15s happened %0d times", nm[i], m[i]);
        checks++;
        if (m[i] == 0) begin failures++; $display("FAIL mechanism %s never happened", nm[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
