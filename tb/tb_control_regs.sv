// tb_control_regs: AXI4-Lite master tasks write every register with random
// values (sometimes with a partial byte strobe), read them back, read the
// status register, and check that each field of the decoded configuration
// holds the bits the register map assigns to it. Responses are held with
// ready low for a few clocks to exercise the handshake.
`timescale 1ns / 1ps
module tb_control_regs;
  import dcs_pkg::*;
  logic clk = 0, rst = 1;
  logic [5:0] awaddr = 0, araddr = 0;
  logic awvalid = 0, wvalid = 0, bready = 0, arvalid = 0, rready = 0;
  logic awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata, status = 32'hCAFE_0005;
  logic [3:0] wstrb = 0;
  logic [1:0] bresp, rresp;
  cfg_t cfg;
  int checks = 0, failures = 0;
  logic [31:0] model [16];

  control_regs dut (.clk, .rst,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .status_in(status), .cfg);

  always #5 clk = ~clk;

  task automatic axi_write(int idx, logic [31:0] d, logic [3:0] s);
    @(negedge clk);
    awaddr = 6'(idx * 4); wdata = d; wstrb = s; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    bready = 1;
    do @(posedge clk); while (!bvalid);
    @(negedge clk); bready = 0;
    for (int b = 0; b < 4; b++) if (s[b]) model[idx][8*b +: 8] = d[8*b +: 8];
  endtask

  task automatic axi_read(int idx, output logic [31:0] d);
    @(negedge clk);
    araddr = 6'(idx * 4); arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    repeat ($urandom_range(0, 3)) @(negedge clk);
    rready = 1;
    do @(posedge clk); while (!rvalid);
    d = rdata;
    @(negedge clk); rready = 0;
  endtask

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: %h expected %h", what, got, exp); end
  endtask

  initial begin
    logic [31:0] d;
    for (int i = 0; i < 16; i++) model[i] = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int r = 0; r < 3; r++) begin
      for (int i = 0; i < 10; i++) axi_write(i, $urandom, (r == 1) ? 4'($urandom) : 4'hF);
      for (int i = 0; i < 10; i++) begin axi_read(i, d); check($sformatf("reg %0d", i), d, model[i]); end
      axi_read(10, d); check("status", d, status);
      check("julich",  32'(cfg.julich),     {2'b0, model[0][29:0]});
      check("pic",     32'(cfg.pic),        {2'b0, model[1][29:0]});
      check("ms",      32'(cfg.ms_shutter), {2'b0, model[2][29:0]});
      check("dg1 l0",  32'(cfg.dg1.l0),     32'(model[3][9:0]));
      check("dg1 l1",  32'(cfg.dg1.l1),     32'(model[3][19:10]));
      check("dg1 l2",  32'(cfg.dg1.l2),     32'(model[3][29:20]));
      check("awg",     32'(cfg.awg),        {2'b0, model[4][29:0]});
      check("dg3",     32'(cfg.dg3),        {2'b0, model[5][29:0]});
      check("dg4",     32'(cfg.dg4),        {2'b0, model[6][29:0]});
      check("hhlc",    cfg.hhlc_phase,      model[7]);
      check("tap awg", 32'(cfg.tap_awg),    32'(model[8][5:0]));
      check("tap dg1", 32'(cfg.tap_dg1),    32'(model[8][13:8]));
      check("tap dg2", 32'(cfg.tap_dg2),    32'(model[8][21:16]));
      check("mmcm",    32'(cfg.mmcm_step),  32'(model[9][15:0]));
    end
    check("bresp", 32'(bresp), 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
