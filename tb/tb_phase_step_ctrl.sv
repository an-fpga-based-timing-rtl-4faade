// tb_phase_step_ctrl: a responder answers each psen with psdone 5 clocks
// later and keeps its own step count. For targets +7, -4, 0 and +3 the
// testbench checks that the responder's count, the controller's count and
// the target agree afterwards, that exactly |change| requests were made in
// the right direction, and that no request was issued while one was pending.
`timescale 1ns / 1ps
module tb_phase_step_ctrl;
  logic clk = 0, rst = 1, psen, psincdec, psdone = 0, busy;
  logic signed [15:0] target = 0, cur;
  int checks = 0, failures = 0, model = 0, n_req = 0, pending = 0, overlap = 0;

  phase_step_ctrl #(.STEP_W(16)) dut (.clk, .rst, .target_step(target), .psen, .psincdec,
    .psdone, .current_step(cur), .busy);

  always #5 clk = ~clk;

  always @(posedge clk) begin
    psdone <= 1'b0;
    if (pending > 0) begin
      pending--;
      if (pending == 0) psdone <= 1'b1;
    end
    if (psen) begin
      if (pending > 0) overlap++;
      n_req++;
      model += psincdec ? 1 : -1;
      pending = 5;
    end
  end

  task automatic go(int t);
    int prev;
    prev = model; n_req = 0;
    @(negedge clk); target = 16'(t);
    repeat (8 * 20) @(negedge clk);
    checks++;
    if (model != t || int'(cur) != t || busy) begin
      failures++; $display("FAIL target %0d: model %0d ctrl %0d busy %b", t, model, cur, busy);
    end
    checks++;
    if (n_req != ((t > prev) ? t - prev : prev - t)) begin failures++; $display("FAIL %0d requests", n_req); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    go(7); go(-4); go(0); go(3);
    checks++;
    if (overlap != 0) begin failures++; $display("FAIL overlapping requests"); end
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
