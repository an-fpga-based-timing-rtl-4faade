// tb_serial_rx: 16 clocks per bit. Sends random bytes as 8N1 frames with
// random idle gaps and checks each received byte and that exactly one valid
// strobe comes per frame; a frame with a low stop bit must give no strobe,
// and a 3-clock low glitch on the idle line must not start a frame.
`timescale 1ns / 1ps
module tb_serial_rx;
  localparam int CPB = 16;
  logic clk = 0, rst = 1, rx = 1, valid;
  logic [7:0] data;
  int checks = 0, failures = 0, n_valid = 0;
  logic [7:0] got [$];

  serial_rx #(.CLKS_PER_BIT(CPB)) dut (.clk, .rst, .rx, .valid, .data);

  always #5 clk = ~clk;
  always @(posedge clk) if (valid) begin n_valid++; got.push_back(data); end

  task automatic send(logic [7:0] b, logic stop);
    rx <= 0; repeat (CPB) @(posedge clk);
    for (int i = 0; i < 8; i++) begin rx <= b[i]; repeat (CPB) @(posedge clk); end
    rx <= stop; repeat (CPB) @(posedge clk);
    rx <= 1; repeat ($urandom_range(1, 40)) @(posedge clk);
  endtask

  initial begin
    repeat (5) @(posedge clk);
    rst <= 0;
    repeat (20) @(posedge clk);
    for (int i = 0; i < 40; i++) begin
      logic [7:0] b;
      b = 8'($urandom);
      n_valid = 0; got.delete();
      send(b, 1'b1);
      repeat (CPB) @(posedge clk);
      checks++;
      if (n_valid != 1 || got.size() != 1 || got[0] != b) begin
        failures++; $display("FAIL byte %h: %0d strobes", b, n_valid);
      end
    end
    n_valid = 0;
    send(8'h34, 1'b0);          // framing error
    repeat (2 * CPB) @(posedge clk);
    checks++;
    if (n_valid != 0) begin failures++; $display("FAIL strobe on framing error"); end
    rx <= 0; repeat (3) @(posedge clk); rx <= 1;   // glitch
    repeat (12 * CPB) @(posedge clk);
    checks++;
    if (n_valid != 0) begin failures++; $display("FAIL strobe on glitch"); end
    send(8'h35, 1'b1);
    repeat (CPB) @(posedge clk);
    checks++;
    if (n_valid != 1 || got[got.size()-1] != 8'h35) begin failures++; $display("FAIL after glitch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
