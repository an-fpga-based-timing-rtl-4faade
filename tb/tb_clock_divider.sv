// tb_clock_divider: checks the enable divider against a counting model.
// Two instances (DIV = 5 fed by an irregular enable, DIV = 1 fed by the
// same) are compared in every clock with "output = input enable and the
// number of input enables since reset is a multiple of DIV".
`timescale 1ns / 1ps
module tb_clock_divider;
  logic clk = 0, rst = 1, ce_in = 0;
  logic o5, o1, o7;
  int checks = 0, failures = 0, n_in = 0, n_out5 = 0;

  clock_divider #(.DIV(5)) dut5 (.clk, .rst, .ce_in, .ce_out(o5));
  clock_divider #(.DIV(1)) dut1 (.clk, .rst, .ce_in, .ce_out(o1));
  clock_divider #(.DIV(7)) dut7 (.clk, .rst, .ce_in(1'b1), .ce_out(o7));

  always #5 clk = ~clk;

  initial begin
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < 400; i++) begin
      ce_in <= ($urandom % 3) != 0;
      @(negedge clk);
      checks++;
      if (o5 !== (ce_in && ((n_in + 1) % 5 == 0))) begin
        failures++; $display("FAIL div5 at enable %0d: got %b", n_in, o5);
      end
      checks++;
      if (o1 !== ce_in) begin failures++; $display("FAIL div1"); end
      checks++;
      if (o7 !== ((i + 1) % 7 == 0)) begin failures++; $display("FAIL div7 at clock %0d", i); end
      if (o5) n_out5++;
      if (ce_in) n_in++;
      @(posedge clk);
    end
    checks++;
    if (n_out5 != n_in / 5) begin failures++; $display("FAIL count %0d vs %0d", n_out5, n_in / 5); end
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
