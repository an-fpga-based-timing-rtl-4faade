// tb_shift_ram: drives random data with an irregular enable through a 16-deep
// variable shift register and compares dout in every enabled cycle with the
// input of len enabled cycles earlier, taken from a history kept by the
// testbench. len is changed between runs (0, 1, 7, 16 and random) with the
// buffer refilled before checking resumes.
`timescale 1ns / 1ps
module tb_shift_ram;
  localparam int D = 16;
  logic clk = 0, rst = 1, ce = 0, din = 0, dout;
  logic [4:0] len = 0;
  int checks = 0, failures = 0;
  logic hist [$];

  shift_ram #(.DEPTH(D), .LW(5)) dut (.clk, .rst, .ce, .din, .len, .dout);

  always #5 clk = ~clk;

  task automatic run(int l, int n);
    len <= 5'(l);
    hist.delete();
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      ce  <= ($urandom % 4) != 0;
      din <= $urandom % 2;
      @(negedge clk);
      if (ce) begin
        hist.push_back(din);
        if (hist.size() > l) begin
          checks++;
          if (dout !== hist[hist.size() - 1 - l]) begin
            failures++; $display("FAIL len %0d step %0d: got %b", l, i, dout);
          end
        end
      end else begin
        checks++;
        if (dout !== 1'b0) begin failures++; $display("FAIL output without enable"); end
      end
    end
  endtask

  initial begin
    repeat (20) @(posedge clk);
    rst <= 0;
    run(0, 100); run(1, 100); run(7, 150); run(16, 200);
    repeat (4) run($urandom_range(1, 16), 120);
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
