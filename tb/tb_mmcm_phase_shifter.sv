// tb_mmcm_phase_shifter: 352 MHz input (2841 ps period). After lock, steps
// the phase by +10, then -3, then +170 (past one period) and measures the
// time from each input rising edge to the next output rising edge, which
// must be (steps * 17 ps) mod 2841 ps; also checks psdone latency and lock.
`timescale 1ps / 1ps
module tb_mmcm_phase_shifter;
  logic clkin = 0, rst = 1, psen = 0, psincdec = 0, psdone, clkout, locked;
  int checks = 0, failures = 0, steps = 0;
  time t_in;

  mmcm_phase_shifter dut (.clkin1(clkin), .rst, .psclk(clkout), .psen, .psincdec, .psdone,
    .clkout0(clkout), .locked);

  initial forever begin #1420 clkin = 1; #1421 clkin = 0; end

  task automatic step(int n);
    for (int i = 0; i < (n < 0 ? -n : n); i++) begin
      int lat;
      @(negedge clkout); psen = 1; psincdec = (n > 0);
      @(negedge clkout); psen = 0;
      lat = 0;
      while (!psdone) begin @(negedge clkout); lat++; end
      checks++;
      if (lat != 12) begin failures++; $display("FAIL psdone after %0d", lat); end
    end
    steps += n;
  endtask

  task automatic measure();
    int exp, d;
    repeat (4) @(posedge clkin);
    @(posedge clkin); t_in = $time;
    @(posedge clkout);
    d = int'($time - t_in);
    exp = (steps * 17) % 2841; if (exp < 0) exp += 2841;
    checks++;
    if (d != exp && !(exp == 0 && d == 0)) begin failures++; $display("FAIL steps %0d: %0d ps expected %0d", steps, d, exp); end
  endtask

  initial begin
    repeat (3) @(posedge clkin);
    rst = 0;
    repeat (12) @(posedge clkin);
    checks++;
    if (!locked) begin failures++; $display("FAIL not locked"); end
    measure();
    step(10);  measure();
    step(-3);  measure();
    step(170); measure();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
