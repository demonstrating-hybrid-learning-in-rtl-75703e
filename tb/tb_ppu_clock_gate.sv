// tb_ppu_clock_gate: random wait and irq pulses; checks that gclk has a rising
// edge exactly in the cycles where the core is awake, that it stays low while
// asleep, that irq wins over wait, and that gclk never rises while clk is low.
module tb_ppu_clock_gate;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic wait_exec, irq, sleeping, gclk;
  ppu_clock_gate dut (.clk, .rst_n, .wait_exec, .irq, .sleeping, .gclk);
  int gedges = 0;
  always @(posedge gclk) begin
    gedges++;
    checks++; if (clk !== 1'b1) begin failures++; $display("FAIL glitch"); end
  end
  initial begin
    logic exp_sleep, was_asleep; int g0, sleeps, wakes;
    sleeps = 0; wakes = 0;
    wait_exec = 0; irq = 0; exp_sleep = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      wait_exec = ($urandom % 8) == 0; irq = ($urandom % 12) == 0;
      g0 = gedges;
      @(posedge clk); #0.5;
      // an edge in this cycle iff awake before it
      checks++; if ((gedges - g0) != (exp_sleep ? 0 : 1)) begin failures++; $display("FAIL gclk edge t=%0d", t); end
      was_asleep = exp_sleep;
      if (irq) begin if (exp_sleep) wakes++; exp_sleep = 0; end
      else if (wait_exec) begin if (!exp_sleep) sleeps++; exp_sleep = 1; end
      checks++; if (sleeping != exp_sleep) begin failures++; $display("FAIL sleeping"); end
      if (exp_sleep && was_asleep) begin checks++; if (gclk !== 1'b0) begin failures++; $display("FAIL gclk high asleep"); end end
    end
    checks++; if (sleeps == 0 || wakes == 0) failures++;
    $display("sleeps=%0d wakes=%0d", sleeps, wakes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
