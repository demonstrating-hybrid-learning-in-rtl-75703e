// ppu_clock_gate: sleep control and clock gate of the PPU.
//
// As the paper describes, the PPU's clock is switched off when the processor
// executes the Power ISA wait instruction, and any interrupt request (timer,
// external request) switches it on again. The sleep flag runs on the free
// clock: wait_exec sets it, irq clears it (irq wins if both occur). The gate
// is the usual latch-based clock gate: the enable is latched while the clock
// is low and ANDed with the clock, so gclk has no glitches. Own choice: the
// clock stops in the cycle after wait_exec and restarts in the cycle after
// irq.
module ppu_clock_gate (
  input  logic clk,
  input  logic rst_n,
  input  logic wait_exec,
  input  logic irq,
  output logic sleeping,
  output logic gclk
);
  logic en_latch;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)         sleeping <= 1'b0;
    else if (irq)       sleeping <= 1'b0;
    else if (wait_exec) sleeping <= 1'b1;

  always_latch
    if (!clk) en_latch = !sleeping;

  assign gclk = clk & en_latch;
endmodule
