// instr_queue: FIFO between the general-purpose part of the PPU and the
// vector unit. Each entry holds one vector instruction and the 32-bit operand
// taken from the general-purpose register file. As the paper describes, the
// general-purpose part only stalls when this queue is full ("ready" low); the
// vector unit takes entries in order. The depth is not given in the paper and
// is a parameter here.
//
// Interface: push when push_valid && push_ready; pop when pop_valid &&
// pop_ready. A push into a full queue in the same cycle as a pop is refused
// (ready depends only on the fill level).
module instr_queue
  import ppu_pkg::*;
#(
  parameter int unsigned DEPTH = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      push_valid,
  output logic      push_ready,
  input  vq_entry_t push_data,
  output logic      pop_valid,
  input  logic      pop_ready,
  output vq_entry_t pop_data
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  vq_entry_t         buffer [DEPTH];
  logic [AW-1:0]     wptr, rptr;
  logic [AW:0]       count;

  wire do_push = push_valid && push_ready;
  wire do_pop  = pop_valid && pop_ready;

  assign push_ready = (count != (AW+1)'(DEPTH));
  assign pop_valid  = (count != '0);
  assign pop_data   = buffer[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (do_push) wptr <= (wptr == AW'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (do_pop)  rptr <= (rptr == AW'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  always_ff @(posedge clk)
    if (do_push) buffer[wptr] <= push_data;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= (AW+1)'(DEPTH));
endmodule
