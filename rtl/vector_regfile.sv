// vector_regfile: the single-port vector register file of one vector slice,
// 32 registers of 128 bits as in the paper. One access per cycle, either a
// read or a write, which is why the vector unit arbitrates access between its
// reservation stations. Writes have a byte-lane mask; this design uses it to
// carry the per-lane outcome of conditional execution (own choice, the paper
// only says that arithmetic and load/store can execute conditionally).
//
// Timing: a read returns the data one cycle after en && !we (synchronous
// SRAM-like read); a write takes effect at the clock edge.
module vector_regfile #(
  parameter int unsigned NREGS = 32,
  parameter int unsigned WIDTH = 128
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(NREGS)-1:0] addr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic [WIDTH/8-1:0]       wmask,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [NREGS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) begin
        for (int b = 0; b < WIDTH / 8; b++)
          if (wmask[b]) mem[addr][b*8 +: 8] <= wdata[b*8 +: 8];
      end else begin
        rdata <= mem[addr];
      end
    end
  end
endmodule
