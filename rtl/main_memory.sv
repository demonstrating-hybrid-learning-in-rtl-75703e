// main_memory: the PPU's 16 KiB on-chip main memory, 4096 words of 32 bits
// with byte enables, shared by the instruction cache refill, the data port
// of the general-purpose core and the vector unit's load/store part.
//
// The paper gives only the size. Own choices: a single-port synchronous
// memory behind a fair arbiter (one access per cycle, the same favoured-
// requester scheme as elsewhere in the design); each requester holds req
// until gnt, read data return one cycle after the grant with rvalid.
// Addresses are byte addresses, bits 1..0 ignored, wrapping at the size.
module main_memory #(
  parameter int unsigned BYTES = 16384,
  parameter int unsigned NPORT = 3
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic [NPORT-1:0]      req,
  input  logic [NPORT-1:0]      we,
  input  logic [NPORT-1:0][31:0] addr,
  input  logic [NPORT-1:0][31:0] wdata,
  input  logic [NPORT-1:0][3:0] be,
  output logic [NPORT-1:0]      gnt,
  output logic [NPORT-1:0]      rvalid,
  output logic [31:0]           rdata
);
  localparam int unsigned WORDS = BYTES / 4;
  localparam int unsigned AW    = $clog2(WORDS);

  logic [31:0]              mem [WORDS];
  logic [$clog2(NPORT)-1:0] gi;
  logic                     unused_conflict;
  logic [AW-1:0]            wa;

  fair_arbiter #(.N(NPORT)) u_arb (
    .clk, .rst_n, .req, .gnt, .gnt_idx(gi), .conflict(unused_conflict)
  );

  assign wa = addr[gi][AW+1:2];

  always_ff @(posedge clk) begin
    if (req != '0) begin
      if (we[gi]) begin
        for (int b = 0; b < 4; b++)
          if (be[gi][b]) mem[wa][b*8 +: 8] <= wdata[gi][b*8 +: 8];
      end else begin
        rdata <= mem[wa];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) rvalid <= '0;
    else        rvalid <= gnt & ~we;
endmodule
