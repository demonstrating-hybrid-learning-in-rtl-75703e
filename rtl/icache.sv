// icache: 4 KiB direct-mapped instruction cache of the PPU's general-purpose
// part (size and organisation from the paper). Lines are LINE_WORDS words of
// 32 bits (own choice: 4 words, 256 lines); each line has a tag and a valid
// bit, all invalid after reset.
//
// Fetch interface: the core raises fetch_req with fetch_addr and holds it
// until fetch_valid, which comes one cycle later on a hit. On a miss the
// cache reads the whole line from main memory (req held until gnt, data one
// cycle after gnt), writes it and then answers. flush invalidates all lines.
module icache #(
  parameter int unsigned BYTES      = 4096,
  parameter int unsigned LINE_WORDS = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        flush,
  input  logic        fetch_req,
  input  logic [31:0] fetch_addr,
  output logic        fetch_valid,
  output logic [31:0] fetch_instr,
  output logic        mem_req,
  output logic [31:0] mem_addr,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  logic [31:0] mem_rdata,
  output logic        miss
);
  localparam int unsigned LINES = BYTES / (4 * LINE_WORDS);
  localparam int unsigned OW    = $clog2(LINE_WORDS);
  localparam int unsigned IW    = $clog2(LINES);
  localparam int unsigned TW    = 32 - 2 - OW - IW;

  logic [31:0]   data [LINES * LINE_WORDS];
  logic [TW-1:0] tags [LINES];
  logic [LINES-1:0] valid;

  logic [OW-1:0] off;
  logic [IW-1:0] idx;
  logic [TW-1:0] tag;
  assign {tag, idx, off} = fetch_addr[31:2];

  typedef enum logic [1:0] {C_LOOKUP, C_REFILL, C_ANSWER} cst_e;
  cst_e          st;
  logic [OW:0]   issued, recv;
  logic          hit;

  assign hit  = valid[idx] && tags[idx] == tag;
  assign miss = fetch_req && st == C_LOOKUP && !hit && !fetch_valid;
  assign mem_req  = (st == C_REFILL) && issued != (OW+1)'(LINE_WORDS);
  assign mem_addr = {tag, idx, issued[OW-1:0], 2'b00};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= C_LOOKUP;
      valid       <= '0;
      fetch_valid <= 1'b0;
      issued      <= '0;
      recv        <= '0;
    end else begin
      fetch_valid <= 1'b0;
      unique case (st)
        C_LOOKUP: if (fetch_req && !fetch_valid) begin
          if (hit) begin
            fetch_valid <= 1'b1;
            fetch_instr <= data[{idx, off}];
          end else begin
            st     <= C_REFILL;
            issued <= '0;
            recv   <= '0;
          end
        end
        C_REFILL: begin
          if (mem_req && mem_gnt) issued <= issued + 1'b1;
          if (mem_rvalid) begin
            data[{idx, recv[OW-1:0]}] <= mem_rdata;
            recv <= recv + 1'b1;
            if (recv == (OW+1)'(LINE_WORDS - 1)) begin
              valid[idx] <= 1'b1;
              tags[idx]  <= tag;
              st         <= C_ANSWER;
            end
          end
        end
        default: st <= C_LOOKUP;   // C_ANSWER: next lookup hits
      endcase
      if (flush) valid <= '0;
    end
  end
endmodule
