// vector_permute: permutation unit of one vector slice.
//
// Operations named by the paper: select (combine two registers lane by lane
// under the vector condition register), bit shifting, loading a vector from a
// general-purpose register, and pack/unpack between the 16-bit fractional
// computation format and the stored 6-bit synapse weights.
//
// The paper's 16-bit weight format puts a 12-bit weight w11..w0 at bit
// positions 14..3 of a 16-bit fraction (bit 15 = sign = 0, bits 2..0 = 0),
// with the weight split over two synapses. Unpack builds that format from two
// vectors of stored weights, one byte per synapse with the 6-bit weight in
// bits 5..0: va holds the high halves (w11..w6), vb the low halves (w5..w0);
// imm[0] picks which eight bytes of each are used. Pack does the reverse: the
// sixteen 16-bit elements of va (elements 0..7) and vb (8..15) become
// sixteen stored bytes, imm[0] = 0 giving the high halves and 1 the low
// halves; negative elements are stored as zero. The 8-bit format (weight at
// bits 6..1) needs no special operation: it is a shift by one.
// The split into 6 + 6 bits and the byte layout are this design's reading
// (see the module's documentation in the README for the paper's wording).
//
// Timing: result computed combinationally, registered on exec.
module vector_permute
  import ppu_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        exec,
  input  vop_e        op,
  input  logic        half,
  input  logic [6:0]  imm,
  input  logic [31:0] operand,
  input  vmask_t      mask,     // condition lanes for select
  input  vec_t        a,
  input  vec_t        b,
  output vec_t        y
);
  vec_t nxt;

  always_comb begin
    nxt = '0;
    unique case (op)
      VOP_SEL:
        for (int i = 0; i < VEC_BYTES; i++)
          nxt[i*8 +: 8] = mask[i] ? a[i*8 +: 8] : b[i*8 +: 8];
      VOP_SHL, VOP_SHR:
        if (half) begin
          for (int i = 0; i < VEC_W / 16; i++)
            nxt[i*16 +: 16] = (op == VOP_SHL) ? a[i*16 +: 16] << imm[3:0]
                                              : 16'(signed'(a[i*16 +: 16]) >>> imm[3:0]);
        end else begin
          for (int i = 0; i < VEC_BYTES; i++)
            nxt[i*8 +: 8] = (op == VOP_SHL) ? a[i*8 +: 8] << imm[2:0]
                                            : 8'(signed'(a[i*8 +: 8]) >>> imm[2:0]);
        end
      VOP_SPLAT:
        if (half) begin
          for (int i = 0; i < VEC_W / 16; i++) nxt[i*16 +: 16] = operand[15:0];
        end else begin
          for (int i = 0; i < VEC_BYTES; i++) nxt[i*8 +: 8] = operand[7:0];
        end
      VOP_UNPACK:
        for (int i = 0; i < VEC_W / 16; i++) begin
          int j;
          j = (imm[0] ? VEC_W / 16 : 0) + i;
          nxt[i*16 +: 16] = {1'b0, a[j*8 +: 6], b[j*8 +: 6], 3'b000};
        end
      VOP_PACK:
        for (int j = 0; j < VEC_BYTES; j++) begin
          logic [15:0] e;
          e = (j < VEC_W / 16) ? a[j*16 +: 16] : b[(j - VEC_W / 16)*16 +: 16];
          if (e[15])       nxt[j*8 +: 8] = 8'h00;
          else if (imm[0]) nxt[j*8 +: 8] = {2'b00, e[8:3]};
          else             nxt[j*8 +: 8] = {2'b00, e[14:9]};
        end
      default: nxt = a;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    y <= '0;
    else if (exec) y <= nxt;
endmodule
