// vector_alu: multiply-accumulate unit (VALU) of one 128-bit vector slice.
//
// Operations (paper, Table II): mult-acc, mult, add and sub, each in two
// element sizes (sixteen 8-bit or eight 16-bit lanes) and two number
// formats: signed integers with modular (wrap-around) arithmetic, or signed
// fractions (Q0.7 / Q0.15) with saturating arithmetic. As in the paper's
// figure of the vector unit, the unit has an internal accumulator: the
// result Y of every operation is written back into ACC, so a chain of
// mult-acc instructions needs no register-file access for the running sum.
//
// Own choices where the paper is silent: fractional products are truncated
// (arithmetic shift right by 7 or 15, no rounding); the saturating mult-acc
// saturates the product and then the sum; add and sub also load ACC.
//
// Timing: y_next is combinational from a, b and ACC; on exec the result is
// registered into y and ACC (one cycle).
module vector_alu
  import ppu_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic exec,
  input  vop_e op,
  input  logic half,
  input  logic frac,
  input  vec_t a,
  input  vec_t b,
  output vec_t y,
  output vec_t acc
);
  vec_t y_next;

  function automatic logic signed [16:0] sat(input logic signed [33:0] v, input int unsigned w);
    logic signed [33:0] hi, lo;
    hi = (34'sd1 <<< (w - 1)) - 34'sd1;
    lo = -(34'sd1 <<< (w - 1));
    if (v > hi) return 17'(hi);
    if (v < lo) return 17'(lo);
    return 17'(v);
  endfunction

  // one lane of width w (8 or 16), operands sign-extended to 17 bits
  function automatic logic [15:0] lane(input vop_e o, input logic f, input int unsigned w,
                                       input logic signed [16:0] x, input logic signed [16:0] z,
                                       input logic signed [16:0] ac);
    logic signed [33:0] prod, r;
    int unsigned fb;
    fb   = w - 1;
    prod = x * z;
    if (f) begin
      prod = prod >>> fb;                 // fractional product, truncated
      prod = 34'(sat(prod, w));
      unique case (o)
        VOP_ADD: r = 34'(x) + 34'(z);
        VOP_SUB: r = 34'(x) - 34'(z);
        VOP_MUL: r = prod;
        VOP_MAC: r = 34'(ac) + prod;
        default: r = '0;
      endcase
      return 16'(sat(r, w));
    end else begin
      unique case (o)
        VOP_ADD: r = 34'(x) + 34'(z);
        VOP_SUB: r = 34'(x) - 34'(z);
        VOP_MUL: r = prod;
        VOP_MAC: r = 34'(ac) + prod;
        default: r = '0;
      endcase
      return 16'(r);                      // modular: keep low bits
    end
  endfunction

  always_comb begin
    y_next = '0;
    if (half) begin
      for (int i = 0; i < VEC_W / 16; i++)
        y_next[i*16 +: 16] = lane(op, frac, 16, 17'(signed'(a[i*16 +: 16])),
                                  17'(signed'(b[i*16 +: 16])), 17'(signed'(acc[i*16 +: 16])));
    end else begin
      for (int i = 0; i < VEC_W / 8; i++)
        y_next[i*8 +: 8] = 8'(lane(op, frac, 8, 17'(signed'(a[i*8 +: 8])),
                                   17'(signed'(b[i*8 +: 8])), 17'(signed'(acc[i*8 +: 8]))));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y   <= '0;
      acc <= '0;
    end else if (exec) begin
      y   <= y_next;
      acc <= y_next;
    end
  end
endmodule
