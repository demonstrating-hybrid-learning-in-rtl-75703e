// vector_compare: compare unit of one vector slice. It compares two vectors
// lane by lane as signed numbers (8-bit or 16-bit lanes) and writes the
// vector condition register: equal, less-than and greater-than flags for each
// byte, as the paper describes. In 16-bit mode both bytes of a lane carry the
// lane's flags (own choice). Comparison is the same for integer and
// fractional data since both are two's complement.
//
// Timing: flags are computed combinationally and registered into the
// condition register on exec.
module vector_compare
  import ppu_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic exec,
  input  logic half,
  input  vec_t a,
  input  vec_t b,
  output vcr_t vcr
);
  vcr_t nxt;

  always_comb begin
    nxt = '0;
    for (int i = 0; i < VEC_BYTES; i++) begin
      logic signed [15:0] x, z;
      if (half) begin
        x = signed'(a[(i/2)*16 +: 16]);
        z = signed'(b[(i/2)*16 +: 16]);
      end else begin
        x = 16'(signed'(a[i*8 +: 8]));
        z = 16'(signed'(b[i*8 +: 8]));
      end
      nxt.eq[i] = (x == z);
      nxt.lt[i] = (x < z);
      nxt.gt[i] = (x > z);
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)    vcr <= '0;
    else if (exec) vcr <= nxt;
endmodule
