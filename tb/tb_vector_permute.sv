// tb_vector_permute: select under a random mask, shifts in both lane sizes,
// splat, and the weight pack/unpack round trip: two rows of random 6-bit
// stored weights are unpacked into the 16-bit fractional format (weight at
// bits 14..3), checked field by field, and packed back to the same bytes.
module tb_vector_permute;
  import ppu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic exec, half; vop_e op; logic [6:0] imm; logic [31:0] operand; vmask_t mask;
  vec_t a, b, y;
  vector_permute dut (.clk, .rst_n, .exec, .op, .half, .imm, .operand, .mask, .a, .b, .y);

  task automatic run(input vop_e o, input logic h, input logic [6:0] im, input vec_t x, input vec_t z);
    @(negedge clk); op = o; half = h; imm = im; a = x; b = z; exec = 1;
    @(negedge clk); exec = 0;
  endtask
  task automatic expect_eq(input vec_t e, input string what);
    checks++; if (y !== e) begin failures++; $display("FAIL %s got %h exp %h", what, y, e); end
  endtask

  initial begin
    vec_t x, z, e, hi_row, lo_row, u0, u1;
    exec = 0; op = VOP_SEL; half = 0; imm = 0; operand = 0; mask = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      x = {4{$urandom}}; z = {4{$urandom}}; mask = 16'($urandom);
      run(VOP_SEL, 0, 0, x, z);
      for (int i = 0; i < 16; i++) e[i*8 +: 8] = mask[i] ? x[i*8 +: 8] : z[i*8 +: 8];
      expect_eq(e, "sel");
      run(VOP_SHL, 0, 7'(1), x, z);
      for (int i = 0; i < 16; i++) e[i*8 +: 8] = {x[i*8 +: 7], 1'b0};
      expect_eq(e, "shl8");
      run(VOP_SHR, 1, 7'(3), x, z);
      for (int i = 0; i < 8; i++) e[i*16 +: 16] = {{3{x[i*16+15]}}, x[i*16+3 +: 13]};
      expect_eq(e, "shr16");
      operand = $urandom;
      run(VOP_SPLAT, 1, 0, x, z);
      expect_eq({8{operand[15:0]}}, "splat16");
      run(VOP_SPLAT, 0, 0, x, z);
      expect_eq({16{operand[7:0]}}, "splat8");
      // pack / unpack round trip
      for (int i = 0; i < 16; i++) begin
        hi_row[i*8 +: 8] = {2'b00, 6'($urandom)};
        lo_row[i*8 +: 8] = {2'b00, 6'($urandom)};
      end
      run(VOP_UNPACK, 1, 7'(0), hi_row, lo_row); u0 = y;
      for (int i = 0; i < 8; i++) begin
        checks++;
        if (u0[i*16 +: 16] != 16'((int'(hi_row[i*8 +: 6]) * 64 + int'(lo_row[i*8 +: 6])) * 8)) begin
          failures++; $display("FAIL unpack lane %0d", i);
        end
      end
      run(VOP_UNPACK, 1, 7'(1), hi_row, lo_row); u1 = y;
      run(VOP_PACK, 1, 7'(0), u0, u1);
      expect_eq(hi_row, "pack hi");
      run(VOP_PACK, 1, 7'(1), u0, u1);
      expect_eq(lo_row, "pack lo");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
