// tb_vector_alu: random operands for all VALU operations in both lane sizes
// and both number formats; expected values from an integer reference model
// written independently (saturation by explicit range checks), including
// accumulator chaining of mult and mult-acc.
module tb_vector_alu;
  import ppu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic exec, half, frac; vop_e op; vec_t a, b, y, acc;
  vec_t acc_model;
  vector_alu dut (.clk, .rst_n, .exec, .op, .half, .frac, .a, .b, .y, .acc);

  function automatic longint clampw(input longint v, input int w);
    longint hi, lo;
    hi = (longint'(1) << (w - 1)) - 1; lo = -(longint'(1) << (w - 1));
    return v > hi ? hi : (v < lo ? lo : v);
  endfunction
  function automatic longint sx(input longint v, input int w);
    longint m; m = longint'(1) << w;
    v = v % m; if (v < 0) v += m;
    return v >= (m >> 1) ? v - m : v;
  endfunction

  function automatic vec_t ref_op(input vop_e o, input logic h, input logic f,
                                  input vec_t x, input vec_t z, input vec_t ac);
    vec_t r; int w; int n;
    w = h ? 16 : 8; n = 128 / w; r = '0;
    for (int i = 0; i < n; i++) begin
      longint xa, zb, aa, p, res;
      xa = sx(longint'(x[i*w +: 16] & ((1 << w) - 1)), w);
      zb = sx(longint'(z[i*w +: 16] & ((1 << w) - 1)), w);
      aa = sx(longint'(ac[i*w +: 16] & ((1 << w) - 1)), w);
      if (f) begin
        p = xa * zb;
        p = (p >= 0) ? p / (longint'(1) << (w - 1)) : -((-p + (longint'(1) << (w - 1)) - 1) / (longint'(1) << (w - 1)));
        p = clampw(p, w);
        case (o)
          VOP_ADD: res = clampw(xa + zb, w);
          VOP_SUB: res = clampw(xa - zb, w);
          VOP_MUL: res = p;
          default: res = clampw(aa + p, w);
        endcase
      end else begin
        case (o)
          VOP_ADD: res = xa + zb;
          VOP_SUB: res = xa - zb;
          VOP_MUL: res = xa * zb;
          default: res = aa + xa * zb;
        endcase
      end
      for (int k = 0; k < w; k++) r[i*w + k] = res[k];
    end
    return r;
  endfunction

  task automatic run(input vop_e o, input logic h, input logic f, input vec_t x, input vec_t z);
    vec_t e;
    @(negedge clk); op = o; half = h; frac = f; a = x; b = z; exec = 1;
    e = ref_op(o, h, f, x, z, acc_model);
    @(negedge clk); exec = 0;
    acc_model = e;
    checks++;
    if (y !== e || acc !== e) begin
      failures++; $display("FAIL op=%s half=%0d frac=%0d y=%h exp=%h", o.name(), h, f, y, e);
    end
  endtask

  initial begin
    exec = 0; op = VOP_ADD; half = 0; frac = 0; a = 0; b = 0; acc_model = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // corner: -1 * -1 in fractional saturates to the largest value
    run(VOP_MUL, 0, 1, {16{8'h80}}, {16{8'h80}});
    checks++; if (y[7:0] != 8'h7f) failures++;
    run(VOP_MUL, 1, 1, {8{16'h8000}}, {8{16'h8000}});
    checks++; if (y[15:0] != 16'h7fff) failures++;
    // 0.5 * 0.5 = 0.25 in Q0.7
    run(VOP_MUL, 0, 1, {16{8'h40}}, {16{8'h40}});
    checks++; if (y[7:0] != 8'h20) failures++;
    for (int t = 0; t < 400; t++) begin
      vop_e o;
      o = vop_e'(1 + $urandom % 4);
      run(o, 1'($urandom), 1'($urandom), {4{$urandom}}, {4{$urandom}});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
