// tb_vector_compare: random vectors, some lanes forced equal; checks the
// eq/lt/gt flags of every byte against a signed reference in both modes.
module tb_vector_compare;
  import ppu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic exec, half; vec_t a, b; vcr_t vcr;
  vector_compare dut (.clk, .rst_n, .exec, .half, .a, .b, .vcr);
  initial begin
    exec = 0; half = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      half = 1'($urandom); a = {4{$urandom}}; b = {4{$urandom}};
      for (int i = 0; i < 8; i++) if ($urandom % 4 == 0) b[i*16 +: 16] = a[i*16 +: 16];
      exec = 1;
      @(negedge clk); exec = 0;
      for (int i = 0; i < 16; i++) begin
        int x, z;
        if (half) begin x = int'(signed'(a[(i/2)*16 +: 16])); z = int'(signed'(b[(i/2)*16 +: 16])); end
        else      begin x = int'(signed'(a[i*8 +: 8]));       z = int'(signed'(b[i*8 +: 8])); end
        checks++;
        if (vcr.eq[i] != (x == z) || vcr.lt[i] != (x < z) || vcr.gt[i] != (x > z)) begin
          failures++; $display("FAIL lane %0d", i);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
