// tb_vector_regfile: writes random data with random byte masks to all 32
// registers, keeps a shadow copy and checks every read (one-cycle latency).
module tb_vector_regfile;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic en, we; logic [4:0] addr; logic [127:0] wdata, rdata; logic [15:0] wmask;
  logic [127:0] shadow [32];
  vector_regfile dut (.clk, .en, .we, .addr, .wdata, .wmask, .rdata);

  task automatic wr(input int a, input logic [127:0] d, input logic [15:0] m);
    @(negedge clk); en = 1; we = 1; addr = 5'(a); wdata = d; wmask = m;
    for (int b = 0; b < 16; b++) if (m[b]) shadow[a][b*8 +: 8] = d[b*8 +: 8];
  endtask
  task automatic rd(input int a);
    @(negedge clk); en = 1; we = 0; addr = 5'(a);
    @(negedge clk); en = 0;
    checks++;
    if (rdata !== shadow[a]) begin failures++; $display("FAIL reg %0d", a); end
  endtask

  initial begin
    en = 0; we = 0; addr = 0; wdata = 0; wmask = 0;
    for (int r = 0; r < 32; r++) wr(r, {4{$urandom}}, 16'hffff);
    for (int r = 0; r < 32; r++) rd(r);
    for (int t = 0; t < 200; t++) begin
      if ($urandom % 2) wr($urandom % 32, {4{$urandom}}, 16'($urandom));
      else rd($urandom % 32);
    end
    // a read must not disturb: read without en keeps rdata
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
