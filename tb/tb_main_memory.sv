// tb_main_memory: three requesters issue random reads and byte-masked writes
// over the whole 16 KiB; a shadow memory predicts every read; checks one
// grant per cycle and rvalid one cycle after a read grant.
module tb_main_memory;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [2:0] req, we, gnt, rvalid; logic [2:0][31:0] addr, wdata; logic [2:0][3:0] be;
  logic [31:0] rdata;
  logic [31:0] shadow [4096];
  main_memory dut (.clk, .rst_n, .req, .we, .addr, .wdata, .be, .gnt, .rvalid, .rdata);
  logic [31:0] exp_q; logic [2:0] exp_v;
  initial begin
    req = 0; we = 0; addr = 0; wdata = 0; be = 0; exp_v = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    // initialise all words through port 0
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk); req = 3'b001; we = 3'b001; addr[0] = 32'(i * 4); wdata[0] = $urandom; be[0] = 4'hf;
      shadow[i] = wdata[0];
    end
    @(negedge clk); req = 0;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++; if (rvalid != exp_v) begin failures++; $display("FAIL rvalid"); end
      if (exp_v != 0) begin checks++; if (rdata != exp_q) begin failures++; $display("FAIL rdata"); end end
      for (int p = 0; p < 3; p++) begin
        req[p] = 1'($urandom); we[p] = 1'($urandom); addr[p] = 32'(($urandom % 4096) * 4);
        wdata[p] = $urandom; be[p] = 4'($urandom);
      end
      #0.1;
      checks++; if ((gnt & ~req) != 0 || (req != 0 && gnt == 0) || (gnt & (gnt - 1)) != 0) begin failures++; $display("FAIL gnt"); end
      exp_v = 0;
      for (int p = 0; p < 3; p++) if (gnt[p]) begin
        int w; w = int'(addr[p][13:2]);
        if (we[p]) begin
          for (int k = 0; k < 4; k++) if (be[p][k]) shadow[w][k*8 +: 8] = wdata[p][k*8 +: 8];
        end else begin
          exp_v[p] = 1; exp_q = shadow[w];
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #40000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
