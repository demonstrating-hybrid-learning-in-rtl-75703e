// tb_synapse_digital: writes the three memories and checks them; checks the
// address comparator for all 64 row addresses with enable high and low.
module tb_synapse_digital;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic we_weight, we_addr, we_calib, pre_en, pre;
  logic [5:0] wdata, pre_addr, weight, addr; logic [3:0] calib;
  synapse_digital dut (.clk, .rst_n, .we_weight, .we_addr, .we_calib, .wdata, .pre_addr,
                       .pre_en, .pre, .weight, .addr, .calib);
  initial begin
    we_weight = 0; we_addr = 0; we_calib = 0; wdata = 0; pre_en = 0; pre_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      logic [5:0] w, ad; logic [3:0] c;
      w = 6'($urandom); ad = 6'($urandom); c = 4'($urandom);
      @(negedge clk); we_weight = 1; wdata = w;
      @(negedge clk); we_weight = 0; we_addr = 1; wdata = ad;
      @(negedge clk); we_addr = 0; we_calib = 1; wdata = {2'b00, c};
      @(negedge clk); we_calib = 0; wdata = 6'($urandom);
      checks++; if (weight != w || addr != ad || calib != c) begin failures++; $display("FAIL mem"); end
      for (int r = 0; r < 64; r++) begin
        pre_addr = 6'(r); pre_en = 1'($urandom); #0.1;
        checks++; if (pre != (pre_en && r == ad)) begin failures++; $display("FAIL cmp %0d", r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
