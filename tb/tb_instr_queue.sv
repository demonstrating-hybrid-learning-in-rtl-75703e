// tb_instr_queue: random pushes and pops against a reference queue; checks
// order, data, ready low exactly when full and valid low when empty.
module tb_instr_queue;
  import ppu_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic push_valid, push_ready, pop_valid, pop_ready;
  vq_entry_t push_data, pop_data;
  vq_entry_t model [$];
  int fulls = 0;
  logic dpop, dpush;
  instr_queue #(.DEPTH(4)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_data,
                                .pop_valid, .pop_ready, .pop_data);
  initial begin
    push_valid = 0; pop_ready = 0; push_data = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      push_valid = ($urandom % 3) != 0;
      pop_ready  = ($urandom % 2) != 0;
      push_data  = vq_entry_t'({$urandom, $urandom});
      #0.1;
      checks++; if (push_ready != (model.size() < 4)) begin failures++; $display("FAIL ready"); end
      checks++; if (pop_valid != (model.size() > 0)) begin failures++; $display("FAIL valid"); end
      if (model.size() == 4) fulls++;
      dpop  = pop_valid && pop_ready;
      dpush = push_valid && push_ready;
      if (dpop) begin
        checks++; if (pop_data != model[0]) begin failures++; $display("FAIL data"); end
      end
      @(posedge clk);
      if (dpop) void'(model.pop_front());
      if (dpush) model.push_back(push_data);
    end
    checks++; if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
