// tb_synapse_dac_model: all 64 weights with random g_max scale and input
// select; checks the current against the fitted line (offset + LSB * w),
// that it flows only into the selected input and only during a pre pulse.
module tb_synapse_dac_model;
  int checks = 0, failures = 0;
  logic pre, sel_b; logic [5:0] weight; real gmax_scale, i_a_na, i_b_na;
  synapse_dac_model dut (.pre, .weight, .sel_b, .gmax_scale, .i_a_na, .i_b_na);
  initial begin
    real e;
    for (int t = 0; t < 20; t++) begin
      gmax_scale = 0.5 + real'($urandom % 100) / 100.0;
      for (int w = 0; w < 64; w++) begin
        weight = 6'(w); sel_b = 1'($urandom); pre = 1'($urandom); #1;
        e = pre ? gmax_scale * (22.786151 + 11.516865 * real'(w)) : 0.0;
        checks++;
        if ((sel_b ? i_b_na : i_a_na) - e > 1e-6 || e - (sel_b ? i_b_na : i_a_na) > 1e-6 ||
            (sel_b ? i_a_na : i_b_na) != 0.0) begin
          failures++; $display("FAIL w=%0d sel_b=%0d", w, sel_b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #20000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
