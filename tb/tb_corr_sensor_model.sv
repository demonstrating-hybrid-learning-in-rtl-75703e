// tb_corr_sensor_model: drives pre/post pulse pairs with random spacing and
// random calibration; predicts the causal (post after pre) and anti-causal
// (pre after post) stores as eta * exp(-dt / tau), with the calibration
// scaling, nearest-neighbour pairing, coincident pulses storing nothing, the
// 1.3 V clamp and the two resets. Time advances 1 us per clock cycle here.
module tb_corr_sensor_model;
  logic clk = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic pre, post, rst_causal, rst_anti; logic [3:0] calib;
  real t_us, tau_us, eta_v, a_causal, a_anti;
  corr_sensor_model dut (.clk, .t_us, .pre, .post, .calib, .tau_us, .eta_v, .rst_causal,
                         .rst_anti, .a_causal, .a_anti);
  int cyc = 0;
  always @(negedge clk) begin cyc++; t_us = real'(cyc); end

  real ec, ea;
  function automatic real inc(int dt);
    return eta_v * (1.0 + 0.2 * real'(calib[3:2])) * $exp(-real'(dt) / (tau_us * (1.0 + 0.2 * real'(calib[1:0]))));
  endfunction
  task automatic pulse(input logic p, input logic q);
    @(negedge clk); pre = p; post = q; @(negedge clk); pre = 0; post = 0;
  endtask
  task automatic gap(input int n); repeat (n) @(negedge clk); endtask
  task automatic check(input string what);
    @(negedge clk);
    checks++;
    if (a_causal - ec > 1e-9 || ec - a_causal > 1e-9 || a_anti - ea > 1e-9 || ea - a_anti > 1e-9) begin
      failures++; $display("FAIL %s c %f/%f a %f/%f", what, a_causal, ec, a_anti, ea);
    end
  endtask

  initial begin
    pre = 0; post = 0; rst_causal = 0; rst_anti = 0; calib = 0; tau_us = 20.0; eta_v = 0.02; t_us = 0.0;
    ec = 0.0; ea = 0.0;
    gap(3);
    for (int t = 0; t < 200; t++) begin
      int d1, d2, d3;
      calib = 4'($urandom); d1 = 1 + int'($urandom % 60); d2 = 2 + int'($urandom % 60); d3 = 1 + int'($urandom % 30);
      // pre, pre (restart), post: causal pair with the later pre
      pulse(1, 0); gap(d3); pulse(1, 0); gap(d1 - 1); pulse(0, 1);
      ec += inc(d1 + 1); if (ec > 1.3) ec = 1.3;
      check("causal");
      // then pre after that post: anti-causal pair
      gap(d2 - 2); pulse(1, 0);
      ea += inc(d2 + 1); if (ea > 1.3) ea = 1.3;
      check("anti");
      // coincident pulses: nothing stored, pairing history cleared
      gap(2); pulse(1, 1); gap(3); pulse(0, 1);
      check("coincident");
      gap(2); pulse(1, 0);   // pre after post: anti-causal pair
      ea += inc(5); if (ea > 1.3) ea = 1.3;
      check("anti2");
      if (t % 17 == 16) begin
        @(negedge clk); rst_causal = 1; @(negedge clk); rst_causal = 0; ec = 0.0; check("rst c");
      end
      if (t % 23 == 22) begin
        @(negedge clk); rst_anti = 1; @(negedge clk); rst_anti = 0; ea = 0.0; check("rst a");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
