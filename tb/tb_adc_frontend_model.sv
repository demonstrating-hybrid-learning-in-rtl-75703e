// tb_adc_frontend_model: random and code-aligned input voltages; checks each
// comparator against ramp voltage >= input for every ramp code, and that all
// comparators are low while the ramp is inactive. Then converts the inputs
// with corr_adc and checks the code is the smallest code whose ramp voltage
// reaches the input (1 V full scale).
module tb_adc_frontend_model;
  localparam int CH = 16;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] code, acode; logic act, aact, start, busy, done, sample;
  logic [CH-1:0] cmp, cmp2; logic [CH-1:0][7:0] result;
  real vin [CH];
  logic sel;
  adc_frontend_model #(.CHANNELS(CH)) dut (.ramp_code(sel ? acode : code), .ramp_active(sel ? aact : act), .vin, .cmp);
  assign cmp2 = cmp;
  corr_adc #(.CHANNELS(CH), .CONV_CYCLES(280)) adc (.clk, .rst_n, .start, .busy, .done, .sample,
    .ramp_code(acode), .ramp_active(aact), .cmp(cmp2), .result);
  function automatic int expect_code(real v);
    for (int k = 0; k < 256; k++) if (real'(k) / 256.0 >= v) return k;
    return 255;
  endfunction
  initial begin
    sel = 0; code = 0; act = 0; start = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 10; t++) begin
      for (int c = 0; c < CH; c++)
        vin[c] = (c % 2) ? real'($urandom % 300) / 256.0 : real'($urandom % 100000) / 90000.0;
      for (int k = 0; k < 256; k++) begin
        code = 8'(k); act = 1; #0.1;
        for (int c = 0; c < CH; c++) begin
          checks++; if (cmp[c] != (real'(k) / 256.0 >= vin[c])) begin failures++; $display("FAIL cmp"); end
        end
        act = 0; #0.1;
        checks++; if (cmp != 0) begin failures++; $display("FAIL inactive"); end
      end
      sel = 1;
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int c = 0; c < CH; c++) begin
        checks++; if (int'(result[c]) != expect_code(vin[c])) begin failures++; $display("FAIL conv %0d", c); end
      end
      sel = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #40000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
