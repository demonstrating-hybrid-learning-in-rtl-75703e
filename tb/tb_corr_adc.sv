// tb_corr_adc: each channel gets a random trip code (some beyond full scale);
// the comparator input is ramp_code >= trip while the ramp runs. Checks
// every result, that channels that never trip read full scale, the
// conversion length (done in cycle CONV_CYCLES-1 after start), that sample
// covers the conversion and that start is ignored while busy.
module tb_corr_adc;
  localparam int CH = 128, CC = 280;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic start, busy, done, sample, ramp_active;
  logic [7:0] ramp_code; logic [CH-1:0] cmp; logic [CH-1:0][7:0] result;
  int trip [CH];
  corr_adc #(.CHANNELS(CH), .BITS(8), .CONV_CYCLES(CC)) dut (.clk, .rst_n, .start, .busy, .done,
    .sample, .ramp_code, .ramp_active, .cmp, .result);
  always_comb for (int c = 0; c < CH; c++) cmp[c] = ramp_active && int'(ramp_code) >= trip[c];
  initial begin
    int n;
    start = 0; for (int c = 0; c < CH; c++) trip[c] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      for (int c = 0; c < CH; c++) trip[c] = (c % 7 == 3) ? 256 + ($urandom % 50) : int'($urandom % 256);
      @(negedge clk); start = 1; @(negedge clk); start = 0; n = 0;
      checks++; if (!busy || !sample) begin failures++; $display("FAIL not busy"); end
      while (!done && n < 1000) begin
        @(negedge clk); n++;
        if (n == 5) start = 1;        // ignored while busy
        if (n == 6) start = 0;
        checks++; if (sample != busy) begin failures++; $display("FAIL sample"); end
      end
      checks++; if (n != CC - 1) begin failures++; $display("FAIL conversion length %0d", n); end
      @(negedge clk);
      checks++; if (busy) begin failures++; $display("FAIL still busy"); end
      for (int c = 0; c < CH; c++) begin
        checks++;
        if (int'(result[c]) != (trip[c] > 255 ? 255 : trip[c])) begin
          failures++; $display("FAIL ch %0d got %0d trip %0d", c, result[c], trip[c]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #40000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
