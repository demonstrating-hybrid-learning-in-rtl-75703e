// tb_icache: a main-memory model with random grant delay serves refills;
// random fetches over a 16 KiB program space (four times the cache size, so
// lines conflict) are compared against the memory image. Also checks that a
// second fetch of the same address hits and that flush forces a miss.
module tb_icache;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;
  logic flush, fetch_req, fetch_valid, mem_req, mem_gnt, mem_rvalid, miss, gnt_en;
  logic [31:0] fetch_addr, fetch_instr, mem_addr, mem_rdata;
  logic [31:0] image [4096];
  icache dut (.clk, .rst_n, .flush, .fetch_req, .fetch_addr, .fetch_valid, .fetch_instr,
              .mem_req, .mem_addr, .mem_gnt, .mem_rvalid, .mem_rdata, .miss);

  // memory model: grant randomly, data one cycle after the grant
  assign mem_gnt = mem_req && gnt_en;
  always_ff @(posedge clk) begin
    gnt_en     <= 1'($urandom);
    mem_rvalid <= mem_gnt;
    if (mem_gnt) mem_rdata <= image[mem_addr[13:2]];
  end

  int misses = 0;
  always_ff @(posedge clk) if (miss) misses <= misses + 1;

  task automatic fetch(input logic [31:0] a, output int lat);
    @(negedge clk); fetch_req = 1; fetch_addr = a; lat = 0;
    do begin @(posedge clk); lat++; #0.1; end while (!fetch_valid && lat < 200);
    checks++;
    if (!fetch_valid || fetch_instr != image[a[13:2]]) begin
      failures++; $display("FAIL fetch %h got %h exp %h", a, fetch_instr, image[a[13:2]]);
    end
    @(negedge clk); fetch_req = 0;
  endtask

  initial begin
    int lat, m0;
    for (int i = 0; i < 4096; i++) image[i] = $urandom;
    flush = 0; fetch_req = 0; fetch_addr = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 1500; t++) begin
      logic [31:0] a;
      a = 32'(($urandom % 4096) * 4);
      fetch(a, lat);
      fetch(a, lat);
      checks++; if (lat != 1) begin failures++; $display("FAIL second fetch not a hit (%0d)", lat); end
    end
    m0 = misses;
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    fetch(32'h40, lat);
    checks++; if (misses != m0 + 1) begin failures++; $display("FAIL flush did not cause a miss"); end
    $display("misses=%0d", misses);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
