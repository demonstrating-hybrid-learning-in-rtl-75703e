// tb_synapse_access_unit: the access unit with the digital synapse array and
// the ADC control; the ADC comparators are driven from a per-row table of
// trip codes, so each channel of row r converts to code(r, ch). Checks:
// parallel-bus weight writes and half-row reads, external-bus word writes
// and reads of the same memories, ADC reads of causal and anti-causal
// halves against the table, row-buffer hits for a second read of a row,
// the correlation reset pattern and row pulse, and bus conflicts resolved
// with both sides served.
module tb_synapse_access_unit;
  import ppu_pkg::*;
  localparam int R = 32, C = 64, W = 256;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic ppu_req_valid, ppu_req_ready, ppu_req_we, ppu_rsp_valid, ppu_rsp_ready;
  logic [31:0] ppu_req_addr; logic [W-1:0] ppu_req_wdata, ppu_rsp_rdata; logic [W/8-1:0] ppu_req_wmask;
  logic [4:0] ppu_req_tag, ppu_rsp_tag;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid, ext_rsp_ready;
  logic [31:0] ext_req_addr, ext_req_wdata, ext_rsp_rdata;
  logic sa_rd_en, sa_wr_en, sa_half; tgt_e sa_field; logic [4:0] sa_row, adc_row;
  logic [C/2-1:0][7:0] sa_wdata; logic [C/2-1:0] sa_wmask; logic [C-1:0][7:0] sa_rdata;
  logic adc_start, adc_busy, adc_done, adc_sample, ramp_active; logic [7:0] ramp_code;
  logic [2*C-1:0] cmp; logic [2*C-1:0][7:0] adc_result;
  logic [R-1:0] crst_row_en; logic [C-1:0] crst_col_c, crst_col_a;
  logic ev_buffer_hit, ev_overlap;
  logic [R-1:0][C-1:0][5:0] weight; logic [R-1:0][C-1:0][3:0] calib; logic [R-1:0][C-1:0] pre;
  logic [R-1:0] row_sel_b;

  synapse_access_unit dut (.*);
  synapse_array u_sa (.clk, .rst_n, .rd_en(sa_rd_en), .wr_en(sa_wr_en), .field(sa_field), .row(sa_row),
    .half(sa_half), .wdata(sa_wdata), .wmask(sa_wmask), .rdata(sa_rdata), .pre_addr('0), .pre_en('0),
    .pre, .weight, .calib, .row_sel_b);
  corr_adc u_adc (.clk, .rst_n, .start(adc_start), .busy(adc_busy), .done(adc_done), .sample(adc_sample),
    .ramp_code, .ramp_active, .cmp, .result(adc_result));
  function automatic int code(int r, int ch); return (r * 37 + ch * 11) % 256; endfunction
  always_comb for (int ch = 0; ch < 2 * C; ch++) cmp[ch] = ramp_active && int'(ramp_code) >= code(int'(adc_row), ch);

  int n_hit = 0, n_conf = 0, n_rst = 0;
  always @(posedge clk) begin
    if (ev_buffer_hit) n_hit++;
    if (dut.arb_conflict) n_conf++;
    if (crst_row_en != 0) n_rst++;
  end

  task automatic ppu_access(input logic we, input logic [31:0] a, input logic [W-1:0] d, output logic [W-1:0] q);
    int n;
    @(negedge clk); ppu_req_valid = 1; ppu_req_we = we; ppu_req_addr = a; ppu_req_wdata = d;
    ppu_req_wmask = '1; ppu_req_tag = 5'($urandom);
    do @(posedge clk); while (!ppu_req_ready);
    @(negedge clk); ppu_req_valid = 0; n = 0;
    if (!we) begin
      while (!ppu_rsp_valid && n < 2000) begin @(negedge clk); n++; end
      q = ppu_rsp_rdata;
      @(negedge clk);
    end
  endtask
  task automatic ext_access(input logic we, input logic [31:0] a, input logic [31:0] d, output logic [31:0] q);
    int n;
    @(negedge clk); ext_req_valid = 1; ext_req_we = we; ext_req_addr = a; ext_req_wdata = d;
    do @(posedge clk); while (!ext_req_ready);
    @(negedge clk); ext_req_valid = 0; n = 0;
    if (!we) begin
      while (!ext_rsp_valid && n < 2000) begin @(negedge clk); n++; end
      q = ext_rsp_rdata;
      @(negedge clk);
    end
  endtask

  initial begin
    logic [W-1:0] d, q; logic [31:0] e;
    ppu_req_valid = 0; ppu_req_we = 0; ppu_req_addr = 0; ppu_req_wdata = 0; ppu_req_wmask = 0; ppu_req_tag = 0;
    ppu_rsp_ready = 1; ext_req_valid = 0; ext_req_we = 0; ext_req_addr = 0; ext_req_wdata = 0; ext_rsp_ready = 1;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      logic [4:0] r, r2; logic h;
      r = 5'($urandom); h = 1'($urandom);
      for (int b = 0; b < 32; b++) d[b*8 +: 8] = {2'b00, 6'($urandom)};
      ppu_access(1, mk_addr(TGT_WEIGHT, r, h, 0), d, q);
      ppu_access(0, mk_addr(TGT_WEIGHT, r, h, 0), '0, q);
      checks++; if (q != d) begin failures++; $display("FAIL weight half row"); end
      ext_access(0, mk_addr(TGT_WEIGHT, r, h, 3'(t)), 0, e);
      checks++; if (e != d[t*32 +: 32]) begin failures++; $display("FAIL ext read"); end
      ext_access(1, mk_addr(TGT_WEIGHT, r, h, 3'(t)), 32'h01020304, e);
      checks++; if (weight[r][(h ? 32 : 0) + t * 4] != 6'd4) begin failures++; $display("FAIL ext write"); end
      // ADC: causal half then anti-causal half of the same row (buffer)
      ppu_access(0, mk_addr(TGT_ADC_C, r, h, 0), '0, q);
      for (int b = 0; b < 32; b++) begin
        checks++; if (int'(q[b*8 +: 8]) != code(int'(r), (h ? 32 : 0) + b)) begin failures++; $display("FAIL adc c"); end
      end
      ppu_access(0, mk_addr(TGT_ADC_A, r, h, 0), '0, q);
      for (int b = 0; b < 32; b++) begin
        checks++; if (int'(q[b*8 +: 8]) != code(int'(r), C + (h ? 32 : 0) + b)) begin failures++; $display("FAIL adc a"); end
      end
      // another row right after: must convert again, not hit the buffer
      r2 = r + 5'd1;
      ppu_access(0, mk_addr(TGT_ADC_C, r2, h, 0), '0, q);
      for (int b = 0; b < 32; b++) begin
        checks++; if (int'(q[b*8 +: 8]) != code(int'(r2), (h ? 32 : 0) + b)) begin failures++; $display("FAIL adc other row r=%0d h=%0d b=%0d got %0d exp %0d", r, h, b, q[b*8 +: 8], code(int'(r2), (h ? 32 : 0) + b)); end
      end
      ppu_access(0, mk_addr(TGT_ADC_C, r, h, 0), '0, q);
      // correlation reset: pattern before the row pulse
      d = '0; d[5*8 +: 8] = 8'h1;
      fork
        ppu_access(1, mk_addr(TGT_RST_C, r, h, 0), d, q);
        begin
          @(posedge crst_row_en[r]);
          checks++;
          if (crst_col_c != (64'(1) << ((h ? 32 : 0) + 5)) || crst_col_a != 0) begin failures++; $display("FAIL reset pattern"); end
        end
      join
      // conflict: both sides at once
      fork
        ppu_access(0, mk_addr(TGT_CALIB, r, 0, 0), '0, q);
        ext_access(0, mk_addr(TGT_CALIB, r, 0, 0), 0, e);
      join
    end
    checks += 3;
    if (n_hit == 0)  begin failures++; $display("FAIL no buffer hit"); end
    if (n_conf == 0) begin failures++; $display("FAIL no conflict"); end
    if (n_rst == 0)  begin failures++; $display("FAIL no reset pulse"); end
    $display("hits=%0d conflicts=%0d resets=%0d", n_hit, n_conf, n_rst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
