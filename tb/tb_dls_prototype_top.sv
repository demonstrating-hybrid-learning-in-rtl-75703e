// tb_dls_prototype_top: end-to-end test of the plasticity subsystem at its
// default size (32 x 64 synapses, two vector slices, 280-cycle ADC).
//
// Flow: the external bus writes weights (random, 1..62) and a common row
// address into two synapse rows. Pre-synaptic events on those rows and
// post-synaptic spikes on random columns, at random relative times, charge
// the correlation sensors. The test then plays the part of the general-purpose
// core and sends the vector unit a plasticity program for each half row:
//   PLD causal trace, PLD anti-causal trace (ADC row buffer), PLD weights,
//   SUB d = causal - anticausal, CMP d against zero, ADD/SUB 1 to the weight
//   under the gt / lt condition, PST weights, VST weights to main memory,
//   PST to both correlation resets.
// The expected weights are computed here from the ADC codes seen at the ADC
// output, and checked in the synapse array, in main memory (read by the
// core port) and over the external bus while the PPU sleeps. The correlation
// stores of the updated rows must read zero after the reset. The core fetches
// from the instruction cache (a miss, then a hit) and executes wait; an
// interrupt wakes the PPU.
//
// Mechanisms counted (each must happen at least once): hazard stalls in the
// vector unit, instruction queue full, access-unit row buffer hits, an SRAM
// access overlapping an ADC conversion, PPU / external bus conflicts,
// conditional (masked) writes, cache misses, sleep and wake.
module tb_dls_prototype_top;
  import ppu_pkg::*;
  localparam int R = 32, C = 64;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic vq_valid, vq_ready, vector_idle; vq_entry_t vq_data;
  logic core_mem_req, core_mem_we, core_mem_gnt, core_mem_rvalid; logic [31:0] core_mem_addr, core_mem_wdata, core_mem_rdata;
  logic [3:0] core_mem_be;
  logic fetch_req, fetch_valid, icache_flush; logic [31:0] fetch_addr, fetch_instr;
  logic wait_exec, irq, ppu_sleeping;
  logic ext_req_valid, ext_req_ready, ext_req_we, ext_rsp_valid, ext_rsp_ready;
  logic [31:0] ext_req_addr, ext_req_wdata, ext_rsp_rdata;
  logic [R-1:0][5:0] pre_addr; logic [R-1:0] pre_en; logic [C-1:0] post;
  real tau_us, eta_v, gmax_scale; real i_a_na [C]; real i_b_na [C];

  dls_prototype_top dut (.*);

  // ------------------------------------------------------ mechanism counters
  int n_hazard = 0, n_qfull = 0, n_hit = 0, n_overlap = 0, n_conflict = 0, n_cond = 0,
      n_miss = 0, n_sleep = 0, n_wake = 0;
  logic sleeping_d = 0;
  always @(posedge clk) begin
    if (dut.hazard_stall && !ppu_sleeping) n_hazard++;
    if (vq_valid && !vq_ready) n_qfull++;
    if (dut.ev_buffer_hit) n_hit++;
    if (dut.ev_overlap) n_overlap++;
    if (dut.u_sau.arb_conflict) n_conflict++;
    if (dut.ic_miss) n_miss++;
    if (ppu_sleeping && !sleeping_d) n_sleep++;
    if (!ppu_sleeping && sleeping_d) n_wake++;
    sleeping_d <= ppu_sleeping;
  end

  // the ADC result of the last conversion, per row
  // (adc_first: the first conversion of each row, which the update used;
  // a later conversion of the same row follows a correlation reset)
  logic [2*C-1:0][7:0] adc_seen [R];
  logic [2*C-1:0][7:0] adc_first [R];
  int adc_convs [R];
  logic adc_done_d = 0; logic [4:0] adc_row_q;
  initial for (int r = 0; r < R; r++) adc_convs[r] = 0;
  always @(posedge clk) begin
    adc_done_d <= dut.adc_done;
    if (dut.adc_done) adc_row_q <= dut.adc_row;
    if (adc_done_d) begin
      adc_seen[adc_row_q] <= dut.adc_result;
      if (adc_convs[adc_row_q] == 0) adc_first[adc_row_q] <= dut.adc_result;
      adc_convs[adc_row_q] <= adc_convs[adc_row_q] + 1;
    end
  end

  // -------------------------------------------------------------- helpers
  task automatic ext_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); ext_req_valid = 1; ext_req_we = 1; ext_req_addr = a; ext_req_wdata = d;
    do @(posedge clk); while (!ext_req_ready);
    @(negedge clk); ext_req_valid = 0;
  endtask
  task automatic ext_read(input logic [31:0] a, output logic [31:0] d);
    int n;
    @(negedge clk); ext_req_valid = 1; ext_req_we = 0; ext_req_addr = a; ext_rsp_ready = 1;
    do @(posedge clk); while (!ext_req_ready);
    @(negedge clk); ext_req_valid = 0; n = 0;
    while (!ext_rsp_valid && n < 2000) begin @(negedge clk); n++; end
    d = ext_rsp_rdata;
    @(negedge clk);
  endtask
  task automatic vpush(input vop_e op, input int vt, input int va, input int vb, input cond_e cond,
                       input logic [31:0] operand);
    vinstr_t in;
    in = '0; in.op = op; in.vt = 5'(vt); in.va = 5'(va); in.vb = 5'(vb); in.cond = cond;
    @(negedge clk); vq_valid = 1; vq_data.instr = in; vq_data.operand = operand;
    do @(posedge clk); while (!vq_ready);
    @(negedge clk); vq_valid = 0;
  endtask
  task automatic vwait_idle();
    int n; n = 0;
    do begin @(negedge clk); n++; end while (!(vector_idle && !vq_valid) && n < 20000);
    repeat (4) @(negedge clk);
  endtask
  task automatic core_read(input logic [31:0] a, output logic [31:0] d);
    @(negedge clk); core_mem_req = 1; core_mem_we = 0; core_mem_addr = a;
    do @(posedge clk); while (!core_mem_gnt);
    @(negedge clk); core_mem_req = 0;
    d = core_mem_rdata;
  endtask
  task automatic core_write(input logic [31:0] a, input logic [31:0] d);
    @(negedge clk); core_mem_req = 1; core_mem_we = 1; core_mem_addr = a; core_mem_wdata = d; core_mem_be = 4'hf;
    do @(posedge clk); while (!core_mem_gnt);
    @(negedge clk); core_mem_req = 0;
  endtask

  // background external traffic: reads of an unrelated row while the PPU works
  logic bg_on = 0;
  initial begin
    logic [31:0] d;
    forever begin
      @(negedge clk);
      if (bg_on) ext_read(mk_addr(TGT_CALIB, 5'd20, 1'b0, 3'($urandom)), d);
    end
  end

  logic [5:0] w0 [2][C];
  localparam int ROWSEL [2] = '{3, 17};

  initial begin
    logic [31:0] d;
    int lat;
    vq_valid = 0; vq_data = '0; core_mem_req = 0; core_mem_we = 0; core_mem_addr = 0; core_mem_wdata = 0;
    core_mem_be = 0; fetch_req = 0; fetch_addr = 0; icache_flush = 0; wait_exec = 0; irq = 0;
    ext_req_valid = 0; ext_req_we = 0; ext_req_addr = 0; ext_req_wdata = 0; ext_rsp_ready = 1;
    pre_addr = '0; pre_en = '0; post = '0; tau_us = 0.02; eta_v = 0.25; gmax_scale = 1.0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- configuration over the external bus: weights and addresses
    for (int k = 0; k < 2; k++) begin
      for (int c = 0; c < C; c++) w0[k][c] = 6'(1 + $urandom % 62);
      for (int h = 0; h < 2; h++)
        for (int wd = 0; wd < 8; wd++) begin
          logic [31:0] wv, av;
          for (int b = 0; b < 4; b++) begin
            wv[b*8 +: 8] = {2'b00, w0[k][h*32 + wd*4 + b]};
            av[b*8 +: 8] = 8'(10 + k);
          end
          ext_write(mk_addr(TGT_WEIGHT, 5'(ROWSEL[k]), 1'(h), 3'(wd)), wv);
          ext_write(mk_addr(TGT_ADDR, 5'(ROWSEL[k]), 1'(h), 3'(wd)), av);
        end
    end
    ext_read(mk_addr(TGT_WEIGHT, 5'(ROWSEL[0]), 1'b1, 3'd2), d);
    checks++; if (d[5:0] != w0[0][32 + 8]) begin failures++; $display("FAIL ext readback"); end

    // ---- spikes: pre on the two rows, post on random columns, random order
    for (int p = 0; p < 6; p++) begin
      logic [C-1:0] early, late;
      early = {$urandom, $urandom}; late = {$urandom, $urandom};
      @(negedge clk); post = early;
      @(negedge clk); post = '0;
      repeat (2 + $urandom % 6) @(negedge clk);
      pre_addr[ROWSEL[0]] = 6'd10; pre_addr[ROWSEL[1]] = 6'd11;
      pre_en[ROWSEL[0]] = 1; pre_en[ROWSEL[1]] = 1;
      @(negedge clk); pre_en = '0;
      repeat (1 + $urandom % 6) @(negedge clk);
      post = late;
      @(negedge clk); post = '0;
      repeat (30) @(negedge clk);
    end
    // a current flows into input A of a column while its row fires
    pre_en[ROWSEL[0]] = 1; #0.5;
    checks++; if (i_a_na[5] < 22.0) begin failures++; $display("FAIL no dendritic current"); end
    @(negedge clk); pre_en = '0;

    // ---- plasticity program, one half row per pass
    vpush(VOP_SPLAT, 30, 0, 0, COND_ALWAYS, 32'h0);          // v30 = 0
    vpush(VOP_SPLAT, 31, 0, 0, COND_ALWAYS, 32'h01010101);   // v31 = 1
    bg_on = 1;
    for (int k = 0; k < 2; k++)
      for (int h = 0; h < 2; h++) begin
        logic [4:0] r; r = 5'(ROWSEL[k]);
        vpush(VOP_PLD, 1, 0, 0, COND_ALWAYS, mk_addr(TGT_ADC_C, r, 1'(h), 0));
        vpush(VOP_PLD, 2, 0, 0, COND_ALWAYS, mk_addr(TGT_ADC_A, r, 1'(h), 0));
        vpush(VOP_PLD, 3, 0, 0, COND_ALWAYS, mk_addr(TGT_WEIGHT, r, 1'(h), 0));
        vpush(VOP_SUB, 4, 1, 2, COND_ALWAYS, 0);
        vpush(VOP_CMP, 0, 4, 30, COND_ALWAYS, 0);
        vpush(VOP_ADD, 3, 3, 31, COND_GT, 0);
        vpush(VOP_SUB, 3, 3, 31, COND_LT, 0);
        vpush(VOP_PST, 3, 0, 0, COND_ALWAYS, mk_addr(TGT_WEIGHT, r, 1'(h), 0));
        vpush(VOP_ST, 3, 0, 0, COND_ALWAYS, 32'h200 + 32'(k * 64 + h * 32));
        vpush(VOP_PST, 31, 0, 0, COND_ALWAYS, mk_addr(TGT_RST_C, r, 1'(h), 0));
        vpush(VOP_PST, 31, 0, 0, COND_ALWAYS, mk_addr(TGT_RST_A, r, 1'(h), 0));
      end
    vwait_idle();
    bg_on = 0;
    repeat (20) @(negedge clk);

    // ---- expected weights from the ADC codes
    for (int k = 0; k < 2; k++)
      for (int c = 0; c < C; c++) begin
        logic signed [7:0] dd; int e;
        dd = signed'(8'(adc_first[ROWSEL[k]][c] - adc_first[ROWSEL[k]][C + c]));
        e = int'(w0[k][c]) + (dd > 0 ? 1 : 0) - (dd < 0 ? 1 : 0);
        if (dd != 0) n_cond++;
        checks++;
        if (int'(dut.weight[ROWSEL[k]][c]) != e) begin
          failures++; $display("FAIL weight r=%0d c=%0d got %0d exp %0d", ROWSEL[k], c, dut.weight[ROWSEL[k]][c], e);
        end
      end
    // the correlation stores were reset: a new conversion reads zero
    for (int k = 0; k < 2; k++) begin
      vpush(VOP_PLD, 5, 0, 0, COND_ALWAYS, mk_addr(TGT_ADC_C, 5'(ROWSEL[k]), 1'b0, 0));
      vwait_idle();
      for (int c = 0; c < 2 * C; c++) begin
        checks++;
        if (adc_seen[ROWSEL[k]][c] != 8'd0) begin failures++; $display("FAIL correlation not reset r=%0d ch=%0d", ROWSEL[k], c); end
      end
    end
    // main memory copy (serial vector store), read by the core
    for (int k = 0; k < 2; k++)
      for (int wd = 0; wd < 16; wd++) begin
        core_read(32'h200 + 32'(k * 64 + wd * 4), d);
        for (int b = 0; b < 4; b++) begin
          checks++;
          if (d[b*8 +: 8] != {2'b00, dut.weight[ROWSEL[k]][wd * 4 + b]}) begin
            failures++; $display("FAIL memory copy k=%0d word %0d", k, wd);
          end
        end
      end

    // ---- instruction fetch through the cache: miss, then hit
    core_write(32'h1000, 32'h7c0000a6);
    @(negedge clk); fetch_req = 1; fetch_addr = 32'h1000; lat = 0;
    do begin @(posedge clk); lat++; #0.1; end while (!fetch_valid && lat < 100);
    checks++; if (fetch_instr != 32'h7c0000a6) begin failures++; $display("FAIL fetch"); end
    @(negedge clk); fetch_req = 0;
    @(negedge clk); fetch_req = 1; lat = 0;
    do begin @(posedge clk); lat++; #0.1; end while (!fetch_valid && lat < 100);
    checks++; if (lat != 1) begin failures++; $display("FAIL second fetch not a hit (%0d cycles)", lat); end
    @(negedge clk); fetch_req = 0;

    // ---- wait: the PPU sleeps, the external bus still works, irq wakes it
    @(negedge clk); wait_exec = 1; @(negedge clk); wait_exec = 0;
    repeat (3) @(negedge clk);
    checks++; if (!ppu_sleeping) begin failures++; $display("FAIL not sleeping"); end
    ext_read(mk_addr(TGT_WEIGHT, 5'(ROWSEL[1]), 1'b0, 3'd1), d);
    checks++; if (d[5:0] != dut.weight[ROWSEL[1]][4]) begin failures++; $display("FAIL ext read while asleep"); end
    @(negedge clk); irq = 1; @(negedge clk); irq = 0;
    repeat (2) @(negedge clk);
    checks++; if (ppu_sleeping) begin failures++; $display("FAIL still sleeping"); end

    // ---- queue full: a burst of independent splats
    fork
      for (int i = 0; i < 12; i++) vpush(VOP_SPLAT, 10 + i, 0, 0, COND_ALWAYS, 32'(i));
    join
    vwait_idle();

    $display("mechanisms: hazard_stall=%0d queue_full=%0d buffer_hit=%0d overlap=%0d bus_conflict=%0d cond_write=%0d cache_miss=%0d sleep=%0d wake=%0d",
             n_hazard, n_qfull, n_hit, n_overlap, n_conflict, n_cond, n_miss, n_sleep, n_wake);
    checks += 9;
    if (n_hazard == 0)   begin failures++; $display("FAIL no hazard stall"); end
    if (n_qfull == 0)    begin failures++; $display("FAIL queue never full"); end
    if (n_hit == 0)      begin failures++; $display("FAIL no buffer hit"); end
    if (n_overlap == 0)  begin failures++; $display("FAIL no overlap"); end
    if (n_conflict == 0) begin failures++; $display("FAIL no bus conflict"); end
    if (n_cond == 0)     begin failures++; $display("FAIL no conditional write"); end
    if (n_miss == 0)     begin failures++; $display("FAIL no cache miss"); end
    if (n_sleep == 0)    begin failures++; $display("FAIL no sleep"); end
    if (n_wake == 0)     begin failures++; $display("FAIL no wake"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
