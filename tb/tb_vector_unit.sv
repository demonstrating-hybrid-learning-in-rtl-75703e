// tb_vector_unit: the vector unit between a main-memory model (random grant,
// data one cycle after the grant) and a parallel-bus model (random ready,
// responses after a random delay, in order, with the request's tag).
// Random vectors are loaded over the bus (PLD), combined with add, sub,
// compare and conditional writes, stored back over the bus (PST) and to
// memory (VST), reloaded from memory (VLD) and stored again. Every stored
// word is compared with a model of the program in the testbench.
module tb_vector_unit;
  import ppu_pkg::*;
  localparam int W = 2 * VEC_W;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic iq_valid, iq_ready, idle, hazard_stall; vq_entry_t iq_data;
  logic mem_req, mem_we, mem_gnt, mem_rvalid; logic [31:0] mem_addr, mem_wdata, mem_rdata; logic [3:0] mem_be;
  logic syn_req_valid, syn_req_ready, syn_req_we, syn_rsp_valid, syn_rsp_ready;
  logic [31:0] syn_req_addr; logic [W-1:0] syn_req_wdata, syn_rsp_rdata; logic [W/8-1:0] syn_req_wmask;
  logic [4:0] syn_req_tag, syn_rsp_tag;

  vector_unit dut (.clk, .rst_n, .iq_valid, .iq_ready, .iq_data, .mem_req, .mem_we, .mem_addr,
    .mem_wdata, .mem_be, .mem_gnt, .mem_rvalid, .mem_rdata, .syn_req_valid, .syn_req_ready,
    .syn_req_we, .syn_req_addr, .syn_req_wdata, .syn_req_wmask, .syn_req_tag, .syn_rsp_valid,
    .syn_rsp_ready, .syn_rsp_rdata, .syn_rsp_tag, .idle, .hazard_stall);

  // main memory model
  logic [31:0] mem [1024];
  logic gnt_en;
  assign mem_gnt = mem_req && gnt_en;
  always_ff @(posedge clk) begin
    gnt_en     <= 1'($urandom);
    mem_rvalid <= mem_gnt && !mem_we;
    if (mem_gnt && !mem_we) mem_rdata <= mem[mem_addr[11:2]];
    if (mem_gnt && mem_we)
      for (int b = 0; b < 4; b++) if (mem_be[b]) mem[mem_addr[11:2]][b*8 +: 8] <= mem_wdata[b*8 +: 8];
  end

  // parallel bus model: 8 words of 256 bit at bus addresses 0..7
  logic [W-1:0] bus [8];
  logic [W-1:0] rq_data [$]; logic [4:0] rq_tag [$];
  logic rdy_en; int rsp_delay;
  assign syn_req_ready = rdy_en;
  always_ff @(posedge clk) begin
    rdy_en <= 1'($urandom);
    if (syn_req_valid && syn_req_ready) begin
      if (syn_req_we) begin
        for (int b = 0; b < W / 8; b++)
          if (syn_req_wmask[b]) bus[syn_req_addr[2:0]][b*8 +: 8] <= syn_req_wdata[b*8 +: 8];
      end else begin
        rq_data.push_back(bus[syn_req_addr[2:0]]); rq_tag.push_back(syn_req_tag);
      end
    end
    if (syn_rsp_valid && syn_rsp_ready) begin void'(rq_data.pop_front()); void'(rq_tag.pop_front()); rsp_delay <= 3; end
    else if (rsp_delay > 0) rsp_delay <= rsp_delay - 1;
  end
  assign syn_rsp_valid = rq_data.size() > 0 && rsp_delay == 0;
  assign syn_rsp_rdata = rq_data.size() > 0 ? rq_data[0] : '0;
  assign syn_rsp_tag   = rq_data.size() > 0 ? rq_tag[0] : '0;

  int n_stall = 0;
  always @(posedge clk) if (hazard_stall) n_stall++;

  task automatic vpush(input vop_e op, input int vt, input int va, input int vb, input cond_e cond,
                       input logic [31:0] operand);
    vinstr_t in;
    in = '0; in.op = op; in.vt = 5'(vt); in.va = 5'(va); in.vb = 5'(vb); in.cond = cond;
    @(negedge clk); iq_valid = 1; iq_data.instr = in; iq_data.operand = operand;
    do @(posedge clk); while (!iq_ready);
    @(negedge clk); iq_valid = 0;
  endtask
  task automatic wait_idle();
    int n; n = 0;
    do begin @(negedge clk); n++; end while (!idle && n < 5000);
    repeat (4) @(negedge clk);
  endtask

  initial begin
    logic [W-1:0] x, y, e, d;
    iq_valid = 0; iq_data = '0; rsp_delay = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      x = {8{$urandom}}; y = {8{$urandom}};
      bus[0] = x; bus[1] = y;
      vpush(VOP_PLD, 1, 0, 0, COND_ALWAYS, 32'd0);
      vpush(VOP_PLD, 2, 0, 0, COND_ALWAYS, 32'd1);
      vpush(VOP_ADD, 3, 1, 2, COND_ALWAYS, 0);       // v3 = x + y
      vpush(VOP_CMP, 0, 1, 2, COND_ALWAYS, 0);       // flags of x vs y
      vpush(VOP_SUB, 3, 1, 2, COND_GT, 0);           // where x > y: v3 = x - y
      vpush(VOP_PST, 3, 0, 0, COND_ALWAYS, 32'd2);
      vpush(VOP_ST, 3, 0, 0, COND_ALWAYS, 32'h100);
      vpush(VOP_LD, 4, 0, 0, COND_ALWAYS, 32'h100);
      vpush(VOP_PST, 4, 0, 0, COND_ALWAYS, 32'd3);
      wait_idle();
      for (int b = 0; b < W / 8; b++) begin
        logic signed [7:0] xb, yb;
        xb = signed'(x[b*8 +: 8]); yb = signed'(y[b*8 +: 8]);
        e[b*8 +: 8] = (xb > yb) ? 8'(xb - yb) : 8'(xb + yb);
      end
      checks++; if (bus[2] != e) begin failures++; $display("FAIL pst %h exp %h", bus[2], e); end
      checks++; if (bus[3] != e) begin failures++; $display("FAIL vld/vst round trip"); end
      for (int k = 0; k < 8; k++) d[k*32 +: 32] = mem[64 + k];
      checks++; if (d != e) begin failures++; $display("FAIL memory copy"); end
    end
    checks++; if (n_stall == 0) begin failures++; $display("FAIL no hazard stall"); end
    $display("hazard stalls %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
