// vector_unit: the SIMD special-function unit of the plasticity processing
// unit (PPU), with its vector slices.
//
// The general-purpose core pushes vector instructions, each with an optional
// 32-bit operand from its register file, into the instruction queue and only
// stalls when the queue is full. The vector unit takes them in order,
// decodes them and hands each to the reservation station (RS) of one of five
// functional units: VALU (multiply-accumulate), LS (serial load/store to main
// memory), CMP (compare), PERM (permute) and PLS (parallel load/store to the
// synapse array access unit). Within one RS instructions issue in order;
// different units run concurrently, so e.g. a slow ADC read on PLS overlaps
// with arithmetic on VALU. All control is shared; NSLICES slices (2 in the
// prototype: 2 x 128 bit = the 256-bit synapse bus) execute each instruction
// in lock step, each with its own single-port 32 x 128-bit register file
// (VRF), accumulator and condition register.
//
// Because the VRF has a single port, every read and every write is one VRF
// cycle, requested by a unit's controller and granted by a fair arbiter (one
// grant per cycle). A typical two-operand instruction therefore takes three
// VRF cycles, as the paper notes. Read data arrive one cycle after the grant
// and are latched into the unit's operand registers.
//
// Own choices where the paper gives no detail: the instruction encoding (see
// ppu_pkg); hazards are resolved at dispatch by a scoreboard: an instruction
// waits in the queue while a source or its destination has a write pending,
// or while its destination still has a pending read (the same rules for the
// condition register); a unit releases its reads when it finishes. Parallel
// loads are tagged with their destination register and written back when the
// access unit answers, which may be out of order with other units.
// Conditional execution: VALU and PERM results, serial loads and stores and
// parallel stores write only the lanes whose condition flag is set; parallel
// loads always write all lanes.
//
// Interfaces: memory port (req held until gnt, read data one cycle after
// gnt with rvalid); synapse bus request (valid/ready) and response
// (valid/ready, tag = destination register).
module vector_unit
  import ppu_pkg::*;
#(
  parameter int unsigned NSLICES  = 2,
  parameter int unsigned QDEPTH   = 4,
  parameter int unsigned RS_DEPTH = 2
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // instruction queue from the general-purpose part
  input  logic                     iq_valid,
  output logic                     iq_ready,
  input  vq_entry_t                iq_data,
  // load/store shared part: main memory port
  output logic                     mem_req,
  output logic                     mem_we,
  output logic [31:0]              mem_addr,
  output logic [31:0]              mem_wdata,
  output logic [3:0]               mem_be,
  input  logic                     mem_gnt,
  input  logic                     mem_rvalid,
  input  logic [31:0]              mem_rdata,
  // parallel bus to the synapse array access unit
  output logic                     syn_req_valid,
  input  logic                     syn_req_ready,
  output logic                     syn_req_we,
  output logic [31:0]              syn_req_addr,
  output logic [NSLICES*VEC_W-1:0] syn_req_wdata,
  output logic [NSLICES*VEC_BYTES-1:0] syn_req_wmask,
  output logic [4:0]               syn_req_tag,
  input  logic                     syn_rsp_valid,
  output logic                     syn_rsp_ready,
  input  logic [NSLICES*VEC_W-1:0] syn_rsp_rdata,
  input  logic [4:0]               syn_rsp_tag,
  // status
  output logic                     idle,
  output logic                     hazard_stall
);
  localparam int unsigned NWORDS = NSLICES * VEC_W / 32;  // serial words per vector

  // ------------------------------------------------------------------ decode
  function automatic fu_e fu_of(input vop_e op);
    unique case (op)
      VOP_ADD, VOP_SUB, VOP_MUL, VOP_MAC:                 return FU_VALU;
      VOP_CMP:                                            return FU_CMP;
      VOP_SEL, VOP_SHL, VOP_SHR, VOP_SPLAT, VOP_PACK,
      VOP_UNPACK:                                         return FU_PERM;
      VOP_LD, VOP_ST:                                     return FU_LS;
      default:                                            return FU_PLS;
    endcase
  endfunction
  function automatic logic reads_a(input vop_e op);
    return op inside {VOP_ADD, VOP_SUB, VOP_MUL, VOP_MAC, VOP_CMP, VOP_SEL,
                      VOP_SHL, VOP_SHR, VOP_PACK, VOP_UNPACK};
  endfunction
  function automatic logic reads_b(input vop_e op);
    return op inside {VOP_ADD, VOP_SUB, VOP_MUL, VOP_MAC, VOP_CMP, VOP_SEL,
                      VOP_PACK, VOP_UNPACK};
  endfunction
  function automatic logic reads_t(input vop_e op);
    return op inside {VOP_ST, VOP_PST};
  endfunction
  function automatic logic writes_t(input vop_e op);
    return op inside {VOP_ADD, VOP_SUB, VOP_MUL, VOP_MAC, VOP_SEL, VOP_SHL, VOP_SHR,
                      VOP_SPLAT, VOP_PACK, VOP_UNPACK, VOP_LD, VOP_PLD};
  endfunction
  function automatic logic reads_c(input vinstr_t i);
    return (i.op == VOP_SEL) ||
           ((i.cond != COND_ALWAYS) && !(i.op inside {VOP_NOP, VOP_CMP, VOP_PLD}));
  endfunction

  // ---------------------------------------------------------- queue, dispatch
  vq_entry_t q_head;
  logic      q_valid, q_pop;

  instr_queue #(.DEPTH(QDEPTH)) u_queue (
    .clk, .rst_n,
    .push_valid(iq_valid), .push_ready(iq_ready), .push_data(iq_data),
    .pop_valid(q_valid), .pop_ready(q_pop), .pop_data(q_head)
  );

  logic [NVREG-1:0] pend_w;
  logic [2:0]       pend_r [NVREG];
  logic             vcr_w;
  logic [2:0]       vcr_r;

  vinstr_t   hi;
  fu_e       hfu;
  logic      hazard;
  logic [NFU-1:0] rs_push, rs_in_ready, rs_valid, rs_pop;
  vq_entry_t rs_head [NFU];

  assign hi  = q_head.instr;
  assign hfu = fu_of(hi.op);

  always_comb begin
    hazard = 1'b0;
    if (reads_a(hi.op) && pend_w[hi.va]) hazard = 1'b1;
    if (reads_b(hi.op) && pend_w[hi.vb]) hazard = 1'b1;
    if (reads_t(hi.op) && pend_w[hi.vt]) hazard = 1'b1;
    if (writes_t(hi.op) && (pend_w[hi.vt] || pend_r[hi.vt] != 0)) hazard = 1'b1;
    if (reads_c(hi) && vcr_w) hazard = 1'b1;
    if (hi.op == VOP_CMP && (vcr_w || vcr_r != 0)) hazard = 1'b1;
  end

  wire dispatch = q_valid && hi.op != VOP_NOP && !hazard && rs_in_ready[hfu];
  assign q_pop        = dispatch || (q_valid && hi.op == VOP_NOP);
  assign hazard_stall = q_valid && hi.op != VOP_NOP && hazard;

  for (genvar f = 0; f < NFU; f++) begin : g_rs
    assign rs_push[f] = dispatch && (hfu == fu_e'(f));
    instr_queue #(.DEPTH(RS_DEPTH)) u_rs (
      .clk, .rst_n,
      .push_valid(rs_push[f]), .push_ready(rs_in_ready[f]), .push_data(q_head),
      .pop_valid(rs_valid[f]), .pop_ready(rs_pop[f]), .pop_data(rs_head[f])
    );
  end

  // ----------------------------------------------------------- controllers
  typedef enum logic [3:0] {
    S_IDLE, S_RDA, S_RDB, S_RDT, S_CAP, S_EXEC, S_WR, S_MEMRD, S_MEMWR, S_BUS, S_DONE
  } st_e;
  typedef enum logic [1:0] {OPD_A, OPD_B} opd_e;

  st_e       st  [NFU];
  vq_entry_t cur [NFU];
  logic [NFU-1:0] vreq, vwe, gnt;
  logic [4:0]     vaddr [NFU];
  logic [2:0]     gidx;
  logic           conflict;

  // per-slice state visible to the controllers
  vcr_t vcr [NSLICES];

  function automatic st_e first_read(input vinstr_t i);
    if (reads_a(i.op)) return S_RDA;
    if (reads_b(i.op)) return S_RDB;
    return S_EXEC;
  endfunction

  // VALU, CMP and PERM share one sequence: reads, capture, execute, write
  for (genvar f = 0; f < NFU; f++) begin : g_ctl
    if (f == FU_VALU || f == FU_CMP || f == FU_PERM) begin : g_compute
      assign rs_pop[f] = (st[f] == S_IDLE) && rs_valid[f];
      always_comb begin
        vreq[f]  = 1'b0;
        vwe[f]   = 1'b0;
        vaddr[f] = '0;
        unique case (st[f])
          S_RDA: begin vreq[f] = 1'b1; vaddr[f] = cur[f].instr.va; end
          S_RDB: begin vreq[f] = 1'b1; vaddr[f] = cur[f].instr.vb; end
          S_WR:  begin vreq[f] = 1'b1; vwe[f] = 1'b1; vaddr[f] = cur[f].instr.vt; end
          default: ;
        endcase
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          st[f] <= S_IDLE;
        end else begin
          unique case (st[f])
            S_IDLE: if (rs_valid[f]) begin
              cur[f] <= rs_head[f];
              st[f]  <= first_read(rs_head[f].instr);
            end
            S_RDA:  if (gnt[f]) st[f] <= reads_b(cur[f].instr.op) ? S_RDB : S_CAP;
            S_RDB:  if (gnt[f]) st[f] <= S_CAP;
            S_CAP:  st[f] <= S_EXEC;
            S_EXEC: st[f] <= writes_t(cur[f].instr.op) ? S_WR : S_DONE;
            S_WR:   if (gnt[f]) st[f] <= S_DONE;
            default: st[f] <= S_IDLE;
          endcase
        end
      end
    end
  end

  // LS: serial load/store of 32-bit words between main memory and the VRF
  logic [$clog2(NWORDS+1)-1:0] ls_issued, ls_recv;
  logic [NSLICES*VEC_W-1:0]    ls_buf;
  logic [NSLICES*VEC_W-1:0]    vrf_rdata_all;
  logic [NSLICES*VEC_BYTES-1:0] ls_mask;

  assign rs_pop[FU_LS] = (st[FU_LS] == S_IDLE) && rs_valid[FU_LS];
  always_comb begin
    for (int s = 0; s < NSLICES; s++)
      ls_mask[s*VEC_BYTES +: VEC_BYTES] = cond_mask(vcr[s], cur[FU_LS].instr.cond);
  end
  always_comb begin
    vreq[FU_LS]  = st[FU_LS] inside {S_RDT, S_WR};
    vwe[FU_LS]   = st[FU_LS] == S_WR;
    vaddr[FU_LS] = cur[FU_LS].instr.vt;
    mem_req      = st[FU_LS] inside {S_MEMRD, S_MEMWR} && ls_issued != ($clog2(NWORDS+1))'(NWORDS);
    mem_we       = st[FU_LS] == S_MEMWR;
    mem_addr     = cur[FU_LS].operand + 32'(ls_issued) * 32'd4;
    mem_wdata    = ls_buf[ls_issued[$clog2(NWORDS)-1:0]*32 +: 32];
    mem_be       = ls_mask[ls_issued[$clog2(NWORDS)-1:0]*4 +: 4];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[FU_LS] <= S_IDLE;
      ls_issued <= '0;
      ls_recv   <= '0;
    end else begin
      unique case (st[FU_LS])
        S_IDLE: if (rs_valid[FU_LS]) begin
          cur[FU_LS] <= rs_head[FU_LS];
          ls_issued  <= '0;
          ls_recv    <= '0;
          st[FU_LS]  <= (rs_head[FU_LS].instr.op == VOP_LD) ? S_MEMRD : S_RDT;
        end
        S_RDT: if (gnt[FU_LS]) st[FU_LS] <= S_CAP;
        S_CAP: st[FU_LS] <= S_MEMWR;
        S_MEMRD: begin
          if (mem_req && mem_gnt) ls_issued <= ls_issued + 1'b1;
          if (mem_rvalid) begin
            ls_buf[ls_recv[$clog2(NWORDS)-1:0]*32 +: 32] <= mem_rdata;
            ls_recv <= ls_recv + 1'b1;
            if (ls_recv == ($clog2(NWORDS+1))'(NWORDS - 1)) st[FU_LS] <= S_WR;
          end
        end
        S_MEMWR: if (mem_req && mem_gnt) begin
          ls_issued <= ls_issued + 1'b1;
          if (ls_issued == ($clog2(NWORDS+1))'(NWORDS - 1)) st[FU_LS] <= S_DONE;
        end
        S_WR: if (gnt[FU_LS]) st[FU_LS] <= S_DONE;
        default: st[FU_LS] <= S_IDLE;
      endcase
      if (st[FU_LS] == S_CAP) ls_buf <= vrf_rdata_all;
    end
  end

  // PLS: parallel load/store on the synapse bus; responses are written back
  // through the same VRF requester and take priority over store reads
  logic [NSLICES*VEC_W-1:0] pls_buf;

  assign rs_pop[FU_PLS] = (st[FU_PLS] == S_IDLE) && rs_valid[FU_PLS];
  always_comb begin
    vreq[FU_PLS]  = syn_rsp_valid || st[FU_PLS] == S_RDT;
    vwe[FU_PLS]   = syn_rsp_valid;
    vaddr[FU_PLS] = syn_rsp_valid ? syn_rsp_tag : cur[FU_PLS].instr.vt;
    syn_rsp_ready = syn_rsp_valid && gnt[FU_PLS];
    syn_req_valid = st[FU_PLS] == S_BUS;
    syn_req_we    = cur[FU_PLS].instr.op == VOP_PST;
    syn_req_addr  = cur[FU_PLS].operand;
    syn_req_tag   = cur[FU_PLS].instr.vt;
    syn_req_wdata = pls_buf;
    for (int s = 0; s < NSLICES; s++)
      syn_req_wmask[s*VEC_BYTES +: VEC_BYTES] = cond_mask(vcr[s], cur[FU_PLS].instr.cond);
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st[FU_PLS] <= S_IDLE;
    end else begin
      unique case (st[FU_PLS])
        S_IDLE: if (rs_valid[FU_PLS]) begin
          cur[FU_PLS] <= rs_head[FU_PLS];
          st[FU_PLS]  <= (rs_head[FU_PLS].instr.op == VOP_PST) ? S_RDT : S_BUS;
        end
        S_RDT: if (gnt[FU_PLS] && !syn_rsp_valid) st[FU_PLS] <= S_CAP;
        S_CAP: st[FU_PLS] <= S_BUS;
        S_BUS: if (syn_req_ready) st[FU_PLS] <= S_DONE;
        default: st[FU_PLS] <= S_IDLE;
      endcase
      if (st[FU_PLS] == S_CAP) pls_buf <= vrf_rdata_all;
    end
  end

  // ------------------------------------------------------ VRF arbitration
  fair_arbiter #(.N(NFU)) u_vrf_arb (
    .clk, .rst_n, .req(vreq), .gnt, .gnt_idx(gidx), .conflict
  );

  logic             rd_pending;   // read granted last cycle
  logic [2:0]       rd_fu;
  opd_e             rd_opd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_pending <= 1'b0;
      rd_fu      <= '0;
      rd_opd     <= OPD_A;
    end else begin
      rd_pending <= (vreq != '0) && !vwe[gidx];
      rd_fu      <= gidx;
      rd_opd     <= (st[gidx] == S_RDB) ? OPD_B : OPD_A;
    end
  end

  // --------------------------------------------------------------- slices
  for (genvar s = 0; s < NSLICES; s++) begin : g_slice
    vec_t   rdata, wdata, valu_a, valu_b, cmp_a, cmp_b, perm_a, perm_b;
    vec_t   valu_y, valu_acc, perm_y;
    vmask_t wmask;
    vinstr_t wi;

    assign wi = cur[gidx].instr;
    always_comb begin
      unique case (fu_e'(gidx))
        FU_VALU: wdata = valu_y;
        FU_PERM: wdata = perm_y;
        FU_LS:   wdata = ls_buf[s*VEC_W +: VEC_W];
        default: wdata = syn_rsp_rdata[s*VEC_W +: VEC_W];
      endcase
      if (fu_e'(gidx) == FU_PLS || wi.op == VOP_SEL) wmask = '1;
      else                                          wmask = cond_mask(vcr[s], wi.cond);
    end

    vector_regfile #(.NREGS(NVREG), .WIDTH(VEC_W)) u_vrf (
      .clk, .en(vreq != '0), .we(vwe[gidx]), .addr(vaddr[gidx]),
      .wdata, .wmask, .rdata
    );
    assign vrf_rdata_all[s*VEC_W +: VEC_W] = rdata;

    always_ff @(posedge clk) begin
      if (rd_pending) begin
        unique case (fu_e'(rd_fu))
          FU_VALU: if (rd_opd == OPD_A) valu_a <= rdata; else valu_b <= rdata;
          FU_CMP:  if (rd_opd == OPD_A) cmp_a  <= rdata; else cmp_b  <= rdata;
          FU_PERM: if (rd_opd == OPD_A) perm_a <= rdata; else perm_b <= rdata;
          default: ;
        endcase
      end
    end

    vector_alu u_valu (
      .clk, .rst_n, .exec(st[FU_VALU] == S_EXEC), .op(cur[FU_VALU].instr.op),
      .half(cur[FU_VALU].instr.half), .frac(cur[FU_VALU].instr.frac),
      .a(valu_a), .b(valu_b), .y(valu_y), .acc(valu_acc)
    );
    vector_compare u_cmp (
      .clk, .rst_n, .exec(st[FU_CMP] == S_EXEC), .half(cur[FU_CMP].instr.half),
      .a(cmp_a), .b(cmp_b), .vcr(vcr[s])
    );
    vector_permute u_perm (
      .clk, .rst_n, .exec(st[FU_PERM] == S_EXEC), .op(cur[FU_PERM].instr.op),
      .half(cur[FU_PERM].instr.half), .imm(cur[FU_PERM].instr.imm),
      .operand(cur[FU_PERM].operand),
      .mask(cond_mask(vcr[s], cur[FU_PERM].instr.cond)),
      .a(perm_a), .b(perm_b), .y(perm_y)
    );
  end

  // ------------------------------------------------------------ scoreboard
  logic [NFU-1:0] done_fu;
  always_comb
    for (int f = 0; f < NFU; f++) done_fu[f] = (st[f] == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_w <= '0;
      vcr_w  <= 1'b0;
      vcr_r  <= '0;
      for (int r = 0; r < NVREG; r++) pend_r[r] <= '0;
    end else begin
      logic [2:0] dr [NVREG];
      logic [2:0] dc;
      logic [NVREG-1:0] w_set, w_clr;
      for (int r = 0; r < NVREG; r++) dr[r] = pend_r[r];
      dc    = vcr_r;
      w_set = '0;
      w_clr = '0;
      // releases
      for (int f = 0; f < NFU; f++) begin
        if (done_fu[f]) begin
          vinstr_t ci;
          ci = cur[f].instr;
          if (reads_a(ci.op)) dr[ci.va] = dr[ci.va] - 1'b1;
          if (reads_b(ci.op)) dr[ci.vb] = dr[ci.vb] - 1'b1;
          if (reads_t(ci.op)) dr[ci.vt] = dr[ci.vt] - 1'b1;
          if (reads_c(ci))    dc = dc - 1'b1;
          if (writes_t(ci.op) && ci.op != VOP_PLD) w_clr[ci.vt] = 1'b1;
        end
      end
      if (syn_rsp_valid && syn_rsp_ready) w_clr[syn_rsp_tag] = 1'b1;
      if (done_fu[FU_CMP]) vcr_w <= 1'b0;
      // dispatch
      if (dispatch) begin
        if (reads_a(hi.op)) dr[hi.va] = dr[hi.va] + 1'b1;
        if (reads_b(hi.op)) dr[hi.vb] = dr[hi.vb] + 1'b1;
        if (reads_t(hi.op)) dr[hi.vt] = dr[hi.vt] + 1'b1;
        if (reads_c(hi))    dc = dc + 1'b1;
        if (writes_t(hi.op)) w_set[hi.vt] = 1'b1;
        if (hi.op == VOP_CMP) vcr_w <= 1'b1;
      end
      pend_w <= (pend_w & ~w_clr) | w_set;
      for (int r = 0; r < NVREG; r++) pend_r[r] <= dr[r];
      vcr_r <= dc;
    end
  end

  always_comb begin
    idle = !q_valid && (rs_valid == '0) && (pend_w == '0) && !vcr_w;
    for (int f = 0; f < NFU; f++) if (st[f] != S_IDLE) idle = 1'b0;
  end

  // a register is never read and written by the VRF port in the same cycle
  a_vrf_single: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
  a_rsp_tag:    assert property (@(posedge clk) disable iff (!rst_n)
                                 syn_rsp_valid |-> pend_w[syn_rsp_tag]);
endmodule
