// dls_prototype_top: the plasticity subsystem of the prototype chip.
//
// The chip couples an analog synapse array (32 rows x 64 columns, each
// synapse with a weight DAC and an STDP correlation sensor) with a small
// embedded processor, the plasticity processing unit (PPU), that computes
// weight updates in software. Per update step the PPU reads a row's
// correlation traces through the 128-channel ADC and its weights from the
// synapse SRAM over a 256-bit parallel bus, computes new weights with its
// SIMD vector unit (two 128-bit slices = 32 synapses per step in 8-bit
// mode) and writes them back; it then clears the row's correlation stores.
//
// What is here: the vector unit with its instruction queue and slices, the
// 16 KiB main memory, the 4 KiB instruction cache, the PPU clock gate, the
// synapse array access unit (with the external 32-bit bus), the digital
// synapse array and the ADC control, plus behavioural models of the analog
// parts (correlation sensors, DACs, ADC ramp and comparators).
// What is not: the general-purpose Power ISA core of the PPU, whose ports
// (vector instruction queue, data memory port, instruction fetch, wait and
// interrupt) are top-level ports; the neurons (post-synaptic spikes come in,
// dendritic currents go out); the SerDes link (its event inputs and the
// external bus are ports). The analog bias inputs (time constant, storage
// gain, g_max) are real-valued ports.
//
// Clocks: one clock clk. The PPU (vector unit, cache, main memory) runs on
// the gated clock from ppu_clock_gate; the access unit, array and ADC run on
// clk so the external bus works while the PPU sleeps.
module dls_prototype_top
  import ppu_pkg::*;
#(
  parameter int unsigned ROWS        = 32,
  parameter int unsigned COLS        = 64,
  parameter int unsigned NSLICES     = 2,
  parameter int unsigned CONV_CYCLES = 280,
  parameter int unsigned QDEPTH      = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // general-purpose core side: vector instruction queue
  input  logic                      vq_valid,
  output logic                      vq_ready,
  input  vq_entry_t                 vq_data,
  output logic                      vector_idle,
  // general-purpose core side: data port to main memory
  input  logic                      core_mem_req,
  input  logic                      core_mem_we,
  input  logic [31:0]               core_mem_addr,
  input  logic [31:0]               core_mem_wdata,
  input  logic [3:0]                core_mem_be,
  output logic                      core_mem_gnt,
  output logic                      core_mem_rvalid,
  output logic [31:0]               core_mem_rdata,
  // general-purpose core side: instruction fetch
  input  logic                      fetch_req,
  input  logic [31:0]               fetch_addr,
  output logic                      fetch_valid,
  output logic [31:0]               fetch_instr,
  input  logic                      icache_flush,
  // sleep / wake-up
  input  logic                      wait_exec,
  input  logic                      irq,
  output logic                      ppu_sleeping,
  // external 32-bit bus to the access unit
  input  logic                      ext_req_valid,
  output logic                      ext_req_ready,
  input  logic                      ext_req_we,
  input  logic [31:0]               ext_req_addr,
  input  logic [31:0]               ext_req_wdata,
  output logic                      ext_rsp_valid,
  input  logic                      ext_rsp_ready,
  output logic [31:0]               ext_rsp_rdata,
  // pre-synaptic events (row address + enable) and post-synaptic spikes
  input  logic [ROWS-1:0][5:0]      pre_addr,
  input  logic [ROWS-1:0]           pre_en,
  input  logic [COLS-1:0]           post,
  // analog controls and outputs (behavioural)
  input  real                       tau_us,
  input  real                       eta_v,
  input  real                       gmax_scale,
  output real                       i_a_na [COLS],
  output real                       i_b_na [COLS]
);
  localparam int unsigned RW = $clog2(ROWS);

  // ------------------------------------------------------------ PPU clock
  logic gclk;
  ppu_clock_gate u_cg (
    .clk, .rst_n, .wait_exec, .irq, .sleeping(ppu_sleeping), .gclk
  );

  // ---------------------------------------------------------- vector unit
  logic        vu_mem_req, vu_mem_we, vu_mem_gnt, vu_mem_rvalid;
  logic [31:0] vu_mem_addr, vu_mem_wdata;
  logic [3:0]  vu_mem_be;
  logic [31:0] mem_rdata;

  logic                         syn_req_valid, syn_req_ready, syn_req_we;
  logic [31:0]                  syn_req_addr;
  logic [NSLICES*VEC_W-1:0]     syn_req_wdata, syn_rsp_rdata;
  logic [NSLICES*VEC_BYTES-1:0] syn_req_wmask;
  logic [4:0]                   syn_req_tag, syn_rsp_tag;
  logic                         syn_rsp_valid, syn_rsp_ready;
  logic                         hazard_stall;

  vector_unit #(.NSLICES(NSLICES), .QDEPTH(QDEPTH)) u_vu (
    .clk(gclk), .rst_n,
    .iq_valid(vq_valid), .iq_ready(vq_ready), .iq_data(vq_data),
    .mem_req(vu_mem_req), .mem_we(vu_mem_we), .mem_addr(vu_mem_addr),
    .mem_wdata(vu_mem_wdata), .mem_be(vu_mem_be), .mem_gnt(vu_mem_gnt),
    .mem_rvalid(vu_mem_rvalid), .mem_rdata,
    .syn_req_valid, .syn_req_ready, .syn_req_we, .syn_req_addr, .syn_req_wdata,
    .syn_req_wmask, .syn_req_tag, .syn_rsp_valid, .syn_rsp_ready, .syn_rsp_rdata,
    .syn_rsp_tag, .idle(vector_idle), .hazard_stall
  );

  // --------------------------------------------- instruction cache, memory
  logic        ic_mem_req, ic_mem_gnt, ic_mem_rvalid, ic_miss;
  logic [31:0] ic_mem_addr;

  icache u_ic (
    .clk(gclk), .rst_n, .flush(icache_flush),
    .fetch_req, .fetch_addr, .fetch_valid, .fetch_instr,
    .mem_req(ic_mem_req), .mem_addr(ic_mem_addr), .mem_gnt(ic_mem_gnt),
    .mem_rvalid(ic_mem_rvalid), .mem_rdata, .miss(ic_miss)
  );

  logic [2:0] m_gnt, m_rvalid;
  main_memory #(.NPORT(3)) u_mem (
    .clk(gclk), .rst_n,
    .req  ({vu_mem_req,   core_mem_req,   ic_mem_req}),
    .we   ({vu_mem_we,    core_mem_we,    1'b0}),
    .addr ({vu_mem_addr,  core_mem_addr,  ic_mem_addr}),
    .wdata({vu_mem_wdata, core_mem_wdata, 32'h0}),
    .be   ({vu_mem_be,    core_mem_be,    4'h0}),
    .gnt(m_gnt), .rvalid(m_rvalid), .rdata(mem_rdata)
  );
  assign {vu_mem_gnt, core_mem_gnt, ic_mem_gnt}          = m_gnt;
  assign {vu_mem_rvalid, core_mem_rvalid, ic_mem_rvalid} = m_rvalid;
  assign core_mem_rdata = mem_rdata;

  // -------------------------------------------------------- access unit
  logic                     sa_rd_en, sa_wr_en, sa_half;
  tgt_e                     sa_field;
  logic [RW-1:0]            sa_row, adc_row;
  logic [COLS/2-1:0][7:0]   sa_wdata;
  logic [COLS/2-1:0]        sa_wmask;
  logic [COLS-1:0][7:0]     sa_rdata;
  logic                     adc_start, adc_busy, adc_done, adc_sample;
  logic [2*COLS-1:0][7:0]   adc_result;
  logic [ROWS-1:0]          crst_row_en;
  logic [COLS-1:0]          crst_col_c, crst_col_a;
  logic                     ev_buffer_hit, ev_overlap;

  synapse_access_unit #(.ROWS(ROWS), .COLS(COLS), .BUS_W(NSLICES*VEC_W)) u_sau (
    .clk, .rst_n,
    .ppu_req_valid(syn_req_valid), .ppu_req_ready(syn_req_ready),
    .ppu_req_we(syn_req_we), .ppu_req_addr(syn_req_addr),
    .ppu_req_wdata(syn_req_wdata), .ppu_req_wmask(syn_req_wmask),
    .ppu_req_tag(syn_req_tag), .ppu_rsp_valid(syn_rsp_valid),
    .ppu_rsp_ready(syn_rsp_ready), .ppu_rsp_rdata(syn_rsp_rdata),
    .ppu_rsp_tag(syn_rsp_tag),
    .ext_req_valid, .ext_req_ready, .ext_req_we, .ext_req_addr, .ext_req_wdata,
    .ext_rsp_valid, .ext_rsp_ready, .ext_rsp_rdata,
    .sa_rd_en, .sa_wr_en, .sa_field, .sa_row, .sa_half, .sa_wdata, .sa_wmask,
    .sa_rdata,
    .adc_start, .adc_row, .adc_busy, .adc_done, .adc_result,
    .crst_row_en, .crst_col_c, .crst_col_a, .ev_buffer_hit, .ev_overlap
  );

  // ------------------------------------------------------- synapse array
  logic [ROWS-1:0][COLS-1:0]      pre;
  logic [ROWS-1:0][COLS-1:0][5:0] weight;
  logic [ROWS-1:0][COLS-1:0][3:0] calib;
  logic [ROWS-1:0]                row_sel_b;

  synapse_array #(.ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk, .rst_n,
    .rd_en(sa_rd_en), .wr_en(sa_wr_en), .field(sa_field), .row(sa_row),
    .half(sa_half), .wdata(sa_wdata), .wmask(sa_wmask), .rdata(sa_rdata),
    .pre_addr, .pre_en, .pre, .weight, .calib, .row_sel_b
  );

  // ----------------------------------------------------------------- ADC
  logic [7:0]       ramp_code;
  logic             ramp_active;
  logic [2*COLS-1:0] cmp;
  real              vread [2*COLS];

  corr_adc #(.CHANNELS(2*COLS), .BITS(8), .CONV_CYCLES(CONV_CYCLES)) u_adc (
    .clk, .rst_n, .start(adc_start), .busy(adc_busy), .done(adc_done),
    .sample(adc_sample), .ramp_code, .ramp_active, .cmp, .result(adc_result)
  );

  adc_frontend_model #(.CHANNELS(2*COLS), .BITS(8)) u_afe (
    .ramp_code, .ramp_active, .vin(vread), .cmp
  );

  // ------------------------------------------------ analog array (model)
  analog_array_model #(.ROWS(ROWS), .COLS(COLS)) u_ana (
    .clk, .pre, .post, .weight, .calib, .row_sel_b, .tau_us, .eta_v, .gmax_scale,
    .crst_row_en, .crst_col_c, .crst_col_a,
    .read_en(adc_sample), .read_row(adc_row), .vread, .i_a_na, .i_b_na
  );
endmodule
