// synapse_access_unit: the IO unit between the PPU's parallel bus and the
// analog core, also serving the 32-bit external bus.
//
// A load or store on the 256-bit parallel bus is translated by its address
// (map in ppu_pkg) into a transaction on one of three engines:
//   * SRAM engine: weight, address and calibration memories of the synapses
//     and the per-row A/B input select. A read fetches a whole row of 64
//     synapses; the 256-bit word returned is one half row (32 synapses).
//   * ADC engine: causal and anti-causal correlation traces of a row, read
//     through the 128-channel ADC (readout enable of the row for the whole
//     conversion). Slow: one conversion takes CONV_CYCLES of corr_adc.
//   * reset engine: a store sets the causal or anti-causal column reset
//     pattern for a half row (a non-zero byte resets that column; all other
//     columns, of both kinds, are left out of the pattern); in the
//     next cycle the row's correlation reset enable is pulsed, so the pattern
//     is in place before the enable, as the paper requires.
// The engines work independently, so an SRAM access proceeds while a
// conversion is running ("multiple transactions in progress"). Each engine
// keeps the row it read last: a read of the same row (e.g. the second half)
// is answered from that buffer without touching the array. A write to the
// buffered SRAM row updates it; a correlation reset of the buffered ADC row
// drops the ADC buffer.
//
// The PPU and the external bus are arbitrated by fair_arbiter with N = 2:
// on a conflict the favoured side wins and the favour flips, the scheme
// described in the paper. External accesses address one 32-bit word of the
// 256-bit bus word (address bits 12..10). Reads answer with valid/ready and
// the request's tag; writes complete when accepted. Engine latencies and the
// address map are own choices.
module synapse_access_unit
  import ppu_pkg::*;
#(
  parameter int unsigned ROWS  = 32,
  parameter int unsigned COLS  = 64,
  parameter int unsigned BUS_W = 256
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // PPU parallel bus
  input  logic                    ppu_req_valid,
  output logic                    ppu_req_ready,
  input  logic                    ppu_req_we,
  input  logic [31:0]             ppu_req_addr,
  input  logic [BUS_W-1:0]        ppu_req_wdata,
  input  logic [BUS_W/8-1:0]      ppu_req_wmask,
  input  logic [4:0]              ppu_req_tag,
  output logic                    ppu_rsp_valid,
  input  logic                    ppu_rsp_ready,
  output logic [BUS_W-1:0]        ppu_rsp_rdata,
  output logic [4:0]              ppu_rsp_tag,
  // external 32-bit bus
  input  logic                    ext_req_valid,
  output logic                    ext_req_ready,
  input  logic                    ext_req_we,
  input  logic [31:0]             ext_req_addr,
  input  logic [31:0]             ext_req_wdata,
  output logic                    ext_rsp_valid,
  input  logic                    ext_rsp_ready,
  output logic [31:0]             ext_rsp_rdata,
  // synapse array access port
  output logic                    sa_rd_en,
  output logic                    sa_wr_en,
  output tgt_e                    sa_field,
  output logic [$clog2(ROWS)-1:0] sa_row,
  output logic                    sa_half,
  output logic [COLS/2-1:0][7:0]  sa_wdata,
  output logic [COLS/2-1:0]       sa_wmask,
  input  logic [COLS-1:0][7:0]    sa_rdata,
  // correlation ADC
  output logic                    adc_start,
  output logic [$clog2(ROWS)-1:0] adc_row,
  input  logic                    adc_busy,
  input  logic                    adc_done,
  input  logic [2*COLS-1:0][7:0]  adc_result,
  // correlation reset
  output logic [ROWS-1:0]         crst_row_en,
  output logic [COLS-1:0]         crst_col_c,
  output logic [COLS-1:0]         crst_col_a,
  // activity (for observation)
  output logic                    ev_buffer_hit,
  output logic                    ev_overlap
);
  localparam int unsigned RW = $clog2(ROWS);
  localparam int unsigned HB = BUS_W / 8;      // bytes per bus word = COLS/2

  typedef enum logic [1:0] {ENG_SRAM, ENG_ADC, ENG_RST} eng_e;

  function automatic eng_e eng_of(input logic [31:0] a);
    unique case (addr_tgt(a))
      TGT_ADC_C, TGT_ADC_A: return ENG_ADC;
      TGT_RST_C, TGT_RST_A: return ENG_RST;
      default:              return ENG_SRAM;
    endcase
  endfunction

  // ----------------------------------------------------------- requests
  typedef struct packed {
    logic              ext;
    logic              we;
    logic [31:0]       addr;
    logic [BUS_W-1:0]  wdata;
    logic [HB-1:0]     wmask;
    logic [4:0]        tag;
  } req_t;

  req_t  rq_ppu, rq_ext, rq;
  logic  sr_rsp_taken, ad_rsp_taken;
  logic  ad_buf_valid_q;
  logic  sram_free, adc_free, rst_free;
  logic  can_ppu, can_ext, accept;
  logic [1:0] arb_gnt;
  logic       arb_idx, arb_conflict;

  always_comb begin
    rq_ppu = '{ext: 1'b0, we: ppu_req_we, addr: ppu_req_addr, wdata: ppu_req_wdata,
               wmask: ppu_req_wmask, tag: ppu_req_tag};
    rq_ext = '{ext: 1'b1, we: ext_req_we, addr: ext_req_addr, wdata: '0, wmask: '0, tag: '0};
    rq_ext.wdata[addr_word(ext_req_addr)*32 +: 32] = ext_req_wdata;
    rq_ext.wmask[addr_word(ext_req_addr)*4 +: 4]   = 4'hf;
  end

  function automatic logic free_for(input logic [31:0] a, input logic s, input logic d,
                                    input logic r);
    eng_e e;
    e = eng_of(a);
    unique case (e)
      ENG_SRAM: return s;
      ENG_ADC:  return d;
      default:  return r;
    endcase
  endfunction

  assign can_ppu = ppu_req_valid && free_for(ppu_req_addr, sram_free, adc_free, rst_free);
  assign can_ext = ext_req_valid && free_for(ext_req_addr, sram_free, adc_free, rst_free);

  fair_arbiter #(.N(2)) u_arb (
    .clk, .rst_n, .req({can_ext, can_ppu}), .gnt(arb_gnt), .gnt_idx(arb_idx),
    .conflict(arb_conflict)
  );

  assign ppu_req_ready = arb_gnt[0];
  assign ext_req_ready = arb_gnt[1];
  assign accept        = arb_gnt != '0;
  assign rq            = arb_idx ? rq_ext : rq_ppu;

  wire eng_sram = accept && eng_of(rq.addr) == ENG_SRAM;
  wire eng_adc  = accept && eng_of(rq.addr) == ENG_ADC;
  wire eng_rst  = accept && eng_of(rq.addr) == ENG_RST;

  // ----------------------------------------------------------- SRAM engine
  typedef enum logic [1:0] {SR_IDLE, SR_READ, SR_RESP} sr_e;
  sr_e                 sr_st;
  req_t                sr_rq;
  logic                sr_buf_valid;
  logic [RW-1:0]       sr_buf_row;
  tgt_e                sr_buf_tgt;
  logic [COLS-1:0][7:0] sr_buf;

  assign sram_free = (sr_st == SR_IDLE);
  wire sr_hit = sr_buf_valid && sr_buf_row == addr_row(rq.addr)[RW-1:0] &&
                sr_buf_tgt == addr_tgt(rq.addr);

  always_comb begin
    sa_rd_en = eng_sram && !rq.we && !sr_hit;
    sa_wr_en = eng_sram && rq.we;
    sa_field = addr_tgt(rq.addr);
    sa_row   = addr_row(rq.addr)[RW-1:0];
    sa_half  = addr_half(rq.addr);
    sa_wdata = rq.wdata;
    sa_wmask = rq.wmask;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_st        <= SR_IDLE;
      sr_buf_valid <= 1'b0;
    end else begin
      unique case (sr_st)
        SR_IDLE: if (eng_sram) begin
          sr_rq <= rq;
          if (rq.we) begin
            if (sr_hit)
              for (int b = 0; b < HB; b++)
                if (rq.wmask[b]) sr_buf[(addr_half(rq.addr) ? HB : 0) + b] <= rq.wdata[b*8 +: 8];
          end else begin
            sr_st <= sr_hit ? SR_RESP : SR_READ;
          end
        end
        SR_READ: begin
          sr_buf       <= sa_rdata;
          sr_buf_valid <= 1'b1;
          sr_buf_row   <= addr_row(sr_rq.addr)[RW-1:0];
          sr_buf_tgt   <= addr_tgt(sr_rq.addr);
          sr_st        <= SR_RESP;
        end
        SR_RESP: if (sr_rsp_taken) sr_st <= SR_IDLE;
        default: sr_st <= SR_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ ADC engine
  typedef enum logic [1:0] {AD_IDLE, AD_START, AD_CONV, AD_RESP} ad_e;
  ad_e                    ad_st;
  req_t                   ad_rq;
  logic                   ad_buf_valid;
  logic [RW-1:0]          ad_buf_row;
  logic [2*COLS-1:0][7:0] ad_buf;
  logic                   rst_hits_adc;

  assign adc_free = (ad_st == AD_IDLE);
  wire ad_hit = ad_buf_valid && ad_buf_row == addr_row(rq.addr)[RW-1:0];

  assign adc_start = (ad_st == AD_START) && !adc_busy;
  assign adc_row   = addr_row(ad_rq.addr)[RW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ad_st        <= AD_IDLE;
      ad_buf_valid <= 1'b0;
    end else begin
      unique case (ad_st)
        AD_IDLE: if (eng_adc) begin
          ad_rq <= rq;
          // stores to the ADC are ignored
          if (!rq.we) ad_st <= ad_hit ? AD_RESP : AD_START;
        end
        AD_START: if (!adc_busy) ad_st <= AD_CONV;
        AD_CONV: if (adc_done) begin
          ad_st <= AD_RESP;
        end
        AD_RESP: if (ad_rsp_taken) ad_st <= AD_IDLE;
        default: ad_st <= AD_IDLE;
      endcase
      // results become valid the cycle after done
      if (ad_st == AD_RESP && !ad_buf_valid_q) begin
        ad_buf       <= adc_result;
        ad_buf_valid <= 1'b1;
        ad_buf_row   <= addr_row(ad_rq.addr)[RW-1:0];
      end
      if (rst_hits_adc) ad_buf_valid <= 1'b0;
    end
  end

  // ad_buf_valid_q: the buffer already holds this request's row
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)                              ad_buf_valid_q <= 1'b0;
    else if (ad_st == AD_IDLE && eng_adc)    ad_buf_valid_q <= ad_hit;
    else if (ad_st == AD_RESP)               ad_buf_valid_q <= 1'b1;

  // ---------------------------------------------------------- reset engine
  logic          rs_pulse;
  logic [RW-1:0] rs_row;

  assign rst_free = !rs_pulse;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs_pulse   <= 1'b0;
      rs_row     <= '0;
      crst_col_c <= '0;
      crst_col_a <= '0;
    end else begin
      rs_pulse <= 1'b0;
      if (eng_rst && rq.we) begin
        rs_row   <= addr_row(rq.addr)[RW-1:0];
        rs_pulse <= 1'b1;
        // the pattern holds only this store's columns; all others are cleared
        crst_col_c <= '0;
        crst_col_a <= '0;
        for (int b = 0; b < HB; b++) begin
          int c;
          c = (addr_half(rq.addr) ? HB : 0) + b;
          if (addr_tgt(rq.addr) == TGT_RST_C) crst_col_c[c] <= rq.wmask[b] && rq.wdata[b*8 +: 8] != 0;
          else                                crst_col_a[c] <= rq.wmask[b] && rq.wdata[b*8 +: 8] != 0;
        end
      end
    end
  end
  always_comb begin
    crst_row_en = '0;
    if (rs_pulse) crst_row_en[rs_row] = 1'b1;
  end
  assign rst_hits_adc = rs_pulse && ad_buf_valid && ad_buf_row == rs_row;

  // ------------------------------------------------------------ responses
  logic [BUS_W-1:0] sr_word, ad_word;
  logic sr_rdy, ad_rdy;

  always_comb begin
    sr_word = sr_buf[(addr_half(sr_rq.addr) ? HB : 0) +: HB];
    ad_word = ad_buf[((addr_tgt(ad_rq.addr) == TGT_ADC_A) ? COLS : 0) +
                     (addr_half(ad_rq.addr) ? HB : 0) +: HB];
    sr_rdy  = (sr_st == SR_RESP);
    ad_rdy  = (ad_st == AD_RESP) && ad_buf_valid_q;
    // PPU channel: SRAM engine first
    ppu_rsp_valid = (sr_rdy && !sr_rq.ext) || (ad_rdy && !ad_rq.ext);
    if (sr_rdy && !sr_rq.ext) begin
      ppu_rsp_rdata = sr_word;
      ppu_rsp_tag   = sr_rq.tag;
    end else begin
      ppu_rsp_rdata = ad_word;
      ppu_rsp_tag   = ad_rq.tag;
    end
    ext_rsp_valid = (sr_rdy && sr_rq.ext) || (ad_rdy && ad_rq.ext);
    if (sr_rdy && sr_rq.ext) ext_rsp_rdata = sr_word[addr_word(sr_rq.addr)*32 +: 32];
    else                     ext_rsp_rdata = ad_word[addr_word(ad_rq.addr)*32 +: 32];
    sr_rsp_taken = sr_rdy && (sr_rq.ext ? ext_rsp_ready : ppu_rsp_ready);
    ad_rsp_taken = ad_rdy && (ad_rq.ext ? ext_rsp_ready && !(sr_rdy && sr_rq.ext)
                                        : ppu_rsp_ready && !(sr_rdy && !sr_rq.ext));
  end

  assign ev_buffer_hit = (eng_sram && !rq.we && sr_hit) || (eng_adc && !rq.we && ad_hit);
  assign ev_overlap    = (ad_st == AD_CONV) && eng_sram;
endmodule
