// ppu_pkg: types and constants shared by the plasticity processing unit
// (PPU) vector unit, the synapse array access unit and the top level.
//
// Sizes that follow the paper: 128-bit vector slices holding sixteen 8-bit or
// eight 16-bit elements, 32 vector registers per slice, two slices and a
// 256-bit parallel bus to the synapse array, 32 rows x 64 columns of synapses,
// 6-bit weights and addresses, 4 calibration bits, 8-bit ADC results.
//
// The instruction word, the condition encoding and the access-unit address
// map are this design's own choices: the paper gives the operations (its
// Table II) but no encoding.
package ppu_pkg;

  localparam int unsigned VEC_W     = 128;  // bits per vector slice
  localparam int unsigned VEC_BYTES = VEC_W / 8;
  localparam int unsigned NVREG     = 32;   // vector registers per slice
  localparam int unsigned SYN_ROWS  = 32;
  localparam int unsigned SYN_COLS  = 64;
  localparam int unsigned W_BITS    = 6;    // weight / address SRAM width
  localparam int unsigned CAL_BITS  = 4;
  localparam int unsigned ADC_BITS  = 8;

  typedef logic [VEC_W-1:0]     vec_t;
  typedef logic [VEC_BYTES-1:0] vmask_t;    // one bit per byte lane

  // Vector operations (Table II of the paper, grouped by functional unit).
  typedef enum logic [5:0] {
    VOP_NOP    = 6'd0,
    VOP_ADD    = 6'd1,   // VALU  vt = va + vb
    VOP_SUB    = 6'd2,   // VALU  vt = va - vb
    VOP_MUL    = 6'd3,   // VALU  vt = va * vb, acc = result
    VOP_MAC    = 6'd4,   // VALU  vt = acc + va * vb, acc = result
    VOP_CMP    = 6'd5,   // CMP   vcr = compare(va, vb)
    VOP_SEL    = 6'd6,   // PERM  vt = cond ? va : vb (per lane)
    VOP_SHL    = 6'd7,   // PERM  vt = va << imm
    VOP_SHR    = 6'd8,   // PERM  vt = va >>> imm (arithmetic)
    VOP_SPLAT  = 6'd9,   // PERM  vt = broadcast of the scalar operand
    VOP_PACK   = 6'd10,  // PERM  16-bit fractional (va,vb) -> stored 6-bit
    VOP_UNPACK = 6'd11,  // PERM  stored 6-bit (va,vb) -> 16-bit fractional
    VOP_LD     = 6'd12,  // LS    vt = mem[operand] (serial, 32-bit words)
    VOP_ST     = 6'd13,  // LS    mem[operand] = vt
    VOP_PLD    = 6'd14,  // PLS   vt = synapse bus [operand]
    VOP_PST    = 6'd15   // PLS   synapse bus [operand] = vt
  } vop_e;

  // Lane condition for conditional execution and select.
  typedef enum logic [1:0] {
    COND_ALWAYS = 2'd0,
    COND_EQ     = 2'd1,
    COND_LT     = 2'd2,
    COND_GT     = 2'd3
  } cond_e;

  typedef struct packed {
    vop_e        op;
    logic [4:0]  vt;     // destination (or store source)
    logic [4:0]  va;
    logic [4:0]  vb;
    logic        half;   // 1: eight 16-bit elements, 0: sixteen 8-bit
    logic        frac;   // 1: saturating fractional, 0: modular integer
    cond_e       cond;
    logic [6:0]  imm;    // shift amount / pack-unpack half select
  } vinstr_t;            // 32 bits

  // One queue entry: instruction plus the 32-bit general-purpose operand.
  typedef struct packed {
    vinstr_t     instr;
    logic [31:0] operand;
  } vq_entry_t;

  typedef enum logic [2:0] {
    FU_VALU = 3'd0,
    FU_LS   = 3'd1,
    FU_CMP  = 3'd2,
    FU_PERM = 3'd3,
    FU_PLS  = 3'd4
  } fu_e;
  localparam int unsigned NFU = 5;

  // Vector condition register flags per byte lane.
  typedef struct packed {
    vmask_t eq;
    vmask_t lt;
    vmask_t gt;
  } vcr_t;

  // Synapse array access unit address map (bus address, 32 bit).
  typedef enum logic [2:0] {
    TGT_WEIGHT   = 3'd0,  // 6-bit weight SRAM
    TGT_ADDR     = 3'd1,  // 6-bit pre-synaptic address SRAM
    TGT_CALIB    = 3'd2,  // 4-bit calibration SRAM
    TGT_ADC_C    = 3'd3,  // ADC result, causal trace (read only)
    TGT_ADC_A    = 3'd4,  // ADC result, anti-causal trace (read only)
    TGT_RST_C    = 3'd5,  // causal correlation reset (write only)
    TGT_RST_A    = 3'd6,  // anti-causal correlation reset (write only)
    TGT_ROWCFG   = 3'd7   // row input select A/B (bit 0 of byte 0)
  } tgt_e;

  // bus address fields: [18:16] target, [12:10] 32-bit word (external bus
  // only), [6] column half, [4:0] row
  function automatic tgt_e addr_tgt(input logic [31:0] a);
    return tgt_e'(a[18:16]);
  endfunction
  function automatic logic [4:0] addr_row(input logic [31:0] a);
    return a[4:0];
  endfunction
  function automatic logic addr_half(input logic [31:0] a);
    return a[6];
  endfunction
  function automatic logic [2:0] addr_word(input logic [31:0] a);
    return a[12:10];
  endfunction

  function automatic logic [31:0] mk_addr(input tgt_e t, input logic [4:0] row,
                                          input logic half, input logic [2:0] word);
    logic [31:0] a;
    a = '0;
    a[18:16] = t;
    a[12:10] = word;
    a[6]     = half;
    a[4:0]   = row;
    return a;
  endfunction

  // byte-lane mask of a condition, from the vector condition register
  function automatic vmask_t cond_mask(input vcr_t v, input cond_e c);
    unique case (c)
      COND_EQ: return v.eq;
      COND_LT: return v.lt;
      COND_GT: return v.gt;
      default: return '1;
    endcase
  endfunction

endpackage
