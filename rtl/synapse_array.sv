// synapse_array: digital part of the 32 x 64 synapse array.
//
// Rows carry the pre-synaptic input: each row has a 6-bit address and an
// enable from the array's left edge, broadcast to all 64 synapses of the row;
// every synapse fires its local "pre" when the address matches its stored
// one. Columns correspond to the 64 neuron compartments. Each row is
// statically switched to the neuron's input A (excitatory) or B
// (inhibitory); that switch is a per-row configuration bit here.
//
// The access port is used by the synapse array access unit. Reads return a
// whole row (one byte per synapse, value in the low bits) one cycle after
// rd_en; writes go to one half row of 32 synapses (half = 0: columns 0..31)
// with a byte mask, as one 256-bit bus word covers 32 synapses. The field
// selects weight, address or calibration memory (or the row A/B bit).
// The half-row write port and the field encoding are own choices.
module synapse_array
  import ppu_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 64
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // access port
  input  logic                     rd_en,
  input  logic                     wr_en,
  input  tgt_e                     field,
  input  logic [$clog2(ROWS)-1:0]  row,
  input  logic                     half,
  input  logic [COLS/2-1:0][7:0]   wdata,
  input  logic [COLS/2-1:0]        wmask,
  output logic [COLS-1:0][7:0]     rdata,
  // pre-synaptic event input, one address/enable pair per row
  input  logic [ROWS-1:0][5:0]     pre_addr,
  input  logic [ROWS-1:0]          pre_en,
  // to the analog part
  output logic [ROWS-1:0][COLS-1:0]       pre,
  output logic [ROWS-1:0][COLS-1:0][5:0]  weight,
  output logic [ROWS-1:0][COLS-1:0][3:0]  calib,
  output logic [ROWS-1:0]                 row_sel_b
);
  logic [ROWS-1:0][COLS-1:0][5:0] addr_q;

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      localparam int unsigned HC = c % (COLS / 2);
      logic sel;
      assign sel = wr_en && (row == r) && (half == (c >= COLS / 2)) && wmask[HC];
      synapse_digital u_syn (
        .clk      (clk),
        .rst_n    (rst_n),
        .we_weight(sel && field == TGT_WEIGHT),
        .we_addr  (sel && field == TGT_ADDR),
        .we_calib (sel && field == TGT_CALIB),
        .wdata    (wdata[HC][5:0]),
        .pre_addr (pre_addr[r]),
        .pre_en   (pre_en[r]),
        .pre      (pre[r][c]),
        .weight   (weight[r][c]),
        .addr     (addr_q[r][c]),
        .calib    (calib[r][c])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      row_sel_b <= '0;
    else if (wr_en && field == TGT_ROWCFG && wmask[0])
      row_sel_b[row] <= wdata[0][0];
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      for (int c = 0; c < COLS; c++) begin
        unique case (field)
          TGT_WEIGHT: rdata[c] <= {2'b00, weight[row][c]};
          TGT_ADDR:   rdata[c] <= {2'b00, addr_q[row][c]};
          TGT_CALIB:  rdata[c] <= {4'h0, calib[row][c]};
          TGT_ROWCFG: rdata[c] <= {7'h00, row_sel_b[row]};
          default:    rdata[c] <= '0;
        endcase
      end
    end
  end
endmodule
