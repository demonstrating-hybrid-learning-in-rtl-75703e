// analog_array_model: behavioural model (not synthesizable) of the analog
// part of the synapse array: one correlation sensor and one current DAC per
// synapse, the per-column dendritic current sums for neuron inputs A and B,
// and the correlation readout lines. Two readout lines run through every
// column; when a row's readout enable is active its causal and anti-causal
// values drive them. The 128 ADC channels are ordered causal columns 0..63,
// then anti-causal columns 0..63 (own choice). A column correlation reset
// together with the row reset enable clears a store, as in the paper.
// The row time constant and storage gain inputs are shared by all rows, as
// in the prototype where they are shorted to two external pins.
// Hardware time for the sensors is counted here in clock cycles of
// CLK_PERIOD_NS (2 ns = the 500 MHz design clock by default).
module analog_array_model #(
  parameter int unsigned ROWS          = 32,
  parameter int unsigned COLS          = 64,
  parameter real         CLK_PERIOD_NS = 2.0
) (
  input  logic                           clk,
  input  logic [ROWS-1:0][COLS-1:0]      pre,
  input  logic [COLS-1:0]                post,
  input  logic [ROWS-1:0][COLS-1:0][5:0] weight,
  input  logic [ROWS-1:0][COLS-1:0][3:0] calib,
  input  logic [ROWS-1:0]                row_sel_b,
  input  real                            tau_us,
  input  real                            eta_v,
  input  real                            gmax_scale,
  input  logic [ROWS-1:0]                crst_row_en,
  input  logic [COLS-1:0]                crst_col_c,
  input  logic [COLS-1:0]                crst_col_a,
  input  logic                           read_en,
  input  logic [$clog2(ROWS)-1:0]        read_row,
  output real                            vread [2*COLS],
  output real                            i_a_na [COLS],
  output real                            i_b_na [COLS]
);
  real ac [ROWS][COLS];
  real t_us;
  longint unsigned cycles;

  initial cycles = 0;
  always @(posedge clk) cycles <= cycles + 1;
  assign t_us = real'(cycles) * CLK_PERIOD_NS / 1000.0;

  real aa [ROWS][COLS];
  real ia [ROWS][COLS];
  real ib [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      corr_sensor_model u_cs (
        .clk, .t_us, .pre(pre[r][c]), .post(post[c]), .calib(calib[r][c]),
        .tau_us, .eta_v,
        .rst_causal(crst_row_en[r] && crst_col_c[c]),
        .rst_anti(crst_row_en[r] && crst_col_a[c]),
        .a_causal(ac[r][c]), .a_anti(aa[r][c])
      );
      synapse_dac_model u_dac (
        .pre(pre[r][c]), .weight(weight[r][c]), .sel_b(row_sel_b[r]),
        .gmax_scale, .i_a_na(ia[r][c]), .i_b_na(ib[r][c])
      );
    end
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      vread[c]        = read_en ? ac[read_row][c] : 0.0;
      vread[COLS + c] = read_en ? aa[read_row][c] : 0.0;
      i_a_na[c] = 0.0;
      i_b_na[c] = 0.0;
      for (int r = 0; r < ROWS; r++) begin
        i_a_na[c] = i_a_na[c] + ia[r][c];
        i_b_na[c] = i_b_na[c] + ib[r][c];
      end
    end
  end
endmodule
