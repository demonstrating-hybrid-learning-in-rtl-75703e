// synapse_digital: the digital part of one synapse.
//
// Each synapse holds three small static memories, as in the paper's synapse
// block diagram: a 6-bit weight (read by the synapse DAC), a 6-bit
// pre-synaptic neuron address and 4 calibration bits for the correlation
// sensor (2 bits for the time-to-voltage stage, 2 for the storage gain).
// The address comparator compares the 6-bit address broadcast along the row
// with the stored one; when they match and the row's pre-synaptic enable is
// high, it raises the synapse-local "pre" signal that drives the DAC and the
// correlation sensor.
//
// The SRAM cells are modelled as flip-flops written on the clock edge; the
// comparator is combinational, so "pre" follows pre_en within the cycle
// (in silicon the pulse is about 4 ns long). Reset state of the cells is not
// given in the paper; they reset to zero here.
module synapse_digital #(
  parameter int unsigned ADDR_W   = 6,
  parameter int unsigned WEIGHT_W = 6,
  parameter int unsigned CALIB_W  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                we_weight,
  input  logic                we_addr,
  input  logic                we_calib,
  input  logic [WEIGHT_W-1:0] wdata,
  input  logic [ADDR_W-1:0]   pre_addr,
  input  logic                pre_en,
  output logic                pre,
  output logic [WEIGHT_W-1:0] weight,
  output logic [ADDR_W-1:0]   addr,
  output logic [CALIB_W-1:0]  calib
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      weight <= '0;
      addr   <= '0;
      calib  <= '0;
    end else begin
      if (we_weight) weight <= wdata;
      if (we_addr)   addr   <= wdata[ADDR_W-1:0];
      if (we_calib)  calib  <= wdata[CALIB_W-1:0];
    end
  end

  assign pre = pre_en && (pre_addr == addr);
endmodule
