// synapse_dac_model: behavioural model (not synthesizable) of the 6-bit
// current DAC in every synapse. While the synapse's pre signal is high it
// sources a current proportional to the stored weight, scaled by the
// analog g_max control input, into neuron input A or B as selected for the
// row. Offset and step follow the paper's linear fit of the measured DAC
// (22.79 nA + 11.52 nA per LSB); its INL is not modelled.
module synapse_dac_model #(
  parameter real OFFSET_NA = 22.786151,
  parameter real LSB_NA    = 11.516865
) (
  input  logic       pre,
  input  logic [5:0] weight,
  input  logic       sel_b,
  input  real        gmax_scale,
  output real        i_a_na,
  output real        i_b_na
);
  real i;
  always_comb begin
    i      = pre ? gmax_scale * (OFFSET_NA + LSB_NA * real'(weight)) : 0.0;
    i_a_na = sel_b ? 0.0 : i;
    i_b_na = sel_b ? i : 0.0;
  end
endmodule
