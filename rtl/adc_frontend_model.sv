// adc_frontend_model: behavioural model (not synthesizable) of the analog
// side of the single-slope correlation ADC: the ramp generator and one
// comparator per channel. The ramp voltage is the ramp code times
// VFS / 2^BITS; a comparator reports 1 while the ramp is at or above its
// channel's input voltage. The 1 V full scale follows the paper's statement
// that the trace amplitude covers nearly the 1 V input range of the ADC;
// comparator offsets and noise are not modelled.
module adc_frontend_model #(
  parameter int unsigned CHANNELS = 128,
  parameter int unsigned BITS     = 8,
  parameter real         VFS      = 1.0
) (
  input  logic [BITS-1:0]     ramp_code,
  input  logic                ramp_active,
  input  real                 vin [CHANNELS],
  output logic [CHANNELS-1:0] cmp
);
  real vramp;
  always_comb begin
    vramp = real'(ramp_code) * VFS / real'(1 << BITS);
    for (int c = 0; c < CHANNELS; c++)
      cmp[c] = ramp_active && (vramp >= vin[c]);
  end
endmodule
