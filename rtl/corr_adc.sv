// corr_adc: digital part of the 128-channel single-slope correlation ADC.
//
// The ADC digitises one synapse row at a time: 64 causal and 64 anti-causal
// traces, read out in parallel, to 8 bits each. A single-slope converter
// compares every input against one shared rising ramp; this block is its
// digital side: a shared counter that drives the ramp DAC code and, per
// channel, a latch that captures the counter value in the cycle where that
// channel's comparator first reports ramp >= input. Channels whose
// comparator never trips saturate at the full-scale code.
//
// Timing: start (one cycle, while idle) begins a conversion. The readout
// enable of the selected row (sample) is high for the whole conversion. The
// first SETUP = CONV_CYCLES - 2^BITS cycles let the readout settle, then the
// ramp counts through all 2^BITS codes, one per cycle. done pulses in the
// last cycle with result valid from the next cycle on. The paper gives 560 ns
// per row conversion; at the 500 MHz design clock that is the default of 280
// cycles. How these cycles split between settling and ramp is not given and
// is this design's choice.
module corr_adc #(
  parameter int unsigned CHANNELS    = 128,
  parameter int unsigned BITS        = 8,
  parameter int unsigned CONV_CYCLES = 280
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  output logic                           busy,
  output logic                           done,
  output logic                           sample,
  output logic [BITS-1:0]                ramp_code,
  output logic                           ramp_active,
  input  logic [CHANNELS-1:0]            cmp,
  output logic [CHANNELS-1:0][BITS-1:0]  result
);
  localparam int unsigned RAMP  = 1 << BITS;
  localparam int unsigned SETUP = CONV_CYCLES - RAMP;
  localparam int unsigned CW    = $clog2(CONV_CYCLES + 1);

  logic [CW-1:0]       cnt;
  logic [CHANNELS-1:0] tripped;

  assign sample      = busy;
  assign ramp_active = busy && (cnt >= CW'(SETUP));
  assign ramp_code   = ramp_active ? BITS'(cnt - CW'(SETUP)) : '0;
  assign done        = busy && (cnt == CW'(CONV_CYCLES - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      cnt     <= '0;
      tripped <= '0;
      result  <= '0;
    end else if (!busy) begin
      if (start) begin
        busy    <= 1'b1;
        cnt     <= '0;
        tripped <= '0;
      end
    end else begin
      cnt <= cnt + 1'b1;
      if (ramp_active) begin
        for (int c = 0; c < CHANNELS; c++) begin
          if (!tripped[c] && (cmp[c] || done)) begin
            tripped[c] <= 1'b1;
            result[c]  <= ramp_code;
          end
        end
      end
      if (done) busy <= 1'b0;
    end
  end

  initial assert (CONV_CYCLES > RAMP) else $error("CONV_CYCLES must exceed 2**BITS");
endmodule
