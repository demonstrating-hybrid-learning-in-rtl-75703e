# Plasticity subsystem of a hybrid neuromorphic chip, in SystemVerilog

A mixed-signal neuromorphic chip keeps its synapses and neurons analog and
fast, and learns in software. Every synapse measures pre/post spike timing
with an analog correlation sensor. An embedded processor reads those traces
through an ADC and computes new weights with a SIMD vector unit. It writes the
weights back into the synapses' SRAM and clears the sensors.

This repository gives RTL for the digital side of such a system. It covers
a 32 x 64 synapse array and the plasticity processing unit's (PPU) vector
unit, memory and access path. Behavioural models of the analog parts let the
whole loop be simulated: spikes in, weight update out.

## The learning loop

One update step for half a synapse row (32 synapses) looks like this on the
vector unit. The end-to-end testbench runs exactly this sequence:

1. `PLD` the causal correlation traces of the row. This starts a 128-channel
   ADC conversion of the whole row: 64 causal plus 64 anti-causal channels.
2. `PLD` the anti-causal traces. The row is buffered in the access unit, so
   this is answered at once.
3. `PLD` the weights from the synapse SRAM. This can run while a conversion
   is busy.
4. `SUB`, `CMP` and conditional `ADD`/`SUB` compute the new weights. They use
   the condition register (eq/lt/gt per byte) as a write mask.
5. `PST` the weights back, then `PST` non-zero bytes to the causal and
   anti-causal reset targets of the row.

## Blocks (rtl/)

| module | role |
|---|---|
| `ppu_pkg` | Widths, opcodes, instruction format, address map, condition masks. |
| `synapse_digital` | 6-bit weight, 6-bit address and 4-bit calibration memory, plus the address comparator that forms the synapse's local `pre`. |
| `synapse_array` | 32 x 64 synapses, the per-row A/B input select, and a half-row write / full-row read port. |
| `corr_adc` | Digital side of the single-slope ADC: a shared ramp counter and one latch per channel. A conversion is 280 cycles, which is 560 ns at 500 MHz. |
| `vector_regfile`, `vector_alu`, `vector_compare`, `vector_permute` | One 128-bit slice: 32 x 128-bit single-port registers; MAC/mult/add/sub in 8- or 16-bit lanes (modular integer or saturating fractional) with an internal accumulator; compare; select, shift, splat and pack/unpack. |
| `instr_queue` | FIFO of instruction plus 32-bit operand. The core stalls only when it is full. |
| `fair_arbiter` | Conflict arbiter: the favoured requester changes on every conflict. |
| `vector_unit` | Decoder, hazard scoreboard, five reservation stations (VALU, load/store, compare, permute, parallel load/store), register-file arbitration, two slices. |
| `synapse_access_unit` | Maps 256-bit bus accesses to the SRAM, ADC and correlation-reset engines, which run concurrently. It has row buffers and arbitrates against a 32-bit external bus. |
| `main_memory` | 16 KiB, three ports: fetch, core data, vector unit. |
| `icache` | 4 KiB direct-mapped instruction cache, 4-word lines. |
| `ppu_clock_gate` | A `wait` instruction stops the PPU clock and an interrupt restarts it. Latch-based gate. |
| `dls_prototype_top` | Wires everything together. |
| `corr_sensor_model`, `synapse_dac_model`, `adc_frontend_model`, `analog_array_model` | Behavioural models using `real` values. They do not synthesise. |

## The vector unit in detail

The instruction format is 32 bits: opcode, three register fields, a
16-bit-lane flag, a fractional flag, a condition and a 7-bit immediate.
Each instruction travels with a 32-bit operand from the core. The operand is
an address for loads and stores, and a value for `SPLAT`.

Decode pops one instruction per cycle. A scoreboard holds it back while:
- it reads a register that an earlier instruction still has to write (RAW);
- it writes a register that earlier instructions still have to read or write
  (WAR, WAW);
- it is a compare and the condition register is still in use.

A clear instruction goes to its unit's reservation station, a 2-entry FIFO.
Each station executes in order, and the stations run in parallel with one
another. Because each slice's register file has a single port, a
`fair_arbiter` grants one station per cycle. Read data come back the next
cycle. A two-operand instruction therefore takes about five cycles of its
station. Parallel loads are tagged with their destination register. The
response is written back whenever it arrives, so several bus transactions can
be in flight.

Conditional writes: each instruction's condition picks eq, lt, gt or always
from the condition register. That picks the byte write mask of the result.

## Weight formats

- 8-bit lanes: the 6-bit weight is read as a byte with the value in bits 5..0.
- 16-bit fractional lanes: `UNPACK` combines the same byte position of two
  rows into `{0, w_hi[5:0], w_lo[5:0], 000}`. That is a 12-bit weight in bits
  14..3 of a positive Q15 number. `PACK` splits it back, mapping negatives
  to 0.

The description this design follows names the bits w11..w7 and w6..w0 for
this format. That does not match 6-bit synapse memories, so this design uses
a 6 + 6 split.

## Timing and clocks

There is one clock. The PPU parts (vector unit, cache, memory) run on the
gated clock. The access unit, synapse array and ADC always run, so the
external bus works while the PPU sleeps.

A correlation reset store latches the column pattern. In the next cycle it
pulses the row enable, so the columns are set before the row. Each store
defines the whole pattern for its own pulse. A reset of the buffered ADC row
invalidates the buffer.

## Departures and simplifications

- The general-purpose Power ISA core is not included. Its instruction-queue,
  memory and fetch ports are top-level ports.
- Not included either: the neurons, the serial link to the FPGA and the
  firing-rate sensor. Spikes come in and dendritic currents go out as ports.
- The analog models are ideal. The sensor adds `eta * exp(-dt/tau)` per
  nearest-neighbour pair and clamps at 1.3 V. The DAC is a straight line,
  22.786 nA + 11.517 nA per LSB. The ADC has a 1 V full scale.
- The instruction encoding, queue and station depths, address map, ADC
  settle time and cache line size are this design's own.

## Simulating

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. An example:

    verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -y rtl +libext+.sv -Irtl \
      rtl/ppu_pkg.sv tb/tb_dls_prototype_top.sv --top-module tb_dls_prototype_top
    ./obj_dir/Vtb_dls_prototype_top

`tb_dls_prototype_top` runs the full default size (32 x 64 synapses, two
slices) in a few seconds. It:
- configures two rows over the external bus;
- plays pre/post spike pairs;
- runs the update program above;
- checks the weights in the array, in main memory and over the external bus;
- checks that the correlation stores read zero after the reset;
- exercises the cache, and sleep and wake-up.

It counts each mechanism and fails if one never occurs: hazard stalls, a full
queue, row-buffer hits, SRAM access during a conversion, bus conflicts,
conditional writes, cache misses, sleep and wake.
