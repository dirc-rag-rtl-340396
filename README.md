# DIRC-RAG retrieval macro in SystemVerilog

DIRC-RAG accelerates the retrieval step of retrieval-augmented generation on
edge devices by keeping every document embedding inside compute-in-memory
macros. Each memory cell couples an 8x8 array of four-level ReRAM devices
(128 bits) with one SRAM bit. A differential sense amplifier copies one
ReRAM bit into the SRAM bit in a single cycle. A purely digital MAC then
multiplies the SRAM bits with the query.

The query stays in input registers for the whole retrieval (query-stationary).
The embeddings are read bit-plane by bit-plane out of the ReRAM. This avoids
both a DRAM stream of all embeddings and the limited capacity of SRAM-only
compute-in-memory.

## What is in `rtl/`

- `dirc_pkg`: sizes, types and the LSB read-out error map of the 8x8 subarray.
  It also holds the rank table used for error-aware bit placement.
- `dirc_cell`: a behavioural model of one ReRAM-SRAM cell. It senses the MSB
  against the middle reference. It senses the LSB against the low or high
  reference, selected by the MSB latched in the previous cycle.
- `remap_lut`: the address LUT. It places data bit 3 on the most reliable LSB
  positions and bit 0 on the least reliable ones. Bits 4-7 go on device MSBs.
- `csa_tree`: a 128-input ones counter built from 3:2 compressors.
- `dirc_accu`: the shift-accumulator. Each term is weighted by 2^(D_bit+Q_bit),
  with two's-complement sign handling.
- `ed_unit`: error detection. During an all-ones input cycle it compares the
  adder output with an offline D Sum LUT entry.
- `input_regs`: the query-stationary input registers, up to 1024 elements.
- `dirc_column`: 128 cells with their NOR multipliers, adder, error detection,
  accumulator and result registers.
- `macro_ctrl`: the dataflow sequencer. Per bit-plane it runs the sense, the
  error detection, a re-sense on a mismatch, and 8 MAC cycles. It also folds
  embeddings longer than 128 elements.
- `dirc_macro`: 128 columns plus the sequencer and a result read-out stream.

## Timing of one macro operation (INT8, 16 slots per column)

Each slot needs 4 MSB bits at one sense cycle each and 4 LSB bits at two
cycles each (MSB first, then LSB). It then needs 8 error-detection cycles and
64 MAC cycles. That gives 84 cycles per slot, plus one cycle to write the
result of each embedding. A full column takes about 1350 cycles, or 5.4 us at
250 MHz, before any re-sensing.

## Status and departures

Only `dirc_accu` has a self-checking testbench (`tb/tb_dirc_accu.sv`). The
other modules pass lint but have not been simulated.

These parts are not written:

- the per-core norm/index buffer
- the cosine calculator
- the local and global top-k comparators
- the query norm unit
- the SRAM result buffer
- the 16-core top level

`dirc_macro` is therefore the highest level provided. The value k = 5, the
fixed-point formats, the programming ports and the error-injection hook are
this design's own choices.

## Simulating

    verilator --binary --timing -Irtl rtl/dirc_pkg.sv rtl/dirc_accu.sv tb/tb_dirc_accu.sv --top-module tb_dirc_accu
