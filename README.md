# A 1.25 Gbit/s randomness extractor for an ASE-based quantum random number generator

Quantum key distribution systems running at GHz clock rates consume random bits at GHz rates too.
The generator this RTL belongs to gets them from the noise of light. An erbium-doped fibre, pumped
hard, emits amplified spontaneous emission (ASE). Its intensity fluctuates with thermal
(Bose-Einstein) statistics, which come from quantum processes and are far broader than the
electronic noise. The light passes a 50 GHz band-pass filter and reaches the avalanche photodiode of
an ordinary fibre-optic SFP receiver module. The module's AC-coupled limiting amplifier compares
each instant with the average and outputs a 1 or a 0. The FPGA's multi-gigabit transceiver samples
this stream at 2.5 Gbit/s, exactly as if it were data on a fibre link.

The raw bits are not uniform. The published measurements give a probability of a 0 of 0.492, and a
correlation of 0.13 between neighbouring bits. The min-entropy bound from those measurements is
about 0.76 bits per raw bit (Santha-Vazirani parameter delta = 0.4114). A randomness extractor
inside the FPGA therefore compresses the stream: every 512 raw bits become 256 output bits, by a
multiplication with a fixed random 256 x 512 binary matrix over GF(2). The min-entropy would allow
about 391 output bits per block; 256 is a deliberate margin, and it halves the 2.5 Gbit/s raw
rate to exactly 1.25 Gbit/s.

This repository holds the digital part: the extractor and the storage for its matrix. The optics,
the SFP module, the transceiver's analogue front end and the QKD system are outside it.

```
  ASE source -> filter -> SFP (APD, TIA, limiting amp) -> FPGA transceiver (RX, 2.5 Gbit/s)
                                                                |  32-bit words, 78.125 MHz
                                                                v
   seed QRNG --mat_ld_*--> matrix_store ---32 columns--> gf2_extractor --rn_data--> QKD system
                                          <--segment----                256 bits / 16 cycles
```

## The extraction: y = M x over GF(2)

Call the 512 raw bits of a block `x[0..511]` and the matrix `M[r][c]`, with 256 rows and 512
columns. Output bit `r` is the parity of the AND of row `r` with `x`:

    y[r] = XOR over c of ( M[r][c] AND x[c] )

The same product can be read column by column: `y` is the XOR of all columns `M[.][c]` whose raw
bit `x[c]` is 1. The extractor (`rtl/gf2_extractor.sv`) uses this form. The raw bits arrive as
32-bit words, one per clock, so a block is 16 words. For word `s` of a block, the extractor:

1. asks the matrix store for segment `s`, the 32 columns that belong to raw bits
   `32*s .. 32*s+31` (output `seg`);
2. XORs together the columns whose bit in the word is 1 (a 32-input selective XOR, 256 bits wide);
3. XORs that into a 256-bit accumulator.

After the 16th word, the accumulator plus the last partial result is registered as the output
block. The accumulator then restarts from zero. Blocks do not overlap, and no raw bit is skipped.
Block alignment starts at reset. Within a word, bit 0 is the earliest received bit and raw bit
`x[32*s + j]` is bit `j` of word `s`.

The matrix only needs to be random and independent of the raw data. It is not secret, and it
stays fixed while the generator runs. In the published generator it was produced by a separate
commercial quantum RNG.

## Matrix storage and loading

`rtl/matrix_store.sv` holds the 131,072 matrix bits as 16 segments. Each segment holds 32 columns
of 256 bits, and it is read in one piece, combinationally, so the extractor gets its columns in the
same cycle as the raw word. In an FPGA this is a wide register file or several block RAMs in
parallel. Synthesis keeps it as one memory of 16 x 8192 bits.

How the matrix reaches the FPGA is this design's own choice. It is a 32-bit write port, written once
after reset, in increasing address order:

    ld_addr = c * 8 + q           (c = column 0..511, q = 32-bit slice 0..7)
    ld_data[b] = M[32*q + b][c]

`loaded` rises on the cycle after address 4095 is written, and only reset clears it. Reset does not
clear the matrix itself. The top ignores raw words while `loaded` is low. This means that no block is
ever made from a half-written matrix, and that the first block starts with the first word after
loading completes. An assertion in the top flags any write after the matrix is complete.

## Interface and timing of `qrng_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | transceiver parallel clock (2.5 Gbit/s / 32 = 78.125 MHz) |
| `rst_n` | in | 1 | asynchronous reset, active low |
| `rx_valid`, `rx_data` | in | 1, 32 | raw words from the transceiver |
| `mat_ld_en`, `mat_ld_addr`, `mat_ld_data` | in | 1, 12, 32 | matrix load port |
| `mat_loaded` | out | 1 | matrix complete; extraction running |
| `rn_valid`, `rn_data` | out | 1, 256 | extracted block, one-cycle strobe |

- Throughput: one raw word per cycle, with no stall. A block leaves every 16 cycles, so 256 bits per
  16 x 32 raw bits, which is 1.25 Gbit/s at 78.125 MHz.
- Latency: `rn_valid` pulses one cycle after the clock edge that accepted a block's last word.
  `rn_data` holds the block until the next one.
- Gaps in `rx_valid` only delay the block in progress.
- There is no backpressure. The raw stream cannot be paused, so the consumer must take every block
  on its strobe. The published design streams straight into the QKD system.

## Parameters

All modules take `RAW_BITS_P` (512), `OUT_BITS_P` (256) and `WORD_W_P` (32). The matrix store and
the top also take `LOAD_W_P` (32). The defaults live in `rtl/qrng_pkg.sv`. 512 and 256 are the
published sizes. The two 32-bit widths are this design's choices, since the published design does
not give the transceiver's word width. `RAW_BITS_P` must be a multiple of `WORD_W_P`, and
`OUT_BITS_P` a multiple of `LOAD_W_P`. For a faster receiver (the outlook of the original work is a
10 Gbit/s SFP+ module), widen `WORD_W_P` to keep the clock low. Such sizes were not simulated.

## What follows the published design and what does not

Taken from it: the 512-to-256 GF(2) matrix-vector extractor with a random matrix from an external
source, the 2.5 Gbit/s raw rate (the SFP's 2.5 GHz bandwidth) and the 1.25 Gbit/s output rate.

This design's own choices, not described there: the word-serial accumulation structure, the 32-bit
word and load widths, the bit order, the load port and `loaded` flag, discarding raw words before
the matrix is complete, the strobe-only output with no buffer, and reset behaviour.

Not built: the ASE source, the optical filter, the SFP module, the transceiver and its sample clock,
and the QKD system. These are optics, analogue parts, vendor hard macros or external systems. The
statistical characterisation in the published work (bias, autocorrelation, conditional probability,
Dieharder) was done on captured data offline and is not part of this RTL either. Timing closure at
78.125 MHz was not checked for any particular FPGA.

## Verification

Each testbench checks its results against values it computes itself, and prints
`TB_RESULT checks=N failures=M`.

- `tb/tb_matrix_store.sv` loads a random matrix, checks when `loaded` rises, reads back all 512
  columns, then checks that reset clears `loaded` and keeps the contents.
- `tb/tb_gf2_extractor.sv` feeds all-zero, all-one and 40 random blocks, with and without gaps. It
  compares each block with the product computed bit by bit from the definition. It also checks the
  one-cycle latency and the 16-cycle block spacing at full rate.
- `tb/tb_qrng_top.sv` runs the whole design at its default sizes. The raw stream starts before the
  matrix is loaded, and those words must be dropped. Then come 4096 load writes, 64 full-rate
  blocks and 32 blocks with random input gaps. Every block is checked against the reference, and
  the test counts each of these mechanisms and fails if one never occurred. It also compares the
  fraction of ones before extraction (about 0.505, since the source is biased) with the fraction
  after (must be within 0.5 +- 0.02). It does the same for the correlation between neighbouring
  bits: about 0.13 in the raw stream, and within +-0.04 of zero after extraction.
- `tb/raw_source_model.sv` is a behavioural source for simulation only. It produces bits with the
  measured bias and neighbour correlation: each bit repeats the previous one with probability 0.13,
  and otherwise is drawn with P(1) = 0.508.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl rtl/qrng_pkg.sv rtl/matrix_store.sv \
        rtl/gf2_extractor.sv rtl/qrng_top.sv tb/raw_source_model.sv tb/tb_qrng_top.sv \
        --top-module tb_qrng_top
    ./obj_dir/Vtb_qrng_top

Each testbench runs in well under a second.
