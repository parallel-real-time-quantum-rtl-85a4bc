# Parallel Toeplitz post-processing for a three-channel vacuum-noise QRNG

A continuous-variable quantum random number generator measures the vacuum
fluctuations of light with a balanced homodyne detector. The bit rate of such
a generator is limited less by the detector than by the bandwidth of the
single frequency mode that is usually digitised and by how fast the raw data
can be hashed into uniform bits. This design takes three non-overlapping
sideband modes of the same homodyne signal (centred at 200 MHz, 600 MHz and
1 GHz, each 120 MHz wide), digitises each with its own 16-bit ADC at
240 MS/s, and hashes the three raw streams concurrently with three
independent Toeplitz extractors running at the ADC clock. The three random
streams are merged into one word stream for a PCI-E link to the host.

The RTL here is the digital part of that system, the post-processing that
in the original setup runs on a Kintex-7 FPGA:

```
 ADC 1 (16b @240MHz) --> toeplitz_extractor M=581 --\
 ADC 2 (16b @240MHz) --> toeplitz_extractor M=548 ----> accum_pcie_packer --> 64-bit stream
 ADC 3 (16b @240MHz) --> toeplitz_extractor M=519 --/        (to a PCI-E core)
                               qrng_top
```

The laser, homodyne detector, power splitter, mixers, RF sources, low-pass
filters, AC amplifiers, ADCs, clock source and PCI-E core are outside it.
The ADC outputs, the clock and the PCI-E stream are ports of `qrng_top`.

## Where the matrix sizes come from

The leftover hash lemma bounds the number of nearly uniform bits that can be
taken from N raw samples with min-entropy H per sample:
ell <= N * H - log2(1/eps^2). With the hash security parameter eps = 2^-50
(so 100 bits are given up), 48 samples per block (768 raw bits) and the
measured min-entropies of the three channels:

| channel | mode centre | H (bits/sample) | 48*H - 100 | matrix | rate at 240 MS/s |
|---|---|---|---|---|---|
| 1 | 200 MHz | 14.2 | 581.6 | 581 x 768 | 581/48 * 240 MHz = 2.905 Gbit/s |
| 2 | 600 MHz | 13.5 | 548.0 | 548 x 768 | 2.740 Gbit/s |
| 3 | 1 GHz   | 12.9 | 519.2 | 519 x 768 | 2.595 Gbit/s |

Together 1648 bits every 48 cycles, 8.24 Gbit/s (8.25 Gbit/s when the
per-channel rates are first rounded to 2.91, 2.74 and 2.60). Channel 1's
extraction ratio is 581/768 = 75.7 %. These sizes are the defaults of the
RTL; nothing is scaled down.

## The Toeplitz hash as a stream

An M x N Toeplitz matrix is constant along its diagonals and is therefore
fixed by M+N-1 seed bits. This design uses the convention

    T[i][j] = seed[i - j + N - 1],   y = T x  over GF(2)

so the output bit i is the parity of the raw bits j selected by row i.
A 768-bit raw block x arrives as 48 samples of 16 bits; sample k supplies
columns 16k .. 16k+15, with sample bit c in column 16k+c. Instead of the
whole matrix, each sample needs only the 16 columns it touches, and those
are fixed by a window of M+15 consecutive seed bits:

    window_k = seed[N-16-16k  +: M+15],   T[i][16k+c] = window_k[i+15-c]

The product of a sample with its submatrix is an M-bit vector whose bit i is
the parity of (window_k[i+15 .. i] AND the bit-reversed sample). Summing (XOR)
the 48 partial products of a block gives y. Every row is independent of the
others, so all M rows are computed in parallel, one sample per clock.

This is split into the three pipeline stages the design is built from:

1. **`toeplitz_matrix_builder`** holds the seed, counts the sample position
   k within the block and registers the sample together with window_k (a
   48-way selection from the seed register) and a `last` flag for k = 47.
2. **`toeplitz_submatrix_mult`** computes and registers the M-bit partial
   product, M parity trees of 16 AND terms.
3. **`toeplitz_vector_accum`** XORs the partial products into an M-bit
   register. With the last one it outputs the sum for one cycle and restarts
   from zero, so consecutive blocks follow with no idle cycle.

`toeplitz_extractor` chains the three. With a sample on every clock it
delivers M bits every 48 cycles; `out_valid` pulses three cycles after the
cycle in which the last sample of a block was presented. `adc_valid` low
simply pauses the pipeline; blocks are always 48 valid samples, the first
valid sample after reset starting block 0.

### Seeds

Each extractor has its own seed register of M+767 bits (1348, 1315 and 1286
bits). Seeds are written 32 bits at a time through `seed_we`,
`seed_sel` (0, 1, 2 for the three channels) and `seed_wdata`; each write
shifts the register left by 32 and puts the word in bits 31..0. After
ceil((M+767)/32) writes (43, 42 and 41 words) the register holds the last
M+767 bits written. Reset clears the seeds, so they must be loaded after
every reset, and they should be loaded while no samples flow: a write takes
effect on the next sample, which would mix two matrices within one block.
The seed stays fixed during operation.

## Merging the three channels (`accum_pcie_packer`)

The three random blocks appear on the same clock when the ADCs share their
valid signal. The packer keeps one holding register per channel and a bit
gearbox of 581+64 = 645 bits. A round-robin arbiter moves one pending block
per cycle into the gearbox, appending its M valid bits directly after the
bits already queued, without padding, so blocks straddle word boundaries.
The lowest 64 bits are offered on a valid/ready interface whenever at least
64 bits are queued, and are held steady until accepted. A block enters only
if it fits after the word leaving in the same cycle.

The stream is the channel-1, channel-2, channel-3 blocks of each period,
least significant bit first, with nothing marking channel or block
boundaries. A host that needs to separate the channels can do so by position
(581, 548, 519 bits repeating) as long as nothing was dropped.

At 240 MHz a 64-bit word per clock carries 15.36 Gbit/s, almost twice what
the extractors produce, so with `pcie_tready` high the buffer never
overflows. If the consumer stalls long enough for a channel to produce a new
block while its previous block is still held, the new block is dropped,
`drop_cnt[c]` (saturating 16-bit) counts it and the sticky `overflow` flag
is set; both clear only on reset. Dropping the newest block keeps the bits
already queued in order.

## Top-level interface (`qrng_top`)

| port | dir | width | meaning |
|---|---|---|---|
| clk, rst_n | in | 1 | common 240 MHz clock, asynchronous active-low reset |
| adc_data[3] | in | 16 each | one sample per channel per cycle |
| adc_valid[3] | in | 1 each | sample valid |
| seed_we, seed_sel, seed_wdata | in | 1, 2, 32 | seed loading, see above |
| pcie_tdata, pcie_tvalid, pcie_tready | out, out, in | 64, 1, 1 | random word stream |
| overflow, drop_cnt[3] | out | 1, 16 each | drop indication |

All logic is in the one clock domain. ADC data is taken as already
synchronous to it. Assertions in the RTL check that an extractor never
outputs two blocks in adjacent cycles and that an offered output word stays
valid and unchanged until accepted.

## What follows the source and what is this design's own

Taken from the published system: three parallel channels, 16-bit samples at
240 MS/s on one 240 MHz clock, the matrix sizes 581/548/519 x 768, the
Toeplitz-hashing extractor per channel built as a pipeline of matrix
building, submatrix multiplication and accumulation in a register, and the
merging of the three results into one PCI-E stream.

This design's own choices, where the source says nothing:
- the Toeplitz index convention and the column order of sample bits;
- one 16-column submatrix per sample, selected as a seed window;
- how seeds are loaded (32-bit words, shift register) and that they are
  cleared by reset;
- the 3-cycle pipeline latency and the valid handshake;
- the packer: 64-bit valid/ready output, bit packing without framing,
  round-robin order, one holding register per channel, drop-newest overflow
  policy with counters;
- asynchronous active-low reset throughout.

The source reports that the three extractors take 43.8 % of the FPGA; the
size of this RTL (about 13,000 flip-flops, mostly the seed registers, the
window and partial-product registers and the accumulators) has not been
compared with that. Making the channels' statistics visible (bitmaps,
correlations, the NIST suite) is done on the host and is not part of the RTL.

## Files

- `rtl/qrng_pkg.sv` - shared sizes (channel count, sample width, N, the
  three M, seed and output word widths).
- `rtl/toeplitz_matrix_builder.sv`, `rtl/toeplitz_submatrix_mult.sv`,
  `rtl/toeplitz_vector_accum.sv` - the three pipeline stages.
- `rtl/toeplitz_extractor.sv` - one channel's extractor.
- `rtl/accum_pcie_packer.sv` - channel merging and output stream.
- `rtl/qrng_top.sv` - the three channels and the packer.
- `tb/qrng_tb_pkg.sv` - reference Toeplitz hash taken directly from the
  definition, seed word formatting, random bit vectors.
- `tb/tb_*.sv` - one self-checking testbench per module, plus
  `tb_channel_workloads.sv` for the three channel sizes together.

## Verification

Every testbench is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`; each has a cycle watchdog.

- `tb_toeplitz_matrix_builder`: the window for every sample position over
  three blocks, with random idle cycles, against the loaded seed; the `last`
  flag; one-cycle latency.
- `tb_toeplitz_submatrix_mult`: 200 random windows and samples against the
  Toeplitz definition.
- `tb_toeplitz_vector_accum`: five blocks of random partial products with
  idle cycles; output timing and sums.
- `tb_toeplitz_extractor`: six 581x768 hashes against the reference,
  latency, and one block per 48 cycles when samples arrive every cycle.
- `tb_channel_workloads`: the three channel configurations (581, 548 and
  519 x 768) side by side, five hashes each against the reference, with one
  vector every 48 cycles per channel (2905, 2740 and 2595 Mbit/s at 240 MHz).
- `tb_accum_pcie_packer`: the exact bit stream under random back-pressure,
  and a stall scenario whose drop counts (0/1/1, then 1/2/2) and surviving
  blocks are predicted exactly.
- `tb_qrng_top`: the whole design at its default size. Random samples on
  three channels, with idle ADC cycles and consumer stalls, every output
  word compared with the reference hashes; 258 words in 480 cycles of
  steady streaming (8.24 Gbit/s of payload fits a 64-bit word every 1.86
  cycles); a four-period stall that must cause drops; reset and reloading
  of new seeds. Each of these events is counted and must occur.

The ADC data in simulation is pseudo-random, not vacuum noise, so the tests
establish that the hardware computes the Toeplitz hash and moves the bits
correctly, not the entropy of the output.

To run a testbench with Verilator (from the directory holding `rtl/` and
`tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/qrng_pkg.sv tb/qrng_tb_pkg.sv tb/tb_qrng_top.sv --top-module tb_qrng_top
./obj_dir/Vtb_qrng_top
```

All testbenches finish in about a second. Verilator is two-state; the
design resets every register it reads.

To change the design: the channel sizes are the `M_LEN` parameter of
`qrng_top` (and `M_TOP`, the widest of them); a different block length N
must stay a multiple of the sample width W. A new channel count needs
`NUM_CH` in the package and a wider `seed_sel`.
