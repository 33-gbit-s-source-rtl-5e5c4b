# Real-time Toeplitz extraction for a 33.92 Gbit/s heterodyne QRNG

A heterodyne quantum random number generator measures both quadratures of
the vacuum field with two balanced detectors. A dual-channel ADC digitises
them at 3.2 GS/s with 12 bits per sample, which gives 24 raw bits per round
(one X and one P sample). The raw numbers are not uniform: they follow a
Gaussian, and part of their variance is classical noise. The security
analysis bounds how much of each round is unpredictable to an adversary who
may control the source: about 12.68 bits per 24-bit round. To keep a margin,
each block of 120 rounds (2880 bits) is compressed to 1272 bits.

The compression is a Toeplitz hash, a matrix–vector product over GF(2) with
a public random seed. Its input is the full ADC stream, 76.8 Gbit/s. This
RTL is the FPGA datapath that does the hashing as the data arrives. It
takes the two JESD204C links of the ADC, hashes every sample, and delivers
the extracted bits (33.92 Gbit/s) and a copy of the raw samples as 512-bit
AXI4-Stream words for a PCIe DMA engine.

## Throughput: why 20 parallel extractors

The FPGA clock is 160 MHz. Each clock brings N_S = 20 samples per channel,
i.e. 20 rounds = 480 bits. One extractor pipeline hashes one 24-bit round
per clock. So the design needs N_S = 20 extractors in parallel, and each
one gets the whole bus word only one cycle in twenty on average.

The blocks do not split each bus word between them. Instead, each bus word
goes whole to one block. A block collects k_in/480 = 6 consecutive bus
words, which is one complete 2880-bit hash input. It then hashes that input
in k_in/24 = 120 cycles. While it hashes, the other 19 blocks take the next
6 words each. 20 × 6 = 120 cycles later the chain comes back to the first
block, just as it finishes. Every block is then busy 100 % of the time, and
no sample is skipped.

    net rate = 20 blocks × 1272 bits / 120 cycles × 160 MHz = 33.92 Gbit/s

This holds for any block size: a rotation of the chain always lasts
k_in/24 cycles, the same as one hash.

## Datapath overview

```
link 0 (CH1) ─┐                         ┌─ parallel block 0 ─ FIFO ─┐
link 1 (CH2) ─┴─ transport_layer ─480─▶ ├─ parallel block 1 ─ FIFO ─┤
                   │                    │        ...                ├─ aggregator ─480─ pcie_cdc_channel ─512─▶ extracted stream
                   │                    └─ parallel block 19 ─ FIFO ┘   (all FIFOs non-empty)     (async FIFO + repack)
                   └────────────────────────────────────────────────────── pcie_cdc_channel ─512─▶ raw stream
```

| module | role |
|---|---|
| `qrng_pkg` | shared sizes (b = 24, N_S = 20, j = 1272, k_in = 2880, ...) |
| `transport_layer` | lane mapping, sample extraction, CH1/CH2 interleave into 480-bit words |
| `gearbox` | dense bit-stream width converter, used in the transport layer and before PCIe |
| `block_buffer` | per-block collector with read-enable / buffer-full chain, double-buffered |
| `toeplitz_extractor` | the five-stage hashing pipeline |
| `sync_fifo` | per-block output FIFO |
| `parallel_block` | buffer + extractor + FIFO |
| `aggregator` | reads all FIFOs together once none is empty |
| `async_fifo` | Gray-pointer dual-clock FIFO |
| `pcie_cdc_channel` | async FIFO to the 250 MHz domain and 480→512-bit repacking |
| `qrng_top` | the whole datapath, including the start-chain logic and the daisy chain |

## The Toeplitz extractor pipeline

This is the block that is hardest to follow.

### The matrix without the matrix

The extractor computes Z = M·D over GF(2). D is the 2880-bit block, Z the
1272-bit output, and M a 1272 × 2880 Toeplitz matrix, fixed by a seed of
j + k_in bits. Storing M would take 3.7 Mbit per block. The pipeline instead
keeps the seed in a shift register T and rebuilds the columns it needs from
overlapping slices of T.

Each cycle, one 24-bit word D_i enters the pipeline. The low j + b bits of
T form T_B, and column g (g = 0..23) of this cycle's 24 columns is the slice
`T_B[j+g-1 : g]`. Column g is ANDed with data bit `D_i[23-g]`. The 24
products are XORed into one 1272-bit partial result U. T then shifts right by
24, so the next cycle gets the next 24 columns. After 120 words, T has moved
through the whole seed.

Written out, output bit r is

    Z[r] = XOR over all input bits c of  seed[24·(c/24) + (23 − c mod 24) + r] · D[c]

The matrix entry depends on the sum of a row index and a reordered column
index, so M is a Hankel matrix in the natural column order: a Toeplitz
matrix with its columns reversed inside each 24-bit word. It is still a
member of the same universal₂ hash family. The testbenches compute this
formula directly. Only the bits 0 .. j+k_in−2 of the seed are ever used.

### Stages

| stage | register(s) | operation |
|---|---|---|
| generation | `T` (j+k_in bits) | `T ← seed` on reset ("Toeplitz init") or on proc-done, else `T ← T >> 24` per issued word |
| data load | `T_B` (j+24), `D_i` (24) | `T_B ← T[j+23:0]`, `D_i ← D[24i+23 : 24i]` |
| multiply | `U_B` (24 × j) | `U_B[g] ← T_B[j+g−1:g] & D_i[23−g]` |
| XOR reduce | `U` (j) | `U ← U_B[0] ^ … ^ U_B[23]` |
| accumulate | `Z` (j), `i` | `Z ← (first word ? 0 : Z) ^ U`, `i ← i+1` |
| output | `Z_capture`, `out_data` | when `i ≥ 119`: capture Z, then shift out 24 bits per cycle for 53 cycles |

### The look-ahead reload

The generation stage runs three registers (load, multiply, XOR reduce)
ahead of the accumulation stage. It therefore has to return T to the seed
while the accumulation stage is still at word 119 − 3 − 1 = 115. That is
the condition `i == k_in/b − N_STAGES − 1`, called proc_done. In that same
cycle the generation stage issues word 119 of the block, and it issues word
0 of the next block on the following cycle. An assertion checks that the
reload always coincides with issuing the last word.

The condition is an equality. With a `≥`, as the condition is sometimes
stated, T would be reloaded on four consecutive cycles and words 116–119
would be hashed with the wrong columns.

### Timing of one block (cycles after the first word is issued)

```
 0 .. 119  words 0..119 issued (d_release on cycle 119, proc_done on 119)
 3 .. 122  words accumulated
 123       block_done: Z captured
 125 .. 177 53 output pieces of 24 bits, one per cycle, to the FIFO
```

The next block's words are issued from cycle 120 on, so consecutive blocks
overlap in the pipeline with no bubble.

## The block chain and the buffers

`block_buffer` takes nothing until `read_enable` pulses. It then stores the
next 6 valid bus words, the first one in the low bits. In the cycle it takes
the 6th word it raises `buffer_full` for one cycle. The signal is
combinational, so the next block (whose `read_enable` it is) takes the very
next word. The first block's read enable is the OR of the last block's
`buffer_full` and the start-chain pulse. The start-chain pulse fires once,
on the first valid ADC word after reset. That word itself is not collected.

The rotation takes exactly as long as a hash, so a block finishes
collecting on the same cycle that its extractor releases the previous
block. Each buffer therefore has two registers: the collection register and
the register D that the extractor reads. A finished collection moves into D
in the same cycle as the release. The sticky `overrun` flag would show a
collection that could not move in time; it never fires at the design rate.

## Front end: transport layer

Each ADC channel arrives on its own 256-bit JESD204C link (8 lanes of 32
bits). Link 0 carries CH1 and link 1 carries CH2. The transport layer:

1. reorders the lanes (`LANE_MAP`, identity by default);
2. treats each link's payload as a dense stream of 12-bit samples and cuts
   it into 20-sample words with a gearbox;
3. interleaves the two channels: round s occupies bits `[24s+23:24s]` as
   `{CH2 sample s, CH1 sample s}`.

A link carries 256 bits per cycle but only 240 are needed, so the links are
valid on average 15 cycles in 16 and output words come every cycle.

## Back end: FIFOs, aggregation and PCIe

Each extractor writes its 53 output pieces into a 24 × 128 FIFO. The
blocks finish at times staggered by 6 cycles. The aggregator waits until no
FIFO is empty, reads all 20 together, and forms a 480-bit vector with block
0 in the low bits. Vector t therefore holds piece t of each block's output
stream.

`pcie_cdc_channel` writes these vectors into a 16-deep dual-clock FIFO. On
the 250 MHz side a gearbox repacks them densely into 512-bit AXI4-Stream
words. The extracted stream is back-pressured all the way to the block
FIFOs and is never dropped. A second instance carries the raw 480-bit ADC
words for monitoring. The raw stream cannot stall the ADC, so it drops
words while the host is not reading and counts them in `raw_drop_count`.
The PCIe side can carry 128 Gbit/s, more than the 33.92 + 76.8 Gbit/s of
both streams together.

## `qrng_top` interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | 160 MHz ADC/extraction clock, async active-low reset |
| `pcie_clk`, `pcie_rst_n` | in | 1 | 250 MHz PCIe user clock and its reset |
| `link_data` | in | 2 × 256 | JESD204C link payload, link 0 = CH1 |
| `link_valid` | in | 2 | payload valid per link |
| `seed` | in | j + k_in = 4152 | public Toeplitz seed, shared by all blocks, stable in operation |
| `m_axis_rng_*` | out/in | 512 | extracted bits, AXI4-Stream |
| `m_axis_raw_*` | out/in | 512 | raw ADC words, AXI4-Stream |
| `err_overflow` | out | 1 | sticky: any overflow, overrun or output collision in the datapath |
| `raw_drop_count` | out | 32 | raw words dropped |

Bit order of the extracted stream: bit 0 of the first 512-bit word is bit 0
of block 0's output. Each run of 480 bits then holds 24 bits from each of
blocks 0..19 in turn, and output pieces follow in the order they were
shifted out of Z (low bits first).

## Parameters

All defaults are the full design. `qrng_top` parameters: `NB` (blocks =
samples per cycle, 20), `SMP_W` (12), `J` (1272), `K` (2880), `L_W` (256),
`LANES` (8), `OUT_W` (512), `FIFO_DEPTH` (128), `CDC_DEPTH` (16).
Constraints: K must be a multiple of NB·2·SMP_W, and J a multiple of 2·SMP_W.
The number of words per block, K/(2·SMP_W), must exceed 4 (the look-ahead
reload needs it). Elaboration assertions check these.

## Where this RTL goes beyond the source description

The stage structure, the formulas of the extractor, the look-ahead reload,
the read-enable/buffer-full daisy chain with its OR gate, the all-FIFOs-not-
empty aggregation and the asynchronous FIFO to a 250 MHz/512-bit PCIe side
all follow the published description. The following are this design's own
choices:

* the JESD204C frame layout (dense 12-bit samples), the lane count per link,
  which link is which channel, and the order of CH1/CH2 inside a round;
* pulse semantics of read enable and buffer full, and double buffering in
  the block buffer;
* the reload condition as an equality (see above), and the valid/release
  handshake between buffer and extractor;
* FIFO depths, the 480→512-bit repacking, the drop policy of the raw channel,
  the status outputs;
* a one-shot start-chain pulse.

Not included: dropping of ADC clipping codes and the decorrelating
rotation mentioned in the security analysis. How either would be done in
logic is not described, and dropping samples would break the fixed
6-words-per-block chain.

**Resource note.** This RTL registers the 24 × 1272-bit partial-product
array U_B in every block, so that three registers separate the generation
and accumulation stages. That is about 30.5 k flip-flops per block, and
about 0.9 M flip-flops for the design. The published implementation of the
same sizes reports 0.33 M flip-flops. So that implementation evidently
does not keep U_B as a full register. Merging the multiply and XOR-reduce
stages (`N_STAGES = 2`, with the reload condition following it) is the
obvious way to save this, but it has not been done here.

## Outside this RTL

* JESD204C PHY and link layer on the 16 GT transceivers: provides
  `link_data`/`link_valid`.
* PCIe x16 DMA engine and host driver: consume the two `m_axis_*` streams.
* Clock generation (MMCM) and the source of the public seed.
* ADC, detectors, optics and analog filtering.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | size | what it checks |
|---|---|---|
| `tb_toeplitz_extractor` | full | every output piece against the matrix formula, 120-cycle block period, 6-cycle output latency, contiguous output, a gap between blocks |
| `tb_block_buffer` | full | no data before read enable, word order, gaps in valid, full pulse position, hand-over on release, overrun flag |
| `tb_sync_fifo` | full | random traffic against a queue model, flags, overflow |
| `tb_parallel_block` | full | buffer + hash + FIFO under the chain's timing, against the reference hash |
| `tb_aggregator` | full | all-or-nothing reads, collation order, back-pressure |
| `tb_transport_layer` | full | scrambled lanes, link skew, every sample's position, one word per cycle |
| `tb_pcie_cdc_channel` | full | bit-exact 480→512 stream across 160/250 MHz, drop counting, no back-pressure at full input rate |
| `tb_qrng_top` | 4 blocks, j = 48, k_in = 192 | end to end over 40 rotations |
| `tb_qrng_top_full` | all defaults | end to end over 3 rotations (60 blocks, 149 PCIe words) |

The two end-to-end benches share `tb/qrng_top_tb_body.svh`. They compute
the expected extracted and raw PCIe streams from the generated samples and
compare every word. They check the net rate: exactly NB blocks finish in every k_in/b-cycle
window. They also count and require each mechanism: the start
pulse, chain wrap-around, Toeplitz init, look-ahead reload, back-to-back
buffer hand-over, aggregator waiting for a FIFO, back-pressure from the PCIe
side, raw drops and idle link cycles.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Itb \
    rtl/qrng_pkg.sv tb/tb_qrng_top.sv --top-module tb_qrng_top -Mdir obj_tb
./obj_tb/Vtb_qrng_top
```

The full-size end-to-end bench takes under a minute to build and under a
second to run.

How far to trust it: all of the above is checked in simulation only. The RTL
is written to be synthesizable, and its modules pass lint and elaboration.
It has not been placed and routed, and no timing closure at 160 MHz is
claimed. The widest logic is the 24-input XOR reduction over 1272 bits per
block, which the published implementation closes timing on.
