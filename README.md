# Six-core layered QC-LDPC decoder for the IEEE 802.11n rate-1/2 code

This is SystemVerilog for a high-throughput decoder of the rate-1/2,
length-1944 quasi-cyclic LDPC code of IEEE 802.11n. The throughput comes
from two levels of parallelism:

* **Inside a core**, all 81 check rows of a layer are processed at once, and
  the two halves of the node processing (a *global* pass that finds the
  check-node minima and a *local* pass that writes the new posteriors back)
  run on consecutive layers at the same time.
* **Across cores**, six identical cores decode six frames at once. Frames
  are dealt to the cores round robin and collected in the same order, so
  they leave in the order they arrived.

At 200 MHz one core decodes a 1944-bit frame in about 910 cycles
(≈ 427 Mb/s). Six cores reach about 2.5 Gb/s. The design follows the
architecture of the published USRP-2953R decoder (Mhaske et al., "A 2.48Gb/s
QC-LDPC Decoder Implementation on the NI USRP-2953R"). That design was
produced from a graphical dataflow description, and the publication gives
its structure, not its circuits. Everything below the block level is
therefore this design's own, and it is marked as such throughout.

## The code and how it is stored

The parity-check matrix H (972 × 1944) is built from a 12 × 24 *base
matrix* `HB` (in `ldpc_pkg`). Each entry of `HB` stands for an 81 × 81
block:

* `-1` means an all-zero block.
* `s` in 0..80 means an identity matrix cyclically shifted right by `s`.
  Check row `r` of the block then connects to variable `(r + s) mod 81` of
  its block column.

Each row of `HB` is one **layer**. The 81 checks of a layer share no
variable, so they can be updated in parallel. Only 86 of the 288 blocks
are non-zero, with 7 or 8 per layer. `beta_rom` turns each layer into two
short lists:

* the block columns of its non-zero blocks (the *block index* list);
* their shifts (the *block shift* list).

The decoder visits only the entries of these lists, one block per cycle.

The base-matrix values are those of the standard. The publication names
the code but does not print the matrix. If you need another 802.11n code
rate, change `HB`, `MB` and `MAX_DC` in `ldpc_pkg`. Other lifting sizes
(z = 27 and z = 54) also need a new `Z` in the package and a new table. The
rotator takes `Z` as a parameter. The cores and the packing and serialising
logic use the package constant, and the DRAM word layout assumes 81.

## Decoding algorithm (per core)

The decoder does layered decoding with normalised min-sum. All 81 lanes run
in parallel, and every layer is handled in two passes.

**Global pass (GNPU).** For each non-zero block of the layer, in list
order:

```
P  = posterior block of the block column, rotated left by s  (qc_rotator, DIR=0)
Q  = sat(P - R_old)                 R_old: this layer's message from last iteration
track per lane: min1 = min|Q|, min2 = 2nd min|Q|, idx = position of min1, sign(Q)
```

After the last block, the lane state is scaled by 3/4
(`m - (m >> 2)`) and handed over. It goes to the local pass, and it is also
stored as the layer's new compressed message set (`rmem`).

**Local pass (LNPU).** For each block of the same layer, in the same order:

```
R_new = (pos == idx ? min2 : min1) with sign = XOR of all other signs of the row
P     = sat(Q + R_new), rotated right by s back to natural order (DIR=1)
```

The `Q` values are passed from the global to the local pass through a
16-entry buffer, which holds two layers.

The number formats are this design's choice:

* channel LLRs are 10 bits wide;
* posteriors and Q values are 12 bits, saturated symmetrically to ±2047;
* message magnitudes are 11 bits.

On the first iteration `R_old` is taken as zero. There is no early
termination: every frame runs `MAX_ITER` iterations (default 7), so the
latency is fixed. The hard decision of a bit is the sign of its final
posterior (1 = negative).

## The overlapped schedule and its hazard

The heart of the core is the overlap of the two passes. The global pass of
layer *l + 1* runs while the local pass of layer *l* writes back.
Consecutive layers share block columns, though (column 0, 4 and 8 sit in
almost every layer). So the global pass may want a posterior that the local
pass has not yet updated.

`ldpc_core` keeps a **scoreboard**, one bit per block column:

* the bit is set when the global pass reads the column;
* it is cleared when the local pass writes the column back.

A global-pass read of a column whose bit is set stalls (`hazard_stall`).
The decoder therefore computes exactly what a plain, non-overlapped
layered decoder computes, only faster. The testbenches rely on this: they
compare the hardware bit for bit against a straightforward reference
decoder.

For this matrix the stalls cost about 37 cycles per iteration, so an
iteration takes about 123 cycles against 86 without stalls and 172 with no
overlap at all.

A second interlock (`handoff_stall`) stops the global pass from finishing a
layer while the local pass is still busy with the previous one. With this
matrix it never fires, because the hazard stalls always delay the global
pass enough. It is kept for other matrices.

The published design states that up to six layers could be kept in flight
for this code. This core keeps two (one per pass). Reordering the blocks
within each layer, or forwarding a freshly written posterior straight into
the global pass, would remove most of the stalls. Neither is done here.

Per core timing, in cycles:

| phase | cycles |
|---|---|
| load 24 LLR blocks | 24 |
| 7 iterations (86 blocks each + hazard stalls) | 862 |
| unload 24 hard-decision blocks | 24 |
| **frame period** | **≈ 910 → 1944 bits × 200 MHz / 910 ≈ 427 Mb/s** |

A core does not buffer a second frame: it accepts the next frame only after
the previous one has been unloaded.

Storage per core:

* posteriors: 24 × 81 × 12 bits;
* compressed messages: 12 layers × 81 lanes × 33 bits (two 11-bit minima,
  a 3-bit index and 8 sign bits);
* Q buffer: 16 × 81 × 12 bits.

All of it is plain arrays, which a synthesis tool may map to LUT RAM or
registers.

## The multi-core system

`ldpc_decoder_top` wires the data path in seven steps. The host DMA engines
and the DRAM are outside the design and are reached through ports.

| step | module | what happens |
|---|---|---|
| 1 | `dma2dram_pack` | Host words of 30 bits (three LLRs) arrive, 27 per block. Five zero words pad each block to 96 LLRs, and the words are packed eight at a time into 240-bit DRAM words: 4 per block, 96 per frame. `dram_words` counts the words written. |
| 2 | `dram_req_gen` | Reads a block back (4 words) once it is fully written. It does not start a new block while `stop_decode` is set, while `dma_return_mgr` withholds permission, or while the block buffer lacks room for it and the blocks already requested. |
| 3 | `dram_unpack` + `sync_fifo` | Joins 4 DRAM words, drops the padding, and stores the 810-bit block (81 LLRs × 10 bits) in a 32-entry buffer. |
| 4 | `rr_split` | Sends all 24 blocks of a frame to one core, and the next frame to the next core, wrapping after `num_cores` cores. |
| 5 | `ldpc_core` + `sync_fifo` ×6 | Decode. Each core has a 32-entry buffer of 81-bit hard-decision blocks, which holds one frame. |
| 6 | `rr_join` | Takes 24 blocks from one core, then moves on, in the same order as the split. |
| 7 | `hd_serializer`, `dma_return_mgr` | Each 81-bit block leaves as two 64-bit words: bits 40:0, then bits 80:41, zero-padded (48 words per frame). `blocks_en_route` counts blocks requested from DRAM but not yet returned. New requests are allowed while this count is below `retrieval_rate`. |

The word sizes in steps 1, 3 and 7 match the published design. The
following are this design's own choices:

* the bit orders within words, and where the padding goes;
* the credit rules in step 2;
* the runtime `num_cores` input, which runs the 1- to 6-core configurations
  of the original study on one netlist;
* the reading of `retrieval_rate` as an in-flight limit. The published
  design only names this value.

The system assumes the following about its surroundings:

* DRAM reads return in request order, with any latency and no
  back-pressure. The requester's credit rule keeps the block buffer from
  overflowing, and an assertion in `dram_unpack` checks this.
* `num_cores` may change only while the decoder is empty.
* The sustained rate is bounded by the decoding, not by the plumbing. One
  core needs a frame per ~910 cycles. DRAM read-back needs 96 cycles per
  frame, and the return path needs 48. The host input of one 30-bit word
  per cycle, however, carries only 3 LLRs per cycle (about 600 Mb/s). So
  the full 2.5 Gb/s is reached when frames are already staged in DRAM, or
  when the host interface is wider.

## Interfaces of the top

All handshakes are valid/ready: a transfer happens on a rising clock edge
when both are high. The reset `rst_n` is asynchronous and active low.

| port group | width | direction |
|---|---|---|
| `h2t_valid/ready/data` | 30 (three signed 10-bit LLRs, LLR k in bits 10k+9:10k; positive = bit 0 more likely) | in |
| `dram_wr_valid/ready/addr/data` | 32-bit word address, 240-bit data | out |
| `dram_rd_valid/ready/addr`, `dram_rdata_valid/rdata` | request out, data in | out/in |
| `t2h_valid/ready/data` | 64 | out |
| `num_cores` (1..6), `stop_decode`, `retrieval_rate` (blocks) | 8, 1, 16 | in |
| `dram_words`, `blocks_en_route`, `core_busy`, `core_hazard_stall` | 32, 32, 6, 6 | out |

Within a frame, blocks go in block-column order 0..23, and LLR `r` of a
block belongs to code bit `81·block + r`. The first 972 code bits are the
information bits.

## Verification

Every module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. The decoder tests share `ldpc_tb_pkg`,
which provides:

* an encoder for the code (it uses the dual-diagonal parity part);
* a syndrome check;
* a noisy BPSK channel that produces 10-bit LLRs;
* a reference layered min-sum decoder. It stores every edge message in
  full, uses no compression and no overlap, and has the same number
  formats.

The main tests:

* `ldpc_core_tb` checks one core on six frames. The hard decisions must
  equal the reference bit for bit, and clean or mildly noisy frames must
  decode to the sent codeword. The decode time must be at least 7 × 86
  cycles and at most 1.5 times that, and the frame period must meet
  420 Mb/s.
* `ldpc_decoder_top_tb` checks the whole system at its default size, with a
  behavioural DRAM (`dram_model`) that adds latency and random
  back-pressure. First it stages 12 frames under `stop_decode` and measures
  the steady-state rate: 6 frames per 909 cycles, i.e. about 2.57 Gb/s at
  200 MHz. Then it switches to 3 cores with an in-flight limit of 40
  blocks, and streams 6 frames with host gaps, return-side back-pressure
  and a `stop_decode` pulse. Every frame must match the reference and come
  back in order. Each of these mechanisms must occur at least once:
  * the hazard stall;
  * every core in use;
  * the stop pause;
  * the in-flight limit;
  * a full block buffer;
  * the mode switch;
  * output back-pressure.

`ldpc_ber_tb` sweeps one core over Eb/N0, with 150 frames
(145,800 information bits) per point. An Eb/N0 of 1.0 dB is where the coded
curve crosses uncoded BPSK.

| Eb/N0 | 0.5 dB | 1.0 dB | 1.5 dB | 2.0 dB | 2.5 dB |
|---|---|---|---|---|---|
| decoded BER | 1.3e-1 | 6.2e-2 | 7.2e-3 | 1.5e-4 | 0 |
| uncoded BPSK | 6.7e-2 | 5.6e-2 | 4.6e-2 | 3.8e-2 | 3.0e-2 |

Rates below about 1e-5 would need far longer runs.

Running a test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/ldpc_pkg.sv tb/ldpc_tb_pkg.sv rtl/*.sv tb/dram_model.sv \
  tb/ldpc_decoder_top_tb.sv --top-module ldpc_decoder_top_tb
./obj_dir/Vldpc_decoder_top_tb
```

The build takes under a minute and the run takes a few seconds. For a unit
test, list `ldpc_pkg.sv`, the module and its `_tb` file.

## Where this departs from the original, and what is missing

* **Only z = 81 is built.** The original core also handled z = 27 and 54
  (code lengths 648 and 1296). Those modes need their own base matrices and
  a modulo-27/54 rotator.
* **Arithmetic.** The original publication does not state the iteration
  count, the word widths, or the min-sum correction. The values used here
  (7 iterations, 10/12/11-bit words, scaling by 3/4) are chosen so that one
  core meets the published 420 Mb/s at 200 MHz. The error-rate curve will
  therefore not match the published one exactly.
* **Pipeline depth.** Two layers are in flight, not up to six, and
  read-after-write conflicts are resolved by stalling. The result is exact
  layered decoding.
* **The DMA engines, the DRAM and the host are external.** Only their
  handshakes are modelled. The word formats on those ports follow the
  published design's notes, but the bit orders are assumptions.
* **Step 2's exact gating logic and the return manager's rule are
  interpretations.** The original shows them only as labelled boxes.
* **The baseline design is not included.** This is the non-overlapped
  decoder the original used for comparison.
