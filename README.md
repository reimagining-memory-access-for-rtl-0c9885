# Bit-plane compression lanes for LLM weights and KV cache

Large language model inference spends most of its memory traffic on two kinds
of data: the model weights and the key/value (KV) cache. Both are floating-point
tensors (BF16 here; weights may also be FP8 or INT4), and stored the usual way, one 16-bit number after another,
they compress badly. Sign, exponent and fraction bits are interleaved, so a
byte-oriented compressor such as LZ4 sees near-random bytes.

This RTL implements a memory-controller extension that changes how those
tensors are laid out in DRAM, so that they compress well and so that reading
them at reduced precision costs proportionally less traffic. It follows the
design of *Reimagining Memory Access for LLM Inference: Compression-Aware
Memory Controller Design* (Xie et al.). It rests on three ideas:

1. **Bit-plane disaggregation.** A block of values is stored as 16 bit-planes.
   Plane *i* holds bit *i* of every value in the block. The exponent planes of
   real weights and activations are highly repetitive and compress well; the
   low fraction planes are close to random and do not.
2. **Cross-token KV clustering with exponent deltas.** A KV channel varies
   little from token to token. The KV cache is therefore regrouped by channel
   across a group of tokens. Each exponent is then replaced by its difference
   to the channel's smallest exponent in the group. Most of these deltas are
   tiny, so the high exponent planes become almost all zeros.
3. **Precision-proportional reads.** Planes are stored most-significant first.
   A read at K-bit precision fetches only the first K compressed planes, which
   form one contiguous address range. DRAM traffic therefore shrinks with the
   precision the compute side asks for. Dynamic quantization (e.g. BF16 for
   important experts or KV pages, FP8 or FP4 for the rest) then saves
   bandwidth and energy, not just arithmetic.

Everything happens inside the controller. The compute fabric writes and reads
ordinary blocks of numbers. It only tells the controller whether a block is
weights or KV cache, its element format, and how many planes (bits of
precision) a read needs.

## Data path of one lane

```
 write:  wdata (16 x BF16 / cycle)
           |                     KV cache only
           +--> kv_cluster  ---- channel-major order, exponent -> exponent - beta_j
           |         |           (beta_j kept for the header)
           v         v
         bitplane_aggregator     16 plane buffers of 4 KB, planes out P15 first
           |
         lz4_encoder             one 4 KB plane -> one LZ4 block
           |
         memory write port       header + compressed P15 .. P0, back to back

 read (K planes):
         memory read port        header, then one range = first K compressed planes
           |
         lz4_decoder             one LZ4 block -> one 4 KB plane
           |
         bitplane_deaggregator   planes not read are zero
           |
           +--> kv_restore  ---- exponent = beta_j + delta, back to token order
           v         v
         rdata (16 x BF16 / cycle)
```

`cmc_top` puts `LANES` (32) such lanes (`cmc_lane`) side by side. The lanes
are independent. Each has its own host ports and its own port toward the
conventional DRAM controller. The paper's figures are 2 GHz, 32 lanes and
512 Gbit/s per lane (2 TB/s in total). The 256-bit beat width of this RTL
(16 BF16 values per cycle) comes from those figures. The bit-plane and KV
buffers run at that rate. The LZ4 engine does not (see "Throughput").

## Bit-planes

Bit numbering follows the usual convention: bit 15 is the BF16 sign, bits
14..7 the exponent, bits 6..0 the fraction. Plane *P_i* collects bit *i*, so
P15 is the sign plane and "top 8 bits" means planes 15..8. (One figure of the
paper draws the sign plane as P0. The text's numbering is the one used here.)

A block holds `NVALS` = 32768 values, so each plane is 32768 bits = 4 KB.
That is the upper end of the 1–4 KB plane buffers the paper mentions, and
equal to the 4 KB compression block its compression results use. Inside
`bitplane_aggregator` there are 16 plane memories of 128 words of 256 bits.
Input beat *b* (values 16b..16b+15) writes a 16-bit slice into every plane
memory: slice *b mod 16* of word *b/16*. In plane word *w*, bit *k* is
therefore bit *i* of value 256w+k. Bytes of a plane, as seen by the
compressor, are taken from the low end of each word first.

The aggregator first fills (NVALS/16 = 2048 cycles, one beat per cycle). It
then drains all 16 planes, MSB plane first (16 × 128 = 2048 cycles). It is a
single buffer, not a ping-pong pair, so it does not fill and drain at the same
time. `bitplane_deaggregator` is the mirror image. It takes plane words tagged
with their plane number and remembers which planes arrived. When the word
flagged `in_last` has arrived, it emits the block, reading every missing
plane as 0. A K-plane read therefore returns each value truncated to its top
K bits.

### FP8 and INT4 weight blocks

Models that were already quantized before storage keep 8-bit (FP8, e.g.
e4m3) or 4-bit (INT4) weights. The command's `fmt` field selects this per
block. A block still holds 32768 elements, but a beat now carries 32 or 64 of
them (element *k* in bits [W·k+W−1 : W·k]), so the block is 1024 or 512 beats.
There are only 8 or 4 planes (P7..P0 or P3..P0), each again 4 KB. Each plane
word is built from 8 or 4 beats instead of 16. The plane memories are
therefore split into 16-bit chunks, and a beat writes 1, 2 or 4 chunks of
every plane. The deaggregator reads whole plane words and shifts out the 16,
32 or 64 bits of the current beat. The header keeps its 16 slots; the slots
of the planes a narrow block lacks hold 0. A read must name the same `fmt`
as the write, and `nplanes` may not exceed the format's plane count. KV
blocks are always BF16, and an assertion checks this. The paper evaluates
such models with the same bit-plane placement. How the hardware handles the
narrower elements is this design's own choice.

## KV clustering and the exponent delta

A KV block is a group of `NTOK` = 32 tokens, each with `NCH` = 1024 channels.
That is one layer's K (or V) vector of LLaMA 3.1 8B: 8 KV heads × 128
dimensions. 32 × 1024 = 32768 values, exactly one block. The host sends the
group token by token (16 consecutive channels of one token per beat).

`kv_cluster` does two things while the group arrives:

* **Base exponent.** For every channel *j* it keeps the running minimum
  exponent, `beta_j`. The 16 minima for the 16 channels of a beat form one
  memory word, updated read-modify-write once per beat. The paper allows the
  minimum or the most common exponent. The minimum is used here, so the delta
  `exponent - beta_j` is never negative and fits the 8-bit exponent field. The
  transform is therefore lossless.
* **Transpose.** The group leaves channel-major: channel 0's 32 values, then
  channel 1's, and so on, 16 tokens per beat. In each value the exponent field
  is replaced by the delta; sign and fraction pass unchanged. Fed through the
  bit-plane aggregator, this order gives exactly the "concatenated bit-planes"
  layout: plane *i* of the block is P_i(G_0) followed by P_i(G_1), and so on.

The transpose is the least obvious piece of hardware (`skew_transpose`). A beat
written by rows (one token, 16 channels) and a beat read by columns (one
channel, 16 tokens) must each touch 16 different single-ported memories. The
buffer therefore has 16 banks of 16-bit elements. Element (row *r*, column *c*)
goes to bank `(r + c) mod 16`, at address `r·(COLS/16) + c/16`. The 16
elements of a row chunk lie in 16 consecutive banks starting at `r + c0`. The
16 elements of a column chunk lie in 16 consecutive banks starting at
`c + r0`. Both ports move a full beat per cycle; a rotation by the starting
bank puts the elements back in order. The same helper, with rows and columns
swapped, does the reverse transpose in `kv_restore`.

On a read, `kv_restore` first receives the 1024 base exponents from the block
header. It then adds `beta_j` to every exponent while writing the channel-major
stream into its transpose buffer, and emits the group token by token.

With a reduced-precision KV read the truncation applies to the stored form.
With K ≥ 9 planes the exponent delta is complete and only fraction bits are
dropped. With fewer planes the low delta bits are zero, and the restored
exponent is `beta_j + truncated delta`, i.e. rounded down towards the channel
minimum. The paper does not say how these two mechanisms interact; this is
the behaviour of this RTL.

## Block layout in memory and reduced-precision reads

A stored block at byte address `base`:

| offset            | content                                                     |
|-------------------|-------------------------------------------------------------|
| 0 .. 31           | 16 compressed plane lengths, 2 bytes each, little-endian, plane 15 first |
| 32 .. 32+NCH-1    | KV blocks only: `beta_j`, one byte per channel              |
| HDR ..            | LZ4 block of P15, then P14, ..., then P0, with no gaps      |

`HDR` is 32 for weights and 32 + NCH = 1056 for KV blocks. A read with
`nplanes` = K first loads the header. It then requests the single range
`[base+HDR, base+HDR+len15+...+len(16-K))` and decodes the planes one after
the other. The bytes moved are reported in `resp_bytes`:

```
write:        HDR + sum of all 16 compressed lengths
read of K:    HDR + sum of the K most significant compressed lengths
```

The header format, the 2-byte lengths and the placement of the base exponents
are this design's choice. The paper says only that plane metadata and one base
exponent per channel are stored with each block.

## LZ4 engine

The paper uses LZ4 or ZSTD as the block compressor and reports their area and
power, but does not describe their insides. This RTL contains a plain LZ4
block codec, one plane (4 KB) per LZ4 block. Its output is the standard LZ4
block format, and the testbenches check it against an independent
software-style decoder.

* `lz4_encoder` loads the plane (32 bytes per cycle) into a buffer. It then
  walks it one position per cycle: it hashes the next 4 bytes (multiplicative
  hash, 1024-entry table of last positions), records the position, and checks
  the candidate for a real 4-byte match. A match is extended one byte per
  cycle and emitted as an LZ4 sequence: token, literal-length extension bytes,
  literals, 2-byte offset, match-length extension bytes. The standard block
  end rules are kept: no match starts in the last 12 bytes, and the last 5
  bytes are literals. The hash table is never cleared. A stale entry is only a
  candidate and is always verified against the buffer.
* `lz4_decoder` parses sequences one byte per cycle, copies matches from a
  4 KB history (overlapping copies work because the copy is byte-serial), and
  packs the output into 256-bit plane words. The end of the block is found
  from the compressed length in the header.

An incompressible plane grows by at most the LZ4 literal overhead (about 17
bytes per 4 KB). It is stored compressed anyway; there is no raw fallback.

## Throughput

| part                                          | rate per lane at 2 GHz          |
|-----------------------------------------------|---------------------------------|
| host beats, bit-plane and KV buffers          | 256 bit/cycle = 512 Gbit/s      |
| LZ4 encoder                                   | ≤ 1 input byte/cycle = 16 Gbit/s |
| LZ4 decoder                                   | 1 output byte/cycle = 16 Gbit/s  |
| memory port                                   | 1 byte/cycle                    |

The 512 Gbit/s per lane of the paper's engines is therefore met by the data
rearrangement, but not through compression. A wide LZ4 or ZSTD engine would
replace `lz4_encoder`/`lz4_decoder` behind the same stream interfaces.

## Interfaces

All streams are valid/ready: a transfer happens on a clock edge where both are
high. Reset (`rst_n`) is asynchronous and active low. It clears control state,
not buffer contents.

Host side of a lane (`cmc_top` carries each as an array indexed by lane):

| port | meaning |
|------|---------|
| `cmd_valid/cmd_ready/cmd` | `cmd_t` = {op (write/read), kind (weight/KV), fmt (BF16/FP8/INT4), 40-bit byte address `base`, `nplanes` 1..16 (at most 8 for FP8, 4 for INT4)}; `cmd_ready` is high when the lane is idle |
| `wdata_*` (256 b) | after a write command: the beats of the block, 2048 for BF16, 1024 for FP8, 512 for INT4. KV blocks are sent token by token. |
| `rdata_*` (256 b), `rdata_last` | after a read command: the beats of the block, at the requested precision |
| `resp_valid`, `resp_bytes` | one-cycle pulse at the end of each command, with the bytes it moved to or from memory |

Memory side (toward the conventional DRAM controller, which is not part of
this design):

| port | meaning |
|------|---------|
| `mw_valid/mw_ready/mw_addr/mw_data` | byte write |
| `mr_req_valid/mr_req_ready/mr_req_addr` | byte read request |
| `mr_resp_valid/mr_resp_data` | read data, in request order, no backpressure |

Because responses cannot be stalled, a lane only issues a read request when a
slot in its 16-entry response FIFO is reserved for the answer (credit count).
An assertion in `sync_fifo` checks that the FIFO never overflows. One block is
in flight per lane at a time.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `LANES` | 32 | paper (32 lanes) |
| beat width | 256 bits | paper (512 Gbit/s per lane at 2 GHz) |
| element | BF16, 16 planes; weights also FP8 (8) or INT4 (4), per command | paper (BF16 weights and KV cache; FP8 and INT4 models) |
| `NVALS` | 32768 (4 KB per plane) | chosen within the paper's 1–4 KB plane buffers / 4 KB block |
| `NTOK` × `NCH` | 32 × 1024 | chosen; the paper leaves the group size open |
| LZ4 hash table | 1024 entries | chosen |
| `ADDR_W` | 40-bit byte address per lane | chosen |
| response FIFO | 16 entries | chosen |

`NVALS` must equal `NTOK × NCH`. `NTOK` and `NCH` must be multiples of 16 and
at least 32. Other compression block sizes the paper evaluates (16384 and
65536 bits) correspond to `NVALS` = 16384 and 65536.

## What this RTL does not cover

* **ZSTD.** Only LZ4 is implemented. ZSTD's entropy coding stages are a
  separate standard whose internals the paper does not give.
* **Engine throughput.** See "Throughput": compression runs at one byte per
  cycle per lane.
* **Narrow KV cache.** KV blocks are BF16 only, as in all the paper's KV
  results; FP8/INT4 apply to weight blocks.
* **DRAM, its scheduler and PHY**, and the compute fabric, are outside the
  design. Testbenches use a behavioural byte memory (`tb/dram_model.sv`) with
  fixed latency and random stalls.
* **Per-plane choice of compressor.** The paper notes that high-order planes
  deserve more aggressive compression than low-order ones. Here every plane
  goes through the same LZ4 engine.
* **Pruning** (0-bit precision) is left to the host, which simply does not read
  the block.
* Fill and drain of the plane and KV buffers alternate rather than overlap.
  Per-lane buffering is 4 × 64 KB plus 8 KB for the LZ4 codec, about 264 KB
  per lane.

## Verification and simulation

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Expected values are always computed inside
the testbench, not taken from the design:

| testbench | what it checks |
|-----------|----------------|
| `tb_bitplane_aggregator` | plane transpose of random BF16, FP8 and INT4 blocks, plane order, flags, 1 beat/cycle fill and drain |
| `tb_bitplane_deaggregator` | reconstruction from the top 16, 8, 3 (BF16), 8, 5 (FP8) and 4, 2 (INT4) planes, zero fill, rate |
| `tb_kv_cluster` | channel-major order, minimum exponent per channel, deltas, rates |
| `tb_kv_restore` | exponent restore and token-major order |
| `tb_lz4_encoder` | round trip through an independent LZ4 decoder (`tb/lz4_ref.sv`) for zero, random, patterned, sparse and run-length planes; compression and bounded expansion |
| `tb_lz4_decoder` | decoding of LZ4 blocks made by an independent brute-force encoder, with long literal runs and overlapping matches |
| `tb_cmc_lane` | weight and KV blocks stored and loaded at 16, 9, 8 and 3 planes, FP8 and INT4 blocks at 8, 5 and 4, 2 planes; header contents; traffic accounting |
| `tb_cmc_top` | 4 lanes in parallel, end to end, counting that every mechanism occurs (writes, full and partial reads, DRAM stalls, credit throttling, host backpressure, LZ4 matches and length extensions, decoder copies, FP8/INT4 blocks) |
| `tb_cmc_top_full` | the same at full size: 32 lanes, 64 KB blocks, all defaults (a few minutes) |
| `tb_workload_dynquant` | one full-size lane: bell-shaped BF16 weights read as BF16/FP12/FP8/FP6/FP4 and a 32 x 1024 KV block read at 16, 8 and 4 planes, an FP8 and an INT4 weight block; values, traffic = header + top-K planes, traffic falling with precision |

To run one with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl \
    rtl/cmc_pkg.sv tb/tb_cmc_top.sv --top-module tb_cmc_top -Mdir obj_top
./obj_top/Vtb_cmc_top
```

The test data is synthetic: weights with exponents in a narrow band, and KV
channels whose exponents vary by at most 2 across tokens. On it, a
2048-value weight block is stored in 3172 of 4096 bytes, and a KV block in
2742 bytes including its 96-byte header (plane lengths plus 64 base exponents). An 8-plane read of the
weight block moves 1108 bytes instead of 3172. These numbers show the
mechanisms working; they are not a measurement on real model data.

At full size (`tb_workload_dynquant`), a 32768-value weight block drawn from
a bell-shaped distribution (standard deviation 0.02) is stored in 49766 of
65536 bytes (ratio 1.32); reading it as FP12, FP8, FP6 and FP4 moves 67%,
34%, 17% and 8.5% of the bytes of a full read. A KV block whose channels each
keep their own magnitude and sign, varying by +/-30% across tokens, is stored
in 35655 bytes (ratio 1.84, including a 1056-byte header); an 8-plane read
moves 2881 bytes. FP8 and INT4 blocks from similar data hardly compress
(32754 of 32768 and 16488 of 16384 bytes), which agrees with the paper's
observation that already-quantized weights have little redundancy left. With real activations the low planes of the delta carry
more information and these numbers will differ.
