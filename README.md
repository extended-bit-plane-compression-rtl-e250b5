# Extended bit-plane compression of CNN feature maps — RTL

Accelerators for convolutional neural networks spend much of their energy moving
intermediate feature maps to and from external DRAM. Those feature maps have two
exploitable properties: after a ReLU many values are exactly zero, and they come in
long bursts when the tensor is streamed in NCHW order; and the non-zero values that
remain are smooth, so neighbouring values are close to each other.

This design is a small streaming compressor that uses both. The zero/non-zero
pattern of the stream is run-length coded, and the non-zero values alone are
coded in blocks with *bit-plane compression* (BPC): differences between neighbours,
viewed bit-plane by bit-plane, XORed with the neighbouring plane, and then coded
with a handful of short symbols. The encoder needs a few hundred bits of state and
no code book, and it takes one value per clock cycle.

The scheme and its parameters follow the published description of extended
bit-plane compression (Cavigelli and Benini, ETH Zurich). Handshakes, end-of-stream
handling, the output buffer and the exact bit ordering are choices of this
implementation, listed in [Departures and choices](#departures-and-choices).

## Data flow

```
                 +--------------+     +-----------+
 value stream -->| nonzero_detect|--->| zero_rle  |--------------------+
  (M bits)   |   +--------------+     +-----------+                    v
             |                                                    +------------+
             |   if non-zero   +--------------+  +-----------------+| bit_packer |--> OUT_W-bit
             +---------------->| bpc_delta_sr |->| bpc_block_encoder||  (buffer)  |    words
                               +--------------+  |  dbp_enc_unit x  |+------------+
                                                 |  (M+1), bp_zero_rle |
                                                 +-----------------+
```

`bpc_compressor` wires these together. The top level, `bpc_codec`, places the
compressor (write path: values in, compressed words out) next to a
`bpc_decompressor` (read path: compressed words in, values out). In an accelerator
both would sit between the feature-map memory and the DMA engine that talks to
DRAM; the DMA engine itself is not part of this design.

## The code

### Stream level: Zero-RLE

Every value contributes one flag, zero or non-zero.

* a non-zero value is sent as a single `1`;
* a burst of `k` zeros (1 ≤ k ≤ MAX_ZB) is sent as `0` followed by `k-1` on
  `clog2(MAX_ZB)` bits (4 bits for the default MAX_ZB = 16);
* a burst longer than MAX_ZB is sent as several symbols: a symbol goes out as soon
  as MAX_ZB zeros have been counted.

Bursts longer than one value are frequent in ReLU outputs, which is why a burst of
16 costs 5 bits instead of 16. A maximum of 16 is the best trade-off measured for
8, 16 and 32-bit data.

### Block level: bit-plane compression of the non-zero values

The non-zero values are grouped into blocks of N (default 16). For one block with
words `w0 … w15` of M bits (default 16):

1. **Base and deltas.** `w0` is the base. Delta `j` is `w(j+1) - wj`, computed on
   M+1 bits with the words taken as unsigned, so every difference is exact.
2. **Delta bit-planes (DBP).** The N-1 deltas are seen as M+1 planes of N-1 bits:
   plane `i` collects bit `i` of every delta, bit `j` of the plane from delta `j`.
3. **XOR with the plane above (DBX).** `DBX_i = DBP_i ^ DBP_(i+1)` for
   `i < M`; the top plane `DBP_M` (the sign plane) is kept as it is. Small negative
   deltas have long runs of leading ones; after the XOR they look like small
   positive ones, mostly zero bits.
4. **Plane codes.** The planes are sent from the top (`DBP_M`) down to `DBX_0`,
   after the base word (M bits, uncoded). Each plane gets the first matching code:

| plane pattern                                   | code                            | bits (M=N=16) |
|------------------------------------------------|---------------------------------|---------------|
| run of L ≥ 2 consecutive all-zero planes        | `01` + (L-2) on clog2(M) bits   | 6             |
| a single all-zero plane                         | `001`                           | 3             |
| DBX all ones                                    | `00000`                         | 5             |
| DBX ≠ 0 and the plane's own DBP = 0              | `00001`                         | 5             |
| exactly two adjacent ones                       | `00010` + index of the lower one| 9             |
| exactly one one                                 | `00011` + its index             | 9             |
| anything else                                   | `1` + the N-1 DBX bits, bit N-2 first | 16      |

A zero run can cover all M+1 planes, which is how a block of equal values (or an
arithmetic ramp with step 0) costs only the base and 6 bits. Indices are
`clog2(N-1)` bits wide.

A decoder reverses the planes top-down: `DBP_M = DBX_M`, then
`DBP_i = DBX_i ^ DBP_(i+1)`, except that code `00001` means `DBP_i = 0` (and so
`DBX_i = DBP_(i+1)`).

### Interleaving and end of stream

The stream is a sequence of Zero-RLE symbols in input order. Right after the
`1` of the N-th non-zero value of a block, the coded block follows. A decoder
therefore reads Zero-RLE symbols, counts the `1`s, and after every N-th reads one
block.

When the value flagged `in_last` is taken:

* a pending zero burst is sent with it;
* if a block is partly filled (k of N values), it is completed with zero deltas
  (as if its last value were repeated) and sent; the decoder knows the stream
  length and so how many of the block's values are real;
* the last output word is padded with zeros and flagged `out_last`.

Bits are sent first-bit-first from the MSB of each `OUT_W`-bit output word.

## Hardware

### `bpc_delta_sr` — the state of the bit-plane encoder

The base register (M bits), the previous-value register (M bits), one subtractor
and a shift register of N-1 deltas of M+1 bits: 16 + 16 + 15·17 = 287 bits for the
defaults, which is the whole of the encoder's block storage. A block of N words
is collected in N accepted non-zero values; `full` then stays high until the block
has been handed to the packer. The next non-zero value may arrive in that same
cycle and becomes the new base.

### `bpc_block_encoder`, `dbp_enc_unit`, `bp_zero_rle` — coding a block in one cycle

The encoder has one `dbp_enc_unit` per plane (M+1 of them). Each XORs its plane
with the plane above and picks its code; `bp_zero_rle` looks at the `is_zero`
flags of all planes, places a run symbol at the top plane of each run of zero
planes and empties the slots of the planes below it in the run. The block encoder
then concatenates base and the M+1 slots with a chain of shifters into one
left-aligned vector of up to `M + (M+1)·SW` bits (288 for the defaults, SW = 16
being the widest plane code). All of this is combinational and reads the delta
registers directly, so a block is coded in the cycle after its last value arrived.

### `bit_packer` — buffer and packer

A BUF_W-bit register (default 512) holding the not-yet-sent bits at its top. Each
cycle it can append two symbols behind them — first the coded block, then the
Zero-RLE symbol of the value accepted in the same cycle, which is the order the
format requires — while the top OUT_W bits (default 32) leave as an output word.
Outside a flush a word is offered only while more than OUT_W bits are held, so
there is always something left to carry `out_last`.

### `bpc_compressor` — flow control

* `in_ready` is high in normal operation while the buffer has room for one Zero-RLE
  symbol. A completed block needs room for a worst-case block (288 + 6 bits); until
  then the block waits and no input is taken (stall).
* After `in_last` a small state machine pads the open block (`S_PAD`, one zero
  delta per cycle), lets it be coded, and flushes the buffer (`S_FLUSH`) until the
  word with `out_last` has been taken; then the next stream may start.
* Throughput: with an always-ready output one value is taken every cycle for any
  data, since a block adds at most 288 + 16 bits per 16 values and 32 bits leave per
  cycle. Stalls only arise when the output is held back.
* Registers: 287 bits of block state, 4 bits of zero counter, 512 + 10 bits of
  buffer and fill level, 2 bits of state (about 820 flip-flops).

All registers use a synchronous, active-low reset `rst_n`.

### `bpc_decompressor` — the read path

The decoder keeps a 64-bit bit window, refilled from 32-bit input words, and
decodes one symbol per cycle with a small state machine:

* `S_RLE` reads Zero-RLE symbols. For each `1` it stores how many zeros came
  before that non-zero value (one counter per block position). After N `1`s, or
  when the stream length is reached with `1`s still open, a block follows.
* `S_BASE` reads the M-bit base, `S_PLANE` reads one plane symbol per cycle from
  the top plane down and rebuilds `DBP_i` from the plane above (a run of zero
  planes takes one cycle per plane).
* `S_OUT` emits, for each block position, its zeros and then its value
  (value 0 is the base, value k+1 = value k + delta k, modulo 2^M); `S_TAIL`
  emits the zeros after the last non-zero value; `S_DRAIN` drops the padding up to
  the word flagged `in_last`.

Because the compressor pads the final block and the final word, the decoder is
given the number of values in the stream (`stream_len`). Output comes in bursts:
the values of a block are only known once its last plane has been read. The
decoder's storage is the block under reconstruction (N words of zero counts and
M+1 planes of N-1 bits) plus the window.

## Parameters

| parameter | default | meaning                                   | where it comes from |
|-----------|---------|-------------------------------------------|---------------------|
| `M`       | 16      | word width                                | 16-bit fixed point is the main data type studied |
| `N`       | 16      | BPC block size in non-zero words (≥ 3)    | best compression across AlexNet layers; 8 is a cheaper alternative |
| `MAX_ZB`  | 16      | longest zero burst per Zero-RLE symbol (≥ 2) | best value for 8/16/32-bit words |
| `OUT_W`   | 32      | output word width                         | own choice |
| `BUF_W`   | 512     | packer buffer                             | own choice; must be ≥ `M+(M+1)·max(N,5+clog2(N-1),2+clog2(M))+clog2(MAX_ZB)+2+OUT_W` (checked at elaboration) |

For 8-bit data use `M = 8`; for IEEE single precision `M = 32` with
`BUF_W = 1024`. Floating-point values are compressed as their bit patterns.

## Departures and choices

* **Zero-plane codes.** The published symbol table lists `001 + (run-2)` for runs
  of two or more zero planes and `01` for a single one, but gives lengths of
  `2 + log2 M` and 3 bits respectively, which only fit the codes the other way
  round. This design follows the lengths: `01 + (run-2)` and `001`.
* **Raw plane width.** The table gives the uncompressed plane code as `1 + M` bits;
  a plane has N-1 bits (one per delta), so the code here is `1 + (N-1)` bits, one
  less than the table for M = N = 16. Index fields are `clog2(N-1)` bits, which
  equals the table's `log2 M` for the defaults.
* **Unsigned words.** Words are zero-extended before subtraction (the target data
  are post-ReLU activations). Signed data also compress losslessly, only with
  different codes.
* **Buffer size.** The described packer needs "a few bits"; this one holds a whole
  worst-case block (512 bits) so that a block can be coded in one cycle without a
  second copy of the shift register. A packer that streams the plane symbols out
  over several cycles would be smaller but would have to stall the input.
* **Decompressor.** The scheme names a decompressor next to the compressor but
  does not describe its hardware. The one here is derived from the bit format
  only; it needs the stream length as a side input and is slower than the
  compressor (one cycle per Zero-RLE symbol, one for the base, up to M+1 for the
  planes and one per output value, so roughly 3 cycles per value), which
  is enough for a functional read path but not sized for throughput.
* **Not implemented:** the DMA engine and DRAM interface around the codec.

## Verification

Each module has a self-checking testbench in `tb/`; all print
`TB_RESULT checks=<n> failures=<n>` and stop themselves after a cycle limit.
`tb/bpc_ref_pkg.sv` is an independent, procedural model of the whole bit-stream
(Zero-RLE, block code, end-of-stream rule) that the larger tests compare against
bit for bit.

| testbench                | what it shows |
|--------------------------|---------------|
| `nonzero_detect_tb`      | the flag on zero, single-bit and random values |
| `zero_rle_tb`            | symbol stream for random flag streams, bursts split at 16, flush on last |
| `bpc_delta_sr_tb`        | base, all deltas, count, full; release with and without a new push; padding |
| `dbp_enc_unit_tb`        | every plane code against the table, incl. constructed patterns |
| `bp_zero_rle_tb`         | run merging for sparse, dense and all-zero plane patterns |
| `bpc_block_encoder_tb`   | 3000 blocks (ramps, noise, walks, random, constant) against the model, every code used |
| `bit_packer_tb`          | ordering, padding, `out_last`, full buffer, back-pressure |
| `bpc_compressor_tb`      | 80 streams at default sizes, random valid/ready; checks every code, burst splitting, full and padded blocks, input stall, output back-pressure, and the one-value-per-cycle rate |
| `bpc_decompressor_tb`    | streams from the reference model decoded back to the original values, with random valid/ready |
| `bpc_codec_tb`           | top level at default sizes: 80 streams compressed, checked bit for bit against the model, stored, read back through the decompressor and compared with the input; counts every code, burst splitting, padded and full blocks, stalls, back-pressure and the one-value-per-cycle rate, and fails if any of them never occurs |
| `bpc_workloads_tb`       | 8-bit fixed point (M=8), 16-bit fixed point, half and single precision (M=32), and N=8 blocks, on synthetic feature-map-like streams |

The test data are synthetic (ReLU-clipped random walks and similar), not real
network activations, so the compression ratios the workload test prints say
nothing about the ratios achievable on real CNNs.

To simulate, for example, the top-level test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/bpc_pkg.sv tb/bpc_ref_pkg.sv rtl/*.sv tb/bpc_codec_tb.sv \
  --top-module bpc_codec_tb -Wno-fatal
./obj_dir/Vbpc_codec_tb
```

For `bpc_workloads_tb` add `tb/bpc_stream_harness.sv`. (Listing `rtl/bpc_pkg.sv`
twice through the wildcard only produces a duplicate-package warning.)
