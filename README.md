# RAMAN in SystemVerilog: a sparse tinyML accelerator

RAMAN is a small accelerator for convolutional networks on edge devices. It
is built around one idea: most of the multiply-accumulates in a
depth-wise-separable network such as MobileNet or DS-CNN are in the
point-wise (1x1) layers, and many of their operands are zero. RAMAN removes
zeros from both sides of these layers.

- **Weights** are pruned offline in a *balanced* way. Every row of a 16-wide
  weight tile keeps the same number of non-zeros, stored as value/index
  pairs. Every weight word then carries exactly four useful pairs per PE
  column, so no lane waits on another.
- **Activations** are checked at run time, three pixels at a time:
  - an input channel whose three activations are all zero is skipped;
  - a channel with a single small non-zero is pruned to zero against a
    threshold θ (run-time activation pruning, RAP), and then also skipped;
  - in the channels that remain, the zero activations of individual PE rows
    are data-gated so the datapath does not toggle.

The point-wise layer runs a Gustavson-style (row-by-row) dataflow:
- each PE holds a row of 16 output partial sums in a small register file;
- it streams compressed activations against compressed weight rows;
- only the final, quantized 8-bit outputs go back to memory, written over
  the layer's own inputs to save activation memory.

This repository holds a synthesizable SystemVerilog model of that
architecture, with one self-checking testbench per block. The model runs
point-wise convolutions, fully-connected layers and global pooling end to
end. The depth-wise and standard-convolution layer sequencers are **not**
implemented (see *Departures*).

## Block map

```
           host ports (load program / parameters / inputs, read results)
                 |                 |                    |
          +------v-----+   +-------v-------+    +-------v--------+
          | instr_mem  |   | glb_mem       |    | glb_mem        |
          | 64 x 80b   |   | param 192b    |    | activations 32b|
          +------+-----+   | 16K words     |    | 16K words      |
                 |         +---+-------+---+    +--+---------^---+
          +------v---------+   |       |           |         |
          | top_controller |   |weights|PPM params |IA       |OA (8b x4)
          | master + PW /  |   |       |           |         |
          | POOL slaves    |   |       |       +---v---+     |
          +-------+--------+   |       |       |  ase  |     |
                  | (drives    |       |       +---+---+     |
                  |  every     v       |           v         |
                  |  block) +----------+-----------------+   |
                  |         | act_param_cache: 27 x 8b   |   |
                  |         | banks 0-2 IA, 3-26 weights |   |
                  |         +-------------+--------------+   |
                  |                       v                  |
                  |      +--------------------------------+  |
                  |      | pe_array: raman_noc (row and   |  |
                  |      | column routers) + 3 x 4        |  |
                  |      | raman_pe, 4 MACs each          |  |
                  |      +---------------+----------------+  |
                  |                      v 4 x 24b psums     |
                  |              +---------------+           |
                  +------------->| ppm           +-----------+
                                 +---------------+
```

| File | Block |
|---|---|
| `raman_pkg.sv` | sizes, enums, weight pair, PPM parameter word, instruction and counter structs |
| `glb_mem.sv` | global memory: 192b single-port parameter bank, 32b activation bank with separate read and write addresses |
| `act_param_cache.sv`, `cache_bank.sv` | 27 independent 8b dual-port banks |
| `ase_rap.sv` | non-zero detector + run-time pruning + OR_BIT for one 3-activation column |
| `ase.sv` | activation sparsity engine: ping-pong shift registers, enable logic, index/bitmap buffers |
| `raman_pe.sv` | PE: 4 MAC lanes, 16 x 24b register file, gating, 8/4/2-bit modes |
| `raman_noc.sv` | row/column routers (point-wise and fully-connected patterns) |
| `pe_array.sv` | NoC + 3 x 4 PEs |
| `ppm.sv` | post-processing: bias, residual, ReLU, dyadic quantization, pooling |
| `instr_mem.sv` | 80b instruction store |
| `top_controller.sv` | master controller, point-wise and pooling sequencers, event counters |
| `raman_top.sv` | the whole accelerator |

## The point-wise layer, step by step

A point-wise layer is a matrix product. The input is `HW x M` (pixels by
input channels), the weights are `M x N` and the output is `HW x N`. The
3 x 4 array works on:
- **three pixels at a time**, one per PE row;
- **64 output channels at a time**: four weight tiles of `n = 16` columns,
  one tile per PE column.

Each PE owns a `1 x 16` slice of the output: one pixel by one tile. Its
16-entry register file holds those 16 partial sums for the whole reduction
over M. The controller runs, for each pixel triple `t` and each 64-channel
output group `g`:

1. **ASE load** (once per triple, `M + 4` cycles).
   - The ASE reads the three pixels' `M/4` words each from activation
     memory.
   - It runs each channel column through the detector and RAP.
   - It stores only the channels that survive (OR_BIT = 1) in its index
     buffer, with their 3-bit bitmaps.
   - It writes only the non-zero activations, packed, into cache banks 0, 1
     and 2.
   - `nnz` is the number of surviving channels.
2. **Weight load** (`M·WPM + 1` cycles). This step is skipped when the layer
   has a single output group and the tiles are already cached.
   - `WPM` (1 to 4) is the number of weight words per input channel. It is
     set by the pruning ratio: `4·WPM` non-zeros per 16-wide tile row.
   - Each 192b word goes across cache banks 3..26, one byte per bank.
3. **Compute** (`nnz · WPM` cycles). Each cycle sends one weight word and
   one activation per row to the array:
   - it reads weight word `idx·WPM + k` for recorded channel `idx` and word
     `k`;
   - each row reads its next packed activation;
   - rows whose bitmap bit is 0 are gated;
   - every PE multiplies its row's activation by the four pairs of its
     column and adds into `RF[pair.idx]`;
   - all 48 MAC lanes are busy every cycle.

   While the array computes, the controller prefetches the group's 16 PPM
   parameter words (17 cycles). Each holds bias, α and β for four output
   channels (160 bits used of 192). They fill the PPM buffer, which is idle
   until the drain. The parameter port is free at that time because the
   weights are already in the cache.
4. **Drain** (48 + 4 cycles). The row routers read the 12 PEs, four RF
   entries at a time, into the PPM. The PPM writes one 32-bit word (four
   output channels) per cycle back to activation memory. Outputs beyond
   `N` or beyond the last pixel are not written. The drain waits for the
   prefetch to end, so a group with fewer than about 13 compute cycles
   waits a little longer.

Steps 1 and 2 run at the same time. The ASE reads the activation memory
and fills banks 0–2. Meanwhile the controller reads the weights from the
parameter memory into banks 3–26. Step 3 starts when both are finished.
From the second triple on, step 1 starts at the beginning of the previous
triple's last drain. The drain uses neither banks 0–2, the ASE buffer nor
the activation read port. The next triple's input words never lie where
the current triple's outputs are written, even in place, because `N ≤ M`.

Skipped channels therefore cost nothing in step 3. The compute time of a
triple is proportional to the number of input channels that hold any
non-zero after pruning, not to `M`.

### Memory layout and the parameter stream

- **Activations** are pixel-major. Channel `c` of pixel `p` is byte `c mod 4`
  of word `base·128 + p·C/4 + c/4`, where `C` is `M` for inputs and `N` for
  outputs.
- **Base addresses.** An instruction names the input and output regions by
  7-bit bases in units of 128 words. Giving both the same base overlays the
  output on the input. This is safe when `N ≤ M`: every output word lands
  on input words that the ASE has already copied into the cache. For
  `N > M` give a separate output region.
- **Parameters** are read from address 0 in program order. There is no
  pointer in the instruction.
  - A point-wise layer takes, per output group, 16 PPM words, then
    `M·WPM` weight words.
  - Word `k` of input channel `m` holds pairs `4k..4k+3` of each of the four
    tiles.
  - Tile `c` lives in bits `48c+47:48c`, lane `l` in bits `48c+12l+11:48c+12l`.
  - A pair is `{idx[3:0], value[7:0]}`.
  - A pooling layer takes 16 PPM words per 64-channel group.
- **PPM word**, low to high: four 24b biases, four 8b α, four 8b β.

### Instruction word (80 bits)

| Bits | Field | Meaning |
|---|---|---|
| 2:0 | opcode | 0 END, 1 CONV, 2 DW, 3 PW, 4 FC, 5 POOL |
| 11:3 | m_ch | input channels M (multiple of 4, ≤ 256) |
| 20:12 | n_ch | output channels N |
| 27:21 | fh | feature-map height |
| 34:28 | fw | feature-map width |
| 44:35 | ia_tiles | pixel triples, ⌈HW/3⌉ |
| 47:45 | w_tiles | output groups ⌈N/64⌉ (PW), ⌈N/24⌉ (FC), channel groups ⌈C/64⌉ (POOL) |
| 49:48 | zpad | zero padding (decoded, unused by PW/POOL) |
| 51:50 | stride | stride (decoded, unused by PW/POOL) |
| 53:52 | prec | 0: 8b, 1: two 4b sub-words, 2: four 2b sub-words |
| 55:54 | nnz_q | WPM − 1 |
| 63:56 | theta | RAP threshold (0 disables pruning) |
| 64 | pool_max | POOL: max (1) or average (0) |
| 65 | relu_en | ReLU and unsigned clamp (else signed clamp) |
| 72:66 | ia_base | input region, ×128 words |
| 79:73 | oa_base | output region, ×128 words |

The published design fixes only the 80-bit width, the 3-bit opcode at the
bottom and the kinds of fields. The widths, order, opcode values and the
sparsity, precision and base fields are this implementation's.

## Activation sparsity engine

The engine moves a `3 x M` block from the 32-bit activation memory into
three 8-bit cache banks.

- **Shift registers.** Six 32-bit shift registers form two sets of three,
  one register per PE row. While one set shifts out one channel per cycle,
  the other set loads the next word of each row.
- **Enable logic.** A 2-bit phase counter with a 2:4 decoder picks the
  register being loaded. Its wrap swaps the two sets.
- **Rate.** After one 4-cycle start-up epoch, one channel column leaves the
  bank every cycle. A block takes `M + 4` cycles.
- **Pruning rule** (`ase_rap`). A column with exactly one non-zero
  activation has it cleared if it is below θ (unsigned compare). Columns
  with two or three non-zeros are kept as they are. OR_BIT is the OR of the
  pruned bitmap.
- **Dense mode** (`skip_en = 0`). Every channel is recorded and written
  unpacked, with the raw bitmap. This is the gating-only mode the
  architecture uses for layers that do not skip. It is tested at block
  level only.

## Processing element and array

Each PE has four MAC lanes, each with an 8-bit multiplier and a 24-bit
accumulate. They write four entries of a 16 x 24b register file per cycle.

- **Pipeline.** The PE has three register stages: gated input registers,
  product, and register-file read-modify-write. A gated or invalid lane
  does not load its input registers, so its multiplier does not toggle.
- **Sub-word precision.** In 4-bit and 2-bit modes each byte carries two or
  four sub-words. The lane sums their products, giving 2x or 4x the MACs
  per cycle. Activations are unsigned and weights two's-complement.
- **Point-wise mode.** The row activation is broadcast to all four lanes,
  and lane `l` accumulates into `RF[w[l].idx]`.
- **Lane mode (fully connected).**
  - Lane `l` accumulates `ia_l[l]·w[l]` into `RF[{grp,l}]`.
  - The NoC sends activation `c` down column `c` and weights `2r`, `2r+1`
    to row `r`.
  - It sums the four columns of a row at the output.
- **Last column.** PEs in columns 0–2 are type 1, with a second 4-wide read
  port. The last column has type 2 (top) and type 3 (below), with one read
  port. The published description of how types 2 and 3 differ beyond their
  port count was not available, so nothing else distinguishes them here.

## The fully-connected layer

A fully-connected layer multiplies an `M`-vector by an `M x N` matrix.
Weights are not reused, so the array uses only two of the four lanes in
each PE. The activations do get reused, once per output.

- **Activation vector.** It is copied once into cache banks 0–3. Activation
  word `i` goes to address `i`, so bank `c` holds channels `4i + c`. During
  compute, column `c` receives channel `4i + c` in cycle `i`.
- **Weights.** They bypass the cache. Each cycle one 192-bit parameter word
  goes straight to the array. It carries six 8-bit weights per column:
  bits `48c + 8k` hold the weight from input `4i + c` to output `6f + k` of
  run `f`.
- **Runs.** PE row `r` multiplies its column's activation by weights `2r`
  and `2r + 1`. A run of `M/4` cycles therefore yields six outputs, and the
  row routers sum them across the four columns.
- **RF groups.** Each run writes its own RF group `f`. Four runs (24
  outputs) share one RF clear and one drain.
- **Drain.** It reads 12 rows of two outputs each. Pairs of reads form the
  six four-output words that go through the PPM.

The parameter stream for each group of 24 outputs is 6 PPM words, then
`M` weight words (four runs of `M/4`). Output word `e` of group `g` goes to
`oa_base·128 + 6g + e`. Only words that hold an output below `N` are
written. The whole input vector is cached before any output is written, so
an FC layer may write over its own input.

## Post-processing module

The PPM takes four 24-bit partial sums per cycle. Each passes through:
- bias addition;
- optional residual addition;
- ReLU by the sign bit;
- quantization `Q = floor((α·x + 2^(β−1)) / 2^β)`, with 8-bit α and β and
  the shift limited to 34;
- clamping to 0..255 (with ReLU) or −128..127.

The result appears three cycles later as a packed 32-bit word, together
with its write-back address.

Pooling reuses the same hardware:
- The bias field of each buffer word is the accumulator: average pooling
  adds to it, and max pooling keeps the larger value.
- A final pass quantizes each accumulator. For an average, α/2^β
  approximates 1/HW.
- The controller implements global pooling: all H·W pixels into one output
  per channel.

## Departures from the published design and known limits

- **Not implemented:**
  - the sequencers (slave controllers) for depth-wise and standard
    convolution;
  - the weight-stationary systolic dataflow they use: PE-to-PE partial-sum
    links, stride and padding in the NoC.

  These instructions are decoded, counted in `stats.layers_unsupported` and
  skipped.
- **Partial overlap.** Three overlaps are built:
  - a tile's activation and weight loads run together;
  - the PPM parameter prefetch runs during compute;
  - the next triple's activation load starts with the last drain of the
    current triple, so the ASE reads while the PPM writes back.

  The published pipeline also loads the next tile during the current
  computation. That needs double-buffered cache banks and ASE buffer, and
  it is not built. When weights must be reloaded for every output group
  (G > 1), their load is not hidden either. This model is therefore slower
  per layer, though its results are the same.
- **N > M overlay.** The published fix (prefetching the next input tile
  before writing back) is not built, so such layers need separate
  input/output regions.
- **Residual addition** exists in the PPM but the controller never enables
  it.
- **Sizes not given in the published material** are this implementation's:
  - memory depths: 16K x 192b parameters (384 KB), 16K x 32b activations
    (64 KB), 1024-entry cache banks, 64 instructions;
  - pipeline depths;
  - bit layouts.

  They were chosen so that the point-wise and pooling layers of MobileNetV1
  (96x96 grey input) and DS-CNN (keyword spotting) fit. For example, the
  unpruned point-wise + pooling parameters of MobileNetV1 take 12,880 of the
  16,384 parameter words.
- **Peak rate.** It matches the published figure of 48 MACs per cycle:
  12 PEs x 4 lanes, or 3.6 GMAC/s at 75 MHz.

## Where the cycles go

A point-wise layer with `T = ⌈HW/3⌉` pixel triples and `G = ⌈N/64⌉` output
groups takes roughly:

```
T · ( max(M − 48, L) + G · (max(nnz · WPM, 13) + 59) + (G − 1) · L )
```

- `L = M·WPM + 1` is the weight load. It is 0 when `G = 1` and the tiles
  are already cached.
- The constant 59 covers the group start, the RF clear, the pipeline
  wait, the 48-cycle drain and the PPM flush. The floor of 13 is the part
  of the 17-cycle PPM prefetch that compute must hide.
- `M − 48` is the part of the `M + 4`-cycle activation load that the
  previous triple's drain does not hide. The first triple pays all of it.
- `nnz` is the number of channels that survive in that triple.

Measured at the default sizes:

| Layer | Compute cycles | Total cycles |
|---|---|---|
| DS-CNN 28x30, 64→64, 50% weight pruning, about half-zero activations | about 31k (35.8k without skipping) | about 53k |
| MobileNetV1 6x6, 256→256, dense weights | about 41k | about 93k |

The gap between the two columns is the unhidden load and drain time.

## Event counters

`raman_top.stats` counts:
- layers by kind;
- input channels processed and skipped;
- activations pruned;
- gated PE-row cycles;
- weight loads and reuses;
- compute cycles;
- output words.

The counters make the sparsity mechanisms observable in simulation. They
are also the natural hooks for a performance monitor.

## Verification

Every block has a self-checking testbench in `tb/` that compares against a
reference model written independently of the RTL. Each prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

- `glb_mem_tb`, `instr_mem_tb`, `act_param_cache_tb`: random traffic
  against reference arrays. They also check one-cycle read latency and
  read-during-write.
- `ase_rap_tb`: exhaustive small cases plus random columns.
- `ase_tb`: random sparse blocks, both modes. It checks buffers, packed
  cache contents, event counts and the `M + 4` cycle latency.
- `raman_pe_tb`: random operations in both modes and all precisions, with
  gating and clears, against a reference register file. It checks the
  three-cycle latency.
- `raman_noc_tb`, `pe_array_tb`: routing rules, and full point-wise and
  fully-connected products through the array.
- `ppm_tb`: every NORMAL output bit-exact at exactly three cycles, plus
  average and max pooling.
- `top_controller_tb`: the controller against behavioural stand-ins. It
  checks fetch order, every parameter and weight transfer, cache read
  addresses, gating, compute-cycle count and write-back addresses. It also
  checks three overlaps: the weight load with the ASE load, the PPM
  prefetch with compute, and the next ASE load with the drain. Compute must
  never start before the ASE has finished.
- `raman_top_tb`: the whole accelerator at its default sizes, running a
  six-layer program:
  - a point-wise layer with pruning, overlay and weight reuse;
  - a skipped depth-wise instruction;
  - a 4-bit point-wise layer with two output groups;
  - average and max global pooling;
  - a fully-connected 80→12 classifier.

  Every output byte is compared with a reference model. The counters are
  compared with counts the model predicts, including the exact number of
  compute cycles. The test fails if skipping, pruning, gating, weight
  reuse, either pooling kind, the unsupported-opcode path or the overlay
  never happened.

- `raman_workload_tb`: layer shapes of the two target networks at full
  size. It runs:
  - a DS-CNN 28x30 64→64 point-wise layer and its 4x4x64 average pool;
  - MobileNetV1's last 6x6 256→256 point-wise layer and its 6x6x256
    average pool, with 1/36 ≈ 227/2^13;
  - both networks' classifiers: FC 64→12, and FC 256→2 written over its
    own input.

  All activations fit in the 64 KB memory at once. The test checks every
  output byte and counter and prints the per-layer cycle counts.

To run one with Verilator 5:

```
verilator --binary --timing -Irtl rtl/raman_pkg.sv tb/raman_top_tb.sv -y rtl \
          --top-module raman_top_tb -Mdir obj_top
./obj_top/Vraman_top_tb
```

Substitute any other `<name>_tb`. All testbenches use only `$urandom` for
stimulus, so they also run on two-state simulators with random
initialisation.
