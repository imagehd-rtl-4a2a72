# ImageHD accelerator — SystemVerilog implementation

## Main idea

ImageHD learns continually from a stream of unlabelled images. It does this in
two parts:

- A small fixed INT8 CNN (MobileNetV2) turns each image into a feature vector.
- All learning then happens in hyperdimensional (HD) space. The feature vector
  is encoded into one binary hypervector (HV) of D bits. The HV is compared by
  Hamming distance with a bounded set of cluster prototypes. Then either the
  closest prototype is updated, or a new prototype is created. Now and then the
  prototype set is shrunk back to a fixed size by a hardware version of
  kMeans++.

Every HD operation works on 256-bit chunks: 4 words of 64 bits. The D-bit
vectors stream through the engines one chunk at a time, so no engine ever holds
a D-wide accumulator. This is the idea to keep in mind when reading the RTL.

```
 cnn_in ─┬► conv3x3_stem ─┐ (first layer, cfg_stem = 1)
         │                 ├─┬─► cnn_out            (intermediate layers)
         └► irb ───────────┘ │
          (PCU→DCU→PCU,      │
           input buffer,     └─► feature adapter ─┐ (final 1x1 conv)
           residual adder)                        ▼
 feat ────────────────────────────────────────► heu ──chunks──► hlu ◄──► proto_mem ◄──► cmu
                                                 (encoder)   (search, admit,  (clusters,    (merge)
                                                              update)          mu, sigma)
                                         merge scheduler in imagehd_top: t, T0, T_merge, C_max
```

## Blocks (rtl/)

| module | what it is |
|---|---|
| `imagehd_pkg` | Shared constants (p, m, n, tile size, p_c, p_k, p_w, p_b, D, F, L, K_MAX), the chunk type, INT8 saturation, requantisation, popcount. |
| `pcu` | Pointwise (1x1) convolution unit. It has P = 2 pixel-parallel PEs, each computing M = 4 output channels per pass, with on-chip weight and bias buffers. |
| `dcu` | Depthwise 3x3 convolution unit. It has three row buffers, a 3x3 register window per PE and N = 4 channel-parallel PEs. It handles stride 1 and stride 2, and has an output row buffer. |
| `conv3x3_stem` | First-layer full 3x3 convolution (3 input channels, up to 32 output channels, stride 1 or 2). It buffers a whole input tile, then computes each output beat over the 27 taps, P pixels at a time. |
| `irb` | Inverted residual block: input buffer (FIFO), expansion PCU, DCU, projection PCU and residual adder. Bypass modes cover blocks with expansion factor 1 and the final 1x1 convolution. |
| `heu` | HD encoding unit: ID-level encoding, p_c = 16 feature lanes × 256-bit chunk. |
| `proto_mem` | Single-tier, bounded cluster memory. Per cluster it stores the HV, mu and sigma. It has p_k = 16 banks. |
| `hlu` | HD learning unit: 16-cluster-parallel Hamming search, argmin, novelty test, create-or-bundle, running statistics. |
| `topm_buffer` | Streaming insertion buffer that keeps the M largest (distance, index) pairs. |
| `lfsr32` | 32-bit Galois LFSR (taps x^32+x^22+x^2+x+1). |
| `cmu` | Cluster merge unit: Top-M kMeans++ seeding, then Lloyd refinement with chunk-wise majority. |
| `imagehd_top` | Wires everything together. `cfg_stem` selects the stem or the IRB as the CNN engine. It adds the feature adapter, the merge scheduler, the cluster counter and the memory port multiplexer. |

## The parts that are hard to follow

### 1. Stream format of the CNN engine

Every CNN stream uses the same valid/ready format:

- **Beat:** one beat is one INT8 channel value for P = 2 horizontally adjacent
  pixels, plus a lane mask.
- **Channel order:** for each pixel group, channels 0 … C-1 are sent in order.
- **Group order:** pixel groups are sent in raster order over a tile of up to
  32 × 32 pixels.

Because of this one format, PCU → DCU → PCU can be chained with no reordering.
The same format also lets the expansion or depthwise stage be bypassed with a
multiplexer.

How each unit handles the stream:

- **PCU.** It loads the channel vector of the P pixels, then runs one output
  group of M channels at a time: one MAC per cycle per PE and output, with the
  input channels serial. It then emits the M channels as M beats.
- **DCU.** It stores whole rows. When row r+1 is complete it computes row r:
  - For each channel index k, the window sweeps the row one column per cycle,
    in all N PEs at once.
  - Only positions with r mod s = 0 and c mod s = 0 produce outputs.
  - The output row goes into an output row buffer and then streams out in
    pixel-group order.
  - The last row is computed with a zero row below it.
  - Tiles are independent and use zero padding at their edges.

### 2. Residual path and input-buffer sizing

When stride = 1 and InCh = OutCh, every input beat is written both to the
expansion PCU and to the input buffer. The residual adder pops one buffer word
for each projection output beat and adds the two with INT8 saturation. The
data arrive in the same order, so no addressing is needed.

The buffer has to hold everything that entered the block but has not yet left
it. The DCU consumes row r+1 before it emits row r, and the PCUs hold about one
pixel group each. So the worst case is a little under three input rows.

The default depth is 3 rows × 16 pixel groups × 160 channels = 7680 words. This
is enough for every stride-1 residual block of MobileNetV2 (the residual blocks
have at most 160 channels) at a 32-pixel tile. The input side stalls when the
buffer is full, so a wrong size would stall the pipeline, not corrupt data. An
assertion checks that the buffer never overflows or underflows.

### 3. Encoder (heu): chunk-outer, feature-inner

The encoder runs two nested loops:

- **Outer loop:** for chunk c = 0 … D/256-1.
- **Inner loop:** over the F/16 feature groups. For each group:
  - The 16 position words P[i][c] are read, one from each of 16 banks. Feature
    i is in bank i mod 16, so the banks never collide.
  - 16 level words are selected from a level chunk buffer.
  - The words are XORed.
  - A 16-input adder tree per bit reduces them into a local count, which is
    added to the chunk's global accumulator.

After the last group, the chunk is thresholded: bit = 1 if the vote is greater
than F/2. The chunk is sent to the learning unit immediately.

The paper banks the level table and arbitrates the lanes' accesses. Here the
level table has one bank per level instead. Every bank delivers its word of the
current chunk every cycle, and each lane picks its level with a multiplexer.
This gives the same throughput with no arbitration.

The quantiser keeps the top log2(L) bits of the offset-binary INT8 feature.
Latency is D/256 × F/16 + 2 cycles per sample, after F cycles to load the
sample.

### 4. Learning unit (hlu): Algorithm 1, steps S3–S4

**Search.** When a chunk arrives, the HLU reads the same chunk of 16 clusters
per cycle from the 16 memory banks. It XORs and popcounts them, and accumulates
the results in the distance buffer (one entry per cluster slot). A chunk
therefore costs ceil(K/16) cycles, and the encoder is stalled for that time.

**Decision.** After the last chunk:

1. An argmin scan over the distance buffer gives c\* and s\* = D − d.
2. The statistics of c\* are read.
3. The threshold is computed:
   - θ = mu − (beta · sigma) >> 4.
   - beta is Q4.4. mu and sigma are Q.8, in units of matching bits.
4. The sample is novel if s\*·256 < θ, or if no cluster exists.

**Novel sample with free space.** The HV (kept in the HLU's HV buffer) is
written into slot K. mu and sigma are set from configuration inputs.

**Otherwise.** Cluster c\* is bundled with the sample chunk by chunk:

- Bits where the two agree are kept.
- Bits where they differ take a random bit from 8 LFSRs. This is the two-input
  majority with random tie-breaking.
- mu and sigma move toward s\* and |s\* − mu| at rate alpha = 2^-shift.

**Memory full.** A novel sample that arrives when the memory is full updates
c\* instead, and is flagged as overflow.

### 5. Merge unit (cmu): Algorithm 2

**Seeding.**

1. The first centroid is a uniformly random class (LFSR).
2. After each new centroid:
   - All K class HVs stream against it: 16 classes per cycle, chunk by chunk.
   - The minimum-distance buffer d is updated with 16 comparators.
   - The classes stream through `topm_buffer`, which keeps the M classes
     farthest from all centroids.
   - The next centroid is drawn uniformly from those M classes.
   - Classes with d = 0 are skipped, so the same class is never picked twice.
3. Centroid HVs are copied into an on-chip centroid buffer.

**Refinement.** Each of I iterations has two steps:

- **Assignment:** scan the centroids one after another, keeping the running
  argmin per class.
- **Update:** work one chunk at a time:
  1. Clear one row of vote counters per centroid.
  2. Stream every class chunk into the row of its assigned centroid. Back-to-back
     updates of the same row use forwarding.
  3. Binarise: more than half of the class count gives 1, less gives 0, and a
     tie keeps the old bit.

Only one chunk's votes exist at any time.

**Write-back.** The K' centroids go into slots 0 … K'-1, with the statistics
of the class each was seeded from.

### 6. Stem convolution

The first MobileNetV2 layer is a full 3x3 convolution over the 3 image
channels, so it cannot run on the depthwise unit. The engine is deliberately
the simplest one that does the job, because nothing more is known about it:

- **Load.** The whole input tile (up to 32 × 32 × 3 bytes) is written into a
  buffer, in the same stream format as every other CNN stream.
- **Compute.** For each output pixel group and output channel, the P pixel
  lanes walk the 27 taps (`t = 9·ic + 3·dy + dx`) together. Each lane does one
  multiply-accumulate per cycle. Taps that fall outside the tile read zero,
  which gives padding 1.
- **Output.** Bias, rounding shift (`cfg_shift_e` at the top), ReLU6 and INT8
  saturation. Then one beat goes out. With stride 2, the lane mask marks the
  last group of a row when the output width is odd.

One output beat costs 27 + 1 cycles. A 32 × 32 tile with 32 output channels
and stride 2 is 16 × 8 × 32 beats, about 115,000 cycles. The engine is the
slowest CNN stage, but it runs once per image.

### 7. Top: scheduling and sharing

The top keeps two counters:

- **Cluster count:** incremented on every create; set to C_max when a merge
  finishes.
- **Sample counter t:** with a running t mod T_merge, so no divider is needed.

**Merge trigger.** When a result comes out and t ≥ T0, t mod T_merge = 0 and
n > C_max, the merge unit starts in the same cycle. From that cycle on:

- The HLU gets no new chunk.
- All prototype-memory ports switch to the merge unit.

The encoder may finish the next chunk and then waits.

**Feature source.**

- With `cfg_cnn_to_heu` set, the IRB output goes through the feature adapter.
  The adapter sends the valid lanes of each beat one by one into the encoder.
- Otherwise the IRB output leaves through `cnn_out`, and the encoder reads the
  `feat` port.

## Numbers: from the paper and chosen

| parameter | value | source |
|---|---|---|
| p (pixels per PCU) | 2 | paper, implementation details |
| m (output channels per PPE) | 4 | paper |
| n (DCU channel PEs) | 4 | paper |
| T_H × T_W | 32 × 32 | paper |
| p_c, p_k | 16, 16 | paper |
| p_w × p_b | 4 × 64 | paper |
| D | 8192 | chosen (not given) |
| F | 1280 | MobileNetV2's last layer width |
| L (levels) | 16 | chosen |
| K_MAX | 128 | chosen; 128 × 8192 bit = 128 KiB, close to the paper's 126.6 KB unified cluster memory |
| Top-M | 8 | chosen |
| PCU weight depth | 102400 words (320 × 1280 / 4) | chosen for the largest MobileNetV2 1x1 layer |
| input-buffer depth | 7680 | chosen, see §2 |

**Fixed-point formats (all chosen).**

- Activations and weights are INT8, and biases are INT32.
- Requantisation is a rounding arithmetic right shift, then INT8 saturation.
- Expansion and depthwise outputs are clipped with ReLU6 (clip value
  configurable). The projection is linear.
- mu and sigma are 24-bit Q16.8. beta is Q4.4. alpha = 2^-k.

## Differences from the paper, and what is not built

- **3×3 stem convolution engine: structure is this design's own.** The paper
  only names the engine. The structure in §6 is the simplest one that does the
  job. Its sizes (3 → 32 channels, stride 2) are MobileNetV2's first layer.
- **Off-chip weight streaming (DMA), host, PCIe and DRAM: not built.** The
  paper does not design them. Every weight and table memory has a write port
  instead.
- **Layer sequencing, tile scheduling and on-chip feature-map storage between
  layers: not built.** The paper mentions them but does not describe them.
  `cnn_in` / `cnn_out` are ports, and the layer configuration is an input.
- **No global pooling.** The paper streams the final 1x1 convolution straight
  into the encoder. For a 32 × 32 image the final map is 1 × 1, which fits
  F = 1280. A 128 × 128 image (CORe50) gives a 4 × 4 map, and would need a
  pooling stage that the paper does not describe.
- **Residual condition.** The paper adds the residual whenever the stride
  is 1. Here the residual is also only added when the input and output channel
  counts match, as in MobileNetV2; otherwise the shapes would not line up.
- **Stage coupling.** The paper joins the block's stages with FIFOs. Here
  each unit's input and output registers form a one-beat buffer with
  valid/ready. The only deep buffer is the residual input buffer.
- **Merge-unit phases.** Assignment and centroid update run one after the
  other, not overlapped through a label queue.
- **Level table.** It uses one bank per level, with no arbitration (see §3).
- **Naming.** One sentence of the paper calls the learning unit "HCU". This
  design follows the name used everywhere else: HLU.
- **HV buffer location.** The "global hypervector buffer" lives in the HLU,
  which receives the chunks.
- **Own rules.** The statistics of new and merged clusters, the overflow rule
  and all tie rules are this design's choices. They are listed in the module
  headers.

## Verification (tb/)

Every block has a self-checking testbench that compares against an independent
model written in the testbench:

| testbench | what it checks |
|---|---|
| `tb_pcu` | 1x1 conv with a partial pixel group and random back-pressure, against a dot-product model |
| `tb_dcu` | stride-1 and stride-2 tiles against a zero-padded 3x3 depthwise model |
| `tb_conv3x3_stem` | stride-2 and stride-1 tiles, with an odd output width, against a zero-padded full 3x3 convolution model; output lane masks |
| `tb_irb` | a residual block with expansion, a stride-2 block without expansion, and a plain 1x1 conv with a partial group |
| `tb_heu` | encoded HVs against a bit-level ID-level model; per-sample latency; back-pressure |
| `tb_proto_mem` | banked reads and writes, statistics port |
| `tb_hlu` | argmin, novelty decision, bundling rule, mu/sigma update, create, overflow; search time per chunk |
| `tb_topm_buffer` | Top-M contents against a sorted reference |
| `tb_lfsr32` | every step against a software LFSR step; holds when disabled; never reaches zero |
| `tb_cmu` | 0 iterations: each seeded group gets exactly one centroid. 2 iterations: each centroid is the majority of its group |
| `tb_imagehd_top` | end to end at D = 512, F = 32, 32 clusters |
| `tb_imagehd_top_full` | the top at its default sizes |

**End-to-end test (`tb_imagehd_top`).** It runs:

- a stem-convolution layer and two CNN layers, checked value by value;
- the CNN → encoder path, with the stored HV checked against a reference
  encoding;
- a clustered stream with merges;
- a random stream until the memory overflows.

It counts these mechanisms and fails if any never happens: stem convolution, residual add,
expansion bypass, stride 2, depthwise bypass, CNN → encoder routing, encoder
stalled by the search, create, update, overflow, merge, and encoder held during
a merge.

**Full-size test (`tb_imagehd_top_full`).** It runs at D = 8192, F = 1280,
128 clusters and full CNN buffers, in about 182,000 cycles:

- runs the stem convolution on a 32 × 32 × 3 image (stride 2, 32 channels) and
  checks all 8192 output values;
- loads the tables;
- runs a final 1x1 convolution (8 → 1280 channels) into the encoder and checks
  the stored 8192-bit HV;
- checks an exact-repeat update (similarity = D) and a new cluster;
- checks one merge.

**Fault copies.** Each module was also copied with one deliberate error, and
each testbench fails against its copy. The errors are:

- bias dropped;
- depthwise taps transposed;
- stem window row taken from the column tap;
- residual subtracted;
- encoder ties become 1;
- wrong prototype bank;
- inverted novelty test;
- reversed Top-M sort;
- wrong LFSR polynomial;
- seeding distance kept as a maximum instead of a minimum;
- cluster count not reset after a merge.

## Running a testbench

Each testbench is its own top module. Compile it with the package first and
let verilator find the other modules in `rtl/`:

```
verilator --binary --timing -Wno-fatal -y rtl rtl/imagehd_pkg.sv tb/tb_hlu.sv --top-module tb_hlu
./obj_dir/Vtb_hlu +verilator+rand+reset+2
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. A run
passes when the failure count is 0. Each testbench has a watchdog that counts
a failure if the run hangs. `tb_imagehd_top_full` takes about 15 seconds.
