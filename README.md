# Procrustes: a sparse-training accelerator in SystemVerilog

## The main idea

Training a neural network can prune it as it goes. The method used here is
Dropback: only the weights that have built up the largest accumulated gradients
are kept. Every other weight goes back to its initial value. This accelerator
makes three changes that let the pruned weights cost nothing in memory or in
compute:

1. **Regenerate initial values instead of storing them.** A weight's initial
   value is recomputed from its index by a stateless pseudo-random generator.
   Only the accumulated gradients of the kept weights are stored. The initial
   values are multiplied by a factor that decays by 0.9 each iteration. Once
   that factor reaches zero, the pruned weights are exactly zero and the
   processing elements (PEs) skip them.
2. **Pick the kept weights with a streaming quantile estimate instead of a
   sort.** A quantile estimator watches gradients on their way to DRAM. It
   drops every gradient whose magnitude is not above the current threshold,
   and it nudges the threshold up or down as each gradient passes.
3. **Keep the compressed weights in a format that can be addressed, and
   balance the load.** Weights are stored in compressed sparse blocks (CSB).
   The number of stored weights in a block is a difference of two pointers.
   A load balancer uses that count to pair the densest half-tile with the
   sparsest, so all PEs finish at about the same time.

The array is a 16×16 grid of PEs running a "K,N" dataflow:

- Each row works on one pair of output-channel blocks (K).
- Each column works on one minibatch sample (N).
- Weights are sent to a whole row at once, and activations to a whole column
  at once.
- Partial sums are read back from one PE at a time.

## Block diagram

```
          64-bit fill port                      64-bit write-back port
   DRAM ─────────────────┐                ┌──────────────── DRAM
                         v                │
                  ┌──────────────┐   ┌────┴─────────┐   ┌────────────────┐
                  │ global buffer│──>│   quantile   │──>│ DRAM write     │
                  │  128 KB      │   │  estimator   │   │ queue (16)     │
                  └──┬───────▲───┘   └──────────────┘   └────────────────┘
                     │       │
                ┌────v───────┴───────────┐    ┌───────────────┐
                │       controller       │<──>│ load balancer │
                └──┬──────────┬──────────┘    └───────────────┘
       row buses   │          │ column buses          ▲ unicast result mux
      (weights)    v          v (activations)         │
                ┌──────────────────────────────────────┴──┐
                │  16 x 16 PEs: RF, mask memory, WR, MAC  │
                └─────────────────────────────────────────┘
```

## Files

| File | Contents |
|---|---|
| `rtl/procrustes_pkg.sv` | Shared types: bus structs, configuration structs, commands, real→FP32 helper |
| `rtl/fp32_mul.sv`, `rtl/fp32_add.sv` | Combinational FP32 multiplier and adder |
| `rtl/fp32_mac.sv` | FP32 multiply-accumulate with output register |
| `rtl/xorshift32.sv` | One stateless xorshift generator: (seed, index) → 32 bits |
| `rtl/weight_recompute.sv` | Weight-recompute (WR) unit: three generators summed, scaled, converted to FP32 |
| `rtl/pe_regfile.sv` | Per-PE 1 KB register file: one write port, two read ports |
| `rtl/pe_mask_mem.sv` | Per-PE CSB mask storage and non-zero counts |
| `rtl/pe.sv` | Processing element |
| `rtl/pe_array.sv` | 16×16 PEs with row, column and unicast interconnects |
| `rtl/global_buffer.sv` | 128 KB global buffer (GLB) of 128-bit lines with word enables |
| `rtl/load_balancer.sv` | Density sort and densest/sparsest pairing |
| `rtl/quantile_estimator.sv` | Streaming threshold estimate and filter, four gradients per cycle |
| `rtl/dram_wr_queue.sv` | Compacts kept gradients into 64-bit DRAM words |
| `rtl/procrustes_ctrl.sv` | Command sequencer |
| `rtl/procrustes_top.sv` | Top level |
| `tb/fp_ref_pkg.sv` | Reference models: FP32 conversions, WR, one CSB block |
| `tb/tb_*.sv` | One self-checking testbench per module |

## Number format

All arithmetic is IEEE FP32.

- Rounding is round-to-nearest-even.
- Subnormal results are flushed to zero.
- Overflow gives infinity.

The adder aligns with guard, round and sticky bits and renormalises with a
leading-zero count. The MAC adds `a*b` into its accumulator in one cycle. A
`clr` pulse starts a new sum.

## Weight recompute (WR)

`init_w = (u0 + u1 + u2 − 3·2^15) · scale · 2^−FRAC_BITS`

- `u_i` is the top 16 bits of xorshift32 generator `i`.
- Each generator is started from `seed_i + index` and run for three rounds
  of the (13, 17, 5) shift sequence.
- The sum of three uniform values has roughly a bell shape.
- The scaled integer is converted exactly to FP32, with round-to-nearest-even.

The unit holds no state, so any weight's initial value can be rebuilt in any
order. The tests show that the mean is close to zero and the spread is close
to the expected value. A plain XOR of seed and index, run for two rounds,
gives a distribution that is visibly too narrow, because xorshift is linear
over GF(2). That is why the seed is added to the index.

The decay step multiplies the integer `scale` by 58982/65536 (≈ 0.9) and
rounds down. After enough steps the scale reaches exactly zero.

## Compressed sparse block (CSB) format

A layer tile is held in the GLB as three arrays:

- **Pointer array `P[0..32]`.** Block `b` has `P[b+1] − P[b]` stored values.
- **Mask array `M[b]`.** One 16-bit mask per block. Bit `j` is set if dense
  position `j` (a kernel tap, `0 ≤ j < blk_len ≤ 16`) holds a kept weight.
- **Value array.** The accumulated gradients of the kept weights, in
  position order, packed block after block.

A weight's dense index is `wid_base + b·blk_len + j`. The WR unit uses this
index.

## Processing element

Each PE holds the following:

- two blocks (slots 0 and 1, the two half-tiles of its work tile);
- the two blocks' masks;
- one activation vector, in a 256-word register file laid out as:
  - words 0–15: activations;
  - words 16–31: packed values for slot 0;
  - words 32–47: packed values for slot 1.

For each slot the PE computes `Σ_j w[j] · act[j']`:

- `w[j] = (mask[j] ? packed value : 0) + WR(index)`.
- In the forward pass, `j' = j`.
- In the backward pass, `j' = blk_len−1−j`. This is the 180° kernel rotation,
  done by reading the block in reverse order.

**Which positions are visited:**

- While the WR scale is non-zero and the phase is forward or backward, every
  position is visited. Each one has a non-zero initial value.
- Otherwise (scale zero, or the weight-update phase) only the set mask bits
  are visited, using a find-first-set over the bits not yet done.

**Timing:**

- The pipeline is issue → RF read → weight rebuild (mux + WR + add) → MAC →
  result.
- One position is issued per cycle, with no gap between blocks.
- An empty slot costs one cycle and gives +0.
- Busy lasts `max(issue cycles + 1, last issue + 4)`.

## PE array and interconnect

| Bus | Carries | Destination |
|---|---|---|
| Row bus `hbus[r]` | Masks, packed values and weight-index bases | Every PE in row `r` |
| Column bus `vbus[c]` | Activations | Every PE in column `c` |
| Unicast mux (`sel_row`, `sel_col`, `sel_slot`) | One partial sum | Returned to the controller |

`busy_any` is the OR of every PE's busy signal.

## Load balancer

The balancer takes 32 per-block non-zero counts, which come from the pointer
array. It works as follows:

1. Each block's rank is the number of blocks that are denser than it, with
   ties broken by index.
2. The ranks are registered.
3. The order is the inverse of the ranks.
4. Pair `t` is (`order[t]`, `order[31−t]`).

The result is ready two cycles after `start`. The top-level test shows the
gain: the slowest PE takes 22 cycles unbalanced and 16 balanced, with
identical results.

## Quantile estimator

Each cycle the estimator takes a group of four FP32 gradients.

- **Update.** When filtering is on and all four are valid, it updates the
  threshold θ from the mean magnitude `d` of the group:
  - if θ < d: θ ← θ·(1 + ρq)
  - otherwise: θ ← θ·(1 − ρ(1 − q))
  - ρ = 10⁻³, q = 1 − 1/7.5, θ starts at 10⁻⁶.
- **Filter.** A lane is kept if filtering is off or `|g| > θ`.
- **Timing.** The result appears one cycle later. θ moves one cycle after
  the group that caused the change.

Kept lanes go into a 16-deep queue. The queue packs them in lane order into
64-bit DRAM words `{index, value}` under a valid/ready handshake.

## Controller and commands

The controller accepts a command when `cmd_valid && cmd_ready`. It pulses
`done` at the end of the command.

| Command | Action |
|---|---|
| `CMD_PASS` | One K,N tile pass: read pointers → (optional) balance → send each row's two blocks → send each column's activations → run the PEs (`run_cycles`) → read the 512 partial sums to `out_base + b·16 + n`, where `b` is the block's original index |
| `CMD_WRITEBACK` | Stream GLB lines four words per cycle through the estimator into the DRAM queue. It stalls while the queue might overflow (`stall_cycles`). |
| `CMD_SET_SCALE` | Load the WR scale |
| `CMD_DECAY` | scale ← ⌊scale · 0.9⌋ |

The configuration struct `ctrl_cfg_t` sets the following:

- the phase;
- balancing on or off;
- `blk_len`;
- the seeds;
- the GLB base addresses of the pointer, mask, value, activation and output
  regions (in 32-bit words);
- the write-back range;
- filtering on or off.

## Top-level ports

- **DRAM fill.** A 64-bit word (two FP32 words) is written at a GLB word
  address. `dram_in_ready` is low in cycles when the controller writes the
  GLB.
- **DRAM write-back.** 64-bit `{index, value}` words under a valid/ready
  handshake.
- **Status.** `theta`, `run_cycles`, `stall_cycles` and `scale` are exposed
  for observation.

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/procrustes_pkg.sv tb/fp_ref_pkg.sv rtl/*.sv tb/tb_procrustes_top.sv \
  --top-module tb_procrustes_top -Mdir obj && ./obj/Vtb_procrustes_top
```

The top-level testbench runs at the full default size. It takes about half a
second once built. It uses this GLB word map:

| Region | Words |
|---|---|
| Pointers | 0 |
| Masks | 64 |
| Values | 128 |
| Activations | 1024 |
| Outputs | 2048 |
| Gradient region | 4096 (1024 words) |
| Second region | 8192 |

It exercises every mechanism and fails if any of them never occurs:

- dense and skipping passes;
- forward, backward and weight-update passes;
- decay to zero;
- balancing gain;
- empty blocks;
- estimator keeps and drops;
- write-back stalls;
- held DRAM fills and held DRAM outputs.

## Departures from the published design

- **Interconnect direction.** The dataflow text says partial sums are
  collected vertically and activations are unicast. The dataflow figure and
  its table say activations are multicast vertically and partial sums are
  unicast. This design follows the figure and table.
- **Kernel rotation.** The paper rotates kernels while moving them from the
  GLB to the PEs. Here each PE reads its block in reverse order. The result
  is the same.
- **Quantile estimator, tracked set.** The paper's estimator also keeps a
  tracked set of weights and evicts its lowest entry when a larger gradient
  arrives. This is not built. Gradients at or below the threshold are simply
  dropped. The threshold estimate is built as published, with the update
  written as θ(n) ← θ(n)·(…). The printed algorithm has θ(n+1) on the right
  side, which is taken to be a typo.
- **Scope of the controller.** It runs one tile per command. The following
  are left to whatever drives the commands:
  - splitting a layer into tiles;
  - transposing fully connected layers;
  - compressing activations into CSB form for the weight-update pass;
  - fetching from DRAM;
  - the paper's timing model and its dense baselines.
- **Loading speed.** Loading is serial: one word at a time over the row and
  column buses. The paper does not give the loading bandwidth. Only the MAC
  phase is timed against the paper's one MAC per PE per cycle.
- **Decay reaching zero.** The decay acts on the integer scale with
  round-down. Starting from the largest 14-bit scale, it reaches exactly zero
  after about 90 steps. The paper's training experiments decay FP32 initial
  weights over roughly the first 1,000 iterations. Here, skipping starts as
  soon as the scale is zero.
- **Weight arithmetic.** The weight is the scaled initial value plus the
  accumulated gradient for a tracked weight, and the scaled initial value
  alone for a pruned one. This follows the hardware description. The training
  algorithm's listing instead writes tracked weights as their updated value
  without the initial term.
- **Off-chip DRAM.** It is not part of the design. Its two 64-bit links are
  top-level ports.
- **FIFOs, port counts and widths.** Where the paper is silent, this design
  uses its own choices:
  - GLB with a 128-bit line and one read and one write port;
  - register file with two read ports;
  - 16-deep DRAM write queue;
  - FP32 rounding mode;
  - generator variant and seed/index mixing;
  - 32 fraction bits for the WR scale;
  - up to 16 positions per block.
- **Sizes kept from the paper.** 16×16 PEs, 128 KB GLB, 1 KB register file
  per PE, three generators per WR unit, four gradients per cycle into the
  estimator, ρ = 10⁻³, initial θ = 10⁻⁶, decay 0.9, 64-bit DRAM link.

## Workload sizing

The evaluated networks range from 0.35 M to 8.3 M sparse weights:

- DenseNet
- WRN-28-10
- VGG-S
- MobileNet v2
- ResNet18

None of them fits in the 128 KB GLB (32 K words). They run tile by tile. One
pass holds at most:

- 512 weights (16 rows × 2 blocks × 16 positions);
- 16 activation vectors.

3×3 kernels use 9 positions per block. A 7×7 kernel is split by kernel row
into blocks of 7 positions.

The 32×32 scaling point needs `ROWS = COLS = 32`, a 256 KB GLB and a 16-bit
GLB word address in the package.
