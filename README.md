# Difference-driven BNN convolution accelerators

A binarized neural network (BNN) layer computes dot products of ±1 vectors.
In real data most of these products change very little from one to the next:
- Neighbouring pixels of a feature map usually have most channels in common.
- Kernels of a trained layer, taken in a suitable order, usually share most
  of their weights.

The idea is to compute a dot product in full only once. Each following product
is obtained from the previous result by correcting for the few bits that
changed. Bits that did not change cost no work. Channel groups where nothing
changed are skipped outright, including the weight read.

This repository holds two accelerators for 3x3, stride-1 binarized convolution
layers, both built on that idea, plus a top level that contains both:

| Accelerator | What it streams | What stays put |
|---|---|---|
| input reuse (`bnn_ir_accel`) | input pixels, as differences from the left neighbour | kernels, split over the PEs |
| weight reuse (`bnn_wr_accel`) | kernels in an offline-chosen order, as differences from the previous kernel | input rows, split over the PEs |

The memories are sized for the convolution layers of BinaryNet on CIFAR-10:
- maps up to 32x32;
- up to 512 input channels and 512 kernels;
- 8 processing elements (PEs).

## 1. The arithmetic every part relies on

### Encoding

Bits encode 0 = +1 and 1 = −1. For two bits x and w, XNOR(x, w) = 1 exactly
when the ±1 product is +1.

Over n channels:

    dot = 2·popcount(XNOR(x, w)) − n

Pooling: 2x2 max-pooling of ±1 values is the AND of the bits under this
encoding.

### Difference update

Suppose a dot product P = Σ x_c·w_c is known, and the next product differs
only in channels M, where one operand flipped sign. Each flipped channel
changes its term from t to −t. So:

    P' = P − 2·Σ_{c∈M} t_c
       = P + 4·popcount(M & XNOR(x', w')) − 2·popcount(M)

Here x' and w' are the new operands. A flipped term that is now +1 was −1
before, which gives +2. A flipped term that is now −1 gives −2.

Example: old result 2, three flipped channels whose new products are
(+1, +1, −1). The new result is 2 + 4·2 − 2·3 = 4.

Every PE in this design holds the previous results in a **reuse buffer**. It
applies one of two updates:

| word type | update |
|---|---|
| full (`full=1`) | P = [0 if first channel group] + P + 2·popcount(XNOR) − 16 |
| difference (`full=0`) | P += 4·popcount(mask & XNOR) − 2·popcount(mask) |

In both cases the update covers one 16-channel group (CG = 16) of one operand
against the nine taps of a 3x3 kernel in parallel. The nine taps share one
weight word of 9 × 16 = 144 bits. Tap (r, s) sits at bits
`[(3r+s)·16 +: 16]`.

### Accumulation

A reuse-buffer entry is one input pixel (h, w) times one kernel tap (r, s) of
kernel k. It belongs to output position:

    (h − r + pad, w − s + pad, k)

Here pad = 1 for "same" padding and 0 otherwise. Entries that land outside
the output map are dropped, which is exactly zero padding. The accumulator
adds each entry into an **OA bank** (output-activation memory). It does this
as a read-modify-write with forwarding, so back-to-back adds to one address
are correct.

### Batch normalization and sign

Batch normalization followed by sign is folded offline into one integer
threshold per kernel:

    output bit = (sum < thr[k])

Bit 1 means −1. Pooling then ANDs 2x2 windows.

## 2. Input-reuse accelerator (`bnn_ir_accel`)

### Where data lives

- **Data buffers A and B** (`data_buffer`, 8192 × 16 bits each): the whole
  input map. Word (h·W + w)·(C/16) + g holds channels 16g…16g+15 of pixel
  (h, w). A layer reads one buffer (`cfg.src`) and writes its output into the
  other, so layers chain without moving data.
- **W bank per PE** (`wbank`, 2048 × 144 bits): kernel k lives in PE k mod 8
  at local index k/8. The word address is `{k_local[5:0], group[4:0]}`. This
  holds 512 kernels of 512 channels.
- **Reuse buffer per PE** (`reuse_buffer`): for each local kernel, the nine
  tap results of the last pixel. 64 kernels × 9 × 12-bit flip-flops.
- **OA bank per PE** (`oa_bank`, 16384 × 16 bits): the full output map of the
  PE's kernels. The address is (ho·out_w + wo)·(K/8) + k_local.

### Schedule of one layer (`ir_ctrl`)

1. Clear the OA banks.
2. For every input pixel, in row-major order:
   - **Check.** The checking engine (`ir_chk`) reads the pixel's channel
     groups.
     - At w = 0 it sends every group whole (full words).
     - Otherwise it compares each group with the same group of pixel
       (h, w−1). It sends only groups that differ, with the new bits and the
       mask of changed channels, and skips the others.
   - **Broadcast.** Words travel over a valid/ready bus. All PEs take a word
     together once all of them are idle. A word stays stable while it waits
     (an assertion checks this).
   - **PE update.** Each PE (`ir_pe`) walks its local kernels, one per cycle.
     For each it reads the kernel's weight word for that group and updates
     the nine entries. A word costs kpp + 2 cycles, where kpp = K/8.
   - **Accumulate.** After the pixel's last group and once the PEs are idle,
     the shared address generator (`addr_gen`) steps through 9·kpp
     (kernel, tap) entries. Every PE adds its entry into its own OA bank at
     the same address.
3. **Batch normalization.** The BN engine (`bn_engine`) walks output pixels,
   kernel groups, kernels and 2x2 window positions, reading one OA word per
   cycle from PE k mod 8. It thresholds, ANDs the window, and packs 16 kernels
   per word. It writes each word to the other data buffer at
   (py·pw + px)·(K/16) + kg.

Run time is roughly:

    Σ over pixels (sent groups · (kpp + 4) + 9·kpp) + out_h·out_w·K

A skipped group costs 2 cycles and no weight reads.

## 3. Weight-reuse accelerator (`bnn_wr_accel`)

Roles are swapped: the input rows are spread over the PEs and the kernels are
streamed.

### Offline preparation, by the host

- **Order the kernels.** The kernels are ordered so that neighbours in the
  order are similar. The ordering works inside sets of 64 kernels. The
  testbench's reference does it by greedy nearest-neighbour on Hamming
  distance.
- **Encode them.**
  - The first kernel of the layer is stored with its real bits.
  - Every later kernel is stored as a mask: 1 where it differs from the
    previous kernel in the order, 0 where it is the same.
- **Fill the sequence table.** It gives, for every slot of the order, the
  original kernel index (512 × 9 bits).

### Where data lives

- **Weight buffer** (one `wbank`, 16384 × 144 bits): slot j, group g at
  address j·(C/16) + g.
- **Data buffers A/B in every PE** (1024 × 16 bits each): PE i holds input
  rows i·rpp … i·rpp + rpp − 1, where rpp = ceil(H/8) ≤ 4 (`cfg.rpp`). Local
  pixel p = (h − i·rpp)·W + w, word p·(C/16) + g. PEs past the bottom of the
  map hold nothing.
- **Reuse buffer per PE:** for each local pixel (up to 4 × 32 = 128), the nine
  tap results of the previous kernel.
- **OA bank per PE** (24576 × 16 bits): covers the output rows that the PE's
  input rows reach, which is its rpp rows plus one halo row above and below.
  Bank-local row lr = h_local − r + 2 (0 … rpp + 1). Address
  (lr·out_w + wo)·K + k.

### Schedule for every kernel slot

1. **Check** (`wr_chk`). The engine keeps a *weight base*: the real bits of
   the latest kernel, one 144-bit word per channel group.
   - For slot 0 it broadcasts the stored words as full words.
   - For later slots it reads the mask word. An all-zero mask is skipped.
     Otherwise it broadcasts the new weights (base XOR mask) together with
     the mask, and updates the base.
2. **PE update** (`wr_pe`). Each PE walks its local pixels, one per cycle. It
   reads the pixel's group from its data buffer and updates the pixel's nine
   entries with the rules of §1. A word costs npix + 2 cycles.
3. **Revert and accumulate.**
   - The sequence table turns the slot into its original kernel index. This
     is where the reordering is undone: each result lands in its proper
     output channel.
   - The address generator (`wr_addr_gen`) steps through 9·rpp·W
     (pixel, tap) entries.
   - The address is the same for all PEs. Each PE checks for itself whether
     the output row (its first row + h_local − r + pad) lies in the map.
4. **Reduce and binarize** (`wr_bn`), after the last slot.
   - Output rows near a band edge received partial sums in two PEs. For each
     output position and kernel, the engine reads every PE whose bank covers
     that row and adds the values.
   - It then thresholds, pools and packs like the input-reuse engine.
   - Output row py goes to PE py / rpp_o, where rpp_o = ceil(out rows / 8)
     (`cfg.rpp_o`). The data is then already distributed the way the next
     layer expects.

Run time per slot is roughly:

    sent groups · (npix + 4) + skipped groups · 2 + 9·rpp·W

The accumulation term does not shrink with similarity. This is why similar
kernels speed this design up much less than similar pixels speed up the
input-reuse design.

## 4. Top level and host interface (`bnn_accel`)

`bnn_accel` contains both accelerators. The `mode` input selects one for a
layer (0 = input reuse, 1 = weight reuse). `mode` must be held from before
`start` until `done`, which an assertion checks. Loads, `start` and
read-backs go only to the selected accelerator. `busy`, `done`, `rd_data` and
`stats` come from it. Data does not move between the two: the host loads each
in its own layout.

| port | meaning |
|---|---|
| `ld_en, ld_tgt, ld_pe, ld_addr, ld_data[143:0]` | one write per cycle. Targets: `LD_DBUF_A/B` (input reuse: shared buffers; weight reuse: buffer of PE `ld_pe`), `LD_WBANK` (input reuse: W bank of PE `ld_pe`; weight reuse: weight buffer), `LD_THR` (threshold of kernel `ld_addr`, low 16 bits), `LD_SEQ` (weight reuse: original kernel of slot `ld_addr`). Not allowed while busy. |
| `start`, `cfg` (`layer_cfg_t`) | `in_h, in_w, cgrp = C/16, kpp = K/8, pad, pool, src`, plus for weight reuse `rpp, rpp_o`. `cfg` must stay stable until `done`. |
| `busy`, `done` | `done` pulses for one cycle when the output is in the other buffer. |
| `rd_en, rd_buf, rd_pe, rd_addr` → `rd_data[15:0]` | read-back while idle. Data arrives the next cycle. |
| `stats` (`stats_t`) | per run: cycles, pixels (input reuse) or kernel slots (weight reuse), groups sent whole / sent as difference / skipped, weight words read, XNOR bit operations. |

Constraints:
- C and K must be multiples of 16. K/8 must be at most 64.
- The map is at most 32x32.
- For weight reuse, rpp must be at most 4.

## 5. Capacity against BinaryNet CIFAR-10

| layer | input | kernels | fits? |
|---|---|---|---|
| conv1 | 32×32×128 | 128 | yes: input 131072 bits = one data buffer; 16 kernels/PE; weight reuse: 4 rows/PE, 1024 words/PE |
| conv2 | 16×16×128 | 256 | yes |
| conv3 | 16×16×256 | 256 | yes |
| conv4 | 8×8×256 | 512 | yes |
| conv5 | 8×8×512 | 512 | yes: 64 kernels × 32 groups fill each W bank exactly; weight buffer 16384 words |

Pooling after conv1, conv3 and conv5 is done by the BN engines.

Neither design handles:
- the first layer on the 3-channel image;
- the fully connected layers.

## 6. Measured behaviour

Simulated at the default size: conv1 and conv2 on the input-reuse design,
then conv3 and conv4 on the weight-reuse design. Each is checked bit for bit
against a direct convolution.

| layer | design | input | cycles | groups full / diff / skipped |
|---|---|---|---|---|
| conv1 | input reuse | neighbouring pixels differ in 20 % of channels | ≈ 447 k | 256 / 7733 / 203 |
| conv2 | input reuse | conv1's output | ≈ 215 k | 128 / 1805 / 115 |
| conv3 | weight reuse | kernels differ from a neighbour in 0.5 % of weights | ≈ 232 k | 16 / 2134 / 1946 |
| conv4 | weight reuse | same kernel similarity | ≈ 133 k | 16 / 4364 / 3812 |

The exact numbers vary with the random data.

On a small layer, input reuse takes fewer cycles on a uniform image than on
a correlated one, and fewer on a correlated one than on a random one. The
testbench checks this ordering.

## 7. What follows the paper and what is this design's own

**Taken from the paper describing the method:**
- the XNOR/popcount arithmetic;
- the first-pixel and difference stages;
- the checking engine that broadcasts differences to PEs;
- weight banks split by kernel;
- reuse buffers and a shared address generator using the (h − r + pad, w − s + pad) rule;
- A/B data buffers;
- a combined batch-norm/binarize/pool engine using thresholds and AND;
- for weight reuse:
  - rows spread over PEs with two buffers each;
  - same/different weight encoding with a weight base;
  - a sequence table for reverting the order;
  - a final cross-PE reduction;
- 8 PEs;
- a reordering range of 64.

**Own choices:**
- the 16-channel group and the bus word format;
- the valid/ready handshake;
- the non-overlapped stage schedule;
- all memory layouts and sizes;
- starting input reuse afresh at the first pixel of every row;
- the halo-row OA layout;
- reverting at accumulation time rather than in the BN engine (the result is
  the same);
- only slot 0 being stored with real weights;
- the event counters;
- putting both accelerators under one top with a mode input.

**Readings of unclear points.**
- The method description says that "different input values" are processed
  by the PEs simultaneously. It also says that weights are split by kernel so
  that outputs do not interleave across OA banks. This design follows the
  second statement: all PEs see the same pixel, and each PE owns K/8 kernels.
- The method says that the first input is computed in full. Because
  similarity is defined against the left neighbour (h, w−1), this design
  computes the first pixel of *every* row in full.
- The method describes the batch-norm engine as the place where the kernel
  order is reverted. This design reverts one step earlier, by accumulating
  each kernel straight into its original output channel.

**Not modelled:** the AXI/DDR path, DRAM and host CPU. These are replaced by
the load and read-back ports.

## 8. Files

`rtl/`:
- `bnn_pkg.sv`: types and constants.
- Input-reuse design: `data_buffer`, `wbank`, `reuse_buffer`, `ir_chk`, `ir_pe`, `addr_gen`,
  `oa_bank`, `bn_engine`, `ir_ctrl`, `bnn_ir_accel`.
- Weight-reuse design: `wr_chk`, `wr_pe`, `wr_addr_gen`, `wr_bn`, `bnn_wr_accel`. It
  reuses `data_buffer`, `wbank`, `reuse_buffer` and `oa_bank`.
- Top: `bnn_accel`.

`tb/`:
- One self-checking testbench per module (`tb_<module>.sv`). Each prints
  `TB_RESULT checks=… failures=…`.
- `bnn_ref_pkg.sv`: the reference model. It covers direct convolution, kernel
  ordering and expected event counts.
- `bnn_accel_env.sv`: the end-to-end environment. It is used by:
  - `tb_bnn_accel` (both designs, small layers);
  - `tb_bnn_ir_accel`;
  - `tb_bnn_wr_accel`;
  - `tb_bnn_accel_full` (the BinaryNet layers above, at default sizes; a few
    minutes of simulation).

Running one testbench with Verilator:

    verilator --binary --timing --assert -Wno-fatal rtl/bnn_pkg.sv tb/bnn_ref_pkg.sv \
        rtl/*.sv tb/bnn_accel_env.sv tb/tb_bnn_accel.sv --top-module tb_bnn_accel -o sim
    ./obj_dir/sim

Notes:
- List `bnn_pkg.sv` first. Listing it a second time through `rtl/*.sv` is harmless.
- For a unit test, the package and the module under test are enough.

The lint warnings left are unused address bits, an unused parameter kept for
interface symmetry, and the reset used both in flops and in assertion
`disable iff` clauses.
