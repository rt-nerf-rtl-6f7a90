# RT-NeRF parallel processing unit: sparse radiance-field rendering in RTL

A neural radiance field (NeRF) renders a pixel by walking along the camera ray and
integrating the density σ and colour c of the points it passes:

    C = Σ_k T_k (1 − exp(−σ_k δ_k)) c_k,        T_k = Π_{i<k} exp(−σ_i δ_i)

RT-NeRF makes this cheap in two ways. First, the algorithm only visits the *pre-existing*
points, the ones that fall into occupied cells of a coarse occupancy grid. It stops a
ray once its transmittance T is negligible (early ray termination). Second, the hardware
exploits how sparse the model is. The radiance field is stored as in TensoRF: a sum of
vector × matrix products. Density and appearance at grid point (x, y, z) are sums of terms

    v_j^X[x] · M_j^{YZ}[y, z]   (and the same with the axes rotated)

and many of the vectors and matrices are mostly zero. A matrix that is less than 80 %
zero is stored as a **bitmap**: one presence bit per element, a per-row pointer, and the
packed non-zeros. A sparser one is stored as a **coordinate list (COO)**. Each format has its own
decoder:

* a **high-density sparse search unit** that finds any bitmap-encoded element in exactly
  three cycles;
* a **dual-purpose bi-direction adder & search tree**. This is the adder tree that sums the
  feature products. Half of it can turn into a binary search tree that walks *down* to
  the COO entry of a coordinate while the other half keeps adding *up*.

The RTL here implements the accelerator's parallel processing unit (PPU) completely: its
decoders, multipliers, colour MLP, integration & early-termination mask, buffers and
local controller. It also implements the memory controller and a top level that holds
N PPUs. The serial processing units are RISC-V cores that turn pixels into rays and find
the pre-existing points. They are not included: their command and point streams are
ports of the top level.

## Hierarchy

```
rtnerf_top                 N_PPU PPUs + memory controller; SPU and DRAM signals are ports
├── mem_ctrl               round-robin DRAM read arbiter, shared response (data) bus
└── ppu  (x N_PPU)         one parallel processing unit; its local controller is the FSM inside
    ├── global_buffer      data buffer (point FIFO) + sparse matrix buffer (COO data)
    ├── hdssu              bitmap store, row pointers, non-zero array; 2 lookup ports, 3 cycles
    ├── dbast              adder & search tree
    │   ├── dbast_trunk_node   adder / comparator
    │   └── dbast_leaf_xbar    crossbar search register of a search leaf
    ├── mult_pool          8 saturating Q7.8 multipliers
    ├── sparse_mlp_unit    zero-skipping MLP, appearance features + direction -> RGB
    └── integration_mask_unit  per-pixel C and T, early-termination mask
        └── exp_neg_unit   exp(-s) from a 17-entry table
rtnerf_pkg                 formats, commands, table entries, counters
```

## Number formats

The accelerator description gives no word widths. This design uses the following:

| quantity | format |
|---|---|
| vector/matrix elements, products, density σ, MLP activations, colours | signed Q7.8 (`data_t`) |
| transmittance T | unsigned Q1.15, 1.0 = 0x8000 (`trans_t`) |
| segment length δ and optical depth σδ | unsigned Q8.8 |
| grid indices | 8 bits: a matrix has at most 256 × 256 elements |

Products saturate to 16 bits. The adder tree grows by one bit per level, so no sum
inside it overflows. σ is saturated once, after the last chunk.

## How a PPU renders a point

The local controller handles one pre-existing point at a time. A point carries its pixel,
its grid indices, its segment length δ and its viewing direction. It goes through these
steps:

1. **Mask.** The integration & mask unit is asked whether the pixel's T is still at least
   `T_TH`. If not, the point is dropped before any memory access. This is early ray
   termination, and it counts as `points_skipped`.
2. **Look-up.** The tree switches to *mixed* mode. One term is issued per cycle. Its
   vector element goes to port 0 of the bitmap unit. Its matrix element goes either to
   port 1 of the bitmap unit (bitmap matrix) or down the search half of the tree (COO
   matrix). Both decoders answer three cycles later, so results return in issue order.
   A 3-deep tag pipeline sends each answer to its term's register.
3. **Multiply.** The multiplier pool forms 8 products per cycle.
4. **Add.** The tree switches back to *adder* mode. It sums the density products 8 at a
   time, and the chunks are added into σ.
5. **MLP.** The appearance products and the view direction go into the sparse MLP, which
   returns RGB.
6. **Integrate.** σ, δ and RGB update the pixel.

The term table says, for each term j, which axis its vector runs along, how its matrix is
encoded, and where the vector and matrix rows are in the bitmap store. The axis fixes
which point indices address the matrix: for axis Z the matrix is indexed by (x, y).
Terms 0 … `NT_SIG`−1 are density terms and the rest are appearance terms. Which
format a matrix uses (bitmap below 80 % sparsity, COO from 80 %) is decided when the
model is prepared. It is stored in the table, not measured by the hardware.

Two tree reconfigurations happen per point, and both are counted in `mode_switches`. With
the default 24 terms, the 24 look-up cycles are the largest fixed share of a point's time.
The other stages add a few cycles each. The MLP's share depends on how many of its inputs
are non-zero.

## Bitmap decoding in three cycles (`hdssu`)

All bitmap-encoded vectors and matrices share one store. A store row holds one vector, or
one row of one matrix. A row has 256 presence bits, a row pointer (the index of its
first non-zero in the non-zero array), and its non-zeros packed in column order. A
look-up of element (row, col) runs as follows:

| cycle | work |
|---|---|
| 1 | read the bitmap row and the row pointer; look at bit `col` |
| 2 | count the set bits below `col` (masked population count, an adder tree) and add the row pointer |
| 3 | read the non-zero array at that address; return 0 if the bit was clear |

The latency is always three cycles: a clear bit also takes three cycles. The unit is
fully pipelined, so each of its two ports accepts a look-up every cycle. Because the
latency never varies, the controller can issue look-ups blindly and never waits on a
decode.

## The adder & search tree (`dbast`)

The tree has 8 leaves and 7 trunk nodes, numbered as a heap: node 1 is the root and node
n has children 2n and 2n+1. Node 2 roots **sub-tree A** (leaves 0–3). Node 3 roots
**sub-tree B** (leaves 4–7).

**Trunk node.** Each trunk node is a single adder. For search, an inverter on its second
input turns a + b into a − b, and a sign detector on the output reports which is larger.
In search mode the node outputs only that sign bit. A set bit means the query coordinate
is below the node's threshold, and the query goes to the left child.

**Adder mode** (`TREE_ADD`). Operands enter the leaf registers. Each level adds and
registers. The sum of all 8 leaves appears 4 cycles after `add_valid`, together with the
sum of sub-tree A. The tree accepts new operands every cycle.

**Mixed mode** (`TREE_MIXED`). Sub-tree A keeps adding, and only `sum_a` is meaningful.
Sub-tree B searches:

* A query (x, y) enters node 3. Node 3 compares x or y with its threshold; each node is
  configured with which coordinate it tests.
* Its sign picks node 6 or node 7, and the query moves there one cycle later. The chosen
  node compares in turn and picks one of leaves 12–15.
* Each level is a pipeline stage. The stages carry the query coordinates and the heap
  index of the next node, so a new query can enter every cycle.
* The leaf reached is a **crossbar search register** of 3 (x, y, value) entries. All 3
  entries are compared with the query at once. The value of the matching entry, or 0, is
  registered as the answer.
* The answer arrives 3 cycles after `s_valid`, the same as the bitmap unit. This lets
  the controller mix bitmap and COO terms freely in one look-up stream.

Search leaves are numbered 0–3 inside sub-tree B:

| leaf | region |
|---|---|
| 0 | left, left |
| 1 | left, right |
| 2 | right, left |
| 3 | right, right |

The configuration port writes either a trunk node's threshold and dimension, or one entry
of a leaf. `cfg_clr` empties all leaves.

The worked example of the original description is reproduced in `tb_dbast`:

* the root splits x at 128, and the next level splits y at 128 and 196;
* the leaf holds (1, 195), (3, 161) and (5, 182);
* the query (3, 161) is answered from that leaf.

The search half can hold 4 × 3 = 12 non-zeros, one COO matrix at a time. The controller
loads it from the sparse matrix buffer with the `OP_TREE_LOAD` command.

## Colour MLP (`sparse_mlp_unit`)

The network is 15 inputs → 16 ReLU units → 3 outputs clamped to [0, 1]. The inputs are
the 12 appearance products and the direction (dx, dy, dz).

The weight SRAM holds one row of 16 weights per input, plus a bias row per layer. Each
cycle, a find-first-set picks the next non-zero input, and 16 MACs apply it to all
outputs at once. Zero inputs cost nothing, so a layer takes one cycle per non-zero input.
`done` pulses nnz(x) + nnz(hidden) + 3 cycles after `start`.

Accumulators have 32 bits and Q.16 scaling. Each layer's output is saturated back to
Q7.8.

## Integration and early termination (`integration_mask_unit`)

For every pixel of its tile (1024 pixels), the unit keeps the partial colour C (3 × Q7.8)
and the transmittance T (Q1.15). Pixels are updated in place, one point per cycle, in
two stages:

1. s = max(σ, 0)·δ, rounded to Q8.8 and saturated.
2. e = exp(−s). Then C += T(1 − e)·c and T ← T·e. All products are rounded.

The pixel is read and written in the same cycle, so points of one pixel may follow each
other back to back.

**Exponential.** exp(−s) is computed as 2^−u with u = s·log2(e). The fractional part of u
comes from a 17-entry table of 2^(−i/16) with linear interpolation, and the integer part
is a shift. The relative error is a few parts in 10⁴, at most about (ln 2/16)²/8.

**Mask.** A pixel whose T is below `T_TH` (3, about 1e-4) is terminated:

* `mq_visible` drops, and the PPU then skips the pixel's remaining points;
* any point still arriving for it is dropped without update (`upd_masked`).

In this PPU a point is integrated before the next point is masked, so the second path
never fires. It is kept for deeper pipelines.

`frame_clr` resets every pixel in one cycle: a per-pixel "touched" flag makes an
untouched pixel read as T = 1, C = 0.

## Control bus, data bus and memory map

Each PPU takes commands (`cmd_t`) on a valid/ready channel, only between points:

| op | meaning |
|---|---|
| `OP_LOAD` | DMA `count` 64-bit words from DRAM `dram_addr` to local memory `tgt` at `local_addr` |
| `OP_TREE_LOAD` | empty the tree's leaves, then copy `count` entries of the sparse matrix buffer into the tree |
| `OP_FRAME` | reset all pixels |
| `OP_READ` | stream `count` pixels (`px_valid/px_pix/px_rgb/px_t`), one per cycle |

Local memories and their word addresses:

| `tgt` | memory | local address |
|---|---|---|
| `TGT_BITMAP` | bitmap store | row·4 + word (64 bits each) |
| `TGT_ROWPTR` | row pointers | row |
| `TGT_NZ` | non-zero array | index/4 (4 elements per word, element 0 in the low bits) |
| `TGT_TERM` | term table | term; a `term_t` in the low bits |
| `TGT_WEIGHT` | MLP weights | row·(N_HID/4) + quarter |
| `TGT_SPM` | sparse matrix buffer | entry; an `spm_entry_t` |

An `spm_entry_t` is either a trunk-node threshold (`is_leaf` = 0: node, dimension,
threshold) or a leaf entry (`is_leaf` = 1: leaf, slot, x, y, value).

Points (`point_t`) enter the PPU's data buffer, a 16-deep FIFO, through
`pt_valid/pt_ready`.

The memory controller grants one PPU read request per cycle, round-robin. It tags each
request with the PPU's number. Responses come back on one data bus shared by all PPUs,
with a per-PPU valid. The DRAM must keep each PPU's responses in order. The cycles a
PPU's request waits are counted in `mem_stalls`.

Each PPU also exposes `ppu_perf_t` event counters:

* `points_done`, `points_skipped` and `points_masked`;
* `bitmap_lookups` and `coo_lookups`;
* `mode_switches` and `mem_stalls`.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `rtnerf_top.N_PPU` | 1 | PPUs. 1 is the edge configuration (1 SPU + 1 PPU); the cloud configuration has 30 |
| `ppu.NT_SIG`, `NT_APP` | 12, 12 | density and appearance terms |
| `ppu.LANES` | 8 | multipliers and tree leaves (the tree of the original has 8 leaves) |
| `ppu.HD_ROWS`, `HD_NZ` | 8192, 262144 | bitmap store rows and non-zero array size |
| `ppu.MLP_HID` | 16 | hidden units |
| `ppu.SPM_DEPTH`, `PT_DEPTH` | 256, 16 | sparse matrix buffer and point FIFO depth |
| `integration_mask_unit.PIX_DEPTH`, `T_TH` | 1024, 3 | pixels per tile, termination threshold |

The original description gives only these: the 80 % threshold between formats, the
three-cycle bitmap decode, the 8-leaf tree with 3-entry leaves, and the PPU counts of its
two configurations. Every other size above is this design's choice.

At the defaults, one PPU holds about 0.8 MB of SRAM, almost all of it in the bitmap
store and the non-zero array. The edge configuration has 3.5 MB in total.

## Where this departs from the original design, and its limits

* **Serial processing units.** They are not implemented. The testbenches play their
  role.
* **Model size.** A full TensoRF model of a Synthetic-NeRF scene does not fit at the
  default sizes. Such a model has a 300³ grid and 192 components, each with a 300 × 300
  matrix. It would need 300-element rows, so 9-bit indices, and millions of non-zeros.
  Rendering a real scene would need the model tiled through DRAM under SPU control, and
  that is not part of this RTL.
* **COO capacity.** The search half of the tree holds one COO matrix of at most 12
  non-zeros at a time. The original tree is drawn at the same size. How larger COO
  matrices are staged through it is not described there and not implemented here.
* **When the tree is reconfigured.** This design switches the tree twice per point. The
  original only says that it is reconfigured according to the sparsity.
* **MLP shape and formats.** The MLP shape, the number formats, the exp approximation,
  the command set, the memory map and the round-robin memory controller are all this
  design's choices.
* **Throughput.** The frame rates of the original (45 FPS edge, 1300 FPS cloud) were not
  evaluated. The PPU processes one point at a time, and its look-up stage is not
  overlapped with the MLP of the previous point.
* **Simulated sizes.** Only `N_PPU = 1` has been simulated. The top is written for any
  `N_PPU`.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_hdssu` | random 16 × 256 matrix, about 40 % dense; random look-ups on both ports every cycle; values and the 3-cycle latency |
| `tb_dbast` | adder mode (values, 4-cycle latency); mixed mode with the worked example above plus random entries (values, 3-cycle latency, `sum_a` still adding); back to adder mode |
| `tb_mult_pool` | random products, saturation, enables, 1-cycle latency |
| `tb_sparse_mlp_unit` | bit-exact integer model on random sparse inputs; latency nnz(x) + nnz(h) + 3 |
| `tb_integration_mask_unit` | floating-point rendering model with tolerance; back-to-back points; masking of an opaque pixel; frame clear |
| `tb_global_buffer` | FIFO order, full/empty, sparse matrix buffer reads |
| `tb_mem_ctrl` | 3 clients, random DRAM stalls; per-client data and order; round-robin fairness; stalls |
| `tb_ppu`, `tb_rtnerf_top` | end to end at default sizes, see below |

**End-to-end tests.** `tb_ppu` (one PPU) and `tb_rtnerf_top` (the top at its default
parameters) share a scene from `tb/ppu_scene.svh`:

* 24 terms over a 16³ grid: 23 bitmap-encoded terms and one COO term (density term 5);
* the COO term sits in the search tree as 12 non-zeros, one quadrant per leaf;
* random MLP weights.

The testbench loads all of it through DRAM commands and sends 60 or 80 points into 8
pixels. One pixel is made opaque early, so its later points must be skipped.

The reference model is bit-exact up to σ and RGB, and it applies the same Q8.8 rounding
of σδ. As each point reaches integration, its σ and RGB (read inside the PPU) must match
the model bit for bit. The integration itself is done in floating point. Pixels must agree within
32/32768 in T and 8/256 per colour channel.

The tests also check the event counters against the expected counts, and require each
mechanism to occur at least once:

* bitmap look-ups;
* COO look-ups through the tree;
* mode switches;
* skips by the mask;
* memory stalls.

The DRAM is a behavioural model (`tb/dram_model.sv`) with random back-pressure and fixed
latency.

**Running with Verilator.** Run from the repository root, for example:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/rtnerf_pkg.sv tb/tb_rtnerf_top.sv --top-module tb_rtnerf_top
./obj_dir/Vtb_rtnerf_top
```

Replace the testbench name to run any other test. The end-to-end test finishes in well
under a second of wall time.
