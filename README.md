# Pointer: a ReRAM-based PointNet++ accelerator in SystemVerilog

PointNet++ classifies a point cloud by running set-abstraction (SA) layers.
Each layer has two stages:

- **Mapping.** It picks well-spread centre points by farthest point
  sampling (FPS) and finds each centre's k nearest neighbours.
- **Features.** For every centre it takes the feature vectors of its
  neighbours and subtracts the centre's vector. It runs each difference
  through a three-layer MLP and keeps the element-wise maximum over the
  neighbours.

Once the MLP weights sit in ReRAM crossbars that compute the matrix-vector
products in place, weights no longer move. Moving feature vectors becomes
the cost that matters: fetching each neighbour's vector from DRAM again and
again.

This design attacks that cost with a small on-chip buffer and two
scheduling ideas:

- **Inter-layer coordination.** It does not finish layer 1 before starting
  layer 2. The accelerator works one *receptive field* at a time. For every
  layer-2 centre it first computes the layer-1 points that centre needs (each
  only once over the whole run), then the layer-2 point itself. Layer-1
  results are therefore still in the buffer when layer 2 reads them.
- **Topology-aware reordering.** The layer-2 centres are visited in a greedy
  nearest-next order instead of by index. Consecutive receptive fields then
  overlap, and the buffer keeps hitting.

The RTL covers the whole chip apart from DRAM:
- the front-end, which does the mapping and the order generation;
- the scheduler, which does the coordination;
- a 9 KB feature buffer;
- a ReRAM tile of 96 in-situ multiply-accumulate units (IMAs), each made of
  8 crossbars of 128×128 cells with 2 bits per cell;
- a digital compute unit (CU);
- the main controller.

Defaults are the full-size configuration: 1024-point clouds, 512 then 128
centres, 16 neighbours, two SA layers, 16-bit features and weights.

## Data formats and the external view

- **Numbers.** Features and weights are 16-bit signed Q8.8. Coordinates are
  16-bit signed integers. Distances are squared Euclidean distances
  (34 bits). Dot products are accumulated exactly in 48 bits. Each MLP output
  is requantised as `max(0, sat16(acc >>> 8))`.
- **DRAM port.** `dram_*` on `pointer_top` carries one 16-bit word per
  request:
  - a request is held until `dram_req_ready`;
  - reads return in order on `dram_rsp_valid`;
  - the latency is arbitrary.
- **Memory layout in DRAM.**
  - Point `i` has its coordinates at `coord_base + 3i` (x, y, z).
  - Its level-`L` feature vector is at `base_L + i*len_L`.
  - Level 0 holds the input features, level 1 the SA1 outputs and level 2
    the SA2 outputs.
- **Configuration.** `cfg_we/cfg_addr/cfg_wdata` write the registers of
  `config_regs`. The word addresses are in `pointer_pkg`:
  - cloud size, SA1 centres, SA2 centres and k;
  - the three vector lengths;
  - the coordinate base and the three feature bases;
  - the buffer slot size;
  - the reorder-enable flag;
  - one word per MLP layer, `{ima_base, out_dim, in_dim}`.
- **Weight programming.** `prog_en/prog_ima/prog_row/prog_col/prog_w` write
  one 16-bit weight per cycle into an IMA. The port is ignored while the
  accelerator is busy.
- **Run.** `start` runs one cloud. `done` pulses at the end.
- **Counters.** `hit_cnt`, `miss_cnt` and `exec_cnt` count per layer: buffer
  hits, DRAM fetches on a miss, and points executed.

## Front-end: sampling, neighbours and order

`frontend` loads all coordinates from DRAM into a local store, then runs
three phases. One shared `distance_calc` serves all of them.

1. **SA1 mapping** (`mapping_unit`). FPS over all points: the first point is
   the seed. Each step keeps, for every point, its minimum distance to the
   centres chosen so far, and takes the point with the largest such
   distance; ties go to the lowest index. Then a kNN pass per centre keeps a
   sorted k-entry list by insertion; equal distances keep the earlier point.
   Both passes take one candidate per cycle. A cloud of n points with M
   centres costs about (2M−1)(n+1) cycles.
2. **SA2 mapping.** The same unit runs with the SA1 centres as the candidate
   set.
3. **Order** (`order_generator`).
   - With reordering on: it starts from the first SA2 centre, then
     repeatedly picks the unused centre nearest to the last one picked, with
     ties going to the lower list position. That costs n(n+1) cycles for
     n centres.
   - With reordering off: it emits the index order.

Each receptive field (centre plus k neighbour indices) and the order are
streamed to the scheduler.

## Scheduler: receptive field by receptive field

`scheduler` stores the SA1 and SA2 receptive fields and the order. It then
walks the order:

1. For each SA2 centre, it emits a token for every SA1 neighbour that has
   not yet been issued, tracked in a 1024-bit issued map.
2. It then emits the SA2 centre's own token.

An already-issued neighbour costs one idle cycle. Tokens go out on a
valid/ready port. The token stream reproduces the two worked schedules of
the architecture exactly, the index-order one and the reordered one; the
scheduler testbench checks both.

## Back-end: executing one point

`controller` takes one token at a time:

1. Fetch the centre's vector Fi through the buffer.
2. For each of the k neighbours:
   1. fetch Fj;
   2. let the CU form `sat16(Fj − Fi)`;
   3. run the three MLP layers of this SA layer on the ReRAM tile;
   4. fold the result into the running maximum.
3. Write the output vector (one level up) through the buffer to DRAM.

### MLP layers on the tile

An MLP layer of `in_dim × out_dim` weights is cut into 128×128 blocks.
Block (r, c) lives in IMA `ima_base + r*ceil(out_dim/128) + c`. For each
output block the controller works as follows:

1. It starts every row block in turn.
2. It adds the 48-bit partial sums in the CU.
3. It requantises with ReLU into a ping-pong activation store.

Inputs past `in_dim` are forced to zero and outputs past `out_dim` are
cleared, so unprogrammed crossbar cells never matter. Vectors are up to 1024
elements long.

### Inside an IMA

An IMA (`ima`) holds a 128×128 block of 16-bit weights in 8 crossbars; each
crossbar holds one 2-bit slice of every weight.

**Stored values.** Weights are stored offset-binary (`w + 2^15`), so that
cells hold only non-negative conductances.

**Input cycles.** The 16-bit inputs are applied one bit plane per cycle,
through 1-bit DACs. For plane b each crossbar returns column sums, and the
IMA forms

    t_b[j] = Σ_s colsum_s[j]·4^s − popcount(x_b)·2^15

The subtracted term removes the offset. It then accumulates `t_b << b`, with
plane 15 subtracted (the two's-complement sign).

**Latency.** An IMA returns the exact signed dot products 18 cycles after
`start`.

**The crossbar model.** The crossbar (`reram_xbar`) is the one behavioural
model. It stands in for the analog array and its ADCs: the ideal column
current of a 2-bit-per-cell array is the sum over cell bits of
`popcount(input & bit-plane) << bit`, and the model computes exactly that.
It assumes a noise-free, full-precision ADC.

**The tile.** `reram_tile` routes a 128-word input chunk and a start to the
selected IMA and returns that IMA's 128 results. The CU (`compute_unit`)
has four operations, each on 128 lanes:
- ADD
- MAX
- SUB with saturation
- requantise + ReLU

## Feature buffer

`feature_buffer` is 4608 words (9 KB). It is cut into equal slots whose
size is set at run time (`slot_shift`), so one slot fits the longest cached
vector.

- **Lookup.** Each slot carries a (level, point) tag, and lookup is fully
  associative.
- **Replacement.** First-in first-out.
  - A vector enters when it is produced or when a read misses and it is
    filled from DRAM.
  - Hits do not reorder the slots.
  - These rules reproduce the worked hit and miss sequence of the
    architecture: 1/9, 7/9 and 9/9 on-chip fetches for the three
    schedules. The buffer testbench checks them.
- **Writes.** Every produced vector is written through to DRAM. Final (SA2)
  outputs are not cached.

With 128-word SA1 outputs (model 0 below) the buffer holds 36 vectors; with
512-word outputs it holds 9.

## Workloads the defaults hold

| Model | SA1 MLP | SA2 MLP | IMAs (of 96) | SA1 vectors in buffer |
|---|---|---|---|---|
| 0 | 4×64, 64×64, 64×128 | 128×128, 128×128, 128×256 | 7 | 36 |
| 1 | 8×128, 128×128, 128×256 | 256×256, 256×256, 256×512 | 20 | 18 |
| 2 | 16×256, 256×256, 256×512 | 512×512, 512×512, 512×1024 | 78 | 9 |

All three use 1024 points, 512/128 centres and k = 16.

One quirk of model 0: its SA2 input length is quoted as 129 but its first
SA2 weight matrix as 128×128. This design has no extra coordinate channel
and uses 128.

## Where the design departs from, or adds to, the architecture

- **One point at a time.** Points are executed one after another. The
  architecture notes that the two layers' crossbars could work in
  parallel, but it fixes the same order.
- **The order generator recomputes distances.** It uses the shared distance
  unit instead of reusing distances saved from FPS and neighbour search.
  The order produced is the same.
- **First point of the order.** The reordered order starts from the first
  SA2 centre. The algorithm allows any start.
- **ReLU placement.** ReLU follows every MLP layer, including the last.
- **Own choices.** The following are this design's own:
  - Q8.8 arithmetic;
  - the block-to-IMA mapping;
  - the word-serial buffer and DRAM ports;
  - run-time slot sizing;
  - the register map.
- **No extra coordinate channel.** PointNet++'s concatenation of relative
  coordinates to the features is not modelled; only feature differences
  feed the MLP.
- **Out of scope.** Nothing past the two SA layers is built, such as the
  classifier head.
- **DRAM.** DRAM is outside the design. `tb/dram_model.sv` models it with a
  fixed latency and random back-pressure.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
compares against reference models in `tb/tb_ref_pkg.sv`: FPS, kNN, order,
exact distances and Q8.8 MLP arithmetic.

`tb_pointer_top` runs the whole accelerator at its default parameters. It
uses a 64-point cloud with 16 and 6 centres, k = 4, and MLP layers that span
several IMAs in both directions. It runs twice, once with reordering and
once in index order. It checks:
- every output word in DRAM;
- the exact buffer hit and miss counts, against a FIFO model fed with the
  reference schedule;
- the execution counts.

It also counts a failure for any mechanism that never occurred: buffer hits,
DRAM fetches, re-fetch of an evicted SA1 vector, a shared SA1 point issued
once, DRAM back-pressure, multi-block accumulation, ReLU clipping, and both
order modes.

`tb_workload_pointnet` runs model 0 at full size, with all parameters at
their defaults:
- 1024 random points, 512 and 128 centres, k = 16;
- the real MLP shapes;
- the buffer holding 36 vectors.

That is 640 point executions, about 2.4 million cycles and about two
minutes of Verilator time. It checks every output word and the exact hit
counts. It also prints the hit counts a FIFO model gives for the
index-order schedule on the same cloud. In one such run:

| Schedule | SA1 hits | SA2 hits |
|---|---|---|
| Reordered | 3666/8704 | 673/2176 |
| Index order | 3634/8704 | 332/2176 |

Set `MODEL` to 1 or 2 inside the file to run the larger models.

To run one testbench with Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/pointer_pkg.sv tb/tb_ref_pkg.sv tb/tb_pointer_top.sv
    ./obj_dir/Vtb_pointer_top

Each testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.
Verilator lint reports unused parameters and signals: package constants
and configuration fields a block does not read. Two other warnings are
expected:
- **SYNCASYNCNET.** It comes from assertions that use the asynchronous reset
  in `disable iff`.
- **WIDTHTRUNC.** It comes from the kNN insertion loop in `mapping_unit`.
  The loop index is guarded to stay below k.
