# Instant-3D grid-interpolation accelerator in SystemVerilog

Training a NeRF with an Instant-NGP-style hash-grid encoding spends most of its
time in one step. Every sampled 3D point looks up the eight corners of the grid
cell that contains it. Each corner is hashed to an entry of a 1D table, the
eight two-feature entries are blended with trilinear weights, and in the
backward pass the same eight entries are updated from the point's gradient.

These accesses are small and scattered, and the table is too large for one
SRAM, so it is cut into banks. The design attacks this memory traffic with
three ideas:

1. **Read packing (FRM, feed-forward read mapper).** The eight corners of one
   point fall into four pairs. Each pair differs only in x, which the hash
   multiplies by 1, so its two entries are neighbours. One point therefore
   touches only two to four of the eight banks. The FRM keeps a window of
   pending points and, every cycle, fills as many banks as it can with reads
   from *different* points. Two pending reads of the same entry are served by
   one bank read.
2. **Update merging (BUM, back-propagation update merger).** Nearby points
   share corners, so the backward pass updates the same entries again and
   again within a short time. A small associative buffer adds these updates
   together. Each entry then reaches SRAM as one write.
3. **Core fusion.** There are four grid cores, each with a 256 KB table in
   eight banks. Two cores can act as one 512 KB table over 16 banks, and all
   four as one 1 MB table over 32 banks. Larger FRMs (B16, B32) schedule the
   reads across the fused banks. Thus a small grid (e.g. density, 2^16
   entries) and a large grid (e.g. color, 2^18 entries) both use the whole
   bank bandwidth.

A grid whose update frequency is lowered simply skips one backward pass in
every `1/(1-F)` training iterations. A small MLP back end (a systolic array
and a multiplier-adder tree fed from an on-chip buffer) is included as well.

All arithmetic on features, weights and gradients is IEEE binary16 (FP16):
round to nearest even, subnormals flushed to zero, overflow to infinity.

## Data formats and address map

| Item | Format |
|---|---|
| coordinate | per axis UQ0.16, the scene normalised to [0,1) |
| grid resolution `res` | 12-bit integer per core (vertices per axis) |
| vertex coordinate | `floor(coord*res)` (+1 for the upper corner), 12 bits, wraps |
| corner index `v` | bit 2 = x upper, bit 1 = y upper, bit 0 = z upper |
| weight of corner v | product over axes of `f` (upper) or `1-f` (lower), FP16 |
| hash | `h = x ^ (y*2654435761) ^ (z*805459861)` mod 2^32, then mod T |
| table entry | `{f1, f0}`, two FP16 features, 4 bytes |
| table size T | 2^16 (level 0), 2^17 (level 1), 2^18 (level 2) |

The global address `a` (up to 18 bits) is placed as follows:

| level | owner core | bank in core | entry in bank |
|---|---|---|---|
| L0, 256 KB per core | the core that issued it | `a[15:13]` | `a[12:0]` |
| L1, 512 KB per pair | `{core[1], a[16]}` | `a[15:13]` | `a[12:0]` |
| L2, 1 MB | `a[17:16]` | `a[15:13]` | `a[12:0]` |

Banks are contiguous slices of the table (the top address bits pick the
bank). That placement is what makes the corner pairs of a point share a bank,
which is the situation the FRM is built for.

## The grid core

`grid_core` holds the whole per-point pipeline. Every stage is a valid/ready
register stage, so back-pressure anywhere stalls everything upstream.

```
coord_buffer -> interp_precompute -> hash_unit -> addr_double_buffer
   feed-forward : -> FRM (own B8, or shared B16/B32) -> 8 hash_bank
                  -> interp_grad_unit (8-way FP16 blend) -> ff_* out
   back-prop    : -> interp_grad_unit (w_v * g, 8 pairs serialised)
                  -> bum_unit -> bw_* -> update_router -> owning bank
```

- **`coord_buffer`** (4096 points) is written by the host. `start`/`count`
  replays the first `count` points; the point index becomes the point's tag.
  The same points are replayed for the backward pass, which needs the same
  corners and weights.
- **`interp_precompute`** splits each axis into integer and fraction and forms
  the eight corner coordinates and eight FP16 weights.
- **`hash_unit`** hashes the eight corners and masks the hash to the table size
  of the current level.
- **`addr_double_buffer`** has two halves of eight points. One fills while the
  other drains. It hands a whole point (eight addresses, weights, tag) to the
  FRM at once. A half is released when full, or when the pass has no more
  points (flush).
- **`hash_bank`** has 8192 entries. Its read port has one cycle of latency. Its
  update port either overwrites an entry (table loading) or adds a delta to it
  (training). The add is a two-stage read-modify-write, with forwarding
  between back-to-back updates of the same entry.
- **`interp_grad_unit`** has 16 FP16 multipliers.
  - Feed-forward: it uses them as 2 × 8 products plus two adder trees, one
    point per cycle.
  - Back-propagation: it forms `w_v * g` for the eight corners and emits one
    (address, gradient) pair per cycle.

In back-propagation the FRM is not used. The gradient step needs the weights
and addresses, not the stored values. The gradient of each point arrives on
`g_*` in point order.

## The FRM in detail (`frm_unit`)

This is the least obvious block. One module, with parameters, serves as B8
(eight banks, one core), B16 (16 banks, two ports) and B32 (32 banks, four
ports).

State: a window of `DEPTH` = 16 slots. Each slot holds one point request:
eight addresses, the point's weights and tag, and per address three flags:

- *pending*: the address has not been read yet;
- *in flight*: it was read last cycle;
- *done*: its data have been captured.

Every cycle, combinationally:

1. **Bank collision detector.** Slots are visited in a rotating order starting
   at `rr_slot`. For each bank, the first pending address that maps to it
   wins the bank. Then every pending address equal to a winner is marked as
   served: this is the same-address merge. At most one read per bank is
   issued, from any mix of points.
2. **Read commit unit.** A slot whose eight addresses are all *done* and whose
   sequence number is next for its port is handed out (`out_valid`).
   Completed points therefore leave each port in the order they entered, even
   though their reads complete out of order.
3. **Addr generator.** Ports are visited in a rotating order. Each waiting
   point is put into a free slot. A slot released by a commit in this cycle
   may be refilled in the same cycle.

Bank data return one cycle after the read. They are captured into the slot of
every address that was served by that read.

The window must be deep enough for the packing to pay. With the 16-point
window the B8 testbench runs about 2.2 times faster than issuing one point per
cycle over its banks. B16 and B32 reach 15 and 23 reads in a cycle.

`stat_reads` (bank reads this cycle) and `stat_served` (addresses served this
cycle) show how well packing and merging work. `stat_served > stat_reads`
means merging happened.

## The BUM in detail (`bum_unit`)

- **Input.** An input (address, gradient) is scaled to `delta = -lr * grad`
  (a plain SGD step) and registered.
- **Match.** The next cycle, a one-to-all compare looks for the address among
  the 16 entries.
  - On a hit, the delta is added into the entry (one shared FP16 adder pair)
    and the entry's idle counter restarts.
  - On a miss, the address takes a free entry.
- **Write-back.** At most one entry per cycle goes out as (address, delta), in
  this order of priority:
  1. an entry whose idle counter has reached `thresh`;
  2. any entry while `flush` is high (end of the backward pass);
  3. the oldest entry when the buffer is full and a new address is waiting.

  The delta is added to the table by the owning bank's update port.

A small `thresh` writes updates back quickly. A large one merges more. The
grid-core testbench shows about seven merges per write-back on ray-like point
streams.

## Fusion and the update path (`instant3d_top`, `update_router`)

- **Reads.** At level 0 each core's own B8 drives its banks. At level 1 or 2
  the core's address stream leaves through `xreq_*` to the pair's B16 or to
  the single B32, and completed points come back through `xrsp_*`. Each bank
  has a three-way read-address multiplexer chosen by `level`. A bank's read
  data go to all three FRMs.
- **Updates.** The router owns the update ports of all 32 banks. It sends each
  BUM write-back to the bank that owns its address under the current level.
  The host's table writes go the same way.
  - Priority: the host first, then BUM 0 to 3. A loser waits with ready low.
  - Updates to different banks proceed in the same cycle.
- **Update frequency.** `update_freq_ctrl`, one per core, counts iterations
  (`iter_start`). It lowers `bp_enable` for the last iteration of each
  `period`. When `bp_enable` is low, that core's backward pass runs but its
  gradients are discarded. The paper's density : color update frequency of
  1 : 0.5 gives period 0 (never skip) for density and period 2 for color.

## MLP units

- **`systolic_array`**: an 8×8 output-stationary FP16 array for the layers
  with many outputs. Each beat brings one column of A and one row of B, with
  input skew inside the array. `done` marks the cycle in which C is complete,
  ROWS+COLS-1 edges after the last beat.
- **`mul_add_tree`**: three 16-lane dot products with adder trees and
  accumulators, for the layers with at most three outputs.
- **`mlp_buffer`**: 1024 words of 16 FP16 values.

In the top, each buffer read becomes one beat, the next cycle, for the unit
chosen by `mlp_sel`. The sequencing of the MLP layers (tiling the 64-wide
layers, activations, the MLP backward pass) is left to the host.

## Using the top

1. Load coordinates per core through `cw_*`. Load the table entries through
   `h_*` (`h_set = 1` overwrites, `h_core` names the issuing core at
   level 0/1).
2. Set `level`, `res`, `lr`, `bum_thresh` and `upd_period`.
3. For feed-forward: `bp = 0`, pulse `start` with `count[c]` points per core.
   Take the interpolated features from `ff_*` (the tag is the point index).
   Wait for `busy` to fall.
4. For back-propagation: pulse `iter_start` once per training iteration, then
   run a pass with `bp = 1` and supply one gradient per point on `g_*`, in
   point order. `busy` falls when every merged update has reached the table.

`level`, `bp` and `res` must stay constant during a pass.

## Verification

Every module has a self-checking testbench in `tb/` that compares with a model
computed independently in the testbench. Most testbenches use real
arithmetic with an FP16 tolerance. All testbenches print
`TB_RESULT checks=N failures=M`.

`tb_instant3d_top` runs the whole design at its default size (no parameter
overrides). It covers:

- feed-forward at levels 0, 1 and 2, with 256 ray-like points per core, checked
  point by point against a reference table model;
- two backward iterations at level 0. Core 3 has period 2, so its second
  update is skipped. The thresholds are chosen so that BUM timeouts and
  evictions both occur.
- a backward pass at level 2, where updates cross cores;
- a read-back of the updated table after each backward run;
- a systolic product and a tree product.

The level-0 and level-2 runs use the two grid sizes of the evaluated training
setting, 2^16 entries (density) and 2^18 entries (color). The datasets differ
only in their content, not in their sizes.

It counts every mechanism (FRM merge and multi-point packing in B8, B16 and
B32, each fusion level, BUM merge/timeout/evict, a skipped update, both MLP
units) and fails if one never happens. It takes about two minutes to compile
and a few seconds to run.

With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/i3d_pkg.sv tb/tb_util_pkg.sv \
  rtl/*.sv tb/tb_instant3d_top.sv --top tb_instant3d_top
obj_dir/Vtb_instant3d_top
```

`tb_frm_unit` also needs `tb/frm_harness.sv`. `rtl/i3d_pkg.sv` must come
before the other files, and `tb/tb_util_pkg.sv` before the testbenches.

## Where this RTL departs from, or goes beyond, the source description

- **Bank organisation.** The source divides the table into eight equal banks
  "with 2 cells per bank"; the two cells are not modelled. Each bank is one
  8192-entry array. "Eight unique accesses per SRAM array" is taken to mean one
  access per bank per cycle.
- **Reordering depth 16.** For the FRM this is taken as 16 *point* requests;
  for the BUM as 16 entries.
- **BUM write-back rule.** The source describes both a queue whose tail pops
  and a per-entry counter with a threshold. This design uses the counter. It
  adds write-back of the oldest entry when the buffer is full, and a flush.
- **Hash-table sizes.** The evaluated setting stores density in 2^16 and color
  in 2^18 entries. The same text calls this a density : color size ratio of
  1 : 0.25, which is the other way round. The hardware supports both sizes
  either way.
- **Multiresolution levels.** A pass covers one grid resolution. Instant-NGP's
  several resolution levels are run as separate passes, with `res` changed
  between them.
- **Not built.** The I/O interface to the host SoC and DRAM. Its streams are
  plain ports of the top.
- **Host-driven parts.** The MLP layer sequencing, and the optimizer beyond a
  plain SGD step.
- **Coordinate buffer size.** The 4096-point size is this design's choice. A
  training batch larger than that is processed in several passes.
- **FP16 rounding.** The weight conversion truncates, subnormals are flushed,
  and sums are rounded at every adder-tree node. Results therefore differ from
  exact arithmetic by a few FP16 units in the last place. The testbenches
  allow for this.
