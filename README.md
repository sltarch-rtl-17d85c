# SLTarch accelerator in SystemVerilog

This design implements an accelerator for rendering 3D Gaussian scenes with levels of detail. It has two cores:

- **LTcore** searches the level-of-detail (LoD) tree and finds the cut of nodes to draw for a view.
- **SPcore** splats the Gaussians of a frame onto the image.

The two cores can run at the same time on different frames.

## Structure (`rtl/`)

| file | role |
|---|---|
| `sltarch_pkg.sv` | Shared widths, record types (node, view, Gaussian, projected Gaussian, sort key) and the fixed-point Gaussian exponent. |
| `lt_unit.sv` | LT unit: ring of 4 traversal contexts in a 2-stage pipeline. Frustum test and LoD test per node; writes selected NIDs, skips subtrees and enqueues child subtrees. |
| `subtree_queue.sv` | Queue of subtree IDs (SIDs) with a loaded and an unloaded segment. LT units only dequeue subtrees already in the cache. |
| `subtree_cache.sv` | 4-way set-associative cache. One line holds one whole subtree of up to 32 nodes. Round-robin replacement among finished lines; a fill stalls when no line is finished. |
| `output_buffer.sv` | Double-buffered NID buffer with a fill bank and a write-back bank. |
| `ltcore.sv` | 2x2 LT units plus the queue, cache and output buffer, with a seed/run/drain controller. |
| `alpha_check.sv`, `blend_unit.sv`, `sp_unit.sv` | SP unit: one alpha test at the centre of a 2x2 pixel group (exponent against a per-Gaussian threshold), then four blend units (alpha, transmittance, early termination at 1e-4, RGB accumulation). |
| `projection_unit.sv`, `duplication_unit.sv`, `sorting_unit.sv` | Projection of camera-space Gaussians; one key per covered 4x4 tile; insertion sort by tile and depth. |
| `global_buffer.sv` | Double-buffered Gaussian store feeding SPcore. |
| `spcore.sv` | 4 projection units, duplication, 4 sorting units, 2x2 SP units. |
| `sltarch.sv` | Top. |

## Parameter defaults

- 2x2 LT units.
- 16-entry subtree queue (48 B at 3 B per SID).
- 4-way x 128-set cache.
- 2 x 1024-word output buffer (8 KB).
- 4 projection units and 4 sorting units.
- 2x2 SP units.
- Global buffer with 2 x 4096 entries.

## Choices not taken from the source description

- Fixed-point formats.
- Node record layout: 158 bits. With this layout, 512 cache lines of 32 nodes need about 323 KB, not 128 KB.
- The LoD metric: maximum box extent against granularity times max-norm distance.
- Gaussians arrive already in camera space.
- Tile size 4x4 and a 64x64 image.
- Sorter capacity: 64 keys. Keys beyond that are dropped and counted.
- The approximation used for exp.
- The tiling, duplication and sorting stages are conventional designs, since the source describes them only by name.

## Known limits

- **LoD search can deadlock.** A traversal context that finds a child subtree must put its ID into the subtree queue. If the queue is full, the context waits. If every context is waiting on a full queue, nothing dequeues and the search stops.
  - The source does not describe queue overflow, so this design does not resolve it.
  - The paper-sized configuration makes it unlikely but does not rule it out.
  - The end-to-end test uses one context per LT unit with a single 4-way cache set and an 8-entry queue. This still produces queue-full back-pressure and cache fill stalls.
  - A fix would need either a spill path for child IDs or a reservation rule before a context starts a new subtree.
- **The full-size test compares pixels only when no sorter overflows.** At 64x64 with 64-key sorters, the random frame overflows, so only the LoD cut and the event counters are checked there. The small end-to-end and SPcore tests compare pixels on frames without overflow.
- **Not implemented:** the control MCU, the LPDDR4 memory (a behavioural model in `tb/subtree_mem.sv` stands in for it) and compiled SRAM macros.

## Tests (`tb/`)

Each block has a self-checking testbench that prints `TB_RESULT checks=N failures=M`.

- LTcore tests compare the written NIDs, as a set, with a recursive reference search (`tb_tree_pkg.sv`).
- SPcore tests compare against a floating-point reference of the splatting pipeline (`tb_ref_pkg.sv`).
