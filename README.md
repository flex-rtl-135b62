# FLEX: an FPGA engine for finding optimal cell positions in mixed-cell-height legalization

Legalization moves the standard cells of a global placement onto legal sites: they must sit on rows, on the site grid, and not overlap. Cells may be one to several rows tall. In MGL-style legalizers, cells are legalized one at a time. For each *target* cell the legalizer looks at a small window of already-placed cells around it (a *localRegion*). It lists every gap the target could be squeezed into (an *insertion point*). For each gap it finds the target x that minimizes total displacement, with neighbouring cells pushed aside as needed. This step is called FOP (find optimal position), and it dominates the run time.

This RTL implements FOP as a hardware engine. The CPU keeps the rest of the flow: ordering cells, cutting localRegions, listing insertion points, and committing the chosen position. Through a command port it sends a localRegion, a target and its insertion points. The engine returns the insertion point and x with the lowest displacement.

Everything is written in synthesizable SystemVerilog-2017 with a single clock and an active-low asynchronous reset. Shared types live in `rtl/flex_pkg.sv`.

## How the cost of one insertion point is computed

For an insertion point, the target is placed somewhere in a range `[x_lo, x_hi]` of its bottom row and the rows above it. If it sits further left than `x_hi`, the cells to its left must be pushed left. If it sits further right than `x_lo`, the cells to its right are pushed right. Pushes propagate through chains of abutting cells, including cells that span several rows.

Each cell's displacement as a function of the target x is piecewise linear, and so is the target's own displacement `|x - gx|`. So the total displacement is a convex piecewise-linear curve. Its minimum lies on one of the curve's *breakpoints*. The engine works in three stages.

1. **Cell shifting (SACS, `sacs_pe`).**
   - The target is put at `x_lo` and every cell is pushed left as far as it must go (left-move). Then it is put at `x_hi` and cells are pushed right (right-move).
   - The key idea is to visit cells in x order: right to left for left-move, left to right for right-move. A cell's pushed position is then final when it is visited, so every overlap is resolved in one pass instead of iterating.
   - The x order (`Cell_sort`) does not depend on the insertion point. It is built once per region, ahead of time (see the Ahead Sorter below).
   - Per row, a *CurSeg* pointer remembers how far along that row's cell list (segment) the walk has come. When the current cell has moved, it pushes its neighbour in each of its rows, and the neighbour's new position is written to the position table (LCPT).
   - Two more rules apply:
     - Before the walk, the target pushes its own neighbours.
     - A cell only advances a row pointer if it really is the next cell of that row. This is how cells on the far side of the gap in the target's rows are kept out of the walk.

2. **Breakpoints (`collector`).** Each moved cell gives one breakpoint:
   - A cell pushed left from `x` to `posl` starts moving once the target is left of `x + x_lo - posl`. Below that it costs one unit per site, so it has left slope 1.
   - A cell pushed right gives `x + x_hi - posr` with right slope 1.
   - The target gives `gx` with both slopes 1.
   - `x_lo` and `x_hi` are added as zero-slope breakpoints so that they are candidates too.
   - Cells that were not pushed contribute nothing.

3. **Sort and two traversals.**
   - The breakpoints go through a per-PE sorter (`sort_engine`).
   - The forward traversal (`fwdt_pe`) merges equal x. It accumulates the right slopes and from them the cost `vR` contributed by everything to the left. It writes the merged breakpoints and `vR` into a RAM.
   - The backward traversal (`bwdt_pe`) reads them in reverse. It accumulates left slopes into `vL`, forms `v = vL + vR` and keeps the minimum inside `[x_lo, x_hi]`.
   - Each stage handles one breakpoint per cycle.

Displacements are in sites and not weighted by cell height, and the cost is the sum over cells. Two tie rules apply:
- Within one insertion point, the largest x with the minimum cost wins.
- Across insertion points, the lowest-numbered insertion point wins.

## Pipeline inside a FOP PE

```
region_mem (ping/pong) -> sacs_pe -> collector -> sort_engine -> fwdt_pe -> bp_ram (2 banks) -> bwdt_pe -> result
```

- **Fine grain.** SACS streams each cell's final position as soon as it is known. The collector turns it into a breakpoint in the same cycle, and the sorter takes it at once. SACS of the next insertion point may start while the sorter is still sorting the previous one; back-pressure stalls it when the sorter stops taking input.
- **Coarse grain.**
  - The forward and backward traversals run in opposite directions, so they cannot be chained directly. `bp_ram` has two banks: while the backward traversal reads insertion point k from one bank, the forward traversal of k+1 fills the other.
  - A forward traversal is only started on a bank that no pending backward traversal still needs. The last breakpoint of an insertion point is held at the sorter's input until then.
  - In practice the sorter takes most of the time, so the overlap that shows up is the backward traversal of k running alongside SACS of k+1.
- **Ping/pong tables in SACS.**
  - LCPT has two banks, used by alternate insertion points.
  - The CurSeg table has two copies, A for left-move and B for right-move.
  - A background initialiser resets the idle copy while the other is in use, so the tables never need a separate clearing pass.

`fop_pe` returns one `{cost, x, id}` per insertion point, in order.

## Regions: loading ahead and swapping

Each PE has a two-bank region store (`region_mem`):
- The active bank is read by SACS.
- The idle bank is written by the host.

The store holds:
- the localCells table (LCT): x, y, w, h and flags, with a second read port used by the initialisers;
- the per-row cell lists (LSC), stored as odd and even rows;
- row lengths;
- the cell and row counts;
- `Cell_sort`.

The cluster (`fop_cluster`) has one shared **Ahead Sorter**:
- Every LCT write is also fed to it as (x, index).
- The last cell is held back one write so that the SORT command can mark it as the end of the list.
- The sorted stream is written as `Cell_sort` into the idle bank of every PE.

So while the PEs are still working on one region, the next one can be loaded and sorted. `SWAP` then makes it active in all PEs at once. SWAP is accepted only when the sorter and the PEs are idle and no target is being evaluated.

## Cluster, insertion points and synchronisation

- `ip_ram` holds the insertion point descriptors for the current target:
  - the id;
  - the bottom row;
  - `x_lo` and `x_hi`;
  - for each of up to four target rows, the number of that row's cells to the left of the gap.
- `ip_module` reads descriptors 0..n-1. It numbers each one by its slot and hands it to the lowest-numbered ready PE. It counts returned results and signals completion.
- `sync_module` keeps the best result seen since START.

With two PEs, consecutive insertion points of a target run on different PEs at the same time.

## Host command port

One command per `cmd_valid && cmd_ready` handshake. The command is a `host_cmd_t` with fields `{op[3:0], addr[31:0], data[127:0]}`.

| op | name | addr | data |
|---|---|---|---|
| 1 | WR_LCT | cell index | `lct_entry_t` (100 bits): x[99:68], y[67:36], w[35:16], h[15:4], f[3:0] |
| 2 | WR_LSC | {row[15:8], slot[7:0]} | cell index [10:0] |
| 3 | WR_SEGLEN | row | cells in row [8:0] |
| 4 | SORT | number of cells | number of rows [8:0] |
| 5 | SWAP | – | – |
| 6 | WR_IP | IP RAM slot | `ip_desc_t` (117 bits) |
| 7 | TARGET | – | `target_t`: w[55:36], h[35:32], gx[31:0] |
| 8 | START | number of insertion points | – |

A region is loaded in this order:
1. All cells in index order, with WR_LCT.
2. The rows, with WR_SEGLEN and WR_LSC; each row's list is in x order.
3. SORT, then SWAP.

For each target, send TARGET, then WR_IP for each insertion point, then START. The engine answers with one `rsp_valid` pulse carrying `rsp = {cost[63:0], x[31:0], id[8:0]}`.

`cmd_ready` drops in three cases:
- WR_LCT and SORT wait while the Ahead Sorter cannot take a cell.
- SWAP waits for the sorter and the PEs to be idle.
- TARGET, WR_IP and START wait while a target is being evaluated.

Other writes to the idle region are always accepted. This is what lets the next region load while the current one is in use.

## Sizes and parameters

| parameter | default | meaning |
|---|---|---|
| `N_PE` | 2 | FOP PEs in the cluster |
| `N_CELLS` | 2048 | localCells per region (11-bit indices) |
| `N_SEGS` | 256 | rows (segments) per region |
| `SEG_CELLS` | 256 | cells per row list |
| `N_IP` | 512 | insertion point slots; chosen here, not a published number |
| `TH_MAX` (package) | 4 | tallest target, in rows |

Coordinates are 32-bit signed, slopes 16-bit and costs 64-bit signed. The sorter (`sort_engine`) builds runs of 8 with an insertion stage, then merges bottom-up between two buffers. It is ascending and stable on a signed key.

The design is meant for the IC/CAD 2017 contest designs, which have 29k to 131k cells. Those are never loaded whole: the CPU sends one localRegion at a time, and a region of up to 2048 cells and 256 rows fits in a bank.

## Where this departs from the published architecture

- **Single clock.** The original design runs its memories at twice the logic clock, so odd and even rows can be read together. Here there is one clock, and SACS reads one row per access.
- **Sequential moves.** Left-move and right-move run one after the other, not in parallel. SACS is therefore slower than published, but the results are the same.
- **Host-supplied descriptors.** The insertion point module only fetches and dispatches descriptors that the host has already computed. It does not compute insertion points itself.
- **This design's own choices.** The original architecture does not specify the following, so they were chosen here:
  - the breakpoint formulas;
  - the far-side cell rule in SACS;
  - where the target sits in each phase (`x_lo`, `x_hi`);
  - the descriptor layout;
  - the command set;
  - the tie rules;
  - sharing one Ahead Sorter among the PEs.
- **External parts.** The DDR memory and the CPU are outside this RTL. The command port stands in for both.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb/flex_ref_pkg.sv` is an independent software reference:
- It generates random legal regions with cells one to three rows tall.
- It computes pushed positions by repeated pairwise pushes until nothing moves.
- It finds the optimum by evaluating the displacement at every integer x.

SACS positions, FOP PE results, cluster results and end-to-end responses are all compared against it.

| testbench | what it covers |
|---|---|
| `tb_sort_engine` | random sizes, duplicate keys, order and stability |
| `tb_region_mem` | both banks, swap, all read ports |
| `tb_sacs_pe` | every streamed position against the reference, with back-pressure |
| `tb_collector`, `tb_fwdt_pe`, `tb_bp_ram`, `tb_bwdt_pe` | each stage against a software model |
| `tb_fop_pe` | one PE against the reference; both fine- and coarse-grain overlap must occur |
| `tb_sync_module`, `tb_ip_ram`, `tb_ip_module`, `tb_controller` | control blocks, including back-pressure |
| `tb_fop_cluster` | Cell_sort built by the Ahead Sorter, and the synchronised result against the reference |
| `tb_flex_top` | the whole engine through the command port (96-cell regions) |
| `tb_flex_top_full` | the same at default sizes: two 2048-cell, 256-row regions |

The end-to-end tests count how often each mechanism occurs, and fail if one never does:
- the Ahead Sorter working while the PEs are busy;
- region swaps;
- command stalls;
- insertion points on each PE;
- fine- and coarse-grain overlap;
- the Synchronization Module replacing an earlier best.

To simulate with Verilator:

```
verilator --binary --timing --assert rtl/flex_pkg.sv tb/flex_ref_pkg.sv \
  $(ls rtl/*.sv | grep -v flex_pkg) tb/tb_flex_top.sv --top-module tb_flex_top -Wno-fatal
./obj_dir/Vtb_flex_top
```

Drop `flex_ref_pkg.sv` for testbenches that do not import it.

Lint warnings that remain are explained in each module's opening comment:
- unused fields of shared structs;
- a status output that nothing needs;
- the reset that also appears in the `disable iff` of the assertions.
