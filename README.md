# IRONHIDE cluster-isolation fabric

Secure and insecure processes run at the same time, but never on the same
hardware. The 64 tiles of the chip are split into two clusters: one for the
secure process, one for the insecure one. Every shared resource is either
split between the two clusters or emptied before it is given to the other
side. The shared resources are the mesh network, the shared L2 slices and the
memory controllers. The only thing that may cross from one cluster to the
other is interaction (IPC) traffic between the two processes. Splitting the
chip this way removes the flushes at every secure entry and exit that
time-sharing needs.

The cost is that each process gets only part of the chip. So once per
application invocation the split may be moved. The decision comes from each
process's cache-miss trend (MPKI against core count). Moving the split
follows a fixed sequence:

1. Stall all cores.
2. Flush the tiles that change sides.
3. Re-home their pages.
4. Commit the new binding.

This repository holds the RTL of that fabric at full size:

- an 8x8 mesh with 4 memory controllers;
- 32 KB private data caches;
- testbenches for every block and for the whole fabric.

## Floor plan and cluster binding

The tiles are numbered row-major, starting from the edge that holds MC0 and
MC1. A secure cluster of R tiles is always the first R tiles, so the two
clusters are runs of whole rows. At most one row is shared between them.

The memory-controller partition is fixed:

- MC0 and MC1 serve the secure cluster (position mask `0011`).
- MC2 and MC3 serve the insecure cluster.

DRAM regions 0 and 1 belong to the secure process. Regions 2 and 3 belong to
the insecure process and hold the shared IPC buffer.

`cluster_config` holds the binding. After reset it is 32 + 32 tiles. It
accepts one change per invocation. The allowance comes back only on the
`app_start` pulse.

## Network: deterministic routing that stays inside a cluster

`route_select` runs at each injection point. It walks both the X-Y and the
Y-X path over the cluster map:

- X-Y is used when it stays in the source cluster.
- Otherwise Y-X is used, if that path stays in the cluster.
- If neither path stays in the cluster, the packet is refused at the source,
  unless it is IPC traffic.

Y-X is needed when the shared row puts tiles of the other cluster on the X
leg.

`mesh_router` is a 5-port router with these parts:

- 2-entry input buffers;
- round-robin output arbitration;
- a header bit that picks the X-Y or Y-X order;
- a guard on every input that drops any flit that came from the other
  cluster, unless it is IPC traffic.

`mesh_noc` connects 64 routers and 64 route selectors.

## Speculative access to the other cluster's memory

`sec_access_check` sits in each tile between the core and its L1. Suppose a
core of the insecure cluster issues a request to a secure region:

- If the request is still speculative, it is held and the core stalls.
  - If the speculation resolves as wrong-path, the request is discarded
    quietly.
  - If it resolves as committed, a protection exception is raised and the
    request is discarded.
- If the request is already non-speculative, the exception is raised at once.

Either way the request never reaches a cache. Secure cores may access
insecure regions, which is how they read the IPC buffer.

## Private caches, local homing, memory controllers

`priv_cache` is the tile's 32 KB L1 data cache. It is direct-mapped and
write-back, with 64-byte lines and a 2-cycle hit. A flush request walks all
sets, writes back dirty lines, invalidates everything and pulses done.

`home_table` gives every page exactly one home L2 slice. This is "local
homing", so a page's lines never spread over slices of both clusters. The
table refuses to home a page on a tile of the other cluster. On re-allocation
it goes through every entry. A page whose home tile changes sides is unmapped
through the unmap port, where the slice writes back its dirty lines. The page
is then re-homed round-robin over the tiles its owner has under the new
binding.

`mc_select` sends every L2 miss to the controllers of the cluster that owns
the address's region, interleaved by cache line. `mc_queue` is a 16-entry
controller queue. It refuses requests for regions of the other cluster. On a
purge it stops taking requests, drains, and reports done.

## Re-allocation and secure context switch

`reconfig_ctrl` carries out both sequences.

A re-allocation runs as follows:

1. Check the allowance.
2. Stall all cores and wait until they are idle.
3. Flush and invalidate the L1 of every tile that moves.
4. Run the home-table re-homing.
5. Commit the new mask in `cluster_config`.
6. Release the cores.

A secure context switch stalls the cores, flushes every secure tile and
purges the secure controllers.

## The re-allocation heuristic

`core_realloc_predictor` holds two 64-point MPKI trends, written by the
secure kernel. Each point is in Q0.16, normalised to the trend's own maximum.
Slopes are measured on normalised axes, |ΔMPKI| × 64, so a slope of 1 means
"falls by the whole range across the whole chip". This puts the saturation
points where a plotted curve shows them.

For each process the predictor finds two points:

- **B**: scanning from the end, the first point whose slope is greater than
  0.1.
- **A**: scanning from the start, the first point whose slope is less than
  0.5.

It then computes:

- `Anomaly = |N − (B_secure + B_insecure)|`
- `SR = smaller(slope_B) / larger(slope_B)`, where a slope is taken between A
  and B
- `AF = ceil(Anomaly × SR)`

A restoring divider computes SR, so the whole calculation takes about 40
cycles after the scans.

- **Too many cores** (B_secure + B_insecure > N): the process with the larger
  slope gives up AF cores. The one with the smaller slope gives up
  Anomaly − AF cores.
- **Too few cores**: the surplus is split evenly. The odd core goes to the
  insecure side.

Each cluster keeps at least one tile. When done, the result goes straight to
the re-allocation sequencer.

## Top level

`ironhide_top` puts everything together at 8x8. The cores, the L2 slices, the
DRAM channels and the secure kernel are not part of the design. They connect
through ports:

- per-core request/response and resolve signals;
- the global stall/idle handshake;
- L1 refill/write-back ports;
- home lookup, unmap and L2 miss ports;
- network injection and ejection;
- DRAM request ports;
- kernel commands (trend writes, `pred_start`, `app_start`, `ctx_switch`,
  page homing).

## Departures from the source design and choices not given there

- **Miss traffic does not use the mesh.** L2 misses go from one miss port
  straight to the selected controller.
- **The heuristic is a hardware unit.** The source runs it in kernel
  software. The slope units, Q0.16 format, one-tile floor and tie-breaks are
  own choices.
- **Equation 4 differs from the printed form.** It is printed as
  `R_small = R_small^B − (1 − AF)`. The text requires the total to stay N
  cores, so `Anomaly − AF` is used instead.
- **Floor plan follows the text and the tile-layout figure, not the
  overview figure.** The overview figure draws the clusters as columns. The
  text and the tile-layout figure use rows, and rows are used here.
- **Own choices for sizes and structure.** These were picked here: the DRAM
  region count and decoding, the 64 KB page size, the 40-bit physical
  address, the flit format, the buffer depths, the cache organisation, the
  home-table size and the round-robin re-homing.
- **Flushes are done in hardware.** Flush-and-invalidate is a hardware walk,
  not a software sweep with a dummy buffer.
- **Context switch does both purges.** It flushes the secure tiles and purges
  the secure controllers.

## Not built

- The processor cores and their TLBs.
- The 256 KB shared L2 slices. Their organisation and coherence are not
  specified; only their homing is.
- The 72-bit ECC DDR PHYs and the DRAM.
- The I/O mesh and the other four networks.
- The secure kernel software.

## Testbenches

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…`.

`ironhide_top_tb` runs the full-size fabric through a whole scenario:

1. Start at 32/32.
2. Load two MPKI trends and run the heuristic, which gives 52 insecure and 12
   secure tiles.
3. Re-allocate: stall, flush 20 tiles with write-backs, unmap and re-home
   pages, commit.
4. Show that a second re-allocation in the same invocation is refused.
5. Start a new invocation and move to 20 secure tiles.
6. Exercise network containment (including a Y-X route through a split row),
   the guard, speculative squash, trap and committed trap, controller
   steering and violations.
7. Do a secure context switch with a controller purge.

It counts every mechanism it sees.

Running one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/ih_pkg.sv \
  rtl/ironhide_top.sv tb/ironhide_top_tb.sv --top-module ironhide_top_tb
./obj_dir/Vironhide_top_tb
```

The full-size top takes a few minutes to compile and well under a second to
simulate.
