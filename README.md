# Tascade tile and grid RTL: reduction trees without atomics

A grid of many small tiles, each holding an equal share of the data in its
own SRAM, runs graph and sparse kernels by sending *tasks* to data instead of
fetching data: an update to element `i` of a reduction array (a distance in
SSSP, a bin in a histogram, a rank in PageRank) is a small message routed to
the tile that owns `i`, and that tile's core applies it. No atomics are needed
because only the owner ever writes its chunk. The weakness is traffic: every
update of a hot element crosses the whole chip.

Tascade cuts that traffic with a tree of partial reductions built into the
network:

* The grid is cut into square **proxy regions** (4x4, 8x8, 16x16 ... tiles).
  Each region keeps a temporary copy of the reduction array, the *proxy
  array*, spread over its tiles in the same way the real array is spread over
  the grid: inside every region, the tile at the same position as the owner of
  `i` is the **proxy** of `i`.
* An update is first sent to its proxy inside the sender's own region. The
  proxy keeps the value in a small direct-mapped cache carved out of its SRAM,
  the **P-cache**, and combines updates there: a `min` update that is not an
  improvement is dropped (*filtering*); `add` updates are summed (*coalescing*).
* What the proxy sends on towards the owner passes, on its way, through the
  proxies of `i` in other regions (they sit on the same row or column). Each of
  them may **capture** it and reduce it into its own P-cache (*cascading*), but
  only when it has time for it: when its proxy task queue is less than half
  full, or when the link straight ahead was blocked in the last cycle.
  Otherwise the update just passes through.

The owner thus receives far fewer updates, and no tile ever waits for another.

This RTL holds the hardware Tascade adds to each tile (cascade logic in the
router, the P-cache controller and the task-queue rules they need), the tile
router and task scheduler that this logic lives in, and the torus grid. The
cores that run the task code and the bulk of the tile SRAM are outside it;
their signals are ports of the grid.

## Files

| file | contents |
|---|---|
| `rtl/tascade_pkg.sv` | message and configuration types, address mapping, torus routing function |
| `rtl/sync_fifo.sv` | first-word-fall-through FIFO used for all buffers and queues |
| `rtl/cascade_select.sv` | the capture decision for the four network inputs |
| `rtl/noc_router.sv` | five-port router with per-channel buffers and capture |
| `rtl/pcache.sv` | P-cache controller and its SRAM array |
| `rtl/tsu.sv` | task scheduling unit: input/output queues and scheduling rules |
| `rtl/tascade_tile.sv` | one tile without its core: configuration registers, router, TSU, P-cache |
| `rtl/tascade_top.sv` | `GRID_W x GRID_H` torus of tiles |
| `tb/tb_*.sv` | one self-checking testbench per module, plus the grid test |
| `tb/pu_model.sv` | behavioural core that runs the two reduction tasks, for the grid test |

## Messages, ownership and regions

A task invocation is one 64-bit flit, a 32-bit global index and a 32-bit
value, plus a 2-bit channel id carried beside it. There is no header: every
router computes the destination from the index.

* **Owner.** With `2^log_chunk` elements per tile, the owner tile number is
  `idx >> log_chunk`, its x coordinate the low `log2(GRID_W)` bits of that
  number, y the rest.
* **Regions.** The width of a region along x is `4 << popcount(proxy_mask_x)`
  (mask `4'b0000` = 4, `4'b0011` = 16), likewise for y. A tile's position
  inside its region is `{x[5:2] & mask, x[1:0]}`. Regions of up to 64 tiles
  per side are possible.
* **Proxy.** The proxy of `idx` in the region of tile `(x, y)` is the tile
  whose coordinates keep `(x, y)`'s region bits and take the owner's
  within-region bits.

Each of the `NUM_CHAN = 4` channels is configured by three fields:

* `dst = DST_OWNER` routes to the owner and `dst = DST_PROXY` routes to the
  proxy in the sender's region.
* `cap_en` lets proxies on the way capture the message.
* `cap_chan` is the input queue (task type) a captured message goes to.

The SSSP example maps onto the channels like this:

| channel | configuration | role |
|---|---|---|
| 0 | `DST_PROXY` | the proxy task `T3'`, which the edge-relaxing task spawns |
| 1 | `DST_OWNER`, `cap_en = 1`, `cap_chan = 0` | updates from a proxy to the owner task `T3`; proxies on the way may turn them into `T3'` |

## Router and capture decision (`noc_router`, `cascade_select`)

The router has inputs and outputs N, S, E and W, and a fifth port L to and from
the tile's task scheduler. N is towards y-1 and E towards x+1.

**Buffers.** Every input keeps one buffer of `IN_DEPTH` flits per channel,
with a ready flag per channel. This way a channel whose destination queue is
full cannot block the other channels. That matters: the owner-bound channel
and the proxy channel feed each other, and with one shared buffer per port
the grid deadlocked in simulation.

**Routing.** Routes are dimension-ordered on the torus: X first, then Y. Each
ring is taken the shorter way round, and a tie goes E or S.

**Arbitration.** Each output arbitrates round-robin among the 20 buffer heads
that want it. Only heads whose downstream buffer has room take part. A grant
is a transfer, so a flit moves one hop per cycle, and `valid` never needs an
answering `ready`.

**Capture decision.** For each network input and each channel,
`cascade_select` computes three terms:

```
is_dest       = dest == my (x, y)
is_proxy      = {dest[5:2] & mask, dest[1:0]} == my within-region position   (x and y)
select_msg    = iq_lt_half_r[cap_chan]  |  opposite_out_full_r[port]
go_to_proxy   = is_proxy & select_msg & cap_en
route_to_core = go_to_proxy | is_dest
```

The `_r` terms, and the tile's within-region coordinates, are registered.
The decision therefore reacts to the queue and link state of the previous
cycle. The "opposite" output is the one a message would leave by if it went
straight on: N in, S out; E in, W out. Its "full" flag is the flag of that
output's buffer for the message's own channel.

**Capture.** A captured message is ejected with its channel id rewritten to
`cap_chan`, so it arrives as a proxy task. A capture needs room in that queue,
and a message the tile injected itself is never captured by that tile.

**Event strobes.** `ev_capture` marks a capture. `ev_pass_proxy` marks a
capturable message that stood at one of its proxies and went on.

## P-cache (`pcache`)

Part of the tile SRAM, `LINES` words, is used as a direct-mapped cache with one
element per line. A word holds a valid bit, a tag and the 32-bit value, so the
cache needs no separate tag memory. The core addresses it with the global
index. The controller maps that index into the tile's share of the proxy
array, the *local fraction*:

```
local = (owner_region_number << log_chunk) | (idx mod 2^log_chunk)
line  = local mod 2^pc_log_lines,   tag = local >> pc_log_lines
```

Here `owner_region_number` is the index of the owner's region in the grid
(row-major). On an eviction the controller rebuilds the global index from the
tag, the line number and the tile's own within-region position.

**Configuration registers** (fields of `tile_cfg_t`):

| register | meaning |
|---|---|
| `pc_local_size` | elements in the local fraction; accesses beyond it set `cfg_err` |
| `pc_log_lines` | cache size actually used, `2^pc_log_lines <= LINES` |
| `pc_policy` | `WRITE_THROUGH` or `WRITE_BACK` |
| `pc_chan` | channel on which updates and victims go to the owner |
| `pc_default` | value a read miss returns (e.g. +inf for min, 0 for add) |

**Operations.** Every operation takes two cycles: an SRAM read, then a compare
and, for a write, an SRAM write. `req_ready` is high in the idle state.

* A **read** answers on `rsp_valid` in the cycle after it is accepted. It
  returns the line's value on a hit and `pc_default` on a miss. The core
  applies the reduction itself (read, combine, write).
* A **write under write-through** updates the line and always pushes
  `{idx, value}` on `pc_chan`. A line it replaces is simply dropped, because
  the owner already has that line's value. This mode suits `min` reductions
  whose improvements should reach the owner quickly (BFS, SSSP, WCC).
* A **write under write-back** keeps the value local. If it replaces a valid
  line, that line goes to the owner.
* **Self-invalidation (write-back only).** The flush runs while the scheduler
  reports the core idle and all its queues empty. A pointer visits one line per
  idle pass. It sends each valid line to the owner and invalidates it, waiting
  for output-queue room when needed. `clean` rises when no valid line is left,
  so the end of a phase, such as a barrier, can wait for it. This mode suits
  `add` reductions such as histogram, SPMV and PageRank.

**Reset.** After reset the controller invalidates one line per cycle.
`req_ready` stays low for `LINES` cycles.

## Task scheduler (`tsu`)

The scheduler has one input queue (IQ) per task type and one output queue (OQ)
per channel.

* **Into the IQs.** The router ejects messages into the IQs. Per IQ it
  receives `iq_ready` (the IQ is not full) and `iq_lt_half` (occupancy below
  `IQ_DEPTH/2`), the input of the capture rule.
* **To the core.** When the core is free, the heads of the IQs are offered to
  it round-robin. The core stays busy until it pulses `task_done`.
* **From the core and the P-cache.** Spawned tasks enter the OQs, and so do
  the P-cache's updates and victims. The P-cache goes first.
* **Into the router.** OQs drain into the router's local port, round-robin
  over the channels whose router buffer has room.

**OQ reservation.** The P-cache cannot be stalled halfway through an
operation, so a write that has to send something must find room in
OQ[`pc_chan`]. The scheduler guarantees that room:

* Tasks that may write the P-cache wait while that OQ is full. These are the
  task types in `pc_task_mask`, which the tile derives from the channel
  configuration.
* While such a task runs, one slot of that OQ is kept free. Spawns from the
  core may not take it.
* Other task types are not held back, so owner tasks keep draining the
  network while a proxy waits.
* `ev_oq_hold` marks a cycle in which a task was held.

This assumes at most one P-cache write per task, which is true of the
reduction tasks.

**`flush_ok`.** This output is high when no task is running and all IQs and
OQs are empty. It is the P-cache's permission to self-invalidate.

## Tile and grid

**Tile.** `tascade_tile` wires router, scheduler and P-cache together. It
holds the configuration word `cfg_r`, which `cfg_we` writes in one go:

* the proxy enable and the region masks;
* `log_chunk`;
* the four channel configurations;
* the P-cache registers.

Everything the core does is a port:

* the task handshake: `task_valid`, `task_msg`, `task_ready`, `task_done`;
* spawns: `pu_push_*`;
* P-cache access: `pc_req_*`, `pc_rsp_*`.

**Grid.** `tascade_top` places `GRID_W x GRID_H` tiles on a torus. Tile
`t = y*GRID_W + x` gets coordinates `(x, y)`. Its N output feeds the S input
of the tile above, wrapping around, and so on for the other directions. The
core ports are arrays indexed by `t`, and all tiles receive the same
configuration word.

## Parameters and sizes

| parameter | default | note |
|---|---|---|
| `GRID_W`, `GRID_H` | 32 | the evaluated system is 128x128 (16,384 tiles); see below |
| `PC_LINES` | 16384 | 64 KiB of 4-byte elements: the whole local fraction of a 4M-element array (RMAT-22) with 16x16 regions |
| `PC_TAG_W` | 8 | local fractions up to 256x the cache size |
| `IN_DEPTH` | 4 | router buffer per channel and input |
| `IQ_DEPTH`, `OQ_DEPTH` | 8 | scheduler queues |

Regions of 16x16 tiles, the main setting, are selected at run time with
`proxy_mask_x = proxy_mask_y = 4'b0011`.

The grid default is 32x32 instead of 128x128 because of build memory. An
elaboration of the grid for lint or simulation needs about 12.5 MB per tile:
0.8 GB at 8x8, 3.2 GB at 16x16 and 12.8 GB at 32x32. A 128x128 grid would
therefore need about 200 GB. The RTL itself has no size limit below 64x64
regions and 2^16 tiles per side, so set the parameters for a larger grid where
the tools can take it.

What a given data set needs is the owner storage and the P-cache.

* Owner storage belongs to the tile SRAM outside this RTL.
* The whole local fraction of a 2^22-element array fits in the cache when
  there are 256 tiles per region (16x16): 2^22 / 256 = 16,384 lines.
* Larger arrays (2^25 or 2^26 elements) use the same cache with tags, which
  cover a local fraction up to 256 x 16,384 elements.
* Storing a whole RMAT-22 graph on chip takes at least a 64x64 grid of 512 KiB
  tiles, which is larger than the 32x32 default.

## Where this design makes its own choices

The parts taken from the published design are:

* the region masks;
* the within-region comparison;
* the capture rule;
* the five P-cache registers;
* direct mapping with the tag in SRAM;
* the two write policies;
* the self-invalidation condition;
* the OQ-space guarantee.

The following are this implementation's choices:

* **Message format.** The message is a 32-bit index plus a 32-bit value, with
  the channel on sideband lines, and routing is headerless.
* **Address mapping.** The owner and local-fraction mapping is the one given
  under "Messages, ownership and regions" and "P-cache".
* **Routing order.** Routing is X before Y. The published overview figure
  routes updates along the row first, but the cascading example draws its
  path column first. The row-first order was followed.
* **Register widths.** The "buffer full" register has one bit per input port.
  The published snippet declares it 2 bits wide but indexes it with a port
  number. The IQ-occupancy bit is kept per channel.
* **Half-full threshold.** The threshold is "less than half". The published
  snippet's comment says "<= half", but its prose and the register name say
  "less than".
* **Capturable channels.** A message must be on a channel marked capturable,
  and its target IQ must have room, before it can be captured.
* **Router structure.** Buffers are per channel, arbitration is round-robin,
  the buffer depth is 4, and a flit moves one hop per cycle.
* **P-cache timing.** Operations take two cycles, the cache is swept at
  reset, there is a single core port, and the flush sends one line per idle
  pass. A write-through victim is dropped.
* **Reservation rule.** The reservation uses a `pc_task_mask`, and tasks
  outside the mask are not held back.
* **Register width total.** The configuration registers take 72 bits (the
  published count is 60).
* **Register writes.** All registers are written as one word.
* **Local-fraction register.** In the published design, the local-fraction
  register marks the range of the tile's address space whose loads and stores
  go to the P-cache. Here the core uses a separate request port that takes
  global indices, and the register only bounds the accepted range
  (`cfg_err`).
* **Capture-logic flip-flops.** The published count is 20 flip-flops for the
  capture logic. `cascade_select` has the same 20: two 6-bit coordinates,
  4 buffer-full bits and 4 queue bits. The router instantiates it once per
  channel because its buffers are per channel, so the router has 80.

## Known limits

* **Possible torus deadlock.** The torus has no virtual channels or dateline,
  and the published description says nothing about deadlock avoidance. A ring
  whose buffers all fill in a cycle of dependences can therefore deadlock.
  Per-channel buffers remove the deadlock between the proxy and owner channels
  seen in testing, and the grid test runs to completion.
* **Not included.** The cores and the tile scratchpad are not part of the RTL.
  Neither is the off-chip variant, which attaches HBM to 32x32-tile chips.
* **Reduced default grid.** The grid default is 32x32 (see above).

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
Each has a cycle watchdog that counts a failure if the test hangs. Example with
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/tascade_pkg.sv tb/tb_pcache.sv --top-module tb_pcache -Mdir obj -o sim
./obj/sim
```

For the grid test add `tb/pu_model.sv` before the testbench.

| testbench | what it checks |
|---|---|
| `tb_cascade_select` | random ports, masks and queue and buffer states against an independent model of the capture rule, including the one-cycle delay of the registered terms |
| `tb_noc_router` | delivery to owners, routing to proxies, dimension order and shortest ring direction, capture when the IQ is under half full or the straight-ahead buffer is blocked, passing otherwise, and bursts with back-pressure without loss or duplication |
| `tb_pcache` | miss default, hit, both policies, victim index reconstruction, self-invalidation only when allowed, `clean`, `cfg_err`, against a reference model |
| `tb_tsu` | queue order, round-robin scheduling, the OQ reservation (holding proxy tasks but not others), P-cache priority, `flush_ok` |
| `tb_tascade_tile` | one tile: owner delivery, capture, forwarding, proxy spawn, P-cache miss, write-through and hit |
| `tb_tascade_top` | see below |

`tb_tascade_top` runs an 8x8 torus with 4x4 regions and random core stalls.
It runs two reductions:

* a `min` reduction with write-through P-caches;
* an `add` reduction with write-back P-caches, ending with self-invalidation.

It checks the owners' final arrays against the exact min and sum of all
spawned updates. It also counts captures, pass-throughs, filtered updates,
evictions, self-invalidated lines, OQ-reservation holds and P-cache hits, and
it fails if any of them never happened.

8x8 is the largest grid simulated. A run at the default 32x32 grid with
16,384-line P-caches was not simulated: its build alone takes most of the
memory of a large machine, and the reset sweep is 16,384 cycles. There is no
full-size testbench for that reason.
