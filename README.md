# MoCA: a multi-tenant DNN accelerator that rations memory bandwidth per tile

## Main idea

Several DNN inference jobs share one chip: eight accelerator tiles, each
running a different network, all reading and writing through one shared
cache to one DRAM. When
a memory-hungry job runs next to a small, latency-critical one, the heavy job
can take most of the memory bandwidth, and the small job misses its deadline.

This design adds a small piece of hardware to every tile that limits how many
memory requests the tile may issue per time window:

* an **Access Counter** counts the tile's memory requests in a window of
  `window` cycles;
* a **Thresholding Module** holds the tile's memory requests back ("inserts
  bubbles") once the count reaches `threshold_load`, until the window ends.

Software on the host cores watches the jobs and rewrites each tile's
`(window, threshold_load)` pair at run time. A new pair is one instruction
and takes effect within a few cycles, so the split of memory bandwidth
between tenants can follow the workload mix. The compute engine is never
stalled directly; only its memory traffic is paced. Writing `0` for either
value turns the limit off.

The rest of the tile is a conventional weight-stationary systolic-array
accelerator. It is here so the throttle can be exercised with real traffic.

## Top level: `moca_soc`

```
  core 0 ─inst─► ┌──────────┐                       ┌─────────────────────┐
  core 1 ─inst─► │ tile 0..7│ ── one request port ─►│ shared_memory (L2)  │ ── dram_req ──► DRAM
     ...         │ moca_tile│ ◄─ per tile ────────  │ 2 MB, 8 banks,      │ ◄─ dram_resp ──  (outside)
  core 7 ─inst─► └──────────┘                       │ round-robin per bank│
                                                    └─────────────────────┘
```

| parameter | default | meaning |
|---|---|---|
| `TILES` | 8 | accelerator tiles |
| `LINES` | 131072 | shared-cache lines of 16 B (2 MB) |
| `BANKS` | 8 | shared-cache banks |

Ports are per tile (unpacked arrays over `TILES`):
* `inst_valid` / `inst_ready` / `inst` are the instruction port from the tile's core.
* `idle`, `alert`, `bubbles`, `access_count` and `window_cycle` are status outputs for the software.
* `bank_conflicts` counts request-cycles that were not granted, because of
  a busy bank or a cache miss.
* `dram_req` / `dram_ready` / `dram_resp` form the port to the DRAM. It
  carries one 16-byte line per request, and read data returns in order.

The host cores and the DRAM are outside the design. Each core drives one
instruction port. Line addresses are 24 bits wide, so the DRAM holds up to
256 MB.

## Tile: `moca_tile`

```
 inst ─► decoder ─┬─► Ld queue (8) ─┐
                  ├─► St queue (2) ─┴─► thresholding_module ─► access_counter ─► mem_req_gen ─► shared memory
                  │                        ▲ alert                 │                │  ▲
                  │                        └───────────────────────┘                │  │
                  └─► Exe queue (8) ─► exec_ctrl ─► systolic_array        scratchpad ◄┘  │
                                            ▲            │                              │
                                        scratchpad   accumulator ─► post_proc ─ st_line ┘
```

### Instructions (`moca_pkg::inst_t`)

| op | fields used | effect |
|---|---|---|
| `CONFIG_MOCA` | `window`, `threshold` | set the access limit. 0 in either field means no limit |
| `CONFIG_ST` | `shift`, `relu` | set the post-processing applied to stores |
| `LOAD` | `mem_addr`, `sp_addr`, `rows` | copy `rows` lines from shared memory into the scratchpad |
| `STORE` | `mem_addr`, `acc_addr`, `rows` | post-process `rows` accumulator rows and write them to shared memory |
| `PRELOAD` | `sp_addr` | load 16 scratchpad rows as the array's weights (row k = weight row k) |
| `COMPUTE` | `sp_addr`, `acc_addr`, `rows`, `accumulate` | stream `rows` activation rows through the array into the accumulator. With `accumulate` set, results are added |
| `FENCE` | none | wait until the whole tile is idle |

The three queues run independently. Software orders dependent work with
`FENCE`, for example LOAD → FENCE → PRELOAD/COMPUTE → FENCE → STORE.

### The MoCA throttle

`access_counter`:
* Counts every memory request, load or store, that leaves the thresholding
  module, over a window of `window` cycles.
* `alert` is high while the count is at least `threshold_load`.
* At the end of the window, both the cycle counter and the request counter
  restart.
* A `CONFIG_MOCA` also restarts them.

`thresholding_module`:
* Merges the Ld and St queues round-robin, one request per cycle.
* While `alert` is high it passes nothing, and counts a bubble for each
  cycle in which a request was waiting.
* It adds no latency.

The effect is that at most `threshold_load` requests leave the tile in any
window of `window` cycles. A transfer of N lines therefore takes at least
about `(N / threshold_load − 1) · window` cycles. For example, the
testbenches measure the following:
* A 240-line load limited to 8 lines per 60 cycles took 1751 cycles.
* The same load took 244 cycles without a limit.

Software chooses `threshold_load` from the job's expected memory traffic
divided by the number of windows it should be spread over.

`CONFIG_MOCA` is accepted even while the decoder is still expanding an
earlier LOAD or STORE, for example one held up by the throttle. The new
limit is therefore in force 2 cycles after the instruction is accepted, and
a throttle is lifted within 10 cycles.

### Data path

* **Scratchpad** (`scratchpad`): 128 KiB, 8192 rows of 16 int8 values.
  It has one write port (from the DMA) and one read port (to the array).
  Reads are synchronous, with 1-cycle latency.
* **Systolic array** (`systolic_array`, `pe`): 16×16, weight-stationary,
  int8 × int8 multiplies with int32 partial sums.
  * Weights are written one row per cycle.
  * Activation rows are skewed on the way in, and results are de-skewed on
    the way out.
  * One row enters per cycle. Its 16 results leave together 31 cycles
    (2·16−1) later.
* **Execute controller** (`exec_ctrl`):
  * PRELOAD takes 17 cycles.
  * COMPUTE of R rows issues one row per cycle, and its last result lands
    31 cycles after the last row.
  * PRELOAD waits until the array is empty, so no row sees a mix of weights.
* **Accumulator** (`accumulator`): 64 KiB, 1024 rows of 16 int32 values. Its
  write port either overwrites a row or adds to it.
* **Post-processing** (`post_proc`): arithmetic right shift, optional ReLU,
  then saturation to int8. It is combinational and sits between the
  accumulator read port and the DMA.
* **DMA** (`mem_req_gen`):
  * Loads issue one read request per cycle, with up to 4 reads outstanding.
    Returning lines are written to the scratchpad in order.
  * A store reads the accumulator row, post-processes it and sends one
    write. It takes at least 3 cycles per line.

### Shared cache: `shared_memory`

* 2 MB, split into 8 banks interleaved on the line address (bank =
  `addr % 8`).
* Each bank is a direct-mapped, write-back, write-allocate cache.
  * Index: the next 14 address bits.
  * Tag: the remaining 7 bits.
* Each bank serves one hit per cycle. Round-robin arbitration picks among
  the tiles that want the bank.
* A hit is granted at once, and read data returns one cycle later.
* A miss is not granted. The tile keeps its request up while the bank:
  1. writes the victim back to DRAM, if it is dirty;
  2. reads the missing line from DRAM;
  3. serves the waiting request as a hit.
* A bank handles one miss at a time.
* The 8 banks share the DRAM port, which takes one request per cycle (16 GB/s
  at 1 GHz), round-robin among the banks. A small FIFO routes the in-order
  DRAM read data back to the banks that asked for it.
* After reset each bank clears its tags, one per cycle (16384 cycles).
  Requests wait until this is done.

Contention between tenants shows up in three places, all counted in
`bank_conflicts`:
* tiles waiting for the same bank;
* tiles waiting behind another tile's miss in that bank;
* banks waiting for the DRAM port.

## Timing summary

| event | cycles |
|---|---|
| CONFIG_MOCA accepted → new limit in force | 2 |
| throttle lifted by CONFIG_MOCA(0,0) → requests flowing again | ≤ 10 (measured ≤ 4) |
| LOAD of R lines, all hits, no limit, no conflicts | about R + 4 |
| STORE of R lines | about 3R |
| PRELOAD | 17 |
| COMPUTE of R rows | R + 1 issue, results done 31 cycles after the last row |
| shared-cache read hit | 1 cycle after grant |
| shared-cache miss, clean victim | about DRAM latency + 3 before the request is granted |
| shared-cache miss, dirty victim | one more DRAM request slot |
| after reset, tag clearing | 16384 cycles |

## What follows the source design, and what is this design's own

These follow the source design:
* The two MoCA blocks sit between the Ld/St queues and the memory request
  generator.
* Requests are counted within a window, and further requests are blocked
  once the count reaches the threshold.
* Software sets `(window, threshold_load)`, and zeros mean no throttling.
* Reconfiguration takes at most 10 cycles.
* The tile structure (decode, Ld/St/Exe queues, weight/IA buffer, 16×16
  weight-stationary array, accumulator, post-processing).
* The sizes: 8 tiles, 128 KiB scratchpad, 64 KiB accumulator, 2 MB shared
  L2 in 8 banks.

These are this design's own choices:
* The alert condition (count ≥ threshold), and restarting both counters at
  the end of every window. The source also says that a stalled tile waits
  "until its status is updated" by software. This design releases it at
  the window boundary or on a new configuration, which matches the windowed
  description.
* Throttling stores as well as loads. The threshold is computed from their
  sum.
* The instruction set, one queue entry per memory line, and FENCE in place
  of hardware dependency tracking between queues.
* Queue depths 8/2/8, 4 outstanding reads, and round-robin arbitration.
* Data widths: int8 data and int32 accumulation.
* The post-processing function (shift, ReLU, saturate).
* The shared cache's organisation: direct-mapped, write-back, one miss per
  bank, 1-cycle hits, bank interleaving, and the 24-bit line address.

### Not modelled

* **The host cores and the software.** This includes the RISC-V control
  cores, the runtime that estimates latency and picks
  `(window, threshold_load)`, and the scheduler that picks co-running jobs.
  They are software and external cores. The tile's instruction port is
  where they connect.
* **The DRAM.** Only its port is modelled. Testbenches use a behavioural
  model (`tb/dram_model.sv`): one line per cycle, 40-cycle latency, sparse
  contents.
* **Miss-level parallelism.** Each cache bank handles one miss at a time,
  and a tile's DMA waits for each request to be granted. So a tile that
  misses is limited by DRAM latency (about one line per 45 cycles), not by
  DRAM bandwidth. Eight banks then keep at most eight DRAM reads in flight.
  The consequence shows up in the end-to-end test:
  * Tile 0 streamed 512 uncached lines in 22524 cycles while its
    neighbours also streamed freely.
  * It took 50675 cycles when the neighbours were throttled to one line per
    100 cycles. Their few misses still occupy the banks that tile 0's
    in-order stream needs.

  Reproducing the source's result (throttling co-runners speeds up the
  protected job) would need a non-blocking cache with several outstanding
  misses per bank, and a DMA that does not wait for each grant. The
  throttle itself works as intended, and its rate limits are checked.

### Fitting real networks

Network data lives in DRAM. The 256 MB address space holds any of the
networks below, or all of them together. The 2 MB shared cache holds only
the small ones, so the larger ones stream their weights from DRAM. The
parameter counts are the usual published figures.

| network | int8 weights | held in the 2 MB cache |
|---|---|---|
| KWS-type CNN | about 40 KB | yes |
| YOLO-LITE | about 0.5 MB (+0.95 MB largest layer) | yes |
| SqueezeNet 1.1 | 1.24 MB (+0.94 MB largest layer) | almost (4 % over) |
| GoogleNet | 6.8 MB | no |
| ResNet50 | 25.6 MB | no |
| YOLOv2 | about 50.7 MB | no |
| AlexNet | 61 MB | no |

Inside a tile, a layer is run in 16×16 weight tiles. Up to 8192 activation
rows fit in the scratchpad and up to 1024 result rows in the accumulator.

## Files

* `rtl/moca_pkg.sv`: sizes, instruction format, bus types.
* `rtl/moca_soc.sv`: the top.
* `rtl/moca_tile.sv`: one tile.
* `rtl/shared_memory.sv`: the shared cache and its DRAM port.
* `rtl/access_counter.sv`, `rtl/thresholding_module.sv`: the MoCA hardware.
* `rtl/decoder.sv`, `rtl/cmd_queue.sv`, `rtl/mem_req_gen.sv`,
  `rtl/exec_ctrl.sv`: control.
* `rtl/scratchpad.sv`, `rtl/accumulator.sv`, `rtl/systolic_array.sv`,
  `rtl/pe.sv`, `rtl/post_proc.sv`: the data path.
* `tb/dram_model.sv`: behavioural DRAM used by the testbenches.
* `tb/tb_<block>.sv`: one self-checking testbench per block. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/tb_moca_soc.sv` runs the full-size SoC. It checks:
  * layers on all 8 tiles against a reference computation, including after
    dirty results have been written back;
  * the rate limits of throttled tiles;
  * reconfiguration time.

  It also counts that every mechanism happened: bank conflicts, cache
  misses and write-backs, alerts,
  window ends, bubbles, accumulation, ReLU, saturation and a reconfiguration
  lift.
* `tb/tb_moca_workload.sv` runs a light and a heavy tenant together on the
  full-size SoC:
  * Tile 0 computes a keyword-spotting pointwise layer (125 × 64 × 64,
    tiled 4 × 4 over the array, accumulating over the input channels,
    ReLU).
  * Tiles 1–7 stream 1024 weight lines each, throttled to 2 lines per 100
    cycles.
  * It checks every output and the heavy tiles' rate.
  * In this model the layer takes about 81,000 cycles. Most of that is
    cache misses, each waited for in turn (see "Miss-level parallelism").

## Simulating

With Verilator 5, for example:

```
verilator --binary --timing --assert --top-module tb_moca_soc \
    rtl/moca_pkg.sv $(ls rtl/*.sv | grep -v moca_pkg) tb/dram_model.sv \
    tb/tb_moca_soc.sv -o sim
./obj_dir/sim
```

The full-size SoC test builds in about 40 s and simulates about 100,000
cycles in about a second.
