# DECA: a near-core decompression engine for compressed LLM weights

Generating each token of a large language model on a CPU is limited by memory
bandwidth. Nearly all of the time goes into matrix products whose weights are
streamed from DRAM once per token. The weights can be compressed to cut that
traffic:

- **quantization** to 8, 4 or fewer bits, looked up through a code table and
  optionally scaled per group of weights;
- **unstructured sparsity**, where a bitmask marks the nonzeros and only those
  are stored.

A CPU's matrix unit, however, only takes dense BF16 (or INT8) tiles. If the
cores' vector units rebuild the tiles, they become the bottleneck.

DECA is a small accelerator placed next to each core. The core gives it the
location of one compressed tile. DECA fetches the pieces through the core's L2
and rebuilds the dense 16 × 32 BF16 tile. It leaves the tile in an output
register, from which the core copies it into a matrix-unit tile register.

A new instruction, TEPL, hands over the tile's location and receives the
result. It lets the core keep two tiles in flight without fences, so fetching,
decompression and the matrix product all overlap.

This repository is synthesizable SystemVerilog for one core's DECA together with
the core-side TEPL queue, at the evaluated configuration: **W = 32** output
elements per vector operation and **L = 8** lookup tables.

## Compressed tile format

A tile is 512 weights: 16 rows of 32 BF16 elements, row-major. It is described
by three memory structures. The core passes their byte base address and length
as a `tile_meta_t` (see `deca_pkg`):

| structure | contents | present when |
|---|---|---|
| data | the stored values, Q bits each, packed LSB first with no padding; only nonzeros if sparse | always |
| bitmask | 512 bits, bit *i* of byte *b* = element 8*b*+*i* is nonzero | `sparse_en` |
| scales | one byte per group of 2^`group_log2` elements, an 8-bit power-of-two exponent (E8M0, as in MXFP4) | `scale_en` |

Each base must be 64-byte aligned. A length of 0 means the structure is absent.

The code width Q is 1 to 8 bits, or 16. With 16 the stored values are BF16
already and the tables are bypassed. That is the "sparsity only" scheme.

An element's value is:

```
dense[i] = mask[i] ? LUT[code] * 2^(scale[i >> group_log2] - 127) : 0
```

The LUT holds 256 BF16 entries, written by the core. The format is therefore
whatever the core loads into the LUT. For Q < 8 the table is written so that
every code reads its value in every lookup slot. That means replicated quarters
for Q ≤ 6 and replicated halves for Q = 7 (see *LUT array*). The testbench
helper `lut_entry()` gives the rule: entry *n* holds `value[n mod 2^Q]`.

## Block diagram

```
           core: TEPL queue (2 ports) ──cmd/squash/done/release──┐
                                                                 ▼
 ┌─────────── Loader 0 ───────────┐   ┌─────────── Loader 1 ───────────┐
 │ LDQ + prefetcher ──► SQQ / BMQ / SFQ │ LDQ + prefetcher ──► SQQ / BMQ / SFQ
 │ POPCNT, prefix sum             │   │ POPCNT, prefix sum             │
 └───────────────┬────────────────┘   └───────────────┬────────────────┘
                 └───────── head tile's Loader ───────┘
                                  ▼
     Dequantization (L LUTs) ─► SD ─► Expansion (XBAR) ─► DD ─► Scaling (W × BF16 mul)
                                                                  ▼
                                                     TOut 0 / TOut 1 (1 KB each)
```

Each Loader has its own copy of the following. This lets one tile be fetched
while another is in the pipeline, and the core read a third from a TOut:

- the load queue (LDQ) and prefetcher;
- the three input queues;
- the bitmask logic;
- the TOut register.

The pipeline, the LUT array and the control registers are shared. The
pipeline serves tiles in the order they were invoked, and it moves from one
tile to the next without an empty cycle.

## Vector operations and bubbles

A tile is made in 512/W = 16 **vOps**. vOp *v* produces dense elements
32*v* … 32*v*+31.

Its *window* is the set of stored values it needs. The window size Wnd is the
number of ones in its 32-bit bitmask chunk, or 32 when sparsity is off. The
POPCNT unit computes Wnd. The SQQ head then advances by Wnd·Q bits.

A vOp enters the pipeline when four things hold:

- its bitmask chunk is in the Bitmask Queue;
- its Wnd·Q bits are in the SQQ;
- its group's scale byte is in the Scale Factor Queue;
- the Dequantization stage is free.

Otherwise the cycle counts as a *data stall*.

The Dequantization stage looks up **Lq** codes per cycle:

| code width | lookups per big LUT | Lq (L = 8) | cycles for a dense vOp |
|---|---|---|---|
| 8 bits | 1 | 8 | 4 |
| 7 bits | 2 | 16 | 2 |
| ≤ 6 bits | 4 | 32 | 1 |
| BF16 (bypass) | – | 32 | 1 |

A vOp therefore holds the stage for ⌈Wnd/Lq⌉ cycles, and at least one. Each
extra cycle is a pipeline **bubble**. A dense 8-bit tile thus takes 64 cycles
of dequantization, a dense 4-bit tile 16.

Sparsity shortens the windows. At 20 % density the average window is 6.4
codes, and most vOps of an 8-bit tile fit in one cycle. This interplay between
code width, density and L is the reason the design has L = 8 < W = 32.

Inside the stage, the window is captured when the vOp is accepted. Each cycle
it is shifted by Lq·Q bits, and Lq results are written into their SD lanes.
The SD register is marked valid after the last chunk. The stage's `bubble`
output is high in every cycle in which a vOp stays for another chunk.

## LUT array

There are L = 8 "big" LUTs of 256 BF16 entries. Each is built from four 64-entry
sub-LUTs with one read port each. How the sub-LUTs are used depends on the code
width:

- **8-bit codes.** One lookup per big LUT. Code bits [7:6] pick the sub-LUT and
  bits [5:0] the entry.
- **7-bit codes.** Two lookups per big LUT. Lookup *k* (0 or 1) uses sub-LUT
  pair *k* and, within the pair, the sub-LUT picked by code bit 6.
- **≤ 6-bit codes.** Four lookups per big LUT. Lookup *k* uses sub-LUT *k*.

All L big LUTs hold the same table. A core store to LUT entry *n* writes it
into all of them at once.

## Expansion and scaling

The parallel prefix sum is a Kogge-Stone scan of the bitmask chunk. It gives
each output lane *j* the number of ones below it, which is the SD position of
its value.

The crossbar picks `SD[idx[j]]` for lanes whose mask bit is 1, and writes zero
for the rest. That result is the DD register.

Scaling multiplies every lane by the group's scale. The scale is converted from
its exponent byte *e* to the BF16 value `{0, e, 7'b0}` = 2^(e−127).

The 32 multipliers:

- round to nearest, ties to even;
- flush subnormals to zero;
- saturate to infinity on overflow;
- return the canonical NaN 0x7FC0.

A vOp's scale byte is consumed from the Scale Factor Queue after the last vOp
of its group. Groups must therefore be a power of two of at least W elements.
MXFP4's 32-element groups are the reset default.

With sparsity off the crossbar is bypassed. With scaling off the multipliers
are.

## Loaders: load queue and prefetcher

When a tile starts, the **LDQ** walks the bitmask, then the scales, then the
data, one 64-byte line per request. It has 16 entries.

- Responses may return out of order. They are matched by the tag
  `{loader, epoch[2:0], entry[3:0]}`.
- Lines are handed to the right queue in request order.
- A queue that is full back-pressures the LDQ.
- When a tile is squashed, or its last vOp has issued, the LDQ is killed and
  its 3-bit epoch advances. Responses that arrive later are dropped. Those are the
  padding lines of the last data line, and loads of an aborted tile.

The **prefetcher** watches the metadata of each tile its Loader starts. For each
of the three structures it keeps the base delta between successive tiles. After
two equal deltas it prefetches the structures of the next `pf_dist` tiles into
the L2, as fire-and-forget requests.

The distance ranges from 1 to 4 tiles:

- It grows while the L2 MSHR occupancy stays below 16.
- It shrinks, and prefetching pauses, while occupancy is at or above 40.

The goal is to keep the MSHRs busy without flooding them.

The demand loads of the Loader go before its prefetches. The two Loaders share
the L2 request port round-robin.

## TEPL: issuing tiles from the core

The core-side `tepl_queue` works like a small load queue. Its 8 entries are
allocated as TEPLs enter the reorder buffer. Each entry holds:

- the destination tile register;
- the tag of the source register that holds the metadata;
- the metadata itself, once known.

Source values come either with the allocation or later, through a wake-up
broadcast.

Each cycle, the oldest entry that is ready goes to a free execution port.
Port *k* drives DECA Loader *k*. The instruction does not wait to reach the
head of the reorder buffer. Issue is speculative and out of order, which is
safe because DECA never writes memory.

With both ports busy, ready entries wait. This structural hazard is counted as
`ev_port_stall`, and it keeps at most two tiles in flight.

When Loader *k*'s TOut is complete, the queue raises `wb_valid`, `wb_port` and
`wb_dst`. The core copies the 16 rows and answers `wb_ack`. That retires the
TEPL and releases the Loader.

A pipeline flush works as follows:

- it empties the queue;
- it raises `squash` for every busy port;
- the Loader drops its tile in whatever state it is, including lines still on
  their way and vOps still in the pipeline.

The core may then issue the same TEPLs again.

## Control registers

The core reaches the control registers by memory-mapped stores and loads. The
addresses are word addresses:

| address | register |
|---|---|
| 0x000 | CFG: [4:0] code width Q (16 = BF16), [8] sparse_en, [9] scale_en, [15:12] log2 group size |
| 0x001 | STATUS: [1:0] Loader busy, [3:2] TOut valid |
| 0x100 + n | LUT entry n (BF16 in [15:0]), read and write |

CFG and the LUT are the only state that a context switch has to save. The
OS saves them by reading these same addresses and restores them by writing
them back. Tiles in flight need no saving: a context switch happens between
instructions, after any TEPL has completed or been squashed.

## Timing summary

Rates of the vector pipeline:

- One vOp enters per cycle when its input is present and Wnd ≤ Lq.
- Dequantization → SD → DD → TOut is three register stages. A tile's TOut
  becomes valid a few cycles after its last vOp leaves the Dequantization
  stage.
- A dense 8-bit tile occupies the pipeline for 64 cycles, and a dense 4-bit or
  BF16 tile for 16, once its data have arrived.

Handshakes:

- Invocation: `cmd_valid/cmd_ready`. The addressed Loader must be idle.
- L2 requests: `mem_req_valid/mem_req_ready`.
- L2 responses: unconditional. There is no back-pressure, and the LDQ always
  has an entry reserved for each of its outstanding requests.

## Files

| file | contents |
|---|---|
| `rtl/deca_pkg.sv` | constants (W, L, tile and line sizes) and shared types |
| `rtl/deca_stream_queue.sv` | line FIFO read as a bit stream; used as SQQ, Bitmask Queue and Scale Factor Queue |
| `rtl/deca_ldq.sv` | load queue: walks the three structures, reorders responses |
| `rtl/deca_prefetcher.sv` | stride prefetcher with MSHR-based throttling |
| `rtl/deca_loader.sv` | LDQ + prefetcher sharing one request port |
| `rtl/deca_popcnt.sv` | window size and next SQQ position |
| `rtl/deca_prefix_sum.sv` | expansion indices |
| `rtl/deca_lut_array.sv` | L big LUTs of four 64-entry sub-LUTs |
| `rtl/deca_dequant_stage.sv` | Dequantization stage and SD register |
| `rtl/deca_xbar.sv` | expansion crossbar |
| `rtl/deca_bf16_mul.sv` | BF16 multiplier of the Scaling stage |
| `rtl/deca_tout_regs.sv` | the two TOut registers |
| `rtl/deca_ctrl_regs.sv` | memory-mapped configuration and LUT writes |
| `rtl/deca_pe.sv` | the DECA PE: Loaders, queues, pipeline, TOut |
| `rtl/tepl_queue.sv` | core-side TEPL queue and execution ports |
| `rtl/deca_top.sv` | one core's DECA and TEPL queue |
| `tb/deca_tb_pkg.sv` | reference model: BF16 arithmetic, random compressed-tile generator |
| `tb/deca_mem_model.sv` | behavioural L2: random latency, out-of-order responses, MSHR count |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_deca_workloads` |

## Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. Each
has a watchdog. Packages must be compiled first. For example, with Verilator
5:

```
verilator --binary --timing --assert --top-module tb_deca_top \
  rtl/deca_pkg.sv tb/deca_tb_pkg.sv $(ls rtl/*.sv | grep -v deca_pkg) \
  tb/deca_mem_model.sv tb/tb_deca_top.sv
./obj_dir/Vtb_deca_top
```

Replace `tb_deca_top` with the name of any other testbench to run it.

### End-to-end test

`tb_deca_top` runs the top at its default parameters. A core model does the
following:

- configures the DECA and writes the LUT;
- places tiles from a random generator in the behavioural L2;
- issues batches of TEPLs, some with late source values;
- compares every returned tile, element by element, with the reference.

The batches cover:

- 8-bit at 100, 20 and 5 % density;
- MXFP4 (4-bit, 32-element groups, scaled);
- 4-bit at 50 % with 64-element groups and a flush in the middle of the batch;
- 7-bit dense;
- BF16 at 30 % density.

The test fails if any of these never happened:

- bubbles;
- data stalls;
- TEPL port stalls;
- squashes;
- prefetches;
- each LUT mode;
- scaling;
- expansion.

A run takes a few seconds.

### Throughput of the evaluated schemes

`tb_deca_workloads` streams 16 tiles of each compression scheme through the
top at its default parameters. It keeps two TEPLs in flight, and the L2
answers in 4 to 12 cycles, as for prefetched lines. Every tile is checked
element by element.

The *bound* is the pipeline bound: the sum over all vOps of
max(1, ⌈Wnd/Lq⌉) cycles. Cycle counts are for 16 tiles.

| scheme | density | cycles | bound | cycles/tile | vOps/cycle |
|---|---|---|---|---|---|
| Q8 (8-bit LUT) | 100 % | 1047 | 1024 | 65.4 | 0.24 |
| Q8 | 50 % | 647 | 622 | 40.4 | 0.39 |
| Q8 | 20 % | 336 | 300 | 21.0 | 0.76 |
| Q8 | 10 % | 323 | 257 | 20.1 | 0.79 |
| Q8 | 5 % | 324 | 256 | 20.2 | 0.79 |
| Q16 (BF16 + bitmask) | 50 % | 336 | 256 | 21.0 | 0.76 |
| Q16 | 20 % | 322 | 256 | 20.1 | 0.79 |
| Q16 | 5 % | 315 | 256 | 19.6 | 0.81 |
| Q4 (MXFP4) | 100 % | 316 | 256 | 19.7 | 0.81 |

The results split into two groups:

- **Dense and half-dense 8-bit tiles** are limited by the Dequantization
  stage. They run within a few percent of the bound, at 0.25 vOps per cycle
  when dense.
- **All other schemes** reach about 20 cycles per tile. With only two
  Loaders, each tile's round trip bounds the rate. The round trip is: issue,
  fetch (L2 latency), 16 vOps, three pipeline stages, and the core's
  copy-out. Two tiles cover about 40 cycles of it. A slower L2 lowers this
  rate further. That is why the prefetcher keeps the tiles in the L2.

### Block tests

The block testbenches check the following. Results are compared with values
computed inside the testbench.

- **Dequantization stage:** values for Q = 8, 7, 4 and 16; a dense 8-bit vOp
  every W/L = 4 cycles; bubble count equal to Σ(⌈Wnd/Lq⌉ − 1).
- **PE:** exactly 16 vOps per tile; bubbles per tile equal to the same sum,
  worked out from the bitmask; a squash of one Loader in mid-tile leaving the
  other Loader's tile intact.
- **TEPL queue:** a cycle-level reference model; oldest-first issue; never more
  than two TEPLs in flight; correct write-back and squash.

## Departures from the source design and open points

- **Not built:** INT8 output tiles. The TOut always holds BF16.
- **Not built:** the host. That means the core, its reorder buffer and tile
  registers, the L2 with its TLB, the on-chip network, the LLC and the DRAM.
  They appear only as ports. The testbenches model them with simple
  behavioural code.
- **Not built:** invocation by plain stores to a Loader's control register,
  followed by a fenced load from TOut. That is the slower alternative which
  TEPL replaces. Tiles enter only through the TEPL queue here, although a core
  could drive `cmd_*` of `deca_pe` directly.
- **Not built:** the multi-core arrangement, with one PE per core of a 56-core
  server.
- **Chosen here, not given by the source:**
  - queue depths (SQQ 8 lines, bitmask 2, scales 1);
  - LDQ size 16;
  - prefetcher thresholds and distance range;
  - the register map;
  - E8M0 scale bytes;
  - power-of-two groups of at least W;
  - 64-byte aligned bases;
  - LSB-first code packing;
  - row-major vOp order;
  - the BF16 rounding rules;
  - TEPL queue size and oldest-first selection;
  - the wake-up and write-back handshakes.
- **Addresses:** the Loaders issue the core's virtual addresses. Translation
  through the L2 TLB, which DECA shares with its core, belongs to the L2 side.
  That side is not modelled, and neither is the handling of a failed
  translation.
- **Epoch aliasing:** the LDQ tells apart late responses of an aborted tile
  with a 3-bit epoch. Suppose eight aborts of the same Loader happen while a
  response from before the first is still outstanding. That response would
  then be taken as current. This needs an L2 response slower than eight
  squash-and-reissue rounds.
- **Request port:** a Loader's demand and prefetch requests share one L2
  request port. Prefetches wait while demand loads are pending.
