# RPU: a memory-bound inference processor built from many small NUMA cores

Generating one token of a large language model at batch size 1 reads every weight once and does
roughly two operations per weight. Such a workload is limited by memory bandwidth, not by
arithmetic. This design follows that observation. It spreads the weights over many small
*reasoning cores*. Each core has its own memory channel (256 bits per cycle at 1 GHz, 32 GB/s) and
only as much arithmetic as that channel can feed. The cores share no memory. All data movement is
explicit and done by three small DMA pipelines per core. The pipelines synchronise through valid
counters kept next to every buffer entry.

The RTL is in SystemVerilog (IEEE 1800-2017) under `rtl/`, with self-checking testbenches in `tb/`.

## Hierarchy

| level | module | default size | contents |
|---|---|---|---|
| package (top) | `rpu_package` | 4 compute units | CUs chained into one segment of an outer ring per core position |
| compute unit (CU) | `compute_unit` | 16 cores | cores on an intra-CU ring; one inter-CU link per core |
| reasoning core | `reasoning_core` | 4 TMACs | fetch, 2 buffers, 3 DMA pipelines, decoder, TMACs, vector unit |

Inside a core:

| block | module | size |
|---|---|---|
| instruction memory and fetch | `inst_fetch` | 4096 x 128-bit instructions (64 KB) |
| memory buffer | `pipeline_arbiter_buffer` | 4096 x 1024 bit (512 KB), 3 ports |
| network buffer | `pipeline_arbiter_buffer` | 2048 x 1024 bit (256 KB), 4 ports |
| memory pipeline | `mem_dma` | pseudo-channel to/from the memory buffer, 256 bit/cycle |
| compute pipeline | `compute_dma` | VMM controller |
| network pipeline | `net_dma` | two links of 128 bit/cycle (16 GB/s) in and out |
| stream decoder | `stream_decoder` | 256 bit/cycle compressed weights in, 64 x BF16 tile out |
| tile multipliers | `tmac` x 4 | 8 x 8 BF16 MACs with FP32 accumulation, 8192 x FP32 accumulators each (32 KB) |
| vector unit | `hp_vops` | 8 FP32 lanes |

`rpu_pkg` holds the shared types: the buffer request, the link beat, the instruction and the
floating-point helper functions.

Things the package does not contain are its ports. These are the HBM-CO memory (one pseudo-channel
port per core), the die-to-die PHYs (links are plain valid/ready wires), the ring station that
closes the outer ring between packages, and the host. The host loads programs, starts the cores and
takes their interrupts.

## The valid counter: how three pipelines stay in step without talking

Every 1024-bit entry of the two buffers has a 2-bit counter. It holds the number of consumers that
have yet to read the entry. All accesses go through one arbiter per buffer, which grants at most one
request per cycle. A counter update is therefore atomic.

- **Write.** A write stores the data and sets the counter to the request's `vcount`. With
  `check_valid`, the write waits until the counter is zero, so it never overwrites data that
  someone still needs.
- **Read.** With `check_valid`, a read waits until the counter is non-zero, so the data has been
  produced. With `dec`, the read decrements the counter.

A request that waits does not block the other ports. Among the requests that may proceed, the
grant goes by a priority order that software sets through `cfg_mb_prio` and `cfg_nb_prio`.

Everything else in the core is built on these rules. The memory DMA loads weight entries with
`vcount = 1`. The compute DMA reads them with `check_valid` and `dec`, so it waits for data still
in flight from memory and frees each entry as it goes. A core that computes a layer output and
broadcasts it writes the output with `vcount = 2`. The entry is then freed only after both the
local compute pipeline and the network send have read it. A receiving core's compute pipeline
simply waits on the counters of the activation entries that are still on the ring. No pipeline
ever polls another one.

## Instructions

All instructions are 128 bits wide (`instr_t`). `inst_fetch` reads one per cycle and pushes it
into the queue of its pipeline. Each pipeline runs its own instructions in order, but the three
pipelines run independently of each other. `HALT` stops fetching. The core raises `done` once the
program has halted and all pipelines are idle, and `irq` pulses for one cycle when `done` rises.

| opcode | pipeline | fields used |
|---|---|---|
| `MEM_LOAD` | memory | `cnt` entries from beat address `{b,c}` to memory-buffer entry `a`; `vcount`, `check_valid` |
| `MEM_STORE` | memory | `cnt` entries from memory-buffer entry `a` to beat address `{b,c}`; `check_valid`, `dec` |
| `VMM` | compute | see below |
| `NET_SEND` | network | network-buffer entry `a` to entry `b` of the cores `hops` steps along ring `dir`; `vcount` at the receivers; `check_valid`, `dec` |

An entry in memory is 4 consecutive 256-bit beats, with the first beat in the low bits.

## The VMM: weight streaming through stripes

`VMM` computes `O = V W`. `V` is an input vector of `K = 64 n1` values and `W` is a `K x N`
weight shard, with `N = 8 n2`. Up to four input vectors, set by `ntm`, are computed at once: one
per TMAC. All of them share the same stream of weights.

`W` is cut into 8 x 8 tiles, one 1024-bit entry of 64 BF16 values each. A *stripe* is 8 tile rows,
i.e. 64 rows of `W`. Stripes are processed one after the other. Within a stripe, the tiles go
column by column, and within a column from top to bottom. The weights must lie in the memory
buffer in exactly this order: entry `a`, `a+1`, and so on.

1. **Activation load.** Before each stripe `s`, each TMAC `t` loads its 64 activations. They come
   from entry `b + s*ntm + t` of the network buffer (`sel_a = 0`) or of the memory buffer
   (`sel_a = 1`), and go into the TMAC's register file.
2. **Tile multiply.** Each cycle, one tile is broadcast on the 1024-bit compute bus to all active
   TMACs. For tile row `j`, MAC `[r][c]` adds `act[8j + r] * tile[r][c]`, so each column of MACs
   works on one output column. BF16 products are exact in FP32, and the accumulation rounds to
   nearest even.
3. **Tree sum.** After the 8th tile of a column, the 8 x 8 face of partial sums is copied out and
   the MACs start on the next column at once. The face goes through a three-stage adder tree, one
   column per cycle. The result is added into the accumulator scratchpad at outputs `8c .. 8c+7`
   of tile column `c`. On the first stripe it is written instead of added.
4. **Drain.** After the last stripe, the accumulators are read 8 at a time. They pass through the
   vector unit (`vop`, `scalar`: pass, multiply, add or max; `MAX` with 0 gives ReLU) and are
   rounded to BF16. They are packed into 1024-bit entries at `c + t*G + g`, with `G = ceil(n2/8)`,
   in the network buffer (`sel_b = 0`) or the memory buffer (`sel_b = 1`), with valid count
   `vcount`. Outputs beyond `N` in the last entry are zero.

With the weights ready in the buffer, the TMACs take one tile per cycle. That is 64 MACs per TMAC
per cycle, or 256 per core.

## Compressed weights and the stream decoder

If `fmt` is not BF16, the weight entries hold a continuous bit stream of tile records. Each record
is an 8-bit shared exponent followed by 64 elements of `b` bits, packed from the least significant
bit upward. Records cross entry boundaries freely. The compute DMA feeds each 1024-bit entry to
the decoder as four 256-bit words, one word per cycle. The decoder keeps a 1024-bit shift buffer
and emits one BF16 tile whenever a whole record is buffered.

| `fmt` | element | value |
|---|---|---|
| MXFP4 | E2M1 | `(-1)^s * 2^(e-1) * 1.m` (subnormal when `e = 0`), times `2^(X-127)` |
| MXFP6 | E3M2 | bias 3, same scheme |
| MXFP8 | E4M3 | bias 7, same scheme |
| BFP4 / BFP8 | two's complement integer | `int * 2^(X-127)` |

`X` is the shared exponent. A 4-bit record is 264 bits, so at 256 bits per cycle the decoder keeps
up at about 0.97 tiles per cycle. Results below the BF16 normal range become zero. Results above
it saturate to the largest finite BF16. BF16 weights bypass the decoder entirely.

## Network: two rings and forwarding by hop count

Each core has two 128-bit links out and two in:

- **Direction 0** is a ring through the cores of its CU: core `i` sends to core `i+1`.
- **Direction 1** goes to the core in the same position of the next CU. At the package boundary it
  leaves on `ring_out[i]` and comes back on `ring_in[i]`.

A packet is one buffer entry sent as 8 beats. Every beat carries the header: destination entry,
`vcount`, and remaining `hops`.

On receive, the beats are collected into an assembly register. The complete packet then moves to a
hold register, which frees the link for the next packet. From the hold register the entry is
written into the local network buffer, using `check_valid`. If `vcount = 0` the packet is passed
on without being stored. If hops remain, the packet is sent on along the same ring with
`hops - 1`. A forward takes precedence over a new local send. A packet that has started keeps its
link until its last beat.

So a core broadcasts its output fragment to all `N` cores of a ring with a single
`NET_SEND hops = N-1`. The cores in between need no instruction for it.

Each core buffers two packets per incoming ring. A ring of `N` cores therefore cannot lock up as
long as fewer than `2N` packets are in flight on it. Programs must keep to that bound. One
broadcast per core at a time is always within it.

## Where this design departs from, or adds to, the published description

- **Left out.** The vector unit only does element-wise multiply, add and max with a scalar.
  Activation functions such as SiLU and GeLU, normalisation and rotary embedding are not built.
  The NxFP weight formats are not supported.
- **Buffer size.** The memory buffer follows the core's table (512 KB). The weight-scratchpad
  drawing suggests 16 banks of 4k x 128 bit (1 MB) instead.
- **Compute rate.** A core has four 8 x 8 TMACs, which is 0.512 TFLOP/s at 1 GHz. The description
  also sizes compute at 8 TOPs per 256 GB/s of bandwidth, which would be about 1 TFLOP/s per
  core. The TMAC count was kept.
- **Own choices.** These are not given in the description and were chosen for this design:
  - the instruction format;
  - the pseudo-channel protocol;
  - the packet format, the ring topologies and forwarding by hop count;
  - the decoder record layout;
  - the order and latency of the drain path;
  - one accumulator entry per output.
- **Host interface.** The instruction memory is loaded by the host. It is not a cache.

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>`, finishes by itself, and has a
watchdog. The testbenches work from random initial register values. For example, with
Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/rpu_pkg.sv tb/tb_util_pkg.sv \
  rtl/*.sv tb/hbm_co_model.sv tb/tb_reasoning_core.sv --top-module tb_reasoning_core
./obj_dir/Vtb_reasoning_core +verilator+rand+reset+2
```

| testbench | covers |
|---|---|
| `tb_tmac`, `tb_stream_decoder`, `tb_hp_vops`, `tb_pipeline_arbiter_buffer`, `tb_mem_dma`, `tb_net_dma`, `tb_inst_fetch` | one block each, against references computed in real arithmetic |
| `tb_compute_dma` | VMM with real buffers, decoder and TMACs; BF16 and MXFP4; 2 and 4 TMACs; ReLU; late activations; one tile per cycle |
| `tb_reasoning_core` | full core at default sizes: load, VMM, send, reload, VMM with ReLU, store; a forwarded packet |
| `tb_compute_unit` | 4-core CU: layer, ring broadcast, second layer on gathered activations, results on the inter-CU ports |
| `tb_rpu_package` | 3 CUs x 4 cores, described below |

`tb_rpu_package` runs a three-layer pipeline:

1. a BF16 layer, broadcast over the intra-CU ring;
2. an MXFP4 layer with ReLU over all gathered fragments, broadcast over the inter-CU ring;
3. a final BF16 layer, stored to memory.

Alongside it, every core runs a 4-TMAC batched projection. The testbench counts each mechanism:

- stalls on either buffer;
- waits for weights and for activations;
- forwards on both rings;
- buffer port conflicts;
- ReLU clipping;
- interrupts.

It fails if any of them never happens.

`tb/hbm_co_model.sv` is a behavioural pseudo-channel. It has fixed latency and no DRAM timing.
Only the testbenches use it.

The full package at its default size (64 cores) passes Verilator lint. Building it for simulation
took longer than 15 minutes, so the largest size simulated end to end is 3 CUs of 4 cores.
