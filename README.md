# CHARM in SystemVerilog: several different matrix-multiply accelerators on one chip

A transformer or recommendation model runs many matrix multiplications (MMs) of very
different shapes. Some are 3072x4096x1024. Others are batches of small 64x64x64 products.
Suppose one large accelerator is built with a native tile big enough for the large
layers. On the small layers it spends most of its time multiplying padding zeros, and that
caps whole-model throughput. CHARM instead composes several MM accelerators of different
sizes on one device. Each has its own slice of the AI Engine (AIE) array and its own
PL-side DMA with on-chip buffers. Large layers go to the large accelerator and small layers
to the small one, so they run at the same time. A runtime scheduler dispatches the layers of
several concurrent inference tasks onto the accelerators and respects the dependencies
inside each task.

This repository gives RTL for the configuration built for BERT:

| Accelerator | Contents | Native tile (M x K x N) |
|---|---|---|
| MM0 | 8 x 4 x 8 = 256 AIE kernels, X = Y = Z = 2 | 512 x 256 x 512 |
| MM1 | 4 x 2 x 4 = 32 AIE kernels, X = Y = Z = 1 | 128 x 64 x 128 |
| Softmax, layer normalisation, two transposes | one accelerator each, with its own DMA | — |
| Scheduler | dispatches MM layers to MM0 and MM1 | — |

The AIE vector processors are not logic one could synthesise. Here each AIE is modelled as
a synthesizable kernel module with the same interface and cycle budget. The whole system
then simulates and synthesises as ordinary RTL.

## How one MM accelerator computes

A product C = A·B of size M x K x N is cut up at four levels (outer to inner):

1. **Off-chip loop, `(i0, j0, k0)`.** C is walked in native tiles of
   `(X·A·TI) x (Z·C·TJ)`, and k in steps of `Y·B·TK`. For each step the DMA loads:
   - an LHS block of `(X·A·TI) x (Y·B·TK)`;
   - an RHS block of `(Y·B·TK) x (Z·C·TJ)`.
2. **On-chip loop, `(x, z, y)`.** The loaded blocks are fed to the AIE array `X·Y·Z`
   times, one `(A·TI) x (B·TK) x (C·TJ)` sub-product per round. Results come back to the
   PL, where they are added into the output buffer. The first k-round of an output tile
   overwrites; later rounds add. `y` is the innermost index, so the partial sums of one
   output sub-tile arrive back to back.
3. **Array, `(a, b, c)`.** `A·B·C` kernels compute in parallel. Kernel `(a,b,c)` multiplies
   LHS tile `(a,b)` by RHS tile `(b,c)`.
4. **Kernel.** A `TI x TK x TJ = 32x32x32` product at 8 MACs per cycle, so 4096 cycles per
   tile.

Every buffer is double buffered, as in the paper's buffer equation:

| Buffer | Size (words, per bank) | Banks |
|---|---|---|
| LHS | (X·A·TI)·(Y·B·TK) | 2 |
| RHS | (Y·B·TK)·(Z·C·TJ) | 2 |
| Output | (X·A·TI)·(Z·C·TJ) | 2 |

While one LHS/RHS bank is being sent to the array, the loader fills the other. While one
output bank collects partial sums, the storer writes the other back to memory.

Sizes that are not multiples of the native tile are padded:
- the loader writes zeros into the buffer for positions outside M, K or N;
- the storer skips positions outside M and N.

A product may carry a batch count. Batch matrices lie back to back in memory and are
processed one after the other.

Data words are 32-bit two's-complement integers, and sums wrap modulo 2^32. This is the
largest departure from the original design, which computes in fp32. The structure, tiling,
port counts and cycle budget do not depend on the number format. Replacing the MAC in
`aie_mm_kernel` and the adder in the DMA receiver with floating-point units would restore
it.

## Feeding hundreds of kernels through a few ports

Only a few dozen streams connect the PL to the AIE array, far fewer than the number of
kernels. Two switching modes together close that gap:

- **Broadcast.** An LHS tile `(a,b)` is needed by all C kernels `(a,b,*)`. A circuit-switched
  broadcast (`aie_broadcast`) copies it to them. A word leaves the source only after every
  receiver has taken it, and each receiver may take it in a different cycle.
  - RHS tile `(b,c)` is broadcast the same way to the A kernels `(*,b,c)`.
- **Packet switching.** A kernel needs 1024 new words per tile but then computes for
  4096 cycles, so one port can serve CTC = 4 broadcast groups in turn.
  - The DMA sends each tile as a packet: one header beat naming the group, then the
    payload, with `last` on the final word.
  - `aie_pkt_router` passes the packet to the group the header names.

The numbers per array:
- **LHS input ports:** `ceil(A·B/CTC)`. Tile `t = a·B+b` uses port `t / CTC` with header
  `t % CTC`.
- **RHS input ports:** `ceil(B·C/CTC)`, mapped the same way from `t = b·C+c`.
- **Output ports:** `ceil(A·C/CTC)`.

For MM0 that is 8 + 8 input ports and 16 output ports for 256 kernels.

On the output side, the kernels along `b` form a cascade. Kernel `(a,b,c)` adds its
result to the one arriving from `(a,b-1,c)`, so only `(a,B-1,c)` emits a finished tile.
`aie_pkt_merge` gathers up to CTC such tiles onto one output port, whole packets at a
time in round-robin order. Each packet starts with a header naming its source.

The DMA's receivers turn a port number and header back into `(a,c)` and accumulate the
payload into the output buffer. The cascade is this design's reading of why only `A·C`
outputs leave the array.

Timing of one array round at the defaults:
- Each port streams 4 packets of 1025 beats, about as long as one 4096-cycle compute.
- A kernel does not load its next tile while computing. So rounds do not overlap inside
  the array, and a round takes about load + 4096 + drain cycles.

## The scheduler

`crts_scheduler` holds a pool of `NUM_TASKS x NUM_LAYERS` entries. Each entry holds:
- the MM command;
- the accelerator the layer is assigned to;
- a bit mask of the earlier layers of the same task it depends on.

The host writes the pool and pulses `start`. Two processes then run every cycle:

- **Dispatch.** Each idle accelerator takes the first entry that:
  - is assigned to it,
  - has not been issued, and
  - has every dependency finished.

  Entries are searched in task order, then layer order.
- **Retire.** A `done` from an accelerator marks its layer finished, which may release
  successors, and makes the accelerator idle again.

`all_done` pulses once every present entry has finished. An idle accelerator gets its
next command within a cycle or two of a layer becoming ready.

The original scheduler is software on the host CPU. Here it is logic, and the host only
fills the pool. The assignment of layers to accelerators is an input, decided offline.

## Non-MM accelerators

Each reads and writes off-chip memory through its own channel. A command gives rows,
columns and the two addresses. Nothing is overlapped between rows or tiles.

- **Softmax (`softmax_acc`)**, row by row in Q16.16:
  1. Load the row, keeping its maximum.
  2. Replace each x by `exp(x - max)` and sum the results.
     - exp is computed as `2^(d·log2 e)`: a shift for the integer part and a cubic
       polynomial for the fraction.
  3. Form one reciprocal of the sum with a 64-cycle divider.
  4. Scale every value by the reciprocal.

  Accuracy is about 1e-3. Time is about 3·cols + 70 cycles per row.
- **Layer normalisation (`layernorm_acc`)**, row by row in Q16.16:
  - mean by division;
  - variance by division;
  - standard deviation by a digit-by-digit square root;
  - one reciprocal;
  - output `(x - mean)·inv`.

  eps is 2^-16. There is no learned scale or shift. Accuracy is about 1e-2. Time is about
  3·cols + 230 cycles per row.
- **Transpose (`transpose_acc`)**, two instances. It works in 32x32 tiles: it loads a tile
  row by row and writes it column by column, so both sides use consecutive addresses. It
  takes 2·32·32 cycles per tile plus the read latency.

The number formats and algorithms of these three are this design's own. The original
names the kernels and gives each its own PL accelerator, but not how they compute.

## Memory interface

Each accelerator has one memory channel of its own (six in all):
- **Read:** `rd_valid/rd_ready/rd_addr`. Responses come back on `rresp_valid/rresp_data`
  in request order, with no back-pressure. At most 16 reads are outstanding.
- **Write:** `wr_valid/wr_ready/wr_addr/wr_data`.

Addresses count 32-bit words, and matrices are row-major.

The NoC, DDR controllers and DRAM of the real device are outside this RTL. The
testbenches use `mem_model` (one channel) and `mem_shared` (six channels onto one array).
Both use a fixed read latency, and ready drops at random.

## Files

| File | Contents |
|---|---|
| `rtl/charm_pkg.sv` | types: `data_t`, `beat_t`, `mm_cmd_t`, `vec_cmd_t` |
| `rtl/aie_mm_kernel.sv` | one AIE: load, 4096-cycle compute, output with cascade add |
| `rtl/aie_pkt_router.sv` | packet-switched scatter by header |
| `rtl/aie_broadcast.sv` | circuit-switched broadcast |
| `rtl/aie_pkt_merge.sv` | packet-switched gather with source header |
| `rtl/mm_aie_array.sv` | A x B x C kernels with routers, broadcasts and mergers |
| `rtl/mm_dma.sv` | loader, sender, receivers, storer, double-buffered buffers |
| `rtl/mm_acc.sv` | DMA plus array |
| `rtl/crts_scheduler.sv` | the layer scheduler |
| `rtl/softmax_acc.sv` | softmax accelerator |
| `rtl/layernorm_acc.sv` | layer-normalisation accelerator |
| `rtl/seq_divider.sv` | sequential divider used by softmax and layernorm |
| `rtl/seq_isqrt.sv` | sequential square root used by layernorm |
| `rtl/transpose_acc.sv` | transpose accelerator |
| `rtl/charm_top.sv` | the BERT system: scheduler, MM0, MM1, softmax, layernorm, two transposes |

`charm_top` ports:
- **`cfg_*` / `start` / `all_done`:** the scheduler's pool interface.
- **`vcmd_*` / `vdone`:** non-MM commands, in the order softmax, layernorm, transpose0,
  transpose1.
- **Memory channels:** 0 = MM0, 1 = MM1, 2 = softmax, 3 = layernorm, 4 and 5 = the
  transposes.
- **`ev_*`:** event outputs that let a testbench count the mechanisms (padding,
  load/compute overlap, store/compute overlap, dependency waits, concurrent MM
  accelerators).

## Simulating

Every testbench in `tb/` is self-checking. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Build one with Verilator 5, for
example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/charm_pkg.sv tb/tb_mm_acc.sv \
          --top-module tb_mm_acc -o sim -Mdir obj && ./obj/sim
```

| Testbench | What it shows |
|---|---|
| `tb_aie_mm_kernel` | 32x32x32 tile with cascade, random stalls, compute time 4096 cycles |
| `tb_aie_pkt_router`, `tb_aie_broadcast`, `tb_aie_pkt_merge` | stream switching under random back-pressure |
| `tb_mm_aie_array` | 2x2x2 array of 8x8x8 kernels, three rounds, per-tile sums over b |
| `tb_mm_dma` | DMA + array: exact, padded and batched products; packet format; write count; compute bound |
| `tb_mm_acc` | one accelerator: exact, padded and batched products; overlap events |
| `tb_crts_scheduler` | random pools with dependencies; issue order, concurrency, dispatch delay |
| `tb_softmax_acc`, `tb_layernorm_acc`, `tb_transpose_acc` | against real-number references, with rate bounds |
| `tb_charm_top` | reduced system running the BERT layer graph of two tasks, then the non-MM accelerators |
| `tb_charm_full` | the top at full default size: one layer on each MM accelerator concurrently, then softmax over 1000 values, layernorm, transpose |

In `tb_charm_top`:
- Dependent layers read the results of the layers they depend on, so a scheduling error
  shows up as a wrong product.
- Every mechanism must happen at least once: padding, overlaps, dependency waits and
  concurrency.

`tb_charm_full` runs about 640k cycles. That takes under three minutes with Verilator,
build included.

## What to trust and what differs from the original

- **Built as described:**
  - the loop nest and the X·Y·Z feeding of the array;
  - accumulation of partial sums on the PL side;
  - double-buffered LHS/RHS/output buffers sized by the buffer equation;
  - the port counts `ceil(AB/CTC) + ceil(BC/CTC)` in and `ceil(AC/CTC)` out, with
    broadcast plus packet switching;
  - two MM accelerators of 256 and 32 kernels;
  - the four non-MM accelerators;
  - the scheduler's dispatch/retire algorithm.
- **This design's own choices:**
  - the A/B/C/X/Y/Z split of the 256 and 32 kernels (only the kernel counts are given);
  - header and packet formats;
  - the cascade reduction along b;
  - round-robin gathering;
  - the memory channel interface;
  - the scheduler as hardware;
  - all non-MM algorithms and their fixed-point formats.
- **Different from the original:**
  - integer instead of fp32;
  - no double buffering inside a kernel's local memory;
  - the on-chip NoC and DDR are replaced by plain memory channels.
- **Capacity:**
  - The 16-bit size fields hold every BERT, ViT, NCF and MLP layer size.
  - The scheduler holds 8 layers per task. That is enough for BERT, ViT and MLP. NCF's
    9 layers need `NUM_LAYERS` raised to 16 or the model split over two tasks.
- **Rate:** the MM accelerators are memory-bound here. Each has one word per cycle of
  memory bandwidth. One MM0 native tile moves about half a million words, against about
  33k cycles of compute.
- **Synthesis:** it maps the large buffers to memories. At the default sizes a full
  flattened synthesis of the top needs more memory than a 16 GB machine has.
