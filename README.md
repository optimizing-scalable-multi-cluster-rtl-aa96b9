# One big cluster or many small ones: a multi-cluster MemPool system in SystemVerilog

A manycore for wireless sensing and communication can spend the same 256 cores and 1 MiB of
scratchpad memory in different ways. One option is a single cluster in which every core reaches
every L1 word in a few cycles. Another is 16 clusters of 16 cores, each with 64 KiB of L1 and a
single-cycle interconnect, which then have to copy data through a shared L2 and synchronise
across clusters. Splits between those two (2x128, 4x64, 8x32) trade the same way.

This RTL describes the whole family with one parameter set. Its main idea: the total core count,
the total L1 and the L2 bandwidth do not change with the split. What changes is how many
clusters there are, how far apart a core and its L1 bank are, and how many DMA engines share the
L2. The default build is the 16x16 system. With `NumClusters=1, CoresPerCluster=256` the same
top is one 256-core NUMA cluster.

```
           core ports (valid/gnt, response) and one wake-up line per core
   ┌──────────────┐ ┌──────────────┐        ┌──────────────┐
   │ cluster 0    │ │ cluster 1    │  ...   │ cluster 15   │   mp_cluster
   │ 16 cores ──► │ │              │        │              │
   │ L1 xbar      │ │              │        │              │   l1_interconnect
   │ 64 banks     │ │              │        │              │   spm_bank
   │ DMA          │ │              │        │              │   dma_engine
   └──────┬───────┘ └──────┬───────┘        └──────┬───────┘
          │ DMA lanes + core port per cluster       │
   ┌──────┴─────────────────┴──────────────────────┴───────┐
   │ system interconnect: fixed latency, one rr per slave   │   sys_interconnect
   └──────┬───────────────────────────────────────┬────────┘
          │ 16 word-wide banks                     │
   ┌──────┴────────┐                        ┌─────┴─────────────┐
   │ L2 (4 MiB)    │                        │ interrupt ctrl    │──► irq_o[255:0]
   └───────────────┘                        └───────────────────┘
      l2_memory                                interrupt_ctrl
```

The processing cores are not part of the RTL. Each core's memory port and interrupt line are
ports of `multipool_top`. The testbenches drive them from a behavioural core model.

## Memory requests

Every path in the system (core to L1, core to DMA registers, DMA to L1, DMA or core to L2, core
to the interrupt controller) uses one single-word protocol, defined in `mp_pkg`:

- **Request.** `valid` plus a `mem_req_t`: byte address, write enable, byte strobes, write
  data, and an atomic opcode. `gnt` accepts the request in the same cycle.
- **Response.** `rvalid` arrives a fixed number of cycles after the grant. Responses come in
  order and cannot be held back. `rdata` is the word as it was *before* the access, so a write
  or an atomic also returns the old value.
- **Atomics.** The memory bank applies them (add, swap, and, or, xor, signed and unsigned
  min/max). This works in L1 and in L2, so atomic counters, flags and reductions can live in
  either place.
- **Cores.** A core keeps one request outstanding. It may issue its next request in the cycle
  its response returns.

## Address map (per core)

| Address            | Target                                    |
|--------------------|-------------------------------------------|
| `0x0000_0000 ...`  | L1 of the core's own cluster, word-interleaved over its banks |
| `0x4000_0000 ...`  | the DMA engine of the core's own cluster  |
| `0x4001_0000 ...`  | global interrupt controller               |
| `0x8000_0000 ...`  | shared L2, word-interleaved over `NumL2Banks` banks |

A cluster cannot address another cluster's L1. All data exchange between clusters goes through
L2, by DMA or by core loads and stores.

DMA registers (offsets from `0x4000_0000`):

| Offset | Name   | Access                                                     |
|--------|--------|------------------------------------------------------------|
| 0x00   | SRC    | source byte address                                        |
| 0x04   | DST    | destination byte address                                   |
| 0x08   | LEN    | length in words                                            |
| 0x0C   | LAUNCH | write: queue the job (SRC/DST/LEN); read: free queue slots |
| 0x10   | DONE   | number of jobs completed since reset                       |
| 0x14   | IDLE   | 1 when no job is queued or running                         |

Interrupt controller (offsets from `0x4001_0000`):
- **0x00 WAKE_CORE.** Write a global core id; all ones wakes every core.
- **0x04 WAKE_CLUSTER.** Write a cluster id; every core of that cluster is woken.

Either write produces a one-cycle pulse on the addressed cores' `irq_o` lines.

## L1: uniform or non-uniform

Each cluster has `4 x CoresPerCluster` banks of 256 words. That is 1 KiB per bank, or 4 KiB per
core, so 1 MiB in total for 256 cores. Consecutive words sit in consecutive banks. Every bank has
its own round-robin arbiter over the cluster's cores and DMA lanes, so two requesters collide
only when they hit the same bank in the same cycle. The loser keeps `valid` high until it gets
`gnt`.

Latency depends on cluster size:

| Cluster | Core to bank | Latency |
|---|---|---|
| Up to `UmaMaxCores` (16) cores | any | 1 cycle |
| Larger | bank of the core's own tile (4 cores) | 1 cycle |
| Larger | another tile of its group (16 tiles) | 3 cycles |
| Larger | another group | 5 cycles |

DMA lanes always see 1 cycle. The interconnect routes each response back with a per-requester
pending register and a short delay line. Because every requester has at most one request in
flight, two responses can never collide; an assertion checks this.

## DMA and the constant L2 bandwidth

`dma_engine` moves `LEN` words. If the source address is in L2, the job copies L2 into L1;
otherwise it copies L1 into L2. Jobs run one after another from a queue of four entries.

**Lanes.** The engine has `Ports` lanes. Lane `p` moves words `p, p+Ports, p+2·Ports, ...`.
Each lane has its own L1 and L2 port and a 16-entry FIFO. It keeps issuing reads as long as the
FIFO can take the data, so the high L2 latency is hidden. A job counts as done when every write
has been acknowledged; only then does DONE step.

**Lane count.** The top gives each cluster `NumL2Banks/NumClusters` lanes, at least one. With
16 L2 banks this is:
- 16x16: one lane per cluster;
- 1x256: sixteen lanes in the single cluster.

Either way the system can move 16 words per cycle to or from L2. What changes with the split is
who competes for that bandwidth.

**System interconnect.** `sys_interconnect` arbitrates round-robin per slave (each L2 bank and
the interrupt controller). It answers every request exactly `SysLatency` (8) cycles after the
grant. The cores of a cluster share one port into it, which is also how they reach the
interrupt controller.

## Double buffering and the two barriers

The kernels are written as a sequence of phases over two L1 buffers:
- while the cores compute on one buffer, the DMA writes the previous results out of the other
  and fills it with the next input;
- at the end of a phase the two buffers swap roles.

Between phases sits a barrier. Its job is to make sure both that the cores are done with a
buffer and that the DMA has delivered the next one. There are two ways to do this. Both are
software that runs on the cores, built from the atomics, the DMA DONE register and the interrupt
controller. `tb/core_model.sv` executes them exactly as a core program would.

**Hard barrier.**
1. Each core atomically increments a cluster counter and goes to sleep.
2. The last core to arrive waits until the DMA has finished every job of the phase.
3. It then queues the next out and in transfers.
4. It waits for the input of the next phase, releases the flag and wakes the cluster.

Cores and DMA are in lock-step. A slow core delays everybody, and no core can start the next
phase early.

**Soft barrier.** This one separates "all cores finished computing" from "the next input has
arrived":
- The **last** core to arrive resets the counter and queues the DMA jobs (write out the buffer
  just finished, fetch the input of the phase after next). It publishes a progress flag and
  wakes the cluster.
- The **first** core to arrive polls DONE until the next phase's input is in L1. It then
  publishes a ready flag and wakes the cluster.
- Every core continues as soon as the ready flag is set, even if slower cores are still
  computing the old phase.

This lets the compute phases of fast and slow cores overlap. Before a core writes into a
buffer, it checks the progress flag ("guard"). This makes sure the DMA has been told about the
buffer's previous contents.

The flags live in L1 words `4N`, `4N+1` and `4N+2` of each cluster, where `N` is the per-core
element count. The system testbench counts the following and fails if any of them never
happens:
- cycles with overlapping phases;
- sleeps;
- DMA waits;
- guard waits;
- core stalls.

## What follows the paper and what does not

Taken from the paper:
- 256 cores and 1 MiB of L1 split evenly over the clusters;
- the 1x256 … 16x16 splits;
- single-cycle L1 for small clusters and up to 5 cycles for the large one;
- a private DMA per cluster for L1/L2 copies;
- a shared L2 behind a high-latency interconnect with the same bandwidth for every split;
- atomics in L1 and L2;
- a global interrupt controller with a line to every core;
- the soft double-buffering barrier and the hard one it is compared with.

This design's own choices:
- **Protocol.** One-word request/response instead of AXI: no bursts, no IDs, fixed 8-cycle
  round trip.
- **Sizes.** L2 of 4 MiB in 16 banks; 4 L1 banks per core.
- **Cluster structure.** The 1/3/5-cycle NUMA structure with 4-core tiles and 16-tile groups,
  following the original MemPool. It is used for every cluster larger than 16 cores; the latency
  of 32- to 128-core clusters is not given.
- **Interfaces.** The address and register maps, the DMA lane scheme and job queue, one shared
  system port per cluster for the cores.
- **Barrier flags.** The flag layout of the barrier software.

Not in the RTL:
- the RISC-V cores and their instruction and data caches;
- real AXI;
- a DRAM controller for an off-chip L2.

The speed-ups the paper reports depend on the cores and cannot be reproduced from this RTL alone.

## Workload sizes at the default 16x16 build

Every kernel the paper evaluates fits the default L1 of 64 KiB per cluster:

| Kernel | Per-cluster data per phase | L1 needed |
|---|---|---|
| axpy | 3,072 elements of x and y (49,152 elements in all), double-buffered | 48 KiB |
| dotp | same as axpy | 48 KiB |
| dct | 6,144 words of a 96x1024 frame, computed in place | 48 KiB |
| 2dconv | 3,072 inputs and 3,072 outputs of a 48x1024 image, plus halo | about 49 KiB |
| matmul | six 48x48 matrices | 54 KiB |

The larger clusters follow the same pattern. For example, 1x256 with six 192x192 matrices needs
864 KiB of its 1 MiB. Eight phases of axpy need 3 MiB of L2.

## Files

`rtl/`:

| File | Contents |
|---|---|
| `mp_pkg.sv` | Request type, atomic opcodes, address and register maps, decode and update functions |
| `rr_arbiter.sv` | Round-robin arbiter used by every shared resource |
| `spm_bank.sv` | One SRAM bank with atomics and a one-cycle response |
| `l1_interconnect.sv` | Per-cluster crossbar with UMA/NUMA latency |
| `dma_engine.sv` | Per-cluster multi-lane DMA with job queue |
| `mp_cluster.sv` | One cluster: request decode, L1, DMA, system port |
| `sys_interconnect.sv` | Fixed-latency crossbar to L2 banks and the interrupt controller |
| `l2_memory.sv` | Banked L2 |
| `interrupt_ctrl.sv` | Wake-up pulses per core or per cluster |
| `multipool_top.sv` | The system |

`tb/`:
- **One self-checking testbench per module** (`tb_<module>.sv`). Each compares against
  reference models and checks the latencies.
- **`tb_multipool_top.sv`.** Three reduced systems side by side:
  - 4x4 with the soft barrier;
  - 4x4 with the hard barrier;
  - 1x16 with NUMA latencies.

  It checks every result, counts every mechanism listed above, and checks that the soft barrier
  is faster than the hard one.
- **`tb_multipool_full.sv`.** The top at its default parameters (16x16): eight phases of axpy
  with 49,152 elements each, 393,217 checks. It finishes in about 148,000 cycles.
- **`core_model.sv`, `mp_workload.sv`.** The behavioural cores and the barrier software.

## Simulating

With Verilator 5, for example the system testbench:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_multipool_top \
    -y rtl -y tb +libext+.sv rtl/mp_pkg.sv tb/tb_multipool_top.sv -o sim
./obj_dir/sim
```

Every testbench ends with a line `TB_RESULT checks=<n> failures=<m>`. Each also has a watchdog
that fails the run if it hangs.

The full-size testbench builds the same way with `tb_multipool_full`. Its 256 core models make
the C++ build slow (about 13 minutes on four threads); the simulation then takes under two
minutes.

To try another split, override `NumClusters` and `CoresPerCluster` on `multipool_top`; the
other sizes follow from them. Then give `mp_workload` the same numbers and an `Elems` that fits.
