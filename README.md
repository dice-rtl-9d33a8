# DICE: SIMT threads on statically scheduled CGRAs — RTL

DICE runs GPU-style SIMT kernels (many threads, one program) on
coarse-grained reconfigurable arrays instead of on SIMD lanes. A compiler
cuts every kernel into *p-graphs*: dataflow graphs small enough to be placed
and routed once onto a 4x5 array of processing elements. A p-graph contains
no variable-latency dependence, so a load's result and the instructions that use it always sit
in different p-graphs. The array is configured for one p-graph. Then threads
stream through it, one (or two or four) per cycle, like iterations through a
pipelined loop. A unit of work is an **e-block**: one p-graph executed for
all active threads of one CTA (thread block). A set of simple pipeline
stages around the array chooses the next e-block, fetches its description
and configuration, feeds it threads and retires it when its memory traffic
has drained.

This repository holds synthesizable SystemVerilog for that machine: the
complete CGRA Processor (CP), the cluster of four CPs and the top level of
34 clusters. Caches, DRAM and the host driver are not part of it. They sit
behind one memory port and one CTA launch port.

## Hierarchy

```
dice_top                34 x cgra_cluster + mem_interconnect (cluster level)
 cgra_cluster           4 x cgra_processor + mem_interconnect (CP level)
  cgra_processor        one CP, stages CS -> FDR -> DE -> RE
   CS   active_cta_table, pdom_stack (one per CTA slot), cta_scheduler
   FDR  pgraph_cache, metadata_fetch_unit, metadata_decoder, branch_handler,
        bitstream_fetch_load, config_memory (CM0/CM1)
   DE   dispatcher (active_thread_selection, scoreboard, register_file,
        operand collector), cgra_fabric (switch_box, processing_element),
        ldst_unit (sync_fifo + tmcu per port, crossbar)
   RE   block_retire_table
```

Shared types and sizes are in `dice_pkg.sv`. Defaults follow the DICE
configuration: 34 clusters, 4 CPs per cluster, 512 threads per CP (2048 per
cluster), 32 registers per thread held in 32 banks, a 4x5 array, 4 memory
ports per CP, and a coalescing timeout of 8 cycles.

## The life of an e-block

1. **CTA schedule (CS).** Each resident CTA (4 slots per CP) has a
   reconvergence stack. The top entry holds the CTA's next p-graph number and
   its active thread mask. The scheduler picks a CTA that is ready to run. It
   prefers one whose next p-graph equals the last one granted, so metadata and
   bitstream are reused. Otherwise it goes round robin.
2. **Fetch, decode, resolve (FDR).** The metadata of p-graph `pc` is six
   words at `md_base + 32*pc`, read through a small p-graph cache. A repeated
   request for the same address is served from the last fetch. The decoder
   unpacks the fields (below). The branch handler predicts the next p-graph
   (backward taken, forward not taken) and hands the prediction to the CTA
   at once. The CTA's next e-block can therefore be fetched while this one
   still runs. The bitstream unit checks whether the configuration is
   already in CM0 or CM1. If not, it loads it into the bank that the running
   e-block is not using.
3. **Hand-over to DE.** The e-block moves on when the dispatcher is free,
   the BRT has room, the CTA's stack is stable, and, for a `BARRIER` p-graph,
   the CTA owns no unretired e-block. A speculatively fetched e-block whose pc
   no longer matches the top of its stack is dropped. The CTA is then
   rescheduled at the correct pc. This is the misprediction path.
4. **Dispatch and execute (DE).** Active threads are taken in ascending tid
   order. With unrolling, threads `T, T+K, T+2K, T+3K` go together (K=8 for
   4x, K=16 for 2x). A group is issued when the scoreboard shows none of its
   input or output registers waiting for a load and every LDST FIFO has credit
   for the groups still in the array. Register values are read from the
   swizzled banks, flow through the array, and leave on up to eight output
   ports. Each port is a register writeback, a load address, a store
   address/data pair or a branch predicate. Loads reserve their destination
   register in the scoreboard.
5. **Retire (RE).** Once all threads have left the array the dispatcher
   is free. The e-block's outstanding loads and stores are counted in the
   Block Retire Table, which retires it when both counts reach zero. The
   branch outcome resolves at the end of DE. Uniform outcomes just set the
   stack's next pc. A divergent outcome sets the top entry's next pc to the
   reconvergence point and pushes the not-taken and then the taken path.
   The top entry pops when its next pc reaches its reconvergence pc.

## Metadata (six 32-bit words, least significant bit first)

| bits | field | meaning |
|---|---|---|
| 0 | PARAMETER_LOAD | loads of this p-graph fill the shared constant buffer |
| 1 | BARRIER | wait until all earlier e-blocks of the CTA retired |
| 2–33 | BRANCH | kind[1:0] (next, jump, conditional, exit), target[14:0], reconvergence[14:0] |
| 34–36 | NUM_STORES | stores per thread |
| 37–60 | LD_DEST_REGS | 4 x 6 bits, destination register per memory port, 63 = unused |
| 61–94 | OUT_REGS | 34-bit map of registers written back |
| 95–128 | IN_REGS | 34-bit map; bit 32 = thread id, bit 33 = CTA id |
| 129–136 | LAT | array latency in cycles (first input to outputs) |
| 137–138 | UNROLLING_FACTOR | 0: 1x, 1: 2x, 2: 4x |
| 139–146 | BITSTREAM_LENGTH | bytes |
| 147–178 | BITSTREAM_ADDR | byte address |

The fields and their widths are those of the DICE metadata format. Their order
and packing are this design's own.

## The array

`cgra_fabric` is a 4x5 grid of tiles. Each tile has a switch box and a
processing element. The switch box gives the PE its operands a, b and a
predicate p. Each can be chosen from 16 sources: the 8 array inputs, the
N/S/E/W neighbours, the tile's own output, 0, 1 and the tile's immediate.
Each switch-box output and the PE output can be registered or bypassed. This
is how the compiler balances path delays so that a thread's values meet in
the same cycle. Every value carries a control bit. It is cleared for a lane
with no thread, and by a false predicate. Writebacks and memory requests
happen only for values whose bit is set. Inputs come from the register file
(any register of any lane, or a constant-buffer word, which is always
valid). A small ring buffer delays the group tag (valid, base thread, lane
mask) by the p-graph's `LAT` so that outputs can be matched to threads.

Configuration is 1536 bits (48 words): 20 tiles x 64 bits, then 8 input
selectors x 16 bits, then 8 output selectors x 16 bits. See `tile_cfg_t`,
`fin_cfg_t` and `fout_cfg_t` in `dice_pkg.sv`. The two configuration banks
let the next p-graph load while the current one runs.

Routes through bypassed tiles are combinational. Verilator therefore reports
the switch-box/PE ring as a possible combinational loop. A legal
configuration never closes such a loop, and keeping that rule is the
compiler's job.

## Register file and unrolling

Register `r` of thread `T` lives in bank `(r + T) mod 32`. The four threads
of a 4x group are K apart, so their copies of one register sit in different
banks. The compiler must choose unroll factors whose reads are free of
conflicts; an assertion in `register_file` checks this. Thread id and CTA id
appear as registers 32 and 33. Writebacks from the array have priority over
load data. Load data is written a sector at a time and retried when a
writeback port is busy.

## Memory path and temporal coalescing

Each of the four memory ports has a FIFO (32 entries) and a TMCU. The TMCU
holds one command for a 32-byte sector. A following request from the same
e-block to the same sector, same type and same destination joins it. The
command is sent when a request cannot join or when a timer of 8 cycles
expires. Because threads T, T+1, ... pass a port on consecutive cycles,
stride-1 accesses become one request per sector. A round-robin crossbar
sends commands to the CP's memory port. Responses are routed back by a tag
that carries port, e-block, destination register and the thread of each
word. Memory requests and responses carry a tag with cluster and CP index.
Each interconnect level fills in its own index and routes responses with it.

## What differs from the DICE proposal

- PEs implement integer operations only. The floating-point and
  special-function units, and the SFU tiles' special functions, are absent.
- L1 data cache / shared memory, texture/constant cache, L2 and DRAM are
  outside. The design has one request/response port (32-byte sectors) where
  they connect. The kernel driver is outside too: CTA launch is a port.
- One e-block can be in FDR and one in DE per CP, with one level of
  speculation. Stack depth 8, BRT 8 entries, 4 CTA slots, p-graph cache 4 KB
  direct mapped, and FIFO depth 32 are all chosen here.
- Register and constant-buffer sizes: 32 registers per thread, 32-word
  constant buffer.

## Simulation

All testbenches are self-checking and print
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/dice_pkg.sv tb/dice_prog_pkg.sv tb/tb_cgra_processor.sv \
  --top-module tb_cgra_processor -o sim && obj_dir/sim
```

`tb/dice_prog_pkg.sv` assembles a six-p-graph test kernel,
`c[g] = a[g] > 5 ? 2*a[g] : a[g] + 100`, from helper functions that fill
configuration and metadata structures. `tb/mem_model.sv` is a
fixed-latency memory with a stall input.

- `tb_cgra_processor` runs two 128-thread CTAs on one CP (about 6000
  cycles). It checks all 256 results and requires each mechanism to occur:
  metadata reuse, bitstream reuse, a discarded speculative e-block, divergence
  and reconvergence, scoreboard and credit stalls, a barrier wait, unrolled
  dispatch and coalescing.
- `tb_dice_top` runs the full-size top (136 CPs) with four CTAs on three CPs in two
  clusters, and checks the same list plus correct done routing. Building it
  takes several minutes; the simulation is short.

Standalone tests compare a block with a model written in the testbench:

- `tb_tmcu`: merging of stride-1 requests, every reason to send a command,
  coalescing disabled, the timeout (the command leaves MAX_INTERVAL+1 edges
  after it was opened) and a random stream under back-pressure.
- `tb_pdom_stack`: random initialise/update/push/pop sequences, including the
  automatic pop at the reconvergence point.
- `tb_active_thread_selection`: group order and lanes for 1x, 2x and 4x over
  random masks, at one group per cycle.
- `tb_cta_scheduler`: same-p-graph preference and round robin.

The remaining blocks are checked only inside the two end-to-end tests.
