# NTX near-memory training processor — SystemVerilog RTL

Training a deep neural network is dominated by a few regular loop nests
(convolutions, matrix products, element-wise updates) over data sets far larger
than any on-chip memory. Moving that data over a narrow link to a host is the
bottleneck. This design puts the compute next to the DRAM instead: a set of small
processing clusters sits in the logic base of a Hybrid Memory Cube (HMC), and each
cluster pairs one small RISC-V control core with eight floating-point streaming
co-processors called **NTX**. The core only sets up work; NTX executes whole
loop nests of up to five levels by itself, reading operands from and writing
results to the cluster's scratchpad at one fused multiply-accumulate per cycle,
with no instruction fetch and no register file. A DMA engine per cluster moves
2D tiles between the DRAM and the scratchpad.

The RTL here covers everything on the processing side: NTX and its parts, the
cluster (scratchpad, interconnect, DMA, bus) and the array of 64 clusters with
their shared L2 and SoC interconnect. The RISC-V cores, the HMC's own
interconnect, vault controllers, DRAM and serial links are existing parts and are
outside the RTL; their connections are module ports.

## Hierarchy

```
ntx_pim_top                    64 clusters, L2, SoC interconnect
├── soc_interconnect           64 cluster ports -> L2 + 8 master ports (mem_arb per target)
├── l2_mem                     128 KiB
└── ntx_cluster  (x64)
    ├── cluster_bus            core address decode, NTX broadcast, SoC port arbiter
    ├── cluster_dma            2D transfers, command queue
    ├── tcdm_interconnect      18 masters x 32 banks (tcdm_bank x32, 4 KiB each)
    └── ntx  (x8)
        ├── ntx_regif          staging area, shadow register, status/IRQ
        ├── ntx_hwloops        five 16-bit loop counters
        ├── ntx_agu (x3)       address generators
        ├── fifo_v             address/data/command FIFOs
        └── ntx_fpu            command datapath
            └── ntx_fmac       FP32 MAC with 300-bit accumulator
```

`ntx_pkg` holds the bus struct, the command word, the register and address maps
and FP32 compare helpers.

## The bus convention

Every memory-like port uses one request/grant protocol (`mem_req_t`: address,
write enable, byte enables, write data). A master holds `req` and the request
until `gnt`; each granted request, read or write, yields exactly one `rvalid`
cycle, and responses come back in grant order. Scratchpad banks, L2 and register
interfaces answer one cycle after the grant. Interconnects that can see different
latencies behind them (cluster bus, SoC interconnect) keep order by letting a
master have outstanding requests to only one target at a time.

## How NTX runs a loop nest

This is the heart of the design and the part worth reading carefully.

**Hardware loops.** Five counters L0 (innermost) to L4, each 16 bits with a
programmed iteration count N_i. L0 advances every step; L_i advances when all
lower counters wrap. The command word says how many levels are active
(`outer_level`); inactive levels and levels with N ≤ 1 count as always wrapped.

**Address generators.** Three AGUs each hold a 32-bit address and five step
sizes p_0..p_4. On every step an AGU adds the step of the *highest* loop that
advances in that step, i.e. the outermost counter that is not wrapping while all
below it are. This single adder per AGU reproduces a general affine address
`base + Σ i_k·s_k` if the step sizes are set as

```
p_i = s_i − Σ_{k<i} (N_k − 1)·s_k
```

(the jump of loop i must undo the progress of all inner loops). The short form
`p_i = s_i − (N_{i−1} − 1)·p_{i−1}` that is often quoted for this scheme is the
same only for two loops; for three or more it gives wrong addresses. The
testbenches program the full formula. AGU0 addresses operand a, AGU1 operand b,
AGU2 the result; the accumulator's initial value can be fetched through any of
them (`init_src`).

**Init and store levels.** The accumulator is (re)initialised at the first
iteration after all counters below `init_level` wrapped, and written back after an
iteration in which all counters below `store_level` wrap. A dot product of length
K over 32 outputs, for instance, is N_0 = K, N_1 = 32, init and store level 1.

**Decoupled streams.** The sequencer does not wait for data. Per iteration it
pushes read addresses into two read-address FIFOs (one per TCDM port, depth 5), a
store address into a store-address FIFO (depth 7), and a micro-instruction
(init / fetch-init / use-a / use-b / store) into the command FIFO (depth 5). Read
data fall into two data FIFOs (depth 5); the FPU consumes a micro-instruction
when its operands are there, and pushes results into the store-data FIFO. A read
is only issued if its data FIFO has room including reads in flight, so
back-pressure never loses data. The write-back interleaver puts a store on port 0
if port 0 has no read pending, else on port 1, ahead of reads. The sequencer
stalls when a FIFO it needs is full. A command ends when the last iteration is
issued and everything has drained; then the IRQ flag is set and a queued command
(see below) can start.

Measured: a 360-element MAC on a conflict-free memory takes 407 cycles including
start-up and drain; eight NTX running 288 MACs each in one cluster (16 ports on
32 banks with conflicts) finish in 393 cycles.

**Commands.** `ntx_pkg::ntx_op_e`:

| op | result |
|---|---|
| MAC | x += a·b (b may be constant 0/1), optional fused ReLU on store |
| VADDSUB | x = a ± b, two accumulator cycles per element |
| VMULT | x = a·b |
| OUTERP | x = a·b, a read once per L0 sweep |
| MAXMIN | running max/min of a; or its index (argmax/argmin) |
| THTST | x = (a cmp b) ? 1.0 : 0.0 |
| MASK | x = (a cmp b) ? a : 0 |
| MASKMAC | x += (a cmp init) ? b : 0 |
| COPY | x = a, or x = init value (memset) |

The comparator conditions are >, ≥, <, ≤, =, ≠. The bit layout of the command
word (`ntx_cmd_t`) is this design's own.

**The MAC unit.** The FP32 product is formed exactly (48-bit significand) and
added to a 300-bit two's-complement fixed-point accumulator (binary point 170 bits
from the bottom), so any sum of products within range is exact. The accumulator is
split into two 150-bit segments; the carry out of the low half is registered and
enters the high half one cycle later, so no 300-bit carry chain exists. Only when a
result is stored is the accumulator normalised and rounded once (round to nearest
even), in its own pipeline stage. Subnormals are flushed to zero, overflow gives
±infinity, NaN is not handled. Products smaller than 2^-170 are truncated.

## Offloading from the core

Each NTX has a 256-byte register window (`ntx_pkg`): status, IRQ, command, the
five loop counts, three base addresses and 15 step sizes. The configuration
registers are a *staging area*: they keep their values, so only fields that
change need rewriting. Writing the command register copies the staging area and
the command into a *shadow* register and starts the command; the core can
prepare the next command straight away. A command write that arrives while NTX is
busy is not granted until it finishes, so the core stalls instead of overwriting.
A write to the broadcast window reaches all eight NTX of the cluster at once
(common loop counts, command launch). IRQ: bit 0 is the flag (write 1 to clear),
bit 1 enables the `irq_o` output.

Cluster address map (own choice): TCDM at `0x1000_0000`, NTX i at
`0x1020_0000 + i·0x100`, broadcast at `0x1020_0800`, DMA at `0x1020_1000`, L2 at
`0x1C00_0000`; everything else leaves the cluster.

## Cluster

* **TCDM**: 128 KiB in 32 word-interleaved single-port banks of 4 KiB, with
  byte enables, one-cycle access.
* **Logarithmic interconnect**: 18 masters (core, DMA, 8 NTX × 2 ports) to 32
  banks, a round-robin arbiter per bank, response one cycle after grant.
* **DMA**: registers for external address, TCDM address, words per row, rows and
  a row stride on each side; writing START with a direction enqueues the
  transfer (queue depth 4). A read side keeps as many reads in flight as its
  8-word buffer can take, which hides external latency; a write side drains the
  buffer. Peak one word (4 B) per cycle: 256 words move in 261 cycles. STATUS
  counts completed transfers so the core can wait on a count.
* **Cluster bus**: decodes core accesses, does the broadcast, and shares the
  cluster's single SoC port between core and DMA (round robin).

## Processing system

`ntx_pim_top` has 64 clusters, a 128 KiB L2 and the SoC interconnect. Addresses
outside the L2 go to one of 8 master ports selected by address bits [7:5], i.e.
ports interleaved at 32 bytes, the HMC's minimum block size. The number of ports
is this design's choice. Core data ports, NTX IRQ and busy lines, DMA busy and the
master ports are top-level ports. Everything runs on one clock.

## Verification

Each module has a self-checking testbench in `tb/` that ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog. Reference values are
computed in the testbench: loop indices and affine addresses by nested loops, FP
results with `real` arithmetic and an exact-rounding model (`tb_fp_pkg`), memories
with shadow arrays. Random traffic uses `$urandom`. Rate checks: one MAC per cycle
per NTX (with start-up allowance), VADDSUB at half rate, DMA at one word per
cycle, eight NTX in a cluster within 1.5× of ideal.

`tb_mem_model` is a behavioural memory with random latency and stalls standing in
for the HMC vaults. `tb_core_tasks.svh` plays the RISC-V core (register writes,
loop setup, DMA posting) and `tb_cluster_job.svh` runs a complete job: core fills
external memory, 2D DMA in, broadcast configuration, per-NTX bases, broadcast
launch, IRQ wait, DMA out, result check.

* `tb_ntx_pim_top` runs that job on a 4-cluster instance and counts every
  mechanism (broadcast writes, queued DMA transfers, NTX interrupts, TCDM bank
  conflicts, grant stalls in the SoC interconnect, L2 accesses, all 8 master
  ports used, all NTX busy at once); one that never happens counts as a
  failure. The command write held back while an NTX is busy is exercised in
  `tb_ntx_regif`.
* `tb_ntx_pim_top_full` builds the top at its defaults (64 clusters, 512 NTX)
  and runs the job on four clusters spread over the array (clusters 0, 21,
  42, 63); it passes with the same cycle counts as the reduced test and takes
  under a minute of simulation once built.

Simulate with plain Verilator, for example:

```
verilator --binary --timing -Itb --top-module tb_ntx \
  rtl/ntx_pkg.sv tb/tb_fp_pkg.sv rtl/fifo_v.sv rtl/ntx_hwloops.sv rtl/ntx_agu.sv \
  rtl/ntx_fmac.sv rtl/ntx_fpu.sv rtl/ntx_regif.sv rtl/ntx.sv tb/tb_mem_model.sv tb/tb_ntx.sv
./obj_dir/Vtb_ntx
```

For the cluster and the top add `tcdm_bank`, `tcdm_interconnect`, `cluster_dma`,
`mem_arb`, `cluster_bus`, `ntx_cluster`, `l2_mem`, `soc_interconnect`,
`ntx_pim_top`. The full-size top (64 clusters) generates a large C++ model;
build it with `-j` (for example `verilator ... -j 0`), a single-threaded C++
build takes around half an hour. The 4-cluster end-to-end test builds in under
a minute and runs in seconds.

## Where this RTL departs from the published design

* One clock domain. The published system runs NTX at twice the cluster clock
  (1.5 GHz vs 750 MHz) and connects each NTX to the TCDM through its own
  ports; here NTX, TCDM and everything else share one clock, so NTX rates are
  per cluster cycle.
* The step-size formula above replaces the two-loop short form.
* The FIFO depths, the two TCDM ports and the five loops follow the published
  block diagram; the command encoding, register offsets, address maps, arbiters,
  queue and buffer depths, and the stall-on-busy rule are this design's own.
* The FP unit flushes subnormals and ignores NaN.
* Not included: the RISC-V cores with instruction caches, the MMU/TLB, the HMC
  main interconnect, vault controllers, DRAM and serial links. The DMA moves
  whole 32-bit words only.
