# M100-style orchestrated dataflow NPU in SystemVerilog

This NPU runs neural networks without a global instruction schedule at run
time. Software works out in advance which unit produces each tile of data, which
unit consumes it and where it is stored. At run time every unit keeps only a few
counters, and no central scheduler is needed.

The design has one Central Control Block (CCB) and 14 clusters of four Tensor
Processing Blocks (TPBs), 56 TPBs in all. Two buses connect them:

* **Instruction Chain Bus (ICB).** The CCB sends TPB instructions down it.
* **Data Ring Bus (DRB).** The CCB broadcasts data to many TPBs at once on it.

Inside a TPB, the compute and data-movement units all work out of one banked
2 MB memory. Each unit waits on synchronization counters before it starts, and
bumps one when its last result is written. Ordering comes from these counters,
not from instruction order. This is why instructions can run out of order
across units while staying in order within a unit.

This repository gives RTL for the NPU: the TPB, the cluster, the CCB and the
top level. The processors and interconnect IP around it are left as ports
(see "Differences from the architecture as published").

## Data and instructions

Every memory port uses one request/response pair (`mreq_t` / `mrsp_t` in
`rtl/m100_pkg.sv`), 32 bytes wide:

* A request is held until `gnt`.
* Read data returns on `rvalid` in request order.
* A request can also ask the memory to increment a synchronization counter at
  the moment it wins arbitration (`sc_upd`, `sc_id`).

A TPB instruction (`tpb_inst_t`, 505 bits) holds:

* the target functional unit and opcode;
* an optional **monitor**: wait until counter `wait_sc` is at least `wait_val`;
* an optional **update**: increment counter `upd_sc` when finished;
* three tensor-walker configurations: inputs A and B, output O;
* a 32-bit immediate, holding shift, ReLU flag and fill value.

Tensor walkers describe an address sequence as up to three nested loops. Each
loop has Initial, Step and Final values, and the address is the sum of the
current loop values.

### The Instruction Chain Bus (`icb_master`, `icb_node`)

The ICB is 64 bits wide. An instruction takes nine beats:

* one header beat with the 56-bit TPB destination mask;
* eight beats of instruction.

How the CCB side works:

* Each of the four CCB custom engines hands a whole instruction plus mask to
  `icb_master`.
* `icb_master` picks between the engines round-robin and sends one complete
  instruction at a time.

How each cluster's `icb_node` handles it:

* It captures the header and assembles the beats.
* It pushes the instruction into its cluster's queue if any of its four mask
  bits is set.
* It forwards every beat down the chain.

Forwarding stops, and back-pressure runs up the chain, when a queue is full.
One instruction with several mask bits set reaches several TPBs (multicast).

### The cluster instruction queue (`ciq`)

The queue holds up to 16 instructions, each tagged with the TPBs it is for.
Each cycle, each TPB gets the oldest instruction for it whose functional unit
is ready. No older instruction may be waiting for that same unit in that same
TPB.

So a CVU instruction can overtake a TCU instruction that is stuck behind a busy
TCU. Two TCU instructions for the same TPB never swap.

An entry leaves the queue when every TPB named in it has taken it.

### The Data Ring Bus (`drb_node`, `drb_terminal`)

A ring flit carries:

* one 32-byte word;
* a 16-bit HBSM word address;
* a 56-bit destination mask;
* an optional counter increment.

Alternatively, a flit can be a counter increment alone (`sync_only`).

How a flit moves round the ring:

* Each cluster node hands the flit to those of its TPBs whose bits are set. It
  waits until all of them accept.
* It then forwards the flit with its own bits cleared.
* A flit with no bits left is dropped.

In each TPB, `drb_terminal` turns the flit into an HBSM write. The counter
increment is attached to the last word of a transfer. So the consumer's counter
moves in the same cycle the HBSM accepts that word.

## Inside a TPB

`tpb` connects these blocks:

| Block | Role |
|---|---|
| `hbsm` | High Bandwidth Shared Memory: 2 MB, 32 banks of 32 bytes, 32-byte interleave, 8 requester ports. Each bank has its own round-robin arbiter. Data returns 20 cycles after grant. |
| `sync_unit` | 32 counters of 16 bits. Update inputs come from HBSM grants, the CSU and the ring. Monitor ports serve the TCU, CVU, DTDU and CSU. A monitor is answered only when counter >= expected value. |
| `twu` | Tensor walker, one per stream. |
| `tcu` | Tensor Computing Unit. |
| `cvu` | Configurable Vector Unit: 16 lanes of int16. Element-wise add and multiply (with shift), reduction max and sum, saturating. |
| `dtdu` | Copy, fill, and 32x32-byte transpose within the HBSM. |
| `csu` | CPU Starter Unit. |
| `custom_engine` | Lets the cluster CPU read and write HBSM words and CSU registers. |
| `drb_terminal` | Ring to HBSM, as above. |

HBSM port use:

| Port | User |
|---|---|
| 0 | TCU reads |
| 1 | TCU writes |
| 2 | CVU operand A |
| 3 | CVU operand B |
| 4 | CVU writes |
| 5 | DTDU reads |
| 6 | DTDU writes |
| 7 | Custom engine and ring terminal (ring first) |

Each unit follows the same steps:

1. Accept an instruction.
2. If `wait_en` is set, issue its monitor request and wait.
3. Stream reads along walkers A and B through `rd_stream`. It keeps up to 32
   reads in flight, which covers the 20-cycle latency.
4. Compute.
5. Stream writes along walker O through `wr_stream`. That block attaches the
   instruction's counter update to the last write.

As a result, a later unit that monitors the counter sees every result in
memory.

Units run concurrently, so two units that hit the same bank in one cycle wait
for the arbiter. The testbenches count these conflicts.

### The Tensor Computing Unit

The TCU is an 8x64 array of multiply-accumulate cells. Every cycle, each cell
forms a 4-element int8 dot product and adds it to an int32 accumulator.

One instruction computes C = A x W for one tile:

* A is 32x32, W is 32x64, C is 32x64.
* The work takes 32 MAC cycles. Each cycle consumes one 32-byte A word and two
  32-byte W words.

The sequence has three phases:

1. Load the W tile (64 words) into a weight buffer.
2. Stream A. Each A word feeds eight rows x four k-values. Output row block m
   and k block k are chosen by the word index.
3. Write C as int8, after an arithmetic right shift by `imm[4:0]`, optional
   ReLU (`imm[8]`) and saturation.

The layouts in HBSM are this design's own:

* The A word with index 4k+m holds `A[8m+r][4k+e]` at byte 4r+e.
* The W word with index 2k+h holds `W[k][32h+j]` at byte j.
* The C word with index 2i+h holds `C[i][32h+j]` at byte j.

### CPU assistance: CSU and custom engine

A CSU instruction goes through these steps:

1. The CSU waits on its monitor.
2. It raises an interrupt to the cluster CPU.
3. The cluster's `cvm` picks one interrupting TPB round-robin. It reports that
   TPB's index and routes the CPU's accesses to it.
4. The CPU reads the parameters from CSU registers:
   * 0 = opcode and immediate;
   * 1 = status;
   * 2 to 4 = walker configurations.
5. The CPU works on HBSM through the custom engine.
6. The CPU writes register 0. The CSU then drops the interrupt, applies the
   counter update and takes its next instruction.

## The Central Control Block

`ccb` contains these blocks:

| Block | Role |
|---|---|
| `icb_master` | Instruction port for the four engines. |
| `ccb_sram` | 32 MB in four 8 MB banks with 4 KB interleave. Three ports: DMA 0, DMA 1 and external (host side), with per-bank arbitration. |
| `ccb_dma` (two) | Copy DDR to SRAM, SRAM to DDR, or SRAM to SRAM. They can also read DDR or SRAM and broadcast onto the ring with a destination mask and a counter update on the last flit. |
| `barrier_unit` | An engine names a group of TPBs. The barrier completes when every one of them is idle: no busy unit, nothing queued for it, and nothing in flight on the ICB. |
| `irq_gen` | Status bits are set by barrier completion (bits 0-3) and DMA completion (bits 4-5), and cleared by writing 1. Two enable masks drive the host and CCB interrupt lines. |

## Top level (`npu_top`)

The CCB feeds `tpb_cluster` 0 to 13 in a chain for instructions and a ring for
data.

These connections are ports of the top level:

* the engine instruction, barrier and DMA-descriptor ports (the CCB CPUs);
* two word-wide DDR master ports;
* an external SRAM port;
* the interrupt control registers;
* two interrupt lines;
* one CPU interface and interrupt per cluster.

The defaults are the full-size machine. It holds 56 x 8 x 64 x 4 = 458,752
int8 MACs and 56 x 2 MB + 32 MB = 144 MB of on-chip memory.

## How far it can be trusted

Each block has a self-checking testbench in `tb/` that drives random traffic.
The testbenches use `tb_mem` as a random-latency memory model where a block
needs one. Every testbench ends with
`TB_RESULT checks=<n> failures=<m>`.

Each testbench has also been run against a copy of its block with one
deliberate bug, and it reported failures each time. Example bugs:

* the monitor uses > instead of >=;
* the HBSM latency is one cycle short;
* the weight ReLU is always on;
* the ICB `last` flag is one beat early.

`npu_top_tb` runs a complete program on a 2-cluster NPU. It uses the full
20-cycle HBSM latency, with 256-word HBSM banks and 1024-word SRAM banks to keep
simulation fast. The program:

1. DMA from DDR into CCB SRAM.
2. Ring multicast of that data into four TPBs in both clusters, with a counter
   update.
3. A TCU tile on each target (ICB multicast) that waits on the ring counter.
4. A CVU add and a DTDU copy on TPB 0, where the copy overtakes in the queue.
5. A CSU instruction served by a model of the cluster CPU.
6. A barrier over all targets.
7. The host interrupt is checked and cleared.

The testbench counts each mechanism, and fails if one never happened:

* ring multicast deliveries;
* ICB multicast;
* queue stalls and overtakes;
* CSU interrupts;
* barrier completion;
* host interrupt;
* HBSM bank conflicts.

All results are compared with a reference computed in the testbench.

`npu_top_run #(.FULL(1))` builds the same program around `npu_top` with no
parameter overrides: 14 clusters, 2 MB per TPB and 32 MB of SRAM. Its target
TPBs are 0, 1, 5 and 55. See the status at the end of this file.

## Differences from the architecture as published

Built smaller or simpler:

* **TCU.** There is no weight double buffering. The weight load (64 cycles) is
  not overlapped with the 32 MAC cycles, so peak rate is about a third of the
  ideal. The array runs on int8 only, with no int4/int16/fp formats. The
  nonlinear activation pipeline is only ReLU. Outer-loop tiling is done by
  issuing one instruction per tile.
* **CVU.** It has four fixed operators, one per instruction. Operators cannot
  be chained into a custom pipeline. There is no spline, exponential,
  reciprocal or square-root unit, so softmax, layer norm and RMS norm cannot
  run.
* **DTDU.** It transposes in 32x32-byte blocks only. It does not broadcast to
  other TPBs; the CCB DMAs do.
* **ICB instructions** are 505 bits (9 beats). The published instructions are
  far longer.
* **Memory latency.** The HBSM latency is fixed at 20 cycles, where the source
  says "about 20". CCB SRAM latency is 1 cycle.
* **Sizes not given in the source.** Counter count and width, queue depth,
  number of DMAs, the ring and ICB flit formats, and the CPU register map are
  all this design's own choices.
* **Ring ordering.** The ring order is CCB, cluster 0 to 13, then back to the
  CCB. Only the CCB injects flits.

Not built:

* the RISC-V CPUs (CCB and cluster);
* the 2-D mesh bus;
* the cluster and CCB network-on-chip;
* the gather/scatter DMA unit, which would need the mesh;
* the SoC around the NPU: application CPUs, LPDDR5X, video and image units.

The DDR side is a simple word-wide port instead of AXI.

## Can it run the published workloads?

* **LLaMA2-7B decode (4-bit weights, 16-bit activations).** No.
  * The weights (3.4 GB) are far beyond the 144 MB on chip, so they stream from
    DDR at no more than 64 bytes per cycle over the two DMA ports.
  * The TCU does not take 4-bit or 16-bit operands.
* **LLaMA2-7B prefill (8-bit, 1024 tokens).**
  * The matrix multiplications fit the TCU: about 6.9e12 MACs, roughly 6e7
    cycles at peak.
  * Softmax and normalisation need CVU functions that are not built.
* **MindVLA language model (431M parameters, mixture of 8 experts).**
  * The 431 MB of int8 weights exceed the on-chip memory.
  * Expert routing and softmax are not built.
* **UniAD** (driving perception and planning).
  * Its convolutions and matrix products map onto the TCU.
  * Its transformer parts need softmax.

## Simulating

Plain Verilator 5 is enough. List the packages first, then the rest of the
files:

```
verilator --binary --timing -Wno-fatal --top-module npu_top_tb \
  rtl/m100_pkg.sv tb/tb_util_pkg.sv tb/tpb_common_pkg.sv \
  $(ls rtl/*.sv | grep -v m100_pkg) $(ls tb/*.sv | grep -v _pkg)
./obj_dir/Vnpu_top_tb
```

For a single block, use `<block>_tb` as the top module with the same file list.
The run should end in `TB_RESULT ... failures=0`.

Useful parameters:

* `npu_top`: `N_CL`, `BANK_WORDS` and `SRAM_BANK_WORDS` shrink the machine for
  quick runs.
* `RD_LAT`: the HBSM latency.
* `tcu`: `ROWS`/`COLS`/`DOT`.

Lint notes that remain are explained in each module's opening comment:

* unused instruction fields in units that read only their own fields;
* the reset used both for flops and for assertion disabling.

## Full-size simulation status

The full-size configuration has not been simulated. Verilator's C++ build of
the 56-TPB model, with 112 MB of HBSM arrays and 32 MB of SRAM, ran for more
than ten minutes without finishing. The largest configuration simulated end to
end is `npu_top_tb`:

* 2 clusters (8 TPBs);
* 256-word (8 KB) HBSM banks, so 256 KB per TPB;
* 1024-word SRAM banks (128 KB in total);
* the full 20-cycle HBSM latency.

The unit testbenches use the full sizes:

* `tpb_tb` and `hbsm_tb` use a full 2 MB HBSM.
* `ccb_sram_tb` uses the full 32 MB SRAM.

To try the full size, make a testbench that instantiates
`npu_top_run #(.FULL(1))`.
