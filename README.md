# SpikON accelerator — SystemVerilog implementation

SpikON is an accelerator for *online supervised* training of spiking neural networks (SNNs):
it trains with batch size 1, one sample after another, and computes the gradients of each
timestep as soon as that timestep's forward pass is done. Two properties of SNN training are
behind its hardware:

* **Timesteps are largely independent.** With the spatial-only online learning rule used here,
  the backward pass has no gradient flowing from one timestep to the next, and in the forward
  pass only the membrane potential carries state. Because of this, the accelerator gives each
  timestep its own compute lane and runs all timesteps side by side. This is the
  *bi-directional temporal parallel* (BTP) dataflow.
* **Adjacent timesteps fire alike.** The spike vector `s_t` is usually close to `s_{t-1}`.
  Instead of computing `W·s_t` from scratch, a lane can compute `W·(s_t − s_{t-1})` and add the
  previous timestep's result. The difference vector has entries in {−1, 0, +1}, and most of
  them are 0. This is *cascade temporal computation reuse* (CTCR).

The training algorithm adds two cheap normalisation substitutes: a learnable firing threshold
per timestep (LTTT) and mean-centred weights with a learnable scale per timestep (sWCTT). In
hardware these are only data (a threshold vector per timestep, a scale per timestep) and
ordinary arithmetic for the SIMD core. No dedicated block is needed for them.

This repository holds synthesizable SystemVerilog for the whole accelerator as the SpikON
paper (Chen and Yang) describes it, with self-checking testbenches for every block. The paper
gives the block structure, the sizes and the principle of each unit. It does not give
encodings, handshakes or state machines. Those are this implementation's own, and the
departures section below lists them.

## Block structure

```
 spikon_top
 ├── top_controller        start/done sequencing of BTPE and SNN core
 ├── snn_core              5-stage SIMD core, 64 FP32 units
 │   ├── instr_sram        1024 x 32 bit program memory
 │   ├── simd_decoder      instruction decode
 │   ├── simd_regfile      32 x 512 bit registers
 │   ├── simd_controller   hazard / memory stalls
 │   └── simd_executor     64 x fp32_unit
 ├── btpe                  bi-temporal parallel engine
 │   ├── btpe_scheduler    job FSM: load, distribute, start, write back
 │   ├── btpe_local_buffer staging store for the shared B operand
 │   ├── data_rearranger   lane routing, lane-to-timestep map
 │   ├── btp_lane x 24     one timestep slice each
 │   │   ├── lane_buffer   input buffers A (2048 b) and B (512 b)
 │   │   ├── data_preprocessor   spikes → ternary operand codes (CTCR difference)
 │   │   ├── pu_array x 4  4x4 processing units (pu)
 │   │   ├── output_aggregator   16 FP32 adders, adds the previous timestep's result
 │   │   └── lane_controller
 │   └── local_sram x 23   256 KB, lane l → lane l+1
 ├── memory_controller     round-robin arbiter of the global SRAM
 └── global_sram           1 MB, 4096 words x 2048 bit
 (HBM: off chip, reached through the ext_* port of spikon_top)
```

All blocks compute in IEEE-754 single precision (FP32). The FP32 functions live in
`spikon_pkg` and are shared by the PUs, the aggregators and the SIMD units. They round to
nearest-even and flush subnormals to zero.

## The BTP engine: one vector-matrix job

The engine runs *jobs*. A job is a vector-matrix product whose outputs are spread over the
lanes. It is described by `btpe_job_t`:

| field | meaning |
|---|---|
| `b_base` | first of `data_volume` B words in the global SRAM; the low 512 bits are 16 FP32 values |
| `a_base` | lane *l* reads its `data_volume` A words from `a_base + l·data_volume` |
| `out_base` | lane *l* writes its 64 results (one 2048-bit word) to `out_base + l` |
| `data_volume` | operand pairs reduced by every PU (1 … buffer depth, 64 by default) |
| `timesteps` | T; lane *l* serves timestep *l mod T* |
| `nlanes` | lanes taking part (1 … 24) |
| `dense` | 1 = dense mode (FP32 × FP32), 0 = sparse mode (spikes) |
| `reuse` | CTCR on: a lane adds the result of the lane before it |

**Output mapping inside a lane.** A lane has 64 PUs in four 4×4 arrays. PU *k* = 16·array +
4·row + col owns output *k*, because the dataflow is output-stationary. At step *i* of the
reduction, PU *k* takes its A operand from element *k* of A word *i* and its B operand from
element 4·array + row of B word *i*. All PUs of one row therefore share a B value. A
convolution maps onto this by putting 4 output channels × 4 pixels on each array. An FC layer
uses the same mapping with the B values as the weights of 16 output rows.

**A-word formats.**
* Dense: 64 FP32 values, one per PU.
* Sparse: bit *k* is the spike `s_t[k]` for PU *k*, and bit 64+*k* is `s_{t-1}[k]`.
  The data pre-processor turns these into 2-bit codes: `01` = +1, `10` = −1, `00` = 0.
  Without reuse the code is just `s_t`. With reuse it is `s_t − s_{t-1}`.

**Processing unit.** In sparse mode the PU adds 0, +b or −b, chosen by the code. It never
multiplies. In dense mode it adds the FP32 product a·b. A counting register tracks the pairs,
and `done` rises when the count reaches `data_volume`.

**Job sequence** (`btpe_scheduler`):

1. `LOAD_B`: fetch the B words into the local buffer.
2. `LOAD_A`: for each lane, fetch its A words. Each A word goes to that lane's buffer A, and
   the matching B word goes from the local buffer into the lane's buffer B.
3. `RUN`: start all active lanes in the same cycle.
4. `WAIT`: wait until every active lane is done.
5. `WB`: write each lane's result word to the global SRAM.

Every global-SRAM access goes through the memory controller, so the scheduler holds each
request until it is granted.

**Lane timing** (`lane_controller`). For `data_volume` = *n*, a lane job takes the following
cycles from the edge that samples `start`:

* 2 cycles to clear the PUs and start;
* *n* cycles to issue the *n* pairs (one per cycle);
* 2 cycles for the last sum to settle;
* 1 cycle to wait for the previous lane, with reuse only, and longer if that lane is not done;
* 4 cycles of drain through the aggregator, 16 results per cycle;
* 1 cycle to finish.

Without reuse, `done` is visible *n*+10 clock periods after `start` is driven.

### Reuse across timesteps (CTCR)

Lane *l* owns local SRAM *l*, and the aggregator writes the lane's four result beats there.
Lane *l*+1 reads them back as `y_{t-1}` and adds them to its own partial sums:

```
y_t = y_{t-1} + W·(s_t − s_{t-1})
```

With T timesteps the lanes form groups: T = 6 gives lanes 0–5, 6–11, 12–17 and 18–23, each
group covering timesteps 0–5 for its own slice of outputs. The first lane of each group has
no predecessor in time, so it computes `W·s_0` directly; `data_rearranger` switches reuse off
for it. The other lanes finish their reductions in parallel. Their aggregators then run one
after another along the group, because each waits for the previous lane's `done`. This is
the cascade, and it costs 5 cycles per lane on top of the parallel reduction. The last lane
has no local SRAM, since no lane follows it.

The host writes A words so that the spike difference is the right one. The word for lane *l*
carries `s_t` in bits 0–63 and `s_{t-1}` in bits 64–127.

## The SNN core

The core does everything that is not a vector-matrix product: the LIF neuron update, the
surrogate gradient, pooling and softmax arithmetic, and the parameter updates. It has five
pipeline stages: fetch (PC register and instruction SRAM), decode with register read,
execute (64 FP32 units), access (global SRAM through the memory controller) and write.

A vector is 64 FP32 values (2048 bits). The register file has 32 registers of 512 bits, so a
vector takes four consecutive registers: register index *r* names group *r*[4:2]. There are
eight vector registers in effect.

| opcode | mnemonic | operation (element-wise) |
|---|---|---|
| 1 | `add rd, rs1, rs2` | rd = rs1 + rs2 |
| 2 | `sub` | rd = rs1 − rs2 |
| 3 | `mul` | rd = rs1 · rs2 |
| 4 | `div` | rd = rs1 / rs2 |
| 5 | `sqrt rd, rs1` | rd = √rs1 |
| 6 / 7 | `max` / `min` | |
| 8 | `lif rd, v, x` | rd = β·v + x (charging; β is the `beta` input) |
| 9 | `fire rd, u, θ` | rd = 1.0 if u ≥ θ else 0.0 |
| 10 | `reset rd, u, θ` | rd = u − θ if u ≥ θ else u |
| 11 | `sg rd, u, θ` | rd = max(0, 1 − \|u − θ\|) (triangle surrogate) |
| 12 | `rsum rd, rs1` | every element of rd = sum of the 64 elements of rs1 |
| 13 | `rmax rd, rs1` | every element of rd = largest element of rs1 |
| 16 | `ld rd, addr` | rd = global[addr] |
| 17 | `st rs, addr` | global[addr] = rs |
| 63 | `halt` | end of program |

The formats are:

* ALU: `[31:26]` opcode, `[25:21]` rd, `[20:16]` rs1, `[15:11]` rs2.
* Loads: the register in `[25:21]` and the address in `[11:0]`.
* Stores: the register in `[25:21]` and the address in `[11:0]`, the same fields as loads.

Programs are straight-line code: there are no branches. `start` runs the program from
address 0 until `halt` leaves the pipeline.

`rsum` and `rmax` are the vector-wise operations. They reduce across the 64 elements
through a balanced tree that adds adjacent pairs first: elements 2j and 2j+1, then those
sums pairwise, and so on. An FP32 sum depends on its order, and this one is fixed. A
reduction gives the total for global average pooling, the maximum and the denominator for
softmax, and the mean a weight tile needs for weight centralization.

The per-timestep threshold of LTTT is simply a different θ vector for each timestep.
Applying a learning-rate update, θ ← θ − η∇θ or w ← w − η∇w, takes a `mul` and a `sub`.

**Stalls.** The core has no forwarding. A decoded instruction whose source group will be
written by an instruction still in execute, access or write-back waits. Fetch and decode
hold, and a bubble goes into execute. A load or store that the memory controller has not yet
granted freezes the first four stages. Load data must arrive in the cycle after the grant,
and the memory controller guarantees this; an assertion in `snn_core` checks it.

## Top level

`top_controller` runs `n_steps` steps. Each step starts the BTPE job and then the core
program. In sequential mode the core starts when the BTPE is done. In concurrent mode both
start together, and the memory controller grants the global SRAM round-robin between the
core, the BTPE and the external port. `done` rises after the last step.

To use the accelerator:

1. Load the core program through `imem_*`.
2. Write operands into the global SRAM through `ext_req`. Hold `valid` until `ext_gnt`; read
   data comes on `ext_rdata` with `ext_rvalid` one cycle after the grant.
3. Set `btpe_job`, `n_steps`, `concurrent` and `beta`.
4. Pulse `start`.

The HBM is not modelled. A host or a DMA engine on the `ext_*` port stands in for it.

## Sizes

| parameter | value | from |
|---|---|---|
| lanes | 24 | paper |
| PUs per lane | 4 arrays × 4×4 = 64 | paper |
| lane input widths | A 2048 b, B 512 b, aggregator 512 b | paper (figure) |
| local SRAMs | 23 × 256 KB (4096 × 512 b) | paper (size); word width chosen |
| global SRAM | 1 MB (4096 × 2048 b) | paper (size); word width chosen |
| instruction SRAM | 1024 × 32 b | paper |
| register file | 32 × 512 b | paper |
| SIMD FP32 units | 64 | paper |
| lane buffer depth (max `data_volume`) | 64 | chosen; not published |
| BTPE local buffer | 64 × 512 b | chosen; not published |

Everything is at the published size. Nothing was scaled down.

## What follows the paper and what does not

Taken from the paper:

* the five top-level parts and their roles;
* the BTPE with 24 lanes, 23 local SRAMs, a local buffer, a scheduler and a data rearranger;
* the lane built from two input buffers, a pre-processor, four 4×4 PU arrays, an output
  aggregator and a local controller;
* the PU's two modes, with the sparse multiplexer over 0/+b/−b, the counting register and
  the data-volume `done`;
* reuse through the previous timestep's outputs;
* the lane grouping when T < 24 (for T = 6, lanes 0, 6, 12 and 18 serve timestep 0);
* the five-stage SIMD core with the sizes above and the `lif`, `reset` and `sg` operations.

This implementation's own choices:

* all encodings: spike codes, A-word packing, the ISA, the job descriptor;
* every handshake and state machine;
* buffer depths and memory word widths;
* the triangle surrogate's half-width of 1;
* the `fire` instruction;
* grouping four registers into one 64-wide vector;
* the `rsum`/`rmax` reductions and their summation order;
* round-robin arbitration and the third (external) port;
* the concurrent mode of the top controller;
* flushing FP32 subnormals to zero.

Not provided:

* **Off-chip HBM** and any DMA engine for it.
* **Exponential.** Softmax needs `exp`, which is not among the operations the FP32 unit is
  described with. It has to be done by the host or approximated with a polynomial in `mul`
  and `add` steps.
* **Branches** in the core ISA.
* **Reductions longer than one lane job.** A 3×3×512 convolution has 4608 pairs per output,
  so it is split into 64-pair jobs whose partial sums the core adds.

### Workload fit

The evaluated network is VGG11 with 9.23 M parameters, trained with T = 6, 10 or 20 on
CIFAR-10/100, DVS-CIFAR10 and DVS128-Gesture. Every T is at most 24, so each timestep always
gets its own lanes. The parameters take 36.9 MB in FP32, far more than the on-chip memory
(1 MB global + 5.9 MB local). The network therefore has to be run layer by layer and tile by
tile, with weights and activations streamed through the external port. The RTL leaves that
streaming to the host.

## Simulating

Each block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. `tb/tb_fp_pkg.sv` holds
the reference FP32 rounding used by the checks: doubles rounded to single precision in the
testbench, independent of the RTL's functions. To run one, for example the lane testbench:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/spikon_pkg.sv tb/tb_fp_pkg.sv \
          tb/tb_btp_lane.sv --top-module tb_btp_lane -o sim && ./obj_dir/sim
```

`tb_spikon_top` runs the whole accelerator at its default size:

* a sparse job with reuse (T = 6) followed by a LIF step on the core;
* a dense job running concurrently with the core, for two steps.

It checks all 1536 BTPE outputs of each job and the core's spikes and potentials. It also
counts the mechanisms it sees (negative reuse terms, reuse lanes, grouped lanes, arbitration
conflicts, hazard and memory stalls) and fails if any of them never happened. Building it
takes about 7 minutes with verilator; the run itself takes under a second. `tb_btpe` covers
the engine at 6 lanes for quicker turnaround.
