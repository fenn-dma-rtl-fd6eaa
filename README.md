# FeNN-DMA: a RISC-V vector co-processor with DMA for spiking neural networks

Spiking neural networks (SNNs) spend most of their time doing two things:
updating the state of many small, identical neurons, and, whenever a
neuron spikes, adding one row of synaptic weights to the inputs of its
targets. Both are wide, regular, low-precision operations. FeNN-DMA puts a
small RISC-V host core next to a 32-lane, 16-bit fixed-point vector unit and
gives that vector unit two kinds of on-chip memory and a DMA engine:

* a wide **vector memory** (512 KB, one 512-bit row per cycle) that holds
  neuron state and the weight rows currently being processed;
* 32 **lane-local memories** (1024 x 16 bit each) in which every lane has its
  own address, so sparse and delayed connectivity become gather/scatter
  operations instead of serialised loops;
* a **DMA engine** that streams weight rows from DDR into the vector memory
  (and results back out) while the vector unit is computing, so networks
  far larger than the on-chip memory can be simulated. At one 64-byte beat
  per cycle, the next weight row arrives while the current one is being
  added.

This repository contains synthesizable SystemVerilog for the
programmable-logic part of one FeNN-DMA core: the vector co-processor, its
memories, the scalar core's instruction and data memories, and the DMA
controller and arbiter. The scalar RISC-V core, the AXI DataMover, the
on-chip interconnect, the ARM processing system and DDR are existing
components that this RTL does not contain; they meet the top module at its
ports.

## Block diagram

```
                 host RISC-V core (external)
     issue/commit/result   |  fetch   | load/store |  CSR 0x800-0x807
            |              |          |            |
  +---------v------+   +---v----+ +---v----+  +----v-------------+   AXI4-Lite
  |    vec_core    |   | instr  | | scalar |  |  dma_controller  |<-- from the PS
  | decode/ex/wb   |   | BRAM   | | data   |  |  regs + 2 FSMs   |
  +--+----------+--+   +---^----+ +---^----+  +--+---------+-----+
     | port a   | lanes    |  PS port  |         | cmd/sts | start/done
  +--v----------+--+  +----v---+      ...        |         |
  | vector_memory  |  | lane-  |                 |   +-----v------+
  | 8 x 64-bit     |  | local  |                 |   | dma_arbiter|
  | banks, 8192    |  | x 32   |    port b <-----+---+ round robin|
  | rows           |<-+--------+-------------------->+  MM2S/S2MM |
  +----------------+                             |   +-----^------+
                                                 v         | 512-bit streams
                                         AXI DataMover (external) <-> DDR
```

`fenn_dma_soc` is the top. All blocks run on one clock.

## The vector instruction set

Vector instructions use the RISC-V 32-bit encoding quadrant whose two low
bits are `10` (the host core is built without compressed instructions, so
the quadrant is free). The host fetches them, sends them with the values of
its scalar `rs1`/`rs2` registers to the vector unit, and receives scalar
results back. Fields follow the usual R/I/S layout; bits [6:2] are a major
opcode.

| instr[6:2] | funct3 | Instruction | Operation per lane *i* |
|---|---|---|---|
| 0 | 0 / 1 | VADD / VSUB | `rd = rs1 ± rs2`, saturating if funct7[6] |
| 0 | 2 | VAND | `rd = rs1 & rs2` |
| 0 | 3 / 4 | VSL / VSR | shift by `rs2[i][3:0]` (right shift arithmetic) |
| 0 | 5 | VMUL | `rd = (rs1*rs2 + c) >>> funct7[3:0]`, rounding funct7[5:4] |
| 1 | 0-3 | VTEQ/VTNE/VTLT/VTGE | scalar `rd` bit *i* = compare(rs1, rs2) (signed) |
| 2 | 0 | VSEL | `rd = x[rs1] bit i ? rs2 : rd` |
| 3 | 0 / 1 | VSLI / VSRI | shift by imm[3:0]; VSRI rounds per imm[5:4] |
| 4 | – | VLUI | `rd = instr[31:16]` in every lane |
| 5 | – | VRNG | `rd = random >> 1` |
| 6 | – | VANDADD | `rd = (rs1 & (2^funct7[3:0] - 1)) + x[rs2]` |
| 7 | 0 | VLOAD.V | `rd = vmem[(x[rs1]+imm) >> 6]` |
| 7 | 1 | VLOAD.L | `rd[i] = llm_i[(rs1[i]+imm) >> 1]` (gather) |
| 7 | 2 / 3 | VLOAD.R0 / R1 | seed register 0 / 1 = vmem row |
| 8 | 0 | VSTORE.V | `vmem[(x[rs1]+imm) >> 6] = rs2` |
| 8 | 1 | VSTORE.L | `llm_i[(rs1[i]+imm) >> 1] = rs2[i]` (scatter) |
| 9 | – | VEXTRACT | scalar `rd = sign-extend(rs1[lane rs2-field])` |
| 10 | – | VFILL | `rd = x[rs1][15:0]` in every lane |

`x[...]` is a scalar register value from the host. Vector-memory addresses
are byte addresses of 64-byte rows; lane-local addresses are byte addresses
of 16-bit words. Rounding mode codes are 0 = toward zero (truncate),
1 = nearest (add half an output LSB), 2 = stochastic (add a uniformly
random fraction).

Which field holds the shift of VMUL/VANDADD, the saturation bit and the
VSLI/VSRI shift and rounding fields follows the published description; the
major opcode and funct3 numbers, the VMUL rounding field, the VLUI and
VEXTRACT fields and the rounding codes are this design's own and are
defined in one place, `rtl/fenn_pkg.sv`, together with builder functions
(`enc_r`, `enc_i`, `enc_s`, `enc_lui`).

## The vector pipeline (`vec_core`)

Three stages: **decode** (register read, RNG, bypass), **execute** (ALU,
memory access) and **writeback**.

*Bypassing.* The register file (`vec_regfile`, 32 x 512 bits, 2 read + 1
write port, asynchronous read) is read in decode. Two multiplexers per
operand replace the register value by the ALU output of the instruction in
execute, or by the value waiting in writeback. Dependent arithmetic
therefore issues back to back.

*Load-use hold.* Both memories have one cycle of read latency, so a load's
data only exists in writeback. An instruction that needs it in the very next
slot is held in decode for one cycle (`issue_ready` low). Kernels that
double-buffer (load the next row while adding the current one) never hit
this and run one instruction per cycle; the unit testbench checks both cases
cycle-exactly.

*Commit and kill.* The host core executes speculatively. An instruction
waits in execute until the host's commit for its id arrives. A killed
instruction leaves as a bubble: it writes no register, no memory, and its
ALU result is not forwarded. It does, however, advance the random number
generator (see below), because the generator advances when an instruction
is accepted.

*Scalar results.* VTxx (one bit per lane, forming a 32-bit spike mask) and
VEXTRACT return a 32-bit value to the host through the result interface in
writeback.

*Random numbers.* Each lane runs one xoroshiro32++ step (`xoroshiro32pp`,
constants 13, 5, 10, 9) over lane *i* of the two seed registers. The seeds
are loaded with VLOAD.R0/R1 and advance each time an instruction that uses
randomness is accepted: VRNG, and VMUL or VSRI with stochastic rounding.
After reset lane *i* holds seeds (*i*+1, 0x9E37).

*Multiplier.* `vmul_lane` is a DSP-style multiply-add followed by an
arithmetic barrel shift: `(a*b + c) >>> shift`, result = low 16 bits. The
addend `c` is 0, `1 << (shift-1)` or `rnd & ((1 << shift) - 1)` for the
three rounding modes. VSRI uses the same unit with `b = 1`. Stochastic
rounding is what lets LIF decay factors close to 1 work in 16-bit fixed
point without bias.

### Host interface timing

Signals are sampled at the rising edge.

* `issue_valid && issue_ready` transfers one instruction (word, `rs1` and
  `rs2` values, 4-bit id). In the same cycle `issue_accept` says whether it
  is a vector instruction and `issue_writeback` whether it returns a scalar.
* `commit_valid` with `commit_id`/`commit_kill` may come in the cycle the
  instruction is in execute or later. Commits arrive in issue order.
* `result_valid`/`result_id`/`result_rd`/`result_data` is valid for one cycle
  and cannot be back-pressured.

## Memories

| Block | Organisation | Ports | Latency |
|---|---|---|---|
| `vector_memory` | 8 banks x 64 bit x 8192 rows = 512 KB; each bank two 4096 x 72 UltraRAMs deep | a: vector core (whole row); b: DMA (per-bank write enables) | 1 cycle |
| `lane_local_memory` | 32 x 1024 x 16 bit (one 18 Kb block RAM per lane) | one port, independent address per lane | 1 cycle |
| `scalar_bram` (x2) | 8192 x 32 bit, byte enables (instruction and scalar data) | a: host core; b: processing system | 1 cycle |

Sparse connectivity is stored as rows of (target index, weight) words: lane
*i* handles all targets whose index mod 32 is *i*, and accumulates into its
lane-local memory with VLOAD.L/VADD/VSTORE.L. Delays use one ring buffer
per neuron in lane-local memory: VANDADD computes `(delay + t) mod N_D` plus
the buffer base in one instruction.

Neither the vector memory nor the lane-local memories arbitrate a write
from both ports to the same row in one cycle; software owns that.

## DMA engine

Software (the host core through CSRs 0x800-0x807, or the processing system
through an AXI4-Lite slave at byte offset 4 x index) writes a transfer
description and starts it:

| Index | Register | Meaning |
|---|---|---|
| 0 | MM2S_SRC | DDR byte address (MM2S: DDR -> vector memory) |
| 1 | MM2S_DST | vector-memory byte address (64-byte aligned) |
| 2 | MM2S_LEN | bytes, a multiple of 64 |
| 3 | S2MM_SRC | vector-memory byte address (S2MM: vector memory -> DDR) |
| 4 | S2MM_DST | DDR byte address |
| 5 | S2MM_LEN | bytes |
| 6 | CTRL | write 1 to bit 0 / bit 1 to start MM2S / S2MM |
| 7 | STATUS | bits 0-1 busy, 2-3 done, 4-5 error (MM2S, S2MM) |

`dma_controller` turns a start into one 72-bit DataMover command (BTT in
[22:0], INCR type bit 23, EOF bit 30, address in [63:32], a 4-bit tag in
[67:64]) and starts `dma_arbiter` with the first row and the number of
64-byte beats. The direction is done when both the DataMover's 8-bit status
(OKAY = bit 7, otherwise the error bit is set) and the arbiter's completion
have arrived. Done and error clear when the direction is started again; a
start while busy is ignored. A CSR write wins over a simultaneous AXI4-Lite
write.

`dma_arbiter` owns port b of the vector memory. Each 512-bit MM2S beat is
written to the next row, split over the 8 banks; S2MM reads consecutive rows
into a 2-entry output buffer (covering the 1-cycle read latency, so the
output stream may stall at any time) and marks the last beat with `tlast`.
Both directions may run at once; when both want the port in the same cycle
the grant alternates beat by beat, and the cycle is reported on
`ev_dma_conflict`. Without a conflict each direction moves one beat (64
bytes) per cycle.

## Trusting and departing from the published design

Follows the published design: 32 lanes of 16-bit signed fixed point, 32 x
512-bit register file, three-stage pipeline with forwarding to decode, the
instruction set (including indexed lane-local loads/stores, VANDADD,
VEXTRACT, VFILL, VLUI, VRNG, VSEL, VTxx), the multiplier with three
rounding modes, xoroshiro32++ per lane with seed registers, 8-bank 512 KB
URAM vector memory with a second port for the DMA, one 1024 x 16 BRAM per
lane, separate 32-bit instruction and data BRAMs reachable by the processing
system, a DMA controller driving a DataMover with registers visible both as
CSRs and over AXI4-Lite, and an arbiter spreading the 512-bit streams across
the banks.

This design's own choices, where the published description is silent:
the bit encoding (see above); the issue/commit/result signal set (a reduced
eXtension-interface style); stalling rather than returning stale data on a
load-use hazard; waiting in execute for commit; when the RNG advances and
its reset seeds; the DMA register map, CSR numbers and status bits;
per-beat round-robin between the two DMA directions; the scalar memory size
(32 KB each); asynchronous active-low reset.

Lane-local addresses are byte addresses (a VLOAD.L/VSTORE.L ignores bit 0).
Connection words that pack a target index or a delay in their low bits
therefore hold *twice* the index or delay, and the time vector added to
delays holds 2t; the mask width of VANDADD and the weight shift of VSRI are
one larger than with word addresses. The kernels are otherwise instruction
for instruction those of the published algorithms.

Not modelled: the clock frequency and any clock crossing to the DDR side;
the dual-core configuration (it instantiates this subsystem twice behind the
interconnect); performance counters in the host core (the top exports event
pulses for them instead).

Workload sizes at the default parameters (512 KB vector memory, 1024 words
per lane of lane-local memory): a 256-neuron recurrent network with 64 delay
slots per neuron needs 512 lane-local words per lane; a 16000-neuron sparse
network needs 500; a 64000-neuron sparse network would need 2000 and does
not fit on one core. Weights of large networks stay in DDR and are streamed.

## Simulating

Every block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. Testbenches are compared with
`tb/fenn_ref_pkg.sv`, an instruction-level model written independently of
the RTL. `tb/datamover_model.sv` stands in for the DataMover and DDR
(60-cycle first-beat latency, one beat every 2 cycles by default).

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb \
  +libext+.sv rtl/fenn_pkg.sv tb/fenn_ref_pkg.sv tb/tb_fenn_dma_soc.sv \
  --top-module tb_fenn_dma_soc -o sim
obj_dir/sim
```

`tb_fenn_dma_soc` runs the top at its full default size: it loads weights
by DMA (checking latency and the beat rate), runs dense spike propagation
while the DMA moves data in both directions, then sparse and delayed
propagation into lane-local memory and LIF neuron updates with stochastic
rounding, saturation, thresholding and reset, writes results back to DDR
and compares everything with the model. It fails if any of these never
happened: bypass from execute and from writeback, load-use stall, kill,
commit hold, DMA conflict, CSR and AXI4-Lite access, saturation, stochastic
rounding, spikes. `tb_vec_core` runs a long random instruction stream with
random commit delays and kills. Unit testbenches use reduced memory depths.

Three workload testbenches run small networks end to end on the full-size top
and compare the spike raster and final membrane potentials with a
network-level model written directly from the LIF and propagation equations:

* `tb_snn_delayed`: 64 recurrently connected LIF neurons with synaptic
  delays of 1-7 steps (8-slot ring buffers in lane-local memory), using the
  7-instruction delayed propagation loop; it checks that every iteration
  (32 synapses) takes exactly 7 cycles.
* `tb_snn_sparse`: 256 inputs with random spike trains projecting with 90%
  sparsity onto 128 LIF neurons, using the 6-instruction sparse loop; it
  checks 6 cycles per row of 32 connections.
* `tb_snn_dense_dma`: 64 inputs densely connected to 1024 LIF neurons with
  all weights in DDR. For each input spike the host starts the DMA of the
  next spike's weight row (32 vector rows) into one of two buffers while
  the 4-instruction dense kernel adds the current row to the neuron inputs
  from the other buffer. It checks 4 cycles per 32 synapses, that DMA beats
  really arrived while the kernel ran, and the raster and potentials.

All three rely on the double-buffered loop shape: the row for the next iteration
is loaded first, so no instruction uses a load result in the next slot and
the pipeline never stalls.

Testbenches drive inputs on the falling edge and sample handshakes just
before the rising edge; they assume a 10-time-unit clock period. Uninitialised
memories in two-state simulation hold random values, so the testbenches
clear (through the design) whatever they later read.
