# FastCar accelerator: MLP replay with dynamic resource scheduling

Autoregressive video generators produce a video one token at a time, frame
after frame, and in the decode phase most of the time goes into the MLP of each
transformer block. Tokens at the same spatial position in consecutive frames
tend to give nearly the same MLP output. FastCar exploits this. For each new
token (frame t, position i) it measures how strongly the token's query
matches the key of the same position in the previous frame. This is the
*temporal attention score* (TAS), `s = <q(t,i), k(t-1,i)> / sqrt(d)`, averaged
over the attention heads. When the mean reaches a threshold `tau`, the MLP is
skipped and the output cached for position i of the previous frame is
*replayed* instead.

On a multi-core accelerator this saves work, but it also unbalances the load.
Batches are statically assigned to cores, and each batch skips a different,
unpredictable number of MLPs. Precompiling a program for every possible pattern
of skips is not practical. The hardware therefore re-routes the precompiled
instructions at run time. This is *Dynamic Resource Scheduling* (DRS), and it is
the centre of this RTL.

This repository gives synthesizable SystemVerilog for the whole accelerator:
instruction fetch, the TAS threshold unit, the DRS, and four cores. Each core has
a control module, per-unit instruction FIFOs, a DMA, a matrix unit, a vector
unit and an SRAM. It also gives self-checking testbenches for every block and
for the whole design.

## The decision path: TAS unit and Index Register

`fc_tas` (the "traffic light") receives the per-head scores of one batch's
current token as a stream, one head per cycle. It adds them up, and on the last
head it tests `sum >= h * tau`. This is the same test as `mean >= tau`, but it
needs no divider. The result goes to the DRS **Index Register** one cycle later,
as one bit per batch: `0` means replay and `1` means compute. Scores and `tau`
are signed Q7.8, so thresholds such as -1, -2.5 or -8 are exact.

A "batch" here is one sequence of the batch being decoded. In each decode step,
every batch has one current token, so one bit per batch is one replay decision
per token. The register holds 32 batches.

The scores are inputs to the top (`tas_*`). They are by-products of the
attention computation, and this RTL does not tie that computation to a specific
unit.

## DRS: discard, remap, dispatch

`fc_drs` sits between fetch and the cores and handles one instruction per
cycle. Every instruction carries a 5-bit batch number and two flags:

* `dyn` marks the replayable MLP section of a batch.
* `bcast` marks work that every core needs, such as loading shared weights.

The DRS routes each instruction as follows:

| instruction | dense mode | replay mode |
|---|---|---|
| `UNIT_SYS` | executed by the DRS itself | same |
| `bcast` | to all cores, when all are ready | same |
| `dyn`, Index bit 1 | core `batch mod 4` | core named by the batch's Mapping Register |
| `dyn`, Index bit 0 | core `batch mod 4` | **discarded** |
| other | core `batch mod 4` | core `batch mod 4` |

The DRS executes two SYS instructions itself:

* `SYS_MODE` switches between dense mode and replay mode.
* `SYS_MAP` rebuilds the 32 **Mapping Registers**, each 2 bits wide
  (log2 of the core count). It walks the batches in order, one per cycle, so a
  rebuild takes 32 cycles. Each computing batch gets the next core in a round
  robin that starts at core 0. The register of a replayed batch keeps its old
  value, which no instruction then reads. `SYS_MAP` is not accepted while the
  TAS unit is halfway through a batch.

Example, with Index bits `1,0,1,1,0,1,1,0,1` for batches 0 to 8: batches
0, 2, 3, 5, 6 and 8 go to cores 0, 1, 2, 3, 0 and 1. The surviving MLP work is
therefore spread evenly, and per-core MLP counts differ by at most one.

Dispatch is combinational from the fetch stream to the chosen core's input.
The DRS stalls only when that core's FIFO is full, or for a broadcast when any
core's FIFO is full. A discarded instruction still takes one cycle.

**How a replay produces its output.** The program writes every MLP result into
a per-batch, per-position *replay cache* slot in off-chip memory, and later
reads the MLP output back from that slot. When a batch is replayed, its whole
MLP section (load input, GEMV, store) is discarded. The slot then still holds
the previous frame's value, and the residual add picks that value up. No special
copy instruction is needed. (`VU_COPY` exists to move cached data inside a core
if a program prefers that.)

## The cores

Each `fc_core` receives instructions on a valid/ready stream. Its units are:

* **Control (`fc_control`).** It sorts instructions into three FIFOs of 16
  entries: DMA, MU and VU. It starts a unit on the head of its FIFO when the
  unit is idle and the instruction's dependencies are met. Dependencies are
  given by a 3-bit `wait_mask`. Bit u set means "wait until every earlier
  instruction (in program order) for unit u has completed". A small scoreboard
  implements this: it counts the instructions enqueued and completed per unit,
  and records a snapshot of the enqueued counts with each instruction. With this
  rule a program can express load-before-use, compute-before-store and
  buffer-reuse hazards, and let independent work overlap.
* **DMA (`fc_dma`).** `DMA_LOAD` and `DMA_STORE` move `len` 128-bit words
  between a byte address in off-chip memory and an SRAM word address. They use
  AXI4 INCR bursts of at most 16 beats, one burst in flight. Loads move up to
  one word per cycle; stores take about three cycles per word. External
  addresses must be 256-byte aligned.
* **MU (`fc_mu`).** `MU_GEMV` computes 16 outputs,
  `c[n] = sat8((sum_k x[k]*W[k][n]) >>> shift)`, with int8 operands and int32
  accumulators. It first copies x (`len/16` words) into a local buffer of up
  to `MAX_K` = 11008 elements. Then it streams one W row per cycle from SRAM,
  doing 16 multiply-accumulates per cycle. An instruction takes about
  `len/16 + len + 4` cycles without contention. A layer with N outputs is N/16
  instructions. Matrix-matrix products (prefill) are one GEMV per token.
* **VU (`fc_vu`).** It works on 16 int8 lanes per word: saturating add
  (residual), multiply-and-shift (gate times up) and copy. It processes one word
  at a time: 5 cycles per word, or 3 for copy.
* **SRAM (`fc_sram`).** 16384 words of 128 bits (256 KB) per core. It has a
  single port, shared by the DMA, MU and VU through a round-robin arbiter. A
  requester holds its request until it sees `gnt`, and read data returns one
  cycle later.

The fetch unit (`fc_fetch`) reads `prog_len` instructions from `prog_addr`, one
per 128-bit AXI beat, in bursts of 16, and passes them through without a
buffer.

## Instruction format (`fc_pkg::instr_t`, 128 bits)

| bits | field | use |
|---|---|---|
| 127:126 | `unit` | 0 DMA, 1 MU, 2 VU, 3 SYS |
| 125:122 | `op` | per unit, see `fc_pkg` |
| 121:117 | `batch` | batch number 0..31 |
| 116 | `bcast` | to every core |
| 115 | `dyn` | replayable MLP instruction |
| 114:112 | `wait_mask` | {VU, MU, DMA} dependencies |
| 111:107 | `shift` | requantisation shift (MU, VU_MUL) |
| 95:80 | `len` | words (DMA, VU) or K elements (MU) |
| 79:32 | `addr_c`, `addr_b`, `addr_a` | SRAM word addresses |
| 31:0 | `ext_addr` | off-chip byte address (DMA) |

The other bits are reserved. Word lane n is bits `[8n+7:8n]`.

## Ordering across cores

The DRS gives no ordering between cores. In the testbench, the host therefore
runs each frame as two program launches, with a wait for `all_idle` in between:

1. The MLP phase. It contains `SYS_MODE` and `SYS_MAP`, a broadcast weight
   load, and for every batch a `dyn` section: load input, GEMV, and store to
   the replay-cache slot.
2. The residual phase, which runs on each batch's static core.

A remapped batch's result is therefore in off-chip memory before another core
reads it.

## What follows the paper and what does not

From the paper:

* the block set and how it connects: Fetch, Control, DRS, per-unit FIFOs, DMA,
  MU, VU, SRAM, AXI to DDR/HBM, several cores;
* the TAS definition, the head average and the `>= tau` replay test;
* the 32-bit Index Register with 0 = replay and 1 = compute;
* 32 Mapping Registers of log2(cores) bits;
* round-robin assignment over the computing batches;
* discarding replayed batches' instructions, and static mapping in dense mode.

The paper's figure draws four cores, so there are four. The paper's text says
"exceeds" the threshold but its formula says `>=`; the formula is followed.

This design's own choices:

* the instruction set, field layout and `dyn`/`bcast`/`wait_mask` semantics;
* the scoreboard in the control module;
* all widths: 128-bit words, int8 data, Q7.8 scores;
* FIFO depth and SRAM size;
* the MU and VU datapaths, and the DMA store direction;
* static mapping as `batch mod 4`;
* 32-cycle sequential rebuild of the Mapping Registers;
* a separate AXI master port per core and for fetch.

Not built:

* the nonlinear MLP activation (SiLU); the paper gives no hardware form;
* softmax and normalisation; the paper does not describe them in hardware;
* any AXI interconnect or memory controller;
* a host interface.

With int8 saturating arithmetic and no activation function, the RTL cannot run
the full model's numerics. It runs the replay and scheduling mechanism on real
data flows.

## Sizes against the evaluated model

The evaluated model is a 7B-parameter LLaMA-2 backbone. The model constants
below are standard LLaMA-2-7B figures, not taken from the paper: hidden size
4096, MLP width 11008, 32 layers, 32 heads.

* The down projection is the longest dot product. With K = 11008 it needs 688
  x words, 11008 W rows and 1 output, 11697 words in all. That fits the
  16384-word SRAM and the 11008-element MU buffer.
* The paper evaluates batch size 5, which is within the 32 batches of the Index
  Register.
* An int8 replay cache for 8 frames of 256 tokens takes
  32 layers x 256 positions x 4096 bytes = 32 MiB per batch, or 160 MiB for 5
  batches. This is off-chip memory.

The paper's latency and power figures (FPGA at its clock, HBM bandwidth) cannot
be reproduced by this RTL.

## Files

* `rtl/fc_pkg.sv`: widths, opcodes, instruction and bus structs.
* `rtl/fastcar_top.sv`: the top. `fc_fetch`, `fc_tas` and `fc_drs`, plus
  `NUM_CORES` x `fc_core`.
* `rtl/fc_core.sv`: one core. `fc_control` (with `fc_fifo` x3), `fc_dma`,
  `fc_mu`, `fc_vu` and `fc_sram`.
* `tb/tb_<module>.sv`: one self-checking testbench per module. Each prints
  `TB_RESULT checks=N failures=M`.
* `tb/fc_axi_mem.sv`: a behavioural multi-port AXI4 memory with random stalls.
* `tb/fc_tb_sram_port.sv`: a helper for direct SRAM access in unit tests.

`tb_fastcar_top` runs the top at its default parameters for four frames:

* frame 0: dense mode;
* frames 1 and 2: replay mode with TAS-driven replays;
* frame 3: back to dense mode.

It checks every MLP output, every replayed cache slot, every block output, the
round-robin mapping and the core balance. It also counts how often replay drops,
remaps, broadcasts, mode switches, dispatch back-pressure, dependency waits and
SRAM contention happen, and fails if any of them never happened.

To simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/fc_pkg.sv tb/tb_fastcar_top.sv --top-module tb_fastcar_top -o sim
./obj_dir/sim
```

The design is two-state clean: every register that is read is reset, and the
memories are written before they are read.
