# LP-Spec: a hybrid LPDDR5-PIM memory module for speculative LLM decoding

Speculative decoding lets a phone verify many draft tokens in one forward pass.
That changes the weight-times-activation work in each decoding step from a
matrix-vector product (GEMV) into a small matrix-matrix product (GEMM). A
processing-in-memory (PIM) DRAM built for GEMV loses its advantage as the number
of draft tokens grows. This RTL models a memory module and a small scheduler
that keep the advantage. It has three parts:

* **GEMM-capable LPDDR5-PIM dies.** Each bank-pair processor has four 32-lane
  INT8 ALUs instead of one. A single column read from a bank then serves four
  draft tokens.
* **A hybrid module.** Three PIM ranks and one plain DRAM rank sit behind a
  near-data memory controller (NMC). The NMC gives the SoC separate
  command/address (C/A) buses for PIM and DRAM, a 4 KB PIM global buffer, and
  a "copy-write" command. A copy-write moves weights between the two kinds of
  rank while the NPU is reading them anyway.
* **An LP-Spec scheduler.** A draft token pruner (DTP) builds the token tree
  for the next step from measured acceptance rates and a latency/energy
  estimate. A data allocation unit (DAU) then moves the DRAM/PIM weight split
  so that NPU and PIM finish each step at the same time.

Everything here is synthesizable SystemVerilog except the DRAM cell array, which
is a behavioural model (`dram_bank`). The SoC (host CPU and NPU) and the LPDDR5
PHY are outside the RTL. Their signals are the ports of `lpspec_top`.

## Block map

```
lpspec_top
├── nmc                    near-data memory controller
│   └── pim_gbuf           4 KB PIM global buffer (512 x 64 bit)
├── g_pim_rank[0..2]       lpddr5_rank, HAS_PIM = 1
│   └── g_die[0..3]        pim_die (x16, 1 GB each)
│       ├── g_bank[0..15]  dram_bank (behavioural cell array)
│       └── g_mpu[0..7]    mpu (one per bank pair)
│           ├── mpu_ctrl   instruction sequencer
│           ├── mpu_regfile x4 (CRF, GRF, SRF, ARF)
│           └── simd_alu32 x4
├── g_dram_rank[0]         lpddr5_rank, HAS_PIM = 0 (same die, no MPUs)
└── lpspec_scheduler
    ├── dtp_accuracy       per-head, per-rank acceptance rates
    ├── dtp_tte            greedy token-tree explorer + estimator
    └── dau                partition table, counters, migration stream
```

Shared types live in `lpspec_pkg`: the C/A struct `ca_t`, modes, instruction
format, fixed-point widths and the estimator configuration.

## Command interface

All timing is counted in cycles of one command clock. The design does not
encode LPDDR5 pins. A command is the struct `ca_t {cmd, ba, row, col}`, with
`cmd` one of NOP, ACT, PRE, RD, WR and MRW (mode-register write). Each rank has
one chip select.

The dies of a rank run in lockstep on the same C/A and CS. Die *d* owns
DQ[16d+15:16d] of the 64-bit bus. A column command moves one BL16 burst:

* 256 bits per die;
* 1024 bits per rank, carried as one 1024-bit word on the data ports;
* beat *n* occupies bits [64n+63:64n];
* die *d*'s share of beat *n* is bits [64n+16d+15:64n+16d].

| | Cycles |
|---|---|
| Read data at the rank | `TCL` = 12 after RD |
| Write data at the rank | `TCWL` = 6 after WR |
| SoC sees read data through the NMC | TCL + 2 |

The NMC adds two of those cycles: one in its C/A register and one in its read
data register.

Every die checks the bank timing of the commands it receives. It uses the
Table II values of the paper in cycles: tRP 15, tRCD 15, tRAS 34, tRRD 4,
tWR 28, tRC 30, tCCD 4 and tFAW 16. A violation pulses `timing_err_o`. The
controller above is expected to schedule correctly, so the die does not stall.

### Modes

MRW writes the mode register with the mode in `col[1:0]`.

| Mode | Behaviour |
|---|---|
| SB (0) | Normal DRAM. One bank per command. |
| AB (1) | All-bank. ACT, PRE and WR go to all 16 banks. With all PIM chip selects raised, one write reaches every bank of every die of every PIM rank. This is how inputs and weights are broadcast for column-wise partitioned matrices. |
| ABPIM (2) | All-bank PIM. Every RD or WR is a trigger: each MPU runs one instruction with the column just read from its two banks. No data moves on DQ. Entering ABPIM restarts every MPU program. |

### Register window

The MPU registers are loaded and read like memory. A row address whose upper
11 bits are all ones selects a window:

* `row[3:2]` picks the file (0 CRF, 1 GRF, 2 SRF, 3 ARF);
* `row[1:0]` picks the ALU slot;
* `col[4:0]` picks the index.

In SB mode the window of bank *b* reaches MPU *b/2*. In AB mode a window write
goes to all eight MPUs.

The window width is 256 bits, and writes are masked into the wider entries:

* CRF: one column holds 8 instructions, so `col[1:0]` covers 32.
* GRF: one column is one ALU's 256-bit slot.
* SRF: bytes 0..3 of the column are the scalars of ALUs 0..3.
* ARF: `col[4:2]` is the entry and `col[1:0]` the 256-bit slice (8 INT32 lanes)
  of the chosen ALU's 1024-bit accumulator.

## The MPU and its instruction set

An MPU serves banks 2m and 2m+1. Per trigger:

1. It reads one 256-bit column (32 INT8 weights) from the even or odd bank.
2. It broadcasts that column to all four ALUs.
3. ALU *k* takes its second operand from one of two places:
   * its own GRF slot, element by element;
   * or its own SRF byte, replicated to all 32 lanes.
4. It writes 32 INT32 results into its slot of an ARF entry.

With SRF operands, four ALUs give four draft tokens the same weight row. For a
layer with K inputs:

* K triggers produce a 32-column × 4-token block in each MPU.
* One triggering column command makes a die do 8 MPUs × 4 ALUs × 32 lanes ×
  2 operations = 2048 operations.
* At 200 MHz that is the paper's 409.6 GOPS per die.
* L tokens need ceil(L/4) passes. That is where the `ceil(L_spec / N_ALU)` of
  the estimator comes from.

Instructions are 32 bits: `{op[3:0], bank_odd, src_grf, aam, dst[3:0], src[3:0], imm[16:0]}`.

| op | meaning |
|----|---------|
| NOP  | consume a trigger |
| FILL | GRF[dst] <- bank column (all four slots) |
| ADD / MUL | ARF[dst] <- bank + / * operand |
| MAC  | ARF[dst] <- ARF[dst] + bank * operand |
| JUMP | to `imm[4:0]`, `imm[12:5]` extra times (one loop level) |
| EXIT | stop; the MPU reports done |

* **Address-aligned mode** (`aam`): the operand index is taken from the
  triggering command's column address. A looped `MAC` can then walk the SRF
  while the host walks the columns.
* **JUMP and EXIT** resolve without a trigger. A trigger that finds no
  instruction is counted as a miss.

A 4-token GEMM over K = 4 inputs looks like this:

```
CRF: MAC aam ARF0 += bank * SRF[col] ; JUMP 0 x3 ; EXIT
AB  : write weights (4 columns), CRF, SRF (column k, byte t = x[t][k])
ABPIM: ACT the weight row, RD col 0..3        -> four MACs in every MPU
SB  : ACT window row ARF/ALU t, RD col 0      -> INT32 results of token t
```

## The near-data memory controller

The SoC sees two C/A buses (DRAM and PIM) and one shared DQ bus. The SoC never
talks to both memory spaces at the same time, so they can share the data
lines. PIM computation on the PIM bus and normal reads on the DRAM bus run in
parallel. A 2-bit tag travels with each command:

| tag | DRAM bus | PIM bus |
|-----|----------|---------|
| 00 | normal | normal |
| 01 | copy-write: RD here, WR to the PIM rank(s) | copy-write: RD here, WR to the DRAM rank(s) |
| 1x | normal | PIM global buffer |

**Copy-write.** The RD is a normal read: the SoC still gets the data, so the
NPU can compute with it. The NMC also queues a WR to the same bank and column
of the other side. The target is chosen by the other bus's chip selects, as
sampled with the RD.

The WR leaves a delay line `tCL - tCWL` cycles after the RD. Its write-data
window then lines up with the source's read burst. The burst goes straight from
the read-data path to the other side's write-data path and never crosses the
SoC. The SoC must leave that C/A slot free on the target bus. Otherwise the
NMC sets its sticky `err_o`.

**Global buffer.** An ACT with a 1x tag is recorded as "ACT-1", and the row is
still activated as usual. A later RD/WR with a 1x tag addresses buffer word
`{ACT-1 bank[3:0], RD/WR bank[3:0], tag[0]}`, 9 bits over 512 × 64 bit. A burst
covers 16 consecutive words and wraps at the end.

| Command with a 1x tag | Effect |
|---|---|
| PIM RD with a chip select | rank → buffer |
| PIM WR with a chip select | buffer → rank |
| RD or WR with no PIM chip select | SoC ↔ buffer |

This lets partial results move between ranks without crossing the SoC.

The NMC mirrors the mode it has written into each PIM rank. It therefore knows
that a RD/WR to a rank in ABPIM mode is only a trigger, and expects no data.

## The scheduler

**Accuracy model (`dtp_accuracy`).** It holds p[i][k], the acceptance rate of
the k-th ranked prediction of Decode Head *i*, in unsigned Q1.15. A
verification result gives the number of accepted draft tokens *a* and, per
head, the rank that was accepted. Heads 1..a move their accepted rank up, and
everything else at those heads decays:

```
p += (1 - p) >> SHIFT   (accepted)
p -= p >> SHIFT         (not accepted)
```

Head a+1 (the first rejection) decays entirely. Deeper heads are left
untouched. A preload port sets initial rates.

**Token tree explorer (`dtp_tte`).** It grows the tree from the root, one node
per sampling step. The candidates are the children of the tree nodes: a node
at depth *d* offers the ranked predictions of head d+1. A candidate's value is
the product of the rates on its path.

The best candidate is accepted only if all of these hold:

* its value is above zero;
* the expected tokens per unit time do not drop:
  `(Esum + l) · T(L) ≥ Esum · T(L+1)`;
* latency stays within the SLO: `T(L+1) ≤ t_slo`;
* energy stays within the budget: `E(L+1) ≤ e_budget`;
* the tree is below `max_nodes_i`.

The first refusal ends the tree.

The estimator is
`T(L) = max(t_npu, t_pim_pass · ceil(L/4))` and `E(L) = e_fixed + e_token · L`.
The SoC supplies `t_npu` (DRAM-side weights / off-chip bandwidth) and
`t_pim_pass` (PIM-side weights / internal bandwidth) through `cfg_i`. The scan
takes one node per cycle, so a tree of L nodes needs about L²/2 cycles.

Example: with the rates p1 = {0.5, 0.3}, p2 = {0.2, 0.1} and a PIM-bound
estimator, the explorer builds a 4-node tree with expected acceptance 1.9.

**Data allocation unit (`dau`).** The weights are split at a boundary over
`TOTAL_BLOCKS` blocks. Blocks below the boundary are in DRAM (read by the
NPU); the rest are in PIM.

Each step's L_spec maps to a Group ID, `ceil(L/4) - 1`. Each group has a
PIM:DRAM ratio:

| Group | Ratio | Source |
|---|---|---|
| 0 | 5:1 | paper's example table |
| 1 | 4:1 | paper's example table |
| 2..7 | 3, 3, 2, 2, 1, 1 : 1 | assumed |

The ratios can be rewritten through `tbl_*`.

Each group also has a 2-bit saturating counter. The DAU activates only when L
lands in the same non-active group twice in a row. This filters out a
one-step fluctuation. On activation:

1. It computes the new boundary, `TOTAL · dram / (pim + dram)`.
2. It streams the blocks between the old and new boundary on
   `mig_valid/mig_block/mig_to_pim`.
3. The SoC takes one block per `mig_ready` and issues a copy-write read for
   it. The weights are read for the NPU's computation anyway.

`lpspec_scheduler` closes the loop. A verification result (`ver_valid`)
updates the rates and restarts the explorer one cycle later. Each finished
tree feeds its L_spec to the DAU.

## Where this RTL departs from the paper or fills gaps

* **Estimator.** The paper writes `T_total = min(T_NPU, T_PIM)` for NPU and
  PIM running in parallel. A step lasts as long as the slower unit, so `max`
  is implemented.
* **tCCD.** Table II gives tCCD = 4 cycles, while the text mentions a 5 ns
  tCCD at 200 MHz. The Table II value is used.
* **ALU count.** The text says four ALUs per MPU and is followed.
* **Instruction set, register window and mode-register encoding.** These are
  this design's own. The paper builds on a commodity PIM ISA that it does not
  list.
* **Other own choices:**
  * TCL and TCWL;
  * the command-level C/A;
  * how the copy target is selected;
  * ACT-1 being any ACT with a 1x tag;
  * the buffer burst wrap;
  * the EMA update rule;
  * the acceptance rule and linear energy model of the explorer;
  * tree limits H = 4 heads and K = 4 ranks per head;
  * DAU ratios for groups 2..7;
  * TOTAL_BLOCKS = 4096;
  * the migration stream handshake.
* **Out of scope:**
  * the PHY;
  * LPDDR5 refresh, power-down and pin-level encoding;
  * the host CPU and NPU;
  * the on-NPU part of the workload (prefill, attention softmax, non-linear
    functions).

## Sizes

Defaults are the module's real configuration:

* 3 PIM ranks + 1 DRAM rank;
* 4 x16 dies per rank;
* per die: 16 banks, 32768 rows × 64 columns × 32 B = 1 GB;
* 16 GB in total;
* 8 MPUs per die.

The cell array is a sparse associative array, so simulation memory grows only
with the words written.

A Llama2-7B INT8 model (~7 GB with KV cache) and a Llama2-13B INT8 model
(~14 GB) both fit. Speculation lengths up to 32 fit the explorer
(`MAX_NODES` = 32) and the DAU (8 groups × 4).

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/lpspec_pkg.sv $(ls rtl/*.sv | grep -v pkg) \
    tb/tb_lpspec_top.sv --top-module tb_lpspec_top -Mdir obj_top
obj_top/Vtb_lpspec_top
```

For a single block, pass the package, the block's file and the files of its
sub-blocks. `tb_nmc` also needs `tb/tb_mem_model.sv`, a behavioural rank model.

| testbench | what it shows |
|-----------|---------------|
| tb_simd_alu32, tb_mpu_regfile | exhaustive/random lane arithmetic and masked writes |
| tb_mpu_ctrl | trigger sequencing, loops, EXIT, misses |
| tb_mpu | 4 × 16 × 32 GEMM through FILL/MAC/MUL/ADD against a software model |
| tb_dram_bank, tb_pim_gbuf | storage, buffer burst wrap |
| tb_pim_die | SB latency = TCL, tRCD violation, AB broadcast, register loading, ABPIM GEMM, ARF readback |
| tb_lpddr5_rank | DQ slicing across dies, lockstep |
| tb_nmc | normal access, copy-write both directions at tCL − tCWL, buffer paths, collision flag |
| tb_dtp_accuracy, tb_dtp_tte, tb_dau | update rule; explorer cases including the tree above; group counters, activation, migration stream |
| tb_lpspec_scheduler | closed loop: tree → new L_spec → DAU activation after two steps → 137-block migration |
| tb_pim_spec_sweep | speculation lengths 1, 4, 5, 16, 32 on one die: every token's result, and exactly ceil(L/4) × K column commands per layer slice |
| tb_lpspec_top | whole module at its default size (see below) |

`tb_lpspec_top` runs with no parameter override and drives one full operation:

* DRAM normal access;
* a deliberate tRCD violation;
* a broadcast GEMM on all PIM ranks through SB → AB → ABPIM → SB, with a DRAM
  read running in parallel, checked lane by lane on every die of one rank;
* buffer transfers rank → buffer → SoC and buffer → rank;
* the scheduler loop, up to a DAU activation;
* each migrated block moved by a real copy-write, plus one copy-write in the
  other direction.

It counts every mechanism and fails if one of them never happened. It finishes
in under a second of simulation after about a minute of compilation.

## Lint notes

The remaining Verilator warnings are explained in the opening comment of the
module concerned. They are:

* unused bits of shared structs;
* outputs of DRAM-only dies that nothing consumes;
* the blocking write of the behavioural cell array;
* the reset used in the assertions' `disable iff`.
