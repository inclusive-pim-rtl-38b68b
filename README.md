# A PIM-enabled HBM pseudo-channel with architecture-, sparsity- and cache-aware issue

Commercial processing-in-memory (PIM) DRAM, in the style of HBM-PIM, puts a small SIMD
unit next to each pair of DRAM banks. The host never moves the operands. It sends
*pim-commands* through the ordinary memory-command path. One multi-bank command starts
the same operation in every bank of one parity (all even banks or all odd banks) at once.
That is where the bandwidth gain comes from: 8 PIM units each consume a 32-byte column per
command, instead of one 32-byte transfer over the external bus.

Such a unit runs very simple programs, and it is limited by the DRAM itself. Every time a
computation moves to a new row, that row has to be opened in the banks. In the baseline
schedule this opening time sits on the critical path. This RTL models one pseudo-channel of
such a memory with its memory-controller front end. It implements three improvements on
that baseline:

* **Architecture-aware row activation.** A PIM unit serves one even and one odd bank, and a
  broadcast command uses only one parity at a time. So the controller opens rows per
  parity, and it opens the *next* row of one parity while commands still run on the other.
* **Sparsity-aware issue.** In a sparse-skinny matrix product, each skinny-matrix element
  travels as a scalar inside a multiply-accumulate command. When that scalar is zero, the
  command is not issued at all.
* **Cache-aware offload.** Graph "push" updates (add a value to one node) are checked by a
  locality predictor. This is a tag-only model of a 4 MB, 16-way, LRU cache. Updates that
  are likely to be reused go to the processor's cache. The others become a single-bank
  PIM add followed by a PIM store.

The numbers follow an HBM3-based evaluation configuration:

| Item | Value |
|---|---|
| Banks per pseudo-channel | 16 |
| Row buffer | 1 KB (32 columns of 256 bits) |
| PIM units | 8 per pseudo-channel, one per even/odd bank pair |
| Per PIM unit | 16 registers of 256 bits; 16-lane FP16 ALU |
| tRP / tRAS / tCCDL | 15 / 33 / 3.33 ns |

The timings are counted in a 1.2 GHz clock as 18 / 40 / 4 cycles.

## Block structure

```
 inst (pim-commands, normal RD/WR) ─────────────┐
 upd (push updates) ─► cache_aware_offload ─────┤ (offload has priority)
                        │  └─ locality_predictor  ▼
                        └─► cache_valid/cache_upd   sparsity_filter ─► pim_cmd_queue ─► pim_scheduler
                                                                                    │ act/pre masks, act_row
                                                                                    │ column command
                                                                                    ▼
                                               pseudo_channel: 16 × dram_bank + 8 × pim_unit
                                                                  (pim_regfile + pim_simd_alu)
```

| File | Contents |
|---|---|
| `rtl/pim_pkg.sv` | Geometry, timing constants, the command struct `pim_cmd_t`, the push-update struct, helper functions |
| `rtl/fp16_pkg.sv` | FP16 add and multiply |
| `rtl/pim_simd_alu.sv` | 16 FP16 lanes: pass, add, mul, mac (combinational) |
| `rtl/pim_regfile.sv` | 16 × 256-bit registers; 3 read ports, 1 write port |
| `rtl/pim_unit.sv` | Operand selection, the ALU and the register file of one bank pair |
| `rtl/dram_bank.sv` | One bank with open-row state and 32-byte column access |
| `rtl/pseudo_channel.sv` | 16 banks and 8 PIM units, plus the broadcast/route logic |
| `rtl/pim_cmd_queue.sv` | FIFO command queue whose entries are visible for look-ahead |
| `rtl/pim_scheduler.sv` | Row/column command issue with DRAM timing and both activation policies |
| `rtl/sparsity_filter.sv` | Drops zero-scalar multiply-accumulate commands |
| `rtl/locality_predictor.sv` | 4 MB / 16-way / 64 B-line true-LRU tag model |
| `rtl/cache_aware_offload.sv` | Sends push updates either to the cache or to PIM (add + store) |
| `rtl/pim_pch_top.sv` | The whole pseudo-channel and its front end |

Each file opens with a comment that describes its timing and interface. The comment also
says which parts are this design's own choices.

## Commands

A single struct, `pim_cmd_t`, carries every command:

| Field | Meaning |
|---|---|
| `op` | `RD`, `WR`, `LOAD`, `STORE`, `ADD`, `MUL` or `MAC` |
| `multi_bank` | 1: broadcast to every bank of parity `odd`. 0: only bank `bank` |
| `row`, `col` | DRAM row; 32-byte column (0..31) |
| `a_bank` | Operand A is the addressed bank's column word (1) or register `src_a` (0) |
| `b_sel` | Operand B is register `src_b`; or a scalar in `data[15:0]` copied to all 16 lanes; or the whole 256-bit `data` word |
| `dst` | Destination register. For `MAC`, `reg[dst] = reg[dst] + A*B` |
| `data` | Data-bus payload: write data for `WR`, the scalar or vector operand for PIM operations |

* `LOAD` copies the bank word into `reg[dst]`.
* `STORE` writes `reg[src_a]` into the addressed column. A multi-bank store writes every
  bank of the parity, each from its own unit.
* `RD` and `WR` are normal accesses. They go to one bank only.

The unit has one register file shared by its two banks. A program that uses both parities
at the same time must therefore give them separate registers. The end-to-end test uses
r0–r3 and r8–r11 for even banks and r4–r7 and r12–r15 for odd banks.

## The scheduler (the hard part)

`pim_scheduler` looks only at the queue, never at the data. Each cycle it can issue one
column command (the head of the queue) and one row command group (a mask of banks to
precharge or to activate, plus a row number).

### Column issue

The head issues when both conditions hold:

* Every bank it addresses has the command's row open, and has had it open for at least
  tRCD.
* The previous column command is far enough back. This is tCCDL = 4 cycles after a
  multi-bank command. It is tCCDS = 2 after a single-bank command or a normal access, so a
  broadcast command stream runs at half the single-bank rate.

Column commands never overtake one another. Register dependencies in PIM programs make
program order mandatory.

Row commands obey these rules:

* A bank is precharged no earlier than tRAS after its activation.
* A bank is activated no earlier than tRP after its precharge.

One counter per bank enforces these windows (`rcd_c`, `ras_c`, `rp_c`), and a global
counter enforces the column spacing.

### Baseline policy (`ARCH_AWARE = 0`)

A multi-bank command that finds its row closed precharges all open banks and then
activates all 16 banks. The activation sits on the critical path every time the program
moves to a new row.

### Architecture-aware policy (`ARCH_AWARE = 1`, default)

1. A multi-bank command opens only its own parity: 8 banks.
2. While the head command waits or runs, the scheduler scans the queue from the head
   onwards. It looks for the first command that touches the other parity. If that command
   is a multi-bank command whose row is not open there, the scheduler precharges and
   activates the other parity now. These are the *early* activations, counted in
   `n_early`.
3. The scan stops at that first command. A single-bank command also ends the scan. So no
   command that comes earlier in program order can find its row closed by a look-ahead.

Row order and activation timing within each parity are unchanged. Only the overlap with
the other parity's compute is new.

### Measured effect

The scheduler testbench runs both policies on the same command streams:

| Stream | Baseline | Architecture-aware |
|---|---|---|
| 128 multi-bank commands alternating between an even-bank row and an odd-bank row (4 + 4 commands per row) | 1023 cycles | 921 cycles |
| 600 mixed random commands | 24267 cycles | 19997 cycles |

`tb_wavesim` runs two wave-simulation style kernels on the whole pseudo-channel, under
both policies:

* **Volume.** Each output point is a weighted sum of four fields, each field in its own
  row.
* **Flux.** Two fields, with each point also combined with its neighbouring column.

| Kernel | Baseline | Architecture-aware |
|---|---|---|
| Volume | 652 cycles | 592 cycles |
| Flux | 520 cycles | 401 cycles |

## PIM unit datapath

* A PIM command reaches a unit with its column command. The unit registers the command.
* The banks return the addressed column one cycle later.
* In that cycle the unit selects operand A (bank word or register) and operand B (register,
  broadcast scalar or data-bus vector), runs the ALU and writes `reg[dst]`.
* A `STORE` reads its register in the issue cycle, so the bank can write it like a normal
  `WR`.
* The unit requires its commands to be at least two cycles apart. The scheduler's
  tCCDS/tCCDL spacing guarantees this, and an assertion checks it.

FP16 arithmetic rounds to nearest even:

* Subnormal inputs and results are flushed to zero.
* Every NaN result is the canonical `16'h7E00`.
* Infinities follow IEEE-754.
* MAC is not fused: the product is rounded first, then added.

The testbench checks this against a double-precision reference with the same conventions.

## Sparsity-aware issue

`sparsity_filter` is a one-entry valid/ready pipeline stage placed in front of the queue.
A `MAC` whose operand B is the broadcast scalar, and whose scalar is +0 or −0, is
swallowed and counted in `n_skipped`. The stage still raises `in_ready`, so dropping costs
no cycle.

`MUL` commands always pass, because they start an accumulation. Vector or register MACs
also always pass, even with zero data. With `ENABLE = 0` the stage passes every command.

## Cache-aware offload

A push update names a node by bank, row, column and 16-bit lane, and carries an FP16
addend.

`locality_predictor` looks up the node's byte address:

* The address is `{bank,row,col,lane} × 2`.
* The lookup uses 4096 sets of 16 ways and keeps only tags and an LRU rank per way.
* Every lookup allocates. A hit makes the line most recent; a miss replaces the least
  recent way.
* The answer comes two cycles after the request.
* After reset the predictor clears its tags set by set (4096 cycles), with `req_ready` low.

`cache_aware_offload` then handles the update in one of two ways:

* **Hit (reuse likely).** It pulses `cache_valid` with the update on `cache_upd`. The
  processor cache is outside this design.
* **Miss.** It sends a single-bank `ADD` to the node's bank and row. Operand A is the bank
  word. Operand B is a data vector with the addend in the node's lane and +0 elsewhere, so
  the other 15 values pass through unchanged. The result goes to register 15, which is
  reserved for this. A single-bank `STORE` of register 15 to the same column follows.

With `CACHE_AWARE = 0` every update goes to PIM.

## Simulating

Each block has a self-checking testbench in `tb/`. At the end it prints
`TB_RESULT checks=N failures=M`. A watchdog stops it if it hangs. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
   rtl/pim_pkg.sv rtl/fp16_pkg.sv tb/fp16_ref_pkg.sv \
   rtl/pim_simd_alu.sv rtl/pim_regfile.sv rtl/pim_unit.sv rtl/dram_bank.sv \
   rtl/pseudo_channel.sv rtl/pim_cmd_queue.sv rtl/pim_scheduler.sv \
   rtl/sparsity_filter.sv rtl/locality_predictor.sv rtl/cache_aware_offload.sv \
   rtl/pim_pch_top.sv tb/tb_pim_pch_top.sv --top-module tb_pim_pch_top
./obj_dir/Vtb_pim_pch_top
```

For the scheduler test, add `tb/sched_harness.sv` and use `--top-module tb_pim_scheduler`.
For the wave-simulation test, add `tb/wavesim_harness.sv` and use `--top-module tb_wavesim`.

`tb_pim_pch_top` runs the full default size: 16 banks × 16384 rows (256 MiB of cells), a
16-entry queue and the 4 MB predictor. It builds in about 20 s and runs in well under a
second. It runs three workloads:

1. **vector-sum.** `c = a + b` with broadcast LOAD/ADD/STORE across three rows, alternating
   parities.
2. **Sparse-skinny GEMM.** One MUL followed by MACs. About 40 % of the scalars are zero.
3. **Graph push.** 400 node updates.

Every result is read back with normal reads and compared with a reference. The test also
checks these rates and counts:

* The number of skipped MACs.
* That broadcast MACs on an open row issue every tCCDL cycles.
* That the cache/PIM split matches a reference LRU model.

Finally, the test fails if any of these mechanisms never happened: a skip, an early
activation, a cache update, a PIM update, a head stall or input back-pressure.

To change the design, first edit the constants in `pim_pkg.sv` (geometry, timing) or the
parameters of `pim_pch_top`: `ROWS`, `QDEPTH`, `ARCH_AWARE`, `SPARSITY_AWARE`,
`CACHE_AWARE`. With all three policy parameters set to 0, you get the baseline PIM
system.

## What workloads fit

One pseudo-channel holds 256 MiB, and a 512-bank stack holds 32 of them (8 GiB). The row
count per bank is an assumption, as the next section explains. Those capacities give these
estimates:

* **Wave-simulation fields.** With 65K elements of 729 FP16 points each, one field is about
  96 MB, so the fields fit in a stack.
* **Push graphs.** Graphs with 1M–24M nodes need 2–48 MB of FP16 node values.
* **Skinny dimension.** N = 2–8 needs at most N accumulator registers per unit, out of 16.

The matrix sizes of the sparse GEMM are not specified, so its capacity cannot be judged.

## Departures and limits

* **Sparsity check location.** The zero check is hardware in front of the queue. The
  original proposal performs this check in processor software before the command is
  issued. The effect on the command stream is the same.
* **Row buffer model.** A bank's row buffer is modelled as an open-row index over one cell
  array. Data written to the open row goes straight to the cells, and a precharge does not
  copy anything.
* **Unspecified values chosen here.**
  * tRCD: assumed equal to tRP (18 cycles).
  * tCCDS: 2 cycles.
  * Rows per bank: 16384.
  * Queue depth: 16.
  * ALU: one-cycle latency.
  * Predictor: 40-bit address width.
* **DRAM rules not modelled.** tFAW, tRRD, tWR, tRTP and refresh are not modelled. The row
  bus carries one precharge group or activate group per cycle.
* **Look-ahead limits.** The look-ahead handles only multi-bank commands of the other
  parity. Single-bank commands are never reordered or activated early.
* **Scope.** Only one pseudo-channel is built. The other 31 in a stack are identical and
  independent. The host GPU, its cache, the interposer/PHY, the logic die and the
  compiler that generates pim-commands are not part of the RTL. The top exposes the
  instruction input and the cache-update output in their place.
* **Register file size.** The register file has the commercial baseline's 16 registers per
  unit. Larger register files and higher single-bank command bandwidth were only studied
  as alternatives and are not built. `pim_regfile` takes the register count as a
  parameter, but the command encoding fixes it at 16.
