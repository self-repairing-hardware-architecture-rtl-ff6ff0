# A self-healing function-block tile for safety-critical control

Controllers in safety-critical plants, such as a diesel generator start
sequence or a cruise controller, must keep producing correct outputs when their
hardware is hit by radiation upsets or wears out. This design is a digital
tile. It runs a small function-block program, like a PLC program, and repairs
itself. A transient upset is masked inside the cell where it happens. A cell
that fails for good is switched out, and a spare takes over its work. When the
nearby spares are used up, a general-purpose "stem" unit is configured to do
the job. The scheme follows the self-repairing architecture of Khairullah and
Elks, "Self-repairing hardware architecture for safety-critical
cyber-physical systems". Its vocabulary is biological. B cells do the work. T
cells are pre-built spares. Stem cells are differentiated on demand. The
"genetic code" of a cell is the function it is told to perform.

This document describes the SystemVerilog implementation in `rtl/` and its
testbenches in `tb/`. It marks what comes from the paper and what was decided
here. The paper gives the architecture and names its parts, but it gives
almost none of their internals. Everything below the block level was designed
here.

## The tile at a glance

```
                 data_in[0..63] (32-bit)        committed outputs (feedback)
                        |                                  |
                        v                                  v
                 +--------------------------------------------+
                 | io_router: 4 operands per position,        |
                 |            chosen by each position's gene  |
                 +--------------------------------------------+
                        | pos_opnd[0..7], pos_go
   CRITICAL FUNCTIONS LAYER                                         HEALING LAYER
 +---------------------------------------------------+   +-----------------------------------+
 | left: AFL_0 (B cells F0 F2 F4 F6)  RSR/WCR        |   | failure_monitor (FMU)             |
 |       PRCL_0 (T cells R1 R3 R5 R7) SU  RSR/WCR    |<->|   kills B, activates T, gene sel  |
 | right: AFR_1 (F8 FA FC FE)          RSR/WCR       |   | health_syndrome (FHS)             |
 |       PRCR_1 (R9 RB RD RF)          SU  RSR/WCR   |-->|   8 syndromes x 2 bit             |
 +---------------------------------------------------+   | syndrome_switch (SSC)             |
        | B/T results                                    |   allocates stem units            |
        v                                                | LHS: stem S0, S2 (2 units each)   |
 +-----------------------+        stem results           | RHS: stem S1, S3 (2 units each)   |
 | output_mux x 8        |<------------------------------+-----------------------------------+
 +-----------------------+          route[0..7]
        |
   scan controller -> data_out[0..7] (32-bit)
```

A tile has **eight function positions**. Position *k* is served by:

1. **B cell k** (address 2k: F0, F2 ... FE). It is active from reset and
   runs the gene of position *k*.
2. **T cell k** (address 2k+1: R1, R3 ... RF). It is idle until B cell *k*
   dies. Then its switching unit hands it position *k*'s operands and it runs
   position *k*'s gene.
3. **A stem execution unit** of its side. Positions 0-3 use the four units of
   stem cells S0 and S2. Positions 4-7 use the four units of S1 and S3. A unit
   is differentiated to position *k* once T cell *k* has also failed. If that
   unit fails, another free unit of the same side is used.

If all of these are used up, the position is *lost*. Its output is forced to 0
and `pos_fail[k]` is raised.

Every cell of every kind has the same core, `func_cell`. It is a genome memory
holding all eight genes plus a **fault-tolerant generic function block**
(`ftgfb`). The cells differ only in which gene they express and where their
operands come from.

## Programming: genes and scans

A gene (`shs_pkg::gene_t`, 32 bits) has a 4-bit opcode and four 7-bit operand
sources. The sources are numbered on one bus:

| source | meaning |
|---|---|
| 0 .. 63 | external input word `data_in[i]` |
| 64 .. 71 | committed output of position 0 .. 7 |
| 72 | constant 0 |
| 73 | constant 1 |

| opcode | result |
|---|---|
| `OP_NOP` | 0 |
| `OP_AND`, `OP_OR` | logical AND / OR of all four operands (non-zero = true; result 0 or 1) |
| `OP_NOT` | logical NOT of operand a |
| `OP_ADD`, `OP_SUB` | a + b, a − b |
| `OP_MUL` | low 32 bits of signed a × b |
| `OP_MUX` | b if a is true, else c |
| `OP_CMP` | 1 if a > b (signed), else 0 |
| `OP_DELAY` | the value of a at this block's previous execution |

The paper lists these operations (NOT, addition, delay, OR, multiplexing,
subtraction, multiplication, comparison, plus AND for the generator logic).
The encodings and the choice of which operand each operation reads are this
design's. The logical (0/1) form of AND, OR and NOT follows the paper's
property model, where four 32-bit inputs feed an OR whose output is compared
with the block output. For an AND or OR with fewer than four inputs, route
the unused operands to constant 1 or constant 0.

Genes are loaded through `cfg_we / cfg_addr / cfg_gene`. One write reaches
every genome copy in the tile: the 24 cells and the I/O router.

A **scan** starts with a `start` pulse. Every live position runs once on the
operands present at the start. Then all eight results are committed to
`data_out` together. A block that reads another position's output sees the
previous scan's value. A chain of *d* blocks therefore settles after *d*
scans, as in a PLC. Hold `data_in` steady during a scan.

## The three lines of defence

This is the part of the design that takes the most care to follow.

### 1. Transient upsets: the hybrid redundancy unit (`hru`)

Each of a block's four operand registers is really three registers. Each copy
also stores a parity bit computed from the clean input word. Three detectors
re-check the parity of the stored copies. A monitoring switch forwards the
first copy whose parity is still good. A comparator XORs it with the next good
copy; a non-zero result means two copies disagree without a parity error,
which an even number of flipped bits can cause. All three copies are reloaded
on every execution. An upset therefore lasts at most one execution, and the
unit can absorb any number of upsets in sequence, as long as one copy survives
each capture.

The paper gives the parts: three registers, three detectors, a switch and a
comparator with a 32-bit error output. Parity and the switch priority are this
design's choices. An HRU that loses all three copies, or sees them disagree,
sets the cell's `hru_alarm` status bit. Such a case is not repaired.

### 2. Permanent faults in a B cell: duplication, cell death, takeover

Inside `ftgfb` the operands feed two copies of the generic function block,
`gfb`. After each execution their results are compared. A mismatch sets the
cell's sticky `err` flag. The design treats any mismatch as permanent, since
upsets of the inputs are already handled by the HRUs. The error reaches the
sublayer's readable status register (RSR). In the next cycle the failure
monitoring unit performs the three healing actions the paper describes:

* it clears the B cell's bit in the writable control register (WCR), so the
  B cell is never started again (*cell death*);
* it sets the T cell's WCR bit, which enables the T cell's switching unit
  (*reorganisation*);
* it loads the T cell's gene select with the position number (*restoration*).

### 3. Permanent faults in a T cell: syndromes and stem cells

The forming-health-syndrome unit keeps a 2-bit **syndrome** for each position:

| syndrome | meaning |
|---|---|
| `SYN_OK` | the B cell is alive |
| `SYN_T` | the B cell is dead and the T cell is healthy |
| `SYN_STEM` | the T cell has failed too, so a stem unit is needed (the syndrome stays while one serves) |
| `SYN_LOST` | a stem unit is needed and none is left on this side |

The **syndrome switching circuit** owns the eight stem execution units. Each
cycle, on each side, it gives the lowest-numbered free unit to the
lowest-numbered position that needs one and has none. A unit whose own
duplicate check fails is marked dead and released, and its position asks
again. Each differentiated unit gets the position's operands through its own
switching unit and expresses the position's gene from its own genome copy.

The **route** of each position follows from this state: B while alive, else T
while healthy, else the assigned stem unit, else none. The route drives the
position's output multiplexer.

### Keeping faults off the outputs: the scan controller

A permanent fault only shows when the failed unit's result comes back. If the
scan controller (`shs_top`) sees a raised error on any routed result, it does
not commit. It waits `HEAL_CYC` = 4 cycles for the healing pipeline above to
settle. Then it re-runs **only the positions that faulted**. The others keep
the results they already hold, so a DELAY block never advances twice in one
scan. Several faults in a row (B, then T, then stem units) are handled by
repeated re-runs. After `MAX_RETRY` = 4 re-runs within one scan it commits
anyway and raises `scan_fault`. The paper does not describe this re-run; it
is this design's way of getting the paper's claim that no wrong value reaches
the output.

### Timing

| event | cycles |
|---|---|
| go to a cell → `done` and result | 2 (the paper's property model delays inputs by two cycles to meet `done`) |
| `start` → `scan_done`, no fault | 4 |
| each re-run | + 3 + `HEAL_CYC` = + 7 |
| B-cell `err` → T cell active, route T | 2 |
| T-cell `err` → stem unit granted, route stem | 3 |

At the 10 ns clock of the paper's experiments, a scan that repairs one
permanent fault lasts 110 ns. The paper reports its two sequential repairs at
345 ns and 455 ns, also 110 ns apart. The paper's scan structure is unknown,
so the absolute times cannot be compared.

## Interface of `shs_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset |
| `cfg_we`, `cfg_addr`, `cfg_gene` | in | 1, 3, 32 | gene load |
| `start` | in | 1 | start a scan (ignored while `busy`) |
| `busy`, `scan_done`, `scan_fault` | out | 1 | scan status; `scan_done` pulses when `data_out` is updated |
| `data_in` | in | 64 × 32 | external inputs |
| `data_out` | out | 8 × 32 | committed position outputs |
| `pos_fail` | out | 8 | position lost |
| `seu_b` | in | 8 × 4 × 3 | fault injection: flip bit 0 of HRU register *i* of operand *j* of B cell *k* at the next edge |
| `perm_b`, `perm_t`, `perm_s` | in | 8, 8, 8 | fault injection: hold the primary GFB of a B cell, T cell or stem unit stuck at all ones |
| `b_status`, `t_status` | out | 8, 8 | status registers (sticky errors) |
| `b_alive`, `t_active` | out | 8, 8 | control registers |
| `hru_alarm` | out | 8 | HRU of a B cell beyond repair |
| `syndrome`, `route` | out | 8 × 2 | healing state |
| `eu_dead` | out | 8 | failed stem units (unit 2j, 2j+1 belong to stem cell j) |
| `heal_count`, `rerun_count` | out | 8, 8 | counters |

Tie the fault-injection inputs to 0 in a real system. They exist so that the
repair paths can be exercised, as the paper does in simulation.

## Files

| file | block |
|---|---|
| `shs_pkg.sv` | sizes, opcode, gene, syndrome and route types |
| `hru.sv` | hybrid redundancy unit |
| `gfb.sv` | generic function block (datapath + DELAY register) |
| `ftgfb.sv` | four HRUs + duplicated GFB + control |
| `genome_mem.sv` | per-cell configuration memory |
| `func_cell.sv` | B cell / T cell / stem unit |
| `switching_unit.sv` | operand router in front of a spare |
| `rsr_wcr.sv` | status and control registers of a sublayer |
| `critical_layer.sv` | 8 B cells, 8 T cells, 4 RSR/WCR pairs |
| `failure_monitor.sv`, `health_syndrome.sv`, `syndrome_switch.sv`, `stem_cell.sv`, `healing_layer.sv` | healing layer |
| `output_mux.sv` | output multiplexer of one position |
| `io_router.sv` | operand source selection |
| `shs_top.sv` | the tile and its scan controller |

Each `tb/tb_<module>.sv` is a self-checking testbench for the module of that
name. `tb/tb_shs_top.sv` runs the whole tile at its default sizes. It
programs eight chained blocks and runs 40 scans against a reference model
while injecting every class of fault: transient upsets, B to T, T to stem,
stem to stem, and a position being lost. It checks every output and every
scan length. `tb/tb_edg.sv` and `tb/tb_ccs.sv` are the generator and cruise-control
workloads described below.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -y rtl rtl/shs_pkg.sv tb/tb_shs_top.sv --top-module tb_shs_top
./obj_dir/Vtb_shs_top
```

Replace `tb_shs_top` with any other testbench name. Every testbench ends by
printing `TB_RESULT checks=N failures=M`. A watchdog ends it with a failure
if it hangs. The sources lint cleanly with `verilator --lint-only -Wall`, apart
from unused package constants and the module `DW` parameters that shadow the
package constant of the same name.

## Workload: emergency diesel generator start logic

The paper's first application is the start logic of a nuclear plant's
emergency diesel generator. It has 14 binary inputs and 2 outputs, built from
AND, OR and inversions. It needs 14 blocks, more than one tile holds. The paper
also spreads it over two critical-function layers. `tb_edg` chains two tiles:
tile A evaluates the first-level ORs and inversions, and tile B reads tile A's
outputs on its own inputs. The mapping and the boolean reference are listed at
the top of the testbench. The inverting boxes of the paper's logic diagram
are taken as NOT, since the text says the logic uses AND, OR and NOT. The test
also repeats the paper's fault experiments: permanent faults in F0 and then in
R0, and three sequential upsets, one per input register of F0. Both outputs
stay correct for 40 random input vectors.

The paper's second application, a cruise controller, occupies 17 cells over
three layers. That is more than one tile's eight positions.
`tb/tb_ccs.sv` runs a reduced version on two chained tiles, with 14 blocks:

* Tile A holds the control logic. It derives the target speed from enable,
  set, increment, decrement and cancel, and the speed error.
* Tile B holds a PI controller with a throttle limit.
* A simple vehicle model closes the loop.

The paper gives neither its PI gains nor its plant. The gains (2 and 1), the
limit (1000), the vehicle model and the wiring of the blocks are this
design's choices. Only the four command rules and the kinds of operation
come from the paper. The paper's third level is left out: it is described
only by its operations, a delay, an addition and a subtraction. Every
committed output is compared with a scan-by-scan reference. Faults are
injected on the way:

* three upsets in the error block;
* a permanent fault in the target block's B cell, then in its T cell.

The target follows the commands. The speed approaches the target (47 against
51 by scan 200) without any output going wrong.

## Where this design departs from the paper, and what to trust

* **Internals are this design's.** The paper names the HRU parts, the
  duplication check, the FMU's three actions, the syndrome unit, the
  switching circuit and the stem cells with two execution units. Parity
  detection, the syndrome encoding, the allocation order, the gene format,
  the source bus and the scan controller with its re-run were all designed
  here.
* **Outputs.** The paper's figure shows 16 output ports ("Mux 0" to
  "Mux F"). This tile has eight, one per function position, because only the
  eight B cells carry functions.
* **Inputs.** The figure says "4-64" input words. The tile always has 64.
* **Switching units.** The figure draws pairs of switching units beside the T
  cells. Here each T cell has one, serving its own position only, as the
  paper's "each functional B cell has its own T cell" suggests.
* **Latency.** The cruise-control text mentions 3.5 clock cycles for one
  block's control flow. This design uses the 2-cycle latency of the paper's
  formal property model.
* **DELAY state** lives in each cell. A spare that takes over a DELAY
  position starts from 0, so one output after a repair may differ from a
  fault-free run.
* **Not modelled:** common-cause failures, faults in the genome memories, the
  routers, the control registers and the healing layer itself (the paper also
  leaves the healing layer unprotected), and any networking of tiles.
* **Capacity.** Eight T cells and eight stem units (four stem cells) back
  eight B cells, the 12 spare cells the paper counts for 16 cells. Twelve
  permanent faults can be absorbed without losing a position, for example all
  eight B cells and two T cells on each side. How many faults are survivable
  depends on where they fall. Each T cell serves only its own position, and
  each side has four stem units. Nine faults on one side (four B cells, four
  T cells and one stem unit) already lose a position.
* **Verification.** Every module has a self-checking testbench, and each
  testbench has been shown to fail against a deliberately broken copy of its
  module. There is no formal proof. The paper proves its block property with
  a model checker; here it is checked by simulation in `tb_ftgfb` and
  asserted in `ftgfb`. A `go` taken while idle gives `done` two cycles
  later, every `done` had a `go` two cycles before, and a `done` with no
  error flagged carries the value both function blocks agreed on.
