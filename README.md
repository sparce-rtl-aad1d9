# SparCE-style sparsity-aware in-order core

Deep neural networks spend most of their time on multiply-accumulate work,
and a large share of that work multiplies by zero. ReLU activations zero out
roughly a quarter to over half of the features, and pruned weights are zero
too. A general purpose core still fetches and executes every one of those
instructions. The idea implemented here: the core tracks which registers hold
zero, and software tells it which short runs of instructions become redundant
when a given register (or vector lane) is zero. The fetch stage then skips
those runs. Ideally they are never fetched. If the zero only becomes known
after the run has started, the rest of the run is skipped and the part already
fetched is squashed.

This repository holds synthesizable SystemVerilog for that scheme, built
around a small in-order 4-stage core with 4-lane (128-bit) vector registers.

## The four additions to a plain pipeline

| Unit | Stage | Holds / does |
|---|---|---|
| SpRF, sparsity register file (`sprf`) | fetch | For each of the 32 registers: an `isSparse` bit per lane and a `regUpdInFlight` bit |
| SVC, sparse value checker (`svc`) | writeback | Compares every result with zero and updates the SpRF |
| SASA table, skip address table (`sasa_table`) | fetch | 20 entries, each `{precedingPC, instsToSkip, condition}`, searched by the fetch PC |
| PSRU, skip unit (`psru`) | fetch | Decides the next PC from a table hit, the SpRF and an active skippable region |

The new instruction `SASA_LD [Rn], #size` (`sasa_loader`) fills the table
from memory.

### SpRF and in-flight tracking

A register's `isSparse` bit for a lane is 1 when the last value written to
that lane was zero. At reset every register is zero, so every bit starts at 1.

`regUpdInFlight` is set when an instruction that writes the register leaves
decode, and cleared when it writes back. It is also cleared when that writer
is squashed. While it is set, the register's `isSparse` bits are stale. A
condition that uses the register is then *pending*.

The core uses the same bits as its scoreboard. Decode stalls any instruction
that reads or writes a register with a writer in flight. So there is at most
one writer per register in flight, and one bit per register is enough.

The fetch stage sits two stages ahead of decode. The PSRU therefore treats a
register as in flight also while its writer is still in fetch or decode
(`early_inflight` in the core). Without this, a load two instructions ahead of
a table hit would look settled, and a stale zero flag would skip live code.

### Conditions

A condition is `op(a, b)` with `op` one of:

- single (`a`)
- OR (`a | b`)
- AND (`a & b`)
- never

Each operand names a register plus either one lane (zero in that lane) or the
whole register (zero in all lanes). This covers the two forms the scheme
needs:

- a lane of the operand that a broadcast multiply-accumulate shares across
  lanes, which makes that MAC redundant;
- a whole register, when a plain lane-wise instruction is redundant only if
  every lane is zero.

### PSRU decision, per fetched PC

1. **Table hit.** The fetched instruction precedes a candidate region of
   `instsToSkip` instructions.
   - Condition settled and true: the next PC is `pc + 4*(1 + instsToSkip)`.
     The region is never fetched and costs no cycle.
   - Condition settled and false: the next PC is `pc + 4`.
   - Condition pending: the region `[pc+4, pc+4+4*instsToSkip)` becomes the
     active *skippable region*, and the next PC is `pc + 4`.
2. **No hit, PC inside the active region.** The PSRU re-checks the condition.
   - Still pending: fetch continues.
   - True: the next PC is the region end. The instruction fetched this cycle
     is dropped, and the region's instructions already in decode, execute or
     writeback are squashed.
   - False: the region runs normally and is forgotten.
3. **Otherwise** the next PC is `pc + 4`. An active region that fetch has left
   is forgotten.

Squashing must not hit a *later* region that reuses the same addresses, for
example the next iteration of a loop. So each instruction fetched inside a
region carries an `in_region` flag and a 2-bit epoch, and a squash removes
only instructions tagged with the current epoch. A squashed instruction:

- writes no register;
- does not store;
- clears its own `regUpdInFlight` bit.

Only one skippable region is active at a time. A new pending hit replaces it.

### SASA table and SASA_LD

The table is fully associative with a combinational lookup. If two valid
entries match, the lower index wins.

`SASA_LD rs1, #size` sits in execute and owns the data port until it is done:

1. In its first cycle it invalidates the whole table.
2. It then reads one 64-bit entry image per data row (one row per cycle) from
   the address in `rs1` lane 0, and writes the entries in order.
3. `done` comes `size*ROWS + 2` cycles after the start. `ROWS` is 1 with the
   128-bit data port.

`size` is clamped to 20.

Entry image in memory (bits of a 64-bit word; bits 63:60 are zero):

| Bits | Field |
|---|---|
| 59:28 | `precedingPC` (byte address) |
| 27:20 | `instsToSkip` |
| 19:18 | condition operator: 0 single, 1 OR, 2 AND, 3 never |
| 17:9 | operand a: `{reg[4:0], whole, lane[2:0]}` |
| 8:0 | operand b: the same layout |

## The base core

There are four stages: fetch (with the SpRF, SASA table and PSRU), decode,
execute/memory, and writeback. Memory ports answer in the same cycle; caches
are not part of this design. The register file has three read ports and
forwards the writeback value through to a same-cycle read. So a dependent
instruction issues in the cycle its producer writes back: one bubble after an
ALU result, none when an independent instruction sits between.

Instruction set (32-bit words, opcode in bits 31:26; every register is
4 × 32 bits):

| Op | Meaning |
|---|---|
| `NOP` 0, `HALT` 63 | |
| `ADD` 1 / `SUB` 2 / `MUL` 3 rd, rs1, rs2 | lane-wise |
| `ADDI` 4 rd, rs1, imm | lane-wise, immediate broadcast |
| `MAC` 5 rd, rs1, rs2, lane | `rd += rs1 * rs2[lane]` (broadcast, like `fmla`) |
| `LD` 6 rd, imm(rs1) | loads a whole 128-bit row; address = rs1 lane 0 + imm |
| `ST` 7 rd, imm(rs1) | stores register rd |
| `BNE` 8 rd, rs1, imm | if lane 0 differs, `pc += 4*imm` |
| `SASA_LD` 9 rs1, #imm | loads the SASA table |

Field positions:

- R-type: `rd[25:21] rs1[20:16] rs2[15:11] lane[10:8]`
- I-type: `rd[25:21] rs1[20:16] imm[15:0]`

`sparce_pkg` has `enc_r`/`enc_i` builders and `sel_lane`/`sel_reg` for
condition operands. Unknown opcodes execute as `NOP`.

Branches are predicted not taken and resolved in execute. A taken branch
costs two cycles. The PSRU never squashes a branch. Software must not put a
branch inside a skippable region.

The `perf` output counts:

- cycles and retired instructions;
- table hits, immediate skips, marked regions, regions skipped later and
  regions executed;
- skipped and squashed instructions;
- decode stalls, taken branches and SASA loads.

## Writing code for it

The scheme pays off fully only when the instruction that produces a condition
register writes back before fetch reaches the table hit. Then the region is
skipped without ever being fetched. In this pipeline that means at least
three instructions between the producer and the `precedingPC` instruction.
When the distance is shorter, the region is marked and resolved later: the
few region instructions already fetched are squashed and become bubbles, and
the rest is still skipped. Reordering independent instructions into the gap
is the compiler's or library writer's job.

Example (from `tb_sparce_core`): a dot product loop loads `INP[i]` into r0,
then `KER[i]` into r1, then does `MUL r3,r1,r0; ADD r2,r2,r3`. Two entries
serve it:

- skip the `KER` load if r0 lane 0 is zero;
- skip the `MUL`/`ADD` pair if r0 or r1 lane 0 is zero.

With 6 zeros in 16 inputs the loop skips 18 of its instructions.

## Files

- `rtl/sparce_pkg.sv`: sizes, ISA, entry and condition types, counters.
- `rtl/sprf.sv`, `rtl/svc.sv`, `rtl/sasa_table.sv`, `rtl/sasa_loader.sv`,
  `rtl/psru.sv`: the sparsity units.
- `rtl/regfile.sv`, `rtl/alu.sv`, `rtl/mac_unit.sv`: base datapath.
- `rtl/sparce_core.sv`: top. Parameters: `LANES` (4), `SASA_N` (20),
  `RESET_PC` (0).
- `tb/tb_<unit>.sv`: a self-checking testbench per unit. Each prints
  `TB_RESULT checks=… failures=…`.

`tb_sparce_core` runs the whole core at its default sizes. It runs a program
twice: once with the table loaded, once with `SASA_LD #0`. It checks:

- the stored dot product;
- registers written in straight-line probe regions, one with a zero guard
  that is squashed mid-flight and one with a nonzero guard;
- every event counter against counts derived from the number of zeros;
- that each skip on a table hit fetches the region's successor in the very
  next cycle;
- that every mechanism happened at least once: immediate skip, mark, late
  skip, region executed, squash, decode stall, taken branch and SASA load.

`tb_gemm_kernel` runs an 8×4 matrix-multiply micro-kernel. Per step it loads
two 4-row slices of A and one 4-wide row of a sparse B. It then issues eight
broadcast MACs, two per lane of B. Four table entries each skip one pair when
their lane of B is zero. The B row is loaded early enough that every
redundant pair is skipped before it is fetched, with nothing squashed. The
test checks:

- every element of C against a reference product;
- one skip per zero in B;
- the cycle count: exactly two cycles saved per zero, less the four cycles
  the table load itself takes.

Simulate any testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
  rtl/sparce_pkg.sv tb/tb_sparce_core.sv --top-module tb_sparce_core -o sim
./obj_dir/sim
```

## How this departs from the original proposal

- **Base processor.** The proposal extends an ARMv8-A in-order core with
  caches (32 KB I, 64 KB D, 2 MB L2). Here the base is a small core with its own
  ISA and single-cycle memory ports, so ARM binaries and the DNN libraries do
  not run on it.
- **Lanes.** Lanes are 32-bit integers, not single-precision floats. A
  floating-point −0.0 would not count as zero here.
- **isSparse width.** `isSparse` is one bit per lane rather than one bit per
  register. This is needed for lane conditions on vector registers.
- **MAC operands.** MAC reads three registers (accumulator included), like
  `fmla`. The proposal speaks of an ISA with at most two source registers.
- **Skip arithmetic.** One worked example of the proposal gives a skip target
  inconsistent with its own formula (`PC + (n+1)*4`). The formula is used
  here.
- **Unstated details.** These are choices of this design where the proposal
  says nothing:
  - a single active skippable region;
  - epoch tagging for squashes;
  - treating writers in fetch/decode as in flight;
  - stall-based hazards;
  - the `SASA_LD` sequencing and the entry memory format;
  - the tie-break between matching entries.
- **Not built.** The caches are not built.
