# RISSP: a RISC-V processor built from one hardware block per instruction

A RISC-V Instruction Subset Processor (RISSP) is a 32-bit RV32E processor
that contains hardware only for the instructions one program actually uses.
Compile the program with a normal RISC-V compiler and list the distinct
instructions in the binary. Then build a core from exactly those
instructions. Each instruction is a self-contained, separately verified
block of combinational logic. A switch chooses which block's result is
used in a cycle. A fetch unit and a register file complete the core. Logic
shared between blocks, such as the many adders, is left for the synthesis
tool to merge.

The point is low gate count and low power for "extreme edge" devices, such
as sensors on flexible plastic substrates. There, every gate and every
flip-flop is expensive. The software ecosystem still works: the core runs
unmodified RISC-V code, as long as the code stays within the chosen subset.

This RTL builds such a core for any subset of the 37 RV32I/E base
instructions. The subset is one parameter. By default the core is built for
the 23-instruction subset of an atrial-fibrillation detector (`af_detect`).
That is the largest of the three extreme-edge cores the design was laid out
for. Constants for 24 application subsets, a full-ISA reference subset and a
12-instruction minimal subset are provided.

```
             +---------------------------- ModularEX (combinational) -----------------+
   imem ---> | insn, pc                                                               |
   +-------+ |   +---------+  +---------+        +---------+                          |
   | fetch |-+-->| block 0 |  | block 1 |  ...   | block N-1|    one per instruction   |
   |  PC   | |   +---------+  +---------+        +---------+    of the subset         |
   +-------+ |        |  src / results  |              |                              |
       ^     |        v                 v              v                              |
       |     |   +-------------------------------------------+                        |
       +-----+---| switch: partial decode -> sel (log2 N)    |--> rs1/rs2 addr, rd   --+--> register file (16 x 32)
    next_pc  |   |         mux of the selected block's outputs|--> data memory request -+--> dmem
             |   +-------------------------------------------+                        |
             +-------------------------------------------------------------------------+
```

## Files

| File | Contents |
|---|---|
| `rtl/rissp_pkg.sv` | Types: instruction identifiers `insn_e`, subset mask `subset_t`, request bundles, the RVFI record; field and immediate helpers |
| `rtl/rissp_subsets_pkg.sv` | Subset constants (`AF_DETECT`, `ARMPIT`, `XGBOOST`, the Embench programs, `RV32E_FULL`, `MINIMAL12`) |
| `rtl/rissp_btype.sv` ... `rissp_jtype.sv` | The six instruction block templates, one per encoding type |
| `rtl/rissp_switch.sv` | Partial decoder and output selector |
| `rtl/rissp_modularex.sv` | Builds one block per subset instruction and wires it to the switch |
| `rtl/rissp_fetch.sv` | Program counter |
| `rtl/rissp_regfile.sv` | 16 x 32-bit register file, x0 = 0 |
| `rtl/rissp_rvfi.sv` | RISC-V Formal Interface trace output |
| `rtl/rissp.sv` | Top level |
| `tb/` | One self-checking testbench per module, end-to-end tests, a reference model and a behavioural memory |

## Instruction hardware blocks

There is one module per RISC-V encoding type: B, R, I, S, U and J. Each has
a parameter `INSN` of type `insn_e` naming the single instruction an
instance implements. So `rissp_rtype #(.INSN(I_SUB))` is the hardware block
for `sub` and nothing else. An instance with an `INSN` of the wrong type
stops elaboration with `$error`.

Every block sees the current `pc` and instruction word `insn`. It drives the
register numbers it reads, and gets their values back from the register
file in the same cycle. It computes everything the instruction does:

| Type | Instructions | Reads | Produces |
|---|---|---|---|
| B | beq bne blt bge bltu bgeu | rs1, rs2 | `next_pc` (target or pc+4) |
| R | add sub sll slt sltu xor srl sra or and | rs1, rs2 | rd, rd data, pc+4 |
| I | lb lh lw lbu lhu, addi slti sltiu xori ori andi slli srli srai, jalr | rs1, load data | rd, rd data, `next_pc`, memory read request |
| S | sb sh sw | rs1, rs2 | memory write request, pc+4 |
| U | lui auipc | - | rd, rd data, pc+4 |
| J | jal | - | rd = pc+4, `next_pc` |

A block does the full decode of its own instruction: opcode, funct3, and
funct7 where the encoding has one. It reports the result on an extra output
`hit`.

A block that writes no register drives rd = x0. The register file drops
writes to x0, so no separate write enable is needed. The S-type block
therefore has rd outputs, which are always x0 and 0.

Memory requests are word-oriented with byte lanes:
- `addr` is the byte address.
- `wdata` is already shifted to the addressed lanes.
- `wmask` and `rmask` select bytes within the 32-bit word that holds `addr`.

A load block receives that whole word back and does the lane shift and sign
or zero extension itself. So a sub-word access needs no logic outside the
block that issues it.

### Accesses that RISC-V calls misaligned

No traps exist in this design. A half-word or word access whose address is
not naturally aligned is executed on the one 32-bit word that holds the
address:
- Bytes that would spill into the next word are dropped.
- `sw`/`lw` at offset k use the mask `4'b1111 << k`.

A branch or jump to an address that is not word-aligned is taken as written.
The fetch unit then reads the word at `pc & ~3` (see the memory contract
below). Programs produced by a compiler never do this. Cores that must trap
in these cases need a change in the blocks.

## ModularEX and the switch

ModularEX is a generate loop. For k = 0 ... N-1 it finds the k-th set bit of
the `SUBSET` mask (`subset_nth`). It then instantiates the block template of
that instruction's type with `INSN` set to it. Inputs a template does not
have are left off. Outputs it does not have are filled with zero in the
bundle handed to the switch. Every block works on every cycle. Only the
switch decides whose result counts.

The switch works in two parts.

1. **Partial decode.** The opcode, funct3 and bit 30 are enough to name the
   only instruction a legal word could be. The switch turns that name into
   a block index `sel` by comparing it with each of the N built-in
   instructions. `sel` is `$clog2(N)` bits wide. The comparison is written
   as a loop; it stands for an N-entry case statement, one entry per
   instruction.
2. **Selection.** The selected block's outputs become the outputs of
   ModularEX:
   - `next_pc`
   - the register destination and data
   - the data memory request

   A block hands the switch three separate bundles, and each has its own
   multiplexer:
   - decode: `hit` and the source register numbers, from the word alone;
   - memory request: depends on register values;
   - results: depend on the memory data.

   Within one cycle the data flows word → register numbers → register
   file → values → memory request → memory → load data → result. If one
   bundle carried all of it through one multiplexer, that multiplexer would
   sit on its own input path. Lint and timing tools would then report a
   combinational loop that does not exist. Splitting the bundles removes
   that false loop.

A word counts as legal only when the partial decode names a built-in
instruction *and* that block's own `hit` confirms it. (A `sub` with a
wrong funct7, for example, passes the partial decode but not the block's
own.) Otherwise `illegal` rises and the word retires as a
no-op: no register write, no memory access, and next_pc = pc + 4. The
top-level output `illegal_insn` and RVFI `trap` show it. An immediate
assertion in the switch checks, in every simulation, that the two decoders
agree: a block may recognise a word only when the partial decode hands that
word to it. What an unsupported
instruction should do is this design's own choice. Giving it no side effect
keeps a reduced core harmless when stray code runs.

Because the mask is a parameter, the same source builds every core:

```systemverilog
rissp #(.SUBSET(rissp_subsets_pkg::XGBOOST)) u_core (...);         // 12 blocks
rissp #(.SUBSET(rissp_subsets_pkg::RV32E_FULL)) u_ref (...);       // 37 blocks
rissp #(.SUBSET(b(I_ADDI) | b(I_LW) | b(I_SW) | b(I_JAL))) ...;    // custom
```

## Fetch, register file and timing

The core is single-cycle: one instruction retires every clock, so CPI = 1.
In one cycle:

1. `imem_addr = pc`, and the instruction memory returns `imem_rdata`
   combinationally.
2. All blocks compute. The switch selects one result and drives
   `rs1/rs2` numbers to the register file, which returns their values
   combinationally.
3. A load's address and `dmem_rmask` go out. `dmem_rdata` must come back in
   the same cycle.
4. At the rising clock edge:
   - the PC loads `next_pc`;
   - the register file writes `rd`, unless it is x0;
   - the data memory performs a store, if `dmem_wmask` is non-zero.

The critical path is therefore imem → decode → register read → address add
→ dmem → load align → register write.

| Unit | Details |
|---|---|
| Fetch | A 32-bit PC register. Reset is asynchronous and active low (`rst_ni`); it loads `RESET_PC` (default 0). |
| Register file | 16 registers of 32 bits (RV32E). Two combinational read ports and one write port. x0 reads as zero. Register numbers 16–31 read as zero and are never written, because RV32E has no such registers. All registers clear at reset. The top ties its write enable high. |

### Memory contract

Both memories are outside the core. The top brings their ports out.

| Port | Direction | Meaning |
|---|---|---|
| `imem_addr[31:0]` | out | byte address of the instruction (the PC) |
| `imem_rdata[31:0]` | in | the instruction word, combinationally |
| `dmem_addr[31:0]` | out | byte address of the access |
| `dmem_rmask[3:0]` | out | bytes read (non-zero only for loads) |
| `dmem_rdata[31:0]` | in | the 32-bit word containing `dmem_addr`, combinationally |
| `dmem_wmask[3:0]` | out | bytes to write at the next rising edge |
| `dmem_wdata[31:0]` | out | write data, already in its byte lanes |

Both memories should ignore address bits [1:0]; the data memory uses the
masks to pick bytes.

## RVFI trace

`rvfi` is a packed struct (`rissp_pkg::rvfi_t`). Its fields follow the
RISC-V Formal Interface:
- `valid`, `order`, `insn`, `trap`
- `halt`, `intr`, `mode`, `ixl`
- `rs1/rs2_addr` and `rs1/rs2_rdata`
- `rd_addr` and `rd_wdata`
- `pc_rdata` and `pc_wdata`
- `mem_addr`, `mem_rmask`, `mem_wmask`, `mem_rdata`, `mem_wdata`

Some fields hold fixed values: `mode` is 3 (machine mode), `ixl` is 1,
`halt` and `intr` are 0. `mem_addr` is word-aligned, with the masks placing
the bytes. The record is registered: the record of the instruction executed
in cycle t is valid during cycle t+1. `order` counts from 0 after reset.

The trace exists for verification only. Leave it unconnected and synthesis
removes it.

## Instruction subsets

`rissp_subsets_pkg` holds one mask per program. Each mask lists the distinct
RV32E instructions of that program when compiled with `-O2`.

| Program | Instructions | All contained in the default `AF_DETECT` core? |
|---|---|---|
| af_detect (default) | 23 | yes |
| armpit | 15 | yes |
| xgboost | 12 | no: xori |
| matmult_int, nsichneu, primecount, tarfind | various | yes |
| all other Embench programs | 14–32 | no, each needs at least one of and/or/xori/slt/sltu/lh/lhu/sra/sll/srl/ori/slti |
| rv32e_full | 37 | no (14 missing) |
| minimal12 | 12 | no (and, xori, sll, sra) |

A program outside the default core's subset runs on a core built with its
own constant. Program size is no constraint on the core: both memories are
external and addressed with 32 bits. The Embench programs expect 64 KB of
ROM and 64 KB of RAM.

`MINIMAL12` is the set {addi, add, and, xori, sll, sra, jal, jalr, blt,
bltu, lw, sw}. Every other base instruction can be rewritten as a short
sequence of these. A program can therefore be retargeted after fabrication
to a core built for this set, at the cost of larger code. `tb_rissp_apps`
shows this for a small af_detect-style kernel.

## Where this RTL departs from the description it follows, or fills gaps

**Not built**
- fence, ecall and ebreak. They are outside the 37-instruction block
  library, so no CSRs, exceptions or interrupts exist.

**Unsupported words**
- They retire as no-ops flagged on `illegal_insn`/`rvfi.trap`. The original
  description does not say what happens to them.

**Added by this design**
- `hit` outputs on the blocks. The blocks' published port lists do not
  include them. They make the "full decode inside each block" visible to
  the switch.
- A write enable on the register file, tied high. The description writes
  without one and relies on rd = x0.

**How the switch is written**
- As a loop over the built-in instructions, not a literal generated case
  statement. Both elaborate to the same N-way selection.
- Decode, memory request and results have three separate multiplexers,
  as explained above.

**Chosen here because the description is silent**
- Reset: asynchronous, active low, PC = 0, registers cleared.
- Misaligned accesses and jump targets: no traps.
- The memory byte-lane interface.
- Reads of x16–x31 return 0.
- RVFI timing.

**How the core is assembled**
- The core is assembled by elaboration-time generate loops, not by an
  external generator that writes a netlist per subset.
- The register file is part of the top. The published area and power
  figures exclude it.

**Verification method**
- Formal proofs of each block are not included. The blocks are checked
  by simulation against an independent reference model instead. The
  testbenches are described below.

**Physical implementation**
- The layout, clocking (300 kHz), supply and technology of the flexible
  chips are outside the RTL.

## Verification

Reference model: `tb/rv_ref_pkg.sv`, written from the RISC-V unprivileged
specification and independent of the RTL. It provides:
- `ref_exec`: executes one instruction.
- `rv_iss`: a small instruction-set simulator over two word arrays.
- Encoders and random instruction generators.

| Testbench | What it does |
|---|---|
| `tb_rissp_btype` ... `tb_rissp_jtype` | One instance per instruction of the type. Random words (mostly valid ones with corner operands, some corrupted) are compared with `ref_exec`, including `hit`. |
| `tb_rissp_switch` | Fake blocks with known outputs. Checks selection, `sel`, illegal handling and the no-op outputs. |
| `tb_rissp_modularex` | Full-ISA and af_detect units side by side against `ref_exec`. |
| `tb_rissp_fetch`, `tb_rissp_regfile`, `tb_rissp_rvfi` | The fixed units, cycle by cycle. |
| `tb_rissp` | The top at its default parameters. See below. |
| `tb_rissp_apps` | Hand-written kernels in the style of the three extreme-edge programs, each restricted to its program's subset, run on cores built for that subset. See below. |
| `tb_rissp_subsets` | The core built for every subset constant (27 builds), each run on random programs of its subset in lock-step with the simulator. Uses the harness `tb_rissp_lockstep`. |

`tb_rissp` has three parts:
1. A directed program: sum and maximum of a table, then sub-word stores and
   loads.
2. 40 random programs, with 1 word in 20 outside the subset, compared in
   lock-step with the instruction-set simulator on every RVFI record.
3. A check that `order` equals the cycle count, so CPI = 1.

It counts each mechanism and fails if one never occurs:
- taken and not-taken branches
- unsupported words
- writes to x0
- loads and stores at a byte offset
- register read-back
- every instruction of the subset

`tb_rissp_apps` uses three kernels. The original programs are not part of
this code; these are kernels of the same kind:
- An RR-interval detector (for af_detect). It takes differences of R-peak
  times, builds a byte map of (RR, ΔRR) cells, and makes a threshold
  decision on the number of occupied cells.
- Two byte-feature decision trees (for armpit), selected by a header byte.
- One word-feature decision tree (for xgboost).

The af_detect kernel is also rewritten by hand into the `MINIMAL12` set, as
a retargeting tool would rewrite it. The rewrite grows from 46 to 98
instructions. It runs on a core built for those twelve instructions and
gives the same results.

Each kernel runs on its own subset core and on the full-ISA core. The
armpit kernel also runs on the default af_detect core. Results are compared
with values the testbench computes, and the cycle count is checked. Three
runs on a core that lacks an instruction the code uses must trap. One is
xgboost code on the af_detect core, which has no `xori`.

Each testbench ends with a line
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. Each module's
testbench was also run against a copy of the module with one deliberate
bug, for example
`bge` compared with `>` or `sra` made logical, and reported failures.

### Simulating

Verilator 5:

```sh
verilator --binary --timing --assert -Irtl -Itb \
  rtl/rissp_pkg.sv rtl/rissp_subsets_pkg.sv rtl/rissp_*type.sv rtl/rissp_switch.sv \
  rtl/rissp_modularex.sv rtl/rissp_fetch.sv rtl/rissp_regfile.sv rtl/rissp_rvfi.sv rtl/rissp.sv \
  tb/rv_ref_pkg.sv tb/tb_memory.sv tb/tb_rissp.sv --top-module tb_rissp -o sim
./obj_dir/sim
```

For another testbench, replace the last file and `--top-module`. Add
`tb/tb_rissp_lockstep.sv` for `tb_rissp_subsets` and `tb/tb_app_core.sv` for
`tb_rissp_apps`. Every testbench starts
from reset and reads no files. The default-size `tb_rissp` takes well under
a minute.

## Changing the design

- **New subset.** Add a constant to `rissp_subsets_pkg` as an OR of
  `b(I_...)` terms. Or pass any mask directly.
- **New instruction of an existing type.** Add it to `insn_e`, `type_of`,
  the partial decode in `rissp_switch`, and the case statement of its
  block template. Then add it to `ref_exec` and the encoders in
  `rv_ref_pkg` so that the testbenches cover it.
- **Registered memories.** A synchronous instruction or data memory breaks
  the single-cycle timing. It needs a pipeline stage or a stall, which this
  core does not have.
