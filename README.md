# An RV32IM core with instructions for convolution loops

Small neural networks, such as LeNet-5 and MobileNet running in int8 on an embedded
RISC-V core, spend almost all of their time in one inner loop. That loop loads an
activation and a weight, multiplies and accumulates them, moves two pointers and
tests a loop counter. On a plain RV32IM core that is about six instructions per
multiply-accumulate, and only one of them does useful arithmetic. This design is a
three-stage RV32IM core that adds four extensions, each removing a different part
of that overhead:

| Extension | What it replaces | Encoding |
|---|---|---|
| `mac` | `mul` + `add` into an accumulator | custom-2 `1011011`, funct7 `0100000`, funct3 `000` |
| `add2i` | two `addi` pointer increments | custom-1 `0101011` |
| `fusedmac` | `mac` and `add2i` together, in one instruction | custom-0 `0001011` |
| zero-overhead loops (ZOL) | the loop counter decrement and the backward branch | `1110111` (dlp, dlpi, set.zc, set.zs/ze), `1011111` (zlp) |

With all four, the inner loop shrinks to two loads and one `fusedmac`, and the
loop itself costs no instructions. This RTL is the fully extended processor
configuration, in which all four are present.

## Pipeline

```
        +---------+   pm_rdata   +-----------------+        +--------------------------+
 PM --->|  fetch  |------------->|     decode      |------->|         execute          |
        | PC, ZOL |              | decoder, regfile|  ctrl_t| ALU, branch, RV32M, LSU, |---> DM
        | redirect|<-------------| (5R / 3W ports) |        | mac/add2i/fusedmac, ZOL  |
        +---------+  redirect    +-----------------+        +--------------------------+
```

* **Fetch** (`fetch_unit`): holds the PC and reads the program memory, which has a
  single-cycle synchronous read. The next address is `pc+4`, the loop start when
  the loop logic says the current word is the loop end, or a redirect from
  execute.
* **Decode** (`decoder`, `regfile`): produces a `ctrl_t` struct (`marvel_pkg`) and
  reads five registers: `rs1`, `rs2`, and the fixed mac operands x20, x21 and x22.
  The register file passes same-cycle writes straight through to its read
  ports. The value decode reads is therefore always current, so there are no
  data-hazard stalls.
* **Execute** (`marvel_core`): computes the result, resolves branches and jumps,
  and writes back. It has three register-file write ports:
  * Port 0 writes `rd`, or the first pointer of add2i/fusedmac.
  * Port 1 writes the second pointer.
  * Port 2 writes x20 for mac/fusedmac.

  If ports write the same register, the highest-numbered port wins.

Timing rules:

| Event | Cost |
|---|---|
| ALU, `mul*`, `mac`, `add2i`, `fusedmac` | 1 cycle |
| Load | 2 cycles in execute (the data memory answers one cycle after the request) |
| Store | 1 cycle |
| `div`/`divu`/`rem`/`remu` | 33 cycles (restoring divider) |
| Taken branch, `jal`, `jalr` | 1 bubble (resolved in execute; the instruction in decode is killed) |
| Write to a loop register | 1 bubble (fetch restarts at the next instruction) |
| Loop back from loop end to loop start | 0 cycles |

`ecall`, `ebreak` and the `SWBRK` opcode (`1111011`) halt the core and raise
`halted`. CSR and `fence` instructions execute as no-ops.

## The custom arithmetic instructions

`mac` has no register fields. It always computes `x20 = x20 + x21 * x22`, using
the low 32 bits of the product. The mac datapath has its own three read ports,
so fixed registers cost no extra encoding bits and need no extra cycle.

`add2i` and `fusedmac` share one encoding. It has two register fields and two
unsigned immediates:

```
 31            22 21 20 19   15 14  12 11    7 6       0
+----------------+-----+-------+------+-------+---------+
|   i2[9:0]      |i1[4:3]| rs2 |i1[2:0]|  rs1  | opcode  |
+----------------+-----+-------+------+-------+---------+
```

* `add2i`: `rs1 += i1; rs2 += i2`. i1 is 5 bits and i2 is 10 bits.
* `fusedmac`: `x20 += x21*x22; rs1 += i1; rs2 += i2`. All three happen in one
  cycle, with three register writes.

The immediates are zero-extended. Only 15 bits remain for both immediates, and
the pointer increments in convolution inner loops are almost always positive,
usually one small and one larger. So the split is 5 + 10 unsigned bits
(0–31 and 0–1023), not two signed 7-bit fields.

## Zero-overhead loops

The loop hardware (`zol_unit`) has three registers:

* **ZC**: the number of iterations still to run.
* **ZS**: the address of the first instruction of the loop body.
* **ZE**: the address of the last instruction of the loop body.

Six instructions write them. `pc` below is the address of the loop instruction
itself. All immediates are unsigned.

| Instruction | Opcode / funct3 | Effect |
|---|---|---|
| `dlp rs1, imm12` | `1110111` / `000` | ZC = rs1, ZS = pc+4, ZE = pc+imm12 |
| `dlpi n, imm12` | `1110111` / `001` | ZC = n (5-bit field in bits [19:15]), ZS = pc+4, ZE = pc+imm12 |
| `set.zc rs1` | `1110111` / `010` | ZC = rs1 |
| `set.zs imm10` | `1110111` / `011`, rd = 1 | ZS = pc + 4*imm10 |
| `set.ze imm10` | `1110111` / `011`, rd = 2 | ZE = pc + 4*imm10 |
| `zlp rs1, imm1, imm2` | `1011111` | ZC = rs1, ZS = pc + 4*{instr[14:12],instr[11:7]}, ZE = pc + 4*instr[31:22] |

`dlp` and `dlpi` are the usual form: the loop body starts right after the
instruction and ends `imm12` bytes after it.

**How the loop-back works.** Every cycle, the fetch stage gives the loop unit the
address it is fetching. If that address equals ZE and at least one iteration
remains, the fetched word is tagged as a loop end. If it is not the last
iteration, the *next* fetch address becomes ZS instead of `pc+4`. No branch is
decoded, and no cycle is lost per iteration.

**When ZC changes.** ZC decrements when a tagged instruction leaves execute, not
when it is fetched. This keeps the count correct even if that instruction is
killed by a taken branch. The fetch stage runs one instruction ahead of execute,
so its test uses a look-ahead count. That count is the value ZC will take at the
next clock edge, minus one if a tagged instruction is waiting in decode. A loop
whose body is a single instruction therefore loops correctly back-to-back. In
the core test bench, eight multiply-accumulates run in eight consecutive cycles.

**Writing the loop registers.** A write to any loop register restarts fetch at the
instruction after the loop instruction. Fetch may already have looked at the old
ZE by then, and the restart discards that stale decision. This costs one bubble
per loop *setup*, not per iteration.

Rules for software:

* There is one level of loops; the hardware does not nest them. An outer loop
  uses normal branches and sets the inner loop up again (`dlp`, `zlp` or `set.*`)
  on each of its iterations.
* ZC = 0 means no loop is active.
* Every loop executes its body at least once.
* A taken branch out of the body leaves the loop armed until ZC is rewritten.
  The cleanest exit is to let the count run out.

## Memories and the host side

The core has a modified Harvard layout:

| Memory | Module | Default size | Core port | Host port |
|---|---|---|---|---|
| Program | `prog_mem` | 128 KiB (`PM_WORDS = 32768`) | read-only | write-only |
| Data | `data_mem` | 64 MiB (`DM_WORDS = 16777216`) | byte-enabled read/write | word read/write |

The core reaches the data memory with byte-lane stores and sign- or zero-extended
sub-word loads (`lsu`). Both memories have a one-cycle registered read, and a read
port holds its output while its enable is low. The fetch stage relies on this
during stalls.

The data memory is sized to hold the largest network footprint considered
(ResNet50, about 44 MB). That is far more than the block RAM of the FPGA
platforms this kind of core is usually prototyped on. For an FPGA build,
reduce `DM_WORDS`: LeNet-5 needs about 32 KB, MobileNetV1 about 600 KB.

The top level (`marvel_soc`) connects the core to the two memories. It replaces
the debugger's memory access with plain host ports:

1. While `core_run` is low, the core is held in reset and the host loads the
   program and the data.
2. When `core_run` rises, the core starts at address 0 and runs until it halts.
3. The host then reads the results back through `host_dm_*`.

Host addresses are byte addresses, and bits [1:0] are ignored.

`marvel_core` also has one-cycle event outputs, intended for performance
counters:

| Output | Pulses when |
|---|---|
| `ev_retire` | an instruction retires |
| `ev_stall` | a cycle is stalled |
| `ev_flush` | the pipeline is flushed |
| `ev_zol_back` | a zero-overhead loop-back happens |
| `ev_mac` | a `mac` executes |
| `ev_add2i` | an `add2i` executes |
| `ev_fusedmac` | a `fusedmac` executes |
| `ev_div` | a division or remainder executes |

## Where this departs from the published design

* The base core in the original work is a vendor processor whose internals are
  not published. Only its ISA, its three stages and its single-cycle memories
  carry over. The following are this design's own choices:
  * the forwarding scheme
  * branch resolution in execute
  * two-cycle loads
  * the 33-cycle divider
  * halting on `ebreak`/`ecall`
* The loop instructions are only named in the original description, and their field layout
  is given only in a figure. The exact effect of each instruction, the units
  of the offsets, the count convention and the single loop level are choices
  of this implementation (see the table above).
* In the `zlp` layout as printed, the two low bits of the first immediate
  overlap another field. Here the first immediate is the 8-bit field
  `{instr[14:12], instr[11:7]}`, and bits [21:20] are ignored.
* The loop extension is counted as five instructions in one place, but six
  are named. Five encodings exist: `set.zs` and `set.ze` share one, told
  apart by the `rd` field. All six operations are implemented.
* Figures of the mac datapath label the accumulator x21, while the text names
  x20 as the destination. This design follows the text:
  `x20 = x20 + x21*x22`.
* The on-chip debugger (JTAG) and the stack-pointer logic of the vendor core
  are not implemented. The host ports take the debugger's place for loading and
  reading memory.

## Files

* `rtl/marvel_pkg.sv`: opcodes, fixed registers, enums and `ctrl_t`.
* `rtl/alu.sv`, `rtl/muldiv.sv`, `rtl/lsu.sv`, `rtl/regfile.sv`: base datapath.
* `rtl/mac_unit.sv`, `rtl/add2i_unit.sv`, `rtl/fusedmac_unit.sv`: extension datapaths.
* `rtl/zol_unit.sv`: loop registers and loop-back control.
* `rtl/decoder.sv`, `rtl/fetch_unit.sv`, `rtl/marvel_core.sv`: the core.
* `rtl/prog_mem.sv`, `rtl/data_mem.sv`, `rtl/marvel_soc.sv`: memories and top level.
* `tb/rv_asm_pkg.sv`: functions that assemble RV32IM and the custom instructions,
  so the test benches can build programs without a toolchain.
* `tb/<block>_tb.sv`: one self-checking test bench per module.

## Simulating

Each test bench prints `TB_RESULT checks=N failures=M` and has a cycle watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/marvel_pkg.sv tb/rv_asm_pkg.sv tb/marvel_soc_tb.sv --top-module marvel_soc_tb
./obj_dir/Vmarvel_soc_tb
```

Replace `marvel_soc_tb` with any other test bench name. The memories are large at
their default sizes, so building `marvel_soc_tb` takes a few minutes and about
70 MB of simulated memory. The simulation itself takes a couple of seconds.

The end-to-end test (`marvel_soc_tb`) uses the default parameters throughout. It
assembles and runs a LeNet-5-shaped int8 network with random weights:

* conv1: a 28×28 input, 12 filters of 6×6 with stride 2 and ReLU → 12 maps of 12×12
* conv2: 32 filters of 6×6 with stride 2 and ReLU → 32 maps of 4×4
* a 512 → 10 dense layer
* a short epilogue that averages the logits with `div`

Each convolution kernel row is one `dlpi` loop. Its body is an unrolled
load/load/`fusedmac` sequence, followed by an `add2i` that steps the pointers.
The dense layer uses one 512-iteration `dlp` loop per output, with `mac` and
`add2i` in the body. The outer loops use ordinary branches.

The bench compares every activation and logit with a model computed in the test
bench. It also counts each mechanism and fails if any count is zero: loop-backs,
mac, add2i, fusedmac, stalls, flushes and divisions. A run takes about 1.57
million cycles, with about 283 thousand `fusedmac`s and 44 thousand loop-backs.

`marvel_core_tb` runs a smaller mixed program on a reduced memory. It checks exact
cycle counts:

* loads, divisions and taken branches cost the cycles listed above
* a single-instruction loop body runs back-to-back
* the `zlp` and `set.zc`/`set.zs`/`set.ze` forms of loop setup work

## Verification and trust

Every module has its own test bench that compares it with an independent model:

* the ALU, LSU, divider and arithmetic units with random operands
* the register file for bypass and write-port priority
* the decoder for every encoding and immediate placement
* the fetch unit and loop unit for stall, redirect and loop-back timing
* the memories for byte enables and output holding

For each module, a copy with a deliberate bug was used to show that its test
bench fails. The bugs were: a logical instead of arithmetic shift, a missing
bypass, a divider one step short, a dropped sign extension, a missing
accumulate, a lost immediate bit, a wrong operand, one loop iteration too many,
a swapped opcode, a fetch that ignores stalls, a memory that ignores its enable
or byte enables, and a missing kill on redirect.

The design has been simulated but not synthesised to an FPGA. Timing at the
intended 100 MHz is therefore not shown. The single-cycle 32×32 multiply in the
mac and fusedmac path, and the three-port register write, are the likely
critical points.
