# Wildcat: a three-stage RV32I pipeline

The usual RISC-V pipeline has five stages: IF, ID, EX, MEM, WB. This one has
three, and it is still fully pipelined, with one instruction per cycle.
It merges memory access into the execute stage, and it removes the write-back
stage. This works for two reasons:

* **The load/store address has its own adder, in ID.** Reading the register
  file is fast, so `rs1 + imm` is ready before the end of ID. The data
  memory registers this address at the same edge that moves the instruction
  into EX. The load data therefore comes out of the memory during EX, in
  parallel with the ALU, and EX no longer needs a separate MEM stage.
* **The result is written to the register file straight from EX.** In
  FPGA and ASIC technology both the register file and the scratchpad
  memories are synchronous RAMs, or flip-flops, that register their inputs.
  The write simply lands in those input registers, so no WB stage is needed.

The result is fewer forwarding paths into the ALU. In short pipelines the
ALU and the multiplexers in front of it are the critical path, so fewer paths
help. A load's data is ready in EX, so a dependent instruction right behind
it never stalls: the load-use hazard of the five-stage pipeline is gone. The
remaining costs of the pipeline are two cycles per taken branch or jump, and
a combinational path from the data memory output through the result
multiplexer.

This RTL is a SystemVerilog rendering of the Wildcat 3-stage organisation
published by M. Schoeberl ("Wildcat: Educational RISC-V Microprocessors").
It is written from the published description, not from the original Chisel
sources. Where the description stops, the choices are marked below and in
each file's header comment.

## Pipeline timing

```
cycle        t            t+1                    t+2
IF   imem output = instr  ->  IR, RF read addresses registered
ID                       decode, RF data out,
                         addr = rs1 + imm  ->  dmem address/data/mask registered
EX                                             ALU  ||  dmem read word
                                               result = load ? ext(word) : jump ? pc+4 : alu
                                               -> RF write (registered), result register
```

* **IF.** `next_pc = taken_in_EX ? target : pc + 4` drives the
  instruction memory. The memory's address register plays the role of the
  PC pipeline register. The instruction appears during the next cycle. Its
  `rs1`/`rs2` fields go straight into the register file's read-address
  registers, and the whole word goes into IR.
* **ID.** Decode and immediate generation run on IR. The register file data
  is valid in this cycle. The dedicated adder computes the memory address.
  For a store, the byte mask and the lane-replicated store data are formed
  here, and the memory registers them at the end of ID.
* **EX.** The operand multiplexers, the ALU, the branch decision and the
  branch target all work in this stage. Load data is selected and
  sign- or zero-extended. The result goes to the register file write port
  and into a result register.

## Forwarding, and why each path exists

| consumer, distance to producer | where the value comes from | path |
|---|---|---|
| ALU or branch operand, 1 | result register (end of the producer's EX) | EX mux in front of ALU and branch unit |
| ALU or branch operand, 2 | register file: write and read hit the same register at the same edge | read/write bypass inside `regfile` |
| store data, 1 | combinational EX result (ALU or load data) | mux in ID before the dmem write-data register |
| load/store base address, 1 | combinational EX result | mux in ID before the address adder |
| anything, 3 or more | register file | none |

The last two rows run through the data memory read. A load followed by a
store of the loaded value, or a load followed by a load that uses it as the
base address, therefore takes the path: dmem output, then the extension
logic, then the ID forwarding mux, then the address adder or store lanes,
then the dmem input register. This is a register-to-register path through
two RAM-adjacent stages. It is inherent in putting the address adder in ID
together with memory access in EX.

The address-adder forwarding (row 4) is not drawn in the published
schematic. That schematic feeds the adder straight from the register file.
Without the forwarding, `addi x5, x0, 8; lw x6, 0(x5)` would use a stale
base, so it is added here.

## Branches and flushes

Branch and jump decisions and targets are resolved in EX. The branch unit
has its own target adder: `pc + imm`, or `(rs1 + imm) & ~1` for JALR. When a
transfer is taken, the instructions in IF and ID are squashed and the next
fetch goes to the target. This costs exactly two cycles. If the squashed ID
instruction is a store, its write enable is suppressed in the same cycle,
because the store would otherwise already be registered into the data
memory. There is no branch prediction. Every instruction takes one cycle,
and a taken branch or jump takes three.

The cycle on which an instruction reaches ID after reset is therefore fully
determined. For the k-th executed instruction (counting from 0), after `tb`
taken transfers before it, the cycle after reset release is
`k + 2 + 2 * tb`. The end-to-end testbench checks this equation.

## Register file

32 x 32 bits, two read ports, one write port; x0 reads as 0 and ignores
writes. `RF_FLIPFLOPS` picks one of two builds. Both behave the same at the
ports.

* `RF_FLIPFLOPS = 0` (default), the RAM version. There are two copies of the
  array, one per read port, and each is written by the single write port:
  2 x 1024 = 2048 RAM bits. Each copy reads with a registered output. A read
  and a write to the same register in the same cycle return the new value,
  through a registered bypass.
* `RF_FLIPFLOPS = 1`, the flip-flop version. There is one array of 31
  registers, read combinationally at the registered read addresses.

## Operand-B multiplexer placement

`SRC_B_IN_ID` moves the choice between `rs2` and the immediate:

* `0` (default): the choice is made in EX, after the forwarding multiplexer.
  This is the arrangement of the implementation the published figures were
  measured on.
* `1`: the choice is made in ID, and the ID/EX register already holds the
  immediate. This is the arrangement the design argument proposes, to take
  one multiplexer off the EX path. Forwarding to operand B is then disabled
  whenever operand B is an immediate.

## Modules

| file | role |
|---|---|
| `rtl/wildcat_pkg.sv` | opcodes, ALU operation enum, decoded-instruction struct, store-lane and load-extension functions |
| `rtl/decode.sv` | decoder and immediate generator (ID) |
| `rtl/regfile.sv` | register file, RAM or flip-flop build |
| `rtl/alu.sv` | ALU (EX) |
| `rtl/branch_unit.sv` | branch condition and target adder (EX) |
| `rtl/wildcat_core.sv` | the pipeline: PC, IR, pipeline registers, address adder, forwarding, flush |
| `rtl/imem.sv` | instruction scratchpad, synchronous read, with a load port |
| `rtl/dmem.sv` | data scratchpad, synchronous read, byte-masked write |
| `rtl/wildcat_top.sv` | core plus the two scratchpads |

### Top-level interface (`wildcat_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous, active-high reset |
| `load_we`, `load_addr`, `load_data` | in | 1/32/32 | write one instruction word into the instruction memory (byte address); use while `rst` is high |
| `st_valid`, `st_addr`, `st_mask`, `st_data` | out | 1/32/4/32 | the store the core issues this cycle: byte address, byte lanes, lane-aligned data |

Parameters: `IMEM_WORDS` = 1024 and `DMEM_WORDS` = 1024 (4 KB each),
`RF_FLIPFLOPS` = 0, `SRC_B_IN_ID` = 0. The core also has `RESET_PC` = 0.
After `rst` falls, the first instruction is fetched from `RESET_PC`. The two
memories are separate address spaces: this is a Harvard organisation, and
both spaces start at 0.

## Choices not taken from the published description

* **ISA coverage.** RV32I user-level integer instructions only.
  FENCE, ECALL, EBREAK and CSR instructions execute as no-ops. Unknown
  encodings also execute as no-ops (`illegal` is set in the decoded record,
  but nothing acts on it). There are no traps or interrupts.
* **Misaligned accesses** are not detected, and an access never leaves the
  addressed word. A misaligned store writes the aligned half-word or word
  that contains the address. A misaligned load returns the bytes from the
  address up to the end of the word, zero-filled above them before
  extension.
* **Memory sizes.** The 4 KB scratchpads, the program load port and the store
  observation port belong to this RTL. The original only says that
  scratchpads are attached for testing.
* **Reset** is synchronous. It resets the PC and the valid bits of the
  stages. Register and memory contents are not reset.
* **Branch targets** use their own adder in the branch unit. The schematic
  instead routes the ALU output to the PC logic.
* **Address forwarding** into the ID address adder, as explained above.

The four- and five-stage pipelines, which the original compares against,
are not included.

## Resources

Synthesis (yosys, generic cells) of `wildcat_top` at the defaults gives
about 200 word-level cells and 301 flip-flop bits. Its 67,584 memory bits
are 2 x 32,768 for the two scratchpads plus 2,048 for the register file.
The 2,048 register-file bits match the RAM usage reported for the original
RAM-based 3-stage design on a Cyclone IV. No timing figures are claimed
for this RTL.

## Verification

All testbenches are self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb/alu_tb.sv` | all ten operations on corner values and random operands against a 64-bit reference |
| `tb/decode_tb.sv` | every instruction format with random fields: immediates, register fields, control bits |
| `tb/branch_unit_tb.sv` | six conditions with forced equal and sign-boundary operands; JAL and JALR targets |
| `tb/regfile_tb.sv` | both builds side by side against a shadow model, including same-cycle read/write and x0 |
| `tb/imem_tb.sv`, `tb/dmem_tb.sv` | one-cycle read latency, byte masks, read-old-on-write |
| `tb/wildcat_core_tb.sv` | a hand-written program whose stores and completion cycle are worked out by hand. It covers every forwarding path, load-use without a stall, taken and not-taken branches, JAL, JALR, flushed stores, and byte and half-word accesses. Two cores run side by side: the default one, and one with `RF_FLIPFLOPS = 1` and `SRC_B_IN_ID = 1` |
| `tb/wildcat_top_tb.sv` | end-to-end at the default sizes, described below |
| `tb/wildcat_top_variant_tb.sv` | the same random-program test on the `RF_FLIPFLOPS = 1`, `SRC_B_IN_ID = 1` build |
| `tb/wildcat_sort_tb.sv` | bubble sort of 16 signed words at the default sizes. It covers loops (backward branches) and a load feeding a branch in the next cycle. The sorted copy is checked against the testbench's own sort; the stores and cycle count (for example 886 instructions, 191 taken branches, 1270 cycles) are checked against the instruction-set simulator |

`wildcat_top_tb` generates 12 random programs of about 750 instructions
each. Each program has a register and data initialisation, then a random
body, then an epilogue that stores all registers and a completion flag. The
body mixes ALU operations, loads and stores of every width, changes of the
base register, forward branches, JAL and AUIPC+JALR. Every program first
runs on `rv32i_iss`, an independent instruction-set simulator in
`tb/rv32i_tb_pkg.sv`. The testbench then loads the program through the load
port and compares every store, and the exact completion cycle, against that
run. It also counts how often each mechanism fired, and fails if any never
fired:

* taken-branch flush
* EX forwarding
* register-file bypass
* store-data forwarding
* address forwarding
* load-use without a stall
* a store suppressed by a flush

The instruction encoders in `rv32i_tb_pkg` double as a small assembler for
writing further directed tests.

Simulating with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/wildcat_pkg.sv tb/rv32i_tb_pkg.sv tb/wildcat_top_tb.sv \
    --top-module wildcat_top_tb -o sim
./obj_dir/sim
```

Any other testbench builds the same way; swap in its file and top-module
name. Linting a single module works the same way, with `--lint-only -Wall`
and the module as top. Verilator reports some unused-bit warnings: address
bits above the memory size, and struct fields that a given stage does not
read. These are expected.
