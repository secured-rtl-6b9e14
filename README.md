# SecureD: a dual-core embedded processor against code injection and power analysis

SecureD is built from two identical embedded cores, each with private instruction and data memories. It adds two defences to that base.

* **Code-injection detection.** Every basic block of a program carries a checksum that the compiler works out. At run time the hardware recomputes the checksum as the block executes and compares the two at the block's last instruction. A changed instruction, an injected one, or a jump into the middle of a block gives a mismatch and raises an exception.
* **Power-analysis protection by balancing.** An encryption routine runs on both cores at once. CORE1 runs it on the real data and CORE2 runs the same instruction sequence on complemented data, in the same clock cycles. The data-dependent part of the chip's power draw then adds up to a roughly constant value, so the key no longer shows in the power trace.

These SystemVerilog sources implement everything around the two cores:

* the memories;
* the two checksum checkers;
* the context stacks;
* the CONTROLLER, which switches the cores into and out of balancing and handles interrupts.

The cores themselves are PISA (SimpleScalar's Portable ISA) cores with a six-stage pipeline and no cache. They come from an ASIP generator and are not part of this RTL. `secured_top` brings out their ports, one set per core. A behavioural core model in `tb/` is enough to run whole programs.

## Organisation

```
             +---------------------------- secured_top ----------------------------+
  irq[1:0] ->|                      bal_controller (CONTROLLER)                    |
  int_mask ->|                                                                     |
             |   hold/pc_load/reg_acc   |                     |  hold/pc_load/reg_acc |
             |  reg_stack[0] <--------->|                     |<--------> reg_stack[1]|
             |  bb_checker[0] (hashed,  |                     |  bb_checker[1]        |
             |   incHashed) <-- ret[0] -+                     +- ret[1] -->           |
             |  imem[0]  dmem[0]                                   imem[1]  dmem[1]  |
             +------|-------|-------------------------------------------|-------|----+
                  imab/imdb dmab/dmdb                               imab/imdb dmab/dmdb
                     CORE1 (outside)                                  CORE2 (outside)
```

| module | role |
|---|---|
| `secured_pkg` | widths, opcodes, the 37-register index map, the Table-2 delays, the `retire_t` and `regacc_t` structs |
| `imem` | one core's instruction memory: 65536 x 64-bit, combinational read, plus a load port |
| `dmem` | one core's data memory: 262144 x 32-bit, combinational read, plus a load/inspect port |
| `bb_checker` | `hashedReg` and `incHashedReg` of one core, and the compare done at the end of each block |
| `reg_stack` | LIFO holding saved contexts of one core: 2 frames of 37 words |
| `bal_controller` | the CONTROLLER: sequences switching, endBal, interrupt entry and exit |
| `secured_top` | wires it all together. The register index map is decoded here: 35 and 36 go to the checker, 0-34 to the core |

One clock drives everything. Reset is asynchronous and active low.

## Instructions and their encoding

Instructions are 64-bit words laid out as in SimpleScalar PISA:

* bits [63:48]: a 16-bit annotation;
* bits [47:32]: a 16-bit opcode;
* bits [31:0]: the operand word.

The operand word holds `rs[31:24] rt[23:16] rd[15:8]`, or a 16-bit immediate, or a 26-bit jump target. Instruction addresses (`imab`, the PC) count instructions, not bytes.

| instruction | opcode | effect |
|---|---|---|
| `chk` | 0x00b0 | operand word = checksum of the block that follows; loads `hashedReg`, clears `incHashedReg` |
| `startBal` | 0x00b1 | CORE1 only: ends a block and hands CORE1 to the CONTROLLER for the switch to balancing |
| `endBal` | 0x00b2 | CORE1 only: ends balancing |
| `eint` | 0x00b3 | last instruction of an interrupt routine; it acts as the routine's non-maskable "return" request to the CONTROLLER |
| j, jal, jr, jalr, beq, bne, blez, bgtz, bltz, bgez | 0x0001-0x000a | ordinary control-flow instructions (CFIs) |

The names and roles of chk, startBal and endBal follow the paper. The opcode numbers, the operand layout of chk and the separate `eint` opcode are choices made for this RTL.

## Code-integrity checking

A program is instrumented at compile time:

* it is split into basic blocks;
* each block starts with a `chk` that carries the block's checksum;
* each block ends with a CFI. If a block has none, one is inserted.

`startBal`, `endBal` and `eint` pass control to the CONTROLLER, so they also count as CFIs and may end a block.

The checksum of a block is the XOR, over every instruction after its `chk` up to and including the CFI, of `instr[63:32] ^ instr[31:0]`. This function is this design's choice; the paper does not give one. It catches any single flipped bit and any changed or replaced instruction. It does not catch two instructions swapped within a block.

At run time, for each instruction the core completes (`ret.valid`):

* `chk`: `hashedReg <= operand`, `incHashedReg <= 0`.
* any other instruction: `incHashedReg ^= hash(instr)`.
* a CFI: the updated value is compared with `hashedReg`. A mismatch pulses `ci_violation` for one cycle, in the cycle after the CFI, and sets the sticky `ci_err`. `incHashedReg` is then cleared.

Any jump that lands past a block's `chk` (a control-flow error) compares against the previous block's `hashedReg` and so fails. `check_en` turns the compare off. What the core does on a violation is up to the core; the test model stops.

Constraint on programs: an interrupt routine or the balanced encryption code must begin with its own `chk`. The checker registers of the interrupted code are saved and restored with the rest of the context (below). The interrupted block therefore finishes its checksum correctly after the routine returns.

## Balancing

The encryption code in program A is bracketed like this:

```
        ...            ; a block of A ending with startBal
        startBal
Encrypt:chk  S1        ; first block of the encryption code
        ...
        chk  S3
        endBal         ; ends the last encryption block
next:   chk  S4        ; CORE1's next program
```

The complementary program A-bar is the same instruction sequence, placed in CORE2's instruction memory at `Encrypt + comp_pc_offset`. Its instructions are identical, but its data memory holds the complemented data. It has a `nop` in the slot of `endBal`. Inside the copy, branches should be PC-relative: an absolute jump target would need relocating by the offset, which changes its checksum.

The sequence, counting from the cycle `t` in which CORE1 completes `startBal`:

| cycles | what happens |
|---|---|
| t+1 .. t+6 | both cores held; pipeline flush (6 cycles) |
| t+7 .. t+376 | CORE2's 37 registers are pushed to CORE2's stack, one every 10 cycles |
| t+377 | both PCs are loaded on the same edge: CORE1 with `startBal`'s address + 1, CORE2 with that + `comp_pc_offset`. `switch_flag` is set |
| t+378 .. | both cores run in lock step |

The 37 registers are `r0`-`r31`, HI, LO, PC, `hashedReg` and `incHashedReg`.

When CORE1 completes `endBal` at cycle `u`:

* CORE2 is held. CORE1 goes straight on with its next program.
* From u+1 to u+370, CORE2's registers are popped back in reverse order.
* At u+371 its PC is loaded with the saved value and `switch_flag` is cleared.
* CORE2 resumes at u+372.

Lock step needs both cores to complete the same number of instructions in every cycle. Both are released on the same edge. With no cache, private memories and the same instruction sequence, nothing makes one of them stall alone. The behavioural core model meets this trivially. A real pipelined core meets it when its stalls depend only on the instruction sequence.

## Interrupts

Each core has an external interrupt line `irq[k]`. The CONTROLLER samples it as a level and keeps a request until it serves it. Interrupts do not nest.

Each core also has a mask input `int_mask[k]`. While it is set, an interrupt request of core k stays pending and is served once the mask clears. The switch into balancing is an interrupt to CORE2, so `int_mask[1]` also keeps a pending `startBal` waiting; CORE1 is held meanwhile. `eint` and `endBal` are never masked.

* **Outside balancing.** Only core k is held. It is flushed (6 cycles) and its context pushed (370 cycles). Then its PC is loaded with `IRQ_VECTOR` (1 cycle). The other core is not disturbed.
* **During balancing.** Both cores are held from the same cycle, so the lock step survives. Only core k's context is pushed, and only core k runs the routine; its partner stays held. If the interrupt is for CORE2, CORE2's stack then holds two contexts: its own program and the encryption.
* **Return.** When core k completes `eint`, its context is popped (370 cycles). In the next cycle its PC is reloaded; during balancing the partner's PC is reloaded on the same edge, and both resume together.

Entry therefore takes 377 cycles and return 371, 748 per interrupt. This matches the switching and interrupt-servicing delay the paper reports.

Events that arrive while a sequence is running are kept pending. A core whose `startBal`, `endBal` or `eint` is waiting is held. A `startBal` that arrives while CORE2 is in a routine waits for the routine to end. The pending events are served in this order:

1. `eint`;
2. `endBal`;
3. `startBal`;
4. interrupt of CORE1;
5. interrupt of CORE2.

## Delays

| step | cycles | paper (Table 2) |
|---|---|---|
| store 32 GPRs | 320 | 320 |
| store PC, HI, LO | 30 | 30 |
| store hashed, incHashed | 20 | 20 |
| restore (same three groups) | 370 | 370 |
| flush pipelines | 6 | 6 |
| switch / interrupt call | 1 | 1 |
| exit | 1 | 1 |
| **total** | **748** | **748** |

These delays are parameters: `FLUSH_CYC` and `CPR` (cycles per register) of `bal_controller`, with defaults in `secured_pkg`.

## Connecting a core

A core attached to `secured_top` must provide:

* `imab` and `dmab`/`dm_we`/`dmdb_w`. It reads `imdb` and `dmdb_r` in the same cycle, because the memories read combinationally.
* `ret`: valid, PC and instruction word of the instruction it completes in each cycle. A held core completes none.
* `core_reg_rdata`: the value of register `core_reg_acc.idx` (0-31 GPRs, 32 HI, 33 LO, 34 PC), read combinationally.
* a write of that register when `core_reg_acc.we` is high.
* `hold`: it executes nothing while `hold` is high.
* `pc_load`: it takes `pc_value` as its next PC at the clock edge.

The core must stop fetching by the cycle after it completes `startBal`, `endBal` or `eint`, because `hold` rises then. A pipelined core also has to complete nothing beyond those instructions before the CONTROLLER takes over. The 6 flush cycles allow for a six-stage pipeline to drain.

## Where this RTL departs from the paper or fills gaps

* **Who saves the registers.** The paper's prose says an interrupt routine saves and restores the registers in software, while its delay table counts the same 37-register store and restore for both switching and interrupts. Here the CONTROLLER does both in hardware, at the table's 10 cycles per register, into a dedicated stack per core. The paper's figure draws those stacks beside the CONTROLLER.
* **Order of entry.** The flush comes before the store: the interrupt is taken only once the pipeline is empty. Leaving has no flush. This reproduces the table's single flush.
* **Choices this RTL makes where the paper is silent:**
  * the checksum function;
  * the opcodes;
  * the register index map;
  * `IRQ_VECTOR` (`0x1000` in `secured_top`);
  * the interrupt mask as an input `int_mask[1:0]`, since the paper names no mask register;
  * the memory sizes;
  * the two-frame stack;
  * the event priorities;
  * `switch_flag` meaning "balancing active";
  * only CORE1 may start balancing;
  * the complementary program found by a fixed offset.
* **Not built:**
  * letting the held core run another task during an interrupt, which the paper mentions as an option;
  * the cores themselves.

## Simulating

Each testbench in `tb/` is self-checking and ends by printing `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/secured_pkg.sv tb/pisa_asm_pkg.sv tb/tb_secured_top.sv \
    --top-module tb_secured_top -o sim
./obj_dir/sim
```

| testbench | checks |
|---|---|
| `tb_imem`, `tb_dmem` | contents against a model; port priority |
| `tb_reg_stack` | LIFO order, full/empty, refused overflow/underflow, random traffic |
| `tb_bb_checker` | random intact blocks (no violation), one flipped bit (violation exactly one cycle after the CFI), jumps into a block, disable, save port |
| `tb_bal_controller` | the core and stack are modelled in the testbench; every sequence checked cycle by cycle: hold lengths, push order and spacing, same-edge PC loads, restored values, deferred startBal |
| `tb_secured_top` | whole system at default sizes with two `pisa_core_model`s (see below) |

In `tb_secured_top`, CORE1 runs program A: startBal, a 16-word XOR "encryption", endBal, then a next program. CORE2 runs a 300-iteration loop and holds the complementary copy. CORE2 takes one interrupt during balancing and one after it; CORE1 takes one after. The test then injects an instruction into each core. It checks:

* ciphertexts that are complementary word by word;
* lock step;
* all delays;
* CORE2's loop results surviving two parked contexts;
* both injections detected;
* an interrupt raised while CORE1 masks it waits until the mask clears.

It also counts each mechanism and fails if one never happened.

`tb/pisa_core_model.sv` executes one instruction per cycle from a small PISA subset: nop, addu, addiu, xor, xori, nor, lw, sw, beq, bne, j and the SecureD instructions. It is a stand-in for the real core, so the end-to-end test shows the system logic working. It says nothing about a real six-stage pipeline's behaviour during flush. `tb/pisa_asm_pkg.sv` builds instruction words and computes the reference checksums.

The benchmark programs the paper measures are C programs compiled for PISA: adpcm, blowfish, crc32, AES and DES. They cannot be run on this RTL without a real core.
