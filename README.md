# A single-cycle instruction-set processor for IDEA encryption

IDEA encrypts 64-bit blocks with a 128-bit key. It mixes three operations
on 16-bit words: XOR, addition modulo 2^16 and multiplication modulo
2^16+1, in which the word 0x0000 stands for 2^16. Running these steps on a
general-purpose core is slow. A fixed-function IDEA engine is fast but can do
nothing else. This processor is in between. It is a small MIPS-like core with
a 16-bit datapath and 32-bit instructions, and its instruction set adds the
IDEA operations to the usual arithmetic, logic, shift, branch and memory
instructions:

* modular addition (`addm`);
* modular multiplication (`mulm`);
* additive inverse (`adi`);
* multiplicative inverse (`mui`), for deriving the decryption keys.

Every instruction completes in one clock cycle (CPI = 1), so the clock period
is long. On the other hand, no instruction takes more than one cycle. Key
expansion, encryption and decryption are ordinary programs for this core.

This RTL implements the published architecture at its full published sizes:

* 2^16 x 32-bit instruction memory;
* 2^16 x 16-bit data memory;
* 32 x 16-bit register bank;
* 65,536-entry inverse table.

The testbenches also contain the IDEA programs. The core encrypts the
standard IDEA test vector to the expected ciphertext, decrypts it back, and
processes up to 32 Kbit of data in simulation.

## 1. One instruction, one cycle

The core is a Harvard machine. The PC addresses the instruction memory. The
fields of the instruction drive the register bank, the control unit and, as
immediates, the datapath multiplexers. Every storage element reads
combinationally and writes on the rising clock edge. In one clock period the
combinational path therefore runs through:

1. the instruction fetch;
2. the register read;
3. an operand multiplexer;
4. the ALSU;
5. the data-memory read;
6. the write-back multiplexers.

At the next edge the PC, one register and one memory word are updated
together. There is no pipeline, so there are no hazards, no forwarding and
no stalls.

```
        +----+   +-------------+  instr  +--------------+
  +---->| PC |-->| instruction |-------->| control unit |--> ctrl (14 signals)
  |     +----+   |  memory     |         +--------------+
  |       |      +-------------+
  |       |           | RS, RT, RD, Shift, Offset/Data
  |       |           v
  |       |      +----------+ ReadData1 --[SrcA mux]--+   +------+
  |       |      | register | ReadData2 --[SrcB mux]--+-->| ALSU |--> ALSUResult
  |       |      |  bank    |                             +------+      |
  |       |      +----------+<-- WriteData                   | zero      | address
  |       |           ^                                      v           v
  |   +---------+     |      [JumpAndLink]<-[ToRegister]<-------- +-------------+
  +---| next-PC |<----+---------- PC+1          ^           data  | data memory |
      |  unit   |<-- RS, Offset, zero           +------------------+-------------+
      +---------+
```

The multiplexers are:

| Multiplexer | Select 0 | Select 1 |
|---|---|---|
| register write address (`RegisterDestination`) | RT | RD |
| ALSU A (`ALSUSourceA`) | RS data | Offset/Data |
| ALSU B (`ALSUSourceB`) | RT data | Offset/Data |
| memory write data (`DataMemorySource`) | RT data | Offset/Data |
| write-back (`ToRegister`) | memory data | ALSU result |
| link (`JumpAndLink`) | the above | PC+1 |

The ALSU result is always the data-memory address. The shift amount is
always instruction bits 10:7.

The next PC is chosen in three steps:

1. PC+1, or PC+1+Offset for a taken branch (BEQ: zero flag set; BNE: zero
   flag clear);
2. then the absolute Offset/Data for `j` and `jal`;
3. then RS for `jr`.

Branches compare RS and RT with a subtraction that never raises overflow.

### Halt and overflow freeze the PC

The PC has a load enable, `load = NOT (Halt OR Overflow)`. A `hlt`
instruction therefore stops fetch. So does any instruction whose signed
result overflows: ADD/SUB/INC/DEC and their immediates, MUL/MULI and ASHL.
The frozen instruction is fetched again on every cycle, and its register or
memory write is repeated.

The freeze is not latched. Suppose an overflowing instruction overwrites one
of its own operands, for example `add r1,r1,r2`. On a later cycle it may no
longer overflow, and the PC then moves on. Software that must not stop
should use the non-flagging forms: `addm` for address and pointer
arithmetic, the branches, and the logic operations. `halted` on the top
reports Halt OR Overflow. Reset restarts the program at address 0.

## 2. Instruction set

There are two formats, each 32 bits wide:

```
R-type:  | opcode 31:26 | RS 25:21 | RT 20:16 | RD 15:11 | Shift 10:7 | Function 6:0 |
I-type:  | opcode 31:26 | RS 25:21 | RT 20:16 |          Offset/Data 15:0           |
```

R-type instructions (opcode 0) write RD. Their function codes are:

| Function | Instruction | Meaning | ALSU code |
|---|---|---|---|
| 0 | `and` | RS & RT | 18 |
| 1 | `nand` | ~(RS & RT) | 19 |
| 2 | `or` | RS \| RT | 20 |
| 3 | `nor` | ~(RS \| RT) | 21 |
| 4 | `xor` | RS ^ RT | 22 |
| 5 | `xnor` | ~(RS ^ RT) | 23 |
| 6 | `inv` | ~RS | 17 |
| 7 | `shl` | RT << Shift | 10 |
| 8 | `shr` | RT >> Shift, logical | 11 |
| 9 | `ashl` | RT <<< Shift, may overflow | 14 |
| 10 | `ashr` | RT >>> Shift, arithmetic | 15 |
| 11 | `rol` | RT rotated left by Shift | 12 |
| 12 | `ror` | RT rotated right by Shift | 13 |
| 13 | `add` | RS + RT | 0 |
| 14 | `sub` | RS - RT | 2 |
| 15 | `mul` | RS * RT | 6 |
| 16 | `div` | RS / RT | 8 |
| 17 | `mod` | RS % RT | 9 |
| 18 | `inc` | RS + 1 | 3 |
| 19 | `dec` | RS - 1 | 1 |
| 20 | `slt` | RS < RT | 24 |
| 21 | `addm` | (RS + RT) mod 2^16 | 4 |
| 22 | `mulm` | RS (.) RT mod 2^16+1 | 7 |
| 23 | `adi` | (2^16 - RT) mod 2^16 | 5 |
| 24 | `mui` | inverse of RS mod 2^16+1 | 26 |
| 25 | `hlt` | freeze the PC | - |

The I-type opcodes are:

| Opcode | Instruction | Meaning |
|---|---|---|
| 1-6 | `andi` `nandi` `ori` `nori` `xori` `xnori` | RT <- RS op Data |
| 7 | `invi` | RT <- ~Data |
| 8 | `beq` | branch to PC+1+Offset if RS = RT |
| 9 | `bne` | branch to PC+1+Offset if RS != RT |
| 10 | `j` | PC <- Address |
| 11 | `jr` | PC <- RS |
| 12 | `jal` | RT <- PC+1; PC <- Address |
| 13 | `lw` | RT <- M[RS + Offset] |
| 14 | `lwi` | RT <- Data |
| 15 | `sw` | M[RS + Offset] <- RT |
| 16 | `swi` | M[RS] <- Data |
| 17-22 | `addi` `subi` `muli` `divi` `modi` `slti` | RT <- RS op Data |

Notes:

* The 16-bit immediate is used as it is, with no extension. Branch offsets
  and address offsets wrap modulo 2^16, so negative offsets work.
* The register bank has no zero register: all 32 registers are general
  purpose and none is reset.
* Undefined opcodes (23-63) and undefined functions (26-127) do nothing.

The numbering and operand roles follow the published tables. The
following choices are this design's own:

* `lw`/`sw` compute the address with the modulo-2^16 addition (ALSU code 4),
  so addresses above 0x7FFF do not freeze the core.
* `swi` passes RS through the ALSU as the address.
* `slt`/`slti` write 0xFFFF for "less than" and 0x0000 otherwise. This
  follows the description of the ALSU. The instruction table of the
  original description writes 1 instead.

## 3. The ALSU

`rtl/alsu.sv` computes every candidate result in parallel and a 32-way
multiplexer on the 5-bit operation code picks one of them. Codes 27-31 are
reserved and give 0. Numbers are 16-bit two's complement except in the IDEA
operations.

* **Adder for codes 0-3.** One adder adds A to B, 0xFFFF, ~B or 0x0000,
  chosen by the two low code bits. The carry-in is code bit 1. This gives
  A+B, A-1, A-B and A+1 with a single adder. Signed overflow and the carry
  out are flagged.
* **Code 4, `addm`.** The same sum, but it never flags.
* **Code 5, `adi`.** The additive inverse (2^16 - B) & 0xFFFF.
* **Code 6, `mul`.** The low half of the signed 32-bit product. It
  overflows when the product does not fit in 16 signed bits.
* **Code 7, `mulm`.** The IDEA product. Each operand that is 0x0000 becomes
  2^16. The 34-bit product is reduced modulo 65537, and a result of 2^16 is
  written as 0x0000. It never overflows.
* **Codes 8 and 9, `div` and `mod`.** The signed quotient rounds toward
  zero, and the remainder takes the sign of the dividend. Division by zero
  gives quotient 0xFFFF and remainder A. 0x8000 / -1 gives 0x8000 with
  remainder 0. These cases are this design's choice.
* **Codes 10-15, shifts** (`rtl/barrel_shifter.sv`). The core shifts only
  to the left, in four stages of 1, 2, 4 and 8 places, one per bit of the
  shift amount. For right shifts and rotations, the bit order is reversed
  before the core and again after it. The bits that enter at the low end
  are:
  * zeros, for logical shifts;
  * copies of the sign bit, for `ashr`;
  * the bits leaving the top, for rotations.

  The carry is the last bit shifted out; rotations give none. Only `ashl`
  can overflow: a stage overflows when the top k+1 bits of its input (k
  being the stage's shift) are not all equal. Shift amounts are 0-15, so a
  128-bit key rotation has to be built from 16-bit shifts (section 4).
* **Code 24, `slt`.** A-B is formed. The result is "less than" when the
  sign of the difference differs from its overflow.
* **Code 25.** A-B without overflow, used by the branches. Its zero flag
  decides BEQ and BNE.
* **Code 26, `mui`.** The multiplicative inverse of A modulo 65537, read
  from a 65,536-entry table (`rtl/mul_inv_lut.sv`). Entry 0 holds 0, because
  2^16 is -1, which is its own inverse.

The table is a RAM array with a write port. It must be filled once, after
power-up, before the first `mui`. The top brings the port out as
`lut_we/lut_waddr/lut_wdata`. The contents can be generated with the
recurrence:

```
inv[1] = 1
inv[i] = (p - (p div i) * inv[p mod i]) mod p      p = 65537,  i = 2 .. 65536
entry (i mod 65536) = inv[i]
```

or as i^65535 mod 65537. Computing the table at elaboration time was not
used, because a 65,536-step constant loop is impractical for synthesis
front ends.

The flags are `overflow`, `carry`, `sign` (the MSB of the result) and `zero`
(result = 0). Only overflow and zero act on the core. Carry and sign are
brought out of the top for observation.

## 4. IDEA on the processor

The IDEA programs live in the testbench package `tb/idea_tb_pkg.sv` (class
`prog_t`). They are built instruction by instruction with the encoders
`enc_r`/`enc_i`. The data-memory layout, in word addresses, is:

| Address | Contents |
|---|---|
| 0x0100 | 52 encryption subkeys; the host writes the 128-bit key into the first 8 words, most significant word first |
| 0x0200 | 52 decryption subkeys |
| 0x1000 | plaintext, 4 words per block |
| 0x3000 | ciphertext |
| 0x5000 | decrypted text |

**Key expansion (184 instructions).** Each new group of 8 subkeys is the
previous group rotated left by 25 bits. Word w of the new group is:

```
(prev[(w+1) mod 8] << 9) | (prev[(w+2) mod 8] >> 7)
```

That is four instructions per subkey: `shl`, `shr`, `or` and `sw`. The two
groups alternate between registers r1-r8 and r9-r16, so no register moves
are needed.

The original description gives this step as a formula with the indices
(i-1) mod 8 and (i-2) mod 8, illustrated with subkey 10 built from subkeys 1
and 0. That formula numbers the key words from the least significant end.
With the key stored most significant word first, which is how the standard
test vector is written, the indices become (i+1) and (i+2). The program uses
the latter, and with it the processor reproduces the standard ciphertext.

**Decryption keys (140 instructions).** The decryption subkeys follow the
usual IDEA table. For round i, with encryption round r = 10 - i:

* the first and fourth subkeys are `mui` of K1 and K4 of round r;
* the second and third are `adi` of K2 and K3 of round r, exchanged for
  rounds 2-8;
* the fifth and sixth are copied from round 9 - i.

**Encryption and decryption loop.** One loop handles both directions,
depending on which subkey set it reads. Each round takes 20 instructions:

* 6 `lw` of subkeys;
* 4 `mulm`/`addm` for the key mixing;
* the multiply-add structure: 2 `xor`, 2 `mulm` and 2 `addm`;
* 4 `xor` for the outputs.

The swap of the two middle words is done by renaming registers in the
generator, so it costs nothing. After the 8 rounds come the output
transformation (8 instructions) and the 4 stores. Two `addm` advance the
pointers and a `bne` closes the loop, for 179 instructions per block. All
loop arithmetic uses `addm`, so nothing in the programs can trigger the
overflow freeze.

Cycle counts, which equal instruction counts:

| | This program | Published figure (program not published) |
|---|---|---|
| First block, including subkey generation | 2 + 184 + 3 + 179 = 368 | 422 |
| Each further block | 179 | 221 |

At the published FPGA clock of 19.264 MHz, 32 Kbit (512 blocks) takes
91,977 cycles, or 4.77 ms. That count includes the decryption-key
derivation. The published runtime curve shows about 5.8 ms for this size.
The published clock frequency, throughput and FPGA resource figures come
from a vendor flow and are not reproduced here.

## 5. Ports of the top, `idea_asip`

| Port | Dir | Width | Use |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock; synchronous active-high reset (PC <- 0; while `rst` is high the core does not write registers or memory) |
| `im_we`, `im_waddr`, `im_wdata` | in | 1, 16, 32 | load the program |
| `lut_we`, `lut_waddr`, `lut_wdata` | in | 1, 16, 16 | fill the inverse table |
| `dm_host_en`, `dm_host_we`, `dm_host_addr`, `dm_host_wdata` | in | 1, 1, 16, 16 | host access to data memory; while `dm_host_en` is high the host owns the port, so use it during reset or after a halt |
| `dm_host_rdata` | out | 16 | data-memory read data (combinational) |
| `pc`, `instr` | out | 16, 32 | current PC and instruction |
| `halted` | out | 1 | Halt or Overflow this cycle |
| `overflow`, `carry_flag`, `sign_flag`, `branch_taken` | out | 1 | observation |

The processor has no I/O instructions. The three loading ports are
additions of this design. Without them the memories could not be filled.

Typical use:

1. Hold `rst` high.
2. Write the program, the inverse table and the data.
3. Release `rst`.
4. Wait for `halted`.
5. Read the results through the host port.

## 6. Files

| File | Contents |
|---|---|
| `rtl/idea_asip_pkg.sv` | widths, opcode and function enums, ALSU operation enum, control bundle `ctrl_t` |
| `rtl/idea_asip.sv` | top: the datapath multiplexers and the wiring of the blocks |
| `rtl/program_counter.sv` | PC register with load enable and reset |
| `rtl/next_pc_unit.sv` | PC+1 and branch-target adders, branch condition, jump multiplexers |
| `rtl/instruction_memory.sv` | 2^16 x 32 program store, combinational read, load port |
| `rtl/control_unit.sv` | combinational decoder from opcode/function to `ctrl_t` |
| `rtl/register_bank.sv` | 32 x 16 registers, two combinational reads, one write |
| `rtl/alsu.sv` | arithmetic logic shift unit |
| `rtl/barrel_shifter.sv` | bidirectional 16-bit shifter/rotator |
| `rtl/mul_inv_lut.sv` | 65,536-entry inverse table |
| `rtl/data_memory.sv` | 2^16 x 16 data RAM |

The memory sizes are parameters (`ADDR_W`) whose defaults are the published
sizes. Synthesis keeps all four large arrays as memories, about 4.2 Mbit in
total. The control unit's `ToRegister` output uses exactly the published
rule: it is 1 for opcode 0 with function 0-24, and for opcodes 1-7, 14 and
17-22.

## 7. Verification and simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`, and each has a cycle watchdog.

* `tb_alsu`: all 32 operation codes on edge and random operands, against an
  integer model. It also checks hand-worked IDEA values, such as
  3 (.) 0x5556 = 1 and inverse(2) = 0x8001.
* `tb_barrel_shifter`: all six shift kinds and all 16 amounts, checking
  result, carry and overflow.
* `tb_mul_inv_lut`: fills the table with the recurrence, then checks
  x * table[x] = 1 mod 65537 for all 65,536 entries.
* `tb_control_unit`: every opcode/function pair, against a table written
  from the instruction definitions.
* `tb_register_bank`, `tb_instruction_memory`, `tb_data_memory`,
  `tb_program_counter` and `tb_next_pc_unit`: random traffic against models.
* `tb_idea_asip`, end to end at full size, in three parts:
  1. The standard IDEA test vector: key 0001 0002 ... 0008 and plaintext
     0000 0001 0002 0003 must give ciphertext 11FB ED2B 0198 6DE5. All 104
     subkeys are compared with a reference model. Decryption must return
     the plaintext. The run must take exactly one cycle per executed
     instruction.
  2. 400 random programs, run in lockstep with an instruction-set simulator
     (`iss_t` in the package). PC and all registers are compared every cycle
     and the touched memory after each program. The programs cover every
     instruction, forward branches and jumps, `jal`/`jr`, loads and stores,
     and arithmetic that overflows.
  3. A coverage check: the testbench fails if any instruction, a taken and
     an untaken branch, a halt, or an overflow freeze from addition,
     multiplication or ASHL never happened.
* `tb_idea_workload`: encrypts and decrypts 64, 128, 256, 512 bits and 1K to
  32K bits of random data. Every word is checked against the reference
  cipher, and the cycle count against the instruction count.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_idea_asip rtl/idea_asip_pkg.sv tb/idea_tb_pkg.sv tb/tb_idea_asip.sv
./obj_dir/Vtb_idea_asip
```

Replace `tb_idea_asip` with the name of another testbench to run that one.
Every testbench finishes in well under a second of simulation time on a
desktop machine. Most of the time goes on filling the 65,536-entry table
and the memories through their ports.

## 8. Where this RTL departs from, or goes beyond, the published description

* **Added for use:** the program-load, table-fill and host data-memory
  ports; write blocking during reset; and the observation outputs.
* **IDEA multiplication** handles 0x0000 as 2^16 on its inputs. The
  published ALSU drawing shows a plain 16-bit multiplier followed by a
  reduction modulo 2^16+1, which alone would not. The IDEA definition
  requires the zero handling.
* **`slt` result:** 0xFFFF rather than 1 (see section 2).
* **Division** truncates toward zero. The description says both that the
  fractional part is discarded and that the result is the floor, and these
  differ for negative quotients. The behaviour for a zero divisor is this
  design's choice.
* **Address arithmetic** of `lw`/`sw` uses the modulo-2^16 addition. The
  description does not say which ALSU operation these instructions use.
* **Reset:** the PC resets synchronously to 0. The registers and memories
  are not reset.
* **Overflow freeze:** not latched (section 1), exactly as drawn.
* **Key expansion:** the word order differs from the published formula, as
  explained in section 4. This is software, not hardware.
* **Cycle counts** differ from the published figures because the published
  program is not available.
* **Not covered:** timing, area and the FPGA results. Nothing here has been
  synthesised to a device.
