# CAHP-Ruby: a five-stage pipelined processor meant to be run under TFHE

## The idea

A client who wants a program run on someone else's machine without showing
that machine the program, its inputs or its outputs can encrypt all three
with a fully homomorphic encryption scheme such as TFHE. TFHE evaluates
Boolean gates directly on encrypted bits. The Virtual Secure Platform (VSP)
makes this general by encrypting a *processor's* state instead of a
specific function. The server holds an encrypted ROM (the program), an
encrypted RAM (its data) and the encrypted registers. It evaluates the
processor's combinational logic once per clock cycle, gate by gate, on
ciphertexts. It never learns which instruction ran, which branch was taken
or which address was accessed, because every multiplexer picks an output
without the server seeing its select signal.

That changes what counts as a good processor. Each gate costs milliseconds,
not picoseconds. Gates on the same level can run in parallel on many cores
or GPUs, so the figure that matters is the depth of the logic between
registers together with the total gate count. A pipeline cuts that depth.
Memory cannot be addressed in the usual way, since the address is
encrypted. So every read is a tree of multiplexers over the whole memory,
and every write rewrites every word.

This repository holds the **plaintext** circuit of that processor,
CAHP-Ruby, in synthesizable SystemVerilog. It has:

* a 16-bit datapath with sixteen 16-bit registers;
* 16- and 24-bit instructions packed without padding into a read-only
  instruction memory (ROM);
* a separate data RAM;
* five stages: IF, ID, Ex, Mem and WB;
* ROM and RAM built out of multiplexer trees, which is how the encrypted
  version builds them from CMUX gates.

Each wire here is one bit. In the encrypted platform the same wire carries
a ciphertext. The encryption layer itself is not part of this RTL; see
*What is not here* below.

Default sizes: 512-byte ROM, and RAM of 2^8 words of 16 bits (512 bytes).

## Block map

```
              +-----------------------------------------------+
              |                     cahp_ruby                 |
  rom_load -> | rom ---32b--> if_stage --IF/ID--> id_stage    |
              |                  ^                   | ^      |
              |                  |        main_register (16x16)|
              |       redirect / target              |        |
              |                  |                 ID/Ex      |
              |         branch_controller <-flags- alu        |
              |                                     |         |
              |                                  Ex/Mem       |
              |                                     |         |
  host_ram -> |        cmux_ram <---word---- mem_controller    |
              |  (read unit, control unit,           | write back
              |   write unit of write bars)          +-> main_register
              +-----------------------------------------------+
```

| file | role |
|---|---|
| `rtl/vsp_pkg.sv` | types, opcodes, pipeline register structs |
| `rtl/cmux_tree.sv` | binary 2:1-multiplexer tree (shared by ROM and RAM read) |
| `rtl/rom.sv` | instruction ROM: 32-bit blocks read through a mux tree |
| `rtl/ram_read_unit.sv` | RAM read: one mux tree per data bit |
| `rtl/ram_control_unit.sv` | picks read or write data per bit by the write flag |
| `rtl/ram_write_bar.sv` | one RAM bit: chain of V muxes matching the address |
| `rtl/ram_write_unit.sv` | W x 2^V write bars: the next RAM contents |
| `rtl/cmux_ram.sv` | one-cycle single-port RAM built from the three units |
| `rtl/if_stage.sv` | PC, PC mux, instruction cache, 16/24-bit aligner |
| `rtl/id_stage.sv` | decoder, hazard stall, bypass, termination flag |
| `rtl/main_register.sv` | 16 x 16-bit register file, x0 reads zero |
| `rtl/alu.sv` | ALU with eq / lt / ltu comparison flags |
| `rtl/branch_controller.sv` | taken decision and target address |
| `rtl/mem_controller.sv` | byte addressing, byte store merge, load extension |
| `rtl/pipe_reg.sv` | pipeline register with hold and clear |
| `rtl/cahp_ruby.sv` | the top level |

## The CMUX memory

This is the least conventional part of the design, and it is also where
most of the gates are.

### Why multiplexer trees

In TFHE the cheapest operation that depends on an encrypted bit is the
CMUX. It is a 2:1 multiplexer whose select input is a ciphertext. It is
cheap because it needs no bootstrapping (noise refresh), only noise
growth. The memory is therefore designed so that every access is a chain
of CMUXes, and the chain is refreshed once at the end. In plaintext this
becomes plain 2:1 muxes, and that is exactly what the RTL contains.

### Read unit (`ram_read_unit`)

The RAM holds 2^V words of W bits. The state is kept bit-sliced:
`mem[i][a]` is bit *i* of word *a*. For each bit position *i*, a full
binary tree of 2^V - 1 muxes selects `mem[i][addr]`. Address bit 0 drives
the leaf level and bit V-1 the root. At V=8, W=16 that is
16 x 255 = 4080 muxes.

Reads are combinational. They return the contents stored at the last
clock edge, which is the "previous-cycle data".

### Control unit (`ram_control_unit`)

Each bit has one mux whose select is the write flag. Input 0 is the bit
just read and input 1 is the write-data bit. The result is called the
*controlled data*. If the flag is 0 it equals what is already at the
address, so writing it back changes nothing. The read bit also goes on to
the processor. In TFHE a sample-extraction and key-switching step sits
between the two. It only converts the ciphertext form and has no
plaintext function.

### Write unit (`ram_write_unit`, `ram_write_bar`)

Every bit of the RAM has a *write bar*: a chain of V muxes for the
constant address A of that bit.

* Stage 0 chooses between the previous bit (input 0) and the controlled
  bit (input 1). Its select is "address bit 0 equals bit 0 of A".
* Stage k chooses between the previous bit and the output of stage k-1.
  Its select is "address bit k equals bit k of A".

The controlled data gets through only when all V address bits match.
Everywhere else the old bit is kept.

The comparison with a constant needs no gate. It is either the address
bit or its inverse, and under encryption the inverse is a cheap
ciphertext manipulation, not a bootstrapped gate. The write unit
therefore has W x 2^V x V muxes: 32,768 at the default size.

Together the three units rewrite the whole RAM every cycle:

```
next[i][a] = (addr == a) ? (wflag ? wdata[i] : mem[i][a]) : mem[i][a]
```

`cmux_ram` registers that result. It also adds a synchronous clear used
by the host before loading.

The RAM is single-port and does one access per cycle. The read and the
write share an address, and the read shows the contents from before the
write.

### ROM (`rom`)

The ROM uses the same kind of tree. It holds
ROM_BYTES/4 blocks of 32 bits, and a 32-bit-wide mux tree picks one block
by the block address. Under encryption its contents are a lookup table
that the client supplies. Here the table is loaded one block per clock
edge through a host write port.

## Instruction fetch and the alignment cache

Instructions are 2 or 3 bytes long and packed back to back. The ROM only
returns aligned 4-byte blocks, so an instruction can begin in one block
and end in the next. IF keeps a 32-bit *instruction cache* that holds a
previous ROM output. Any instruction that starts in the cached block is
complete within the 64 bits {ROM output, cache}.

How the ROM address is chosen is this design's own scheme. Let `blk` be
the PC's block.

* **Hit** (cache holds `blk`): the ROM reads block `blk+1`. The
  instruction is cut from the 64-bit window starting at byte `pc[1:0]`.
  When the next PC moves into block `blk+1`, the cache takes over the
  current ROM output. Straight-line code therefore hits on every cycle,
  and IF issues one instruction per cycle.
* **Miss** (after reset or a jump into another block): the ROM reads
  `blk`, and the cache is loaded with it.
  * If the instruction fits inside that block, it issues at once.
  * If not, it is a 24-bit instruction at offset 2 or 3, or a 16-bit one
    at offset 3. IF then issues nothing for one cycle (a *fetch bubble*).
    The instruction issues on the next cycle, which is a hit.

Length is decided by bit 0 of the first byte: 1 means 24 bits, 0 means
16 bits. The PC multiplexer picks one of three values:

* the branch target, when Ex redirects;
* the current PC, on a decode stall or a fetch bubble;
* PC + 2 or PC + 3 otherwise.

## Pipeline, hazards and termination

Three pipeline registers separate the stages: IF/ID, ID/Ex and Ex/Mem.
Write-back has no register of its own. The value leaving Mem (ALU result
or load data) is written into the register file at the end of the Mem
cycle. An instruction therefore occupies IF, ID, Ex and Mem/WB in four
consecutive cycles.

All hazard handling is this design's own:

* **Bypass.** The register file takes the Mem value only at the clock
  edge. Decode therefore compares its sources with the Mem destination
  and uses the Mem value directly when they match.
* **Stall.** If a source is the destination of the instruction now in Ex,
  its value does not exist yet. This covers loads, because the RAM is read
  in Mem. Decode then holds IF/ID and the PC and sends a bubble into
  ID/Ex for one cycle. After that the producer is in Mem, and the bypass
  delivers the value.
* **Branches and jumps** are resolved in Ex. The ALU compares the two
  registers (a subtraction gives eq, lt and ltu). The branch controller
  turns the condition and the flags into *taken*, and computes
  `target = base + offset`. The base is the PC for JAL, C.J and branches,
  and a register for JALR and C.JR. A taken branch flushes IF/ID and ID/Ex
  and redirects the PC, which costs two bubbles. Nothing is predicted:
  fetch always continues sequentially.
* **Termination.** The compiler's convention for "program done" is a
  jump to itself. Decode sets a sticky `finished` flag when it sees JAL
  or C.J with offset 0, as long as that instruction is not being flushed.
  The client reads this flag to learn whether the encrypted run has ended.

Measured cost on the test programs (default build):

* A straight-line program of N instructions followed by the end jump
  raises `finished` on cycle N+2 after reset is released. With N = 5 this
  is 7 cycles.
* A back-to-back dependence adds one cycle.
* A taken branch adds two cycles.

## Instruction set encoding

The processor follows the CAHPv3 instruction set in its general shape:

* 16-bit datapath, sixteen registers;
* mixed 24/16-bit instructions;
* loads and stores of words and bytes;
* compare-and-branch, jump-and-link.

The exact bit-level encoding below belongs to this design. It is defined
in `rtl/vsp_pkg.sv`, and `tb/cahp_asm_pkg.sv` provides assembler
functions for it. Byte order is little-endian. `inst[7:0]` is the first
byte.

24-bit (first byte odd):

| bits | 23:16 | 19:16 | 15:12 | 11:8 | 7:0 |
|---|---|---|---|---|---|
| register ALU | – | rs2 | rs1 | rd | opcode |
| immediate / load | imm8 | | rs1 | rd | opcode |
| store / branch | imm8 | | rs1 | rs2 | opcode |
| JAL | simm12 = [23:12] | | | rd | opcode |

* Register ALU: ADD SUB AND OR XOR SLL SRL SRA SLT SLTU.
* Immediate: ADDI SLTI SLTIU ANDI ORI XORI SLLI SRLI SRAI LUI.
* Loads: LW LB LBU. Stores: SW SB.
* Branches: BEQ BNE BLT BGE BLTU BGEU. Jumps: JAL JALR (link = PC+3).
* Immediates are sign-extended, except those of ANDI, ORI, XORI and the
  shifts, which are zero-extended.
* LUI loads `imm8 << 8`.
* Branch and JAL offsets count bytes from the instruction's own address.

16-bit (first byte even): `[3:0]` opcode, `[7:4]` rd, `[11:8]` rs,
`[15:8]` imm8.

* C.MV, C.ADD, C.SUB, C.AND: `rd = rd op rs` (C.MV: `rd = rs`).
* C.LI: `rd = simm8`. C.ADDI: `rd += simm8`.
* C.J: jump by simm12 `[15:4]`.
* C.JR: jump to the address in rd.

Register 0 always reads as zero. Undefined opcodes do nothing.

## Memory access stage

The RAM is word-addressed and the processor is byte-addressed. The memory
controller (`mem_controller`) does three things:

* **Addressing.** It takes the word address from bits V:1 of the byte
  address.
* **Loads.** It picks the high or low byte for LB/LBU and sign- or
  zero-extends it.
* **Byte stores.** The RAM's single port reads and writes the same word in
  the same cycle. SB therefore merges the new byte into the word being
  read, and the merged word is written back in the same cycle. No
  read-modify-write pipeline is needed.

## Host interface of the top

`cahp_ruby` has plain ports for a host that plays the client's part:

* While `rst` is high the host owns the RAM port (`host_ram_we/addr/wdata/rdata`)
  and may write ROM blocks (`rom_load_we/addr/data`). `ram_clear` clears the RAM.
* When `rst` falls, the processor starts at address 0 with all registers 0.
* `finished` is the termination flag. `dbg_reg_addr/data` reads any register.
  After a run the host raises `rst` again and reads the RAM back.

## Simulating

Every block has a self-checking testbench `tb/tb_<block>.sv`. Each one
ends by printing `TB_RESULT checks=N failures=M` and has a watchdog. For
example, to build and run the whole processor at its default size:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/vsp_pkg.sv tb/cahp_asm_pkg.sv tb/tb_cahp_ruby.sv --top-module tb_cahp_ruby
./obj_dir/Vtb_cahp_ruby
```

Other blocks are built the same way with their own `tb_` file.

`tb_cahp_ruby` runs the following at the default parameters (under a
second of simulation):

* cycle-exact checks of the straight-line, stall and branch-flush timing;
* Fibonacci for n = 5 and n = 12;
* the Hamming distance between 0x10101010 and 0xdeadbeef. It uses a
  JAL/C.JR subroutine and byte loads and stores; the result is 24;
* a small Brainf\*ck interpreter running `++++[>++++++++++<-]>++` from
  RAM. It leaves 42 in the tape cell.

It counts how often the pipeline stalled, bypassed, flushed, took a fetch
bubble, stored a byte and terminated, and it fails if any of them never
happened. The block testbenches compare with reference models written
independently in the testbench. For the RAM that includes the formula for
the next contents given above, and the mux counts of the read and write
units.

To change sizes, set `ROM_BYTES` (a power of two, in bytes), `V` (RAM
address bits, in words) and `W` on `cahp_ruby`. The processor datapath is
fixed at 16 bits, so W must stay 16 in the top. ROM_BYTES = 1024 with
V = 9 gives the larger 1 KiB ROM and RAM setting. `tb/tb_cahp_ruby_1k.sv`
runs that build: a program jumps above ROM byte 512 and reads and writes
RAM words above 255. Decoys planted at the wrapped addresses catch any
aliasing, and the run must take exactly 12 cycles.

## Where this RTL departs from the original design, and what is not here

* **No encryption layer.** The encrypted platform adds three steps that
  refresh or convert ciphertexts and do not change the bit values:
  bootstrapping after the memory CMUX chains, sample extraction with
  identity key switching after the read unit, and the circuit
  bootstrapping that turns the address bits into the CMUX select form.
  Here each of them is a wire. The same holds for the horizontal and
  vertical packing that makes the encrypted ROM lookup cheap.
* **Instruction encoding** is this design's (see above). Real CAHPv3
  binaries will not run unchanged, and the test programs are hand-written
  for it. Their cycle counts are lower than those reported for the
  compiled C versions on the original processor (Fibonacci 54 against
  57 cycles, Hamming distance 295 against 1216, Brainf\*ck 1762 against
  2635). This says nothing about relative speed: the programs differ.
* **Hazard handling** (bypass from Mem, one-cycle stall against Ex, branch
  resolution in Ex with a two-instruction flush) and **the ROM addressing
  of the fetch cache** are this design's own. The original description
  gives the stages and the cache but not these policies. Stall-on-Ex
  keeps the logic depth short, since no ALU output feeds decode.
* **Loading and reading back** go through host ports under reset. In the
  encrypted platform the client instead supplies the encrypted ROM and RAM
  images directly as the circuit's initial state.
* The single-cycle variant without pipeline registers, and the
  gate-count and runtime results of the encrypted evaluation, are not
  reproduced. The only counts checked are the CMUX counts of the RAM read
  and write units (4080 and 32768).

## Lint notes

Verilator reports some unused signals in the top. They are:

* the `fetch_bubble` output of IF and the bypass indication of ID, which
  are kept as observable ports for testbenches;
* the PC bits carried in ID/Ex;
* the upper byte-address bits above the RAM size, which the memory
  controller ignores because the RAM wraps.

None of them is a circuit fault.
