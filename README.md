# A micro-decode stage for a RISC-V core

A RISC-V core executes only the instructions it was built with. The micro-decoder
described here adds CISC-style macro-instructions to an in-order, 64-bit
CVA6-class core. A macro-instruction is one instruction word that the pipeline
expands into a sequence of ordinary operations. The sequences sit in a small
memory rather than in gates, so they can be changed after the chip is built.
One macro-instruction can stand for a recurring code pattern (smaller
binaries), hide what a program does (obfuscation), or change how a given
computation is carried out.

The expansion has its own pipeline stage between the decoder and the issue
stage. The stage therefore sees fully decoded instructions, emits entries in
the issue stage's own format, and keeps the decoder's critical path as it was.
Working in this decoded domain also lets micro-instructions use five
temporary registers. The register file holds these next to x0..x31, and the
instruction set cannot name them, so a sequence can keep intermediate values
without disturbing any architectural register.

This RTL covers the parts the micro-decoder adds to the core. The stock core
(frontend, decoder, renaming and scoreboard, execution units, commit) is not
included: it connects through the top-level ports.

## Where it sits

```
 Frontend -> ID (re-aligner, compressed decoder, decoder + macro_detect)
          -> SECV stage: udec_fsm <-> ucode_mem
                         udec_fsm  -> fwft_fifo (2 x 364 bit)
          -> Issue (renaming, scoreboard, operand read <-> regfile_ext: 32 GPR + 5)
          -> EX -> Commit
```

| file | role |
|---|---|
| `rtl/udec_pkg.sv` | issue-entry layout, micro-instruction layout, codes, register mapping |
| `rtl/macro_detect.sv` | added to the decoder: recognises a macro-instruction and gives its index |
| `rtl/udec_fsm.sv` | bypass / micro-decode state machine and address counter |
| `rtl/ucode_mem.sv` | sequence memory, P x N_P words of 32 bits, with an update port |
| `rtl/fwft_fifo.sv` | depth-2 first-word-fall-through FIFO toward issue |
| `rtl/secv_stage.sv` | the stage: state machine + memory + FIFO |
| `rtl/regfile_ext.sv` | integer register file with five extra temporaries |
| `rtl/udec_top.sv` | the three added parts wired together; ports toward the rest of the core |
| `rtl/ucode_sbox.hex` | reset contents of sequence 0 (18 words, below) |

## The micro-instruction word

Each word of the sequence memory is one operation, already in the core's
decoded form: a functional unit and an operation code, just as the issue stage
receives them. No second decoder is needed.

| bits | field | meaning |
|---|---|---|
| 31:28 | `fu` | functional unit, core numbering (ALU = `0011`) |
| 27:20 | `op` | operation, core numbering (XORL 4, ORL 5, ANDL 6, SRLW 10, SLLW 11) |
| 19:17 | `rd` | register code of the destination |
| 16:14 | `rs1` | register code of source 1 |
| 13:11 | `rs2` | register code of source 2 |
| 10:1 | `imm` | 10-bit immediate, sign-extended |
| 0 | `skip` | 1: more words follow; 0: this is the last word |

Register codes are relative to the macro-instruction being expanded:

| code | register |
|---|---|
| 000..100 | temporaries t1..t5 (register-file entries 32..36) |
| 101 | the macro-instruction's `rd` |
| 110 | the macro-instruction's `rs1` |
| 111 | the macro-instruction's `rs2` |

A sequence is therefore independent of the registers its caller uses. The
32-bit word has no spare bit to say "register or immediate". The second
operand is the immediate when `imm` is non-zero and `rs2` otherwise. As a
result, a register operation with a zero immediate and an immediate operation
with a non-zero immediate can both be written, but an immediate of 0 cannot.

Each injected entry takes its `fu`, `op`, registers and immediate from the
word. It takes its program counter, compressed flag and (empty) exception
record from the macro-instruction, so any trap inside a sequence points at the
macro-instruction.

## The sequence memory

`ucode_mem` holds P sequences of N_P words (defaults 64 and 32). Sequence `idx`
lives at addresses `idx*N_P .. idx*N_P + N_P - 1`, so its base address is a
multiplication (a shift for the default). At 64 x 32 x 32 bits the memory is
64 Kbit. It reads synchronously, one word per clock, which is the form an FPGA
block RAM or an SRAM macro takes.

At reset every word is zero except sequence 0, which is loaded from
`rtl/ucode_sbox.hex`. A write port (`ucode_we_i`, `ucode_waddr_i`,
`ucode_wdata_i`) replaces any word at run time.

### Example: sequence 0, the AES S-box affine transform

Sequence 0 computes `rd = (b ^ rotl8(b,1) ^ rotl8(b,2) ^ rotl8(b,3) ^ rotl8(b,4) ^ 0x63) & 0xff`
for `b = rs1`, which is the affine step of the AES S-box. Each 8-bit rotation
is a right shift, a left shift and an OR. Bits above bit 7 are left in place
until the final AND.

| # | operation | word |
|---|---|---|
| 0-3 | `srliw t2,rs1,7; slliw t3,rs1,1; or t2,t2,t3; xor t1,rs1,t2` | `30a3800f 30b58003 30525001 30418801` |
| 4-7 | the same with shifts 6/2, then `xor t1,t1,t2` | `30a3800d 30b58005 30525001 30400801` |
| 8-11 | shifts 5/3 | `30a3800b 30b58007 30525001 30400801` |
| 12-15 | shifts 4/4 | `30a38009 30b58009 30525001 30400801` |
| 16 | `xori t1,t1,99` | `304000c7` |
| 17 | `andi rd,t1,255` (skip = 0, last) | `306a01fe` |

## The state machine and its timing

`udec_fsm` has two states.

* **Bypass.** The stage acts as a pipeline register. A decoded instruction is
  captured and, in the next cycle, written into the FIFO unchanged. A new
  instruction can be captured in the same cycle, so the stage passes one
  instruction per clock.
* **Micro-decode.** It is entered when the captured instruction is a
  macro-instruction. In that same cycle the memory address is set to
  `idx*N_P`. Each following cycle in which the FIFO accepts, the word on the
  memory output is turned into an issue entry and written, and the address
  moves to the next word. The state returns to bypass after the word with
  `skip = 0`, or after N_P words if no such word comes. The decoder may hand
  over the next instruction in that last cycle.

The stage accepts nothing from the decoder while a sequence runs.
`udec_o` marks the micro-decode state and `seq_end_o` pulses with the last word.

Cycle counts, with the issue side never stalling:

* An ordinary instruction accepted at clock edge *c* is visible to issue after
  edge *c*+1. It takes two cycles through the stage: one in the stage
  register, one in the FIFO.
* A macro-instruction accepted at edge *c* has its first micro-instruction
  visible after edge *c*+1. A sequence of *k* words follows one per cycle, in
  *k* consecutive cycles (18 for the S-box sequence).

The FIFO holds two entries. If issue stops acknowledging, the state machine
holds its current word and stops taking instructions from the decoder. A
flush (`flush_i`, after a misprediction or an exception) empties the FIFO,
drops the captured instruction and abandons a running sequence. The frontend
then fetches the macro-instruction again and the sequence restarts from its
first word. Temporaries written before the flush are overwritten when the
sequence runs again.

## The FIFO and the issue interface

Entries toward issue are 364 bits wide (`issue_entry_t` in `udec_pkg`). The
layout follows the CVA6 scoreboard entry, 362 bits:

* pc, 64 bits
* transaction id, 3 bits
* functional unit, 4 bits
* operation, 8 bits
* rs1, rs2 and rd, 6 bits each
* result/immediate, 64 bits
* four operand flags
* exception record, 129 bits
* branch-prediction record, 67 bits
* compressed flag, 1 bit

A valid bit and a control-flow flag bring the total to 364.

The FIFO is first-word-fall-through: the oldest entry is always on
`issue_entry_o` while `issue_valid_o` is high, and `issue_ack_i` takes it. An
assertion checks that issue never acknowledges an empty FIFO.

## Temporaries in the register file

`regfile_ext` has 37 64-bit registers: x0..x31 and t1..t5 at addresses 32..36.
The core already carries 6-bit register addresses, so the temporaries need no
wider datapath. Decoded RISC-V instructions only reach addresses 0..31, so
only micro-instructions can read or write 32..36.

Other details of the register file:

* x0 reads as zero.
* There are two asynchronous read ports and two write ports.
* If both write ports hit the same register, port 1 wins.
* All registers reset to zero.

The issue stage's scoreboard must track registers 32..36 like any other
destination, because consecutive micro-instructions depend on each other
through them. That logic is part of the stock core and is not included here.

## Recognising a macro-instruction

`macro_detect` sits on the decoder output. It watches the 32-bit instruction
word and recognises a macro-instruction in the RISC-V custom-0 opcode
(`0001011`) with R-type fields:

* funct3 is `000`.
* `idx` is funct7, which must be below P.
* rd, rs1 and rs2 are in their usual positions.

A stock decoder reports such a word as an illegal instruction. `macro_detect`
clears that report and fills in the register fields. Words with a fetch-side
exception, and compressed instructions, are never treated as
macro-instructions.

## Parameters

| parameter | default | where |
|---|---|---|
| `P` | 64 | number of macro-instructions (sequences); 2 and 32 are the smaller configurations evaluated for FPGA cost |
| `N_P` | 32 | words per sequence |
| `M` | 32 | bits per word (fixed by the word layout) |
| `FIFO_DEPTH` | 2 | FIFO entries |
| `NR_READ`, `NR_WRITE` | 2, 2 | register-file ports |
| `INIT_FILE` | `rtl/ucode_sbox.hex` | reset contents of the sequence memory, path relative to the directory holding `rtl/` |

## What follows the published design and what is this design's own

The following come from the published description:

* The position of the stage between decode and issue.
* The three parts of the stage: state machine, memory and FIFO.
* The two modes and the exit on "32 words or skip".
* Base address `idx*N`, and one micro-instruction per cycle.
* The micro-instruction field layout and bit positions, the codes of t1, t2,
  t3, rd and rs1, and the fu/op codes of the S-box sequence.
* The five extra registers.
* The FIFO's depth of 2, its width of 364 bits and its first-word-fall-through
  type.
* The memory size `P x N x 32` bits and the S-box example.

The following are this design's own choices:

* **Skip polarity.** The published text calls `skip` the marker of the last
  word. Its worked example, however, sets `skip = 1` on every word but the
  last. The RTL follows the example: the word with `skip = 0` is the last one
  issued.
* **Codes of t4, t5 and rs2** (`011`, `100`, `111`). The example uses no such
  code.
* **Immediate-or-register rule** (non-zero immediate) and sign extension.
* **Macro-instruction encoding** (custom-0, index in funct7).
* **Synchronous memory read and the update write port.** The published design
  calls the memory a ROM but argues for it by the ability to update
  micro-code.
* **Pipeline-register behaviour, handshakes, flush, and the fields an injected
  entry inherits from its macro-instruction.**
* **The exact field list of the 364-bit entry.** Only the total is published;
  the fields are taken from the CVA6 scoreboard entry.
* **Register-file port counts, reset and write priority.**
* **Meaning of the 2 / 32 / 64 configurations.** They are read as numbers of
  macro-instructions of 32 words each. That reading fits the block-RAM counts
  reported for them, but the published text also calls them numbers of
  micro-instructions.

Reported results that depend on the whole core cannot be reproduced with
these blocks alone: execution times, the +0.3 % overhead on programs that do
not use the unit, and FPGA resource counts.

## Simulation

Every block has a self-checking testbench in `tb/`. Each one prints a line
`TB_RESULT checks=N failures=M` and stops on its own, with a watchdog as a
backstop. `tb/udec_tb_pkg.sv` holds reference models that are independent of
the RTL:

* the ALU operations;
* the affine formula;
* micro-word packing done field by field;
* builders for decoder entries.

| testbench | what it checks |
|---|---|
| `tb_fwft_fifo` | order, fall-through timing, full at two entries, flush, random traffic against a queue model |
| `tb_ucode_mem` | reset contents (the 18 S-box words, zeros elsewhere) at full size, one-cycle read latency, random updates |
| `tb_macro_detect` | random words: flag, index, registers, exception handling |
| `tb_regfile_ext` | random two-port traffic against a model, x0, temporaries, unused addresses, write priority |
| `tb_udec_fsm` | expansion of random sequences against the testbench's own expansion, 18 outputs in 18 cycles, 32-word limit, back-pressure, flush |
| `tb_secv_stage` | the same through memory and FIFO; 2-cycle latency; stall on a full FIFO; sequences written through the update port |
| `tb_udec_top` | end to end at default size, described below |
| `tb_udec_configs` | the three memory sizes P = 2, 32, 64 side by side, each running the S-box sequence and its highest-numbered sequence |

`tb_udec_top` runs the design end to end at the default size. The testbench
stands in for the decoder and for an in-order issue/execute/commit that stalls
at random. The program computes the S-box affine value of all 256 bytes with
the macro-instruction, checking every architectural register write in order.
It also does the following:

* runs a 32-word sequence loaded at run time, which ends by the length limit;
* flushes one sequence midway and runs it again;
* checks the final x0..x31;
* requires each mechanism to occur at least once: bypass, micro-decode, end
  by skip, end by limit, stall on a full FIFO, update, flush, and temporary
  writes.

To run a testbench with Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/udec_pkg.sv tb/udec_tb_pkg.sv tb/tb_udec_top.sv --top-module tb_udec_top -o sim
./obj_dir/sim
```

Replace `tb_udec_top` with any other testbench name. Every testbench finishes
in well under a second.

## Changing the micro-code

To add a macro-instruction:

1. Pick a free index below P.
2. Write its words at `idx*N_P ...` through the update port, or add them to
   the hex file at those addresses.
3. End the sequence with a word whose `skip` bit is 0. Without one, the
   sequence ends after N_P words.
4. Use the temporaries for intermediate values. Write the macro-instruction's
   `rd` last, so a flush midway leaves the architectural state untouched.

The core's issue stage must support every `fu`/`op` pair used.
