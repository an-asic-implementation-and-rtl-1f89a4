# A variable-length instruction front end for a MIPS-style pipeline

Instruction fetch costs a large share of an embedded processor's energy.
Most of it is in the instruction cache and the branch predictor, and every
executed instruction costs at least one cache read. This front end cuts that
cost by letting the compiler store the most frequently executed instructions
in 8- or 16-bit short forms. The choice is made from an execution profile.
A short form has no register numbers or immediate values of its own. It
holds small indexes into argument tables (read-only memories), which store the
register combinations and constants that the profile showed to be common.
A 32-bit cache read (a *chunk*) can then hold up to four instructions, so
fewer reads are needed per executed instruction.

Short forms are expanded back to ordinary 32-bit MIPS instructions in one new
pipeline stage, *depack*, placed between fetch and decode. Decode and all later
stages are unchanged. The RTL here is that front end:

* the modified fetch stage,
* the two-register queue between fetch and depack (the *Depack_Q*),
* the depack stage with its argument tables,
* a small branch prediction block that redirects both stages.

It is written in synthesizable SystemVerilog. The block structure, the
opcode prefixes and the control mechanisms follow the published design, a
VHDL front end synthesized in a 0.18 µm process. Field widths, table
contents, handshakes and the predictor's organisation were not published, so
they are this implementation's own choices. They are marked as such below and
in each file's header.

## Instruction coding

The first bit of an instruction tells its class. A normal instruction starts
with 1 and is 32 bits long. A short instruction starts with 0. The published
coding table gives the prefixes. The argument field widths and the ADDU
prefix were chosen here.

| first byte | instruction | length | register table | immediate |
|---|---|---|---|---|
| `1xxxxxxx` | any 32-bit instruction | 4 | – | – |
| `010RRIII` | LW    | 1 | 4 entries  | 8-entry table |
| `011RRRII` | ADDIU | 1 | 8 entries  | 4-entry table |
| `0010RRII` | SLL   | 1 | 4 entries  | 4 shift amounts |
| `0011RRII` | SW    | 1 | 4 entries  | 4-entry table |
| `0001RRRR` | ADDU  | 1 | 16 entries | – |
| `00000RRR` + 1 byte | BEQ | 2 | 8 entries (shared with BNE) | inline 8-bit offset, sign-extended |
| `00001RRR` + 1 byte | BNE | 2 | 8 entries | inline 8-bit offset |

Notes on the table:

* **Length from five bits.** The length follows from the top five bits of the
  first byte at most. This matters because the length decode is on the
  critical path (see below).
* **ADDU prefix.** The published table prints ADDU with the same prefix as SW
  (`0011`). ADDU uses `0001` here, the only prefix the other six leave free.
* **Table sizes.** The source text describes the ADDIU tables as 16 register
  combinations and 8 immediates. Those need 7 index bits, which do not fit
  in an 8-bit instruction. The text also states that all five of LW, ADDIU,
  SW, SLL and ADDU are 8 bits long, so this design keeps the 8-bit length and
  shrinks the tables. The relation the source describes still holds: LW has
  the larger immediate table, ADDIU the larger register table.
* **Not implemented.** The source mentions further 16- and 24-bit forms that
  need no tables, but gives no encoding for them.

How the depack logic expands each form:

* **32-bit instructions** pass through unchanged.
* **Short forms** become standard MIPS-I words. For example, `010 11 111`
  becomes `lw rt, imm(rs)`: `{rs, rt}` come from register entry 3 of the LW
  table and `imm` from immediate entry 7.
* **BEQ/BNE** keep their 8-bit offset and sign-extend it to 16 bits.

Interpreting a branch offset in a byte-addressed, variable-length program is
left to the execute stage. The testbench uses *target = PC + 2 + offset*,
counted in bytes.

The argument tables sit in `reg_lut_rom` (entries are `{rs, rt, rd}`) and in
`imm_lut_rom` (16-bit values). Each is one ROM, with the tables of all opcode
classes stored back to back; the base address of each class is in `vl_pkg`.
The contents belong to the program's profile. The defaults in `vl_pkg` are
example values. To match a given program, override the `CONTENTS` parameter
of the two ROMs with that program's tables.

## Chunks, the Depack_Q and the read pointer

Fetch has no notion of instructions. The chunk counter `CC` holds the address
of the next 4-byte chunk; it advances by 4 or loads a branch target. Each
chunk goes into register A or register B. Together these form an 8-byte ring
buffer, the Depack_Q. Byte 0 of the ring is `A[31:24]` and byte 7 is `B[7:0]`
(big-endian, chosen here).

The depack stage reads the ring at a 3-bit read pointer `RP`, kept in
register C:

1. Four 8-to-1 byte multiplexers deliver ring bytes RP, RP+1, RP+2 and RP+3,
   taken modulo 8, so an instruction may wrap from B back to A.
2. The depack logic decodes the first byte and returns the length.
3. If all the instruction's bytes are in the queue, `RP` and the byte PC
   both advance by that length. The rebuilt instruction is then written to
   register D, the register that feeds decode.

In the source, the step from the first byte, through the length, to the add
into RP is the critical path. It is also the reason the length must come from
few bits.

The two stages coordinate through one bit. The MSB of `RP`, the *Write Bit*,
tells fetch which register the reader is in. When that bit flips, the
register the reader left is freed. The fetch control FSM then writes the next
chunk into it, in strict alternation A, B, A, B.

* **Fetch stalls** (Fetch Enable low) when the register due next still holds
  unread bytes. It also stalls on a cache miss.
* **Depack stalls** (no write to D) when fewer bytes are present than the
  instruction needs. This happens after a branch, after a miss, and when an
  instruction crosses into a register that is being refilled in that cycle.

The source gives none of the following; this design chose them:

* how fetch learns that a register holds data (the `q_full` lines from the
  fetch FSM to the read control);
* the one-cycle delay before a freed register can be refilled (the Write Bit
  is compared with its value in the previous cycle);
* the byte counting that decides whether an instruction can be depacked.

With no misses or stalls, the first instruction reaches D two cycles after
reset. After that the stage depacks at most one instruction per cycle, and in
practice about 0.8 per cycle on the profiled mix. The bubbles are the
crossings just described.

## Branches

The fetch and depack stages are redirected by one signal, *Branch Control*,
which comes with a byte target address:

* `CC` takes the target's chunk.
* `RP` takes `{0, target[1:0]}`, so the new chunk goes into A and the reader
  starts at the right byte of it.
* The byte PC takes the target.
* Both queue registers are emptied, and any chunk arriving in that cycle is
  dropped.

The target chunk is fetched in the next cycle, so its first instruction
reaches D three cycles after the redirect.

The branch prediction block (`branch_prediction_logic`) is the simplest one
that fits the source's description. The published design treats the
predictor as an existing part and gives no details of it. This block is a
16-entry, direct-mapped branch target buffer with full tags. It is looked up
with the byte PC of the next instruction to depack.

* **Predicted-taken branch.** On a hit, the block asserts Branch Control in
  the cycle in which the depack stage actually writes that branch into D. The
  branch itself goes to decode, marked `pred_taken`. If a branch crosses a
  chunk boundary and its second byte is not yet in the queue, the prediction
  waits. Fetch meanwhile continues in sequence until the branch is complete,
  as the source requires.
* **Misprediction.** A redirect from the execute stage (`ex_redirect`,
  `ex_target`) has priority. It also asserts *Branch Reset*, which empties
  register D, because D then holds a wrong-path instruction.
* **Training.** Resolved branches train the buffer (`ex_update`, `ex_pc`,
  `ex_taken`, `ex_branch_dest`): a taken branch writes its entry, and a
  not-taken branch clears a matching entry.

The source's architecture section instead looks the predictor up once per
fetched chunk, which allows at most one branch per chunk. Its implementation
section feeds the predictor the byte PC, and this design follows the
implementation section.

## Interface of `vl_frontend`

| port | dir | meaning |
|---|---|---|
| `ic_addr[31:0]`, `ic_req` | out | chunk address (word aligned) and Fetch Enable |
| `ic_data[31:0]`, `ic_ready` | in | chunk, valid in the same cycle; `ic_ready = 0` is a miss |
| `d_out` (`vl_pkg::dinstr_t`) | out | register D: `valid`, `instr`, `pc`, `len`, `pred_taken` |
| `dec_stall` | in | decode cannot accept; holds D, RP and PC |
| `ex_redirect`, `ex_target` | in | execute-stage misprediction and the correct address |
| `ex_update`, `ex_pc`, `ex_taken`, `ex_branch_dest` | in | a resolved branch, used to train the predictor |

Parameters: `RESET_PC` (default 0) and `BTB_ENTRIES` (default 16). Neither
was given by the source.

The instruction cache is assumed to answer in the same cycle; a synchronous
SRAM would need a different fetch timing. In the source, CC, A, B and D have gated clocks controlled by their
enables; here these are written as register enables.

## Files

| file | block |
|---|---|
| `rtl/vl_pkg.sv` | encoding constants, table layout, default table contents, `dinstr_t` |
| `rtl/chunk_counter.sv` | CC register, +4 adder, branch mux |
| `rtl/fetch_control_fsm.sv` | queue occupancy, Write Enable 1/2, Fetch Enable |
| `rtl/depack_q.sv` | registers A and B |
| `rtl/byte_select.sv` | the four byte multiplexers |
| `rtl/depack_logic.sv` | length decode, table addressing, instruction rebuild |
| `rtl/reg_lut_rom.sv`, `rtl/imm_lut_rom.sv` | argument tables |
| `rtl/read_control_fsm.sv` | register C (read pointer), byte PC, Read Control |
| `rtl/dp_dec_reg.sv` | register D |
| `rtl/branch_prediction_logic.sv` | branch target buffer and redirect control |
| `rtl/vl_frontend.sv` | top level |

Each module has a self-checking testbench `tb/tb_<module>.sv`.

`tb/tb_vl_frontend.sv` runs the whole front end at its default parameters:

* **The program.** It generates a 4 KiB program whose static instruction mix
  follows the profiled frequencies (LW 10.4 %, ADDIU 4.5 %, SW 2.3 %, SLL
  5.4 %, ADDU 21.9 %, BEQ 4.1 %, BNE 2.0 %, the rest 32-bit).
* **The environment.** It models a cache with bursts of misses and adds
  random decode stalls.
* **Branches.** The testbench acts as the execute stage. It resolves each
  branch with a per-branch bias and answers wrong predictions with redirects.
* **Checks.** Every instruction that leaves D is compared, by PC, length and
  rebuilt word, with a reference decoder that walks the architectural path.
* **Coverage.** It counts each mechanism and fails if one never occurs:
  cache-miss stall, full-queue stall, depack starvation, instruction across a
  chunk, ring wrap, predicted-taken redirect, held prediction, misprediction,
  decode stall, and a target inside a chunk. It also checks the start-up
  latency.

`tb/tb_workload_mix.sv` streams straight-line code drawn from the profiled
*dynamic* frequencies. It checks that the front end reads each chunk once,
and it reports the resulting saving in cache reads. On a 3,229-instruction
stream the mean length is 2.52 bytes, giving 0.63 cache reads per instruction
(a fixed-length front end needs 1.0) at 0.83 instructions per cycle.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/vl_pkg.sv rtl/*.sv \
    tb/tb_vl_frontend.sv --top-module tb_vl_frontend -Mdir obj
./obj/Vtb_vl_frontend
```

For a single block, list `rtl/vl_pkg.sv`, the block's file and its
testbench. Every testbench ends with a line
`TB_RESULT checks=N failures=M`.

## How far to trust it

* **What the tests cover.** Every block is tested on its own, against a
  reference model written separately from the RTL. Each test was also
  confirmed to fail on a deliberately broken copy of its block. The end-to-end
  test makes about 100,000 checks over 40,000 cycles.
* **Follows the source.** The block structure, the CC/A/B/C/D registers, the
  Write Bit handshake, the read pointer update on branches, the four-way
  byte selection and the opcode prefixes.
* **Chosen here.** The ADDU prefix and the argument field widths. These
  settle two contradictions in the source (see *Instruction coding*).
  Also chosen here: the table contents, the big-endian byte order, the
  queue-occupancy signalling, the decode stall, the same-cycle cache, the
  extra fields in D, and the whole predictor.
* **Not present.** Undefined 16/24-bit forms. Any power or area
  instrumentation.
