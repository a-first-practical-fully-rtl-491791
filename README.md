# An encrypted-mode OpenRISC processor in SystemVerilog

A processor that never holds user data in the clear anywhere an observer can reach it —
registers, buses, memory — yet still computes on it. The idea is not to build arithmetic on
cipher text. Instead, every value leaves the processor's protected core only in encrypted form.
Inside, a private set of registers keeps the decrypted copies the ALU really works on. An
encrypted program's machine state looks, from outside, like the state of a homomorphic computer.
Because of that, the design is called *pseudo-homomorphic*.

The price is a cipher in the pipeline. Each value that enters or leaves the protected core passes
a 64-bit block cipher whose ten rounds are ten pipeline stages. The point of the architecture is
to keep those ten stages off the critical path as far as possible:

* results stay decrypted internally and are forwarded early;
* encryption of register contents is deferred until something outside could see it;
* a small internal cache of decrypted values saves most loads from going through the cipher.

The instruction set is OpenRISC 1000 (a subset) plus one new instruction, the *prefix*.

## Two modes, one pipeline

The processor runs in one of two modes.

* **Supervisor mode** runs unencrypted, on the classic five-stage pipeline:
  Fetch, Decode, Read, Execute, Write.
* **User mode** runs encrypted programs. Every user instruction flows through all 15 positions
  of the same physical pipeline: the five stages plus the ten cipher ("codec") stages.

The codec can be placed in two ways:

```
 position   F   1   2   3   4  ...  11  12  13  14
 config A   F   D   R   E   codec.................  W     (codec after execute)
 config B   F   D   codec...............  R   E   W       (codec before read)
```

* **Configuration A** is used by everything except immediate instructions.
  * The instruction executes at position 3 on decrypted shadow-register values, so its result
    can be forwarded to the very next instruction.
  * The codec behind execute does whatever cipher work the instruction needs:
    * a load that misses the internal cache has its memory word decrypted;
    * a store has its data encrypted on its way to memory;
    * a register-synchronisation micro-operation is encrypted (see below).
* **Configuration B** is used by user immediate instructions. Their immediate is an encrypted
  64-bit block, so it must be decrypted before Read. The instruction executes only at position
  13.

Both configurations write at position 14. Instructions therefore complete in order, and user
mode keeps one instruction per cycle when there are no hazards.

The codec is built as twelve round units on the pipeline slot transitions 2→3 … 13→14. An A
instruction uses units on slots 4–13 and a B instruction uses units on slots 2–11, so the same
hardware serves both shapes. Supervisor instructions leave the pipeline after position 4.

### Encrypted immediates and the prefix instruction

A 64-bit cipher block does not fit in a 32-bit instruction. Each user immediate instruction is
therefore preceded by two prefix instructions (opcode `0x1c`), each carrying 24 bits of the
block. The immediate field of the instruction itself carries the last 16 bits. Decode
concatenates them into `{prefix1[23:0], prefix2[23:0], imm16}`. Shift-immediate instructions
carry a full 16-bit field like the others.

### What a register holds

Each GPR exists twice:

| copy | visible to | user mode contents | supervisor mode contents |
|---|---|---|---|
| real register | both modes, the outside | cipher text | plain data |
| shadow register | user-mode ALU only | decrypted block | unused |

A decrypted block is `{pad[31:0], value[31:0]}`. The ALU works on the low 32 bits. It derives a
fresh pad from the result with a fixed mixing function, so equal results give equal cipher text.

The real copy is updated lazily. A user result goes to the shadow register at once, and the real
register is marked *stale*. When the processor enters supervisor mode (system call, trap or
illegal instruction), every stale register is encrypted from its shadow before the supervisor
runs. This is done by synchronisation micro-operations that take the configuration-A path
through the codec. When `l.rfe` returns to user mode, every register the supervisor wrote is
decrypted into its shadow the same way. Real registers therefore always hold cipher text
whenever supervisor code or the outside can see them.

### Program addresses

Program addresses are never encrypted. A 32-bit address zero-filled to 64 bits counts as the
"encrypted" form. The same address with its top 16 bits set to `0x7fff` counts as the
"decrypted" form. The pad function never produces a pad whose top half is `0x7fff`. A zero-filled
block is decrypted to the `0x7fff` form instead of being deciphered, and a `0x7fff` block is
"encrypted" by zero-filling it.

`l.jal`/`l.jalr` in user mode therefore write `{0x7fff, 0, pc+4}` to the shadow link register
and `{0, pc+4}` to the real one. `l.jr` jumps to the low 32 bits.

## Hazards

Operands, the compare flag and the carry are forwarded from every younger-mode slot 4–14. The
newest older producer wins. If that producer has no result yet, Execute stalls: positions 1–3
hold and a bubble enters position 4. There are two cases:

* a load whose value is still coming from the cache or codec;
* a configuration-B instruction that has not reached its execute stage.

The costs that result (these are the numbers the core testbench checks):

| producer → direct consumer | extra cycles |
|---|---|
| user ALU op → ALU op (config A) | 0 |
| user load, hit in the user cache → ALU op | 1 |
| user load, miss (decrypted by the codec) → ALU op | 10 |
| user immediate op (config B) → config-A op | 10 |
| supervisor ALU op → ALU op | 0 |

The 1-cycle load-use penalty exists because the cache is looked up in the cycle after Execute,
where the address is computed.

Branches and jumps resolve at position 3 against a 64-entry direct-mapped branch target buffer
with 2-bit counters, consulted at fetch. A misprediction squashes positions 1–2 and refetches.
There is no delay slot.

System calls, traps, `l.rfe` and illegal instructions hold fetch from the moment they are
decoded and take effect at their write position, so the mode changes on an empty pipeline. On
entry to supervisor mode the user's F/CY/OV flags are saved in a hidden register and cleared.
The supervisor therefore learns nothing from them, and `l.rfe` restores them. In user mode the
64-bit memory instructions `l.ld`/`l.sd` and `l.rfe` are illegal (vector `0x700`). The other
vectors are: system call `0xc00`, trap `0xe00`, reset `0x100` (supervisor mode). In user mode,
`l.mfspr` reads 0 and `l.mtspr` is ignored.

`l.nop 2` reports r3 on the `report_*` port. In user mode the shadow r3 is reported, so an
encrypted program can print results. `l.nop 1` halts.

## Memory side

* **User data cache** (`kpu_user_dcache`). Direct mapped, 64 lines, keyed by the 32-bit
  decrypted address, holding decrypted blocks. Every user store writes it, and every user load
  checks it first. It lives inside the protected boundary.
* **Address path** (`kpu_top`). A user data address is first turned into a 64-bit value by
  `kpu_addr_scrambler`, a keyed injective xorshift-multiply mix. `kpu_tlb` then maps it.
* **TLB** (`kpu_tlb`).
  * Word granularity, because scrambled addresses are not clustered.
  * Every new address gets the next free physical word in a preset range, first come first
    served. Data first touched together therefore sits together in memory.
  * 256 entries, two ports: read and write.
  * When it is full, new addresses are refused and those accesses are dropped (`tlb_full`).
* **Supervisor accesses** are physical: byte address / 8 selects the 64-bit word.

The instruction memory and data memory themselves are outside the design. Both are read
combinationally.

## Cipher

The codec is a 64-bit-block, 64-bit-key Rijndael variant with 10 rounds:

* the state is 4 rows × 2 columns;
* ShiftRows swaps the columns in rows 1 and 3;
* MixColumns and the S-box are those of AES (the S-box is computed as the GF(2⁸) inverse and
  the affine map, not stored);
* the key schedule is the Rijndael schedule for Nk = 2, producing 11 round keys.

Rijndael itself does not define a 64-bit block. This instance is a generalisation and has not
been analysed as a cipher. `kpu_codec_stage` is one round in either direction. `kpu_keysched`
holds the key and expands it.

## Where this departs from the description it follows

* **Link-register forms.** The source text is contradictory about which copy of the link
  register receives which address form. The design follows its definition of the two forms:
  shadow gets `0x7fff…`, real gets zero-filled.
* **Addresses to memory.** Data addresses reach memory scrambled, not encrypted with the data
  cipher. The source suggests hashing the bare address as an option, and a second codec would
  otherwise be needed.
* **Left unspecified by the source and chosen here:**
  * cipher details and pad function;
  * lazy register synchronisation;
  * cache, predictor and TLB sizes and organisation;
  * the prefix opcode;
  * plain (unencrypted) load/store offsets;
  * the instruction subset: ALU, shifts, multiply, compares, `lwz/sw/ld/sd`, branches, jumps,
    `mfspr/mtspr`, `sys/trap/rfe`, `nop`.
* **Not included:** interrupts, exceptions other than illegal/sys/trap, overflow traps, byte
  and half-word memory access, division, caches for supervisor mode, any I/O.
* **Performance.** Published figures come from a cycle-level software simulator running an
  encrypted version of an instruction-set test. That test is not reproduced here. The stall
  costs above are what this RTL gives.

## Files

| file | contents |
|---|---|
| `rtl/kpu_pkg.sv` | types, opcodes, cipher and pad helper functions |
| `rtl/kpu_codec_stage.sv`, `rtl/kpu_keysched.sv` | cipher round, key expansion |
| `rtl/kpu_alu.sv` | 32-bit ALU with pad generation |
| `rtl/kpu_regfile.sv` | register file (used for real and shadow registers) |
| `rtl/kpu_user_dcache.sv`, `rtl/kpu_btb.sv` | user data cache, branch target buffer |
| `rtl/kpu_tlb.sv`, `rtl/kpu_addr_scrambler.sv` | user address translation |
| `rtl/kpu_core.sv` | the pipeline |
| `rtl/kpu_top.sv` | core plus address path; top level |
| `tb/kpu_tb_pkg.sv` | independent reference cipher and a small assembler |
| `tb/tb_*.sv` | one self-checking testbench per module |

`tb_kpu_top` runs the top level at its default sizes. The program it runs does the following:

* boots in supervisor mode and returns to user mode;
* uses encrypted immediates, forwarding, load-use stalls, cache hits and a codec-served miss,
  a predicted loop, a call/return, and a system call that checks the real registers hold the
  encryptions of the shadow registers;
* ends in an illegal-instruction trap.

It also counts each mechanism and fails if one never occurs. `tb_kpu_core` checks the cycle
costs in the table above.

## Simulating

With Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -y rtl -y tb +libext+.sv \
  rtl/kpu_pkg.sv tb/kpu_tb_pkg.sv tb/tb_kpu_top.sv --top-module tb_kpu_top -o sim
./obj_dir/sim
```

Every testbench ends with a line `TB_RESULT checks=N failures=M`. Replace `tb_kpu_top` with any
other testbench name to run it. Sizes are module parameters: `DCACHE_LINES`, `BTB_ENTRIES`,
`TLB_ENTRIES` and `USER_BASE` on `kpu_top`.
