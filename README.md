# Zipper Stack: a MAC chain for return addresses, in RTL

A shadow stack protects return addresses by keeping a second copy of them in memory.
That only helps if the attacker cannot write that memory as well. Zipper Stack keeps no
copy. It binds the return addresses into a chain of message authentication codes
(MACs), so the chain needs only one small value that the attacker can never reach: the
newest MAC, held in an on-chip **Top** register.

When a function saves its return address, the address is MAC'ed together with the
current Top value. The old Top travels to memory next to the address, and the new MAC
becomes Top. Each MAC in memory therefore covers the return address above it *and* the
MAC that came before it, like the teeth of a zipper, all the way down to a random value
chosen when the process started. To return, the hardware recomputes the MAC of the
reloaded address and the MAC stored beside it, and compares the result with Top. A
match proves that both values are the ones that were pushed; the stored MAC then becomes
Top again. To forge a return address anywhere in the stack, an attacker would have to
forge every MAC above it and finally Top itself. That holds even if the attacker has
learnt the MAC key, because Top is not in memory. Replaying an old (address, MAC) pair
fails for the same reason: Top has moved on.

This RTL implements the hardware side of the scheme as the unit that sits inside a
64-bit, 5-stage, in-order RISC-V core. The unit adds two instructions for calls
and returns:

* **ZIP**, issued after a call, before `ra` is spilled.
* **UNZIP**, issued after `ra` is reloaded, before the return.

and two more for code that unwinds the stack without returning (setjmp/longjmp):

* **ZSAVE** turns Top into an authenticated word for the jump buffer.
* **ZRESTORE** checks such a word and puts Top back.

The unit also holds a 24-bit Top register, a 64-bit Key register, a Keccak-based MAC
engine, and a four-entry cache of recent MAC results. The host core, its memory and the
system software are not included.

## The compressed return address

Addresses in the target core use only 40 bits, so the MAC rides in the unused upper
24 bits of `ra`. Nothing extra is pushed onto the stack, and the stack layout does not
change.

```
 63            40 39                                  0
+----------------+-------------------------------------+
|  previous MAC  |          return address             |   ra after ZIP, as spilled
+----------------+-------------------------------------+
```

| step | input `ra` | `ra` written back | Top afterwards |
|---|---|---|---|
| ZIP | `{x, addr}` (upper bits ignored) | `{Top, addr}` | `MAC(Key, addr, Top)` |
| UNZIP | `{m, addr}` as reloaded from memory | `{24'b0, addr}` | `m` if `MAC(Key, addr, m) == Top`, else unchanged and an exception is raised |

The bottom of the chain is bound to the random Top value loaded at process start. An
UNZIP whose check passes leaves the unit exactly as it was before the matching ZIP.

## Timing: keeping the MAC off the critical path

One MAC takes 20 clock cycles, but neither instruction waits for it.

* The value written back to `ra` never depends on the MAC. ZIP writes the *old* Top, and
  UNZIP writes the address with its upper bits cleared. The write-back therefore happens
  in the cycle the instruction is accepted, and the pipeline moves on.
* The MAC runs in the background. At its end, the unit does one of two things:
  * **UD** (ZIP): stores the new MAC into Top.
  * **CK** (UNZIP): compares the MAC with Top, then either restores Top or raises the
    exception.
* Only another instruction of the unit (ZIP, UNZIP, ZSAVE or ZRESTORE) needs it. If one
  arrives while a MAC is still running, it is held (`ex_stall`) until UD/CK has finished. In the worst case it waits 20
  cycles. Most function bodies are longer than 20 cycles, so in practice ZIP and UNZIP
  usually cost one issue slot each.
  After `k` other instructions, the wait is `max(0, 20 - k)` cycles.
* **MAC cache.** Before starting Keccak, the unit looks the MAC input up in a
  four-entry cache of recent results. On a hit, UD/CK happens on the issue clock edge
  and the unit never becomes busy. This pays off more often than it might seem: the MAC
  input of an UNZIP, `(addr, m)`, is exactly the input of the ZIP it undoes,
  `(addr, old Top)`. A short call therefore usually finds its return check already in
  the cache. The same holds for a loop that calls the same function again and again:
  its ZIP inputs repeat.

```
cycle          0        1 ...                 19       20       21
ZIP (miss)     issue,   Keccak rounds 1..19 ............ UD      next ZIP/UNZIP may issue
               ra WB,
               round 0
ZIP (hit)      issue, ra WB, UD on this edge; next ZIP/UNZIP may issue in cycle 1
```

On a miss, the exception of a failed UNZIP arrives 20 cycles after the instruction.
By then the return that follows it has normally executed. The exception is imprecise,
and the host must treat it as fatal to the process.

## The MAC function

The MAC engine uses the Keccak permutation with lane width 16 (`l = 4`). The state is
400 bits, the rate 256 bits and the capacity 144 bits, and there are `12 + 2l = 20`
rounds. The engine computes one round per clock, which gives the 20-cycle latency. The
MAC is built as a one-block keyed sponge:

```
block[127:0]  = {prev_mac[23:0], addr[39:0], key[63:0]}     key in the lowest bits
block[128]    = domain bit: 0 = return-address chain, 1 = jump-buffer tag
block[129]    = 1, block[255] = 1                          pad10*1 up to the 256-bit rate
state         = Keccak-f[400](block placed into a zero state)
MAC           = state bits [23:0]
```

The domain bit keeps the two uses of the engine apart: a chain MAC read from the stack
can never pass as a jump-buffer tag, or the reverse.

Bit `i` of the string goes to lane `i / 16`, bit `i % 16`. Lane index is `x + 5*y`, as in
the Keccak reference. The round constants are the standard Keccak constants truncated to
16 bits, and the rotation offsets are the standard offsets modulo 16. The RTL does not
store either as a table. It derives them in `zs_pkg`: the constants from the Keccak LFSR
`x^8 + x^6 + x^5 + x^4 + 1` (bit `2^j - 1` of round `i` is `rc(j + 7i)`), and the
offsets from the `(x, y) -> (y, 2x + 3y)` walk (offset `(t+1)(t+2)/2`). The testbench
reference model (`tb/zs_ref_pkg.sv`) uses the published tables instead, so each side
checks the other.

Keccak, `l = 4`, `r = 256`, `c = 144` and the 20-cycle latency are the parameters of the
prototype the scheme was published with. How the key is combined with the data, the
field order, the domain bit and the choice of output bits are this implementation's own.

## setjmp and longjmp: carrying Top through a jump buffer

`longjmp` drops any number of frames at once, so no UNZIP runs for them, and Top would
be left pointing at a frame that no longer exists. The stored return addresses are
untouched, so the only thing to repair is Top: setjmp saves it in the jump buffer beside
the stack pointer, and longjmp restores it. The jump buffer lives in writable memory,
so the saved Top is authenticated with a MAC from the same engine.

```
ZSAVE    rd  <- {tag[23:0], Top[23:0], 16'b0}      tag = MAC_jb(Key, ctx[39:0], Top)
         rs1 = ctx (e.g. the stack pointer setjmp also stores)
ZRESTORE rs1 = the word saved by ZSAVE, rs2 = ctx
         if MAC_jb(Key, ctx[39:0], word[39:16]) == word[63:40]: Top <- word[39:16]
         else exception (exc_valid, exc_ra = the word)
```

`MAC_jb` is the same Keccak MAC with the domain bit set. Binding the tag to `ctx` stops
a saved word from being replayed with another stack pointer. Replaying a whole old jump
buffer (word and stack pointer) restores an old but genuine Top, which is the same
exposure longjmp has to any stale buffer.

Timing differs between the two. ZSAVE's result *is* the tag, so it holds EX for the
20 cycles of its calculation; its write-back comes in the cycle the hold ends. ZRESTORE
writes no register, so, like UNZIP, it is taken at once and checked in the background.
Tags always go to the Keccak engine and are never cached. C++ exception unwinding can
use the same pair of instructions on its context record.

The word layout, the `ctx` binding, the domain bit and the instruction names are this
design's own: the scheme asks only that Top be saved and restored with the other
registers and that the buffer be authenticated with the MAC engine.

## Blocks

| module | role |
|---|---|
| `zs_pkg` | widths (`XLEN=64`, `NA=40`, `NM=24`, `NS=64`), the op enum, the instruction encoding, and the Keccak round, constant, offset and absorb functions |
| `zs_decode` | recognises ZIP, UNZIP, ZSAVE and ZRESTORE in the instruction word in EX |
| `zs_state_regs` | Top and Key registers, loaded together at process start; afterwards only Top changes, and only through UD, CK and ZRESTORE |
| `zs_mac_cache` | 4 entries, fully associative; tag = `{addr, prev_mac}`; round-robin replacement; flushed when a new key is loaded |
| `zs_keccak_mac` | the iterative Keccak-f[400] MAC engine, valid/ready request with a domain bit, one-cycle response pulse |
| `zs_ctrl` | execution of all four instructions: write-back, cache lookup, Keccak start, UD/CK, jump-buffer check, exception, stall |
| `zipper_stack` | top level, wires the five together and presents the pipeline interface |

The Top and Key registers have no path to loads, stores or register reads. Top reaches
only `zs_ctrl`, and Key reaches only the MAC engine.

### Instruction encoding

All four are R-type words in the RISC-V *custom-0* major opcode (`0001011`) with
`funct7 = 0`:

| instruction | funct3 | register fields | word |
|---|---|---|---|
| ZIP | `000` | `rd = rs1 = x1 (ra)`, `rs2 = x0` | `0x0000808B` |
| UNZIP | `001` | `rd = rs1 = x1 (ra)`, `rs2 = x0` | `0x0000908B` |
| ZSAVE | `010` | any `rd`, `rs1` = ctx, `rs2 = x0` | e.g. `zsave a0, sp` = `0x0001250B` |
| ZRESTORE | `011` | `rd = x0`, `rs1` = word, `rs2` = ctx | e.g. `zrestore a0, sp` = `0x0025300B` |

Words with other register fields are not decoded as instructions of the unit.

This encoding is a choice of this RTL. The scheme fixes the instructions' behaviour,
not their bits.

### Top-level ports (`zipper_stack`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset (Top, Key, cache, engine cleared) |
| `init_valid` | in | 1 | process start: load `init_key` into Key and `init_top` into Top, and flush the cache. Give it only while `busy` is low |
| `init_key`, `init_top` | in | 64, 24 | fresh random values from a trusted source |
| `ex_valid`, `ex_instr` | in | 1, 32 | instruction in EX |
| `ex_rs1`, `ex_rs2` | in | 64, 64 | its register operands, already forwarded (`ra` for ZIP/UNZIP) |
| `ex_stall` | out | 1 | hold EX: an instruction of the unit waits for the previous MAC, or a ZSAVE computes its tag |
| `wb_valid`, `wb_rd` | out | 1, 64 | value for `rd`, combinational, in the cycle the instruction is taken |
| `exc_valid`, `exc_ra` | out | 1, 64 | an UNZIP or ZRESTORE check failed; `exc_ra` is the `rs1` given to it |
| `busy` | out | 1 | a Keccak calculation is in flight |
| `ev_cache_hit` | out | 1 | event: this ZIP/UNZIP was served from the cache |

An instruction is taken in a cycle where `ex_valid` is high, it decodes as one of
the four and `ex_stall` is low. Other instructions pass without effect.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if the design hangs.

| testbench | what it checks |
|---|---|
| `tb_zs_keccak_mac` | directed and random MACs in both domains against the reference model; latency exactly 20 cycles; `req_ready` low while busy; each input field and the domain bit change the result |
| `tb_zs_mac_cache` | random fills against a scoreboard of the last four distinct tags; misses on near-miss tags; flush, and flush over a fill |
| `tb_zs_state_regs` | 1000 random cycles of loads and Top writes against a model |
| `tb_zs_decode` | all four encodings, every funct3, every single-bit corruption, random register fields and words |
| `tb_zs_ctrl` | the control with a modelled Top register, Keccak engine and cache: write-back values, UD/CK results, 20-cycle busy on a miss, stall, exception and `exc_ra` for tampered address, forged MAC and replay, cache fill contents; ZSAVE hold and word, ZRESTORE restore, and rejection of a forged tag, a forged Top, a wrong context and a chain MAC offered as a tag |
| `tb_zs_timing` | the stall after a miss for 0 to 24 independent instructions in between, which must be `max(0, 20 - k)` cycles; cache hits, which must never stall |
| `tb_zipper_stack` | the whole unit at its default sizes, driven by a modelled program (see below) |

`tb_zipper_stack` plays the core and its stack memory. It runs random call/return walks
over six call sites, up to 12 frames deep, with 0 to 25 other instructions between
them, and checks every `ra` written against the reference chain. It then runs these
attacks, and each must raise exactly one exception:

* an overwritten return address;
* a forged MAC;
* a replay of a deeper frame;
* a replay of a frame from an earlier process with a different key;
* a forged jump buffer;
* an attacker who knows the key: a return address two frames down is replaced and
  every MAC above it in memory is recomputed with the real key. The frames agree with
  each other but not with Top, so the first return still fails.

The walks also call setjmp (ZSAVE) at random depths and longjmp (ZRESTORE) back to it
from deeper frames, after which the returns from the setjmp frame must still pass. It
counts each mechanism (ZIP, UNZIP, cache hit, Keccak calculation, stall, detected
attack, process start, setjmp, longjmp, chain depth of at least 8) and fails if one
never occurred. A typical run has about 520 ZIP/UNZIP, 40% of them cache hits, some
2700 stall cycles and 15 setjmps with a few longjmps.

To simulate one testbench with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/zs_pkg.sv tb/zs_ref_pkg.sv tb/tb_zipper_stack.sv --top-module tb_zipper_stack
./obj_dir/Vtb_zipper_stack
```

Every run takes well under a second. Lint any module with
`verilator --lint-only -Wall -Irtl -y rtl rtl/zs_pkg.sv rtl/<module>.sv`.

## Relation to the published prototype

The design follows the published hardware prototype in these points:

* the 40/24-bit split of `ra`;
* Top 24 bits, Key 64 bits;
* ZIP and UNZIP semantics, including clearing the upper bits on UNZIP;
* saving Top in the jump buffer and authenticating it with the same MAC engine;
* the ra write-back not waiting for the MAC;
* UD/CK after the MAC;
* a stall only when a second MAC user arrives early;
* Keccak with `l=4`, `r=256`, `c=144` in 20 cycles;
* a 4-entry result cache with one-cycle hits.

The following were left open by that description and are choices made here:

* how the key enters the MAC, the message layout, the domain bit, and which output
  bits are used;
* the instruction encoding, and ZSAVE/ZRESTORE as instructions with their word layout
  and context binding;
* the pipeline interface, and the rule that a ZIP/UNZIP is held until the previous
  UD/CK has finished (rather than forwarding the pending Top);
* cache organisation (fully associative, whole MAC input as tag, round-robin) and
  flushing on key load instead of tagging with the key;
* how Key and Top are loaded: a port fed by an outside random source;
* reset values of zero;
* leaving Top unchanged after a failed check;
* `init_valid` taking priority over a Top write in the same cycle.

The prototype's area (793 LUTs and 432 flip-flops for the MAC module) was measured on
an FPGA and is not reproduced here. This engine keeps 400 state bits, a 5-bit round
counter and two control bits.

## What is not here

* **The host core.** The pipeline that presents instructions, forwards `ra`, writes it
  back and turns `exc_valid` into a trap belongs to the core. The unit's ports stand in
  for it.
* **Library support.** The setjmp, longjmp and exception-unwinding code that issues
  ZSAVE and ZRESTORE, and the larger jump buffer that holds the word.
* **Compiler support.** Placing ZIP after each call and UNZIP before each return.
* **Context switches.** An operating system must save and restore Top and Key for each
  process. The only way in here is the `init` port, which loads both. No read-out path
  is provided, on purpose.
* **The random source** that supplies `init_key` and `init_top`.
