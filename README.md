# Phantom Name System front-end in SystemVerilog

Code-reuse attacks only work if the attacker knows where the code is. A
return-oriented chain is a list of addresses of useful instruction
sequences ("gadgets"). The Phantom Name System (PNS) gives every
instruction many names at once and lets the hardware jump between them at
random at run time, so such a list stops being meaningful.

Each instruction has N = 2^n names. With n = 8 there are 256 "phantoms",
and the names of one instruction differ by multiples of a small
*security shift* δ. The program binary is stored only once in memory, and
every structure indexed by address sees one address per instruction. The
name in use, however, changes every time a basic block is entered through
a taken branch. The phantom index of the current name exists only in the
processor's extended program counter and in a small hidden hardware stack.

Suppose an attacker overwrites a return address with a gadget address
meant for one phantom. When the return executes, that address is joined
with a phantom index the attacker cannot see. The result is an address δ·k
bytes away from the gadget, and the attacker does not know k. The compiler
puts a `TRAP` instruction at the start of every basic block and makes
every branch target point just past it. A near miss therefore lands on a
`TRAP` and raises a security exception.

This repository holds the RTL for the front-end changes that make this
work on a 32-bit RISC-style processor:

- the name-to-address mapping;
- the selector that picks random phantoms;
- fetch with branch prediction, ITLB and L1 instruction cache, all keyed
  by the resolved address;
- the commit-stage branch unit;
- the Secret Domain Stack;
- the `TRAP` check.

The decode/execute back-end of the host core, the memory hierarchy and
the pointer-encryption unit of the full scheme are not included.

## 1. Names and addresses

An extended PC, or *name*, is 40 bits: `{p[7:0], PC[31:0]}`. Its virtual
address is

    VA = PC + (p << DELTA_SHIFT)          (pns_name_resolver)

which is one shift and one 32-bit add. The names `{p, PC}` and
`{p', PC + (p - p')·δ}` are the same instruction. Every predictor, TLB and
cache lookup goes through this mapping first, so:

- a branch has one BTB entry, not 256;
- a page has one ITLB entry;
- a line has one cache line.

Without this, the capacity of each structure would fall by a factor of N.
In this design the mapping is a combinational adder placed in front of
each structure.

The original description states δ in two ways that do not quite agree:

- The selector formula multiplies by δ.
- The address-mapping drawing shifts left "by δ".

Here δ is a power of two, `δ = 1 << DELTA_SHIFT` bytes, which satisfies
both. The default is `DELTA_SHIFT = 2` (δ = 4 bytes, one instruction), the
natural choice for a fixed 32-bit instruction set. The worked ITLB example
in the original text (`{2, 0x00BB_FFF4}` and `{0, 0x00BB_FFF8}` are the
same address) implies δ = 2 bytes. The resolver testbench checks that
example with `DELTA_SHIFT = 1`.

## 2. Re-naming at commit: the selector

Every taken control transfer gets a new random phantom. The selector
(`pns_selector`) takes the resolved target name `{p_new, PC_new}` and a
random index `p_next`, and produces

    nextPC = { p_next, PC_new - (p_next - p_new)·δ }

This is the same instruction under a random name. The selector sits at
commit, not in fetch. When a taken branch commits, its successor name
goes through the selector, and the result is both:

- written into the BTB as the branch's target, and
- used as the redirect target if fetch predicted wrongly.

The next time that branch is predicted, fetch simply follows the BTB
entry, which already holds a random phantom. Fetch never waits for random
numbers, and each execution of a branch uses the phantom picked at its
previous commit.

A fall-through, or a conditional branch that is not taken, keeps the
current phantom: `{p, PC+4}`. The random index comes from
`pns_entropy_source`, which gives a new 8-bit value every cycle. In
silicon this would be eight metastable flip-flops. In this RTL it is a
behavioural model built on `$urandom`, the one part that is not
synthesizable.

## 3. Fetch (`pns_fetch`)

Fetch has two stages and handles one instruction per cycle.

**F1** holds the PC register (a name) and resolves it to a VA. It indexes
the BTB (`pns_btb`) and the bi-mode direction predictor (`pns_bdb`) with
that VA, then picks the next name:

| BTB says | next name |
|---|---|
| miss | `{p, PC+4}` |
| conditional, predicted taken | BTB target |
| conditional, not taken | `{p, PC+4}` |
| jump | BTB target |
| call | BTB target; `{p, PC+4}` pushed on the RAS |
| return | RAS top (`{p, PC+4}` if the RAS is empty) |

The RAS (`pns_ras`, 48 entries) holds full 40-bit names. Return
prediction is therefore exact as long as the RAS has not wrapped.

**F2** receives the registered VA and looks it up in two places:

- **ITLB** (`pns_itlb`): 32 entries, fully associative, round-robin
  replacement, 4 KB pages.
- **L1 instruction cache** (`pns_icache`): 32 KB, 2-way, 64-byte lines,
  LRU. It is indexed by the VA and tagged with the physical page number
  from the ITLB.

An ITLB miss pulses `walk_req_o` and waits for `walk_resp_i`. A cache
miss fetches the line as sixteen 32-bit beats over `mem_req_*` and
`mem_resp_*`. The instruction leaves on `out_*` (valid/ready) with three
things attached:

- its name;
- its VA;
- the name fetch predicted to follow it.

The back-end must return all three at commit. Carrying the VA with the
name also means the execute stage never has to map a name back when it
uses the PC as an operand (for PC-relative arithmetic or a link value). A stall in F2 holds both
stages. A redirect reloads the PC and discards F2.

The two fetch stages correspond to the 2-cycle L1-I access of the
evaluated configuration. The adder that maps name to VA sits in F1,
before the table reads.

## 4. The branch unit at commit (`pns_commit`)

The back-end commits instructions in order through a `commit_t` record:

- the name;
- the kind (none, conditional, jump, call, return, trap);
- the resolved direction;
- the target address;
- the predicted next name.

The unit works out the true successor:

| instruction | true successor |
|---|---|
| plain instruction, not-taken conditional | `{p, PC+4}` |
| taken conditional, jump, call | `{0, target}`, the binary's own address, passed through the selector |
| return | `{SDS top, target}`, passed through the selector |

For a return, `target` is the address software reloaded from its stack.

A misprediction is decided on addresses, not names. The unit redirects
when `VA(predicted name) != VA(true successor)`. Two different names of
the same instruction are therefore not counted as a misprediction. The
redirect carries the selector's output.

Training:

- The BTB gets the selector output for every taken transfer, so the next
  execution enters a fresh phantom.
- The direction predictor gets every conditional outcome.

## 5. Return addresses and the Secret Domain Stack (`pns_sds`)

A call's return name `{p, PC+4}` is split. `link_lo_o` gives the low 32
bits to the back-end, which stores them like any return address: in a
link register or on the stack in memory. The 8-bit `p` is pushed onto the
SDS. Ordinary loads and stores cannot reach the SDS. A return pops `p`
and joins it to whatever address the program reloaded. An overwritten
return address is therefore always interpreted in a phantom the attacker
does not know.

The SDS has 256 entries of 8 bits (256 bytes). That covers the deepest
call depth measured on SPEC CPU2017 C/C++ programs, 244.

Deeper recursion is handled by exceptions:

- A call with the SDS full raises `sds_overflow_o`. A return with it
  empty raises `sds_underflow_o`.
- The commit is held (`cmt_ready_o` low) until trusted software has
  resolved the condition through the privileged port `sds_priv_*`. That
  port can read or write any entry and read or set the depth.
- **Overflow:** the handler saves all 256 entries and sets the depth to 0.
  The saved stacks form a stack of stacks in kernel memory.
- **Underflow:** the handler writes back the last saved stack and sets the
  depth to 256.

The same port serves two more cases:

- **Context switch:** save and restore the SDS with the process.
- **`longjmp` or exception unwinding:** restore a saved depth so the SDS
  matches the unwound architectural stack.

Encrypting what is saved is left to that software.

## 6. TRAP blocks

A `TRAP` committed right after a taken transfer raises `security_exc_o`.
Real branch targets always point past the `TRAP`, so only a forged or
mis-phantomed target can reach one that way.

A basic block can also be entered by falling through from the previous
one, for example after a not-taken conditional or after a call returns.
That passes through the block's `TRAP` legitimately, so a `TRAP` reached
sequentially is a no-op. The original design says only that the hardware
handles the fall-through case. The rule used here (trap only when the
previous committed instruction was a taken transfer) is this design's.

## 7. Top level (`pns_top`)

`pns_top` connects three parts:

- fetch;
- the commit unit, which contains the SDS, the selector and three
  resolvers;
- the entropy source.

Its ports are the interfaces to the parts that are not here:

| ports | connects to |
|---|---|
| `out_*` | decode |
| `cmt_i`, `cmt_ready_o`, `link_*` | the commit stage of the back-end |
| `security_exc_o`, `sds_overflow_o`, `sds_underflow_o` | exception logic |
| `be_redirect_*` | other back-end redirects: exception entry, return from exception, restart. A commit redirect in the same cycle wins. |
| `sds_priv_*` | privileged software access to the SDS |
| `walk_*`, `itlb_flush_i` | page-table walker |
| `mem_*` | next level of the memory system for I-cache refills |

Default parameters:

| parameter | default | origin |
|---|---|---|
| phantom bits n | 8 | original design (256 phantoms) |
| `DELTA_SHIFT` | 2 (δ = 4 B) | this design (see §1) |
| `BTB_ENTRIES` | 4096 | evaluated configuration |
| `RAS_DEPTH` | 48 | evaluated configuration |
| `IC_SETS` × 2 ways × `IC_LINE_BYTES` | 256 × 2 × 64 = 32 KB | evaluated configuration |
| `SDS_DEPTH` | 256 | original design |
| `BDB_ENTRIES`, `BDB_HIST_BITS` | 4096, 12 | this design (only "bi-mode" is given) |
| `ITLB_ENTRIES`, `PAGE_BITS` | 32, 12 | this design |
| `RESET_PC` | 0x1000 | this design |

Shared types and constants are in `pns_pkg`.

## 8. Where this RTL departs from, or goes beyond, the original

- **Fetch width:** one instruction per cycle. The evaluated core fetched
  3 wide. The PNS logic does not depend on the width.
- **Merged units:** the branch unit (execute) and the selector (commit)
  are one commit-stage unit. Mispredictions are therefore found at commit,
  not at execute.
- **Direction predictor:** a textbook bi-mode predictor with assumed
  sizes. Its global history is shifted at commit and training uses the
  history at commit time, not a checkpoint taken at fetch. This can cost
  accuracy but not correctness.
- **RAS:** not repaired after a misprediction. An overflow overwrites the
  oldest entry.
- **I-cache aliasing:** the cache is virtually indexed. With 4 KB pages
  and 16 KB ways, synonyms are possible and are not handled. The
  instruction stream is read-only here.
- **Security shift:** δ defaults to 4 bytes (§1).
- **`TRAP` rule:** the fall-through rule is this design's (§6).
- **Entropy source:** behavioural, so the top level does not go through
  synthesis with its `$urandom` model in place. Replace
  `pns_entropy_source` with a real true-random-number-generator cell for
  implementation.
- **Multithreading:** the SDS has no thread identifier. It holds one
  context and is saved and restored on a switch.
- **Not built:**
  - the pointer-encryption unit (`ENCP`/`DECP` with a QARMA cipher and a
    key register), which protects function pointers in the full scheme;
  - the host core's decoder, ALUs and write-back;
  - caches other than the L1-I.

## 9. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.

| testbench | what it checks |
|---|---|
| `tb_pns_name_resolver` | random and corner names against the formula, and the ITLB example with δ = 2 |
| `tb_pns_selector` | Eq. 2 against the resolver: same address, requested phantom; `s = 0` pass-through; the worked ±3δ examples |
| `tb_pns_entropy_source` | all 256 values appear; each bit is one about half the time; the value changes from cycle to cycle |
| `tb_pns_sds` | push/pop against a queue model; overflow and underflow; privileged spill/fill; depth set |
| `tb_pns_btb`, `tb_pns_bdb`, `tb_pns_ras`, `tb_pns_itlb`, `tb_pns_icache` | each against a behavioural reference model with random traffic; the I-cache also against LRU and refill order |
| `tb_pns_fetch` | fetch with a walker/memory model (`pns_tb_memsys`): sequential fetch, misses, BTB-driven phantom switches, RAS returns, redirects |
| `tb_pns_commit` | the commit unit with a 4-entry SDS: resolution, redirects, training, link values, forged returns, SDS exceptions, `TRAP` after a jump |
| `tb_pns_top` | the whole front-end at default sizes (below) |

`tb_pns_top` runs a generated program with loops, a chain of calls and a
recursion 300 deep, deeper than both the RAS and the SDS. The testbench
plays both the back-end and the operating system, including SDS
spill/fill. It then forges return addresses, which must end in a `TRAP`
exception or in an unintended phantom. It counts every mechanism:

- phantom switches;
- correct taken predictions;
- mispredictions;
- RAS returns;
- fall-through `TRAP`s;
- fetch stalls;
- ITLB walks;
- I-cache refills;
- SDS overflow and underflow;
- security exceptions;
- diverted attacks.

It fails if any of these never happens.

`tb_pns_calldepth` runs the same program and checker at default sizes with
the recursion set to 244 calls. That is the deepest maximum call depth
measured on the SPEC CPU2017 C/C++ programs (leela). The run must finish
with no SDS overflow or underflow, every return must reach its call site,
and the nesting must reach exactly 244. A typical run commits about
17,600 instructions in 27,000 cycles, makes 80,000 checks and takes well
under a second.

To simulate any testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
        rtl/pns_pkg.sv tb/tb_pns_top.sv --top-module tb_pns_top -o sim
    ./obj_dir/sim

Use the same command with another `tb_pns_*` name for the other
testbenches. `pns_tb_memsys.sv` is the shared walker and memory model
used by the fetch and top-level tests.
