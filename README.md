# Libra frontend: folded execution of balanced secret-dependent code

Constant-time software often keeps its secret-dependent `if`s and balances
them: both sides get the same number and kind of instructions, so an attacker
timing the program cannot tell which side ran. On a simple in-order core that
is enough. On a high-end core it is not. The two sides still live at
different addresses, and every structure indexed by the program counter
records which one ran: the instruction cache, the instruction prefetcher and
the branch predictor. Linearising the code (running both sides and selecting
results) closes that leak, but it is slow.

Libra takes a third way: **fold** the balanced region. The compiler lays the
region out level by level. The i-th instructions of all basic blocks of a level
sit next to each other in memory and form a **slice**. The core walks the
region slice by slice and, in each slice, executes only the instruction of the
active block. Only one side runs, as in balanced code. But the core touches the
same slices in the same order whichever side it is, so the fetch address leaks
no more than "this slice", and a slice is the same for both sides.

This repository is the RTL of a RISC-V instruction frontend that implements
this scheme. It walks folded regions and fetches each slice in a fixed,
offset-independent line order. It switches the branch predictor off inside
folded regions. It handles level-offset branches, level-offset calls, ordinary
calls and returns, and traps with a two-level stack of Libra contexts. The
out-of-order backend, the instruction cache and the branch predictor it plugs
into are not part of it: the frontend has ports for them.

## 1. Folded layout and the Libra context

Take a two-way branch on a secret, with two balanced sides of two
instructions each:

```
        bne   secret, x0, T           # if (secret) ... else ...
   F:   add   s2, s3, s4               # false side
        j     Ex
   T:   add   s1, s2, s3               # true side
        j     Ex
   Ex:
```

Folded, the two blocks form one level of two blocks. Each slice holds one
instruction of each block:

```
 word  3: lo.br  secret,0:1:2         # true -> offset 0, false -> offset 1, 2 blocks
 word  4: add    s1,s2,s3             # slice A, offset 0 (true side)
 word  5: add    s2,s3,s4             # slice A, offset 1 (false side)
 word  6: lo.br  zero,0:0:1           # slice B, offset 0: back to normal code
 word  7: lo.br  zero,0:0:1           # slice B, offset 1
 word  8: ...                         # Ex
```

The frontend tracks a **Libra context** `(bbc, off)`:

- `bbc` is the number of blocks in the current level, which is also the slice
  size in words.
- `off` is the position of the active block in the slice.

Outside folded code the context is `(1, 0)`, and the rules below then reduce
to ordinary sequential execution. The frontend keeps the address of the
current slice, `slice_addr`, and derives

```
  PC         = slice_addr + 4*off
  next_slice = slice_addr + 4*bbc
```

An ordinary instruction moves to `next_slice` and keeps the offset. A
level-offset branch `lo.br c,offT:offF:bbc'` also moves to `next_slice`, but
installs the context `(bbc', offT)` if `c` holds and `(bbc', offF)`
otherwise.

**The key point:** the address of the next slice never depends on the
condition, only the offset inside it does. So the frontend can fetch the next
slice before the condition is known, and the fetch looks the same either way.

Nested secret branches fold the whole nesting. The inner level of a branch
nested in a branch has four blocks, and its `lo.br`s name offsets 0..3. The
testbench's part 2 is exactly that. Slices grow with nesting, and a 4-word
slice that starts at word 22 already spans two 32-byte lines.

### Terminating levels (`tlo.br`)

Every block of the last level would otherwise end with `lo.br zero,0:0:1`,
which fills a whole slice just to leave the region. `tlo.br` removes that
slice. It is a level-offset branch that also states how many slices the next
level has. The context carries a third field, `rem`, loaded with that count:

- Each ordinary slice of the level decrements `rem`.
- After the last one, the context returns to `(1,0)` at `next_slice`, which is
  what the missing `lo.br zero,0:0:1` would have done.

A terminating level has at most 8 blocks and 8 slices, because the slice count
must share the operand bits (see section 2).

### Level-offset calls

A function called from one side of a secret branch needs a dummy twin on the
other side, and the two are folded together (a level of two blocks).
`lo.call b, l` jumps to the folded function at `l` with context `(2, 0)`
(real part) when `b` is true, or `(2, 1)` (dummy part) otherwise.

The dummy part must be a real mirror of the function: the same instruction
kinds, with results discarded (writes to `x0`). Nested secret branches inside
the function fold as usual. The paths of the real half must end at offset 0
and those of the dummy half at offset 1. The testbench does this with
`lo.br zero,0:0:2` and `lo.br zero,1:1:2`.

### Public control flow inside a folded region

An ordinary branch or jump whose condition is public may stay unfolded inside
a folded region. The frontend takes it like any branch but keeps the offset:
the new slice is `target - 4*off`. The software must place the targets of all
blocks of a slice in one target slice at matching offsets. Word 6/7 of the
test program is such a branch.

## 2. Instruction encoding

Libra reuses the two low bits of the 32-bit RISC-V encoding, which are always
`11` for standard 32-bit instructions. Compressed 16-bit instructions are not
supported, so those bits are free.

| bits [1:0] | opcode [6:2] = BRANCH | opcode = JAL (rd must be ra) |
|---|---|---|
| `11` | ordinary branch | jal / call |
| `01` | `lo.br` | `lo.call` real (`b` = 1) |
| `10` | `tlo.br` | `lo.call` dummy (`b` = 0) |
| `00` | illegal | illegal |

The condition of `lo.br` and `tlo.br` is that of the underlying branch
(`funct3`, `rs1`, `rs2`). The 12 bits that held the branch displacement,
`F = {instr[31:25], instr[11:7]}`, hold the operands:

```
lo.br :  F[11:8] offT   F[7:4] offF   F[3:0] bbc-1                      (up to 16 blocks)
tlo.br:  F[11:9] offT   F[8:6] offF   F[5:3] bbc-1   F[2:0] nslices-1   (up to 8 blocks, 8 slices)
```

`lo.call` keeps the JAL displacement. Calls are recognised as `jal`/`jalr`
with `rd = ra`. A return is `jalr x0, 0(ra)`, and `mret` ends a trap
handler. A CSR instruction on CSR 0x7C0 accesses the saved context (section 3). `lo_decoder` turns a word into a `dec_t`: its kind plus these fields.

## 3. The context stack, calls, returns and traps

`libra_ctx_stack` holds two contexts: the current one and the caller's. How
each event uses it:

- **Ordinary call.** Pushes: the caller's context, advanced past the calling
  slice, moves down, and the callee runs at `(1,0)`.
- **`lo.call`.** Pushes the same way, with `(2, b?0:1)` as the new current
  context.
- **Return.** Pops. The link register holds `pc + 4*bbc`, the caller's next
  slice at the caller's offset. The new slice address is therefore
  `ra - 4*off_caller`.
- **Traps.**
  - While `irq_i` is high, the frontend enters the handler at `trap_vec_i` at
    the next clean boundary: nothing unresolved, and the slice has been
    entered.
  - It pushes the context of the instruction that has not yet issued and
    reports that instruction's PC on `irq_epc_o` with the one-cycle
    `irq_ack_o`. The backend keeps that PC and returns it as the resolved
    target of `mret`.
  - `mret` then pops exactly like a return, so an interrupt in the middle of a
    folded level resumes at the right offset.

Two levels are enough for a leaf function called from folded code. Deeper
nesting is left to software: a non-leaf callee saves the caller's context
before it calls, and restores it before it returns.

- **Save and restore.** Software reaches the lower level through a CSR:
  `CSR_LIBRA_CTX` = 0x7C0, from the custom read/write range.
  - Register format: `[3:0]` = bbc-1, `[7:4]` = off, `[11:8]` = rem. Writing
    zero therefore installs `(1,0)`.
  - Any CSR instruction on this number is serialising. The frontend issues
    it, then stalls until the backend resolves it, so no call or return can be
    in flight around it.
  - The backend reads `csr_rdata_o` when it executes the instruction. In the
    same cycle as the resolution it writes with `csr_we_i`/`csr_wdata_i`.
- **Non-leaf function pattern.** The test program's folded function does
  this, keeping `ra` as usual:

  ```
  csrrw t3, 0x7C0, x0     # save the caller's context in t3 and clear it
  ...                     # body, including its own (lo.)call
  csrrw x0, 0x7C0, t3     # put the caller's context back
  ret
  ```

- **Overflow flag.** A push that discards a lower level other than `(1,0)`
  sets the sticky flag `ctx_overflow_o`. This catches software that forgot to
  save.

An interrupt taken inside a folded function discards the function's caller
context in the same way. Software that allows that must keep the context in
its own save area.

## 4. Fetching a slice without revealing the offset

The instruction cache, and the prefetcher behind it, must see the same
accesses whichever block of a slice is active. `slice_fetch_unit` achieves
this as follows.

- **Folded mode** (slice size > 1).
  - Starting a slice invalidates the unit's line buffer.
  - It then requests every line that holds part of the slice, in ascending
    address order, one request at a time.
  - Nothing of the slice is handed to decode until the last line has arrived.
  - Lines that were already buffered are requested again. Without this, the
    cache would see whether the previous slice happened to share a line with
    this one, which can depend on the path taken.
- **Normal mode** (slice size 1). Lines are fetched on demand and reused while
  they stay buffered.

The buffer has `NSLOT` line slots, indexed by line address modulo `NSLOT`. It
is sized so that the longest slice (16 words, starting at the last word of a
line, so 3 lines of 32 B) never collides with itself: `NSLOT` = 4.

The line address to fetch is computed from the slice address and `bbc` only.
The offset selects a word from the buffered lines after the sequence is
complete.

**Starting a slice during a pending sequence.**

- A folded start that arrives while a request is still out is remembered
  (`start_pend_q`). The new sequence begins after the response.
- An unfolded start abandons the pending sequence. Only a trap can cause this.
  The one request already out still completes, and no further lines of the old
  slice are requested.

The sequence's last line is latched when it starts, so changing `base_i`
afterwards cannot extend it.

**Timing.** With a cache that accepts a request at once and answers after `L`
cycles, a slice of `n` lines is ready about `n*(L+2)` cycles after `start_i`.
`ready_o` is combinational on the buffer state. The read port `rd_addr_i` →
`rd_instr_o` is combinational.

## 5. Prediction, the level-offset-branch stall and speculation

A branch predictor indexed by PC, trained inside a folded region, would record
the active offset. `bp_gate` therefore does the following.

- **Outside folded regions.** Only ordinary conditional branches look up the
  predictor. Its answer, taken with a target or a miss meaning not taken, is
  used.
- **Inside folded regions.** There is no lookup and no training at all.
  `bp_suppressed_o` flags each blocked lookup (any branch kind in folded code,
  and every `lo.br`/`tlo.br`).

The frontend follows one of three policies, depending on what it issues:

- **`lo.br` / `tlo.br`.** The frontend issues the branch, moves straight to
  `next_slice` and starts fetching it with the new slice size. It then stalls
  until the backend resolves the condition; `lob_stall_o` is high during the
  stall. The resolution only chooses which context to install. The fetch
  overlaps the branch latency, so the stall costs about the resolution
  latency.
- **Ordinary branch in folded code.** The predictor is off, so the frontend
  stalls until resolution and then goes to `target - 4*off` or `next_slice`.
  This is a public branch, so its timing may depend on its outcome.
- **Ordinary branch outside folded code.** The frontend follows the
  prediction. One predicted branch may be unresolved at a time, and further
  non-control instructions keep issuing behind it.
  - A misprediction raises `flush_o` for one cycle, in the cycle the
    resolution arrives. The backend drops everything issued after the branch.
    Fetch restarts on the right path.
  - The resolution always trains the predictor through `bp_update_*`.

`jalr` (including returns and `mret`) waits for its target from the backend.
Direct jumps and calls are redirected at issue.

## 6. Module map and interfaces

```
libra_frontend            top: slice address register, issue/resolve control
 ├─ libra_ctx_stack       current + caller context, csr port, overflow flag
 ├─ lo_decoder            instruction word -> kind and Libra operands
 ├─ slice_nav             all successor slices/contexts (combinational)
 ├─ slice_fetch_unit      line buffer, fixed-order slice fetch
 └─ bp_gate               predictor enable, lookup/training gating
libra_pkg                 widths, context type, decoded-instruction type
```

`libra_frontend` ports. Everything is synchronous to `clk_i`, and `rst_ni` is
an asynchronous active-low reset. After reset the context is `(1,0)` and fetch
starts at `RESET_PC`.

| group | signals | protocol |
|---|---|---|
| instruction memory | `mem_req_valid_o/addr_o`, `mem_req_ready_i`; `mem_resp_valid_i/data_i` | one line request at a time, held until `ready`; one response per request, whole line, any latency |
| predictor | `bp_lookup_valid_o/pc_o` → `bp_hit_i/bp_target_i` (same cycle); `bp_update_valid_o/pc_o/taken_o/target_o` | lookup answered combinationally |
| issue | `issue_valid_o`, `issue_ready_i`, `issue_pc_o`, `issue_instr_o`, `issue_kind_o`, `issue_link_o` | valid/ready, one per cycle, in program order; `issue_link_o` is the value a call writes to `ra` |
| resolution | `resolve_valid_i`, `resolve_taken_i`, `resolve_target_i` | one pulse per issued branch, `lo.br`, `tlo.br`, `jalr`, return or `mret`, in order; at most one is ever outstanding, so no tag is needed |
| flush | `flush_o` | drop everything younger than the resolved branch |
| traps | `irq_i`, `trap_vec_i` → `irq_ack_o`, `irq_epc_o` | level request; one-cycle acknowledge with the PC to resume |
| context | `csr_rdata_o`, `csr_we_i`, `csr_wdata_i`; `ctx_o`, `ctx_prev_o`, `ctx_overflow_o` | context CSR, read at execute and written at resolution of a serialising CSR instruction; observation of both levels and the overflow flag |
| status | `folded_o`, `lob_stall_o`, `bp_suppressed_o` | observation only |

Assertions in the RTL check these rules: no resolution without an outstanding
transfer, the context CSR written only while its instruction resolves,
never a stall and a prediction outstanding together, a presented
instruction holds until taken, a line request holds until accepted, slice
sizes in range, and never a push and a pop in the same cycle.

## 7. Verification

All testbenches are self-checking and print
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog. With plain Verilator
(5.x), from the repository root:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/libra_pkg.sv tb/tb_libra_asm.sv \
    rtl/lo_decoder.sv rtl/libra_ctx_stack.sv rtl/slice_nav.sv \
    rtl/slice_fetch_unit.sv rtl/bp_gate.sv rtl/libra_frontend.sv \
    tb/tb_libra_frontend.sv --top-module tb_libra_frontend -o sim && ./obj_dir/sim
```

Replace the last testbench file and the top module name to run another one.
Every testbench builds without warnings at Verilator's default lint level.
`tb_libra_asm.sv` is a package of instruction encoders. They are written from
the field layout of section 2, independently of the decoder.

| testbench | what it checks |
|---|---|
| `tb_lo_decoder` | random `lo.br`/`tlo.br`/`lo.call`/branch/jump/call/return words `mret` and CSR accesses: kind and every operand field (2810 checks) |
| `tb_libra_ctx_stack` | random push/pop/set/csr sequences against a reference model, including the overflow flag and priorities (1001) |
| `tb_slice_nav` | every successor against the layout formulas, including the countdown and exit of a terminating level (7000) |
| `tb_slice_fetch_unit` | folded slices: one request per line, ascending, repeated in full for an already-buffered slice, all words read back. Normal mode: reuse without requests. A trap in the middle of a sequence (1070) |
| `tb_bp_gate` | lookup, prediction, suppression flag and training gating for every kind, folded or not (2400) |
| `tb_libra_frontend` | end to end at default parameters, described below (82) |
| `tb_libra_modexp` | workload: square-and-multiply exponentiation, folded and leaky builds (59) |
| `tb_libra_switch` | workload: four-way switch on secret data, folded and leaky builds (41) |
| `tb_libra_random` | 40 random chains of folded levels with `lo.call`s, public branches and an interrupt, 4 secret pairs each, against an instruction-level model (686) |

**End-to-end test.** `tb_libra_frontend` surrounds the frontend with:

- an instruction memory with a 2-cycle line latency;
- a branch target buffer that learns from `bp_update_*`;
- an in-order backend executing a small RV32I subset, which resolves branches
  after 3 cycles and honours `flush_o`.

The program has five parts:

1. a two-way folded branch with a public branch inside it;
2. a nested folded branch, with a two-line slice;
3. the same with `tlo.br`;
4. `lo.call` of a folded function, real on one side and dummy on the other,
   with a nested folded branch inside. The function is non-leaf: it saves the
   caller context through the CSR, makes its own `lo.call` and restores the
   context;
5. a predicted public loop with mispredictions, and an ordinary call and
   return.

An interrupt arrives inside the inner folded level of part 2. The handler runs
and `mret` returns into the folded level.

The program runs for all four combinations of a secret and a public input, and
the test checks:

- **Results.** Register values are compared with values worked out by hand.
- **Reference semantics.** The testbench has its own instruction-level model
  of the Libra rules: PC, context, context stack, calls, traps and the CSR,
  with no slices, timing or speculation. It runs the same program from the
  same registers, with the interrupt before the same dynamic instruction. The
  sequence of executed PCs and the final registers must match it exactly.
- **Secret independence.** For a fixed public input, everything below must be
  identical whatever the secret:
  - the cycle-by-cycle instruction-memory request trace;
  - the predictor-lookup trace;
  - the sequence of slice addresses issued;
  - the total run time (328 cycles).
- **Mechanism counts.** Across the four runs:

  | mechanism | count |
  |---|---|
  | `lo.br` | 40 |
  | `tlo.br` | 4 |
  | implicit `tlo.br` exits | 4 |
  | `lo.call` real / dummy | 4 / 4 |
  | calls / returns | 4 / 12 |
  | context CSR accesses | 8 |
  | stall cycles | 176 |
  | two-line slices | 4 |
  | correct taken predictions | 20 |
  | flushes | 8 |
  | blocked predictor lookups | 48 |
  | public branches inside folded code | 4 |
  | interrupts in folded code / `mret` | 4 / 4 |

  Each count must be non-zero. The worst `lo.br`-to-next-issue gap must stay
  within the backend latency plus two line fetches (it is 12 cycles). Handler
  entry must cost at most two line fetches (it is 10 cycles). The
  context-stack overflow flag must never rise, which shows the CSR
  save/restore worked.

**Workload test.** `tb_libra_modexp` computes `b^e mod 2^16` over an 8-bit
secret exponent. The conditional multiply is a terminating level: the real
block multiplies into `r`, the dummy block does the same into `x0`. The test
checks:

- the result, for four exponents and two bases;
- for the folded build, identical traces and cycle count for every exponent
  (353 cycles);
- for a leaky build with an ordinary skip branch, that the cycle count does
  vary (172 to 217 cycles), which proves the comparison would catch a leak.

With these memory and backend latencies, folding costs about 1.8x over the
leaky build. Most of that is the stall after each `tlo.br`.

**Random folded programs.** `tb_libra_random` generates programs made of
regions. Each region is a little straight-line code, then a chain of one to
three folded levels:

- Every block of a level ends in its own `lo.br` into the next level. The
  condition and the two offsets of each `lo.br` are random.
- The last level either closes with `lo.j` in every block or is a
  terminating level entered by `tlo.br`.
- Levels have 2 to 16 blocks, or 2 to 8 when terminating. Slices therefore
  span up to three cache lines, at every alignment.
- Now and then a row of a level, or of the straight-line code, is a row of
  `lo.call`s, real or dummy per block. They call one function folded with its
  dummy, which must return to the caller's context.
- In levels that are not terminating, a row may instead hold an ordinary
  branch on a public input in every block. All of them target the same slice
  further on, as the folding rules require of a public branch kept inside a
  region.
- One interrupt per run arrives at a random cycle, the same for every
  secret. It is masked while a called function runs, because the trap would
  discard the caller's context. The handler counts in a register and returns
  with `mret`.

Each program runs with four random secret pairs. The final registers must
equal those of a small instruction-level model written from the PC and
context rules alone. The memory requests, slice trace and cycle count must be
identical for all four secrets. So must the cycle and slice at which the
interrupt is taken. The interrupted PC itself carries the secret offset, and
it is only ever handed to software.

**Second workload test.** `tb_libra_switch` consumes a secret word two bits
at a time. Each pair selects one of four updates of an accumulator. The folded
build uses `lo.br` on the high bit to enter a level of two blocks. Each of those
blocks holds a `tlo.br` on the low bit into one shared terminating level of
four blocks, the case bodies. The leaky build is the usual compare-and-branch
chain. The test checks:

- the result, for five secrets;
- for the folded build, identical traces and cycle count for every secret
  (385 cycles);
- one `lo.br` and one `tlo.br` per switch;
- that the predictor is kept off inside the switch and never in the leaky
  build;
- that the leaky build's time does vary (174 to 266 cycles).

## 8. Where this design departs from the published design, and what it assumes

- **Scope.** The published design is an extension of an existing out-of-order
  RISC-V core. This RTL covers the parts that the extension changes or adds:
  - the Libra-aware fetch;
  - the context and its stack;
  - the folded-layout next-PC logic;
  - the decoding of the new instructions;
  - the predictor gating.

  The core's backend, instruction cache, prefetcher and predictor are outside,
  behind ports.

  The leakage classification of the instruction set is a rule for software,
  so it has no hardware here. An example is which instructions have
  operand-dependent timing and must be balanced by the compiler.
- **Encoding.** Using the two prefix bits follows the published approach. The
  bit positions of the operands, and the use of the JAL opcode for `lo.call`,
  are this design's choices.
- **`tlo.br` mechanism.** The instruction is described by what it does. The
  `rem` countdown that implements it, and the 3-bit slice count, are this
  design's.
- **Line buffer.** The published design fetches all lines of a slice in a
  fixed order. The buffer organisation, the re-request of buffered lines, the
  32-byte line and the single outstanding request are this design's choices.
- **Public branches in folded code stall** until resolved, because the
  predictor is off there. The published design only says the predictor is
  disabled; a core could instead fall through and flush.
- **Speculation depth.** One predicted branch at a time outside folded code,
  and no return-address stack. This is much shallower than a real
  out-of-order frontend, and is a simplification of this design.
- **Stall after `lo.br`.** This matches the published prototype. The
  published work names removing this stall as future work.
- **Context save/restore.**
  - The two-level stack and the software responsibility for deeper nesting
    follow the published design.
  - The context CSR (its number, format and serialisation), the overflow flag
    and the trap entry/exit are this design's.
  - The published text only says that exceptions in folded code need the
    two-level stack. It does not give a trap mechanism.
  - The PC reported at a trap includes the offset inside the slice, so it is
    as secret as the branch outcomes. A handler must not let it reach memory
    addresses, timing or control flow. The entry time and the slice do not
    depend on it.
- **Reset** puts both contexts at `(1,0)` and the PC at `RESET_PC`.

## 9. Parameters

| parameter | where | default | meaning |
|---|---|---|---|
| `MAX_BBC` | `libra_pkg` | 16 | blocks per level (`lo.br`), as in the published prototype |
| `MAX_TBBC` | `libra_pkg` | 8 | blocks per terminating level, as in the published prototype |
| `MAX_TSLC` | `libra_pkg` | 8 | slices per terminating level (limited by the encoding) |
| `RESET_PC` | `libra_frontend` | 0 | first fetch address |
| `LINE_BYTES` | `libra_frontend`, `slice_fetch_unit` | 32 | instruction-cache line size |
| `MAX_WORDS`, `NSLOT` | `slice_fetch_unit` | 16, 4 | longest slice, buffer slots (derived) |

Changing `MAX_BBC` or the limits for terminating levels also means changing
the operand layout in `lo_decoder` and in the encoders of `tb_libra_asm`.
`LINE_BYTES` must be a power of two. `NSLOT` follows from it. Only 32-byte
lines have been simulated.
