# Shadow branch decoding for an x86-64 decoupled front end

A decoupled front end (FDIP: fetch-directed instruction prefetching) runs a
branch predictor ahead of fetch. It writes the predicted basic blocks into a
fetch target queue (FTQ) and prefetches their cache lines into the L1-I. This
only works as far as the BTB knows the branches. When a branch misses in the
BTB, the predictor walks straight past it and the prefetcher follows the wrong
path.

Many of those BTB-missing branches sit in cache lines the front end has
already fetched, in bytes that the core never decodes:

- **Head shadow:** the bytes of a line before the entry point, where a taken
  branch jumped into the line.
- **Tail shadow:** the bytes after the taken branch that leaves the line.

This design decodes those shadow bytes off the critical path. It keeps the
direct jumps, direct calls and returns it finds in a small Shadow Branch
Buffer (SBB). The SBB is looked up alongside the BTB and answers when the BTB
misses.

The RTL is SystemVerilog-2017. It is synthesizable and has no vendor
primitives.

## Blocks

```
 lookup pc ──► skia_bpu ───────────────────────► block former ──► ftq ──► fetch engine (outside)
               │ btb       8K entries, 4-way                        │        │
               │ u_sbb     768 entries, 4-way                       │        │ lines read
               │ r_sbb     2024 entries, 4-way                      │        ▼ from the L1-I
               │ ras       16 entries                               │    shadow_branch_decoder
               ▲                                                    │        │  (x86_length_decoder)
               └──────────── SBB fills ◄────────────────────────────┼────────┘
                                                                    └─► prefetch line address
```

| File | Role |
|---|---|
| `rtl/skia_pkg.sv` | Shared types: addresses, 64-byte lines, FTQ entry, SBB fill, branch kinds |
| `rtl/x86_length_decoder.sv` | Combinational x86-64 instruction length and branch-class decoder at one byte offset of a line |
| `rtl/shadow_branch_decoder.sv` | Head and tail shadow decoding state machine (SBD) |
| `rtl/sa_table.sv` | Set-associative tag/data array with one LRU bit and an optional retired bit per way |
| `rtl/btb.sv` | 8K-entry BTB: tag, valid, LRU, 2-bit type, 64-bit target |
| `rtl/u_sbb.sv` | U-SBB: direct jumps and calls with their targets |
| `rtl/r_sbb.sv` | R-SBB: returns, located by line and byte offset, with no target |
| `rtl/ras.sv` | Return address stack |
| `rtl/ftq.sv` | 24-entry fetch target queue that prefetches each block's start line |
| `rtl/skia_bpu.sv` | Chooses between BTB, U-SBB and R-SBB, and updates the RAS |
| `rtl/skia_frontend.sv` | Top: predictor, block former, FTQ and SBD wired together |

The following are outside the design, and their signals are ports of
`skia_frontend`:

- the conditional direction predictor (TAGE-SC-L);
- the indirect target predictor (ITTAGE);
- the L1-I cache;
- the fetch engine;
- the core's decoder and back end.

## Finding instructions in the head shadow

This is the hardest part, because x86 instructions are 1 to 15 bytes long.
The decoder knows where one instruction starts: the entry offset E, the
target of the branch that brought fetch into the line. It does not know
whether byte 0 of the line starts an instruction or lies in the middle of
one. So it looks at every way of decoding bytes 0..E-1 that ends exactly on
byte E.

**Index computation.** For each byte i < E, the decoder computes
`Length[i]`, the length of the instruction that would start at byte i. The
value is 0 if no valid instruction starts there. An instruction also gets 0
if it would run past the end of the line.

`x86_length_decoder` handles the following, in 64-bit mode:

- legacy prefixes (66, 67, F2, F3, segment, F0) and REX;
- the one-byte opcode map and the 0F, 0F38 and 0F3A maps;
- ModRM, SIB and displacement sizes, including RIP-relative;
- immediates, with the 66 prefix rule for operand size and the 8-byte
  `mov r64, imm64`.

Opcodes that are invalid in 64-bit mode give length 0. So do VEX and EVEX
encodings, which this design does not decode. The same block also reports the
branch class and the rel8/rel32 displacement of the instruction.

**Path validation.** A path starts at a byte s and steps forward by
`Length`. It is valid if it lands exactly on E. Every candidate start from
byte 0 to byte 14 is counted. A start at byte 15 or later would leave room
for a whole instruction before it, so no first instruction can begin there.

- If 6 or more starts are valid, the line is too ambiguous and is discarded
  (`head_discard`).
- Otherwise the path from the lowest valid start, the *first index*, is
  decoded. Its jumps, calls and returns become SBB fills.

Instead of walking each path forward, the hardware sweeps backwards once from
E-1 to 0. It keeps one bit per byte: `reach[i]` is set when
`Length[i] != 0`, `i + Length[i] <= E`, and `reach[i + Length[i]]` is set.
Starting from `reach[E] = 1`, this marks exactly the bytes whose forward walk
lands on E. The sweep takes E cycles, the same as index computation.

Example: the line `31 C3 4D 85 E4 75 30 | 48 83 C4 10 ...` with entry at
byte 7. Five starts reach byte 7: 0, 1, 2, 3 and 5.

- The first index is 0: `xor ebx,eax` / `test r12,r12` / `jne`.
- That path holds no jump, call or return, so nothing is emitted.
- The `ret` (`C3`) at byte 1 belongs to another path and is not emitted.

The testbench checks this line, two more hand-worked lines, and 300 random
lines against a separate forward-walking reference model.

**Tail shadow.** The taken branch that leaves the line starts at a known
byte, so the tail has only one decoding. The SBD decodes that branch to learn
its length, steps over it, and decodes up to the end of the line.

**What is emitted.** Direct unconditional jumps (`E9`, `EB`) and direct calls
(`E8`) go to the U-SBB, with target = address + length + displacement.
Returns (`C3`, and `C2 imm16`) go to the R-SBB. Conditional branches are
skipped, because their direction is unknown. Indirect branches are skipped,
because their target is unknown.

**Timing.** There is one length decoder, used for one byte position per
cycle. A line with entry offset E, H instructions on the chosen head path
and T instructions after the exit branch takes:

```
1 + E (index) + E (validate) + 1 (pick) + H   then   1 + T   then done
```

Without head decoding, only the tail term remains. `ready` is high only when
the SBD is idle. The top drops any line that arrives while the SBD is busy
and counts it as `ev_sbd_drop`. Shadow decoding is opportunistic, so nothing
waits for it.

## Shadow Branch Buffers and BTB

All three tables are built on `sa_table`. Every entry has a 10-bit tag, a
valid bit and one LRU bit per way.

| Table | Entries | Ways | Payload | Bits per entry | Set index |
|---|---|---|---|---|---|
| BTB | 8192 | 4 | 2-bit type, 64-bit target | 78 | pc mod 2048 |
| U-SBB | 768 | 4 | retired bit, call/jump bit, 64-bit target | 78 | pc mod 192 |
| R-SBB | 2024 | 4 | retired bit, RET/RET-imm bit, 6-bit offset | 20 | line mod 506 |

The tag is the low 10 bits of the index quotient. The set count does not
have to be a power of two: the index is a modulo.

The R-SBB matches on {tag, 6-bit byte offset}. Several returns of one line
can therefore live in different ways. It stores no target: a return predicted
from it takes the top of the RAS.

**Replacement.** The one LRU bit per way works as an MRU bit. A hit or a fill
sets the way's bit. When every bit in the set would be set, the other bits
are cleared.

An SBB entry whose prediction is later committed gets its retired bit set
(`rt_valid`, `rt_pc`, `rt_src`). Retired entries are evicted last, so
decoded branches that were never used go first. The victim is chosen in this
order:

1. an invalid way;
2. a non-retired way with a clear LRU bit;
3. any non-retired way;
4. a way with a clear LRU bit.

A fill for an address that is already present updates that entry in place.

**Selection (`skia_bpu`).** All three tables are looked up with the same
address in the same cycle. The result is combinational and follows this
order:

1. **BTB hit:** the BTB type and target are used. For a BTB return, the
   target is the RAS top.
2. **Else U-SBB hit:** a jump or a call with its stored target.
3. **Else R-SBB hit with a non-empty RAS:** a return to the RAS top.

A predicted call pushes `pc + 5`; a predicted return pops.

`pc + 5` is exact for the `E8 rel32` calls the SBD finds. For calls from the
BTB it assumes 5 bytes, because BTB entries hold no instruction length.

The RAS is a circular buffer of 16 entries. A push onto a full stack
overwrites the oldest entry and raises `overflow`.

## Block former, FTQ and the top

`skia_frontend` contains the smallest possible address generator. The walker
outside offers one instruction address per cycle on the predicted path
(`lk_pc`), together with the conditional direction (`lk_cond_taken`) from
the direction predictor.

When the predictor says the instruction is a taken branch, the current block
closes. An FTQ entry {start, exit = `lk_pc`, target} is enqueued, and the
next block starts at the target.

- `lk_ready` goes low when the FTQ is full (`ev_ftq_full` is raised) or
  during a resteer.
- `resteer_valid` flushes the FTQ in one cycle and restarts the block at
  `resteer_pc`.
- The FTQ issues a prefetch of each entry's start line one cycle after the
  enqueue (`pf_valid`, `pf_line`).

The fetch engine dequeues entries and returns the lines it reads (`line_*`).
The top remembers the last dequeued entry and sends lines to the SBD:

- the line that holds the entry's start gets head decoding, unless the entry
  offset is 0;
- the line that holds the entry's taken exit branch gets tail decoding;
- a line that is both gets both.

The parameters `HEAD_DECODE` and `TAIL_DECODE` switch each kind of shadow
decoding off separately. The two are independent, and both are on by
default.

Every `ev_*` output pulses for one cycle. These outputs are for performance
counters.

## Where this design departs from, or goes beyond, the source description

- **Length vector example.** The published worked example's length vector
  (bytes `45 3B D8 E9 F9 03 00 00 41`) is illustrative rather than real
  x86-64. `45` is a REX prefix, so the instruction at byte 0 is 3 bytes, not
  1. This decoder follows the real encoding.
- **Path count in that example.** The example names three valid paths, but
  its own vector also lets paths from bytes 6 and 8 reach the entry. This
  design counts every start that lands exactly on the entry.
- **Discard rule.** "A maximum of six valid paths" is implemented as: discard
  at 6 or more.
- **R-SBB size.** 2024 entries of 20 bits make 4.94 KB, slightly more than
  the 4.9375 KB budget quoted with it. The entry count is kept.
- **Spare type bits.** The entry sizes quoted for the SBBs (78 and 20 bits)
  leave one bit each beyond the listed fields. It is used as a type bit:
  call/jump in the U-SBB, RET/RET-imm in the R-SBB.
- **Choices of this design where the source is silent:**
  - the RAS depth and its update rule;
  - table indexing and tag hashing;
  - the victim order among retired and LRU bits;
  - the START_WINDOW of 15 bytes;
  - dropping lines while the SBD is busy;
  - the block former and the flush behaviour.
- **Not predicted here.** Indirect branches are not predicted by this top.
  ITTAGE is outside, and its target would be merged by the walker.
- **VEX/EVEX.** Instructions with these prefixes are not decoded. A head
  path through them is invalid.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Testbench | Size | What it checks |
|---|---|---|
| `tb_x86_length_decoder` | n/a | 447 hand-assembled encodings at several offsets, cut at line end |
| `tb_shadow_branch_decoder` | default | three hand-worked lines (paths, fills, cycle counts), 300 random lines against a reference model |
| `tb_btb`, `tb_u_sbb`, `tb_r_sbb` | 16 entries | hits, in-place update, LRU and retired-bit victim order, offset matching |
| `tb_ras` | depth 8 | random push/pop against a queue model, overflow |
| `tb_ftq` | 24 | fill to full, prefetch per entry, random traffic against a model, flush |
| `tb_skia_bpu` | small tables | BTB priority, U-SBB/R-SBB prediction, RAS use, retire, eviction, overflow |
| `tb_skia_frontend` | all defaults | end-to-end run (see below) |

`tb_skia_frontend` runs the top with no parameter overrides. It supplies
hand-assembled x86 code and models the fetch engine. It counts, and requires
at least once:

- BTB, U-SBB and R-SBB predictions;
- head and tail fills and a head discard;
- SBD drops;
- an FTQ-full stall, prefetches and a resteer flush;
- a retire hit;
- U-SBB and R-SBB evictions;
- a RAS overflow.

It also checks the exact predicted targets. For example, a call found in a
head shadow is later predicted from the U-SBB. A return found in a tail
shadow is then predicted to the address after that call.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert rtl/skia_pkg.sv rtl/*.sv tb/tb_skia_frontend.sv \
          --top-module tb_skia_frontend -o sim && ./obj_dir/sim
```

The full-size end-to-end run builds in about 10 s and simulates in well
under a second.

## Lint notes

Verilator `-Wall` reports the following, and they are left as they are:

- Unused package items and unused parameters.
- `SYNCASYNCNET` on `rst_n`. The reset is asynchronous for state and also
  appears in the `disable iff` of the concurrent assertions.
- Unused upper bits of the SIB byte in `x86_length_decoder`. Only the base
  field changes the length.
- The unused `head` flag of the fill in `skia_bpu`. Head and tail fills are
  stored alike, and the flag only feeds event counting at the top.

Yosys (with the slang front end) parses and elaborates every module at its
default size. Coarse synthesis of the full-size top takes more than ten
minutes. This is mostly because of the valid, LRU and retired bits of the
8K-entry BTB, which are reset flops. With 64/16/16-entry tables the same top
synthesizes in under two minutes.
