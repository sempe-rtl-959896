# SeMPE: secure multi-path execution of secret branches — RTL of the processor extension

A conditional branch on a secret leaks that secret through timing, cache
footprint, memory-access order and branch-predictor state, because only one
of its two paths runs. SeMPE closes this source of leaks in hardware: a branch
marked as secret (an **sJMP**) runs *both* of its paths, always the not-taken
path first, and commits every instruction of both. The taken path starts from
the register state that existed before the branch. When both paths are done,
the register state of the path the secret actually selected is rebuilt from
snapshots. The reads and writes needed for that are the same whichever path
was true. An attacker watching the core therefore sees the same sequence of
instructions, register-restore work and cycle count for every value of the
secret.

This repository holds SystemVerilog RTL for the hardware that SeMPE adds to an
out-of-order core:

| module | role |
|---|---|
| `sempe_pkg` | shared sizes, enums (snapshot select, path, operation) and the x86 prefix bytes |
| `sempe_predecode` | recognises sJMP and eosJMP in the byte stream and tells fetch to fall through without the branch predictor |
| `jb_table` | the Jump-Back Table, a LIFO with one entry per open secret branch, plus the NextPC mux and the issue-readiness bit for nested sJMPs |
| `archrs_ctrl` | the architectural-register snapshot (ArchRS) sequencer: save, intermediate restore, final secret-independent restore |
| `sempe_spm` | the scratchpad memory that holds one snapshot per nesting level |
| `drain_ctrl` | stops register renaming around each sJMP / eosJMP until the snapshot work is done |
| `sempe_top` | all of the above wired together, with plain ports towards the core |

The core itself is not part of this RTL: fetch, rename, issue queue, reorder
buffer, register file and branch predictor stay as they are. `sempe_top`
exposes the few signals SeMPE needs from them.

## 1. Programming model

Software marks a secret branch by putting the byte **0x2e** in front of an
ordinary conditional jump. It marks the join point of the two paths (the
immediate post-dominator of the branch) with **eosJMP**, the byte pair
**0x2e 0x90**. A core without SeMPE treats 0x2e as a static-prediction hint
and 0x2e 0x90 as a NOP, so the same binary runs anywhere, only without the
protection. Each sJMP needs exactly one eosJMP. When nested secret branches
share a join point, one eosJMP per branch is placed there.

```
        2e 0f 8e rel32     sJMP (jle)  ->  not-taken path
        ...                            NT path
        jmp  JOIN
TARGET: ...                            T path (may contain nested sJMPs)
JOIN:   2e 90              eosJMP
```

Memory is outside SeMPE's rollback. Variables that both paths write must be
privatised by the compiler (one copy per path) and merged with `CMOV` after
the join. SeMPE handles register state in hardware.

`sempe_predecode` recognises the prefix on the short (0x70-0x7f rel8) and near
(0x0f 0x80-0x8f rel32) Jcc forms. It reports the instruction length and the
taken-path target, and raises `bpred_bypass_o` so that the predictor is neither
consulted nor trained. Fetch then continues at the fall-through address.

## 2. Life of one secret branch

The sequence below is the same for every secret value. Only the last step
reads the T/NT outcome, and even there it only picks which of two values
already read is written back.

| event at the core | Jump-Back Table | snapshot engine (SPM level L = nesting depth) | rename |
|---|---|---|---|
| sJMP renamed | – | – | stalled from next cycle (drain 1) |
| sJMP issued (needs V2) | push {addr=–, T/NT=–, JB=0, Valid=0} | – | stalled |
| sJMP executes | store target and outcome | – | stalled |
| sJMP commits | Valid=1 | save **all** registers to PRE[L], clear vectors of L | stalled until the save ends |
| NT path retires | – | registers written are ORed into NT-vector[L] | running |
| 1st eosJMP renamed / commits | JB=0: **next PC = stored target**, set JB | save NT-modified registers to POST_NT[L], then reload them from PRE[L] | drain 2 until done |
| T path retires | – | registers written are ORed into T-vector[L] | running |
| 2nd eosJMP renamed / commits | JB=1: pop the entry | **final restore** (below); fold L's vectors into level L-1 | drain 3 until done |

**Final restore.** For every register set in `T-vector | NT-vector`, both
PRE and POST_NT are read from the scratchpad and the register is written:

| outcome | register modified on NT path | modified on T path only |
|---|---|---|
| NT path was the true path | POST_NT value | PRE value |
| T path was the true path | its current value (written back to itself) | its current value |

When the T path is true, the current register file already holds the right
state. The restore after the NT path reloaded every register the NT path had
changed, and the T path then ran on top of that. The values read from the
scratchpad are discarded and each register is rewritten with its own value.
This keeps the scratchpad traffic and register-file writes identical to the
NT-true case.

**Nesting.** The scratchpad offset is the nesting level, so an sJMP inside a
path opens level L+1 without disturbing level L. When the inner block ends,
the registers it may have touched (the union of its two vectors) are ORed into
the outer level's vector for the outer path that is running. The outer restore
then treats them like any other register that path wrote.

**Flushes.** An sJMP can be squashed before it commits (by an older
mispredicted ordinary branch, for instance). For each squashed sJMP the core
reports one in `squash_cnt_i` and the newest table entry is deleted. A
committed sJMP cannot be squashed, so its entry and snapshot stay valid. An
assertion checks this.

**Issue rule.** A new sJMP may issue only when the table is empty or its
newest entry is Valid (the previous sJMP has committed). `sjmp_v2_o` carries
that condition. The core copies it into the otherwise unused second-operand
ready bit (V2) of the sJMP's issue-queue entry, so the existing select logic
enforces the rule. Together with the drains this keeps the table strictly LIFO
with no address comparisons.

**Overflow.** 30 levels are supported. An sJMP that would push a 31st entry is
refused and `jbt_overflow_o` pulses. The core is expected to raise an
exception, since deep nesting normally comes from recursion, which SeMPE code
must not use.

## 3. Snapshot engine timing

The scratchpad moves one chunk of 8 registers (64 bytes) per cycle through a
single port, with one cycle of read latency. `archrs_ctrl` works chunk by
chunk and skips chunks in which no selected register lies. Counted from the
cycle the triggering instruction commits to the last busy cycle:

| operation | cycles | at the defaults |
|---|---|---|
| save all (sJMP commit) | NCHUNK + 1 | 7 |
| first eosJMP | 2 + 3n, n = chunks holding an NT-modified register | 2 … 20 |
| second eosJMP | 3 + 3m, m = chunks holding a register modified by either path | 3 … 21 |

n and m depend only on which registers the code writes, and both paths
always run, so neither depends on the secret. `drain_ctrl` keeps rename
stopped from the cycle after the sJMP/eosJMP is renamed until the engine is
idle again. The next instruction renames in that cycle. For a one-cycle
engine operation this gives the paper's example exactly: sJMP renamed in
cycle 3, retired in cycle 6, one scratchpad cycle, renaming again in cycle 8.

## 4. Connecting `sempe_top` to a core

Clock `clk`, asynchronous active-low reset `rst_n`. All inputs are sampled at
the rising edge. Outputs named below as combinational respond in the same
cycle.

| group | signals | what the core does |
|---|---|---|
| fetch | `fetch_valid_i`, `fetch_pc_i`, `fetch_bytes_i[7]` → `dec_is_sjmp_o`, `dec_is_eosjmp_o`, `dec_bpred_bypass_o`, `dec_length_o`, `dec_fallthru_pc_o`, `dec_target_pc_o` (combinational) | follows the fall-through for sJMP / eosJMP without touching the predictor |
| rename | `rename_barrier_i` (an sJMP or eosJMP renames this cycle) → `rename_stall_o`, `drain_start_o` | renames nothing while `rename_stall_o` is high |
| issue | `sjmp_issue_i` → `sjmp_v2_o` (combinational), `jbt_overflow_o` | copies V2 into the sJMP's issue entry and issues it only when V2 is set |
| execute | `sjmp_exec_i`, `sjmp_target_i`, `sjmp_taken_i` | reports the sJMP's computed target and outcome |
| retire | `sjmp_commit_i`, `eos_commit_i`, `commit_wmask_i[NREGS]` | pulses at commit. The mask names the architectural registers written by the instructions retiring this cycle |
| flush | `squash_cnt_i` | number of sJMPs squashed from the ROB this cycle |
| next PC | `core_next_pc_i` → `next_pc_o`, `redirect_o` (combinational) | on `redirect_o` (first eosJMP commit) discards younger fetched work and fetches from `next_pc_o` |
| registers | `arf_rd_chunk_o` → `arf_rd_data_i[8]` (combinational read), `arf_wr_en_o`, `arf_wr_chunk_o`, `arf_wr_mask_o`, `arf_wr_data_o[8]` (write at the edge) | gives access to the committed architectural registers, 8 at a time. It is used only while rename is stalled and the pipeline is empty, so committed values are stable |
| status | `jbt_count_o`, `secblock_depth_o`, `snap_busy_o` | observation |

Parameters (all modules): `AW` = 64 (address width), `DEPTH` = 30 (nesting
levels = table entries = snapshots), `NREGS` = 48 (architectural registers),
`RW` = 64 (register width), `BYTES_PER_CYCLE` = 64 (scratchpad port). The
chunk size is `BYTES_PER_CYCLE*8/RW`. At the defaults the scratchpad holds
30 × 2 × 48 × 64 bits = 184,320 bits plus 30 × 2 × 48 vector bits.

## 5. What follows the paper and what is this design's own

Taken from the paper: the sJMP/eosJMP encodings; the Jump-Back Table fields,
LIFO order, issue rule, jump-back-then-remove behaviour and flush rule; the
three pipeline drains; what is saved at each point, the two modified-register
vectors and the restore rule for each outcome; reading every modified register
in both cases; the nesting level as scratchpad offset; and the sizes (30
levels, 48 registers of 64 bits, 64 bytes per cycle).

Chosen here, because the paper does not say:

- **When the table entry is filled.** The entry is created at issue, the
  target and outcome are written at execute, and Valid is set at commit. The
  paper's text puts the address write at commit; its figure labels it at
  execution. The issue rule for a nested sJMP is likewise described once as
  "the previous sJMP has executed" and once as "its Valid bit is set", with
  Valid set at commit. This RTL uses the Valid bit, so a nested sJMP waits for
  the previous one to commit, which is the stricter of the two readings.
- **When fetch jumps back.** Fetch is redirected to the taken path when the
  first eosJMP commits, as the text describes. The paper's pipeline figure
  shows taken-path instructions fetched earlier, right after the sJMP
  executes, and held until rename resumes. That is an optimisation this RTL
  leaves out.
- **Scratchpad size.** The paper quotes 7,392 bytes per snapshot and 216 KB
  in total. The contents it lists (two states of 48 × 64-bit registers and
  two 48-bit vectors) come to 780 bytes. The RTL stores exactly those
  contents, 30 × 780 bytes.
- **Snapshot timing.** The paper's figure draws a single "SPM latency" cycle
  per drain. Moving 48 × 8 bytes at 64 bytes per cycle takes at least six.
  The costs in section 3 are this design's.
- **Nesting.** The rule for folding an inner block's vectors into the outer
  one is this design's.
- **Other details.** The chunk-skipping schedule, the one-cycle read
  latency, the single scratchpad port, the overflow signal and the ordering
  of same-cycle events are also this design's.
- **Register-file port.** How the architectural registers are reached in an
  out-of-order core (through the rename table, with the pipeline empty) is
  left to the core. It appears here as the `arf_*` port.
- **Predecoder coverage.** `sempe_predecode` recognises only the two x86
  Jcc forms.

## 6. Workloads

The paper evaluates microbenchmarks of nested secret branches (W = 1 … 10
levels around Fibonacci, Ones, Quicksort and Eight-Queens kernels) and the
`djpeg` image decoder (PPM, GIF, BMP output). A W-level microbenchmark needs
W simultaneous table entries and scratchpad snapshots. 10 ≤ 30, so all of
them fit. The paper does not give the nesting depth of `djpeg`'s secret
branches, so whether it fits cannot be judged. The paper says that
cryptographic code nests "much less than a dozen" deep.

`tb_sempe_workloads` runs all four microbenchmark kernels as real loop code
(public loops and branches, loads and stores) inside W = 1, 4 and 10 nested
secret regions. The sizes are small so the run stays short: Fib(10+k), vectors
and arrays of 8+k words, and one eight-queens placement per instance. Each
path writes the same scratch registers, so the final register values are
correct only if the snapshot engine restores them. Each path writes memory
only in its own region, which is the shadow-copy rule a SeMPE compiler
follows. At W = 10 one Queens program runs about 420,000 cycles. The cycle
count is identical for every secret assignment.

## 7. Verification

Each module has a self-checking testbench in `tb/`. Each ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog.

- `tb_sempe_predecode`: directed encodings plus 2,000 random byte windows
  against a reference classifier (class, length, target).
- `tb_jb_table`: 4,000 random protocol-legal cycles against a reference LIFO,
  then fill to overflow and unwind. Checks next PC, redirect, V2, first or
  second eosJMP, outcome and occupancy every cycle.
- `tb_sempe_spm`: random masked writes, reads (one-cycle latency) and vector
  mark/clear at full size.
- `tb_archrs_ctrl`: random nested regions up to 4 deep over a 48-register
  file. Registers must be back to their pre-block values after the first
  eosJMP and hold the true-path values after the second. Every operation's
  cycle count is checked against the formulas in section 3.
- `tb_drain_ctrl`: stall window for random retire and busy delays, including
  the paper's cycle-3/6/8 example and back-to-back barriers.
- `tb_sempe_top` (default parameters, end to end): a small in-order
  behavioural core runs microbenchmark-shaped programs with W = 1, 3 and 10,
  each with five different secret assignments. It checks that the final
  registers equal a plain interpreter's, and that the committed-PC trace and
  the cycle count are identical for all secrets. It then nests all 30 levels,
  provokes the overflow and unwinds. It counts drains, jump-backs, NT-true and
  T-true restores, nesting, squashes, V2 blocking and overflow, and fails if
  any never happened.

- `tb_sempe_workloads` (default parameters): the four microbenchmark kernels
  described in section 6, each at W = 1, 4 and 10 with three secret
  assignments. It applies the same register, trace and cycle checks, and it
  also checks each kernel's memory: the vector is cleared, the array is
  sorted, and no two queens attack each other.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl --top-module tb_sempe_top \
          rtl/sempe_pkg.sv tb/tb_sempe_top.sv
./obj_dir/Vtb_sempe_top
```

Replace the testbench name to run another one. `tb_sempe_workloads` takes
about two seconds; every other testbench finishes in under one.

## 8. Not included

- The baseline out-of-order core, with its register alias table, issue queue
  and reorder buffer.
- The TAGE/ITTAGE predictors, the caches and the prefetchers.
- The compiler-side shadow-memory/`CMOV` privatisation of memory variables.
- The two register-snapshot schemes the paper considered and rejected (lazy
  register spill and physical-register snapshots).
