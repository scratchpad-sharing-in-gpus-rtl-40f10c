# Scratchpad sharing for a GPU streaming multiprocessor — RTL

A GPU SM gives each thread block its scratchpad (CUDA `__shared__` memory)
whole. So a block that needs R_tb bytes lets only floor(R / R_tb) blocks
into an SM with R bytes. The rest, R mod R_tb bytes, sits unused. With
16 KB per SM and 9408-byte blocks, one block runs and 6976 bytes stay idle.

Scratchpad sharing launches extra blocks that *pair up* with resident
ones. Each block of a pair gets a small private part of t·R_tb bytes.
The pair shares the remaining (1−t)·R_tb bytes, guarded by a lock. A
block runs freely until it first touches the shared part. At that point
it takes the lock, or it waits if its partner already holds it. The
holder gives the lock up in one of two ways:

* every one of its active threads has executed the new instruction
  `relssp` ("release shared scratchpad"); or
* the block finishes, and its partner inherits the lock.

The warp scheduler issues **Owner Warp First** (OWF). Warps of lock
holders go first, then warps of blocks that share with nobody, and
warps that could end up waiting on a lock go last.

This RTL is the per-SM hardware that the scheme adds. It follows the
design in V. Jatala, J. Anantpur and A. Karkare, "Scratchpad Sharing in
GPUs". That work evaluated the scheme in a cycle simulator. The paper
gives the mechanisms, the storage they need and the relssp circuit.
Everything the paper leaves open is a choice made here, and each choice
is listed below. The compiler side of the scheme is software and is not
part of this RTL: the layout of variables into the private and shared
parts, and where `relssp` goes.

Default sizes: 16 KB scratchpad, 16 resident blocks, 96 warps of 32
threads (3072 threads), 4 scheduler units per SM, and t = 0.1.

---

## 1. How many blocks, and which of them share

`sharing_planner` runs once per kernel. Its inputs are R_tb and the
block limit set by the SM's other resources (threads, registers,
maximum blocks). Call that limit L.

* The unshared baseline fits **m** = min(⌊16384 / R_tb⌋, L) blocks.
* A sharing pair costs (1+t)·R_tb bytes, while two unshared blocks cost
  2·R_tb.
* At most one block per pair can be waiting on the pair's lock. So
  keeping **p** pairs and m−p unshared blocks always leaves m blocks
  able to run. That is never fewer than the baseline.
* p is the largest value with p ≤ m, m+p ≤ L and
  m·R_tb + p·⌊t·R_tb⌋ ≤ 16384. Then **n** = m+p blocks are resident.
* **ShSM** (sharing enabled) is set when p > 0.

| R_tb (bytes) | block size | m | p | n | kernels with this size |
|---|---|---|---|---|---|
| 9408 | 256 | 1 | 1 | 2 | backprop |
| 2112 | 64 | 7 | 7 | 14 | DCT1, DCT2 |
| 2176 | 128 | 7 | 5 | 12 | DCT3, DCT4 |
| 3840 | 128 | 4 | 2 | 6 | FDTD3d |
| 13824 | 576 | 1 | 1 | 2 | SRAD1 (limit 5 from threads) |
| 4608 | 576 | 3 | 2 | 5 | kmeans |
| 3872 | 484 | 4 | 2 | 6 | lud (exactly 96 warps) |

These are the resident-block counts the paper reports. The closed form
for p is this design's own reading of the "as many runnable blocks as
the baseline" rule. The paper defers that computation to earlier work.

When the other resources are the limit (L ≤ ⌊16384/R_tb⌋), p = 0 and
ShSM = 0. The logic then behaves exactly like the baseline: every warp
is "unshared" and OWF reduces to loose round robin.

## 2. Slots, pairs and the scratchpad map

Blocks live in **slots** 0..15. A block launched into a freed slot
inherits the slot's status.

* Slots 0..p−1 pair with slots m..m+p−1 (slot j with slot m+j). This is
  how the paper pairs the first-launched blocks B_i with the extra
  blocks B_(mp+i).
* Slots p..m−1 share with nobody.
* Pair k uses lock k.

The **ShTB** table holds each slot's partner, or all ones for "none".

A thread addresses its block's scratchpad with a block-relative offset.
`resource_access` maps the offset to a physical byte address:

```
pair k   base B = k·(R_tb + u)          u = ⌊t·R_tb⌋
  [B,        B+u)       private part of slot k
  [B+u,      B+2u)      private part of slot m+k
  [B+2u,     B+R_tb+u)  shared part of pair k
unshared slot j (p ≤ j < m):  base p·(R_tb+u) + (j−p)·R_tb,  R_tb bytes
ShSM = 0:                     slot j at j·R_tb
```

An offset below u is private. Any other offset of a sharing block lands
in the pair's shared part at B+2u+(offset−u). The paper fixes the sizes
but not the placement, so the placement is this design's.

## 3. The access check and the lock

Each warp's next scratchpad instruction passes through the access flow:

1. **Unshared block** (ShTB = none, or ShSM = 0): access directly.
2. **Private offset** (offset < t·R_tb): access directly.
3. **Shared offset**: access only if the block holds the pair lock.
   Otherwise the warp is not ready and retries in a later cycle.

A warp needs the lock if *any* active lane's offset is shared.

**Acquire.** A warp that is hazard-free but finds its pair's lock free
raises `acq_req`. At the clock edge `storage_units` gives the lock to the
block of the lowest-numbered requesting warp. The warp passes the check
one cycle later. A request that arrives later finds the lock held, so
the lock is first come, first served.

**Release by relssp.** `relssp_unit` keeps an active bit A_i and a
release bit R_i for every thread:

* At launch, A is set for the lanes that hold a thread, and R is
  cleared.
* `relssp` sets R_i for the warp's active lanes.
* `exit` clears A_i.

Per block slot it forms the circuit given in the paper:

```
lock_bit = NAND over the block's threads of ( R_i OR NOT A_i )
```

lock_bit falls to 0 once every still-active thread has executed
`relssp`. The storage units then free the lock, but only if that block
holds it. A `relssp` in a block that never took the lock has no effect.
Threads that exited without a `relssp` count as released.

**Hand-over at finish.** A block finishes when all its warps have
retired. If it held the lock and a block is live in the partner slot,
the partner becomes the owner. If the partner slot is empty, the lock
is freed.

**Owner bits.** Each warp has one, set while its block holds a lock.
They are registered copies of the lock table, and the scheduler reads
them.

Added state, beyond the per-thread A and R bits:

| unit | contents | bits (defaults) |
|---|---|---|
| ShSM | 1 | 1 |
| ShTB | 16 × ⌈log2 17⌉ | 80 |
| Owner | 96 | 96 |
| Lock | 8 × (⌈log2 16⌉ id + 1 held bit) | 40 |

The paper counts 209 bits: the same table without the held bits. Here
each lock entry has one extra bit, because an id alone cannot say "free".

## 4. Owner Warp First

`owf_scheduler` is one per scheduler unit. Warp w belongs to unit
w mod 4. Each cycle a unit issues the first ready warp in this order:

1. owner warps,
2. unshared warps,
3. non-owner warps.

Within each class the order is loose round robin after the last issued
warp. A warp is ready when:

* it has an instruction,
* the scoreboard reports no register hazard (RAW or WAW), and
* the access check passes.

If no warp is ready, the `stall` output is raised.

The paper illustrates OWF with one warp of each class on one unit. Each
warp runs `mov R1,0; ld R2,S[shared]; add R3,R1,R2`, where mov and add
take 1 cycle and the load takes 5. Issue cycles in this RTL (each
program ends with `exit` here):

| warp | mov | ld | add | exit |
|---|---|---|---|---|
| O (owner) | 0 | 1 | 6 | 7 |
| U (unshared) | 2 | 3 | 8 | 10 |
| N (non-owner) | 4 | 9 | 14 | 15 |

O's and U's first three instructions, and N's `mov`, land on the
paper's cycles. In the paper, N's load resumes at 7, the instant O's add
completes. Here the lock passes only once O's block has finished. That
takes O's `exit` (cycle 7) plus one cycle of block bookkeeping, so N
resumes at 9. At that point N is the owner, so it also goes ahead of U's
`exit`.

## 5. The top level, `ssp_sm_top`

The top contains the planner, the storage units, the relssp unit, the
scoreboard, 96 `resource_access` checkers (one per warp, so every warp's
readiness is known in the same cycle) and 4 `owf_scheduler`s. The rest
of the SM connects through ports:

| ports | direction | from/to |
|---|---|---|
| `cfg_load`, `cfg_smem_per_tb`, `cfg_tb_limit` → `cfg` | in → out | kernel launch; `cfg.n_res` is the dispatcher's resident-block limit |
| `tb_launch_valid/slot/warp0/threads` | in | block dispatcher: block in `slot`, warps `warp0…`, thread count |
| `tb_done`, `slot_live` | out | block in a slot has finished / slot occupied |
| `ib_valid[w]`, `ib_instr[w]`, `ib_offset[w][lane]` | in | instruction buffer head of each warp: class (`OP_ALU`, `OP_SMEM`, `OP_RELSSP`, `OP_EXIT`), destination and two sources, lane mask, block-relative scratchpad offsets |
| `wb_valid/warp/reg` (4 ports) | in | register writebacks from the execution units |
| `iss_valid/warp/instr/class[s]`, `iss_phys[s][lane]`, `iss_lane_shared[s]` | out | one issued instruction per scheduler unit, with physical scratchpad addresses |
| `shsm`, `owner`, `lock`, `warp_live`, `lock_wait`, `rel_lock_bit`, `ev_acquire/release/transfer`, `sched_stall` | out | sharing state and events, for counters and debug |

The instruction buffer pops a warp's head when that warp issues. The
top has no data path. The scratchpad SRAM, the load/store units, decode
and the execution units are the unchanged parts of the SM.

Conventions of this RTL, not of the paper:

* Warps of a block have consecutive ids, and warp i of a block holds
  threads 32i..32i+31.
* A warp retires when all its threads have executed `exit`.
* `cfg_load` is applied only while no block is resident. ShTB is
  rebuilt in the following cycle and all locks are freed.

**Timing summary.**

* Each scheduler unit issues at most one instruction per cycle.
* A writeback in cycle c makes dependent instructions ready in c+1.
* A shared access that finds its lock free issues two cycles after it
  is first ready: the request, then the grant, then the issue.
* `tb_done` pulses in the cycle after a block's last `exit` issues. A
  lock it held moves at the end of that cycle.
* A `relssp` completing in cycle c frees the lock at the end of c+1.

## 6. Files

| file | contents |
|---|---|
| `rtl/ssp_pkg.sv` | sizes, widths, `op_e`, `warp_class_e`, `lock_t`, `ssp_cfg_t`, `instr_t` |
| `rtl/sharing_planner.sv` | m, p, n, t·R_tb, ShSM |
| `rtl/storage_units.sv` | ShSM, ShTB, Owner, Lock; acquire, release, hand-over |
| `rtl/resource_access.sv` | access check and address map for one warp |
| `rtl/relssp_unit.sv` | A/R bits, NAND release detect, warp-empty |
| `rtl/scoreboard.sv` | register pending bits |
| `rtl/owf_scheduler.sv` | OWF selection for one scheduler unit |
| `rtl/ssp_sm_top.sv` | all of the above plus warp/block bookkeeping |
| `tb/tb_<module>.sv` | self-checking bench for each module |

## 7. Simulating

Every bench prints `TB_RESULT checks=N failures=M` and stops itself. A
watchdog counts a failure if a bench hangs. Run a bench with Verilator 5
from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl \
    rtl/ssp_pkg.sv tb/tb_ssp_sm_top.sv --top-module tb_ssp_sm_top
./obj_dir/Vtb_ssp_sm_top
```

Replace `ssp_sm_top` with any other module name to run that module's
bench.

* **`tb_ssp_sm_top`** runs the whole design at its default sizes. It
  models instruction buffers with small programs, fixed-latency
  execution units and a block dispatcher.
  * Part 1 replays the OWF example and checks every issue cycle in the
    table above.
  * Part 2 runs 40 blocks of 64 threads with R_tb = 2176 (12 resident:
    5 pairs and 2 unshared). Half the blocks release with `relssp`; the
    other half hold the lock to the end.
  * It checks that every shared access issues from the lock holder, and
    that no byte is used by two different regions.
  * It checks that all blocks complete, and that each mechanism happens
    at least once: acquire, lock wait, relssp release, hand-over,
    release at a finish with no partner, scheduler stall, and issue from
    each of the three warp classes. A typical run takes 385 cycles, with
    21 acquires, 18 relssp releases, 15 hand-overs and 639 warp-cycles
    of lock waiting.
* **`tb_ssp_workloads`** runs the full-size design with the scratchpad
  and block sizes of 13 evaluated kernels. Examples: backprop 9408 B ×
  256 threads, DCT3 2176 B × 128, SRAD1 13824 B × 576, lud 3872 B × 484.
  * It checks each kernel's resident block counts.
  * It runs 3n blocks of a synthetic program twice: with sharing, and
    limited to the baseline m blocks. Kernels that can release early use
    `relssp`; the others touch the shared part until the end.
  * It applies the same safety checks as above and prints both cycle
    counts. The instruction streams are synthetic, so these counts show
    the mechanism at work. They are not a performance prediction.
* **`tb_sharing_planner`** checks the worked examples and about 300
  random (R_tb, L) pairs against an exhaustive search over p.
* **`tb_storage_units`**, **`tb_relssp_unit`**, **`tb_scoreboard`**,
  **`tb_resource_access`** and **`tb_owf_scheduler`** each check their
  module against an independent model in the bench. The models are:
  its own lock rules, its own A/R bit arrays, its own pending bits, a
  region-by-region allocation of the scratchpad, and a sort by class and
  round-robin distance.

Every bench has been seen to fail when its module is broken in a way
that matters. Examples: offset t·R_tb treated as private; OWF order
reversed; the NOT A_i term dropped from the release circuit.

## 8. Where this departs from or adds to the paper

* **Number of sharing pairs**: the paper gives the goal, not the
  formula. The formula in §1 reproduces all its reported counts.
* **Private/shared boundary**: offsets below t·R_tb are private, as the
  paper's text says ("<"). Its access-flow drawing prints "≤".
* **Scratchpad placement** (§2): this design's own.
* **Lock entries**: one extra "held" bit each. Ties between
  same-cycle requests go to the lowest warp id.
* **Hand-over at finish** follows the paper's OWF section (the partner
  inherits the lock). The lock is freed instead when the partner slot is
  empty.
* **Access check per warp**: the check is made once per warp, with one
  checker per warp evaluated in parallel. The paper describes the check
  per thread and counts two comparators and one adder per scheduler
  unit. The parallel version picks the first ready warp in one cycle,
  where the paper's figure draws a "try another warp" loop.
* **Baseline parts the paper only names**: scoreboard organisation,
  round robin within a class, warp-to-unit assignment, register count
  (64 per warp) and writeback ports (4).
* **Lock release timing**: the lock is released 2 cycles later than in
  the paper's idealised example (§4).
* **Larger configurations**: the paper also evaluates 48 KB and 64 KB
  scratchpads. Those need `SMEM_BYTES` (and, for 64 KB, `MAX_TB` = 32
  and `MAX_WARPS` = 64) changed in `ssp_pkg.sv`. The default build is
  the 16 KB configuration.
