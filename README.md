# Resource sharing between thread blocks on a GPU streaming multiprocessor

A GPU streaming multiprocessor (SM) admits thread blocks whole. If a block
needs `R_tb` units of a resource (registers or scratchpad bytes) and the SM
has `R`, only `floor(R / R_tb)` blocks fit, and `R mod R_tb` units sit idle.
This design lets two blocks share one allocation, so that the idle units
buy extra resident blocks. A shared pair gets `(1+t)·R_tb` units instead of
`2·R_tb`:

- each of the two blocks has `t·R_tb` units of its own (private);
- the remaining `(1-t)·R_tb` units go to whichever block touches them first.

The other block keeps running until it needs the shared part. It then waits
until the first block has let go. More resident blocks give the warp
schedulers more warps to hide memory latency with. That is worth a
partner's occasional wait.

The RTL covers the hardware this needs:

- the launch computation;
- the per-SM sharing bookkeeping;
- the access checks and locks for shared registers and shared scratchpad,
  including the rule that prevents deadlock at barriers;
- an "owner warp first" scheduler;
- the dynamic control of how often waiting-prone warps may issue memory
  instructions;
- the register file and scratchpad behind the checks.

The instruction pipeline, ALUs, caches and DRAM of the SM are not part of
it. Their per-warp instruction stream and write-backs are ports.

The default configuration has 14 SMs. Each SM has:

- 48 warps (1536 threads) and 8 thread-block slots;
- 32768 32-bit registers (1024 rows of 32 lanes) and 16 KB of scratchpad;
- two warp schedulers;
- a sharing threshold of t = 0.1, so 90 % of a shared block's resource is
  shared.

## How many blocks to launch

Let `base = floor(R/R_tb)` and `rem = R mod R_tb`. With `U` unshared blocks
and `S` shared pairs, the SM holds `M = U + 2S` blocks. The constraints are:

    U + S = base
    U·R_tb + S·(1+t)·R_tb <= R

They give `S = floor(rem / (t·R_tb))`, capped at `base`. The threshold is
held in tenths (`T = 10t`), so everything is an integer:

    S = min(base, floor(10·rem / (T·R_tb)))
    M = min(base + S, thread limit, block limit, limit of the other resource)

If the thread or block limit cuts `M`, the plan takes:

- `D = min(base, limits)` blocks' worth of resource;
- `S' = M − D` pairs;
- `U' = D − S'` unshared blocks.

The shared resource is the one that limits the block count: registers
unless the scratchpad allows fewer blocks. A register need is counted in
whole warps, `warps·32·R_w`, where `R_w` is the register count per thread.

Example: hotspot (256 threads × 36 registers = 9216 registers per block).

- Without sharing: 3 blocks, 5120 registers idle.
- With t = 0.1: 0 unshared blocks and 3 pairs, 6 blocks in all, using
  3 · 8 warps · (36 + 3) rows = 936 of the 1024 register rows.

`launch_calc` does this once per kernel with a sequential divider. It takes
six divisions. From a one-cycle `start`, `done` comes 158 cycles later.

Its result is a `launch_plan_t` (see `rs_pkg`):

- `U`, `S`, `M`, and the default block count;
- which resource is shared;
- the registers per thread and the private register count `rwt = floor(t·R_w)`;
- the scratchpad bytes per block and the private byte count `floor(t·spb)`.

For all fifteen register- or scratchpad-limited kernels the design was
checked against, at t = 1, 0.9, 0.7, 0.5, 0.3 and 0.1, this computation
gives the published resident-block counts.

## Where a shared block's data lives

Slots `0 … U−1` hold unshared blocks. Slots `U+2j` and `U+2j+1` form shared
pair `j`, and each slot's partner id names the other. The layout is this
design's own. Warp `k` of the block in slot `s` is hardware warp
`s·WPB + k`, where `WPB` is the number of warps per block.

**Registers.** Sharing is per warp pair: warp `k` of one block with warp
`k` of its partner. Register file rows:

| Whose warp | Rows |
|---|---|
| unshared block in slot `s` | `WPB·R_w` consecutive rows from `s·WPB·R_w`; row `(s·WPB + k)·R_w + r` |
| shared pair `j`, warp pair `k` | a group of `R_w + rwt` rows, starting after all unshared rows |

Inside a shared group:

- rows `0 … rwt−1` are side 0's private registers;
- rows `rwt … 2·rwt−1` are side 1's private registers;
- the remaining `R_w − rwt` rows are the shared registers.

Register `r` of a shared warp maps like this (function `reg_row`):

- `r < rwt`: its own private row;
- `r >= rwt`: shared row `group + rwt + r`.

**Scratchpad.** Any thread of a block may touch any byte of that block, so
scratchpad is shared per block pair, not per warp pair. Pair `j` owns
`spb + floor(t·spb)` bytes after the unshared blocks:

- side 0's private part;
- side 1's private part;
- the shared remainder.

Locations are numbered from 0. So "the first `t·R_w` registers" are the
numbers `0 … rwt−1`. The published flowchart writes the test as
`RegNo <= R_w·t`, counting from one.

## Locks and the deadlock rule

**Registers.** There is one lock per warp pair: `floor(48/2) = 24` per SM,
each holding a warp id and a valid bit. An instruction presents the highest
register number it names. `reg_share_ctrl` then decides:

1. Unshared warp: grant; the row is computed directly.
2. Shared warp, register below `rwt`: grant (private).
3. Shared warp, shared register:
   - grant if the warp already holds its pair's lock;
   - grant and take the lock if the lock is free and the deadlock rule
     allows it;
   - otherwise refuse. The warp retries later.

A lock is freed when the warp that holds it exits.

The deadlock rule matters because of barriers. Suppose warp A of block X
holds a lock and waits at a barrier for warp B of X. If B waits for a lock
held by warp C of the partner block Y, and C waits at its own barrier for a
warp of Y that needs A's lock, nothing moves.

Therefore a warp may take a free lock only if no warp of the partner block
holds any lock. Once one block of a pair holds a lock, all new locks of
that pair go to the same block until its lock-holding warps have exited.
An assertion in `reg_share_ctrl` checks that both blocks of a pair never
hold locks at once.

Two scheduler ports may ask in the same cycle. They are resolved in port
order: port 1 sees the lock that port 0 has just taken.

**Scratchpad.** There is one lock per block pair, holding a slot id.
`spm_share_ctrl` takes it at the block's first shared access and frees it
when that block finishes. The other block's first shared access is refused
until then. One lock per pair cannot deadlock, so no extra rule is needed.

## Owners, non-owners and the scheduler

The block of a pair that took the shared part is its **owner**. The other
is the **non-owner**. When the owner finishes, ownership passes to its
partner. The block launched into the freed slot starts as a non-owner.

Before either block has taken anything, both run as ordinary (unshared
class) warps. The source description defines owner and non-owner only
once one block is waiting, so this is an interpretation.

Each of the two schedulers (warp `w` belongs to scheduler `w mod 2`)
issues one warp per cycle. It uses a fixed priority:

1. owner warps;
2. unshared warps;
3. non-owner warps.

Within a class, the oldest warp (lowest launch stamp) goes first.
Finishing owners early releases their partners sooner. `bypass` flags a
cycle in which an owner warp went ahead of a ready unshared warp.

A refused warp is marked waiting. It becomes eligible again when:

- any lock is released;
- a block finishes;
- ownership changes.

## Dynamic warp execution

Non-owner warps that fire memory instructions add traffic but often cannot
progress afterwards. Each SM therefore keeps a probability with which a
non-owner memory instruction may issue:

- The probability is a saturating counter in tenths, 0 … 10, starting at 10.
- Each cycle a 16-bit LFSR makes a draw.
- A non-owner warp whose next instruction is a memory access is not
  eligible in a cycle when the draw says no.

SM0 is the reference: it never issues such instructions. Every SM counts
stall cycles, meaning cycles with resident warps in which nothing issues.
Every 1000 cycles each other SM compares its count with SM0's:

- more stalls: the probability goes down a step;
- fewer stalls: it goes up a step;
- equal: it stays.

The gate acts only while registers are shared and the SM is in sharing
mode.

## Module map

| Module | Role |
|---|---|
| `rs_pkg` | sizes, plan/instruction/event types, `reg_row` and `spm_addr_map` |
| `seq_divider` | restoring divider used by `launch_calc` |
| `launch_calc` | per-kernel block-count computation |
| `sharing_state` | slots, partners, sharing/owner bits, launch slot choice, block finish, launch stamps |
| `reg_share_ctrl` | register access check, 24 warp-pair locks, deadlock rule, row mapping |
| `spm_share_ctrl` | scratchpad access check, 4 block-pair locks, address mapping |
| `owf_scheduler` | owner-first, oldest-first warp selection |
| `dyn_warp_ctrl` | stall period counter, probability counter, LFSR gate |
| `reg_file` | 32 lane banks × 1024 rows, 2 registered read ports, masked write |
| `scratchpad` | 16 KB as 4096 words, registered read ports |
| `sm_share_unit` | one SM: all of the above plus the issue and wake-up logic |
| `gpu_share_top` | launch calculator, round-robin block dispatcher, 14 SMs, SM0 as reference |

The stored state follows the published storage budget: a sharing-mode bit,
partner ids, owner and sharing bits per warp, and lock ids. The bit widths
are those of the default sizes.

## Interface and timing of the top

A kernel starts with a one-cycle `kernel_start`, with `cfg` (threads per
block, registers per thread, scratchpad bytes per block, t in tenths) and
`grid_tbs` held valid. Then:

1. The plan is computed (158 cycles), `plan_valid` rises, and all SMs are
   cleared.
2. The dispatcher gives out one block per cycle, round robin, to SMs with a
   free slot below `M`. `launch_valid[i]` and `launch_tb` show each hand-out.
3. `kernel_done` pulses once all blocks have been handed out and every SM
   is empty.

Per SM and warp:

- The front end shows the next instruction on `instr`. The fields are:
  `valid`, `is_mem`, `uses_spm`, the highest register number, and the
  scratchpad location.
- It pulses `warp_exit` when the warp ends.
- `issue_valid` / `issue_warp` report an issue in the same cycle.
- The register row and scratchpad word for the issued warp come one cycle
  later on `rf_data` / `spm_rdata`.
- Results come back through `wb_*` (register row with lane mask) and
  `st_*` (scratchpad word), addressed by warp and register / location.
- `events` gives one-cycle pulses of every mechanism for counting.

## Departures and simplifications

- Only the highest register number of an instruction is checked. One
  shared operand makes the instruction shared.
- Locks are freed at warp exit (registers) or block finish (scratchpad).
  There is no earlier release.
- A refused warp waits for a release event instead of retrying every
  cycle. The outcome is the same, with fewer useless checks.
- The scheduler is oldest-first within each class. It does not model the
  greedy part of greedy-then-oldest.
- The block dispatcher, the port counts, the slot layout, the LFSR and the
  stall definition are this design's choices.
- The compiler step that reorders register declarations (so that the most
  used registers fall in the private part) is software. It is not here.
  The test front end imitates its effect by using the private registers
  first.
- Stall counters are 16 bits and launch stamps wrap at 65536 warps; both
  are enough for a 1000-cycle period but not checked beyond.

## Verification

Every module has a self-checking bench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

| Bench | What it checks |
|---|---|
| `tb_launch_calc` | all 15 applications × 6 thresholds against the published block counts, the private sizes and the 158-cycle latency |
| `tb_owf_scheduler` | random eligibility/class/age patterns against a reference selection |
| `tb_reg_file`, `tb_scratchpad` | random traffic against a shadow memory |
| `tb_reg_share_ctrl` | unshared, private, shared and first-shared accesses, lock taking and holding, the deadlock rule, same-cycle port order, release |
| `tb_spm_share_ctrl`, `tb_sharing_state` | the corresponding directed sequences |
| `tb_dyn_warp_ctrl` | a short period; reference gating, up/down/saturation and the measured issue rate |
| `tb_sm_share_unit` | one SM running a register-shared then a scratchpad-shared kernel with a behavioural warp front end (`tb_warp_model`) that checks every read against what was written |
| `tb_gpu_share_small` | the whole top with 3 SMs (all other parameters default) |
| `tb_gpu_share_top` | the same test with the top at its defaults: 14 SMs |

The two top benches run a register-limited kernel (256 threads × 28
registers: 2 unshared blocks and 2 pairs per SM, 6 instead of 4) and a
scratchpad-limited kernel (128 threads, 7200 bytes: 2 pairs, 4 blocks
instead of 2). They check:

- every block is launched once and the kernel ends;
- all data read back is correct;
- SM0 never issues a non-owner memory instruction;
- each mechanism happened: shared launch, lock taken and refused, deadlock
  rule, ownership transfer, owner-first bypass, gating on SM0 and on the
  other SMs, probability change, scratchpad lock and refusal.

To simulate with Verilator 5, list the package first and then the
modules:

    verilator --binary --timing --assert -Irtl -Itb \
      rtl/rs_pkg.sv rtl/seq_divider.sv rtl/launch_calc.sv rtl/sharing_state.sv \
      rtl/reg_share_ctrl.sv rtl/spm_share_ctrl.sv rtl/owf_scheduler.sv \
      rtl/dyn_warp_ctrl.sv rtl/reg_file.sv rtl/scratchpad.sv rtl/sm_share_unit.sv \
      rtl/gpu_share_top.sv tb/tb_warp_model.sv tb/tb_gpu_share_small.sv \
      --top-module tb_gpu_share_small -j 4 && obj_dir/Vtb_gpu_share_small

Build times:

- `tb_gpu_share_small`: about half a minute.
- `tb_gpu_share_top`: about 8 minutes with four compile jobs. The 14 SMs
  make a large C++ model; it then simulates about 5000 cycles per second.

To change the configuration, edit the package constants (sizes, SM count,
threshold, period) or override the module parameters (`NW`, `NTB`, `NS`,
`ROWS`, `SPMB`, `PERIOD`, `N`).
