# Turnpike: a soft-error resilience unit for an in-order core

A particle strike can flip a bit anywhere in a core. Acoustic sensors spread
over the die hear the strike and report it within a bounded time, the
*worst-case detection latency* (WCDL, 10 cycles here). That bound gives a
simple rule. If a stretch of execution ended WCDL cycles ago and no sensor has
fired since, the stretch was error-free. The compiler cuts the program into
short *regions*. At run time a region becomes *verified* WCDL cycles after its
last instruction commits, provided no error was reported in that time. After
an error the core goes back to the start of the oldest region that is not yet
verified and runs it again.

Re-execution only works if memory still holds what the region read when it
first ran. The classic way to ensure this is to hold back every store in a
*gated store buffer* until its region is verified. On an error the buffer is
dropped. The compiler also saves the registers each region hands to the next
(its live-outs) with *checkpoint stores*. Recovery code reloads them before
jumping back. An in-order core with a 4-entry store buffer (Cortex-A53 class)
stalls constantly under this scheme, because each store sits in the buffer for
at least WCDL cycles.

This RTL implements the hardware half of Turnpike, which lets two kinds of
stores go straight to the L1 data cache without waiting:

* **WAR-free regular stores.** If the current region has not loaded from the
  address a store writes, re-running the region never reads that location
  before rewriting it. So the store may be written at once, even if it turns
  out to be corrupted. A tiny *committed load queue* (CLQ) keeps one address
  range per region and answers this question.
* **Colored checkpoint stores.** Each register has 4 checkpoint slots
  (*colors*). A checkpoint goes to a color that holds neither the last
  verified copy of the register nor a copy any unverified region may still
  need. Writing it early therefore overwrites nothing that recovery could
  need.

All other stores take the usual path through the gated store buffer. The
compiler optimisations of Turnpike, which reduce the number of checkpoints,
are software and are not part of this RTL.

## Block map

```
             commit_i (one op per cycle)           sensor_err_i    rf_* (register file)
                  |                                      |               |
   +--------------v----------------------------------+   |         +-----v------+
   |                  turnpike_top                   |   |         | reg_parity |
   |  LOAD ----> clq (2 ranges) <-- fast_release_ctrl|   |         +-----+------+
   |  STORE --+-> fast path ---------------+         |   |               | parity error
   |          +-> gsb (4 entries) --drain--+--> dc_wr_*  |               |
   |  CKPT ---> color_maps (AC/UC/VC) -----+         |   v               v
   |  BOUNDARY -> rbb (PC, GSB ptr, time) -> verify_timer -> resilience_ctrl
   |                                      (WCDL)       -> squash_o, recover_pc_o
   +-------------------------------------------------+
```

| module | role |
|---|---|
| `turnpike_pkg` | sizes, operation encoding, commit struct, event struct |
| `gsb` | gated store buffer, forwarding, release by region, discard on error |
| `rbb` | region boundary buffer: one entry per ended, unverified region |
| `verify_timer` | cycle counter; verifies the oldest region WCDL cycles after its boundary |
| `clq` | compact committed load queue: one min/max load range per region |
| `fast_release_ctrl` | three-state control that turns WAR-free fast release on and off around CLQ overflows |
| `color_maps` | AC/UC/VC color maps for checkpoint stores |
| `reg_parity` | one parity bit per architectural register, checked on every read |
| `resilience_ctrl` | error handling: flush, drain, redirect to the recovery PC |
| `turnpike_top` | commit-side decisions and wiring of all of the above |

The sensors, the core pipeline, the L1 cache and the recovery code are outside
the RTL. Their signals are ports of `turnpike_top`.

## Regions, boundaries and verification

The core marks the end of a region with a `BOUNDARY` operation. When it
commits, `rbb` records three things about the region that just ended:

* the boundary PC, which becomes the restart point once the region is
  verified;
* the store buffer tail pointer, which separates the region's buffered stores
  from later ones;
* the cycle count of the commit (the "region time").

Entries also carry a small region id. The CLQ uses it to free the right entry.

`verify_timer` keeps a free-running 16-bit cycle counter. The oldest entry is
verified in the cycle when `now - head_time == WCDL`. Regions end in order, so
they are verified in order, at most one per cycle. Verification does three
things in the same clock edge:

* it pops the `rbb` entry;
* it moves the store buffer release pointer to the recorded tail;
* it loads the boundary PC into the recovery PC register.

An error reported in that very cycle wins: the region is not verified.

With a 4-entry `rbb`, at most four ended regions can wait for verification.
A fifth boundary stalls commit until the oldest is verified. The published
description does not give this depth, so 4 is this design's choice.

## The gated store buffer

`gsb` is a circular FIFO with four pointers. The pointers count modulo
twice the depth, so a full buffer and an empty one look different, and the
depth does not have to be a power of two.

```
 head ........ rel_ptr ........ cur_start ........ tail
 | verified,    | ended regions,  | current region  |
 | draining     | waiting WCDL    |                 |
```

* Stores from `head` up to `rel_ptr` are verified. They go to the cache port
  in order, one per cycle, through a valid/ready handshake.
* A region boundary sets `cur_start` to the tail.
* Verification sets `rel_ptr` to the tail pointer saved in `rbb`.
* An error pulls `tail` and `cur_start` back to `rel_ptr`. This drops every
  unverified store and keeps the verified ones, which must still reach
  memory.

Loads check the buffer for store-to-load forwarding. The youngest matching
entry wins. Matching uses 8-byte word granularity, so every access is treated
as an aligned 64-bit word.

The buffer also has two outputs that feed the fast-release decisions:

* `older_empty` is high when no store of an earlier region is left in the
  buffer.
* `chk_hit` is high when some buffered store writes the same word as the store
  now committing.

## Fast release of WAR-free stores

### Range-based CLQ

Storing every load address of a region is too costly for 4-entry-buffer
cores. Instead `clq` keeps one entry per region: {valid, region id, lowest
word address, highest word address}. The entry is allocated at the region's
first load and widened by every later load. It is freed when the region is
verified. A store is *WAR-free* if its word lies outside the range of the
current region. A range covers more than the addresses actually loaded, so
the check can only err towards quarantining a store.

Only the current region's range is checked, because a regular store is
fast-released only while every earlier region is already verified (see the
ordering rules below). After an error, execution then restarts at the
store's own region at the earliest. That region re-runs its loads before it
reaches the store again, and none of those loads touches the store's word.
Ranges of earlier, still unverified regions stay in the queue until their
verification. They decide nothing, but they take up entries.

With two entries the queue *overflows* when a third region loads while two
older ones still wait for verification. An overflowing load is not recorded,
so the current range is incomplete. From then on no WAR-free decision can be
trusted.

### Selective control

`fast_release_ctrl` is a three-state machine that decides when the CLQ can be
trusted again:

| state | fast release | CLQ insertion | leaves on |
|---|---|---|---|
| `FR_SEARCH` (reset) | on | on | overflow → `FR_DISALLOW` |
| `FR_DISALLOW` | off | off, CLQ cleared | region boundary → `FR_ALLOW` |
| `FR_ALLOW` | off | on | overflow → `FR_DISALLOW`; region verification → `FR_SEARCH` |

* In `FR_DISALLOW` the queue is wiped and stays empty. A verification changes
  nothing.
* At the next boundary a new region begins whose loads can all be recorded
  from its start, so insertion resumes (`FR_ALLOW`).
* At the next verification the regions whose loads were lost have left, and
  fast release is switched back on.
* An error also returns the machine to `FR_SEARCH`, because all unverified
  regions are discarded.

### Ordering rules

A store is WAR-free only with respect to its own region. `turnpike_top`
therefore fast-releases a regular store only if all of these hold:

1. the control is in `FR_SEARCH`;
2. the CLQ reports no hit for the current region;
3. no ended region is still waiting for verification (`rbb` is empty). If an
   earlier region that loaded the word were still unverified, an error would
   restart it, and it would read the new value;
4. no store of an earlier region is still in the buffer (`older_empty`), so
   stores reach the cache in program order;
5. no buffered store writes the same word (`chk_hit`).

Rules 3 and 4 together implement the published requirement: fast release
waits until the prior region is verified and its stores are released.
Rule 5 is this design's addition. Without it, take a store of the current
region that was buffered while fast release was off. A later fast store to
the same word would overtake it, and the buffered store's stale value would
land in memory last. The end-to-end test found this case.

Under these rules, regular stores are fast-released mainly in regions that
run longer than WCDL cycles. With back-to-back short regions, the previous
region is usually still inside its WCDL window.

## Checkpoint coloring

Coloring gets the most care in this design, because an error in it silently
destroys the data recovery depends on.

### Where checkpoints live

The core marks a checkpoint with `OP_CKPT`. It carries the number of the saved
register and the register's home slot address, as laid out by the compiler.
Color `c` of that register lives at `addr + c * 256`, one 256-byte bank
(32 registers × 8 bytes) per color. The recovery code learns which color to
reload for each register through the `vc_rd_reg` / `vc_rd_valid` /
`vc_rd_color` port.

### The three maps

For each of the 32 registers:

* **VC (verified color).** The color that holds the register's latest
  verified checkpoint. Recovery reads this one.
* **UC (used colors).** The color each unverified region gave the register,
  if any. There is one column for the region now executing, plus one column
  per `rbb` slot for the regions that have ended but are not yet verified.
  Each field holds {valid, fallback, color}.
* **AC (available color).** The lowest color that is neither VC nor used by
  any live UC column. It is computed combinationally from VC and UC rather
  than stored, so it can never disagree with them.

### At each event

* **Checkpoint commit.** If the open region already colored this register, the
  same color is reused: the region's later checkpoint simply overwrites its
  earlier one. Otherwise the register gets the AC color and the checkpoint is
  fast-released. (There is one exception; see `hold_fast` below.)
* **Fallback.** If no color is free (all four are pinned by VC and the UC
  columns), the checkpoint goes through the store buffer. It takes the VC color
  (color 0 if nothing is verified yet), which is safe because the buffer writes
  it only after the region is verified. Its UC field is marked *fallback*.
* **Region boundary.** The open UC column moves into the `rbb` slot that the
  boundary fills.
* **Verification.** For every register the region colored, VC takes the
  region's color, and the slot's column is cleared. The color VC held before
  is no longer pinned, so it becomes available again.
* **Error.** All UC columns are cleared. VC is kept: it is exactly what
  recovery needs.

### Fallback hazard (hold_fast)

One interaction is not covered by the rules above. A fallback checkpoint can
be verified but still sit in the store buffer, waiting for the cache port.
Meanwhile verification may already have freed its color for reuse. If a new
checkpoint fast-released into that color now, the older buffered write would
land after it and destroy it. The buffer therefore reports `rel_fb_pending`,
and while it is high `color_maps` grants no fast checkpoint release. A
checkpoint that commits then goes through the buffer like a fallback. This
is this design's own rule.

### Storage

UC is stored as 5 columns × 32 registers × 4 bits, and VC as 32 × 3 bits.
The published description counts 6 bits per register for all three maps.
That is too few to give each in-flight region its own UC entry, which the
description's own worked example does. This design keeps per-region UC
columns, at the cost of more flip-flops: 736 bits (92 bytes) against the
published 24 bytes. The CLQ, in contrast, matches the published budget
closely. Two entries of two 29-bit word addresses, a 4-bit region id and a
valid bit take 126 bits, against the published 16 bytes (128 bits).

## Errors and recovery

An error is either a sensor report (`sensor_err_i`) or a parity mismatch on a
register read. `reg_parity` keeps an even-parity bit per register. The bit is
written with the register and checked on both read ports in the read cycle.
A corrupted register that is never read again does no harm. One that is read
triggers the same recovery as a sensor report.

`resilience_ctrl` runs the following sequence:

1. In the error cycle, it pulses `flush`, which:
   * drops the `rbb` entries;
   * discards the unverified buffered stores;
   * clears the CLQ and all UC columns;
   * resets the fast-release control.

   `squash_o` goes high and commit stops.
2. It waits until the verified stores left in the buffer have reached the
   cache, so the recovery code will load verified checkpoints from memory.
3. It pulses `recover_valid_o` for one cycle with `recover_pc_o`, the boundary
   PC of the last verified region, or `RESET_PC` if no region has been
   verified yet. The core's front end restarts there; the recovery code reads
   VC for each live register and reloads it.

## Commit interface of `turnpike_top`

`commit_i` is a `commit_t` struct `{op, pc, addr, data, ckpt_reg}`. The core
holds it until `commit_ready` is high.

| op | action | stalls while |
|---|---|---|
| `OP_LOAD` | widen the region's CLQ range | never |
| `OP_STORE` | fast path to `dc_wr_*` if the five rules hold, else into the buffer | cache port busy (fast) / buffer full |
| `OP_CKPT` | address moved to its color; fast path if a color was free, else into the buffer | cache port busy / buffer full |
| `OP_BOUNDARY` | `rbb` entry, region id + 1, UC column handed over | `rbb` full |

* The cache write port carries one store per cycle. A fast store has priority
  over draining the buffer.
* Forwarding (`fwd_addr` → `fwd_hit`, `fwd_data`) is combinational.
* `events_o` pulses one bit per event: quarantined store, fast regular store,
  fast checkpoint, fallback checkpoint, WAR hit, buffer-full stall, rbb-full
  stall, CLQ overflow, verification, buffer release, recovery, parity error.
  These bits are meant for performance counters.

## Parameters

| parameter | default | origin |
|---|---|---|
| `SB_N` store buffer entries | 4 | published configuration (Cortex-A53 class) |
| `CLQ_N` CLQ entries | 2 | published configuration |
| `WCDL_CYC` | 10 | published default; 20–50 also studied |
| `NCOLORS` colors per register | 4 | published |
| `NREG` registers | 32 | published |
| `ADDR_W` | 32 | implied by the published 16-byte size of the 2-entry CLQ |
| `RBB_N` | 4 | this design |
| `DATA_W` | 64 | this design (AArch64 registers) |
| `TIME_W` | 16 | this design |
| `GRAN_BITS` | 3 | this design (8-byte word compare) |
| `COLOR_STRIDE` | 256 | this design (32 × 8 bytes) |

All sizes are constants in `turnpike_pkg`. `turnpike_top` takes `SB_N`,
`CLQ_N`, `RBB_N`, `WCDL_CYC` and the reset recovery PC `RESET_PC` as
parameters. Larger store buffers (8–40) and a 4-entry CLQ, as in the
published sensitivity studies, need only a different parameter value; they
are simulated by `tb_turnpike_configs`. A longer WCDL must match the sensors actually fitted: verifying after 10 cycles
with 50-cycle sensors is unsafe.

At the default sizes, coarse synthesis gives about 1280 cells and 970
flip-flop bits plus 608 bits of buffer memory. The color maps account for
most of the flip-flops.

## Departures from the published description

* One committed operation per cycle. The evaluated core is 2-issue, but its
  single load/store pipe makes one memory operation per cycle a fair model.
* Rule 5 of the ordering rules (`chk_hit`) and the `hold_fast` interlock are
  additions that close write-ordering holes the description does not discuss.
* UC is kept per region, following the worked example, not the 6-bit-per-
  register storage figure.
* AC is derived, not stored.
* The recovery redirect waits for verified stores to drain.
* Regions have ids; CLQ entries are allocated at a region's first load.
* The Region Time field holds the commit cycle of the region's boundary. The
  description names this field but does not define it.
* Fast release waits for *every* earlier region to be verified (rule 3). The
  description only says "the prior region". With more than one region in
  flight, an older unverified region that loaded the word would otherwise be
  re-executed after the store had already reached memory.
* The CLQ check covers only the current region's range. The description
  speaks of comparing against "all entries" in one place and against loads
  "in the current region" in another. Under rule 3 the current region's
  range is all that matters.
* An error reported in the same cycle as a verification wins. An error also
  returns the fast-release control to its initial state. The description
  covers neither case.
* Forwarding, WAR checks and same-word checks are all done on aligned 8-byte
  words.

## Verification

Every module has a self-checking testbench in `tb/` that compares the module
with a behavioural model written independently in the bench. Each bench ends
with a `TB_RESULT checks=… failures=…` line and has a watchdog.

* `tb_gsb`, `tb_rbb`, `tb_clq`, `tb_color_maps`: random push/verify/flush
  traffic against queue and map models.
* `tb_verify_timer`: exact WCDL timing.
* `tb_fast_release_ctrl`: every transition of the state table.
* `tb_reg_parity`: single-bit flips on both read ports.
* `tb_resilience_ctrl`: drain and redirect timing.

`tb_turnpike_top` runs the whole unit at its default parameters. It generates
a random program of regions and offers it one operation per cycle. A
memory model with random write back-pressure plays the cache. Each store
carries its own sequence number, so every cache write can be traced back to
its source.

* **Phase 1 (500 regions, no errors)** checks that memory ends in
  program-order state, that forwarding returns the youngest store, that writes
  to one word arrive in order, and that each region is verified exactly
  `WCDL_CYC` cycles after its boundary.
* **Phase 2 (up to 1600 regions)** injects sensor and parity errors. It checks
  that:
  * no discarded store reaches memory;
  * no buffered store leaves before verification;
  * no fast regular store has an earlier same-word load in its region;
  * every redirect goes to the last verified boundary;
  * after recovery, each register's VC location holds its latest verified
    checkpoint.

The bench counts every mechanism and fails if one never occurred. A typical
run:

```
sb_full_stall=70 rbb_full_stall=227 quarantined=955 fast_regular=190 fast_ckpt=665
ckpt_fallback=100 war_hit=196 clq_overflow=194 disallow_cycles=1469 allow_cycles=1028
verified=1553 released=924 forwarded=283 dc_stall=169 recover_sensor=14 recover_parity=9
TB_RESULT checks=11591 failures=0
```

The program mixes three kinds of regions:

* short random regions, which keep several regions in flight and overflow
  the CLQ;
* occasional long regions of loads followed by stores, which outlive the
  previous region's WCDL window and so exercise WAR-free fast release;
* runs of five tiny regions that each checkpoint the same register, which
  force checkpoint fallback.

Like a region former would, the generator keeps at most half a store buffer
of stores in a region. A region with more quarantined stores than the
buffer holds could never reach its boundary, so it would deadlock.

`tb_turnpike_configs` runs the same end-to-end test at the sizes of the
published sensitivity studies, ten copies side by side in one simulation:

* WCDL of 20, 30, 40 and 50 cycles;
* store buffers of 8, 10, 20, 30 and 40 entries;
* a 4-entry CLQ.

Each copy must show both kinds of fast release, quarantine, verification
and both kinds of recovery. Every other mechanism must show up in at least
one copy: a 40-entry buffer, for example, never fills. With a 4-entry buffer,
rbb-full stalls grow from about 200 at WCDL 10 to about 6600 at WCDL 50,
which is the pressure these studies measure. This bench is what exposed the
need for the modulo-2×depth pointers in `gsb`.

## Simulating

Any testbench builds with plain Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/turnpike_pkg.sv tb/tb_turnpike_top.sv --top-module tb_turnpike_top -o sim
./obj_dir/sim
```

Replace `tb_turnpike_top` with `tb_turnpike_configs` (which also reads
`tb/turnpike_cfg_bench.sv`), or with `tb_gsb`, `tb_clq` and so on for the
unit benches. Each runs in about a second.

## Not included

* The acoustic sensors (analog), the in-order core, the L1 cache and the
  recovery code. They are represented by ports.
* The compiler side of Turnpike: region formation, checkpoint insertion and
  pruning, induction-variable merging, loop-invariant checkpoint motion and
  scheduling.
