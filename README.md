# SpecBox: speculative cache lines in a temporary domain, labelled per thread

A Spectre-style attack leaves a secret in the cache. A mis-speculated load brings in a line picked by the secret. The attacker later times accesses to find that line, and the state of the cache outlives the squash. SpecBox closes this channel in the caches themselves, without delaying speculative loads. It does this with two labels on every cache line:

* **T/P flag (1 bit).** Each set is split into a *temporary* domain (T) and a *persistent* domain (P). A fixed number of ways per set belong to T.
  * A speculative (in-flight) access that misses installs its line in T, and it can only displace another T line.
  * If the instruction commits, the line moves to P.
  * If it is squashed, the line is evicted.
  * The committed state of the cache (the P domain) therefore never changes because of a speculative access that was later undone.
* **Thread-ownership semaphore, TOS (one bit per hardware thread that shares the cache).** It marks which threads' in-flight accesses touched a T line.
  * A thread that reads a T line it does not own, while other threads own it, is answered with the latency of a miss. Speculative state cannot then be read across threads or cores.
  * A thread whose refill would evict a T line that another thread still owns only gives up its own claim. Its request is suspended, so it cannot slow the other thread down.

Around the caches sit several other parts:

* a **notifier** in each core's commit stage, which tells the caches when an access commits or is squashed;
* a **Notification Fill Buffer** (NFB) that merges duplicate notifications;
* a **prefetcher** that learns only from committed accesses;
* a **delay gate** that holds the few operations whose side effects the domains cannot hide.

This repository holds synthesizable SystemVerilog for that cache-side machinery: labelled L1-I, L1-D and shared L2 caches, plus the parts listed above, for an 8-core, 2-thread-per-core system.

## The two domains inside a set

A set with `W` ways has `domain_cap` T ways; the others are P.

* A way's domain is its T/P flag, so the domains need not be contiguous.
* A free T way is an invalid way whose flag is T.
* After reset, and after any write of `domain_cap`, the highest `domain_cap` ways of every set are T.

Every request carries one of four operations (`cache_op_e` in `specbox_pkg`):

| op | issued by | meaning |
|---|---|---|
| `OP_ACCESS` | core fetch, load, store | in-flight (speculative) access |
| `OP_NONSPEC` | prefetcher; refill for a commit; every access while `domain_cap` = 0 | non-speculative access, P domain only |
| `OP_COMMIT` | notifier | the in-flight access to this line committed |
| `OP_SQUASH` | notifier | the in-flight access to this line was squashed |

The set controller (`specbox_set_ctrl`, purely combinational) applies seven rules:

1. **In-flight hit, T or P.** Served, with the LRU ages left untouched. A speculative hit must not reorder replacement.
2. **In-flight miss with T full.** After the refill the LRU T line is replaced; the TOS rules below apply.
3. **In-flight miss with a free T way.** The line is installed there and made MRU.
4. **Squash that hits a T line.** The line is evicted, or only released if another thread still owns it.
5. **Squash or commit that hits a P line, or misses.** Ignored.
6. **Commit that hits a T line.**
   * The line's flag becomes P and its TOS bits are cleared.
   * The LRU P line of the set is evicted and its way becomes T, so the number of T ways stays at `domain_cap`.
7. **Commit that misses** (the line was already replaced in T). The line is fetched again with a non-speculative request and installed in P.

Non-speculative requests behave like an ordinary LRU cache restricted to the P ways. LRU is kept as one age counter per way, over the whole set. Moving a way to MRU keeps the relative order of every other way, and so the order inside each domain.

## Thread-ownership semaphores

The TOS label applies only to T lines. P lines are committed data and are shared freely. For a request by thread `t` to a T line:

* **`t` owns it, or no thread does.** Hit, and `t` becomes an owner.
* **Only other threads own it.** *Emulated miss*: the request goes to the next level exactly as a real miss would, and `t` becomes an owner.
  * Because it is a real next-level access, its latency is the real miss latency, with no timer to tune.
* **A refill of `t` picks a victim owned by other threads.** `t`'s bit is cleared and the line stays. Nothing is installed, and the response carries `suspend`. The core retries later: either as `OP_ACCESS` once the other owners have let go, or as `OP_NONSPEC` once the load is at the ROB head and can no longer be squashed. The non-speculative retry installs in P and displaces no T line.
  * An L1 that receives a suspended refill from the L2 passes the suspend upward and installs nothing.
* **Squash by `t`.** `t`'s bit is cleared, and the line is evicted only if that was the last bit.
* **Commit.** The line moves to P and all TOS bits are cleared.

Thread naming:

* The L1s hold one bit per SMT thread (2).
* The L2 holds one bit per hardware thread of the chip: 8 cores × 2 = 16.
* An L1 maps its local thread `t` to `core × SMT + t` when it talks to the L2 (parameter `TID_BASE`).

## Telling the caches: masks, notifier, NFB

The caches learn about commits and squashes only from notifications. To route them, every response carries a `hit_mask`:

* bit 0 set: the access hit in that L1;
* bit 1 set: it hit in the L2.

The core stores this mask with the instruction: `dhit_mask` in the load/store queue entry, `ihit_mask` in the fetch queue / ROB entry.

**Loads and stores.** When the ROB commits or squashes a memory instruction, it gives the notifier the instruction's ROB sequence number `sn`. In the same cycle the notifier reads the LSQ entry at `sn` (ports `lsq_sn` → `lsq_line`, `lsq_dhit_mask`). One cycle later it presents a notification to the L1-D side.

**Instruction fetch.** When a branch resolves (`br_valid`, with `br_accept` = prediction right or wrong), the notifier asks the fetch queue and ROB for every instruction fetched under that branch.
* They answer as a stream: one `(fl_line, fl_ihit_mask)` beat per cycle under `fl_valid`/`fl_ready`, with `fl_last` on the final beat.
* Each beat becomes a commit (accepted) or squash (rejected) notification to the L1-I side.
* One branch is walked at a time; `br_ready` is low during a walk.

**Forwarding.** Each notification carries `fwd = !mask[0]`.
* If the original access hit in L1, it never reached the L2 and left nothing there, so the L1 handles the notification alone.
* Otherwise the L1 applies it and then sends it to the L2.

**NFB.** Consecutive fetches from one 64-byte line produce runs of identical notifications. Each side of the Notifier Bus therefore has a 16-entry FIFO (`specbox_nfb`).
* A new notification is dropped if the youngest queued one for the same line has the same op and thread; its `fwd` is ORed into the queued entry.
* A different op on the same line (a squash after a commit) is appended, so order is kept.

## Other channels that are closed

* **Prefetcher** (`specbox_prefetcher`). It is trained only by commit notifications on the L1-D side.
  * Each committed line L triggers an `OP_NONSPEC` prefetch of L+1, which lands in P.
  * It does not repeat its last prefetch, and it drops training while a prefetch waits for the cache.
* **Delay gate** (`specbox_spec_gate`). The core classifies three kinds of operation:
  * cache-management instructions (software prefetch, clflush, INVD);
  * operations that would change another core's coherence state;
  * operations that missed in the TLB.

  Such an operation is held until its `sn` is the ROB head, that is, until it can no longer be squashed. Ordinary operations pass straight through, and `g_flush` drops a held operation. The gate is active while the core's L1-D `domain_cap` is non-zero.
* **`domain_cap` registers.** There is one per cache (`cfg_*_we`/`cfg_*_cap`), meant to be written only by a serialising privileged instruction.
  * A write waits until no miss is outstanding, then clears that cache (one set per cycle) and re-forms the domains.
  * Writing 0 turns protection off: every access becomes non-speculative, commits and squashes are ignored, the notifier drops them, and the delay gate passes everything.

## System structure

```
  core fetch ----------------------------+
  EU branch -> notifier -> NFB-I -------> arbiter -> L1-I --+
  core load/store -----------------------+                  |
  ROB -> notifier -> NFB-D -------------> arbiter -> L1-D --+-> arbiter -> L2 -> memory port
  commit notifications -> prefetcher ---+                   |
                                        (7 more cores) -----+
```

`specbox_top` builds this for `N_CORES` cores.

* In each L1's arbiter, index 0 is the Notifier Bus, 1 is the core and 2 is the prefetcher.
* In the L2's arbiter, index 2c is core c's L1-I and 2c+1 its L1-D.

All arbiters are round robin and combinational. The out-of-order core, the coherence directory, the on-chip network and DRAM are not part of this RTL. Their signals are ports of the top:

* fetch and load/store request ports;
* ROB commit/squash, LSQ lookup, branch and FQ/ROB lookup;
* delay-gate in/out and ROB head;
* `domain_cap` writes;
* the L2's memory port.

| block | module | default configuration |
|---|---|---|
| L1-I (per core) | `specbox_cache` | 128 sets × 4 ways × 64 B = 32 KB, 2 T ways, 2 TOS bits, 1-cycle hit, 4 MSHRs |
| L1-D (per core) | `specbox_cache` | 128 sets × 8 ways × 64 B = 64 KB, 2 T ways, 2 TOS bits, 1-cycle hit, 4 MSHRs |
| L2 (shared) | `specbox_cache` | 2048 sets × 16 ways × 64 B = 2 MB, 3 T ways, 16 TOS bits, 8-cycle hit, 16 MSHRs |
| notifier | `specbox_notifier` | 192-entry ROB (8-bit `sn`), 8-bit branch tag |
| NFB (2 per core) | `specbox_nfb` | 16 entries |
| prefetcher | `specbox_prefetcher` | next line |
| delay gate | `specbox_spec_gate` | one held operation |
| arbiters | `specbox_arbiter` | round robin |

Shared types are in `specbox_pkg`:

* `cache_req_t`: `op`, `line` (42-bit line address of a 48-bit physical address), `tid`, `fwd`, `src`.
* `cache_rsp_t`: `src`, `line`, `hit`, `hit_mask`, `suspend`.
* `cache_ev_t`: one-cycle event pulses per cache for counters and tests, namely hit, miss, emulated miss, T install, T replace, commit switch, commit reinstall, squash evict, TOS release and suspend.

## Cache sequencing and timing

`specbox_cache` looks up one request at a time, but a miss does not block it: the request waits in a miss status holding register (MSHR) while the cache serves others. There are 4 MSHRs per L1 and 16 in the L2.

* **`S_IDLE`** accepts a request (`up_req_ready` is high only here).
* **`S_PROC`** reads the set, lets the set controller decide, and writes the set back. A hit is answered:
  * in the same cycle when `HIT_LAT` ≤ 1;
  * otherwise `HIT_LAT` cycles after acceptance, through `S_HOLD`.
* **Otherwise** the controller's down operation goes into a free MSHR and the cache returns to `S_IDLE`.
  * MSHRs send their operations down in index order, and answers are matched to MSHRs by line address.
  * When an answer arrives, `S_IDLE` starts that MSHR's refill pass (`S_FILL`) ahead of any new request. The refill pass presents the request again with the set as it is now; it installs, reinstalls or suspends, and answers.
* **A new request is accepted only when an MSHR is free.** A request whose line an MSHR still holds is parked in a one-entry buffer until that refill is done. Two requests for one line therefore never overlap, and a commit or squash is applied after the access it refers to. `up_req_ready` never depends on the request itself.
* **A `domain_cap` write waits until no miss is outstanding.** `ready_o` is low while the write is pending.

Latencies measured at the top's ports (request accepted → response), with a memory that answers M cycles after accepting:

| case | cycles |
|---|---|
| L1 hit | 1 |
| L1 miss, L2 hit (or L1 emulated miss, L2 hit) | L2_LAT + 3 = 11 |
| miss in both (or emulated miss in the L2) | M + 6 |

Notifications take one cycle in the notifier, at least one in the NFB, and then go through the L1 as requests. A commit that misses in the L1 costs a full refill, just as an access would.

## Where this RTL departs from the described design

* **Tags only.** There is no data array, no dirty state and no write-back. The labels, the access flow and the notification paths are complete, but the caches return no data.
* **Simple MSHRs and one lookup port.** Each MSHR holds one request: misses to the same line are not merged, and a second request for a line is parked until the first is done (one parked request at most). Hits are not pipelined, so an L2 hit occupies the L2 for its 8 cycles.
* **No coherence directory.** The L2 TOS is an explicit 16-bit label (one bit per hardware thread), not bits added to a directory's sharer vector.
  * The described design's LLC cost is counted two ways: "(N−1)·M extra bits next to the directory" and "2/4/8 bits for 2/4/8 cores".
  * With `SMT = 1` the top builds the latter.
* **No mesh.** One L2 is reached through a round-robin arbiter. Every L2 access costs the local 8-cycle latency; there is no 16-cycle remote case and no per-node banks.
* **Emulated misses are real next-level accesses.** This gives the same latency and also the same traffic.
* **Suspend is a response.** A suspended request is answered with `suspend = 1` and nothing is installed. Retrying (or waiting for commit) is left to the core.
* **`domain_cap` writes flush the cache.** How existing lines should be kept across a capacity change is not specified.
* **The prefetch algorithm** (next line) and the **NFB merge rule** (youngest entry of the line, same op and thread) are the simplest that do the job.

## Simulating

Every testbench is self-checking and ends by printing `TB_RESULT checks=N failures=M`. With verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/specbox_pkg.sv rtl/*.sv tb/tb_specbox_top.sv --top tb_specbox_top
./obj_dir/Vtb_specbox_top          # add +trace to print every load's latency
```

| testbench | what it shows |
|---|---|
| `tb_specbox_set_ctrl` | the 8-way 2:6 walk-through (A, B into T; C replaces A; commit A reinstalls in P; commit B moves to P and the LRU P way turns T; squash C); both TOS attack scenarios; then 3000 random requests checked against invariants (T-way count equals `domain_cap`, P lines have no owners, …) |
| `tb_specbox_cache` | an L1 over an L2 over a pipelined memory model; exact latencies of hit, L2 hit, miss and emulated miss; squash, commit, reinstall, suspend through both levels; four overlapping misses, a fifth waiting for an MSHR, a hit under a miss, and a same-line access parked until its line arrives; `domain_cap` = 0 |
| `tb_specbox_notifier` | notifications against model LSQ and FQ/ROB contents; forward flags; one beat per cycle during a branch walk |
| `tb_specbox_nfb` | merging, ordering of different ops on one line, fullness |
| `tb_specbox_prefetcher` | learns from commits only, no repeats, drops while busy |
| `tb_specbox_spec_gate` | holds CMO, coherence and TLB-miss operations until the ROB head reaches them; stall cycles |
| `tb_specbox_arbiter` | round-robin fairness and response routing |
| `tb_specbox_spectre_poc` | the bounds-check-bypass proof of concept on the full-size system: 100 rounds, each a squashed speculative load of probe line 79 followed by timing all 256 probe lines; protected, no line is ever fast; with `domain_cap` = 0, line 79 is fast in every round and no other line ever is (about 30 s) |
| `tb_specbox_attack_table` | the six abstract covert-channel attacks (three serialized, three concurrent: install, evict, or evict-then-commit a line speculatively, with the receiver in the same thread, the SMT sibling or another core) on the full-size system; each runs with a secret bit of 0 and of 1 and the receive time must not differ (18 checks, under a second) |
| `tb_specbox_top` | the whole system at its default size (8 cores, 2 MB L2), as described below |

`tb_specbox_top` runs in well under a second. It covers:

* **The probe attack.** A speculative load of probe line 79 is squashed, and all 256 probe lines are then timed. No line is fast with protection on; only line 79 is fast with `domain_cap` = 0.
* **Cross-core TOS.** Acceleration (another core sees a miss) and deceleration (the refill is suspended, and the owner still hits in the L2). The suspended load, retried as non-speculative, is then served without disturbing the owner's lines.
* **Commit handling.** Commit switch, commit reinstall and a commit-trained prefetch.
* **Instruction side.** Instruction-side commits with NFB merging.
* **Delay gate.** A held clflush.

It counts each mechanism's events and fails if any never occurred.

## Parameters

All defaults are the evaluated configuration:

* `specbox_top`: `N_CORES`=8, `SMT`=2, `L1I_SETS`=128, `L1I_WAYS`=4, `L1I_T`=2, `L1D_SETS`=128, `L1D_WAYS`=8, `L1D_T`=2, `L2_SETS`=2048, `L2_WAYS`=16, `L2_T`=3, `L1_LAT`=1, `L2_LAT`=8, `L1_MSHRS`=4, `L2_MSHRS`=16, `NFB_DEPTH`=16, `ROB_ENTRIES`=192.
* `BR_W`=8 (branch tag width) is this design's own choice.
* The line size (64 B) and physical address width (48 bits) are in `specbox_pkg`.
* Sizes must be powers of two for the set index. `T` ways may be 0 to `WAYS`, and the register can change them at run time.
