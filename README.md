# Intra-set write balancing for a non-volatile last-level cache

Non-volatile memories (STT-RAM, PCM, ReRAM) make dense last-level caches with no
leakage, but their cells survive only a limited number of writes. In a set-associative
cache the writes are spread unevenly over the ways of a set. A few hot ways take most of
them and wear out first, and the first worn-out way decides the lifetime of the cache.

This RTL implements a cache controller that evens out the writes among the ways of each
set. It does so by *blocking*: a way that has received too many writes is closed to
writes for a while. A write that hits it is moved to another way of the set, and new
lines are not placed in it. The simplest form of this is a per-way threshold. But if a
way is blocked whenever its last count crossed the threshold, the writes can just move
to another way, which then crosses the threshold and gets blocked in turn. The write
counts then oscillate between ways. Counting writes in every way of every set is also
expensive.

The mechanism comes from the paper *LLC Intra-set Write Balancing* (K. Krishna and
A. Verma, IIT Ropar), which evaluates it in a trace-driven cache simulator. This RTL is
an independent hardware version of it. The paper leaves many details open, and the
sections below point out each choice made here.

To avoid both problems, the design learns when blocking helps:

* It counts writes only in a few **sampled sets** (32 of 2048). There, a way is blocked
  when it received more than 29 writes in the previous interval.
* After each interval it checks, for each sampled set, whether the writes are now more
  even than before. It compares the variance of the per-way write counts with a
  weighted mean of the variances of the previous intervals. The **instruction pointer
  (IP)** whose writes caused the blocking is then credited (+1) or debited (−1) in a
  **PC table**.
* **All other sets** have no counters. In those sets, a line is blocked when the IP that
  brought it into the cache has a negative PC-table value. This works because a few
  store instructions cause most of the LLC writes, and they behave alike in every set.

## Block structure

```
                     req (addr, IP, read/write)
                                 |
   +-----------------------------v------------------------------+
   |  llc_wb_top                                                 |
   |                                                             |
   |  llc_tag_array ---- row of 16 lines (valid, dirty, RRPV,     |
   |   (2048 x 16)       tag, PC-table index of the fill IP)      |
   |        |                                                    |
   |        +--> hit/miss --------------------------+            |
   |        |                                       |            |
   |  sample_set_detect --is_sampled--+             |            |
   |                                  v             v            |
   |  write_history --newest counts--> block_mask_gen --blocked--> srrip_victim
   |      ^      |                    ^                          |   |
   |      |      | old entries        | PC-table value per line  |   v
   |  write_counters  v               |                     way to write,
   |      ^      feedback_trainer --+/-1--> pc_table              eviction
   |      |           ^                                          |
   |  interval_timer--+-- interval end: push history, clear,     |
   |                      train                                  |
   +-------------------------------------------------------------+
                                 |
            resp (set, way, data write enable, eviction)
                                 v
                     NVM data array (outside this RTL)
```

| Module | Role |
|---|---|
| `wb_pkg` | Request kind enum and the IP-to-index hash `ip_fold` |
| `sample_set_detect` | Sampled-set rule and slot number |
| `interval_timer` | Interval boundaries every `INTERVAL` cycles |
| `write_counters` | Count and last IP per way of each sampled set, current interval |
| `write_history` | The last `HIST_K` = 8 interval snapshots of the counters |
| `way_variance` | Scaled variance of 16 way counts |
| `feedback_trainer` | Variance comparison and PC-table updates at each interval end |
| `pc_table` | Signed value per (hashed) IP |
| `block_mask_gen` | Blocked-way mask for the accessed set |
| `srrip_victim` | SRRIP victim choice that skips blocked ways |
| `llc_tag_array` | Tags and per-line metadata |
| `llc_wb_top` | The controller that ties them together |

## Sampled sets

A set is sampled when its low `SAMPLE_BITS` = 6 index bits equal its top 6 index bits.
With an 11-bit index this is `set[5:0] == set[10:5]`. Bit 5 appears on both sides, so
the rule ties bits 5..10 to bits 0..5. Every bit then follows from `set[4:0]`, which
gives exactly 2^5 = 32 sampled sets, one in every 64. Examples are set 0, set
`0b10000100001` = 1057 and set 2047. The five low bits serve as the sampled set's slot
number (0..31) in the counter and history arrays.

## Counting and history

Time is divided into intervals of `INTERVAL` cycles. The paper gives no value for this
interval length; the default here is 100 000 cycles. Each way of each sampled set keeps
two things: how many writes it received in the current interval, and the IP of the
latest of those writes.

A *write* is any write of a cache line's cells:

* a fill after a miss, whether the miss was a read or a write;
* a write that hits a line;
* a write redirected away from a blocked way (it counts at the way it lands in).

At the end of an interval, the whole counter array is copied into the history in one
cycle and then cleared. The history is a circular buffer of 8 snapshots, so pushing a
new one drops the oldest. Entry age 0 is the interval that just ended, age 1 the one
before, and so on. A write in the cycle of the interval end counts in the new interval.

## The feedback rule (feedback_trainer)

This is the least obvious part. At every interval end, the trainer visits the 32
sampled sets in turn. For each set:

1. **V0** is the variance of the 16 way counts in the age-0 entry, the interval that
   just ended. During that interval, the ways over threshold in the age-1 entry were
   blocked, so V0 measures the state *after* blocking.
2. **Reference.** The variances V1..V7 of the older entries are averaged with weights
   7, 6, …, 1 (weight `HIST_K − age`), so more recent intervals count more. Only entries
   that exist are used, and training starts once two entries exist.
3. **Update.** If V0 is below the weighted mean, the blocking evened the writes out.
   Every way whose age-1 count exceeded the threshold (each way that was blocked) then
   adds +1 to the PC-table entry of the IP stored with it. That IP is the last writer
   of that way in the interval that caused the block. If V0 is above the mean, those IPs
   get −1. If it is equal, nothing changes.

No division is needed. `way_variance` returns `N·Σc² − (Σc)²`, which is N² times the
population variance. The weighted mean is compared as `V0·Σw < Σ(w·V)`.

The trainer reads one history entry per cycle. It makes at most one PC-table update per
cycle, so it needs `1 + (valid−1) + 1 + 16` cycles per set: 25 cycles, or 800 per
interval, at the defaults. It runs while requests continue. `llc_wb_top` asserts at
elaboration that the interval is longer than the training.

Worked example (the full-size testbench). Line A of sampled set 0 is written 40 times
in way 0 in interval 1. In interval 2 that way is blocked: 40 > 29. The next write to A
moves to way 3, and A gets 36 writes there.

* Interval 2: V0 = 16·36² − 36² = 19 440. Interval 1 gave 16·(40² + 1 + 1) − 42² =
  23 868. V0 is lower, so the IP that wrote way 0 in interval 1 gets +1.
* Interval 3: way 3 is now blocked, and A collects 60 writes in way 0. V0 = 54 000 is
  above (7·19 440 + 6·23 868)/13. The IP that wrote way 3 in interval 2 gets −1.
* From then on, lines that IP brings into unsampled sets are blocked.

## Blocking and replacement

`block_mask_gen` computes the blocked ways of the accessed set in the same cycle as the
tag lookup:

* **Sampled set.** A way is blocked if its age-0 history count is greater than
  `THRESHOLD` (29). Nothing is blocked before the first interval has ended.
* **Unsampled set.** A way is blocked if it holds a valid line and the PC-table value of
  the IP that brought the line is below 0. Every line stores the 10-bit PC-table index
  of its fill IP for this, not the 64-bit IP. All 16 ways are judged at once through 16
  read ports of the PC table.

The blocking acts on writes:

* **Write that hits a blocked way.** It is handled like a write miss. The old copy is
  invalidated, and the data is written into the SRRIP victim chosen among the unblocked
  ways (`resp_redirect` = 1, `resp_hit` = 0).
* **Fills after misses.** They also avoid blocked ways.
* **Reads.** A read that hits a blocked way is served normally, because reads do not
  wear the cells.
* **All ways blocked.** The blocking is ignored for that access. The paper does not
  cover this case.

SRRIP uses 2-bit re-reference values:

* A fill inserts at 2; a hit sets the value to 0.
* The victim is the first empty candidate way.
* If there is none, it is the first candidate at 3. If no candidate is at 3, every line
  is aged until one gets there.

`srrip_victim` does the ageing in a single step. It finds the largest value among the
candidates, picks the first way with that value, and adds `3 − max` to every line.

## Interface and timing of `llc_wb_top`

| Port | Dir | Meaning |
|---|---|---|
| `req_valid`, `req_ready` | in/out | Request handshake. One request per cycle. `req_ready` is low for 2048 cycles after reset while the tag array clears itself |
| `req_write` | in | 1 = write into the LLC (writeback from the level above), 0 = read |
| `req_addr[63:0]`, `req_ip[63:0]` | in | Byte address (64-byte lines) and the instruction pointer behind the request |
| `resp_valid` | out | Response to the request accepted in the previous cycle |
| `resp_hit`, `resp_redirect` | out | Hit, or write hit moved away from a blocked way (counts as a miss) |
| `resp_set`, `resp_way`, `resp_data_we` | out | Line used; `resp_data_we` = the data array must write it (fill or write) |
| `resp_blocked[15:0]` | out | Blocked-way mask seen by this access |
| `resp_evict_valid/dirty/addr` | out | Line displaced by a fill. A dirty one must be written back |
| `resp_sampled`, `resp_write` | out | Echo of the set kind and request kind |
| `interval_end`, `train_busy`, `pct_upd_valid`, `pct_upd_inc` | out | Interval boundary and training activity, for monitoring |

The lookup, blocking decision, victim choice and metadata update all happen in the cycle
the request is accepted. The response is registered. The NVM data array is not part of
this RTL: `resp_set`, `resp_way` and `resp_data_we` are its address and write enable.

## Parameters

| Parameter | Default | Origin |
|---|---|---|
| `NUM_SETS` | 2048 | From the paper |
| `NUM_WAYS` | 16 | From the paper |
| `SAMPLE_BITS` | 6, which gives 32 sampled sets | From the paper |
| `THRESHOLD` | 29 | From the paper |
| `HIST_K` | 8 | From the paper |
| `IP_W` | 64 | From the paper |
| `PCT_VAL_W` | 32 (a C `int`) | From the paper |
| `INTERVAL` | 100 000 cycles | Own choice (not given) |
| `CNT_W` | 16, saturating | Own choice |
| `PCT_ENTRIES` | 1024, direct-mapped, untagged, XOR-folded IP | Own choice (the paper uses an unbounded map) |
| `LINE_BYTES` | 64 | Own choice |
| `ADDR_W` | 64, so the tag is 47 bits | Own choice |
| `RRPV_W` | 2 | Own choice |

Storage at the defaults:

* counters: 40 960 bits;
* history: 327 680 bits;
* PC table: 32 768 bits;
* tag array: 2048 × 16 × 61 bits ≈ 2.0 Mbit.

The IPs dominate the counter and history storage. Storing PC-table indices there too
would cut them by about 5×. The RTL keeps full IPs, as the paper's structures do.

## Departures and own choices

* The PC table is a 1024-entry direct-mapped table indexed by an XOR fold of the IP.
  IPs that fold to the same index share a value. The hot IPs of the paper's traces lie
  within an 800-byte code range, so few of them should share an entry.
* The weights (`HIST_K − age`) and the decision rule are interpretations: V0 against the
  weighted mean of the older variances. The paper only says that a recency-weighted
  mean of the variances decides between increment and decrement.
* The variance is judged per sampled set, and all IPs that blocked in that set get the
  same direction.
* Blocking at a PC-table value of exactly 0: the paper's text says to block below 0,
  and one label in its flow diagram would also block at 0. This design blocks only
  below 0.
* Write hits are counted in addition to fills. Reads never redirect. If all ways are
  blocked, the blocking is ignored.
* Training runs in the background after each interval end and takes 800 cycles. An
  unsampled-set access during those cycles may see a partly updated table.
* The history is one circular buffer of whole snapshots, since all sampled sets close
  their intervals together.
* Not covered: the NVM cells and data array, the processor and the memory below the
  LLC. The paper's results also come from full-program simulation, not reproduced here.
  Those results are IPC and miss ratio on four SPEC CPU2006 traces (gcc, bwaves, mcf,
  libquantum) and variance against time, compared with a threshold-only scheme.

## Verification

Each module has a self-checking testbench in `tb/`. Each predicts the outputs
independently of the RTL and ends with a `TB_RESULT checks=… failures=…` line.

| Testbench | What it checks |
|---|---|
| `tb_sample_set_detect` | All 2048 sets against the 32 sets built from their free bits |
| `tb_interval_timer` | Pulse every `INTERVAL` cycles, one cycle wide |
| `tb_write_counters` | Random writes and clears against a reference array, saturation, write in the clear cycle |
| `tb_write_history` | Both read ports at every age against a list of the last K snapshots |
| `tb_way_variance` | Against the pairwise form Σ_{i<j}(c_i − c_j)² |
| `tb_pc_table` | Random ±1 against a reference, both saturation limits |
| `tb_feedback_trainer` | Updates and their direction against a model of the rule; busy time = 2·(valid+1+4) cycles |
| `tb_block_mask_gen`, `tb_srrip_victim` | Random inputs against the rules (SRRIP by explicit step-by-step ageing) |
| `tb_llc_tag_array` | Clear sweep length, cleared rows, random read/write |
| `tb_llc_wb_top` | Reduced configuration (64 sets, 4 ways, threshold 3, 300-cycle intervals) |
| `tb_llc_wb_full` | Default configuration |

`tb_llc_wb_top` runs 60 intervals against a complete reference model of the controller,
and compares the whole PC table after each training phase. It requires every mechanism
to occur:

* blocking in sampled and in unsampled sets;
* redirected write hits;
* fills steered around blocked ways;
* the all-blocked fallback;
* dirty evictions;
* PC-table increments and decrements.

`tb_llc_wb_full` runs the worked example above at the default configuration: three
100 000-cycle intervals plus the reset sweep.

To run one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_llc_wb_top rtl/wb_pkg.sv tb/tb_llc_wb_top.sv
obj_dir/Vtb_llc_wb_top
```

The full-size test takes about 15 seconds of simulation. The controller carries two
concurrent assertions:

* a tag is present at most once in a set;
* a fill never lands on a blocked way unless all ways are blocked.
