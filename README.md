# Random and Safe (RaS) data-cache hierarchy in SystemVerilog

A cache leaks secrets through timing because a memory access leaves a trace
behind. The line it missed on is installed, and a later probe of that line,
or of the set it evicted from, is fast or slow depending on the secret.
Speculative-execution attacks (Spectre-type) plant this trace from code that
never architecturally runs. Side-channel attacks on crypto code plant it from
ordinary key-dependent table lookups.

The RaS ("Random and Safe") approach cuts the link between a demand access
and the cache fill it would cause:

* **NoFill.** A demand miss can be marked *no-fill*. The data goes to the
  requester, but no cache level installs the line.
* **Safe History Buffer (SHB).** A separate engine fills the cache instead. It
  keeps a few *safe* line addresses: loads that can no longer be squashed or
  faulted, and stores. At a fixed rate it picks one at random, picks a random
  line in the aligned window around it, and fetches that line into the cache
  (an *SHBfetch*). Fills happen only at addresses that were already
  architecturally used. With a window wider than one line they are also
  decorrelated from which line was actually touched.
* **Random replacement** in every level, so eviction does not reveal an LRU
  order.

This RTL implements the data side of a single-core RaS hierarchy:
* the ROB bookkeeping that decides which loads are speculative;
* the NoFill marking of core requests;
* the SHB;
* an L1 data cache and an L2 cache that carry NoFill through every buffer.

The core and the main memory connect through ports.

## Two operating modes

`cfg_mode` is a run-time register and can be changed between instructions:

| mode | which requests are no-fill | what it protects against |
|---|---|---|
| `MODE_RAS_SPEC` | loads that are still speculative | speculative cache channels |
| `MODE_RAS_PLUS` | every load and store | speculative and non-speculative cache channels |

In RaS-Spec, stores and non-speculative loads fill as in a normal cache, and
the SHB is an extra source of fills. The evaluated setting is
"R3E1W4":
* one SHBfetch every 3 cycles;
* 1 active SHB entry;
* a 4-line window.

A window of 1 simply re-fetches, once it is safe, the line a speculative load
was not allowed to install.

In RaS+, the SHB is the only way into the cache. The evaluated setting is
"R3E4W64":
* one SHBfetch every 3 cycles;
* 4 active entries;
* a 64-line window.

64 lines of 64 B are one way of the 32 KB L1D, so every L1D set is equally
likely to be filled.

The SHB is configured with `cfg_shb_enable`, `cfg_shb_active` (1 to 4 live
entries), `cfg_win_log2` (window of 1 to 64 lines) and `cfg_rate`. These
registers are meant to be written by trusted system software.

## When is a load speculative? (`rob_spec`)

A memory instruction becomes *safe* (authorized) once every older instruction
in the ROB has finished without a fault. `rob_spec` keeps three bits per ROB
entry:
* Done;
* Fault, which the paper's figure calls Squash;
* whether the entry is a load with a known address.

A combinational scan from the head computes, for every entry, whether an older
entry is unfinished or faulted. That is the entry's Spec bit.

The scan has two uses:
* **Issue.** A load's request gets its NoFill bit from the Spec bit of its
  ROB entry (`q_idx`/`q_spec`) in the same cycle as the issue.
* **SHB insertion.** The oldest load that is authorized, has a known address
  and has not yet been passed on is sent to the SHB (`ins_valid`/`ins_addr`).
  At most one load is sent per cycle. This often happens long before the load
  commits.

ROB behaviour:
* Dispatch, retirement of a finished head, and a branch squash are one
  operation each per cycle.
* A squash removes every entry younger than `squash_idx`.
* A faulting head flushes the whole ROB.
* ROB size: 192 entries.

Stores need no Spec bit: a store reaches the cache only after it commits. The
L1D reports each accepted store (`st_ins_*`) and the SHB inserts it.

## The NoFill chain through a cache level (`ras_cache`)

Each request (`mem_req_t`) carries a `nofill` bit. One cache level holds it in
four places:

```
request --> MSHR.nofill --> line fill buffer --> (Fill path)   install + respond
                                             \-> (NoFill path) respond only;
                                                  if a store wrote into the
                                                  buffer: writeback buffer,
                                                  nofill=1  --> next level
```

* **Hit.** A hit is served normally, whatever the bit. NoFill only concerns
  installing lines.
* **Miss.** A miss opens an MSHR that records the bit. The read sent to the
  next level carries the MSHR's bit as it is when the read is issued, so the
  L2 does not install the line either. The MSHR index is the transaction id.
* **Return.** The returning line is merged with any store bytes waiting in the
  entry's line fill buffer. Then it either takes the Fill path (installed,
  dirty if a store was merged, dirty victim to the writeback buffer) or the
  NoFill path (only handed to the waiting loads). On the NoFill path, a line
  that a store modified is sent down through the writeback buffer marked
  no-fill. That keeps the data without installing it.
* **No-fill write-back from above.** If it hits, it updates the resident line.
  If it misses, it goes straight into this level's writeback buffer, still
  marked no-fill. A fill write-back that misses is installed dirty.

### Ways an MSHR loses its NoFill bit

* **NoFillClear.** With every SHBfetch the SHB also sends a NoFillClear of the
  same line to the L1D. It is compared with the MSHR addresses only, not with
  the tags. A matching no-fill MSHR becomes a fill MSHR, and its line will be
  installed when it returns.

  The clear that matched is passed to the L2 one cycle later
  (`nfc_out_*`), where it does the same to the L2 MSHR for that line. This
  matters when a speculative miss becomes safe while its line is still in
  flight: the SHB can then pick the address, and the line is installed
  instead of fetched twice.
* **A fill request for the same line.** A fill request (RaS-Spec: a
  non-speculative load, or a store) that merges into a no-fill MSHR clears it.

The MSHR file counts how each no-fill entry ended:
* still no-fill;
* cleared by NoFillClear;
* cleared by a fill access.

### SHBfetch in the cache

An SHBfetch is dropped in any of these cases:
* its line is already present;
* the line already has an MSHR;
* the line is waiting in the writeback buffer;
* no MSHR with writeback room is free.

Otherwise it opens a fill MSHR with no waiting requester, and the line is
installed on return.

### Controller, priorities and timing

Each level has a single controller that handles one request at a time:

```
IDLE --(new request)--> WAIT (HIT_LAT-1 cycles) --> EXEC --> IDLE
IDLE --(returning line)--> REFILL --> RESP (one waiting load per cycle) --> IDLE
```

* **IDLE priority.** IDLE serves, in this order:
  1. a returning line;
  2. a request that had to wait;
  3. an SHBfetch;
  4. a request from above.
* **Hit latency.** A hit answers `HIT_LAT` cycles after it was accepted: 1
  cycle in the L1D and 12 in the L2.
* **Loads.** Loads get the whole 64-byte line (`mem_resp_t`).
* **Stores.** A store gets a response with its id as soon as its bytes are in
  the cache or in a line fill buffer.
* **Write-backs.** Write-backs get no response.
* **Next level.** The writeback buffer head has priority over unissued MSHRs
  on the down port.

**Stalls.** When EXEC cannot finish, the controller goes back to IDLE and
tries again later. EXEC cannot finish when:
* no MSHR is free;
* the entry's waiting-load list (4 targets) is full;
* the line is still in the writeback buffer;
* the writeback buffer is full;
* a write-back arrives for a line with an open MSHR.

Because EXEC releases the controller in these cases, a returning line is never
blocked behind a stalled request.

**No deadlock between levels.** Two rules guarantee it:
* An MSHR is opened only while the writeback buffer has a free slot for every
  open MSHR. The buffer depth equals the MSHR count: 16 in the L1D, 32 in
  the L2.
* A returning line is accepted only when the writeback buffer is not full.

So the victim or no-fill line a refill pushes always has a place, and each
level can always take back the lines it asked for.

**Ordering.** Several cases of the same line are ordered conservatively:
* A miss to a line still in the writeback buffer waits until that line has
  left.
* A write-back arriving for a line with an open MSHR waits until the MSHR is
  freed.
* Stores accepted while a miss is outstanding are merged into the returning
  line.

## The Safe History Buffer (`shb`)

* **Entries.** Four address entries with valid bits, filled like a shift
  register: the newest address enters entry 0 and the oldest falls out. An
  authorized load and a store in the same cycle are both taken, the store as
  the newer one.
* **Firing.** A free-running counter fires every `cfg_rate` cycles. On each
  firing:
  1. A uniformly random live entry is chosen (one of the first
     `cfg_shb_active` valid ones).
  2. A random line is chosen in the aligned window of `W = 2^cfg_win_log2`
     lines:

     ```
     line = (entry_addr & ~(W-1)) | (random & (W-1))
     ```

  3. The line is presented as an SHBfetch on `pf_*`. In the same cycle a
     one-cycle NoFillClear with the same address is sent on `nfc_*`.
* **Constant rate.** A fetch still waiting when the next firing comes is
  replaced and counted as dropped. The issue instants therefore never depend
  on what the cache is doing.
* **Randomness.** A 32-bit Galois LFSR (`lfsr`). The cache replacement uses
  separate LFSRs.

## Storage blocks

* **`tag_data_array`.** Set-associative tags, valid and dirty bits, and data.
  * The set index is the low bits of the line address.
  * The victim is an invalid way if there is one, otherwise an LFSR-chosen way.
  * Write ports: line fill, word write with byte enables, whole-line write.
  * Valid and dirty bits are reset. Tags and data are not, and are only read
    behind a valid bit.
* **`mshr_file`.** N entries with:
  * line address, NoFill bit and kind (load, store or SHBfetch);
  * an issued flag;
  * up to 4 waiting load ids.

  It provides same-line lookup, allocate, merge with optional clear, the
  NoFillClear match, lowest-index issue and free.
* **`line_fill_buffer`.** One 64-byte buffer with a byte mask per MSHR. It
  merges store bytes into the returning line.
* **`writeback_buffer`.** A FIFO of {line address, data, NoFill}, with an
  address-match port.

## Module hierarchy and sizes

```
ras_top
 |- rob_spec      (ROB_ENTRIES = 192)
 |- shb           (4 entries, window up to 64 lines)   -- lfsr
 |- ras_cache u_l1d  32 KB: 64 sets x 8 ways x 64 B, 16 MSHRs, 1-cycle hit
 |    |- tag_data_array -- lfsr
 |    |- mshr_file, line_fill_buffer, writeback_buffer (16)
 |- ras_cache u_l2    2 MB: 2048 sets x 16 ways x 64 B, 32 MSHRs, 12-cycle hit
      |- same, writeback_buffer (32)
```

All of these are parameters of `ras_top`. Their defaults are the sizes above.
`ras_pkg` holds the shared types and widths:
* 40-bit physical address;
* 64-byte line, so a line address is 34 bits;
* 64-bit words;
* 8-bit request ids;
* the request and response structs;
* the statistics struct `cache_stats_t`.

### `ras_top` ports

| group | signals | notes |
|---|---|---|
| config | `cfg_mode`, `cfg_shb_enable`, `cfg_shb_active`, `cfg_win_log2`, `cfg_rate` | static or changed between phases |
| ROB | `rob_disp_*`, `rob_exec_*`, `rob_done_*`, `rob_squash_*`, `rob_commit_valid`, `rob_flush_fault` | dispatch returns the allocated index |
| core port | `core_req_*` (valid/ready, is_store, paddr, be, wdata, id, rob_idx), `core_resp_*` | a load's NoFill is decided from `core_req_rob_idx` in the accepting cycle |
| memory | `mem_req_*`, `mem_resp_*` | valid/ready on both directions, any latency, responses in any order by id |
| observation | `l1_stats`, `l2_stats`, `shb_fired/issued/dropped`, `l1_req_nofill` | counters of every mechanism |

## Verification

Each block has a self-checking testbench in `tb/`. Each one:
* uses `$urandom` stimulus;
* compares against an independent reference model;
* has a watchdog;
* prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it covers |
|---|---|
| `tb_shb` | FIFO order, constant period, aligned-window membership (also for unaligned entries), use of every entry and offset, drop-and-replace, NoFillClear equals SHBfetch |
| `tb_rob_spec` | Spec bits, authorization order, commit, squash and fault flush against a queue model |
| `tb_mshr_file` | allocate, merge, targets, NoFillClear, clears and counters |
| `tb_line_fill_buffer` | byte merging |
| `tb_writeback_buffer` | FIFO order, full, address match |
| `tb_tag_data_array` | hits, victims (invalid first, random otherwise), dirty data |
| `tb_ras_cache` | one small cache level on a memory model: data against a reference memory, the 1-cycle hit latency, and one directed test per mechanism, then mixed random traffic with back-pressure |
| `tb_ras_top` | end-to-end, at the default full size |

`tb_ras_top` runs on a 100-cycle memory model (`tb_mem_model`). A small
out-of-order core model drives it:
* out-of-order load issue;
* faults;
* squashes;
* stores sent after commit.

It runs three phases: RaS-Spec R3E1W4, then RaS+ R3E4W64, then RaS-Spec again.

It checks every accepted request's NoFill bit against its own Spec model and
every load's data against a reference memory. It then requires each of these
to have happened at least once:
* speculative no-fill loads;
* fill loads;
* RaS+ no-fill requests;
* mode switches;
* SHBfetch fills;
* NoFillClear matches in the L1D and in the L2;
* both kinds of MSHR clear;
* no-fill returns in both levels;
* no-fill write-backs, and their forwarding in the L2;
* L2 hits;
* evictions in both levels;
* core-port stalls;
* squashes;
* flushes.

`tb_ras_spectre` plays the Spectre v1 attack on the full-size hierarchy. It
drives the core step by step: a branch is left unresolved, a younger load reads
`probe[30]`, and the branch is then found mispredicted.

* **Flush-reload, in both modes.** Reloading `probe[30]` must take a full
  memory round trip, like an untouched line. As a control, in RaS-Spec the
  same access made non-speculatively must turn the reload into a 1-cycle hit.
* **Prime-probe, in RaS-Spec.** The eight primed ways of L1D set 30 must all
  still hit after the speculative access. As a control, one normal access to
  the set must evict a primed line.

To run a testbench with Verilator (from the directory holding `rtl/` and `tb/`):

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
          rtl/ras_pkg.sv tb/tb_ras_top.sv --top-module tb_ras_top
./obj_dir/Vtb_ras_top
```

## Where this design departs from the paper, and its limits

* **Blocking controller.** The paper models the caches in a cycle-level
  simulator with non-blocking pipelines. Here each level handles one request
  at a time, and its hit latency is spent inside the controller. The L1D
  therefore accepts a new request only every 2 cycles, and the L2 only every
  13. MSHRs still overlap misses. The latencies match; the throughput does
  not.
* **Choices the paper does not make.** These were needed for correctness and
  are this design's own:
  * the SHB drop-and-replace rule;
  * NoFillClear forwarded only when it matched;
  * the writeback-room reservation;
  * the ordering stalls;
  * the 4-target MSHR limit;
  * store acknowledgement timing.
* **SHB duplicates.** The SHB does not filter duplicate addresses.
* **Randomness.** Random choices come from LFSRs, which are predictable to
  anyone who knows the seed. A deployment wanting stronger randomness would
  replace `lfsr`.
* **No speculative-interference protection.** Speculative no-fill misses
  still occupy MSHRs and can delay older requests. The paper discusses
  countermeasures but does not build one, and neither does this design.
* **Parts outside the design.** The out-of-order core, the L1 instruction
  cache (a conventional cache) and DRAM are not part of this RTL. The core
  and memory are represented in the testbenches by simple models.
* **SHB window size.** The maximum window is 64 lines, the largest the paper
  evaluates. A larger window needs a larger `MAX_WIN_LOG2` and a wider
  `cfg_win_log2`.
