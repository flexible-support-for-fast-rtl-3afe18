# CCache: on-demand privatization of commutatively updated data

Many parallel programs spend their time updating shared data with operations
that commute: counters that are incremented, histograms, sums of vectors,
bitmaps that only gain bits, saturating counters. Under an ordinary coherence
protocol every such update moves the cache line between cores, although the
order of the updates does not matter to the result. CCache lets each core work
on its own private copy of such a line and fold its changes back into the
shared copy later, with a merge function that the program supplies.

The hardware in this repository is the memory-side part of that scheme for an
8-core chip. Each core has:

* an L1 data cache whose lines carry three extra fields: a **CCache bit**
  (the line is a private copy of commutative data, "CData"), a **mergeable
  bit** and a two-bit **merge type**;
* a **source buffer** that keeps, for every privatized line, the value the line
  had when it was privatized (the *source copy*);
* a **merge function register file** (MFRF) of four entries holding the
  addresses of software merge functions;
* three line-sized **merge registers** through which a merge function sees the
  shared value, the source copy and the updated copy.

All cores share a last-level cache (LLC) that has one **lock bit** per line.

## The operations a core issues

| Operation | Effect |
|---|---|
| `load`, `store` | ordinary word access through the L1 (write-back, write-allocate) |
| `c_read(a, i)`, `c_write(a, v, i)` | word access to CData with merge type `i`; privatizes the line on a miss |
| `merge_init(fn, i)` | writes the function address `fn` into MFRF entry `i` |
| `soft_merge` | marks every privatized line as mergeable, without merging now |
| `merge` | merges every privatized line back into the LLC and drops it |

A `c_read` or `c_write` that misses in the L1 reads the line from the LLC
without any coherence action, installs it in the L1 with the CCache bit set and
the merge type `i`, and writes the same value into a free source buffer entry.
Further `c_read`/`c_write` to the line hit in the L1 and change only the L1
copy. Nothing else in the system sees those changes until a merge. Because
each core keeps its own copies, all cores can update the same line at once.

## The merge sequence

The merge is the heart of the design and the most involved part of
`ccache_l1`. For one privatized line it runs these steps:

1. **Clean lines are skipped.** If the L1 copy was never written (only
   `c_read`), there is nothing to fold in: the source entry and the L1 line are
   dropped at once. Only dirty lines go on.
2. **Lock.** The unit sends `LOCK_READ` for the line to the LLC. If another core
   holds the lock, the LLC answers `nack` and the unit asks again until it gets
   the lock. With the lock comes the current shared value.
3. **Load the merge registers.** Register 1 receives the shared value from the
   LLC, register 2 the source copy from the source buffer, register 3 the
   updated copy from the L1. All three are loaded in the same cycle.
4. **Call the merge function.** The line's merge type selects an MFRF entry;
   the unit raises `mf_call` with that address on `mf_ptr` and the line address
   on `mf_line`. The core runs the function, reading words with
   `rd_mreg(reg, word)` and writing them with `wr_mreg(reg, word, value)`, and
   pulses `mf_done` when it returns. A function for counters computes, word by
   word, `r1 = r1 + (r3 - r2)`: the shared value plus this core's own
   contribution since privatization.
5. **Write back and unlock.** Register 1 goes to the LLC with `WRITE_UNLOCK`,
   which stores the line and clears its lock bit in one request.
6. **Release.** The source buffer entry is invalidated and the L1 line is
   dropped (its CCache bit with it).

The lock makes steps 2–5 atomic with respect to every other core, so merges of
the same line from different cores are serialized and no update is lost.
Merges of different lines proceed independently.

A `merge` instruction walks the valid source buffer entries and runs the
sequence for each. When the buffer is empty it answers the core.

### Merging on eviction

A privatized line holds updates that exist nowhere else, so the L1 may not
simply evict it. The replacement logic treats lines as follows:

* an invalid way is used first;
* an ordinary line may be evicted (written back first if dirty);
* a CCache line may be evicted only if its mergeable bit is set, and evicting
  it runs the merge sequence above first (*merge-on-evict*);
* a CCache line without the mergeable bit is never chosen.

`soft_merge` sets the mergeable bit of every privatized line, so those lines
can be merged lazily, when space is needed, instead of at once. A later
`c_read`/`c_write` to a mergeable line clears its mergeable bit again: the line
is in use and must stay. When a `c_read`/`c_write` miss finds the source buffer
full, the unit merges a mergeable line to free an entry in the same way.

If a set has no way that may be evicted, or the source buffer has no entry that
can be freed, the request waits; the unit pulses its `cdata_stall` event each
cycle it waits. Since nothing else will free a line, this is a deadlock. The
programming rule that prevents it is to touch at most `ways - 1` CData lines of
one set, and at most as many CData lines as the source buffer has entries,
between a `merge` or `soft_merge` and the next.

## Blocks

| Module | Role |
|---|---|
| `ccache_pkg` | widths, line/word types, operation and LLC request encodings, event struct |
| `source_buffer` | fully associative store of source copies: lookup, allocate, invalidate, flash clear |
| `merge_fn_regfile` | four merge function addresses, written by `merge_init`, read by merge type |
| `merge_registers` | three 512-bit registers with word-wise read and write |
| `llc_lock_store` | shared LLC storage with per-line lock bits and round-robin arbitration |
| `ccache_l1` | per-core L1 with CCache, mergeable and merge-type bits, and the merge controller |
| `ccache_top` | `N_CORES` instances of `ccache_l1` sharing one `llc_lock_store` |

Default sizes: 8 cores; L1 8-way, 32 KB, 64-byte lines (64 sets), 4-cycle hit;
8-entry source buffer; 4-entry MFRF with 2-bit merge type; LLC 4 MB
(65,536 lines) with a 70-cycle hit.

## Interfaces and timing

**Core side of `ccache_l1` (and of `ccache_top`, one per core).** A request is
`req_valid` with a `core_req_t` holding `op`, line address `line` (16 bits, a
64-byte line inside the 4 MB space), word index `word` (0–7, 64-bit words),
`wdata` and the merge type or MFRF index `idx`. It is taken when `req_ready` is
high; the unit handles one operation at a time. Completion is a one-cycle
`resp_valid`, with `resp_rdata` carrying the word for `load` and `c_read`.
A hit, ordinary or CData, completes exactly `HIT_CYCLES` (4) cycles after the
request is taken. Misses, merges and `soft_merge` complete no earlier than that;
a miss adds at least one LLC round trip.

**Merge function call.** `mf_call` stays high from the cycle the merge
registers are loaded until the core pulses `mf_done`. While it is high the
core reads merge registers combinationally with `mreg_rd_reg`/`mreg_rd_word` →
`mreg_rd_data` and writes them with `mreg_wr_en`, `mreg_wr_reg`, `mreg_wr_word`,
`mreg_wr_data` (one word per cycle). Register numbering: `MREG_MEM` is register
1 (shared value, and the result), `MREG_SRC` register 2, `MREG_UPD` register 3.

**LLC ports.** Each unit has one port: a `llc_req_t` (`valid`, `op`, `line`,
`wdata`) held steady until the matching `llc_resp_t` (`valid`, `nack`,
`rdata`) arrives. The LLC serves one request at a time in round-robin order and
answers `HIT_CYCLES + 1` cycles (71 at the default) after taking a request.
Operations are `READ`, `WRITE`, `LOCK_READ` and `WRITE_UNLOCK`. While a line is
locked, every request to it except the holder's `WRITE_UNLOCK` gets `nack`.

**Events.** Each unit pulses, for one cycle, `cop_hit`, `cop_miss`,
`mergeable_reset`, `soft_merge`, `merge_dirty`, `merge_clean`, `evict_merge`,
`lock_retry`, `writeback` and `cdata_stall`. These are for performance
counting and testing; nothing in the design depends on them.

## Where this design departs from the scheme it implements

* **One cache level and no coherence for ordinary data.** The full system
  places a private 8-way 512 KB L2 between L1 and LLC and keeps ordinary data
  coherent with a MESI directory. Neither is built. Ordinary loads and stores
  use the L1 as a write-back cache directly in front of the LLC, so ordinary
  data written by one core is not seen by another until it is written back.
  CData does not need coherence and behaves as intended.
* **The LLC is plain storage.** It holds the whole 4 MB line address space
  directly, without tags, ways, misses or main memory behind it. Data larger
  than 4 MB cannot be held.
* **Merged lines are dropped.** After a merge the line leaves the L1 instead of
  staying as a clean shared copy; that copy would need the coherence protocol
  that is not built. The next access fetches it again.
* **Lock and read are one LLC request, as are write and unlock.** The order of
  the steps is unchanged.
* **Waiting on a locked line is modelled** (the unit retries until the lock is
  free) rather than ignored.
* **`soft_merge` is one cycle.** It sets the mergeable bit of every L1 line with
  its CCache bit, which is exactly the set of lines with a valid source entry.
* **Choices where nothing was specified:** 64-bit words for `c_read`,
  `c_write`, `rd_mreg` and `wr_mreg`; 64-bit merge function addresses;
  lowest-free-entry allocation in the source buffer; round-robin victim choice
  among evictable ways; round-robin arbitration at the LLC; the request
  encodings; the source buffer lookup is combinational (its copy is read only
  during merges, off the access path).
* **Context switches are not handled in hardware.** Saving or merging
  privatized lines around a context switch or interrupt is left to software
  (a `merge` before switching is always safe).
* **The processor core is not part of the RTL.** Its operation and merge
  function ports are brought out of `ccache_top`. The testbenches use a
  behavioural core model instead.

## Simulating

Each testbench is a module in `tb/`. Verilator 5 builds them directly; the
package has to come first:

```
verilator --binary --timing --assert -y rtl -y tb rtl/ccache_pkg.sv tb/tb_ccache_top.sv \
          --top-module tb_ccache_top -Mdir obj_top -o sim
./obj_top/sim
```

Replace `tb_ccache_top` by any other testbench name. Every testbench ends by
printing `TB_RESULT checks=<n> failures=<m>` and has a watchdog that counts a
failure if the simulation hangs.

| Testbench | What it checks |
|---|---|
| `tb_source_buffer` | allocation order, lookup hits and misses, full flag, invalidate, flash clear, data read back |
| `tb_merge_fn_regfile` | reset values, then random writes with every entry read back after each |
| `tb_merge_registers` | the three loads land in registers 1, 2, 3; word reads; a full add merge written word by word; registers 2 and 3 untouched by it |
| `tb_llc_lock_store` | data, the `HIT_CYCLES + 1` latency, refusal of every access to a locked line until `WRITE_UNLOCK`, two ports served in turn |
| `tb_ccache_l1` | `merge_init`; miss then hit with the 4-cycle hit latency; add merge against a concurrently changed LLC value; clean-line drop; saturating and OR merges; ordinary store, load and write-back; `soft_merge` and merge-on-evict; clearing of the mergeable bit; a full source buffer freed by merging; retry on a line locked by someone else; the stall when no way may be evicted |
| `tb_ccache_top` | the whole 8-core system at its default size, see below |

`tb_core_model` is not a test by itself: it is the behavioural core used by
`tb_ccache_top`. It issues operations and, when asked, runs one of three merge
functions through the merge register ports: add (`r1 += r3 - r2`), saturating
add (the same, capped at a ceiling) and OR (`r1 |= r3`).

`tb_ccache_top` instantiates `ccache_top` with no parameter overrides, i.e.
8 cores, 32 KB L1s and a 4 MB LLC with 70-cycle hits. It runs two programs:

1. Two cores increment small key-value counters: core 0 keys 0, 1, 1 and core 1
   keys 2, 1, 2, both on privatized copies of the same line, then merge. The
   shared line must end as 1, 3, 2.
2. All eight cores run a random mix: counter increments on random words (add
   merge), saturating increments (saturating merge), bit sets in a bitmap (OR
   merge), `c_read`s of lines that are never written, and ordinary stores to
   private lines, with `soft_merge` every few updates and `merge` now and then.
   All these lines map to one L1 set, so evictions, merge-on-evict and full
   source buffers happen. Afterwards the LLC must equal the initial values plus
   every core's updates (sum, capped sum, union), read-only lines must be
   unchanged, private lines must read back, no lock bit may remain and every
   source buffer must be empty. Each mechanism (CData hit and miss, mergeable
   bit cleared, `soft_merge`, dirty merge, clean drop, merge-on-evict, locked-line
   retry, ordinary write-back) is counted and must have happened at least once,
   and no stall may occur.

The program keeps the `ways - 1` rule: with one set shared by all CData lines,
at most 7 lines of a core are privatized and not mergeable at any time.

## Changing the design

All sizes are parameters with the defaults above: `N_CORES`, `L1_WAYS`,
`L1_BYTES`, `L1_HIT_CYCLES`, `SB_ENTRIES` and `LLC_HIT_CYCLES` on `ccache_top`;
line size, LLC capacity and the number of merge types in `ccache_pkg`. The L1
needs at least one set (`L1_BYTES >= 64 * L1_WAYS`). `llc_lock_store` itself
has a `LINES` parameter for a smaller LLC (its own testbench uses 256 lines);
`ccache_top` leaves it at the full 4 MB. The merge functions themselves are software: any function
that reads registers 2 and 3, combines them with register 1 and leaves the
result in register 1 can be registered with `merge_init`.
