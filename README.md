# DE+DRP: a last-level cache bank with two-level randomized set mapping

A last-level cache (LLC) is shared by every core, so an attacker on one core can
watch a victim on another through the cache: it fills a cache set with its own
lines, lets the victim run, and times its own lines again (PRIME+PROBE). The
attacker needs a *small conflict group*: a few lines that are guaranteed to
evict the target. In an ordinary cache the set index is a slice of the address,
so such a group is easy to build. Encrypting the address (as CEASER does) hides
the slice, but a fixed or slowly changing encryption can still be learned in
time proportional to the cache size.

This bank puts an **indirection table** (iTable) between the address and the set:

```
line address --encrypt(key)--> iTable entry --holds--> random set number --> set
              (dynamic encryption, DE)       (dynamic random placement, DRP)
```

* **DRP.** Each iTable entry stores a set number drawn from a random number
  generator. Whenever all lines that an entry maps have been evicted, the entry
  is *refreshed*: it gets a new random set. A line that is evicted therefore
  usually comes back in a different set, chosen among *all* sets.
* **DE.** The address is encrypted with a key before indexing the table. Two
  keys are live, a *current* and a *target* key. During an *epoch* (a fixed
  number of misses) every entry moves from the current to the target key; at
  the end the target key becomes current and a new random target key is drawn.
  Entries move when their lines are evicted naturally, not by moving lines, so
  the key can change far faster than in a scheme that has to relocate lines.
* A small **victim buffer** holds lines that would oversubscribe an entry, and
  a **cleaner** forces the stragglers to move before the epoch ends.

The RTL is one bank in its main configuration: 2048 sets of 8 ways of 64-byte
lines, a 2^15-entry iTable, an epoch of 2^16 misses and a 32-entry victim
buffer. Requests are whole lines; the bank talks to main memory through a
simple line read/write port.

## The mapping and why it stays consistent

Every way of every set stores, besides valid, dirty and the tag, the index of
the iTable entry that placed the line. Because a line's set has nothing to do
with its address bits, the tag is the whole 58-bit line address.

Each iTable entry is `{refresh bit, set number}`. The bank keeps one *phase*
bit for the epoch; an entry is **transitioned** when its refresh bit equals the
phase. Flipping the phase at a key swap makes every entry untransitioned at once
with no table sweep.

**Lookup (precedence select).** An address gives two entries: `i` under the
current key and `j` under the target key. If `i` has not transitioned, the line
(if cached) is in set `S_i`; otherwise it is in `S_j`. Only one set is searched.

The design rests on one invariant: *every cached line of entry `e` sits in set
`S_e` and carries index `e`*. Lines are only ever filled into the set of the
entry they were looked up through, and an entry's set number is only changed
(refresh) after all of its lines in that set have been evicted. With that:

* An address whose entry `i` is untransitioned always finds its line in `S_i`.
  When `i` is refreshed, the line was evicted with it, and the next lookup goes
  to `S_j`.
* At the end of an epoch every entry has transitioned, so every cached line was
  placed through its target-key entry `j`. After the swap, `j` is the
  current-key entry and is untransitioned, so the line is still found in `S_j`.
* The victim buffer is searched by full address before the cache, so a
  buffered line is found whatever the keys and mappings do.

The system testbenches check this end to end. In 72 key swaps at reduced size
and 2 at full size, every read returned the last value written.

## Replacement: evicting a whole entry at once

An entry can only move once *all* its lines are gone, so on a miss in a full set
the replacement policy (`dedrp_repl`) does not pick a line, it picks an entry:

1. If a way is invalid, the new line goes there and nothing is evicted.
2. Otherwise it collects the distinct entries held in the set, **excluding the
   missing line's own entry** (refreshing that one would move the set the new
   line is going into), picks one uniformly at random, and evicts all of its
   lines. Dirty lines are written back. That entry's victim-buffer lines are
   written back and dropped as well. The new line is filled into the lowest
   freed way and the evicted entry is refreshed with a random set and marked
   transitioned.
3. If every way holds a line of the missing line's own entry, the entry is
   **oversubscribed**. This is what an attacker aims for: a group of lines that all
   map to one entry always share a set. The new line goes into the victim
   buffer instead. If the buffer is full, the slot at a round-robin pointer is
   written back and reused.

With an iTable as large as the number of lines, most entries map zero or one
line. Most groups are therefore a single line and oversubscription is rare: the
full-size run below never saw it. It happens all the time in the stressed
reduced configuration of the end-to-end test.

## Epochs, the cleaner and the key swap

`dedrp_epoch` counts misses. From half the epoch onward the **cleaner**
(`dedrp_cleaner`, a pointer over the table) takes one step after every access.
It reads the entry at its pointer. If that entry is untransitioned, it evicts
the entry's lines from its set and from the victim buffer and refreshes the
entry. Entries never become untransitioned again within an epoch, so one pass
over the table leaves all of them transitioned. The keys are swapped in the idle
state once the miss count has reached the epoch length *and* the pass is
complete. If the pass has not finished (possible only when the epoch is shorter
than twice the table), the bank runs cleaner steps without taking requests until
it has.

With the default sizes the second half of the epoch holds 32768 misses, so the
32768 cleaner steps always fit.

## Block map

| Module | Role | Paper detail used |
|---|---|---|
| `dedrp_llc` | top: the controller state machine and all wiring | lookup order, grouped eviction, refresh, victim buffer, cleaner per access |
| `dedrp_cipher` | address encryption → iTable index (×2: current, target key) | function only; cipher is this design's |
| `dedrp_itable` | 2^15 × {refresh bit, set}; 2 read ports, 1 write port | contents and size |
| `dedrp_key_select` | precedence rule: `S_i` unless `i` transitioned, else `S_j` | rule given |
| `dedrp_repl` | entry-grouped random replacement, oversubscription detection | grouping and random entry choice |
| `dedrp_victim_buffer` | 32-slot fully associative line buffer | size and role |
| `dedrp_tag_array` | per set: valid, dirty, 58-bit tag, 16-bit iTable index per way | index bits, full tag |
| `dedrp_data_array` | 2048 × 8 lines of 512 bits | line size |
| `dedrp_epoch` | current/target keys, phase, miss count, second half, swap | epoch in misses, swap |
| `dedrp_cleaner` | scan pointer and done flag | cleaner's role and pace |
| `dedrp_rng` | 64-bit xorshift, steps every cycle | "a random number generator" only |
| `dedrp_pkg` | widths and structs shared by all | 64-bit addresses, 64-byte lines |

Main memory is outside the bank. Its port is on the top's boundary, and
`tb/mem_model.sv` models it for simulation.

### Parameters of `dedrp_llc`

| Parameter | Default | Meaning |
|---|---|---|
| `SETS` | 2048 | sets (power of two) |
| `WAYS` | 8 | associativity (power of two) |
| `ITABLE_ENTRIES` | 32768 | iTable entries (power of two, at most 65536) |
| `EPOCH_MISSES` | 65536 | misses per epoch |
| `VB_ENTRIES` | 32 | victim-buffer slots (power of two) |
| `RNG_SEED`, `KEY0`, `KEY1` | constants | RNG seed (nonzero), keys in force after reset |

Storage at the defaults: iTable 32768 × 12 bits = 48 KiB (the paper quotes
64 KB, which would be 16 bits per entry; 12 are all an entry needs); tag array 16384 ×
76 bits (valid, dirty, 58-bit tag, 16-bit index) ≈ 152 KiB; data 1 MiB; victim
buffer 32 × 588 bits.

## Interface and timing

All signals are synchronous to `clk`; `rst_n` is an active-low asynchronous
reset.

* **Requests:** `req_valid` / `req_ready` / `req` (`llc_req_t`: `we`, 58-bit
  line `addr`, 512-bit `wdata`). One request is in flight at a time.
  `resp_valid` pulses for one cycle with `resp` (`rdata`; `hit`; `vb_hit`). A
  write is acknowledged the same way. Writes are write-allocate and do not fetch
  the old line, because they cover the whole line.
* **Memory:** `mem_req_valid` / `mem_req_ready` / `mem_req` (`we`, `addr`,
  `wdata`). A read is answered later by a one-cycle `mem_resp_valid` with
  `mem_resp_data`; a write completes at the handshake. The request is held stable
  until it is taken (asserted).
* **Status:** `init_done`, `events` (one-cycle pulses per mechanism, see
  `llc_events_t`), `epoch_misses`, `vb_occupancy`.

After reset the bank spends max(`ITABLE_ENTRIES`, `SETS`) cycles (32768 at the
defaults) writing a random set into every iTable entry and clearing every tag
row. `req_ready` stays low until `init_done`.

Latency is counted in rising edges after the edge that accepts the request:

| Case | Edges to `resp_valid` |
|---|---|
| victim-buffer hit | 1 |
| write hit | 3 |
| read hit | 4 (encrypt + buffer check, iTable read, tag read, data read) |
| miss | 4 + memory latency + 1 (fill), plus 1 per evicted line and a memory handshake per dirty one |

A cleaner step that finds its entry already transitioned costs 2 idle cycles.

## Where this design departs from, or adds to, the paper

* **Capacity.** The paper's example bank is 2 MB with 2^11 sets and 2^15 lines
  (16 ways), but its DE+DRP cache is 8-way and its storage formula uses
  S = 2^11. Those three numbers cannot all hold. This bank keeps 2048 sets and
  8 ways (1 MB of data, 16384 lines), as the paper's remark that the data array
  shrinks with the associativity suggests, and keeps the iTable at 2^15 entries.
  The iTable is therefore twice the number of lines.
* **Cipher and RNG.** The paper asks for a low-latency block cipher and a
  random number generator and names neither. This bank uses a 4-round Feistel
  network with a 64-bit key (a permutation, not a vetted cipher) and a xorshift64
  generator (not a true RNG). For real use, replace both.
* **No pipeline.** The paper places the iTable in an extra pipeline stage and
  models 10 extra cycles (5 for encryption, 5 for the iTable). This bank is a
  one-request-at-a-time state machine with a combinational cipher.
* **Writes.** Dirty bits, write-back on eviction and whole-line writes are this
  design's own; the paper does not discuss them.
* **Victim buffer draining.** The paper does not say how lines leave the buffer.
  Here they are written back and dropped when their entry is refreshed, or
  reused round-robin when the buffer is full.
* **Refresh-bit polarity.** The paper's pseudocode selects `S_i` when entry
  `i`'s refresh bit is set, and its text selects `S_i` while `i` has not yet
  transitioned. Here the stored bit is compared with the epoch phase, so the
  meaning of a stored 1 alternates between epochs. The lookup behaves as the
  text describes.
* **"Transitioned" as a phase comparison**, the exclusion of the missing line's
  own entry from replacement, filling free ways without eviction, the in-order
  cleaner scan, and holding the key swap until the scan has finished are this
  design's readings of the paper's description.
* **Epoch counted in misses.** The paper speaks of both misses and evictions;
  in a warm cache they are the same thing.

Not included: the multi-core system around the bank (cores, private caches,
prefetcher, bank interleaving), which the paper simulates but does not design.

## Verification

Each module has a self-checking testbench in `tb/` that compares it with a
reference written in the testbench:

* cipher against an independent Feistel model and its inverse;
* RNG against a stepped model;
* memories against shadow arrays;
* precedence select exhaustively;
* replacement against an independent enumeration of candidates;
* victim buffer: directed insert, lookup, update, round-robin reuse and
  invalidate, then 3000 random operations checked against a slot model;
* epoch and cleaner counters across several epochs.

System tests:

* `tb_dedrp_llc`, reduced size: 16 sets × 8 ways, 32-entry iTable, 256-miss
  epoch, 8-slot victim buffer, memory with random stalls. It runs 30000 random
  reads and writes over 600 lines, and checks every read against a reference
  map, hit latencies, and that a repeated read hits. Every mechanism must happen.
  In one run: 17.6K hits, 18.7K misses, 2.9K group evictions, 1.1K
  oversubscriptions, 263 full-buffer write-backs, 633 cleaner evictions and 72
  key swaps, with no data error.
* `tb_dedrp_llc_full`, all defaults: init, then random reads and writes over
  48K lines through two key swaps and 2000 accesses beyond them (about 132K
  misses, 2.2 s in Verilator). All 138K checks passed. The cleaner's share of
  the work is larger than the paper suggests:

  | Epoch | Entries the cleaner refreshed | ... that held lines | Lines it evicted |
  |---|---|---|---|
  | 1 (cold start) | 16225 of 32768 | 8584 | 13714 |
  | 2 (warm) | 10020 of 32768 | 5137 | 8424 |

  Entries with no cached line cost only a table write. In the warm epoch the
  cleaner evicted about one line for every eight misses. The cause is that a
  miss whose current-key entry is untransitioned refills that same entry, so
  untransitioned entries keep gaining lines until one is picked as a victim.
  Uniformly random traffic with little reuse is a hard case, and real programs
  may behave better. The epoch and cleaner parameters are where to tune this.
* `tb_dedrp_scg_attack`, all defaults: after warm-up, 300 trials of "load a
  target, load 1000 unrelated lines, re-probe the target". The target was
  evicted in 4.7% of the trials. The estimate for a fully associative cache with
  random replacement and 16384 lines is 1 − (1 − 1/16384)^1000 ≈ 5.9%. A
  thousand-line group therefore gives the attacker only a small chance, as
  intended.
* `tb_dedrp_oversub_attack`, all defaults: an attacker who knows the reset key
  builds 40 addresses that all encrypt to the target's iTable entry. The
  target and 7 of them fill the target's set. The other 33 are
  oversubscribed: 32 are held in the victim buffer and one buffer slot is
  reused. The target is never evicted by its own entry's lines. By the first
  key swap all 32 buffered lines have been drained. The same 40 addresses,
  replayed under the new key, cause no oversubscription.

Simulate any testbench with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dedrp_pkg.sv \
    tb/tb_dedrp_llc.sv --top-module tb_dedrp_llc
./obj_dir/Vtb_dedrp_llc
```

Each testbench ends with a line `TB_RESULT checks=N failures=M`. All of them
build with exactly these flags, warnings included, and run in seconds. To run
them all:

```
for t in tb/tb_*.sv; do m=$(basename $t .sv)
  verilator --binary --timing --assert -Irtl -Itb rtl/dedrp_pkg.sv $t \
      --top-module $m -Mdir obj_$m >/dev/null && ./obj_$m/V$m | grep TB_RESULT | sed "s/^/$m: /"
done
```

`tb/mem_model.sv` is the memory behind the bank in the system tests. It
answers reads with a fixed latency and refuses requests at random, at a
percentage set by `STALL_PCT`. Lines never written read back as a pattern
computed from their address.
