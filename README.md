# ClepsydraCache in SystemVerilog: a cache whose entries expire on a timer

Conflict-based cache attacks (Prime+Probe, and Prime+Prune+Probe against
randomized caches) work because an attacker can watch one access evict
another. ClepsydraCache, proposed by Thoma et al., weakens that link in two ways:

1. **Randomized, skewed placement.** Every way has its own keyed pseudorandom
   mapping from a line address to a row. The rows a line can occupy form its
   *dynamic set*, one entry per way. Without the key, an attacker cannot tell
   which addresses share entries.
2. **Time-based eviction (cache decay).** Every entry carries a time-to-live
   (TTL). The TTL is set to a random value whenever the line is filled or hit,
   and it counts down at a global rate R_TTL. When it reaches zero the line
   leaves the cache. Evictions therefore mostly come from the clock, not from
   other accesses. A miss goes into an empty entry of its dynamic set whenever
   there is one, so it disturbs nobody. R_TTL adapts to conflicts: each
   conflict makes entries age faster for a while, which frees entries and
   keeps conflicts rare.

This repository holds synthesizable RTL for the digital form of this design,
configured as the 1 MiB, 8-way last-level (L2) cache of a 2 GHz system. Each
entry's TTL is a small counter. The original proposal also sketches an analog
per-entry delay cell (a leaking capacitor). That cell is not RTL and is not
included here; see "Departures" below.

## Block diagram

```
            req (read line / write line)                     resp
 L1 side  ───────────────┐                                    ▲
                         ▼                                    │
                  ┌──────────────┐   addr   ┌─────────────────┴─────────────────┐
                  │ request regs │─────────►│ addr_randomizer × WAYS            │
                  └──────────────┘          │ (way secret ⊕ addr → PRINCE-3 →   │
                                            │  row idx_w, encrypted tag_w)      │
                                            └──────────┬────────────────────────┘
                                                       ▼ idx_w per way
 ┌──────────────┐ tick ┌───────────┐ TTL   ┌──────────────────────────────────┐
 │rttl_scheduler│─────►│ ttl_store │──────►│ tag / data / dirty arrays (WAYS) │
 │  (R_TTL)     │      │ WAYS×SETS │       │ hit? empty? victim?  controller  │
 └──────▲───────┘      └───────────┘       └───────┬──────────────────────────┘
        │ conflict                                 │ victim / expired entry
        └──────────────────────────────────────────┤
                        ┌──────────┐               ▼
                        │ lfsr_rng │      addr_derandomizer (inverse mapping)
                        └──────────┘               │
                  random TTL, random way           ▼
                                         memory side: read line / write back line
```

## Dynamic sets: the address mapping

For way *w* the mapping is

```
c   = PRINCE3( {addr[63:6], 6'b0} ⊕ way_secret[w],  k0, k1 )
idx = c[63-(4j + j mod 4)]  for j = 0 .. IDX_W-1      (one bit from each nibble)
tag = the other 64-IDX_W bits of c, in order
```

* **PRINCE3** is PRINCE cut down to three rounds: input whitening
  (`k0 ⊕ k1 ⊕ RC0`), three forward rounds (S-box layer, linear layer M =
  ShiftRows∘M', then `⊕ RC_i ⊕ k1`), and PRINCE's output whitening with
  `k0' = (k0 ⋙ 1) ⊕ (k0 ≫ 63)`. Two rounds of PRINCE already make every
  output bit depend on every input bit. The layers in `clepsydra_pkg` are the
  standard PRINCE ones. The address-mapping testbench builds full 12-round
  PRINCE from them and checks it against the published test vectors.
* The **way secret** is XORed into the input, so each way gets an
  independent mapping while all ways share one cipher key. The key (`k0`,
  `k1`) and the way secrets are input ports. They are meant to be drawn at
  power-up and then held. Changing them would orphan every cached line.
* The **index bits come from across the whole ciphertext**, one per S-box
  nibble. This keeps truncated-differential shortcuts (guessing part of the
  key to make two addresses collide) expensive.
* The **stored tag** is the ciphertext minus the index bits: 53 bits for
  2048 rows. That is six bits more than a plain tag, because the zeroed offset
  bits do not stay zero after encryption. The row supplies the rest.
* **Invertibility.** A dirty line has to be written back to its real
  address, but the cache stores only the encrypted tag. `addr_derandomizer`
  puts the row bits back in place, runs the inverse rounds and removes the
  way secret.

The mapping is combinational: three cipher rounds between the request
register and the array address. A faster implementation would pipeline it or
replace it with a format-preserving cipher of exactly the address width.

## Time-to-live and the adaptive rate R_TTL

This part governs both security and performance.

**Per-entry counters (`ttl_store`).** Each entry has an 8-bit counter, and
"TTL ≠ 0" is its valid bit. On a fill or a hit the entry gets a fresh TTL,
drawn from [`TTL_LOW`, `TTL_HIGH`] = [128, 255]. Every *tick* lowers every
non-zero counter by one, all in the same cycle. If a write and a tick hit the
same entry in one cycle, the write wins.

**The tick scheduler (`rttl_scheduler`).** Ticks are issued every *P*
cycles, so R_TTL = 1/P. The rule is:

| event                          | effect                                   |
|--------------------------------|------------------------------------------|
| conflict (miss, no empty entry) | tick in the next cycle; P ← max(P/4, INTERVAL_MIN) |
| tick without a conflict         | P ← min(P + INTERVAL_STEP, INTERVAL_MAX) |

P starts at `INTERVAL_MIN`, the fastest rate. Over time R_TTL follows a
"shark fin": a sharp rise at every conflict, then a slow decay towards the
floor. Under a conflict storm (an attacker priming the cache, or a
streaming workload) P drops to `INTERVAL_MIN` within a few conflicts. Lines
then die within 128–255 × 256 cycles (16–33 µs), which frees entries and
stops the conflicts.

**Why 392,157.** The system runs at 2 GHz, and the largest lifetime should be
50 ms, about the longest a line lives between uses in a conventional L2.
With 255 ticks at the slowest rate, 255 × 392,157 cycles = 1.0 × 10⁸
cycles = 50 ms.

An attacker cannot tell whether a miss came from an expired TTL or from a
conflict. That ambiguity is what makes eviction-set construction
impractical. The TTL draw and the way choice use a 32-bit LFSR (`lfsr_rng`).
The LFSR is predictable to anyone who learns its state, so a hardened
implementation should feed these choices from a true random source.

## Life of a request

The cache takes one request at a time from the L1 side. A request is either a
line read or a full-line write (an L1 writeback). All WAYS candidate entries
are looked up in parallel, as in an ordinary set-associative cache. The only
addition on the access path is the address mapping.

| case | what happens | cycles (handshake → `resp_valid`) |
|------|--------------|------------------------------------|
| **hit** (TTL ≠ 0 and tag matches) | read: return line. write: store line, set dirty. Fresh TTL either way. | 3 |
| **miss, empty entry in dynamic set** | pick an empty way at random. If that entry expired dirty and has not yet been written back, write it back first. Read: fetch from memory and fill (clean). Write: fill directly (dirty). | write: 3, plus the writeback if the victim is dirty. read: 3 + any writeback + the memory round trip |
| **miss, dynamic set full (conflict)** | random way replaced. Its dirty data is written back. `conflict` tells the scheduler to raise R_TTL. | same |
| **miss on a line that expired dirty** | that very entry is reused: written back, then refetched, so memory never serves stale data | same |

**Expiry writeback.** An expired entry is invalid at once. If it is dirty,
its data still has to reach memory. A scanner steps through the rows, one row
per idle cycle, all ways at once. When it finds an expired dirty entry it
reads the entry, rebuilds the address and issues the writeback. Requests
always take priority over the scanner. Any expired entry the scanner has not
reached yet is written back when a miss reuses it. Because writebacks happen
on a timer, most misses find a clean empty entry. This is why the design can
have a *lower* average miss latency than a conventional cache.

## Interfaces of `clepsydra_cache`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (cache empty afterwards) |
| `k0`, `k1` | in | 64 each | PRINCE key |
| `way_secret` | in | WAYS × 64 | per-way input secrets |
| `req_valid` / `req_ready` | in / out | 1 | request handshake; `req_ready` is high while idle |
| `req_write`, `req_addr`, `req_wdata` | in | 1, 64, LINE_W | line write (1) or read (0), byte address, write line |
| `resp_valid`, `resp_hit`, `resp_rdata` | out | 1, 1, LINE_W | one pulse per request; must be taken in that cycle |
| `mem_req_valid` / `mem_req_ready` | out / in | 1 | memory request handshake; request held stable until taken (asserted) |
| `mem_req_op`, `mem_req_addr`, `mem_req_wdata` | out | 2, 64, LINE_W | `MEM_READ` or `MEM_WRITEBACK`, line address (offset 0), data |
| `mem_resp_valid`, `mem_resp_rdata` | in | 1, LINE_W | read data, one pulse |
| `events` | out | 7 | `cache_events_t` pulses: hit, miss, fill_free, conflict, victim_wb, expiry_wb, tick |
| `rttl_interval` | out | CNT_W | current tick period P |

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `WAYS` | 8 | proposal's evaluated L2 |
| `SETS` | 2048 | 1 MiB / 64 B / 8 ways |
| `LINE_W` | 512 | 64-byte lines |
| `TTL_W`, `TTL_LOW`, `TTL_HIGH` | 8, 128, 255 | design choice; `TTL_HIGH` gives the 50 ms bound |
| `INTERVAL_MAX` | 392157 | 50 ms / 255 at 2 GHz |
| `INTERVAL_MIN`, `INTERVAL_STEP`, `CNT_W` | 256, 1024, 20 | design choice |
| `SEED` | 32'hACE1_2468 | design choice |

The index layout supports up to 16 index bits. That covers the 8 MiB,
16-way configuration (8192 rows per way) used in the proposal's security
analysis: set `WAYS=16, SETS=8192`.

## Departures from the proposal, and how far to trust this RTL

* **Digital TTL instead of the analog delay cell.** The proposal's hardware
  sketch keeps each entry's TTL in an analog cell. A ~100 fF capacitor is
  charged to a voltage VC0 that encodes the TTL. It leaks through sub-threshold
  transistors whose current is set by a global voltage VDIS, which controls
  R_TTL. A transistor feedback pair (a pseudo-thyristor) then snaps the cell to
  "invalid". The proposal reports 1–50 ms over VC0 = 0.89–1.2 V in 65 nm, in
  4.9 µm² per entry. The proposal also names per-entry digital counters as an
  alternative, and its own simulator model uses them. This RTL uses counters.
  The random TTL stands in for VC0 and the tick period for VDIS. A counter
  array costs considerably more area than the analog cell.
* **R_TTL update rule.** The proposal's concept section gives *example*
  rules (rate − 1 per step, rate × 2 on a conflict). Its implementation
  section uses a different rule: immediate tick and quartered period on a
  conflict, plus a constant added to the period otherwise. This RTL uses the
  second rule. The values of R_MIN, R_MAX and the step size are not given;
  the defaults above are assumptions to be tuned.
* **Round arrangement of the cipher and index bit positions** are choices
  within the stated constraints (three PRINCE rounds, index spread over the
  whole output).
* **Random selection.** An empty way is picked by rotate-priority from a
  random start. This is not exactly uniform when several ways are empty.
  The TTL is drawn by modulo, which is uniform for the default power-of-two
  range.
* **Finding expired dirty lines** (the scanner), the reuse of an expired
  dirty entry by a miss on the same line, and all interfaces and latencies
  are this design's own. The proposal leaves them open.
* The proposal suggests duplicating shared lines per security domain against
  Flush+Reload, as an option. That is not implemented.

The RTL is functionally verified in simulation only. It has not been timed or
synthesized to a netlist. The full-size counter array (16,384 counters that
all decrement together) makes generic synthesis slow.

## Verification

Each module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

* `tb_addr_randomizer`: PRINCE known-answer tests. The module is compared with a
  testbench-side bit split. Offset bits must be ignored and way secrets must
  give independent mappings. The index must spread evenly (4096 addresses over
  16 rows).
* `tb_addr_derandomizer`: round trip over 500 random keys and addresses. A wrong
  row or wrong secret must not map back.
* `tb_ttl_store`: random writes and ticks against a reference array. Every port
  is checked every cycle, including write-beats-tick and saturation at zero.
* `tb_rttl_scheduler`: cycle-exact reference model through decay, sparse
  conflicts and a conflict storm. Also checks the tick spacing.
* `tb_lfsr_rng`: bit-serial polynomial model, no zero state, no repeat in
  20,000 steps.
* `tb_clepsydra_cache`: end to end at 4 ways × 16 rows with a random-latency
  memory. Every read is checked against a golden copy. After the run the cache
  is left idle until every line has expired and been written back, and memory
  must then match the golden copy. The test counts hits, misses, fills into
  empty entries, conflicts, victim and expiry writebacks, ticks, R_TTL rises
  and falls, and misses caused by expiry. Each must occur at least once. Hit
  latency is checked to be 3 cycles.
* `tb_clepsydra_cache_full`: the default 1 MiB configuration through a miss,
  hits, a write and a second miss.
* `tb_prime_probe_catching`: the profiling step of Prime+Prune+Probe on a
  64-entry cache, with decay slowed so that only conflicts evict. Each trial
  primes and prunes K lines until a pass runs without conflicts, then accesses
  a victim line and probes. A victim access that finds an empty entry in its
  dynamic set must leave every primed line in place. The measured catching
  probability follows the closed form C(K,w)/C(N,w) for N entries and w ways:

  | K (of 64 entries) | 12 | 32 | 44 | 52 |
  |---|---|---|---|---|
  | measured (60 trials) | 0.000 | 0.050 | 0.233 | 0.500 |
  | C(K,4)/C(64,4) | 0.001 | 0.057 | 0.214 | 0.426 |

  For the 131,072-entry, 16-way reference cache the same formula needs about
  75 % of the cache primed before even 1 % of victim accesses become
  observable. This is the first of the three obstacles the design puts in an
  attacker's way. The other two are time-based noise during profiling and the
  size of the eviction set.

To run one with Verilator (5.x):

```
verilator --binary --timing --assert -Irtl rtl/clepsydra_pkg.sv rtl/*.sv \
          tb/tb_clepsydra_cache.sv --top-module tb_clepsydra_cache
./obj_dir/Vtb_clepsydra_cache
```

Replace the testbench file and top name for the others. The reduced
end-to-end test runs in seconds. The full-size one spends about ten seconds
compiling.

## Files

`rtl/clepsydra_pkg.sv` holds the shared types and PRINCE functions.
`rtl/addr_randomizer.sv` and `rtl/addr_derandomizer.sv` are the mapping and
its inverse. `rtl/ttl_store.sv`, `rtl/rttl_scheduler.sv` and
`rtl/lfsr_rng.sv` are the TTL machinery. `rtl/clepsydra_cache.sv` is the
top. `tb/` holds one testbench per module, plus the full-size test.
