# PREFENDER: a prefetcher that blurs cache side channels

A cache timing side channel reveals a secret through a single cacheline. A
victim runs a load whose address depends on a secret, for example
`array[secret * 0x200]`. An attacker who has first flushed or evicted every
line of `array` (the *eviction set*) then times an access to each of those
lines. Exactly one line is fast (Flush+Reload, Evict+Reload) or slow
(Prime+Probe), and its index is the secret.

PREFENDER defends by prefetching. It sits beside the L1 data cache and
issues prefetches for *other* lines of the eviction set. When the attacker
measures, several lines look touched and the secret is hidden among them.
No cache policy, instruction set or speculation mechanism changes, and in
benign code the same prefetches often help performance.

The attack has three phases: (1) the attacker flushes or primes the set,
(2) the victim makes its secret-dependent access, and (3) the attacker
times the set. Four difficulties shape the design:

| | difficulty | handled by |
|---|---|---|
| C1 | the victim touches the eviction set only once | scale tracker |
| C2 | the attacker may time the lines in random order, which defeats stride prefetchers | access tracker (DiffMin) |
| C3 | loads from other instructions can evict the attacker's tracking state | record protector (buffer protection) |
| C4 | the attacker may mix non-eviction lines into its probing, which spoils the learned stride | record protector (guided prefetch) |

```
 execute stage ──► Scale Tracker ─┬─ prefetch ±sc ───────────┐
  (every instr)    (calc. buffer) └─ record (sc, line) ──┐   │
                                                         ▼   ▼
 memory stage ──► Access Tracker ◄── hit (sc, line) ── Record     ┌────────────┐
  (every load)    32 access buffers                    Protector  │ controller │──► L1D
                     └─ prefetch ±DiffMin / ±sc_hit ─────────────►│ FIFO + mux │    prefetch
 basic prefetcher (tagged/stride, external) ──────────────────────►└────────────┘    port
```

All RTL is in `rtl/` and all testbenches are in `tb/`. The top is `prefender`.

## Scale tracker: learning the victim's address step

The victim's secret-dependent address is usually computed as
`base + secret * step`. If the hardware knows `step` (the *scale*), then
one victim access at `addr'` is enough to prefetch `addr' + step` and
`addr' - step`, its neighbours in the eviction set. This is the defence
against C1.

### Calculation buffer (`calc_buffer`)

The calculation buffer holds two 16-bit values for each architectural
register `r`:

* `fva_r`, the *fixed value*: `r`'s value when it depends only on
  immediates, else NA;
* `sc_r`, the *scale*: the step by which `r` changes when its unknown
  inputs change.

Every instruction leaving the execute stage rewrites its destination `rd`:

| instruction | result |
|---|---|
| `rd = imm` | fva = imm, sc = 1 |
| `rd = mem[imm + rs]` | fva = NA, sc = 1 (a loaded value is an unknown) |
| `rd = rs0 ± imm` | rs0 known: fva = fva0 ± imm; rs0 NA: sc = sc0 |
| `rd = rs0 ± rs1` | both known: fva = fva0 ± fva1; one NA: sc of the NA one; both NA: sc = min(sc0, sc1) |
| `rd = rs0 × / << / >> x` | as addition, but the scale is sc of the NA operand combined with the fva of the known one (both NA: sc0 op sc1) |
| anything else | fva = NA, sc = 1 |

Taking the minimum for NA + NA is a cautious choice: either scale is
valid, and the smaller one is less likely to leave the page. A scale whose
register has a valid fva is never read, so it is stored as 1. A scale of 1
never triggers a prefetch. All arithmetic wraps at 16 bits. That is enough
because the scale tracker only prefetches inside one page.

For the code in the introduction, `r1 = load secret; r3 = 0x200;
r4 = r1 * r3; r5 = arr + r4; load [r5]`, the rules give `sc(r4) = 0x200`
and `sc(r5) = 0x200`.

### Prefetch condition (`scale_tracker`)

A load's base-register scale is read when the load leaves execute, before
the load overwrites its own `rd`. It waits in a small in-order queue
(`LQ_DEPTH`, 4) until the same load reaches the L1D with its physical
address `addr'`. At that point:

* If `64 < sc < 4096` (one line < sc < one page), the two candidates are
  the lines of `addr' + sc` and `addr' - sc`.
* A candidate is dropped if it leaves the page of `addr'` or is already in
  the L1D. The L1D is asked through two combinational probe ports.
* At most one candidate is prefetched, the + side first.
* Under the same condition, the pair `(sc, line(addr'))` goes to the
  record protector.

## Access tracker: learning the attacker's stride

The attacker's phase-3 loads are often one or two instructions in a loop,
and they visit the eviction set in random order. The access tracker gives
each load instruction (by PC) an *access buffer*. Each buffer remembers
the last 8 distinct lines that instruction touched. The smallest non-zero
distance between any two of them, **DiffMin**, is taken as the set's
stride. However the visits are shuffled, once a few lines of an
arithmetic sequence are present, their minimum pairwise distance is the
common difference or a small multiple of it.

One load is handled in four steps, all in the cycle it accesses the L1D:

1. **Buffer allocation** (`access_tracker`). The buffer whose `InstAddr`
   equals the PC is activated. If there is none, an empty buffer is taken.
   If there is no empty buffer, the least recently used *unprotected*
   buffer is cleared and taken. If all 32 buffers are protected, the load
   is not tracked at all.
2. **Entry update** (`access_buffer`). The line is added to the buffer if
   it is new, replacing the LRU entry when all 8 are full. A line that is
   already present only becomes most recently used.
3. **DiffMin.** If more than 4 entries are then valid (the threshold),
   DiffMin is recomputed over all pairs of the updated entries. The result
   is stored only if a pair lies within 2^20 bytes, which is enough for a
   1 MB cache. DiffMin is 20 bits wide.
4. **Prefetch.** With stride `d`, the candidates are `line ± d`. A
   candidate that is already in the buffer (already probed) or in the L1D
   is skipped. One candidate is prefetched, the + side first. Without a
   record-protector hit, this needs more than 4 valid entries.

Each buffer also holds the record protector's per-buffer state, described
in the next section.

## Record protector: trusting what the victim showed

The scale tracker has seen the victim's own address pattern. That pattern
can be trusted, and the record protector uses it to keep the access
tracker on track.

### Scale buffer (`record_protector`)

The scale buffer has 8 entries, each holding `(sc_i, BlkAddr_i)`. An entry
stands for the pattern `{BlkAddr_i + k * sc_i}`. A new pair `(sc', B')`
from the scale tracker is handled like this:

* Entry `i` *matches* the pair if `(B' - BlkAddr_i) % min(sc', sc_i) == 0`.
  In that case one pattern contains the other.
* A matching entry with `sc_i < sc'` describes a superset pattern, so it
  is overwritten with the narrower `(sc', B')`. If several entries could
  be overwritten, the first one is and the rest are invalidated.
* A matching entry with `sc_i >= sc'` already holds the narrower of the
  two patterns, so nothing is written.
* If nothing matches, the pair goes to a free entry, or else to a
  round-robin victim.

### Hit check, protection and guided prefetch

Every load's line `B'` is checked against all entries. A **hit** is
`(B' - BlkAddr_i) % sc_i == 0`: the load touched a line of a recorded
victim pattern, so it is probably the attacker's phase-3 probe. On a hit:

* **Protection (C3).** The activated access buffer sets its *protected
  flag* and copies `(sc_i, BlkAddr_i)` into its protected-scale registers.
  Buffer LRU replacement skips protected buffers. So loads from many other
  PCs cannot push the attacker's buffer out.
* **Guided prefetch (C4).** The access tracker prefetches `B' ± sc_i`
  instead of `B' ± DiffMin`. This is right even when the attacker's
  deliberate off-pattern accesses have spoiled DiffMin. If the scale-buffer
  entry has since been replaced, a load that still lands on the buffer's
  *protected* scale is guided by that scale.

Protection ends in one of two ways:

* the buffer has made more than `PROT_PF_LIMIT` (16) guided prefetches;
* the buffer has not been activated for `PROT_IDLE_LIMIT` (1024) cycles.

After that, the buffer is an ordinary LRU candidate again.

**The modulus in hardware.** The test `(a - b) % sc == 0` is computed on
the low 15 bits of `|a - b|`, which are the 9 set-index bits of a 64 KB
2-way L1D plus the 6 line-offset bits. The full 64-bit remainder is not
computed. The result is exact whenever `sc` divides 32 KB (any
power-of-two scale up to one cache way). For other scales it is an
approximation: a difference that is a multiple of `sc` only modulo 2^15
can hit. `prefender_pkg::pattern_hit` holds this function, and it is
combinational.

## Prefetch controller (`pf_controller`)

Each load can give one prefetch from the scale tracker and one from the
access tracker. Both enter an 8-entry FIFO, the scale tracker's first. A
pair with the same address is written once. A request that finds the FIFO
full is dropped and flagged on `evt.pf_drop`.

The basic prefetcher (tagged or stride; it is not part of this RTL) offers
requests through a one-entry holding register. The output takes the FIFO
head whenever the FIFO is not empty, so PREFENDER's prefetches always go
before the basic prefetcher's. The output is a valid/ready handshake
carrying the line address and the source (`PF_ST`, `PF_AT`, `PF_RP` for an
access-tracker prefetch guided by the record protector, `PF_BASIC`).

## Top (`prefender`): interface and timing

| port | dir | meaning |
|---|---|---|
| `ex_valid`, `ex_instr` | in | one decoded instruction per cycle from execute, in program order (`op`, `rd`, `rs0`, `rs1`, `b_imm`, `imm`) |
| `ld_valid`, `ld_pc`, `ld_paddr` | in | a load accessing the L1D (memory stage), in the same order |
| `probe_addr[4]`, `probe_hit[4]` | out/in | combinational L1D tag lookups: 0–1 for the scale tracker, 2–3 for the access tracker |
| `basic_valid`, `basic_addr`, `basic_ready` | in/in/out | basic prefetcher request |
| `pf_valid`, `pf`, `pf_ready` | out/out/in | prefetch request to the L1D |
| `evt`, `num_protected` | out | one-cycle event flags and the number of protected buffers, for monitoring |

Everything a load causes is decided combinationally in its `ld_valid`
cycle. That covers allocation, DiffMin, the scale-buffer check and the
prefetch candidates. State changes on the next rising edge, so a load never
hits the pattern it records itself. A prefetch appears on `pf_*` one cycle
after its load at the earliest. Reset is asynchronous and active low.

## Parameters

| parameter | default | origin |
|---|---|---|
| `NUM_BUF` | 32 access buffers | as published (16 and 64 were also evaluated; gains beyond 32 are small) |
| `AB_ENTRIES` | 8 lines per buffer | as published |
| `AT_THRESH` | 4 | as published (DiffMin used above 4 valid entries) |
| `SB_ENTRIES` | 8 scale-buffer entries | as published |
| `NUM_REGS` | 32 | own choice |
| `LQ_DEPTH` | 4 queued load scales | own choice |
| `PROT_PF_LIMIT` | 16 guided prefetches | own choice (the mechanism is published, the value is not) |
| `PROT_IDLE_LIMIT` | 1024 cycles | own choice (likewise) |
| `PFQ_DEPTH` | 8, a power of two | own choice |

Three further top parameters, `ST_EN`, `AT_EN` and `RP_EN` (all 1 by
default), switch off the scale tracker's prefetches, the access tracker's
prefetches, or the record protector's recordings. They build the reduced
configurations that the design is compared against. A disabled part still
runs, but nothing it decides leaves the top, and synthesis removes it.

Fixed widths live in `prefender_pkg`:

* from the published design: 64-bit addresses, 16-bit fixed values and
  scales, 20-bit DiffMin, 64 B lines, 9 set bits;
* own choice: 4 KB page, 5-bit register index.

## Where this RTL departs from, or adds to, the published design

* **Modulus latency.** The published estimate is 2 cycles for the 9-bit
  modulus. Here it is combinational, in the load's cycle. In a real design
  it would be pipelined.
* **Load-scale queue.** The queue between execute and memory is an
  addition. It keeps the base register's scale after the register has been
  overwritten. A load whose queue entry is missing prefetches nothing.
* **+ side first.** Each tracker prefetches at most one line per load, as
  published. Trying the + candidate before the − candidate is this
  design's choice.
* **Full block addresses.** Access-buffer entries store full 64-bit line
  addresses. Only the DiffMin arithmetic is cut to 20 bits. A leaner
  design could store fewer address bits per entry.
* **All buffers protected.** The load is then left untracked. The
  published text does not cover this case.
* **Protected scale.** It is used only while the buffer is protected.
* **Wider patterns.** A new pattern that contains an existing
  larger-scale entry's pattern is not stored. The published rule only states when an
  entry is *updated*.
* **Replacement.** Scale-buffer replacement is round robin, and among
  several hits the lowest entry wins.
* **Record-protector example.** In the published example, the scale buffer
  shows `(0x160, 0x1300)` next to `(0x100, 0x2000)`. Under the recording
  rule those two entries match each other, so the rule could not have
  produced that state. The rule was followed. The testbench uses `0x1340`
  in place of `0x1300` and otherwise reproduces the example: the victim
  pair `(0x400, 0x1000)` replaces `(0x100, 0x2000)`, and an attacker access
  to `0x2400` hits with scale 0x400.
* **Set-index pattern test, side effects.** Because only 15 bits take
  part in the modulus, loads outside the victim's array can hit the
  scale buffer. In the tests, the victim's own load of the secret value
  did so. This is what lets Prime+Probe be caught, but it also adds
  prefetches that are not needed.
* **Outside the design.** The core, the caches and memory, and the basic
  prefetcher are not part of this RTL. Their connections are ports.
  Performance on the SPEC CPU2006/2017 benchmarks therefore cannot be
  reproduced here.

## Tool messages that stand

Verilator `-Wall` reports the following. They are intended and harmless:

* an unused read port `rd_fva` of `calc_buffer` in `scale_tracker`;
* unused low bits in `line_of()` and the unused upper difference bits in
  `pattern_hit()` (the 15-bit modulus);
* an unused package constant (`PAGE_BITS`) when `calc_buffer` is linted
  on its own;
* `SYNCASYNCNET` on `rst_n`, which is used both as the asynchronous reset
  and in the assertions' `disable iff`.

## Verification

Each block has a self-checking testbench. Each one ends with a
`TB_RESULT checks=… failures=…` line and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_calc_buffer` | the example sequence giving scale 0x200, and every row of the rule table |
| `tb_scale_tracker` | the 0x200 example end to end: no prefetch for scale-1 loads, + then − candidate, the L1D skip, the page boundary, a one-page scale, and a load that overwrites its own base register |
| `tb_access_buffer` | the DiffMin example (0x300), the threshold, entry LRU, and release of protection by count and by idle time (limits reduced) |
| `tb_access_tracker` | the allocation example (PC 0x8018 takes the LRU buffer), the DiffMin prefetch, protection against LRU, guided prefetch, and the untracked load (4 buffers) |
| `tb_record_protector` | record, upgrade, covered pattern, hit and miss, round-robin replacement |
| `tb_pf_controller` | priority over the basic prefetcher, ordering, duplicate merge, and drop on a full queue |
| `tb_prefender` | a full Flush+Reload attack at default sizes (see below) |
| `tb_security_configs` | Flush+Reload against the five configurations, with and without noisy loads |
| `tb_prime_probe` | Prime+Probe, where the attacker's array is in another page |

`tb_prefender` runs the whole design with all parameters at their
defaults. It plays the core, the L1D tags and a next-line basic
prefetcher.

* A victim computes `array + secret * 0x200` and loads from it.
* The attacker probes the 16-line set in random order from one PC. Its
  probes are mixed with loads from 40 other PCs and with the attacker's
  own off-pattern accesses.
* The scale tracker's prefetch arrives one cycle after the victim load.
* Every guided prefetch lies on the victim's pattern.
* The attacker sees about ten cached eviction lines instead of one.
* The testbench counts every mechanism (ST, AT, guided and basic
  prefetches, record, hit, protection set, release by count, release by
  idle time, LRU skip, untracked load, queue drop). Any mechanism that
  never occurs counts as a failure.

`tb_security_configs` runs five copies of the top side by side on the
same Flush+Reload stream, each with its own cache model: no defence, ST
only, AT only, ST+AT, and everything. Typical counts of eviction lines
that the attacker finds cached:

| | none | ST | AT | ST+AT | full |
|---|---|---|---|---|---|
| random probe order | 1 | 2 | 5–7 | 6–8 | 8–11 |
| plus 40 noisy load PCs before every probe | 1 | 2 | 1 | 2 | 8–10 |

With 40 other PCs, more than the 32 access buffers, plain LRU recycles the
attacker's buffer before its next probe, so the access tracker alone never
reaches its threshold. With the record protector, the attacker's first
probe hits the victim's recorded pattern and its buffer is kept.

`tb_prime_probe` runs a Prime+Probe attack at default sizes.

* The attacker owns a separate array in another page. Its line `k` shares
  an L1D set with the victim's line `k`. The testbench's cache model lets
  a fill of either line evict the other.
* The victim's load evicts attacker line 12, and the scale tracker's
  prefetch of victim line 13 evicts a second attacker line.
* The attacker's own lines hit the scale buffer, because the pattern test
  looks only at the set-index bits of the distance. Its buffer is
  protected and its prefetches are guided by the victim's scale.
* When the attacker probes in ascending order, every evicted line is
  refilled before it is timed, and the attacker sees no miss at all.
* When it probes in random order and times the secret's line before that
  line's neighbours, nothing can refill it in time. The secret's line may
  then be the only miss. Over seven random rounds this happened in one
  to four, depending on the random seed. The test requires only that it does not happen in every round.
  This is a real limit of the defence: it depends on the attacker timing
  some neighbours first.

Evict+Reload differs from Flush+Reload only in how phase 1 removes the
lines. The prefetcher sees the same loads, so `tb_prefender` covers it.

## Simulating

The package has to be compiled first. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl \
    rtl/prefender_pkg.sv rtl/calc_buffer.sv rtl/scale_tracker.sv \
    rtl/access_buffer.sv rtl/access_tracker.sv rtl/record_protector.sv \
    rtl/pf_controller.sv rtl/prefender.sv tb/tb_prefender.sv \
    --top-module tb_prefender
./obj_dir/Vtb_prefender
```

For a single block, replace the testbench and top-module names and keep
the package and the modules that block uses. Lint one module with
`verilator --lint-only -Wall -Irtl rtl/prefender_pkg.sv rtl/<module>.sv`.
