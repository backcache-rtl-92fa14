# BackCache: an L1 data-cache level that hides its own evictions

Contention attacks on the L1 data cache (Prime+Probe, Evict+Time) work because
a set-associative cache evicts deterministically. The attacker fills a set
with its own lines and lets the victim run. Then it re-reads those lines: a
slow re-read means the victim used that set. BackCache removes the signal
rather than the sharing. Every line the L1D evicts is kept in a small *fully
associative backup cache* that sits beside the L1D, at the same level and with
the same latency. Each request looks in both structures at once. A hit in
either one is an L1 hit, so the attacker's re-probe keeps hitting until the
victim has overflowed the whole backup cache.

Two further mechanisms make the backup cache itself hard to measure:

* **RURP (random used replacement policy).** Each backup line has a *used*
  bit, set when the line is hit again after it entered the backup cache. When
  a line must be replaced, lines with used = 1 go first. An attacker's
  re-probe sets used bits, so the lines it has not yet re-probed are the ones
  that survive. The kernel clears every used bit at each context switch with
  a new privileged instruction, **BUCLR**.
* **Dynamic resizing.** Each backup line also has an *enabled* bit. The number
  of enabled lines is redrawn at random between a minimum and a maximum
  register. A redraw happens each time a memory-access count register, loaded
  with the size it last drew, runs down to zero. The attacker therefore does
  not know how many lines it has to fill.

This repository holds synthesizable SystemVerilog for that cache level. It
covers the L1D arrays, the backup cache, RURP, the resizing registers and
engine, the request controller with its four hit/miss cases, BUCLR and
coherence invalidation. Testbenches cover each block, the whole level, and
two attack scenarios.

## Configuration

| | default | parameter |
|---|---|---|
| physical address | 48 bits | `bc_pkg::ADDR_W` |
| line | 64 bytes; backup tag = 42-bit line address | `bc_pkg::LINE_BYTES` |
| L1D | 16 KB, 4 ways, 64 sets, LRU, write-back | `L1_SETS`, `L1_WAYS` |
| backup cache | 16 KB, 256 lines, fully associative, RURP | `BK_LINES` |
| enabled backup lines | random in [192, 256] (12–16 KB) | `BK_MIN`, `BK_MAX` (reset values of the registers) |
| hit latency | 3 cycles, L1D and backup alike | `HIT_LATENCY` |
| core word | 64 bits with byte enables | `bc_pkg::WORD_W` |

The 64-byte line is derived rather than stated: it follows from a 42-bit tag on
a 48-bit address and from a 12 KB minimum of 192 lines. The smaller minimums
studied for this design (8 KB = 128 lines, 4 KB = 64 lines) need no rebuild.
Software writes the minimum register.

## Blocks

```
 core ──req──► ┌────────────────── backcache ──────────────────┐
      ◄─resp── │  controller FSM ── data mux / hit mux          │
               │      │                  │                      │
               │   bc_l1d            bc_backup_cache            │
               │ (tags, data, LRU)   (CAM tags+used+enabled,    │
               │                      data, BUCLR, resize       │
               │                      engine, bc_rurp)          │
               │                          ▲ target size         │
               │   bc_lfsr ──rnd──► bc_resize_regs (count,      │
               │                     min, max registers)        │
               └──── mem_* (L2) ──── inv_* ── buclr_* ── csr_* ─┘
```

| file | role |
|---|---|
| `rtl/bc_pkg.sv` | widths, tag-entry struct `{tag 42, coherence 2, used 1, enabled 1}`, case and event types |
| `rtl/backcache.sv` | top: request controller, parallel lookup, data/hit mux, line movement, ports |
| `rtl/bc_l1d.sv` | L1D tag/data/LRU arrays |
| `rtl/bc_backup_cache.sv` | backup cache: fully associative lookup, fills, used/enabled bits, BUCLR, resizing engine |
| `rtl/bc_rurp.sv` | RURP victim choice (combinational) |
| `rtl/bc_rand_pick.sv` | "pick one set bit at random" helper used by RURP and resizing |
| `rtl/bc_resize_regs.sv` | the three resizing registers and the random size draw |
| `rtl/bc_lfsr.sv` | 32-bit LFSR random source (a stand-in, see below) |

## The life of a request

The controller in `backcache.sv` handles one request at a time. The timing of
the response is the part that matters for security.

```
cycle  0   IDLE     request accepted (counts one memory access)
cycle  1   LOOKUP   L1D set and all backup tags compared at once
cycle  2   HWAIT    (only while HIT_LATENCY > 2)
cycle  3            resp_valid, for every hit, whichever structure hit
after               line movements (below), invisible to the core's timing
```

The pair {L1D hit, backup hit} selects one of four cases:

| case | meaning | data from | state changes |
|---|---|---|---|
| 10 | L1D only | L1D | store writes the L1D word; LRU touched |
| 11 | both | L1D | store writes both copies; backup used ← 1 |
| 01 | backup only | backup | backup used ← 1 (store writes the word); then the line is copied into the L1D and **also stays** in the backup cache |
| 00 | neither | lower level | line read from L2 and placed in the L1D only |

In cases 01 and 00 the response goes out first. The line movements follow:

1. **L1FILL.** The line enters the L1D, in an invalid way if there is one and
   otherwise in the LRU way. If that way held a valid line, the line is read
   out.
2. **WB.** If the victim is dirty, it is written to the lower level. This
   happens in every case, including when the backup cache is about to keep
   the line.
3. **BKFILL.** The victim goes into the backup cache. If the backup cache
   already holds that line address (a line that came back through case 01),
   the copy is overwritten in place, so no tag is ever held twice. Otherwise
   RURP chooses the line it replaces.

The core can issue its next request only after the movements finish.
Because of the write-back in step 2, no line in the backup cache is ever newer
than memory unless the L1D holds the same data dirty. Backup lines are
therefore clean, and replacing or disabling them is silent: nothing goes to L2.
The lower level only ever sees ordinary L1D misses and write-backs, so the
backup cache adds no L2-visible events.

A store gets the same response timing as a load; its `resp_rdata` is the word
before the store. Case 00 is the only slow case. It answers when the L2 line
arrives, one cycle after `mem_resp_valid`.

## RURP

`bc_rurp` takes the valid, used and enabled vectors and a random number and
returns the victim line:

1. consider enabled lines only;
2. take an invalid enabled line if there is one;
3. else the candidates are valid lines with used = 1;
4. else valid lines with used = 0;
5. choose one candidate at random.

The random choice (`bc_rand_pick`) rotates the candidate mask by a random
amount and takes the first set bit. Every candidate is reachable. The choice
is not exactly uniform, though: a candidate that follows a long run of
non-candidates is picked more often. If this matters, replace the helper; the
interface stays the same. A hit, by a load or a store, sets used = 1. A fill
starts with used = 0. BUCLR clears all used bits in one cycle.

## Dynamic resizing

`bc_resize_regs` holds three registers, counted in lines. Software reaches them
through `csr_*`: address 0 is the access count, 1 the minimum, 2 the maximum.

* In the first cycle after reset it draws a size
  `lo + ((r × (hi − lo + 1)) >> 16)` from a 16-bit random `r`. `hi` is the
  maximum clamped to `BK_LINES`, and `lo` is the minimum clamped to `hi`. The
  drawn size becomes `target_size` and is also loaded into the access count.
* Every accepted request decrements the count, hit or miss alike. The request
  that brings the count to zero triggers a new draw. The count is reloaded
  with the new size, so the interval between resizes is random too (192–256
  accesses by default).

The backup cache moves towards `target_size` one line per idle controller
cycle. To grow, it enables a random disabled line, which starts out empty. To
shrink, it disables the line RURP would replace and drops that line's data: an
invalid line first, then a used line, then an unused one. A disabled line is
never looked up or filled. After reset every line is disabled, and the first
drawn size is enabled line by line, which takes about 200–260 cycles. Because a
resize moves at most `BK_MAX − BK_MIN` lines and a resize comes at most once
every `BK_MIN` accesses, the engine keeps up with the default limits.

### What resizing buys

Take an attacker who watches one L1D set, fills the backup cache with its own
lines, and somehow knows the enabled size `B` at the moment it primes. When it
probes, the size `B*` has been redrawn uniformly from `[Bmin, Bmax]`:

* if `B* > B`, the attacker's lines all fit, so it sees all hits whether or not the victim ran;
* if `B* < B`, some attacker lines were disabled, so it sees misses whether or not the victim ran;
* only when `B* = B` do the hits and misses reflect the victim.

Averaged over `B`, the attacker is right with probability
`1/2 + 1/(2·(Bmax − Bmin + 1))`: about 0.508 for 192–256 lines, 0.504 for
128–256 and 0.503 for 64–256. The argument assumes the random source cannot be
predicted. It also stops working once the victim touches more than `B` distinct
lines in one time slice: the backup cache then overflows and misses reach the
attacker as they would in a plain cache.

## BUCLR and invalidation

`buclr_valid` with `buclr_priv` = 1 clears all used bits. Without privilege the
cache refuses the instruction and raises `buclr_fault` for the core to trap.
`inv_valid` with a line address removes that line from both structures. A
dirty L1D copy is dropped: the lower level is taken to own the data when it
invalidates. Both are taken only while the controller is idle, and they come
before core requests.

## Ports of `backcache`

| group | signals | protocol |
|---|---|---|
| core | `req_valid/ready, req_we, req_addr[47:0], req_wdata[63:0], req_be[7:0]`; `resp_valid, resp_rdata, resp_hit` | valid/ready request; one response pulse per request. `resp_hit` is the L1-level hit flag |
| lower level | `mem_req_valid/ready, mem_req_we, mem_req_addr[41:0], mem_req_wdata[511:0]`; `mem_resp_valid, mem_resp_rdata` | one outstanding request; a read returns one full-line beat; a write is complete when accepted |
| coherence | `inv_valid/ready, inv_addr[41:0]` | invalidate a line address |
| BUCLR | `buclr_valid, buclr_priv, buclr_ready, buclr_fault` | one-cycle operation |
| registers | `csr_we, csr_addr[1:0], csr_wdata[8:0], csr_rdata` | write on the clock edge, combinational read |
| random | `seed_we, seed[31:0]` | reseed the generator |
| status | `bk_enabled, bk_target, events` | `events` (`bc_events_t`) pulses once per lookup case, eviction, write-back, backup fill/merge/replacement/drop, resize, grow, shrink, invalidation and BUCLR; a performance-counter hook |

Assertions in `backcache` check the lower-level handshake: a request must hold
its address until it is accepted.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_bc_lfsr` | LFSR against a bit-serial model of the polynomial; reseeding; no short cycle |
| `tb_bc_rurp` | 20,000 random vectors against a reference walk of the priority classes |
| `tb_bc_resize_regs` | initial draw, per-access decrement, redraw exactly at zero, the draw formula, range coverage, register access, clamping |
| `tb_bc_backup_cache` | 16-line instance: growth, fills, lookups, RURP order, byte-enabled stores, merge, BUCLR, invalidation, shrink order (invalid, then used, keeping unused), re-growth |
| `tb_bc_l1d` | 4-set instance: invalid-way first, LRU against a reference order, dirty on store, invalidation |
| `tb_backcache` | **default parameters**, 20-cycle behavioural L2. The four cases on one line; a single-set Prime+Probe round that must see 4 of 4 hits; BUCLR (privileged and not); invalidation; 6,000 random loads/stores on 48 KB checked word by word against a reference memory; exactly 3-cycle hits; and a 0-line backup cache where evictions are dropped. It counts every mechanism and fails if one never happened |
| `tb_prime_probe` | single-set attack, 100 secret bits (50 zeros, 50 ones), backup eviction sets of 0/4/8/12/16 KB, BUCLR at each switch |
| `tb_aes_probe` | 64-set table-lookup attack: 24 of 64 table lines touched by the victim, 20 samples for each size range 12–16, 8–16 and 4–16 KB (minimum register rewritten at run time) |

The attack testbenches report, with the default seed:

```
BackCache 12-16KB, 0 KB eviction: mean probe time 0:12.0 1:12.0 cycles, decoder accuracy 50%
BackCache 12-16KB, 4 KB eviction: mean probe time 0:1012.4 1:1022.4 cycles, decoder accuracy 61%
BackCache 12-16KB, 8 KB eviction: mean probe time 0:1321.2 1:1305.2 cycles, decoder accuracy 55%
BackCache 12-16KB, 12 KB eviction: mean probe time 0:1646.0 1:1519.2 cycles, decoder accuracy 63%
BackCache 12-16KB, 16 KB eviction: mean probe time 0:3963.2 1:4000.4 cycles, decoder accuracy 56%
No backup lines, 0 KB eviction: mean probe time 0:12.0 1:92.0 cycles, decoder accuracy 100%

BackCache 12-16KB: attacker advantage 0%, exact samples 0 of 20
BackCache 8-16KB: attacker advantage 0%, exact samples 0 of 20
BackCache 4-16KB: attacker advantage 2%, exact samples 0 of 20
No backup lines: attacker advantage 100%, exact samples 20 of 20
```

"Decoder accuracy" is how often the best single threshold on probe time
recovers the secret bit; 50% is guessing. With no backup lines a victim
access always costs the attacker a miss, so the bit leaks completely. With
BackCache and no extra eviction set, the re-probe always hits. With larger
eviction sets the probe time grows, but the victim's one extra line drowns in
the random resizing and RURP choices. In the table attack, "advantage" is the share of touched sets the attacker
marks minus the share of untouched sets it marks by mistake. Each of the block testbenches also fails against a deliberately broken
copy of its block; for example, the top testbench fails when a backup hit no
longer counts as a hit.

### Running with Verilator

From the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bc_pkg.sv tb/tb_backcache.sv \
          --top-module tb_backcache -Mdir obj_tb_backcache
./obj_tb_backcache/Vtb_backcache
```

Swap in any other testbench name in the same way. Verilator finds the other
modules through `-I`. `tb_backcache` builds in about 10 s and runs in about 1 s.
The two-state simulator starts uninitialised flops at random values. Every
state bit that is read is reset; the data arrays are not, because valid bits
guard every read. To lint: `verilator --lint-only -Wall -Irtl rtl/bc_pkg.sv rtl/backcache.sv`.

## Where this RTL departs from, or adds to, the original description

The mechanisms follow the description: parallel lookup, equal latency, the four
cases, fills after the response, write-back on every dirty L1D eviction,
RURP's order, resizing driven by the access count, the tag-entry layout, and
BUCLR. The following are this implementation's own decisions:

* **Random source.** The security argument assumes an unpredictable
  generator. `bc_lfsr` is a plain LFSR: predictable and fine for simulation,
  but not for a product. Reseeding only makes it harder to predict.
* **One request at a time.** The original work was evaluated in a
  cycle-level simulator with an out-of-order core. Here the controller
  blocks, and line movements delay the next request, not the current one.
  A pipelined or non-blocking version would need MSHRs and is not attempted.
* **A line can sit in both structures.** Case 01 leaves the line in the
  backup cache (case 11 requires that). Later fills of the same line address
  overwrite the copy instead of duplicating it.
* **Resize pace.** One line per idle cycle, with fills taking priority. The
  description does not say how quickly enabled bits change.
* **Invalidation of a dirty L1D line** drops the data. No coherence protocol
  is modelled beyond the 2-bit state field (invalid, clean, dirty).
* **Register encoding, widths and the privilege signal for BUCLR** are
  assumed. The size registers count lines, not kilobytes.
* **Not built:** the processor core, the L1 instruction cache, the shared L2,
  DRAM, and the compiler and kernel changes. The lower level is a
  behavioural model in `tb/bc_mem_model.sv`. Also not built: the
  sensitivity-study variant that reloads the access count with a fixed
  threshold (10 to 1000) instead of the drawn size.
* **Hit latency.** 3 cycles matches the configured latency of the evaluated
  system. The RTL lookup needs only 2 (`HIT_LATENCY` ≥ 2). The extra cycle
  stands for the slower fully associative compare of a real backup array,
  whose 256-entry tag compare here is flip-flops and comparators.
