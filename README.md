# TimeCache: first-access timing for shared caches

Shared libraries and shared data let one process learn another's memory
accesses through cache timing. In flush+reload, the attacker flushes a shared
line, lets the victim run, and then times its own reload. A fast reload means
the victim touched the line. Evict+reload works the same way but evicts the
line instead of flushing it. In both attacks the leak is a hit that the
attacker gets on a line that someone else brought into the cache.

TimeCache removes that leak without partitioning the cache. Every cache line
keeps one **s-bit** per hardware context, meaning "this context has already
paid for this line". A lookup counts as a hit only if the tag matches *and*
the requester's s-bit is set. When the tag matches but the s-bit is clear,
the access is a **first access**:

- the request still goes down the hierarchy, and the cache waits for the
  answer, so the latency is what a miss would have cost;
- the data that comes back is discarded, because the cached copy is the
  newest;
- the requester gets the cached data, and its s-bit is set so that later
  accesses hit.

A process therefore sees fast hits only on lines it has fetched itself, or
has already paid a first access for. Data is still shared, and the cache
keeps its full capacity for every process.

The hard part is time-sharing. A hardware context runs many processes one
after another, so the s-bits have to be saved and restored at every context
switch. Restored s-bits are stale: while the process was away, lines may
have been evicted and then refilled by someone else. To fix this, every line
carries its fill time **Tc**, and every process carries **Ts**, the time it
was preempted. On resume, each line with `Tc > Ts` loses the process's
s-bit. This comparison runs over all lines in parallel and one timestamp bit
per cycle, so it costs 32 cycles whatever the cache size.

This repository holds the SystemVerilog for one cache level with this
mechanism, and a three-cache hierarchy built from it. The hierarchy has
32 KB L1I, 32 KB L1D and a 2 MB shared last-level cache (LLC). The
testbenches show flush+reload and evict+reload hits disappearing when the
feature is on and coming back when it is off.

## The access rules

Each cache level (`timecache_level`) applies these rules to every read or
write from the level above:

| lookup | s-bit of requester | action | result code |
|---|---|---|---|
| tag hit | set | answer from the cache | `RES_HIT` |
| tag hit | clear | send a read below, wait, drop the data, answer from the cache, set the s-bit | `RES_FIRST` |
| tag miss | – | write back a dirty victim, fetch, fill; set `Tc = now`; set the requester's s-bit and clear all others | `RES_MISS` |

Other events that change s-bits:

- Eviction, invalidation and flush clear all s-bits of the line.
- A context-switch resume clears the s-bits of lines filled after the
  process's Ts.
- Software clears all s-bits for a new process by restoring zeros.

With `tc_enable` low the s-bit gate is off, and every tag hit is a hit. The
s-bits and Tc are still maintained, so the feature can be switched on again
at any time without a stale state.

The rules are applied at every level. An L1 first access goes to the LLC,
and the LLC judges it by its own s-bits. So a line that the process paid for
earlier in the LLC costs an LLC hit, and a line nobody paid for costs a trip
to memory. The first access therefore costs exactly what a real miss would
have cost for that process.

The result code travels with every response. Nothing in the design depends
on it; it is there for tests and performance counters.

## Per-line state: the transposed Tc/s-bit array

`ts_sbit_array` holds, for every line, CTX s-bits and a TS_W-bit Tc. It is
stored as rows rather than per-line words:

- one row per context, holding that context's s-bit for every line;
- one row per Tc bit position, holding that bit of every line's Tc.

The array has two interfaces, like a transposable SRAM built from 8-T cells
with two sets of sense amplifiers:

- **Transpose interface (per line).** Used by normal cache operation. It
  reads a line's Tc and s-bits, writes Tc at a fill, and sets or clears
  single s-bits. Each s-bit has its own write enable.
- **Regular interface (per row).** Used at context switches. It does three
  things:
  - reads one Tc bit of *all* lines at once (`rg_tc_row`), which feeds the
    comparator;
  - reads or writes a 512-bit chunk of one context's s-bit row, for save and
    restore;
  - clears a context's s-bit row under a mask of lines.

A 512-bit chunk is one 64-byte memory transfer. Saving or restoring a
context's s-bits therefore takes `ceil(lines / 512)` transfers:

| cache | transfers |
|---|---|
| 32 KB | 1 |
| 64 KB | 2 |
| 256 KB | 8 |
| 2 MB | 64 |
| 8 MB | 256 |

Reads on both interfaces are combinational. Writes happen at the clock edge.
If a regular-interface write and a transpose write hit the same bit in the
same cycle, the transpose write wins. The controller never does both at
once.

In this RTL the array is plain flip-flops. The 8-T cells and sense
amplifiers are a circuit matter and are not modelled.

## Context switches

The hardware provides three commands on the `csw` port. Trusted software
(the OS) issues them. The switch of hardware context `c` from process P to
process Q goes like this:

1. **Preempt P.** Read `now` and store it as P's Ts. For each level, and for
   each chunk `k` of that level, issue `CSW_SAVE(ctx=c, chunk=k)` and store
   the returned `csw_rdata` in P's save area.
2. **Restore Q.** For each level and chunk, issue `CSW_RESTORE(ctx=c,
   chunk=k, wdata=saved chunk)`. For a process that has never run, restore
   zeros and use Ts = 0.
3. **Resume Q.** Issue `CSW_RESUME(ctx=c, ts=Ts_Q)` to each level. The level
   runs the comparator and then answers. Q can start once every level has
   answered.

Each level's commands complete independently:

- `CSW_SAVE` and `CSW_RESTORE` answer 1 cycle after they are accepted.
- `CSW_RESUME` answers TS_W + 4 cycles after it is accepted: 36 cycles with
  32-bit timestamps. This holds for any cache size.

A command is accepted only while the level is idle. Once a command is
waiting, the level stops accepting new requests, so a command never waits
behind more than the request already in flight.

Why Tc > Ts is the right test: P's saved s-bits were exact at time Ts. After
that, a line can lose its meaning for P only by being refilled, and a refill
sets Tc to a time later than Ts. Lines with `Tc <= Ts` are the same lines P
last saw, so P's s-bits for them are still correct.

A line evicted while P was away and not refilled is invalid. Its stale s-bit
does nothing, because a later fill rewrites all s-bits of the line.

## The bit-serial comparator

The comparison of Ts against every line's Tc is the core of the design. Its
parts:

- `ts_shift_register` holds Ts and presents one bit at a time, MSB first
  (it shifts left).
- `bitline_peripheral` has one comparison slice per line, under that line's
  column of the array.
- `timestamp_comparator` sequences the compare.

Each slice has two set/reset latches and two 3-input AND gates. Input `b` is
the line's Tc bit, read through the regular interface. Input `a` is the Ts
bit, shared by all slices.

```
gt_set = b & ~a & ~lt      // Tc has a 1 where Ts has a 0: Tc > Ts
lt_set = ~b & a & ~gt      // Tc has a 0 where Ts has a 1: Tc < Ts
```

Going from the MSB down, the first bit position where Tc and Ts differ
decides the result. The slice latches that result, and the other latch's
~Q input keeps it from changing afterwards. Equal bits change nothing, so
after the last bit `gt = (Tc > Ts)` and `lt = (Tc < Ts)`. For example, with
Tc = 1100 and Ts = 0101, the MSB sets gt; at bit 0, lt_set would fire, but
`~gt` blocks it.

`gt` drives the bit-line driver that clears the s-bit. The latches are
written as set-only flip-flops with a synchronous clear, and the sequencer
clears them before every compare.

`timestamp_comparator` runs these phases:

| cycle after `start` | phase | what happens |
|---|---|---|
| 1 | LOAD | Ts into the shift register; slice latches cleared; rollover check |
| 2 … TS_W+1 | CMP | row for Tc bit `TS_W-1-i` read, Ts bit `TS_W-1-i` presented, all slices evaluate |
| TS_W+2 | CLR | the context's s-bit row cleared where `gt` is set; `done` pulses |

The compare takes TS_W cycles, one per timestamp bit, whether the cache has
512 lines or 32768. The price is one slice (two latches, two gates) per line
and a regular-interface row read per cycle.

The third input of the right-hand gate is not spelled out in the circuit
this follows. Here it is the left latch's ~Q, which makes the slice
symmetric. The result is the same either way, because the left latch is
never cleared during a compare.

## Timestamps and rollover

A single free-running counter (`timestamp_counter`, TS_W = 32 bits) is the
time base for every level. It provides `now` for Tc and for software's Ts,
and it pulses `ts_wrapped` when it rolls over.

A wrap can make a newer line look older: its Tc is small after the wrap. The
rule used here: if a resumed process's Ts is greater than `now`, the counter
has wrapped since the process was preempted. The comparator then clears
*all* of that context's s-bits instead of comparing. This costs extra first
accesses but never a hit the process did not pay for.

A process that is running when the counter wraps keeps correct s-bits: each
access updates them as it goes. At its next resume, some old lines with
large Tc may look newer than Ts, and are cleared unnecessarily. Again, this
is harmless.

**Limitation.** The `Ts > now` test catches a wrap only if the process was
away for less than one full counter period. At 2 GHz a 32-bit counter wraps
every 2.1 s. A process preempted for longer than that can miss the wrap, and
a line refilled at a matching time can keep its s-bit. Software that can
leave a process off the CPU this long must clear its s-bits itself: restore
zeros, or pass Ts = 0. Software can count `ts_wrapped` pulses to decide
this. The hardware does not track this case.

## The hierarchy (`timecache`)

```
 i_* ──> L1I (32 KB, 2-way) ──┐
                              ├─ l1_arbiter ──> LLC (2 MB, 8-way) ──> m_*
 d_* ──> L1D (32 KB, 2-way) ──┘
          csw_* ──(csw_level)──> L1I | L1D | LLC
          timestamp_counter ──> now (to all three levels and out)
```

All three caches are `timecache_level` instances with 64-byte lines, two
hardware contexts and 32-bit timestamps. The two L1s share the LLC through
`l1_arbiter`. The arbiter grants one request at a time, holds the grant
until the response returns, and alternates when both sides are waiting.

The memory below the LLC is outside the design; its port is `m_*`. The core
is outside too; it uses `i_*` and `d_*`.

**Request ports** (`i_*`, `d_*`, `m_*`, and the internal level-to-level
ports) all use the same format:

- `*_req_valid` / `*_req_ready` handshake, carrying a `mem_req_t`:
  `op`, line-aligned `addr`, hardware context `ctx`, `wdata`, `wstrb`.
- `*_resp_valid`: a one-cycle pulse, always accepted, carrying a
  `mem_resp_t`: `rdata` and `result`.

The operations:

| op | meaning |
|---|---|
| `OP_READ` | read a 64-byte line |
| `OP_WRITE` | write the strobed bytes; write-allocate; subject to the same s-bit rules as a read |
| `OP_WB` | full-line writeback of a dirty line from the level above. It updates a present line without touching its s-bits, or is passed on below if the line is absent. |
| `OP_FLUSH` | clflush: invalidate the line (clearing its s-bits), write it back if dirty, pass the flush on below |

**Context-switch port:**

- `csw_valid`, `csw_ready`, `csw_req`. The request is a `csw_req_t`: op,
  ctx, chunk, 512-bit wdata, and ts.
- `csw_level` selects the level: 0 = L1I, 1 = L1D, 2 = LLC.
- `csw_resp_valid` / `csw_rdata` carry the reply.

**Other signals:**

- `tc_enable` switches the first-access rule in all levels.
- `now` and `ts_wrapped` expose the time base.

**Latencies** at the default sizes, counted from request acceptance to the
response pulse:

| access | cycles |
|---|---|
| L1 hit | 2 |
| L1 miss or first access that hits (s-bit set) in the LLC | 7 |
| L1 miss or first access that goes to memory | 28 with the testbench's 20-cycle memory model (7 + memory round trip) |
| each dirty victim writeback | adds one downstream writeback round trip |
| save / restore command | 1 |
| resume command | 36 |

In general, a level answers a hit 2 cycles after acceptance. It answers a
miss or first access 3 cycles plus the downstream latency after acceptance.
The arbiter adds 1 cycle.

Each cache is blocking: one request at a time. The L1s are not inclusive in
the LLC, and an LLC eviction does not invalidate L1 copies. A line can
therefore be evicted from the LLC and refilled there while an L1 still holds
it. Its L1 s-bits stay valid, because they describe the L1 copy.

## Modules

| file | role |
|---|---|
| `rtl/tc_pkg.sv` | line size (64 B), address width (48), request/response/command types |
| `rtl/timestamp_counter.sv` | global time base |
| `rtl/ts_shift_register.sv` | Ts register, MSB-first serial output |
| `rtl/bitline_peripheral.sv` | per-line comparison slices (two latches, two AND gates) |
| `rtl/ts_sbit_array.sv` | transposed Tc / s-bit storage, per-line and per-row interfaces |
| `rtl/timestamp_comparator.sv` | resume-time compare sequencer, rollover rule |
| `rtl/cache_store.sv` | tags, valid/dirty, data, victim choice |
| `rtl/timecache_level.sv` | one cache level: lookup, fill, first access, writeback, flush, context-switch commands |
| `rtl/l1_arbiter.sv` | L1I/L1D to LLC arbitration |
| `rtl/timecache.sv` | the hierarchy (top) |

Parameters of the top and their defaults:

| parameter | default |
|---|---|
| `L1I_BYTES` | 32768 |
| `L1D_BYTES` | 32768 |
| `LLC_BYTES` | 2097152 |
| `L1_WAYS` | 2 |
| `LLC_WAYS` | 8 |
| `CTX` | 2 |
| `TS_W` | 32 |

Cache sizes must be powers of two and at least one line per way.

`timecache_level` can also be used alone as a single protected cache. Its
own defaults are a 32 KB, 2-way cache with 2 contexts and 32-bit
timestamps. For the 4 MB and 8 MB LLCs, set `LLC_BYTES` to 4194304 or
8388608. Their s-bits then take 128 or 256 chunks.

## Choices made here, and departures

The access rules, the s-bit update rules, Tc/Ts, the save/restore/resume
sequence, the bit-serial comparison with its two-latch slice, the rollover
rule, the 64-byte chunk size and the cache sizes come from the original
description of TimeCache. The following are this design's own:

- **Associativity and replacement.** 2-way L1s and an 8-way LLC. The victim
  is the first invalid way; otherwise a per-set pointer that follows fill
  order (round-robin).
- **Write policy.** Write-back and write-allocate, with dirty writebacks
  sent down as `OP_WB`.
- **Writebacks leave s-bits unchanged.** A writeback from above is not an
  access by a process, so it leaves s-bits alone.
- **Flushes.** A flush is forwarded to the bottom, so that flush+reload
  really reaches memory.
- **Blocking caches and handshakes.** The caches are blocking. Every port
  uses a valid/ready handshake with one-cycle response pulses.
- **Arbiter.** One request in flight, round-robin.
- **Non-inclusive hierarchy.** L1 and LLC are not inclusive.
- **Command port.** One context-switch command port for all levels,
  selected by `csw_level`. Commands wait only for the request in flight.
- **Storage.** Flip-flops in place of 8-T transposable SRAM. There is no
  model of access time or of wordline/bitline circuits.
- **Rollover.** The counter wraps naturally, and `Ts > now` is the only
  wrap test. The multi-wrap limitation is described above.

Not included:

- the core;
- DRAM (the testbenches use a fixed-latency memory model);
- the operating system's save/restore code (the testbenches play it);
- two ideas mentioned only as options: limited-pointer s-bit storage for
  many-context LLCs, and a constant-time clflush. A flush of a dirty line
  takes one writeback longer than a flush of a clean or absent line.
- multi-core coherence.

## Verification

Every testbench checks itself and ends with a line
`TB_RESULT checks=<n> failures=<m>`. A watchdog stops it if it hangs.

| testbench | what it checks |
|---|---|
| `tb/tb_timestamp_counter.sv` | counting, wrap pulse (8-bit counter) |
| `tb/tb_ts_shift_register.sv` | load, MSB-first shifting |
| `tb/tb_bitline_peripheral.sv` | `gt = Tc > Ts`, `lt = Tc < Ts` for random and edge values, 64 slices |
| `tb/tb_ts_sbit_array.sv` | both interfaces against a reference model, chunk save/restore, masked clear |
| `tb/tb_timestamp_comparator.sv` | every line's clear against `Tc > Ts`; rollover clears all; done at TS_W+2 cycles |
| `tb/tb_cache_store.sv` | tags, data, victim choice against a model |
| `tb/tb_timecache_level.sv` | directed: hit, miss, first access (with dropped data and exact latency), dirty eviction, flush, save/restore/resume, disabled mode |
| `tb/tb_level_random.sv` | one level under random traffic from two contexts and three processes, with context switches and counter wraps (12-bit time); a reference model checks that no hit goes to a process that has not paid for the line, that data is right, and the hit and first-access latencies |
| `tb/tb_l1_arbiter.sv` | routing, one request in flight, alternation under contention |
| `tb/tb_timecache.sv` | the whole hierarchy at reduced sizes under random instruction and data traffic, with context switches, wraps, writebacks, flushes and on/off switching |
| `tb/tb_timecache_full.sv` | the hierarchy at its default sizes: flush+reload and evict+reload on a 256-line shared array |

`tb_timecache` uses reduced sizes: 1 KB L1s, a 4 KB LLC, 12-bit time. A
reference model tracks, for each level, process and line, whether the process
has paid for the line since it was last filled there. The test checks that
no level ever gives a hit that was not paid for, watching both L1 outputs and
the LLC input. It also checks that read data matches a memory image, and that
L1 hits take 2 cycles while first accesses do not. It also counts each mechanism (hits, misses, first
accesses at each level, writebacks, flushes, arbiter contention, compare
clears, rollovers, disabled hits) and fails if any of them never happened.

`tb_timecache_full` runs the top with no parameter changes, against a
memory with a 20-cycle latency. The victim reads 256 shared lines. The
attacker then times its own reads of the same lines:

- after flushing them;
- after evicting them from its L1;
- with the feature switched off.

With TimeCache on, all 256 reads are first accesses, at the latency of
memory or of the attacker's own LLC copy. With it off, all 256 are 2-cycle
hits.

The random tests keep each process's absence shorter than one counter
period, because of the limitation described under rollover.

### Running a test

Any of the testbenches runs with plain Verilator (5.x, with `--timing`),
for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/tc_pkg.sv tb/tb_timecache.sv --top-module tb_timecache
./obj_dir/Vtb_timecache
```

Replace `tb_timecache` with any other testbench name. The random tests take
a seed through `+verilator+seed+<n>` together with `+verilator+rand+reset+2`.
`tb/tb_mem_model.sv` is the behavioural memory used under the hierarchy. Its
latency is a parameter. Lines that were never written read back as a fixed
function of the address.
