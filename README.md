# BlockHammer in SystemVerilog

RowHammer is a DRAM failure mode. If one row is activated (opened) many times
within a refresh window, bits can flip in the rows physically next to it. The
number of activations needed is the RowHammer threshold, N_RH. BlockHammer is a
memory-controller-side defence that needs no knowledge of how the DRAM chip
maps rows internally. It rests on one observation: a row cannot reach N_RH
activations within a refresh window if, once it has been activated often
enough to look suspicious, each further activation is held back by a minimum
delay t_Delay. That delay is chosen so that, even if the row is activated at
the maximum rate permitted afterwards, it still cannot reach the threshold.
Rows that are activated rarely are never delayed.

The RTL here implements that guard for one DRAM rank. It has two halves:

* **RowBlocker** answers the scheduler's question "may I activate row R of
  bank B now?" It says *no* (RH-unsafe) only when R is **blacklisted**, meaning
  activated at least N_BL times in the recent past, **and** R was **activated
  less than t_Delay ago**.
* **AttackThrottler** counts, per <thread, bank> pair, how many of a thread's
  activations hit blacklisted rows. From that count it derives the RowHammer
  likelihood index (RHLI) and the thread's in-flight request quota. A thread
  that keeps hammering is starved of memory bandwidth, so it cannot clog the
  request queues with requests that RowBlocker keeps delaying.

The memory request scheduler (FR-FCFS), the DRAM, the PHY and the cores are
outside this design. Their signals appear as ports of the top module.

## Default configuration

| Quantity | Value | Where it comes from |
|---|---|---|
| N_RH (threshold), N_RH* (half, for double-sided hammering) | 32K, 16K | design point |
| Blacklisting threshold N_BL | 8192 | design point |
| CBF lifetime t_CBF = refresh window t_REFW | 64 ms | design point |
| Counters per CBF, hash functions | 1024, 4 (H3 class) | design point |
| Banks per rank, rows per bank, threads | 16, 64K (16-bit), 8 | evaluated system |
| t_RC, t_FAW | 46.25 ns, 35 ns | DDR4 |
| t_Delay (equation below) | 7.766 µs = 9320 cycles | derived, 1.2 GHz clock assumed |
| History buffer entries | 887 | design point |
| Epoch (half a CBF lifetime) | 38,400,000 cycles | derived |
| AttackThrottler counter saturation N_RH_CBF | 32768 | N_RH · t_CBF / t_REFW |

All values live in `rtl/bh_pkg.sv`. Every module takes them as parameter
defaults. The delay follows from making the worst case safe. A row may receive
N_BL activations at the full rate t_RC. After that it receives at most one
activation per t_Delay, and the total over one t_CBF must stay below N_RH*:

    t_Delay = (t_CBF - N_BL * t_RC) / (N_RH* * t_CBF / t_REFW - N_BL)
            = (64 ms - 8192 * 46.25 ns) / (16384 - 8192) = 7.766 µs

## RowBlocker-BL: the dual counting Bloom filter

A counting Bloom filter (CBF) stores an approximate activation count for
every row of a bank in a small table. Inserting a row increments the four
counters picked by four hashes of the row address. Testing a row returns the
smallest of its four counters. This can over-estimate a count, because other
rows share counters, but it can never under-estimate one. So a row that really
reached N_BL is always blacklisted, and the only error is an occasional
innocent row that gets delayed.

A single CBF only counts up, so it would eventually blacklist everything. Each
bank therefore keeps **two** CBFs, A and B (`rowblocker_bl`), staggered in
time:

* Every activation is inserted into **both** filters.
* Only the **active** filter answers tests.
* At the end of each epoch (half a CBF lifetime), the active filter is zeroed,
  it receives new hash seeds, and the two filters swap roles.

Each filter therefore lives for two epochs, and a newly active filter has
already counted the whole previous epoch. No row whose activation count
exceeded N_BL in the last epoch can slip through. `tb/rowblocker_bl_tb.sv`
replays this timing (blacklisted, still blacklisted after the swap, released
one epoch later) against a reference model of two exact counters.

Re-seeding at every clear means an attacker cannot learn a fixed set of rows
that collide in the filter. The seeds come from a free-running 64-bit LFSR,
started from a different value in every bank. The hash itself (`h3_hash`)
takes a bit window of the row address, with hash *h* shifted by 2*h*, and XORs
it with that hash's seed.

Counters are 14 bits wide, the smallest width that can hold N_BL = 8192. They
saturate at all ones. A row is blacklisted when its active count is ≥ N_BL.

## RowBlocker-HB: the activation history buffer

To tell whether a row was activated within the last t_Delay, the rank keeps a
circular FIFO (`rowblocker_hb`) of recent activations. Each entry holds:

* a rank-unique ID {bank, row};
* a timestamp;
* a valid bit.

Every issued activation is appended at the tail. On every cycle, the head
entry is checked and retired once it is older than t_Delay. A search compares
the queried ID against every valid entry in parallel, as a CAM does. There are
two search ports: one for the scheduler's candidate and one for the
activation being issued.

The timestamp counts 8-cycle ticks in 11 bits. An entry retires when
`now - ts > 1165` ticks. It therefore leaves the buffer between 9320 and about
9336 cycles after it was inserted. The full-size test measures a
re-activation gap of 9327 cycles. Because the timestamp is coarse, an entry
can retire up to two ticks late. That errs on the safe side: the row is delayed
a little longer, never less.

Size: t_FAW allows at most 4 activations per 35 ns in a rank, so one t_Delay
window holds at most 4 · 7.766 µs / 35 ns = 887.6 activations. The buffer has
887 entries. It raises `hb_full`, and RowBlocker treats a full buffer as
RH-unsafe for every row. So even a 888th activation inside one window is
deferred rather than forgotten. If an entry is ever overwritten before it
expires (only possible when a caller ignores RH-unsafe), the sticky
`hb_overflow` flag records it.

## RowBlocker: putting the two together

`rowblocker` contains one `rowblocker_bl` per bank and one history buffer per
rank. It also holds the epoch counter that issues the clear.

* `q_unsafe = !observe_only && ((q_blacklisted && q_recent) || hb_full)` is
  combinational in `q_bank`/`q_row`.
* An activation reported on `act_*` is inserted into the bank's two CBFs and
  into the history buffer at the next clock edge.
* `act_blacklisted` tells AttackThrottler whether that activation hit a
  blacklisted row.
* `epoch_clear` pulses every 38.4 M cycles. It is held off for as long as an
  activation is being issued, so a clear and an insert never happen on the
  same edge. All banks clear on the same cycle.

## AttackThrottler

For every <thread, bank> pair there are two 16-bit counters, interleaved in
the same way as the CBFs:

* An activation of a blacklisted row by a thread increments both of that
  pair's counters, saturating at N_RH_CBF.
* At each epoch clear, the active counter is zeroed and the two counters swap
  roles.
* The active counter is the pair's score.

RHLI = count / (N_RH_CBF − N_BL) = count / 24576. An RHLI of 0 means the thread never touched a
blacklisted row. An RHLI of 1 means it activated blacklisted rows as often as
a RowHammer attack would have to. Benign threads stay far below 1.

The pair's quota limits its requests in flight:

| count | quota |
|---|---|
| 0 | 64 (QMAX, the size of the controller's request queue) |
| ≥ N_RH_CBF − N_BL (RHLI ≥ 1) | 0: no new requests until the next epoch clear |
| otherwise | min(64, QSCALE · (N_RH_CBF − N_BL − count) / count) |

The middle row is the specified behaviour. The exact inverse-proportional
curve in the last row is this design's own choice.

The request interface works as follows:

* `req_valid/req_thread/req_bank` asks for admission.
* `req_ready` grants it when the pair's in-flight count is below its quota.
* `req_quota` shows the current quota.
* A request that is admitted while `req_valid && req_ready` is counted in
  flight until a matching `done_*` pulse.
* `rhli_thread/rhli_bank` select a pair whose raw count and RHLI (8.8 fixed
  point, `rhli_q8`) are exported, for example for system software.

In **observe-only** mode (`observe_only = 1`), everything is counted and RHLI
is reported, but nothing is ever blocked or throttled. This mode is used to
detect attacks without interfering with them.

## Top module `blockhammer`

The top module has plain ports only. It wires the rank's RowBlocker to
AttackThrottler, so that every bank's epoch clear also clears that bank's
throttler counters. The scheduler-side protocol, per cycle, is:

1. Put the candidate activation on `q_bank/q_row` and read `q_unsafe`. Any
   scheduler that skips unsafe candidates works, FR-FCFS included.
2. When an activation is issued, drive `act_valid`, `act_bank`, `act_row` and
   the owning `act_thread`.
3. Ask `req_*` before accepting a new request from a thread, and pulse `done_*`
   when one completes.

Assertions in the RTL check that no activation is issued while the top
reports it unsafe (full-functional mode). They also check that no completion
arrives for a pair with nothing in flight, and that the in-flight counters
never wrap.

## Departures from the source description

* **Counter width.** The description gives both 12-bit and 13-bit CBF
  counters. Neither can hold N_BL = 8192, so 14 bits are used.
* **History buffer size.** 887 entries are kept, one below the 888 that the
  t_FAW bound gives. The full flag closes the gap.
* **Timestamps.** 11-bit timestamps counting 8-cycle ticks replace an
  unspecified timestamp format.
* **Clock.** A 1.2 GHz controller clock is assumed when converting times into
  cycles.
* **Hash and seeds.** The H3 hash is the simplest member of the class, a
  shifted bit window XORed with a seed. Seeds come from an LFSR, not from a
  true random source.
* **Quota curve.** The quota formula and QMAX = 64 are this design's own
  choices. With QSCALE = 1, a pair keeps the full quota of 64 until its
  count passes 378 (a smaller QMAX throttles earlier). Only "inversely
  proportional to RHLI, zero at RHLI = 1" is
  prescribed.
* **Clear timing.** One epoch counter clears all banks together. The clear waits
  while an activation is being issued.
* **Full buffer.** A full history buffer blocks every activation. This is a
  safety net that is not part of the original description.
* **Storage.** The CBFs are written as plain arrays with four write ports,
  cleared in one cycle. In silicon they would be SRAM macros: 2 × 1024 × 14
  bits per bank. The history buffer's IDs would be a CAM.
* **Scope.** The memory scheduler, DRAM, PHY and cores are not included. The
  many-sided-attack analysis and the reduced-threshold configurations
  (N_RH down to 1K) are supported through parameters (`CBF_SIZE`, `NBL`,
  `HB_ENTRIES`, `HB_DELAY_TICKS`, `HB_TS_W`), but only the 32K point is the
  default.

## Files

| File | Contents |
|---|---|
| `rtl/bh_pkg.sv` | configuration constants and derived timing |
| `rtl/h3_hash.sv` | one H3-class hash |
| `rtl/lfsr.sv` | 64-bit seed generator |
| `rtl/cbf.sv` | counting Bloom filter, min-of-four test, saturating insert, clear |
| `rtl/rowblocker_bl.sv` | dual CBF of one bank, role swap and re-seeding |
| `rtl/rowblocker_hb.sv` | per-rank activation history buffer |
| `rtl/rowblocker.sv` | per-rank RowBlocker and epoch counter |
| `rtl/attack_throttler.sv` | per-<thread,bank> RHLI counters and quota |
| `rtl/blockhammer.sv` | top |
| `tb/*_tb.sv` | one self-checking testbench per module |

The tests are:

* `blockhammer_tb`: end-to-end at reduced size. It runs an attack with benign
  traffic, then observe-only mode, then a burst that fills the history buffer.
  It counts every mechanism (blocks, throttling, zero quota, epoch clears,
  full-buffer blocks, observe-only pass-through).
* `blockhammer_full_tb`: the top at its default parameters. It runs a
  double-sided attack of 2 × 8391 activations on one bank (2.8 M cycles)
  while another thread makes random activations elsewhere. It checks:
  * each row is first blocked after exactly N_BL activations;
  * later activations of the row are spaced by at least t_Delay (9327
    cycles measured against 9320);
  * the attacker's RHLI count equals its blacklisted activations;
  * the attacker's quota falls from 64 to 60 after 398 blacklisted
    activations, and its requests are refused beyond that quota;
  * the benign thread is never blocked or throttled.

  It takes about a minute and a half of simulation.

## Simulating

Any testbench builds with plain Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/bh_pkg.sv \
        tb/blockhammer_full_tb.sv --top-module blockhammer_full_tb
    ./obj_dir/Vblockhammer_full_tb

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
counts a failure if the run hangs. To try another configuration, change
`rtl/bh_pkg.sv` or override the top's parameters. Keep `HB_TS_W` large enough
for `HB_DELAY_TICKS + HB_ENTRIES/HB_TICK + 2`; an elaboration-time assertion
checks this.
