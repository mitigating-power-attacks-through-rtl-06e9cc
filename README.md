# Slack-based instruction reordering for an out-of-order core

Power analysis attacks work because a program that runs the same loop many times also
draws current in the same pattern every time. If the attacker can line up thousands of
power traces, the small data-dependent part of the current (for AES, the S-box lookups
keyed by the secret) stands out after averaging. Adding random delays breaks the
alignment, but a naive random delay slows every instruction down.

This design breaks the alignment almost for free. In any dataflow graph, many
instructions finish earlier than the consumer that needs them would have noticed.
Take a consumer whose two producers are a slow load and a fast add. The add could have
run several cycles later without delaying the consumer. That margin is its **slack**.
The hardware learns the slack of such *non-critical* producers at run time. It then
holds each of them in its issue-queue slot for a random number of cycles, never more
than the slack. The order and timing of instructions, and so the power trace, then
changes from one iteration to the next, while the critical path (and so the run time)
stays essentially the same.

The RTL here is the scheduler slice of such a core:
- the three issue queues with a delay counter per slot;
- the **Slack Unit** that learns the slack and chooses the delays;
- the glue that tells the Slack Unit which instructions produced which operands, and when.

Fetch, rename, the reorder buffer, the register file, the execution units and the caches
belong to the host core. They connect through the top module's ports.

## Block map

```
             dispatch (1 micro-op/cycle)
                  |  PC                                  wakeups (5 ports)
                  v                                            |
   +--------------------------- paradise_scheduler ----------------------------+
   |   +------------- slack_unit ---------------+                              |
   |   |  NCT lookup -> delay, injected flag    |---+                          |
   |   |  galois_lfsr (random delay)            |   |                          |
   |   |  noncrit_table  crit_table  dest_table |   v                          |
   |   +------------------^---------------------+  issue_queue x3 (INT/MEM/FP) |
   |                      | report (1/cycle)        8 slots, delay_ctrl each   |
   |   producer table  ---+--- report pick  <------ issued micro-ops           |
   |   (per phys. reg)                                                          |
   +---------------------------------------------------------------------------+
                                        |  issue ports 0-2 INT, 3 MEM, 4 FP
                                        v
                                 execution units
```

| File | Role |
|---|---|
| `rtl/paradise_pkg.sv` | widths, micro-op / issue / report structs, event bundle, PC-key helpers |
| `rtl/paradise_scheduler.sv` | top: queues, Slack Unit, producer table, report path, cycle counter |
| `rtl/slack_unit.sv` | dispatch delay choice and the learning rules |
| `rtl/noncrit_table.sv` | NCT: PC field, 5-bit slack, stable flag |
| `rtl/crit_table.sv` | CT: PC field only |
| `rtl/dest_table.sv` | DT: consumer PC field, 8-bit offset of its non-critical producer |
| `rtl/lru_table.sv` | shared set-associative, true-LRU storage behind the three tables |
| `rtl/galois_lfsr.sv` | 16-bit Galois LFSR with reseed |
| `rtl/issue_queue.sv` | issue queue whose slots wait out an injected delay |
| `rtl/delay_ctrl.sv` | per-slot delay down-counter |

## Slack, criticality and how they are learnt

This is the heart of the design and the part that needs the most care.

### Definitions

When a consumer with two register sources issues, its two producers broadcast their
results in cycles `t0` and `t1`. The slack is

    slack = |t0 - t1|

The producer that broadcast last (**L**) is *critical* for this consumer. The other one
(**E**, early) is *non-critical* and could have been `slack` cycles later. A producer
is **injected** if, at its own dispatch, it hit the NCT and so was given a delay.
Timestamps come from a free-running 16-bit cycle counter. Differences are taken modulo
2^16 and saturated to 31, the largest value of the 5-bit slack field.

### The three tables

Each table is 4-way set-associative with 16 sets (64 entries) and true LRU. All three
are indexed by the instruction's PC field `PC[12:1]`.

| Table | Payload | Meaning |
|---|---|---|
| NCT, Non-Critical Table | slack (5 b), stable (1 b) | instructions that may be delayed, and by how much |
| CT, Critical Table | none | instructions seen on a critical path |
| DT, Destination Table | offset (8 b) | for a consumer, `consumer PC - non-critical producer PC` (low 8 bits) |

The CT is what prevents a wrong delay. An instruction can be non-critical for one
consumer and critical for another. Once it has been critical anywhere, it is not
recorded as non-critical: this is a *criticality conflict*. The DT is what tells
"the same situation again" apart from "a different path to this consumer". Only a
repeat of the same producer/consumer pair makes an NCT entry stable.

### Unstable and stable phase

A new NCT entry is **unstable**. Its whole slack is injected as the delay, so the
hardware can check whether the slack was real:
- If the delayed producer now arrives *late* (it became L) by `d` cycles, the delay
  overshot. The slack is corrected to `slack - d` and stays unstable.
- If it arrives no later than its partner, and the DT shows the same producer for this
  consumer as last time, the entry becomes **stable**.

Once stable, the delay is a fresh random number in `[0, slack]` at every dispatch.
Those random delays are what desynchronise the power traces.

Worked example (producer INST0 finishes 8 cycles after INST1; both feed INST2):

| Round | What happens | NCT[INST1] after |
|---|---|---|
| 1 | no delays yet; INST1 early by 8: INST0 → CT, INST1 → NCT | slack 8, unstable |
| 2 | INST1 delayed 8, arrives 2 cycles after INST0 (overshoot) | slack 6, unstable |
| 3 | INST1 delayed 6, arrives with INST0; DT confirms same producer | slack 6, stable |
| 4+ | INST1 delayed by a random value in 0..6 | unchanged |

### The learning rules exactly as built

One report per cycle arrives at `slack_unit`. It carries the consumer PC and, for each
producer, its PC, its result time and its injected flag. With `d` the saturated slack:

1. **Overshoot** (L injected, `d > 0`). If L is in the NCT: `slack := max(slack - d, 0)`,
   unstable. Nothing else changes, and the CT is not touched. The late producer was late
   only because it was delayed, so it is not critical.
2. **Consistent** (E injected, or L injected and a tie). Let P be the injected producer
   that arrived in time. If P is in the NCT and the DT holds P for this consumer, P
   becomes stable (slack unchanged). The DT entry of the consumer is then written with P.
3. **Natural** (neither injected, `d > 0`). L is inserted into the CT and deleted from
   the NCT, because a producer that has turned critical must stop being delayed. Then:
   - If E is in the CT: conflict, nothing is recorded for E.
   - Otherwise, the DT entry of the consumer is written with E, and in the NCT:
     - if E is new, it is inserted with slack `d`, unstable;
     - if E is present, it keeps the smaller of its old slack and `d`, and it is stable
       exactly when the DT already named E for this consumer.
4. **Nothing** is learnt from a tie between two non-injected producers, or when both
   sources come from the same static instruction.

Rule 3 alone keeps the slack the *minimum* over all observations. Rule 1 shrinks it when
delaying proved it too large. So after the unstable phase the stored slack is an
estimate that was actually tried. When several consumers issue in the same cycle, one
report is picked round-robin and the others are lost. Learning is a statistical process,
so a lost report only slows it down.

### Dispatch delay

At dispatch the PC is looked up in the NCT in the same cycle:
- miss: delay 0, not injected;
- unstable hit: delay = slack;
- stable hit: delay = `(r * (slack + 1)) >> 5`, where `r` is the low 5 bits of the
  LFSR. This maps the 32 values of `r` evenly onto `0..slack`.

The LFSR is a 16-bit Galois LFSR (taps `0xB400`, maximal length) stepping every cycle.
The `reseed` input loads it with `SEED ^ cycle_counter`, so the sequence also depends on
when the system chose to reseed. A zero result falls back to `SEED`.

## Issue queues and delay controllers

There are three queues of 8 slots: INT (three issue ports), MEM and FP (one port each).
- **Dispatch** writes the micro-op into the lowest free slot, together with its delay.
- **Wakeup** broadcasts set the operand-ready bits. A broadcast in the enqueue cycle is
  caught.
- **Delay.** Each slot's `delay_ctrl` counts its delay down only in cycles in which both
  operands are ready, so the delay is measured from the moment the instruction could
  first have issued.
- **Select.** Each cycle the lowest eligible slots are offered on the queue's ports,
  which have valid/ready handshakes.

An instruction whose last operand is broadcast in cycle T issues no earlier than cycle
`T + 1 + delay`. A slot with ready operands still counting is reported as
`ev.delayed_wait`. Dispatch into a full queue is refused (`disp_ready` low, `ev.disp_stall`).

## Knowing the producers: the producer table

Learning needs to know, at the consumer's issue, who its producers were and when they
finished. The top keeps one record per physical register (128):
- the producer's PC and injected flag, written when the producer dispatches;
- the cycle of its wakeup broadcast, written when the result is broadcast.

An issuing micro-op with two valid sources reads the two records through its source
register tags. A record is only used if the source was written by a dispatched producer
since reset. The chosen report is registered, so the tables change two edges after the
issue.

## Top-level interface

`paradise_scheduler` (parameters `IQ_ENTRIES=8`, `PREGS=128`, `SETS=16`, `WAYS=4`,
`SEED=16'hACE1`):

| Port | Dir | Meaning |
|---|---|---|
| `disp_valid`, `disp_ready`, `disp_uop`, `disp_src_rdy[1:0]` | in/out/in/in | one renamed micro-op per cycle, its queue in `disp_uop.iq`, source readiness from the busy table |
| `wb_valid[5]`, `wb_pdst[5]` | in | result broadcasts of the five execution units |
| `iss_valid[5]`, `iss_ready[5]`, `iss[5]` | out/in/out | issue ports: 0-2 INT, 3 MEM, 4 FP; `iss[k]` carries the micro-op, its delay and injected flag |
| `reseed` | in | mix the cycle counter into the LFSR |
| `ev` | out | one-cycle event pulses: injections, each learning step, conflicts, dropped reports, stalls, delayed slots |

Storage per table, as built: a valid bit, the 12-bit key, the payload and 2 bits of
recency per entry. The CT's payload is a single constant bit. For the DT, CT and NCT
that is 23, 16 and 21 bits per entry. The reference sizes of 208, 144 and 192 bytes for
64 entries correspond to 26, 18 and 24 bits. So the built tables fit the same budget,
with 2 to 3 bits per entry to spare.

## Where this design makes its own choices

The table structure, the fields, the slack definition, the overshoot correction, the
confirmation rule, the conflict rule, the 4-way × 16-set LRU organisation and random
delays bounded by the slack are the scheme itself. The following are this
implementation's choices:
- **PC field.** The key is `PC[12:1]`, which suits 2-byte aligned RISC-V code.
- **Set index.** The set is the XOR fold of the key.
- **Producer times.** Result times come from the producer table and the wakeup ports.
- **Reports.** Only one report per cycle reaches the Slack Unit.
- **Rule interplay.** A producer that was delayed does not go through the CT/NCT update
  of rule 3. Without this, the worked example above could not keep INST1 in the NCT
  during its overshoot round.
- **Ties.** Ties count as "arrived in time".
- **Random range.** The range is mapped onto `0..slack` by multiply-and-shift.
- **Dispatch width.** One micro-op is dispatched per cycle.
- **One random source.** A single LFSR serves all queues, since at most one NCT lookup
  happens per cycle. `SEED` stands for a value fixed when the core is built, and
  `reseed` adds run-time cycles, so both kinds of entropy enter the seed.
- **DT writes.** A consumer's DT entry is written when one of its reports names a
  non-critical producer, not at every issue. A consumer whose producers never differ
  in time takes no DT entry.
- **Queue select.** The queues select by slot position, not by age.
- **Timestamps.** Timestamps are 16 bits, and the slack saturates at 31.

Memory operations get the same treatment as ALU operations. Only micro-ops with two
register sources give a report; a micro-op with one source teaches nothing, though it can
still be delayed as the early producer of some other consumer.

## Verification

Each testbench is self-checking, has a watchdog and ends with a
`TB_RESULT checks=<n> failures=<n>` line.

| Testbench | What it checks |
|---|---|
| `tb_galois_lfsr` | against a bit-serial reference; full period 65535; reseed and zero guard |
| `tb_delay_ctrl` | delays counted only while operands are ready; reload; issue in the right cycle |
| `tb_noncrit_table` | random lookups, upserts and deletes against a recency-list model of LRU |
| `tb_crit_table`, `tb_dest_table` | insert/lookup, LRU victim choice, offset match, then random traffic against a model |
| `tb_issue_queue` | random traffic (2 ports, 2 wakeup ports): earliest legal issue cycle including the delay, no idle port while a slot is eligible, exactly-once issue, enqueue back-pressure |
| `tb_slack_unit` | the four-round example cycle by cycle, conflicts, shrinking, removal of a producer turned critical, DT change and confirmation, saturation, timestamp wrap, ties |
| `tb_paradise_scheduler` | the whole scheduler at default parameters inside a behavioural core |
| `tb_aes_workload` | the same core running the micro-op stream of byte-oriented AES-128 for 2,000 plaintexts |
| `tb_table_size_sweep` | ten table sizes, from 2 ways × 8 sets to 2 ways × 128 sets, each running 200 AES plaintexts |

The two AES tests share the core model `tb/aes_core_model.sv`.

The behavioural core in `tb_paradise_scheduler` has:
- rename of 64 architectural registers onto 128 physical registers;
- a 96-entry reorder buffer that retires three per cycle;
- loads with hits and misses, and load-port back-pressure.

It runs about 21,000 micro-ops of a loop with slow and fast producers. It then drains
and runs a short directed sequence with chosen load latencies. It checks that:
- every micro-op issues exactly once and only after its operands and delay;
- no uninjected micro-op is delayed;
- micro-ops use the right ports;
- some instruction gets three or more distinct random delays;
- every event in `ev` occurs at least once.

`tb_aes_workload` models the dataflow of AES-128, not its data:
- per plaintext, 16 byte loads and the initial key XOR;
- nine passes over one round body of 141 micro-ops: S-box address adds and loads,
  MixColumns as XOR and shift operations, key loads and XORs;
- a final round of 64 micro-ops.

That is 1,381 micro-ops per plaintext and 2.76 million in all. One micro-op is
dispatched per cycle, so 1,381 cycles per plaintext is the fastest possible run. A
typical result:
- 1,401 cycles per plaintext, 1.5% above that bound;
- 13% of the micro-ops of the second thousand plaintexts carry a delay;
- the most varied instruction is issued with every delay from 0 to 31.

The test fails if the run is more than 5% above the bound, or if no instruction gets four
or more different delays.

`tb_table_size_sweep` runs the same stream on ten table geometries at once. With only 200
plaintexts per size, learning weighs more, so the allowed slowdown is 10%. One run
gave:

| Ways × sets | Entries | Cycles per plaintext | Above bound | Micro-ops delayed |
|---|---|---|---|---|
| 2 × 8 | 16 | 1398 | 1.2% | 5.1% |
| 2 × 16 | 32 | 1442 | 4.4% | 11.5% |
| 4 × 8 | 32 | 1461 | 5.8% | 11.8% |
| 2 × 32 | 64 | 1405 | 1.8% | 13.2% |
| 4 × 16 (default) | 64 | 1412 | 2.3% | 14.2% |
| 8 × 8 | 64 | 1425 | 3.2% | 13.8% |
| 2 × 64 | 128 | 1404 | 1.7% | 13.6% |
| 4 × 32 | 128 | 1403 | 1.6% | 14.3% |
| 8 × 16 | 128 | 1404 | 1.6% | 14.5% |
| 2 × 128 | 256 | 1402 | 1.5% | 13.9% |

The smallest tables delay fewer micro-ops, because entries are evicted before they become
stable. The mid-sized ones cost the most during learning. From 128 entries on, little
changes.

To run one with Verilator 5 from the directory holding `rtl/` and `tb/`:

```
verilator --binary --timing -y rtl rtl/paradise_pkg.sv tb/tb_slack_unit.sv \
          --top-module tb_slack_unit -o sim
./obj_dir/sim
```

Replace `tb_slack_unit` with any other testbench name. Each one runs in a few seconds at
most, apart from `tb_aes_workload` and `tb_table_size_sweep`, which take 15 to 25 seconds.
The AES model is in `tb/`, so add `-y tb` for those two.

## Limits

- Only the scheduler slice is RTL. The front end, rename, reorder buffer, register file,
  execution units, load/store unit and caches are those of the host core. The testbench
  stands in for them with a behavioural model.
- The benefit against power analysis depends on the real core's power behaviour. This
  RTL can show that delays vary and stay within the slack, but not how many traces an
  attack needs.
- The table sizes can be changed through `SETS` and `WAYS` (powers of two). The
  sweep above runs the AES stream at ten sizes, while the full checks of every
  mechanism run at the default 4 × 16.
- The AES tests model the cipher's dataflow and a simple memory timing, not a real
  compiled binary on a real cache hierarchy. Their cycle counts show the trend, not the
  overhead a full core would see.
