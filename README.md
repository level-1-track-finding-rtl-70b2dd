# Kalman-filter track fitting for a Level-1 track trigger

At the High-Luminosity LHC, the CMS outer tracker sends the trigger electronics
a few thousand "stubs" per bunch crossing. A stub is a short track segment
that a two-sensor module keeps when it looks like a particle above about
2-3 GeV. The trigger has about 4 µs to turn these stubs into tracks.
Pattern recognition pairs stubs in neighbouring layers into *tracklet seeds*,
and matches further stubs to each seed, giving *track candidates*. A candidate
is a rough helix plus up to eight stubs, some of which are wrong. Several seeds
often find the same particle.

This RTL takes such candidates and returns fitted tracks. It has two stages:

1. **Duplicate merging.** Candidates that share stubs in three or more layers
   are folded into one.
2. **A Kalman filter (KF) worker.** For every candidate it tries the matched
   stubs one at a time, starting from the seed. It keeps several partial fits
   alive at once, drops fits whose χ² grows too fast, and for each candidate
   reports the best fit that used four to six stubs. The fit gives 1/(2R),
   φ0, tanλ and z0.

The worker is built around a fully pipelined Kalman *state updater*, which
applies one stub per clock with a fixed latency of 46 cycles. A loop of FIFOs
feeds partial fits back into the updater. Everything runs one event at a time
and has a hard latency limit: at the default 320 MHz clock, an event that is
not finished after 1280 cycles (4 µs) is cut off. Its best tracks so far are
still reported.

In a full system, up to 18 workers per processing board would run side by
side, each taking part of the board's candidates. `track_fit_chain` is one
such slice: one merger feeding one worker.

```
                      track_fit_chain
 candidates  +------------+   +------------------------------------------------+
 ----------->| dup_merger |-->| kf_worker                                      |
 (seed word, +------------+   |  stubs --> FIFO 1 --------> stub-state ---> state updater
  stubs,                      |                              associator      (46 cycles)
  ..., eoe)                   |  seeds --> seed    -> FIFO 2 -> state  --^         |
                              |            creator             control           v
                              |                      FIFO 3 ---^          state filter
                              |                        ^-------------------- |  |
                              |                                              v
                              |                                  state accumulator --> tracks
                              +------------------------------------------------+
```

## Words, units and fixed point

Everything shares the types in `kf_pkg`.

**Input words (`in_word_t`).** Every input word is a seed or a stub, and the
last word of an event carries `eoe`. A candidate is one seed word followed by
its stubs, in increasing radius.

- A **seed** (`seed_t`) carries:
  - the candidate slot (0..31) and the number of stubs that follow (0..8);
  - the seeding layer pair (one of L1L2, L3L4, L5L6, L1D1, L2D1, D1D2, D3D4);
  - the four seed parameters.
- A **stub** (`stub_t`) carries:
  - slot and index;
  - layer (0..5 = barrel L1..L6, 6..10 = disks D1..D5);
  - a PS/2S module flag;
  - r, φ and z.

**Coordinates.** Stubs use r in 0.1 mm (14 bits), φ in 2⁻¹⁸ rad within the
sector (18 bits, signed) and z in 0.1 mm (16 bits, signed).

**Helix parameters.** These are 24-bit signed numbers in units chosen so that
the measurement model is a plain linear function of r. The hit is predicted as:

    φ(r) = φ0 − r·(1/2R) / 2¹²
    z(r) = z0 + r·tanλ   / 2¹²

The 2¹² factor (`H_SHIFT`) is applied to every product with r.

**Covariances and χ².**
- Covariances are 32-bit signed values in squared parameter units.
- χ² is 20 bits, unsigned, with 4 fractional bits, and saturates.
- There are two χ² sums, one for r-φ and one for r-z.

**Output tracks (`track_t`).** Each track carries:
- the candidate slot;
- the number of stubs used, counting the two seeding stubs;
- an 11-bit mask of the layers used;
- the four parameters;
- the two χ² sums.

## Duplicate merging (`dup_merger`)

The merger holds one event's worth of *kept* candidates: up to 32, each with
up to 8 stubs. It works in three phases.

**Collect.** A candidate is read into a pending buffer.

**Compare.** The pending candidate is compared with the kept candidates, one
kept candidate per clock cycle.
- Two stubs count as the same stub when layer, r, φ and z all agree.
- For each kept candidate, the merger finds the layers in which the two share
  a stub.
- If there are three or more such layers, the pending candidate is merged
  into that kept candidate. Its stubs that the kept one lacks are appended,
  up to 8, and its seed is dropped.
- If no kept candidate qualifies, the pending candidate becomes a new kept
  candidate.
- If all 32 kept slots are full, the pending candidate is dropped and
  counted.
- While a comparison runs, the next seed word is held off by `in_ready`.

**Emit.** After the event's last word, the kept candidates are sent on.
- They are renumbered 0, 1, ….
- Each candidate's stubs are re-sorted by radius. One stub is sent per cycle,
  and each time the merger picks the smallest radius not yet sent.
- The last word carries `eoe`.
- An event with no candidates leaves as a single empty seed word with `eoe`,
  so the worker still sees the event end.

Only the *matched* stubs are compared. The seed words carry helix
parameters, not the two seeding stubs, and the seeding stubs are never
refitted.

The following are choices of this design:
- the first kept copy survives a merge;
- a merge adds the new candidate's missing stubs to the kept one;
- comparison is serial, one kept candidate per cycle.

The merger takes a whole event before sending any of it. A candidate needs
one cycle per kept candidate it is compared with.

## The KF worker (`kf_worker`)

### Data path

**Stubs.** Stubs go into FIFO 1. The stub-state associator drains FIFO 1
into a stub store of 32 × 8 entries, indexed by slot and stub index. It also
keeps a count of how many stubs of each slot have arrived.

**Seeds.** Seeds go through the seed creator (`kf_seed_creator`), which
makes the initial state, and then into FIFO 2. The initial state has:
- the seed parameters;
- a diagonal covariance whose variances are parameters of the seed creator;
- two stubs counted as used;
- the two seeding layers marked as used;
- `nxt = 0`, the next stub to try.

**State control** (`kf_state_control`) chooses the next state for the
associator.
- States from FIFO 3 (partial fits that want more stubs) have priority over
  new seeds from FIFO 2.
- Entries tagged with the previous event are discarded.

**The stub-state associator** (`kf_stub_state_associator`) takes one state
at a time.
- It walks that candidate's stubs from index `nxt` upwards.
- It skips stubs in a layer the state already used.
- For every other stub it emits one (state, stub) pair per clock, with `nxt`
  set past that stub.
- This is how the worker "tries all combinations": one state branches into
  one new state per compatible later stub. Every branch then adds later stubs
  in order.
- If the stub it needs has not arrived yet, it waits. This happens when a
  seed overtakes its stubs.

**The state updater** (`kf_state_updater`) is described in the next section.

**The state filter** (`kf_state_filter`) looks at each updated state, where
`nused` is the number of stubs used, including the two seeding stubs.
- It drops the state if its total χ² exceeds `CHI2_CUT` × (nused − 2). The
  default cut is 10.0 per added stub.
- A state with four or more stubs is offered to the accumulator as a
  possible track.
- A state with fewer than six stubs, and with later stubs left in its
  candidate, is pushed into FIFO 3 to be extended.
- If FIFO 3 is full, that extension is lost and counted.

**The state accumulator** (`kf_state_accumulator`) keeps the best state per
candidate slot.
- More stubs win.
- Between states with the same number of stubs, the lower χ² wins.
- At the end of the event it walks the 32 slots, one per cycle, and emits
  one track for each slot that has a state.

### The updater arithmetic

This is the hardest part of the design, and the part that sets the worker's
latency.

The state is split into two independent planes, each with its own 2×2
covariance:
- r-φ, with parameters (1/2R, φ0);
- r-z, with parameters (tanλ, z0).

The cross-plane covariance terms are taken as zero.

A stub gives one measurement per plane, with h = −r for φ and h = +r for z.
For one plane, with parameters (a, b), covariance C and hit variance V:

    res  = m − (b + h·a)
    HCa  = h·Caa + Cab          HCb = h·Cab + Cbb
    S    = V + h·HCa + HCb
    Ka   = HCa / S              Kb  = HCb / S
    a'   = a + Ka·res           b'  = b + Kb·res
    Caa' = Caa − Ka·HCa         Cab' = Cab − Ka·HCb        Cbb' = Cbb − Kb·HCb
    χ²'  = χ² + res² / S

Each product with h is shifted down by 12 bits.

The only division is 1/S.
- A pipelined restoring divider (`kf_recip`) computes q = ⌊2⁴⁸ / S⌋.
- It produces two quotient bits per stage, over 25 stages.
- S is clamped to the range 1 … 2³²−1 first.
- The gains are then K = HC·q / 2²⁸, which gives 20 fractional bits.
- The χ² increment is res²·q / 2⁴⁴, which gives χ² in 1/16 units.

**Hit variances.**
- V_φ comes from a per-layer table: strip pitch over layer radius, in φ
  units squared.
- V_φ is then inflated for multiple scattering by adding
  (0.75 mrad / pT)². In these units σ_ms = (|1/2R| · 421) >> 17, for a
  3.8 T field.
- V_z is 19 for PS modules (1.5 mm macro-pixels) and 20736 for 2S modules
  (5 cm strips assumed).
- Disk stubs use the same linear model. Corrections for the tilt of
  non-radial endcap strips are not implemented.

**Pipeline.** The whole update takes 31 cycles:
- residuals and HC values;
- S;
- 25 divider stages;
- gains and χ² increment;
- the saturated new state.

A delay line pads this to `LATENCY` = 46 cycles, the state updater latency
reported for a Kintex UltraScale KU115 at 320 MHz. The updater takes a new
pair every cycle and never stalls.

### Event control and the latency limit

The worker has three phases: RUN, DRAIN and FLUSH.

1. **RUN.** The worker accepts input. `in_ready` drops while FIFO 1 or
   FIFO 2 is almost full.
2. **DRAIN.** After the `eoe` word, input stops. The worker waits until all
   three FIFOs, the associator, the updater pipeline and the filter are
   empty.
3. **FLUSH.** The worker also enters FLUSH when `TRUNC_CYCLES` (1280) cycles
   have passed since the event's first word; such an event is counted as
   truncated. In FLUSH:
   - the accumulator emits the event's tracks;
   - the FIFOs and the stub store are cleared;
   - a one-bit event tag flips;
   - `ev_done` pulses, and the worker returns to RUN.

Every state carries the event tag. States still in the updater pipeline when
the tag flips are therefore recognised as stale and discarded by the state
control, the filter and the accumulator. The pipeline does not need to be
flushed.

### Counters

`stats` (`kf_stats_t`) counts, 16 bits each:
- events closed;
- truncated events;
- FIFO 3 overflows;
- χ² drops;
- input-stall cycles;
- associator wait cycles;
- FIFO 3 states taken while a seed was waiting.

`track_fit_chain` adds `merged` and `merge_dropped`.

## Parameters

| Parameter | Default | Meaning |
|---|---|---|
| `MIN_SHARED` | 3 | layers with shared stubs that make two candidates duplicates |
| `TRUNC_CYCLES` | 1280 | per-event limit, 4 µs at 320 MHz |
| `UPD_LATENCY` / `LATENCY` | 46 | state updater latency in cycles |
| `CHI2_CUT` | 160 | χ² per added stub, ×16 (10.0) |
| `F1_DEPTH`, `F2_DEPTH`, `F3_DEPTH` | 64, 32, 64 | FIFO depths |
| `MAX_CAND`, `MAX_STUBS` (package) | 32, 8 | candidates per event, stubs per candidate |
| `MIN_FIT`, `MAX_FIT` (package) | 4, 6 | track length range, including the two seeding stubs |

The following values are choices of this design; the paper gives no numbers
for them:
- the FIFO depths;
- the χ² cut;
- the seed covariances;
- the V_φ table;
- the 2S strip length;
- all bit widths.

The paper does give the three-layer merge rule, the 46-cycle updater at
320 MHz, the 4 µs budget, the multiple-scattering term of 0.75 mrad/pT, the
four-to-six-stub range and the seeding layer pairs.

## Departures and limits

- **Track selection.** The accumulator prefers more stubs first and uses χ²
  only between fits of equal length. A pure χ² or χ²-per-degree-of-freedom
  choice tended to drop good stubs. Every state that reaches the accumulator
  has already passed the per-stub χ² cut.
- **Control-path latency.** The control path around the updater adds about
  six cycles. The 18-cycle control-flow figure quoted for the original
  firmware is not reproduced.
- **Clock.** The default clock is 320 MHz, the worker's clock. The
  surrounding pattern recognition was aimed at 250 MHz, which would make the
  4 µs limit 1000 cycles.
- **Not built:**
  - the constant φ shifts that stand in for higher-order terms of the helix
    expansion;
  - the endcap strip corrections;
  - the five-parameter fit that includes d0.
- **Single slice only.** One worker is built. There is no distribution of
  candidates over several workers, and nothing upstream (seeding, projection
  and matching) or downstream.
- **Capacity.** One worker event holds at most 32 candidates of up to 8
  stubs. A whole board's load at 200 pileup (about 175 candidates after
  merging) must be spread over about 18 workers, at about 10 each.

## Simulating

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With
Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv -Irtl \
        rtl/kf_pkg.sv tb/tb_track_fit_chain.sv --top-module tb_track_fit_chain -o sim
    ./obj_dir/sim

Replace the testbench name to run another one: `tb_kf_fifo`, `tb_kf_seed_creator`,
`tb_kf_state_control`, `tb_kf_stub_state_associator`, `tb_kf_state_updater`,
`tb_kf_state_filter`, `tb_kf_state_accumulator`, `tb_kf_worker`, `tb_dup_merger` or
`tb_workload_ttbar200`.

**Unit testbenches.**
- `tb_kf_state_updater` checks the fixed-point update against a
  floating-point Kalman filter, within stated tolerances. It also checks the
  46-cycle latency exactly.
- `tb_dup_merger` builds events in which particles are found one to three
  times, with random stub subsets. It checks the output stream against a
  reference merge: candidate order, stub sets, radius order, slot numbers,
  `eoe` and the merge count.

**`tb_kf_worker`** drives the worker directly, including seeds sent ahead of
their stubs.

**`tb_track_fit_chain`** runs the full design at its defaults with a 320 MHz
clock and four events:
1. Clean candidates plus duplicates that share exactly three layers.
2. Candidates with an extra wrong stub.
3. A heavy event: 32 candidates with two compatible stubs per layer. It
   overflows FIFO 3 and is truncated.
4. A clean event again.

The chain testbench checks the following:
- Each clean candidate gives exactly one track using all six stubs.
- Those tracks lie close to the generated truth, and closer than the seed.
- The worker recovers after the truncated event.
- Merges, input stalls, FIFO 3 priority, χ² drops, FIFO 3 overflow and
  truncation each occurred at least once.

**`tb_workload_ttbar200`** runs the top at its defaults under the load one
worker would see at 200 pileup. The sizing is about 570 candidates per
board before merging and about 175 after, spread over 18 workers:
- Six events are sent, each with 10 particles found three times over, so 30
  candidates go into the merger.
- Every event must come out as 10 six-stub tracks, with 20 merges and no
  truncation.
- This takes about 510 cycles per event, well inside the 1280-cycle limit.

**Known gap.** The associator's wait for a late stub cannot happen behind
the merger. The merger always sends a candidate's stubs right behind its
seed. That path is covered by `tb_kf_worker` and the associator's own
testbench instead.

**Size.** Coarse synthesis of `track_fit_chain` gives about 11,000 cells,
29,000 flip-flop bits and 71,000 bits of memory arrays.
