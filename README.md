# HPS tau trigger pipeline in SystemVerilog

At the high-luminosity LHC, the CMS Level-1 trigger must decide within
about a microsecond whether an event is worth keeping. One of the
signatures it looks for is the hadronic decay of a tau lepton. The
Hadron-Plus-Strips (HPS) algorithm finds taus by grouping the particles of an
event around a few energetic charged seeds, and then rebuilding each tau from
the particles in its group. This RTL implements that algorithm as a
seven-stage dataflow pipeline. It takes 128 particles per event and returns
up to 8 taus. The budget it is built for is a new event every 0.15 us
(45 cycles of a 300 MHz clock) and a latency under 220 of those cycles.

The stage split, the list sizes and two of the stage structures (merging with
ping-pong buffers, cleaning with a comparison matrix) follow a published
FPGA/HLS implementation of the algorithm. The particle format and the
physics criteria (cone sizes, which particles count as signal, when a tau is
valid) are not given there, so they are this design's own choices. They are
marked as such below and in each file header.

## Data flow

```
 link clock (360 MHz)           algorithm clock (300 MHz)
 in_frame ─► tau_cdc_bus ─► 1 tau_seeding ─► 2 tau_filter ─► 64 x tau_pipo
 128 x 64 b                    16 seeds       64 filter blocks   (16 seeds x 4 lists)
                                                                    │
            ┌───────────────────── per seed, 16 lanes ──────────────┘
            ▼
   3 tau_merge_unit ─► tau_fifo ─► 4 tau_sigsel_unit ─► 5 tau_params_unit
     (4 lists → ≤30)   (target list)   (signal flags)      (sums, 2 divisions)
                                                                    │ all 16 lanes
                                                                    ▼
 out_taus ◄── tau_cdc_bus ◄── 7 tau_clean ◄── 6 tau_reco
 8 x tau_t                     (≤8 taus)        (16 candidates)
```

Each stage starts when its input is complete and its output has room
(valid/ready handshakes). Events therefore overlap: while one event is being
filtered, the next is already being seeded. Stages 3 to 5 run in 16
independent lanes, one per seed. Stage 6 waits until all 16 lanes have
finished an event.

### Particle and tau words (`tau_pkg`)

A particle is 64 bits: `pt` (16 b, 0.25 GeV/LSB), `eta` (12 b signed),
`phi` (11 b signed, range [-720, 720)), `pid` (charged hadron, electron,
muon, photon, neutral hadron), `charge`, `valid`, plus 20 spare bits. Both
angles use pi/720 rad per LSB. Angular distance is always computed squared:
`dr2 = deta^2 + wrap(dphi)^2`, which takes two multiplications and no
square root. A tau (`tau_t`) carries pt, eta, phi, prong count, charge and
a valid bit.

## The stages

**1. Seeding** (`tau_seeding`). This stage finds the 16 charged particles
with the highest pt. It scans the event 4 particles per cycle (32 cycles).
Each cycle it ranks the 16 current seeds and the 4 new particles against
each other and keeps the top 16. Ties go to the earlier particle, so the
result equals a stable sort. Unused seed slots stay empty (`valid = 0`).

**2. Filtering** (`tau_filter`, `tau_filter_unit`). A single pass over 128
particles per seed would take 128 cycles, far over the 45-cycle budget. So
each seed gets 4 filter blocks, and each block looks at one quarter of the
event (32 particles, one per cycle). All 64 blocks run at once. A particle
within 0.4 rad of the seed is appended to the block's list, and its pt is
added to the block's partial sum. After 32 cycles all 64 lists are closed
together. The sum of a seed's 4 partial sums is its `totalPt`. It counts
every particle in the cone, including any that merging later leaves out
because of the limit of 30.

**3. Merging** (`tau_merge_unit`, `tau_pipo`). Each seed now has 4 lists of
0 to 32 items. These must become one target list of at most 30. This is the
most delicate part of the design; see the next section.

**4. Signal selection** (`tau_sigsel_unit`). Each candidate is flagged as
signal or not. A signal candidate must be a charged hadron, an electron or a
photon. It must also lie within a cone whose radius shrinks as totalPt
grows: R = 3 GeV / totalPt, bounded to [0.05, 0.10] rad. The unit squares
both sides to avoid a division: `dr2 <= Rmin^2`, or
`dr2 <= Rmax^2 and dr2 * totalPt^2 <= K^2`. Each candidate takes one cycle.

**5. Parameter calculation** (`tau_params_unit`, `tau_divider`). This stage
adds up the signal candidates, each weighted by its pt: the pt itself, pt x
deta and pt x dphi (both offsets measured from the seed). It also counts the
charged signal candidates and sums their charges. Two serial dividers then
turn the weighted sums into pt-weighted mean offsets. The division takes 34
cycles, so summing and dividing are separate sub-stages, and the next list
can be summed while the previous one is being divided.

**6. Reconstruction** (`tau_reco`). In one cycle this builds 16 tau
candidates: pt = signal pt sum, position = seed + mean offset (phi wrapped).
A candidate is valid only if its seed was valid, its pt is non-zero and it
has 1 to 3 charged signal candidates. Otherwise the slot is left empty.

**7. Cleaning** (`tau_clean`). Several seeds can belong to the same tau and
produce duplicate candidates. Cleaning removes them without sorting. See
below.

## Merging four lists without leftovers

The 4 lists of a seed hold up to 128 items in total, but only 30 fit in the
target list, and the stage must finish within the initiation interval.
FIFO sources cause a problem here: once 30 items are taken, the rest of the
current event must still be drained so that the next event's items are not
mixed in. Draining one at a time could take up to 128 cycles.

The sources are therefore ping-pong buffers (`tau_pipo`). Each has two
banks, and each bank records its item count `S_i` and a side word (the seed
and the partial pt sum). The filtering stage writes one bank while the
merging stage reads the other at random addresses. When merging is done it
releases the bank. Whatever was not read is simply overwritten by a later
event, so nothing has to be drained.

The merge unit has one `Index` register shared by all 4 sources, a `Count`
register and 4 `Available` bits:

1. Set `Index = 0`, `Count = 0` and `A_i = (Index < S_i)`.
2. Each cycle, take the item at `Index` from the first source with
   `A_i = 1`, push it to the target FIFO, clear `A_i` and add one to `Count`.
3. When no `A_i` is left, add one to `Index` and reload every `A_i`, in that
   same cycle.
4. Stop when `Count = 30` or when no source has an item at the new `Index`,
   then release all 4 buffers.

The result is the items taken index by index (item 0 of lists 1..4, then
item 1 of lists 1..4, and so on). This spreads the 30 places across the 4
quarters of the event. With the FIFO free, the unit produces one item per
cycle: a header beat (seed and totalPt) one cycle after the buffers become
readable, then the items. This is at most 32 cycles per event.

The published description says `A_i` is cleared when Index is "greater
than" `S_i`. But Index counts from 0 and the items are stored adjacently, so
the item at Index exists only when `Index < S_i`. This design follows that
reading.

## Cleaning with a matrix instead of a sort

For 16 candidates, `tau_clean` builds a 16 x 16 matrix

    M(i,j) = NearBy(i,j) AND LessPt(i,j)

where NearBy means the two candidates are within 0.4 rad, and LessPt means
candidate i has strictly lower pt than candidate j. Candidate i is dropped
if any entry in its row is 1. In any group of nearby candidates, only the
one with the highest pt has an all-zero row. All 240 comparisons happen in
one cycle.

The survivors fill the first 8 output slots in candidate (seed) order.
`n_dropped` reports how many valid candidates were removed as duplicates.

Because the comparison is strict, two nearby candidates with exactly equal
pt both survive. That follows the definition of LessPt, but it differs from
sorting first and then dropping later entries. When more than 8 candidates
survive, the last ones in seed order are lost.

Latency is 3 cycles (capture, matrix, drop and pack).

## Clocks and timing

The algorithm runs on `clk_algo`; the event enters and the taus leave on
`clk_link`. In the target system these are 300 MHz and 360 MHz. 300 MHz is
the lowest frequency at which 0.15 us still gives 45 cycles per event.
`tau_cdc_bus` moves the whole 8192-bit event, and later the 8 taus, between
the clocks. It uses a toggle request/acknowledge handshake with two-flop
synchronizers. The data sits in a register that does not change while the
other side reads it, so the wide word itself needs no synchronizer. If an
event arrives while the input crossing still holds the previous one, it is
dropped and `in_dropped` is raised for that cycle.

Cycles per event at 300 MHz (the initiation interval is set by the slowest
stage):

| stage | occupancy per event |
|---|---|
| seeding | 33 (1 capture + 32 scan) |
| filtering | 34 (1 capture + 32 scan + 1 commit) |
| merging | ≤ 32 (start, header, ≤ 30 items) |
| selection / summing | 1 per candidate, overlapped with merging |
| division | 35 (34 dividing + 1 output), overlapped with the next list |
| reconstruction, cleaning | 1, 3 |

The end-to-end testbench sends one event every 54 link cycles and measures
at most 177 link cycles (about 147 algorithm cycles) from `in_valid` to
`out_valid`. The limits are 275 and 220. No event is dropped at that rate.

## Top-level interface (`tau_trigger_top`)

| port | dir | meaning |
|---|---|---|
| `clk_link`, `rst_link` | in | link clock and its synchronous, active-high reset |
| `clk_algo`, `rst_algo` | in | algorithm clock and its reset |
| `in_valid`, `in_frame[128]` | in | one event, strobed for one link cycle |
| `in_dropped` | out | the event offered this cycle was refused |
| `out_valid` | out | one-cycle strobe on the link clock |
| `out_taus[8]` | out | final taus; slots with `valid = 0` are empty |
| `out_n_dropped` | out | candidates removed by cleaning |

The top has no parameters. The sizes are the `tau_pkg` constants `N_PART`,
`N_SEED`, `N_FILT`, `FILT_LEN`, `MAX_CAND` and `N_TAU_OUT`, and the cone
sizes `R2_FILT`, `R2_CLEAN`, `R2_SIG_MIN`, `R2_SIG_MAX` and `K2_SIG`. The
submodules take these as parameter defaults. Both clocks are top-level
inputs; generating them is left to the FPGA's clock manager.

## What follows the published design and what does not

Taken from the published design:
- the seven stages and their order
- 128 particles of 64 bits, 16 seeds, 4 filter blocks of 32 particles per
  seed, lists of at most 30, 16 candidates, at most 8 taus
- ping-pong source lists with size registers
- the Index/Count/Available merging procedure
- FIFO channels between stages
- the cleaning matrix
- the 300/360 MHz split with a clock-domain crossing
- the latency and interval budgets

This design's own choices:
- the particle and tau word layouts and units
- the 0.4 rad filter and cleaning cones
- the signal-selection rule. The source only names the kinds of criteria
  used: particle type, position, a region set by totalPt, and unnamed
  "other parameters". Signal selection is therefore only an approximation of
  the original.
- pt as the weighting coefficient, and averaging of the angular offsets
- the tau validity rule
- the header beat in the candidate stream
- all handshakes, resets and the crossing scheme
- the seeding structure (the source refers its insides elsewhere)

The published implementation was produced by high-level synthesis from C++.
Its per-stage cycle counts therefore differ from this hand-written RTL. For
example, the published cleaning step takes 15 cycles, while this one takes 3.
The published end-to-end latency is 210 cycles at 300 MHz; this design
measures about 147.

This RTL has not been placed and routed on an FPGA, so whether it fits one
SLR of the target device (394k LUTs, 788k FFs, 2280 DSPs) is untested, and
so is whether it closes timing at 300 MHz. Generic synthesis of the top gives
about 48k flip-flop bits. The memories add about 320k bits: 64 ping-pong
buffers of 2 x 32 particles, and 16 candidate FIFOs of 32 beats. The widest
single-cycle logic is the 240 distance tests of cleaning and the 20-way rank
of seeding. These are the paths to watch when targeting a clock.

Data pre-processing upstream of the 128 particles is not part of this design.

## Simulating

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/tau_ref_pkg.sv` holds a plain
sequential software model of the whole algorithm and an event generator.
The generator places tau-like clusters; some clusters are dense, with more
than 30 particles in one cone. The end-to-end test is `tb_tau_trigger_top`.
It runs at the default sizes and checks the 16 reconstructed candidates and
the 8 final taus of every event against the model. It also checks latency
and the drop-free nominal rate. It counts that each mechanism happened at
least once: dropped input, truncation to 30, buffers released with unread
items, a stage held back by the next one, cleaning drops, events with fewer than 16 seeds, and empty tau slots.

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
  rtl/tau_pkg.sv tb/tau_ref_pkg.sv tb/tb_tau_trigger_top.sv \
  --top-module tb_tau_trigger_top
./obj_dir/Vtb_tau_trigger_top
```

Replace the testbench name to run a single block's test (for example
`tb_tau_merge_unit`, `tb_tau_clean`). Verilator lint (`--lint-only -Wall`)
reports only unused-signal and unused-parameter warnings.
