# Raw-signal genome mapping with memristor hashing and approximate search

A nanopore sequencer does not output letters. It outputs an ionic current,
sampled a few thousand times per second, that steps between levels as DNA
moves through the pore. The usual way is to basecall the current into
nucleotides and then map the nucleotides against a reference genome. This
design skips basecalling and maps the current itself. It cuts the current
into events and groups consecutive events into short seeds. Each seed is
hashed into a 128-bit vector that keeps the seed's neighbourhood, so similar
currents give nearby bit vectors. All stored reference hashes are then
searched at once for near matches, and every match votes for the genome
location that holds it. The location with the most votes, under one of three
decision rules, is the answer.

The original hardware does the two heavy steps in memristor arrays:
- Hashing is a random projection computed as crossbar currents.
- The search is a content-addressable memory (CAM) whose match line adds
  up the mismatching bits as current.

Here both are written as cycle-level behavioural models with the same
interface the analog arrays would have. Event detection, filtering, seed
forming, vote counting, the decision rules and the write-and-verify
programming sequencer are ordinary synthesizable RTL.

## Data path

```
samples ─► event_detector ─► event_filter ─► seed_former ─► lsh_hasher ─► approx_cam ─► vote_counter ─► vote_decision ─► res_*
 (16 b)     t-test cuts,      drop "stay"     10 events,     4 × (10×64)    5 loc × 64    one vote per    threshold /
            event means       events          stride 1       crossbars      rows × 128 b  location/seed   argmax / ratio
                                                  ▲
reference events (store_mode=1) ──────────────────┘  (hash written into the next CAM row)
```

`raw_signal_mapper` is the top. It takes one raw sample per cycle on a
valid/ready stream (`smp_valid`, `smp_data`, `smp_last`, `smp_ready`). It
gives one result per read on `res_valid`, `res_kind`, `res_loc`,
`res_loc2` and `res_votes`.

The search path and the store path share the seed former and the hasher.
This matters: the reference rows and the read seeds must pass through the
same random projection, or their hashes could never match.

## Stages

**Event detection** (`event_detector`). Two windows of `WIN` = 6 samples
slide over the signal side by side. For every boundary position the block
computes the squared two-sample t statistic of the two windows with
integers only. The formula is
`t² = 16·WIN·(SB−SA)² / (WIN·(QA+QB) − SA² − SB²)`, where S is a window sum
and Q a sum of squares. A boundary goes where t² is above `t2_threshold`
and is a local maximum. Each event's value is the integer mean of its
samples. When `smp_last` arrives, the detector flushes its window for `WIN`
cycles, holding `smp_ready` low, and closes the last event. The 16·
scaling keeps four fractional bits, so a threshold of 1024 means t > 8.

**Stay filter** (`event_filter`). Detection tuned for sensitivity splits
one true level into several events ("stays"). Event *i* of a read is kept
only if it differs from event *i−1* by more than `diff_threshold` (3 pA,
48 LSB). The comparison is always with the previous *detected* event, not
the previous kept one. The first event of a read has no predecessor and is
never kept. This removes most stays at the cost of some skipped events.

**Seeds** (`seed_former`). Every kept event, once ten have arrived in the
current read, produces a seed of the last ten events. Element 0 is the
oldest. The window restarts at each end of read, so a read of *n* kept
events gives *n*−9 seeds.

**Hashing** (`lsh_hasher`). This stage is the least obvious. Each seed
element drives one row of four 10×64 conductance arrays. Column *c* of
array *k* collects the current I = Σ (aᵣ − bias)·G[r][c]. A comparator
between columns 2j and 2j+1 outputs 1 when the odd column carries more
current. Four arrays of 32 comparators give 128 bits.

Comparing two columns is the same as projecting onto their difference, and
that difference is a zero-mean random vector. It is zero-mean even when
every conductance is positive, as long as the conductances are randomised
identically, e.g. by a few identical RESET pulses on the whole array. So
each bit is the sign of a random-hyperplane projection. Seeds at a small
angle from each other agree on most bits, so Hamming distance between
hashes tracks the distance between seeds.

The `bias` input centres the currents before the projection. Raw currents
are all positive (60–120 pA). Without centring, every seed points nearly
the same way and the bits say little. Conductances are loaded through
`g_we`/`g_arr`/`g_row`/`g_col`/`g_data` as 8-bit codes of 1/16 µS. The
hash is registered one cycle after the seed.

**Approximate search** (`approx_cam`). Each stored row holds one 128-bit
reference hash. A row matches a key when fewer than `cam_threshold` bits
differ. In the analog array, every mismatch turns on a low-resistance
device, the match line adds up their currents, and a sense amplifier
compares the sum with a reference. Rows are grouped into `N_LOC` = 5
locations of `ROWS_PER_LOC` = 64 rows. A location matches when any of its
rows matches, so a seed gives at most one vote per location. Rows never
written (or cleared by `cam_clr`) never match. The result is registered one
cycle after the key.

**Votes** (`vote_counter`). One 16-bit saturating counter per location.
At the end of a read, the counts, including the search that arrives with
the end marker, go to the decision unit in the same cycle, and the counters
restart from zero. `votes_saturated` reports a counter that hit its
maximum.

**Decision** (`vote_decision`). The unit scans the counts one location per
cycle and keeps the three largest; on ties the lower index wins. Then it
applies the rule chosen by `dec_mode`:

| mode | use | result |
|---|---|---|
| `DEC_THRESHOLD` | presence of one target (e.g. a virus) | single, if max votes > `vote_threshold` (7) |
| `DEC_ARGMAX` | classification among stored species | location with the most votes (none if no votes) |
| `DEC_RATIO` | read mapping over a genome split into locations | single if max ≥ 2 × second and max > `min_votes`; else *between* the top two if they are neighbouring locations, max > `min_votes` and their sum > 2 × third; else none |

The *between* case handles reads that straddle a location boundary: their
seeds split between two neighbouring locations.

## Storing references

With `store_mode` = 1, expected reference currents enter on
`ref_valid`/`ref_event`/`ref_last`. These currents are computed off-chip
from a k-mer current table. A pulse on `ref_start` with `ref_loc` sets the
CAM write pointer to `ref_loc × ROWS_PER_LOC`. Each seed hash is then
written into the next row. The reference skips the detector and the stay
filter, because its events are already ideal. A 78-base fragment gives 73
events (6-mers) and so 64 seeds: exactly one location of 64 rows. Change
`store_mode` only while the pipeline is empty.

## Programming the arrays

`write_verify_ctrl` is the sequencer that would set the conductances of a
physical 64×64 array. The analog side (pulse drivers, read-out amplifier,
converter) is not part of the RTL. The sequencer talks to it through a
small port:
- `dev_op` is idle, read, set or reset.
- `dev_all` selects a whole-array pulse.
- `dev_row`/`dev_col` address one cell and `dev_amp` gives the pulse
  amplitude code.
- The array answers each read with `rd_valid`/`rd_g`, the conductance in µS.

A run:

1. Optionally, `init_resets` whole-array RESET pulses of `INIT_PULSE_CYC`
   cycles at `init_amp`. This step randomises the LSH arrays; the
   original uses five 20 ns pulses.
2. Sweeps over all cells not yet verified. The sequencer reads a cell:
   - Above `target_g + tolerance`: a RESET pulse whose amplitude rises by
     `reset_amp_step` with each sweep.
   - Below `target_g − tolerance`: a SET pulse at `set_amp`.
   - Inside the band: the cell is marked done and not visited again.
3. Stop when every cell is done (`all_ok`) or after `max_iter` sweeps.

Pulses last `PULSE_CYC` = 100 cycles, which is 1 µs at 100 MHz. The CAM
uses ±5 µS around 0 or 150 µS. The LSH arrays use a 0 µS target with
±15 µS after the reset pulses. `iter` and `n_pulses` report the effort
spent.

## Number formats and sizes

| quantity | format |
|---|---|
| currents (samples, events, `diff_threshold`, `lsh_bias`) | unsigned 16 bit, 1/16 pA |
| LSH conductance | unsigned 8 bit, 1/16 µS (0–15.9 µS) |
| programmed conductance (`target_g`, `rd_g`, `tolerance`) | unsigned 8 bit, 1 µS |
| votes | unsigned 16 bit, saturating |

Top-level parameters and defaults:
- `WIN` = 6
- `M` = 10
- `LSH_COLS` = 64 and `LSH_ARR` = 4, giving 128-bit hashes
- `N_LOC` = 5 and `ROWS_PER_LOC` = 64
- `PROG_ROWS` = `PROG_COLS` = 64
- `PULSE_CYC` = 100 and `INIT_PULSE_CYC` = 2

A read is a stream of any length that ends with `smp_last`. About
4 000 samples (one second of sequencing at 4 kHz) are enough for reliable
mapping, so a host may cut reads there by asserting `smp_last` early. The
design processes one sample per clock. At 4 kHz per pore, one instance is
therefore idle most of the time. It keeps the state of one read only, so
it does not interleave pores.

Capacity: 320 rows hold the 78-base virus fragment, or five 78-base species
references. A whole 30 kb viral genome would need about 30 000 rows, e.g.
75 locations of 400 rows. The RTL takes that as parameters, but simulation
time and the combinational model of the CAM grow with it.

## Timing

One sample per cycle enters the detector. After the detector, an event
passes one register each in the filter, the seed former, the hasher and
the CAM, then the vote snapshot and the `N_LOC`-cycle scan. `res_valid` rises
`WIN + N_LOC + 8` cycles after the last sample of a read: 19 cycles at the
defaults. The end-to-end tests check this number. After each read
`smp_ready` is low for `WIN` cycles, and the next read can start right
after.

## Departures and own choices

The design follows the original in these points:
- the order of the stages
- the stay rule with 3 pA
- ten-event seeds with stride 1
- the odd-versus-even comparator
- 128 bits from four 10×64 arrays
- a 64×256 CAM array per location (128 bits, two devices per bit)
- "below threshold" matching
- one vote per location per seed
- the three decision rules and the vote threshold of seven
- the write-and-verify rule with rising RESET amplitude and 1 µs pulses
- five whole-array reset pulses

These are choices of this design:
- the t-test window length, statistic and peak rule
- all number formats and widths
- the `lsh_bias` centring input
- the bit order of the hash
- the row pointer for storing
- applying `min_votes` to the *between* case
- the sequential top-three scan
- the 100 MHz clock used to turn pulse widths into cycles
- the sweep order of the programmer

The analog parts have no RTL here:
- memristor devices
- sample-and-hold, transimpedance amplifiers and converters
- DACs
- CAM precharge and sense amplifiers

The hasher and the CAM model what those parts compute, not how they
compute it. Device noise is not modelled in the search path.

## Testbenches

Each block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line:
- `tb_event_detector`: noiseless and noisy steps; event means, end flag,
  flush length.
- `tb_event_filter`: random streams against the keep rule.
- `tb_seed_former`: seed contents, short reads, restart at read end.
- `tb_lsh_hasher`: each bit against an independent evaluation of the
  projection.
- `tb_approx_cam`: keys with a known number of flipped bits, at several
  thresholds.
- `tb_vote_counter`: sums per read, saturation with a narrow counter.
- `tb_vote_decision`: all three rules, ties, latency.
- `tb_write_verify_ctrl`: convergence of a small array, using the
  behavioural cell model `tb/memristor_array_model.sv`.

`tb_raw_signal_mapper` runs the whole design with an 8×8 programming
array. `tb_raw_signal_mapper_full` runs the same test with every parameter
at its default, in about four minutes. Both share
`tb/tb_raw_signal_mapper_body.svh`, and both:
- program a checkerboard (CAM-style) and a reset-randomised (LSH-style)
  array and check every cell ends in band
- store five synthetic species and classify reads by argmax
- detect a "virus" reference against random reads by threshold
- map reads over a 329-event synthetic genome in ratio mode, including
  reads that straddle two locations

They count every mechanism (store, search, mode switch, event boundary,
stay drop, input stall, single/between/none result, init/SET/RESET pulse)
and fail if one never occurs.

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -I. rtl/rsa_pkg.sv rtl/event_detector.sv \
  rtl/event_filter.sv rtl/seed_former.sv rtl/lsh_hasher.sv rtl/approx_cam.sv \
  rtl/vote_counter.sv rtl/vote_decision.sv rtl/write_verify_ctrl.sv \
  rtl/raw_signal_mapper.sv tb/memristor_array_model.sv tb/tb_raw_signal_mapper.sv \
  --top-module tb_raw_signal_mapper
obj_dir/Vtb_raw_signal_mapper
```

The reference currents in the tests are synthetic random levels, not real
k-mer currents. The reads are those levels with sample noise and random dwell
times. The vote margins therefore say nothing about
accuracy on real sequencing data.
