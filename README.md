# Endcap muon trigger logic: NSW coincidence and TGC track reconstruction

The ATLAS endcap muon trigger has to decide, for every 25 ns bunch crossing,
whether a muon above a transverse-momentum (pT) threshold went through the
endcap. The first trigger level has a fixed latency budget. Within it, the
Sector Logic FPGA combines chamber hits into a track and gives that track a
pT. This repository holds synthesizable SystemVerilog for two generations of
that logic:

* **NSW coincidence (Run 3).** A muon candidate from the TGC Big Wheel
  (TGC-BW) has a region of interest (RoI) and a coarse pT. Its pT is refined
  with up to 16 track segments from the New Small Wheel (NSW), which sits
  inside the magnetic field. Each NSW track gives a position difference
  (dη, dφ) to the Big Wheel candidate and an angle dθ. Table look-ups turn
  these into a refined pT, and the best of the 16 tracks wins. The answer
  must be ready two LHC clocks after the inputs arrive.
* **TGC track reconstruction (HL-LHC).** The Sector Logic receives every TGC
  wire hit of the three stations M1, M2 and M3. It works out where the muon
  crossed each station and looks the combination up in a pattern list. The
  list returns a track segment (ΔΘ, R in M3, pT threshold, quality flag).

Both engines are instantiated side by side in `endcap_sl_top`. They have
separate clocks, resets and ports, and share no logic. In a real system they
run on different boards in different eras. They sit under one top level here
only so that both can be elaborated and tested as one design.

## Run 3: pT refinement with 16 NSW tracks in two LHC clocks

One table per NSW track would need 16 copies of each table. One table read
16 times at 40 MHz would take 16 clocks. The design takes the middle path:

```
                 +-- Track Coincidence 0 (tracks 0..7) --+
 TGC-BW RoI, pT -+                                        +--> pT Selection --> pT, valid, track no.
 16 NSW tracks --+-- Track Coincidence 1 (tracks 8..15) -+      (40 MHz)
```

Each Track Coincidence module runs at 320 MHz, eight ticks per LHC clock. It
handles eight tracks one after another through a single set of tables:

1. **`nsw_track_selector`** captures the eight tracks, the RoI and the
   Big Wheel pT on the tick marked by `bc0`. It then emits one track per
   tick, tagged with its track number and first/last flags.
2. **`matching_lut`** is used twice:
   * the position table, addressed by {RoI, dη, dφ} (15 bits);
   * the angle table, addressed by {RoI, dη, dθ} (16 bits).

   Each gives a pT code after one registered read.
3. **`pt_merger`** is a third table, addressed by {Big Wheel pT, position
   pT, angle pT}. It combines the three codes into the refined pT. All
   physics lives in table contents, so this logic only routes and times the
   look-ups. A candidate without a valid NSW track leaves with valid = 0.
4. **`pt_selection`** receives the two modules' candidates in lockstep, one
   pair per tick. It keeps the highest pT seen since the first tick of the
   crossing. Ties keep the earlier candidate: lower tick first, then module 0
   before module 1. On the last tick it latches the winner. It hands the
   winner to the 40 MHz side on the LHC edge two clocks after the sampling
   edge.

Latency, counted in 320 MHz edges after the sampling edge E0: track *i*
leaves the selector at E*i*. It reaches the table outputs at E*i*+1 and
leaves the merger at E*i*+2. The last track's candidate is ready after E9,
and the result appears on LHC edge +2 (E16). This leaves six ticks of slack.
A new crossing is accepted on every LHC clock.

Table contents are loaded through one configuration port (`cfg_we`,
`cfg_tbl`, `cfg_addr`, `cfg_data`). `cfg_tbl` selects the table, and the
same write goes into both modules. The tables power up as all-zero.

Field widths (RoI 8, pT 4, dη 4, dφ 3, dθ 4) are set in `emtrig_pkg`. They
are this design's choice, as no widths are given for them. Changing them
resizes every table automatically.

## HL-LHC: from wire hits to track segments

### Units and Subunits

The endcap is cut into **Units**: triangular regions that contain the
trajectories of muons down to about 4 GeV. A Unit takes:

* 32 wire channels per layer from the three M1 layers;
* 16 channels per layer from the two M2 layers;
* 8 channels per layer from the two M3 layers.

Each Unit is split into four **Subunits**, each with two M3 channels per
layer and its own pattern-list memory. `tgc_track_reco` holds `N_UNITS_P`
Units, 92 by default. Each Unit is a `tgc_unit`.

### Position IDs (`station_coin`)

The layers of a station are staggered by a fraction of a channel. The set of
channels hit across the layers therefore pins a crossing to a *fine
position*: 96 in M1 (3 × 32), 32 in M2 and 4 per Subunit in M3.
`station_coin` evaluates one coincidence type. It fires at fine position *k*
when **exactly** REQ of the covering channels are hit:

* M1 has the types 3/3, 2/3 and 1/3.
* M2 and M3 have the types 2/2 and 1/2.

A position that has all layers hit does not also count as 2/3.

`station_coin` then keeps the first N_OUT firing positions in priority order:

* M1 and M2 keep two IDs each, closest to the Unit centre first.
* M3 keeps one ID per Subunit, smallest η first.

Bus layout and channel arithmetic are an assumption of this design. It
matches the input bus widths 100, 35 and 7:

* Layer 0 carries N+2 bits: the Unit's N channels plus one neighbour on each
  side, which are not used.
* Every other layer carries N+1 bits.
* Layer 0 covers fine position *k* with channel *k*/L+1. Layer *l* covers it
  with channel (*k*+*l*)/L.

This arithmetic is isolated in the function `bit_of` and can be changed there.

The M1 and M2 IDs are shared by the four Subunits. M3 is evaluated per
Subunit.

### Pattern addresses (`ram_addr_gen`)

A pattern-list address is 12 bits: {M1 ID 5 b, M2 ID 5 b, M3 ID 2 b}. Not
every mix of coincidence types is allowed. The eight accepted patterns, in
priority order, are:

| pattern | M1  | M2  | M3  |
|---------|-----|-----|-----|
| 7/7     | 3/3 | 2/2 | 2/2 |
| 6/7 A   | 2/3 | 2/2 | 2/2 |
| 6/7 B   | 3/3 | 1/2 | 2/2 |
| 6/7 C   | 3/3 | 2/2 | 1/2 |
| 5/7 A   | 2/3 | 1/2 | 2/2 |
| 5/7 B   | 2/3 | 2/2 | 1/2 |
| 5/7 C   | 3/3 | 1/2 | 1/2 |
| 5/7 D   | 1/3 | 2/2 | 2/2 |

With two M1 IDs, two M2 IDs and one M3 ID per type, a pattern yields up to
four addresses, and all patterns up to 32. Within a pattern, addresses are
ordered by M1 ID and then M2 ID, larger fine position (smaller η) first. A
priority compactor keeps the first eight. The rest are dropped, and this
overflow is a normal case that the tests exercise.

**M1 window.** M1 has 96 fine positions but only 5 address bits. This design
lets Subunit *s* use the 32-position window starting at 0, 21, 42 or 64 for
*s* = 0..3 (`m1_window_start`). M1 IDs outside the window are ignored by that
Subunit. This is the most important interpretation in the design. If the
real mapping differs, only `m1_window_start` and the ID subtraction in
`ram_addr_gen` change.

### Segment read-out (`segment_extractor`)

Each Subunit has a 4096 × 18-bit true-dual-port memory. It is meant to map
onto one UltraRAM and uses 18 of its 72 bits. A segment is:

* flag, 2 bits;
* R in M3, 4 bits;
* ΔΘ, 8 bits;
* pT threshold, 4 bits.

Both ports read one address each per 160 MHz tick, so all eight addresses of
a crossing are served in the four ticks of a bunch crossing. Port B doubles
as the configuration write port. Writes are only allowed while no read uses
that port, which an assertion checks. Memories power up as zero.

### Timing of a Unit

All Units run on one 160 MHz clock with `bc0` marking the tick aligned with
the LHC clock. Counting edges after the sampling edge E0:

| edge       | what happens |
|------------|--------------|
| E0         | wire hits captured |
| E1         | Position IDs registered (all coincidence types) |
| E2         | pattern list built and captured; addresses 0, 1 out |
| E3..E5     | addresses 2..7 out, two per edge |
| E3..E6     | segment pairs 0..3 out (`seg_first` on pair 0) |

The last segment leaves 6 ticks (37.5 ns) after sampling, against a budget of
20 ticks (0.125 µs) for the whole reconstruction. A new crossing is accepted
every four ticks.

## Interfaces

`endcap_sl_top` has two groups of ports.

* **NSW side:**
  * `clk320`, `clk40` (phase-aligned), `rst320`;
  * `bc0_320`, one 320 MHz tick wide on the edge that coincides with an LHC
    edge;
  * inputs `bw_roi`, `bw_pt`, `nsw_trk[16]` (`nsw_track_t`: valid, dη, dφ,
    dθ);
  * outputs `nsw_pt_out`, `nsw_valid_out`, `nsw_idx_out` in the 40 MHz
    domain;
  * table writes `nsw_cfg_*`.
* **TGC side:**
  * `clk160`, `rst160`, `bc0_160`;
  * per Unit the buses `wire_m1` (100 b), `wire_m2` (35 b) and `wire_m3[4]`
    (7 b);
  * outputs `seg_out[unit][sub][2]`, `seg_vld[unit][sub]` (one bit per lane)
    and `seg_first`;
  * memory writes `tgc_cfg_we/unit/sub/addr/data`.

Resets are synchronous and active high. Inputs need only be valid at the
`bc0` edge.

Not included:

* the Big Wheel coincidence that produces the candidate;
* the NSW and TGC link receivers and decoders;
* the merging of segments across Units and Subunits;
* the MDT-based refinement;
* board control (VME/CPLD, flash, IPMC, MPSoC).

These would connect at the ports above.

## How far it is tested

Every module has a self-checking testbench in `tb/` with its own reference
model (`tb_ref_pkg`). Tables are filled with hash functions of the address,
so every read can be predicted. Stimulus is random: muons as aligned hits
across layers, plus efficiency losses and noise. Crossings run back to back,
and every result is checked on the exact clock edge at which it must appear.
Each testbench prints `TB_RESULT checks=… failures=…`.

* `tb_endcap_sl_top` runs both engines at once, with 3 Units. It counts and
  requires:
  * winners from either NSW module, crossings with no NSW track, and pT ties;
  * each of the eight patterns;
  * dropped addresses beyond eight;
  * M1 positions outside a Subunit window;
  * empty and full lists.
* `tb_endcap_sl_full` is the same test on the top at its default size (92
  Units). Tables are loaded in three Units, and the others must return zero
  segments with correct valid flags.

All pass.

The reference model is written from the same reading of the algorithm as the
RTL. The tests therefore show that the RTL does what is described here, not
that the interpretations above match the real firmware.

Simulating with Verilator (version 5 or later, with `--timing`):

```
verilator --binary --timing --assert --top-module tb_endcap_sl_top \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/emtrig_pkg.sv tb/tb_ref_pkg.sv \
  tb/tb_endcap_sl_top.sv
./obj_dir/Vtb_endcap_sl_top
```

The same command works for any other testbench in `tb/`. The full-size test
takes a few minutes to compile and well under a minute to run.

## Where this design departs from, or adds to, the description it follows

* **Field widths.** The NSW-side field widths and the segment field split
  other than the 18-bit total are choices.
* **Station fine positions.** Channel-to-fine-position mapping, bus layout
  and centre-first tie breaking are assumed.
* **M1 window.** The 32-position M1 window per Subunit is this design's way
  of fitting 96 M1 positions into a 5-bit field.
* **Address order.** Ordering within a pattern (larger position first, M1
  before M2) is an assumption.
* **NSW ties.** The first track wins a pT tie.
* **Fixed timing.** The exact latencies are this design's. Both meet the
  stated budgets with margin.
* **Table contents.** The pattern lists and pT tables are not provided,
  because they come from simulation of the detector. The hardware is tested
  with synthetic contents.
* **Synthesis at full size.** Coarse synthesis of the full 92-Unit top is
  slow (over ten minutes). Individual modules synthesize quickly.
