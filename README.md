# Iterative Retina track finder (RTL)

This is a hardware track finder for one sector of a barrel silicon tracker in a
strong solenoid field. It receives the hits of one collision event in the
sector and returns up to three charged-particle tracks. Each track has an
initial angle θ0, a curvature 0.6/Pt and the list of hits that belong to it.
It is built for the trigger of a high-luminosity collider: events are
top-quark pairs with 200 pile-up collisions, and the tracker has six barrel
layers from 20 cm to 115 cm.

The method is the *artificial Retina*. Each track hypothesis (a cell of the
(θ0, 0.6/Pt) plane) works like a receptor. It adds up a Gaussian response to
every hit, based on how far the hit lies from where that hypothesis predicts
it. Cells near a real track collect a large sum. Scanning the plane finely
would need many cells, so the search is done twice with the same small array
of M × K cells:

1. **Coarse pass.** The array covers the whole sector. Every cell whose sum
   reaches a threshold becomes a *super cell*.
2. **Fine pass.** For each super cell (at most three), the same array covers
   that super cell alone, again in M × K bins. The cell with the largest sum
   gives the track.

The default is 10 × 20 cells, so 200 cells reach the resolution of a
100 × 400 grid. Scanning that grid directly would take 40 000 cells.

## Track model and number formats

In the transverse plane, a track from the beam line with transverse momentum
Pt crosses radius r at angle θ. For r much smaller than the bending radius,
and with a 4 T field:

    θ(r) = θ0 + c · r,   c = 0.6 / Pt      (θ in crad, r in cm, Pt in GeV/c)

The design scans c = 0.6/Pt in uniform bins, not Pt itself. The sign of c is
the charge. All arithmetic is fixed point (`rtl/retina_pkg.sv`):

| quantity | type | LSB | width |
|---|---|---|---|
| hit or track angle θ, θ0 | `theta_t` | 1/64 crad | 16 signed |
| hit radius r | `r_t` | 1/16 cm | 12 unsigned |
| curvature c | `curv_t` | 2^-14 crad/cm | 16 signed |
| weight of one hit | `weight_t` | 1/255 | 8 |
| cell sum | `sum_t` | 1/255 | 13 |

With these units, c·r has an LSB of 2^-18 crad. Shifting it right by 12 bits
gives θ units, so each cell needs only one multiplier.

Scan region of one sector (the sector's θ0 edge is a run-time input):

* θ0: 10 coarse bins of 6.25 crad, covering 62.5 crad. The fine bin is
  0.625 crad. The exact sector is 2π/10 = 62.83 crad; the span is rounded so
  that fine bins are whole LSBs.
* c: 20 coarse bins of 0.0305 crad/cm, covering −0.305 to +0.305. That is
  Pt ≥ 1.97 GeV/c for both charges. The fine bin is 0.0015 crad/cm.

A cell stands for the centre of its bin.

## The calculation cell (`retina_cell`)

Each cell computes, for every hit i of the event:

    D_i = θ0_scan + c_scan · r_i − θ_i
    w_i = 255 · exp(−D_i² / 2σ²)
    Sum = Σ_i w_i

The work is split in three steps, each sized to its cost:

* **Distance.** Hits come over a broadcast bus, one per clock. The cell's single
  multiplier forms c_scan · r_i. The distance D_i (18 bits) goes into slot i of
  an 18-entry register file. The multiplier is shared over the hits so that a
  cell costs one DSP multiplier.
* **Square and exponential.** When the last hit has arrived, 18 table lookups
  (`retina_exp_lut`) turn all 18 stored distances into weights at once. The
  table has 64 entries of the Gaussian at steps of σ/16. Its address is
  |D| >> `sigma_shift`, held at 63 beyond about 4σ, so σ = 2^shift / 4 crad.
  The table is computed at elaboration by `retina_pkg::gauss_table()`: the
  exponential is a Taylor series, raised to the 16th power. No data file is
  needed.
* **Accumulate.** An adder tree sums the 18 weights.

The cell also outputs a hit mask: bit i is set when w_i ≥ 128 (|D_i| below
about 1.2σ). The winning cell's mask groups the track's hits.

Timing: if the last hit is on the bus in cycle t, `sum_valid` pulses in cycle
t + 4. The sum and mask then hold until the next evaluation. `cfg_load`
latches the region (origin, bin size, σ) and clears the stored hits.

The Gaussian width changes with the pass: σ = 4 crad in the coarse pass
(`SIGMA_SHIFT1` = 4) and 0.5 crad in the fine pass (`SIGMA_SHIFT2` = 1).

## Choosing super cells and the winner (`sorting_unit`)

A single comparator tree over the 200 sums serves both passes. Its key is
{eligible, sum}, and ties go to the lower cell index.

* **Coarse pass.** The unit latches which cells reach the threshold. It then
  lists up to three of them, strongest first, one per clock. Each listed cell
  is removed from the eligible set. If more than three reached the threshold,
  `overflow` is set and the weaker ones are dropped.
* **Fine pass.** The tree returns the cell with the largest sum, one clock
  after the sums.

Why strongest first: one track usually pushes several neighbouring coarse cells
over the threshold. θ0 and c partly compensate each other across a 20–115 cm
lever arm, so the cells lie along a valley. Taking the first three in scan
order often spent all three slots on one track's neighbours, or missed the
cell that contains the track. Strongest-first avoids most of these losses.
Duplicates, meaning two reported tracks from one particle, remain possible
and are expected from this method.

## Sequencing an event (`control_unit`)

States: `IDLE → CFG → SCAN → WAIT`. The sequence repeats `CFG → SCAN → WAIT`
once per super cell, then `OUT → DONE`.

* `CFG`: one cycle of `cfg_load`. In the coarse pass it carries the sector
  origin and the coarse bin size. For super cell s = m·K + k in the fine pass,
  it carries the origin θ0_sector + m·6.25 crad and c_min + k·0.0305, with the
  fine bin size.
* `SCAN`: reads hit slots 0…n−1 from `hit_ram`, one per clock. The RAM's data
  reaches the array one clock later, together with the delayed valid, index
  and last signals.
* `WAIT`: waits for `sorting_unit.done`. After the coarse pass it stores the
  super-cell list; with no super cell, the event ends without tracks. After
  each fine pass it stores a track: the centre of the winning fine cell, its
  sum and its hit mask.
* `OUT`: sends the tracks on a valid/ready stream (`trk_last` on the last one).
  `DONE` pulses `ev_done` with the track count and the overflow flag.

An event of 18 hits with three super cells takes 108 clocks from `ev_start` to
`ev_done`, with no back-pressure. About 29 clocks go to each pass.

## Top level (`iterative_retina_top`)

`hit_ram` → `retina_array` (M × K `retina_cell`s) → `sorting_unit`, all under
`control_unit`.

To use it:

1. Write the hits into slots 0…n−1 with `hit_wr_en/addr/data`. The data is
   `hit_t` = {r, θ}.
2. While `ev_ready` is high, pulse `ev_start` with `ev_nhits` = n. Also drive
   `cfg_sector_th0` (the sector's lower θ0 edge) and `cfg_thresh1` (the
   coarse-pass threshold).
3. Leave the hit memory alone until `ev_done`.

A full-weight hit is worth 255, so a well-measured six-hit track gives a sum
near 1530. The tests use a threshold of 1300, and 1450 for some events.

Top parameters: `M` (θ0 bins, 10), `K` (curvature bins, 20), `N_HITS` (18) and
`MAX_TRK` (3). The bin sizes, the curvature range and σ are constants in
`retina_pkg`, and `control_unit` also takes them as parameters. The sector span
is M²·`TH0_STEP2` in θ0 and K²·`C_STEP2` in c. If you change M or K, rescale the
fine steps so the span still covers the sector.

Assertions check three rules: `ev_start` only when ready, the track stream
holds still while stalled, and all cells run in lock step.

## What is not here

* **Readout link.** Results would go to a PC over IPbus, an existing
  Ethernet-based protocol. That core is not included. The `trk_*` stream and
  the `ev_done` summary are where it would connect.
* **Kalman filter.** A 4-parameter Kalman filter (θ0, Pt, cot β, z0) refines
  each track from its grouped hits. It was only evaluated in software, with no
  hardware architecture or number formats, so no RTL is given. The hit masks
  and coarse parameters this design outputs are the inputs such a filter needs.
* **Alternative scan sizes.** The smaller 6 × 8 and 8 × 10 arrays are reachable
  through `M`/`K` and the step constants, but they were not simulated.

## Departures from the reference implementation and things to know

* Uniform bins in 0.6/Pt. Another possible reading is bins uniform in Pt.
* The centre of a bin is used as its hypothesis.
* The number formats, σ values, table size, hit-grouping rule and
  super-cell ordering are all this design's own choices.
* The reference FPGA firmware needed 312 clocks per event at 200 MHz. This RTL
  needs 108 clocks. It has not been synthesized for timing: the 256-leaf
  comparator tree and the 18-input adder are each one combinational stage and
  would likely need pipelining at 200 MHz. That pipelining would add a few
  clocks per pass.
* θ0 and c are correlated over the short lever arm, so the fine-pass c is
  poorly constrained. In the end-to-end test a lone track is found within two
  fine θ0 bins and ten fine c bins of its true value in about 90% of events.
  Refining c is the purpose of the Kalman filter stage above.

## Simulation

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`. `tb/retina_ref_pkg.sv` is an independent model
of the arithmetic, and it uses the simulator's `$exp`. Example with Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/retina_pkg.sv tb/retina_ref_pkg.sv tb/tb_iterative_retina_top.sv \
        --top-module tb_iterative_retina_top
    ./obj_dir/Vtb_iterative_retina_top

| testbench | what it checks |
|---|---|
| `tb_hit_ram` | random read/write against a shadow copy, read latency, read-during-write |
| `tb_retina_cell` | 300 random regions and events: sum, hit mask, 4-cycle latency |
| `tb_retina_array` | all 200 sums and masks for coarse and fine regions |
| `tb_sorting_unit` | 0 to 5 cells over threshold (overflow), ordering, ties, done timing |
| `tb_control_unit` | hit replay, coarse and fine configurations, track fields, back-pressure |
| `tb_iterative_retina_top` | 120 generated events at the default size, compared field by field with a full model of the two-pass search |

The end-to-end test also counts the mechanisms and requires each to occur:
empty events, events with 0, 1, 2 and 3 super cells, overflow, and output
back-pressure. It checks that a full event (18 hits, 3 super cells) finishes
within 312 clocks.
