# Endcap muon Sector Logic: coincidence datapath with a re-used look-up-table pair

The Level-1 endcap muon trigger picks muon candidates from the three stations of the
Thin-Gap-Chamber "Big Wheel" (BW), which sits outside the toroid magnet. Two kinds of
background fill its output: charged particles from the beam pipe that leave a muon-like track in
the Big Wheel but never cross the detectors inside the field, and low-momentum muons whose bent
tracks pass as high-momentum ones. Both are removed by asking for a coincidence with the inner
station, the New Small Wheel (NSW). A Big Wheel seed is kept only if an NSW segment lies where a
muon of the claimed momentum would have crossed (position matching) and, optionally, points in a
compatible direction (angle matching).

The hard part is the hardware budget. Up to **16** NSW segments may fall in the window of one
seed, each must go through a large look-up table (LUT), and the whole inner coincidence has **two
bunch crossings** (2 x 25 ns) of latency. Sixteen copies of the tables would not fit in the
FPGA, and doing the lookups one after another would take sixteen times too long. This design
takes the middle way. It uses **two identical LUTs**, each clocked at **320 MHz**, eight times
the 40 MHz bunch-crossing clock, so each LUT handles eight segments per bunch crossing. A
two-step selection then keeps the highest transverse momentum (pT).

This repository holds synthesizable SystemVerilog for that datapath: the Big Wheel pT table, the
LUT pair with its serializers and selectors, and the two-clock hand-over. Each block has a
self-checking testbench.

## Datapath

```
 seed_i (roi, dR, dphi) --> bw_coin: BW table (roi,dR,dphi)->pT ----+ seed (roi, pT, valid)
 nsw_i[0:15]  ----------->  40 MHz register ------------------------+ segments
                                                                    |
                           inner_coin                               v
   +--------------------------------------------------------------------------+
   |  phase_gen: numbers the 8 fast cycles of each bunch crossing              |
   |                                                                          |
   |  lut_lane 0 (segments 0..7)                                              |
   |   cand_serializer --> position table (roi,deta,dphi)   -+-> min* --> pt_recalc -+
   |     8-to-1, 1/fast  --> angle table    (roi,deta,dtheta)-+   (highest of 8)   |
   |                                                                             +--> selector --> pt_o, match_o
   |  lut_lane 1 (segments 8..15): identical, same table contents -----------------+   (higher of 2,
   +--------------------------------------------------------------------------+    back to 40 MHz)
                                                       * min only when angle_en_i = 1
 l1_o = (seed valid and matched, roi, final pT);  bw_pt_o = BW-only pT, aligned
```

Files, one module or package each, in `rtl/`:

| file | role |
|---|---|
| `nsl_pkg.sv` | widths, record types (`bw_seed_t`, `bw_cand_t`, `nsw_cand_t`, `lut_wr_t`), table select enum, `pt_max`/`pt_min` |
| `lut_ram.sv` | block-RAM table: write port on the configuration clock, registered read on the processing clock |
| `bw_coin.sv` | Big Wheel local coincidence: (seed position, dR, dphi) -> pT |
| `phase_gen.sv` | finds the bunch-crossing boundary in the 320 MHz domain, phase 0..7 |
| `cand_serializer.sv` | the 8-to-1 hand-over of a group of segments to one LUT |
| `pt_recalc.sv` | first selection step: highest pT among one LUT's eight results |
| `selector.sv` | second selection step: higher of the two lanes, registered back on clk40 |
| `lut_lane.sv` | one LUT of the pair: serializer, position and angle tables, pT re-calc |
| `inner_coin.sv` | the LUT pair, phase generator and selector |
| `nsl_top.sv` | top: BW table followed by the inner coincidence, for one seed per bunch crossing |

## Big Wheel local coincidence (`bw_coin`)

A hit in the outermost Big Wheel station is the seed. The line from the interaction point to that
hit is the path of an infinitely stiff track. The deviations from it in the two inner Big Wheel
stations, dR and dphi, measure the bending and therefore pT. The field is not uniform, so the
relation depends on where the seed is, and the table is addressed by `{roi, dR, dphi}`
(8 + 5 + 4 bits, giving 2^17 four-bit words). The read is a registered block-RAM read: a seed
sampled on a clk40 edge has its pT on the output right after that edge. An invalid seed gives
pT 0.

The seed fields are taken as already decoded. The Big Wheel data arrive over G-Link, but their
word format is not part of this design.

## Inner coincidence: one LUT pair, eight lookups per bunch crossing

This is the core of the design and the part that needs the most care.

### Clocks

`clk40` and `clk320` must come from the same clock manager and be phase-locked. Every clk40
rising edge must also be a clk320 rising edge. All crossings between the two domains are then
single-cycle paths between related clocks (3.125 ns of setup budget), not asynchronous crossings,
so the design has no synchronizers. Each domain has its own synchronous, active-low reset.

`phase_gen` finds the bunch-crossing boundary from the fast side. A flip-flop on clk40 toggles
every bunch crossing, and a clk320 flip-flop keeps a copy of it. The two differ only during the
first fast cycle after a clk40 edge, which is phase 0. A counter numbers the next seven cycles
1..7. An assertion checks that each new bunch crossing begins just as the counter wraps. If the
clocks are not locked at a ratio of exactly 8, the simulation stops.

### One lane, cycle by cycle

The seed and its segments are launched by 40 MHz registers on edge E0 and held until E1. Fast
edges are counted f0 = E0, f1, ..., f8 = E1, ..., f16 = E2.

| fast edge | what happens (segment k = 0..7 of the lane's group) |
|---|---|
| f(k+1) | `cand_serializer` registers segment k (the one whose index equals the phase), with the seed's position and the first/last tags |
| f(k+2) | both tables are read at `{roi, deta, dphi}` and `{roi, deta, dtheta}`; the tags follow one cycle behind |
| f(k+3) | `pt_recalc` folds the result into the running maximum; segment 0 restarts it |
| f10 | segment 7 is folded in; the group maximum and "any valid segment" are stored and held until f18 |
| f11 | `selector` registers the higher of the two lane results in the 320 MHz domain |
| f16 = E2 | the 40 MHz output register takes it: `pt_o`, `match_o` |

Segment 7 is registered on f8, the fast edge that coincides with E1. Like any flip-flop on that
edge, it still sees the old group, so a new seed and new segments can be launched every bunch
crossing. The fixed latency is therefore **two clk40 edges from launch to result**, with a new
seed accepted every bunch crossing. This matches the published 320 MHz simulation trace of the
scheme: inputs launched on one clk40 edge, table outputs 1,2,3,4,8,7,6,5 on consecutive fast
cycles, the running maximum rising to 8, and the final pT of 8 appearing two clk40 edges later.
`tb_fig12_identity_lut` replays that trace.

### What a candidate's pT means

- A segment counts only if it and its seed are valid. An invalid segment contributes pT 0.
- With `angle_en_i = 0` the candidate's pT is the position table's output.
- With `angle_en_i = 1` it is the lower of the position and angle outputs. A segment must then
  satisfy both matchings to keep a high pT.
- The final pT is the highest over all up to 16 segments. The BW pT is **not** a ceiling:
  in the published trace a seed with BW pT 7 ends with final pT 8.
- A valid seed with no valid segment gets `match_o = 0`, and `nsl_top` drops it
  (`l1_o.valid = 0`). This is how fake seeds from the beam pipe are rejected.

`angle_en_i` is a configuration bit. Change it only between runs: the two seeds in flight when
it flips may be evaluated in a mix of both modes.

### Table contents

All the physics lives in the contents of the tables. The RTL provides only the structure:

| table | address (msb..lsb) | words x bits | copies |
|---|---|---|---|
| BW local coincidence | roi[7:0], dR[4:0], dphi[3:0] | 2^17 x 4 | 1 |
| position matching | roi[7:0], deta[5:0], dphi[2:0] | 2^17 x 4 | 2 (one per lane) |
| angle matching | roi[7:0], deta[5:0], dtheta[3:0] | 2^18 x 4 | 2 (one per lane) |

That is 3.5 Mbit in total, about 100 of the 795 36-Kbit block RAMs of a Kintex-7 XC7K410T. The
tables are loaded through `lut_wr_i` on clk40 (`we`, `sel` = `LUT_BW`/`LUT_POS`/`LUT_ANG`,
`addr`, `data`). A position or angle write goes to both lanes, which keeps the pair identical, as
the scheme needs. The tables are not cleared by reset. A table you have not loaded returns
whatever the RAM holds.

## Top-level interface (`nsl_top`)

| port | dir | type | meaning |
|---|---|---|---|
| `clk40`, `rst40_n` | in | | bunch-crossing clock, sync active-low reset |
| `clk320`, `rst320_n` | in | | phase-locked 8x clock, sync active-low reset |
| `seed_i` | in | `bw_seed_t` | valid, roi, dR, dphi of the Big Wheel seed |
| `nsw_i[16]` | in | `nsw_cand_t` | valid, deta, dphi, dtheta of each NSW segment relative to the seed |
| `angle_en_i` | in | | 0 = position matching, 1 = position and angle matching |
| `lut_wr_i` | in | `lut_wr_t` | table loading |
| `l1_o` | out | `bw_cand_t` | final candidate: valid (seed valid and matched), roi, final pT |
| `bw_pt_o` | out | `pt_t` | the BW-only pT of the same seed, for comparison |

Inputs are sampled on a clk40 edge E(k), and `l1_o` changes on E(k+2). The BW table's registered
read happens on the sampling edge itself. Its output register is the launch register of the inner
coincidence, so the BW lookup adds no bunch crossing of its own.

## What is outside this RTL

The surrounding board provides the data paths into and out of this datapath. They enter and leave
as top-level ports:

- the G-Link receiver chips and the decoding of Big Wheel hits into seeds;
- the multi-gigabit receivers and the decoding of NSW segments;
- the coincidences with the other inner detectors that cover 1.0 < |eta| < 1.3 (TGC EI, RPC
  BIS7/8, Tile calorimeter);
- the output link to the central trigger;
- the VME/CPLD configuration path that would drive `lut_wr_i`;
- flash, Ethernet readout and the reference-clock jitter cleaner.

The 320 MHz clock is expected from an FPGA clock manager.

## This design's own choices

These points are not fixed by the scheme and were chosen here. Change them freely:

- **Widths:** the 4-bit pT code and the 6-bit d-eta follow the published trace. The 8-bit seed
  position, 5-bit dR, 4-bit BW dphi, 3-bit NSW dphi and 4-bit dtheta are guesses. They are
  parameters in `nsl_pkg`.
- **Combining the matchings:** the position and angle results are combined by taking the lower
  pT code.
- **Lane split:** segments 0..7 go to lane 0 and 8..15 to lane 1.
- **Registers:** the register placement inside the two bunch crossings, and the phase-detection
  circuit.
- **Validity:** valid bits on seeds and segments, and the rule that a seed with no segment is
  rejected.
- **Scope:** one seed per bunch crossing. A real sector processes several seeds, and the number
  per sector is not fixed here.
- **Table loading:** a plain write port on clk40 instead of a bus protocol.

## Simulating

The testbenches are self-checking. Each ends by printing `TB_RESULT checks=N failures=M`. They
need a simulator that handles timing (two phase-locked clocks from `tb/tb_clkgen.sv`). With
Verilator 5:

```
verilator --binary --timing --assert --top-module tb_nsl_top \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/nsl_pkg.sv tb/tb_model_pkg.sv tb/tb_nsl_top.sv
./obj_dir/Vtb_nsl_top
```

Replace `tb_nsl_top` with any testbench below. `tb_model_pkg` holds the reference table formulas
and a reference candidate-pT function. The expected results are computed from it, not from the
RTL.

| testbench | what it shows |
|---|---|
| `tb_lut_ram` | load and read-back of 3000 words, one-cycle read latency, overwrite |
| `tb_phase_gen` | phase 0..7 in every bunch crossing, `first_o` only in phase 0, lock after reset |
| `tb_cand_serializer` | segment k presented one fast cycle after phase k, with tags |
| `tb_pt_recalc` | running and group maximum, groups without a valid segment |
| `tb_selector` | higher lane wins, 40 MHz hand-over |
| `tb_bw_coin` | BW table lookups for two seed positions, invalid seeds |
| `tb_lut_lane` | one lane against the model in both matching modes |
| `tb_inner_coin` | the pair at 16 segments, exact two-clk40 latency, each lane winning, one-lane-only groups, rejection |
| `tb_fig12_identity_lut` | replay of the published single-lane trace with an identity position table |
| `tb_nsl_top` | end to end at default sizes: 1000 seeds, both modes. Counts BW lookups, rejections, invalid seeds, 16-segment seeds, wins of each lane, pT lowered by angle matching, and mode switches, and fails if any never happened |

The full top-level test runs in well under a second of host time at the default sizes.

## How far to trust it

- The datapath follows the published two-LUT, 8x-clock scheme, the two-step highest-pT
  selection, and the two-bunch-crossing latency.
- It reproduces the published single-lane trace value for value.
- It has not been placed and routed. Whether the 320 MHz table reads meet timing on a given
  FPGA is untested.
- The table contents, which decide the trigger's physics performance, are not included. The
  testbenches load arbitrary test patterns.
