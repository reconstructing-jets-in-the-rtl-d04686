# Seeded-cone jet finder for a Level-1 trigger FPGA

This is synthesizable SystemVerilog for a seeded-cone jet finder of the kind
proposed for the second correlator layer of the CMS Phase-2 Level-1 trigger.
Once every 150 ns, an event arrives as a few hundred link words of
reconstructed particles: PUPPI candidates, each with a transverse momentum
pT and a direction (eta, phi). From these, the design builds two jet
collections, one with cone radius R = 0.4 and one with R = 0.8. Each
collection holds up to 16 jets, and the 12 leading jets of each are sent on.
The algorithm is simple enough for a latency budget of about 1 us:

1. take the particle of highest pT as the seed;
2. take every particle within distance R of the seed as a constituent;
3. the jet pT is the constituents' pT sum, and the jet direction is their
   pT-weighted mean direction;
4. correct the jet pT with a factor from a table binned in eta and pT;
5. remove the constituents from the list, then repeat from step 1.

The loop stops after 16 jets or when no particle is left. Jets come out in
order of seed pT, not jet pT, so a sorter puts each collection in pT order.

The hard part is not the arithmetic. It is the schedule.

## The loop and why it is shared

Steps 1, 2 and 5 form a loop-carried dependence: the next seed cannot be
searched for until the constituents of the current jet are gone. These steps
are built as one pipeline, `seed_cone_loop`. It has 8 register stages and
accepts a new 128-entry list on every clock cycle:

| stage | work |
|---|---|
| 1 | pT maximum within each group of 8 particles |
| 2 | maximum of the 16 group winners: the seed index |
| 3 | read the seed |
| 4 | deta and dphi of every particle to the seed (dphi wrapped at +-pi) |
| 5 | squares |
| 6 | deta^2 + dphi^2 <= R^2, for non-null particles |
| 7 | split into constituents and remainder (constituent pT set to 0) |
| 8 | end-of-pass decision |

One jet of one pass therefore takes 8 cycles. The remainder list comes back
to the pipeline input and the next iteration starts at once. Sixteen
iterations take 128 cycles: 400 ns at the 320 MHz clock this design assumes.
That clock follows from two figures: 8 cycles per iteration, and 400 ns for
16 iterations.

A single pass thus uses only one of the 8 pipeline slots. New events arrive
every 48 cycles (150 ns) but stay 128 cycles in the loop, so passes of up to
three events are in the pipeline at once. Each event is also processed twice,
once per radius. That makes up to six of the eight slots busy, without a
second copy of the hardware. `loop_controller` manages this:

- A list that returns unfinished goes straight back in, with its iteration
  count raised by one. Returning lists always win, so a pass that has
  started never waits, and its timing is fixed.
- Otherwise, if an event is waiting in its one-event holding register and a
  sorter is free, the controller starts a new pass in the empty slot: first
  the R = 0.4 pass, then the R = 0.8 pass in a later empty slot.
- Every pass carries a tag through all the pipelines: a valid bit, an 8-bit
  event number, which of the two passes it is, the iteration, the number of
  its sorter, and the cone size as R^2. Everything downstream is steered by
  this tag alone.
- The cone size of each of the two passes is a register in the controller.
  Reset sets R = 0.4 and R = 0.8, and the `cone_*` ports of the top level
  can rewrite either one. The value is copied into the tag when a pass
  starts, so a write never changes a pass that is already running. The
  first pass is still labelled `CONE_R04` and the second `CONE_R08` in the
  output header, whatever radius they were given.

A pass is finished (`out_last`) when any of these holds:

- no seed was found (the list is empty);
- the remainder after removal is empty;
- the pass has done its 16th iteration.

The last result of a pass always travels down the jet pipeline, even when no
jet was found. It tells the sorter that the collection is complete.

## Off the critical path: axis, correction, sorting

The constituents of each found jet leave the loop at stage 8. They go to
`jet_axis` (4 cycles) and then to `jet_corrections` (2 cycles). Both accept
one jet per cycle and run while the loop is already searching for the next
seed. Only the last jet of a pass adds their latency to the event's total.

- **Axis.** The pT-weighted mean of eta and phi is formed from offsets to the
  seed, not from absolute values. A cone that crosses phi = +-pi therefore
  averages correctly. The result is wrapped back into the phi range. Division
  truncates towards zero.
- **Correction.** The table has 8 |eta| bins of 128 codes and 16 pT bins of
  32 codes (8 GeV), with the last bin of each open-ended. Each factor has 12
  bits, 9 of them fractional, so 512 means 1.0. After reset every factor is
  1.0. The calibrated values are loaded through the `jec_*` write port, at
  address `eta_bin*16 + pt_bin`. The corrected pT is
  `min((pT_raw * factor) >> 9, 65535)`.
- **Sorting.** There are six `jet_sorter` instances: three events times two
  radii. A jet goes to the sorter named in its tag and is inserted in one
  cycle into a 12-entry list kept in descending pT. Equal pT keeps arrival
  order, and a jet below the 12th place is dropped. When the pass's last
  result arrives, the sorter hands its list to the output in the next cycle,
  clears itself, and tells the controller it is free.
- **Output.** `output_link` queues up to 4 finished collections. It sends
  them one jet per cycle in 12-word frames, with null jets padding the
  unused places. Every word carries the header: event number, radius and
  jet count.

## Data formats

All types are in `sc_pkg`.

| field | bits | scale |
|---|---|---|
| pT | 16, unsigned | 0.25 GeV; 0 marks a null particle |
| eta | 12, signed | pi/720 (about 0.0044) |
| phi | 11, signed | pi/720; -720..719 covers -pi..pi |

The cone radii are stored as R^2 in the same units:
(0.4*720/pi)^2 = 8404 and (0.8*720/pi)^2 = 33616. For another radius R,
write round((R*720/pi)^2); it must stay below 2^17. A particle and a jet share
the same 39-bit layout `{pt, eta, phi}`.

## Input: the deregionizer

The upstream layer sends each event over many links, region by region, with
null words between regions. `deregionizer` takes 24 lanes per cycle: 6
boards with 4 links each, within the 3 to 6 links per board of the real
system. It drops null lanes, counts the survivors with a prefix sum and
appends them behind the particles already stored. The result is a gap-free
list that fills from index 0. Particles past index 127 are dropped, and
`out_trunc` reports it. On the cycle that carries `in_last`, the finished
list goes to the controller and the store clears, so the next event can
start on the very next cycle.

## Timing of one event

With a 320 MHz clock and 48 input cycles per event, the end-to-end test
measures at most 189 cycles (590 ns) from an event's first input word to
its first output jet. The loop alone takes 8 cycles per jet, up to 128
cycles per pass. The deregionizer, axis, correction, sorter and output take
1, 4, 2, 1 and 1 cycles. The published implementation quotes 720 ns for the
same span. Its deregionizer and axis and correction stages are much longer
than the minimal ones here; the loop has the same length. It also quotes
138 ns more to send the jets out on one link. Here one collection of 12
words takes 37.5 ns, and the two collections of an event take 75 ns; the
link's own word format and serializer are not built.

## What follows the published design and what does not

Taken from the published design:

- the algorithm's five steps;
- a 128-particle list with null removal and truncation;
- 16 iterations with an 8-cycle loop at II = 1;
- one loop shared by concurrent events and by the two radii, under a
  controller that tags each pass;
- axis and correction overlapping the loop;
- separate sorting per event and radius;
- 12 jets per collection, sent serially.

Choices made for this RTL, because the published design does not give them:

- all bit widths and scales;
- the 320 MHz clock (derived, see above);
- the lane count and the one-word-per-lane input format;
- the split of the loop into its 8 stages;
- seed ties going to the lower list index;
- the `<=` in the cone test;
- seed-relative averaging and truncating division;
- the correction binning and factor format, and the writable table (the
  real factors are not published);
- the register insertion sorter and its tie order;
- the controller's priority rule, holding register and 6 sorters;
- the register interface for the two cone sizes;
- the output frame format;
- reset behaviour (synchronous, active high; it clears the valid flags and
  the stored lists).

Not included:

- the hadronic energy sums, which the published design lists among its
  modules without describing them;
- the multi-gigabit transceivers and link protocols. The top level exposes
  the decoded input lanes and the output jet words instead.

## Trust and limits

- Every block has a self-checking testbench against an independent model in
  the testbench. The end-to-end test (`tb_sc_jet_top`) runs 40 back-to-back
  events at full size. It models the whole algorithm, including packing,
  truncation, seed ties, phi wrap-around, correction and sorting, and
  compares every output word bit for bit.
- The end-to-end test also requires each of these to happen at least once:
  - a truncated event;
  - a pass stopped by the 16-jet limit;
  - a pass stopped because no particle was left;
  - an empty event;
  - an injection held back behind a returning list;
  - a collection that the sorter reorders;
  - three events in flight at once (6 sorters busy);
  - a change of the second radius from 0.8 to 0.6 while events are running.
- `tb_workloads` runs the three event classes whose multiplicities the
  study shows, 30 events each, back to back and checked word by word. They
  are pileup-only events (mean 31 particles), top-pair events (54) and
  four-top events at higher pileup (114 after truncation; 15 of 30 exceed
  128 and are cut). Every class stays at 590 ns. The spread of the counts
  within a class is assumed.
- Not verified: timing closure at 320 MHz. The single-stage 36/23-bit
  division in `jet_axis` and the 128-wide maximum search in 2 stages would
  need more pipelining, or DSP-oriented restructuring, to close timing on an
  FPGA.
- The holding register of `loop_controller` accepts a new event only when
  both passes of the previous one have started. At one event per 48 cycles
  this always holds. Faster input sets `err_ctrl_overflow` and drops the
  event.

## Files and simulation

`rtl/` holds one unit per file:

- `sc_pkg.sv`: types and constants;
- `deregionizer.sv`;
- `seed_cone_loop.sv`;
- `loop_controller.sv`;
- `jet_axis.sv`;
- `jet_corrections.sv`;
- `jet_sorter.sv`;
- `output_link.sv`;
- `sc_jet_top.sv`: the top level.

`tb/` holds one testbench per block, named `tb_<block>.sv`. It also holds
`tb_workloads.sv`, the event-class test described above. Each prints a
line `TB_RESULT checks=N failures=M` at the end.

To build and run one testbench with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
        --top-module tb_sc_jet_top rtl/sc_pkg.sv tb/tb_sc_jet_top.sv
    ./obj_dir/Vtb_sc_jet_top

`-Wno-fatal` keeps the width warnings of the testbenches' integer models
from stopping the build.

The full-size end-to-end test takes a few seconds. To change the input width
or the list size, override `NLINKS` and `N` on `sc_jet_top`. The number of
jets, the reset radii and the number of sorters are set in `sc_pkg`.
