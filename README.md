# Fast Track Trigger: digital chain in SystemVerilog

This is a model of the H1 Fast Track Trigger (FTT) at the register-transfer level. The FTT is the track trigger of the H1 central jet chamber. The model starts at the FADC samples of the trigger-layer wires. It produces the L1 trigger elements at each bunch crossing and, after an L1 accept, the L2 trigger elements. In between are the refined track segments, the linked tracks and the interface to the fitting DSPs.

The parts outside the digital chain are not built:

- the analogue adapter cards and the FADC chips;
- the LVDS serial links (parallel buses take their place);
- the DSP track fit, which is a port pair on the top level;
- the L3 CPU farm.

## Structure

```
FADC samples (150 cells x 3 wires x 2 ends)
  -> fem_cell x150 ------------------------- L1 bins ---> l1_linker -> L1 multiplicities, t0, trigger bits
       hit_finder x3                                      (16 kappa x 120 phi grid)
       drift_shift_register x3 (hold on L1 keep)
       segment_cam (coarse patterns)
       segment_refiner (cam_encoder + LUTs)
  -> refined segments
  -> stream_merger x30 (front-end modules, 5 cells)
  -> stream_merger x5  (Merger Cards, 6 modules)
  -> stream_merger     (linker input)
  -> l2_linker (40 kappa x 640 phi, best 3x3 window in a 5x5 search)
  -> load_balancer -> 4 DSP ports ... fit results -> stream_merger -> l2_decision -> L2 trigger bits
```

| File | Function |
|---|---|
| `rtl/ftt_pkg.sv` | Sizes and types: segment, linked track, fit result, configuration write |
| `rtl/hit_finder.sv` | Pulse search on A+B and charge-division z over four samples |
| `rtl/drift_shift_register.sv` | 80 MHz hit image with a parallel z register; coarse 20 MHz image; hold |
| `rtl/segment_cam.sv` | One coarse pattern per L1 bin; a bin fires when every used row has a hit in its mask |
| `rtl/cam_encoder.sv` | Hands out the matching entries one by one, lowest first |
| `rtl/segment_refiner.sv` | Fine hit offsets per row, a validation LUT and a kappa-phi LUT, z from the register |
| `rtl/fem_cell.sv` | One drift cell: three wires, the CAM and the refiner |
| `rtl/stream_merger.sv` | Round-robin merge of N valid/ready streams |
| `rtl/l1_linker.sv` | Layer coincidence in 3x3 windows, three pt classes, t0 from the peak of the count |
| `rtl/l2_linker.sv` | Seeds, 25 parallel neighbourhood searches, best window, nearest segments, overflow count |
| `rtl/load_balancer.sv` | Four DSP queues; a new track goes to the emptiest |
| `rtl/l2_decision.sv` | Multiplicity, count above a pt cut, scalar pt sum and a too-many-tracks bit |
| `rtl/ftt_top.sv` | The 150 cells, the merge tree, the hold/refine control and the L2 bookkeeping |

## Numbers

| Quantity | Value | Origin |
|---|---|---|
| Trigger layers, wires per cell | 4, 3 | paper |
| Cells per layer | 30, 30, 30, 60 | own choice, from the chamber geometry |
| FADC | 8 bit at 80 MHz | paper |
| Shift register depth | 88 samples (1.1 us drift time) | derived from the paper's drift time |
| Clocks per bunch crossing | 8 (96 ns) | derived from the 80 MHz sampling |
| L1 grid | 16 kappa x 120 phi; 64 bins per cell (32 in layer 4) | own choice |
| L2 grid | 40 kappa x 640 phi | paper |
| Segments per layer at L2 | 64 | own choice |
| DSPs | 4 | paper |
| Tracks per event | 48 | paper |

## Timing

There is one clock. A bunch crossing is 8 clocks, and `bc_out` strobes in its last clock.

- A hit enters the shift register 5 clocks after its threshold crossing: 4 samples of charge integration and one register.
- The CAM compares every 4 clocks (20 MHz). The L1 linker takes the bins at each crossing strobe.
- t0 comes one crossing later, because it needs the count of the next crossing. It is then flagged for the crossing before.
- `l1_keep` freezes all shift registers on the next clock and starts the refinement in every cell.
- A cell refines in at most 4 clocks per matching pattern plus 3.
- Once every cell is done and the merge tree is empty, the L2 linker receives the end of the event and the registers run again.
- In simulation, 48 tracks link in at most 222 clocks. The paper's budget for this step is 5.2 us.
- The decision comes one clock after the last fit result returns.

## Design choices not taken from the paper

- **Hit time.** The hit time is the first sample above threshold. The paper's 2-3 ns interpolation is not built, so `hit_finder` covers only part of what the hit finding should do.
- **CAM matching.** A pattern is a coarse-bit mask on each of the three rows. The rows cover the cell and its two neighbours. An entry matches when each row with a non-empty mask has a hit under it.
- **Refinement.** The refinement takes the lowest fine hit in each row's mask. Its 2-bit offset, three times over, addresses the LUTs together with the entry number.
- **Hold timing.** The L1 keep must arrive while the event's hits are still in the shift registers. The paper does not describe the delay between the L1 decision and the hold.
- **L1 phi wrap.** The L1 window wraps around in phi, and the L1 count needs at least two layers.
- **L2 linking.** Seeds are taken from layer 1 outward, and segments already used are skipped. Among the nine 3x3 windows inside the 5x5 search, the one with the most layers wins, and ties go to the centre window. In each layer, the segment nearest the centre is taken.
- **Buffer overflow.** A layer buffer holds 64 segments. Segments beyond that are counted in `l2_seg_overflow` and dropped.
- **Fit results.** The DSP fit result is a pt in MeV, a charge, a phi, a z0 and a good-fit flag. Failed fits are left out of the L2 sums.
- **Configuration.** One write bus reaches every cell. It carries a cell number, a target (CAM, validation LUT or kappa-phi LUT), an address and the data.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints a final `TB_RESULT checks=N failures=M` line and has a watchdog.

- **`tb_ftt_top`** runs the whole design at its full size with no parameter overrides.
  - Four tracks cross all four layers, and the patterns and LUTs are loaded over the configuration bus.
  - It checks:
    - the L1 multiplicities and t0;
    - the hold and the release;
    - the linked tracks, with the right kappa, phi and charge-division z in all 12 wires;
    - the sharing over the DSPs;
    - the L2 multiplicity, pt sum and trigger bits. One fit fails on purpose.
  - A second event fills all 64 patterns of two cells with the same hits. That sends 128 segments to a 64-entry layer buffer, so 64 are dropped and counted, and the L2 decision comes out empty.
  - It fails if any of these never happened: L1 coincidence, t0, hold, merge contention, linking, load sharing, DSP back-pressure, a failed fit, the L2 decision, or a segment overflow.
- **`tb_l2_linker`** recomputes the linking with a plain reference model on random events. Some events have 48 tracks, and one event overflows a buffer.
- The other testbenches use reference models of their own blocks, with random stimulus where it makes sense.

## Simulating

Each testbench is a top of its own. It needs the package first, and then the RTL and testbench folders as libraries:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
          --top-module tb_ftt_top rtl/ftt_pkg.sv tb/tb_ftt_top.sv
./obj_dir/Vtb_ftt_top
```

- The full-size top takes several minutes to compile and about two seconds to run.
- The block testbenches compile in under a minute each and run in seconds.

## Not built

- FADC and analogue cards.
- LVDS channel links.
- DSP fitting.
- The L3 receiver cards, the L3 master and the L3 CPU farm.
