# Low-power scan with transition-blocking pseudo-input multiplexers

In a full-scan circuit every flip-flop becomes a scan cell. While a test vector
is shifted in, each cell changes on almost every clock. Those changes drive the
combinational logic, which switches for nothing: the values in the cells mean
nothing until the vector is complete. On older processes this wasted
*dynamic* power matters most. On deep-submicron processes the *leakage* of that
logic during the long shift phase matters too, and leakage depends on the
values sitting on each gate's inputs.

This design handles both with one small change to the scan structure.

* A 2:1 multiplexer is put between some scan cells and the logic input
  (the *pseudo-input*) they drive. Its select is the chain's existing **Shift
  Enable**. Its other input is tied to a constant, either Vcc or Gnd.
* In normal mode and in the capture clock the multiplexer passes the cell
  value, so the circuit works as before.
* While shifting, the logic sees the constant instead of the rippling cell.
* Multiplexers are placed only on pseudo-inputs off the critical paths, so the
  circuit's maximum frequency does not change. Pseudo-inputs on a critical path
  stay wired straight to their cells, and their shift transitions still reach
  the logic.
* The constants, together with the values the tester holds on the primary
  inputs (PIs) during shift, form the *control pattern*. They are chosen so
  that each transition from an unmuxed cell meets a controlling value at the
  first gates it reaches. A 0 on a NAND input or a 1 on a NOR input stops it
  there. Among the patterns that do this, the one with the lowest leakage is
  chosen.

No control pin is added and no long wires are routed. Test time and fault
coverage are unchanged: intermediate shift values are never observed.

## What the RTL contains

| module | role |
|---|---|
| `scan_cell` | mux-D scan flip-flop: `q <= shift_en ? si : d` |
| `pseudo_input_mux` | the added cell: `ppi = shift_en ? CONST_VAL : cell_q` |
| `scan_chain` | `N_SCAN` scan cells in one serial chain |
| `lps_scan_top` | chain plus muxes placed by `MUX_MASK`, with constants `MUX_CONST` |

The combinational logic is not part of the RTL. `lps_scan_top` brings it out
on ports:

* `cut_pi`: primary inputs, passed straight from `pi`.
* `cut_ppi`: pseudo-inputs.
* `cut_ppo`: the next-state values, captured into the cells.

Any full-scan netlist can be attached there.

```
 pi ───────────────────────────────► cut_pi  ┐
                                             │ combinational
 scan_in ─► cell0 ─► cell1 ─► ... ─► cellN-1 ─► scan_out
             │        │                │     │    logic
             │      [mux]            [mux]   │
             ▼        ▼                ▼     │
           cut_ppi[0] cut_ppi[1] ... cut_ppi[N-1] ┘
 cut_ppo[i] ──► d of cell i          (mux select = shift_en)
```

### Parameters of `lps_scan_top`

| parameter | default | meaning |
|---|---|---|
| `N_SCAN` | 211 | number of scan cells |
| `N_PI` | 36 | number of primary inputs |
| `MUX_MASK` | all ones | bit *i* = 1: pseudo-input *i* gets a mux |
| `MUX_CONST` | all zeros | constant forced on muxed pseudo-input *i* during shift |

The default sizes are those of ISCAS89 s9234, the largest benchmark the
technique was evaluated on. The counts are from the published benchmark suite.
The default mask and constants only make the module usable on its own. For a
real circuit, set all four parameters to that circuit's values, as described
below.

## Choosing MUX_MASK and MUX_CONST

These are design-time results, computed in software. They are not hardware,
and no RTL is given for them.

1. **Mux placement (`MUX_MASK`).** Time the circuit. Add a mux to each
   pseudo-input in turn, and keep it only if the critical-path delay stays
   the same.
2. **Control pattern (`MUX_CONST` and the PI values).**
   * Start with the set of nets that can carry transitions: the unmuxed
     pseudo-inputs. A transition passes freely through inverters, XOR/XNOR
     and fanout points. It passes a NAND/NOR only while every other input is
     non-controlling.
   * Take the reached gate with the largest output capacitance. Try to justify
     a controlling value on one of its free inputs, working back to the
     controlled inputs in the manner of PODEM.
   * Repeat until no reached gate is left.
   * Each choice, between the inputs of a gate and between backtrace paths, is
     guided by *leakage observability*. This is the difference in the
     circuit's average leakage when a net is 1 rather than 0. To set a 1,
     pick the input with the lowest observability; to set a 0, the highest.
   * Controlled inputs still unassigned at the end are filled with the
     lowest-leakage values found by random simulation.
3. **Gate pin reordering.** With the pattern applied, every gate's input
   state during shift is known. A NAND2 leaks very differently in its two
   mixed states (45 nm figures: 00 = 78 nA, 01 = 73 nA, 10 = 264 nA,
   11 = 408 nA). Swapping its pins so that it sits in 01 rather than 10 saves
   leakage without changing the logic. This is a netlist edit of the
   combinational logic, so it is outside this RTL.

The PI half of the pattern is not produced on chip: the tester drives it on
the primary-input pins during shift. This design adds no logic on the PIs.

## Timing

* **Shift:** `shift_en = 1`. Each clock moves the chain one cell toward
  `scan_out`. A bit entered on `scan_in` comes out `N_SCAN` clocks later.
  Muxed pseudo-inputs sit at their constants for the whole shift.
* **Capture:** `shift_en = 0` for one clock. The pseudo-inputs switch back to
  the cell values combinationally as soon as `shift_en` falls. The capture
  edge then loads `cut_ppo` into every cell.
* Like ordinary scan, the structure adds no clocks to a test.
* The mux adds one mux delay on the muxed pseudo-input paths. By
  construction, those paths are not critical.

The cells reset asynchronously to 0 on `rst_n` low. This reset is a choice of
this implementation; the technique does not need it.

## Testbenches

Each testbench prints `TB_RESULT checks=N failures=M`. Each has a cycle
watchdog.

| testbench | what it checks |
|---|---|
| `scan_cell_tb` | random d/si/shift_en against a reference register; async reset |
| `pseudo_input_mux_tb` | both constants over all inputs; no pseudo-input change while shifting |
| `scan_chain_tb` | shift in, capture, shift out at 13 cells; scan-in to scan-out latency of N clocks |
| `lps_scan_top_tb` | end to end at 8 cells, 4 PIs; proposed structure against traditional scan |
| `lps_scan_top_full_tb` | one complete test at the default size (211 cells, 36 PIs) |

All testbenches use `cut_model` (in `tb/`) as the combinational logic. It is
a small two-level NAND/NOR network invented for testing, not a benchmark
circuit. It also adds up the leakage of its NAND2 gates from the 45 nm table
above.

In `lps_scan_top_tb`:

* Pseudo-inputs 0, 3 and 6 have no mux.
* Every other pseudo-input is forced to 1, and the PIs are held at 0.
* So each transition from cells 0, 3 and 6 hits a controlling value at the
  first level of gates.

The test checks:

* the captured responses, shifted out, against responses computed by the
  testbench;
* that no gate output of the logic toggles during shift;
* that plain full scan driving the same logic does toggle;
* that the proposed structure's scan-mode NAND2 leakage is lower.

A typical run reports 0 against 554 gate toggles and 1174 nA against 1770 nA
mean NAND2 leakage. It also counts shift clocks, capture clocks, forced
constants, blocked transitions and mode switches, and fails if any count is
zero.

To simulate with Verilator, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module lps_scan_top_tb tb/lps_scan_top_tb.sv
./obj_dir/Vlps_scan_top_tb
```

## Departures and limits

* **The scan-cell style is this design's choice.** The technique needs only
  a scan cell that receives Shift Enable. The mux-D cell and its reset are
  this implementation's choices.
* **One scan chain.** Splitting into several chains would not change the
  muxes.
* **No benchmark netlists.** No ISCAS89 netlist is included, so the published
  power figures cannot be reproduced by simulating this RTL. Reproducing them
  also needs the transistor-level leakage and capacitance models.
* **Pattern search is not included.** The pattern search and pin reordering
  are design-time software and netlist edits. They are described above but
  not included.
* **The counts are toggles, not power.** The "dynamic power" seen in the
  testbench is a gate-output toggle count. The leakage is a sum over NAND2
  gates only. Both are indicators, not power numbers.
