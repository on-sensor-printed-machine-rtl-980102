# Bespoke-ADC unary decision-tree classifier for printed electronics

A printed sensor tag that has to classify its own readings (food spoilage,
wound state, a gesture) has almost no power: a printed energy harvester gives
about 2 mW, and printed transistors are huge and slow. In a conventional
printed decision tree the part that costs the most is not the tree but the
analog-to-digital converters in front of it. This design removes most of
that cost by building converter and tree together for one trained model:

* each sensor voltage is digitised by a **flash ADC without its encoder**, so
  it delivers the comparator outputs themselves, a *thermometer* (unary)
  code;
* because the tree's thresholds are fixed at fabrication, every comparison
  `I op C` of the tree becomes **one thermometer digit of `I`**, possibly
  inverted, and no magnitude comparator is left in the tree;
* consequently each ADC only needs **the comparators whose digits some split
  reads** (splits that read the same digit share one comparator), and an
  input the tree never compares needs **no ADC at all**;
* what remains of the tree is **two-level AND-OR logic** over those few
  digits.

The RTL here builds this whole classifier from a single parameter, the
trained tree. It follows the architecture of *On-sensor Printed Machine
Learning Classification via Bespoke ADC and Decision Tree Co-Design*
(Armeniakos et al.). The ADC-aware training procedure of that work, which
chooses the tree, is software and is not part of this RTL.

## The one rule: a comparison is a wire

Let an input be quantised to `N` bits (here `N = 4`, levels 0..15) and
presented as the thermometer code `U[1..2^N-1]`, where `U[j] = 1` exactly when
the level is at least `j`. The code is monotone: if `U[k] = 1` then every
`U[j]` with `j <= k` is 1. For a constant threshold `C` (in LSBs):

| split      | digit read | split is true when |
|------------|-----------:|--------------------|
| `I >= C`   | `C`        | `U[C] = 1`         |
| `I <  C`   | `C`        | `U[C] = 0`         |
| `I >  C`   | `C+1`      | `U[C+1] = 1`       |
| `I <= C`   | `C+1`      | `U[C+1] = 0`       |

Digit 0 does not exist and is read as constant 1 (`I >= 0` always holds);
digit `2^N` does not exist either and is read as constant 0 (`I > 15` never
holds). Those two end cases need no comparator. The table is implemented by
`dt_pkg::cmp_digit` and `dt_pkg::cmp_sense`.

A path from the root to a leaf is then an AND of such literals, and a class
output is the OR of the paths that end in leaves of that class. For a
well-formed tree exactly one path is true for any input, so exactly one class
line is high.

## The example tree

The default build is the paper's illustration of the idea: four inputs
`I1..I4`, four labels `A..D`, three splits.

```
                 I1 < [3] ?
            true /        \ false
        I4 < [2] ?        I2 < [6] ?
       true/   \false     true/   \false
        A       C          D       B
```

The bracketed numbers are the unary digits the figure prints (`I1[3]`,
`I4[2]`, `I2[6]`). The resulting logic is

```
A = !I1[3] & !I4[2]      B = I1[3] & I2[6]
C = !I1[3] &  I4[2]      D = I1[3] & !I2[6]
```

and the converters shrink to three one-comparator ADCs (digit 3 of `I1`,
digit 6 of `I2`, digit 2 of `I4`) and nothing for `I3`. In this build the
digits are used directly as thresholds in LSBs of a 4-bit input (for
example `I1 < 3/16`). The figure's caption gives different number formats
for the same tree (it speaks of Q0.4 yet maps 0.75 to 6, and its 0.375 and
0.5 do not map to 3 and 2 in one format). The RTL follows the printed digit
indices, not the decimal labels.

## Bespoke flash ADC

A conventional `N`-bit flash ADC is a resistor ladder between 0 V and
`VREF`, a bank of `2^N-1` comparators comparing the input with the ladder
taps, and a priority encoder that turns the thermometer code into binary.
`bespoke_flash_adc` models the bespoke version:

* the ladder stays (it is only resistors); comparator `j` sees the tap
  `(j - 1/2) * VREF / 2^N`, so that the digits are the round-to-nearest
  quantisation of `vin`;
* only the comparators flagged in the `RETAIN` mask are placed;
* there is no encoder: output `ud[i]` is the `i`-th retained digit, in
  ascending digit order.

Its default is the paper's 4-output example: a 3-bit ADC keeping digits 1, 2,
4 and 7. According to the paper's SPICE results, ADC area grows linearly
with the number of comparators kept, while power also depends on *which*
are kept: low digits sit on low taps and draw less. This model carries
none of these analog properties. It is an ideal, functional stand-in so
that the digital tree can be simulated from sensor voltages. The model has
no offset or noise, and its comparator delay `T_PD` defaults to 0.

## How the build follows the tree

Everything is decided at elaboration from `NODES`:

1. **Comparator sets.** `printed_dt_classifier` scans the splits of each
   input `f` and sets bit `d` of that input's `RETAIN` mask for every digit
   `d = cmp_digit(op, C)` with `1 <= d <= 2^N-1`. If the mask is empty, the
   input gets no converter and its `vin` port is left unread. Otherwise one
   `bespoke_flash_adc` is placed and its outputs are put back at their
   thermometer positions. Positions that are not generated read as 0, and no
   split reads them.
2. **Split literals.** `unary_dt` turns each split into `therm[f][d] ==
   sense`, or into a constant for the two range ends.
3. **Product terms.** A parent table is built in one pass over the splits.
   Then, for every leaf, a constant function walks up to the root and
   records which splits lie on the path (`CARE`) and which way the path
   leaves each of them (`DIR`). The leaf's term is
   `&(~CARE | ~(split_true ^ DIR))`: the AND of its path literals.
4. **Sums.** Label `c` is the OR of the terms of all leaves whose label is `c`.

An assertion in `unary_dt` checks that exactly one leaf term is high.

### Writing a tree

A tree is a packed array `dt_node_t [0:NUM_NODES-1]`, node 0 being the root.
Build the entries with `dt_split(feature, op, threshold, child_true,
child_false)` and `dt_leaf(label)`, as `dt_pkg::EX_TREE` does. Thresholds are
in LSBs of the input (0..2^N-1), features and labels are 0-based, and every
node except the root must be the child of exactly one split. The record's
fields limit a tree to 256 inputs, 65536 nodes, 256 classes and
`RES_BITS <= 7`.

## Interfaces and timing

| module | ports | kind |
|---|---|---|
| `printed_dt_classifier` | `input real vin[NUM_FEATURES]`, `output logic [NUM_CLASSES-1:0] label` | top; contains analog models |
| `unary_dt` | `input logic [NUM_FEATURES-1:0][2^RES_BITS-1:1] therm`, `output logic [NUM_CLASSES-1:0] label` | synthesizable |
| `bespoke_flash_adc` | `input real vin`, `output logic [NUM_UD-1:0] ud` | behavioural model |
| `flash_comparator` | `input real vin, vref`, `output logic out` | behavioural model |
| `dt_pkg` | types `cmp_op_e`, `dt_node_t`; `cmp_digit`, `cmp_sense`, `dt_split`, `dt_leaf`; `EX_TREE` | package |

There is no clock, reset or handshake. The classifier is a single
combinational evaluation: the label follows the sensor voltages after the
comparator delay. The paper's circuits are evaluated at 20 Hz, so a new
classification per 50 ms period is the intended use, and the end-to-end
testbench samples at that rate. Because the ADC models use `real` values,
`printed_dt_classifier` is for simulation. For synthesis, use `unary_dt`.
For the example tree it reduces to a dozen gates.

Parameters of the top: `RES_BITS` (4), `VREF` (1.0 V), `T_PD` (0),
`NUM_FEATURES` (4), `NUM_CLASSES` (4), `NUM_NODES` (7), `NODES` (example tree).

## Sizes the evaluated datasets need

The paper evaluates eight sensor datasets with trees of depth up to 8 on
4-bit inputs. The trained trees are not published, only their size. As
built by default, the classifier holds only the example tree; a dataset
needs a rebuild with its own `NODES`:

| dataset | comparisons | inputs compared | classes* |
|---|---:|---:|---:|
| Whitewine | 207 | 11 | 7 |
| Cardio | 85 | 19 | 3 |
| Arrhythmia | 39 | 21 | 16 |
| Balance-Scale | 15 | 4 | 3 |
| Vertebral-3C | 7 | 5 | 3 |
| Seeds | 23 | 5 | 3 |
| Vertebral-2C | 7 | 5 | 2 |
| Pendigits | 215 | 16 | 10 |

\*Class counts are those of the public datasets; the paper does not list them.

`tb/tb_dataset_trees.sv` builds one classifier per row with a synthetic
tree of that size, shaped as a heap so that depth stays at 8 or less, with
pseudo-random inputs, comparisons and thresholds. It checks 300 random
sensor vectors on each against a software walk of the same tree. Verilator
elaborates all eight in well under a minute.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_flash_comparator` | random and near-equal voltage pairs; equality gives 0; output lags by `T_PD` on a second instance |
| `tb_bespoke_flash_adc` | default 3-bit/4-digit ADC, full 15-comparator 4-bit bank, and a 2-digit ADC, against round-to-nearest quantisation, over every code and out-of-range voltages |
| `tb_unary_dt` | the example tree against its truth table, with the digits it does not read scrambled; a 15-node tree using all four comparisons and both range ends against an integer tree walk; every label and reachable leaf occurs |
| `tb_printed_dt_classifier` | the default top end to end at 20 Hz sampling: random and threshold-edge sensor levels, one comparator per used ADC, no sensitivity to `I3`, saturation outside 0..1 V; each label, the `I3` sweep and the out-of-range case must occur |
| `tb_shared_digits` | a tree where two splits read the same digit (one shared comparator) and one input is compared at two digits (two comparators on one ADC), checked for ADC sizes and for all 256 level pairs |
| `tb_dataset_trees` (with `dt_workload_run`) | the eight dataset-sized synthetic trees described above |

To run one with Verilator 5 from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -y rtl -y tb rtl/dt_pkg.sv tb/tb_printed_dt_classifier.sv \
  --top-module tb_printed_dt_classifier -Mdir obj && ./obj/Vtb_printed_dt_classifier
```

All of them finish in well under a second of simulation time. The largest
build (`tb_dataset_trees`) takes about 40 s to compile.

## Where this RTL departs from, or adds to, the paper

* The comparator and ADC are ideal behavioural models. The paper's ADCs are
  EGFET circuits characterised in SPICE, and their area and power are not
  reproduced.
* Comparator taps at `(j - 1/2)` LSB are this design's reading of "the
  midpoint of each segment".
* Comparisons against the range ends become constants. The paper does not
  discuss that case.
* The example tree uses the digit indices printed in the paper's figure as
  4-bit thresholds. The figure's decimal values and caption disagree with
  each other (see above).
* Outputs are one line per class. No class-index encoder, no registers and
  no clock are added, since the paper describes none.
* The tree arrives as a parameter record array. This format is this design's
  own. The paper's trees are hardwired, which is what elaboration of this
  parameter produces.
* The ADC-aware training, the printed sensors and the energy harvester are
  not part of the RTL.
