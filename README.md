# A logic-gate network classifier as a combinational netlist

This is synthesizable SystemVerilog for an image classifier that contains no
multipliers, no weights memory and no clock. It is a *differentiable logic gate
network* (DLGN) after training: every "neuron" is one two-input Boolean gate,
wired to two outputs of the layer before it, and the class scores are simple
bit counts. Training (done elsewhere, in floating point) chooses which of the 16
possible two-input functions each neuron computes; once that choice is frozen
the network *is* a gate-level netlist, and each neuron maps to one or two
standard cells.

The design follows the one described by S. Fieldhouse and K.-T. Tang in
"Silicon Aware Neural Networks"; this RTL is an independent rendering of it,
and the sections below say where it had to fill gaps.

The configuration here is an MNIST classifier laid out as one combinational
hard macro in the SkyWater 130 nm process:

| | |
|---|---|
| input | 784 bits, one binarised pixel of a 28x28 image each |
| LogicLayers | 18, each of 4,000 two-input gates (72,000 gates) |
| GroupSum | 10 groups of 400 last-layer outputs, one popcount per class |
| output | 10 scores of 9 bits (0..400); the predicted class is the largest |
| timing | combinational; reported 23.9 ns critical path post-layout, i.e. up to 41.8 M classifications/s |

The wider layout usually used for this kind of network (6 layers of 64,000)
is hard to route on a five-metal process, which is why the macro is deep and
narrow.

## What the RTL can and cannot give you

The structure, the gate library, the cell mapping and the GroupSum adder tree
are fully described and are implemented here. **The trained network itself is
not available**: which gate each of the 72,000 neurons uses, and which two
inputs it reads, are the result of training and are not published. The RTL
therefore fills both in from a seeded hash (`dlgn_pkg::gate_of` for the gate;
`wire_stride`, `wire_offset` and `wire_pick` for the wiring). The result has
exactly the architecture, size and cell make-up of the real macro, and every
testbench checks it bit-exactly against a reference model, but it does not
classify digits; its outputs are those of a random logic network. To build a
trained model, replace `gate_of` and `wire_pick` by look-ups into the trained
tables (gate number and two source indices per neuron); nothing else changes.

## The 16 gates and their cells

Each neuron's function is identified by its truth table read as a 4-bit
number: the bits, most significant first, are the outputs for
(A,B) = 00, 01, 10, 11. So `f(A,B) = g[{~A,~B}]`, gate 1 is AND (`0001`),
gate 6 is XOR (`0110`), gate 14 is NAND (`1110`). `dlgn_pkg::gate_e` names
them. `logic_neuron` builds each from the cells of the target library, at the
lowest drive strength:

| # | function | cells | area (um^2) |
|---|---|---|---|
| 0 | 0 | TIELO | 5.713 |
| 1 | A.B | AND2X1 | 9.522 |
| 2 | A.~B | INVX1 + NOR2X1 | 13.331 |
| 3 | A | BUFX2 | 7.618 |
| 4 | ~A.B | INVX1 + NOR2X1 | 13.331 |
| 5 | B | BUFX2 | 7.618 |
| 6 | A xor B | XOR2X1 | 15.235 |
| 7 | A+B | OR2X1 | 9.522 |
| 8 | ~(A+B) | NOR2X1 | 7.618 |
| 9 | ~(A xor B) | XNOR2X1 | 15.235 |
| 10 | ~B | INVX1 | 5.713 |
| 11 | ~B+A | INVX1 + NAND2X1 | 13.331 |
| 12 | ~A | INVX1 | 5.713 |
| 13 | ~A+B | INVX1 + NAND2X1 | 13.331 |
| 14 | ~(A.B) | NAND2X1 | 7.618 |
| 15 | 1 | TIEHI | 5.713 |

The four two-cell functions put the inverter on the input that the function
inverts before the NOR/NAND: A.~B = NOR(~A, B), ~A.B = NOR(A, ~B),
~B+A = NAND(~A, B), ~A+B = NAND(A, ~B). In RTL the cells are written as
expressions with the cell name in a comment; a synthesis tool will re-map them
unless the gate-level netlist is produced by direct cell instantiation.

The areas (kept in `dlgn_pkg::AREA_NM2` in units of 0.001 um^2) matter for
training, not for the logic: the network is trained with an extra loss term,
delta times the mean over all neurons of the softmax-weighted expected cell
area, with delta = 0.01. That pushes training toward cheap gates (NAND, NOR,
inverters, ties) and cut the mean area per neuron from about 9.4 to about
6.1 um^2 for MNIST at about 0.4 points of accuracy. The random gate choice used
here is uniform over the 16 functions, so its mean area is 9.76 um^2 per
neuron; the testbenches print the total.

## Wiring

Every neuron reads exactly two signals of the previous layer (the first layer
reads pixels). In the trained network this pattern is random and fixed before
training. Here neuron `n` of layer `l` reads input slots `2n` (A) and `2n+1`
(B), and slot `s` maps to input

    src(s) = (s mod IN_W) * STRIDE_l + OFFSET_l + floor(s / IN_W)   (mod IN_W)

with `STRIDE_l` coprime to `IN_W` and both drawn from the seed and the layer
number. Within each pass over the inputs this is a permutation, so every input
feeds the same number of gates (about `2*OUT_W/IN_W`: 2 for inner layers,
about 10 per pixel in the first), and if A and B would coincide B moves to the
next input. Layers are joined without registers.

## GroupSum: popcounts from half and full adders

The last layer's 4,000 outputs are split into ten contiguous groups of 400
(group c is bits 400c .. 400c+399). Each group is counted by `popcount_tree`,
built only from half adders (`addh_cell`, the ADDHX1 cell) and full adders
(`addf_cell`, ADDFX1):

* level 0: 133 full adders, each used as a 3:2 counter on three bits; the one
  bit left over (400 = 3 x 133 + 1) becomes a 2-bit count directly;
* levels 1..8: pairs of counts are added by `ripple_adder` (a half adder at
  bit 0, full adders up the carry chain, half adders where one operand has run
  out), one bit wider per level; an odd count left over moves up unchanged.

The last adder's sum is 10 bits wide; its low 9 bits are the score (at most
400, so the top bit is always 0). Training divides the group sums by a
temperature, a constant scale that does not change which class is largest, so
the hardware keeps the raw counts. Choosing the
winning class (an argmax) is not part of the macro; its scores are its outputs.

## Files and hierarchy

    dlgn_macro                 top: pixels -> 18 x logic_layer -> group_sum
      logic_layer  (x18)       WIDTH x logic_neuron, wiring from dlgn_pkg
        logic_neuron           one gate, built per the table above
      group_sum                CLASSES x popcount_tree
        popcount_tree          full-adder leaves + levels of ripple_adder
          ripple_adder         addh_cell / addf_cell chain
    dlgn_pkg                   gate_e, areas, sizes, seeded wiring and gate choice

`rtl/` holds one module or package per file. Top-level parameters:

| parameter | default | meaning |
|---|---|---|
| `IN_BITS` | 784 | binary inputs (28x28 pixels, pixel r*28+c on bit r*28+c) |
| `LAYERS` | 18 | LogicLayers |
| `WIDTH` | 4000 | neurons per layer (must be a multiple of `CLASSES`) |
| `CLASSES` | 10 | GroupSum groups |
| `SEED` | `32'h5EED_D1C6` | selects the pseudo-random gates and wiring |

Ports: `pixels[IN_BITS-1:0]` in, `score[CLASSES-1:0][$clog2(WIDTH/CLASSES+1)-1:0]`
out. There is no clock, reset or handshake; outputs follow inputs after the
combinational delay.

## Verification

Each module has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

* `tb_logic_neuron`: all 16 gates, all four input pairs, expected values typed
  in as the truth-table strings;
* `tb_addh_cell`, `tb_addf_cell`, `tb_ripple_adder`: exhaustive;
* `tb_popcount_tree`: N = 400, 7 and 3 with zero, full, one-hot and random
  inputs;
* `tb_logic_layer`: a 784-to-4,000 first layer and a small layer, every neuron
  against a truth-table evaluation, plus the wiring rules (range, A != B, even
  use of inputs) and that all 16 gates occur;
* `tb_group_sum`: 4,000 inputs into 10 classes, and a small case;
* `tb_dlgn_macro`: end to end at 4 layers of 400, 300 synthetic images
  (random densities and digit-like strokes) against the behavioural model in
  `tb/dlgn_ref_pkg.sv`; it also requires every gate type to have seen all four
  input pairs and every class score to have changed;
* `tb_dlgn_macro_full`: the same at the full default size (18 x 4,000), with
  40 images.

No MNIST data is included, so no accuracy is measured; with pseudo-random
gates there is none to measure. Because the macro is combinational the
testbenches check results one time step after the inputs change; the 23.9 ns
delay is a property of the layout and is not modelled.

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal \
      rtl/dlgn_pkg.sv tb/dlgn_ref_pkg.sv -y rtl -y tb \
      --top-module tb_dlgn_macro tb/tb_dlgn_macro.sv -Mdir obj -o sim
    ./obj/sim

The full-size build elaborates 72,000 gate instances; expect a few minutes of
C++ compilation.

## Changing the design

* Size: override `LAYERS`, `WIDTH`, `IN_BITS` and `CLASSES` on `dlgn_macro`
  (`WIDTH` a multiple of `CLASSES`); the score width follows. The reference
  model in `tb/dlgn_ref_pkg.sv` takes the same four numbers.
* A different random network: change `SEED`.
* A trained network: make `dlgn_pkg::gate_of(seed, layer, n)` return neuron
  n's trained gate number and `wire_pick` its two source indices (for
  example from constant tables in the package). Keep A and B distinct; the
  layer testbench checks that. The reference model picks the change up
  through `wire_src`, which calls `wire_pick`.
* Pipelining: none is described; registers could be added between layers in
  `dlgn_macro` without touching the layers.

## Where this departs from, or adds to, the source design

* Gates and wiring are pseudo-random stand-ins for the unpublished trained
  ones (see above).
* The input is taken as 784 already-binarised pixels; how the analogue pixel
  values are thresholded is not specified and is left outside the macro.
* GroupSum's grouping (contiguous), the popcount tree's shape and the adders'
  ripple-carry structure are choices made here; only the cell types (half and
  full adders) and the "binary adder tree" are given.
* The number of classes (10) is taken from MNIST.
* No argmax is included.
* Physical design (placement, routing, timing, power) and the standard-cell
  library are not part of the RTL.
* Some published figures disagree with each other. The headline energy is
  2.0 nJ per inference (83.88 mW at 41.8 M inferences/s, and the 69 pJ 16 nm
  estimate is 2.0 nJ x 0.034), while the comparison table lists 352 pJ and a
  15 ns latency against the 23.9 ns critical path; the accuracy is given as
  97%, 97.49% and 97.66% in different places. The area table's totals divided
  by its average area per neuron give 320,000 neurons for MNIST and 1,280,000
  for CIFAR-10, not the 72,000 of the 18 x 4,000 macro; those models do not
  fit this configuration, and their layer shapes are not given.
