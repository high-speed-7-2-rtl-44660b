# A (7,2) compressor with sorting-network carry generation

A (7,2) compressor adds seven bits of equal weight, together with four
carry bits from the neighbouring lower column, and produces one bit of the
same weight plus five bits of the next weight. Placed once per column, it
reduces seven rows of a partial-product array to two rows in one step. Its
delay is set by how many gate stages the slowest input-to-sum path takes.
The best earlier designs of this kind need 12 stages.

This design gets the count down to 11 gate stages. The trick is that
the *carry* of three bits is cheap when the bits are already ordered: if
X >= Y >= Z, the carry is just Y. Ordering bits is cheap too: for single bits,
max is OR and min is AND. Two such stages of a 4-input sorting network put
the largest bit first and the smallest last. The first adder's carry-out is
therefore ready after only two gate stages. That lets the fastest carry-ins
from the lower column enter the column's adder tree one level earlier.

The RTL here contains the compressor itself and the circuit in which it is
evaluated. That circuit sums a 7-row by 8-column binary array: compressors
reduce the array to two rows, and a Kogge-Stone adder merges the two rows.
All of it is purely combinational.

## Building blocks

### Two-bit sorter (`sorter2`)

`out1 = in1 | in2` is the larger bit and `out2 = in1 & in2` the smaller.
This takes one gate stage.

### Half sorter (`half_sort`)

A 4-input sorting network sorts with three columns of comparators:
(A,B),(C,D); then (A,C),(B,D); then (B,C). The last column only orders the two
middle values. After the first two columns the top output is already the
maximum and the bottom output the minimum. `half_sort` builds only those two
columns. So it costs two gate stages, and its outputs 1 and 2 hold the middle
values in unknown order. It keeps the number of ones. Index 0 is the largest
value.

### Special full adder (`sfa`)

For ordered inputs only 000, 100, 110 and 111 can occur. Their sums are
0, 1, 2 and 3, so

    carry = Y
    sum   = X & (~Y | Z)

The carry needs no gate at all. The sum needs two stages. The compressor feeds
the SFA with half-sorter outputs 0, 1 and 3, which always form an ordered
triple. For unordered inputs the SFA does not add correctly, and its
testbench only drives ordered inputs.

### Adjusted full adder (`afa`)

This is an ordinary full adder, restructured so that its third input C arrives
last:

    h1    = A | B
    h2_n  = ~(A & B)
    carry = (C & h1) | ~h2_n        -- = C(A+B) + AB
    p     = h1 & h2_n               -- = A ^ B
    sum   = C ? ~p : p              -- 2:1 mux, C is the select

If the mux counts as two stages, A and B reach `sum` in four stages and `carry`
in three. C reaches both in two. C may therefore arrive two stages after A and
B without delaying either output. Every adjusted adder in the compressor
takes its latest signal on C.

## The compressor column (`compressor72`)

Stage numbers in brackets are gate stages from the column's primary inputs.
The Ci inputs are the matching Co outputs of the column below, so they carry
the same numbers.

    in_bits[4..6]          -> FA2 (C = in_bits[6])   -> Co2 [3],  S2 [4]
    in_bits[0..3]          -> half_sort [2]
        outputs 0, 1, 3    -> SFA (X, Y, Z)          -> Co1 [2],  S1 [4]
        output 2, Ci1 [2], Ci2 [3]
                           -> FA3 (C = Ci2)          -> Co3 [5],  S3 [6]
    S2 [4], S1 [4], Ci3 [5]-> FA4 (C = Ci3)          -> Co4 [7],  S4 [8]
    S3 [6], Ci4 [7], S4 [8]-> FA5 (C = S4)           -> Carry [10], Sum [11]

Each carry-in arrives exactly when its adder needs it: Co_k of a column and
Ci_k of the next one sit at the same stage. So the chain of columns adds no
delay beyond the 11 stages of a single column. Co1 and Co2 depend on no
carry-in at all, and Co3 only on Ci1 and Ci2. There is therefore no ripple
across columns. The testbench checks this dependence property exactly.

The value is conserved:

    ones(in_bits) + ones(ci) = sum + 2 * (carry + ones(co))

The four carries travel as one packed struct, `c72_pkg::carry4_t`, whose
fields are `c1`..`c4`.

The stage numbers are a property of this gate structure under a
unit-delay model, with a mux counted as two stages and an inverted input
counted as free. The RTL keeps the structure, but a synthesis tool is free to
restructure it. Reaching the intended depth in silicon needs the usual care:
keep the hierarchy, or constrain the paths.

## Array and merge adder

`compressor_array` places one compressor per column of a `COLS`-wide,
7-row array. All rows are aligned at weight 1. Column 0 receives zero
carry-ins, and the Co outputs of each column drive the Ci inputs of the next.
The top array column still emits carries. Three more compressors with
all-zero inputs therefore sit above it (columns `COLS`..`COLS+2`) and absorb
them. The total 7 x (2^COLS - 1) always fits in `OUT_W = COLS + 3` bits, so
nothing leaves the last column. An immediate assertion checks this.

The outputs are

* `sum_row[i]`, the Sum of column i;
* `carry_row[i+1]`, the Carry of column i, with `carry_row[0] = 0`.

`ks_adder` is a radix-2 Kogge-Stone prefix adder. Bit i first forms g = a&b
and p = a^b. Then ceil(log2 W) levels follow. At level l, position i combines
its (G,P) with that of position i - 2^l. Finally s = p ^ (G shifted up by one).

`array72_top` connects the two parts: `total = rows[0] + ... + rows[6]`.

| parameter | default | meaning |
|-----------|---------|---------|
| `COLS`    | 8       | width of each of the 7 rows |
| `OUT_W`   | `COLS + 3` = 11 | width of the sum and carry rows and of `total` |

## What follows the source design and what was chosen here

These parts follow the published description:

* the sorter gates;
* the comparator positions of the half sorter;
* the SFA equations;
* the gate structure of the adjusted full adder;
* the wiring of the compressor column, including which bits go where and
  which input of each adder is the late one;
* the 7 x 8 evaluation array and the use of a Kogge-Stone merge adder.

These are this design's own choices:

* **Input naming.** The compressor diagram labels some of its inputs
  inconsistently. Here the seven inputs are `in_bits[0..6]`: bits 0..3 enter
  the half sorter, and bits 4..6 enter the top adder.
* **Late input of FA4.** For the middle adder (FA4) the diagram marks no late
  input. Ci3 is used, because it is the only choice that matches the
  published stage numbers (Co4 at 7, S4 at 8).
* **Column chaining.** Co_k of one column drives Ci_k of the next. This
  pairing is inferred from the matching stage numbers.
* **Array shape.** The array is taken as rectangular and unshifted. Column 0
  gets zero carry-ins, and three zero-input compressors absorb the top
  column's carries. The source says only that the array is reduced to two
  rows.
* **Merge adder.** The Kogge-Stone adder is the textbook form; the source
  gives only its name.
* **No clocking.** There are no registers, clock or reset. The published
  figures are pure input-to-output delays.

Not modelled: the full three-column sorting network, which is shown only to
explain the half sorter, and the two earlier (7,2) compressors used as
baselines. Nor is anything tied to the reported delay and area figures:
those came from a commercial synthesis flow in 90, 65 and 28 nm processes,
and RTL simulation cannot reproduce them.

## Verification

Every module has a self-checking testbench in `tb/` that compares the block
against independently computed values. Each ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it covers |
|-----------|----------------|
| `tb_sorter2` | all 4 input pairs |
| `tb_half_sort` | all 16 inputs: count kept, max first, min last, middle bits in range |
| `tb_sfa` | the four ordered inputs against the truth table and against x+y+z |
| `tb_afa` | all 8 inputs against a+b+c |
| `tb_compressor72` | all 2^11 input and carry-in combinations for value conservation; each carry-out must not change when a slower carry-in toggles; the inner SFA only ever sees ordered bits |
| `tb_ks_adder` | 11- and 16-bit widths, corner cases and 20 000 random pairs against `+` |
| `tb_compressor_array` | 8- and 3-column arrays, corner cases, exhaustive patterns of the small array, 20 000 random arrays |
| `tb_array72_top` | the default 7 x 8 design end to end, corner cases and 50 000 random arrays |

`tb_array72_top` also counts how often each mechanism is exercised, and it
fails if any is never hit. The mechanisms are: each carry-out Co1..Co4, a
carry leaving the top array column into the zero-input columns, and a merge
carry running across 8 or more bits.

The testbenches need no clock. They step with `#1` delays, and each has a
watchdog. To run one with Verilator:

    verilator --binary --timing --assert -Irtl --top-module tb_array72_top \
        rtl/c72_pkg.sv tb/tb_array72_top.sv
    ./obj_dir/Vtb_array72_top

Verilator finds the other modules in `rtl/` through `-I`. For a different
array width, set `COLS` on `array72_top`. `OUT_W` follows on its own.
