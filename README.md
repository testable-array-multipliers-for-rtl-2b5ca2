# A C-testable array multiplier with a five-vector self-test

An N x N array multiplier is a grid of identical cells. Each cell has an AND gate
and a full adder. Testing it normally takes more vectors as N grows, because a
fault deep in the grid must be set up and observed through many other cells.
This design changes the plain array in two small ways. Every cell can then be
given a full set of test conditions by the same **five** input vectors, and any
single stuck-at fault in any cell shows up at the outputs. Five vectors is
enough for 4 x 4, 16 x 16 or 64 x 64. On top of the multiplier sits a small
built-in self-test (BIST): a 3-bit counter, a decoder that stores the five
vectors for two neighbouring cells, an expander that repeats them across the
array, and a comparator. One self-test run takes six clocks, whatever N is.

The method follows the paper *Testable Array Multipliers for a Better
Utilization of C-Testability and Bijectivity* (Sheikh Shoaei, Nahvy, Navabi). The
RTL here is an independent implementation of it. The last sections list where it
follows the paper and where it makes its own choices.

## The array

Cell (r, j) sits in row r and column j, with 0 <= r, j < N. It adds the bit
`x[r] & y[j]` to two chain inputs:

- `ci`, the *row-chain* carry, coming from its right-hand neighbour (r, j-1);
- `pi`, the *column-chain* partial product, coming from the row above.

The sum `po` goes down the column chain and the carry `co` goes left along the
row chain. Row r is drawn one place to the left of row r-1, so cell (r, j) takes
its `pi` from cell (r-1, j+1), the cell drawn directly above it. Operand bit
`x[r]` enters at the right end of row r and passes from cell to cell. Operand
bit `y[j]` enters at the top of column j and passes down.

```
            y3    y2    y1    y0
             |     |     |     |
          [0,3]<-[0,2]<-[0,1]<-[0,0]<- x0, ci0          p0 = sum of [0,0]
          /  |     |     |     |
     [1,3]<-[1,2]<-[1,1]<-[1,0]<- x1, ci1               p1 = sum of [1,0]
       ...
```

In a plain multiplier the border inputs are zero and the carry out of a row's
left-border cell feeds the column input of the next row's left-border cell.
Product bit `p[r]` is the sum of the right-border cell of row r, for r < N-1. The
bottom row gives `p[2N-2:N-1]`. The bottom row's last carry is `p[2N-1]`.

## What the test changes

A cell's three adder inputs (`x&y`, `ci`, `pi`) have eight combinations. Only
five of them are needed to detect every stuck-at fault of the AND gate and the
full adder. Written as (xy, cin, pin) -> (cout, pout) they are:

| name | xy cin pin | cout pout | kind of pattern |
|---|---|---|---|
| T1 | 0 0 1 | 0 1 | both chains pass their value on unchanged |
| T3 | 0 1 1 | 1 0 | row chain unchanged, column chain inverted |
| T4 | 1 0 0 | 0 1 | row chain unchanged, column chain inverted |
| T2 | 0 1 0 | 0 1 | both chains inverted |
| T5 | 1 0 1 | 1 0 | both chains inverted |

In each pair, one pattern's outputs are exactly the other pattern's chain inputs.
T3 gives `pout = 0`, which is T4's `pin`. T4 gives `pout = 1`, which is T3's
`pin`. So rows can alternate T3, T4, T3, ... and every row gets its chain inputs
from the row above. In the same way T2 and T5 can alternate in a checkerboard,
and T1 can simply repeat.

Two borders get in the way:

1. In a plain multiplier the right-border carry inputs and the top-row column
   inputs are tied to 0. Here they are inputs of the block, `ci[N-1:0]` and
   `pi[N-1:0]`. During multiplication they are driven with zeros.
2. The left-border cell of each row takes its column input from the previous
   row's carry. That value is fixed by the test pattern and is often wrong for
   the next row. Meanwhile the right-border sum of every row except the last
   goes nowhere but a product pin. So each row r >= 1 has a 2:1 multiplexer on
   the left-border column input. With `test_mode = 1` it takes the right-border
   sum of row r-1 instead of the carry. There are N-1 multiplexers. In normal
   mode each one adds a multiplexer delay between the left-border carry of one
   row and the next row. The paper reports this as well under one percent of the
   delay of a 16-bit multiplier.

With these changes every vector leaves each row, column and border in a
repeating state. The test outputs are the left-border carries `co[r]`, the
bottom-row sums `po[j]`, and the operand pass-throughs `xo`, `yo`. They repeat
with period two as well.

## The five vectors

Each vector is given for a pair of neighbouring rows or columns. Bit [1] of each
2-bit field is for the odd index and bit [0] for the even index. The field is
repeated over all N bits, so N must be even.

| vector | x | y | ci | pi | expected co | expected po | cells see |
|---|---|---|---|---|---|---|---|
| 0 | 11 | 00 | 00 | 11 | 00 | 11 | T1 everywhere |
| 1 | 01 | 11 | 10 | 00 | 10 | 00 | even rows T4, odd rows T3 |
| 2 | 10 | 11 | 01 | 11 | 01 | 11 | even rows T3, odd rows T4 |
| 3 | 11 | 10 | 11 | 10 | 11 | 01 | even columns T2, odd columns T5 |
| 4 | 11 | 01 | 00 | 01 | 00 | 10 | even columns T5, odd columns T2 |

Because row r is shifted by one column, "even columns T2, odd columns T5" is a
checkerboard in the drawing: each cell differs from the cell above it and from
the cell beside it. Over the five vectors each cell sees each of T1 to T5 exactly
once. The paper's table gives the values as "a/b" pairs without saying which
neighbour comes first. Only the reading "first value = odd (left) index" makes
every row of the table agree with what the array computes, so this design uses
that reading.

The paper notes that T1 is not needed when the sum is built from XOR gates, as it
is here. The vector is kept so that the test does not depend on how the adder is
built.

## The self-test

```
 bist_start ──> bist_counter ──cnt──> tpg (decoder + expander) ──x,y,ci,pi──> dft_array_mult
                    │                        │ golden co,po,xo,yo                 │ co,po,xo,yo
                    └──busy (test mode)──────┴───────────────> ora <──────────────┘
```

- `bist_counter`: a pulse on `bist_start` while idle clears the 3-bit count and
  raises `busy`. `busy` switches the multiplier's input multiplexers to the test
  stimuli and its left-border multiplexers to test mode. The count steps 0, 1, 2,
  3, 4, one vector per clock. The edge that samples vector 4 drops `busy` and
  raises `done`. `done` holds until the next start.
- `test_vector_decoder`: 3 inputs, 12 outputs. 8 are stimulus bits (x, y, ci, pi
  for two neighbouring cells) and 4 are expected-response bits (co, po). Codes 5
  to 7 give zeros.
- `tpg`: the decoder plus the expander. It repeats every field over N bits and
  provides the golden outputs. The golden `xo`/`yo` equal the applied `x`/`y`.
- `ora`: compares the 4N test outputs with the golden values. At every clock
  edge with `busy` high, a mismatch sets a sticky `fail` flag. `fail` is cleared
  by the next start.

Timing, counted in rising clock edges:

```
edge      E0        E1     E2     E3     E4     E5
          takes     samples vector 0 .. vector 4
          start     (cnt = 0 ... 4, busy = 1)   -> busy = 0, done = 1
```

From the edge that takes `bist_start` to the edge that raises `bist_done` there
are six edges. That is the test time of six clocks the paper reports, and it does
not depend on N. `bist_pass = bist_done & !fail`.

## Top-level interface (`array_mult_bist`, parameter `N = 16`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset to idle |
| `a`, `b` | in | N | operands (`a` drives the rows, `b` the columns) |
| `p` | out | 2N | `a * b`, combinational, valid whenever `bist_busy = 0` |
| `bist_start` | in | 1 | starts a self-test run (ignored while one runs) |
| `bist_busy` | out | 1 | run in progress; `p` is not a product meanwhile |
| `bist_done` | out | 1 | run finished |
| `bist_pass` | out | 1 | run finished without a mismatch |

The multiplier is combinational. Its longest path runs through about 2N cells,
and `p` settles within that delay. Nothing is registered on the multiply path.

## How far it has been checked

- Every module has a self-checking testbench in `tb/`.
  - `tb_dft_array_mult`: random and corner-case products at N = 16, 4 and 64;
    the five vectors against the expected responses; the patterns each cell sees
    (from an independent reference model, `tb/mult_ref_pkg.sv`); random test-mode
    stimuli against the same model.
  - `tb_array_mult_bist`: runs the top at its default size. It multiplies, runs
    the self-test, checks the six-clock timing, forces stuck-at faults onto three
    cell nets and checks that each is caught, and runs a clean self-test again.
    It counts each of these mechanisms.
- `tb_fault_coverage` simulates every single stuck-at fault on every gate pin and
  pass-on wire of every cell: 40 faults per cell, on arrays of 4, 8, 16 and 32
  bits. The stimulus comes from the RTL pattern generator, the comparison from the
  RTL ORA, and the faulty array is a gate-level model (`tb/fault_array_model.sv`).
  The model is first checked against the RTL array. All 640 / 2560 / 10240 /
  40960 faults are detected. The test multiplexers, the input multiplexers and
  the BIST logic itself are not in the fault list, and they were not in the
  paper's either.
- Not reproduced: the paper's area, delay and power figures (90 nm synthesis).
  They are not measurable from RTL.

## Where the RTL makes its own choices

The paper describes the array, the test multiplexers, the five vectors, and how
counter, decoder, expander and comparator are organised. The following are this
design's own:

- Gate structure of the full adder. The sum uses two XORs, as the paper suggests.
  The carry is `(a & b) | ((a ^ b) & cin)`. Inside the cell, `x & y` goes to
  adder input A and `pi` to input B.
- Select polarity of the test multiplexers (`test_mode = 1` takes the
  right-border sum).
- Which neighbour the first value of each Table II pair belongs to (see above).
- The decoder is a case table, not the Karnaugh-map minimised logic of the paper.
  Synthesis minimises it.
- Sharing of the multiplier inputs: a 2:1 multiplexer selects operands or test
  stimuli, and test mode is simply `bist_busy`.
- The start/busy/done handshake, the reset, and the sticky pass/fail flag. The
  ORA compares directly with the golden values; there is no signature compaction.

## Simulating and changing it

Plain Verilator 5 is enough. For example, the end-to-end test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/mult_bist_pkg.sv tb/mult_ref_pkg.sv tb/tb_array_mult_bist.sv \
    --top-module tb_array_mult_bist -o sim
./obj_dir/sim
```

Any other testbench runs the same way: swap in its file and top module, and add
`tb/mult_ref_pkg.sv` where it imports that package. Each testbench ends by
printing `TB_RESULT checks=<n> failures=<m>`.

- The operand width is the parameter `N` of `array_mult_bist`, `dft_array_mult`,
  `tpg` and `ora`. It must be even for the self-test, and `tpg` stops elaboration
  otherwise. The multiplier alone works for any N.
- The vectors live in `test_vector_decoder` only. The shared types
  (`test_vector_t`, the vector count, the counter width) are in
  `rtl/mult_bist_pkg.sv`.
- To test another fault list, edit the site list in `tb/fault_array_model.sv`.

Files: `rtl/full_adder.sv`, `rtl/mult_cell.sv`, `rtl/dft_array_mult.sv` (the
testable array), `rtl/bist_counter.sv`, `rtl/test_vector_decoder.sv`,
`rtl/tpg.sv`, `rtl/ora.sv`, `rtl/array_mult_bist.sv` (top), `rtl/mult_bist_pkg.sv`.
