# An aging-aware systolic array: balancing NBTI stress with selective 2's complement

A multiplier gives the same product for `A x B` and `(-A) x (-B)`, but the two
forms drive different logic levels onto the gates inside it. NBTI (negative bias
temperature instability) ages a PMOS transistor while its gate sits at logic 0,
and in an array multiplier some transistors sit at 0 far more often than others.
Those transistors fail first. If the hardware picks, for each product, the form
that puts less 0-stress on the transistors closest to failure, it spreads the
wear and the multiplier lasts longer. The result stays exact.

This RTL builds that idea into an output-stationary systolic array of 8-bit
signed MAC processing elements (PEs), 128 x 128 by default:

* At the west edge of every row and the north edge of every column, a **2C unit**
  computes `-I` once. The pair `(I, -I)` then travels through the array.
* Each PE has a **selector ensemble**: three small Boolean functions SM-1..SM-3
  of four operand bits each, plus a per-PE choice of which one to follow. The
  chosen SM decides whether this product is formed as `X x W` or `(-X) x (-W)`.
* A mux feeds the chosen pair to an explicit **array multiplier** made of
  full-adder cells, and the product is added to the PE's running sum.

## Where the selector functions come from, and what is a placeholder here

Choosing the SM functions is an offline step, done with circuit-level aging
simulation:

1. For a given multiplier, aging simulation finds the first-to-fail (F2F)
   transistors.
2. For every input pair, it checks whether the negated form lowers their stress.
   The result is an "oracle" table with 2^16 entries for 8-bit operands.
3. The table is then approximated by a function of the k input bits that
   correlate best with it. With k = 4 the approximation matches the oracle
   almost exactly for an 8-bit array multiplier.
4. Process variation changes which transistors fail first. Several such
   functions are therefore fitted, for different F2F sets. Three were found to
   be enough.
5. A test of each fabricated part then decides which SM each PE should use.

None of those fitted functions are published, so this RTL cannot contain them.
The design carries them as parameters in `sa_pkg`:

* `SMn_BITS`: the four bit positions SM-n reads. Positions 0..7 are `X[0..7]`;
  8..15 are `W[0..7]`.
* `SMn_TRUTH`: a 16-entry truth table indexed by those four bits, with the
  first listed bit as the LSB of the index.

Both are constants, so synthesis folds each SM into a few gates. The defaults
have the right shape, but their contents are **placeholders**:

* SM-1 leads with the X sign bit and the W LSB. That is the pair that correlates
  best with the oracle when only two bits are allowed.
* The functions themselves are arbitrary, chosen so that every branch of the
  datapath gets exercised.

To use real results, replace these six constants. The testbench reference
model in `tb/tb_sm_ref_pkg.sv` writes the same functions out as Boolean
expressions and has to be updated with them.

The per-PE choice is a 2-bit register. Codes 0..2 select SM-1..SM-3. Code 3
selects no SM, so that PE never transforms, which makes it a plain
(unmitigated) PE.

## The one case where sign invariance fails

In 8 bits, `-(-128)` wraps back to `-128`, so `(-X) x (-W)` differs from
`X x W` whenever an operand is `-128`. The 2C unit flags that value
(`is_min`), and a PE never transforms a product that has a flagged operand,
whatever the SM says. This guard is this design's addition: without it the
array would give wrong results.

## Operand bundle and dataflow

Every operand moves as an `operand_t` (`sa_pkg`):

* `val`: I
* `neg`: -I mod 256
* `is_min`: set when I = -128
* `valid`

Each PE registers the bundle arriving from the west (X) and the one from the
north (W). It forwards the registered copies east and south, so every hop takes
one cycle. In the cycle after registering, the PE runs the whole chain
combinationally: SM, mux, multiplier, adder. The running sum updates on the
next edge, but only if both bundles are valid. `acc_clr` clears all running
sums synchronously and takes priority.

**Feeding a matrix product** `C = X * W`, where X is R x K and W is K x C:

* Present `X[r][k]` on `x_in[r]` in cycle `t0 + k + r`.
* Present `W[k][c]` on `w_in[c]` in cycle `t0 + k + c`.
* Set the valid bits with the data.
* `acc[r][c]` then holds `C[r][c]` from cycle `t0 + K + r + c + 1` on.

The feeder skews the inputs; the array does not. Gaps with valid low are
allowed, as long as they are the same in every row and column stream (the
testbench inserts such bubbles). All running sums come out in parallel on
`acc[ROWS][COLS]`.

**Configuration.** Each column holds a shift chain of the 2-bit SM choices.
While `cfg_shift` is high, the values move one PE down per cycle. After ROWS
shifts, PE (r,c) holds the value that was on `cfg_in[c]` ROWS-1-r shifts
earlier. Reset clears every choice to 0 (SM-1).

## The array multiplier

`array_multiplier` is written as an explicit cell grid, not as `*`, because
the method is about which full-adder cell sees which inputs.

**Signed arithmetic** uses the modified Baugh-Wooley form:

* Partial product `a[i]&b[j]` is inverted where exactly one of i, j is the sign
  position.
* Constant ones are added at weights W and 2W-1.

**Structure:**

* Row 0 holds the bare partial products.
* Rows 1..W-1 are carry-save rows of W full-adder cells each, W(W-1) cells in
  all. Cell (j,i) adds:
  * `pp[j][i]`,
  * the sum of cell (j-1, i+1), which has the same weight,
  * the carry of cell (j-1, i).
* A final ripple-carry row, with carry-in 1, merges the last sums and carries.
  The weight-2W-1 constant flips the top bit.

Each carry-save row is written as W-bit vector sum and majority equations; bit
i of each equation is cell (j,i). Written with one instance per cell, a
128 x 128 array needed far more memory to lint than one written per row. The
circuit is the same either way.

## Parameters

| name | default | where | meaning |
|---|---|---|---|
| `ROWS`, `COLS` | 128, 128 | `systolic_array` | array size |
| `OP_W` | 8 | `sa_pkg` | operand width (the SM defaults assume 8) |
| `ACC_W` / `ACC_BITS` | 32 | `sa_pkg` / PE, top | running-sum width (design choice) |
| `NUM_SM` | 3 | `sa_pkg` | SMs per PE |
| `SM_K` | 4 | `sa_pkg` | input bits per SM |
| `SM_SEL_W` | 2 | `sa_pkg` | width of the per-PE SM choice |

With 32-bit running sums, no product length below 131072 can overflow.
`array_multiplier` works for any W and is tested at 4, 8, 12 and 16. The rest
of the array is sized by `OP_W`.

## Files

| file | content |
|---|---|
| `rtl/sa_pkg.sv` | widths, `operand_t`, SM bit positions and truth tables |
| `rtl/twos_complement_unit.sv` | edge negation and most-negative flag |
| `rtl/selector_module.sv` | one SM: bit gather and truth-table lookup |
| `rtl/selector_ensemble.sv` | NUM_SM SMs and the per-PE choice |
| `rtl/array_multiplier.sv` | signed Baugh-Wooley FA array |
| `rtl/processing_element.sv` | registers, selector, mux, multiplier, running sum, config register |
| `rtl/systolic_array.sv` | the grid with 2C units at the row and column edges (top) |

Every testbench checks its block against values it computes independently:

* `tb_twos_complement_unit`, `tb_selector_module`, `tb_selector_ensemble`,
  `tb_array_multiplier`: exhaustive over all 8-bit operand pairs. The
  multiplier testbench also covers other widths and checks
  `(-a)x(-b) = axb`.
* `tb_processing_element`: runs against a cycle-accurate reference model.
* `tb_systolic_array`: the end-to-end test, 8 x 6 PEs by default.
  * After every clock edge it checks every PE's running sum against the partial
    result due by then, which checks latency as well as values.
  * Every PE's transform decision is checked against the reference SMs.
  * It counts each mechanism and fails if one never happened: transformed
    products, products kept by the -128 guard, each SM code, config shifts,
    clears and bubbles.

## Simulating

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/sa_pkg.sv tb/tb_sm_ref_pkg.sv tb/tb_systolic_array.sv \
    --top-module tb_systolic_array -GR=16 -GC=16
./obj_dir/Vtb_systolic_array
```

Each testbench prints `TB_RESULT checks=N failures=M` at the end. Build time
grows with the number of PEs:

* 16 x 16 builds in under a minute and passes.
* 128 x 128 was linted but not simulated. Lint alone needs about 10 GB of
  memory and about 4 minutes.

## How far to trust it, and where it departs from the architecture

**Follows the architecture:**

* edge 2C units with `I` and `-I` routed through the array;
* an SM ensemble in every PE, with a static per-PE choice;
* 4-input SMs, three of them;
* a mux in front of an 8-bit array multiplier;
* an output-stationary running sum;
* 128 x 128 PEs.

**Own choices:**

* the signed multiplier form;
* valid bits and clear;
* 32-bit running sums;
* parallel readout of the running sums;
* the configuration shift chain and the "no SM" code;
* the -128 guard;
* SM, mux and MAC in a single cycle (the SM could also be pipelined ahead of
  the multiply).

**Not present:**

* the actual SM functions (placeholders, see above);
* the on-chip test that would pick each PE's SM, which arrives only as
  `cfg_in` data;
* the Wallace-tree PE variant;
* floating-point use.

The lifetime gains that motivate the design come from transistor-level aging
simulation. Digital simulation cannot reproduce them: what this RTL can show
is that the transformation never changes a result, and that it is applied
exactly when the chosen SM says so.
