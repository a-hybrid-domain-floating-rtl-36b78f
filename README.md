# Hybrid-domain FP8 compute-in-memory macro

A floating-point multiply is an exponent addition and a mantissa
multiplication. Write the two mantissas as `1.X = 1 + x` and `1.W = 1 + w`
with fractions `x, w` in `[0, 1)`. Then

    (1 + x)(1 + w) = (1 + x + w)  +  x*w
                      sub-ADD        sub-MUL

The second term is never more than a quarter of the product: it reaches
1/4 only as `x` and `w` both approach 1. This design computes the large
sub-ADD term exactly with digital logic. It computes the small but
expensive sub-MUL term with analog charge sharing and a coarse 3-bit ADC.
Both terms come from the same SRAM bit cells, which hold the weights. The
error of the analog path is bounded and falls only on the small term.

The RTL describes one macro. It holds four FP8 (E4M3) weights, one per
row of a 4x4 SRAM array, and computes their dot product with four FP8
activations. The result is a signed fixed-point sum with a shared exponent.

## Datapath

```
             weights (sign, exponent)           weights (fraction)
                    |                                  |
 activations -> exponent_unit -----------------> mantissa_mac_array (4x4 SRAM + LCC)
                 E_i = X_E+W_E, Emax,              |                    |
                 d_i = Emax-E_i,           row {LAC,LAS}         column MUL lines
                 x_al = X_M >> d_i           (sub-ADD)             (sub-MUL)
                 product signs                     |                    |
                    |                             ldat               cap_adc
                    |                   (accumulate, +1, align,   (charge sharing,
                    |                        sign, sum rows)        3-bit flash ADC)
                    |                              |                    |
                    |                              |                shift_add
                    |                              |                    |
                    +---------- Emax -----------> pm <-----------------+
                                                   |
                                          result, res_emax
```

`hcim_macro` is the top. It also holds the sequencer that steps the array
through its phases.

## The bit cell and its two uses

Each of the 16 cells (`sram_lcc_cell`) is a storage bit `Q` with two tiny
gates beside it, which together form the local computing cell. Both gates
see the row's activation bit `X`:

* The pseudo XOR gives the local sum `LAS = X xor Q`.
* The pseudo AND gives `X and Q`. It is time-multiplexed. In the sub-ADD
  phase it is the local carry `LAC`. In the sub-MUL phase it pulls down
  the column bitline (`MUL`).

Column `j` of a row holds bit `j` of that row's weight fraction. Column 0
is the LSB and feeds the smallest capacitor. An E4M3 weight has a 3-bit
fraction. It is stored in columns 3..1, and column 0 holds 0, so the array
arithmetic always works on 4-bit fractions `x = X/16`, `w = W/16`.

**Sub-ADD, one column per cycle.** In cycle `j` the sequencer puts
activation bit `X_i[j]` on row `i` and selects column `j`. The selected
cell of each row acts as a half adder. It drives the row's 2-bit partial
sum `{LAC, LAS} = X_i[j] + W_i[j]`. The local digital adder tree (`ldat`)
keeps one accumulator per row and adds each partial sum with weight
`2^j`. After four cycles it holds `X_i + W_i` exactly.

**Sub-MUL, one input bit per cycle.** In cycle `k` every row gets bit `k`
of its *aligned* activation (see below), and all cells drive their
columns at once. Column `j` counts how many rows have both `X_i[k]` and
`W_i[j]` set. Merging the four columns with weights 1:2:4:8 yields

    S_k = sum_i X_i[k] * W_i          (0 .. 60)

which is one 1-bit-by-4-bit MAC over the four rows. It is converted once
per input bit, not once per column.

## Charge sharing and the 3-bit conversion

`cap_adc` is a behavioural model of an analog block: a switched-capacitor
array and a flash ADC.

* Every column has a computation capacitor `C_j` (ratio 1:2:4:8).
* Every column also has a compensation capacitor (ratio 7:6:4:0), so
  each column presents 8 units.
* All capacitors are precharged to VDD. The computation capacitor then
  samples its bitline.
* Closing the sharing switch gives

      Vo = sum_j (C_j V_j + Ccomp_j VDD) / 32 = VDD * (1 - S_k / 128)

  The model takes a linear bitline discharge, `V_j = VDD (1 - n_j / 4)`.
* Seven sense amplifiers compare `Vo` with seven references. The
  thermometer code becomes a 3-bit code equal to the three most
  significant bits of the 6-bit value of `S_k`, i.e. `floor(S_k / 8)`.

`shift_add` restores the code's weight (`x8`) and the input bit's weight
(`2^k`), and accumulates:

    sub_mul = sum_k floor(S_k / 8) * 8 * 2^k   ~=  sum_i x_al,i * W_i

Only the truncation loses information: at most 7 per conversion, so at
most 105 units of 2^-8 over the four input bits. The model is ideal: it
has no capacitor mismatch, noise, comparator offset or discharge
nonlinearity. Its voltages are integer microvolts.

## Exponents, alignment and signs

This is the part with the most design choices, because the array sums
all rows in one analog value.

`exponent_unit` registers, on `start`, the following for every row
`i`. Each step is a module of its own (`exp_sum_array`,
`emax_identifier`, `exp_diff_extract`, `mant_align`).

* `E_i = X_E,i + W_E,i`.
* A zero flag. A row is flushed to zero when either exponent field is
  0; subnormals are not supported.
* The product sign.
* `Emax` over the non-zero rows.
* `d_i = Emax - E_i`.
* The aligned activation fraction `x_al,i = X_i >> d_i`, truncated.

Alignment reaches the two terms in different places:

* **sub-MUL:** `x_i * w_i * 2^-d_i = (x_i >> d_i) * w_i`. Feeding the
  aligned activation into the array aligns the analog term before the
  rows are summed.
* **sub-ADD:** the half adders mix `X` and `W` bits, so the activation
  cannot be shifted first. The array is fed the unshifted fraction.
  `ldat` keeps the rows apart until the end and then forms

      sub_add = sum_i (+/-) ((16 + X_i + W_i) * 16) >> d_i

  which is `(1 + x + w) * 2^-d_i` in units of 2^-8. The hidden-bit `1`
  is added here as a constant.

Signs work the same way. `ldat` adds or subtracts each row digitally. A
bitline cannot subtract, so the sub-MUL runs as two passes: first the
rows with positive products, then the rows with negative products, which
`shift_add` subtracts. A pass with no rows is skipped. `pm` adds the two
sums and registers the result with `Emax`.

## Operating the macro

| phase        | cycles | what happens                                   |
|--------------|--------|------------------------------------------------|
| `PH_EXP`     | 1      | exponent unit result registered                |
| `PH_ADD`     | 4      | column `j`, raw activation bit `j`, LDAT step  |
| `PH_MUL_POS` | 4      | aligned activation bit `k`, positive rows, ADC |
| `PH_MUL_NEG` | 4      | the same for negative rows                     |
| `PH_DRAIN`   | 1      | last ADC code enters shift-and-add             |
| `PH_MERGE`   | 1      | PM adds sub-ADD and sub-MUL                    |

* **Latency:** from the clock edge that samples `start` to `done` is
  `3 + 4 * (1 + passes)` cycles, with `passes` = 0, 1 or 2 (7, 11 or 15
  cycles).
* **Weights:** written one row per cycle with `w_we`, `w_row`, `w_data`
  (`hcim_pkg::fp8_t`) while the macro is idle. `rd_row`/`rd_mant` read a
  stored fraction back.
* **Start:** pulse `start` for one cycle with `x_vec` valid. `busy` stays
  high until `done`.
* **Result:** `done` pulses for one cycle. `result` and `res_emax` then
  hold until the next operation. The dot product is

      result * 2^(res_emax - 2*7 - 8)

  (two E4M3 biases, and 8 fraction bits of a 4-bit by 4-bit product).

Reset is asynchronous and active low. The SRAM cells have no reset: write
every row before using it. Assertions check that at most one column is
selected, that sub-ADD and sub-MUL never overlap, and that `start` is not
raised while busy.

## Accuracy

`tb_mantissa_accuracy` repeats the 4-bit-input x 4-bit-weight experiment
on 65 random groups (fixed simulator seed). It compares the hybrid mantissa sum with the exact
`sum (16+X)(16+W)`. Results with this ideal, truncating ADC:

* largest error: 104/256;
* largest relative error: 5.1 %;
* mean relative error: 2.3 %.

The sub-ADD part is always exact. The original circuit-level results
report errors within 1.51 %. That number cannot be reached with a
truncating 3-bit code in this ideal model. The original evaluation may
place its references or compute its error differently; the source does
not say. Moving the references half a step (rounding instead of
truncation) would halve the bound. That is a one-line change in
`cap_adc`'s `flash` function.

End to end (`tb_hcim_macro`, random FP8 vectors):

* Products of one sign with equal exponents show the same kind of error.
* With wide exponent spreads, alignment truncation adds its own error
  (up to about 13 % in that run), as in any aligned FP adder of this
  width.

For model-level accuracy (ResNet-50, BERT-base, RetinaNet in FP8), the
original work injected the measured macro error into software models. A
single macro holds only four weights, so those networks are not
simulated here.

## Size

A coarse yosys synthesis of `hcim_macro` gives about 340 word-level cells
and 163 flip-flops. Of those flip-flops, 16 are the SRAM bits modelled as
flip-flops, 20 hold weight signs and exponents, and the rest are the
exponent unit's output register, the accumulators and the sequencer.
`cap_adc` synthesizes into a small digital equivalent of its transfer
function, which is not what the real analog block would be. Treat these
numbers as a measure of the digital periphery only.

## What follows the source and what is this design's own

From the source design:

* the sub-ADD / sub-MUL split;
* the 4x4 array, one weight per row;
* the cell with pseudo XOR and time-shared pseudo AND, and the 2-bit
  per-row partial sum to a local digital adder tree;
* bit-serial activations;
* per-column bitlines merged by 1:2:4:8 capacitors with 7:6:4:0
  compensation, precharge to VDD;
* one conversion per input bit, by a 3-bit flash ADC of 7 sense
  amplifiers that keeps the top 3 of 6 bits;
* the exponent unit's four steps (summation, Emax, difference,
  alignment);
* the shift-and-add and PM blocks as named stages.

This design's own choices:

* **Bit order.** The source text says bits are stored MSB to LSB across
  the columns, but its drawing puts the LSB capacitor under the first
  column. Here column `j` is bit `j`, following the capacitor labels.
* **Column select for sub-ADD.** A one-hot `add_col` decides which cell
  drives the shared row lines. The source does not say how.
* **E4M3 fractions in the array.** They are stored left-aligned in the
  4-bit row. The source calls the 4-bit row a mantissa "including a 1-bit
  sign indicator"; here signs are kept digitally instead.
* **Zero exponents.** An exponent field of 0 is flushed to zero. NaN is
  not treated specially.
* **Where alignment and signs are applied.** Alignment is split between
  the activation stream (sub-MUL) and the LDAT (sub-ADD). Signs use two
  sub-MUL passes.
* **The sequencer and its latency.**
* **The start/busy/done handshake.**
* **Result format.** Fixed point with `Emax`; it is not renormalised to
  FP8.
* **The analog model.** Linear discharge, ideal capacitors and
  comparators, reference placement, VDD = 0.9 V.
* **Widths and read-back.** The 16-bit result width and the weight
  read-back port.

Not built:

* the SRAM periphery (word-line drivers, precharge, write drivers), which
  is replaced by a plain synchronous write port;
* the transistor-level behaviour of the pseudo gates (threshold drop on
  `LAC`);
* any tiling of many macros into an accelerator.

## Files

* `rtl/hcim_pkg.sv`: sizes, `fp8_t`, sequencer phases.
* `rtl/sram_lcc_cell.sv`: bit cell with LAS/LAC/MUL.
* `rtl/mantissa_mac_array.sv`: 4x4 array.
* `rtl/cap_adc.sv`: capacitor array and flash ADC (behavioural).
* `rtl/exponent_unit.sv`: the exponent path, which chains the four
  modules below and registers their outputs:
  * `rtl/exp_sum_array.sv`: weight sign/exponent storage, exponent sums,
    product signs, zero flags;
  * `rtl/emax_identifier.sv`: Emax over the non-zero rows;
  * `rtl/exp_diff_extract.sv`: `d_i = Emax - E_i`;
  * `rtl/mant_align.sv`: truncating right shift of the activation
    fractions.
* `rtl/ldat.sv`: local digital adder tree (sub-ADD).
* `rtl/shift_add.sv`: sub-MUL accumulator.
* `rtl/pm.sv`: final merge.
* `rtl/hcim_macro.sv`: top and sequencer.
* `tb/tb_<module>.sv`: self-checking testbench of each module.
* `tb/tb_mantissa_accuracy.sv`: the 65-group accuracy experiment.

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself
after a watchdog time. Parameters live in `hcim_pkg` and on each module;
the defaults are the 4x4, E4M3, 3-bit-ADC configuration.

To lint and run one, for example the end-to-end test:

```
verilator --lint-only -Wall -Irtl -y rtl rtl/hcim_pkg.sv rtl/hcim_macro.sv
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl \
    rtl/hcim_pkg.sv tb/tb_hcim_macro.sv --top-module tb_hcim_macro
./obj_dir/Vtb_hcim_macro
```

Replace `tb_hcim_macro` with any other testbench name. Each testbench runs
in well under a second.
