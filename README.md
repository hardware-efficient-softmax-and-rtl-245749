# Softmax and LayerNorm with guaranteed normalisation — RTL

Transformer accelerators spend a surprising share of their area on the two
normalising non-linear operations, Softmax and LayerNorm: an exponential, a
division and a square root per vector. The usual cheap approximations keep the
*ranking* of the outputs but let their *normalisation* drift: the Softmax
probabilities no longer sum to 1 and the LayerNorm output no longer has unit
standard deviation. Classification tasks tolerate that; tasks that use the
values themselves (span scores in question answering, perplexity in language
modelling) do not.

This RTL builds both operations so that the approximations sit where they do
not disturb the normalisation:

* **Softmax** approximates only the exponential (two small tables, no
  multiplier) and then divides every term by the *actual* sum of the
  approximated terms. Whatever error the tables make, the outputs still add up
  to 1, up to the rounding of each output.
* **LayerNorm** computes mean and variance exactly and approximates only
  1/sqrt(var), with two Newton steps started from a power-of-two guess. The
  output is (x − mean)·r with a multiplier, so its deviation is r·sqrt(var),
  within 0.2 % of 1.

Both units take signed INT8 inputs, produce INT8 outputs and handle one element
per clock.

## Files

| file | what it is |
|---|---|
| `rtl/nl_pkg.sv` | number formats, table contents, widths |
| `rtl/nongemm_top.sv` | the two units side by side |
| `rtl/softmax_unit.sv` | Softmax: control, buffers, accumulator |
| `rtl/sm_ram.sv` | single-port buffer (two banks each of `in_ram` and `norm_ram`) |
| `rtl/sm_max_unit.sv` | running maximum, one `max_ram` entry per `in_ram` bank |
| `rtl/sm_exp_unit.sv` | max subtraction and two-table exponential |
| `rtl/sm_fxp_div.sv` | shift-subtract divider and shift-add rescaling |
| `rtl/layernorm_unit.sv` | LayerNorm: control, output stage |
| `rtl/ln_stats.sv` | sum and sum-of-squares accumulators, mean, variance |
| `rtl/corn_ln.sv` | reciprocal Newton unit |
| `rtl/corn_init_est.sv` | leading-one initial guess |
| `tb/tb_<module>.sv` | a self-checking testbench per module |

## Number formats

| signal | format | notes |
|---|---|---|
| Softmax input | signed 8 bit, 3 fraction bits | 1 LSB = 1/8, range −16 … +15.875 |
| exponential `y`, sum `Z` | unsigned, 12 fraction bits | 4096 = 1.0; `Z` is 24 bits for 2048 elements |
| Softmax output | unsigned 8 bit, 7 fraction bits | 128 = probability 1.0 (`D_max`) |
| LayerNorm input | signed 8 bit | integer; the result does not depend on the input scale |
| `1/C` input | unsigned, 48 fraction bits | supplied by the caller with the vector |
| mean, variance | 16 fraction bits | variance floored at one LSB |
| `r = 1/sqrt(var)` | unsigned 26 bit, 16 fraction bits | |
| LayerNorm output | signed 8 bit, 4 fraction bits | ±8, rounded, saturating |

## Softmax

### Exponential from two tables

After the maximum `m` of the vector is known, each element gives
`delta = m − x ≥ 0` (9 bits). Because one input LSB is 1/8, `delta/8` is the real
distance from the maximum and the wanted value is `e^(−delta/8)`. The radix
R = 8 splits `delta` into an integer part and eighths:

```
frac = delta >> 3            index of LUT_init, 7 entries:  round(e^-frac     * 4096), frac = 0..6
rem  = delta - (frac << 3)   index of LUT_rem,  8 entries:  round(e^-(rem/8) * 4096), rem  = 0..7
y    = (LUT_init[frac] * LUT_rem[rem]) >> 12
```

The entries are `4096 1507 554 204 75 28 10` and
`4096 3615 3190 2815 2484 2192 1935 1707`. A distance of 7.0 or more (frac ≥ 7)
gives `y = 0`; `e^-7` is below 0.1 %. The product is not a multiplier: for
every set bit `j` of the LUT_init word, the LUT_rem word shifted left by `j` is
added. The result is within 1 % (or 2 LSB) of the exact exponential over the
whole table range (checked exhaustively by `tb_sm_exp_unit`).

### The divider, and why the sum is exact

The divider never divides each element. It computes, once per vector, the
binary digits of the scale factor `S = D_max / Z` (with `D_max = 2^7`), and
uses each digit to decide whether a shifted copy of `y` joins the output:

```
rem_0 = D_max
stage k = 1 .. 24:
    q_k   = (rem_{k-1} >= Z >> k)          compare
    rem_k = q_k ? rem_{k-1} - (Z >> k)     subtract, multiplexer
               : rem_{k-1}
    out  += q_k ? (y >> k) : 0             shifted y selected by the digit
p = round(out)
```

This is restoring division with a right-shifted divisor: digit `q_k` has weight
2^-k, so `S = Σ q_k 2^-k` and `out = y·S`. The first stage already uses `Z >> 1`
because `Z ≥ 1.0` (the maximum contributes exactly 1.0) and `D_max = 1.0` in the
output scale, so `S ≤ 1/2` in units of y. All shifts are carried with 24 extra
fraction bits, so nothing is lost before the final rounding. Since every
output is `y_i·D_max/Z` rounded, Σ p differs from `D_max` by at most half an
LSB per element, however inaccurate the tables are. The 24 stages keep at least
7 significant digits of `S` for sums up to 2048.

In hardware the 24 stages are combinational and fed by the `Z` stored with the
`norm_ram` bank, so the digits stay settled while stage C works on that vector;
only the digit-selected adder tree changes with each `y`.

### Stages and timing

`softmax_unit` has three stages, each working on a different vector:

| stage | cycles per vector | what happens |
|---|---|---|
| A (load) | N | logits written to one `in_ram` bank; running maximum kept in that bank's `max_ram` entry |
| B (exponential) | N | an `in_ram` bank read back; `y` written to one `norm_ram` bank and added into `Z` (ACC) |
| C (normalise) | N | a `norm_ram` bank read back; `p = y·D_max/Z` registered onto `out_data` |

`in_ram` and `norm_ram` each have two banks, so stage A can load vector k+2
while B works on k+1 and C on k. Each bank has a full flag. The stage that
fills a bank sets the flag when it writes the last element. The stage that
empties it clears the flag when it reads the last element. B and C are each
two cycles deep: read, then compute and write. So each starts its next
vector in the cycle after its last read of the previous one.

With vectors sent back to back, one probability leaves per clock with no gap
between vectors; a vector of N elements therefore takes N cycles. An isolated
vector's last probability appears 2N + 2 clocks after its last logit is
accepted, because B needs the complete maximum and C the complete sum.
`in_ready` is low only while both `in_ram` banks hold vectors that B has not
finished reading. A vector ends with `in_last`, or after 2048 elements,
whichever comes first. The output has no back-pressure.

## LayerNorm

### Statistics

`ln_stats` accumulates Σx and Σx² while the vector streams in, then forms
`mean = Σx·(1/C)` and `var = Σx²·(1/C) − mean²` combinationally from the
registered sums. `1/C` comes in on `inv_len`, rounded as
`round(2^48 / C)`. The 48 fraction bits are not a luxury: with a non-power-of-two
length such as 768, a coarser `1/C` would put an error of the order of
`mean²·C·2^-bits` into the difference, which for an INT8 vector with a large
mean and a small spread is larger than the variance itself. The mean is
squared with 32 fraction bits for the same reason. If the variance rounds to
zero (a constant vector) it is replaced by one LSB, so the Newton step never
divides by zero; the output is then zero anyway.

### Reciprocal square root by Newton's method

`corn_ln` iterates

```
r  <-  ( r + S_max / (r · var) ) >> 1,      S_max = 2^48
```

which is Heron's rule applied to `r = 1/sqrt(var)` (its fixed point satisfies
`r² · var = 1`). With 16 fraction bits in both `r` and `var`, `S_max/(r·var)` is
exactly `1/(r·var)` in `r`'s format. The first step starts from the guess of
`corn_init_est`: a leading-one detector finds the top bit `L` of the variance,
and the guess is `1 << ((48 − L) >> 1)`, a power of two within a factor √2 of
the answer. One step brings that to 6 %, the second to 0.17 %. The two steps
take two clocks; `done_o` rises in the clock after the second step, when `r`
is final.

### Two passes over the input

The output stage subtracts the mean from the *incoming* element and multiplies
by `r`. There is no vector buffer in the LayerNorm, so the source sends every
vector twice:

1. statistics pass: N elements, ended by `in_last` (or after 2048);
2. two clocks with `in_ready` low (the two Newton steps); `in_ready` rises
   with `done_o`, so the second pass can start three clocks after the last
   element of the first;
3. normalisation pass: the same N elements in the same order; each result
   appears on `out_data` one clock after its element is accepted, `out_last` on
   the N-th. `in_last` is ignored in this pass.

The affine step γ·y + β of the textbook LayerNorm is not part of this datapath.

## Top level

`nongemm_top` holds one `softmax_unit` and one `layernorm_unit` with separate
`sm_*` and `ln_*` stream ports, a common clock and an active-low asynchronous
reset. Both may run at once. Parameters: `SM_MAX_LEN` (2048),
`SM_DIV_STAGES` (24), `LN_MAX_LEN` (2048).

## Where this departs from the published architecture

The structure follows the published block diagrams: the two tables with radix 8
and 7/8 entries, the shift-subtract divider with digit-selected shifted
terms, the two accumulators with multiplications by 1/C, and the LOD-seeded
reciprocal Newton loop with a multiplier at the output. The following are
choices made here, or differences:

* **Latency.** The published figures are N cycles for Softmax and N + 1 for
  LayerNorm. Softmax reaches N cycles per vector when vectors arrive back to
  back. It does so by overlapping three stages over two banks of each buffer,
  which is this design's own choice. A single vector still needs 2N + 2 clocks
  from its last input to its last output. LayerNorm takes 2N + 2 input
  clocks per vector: two passes of N and the two Newton clocks between them.
  Its output rate, N outputs after the N + 2 clocks of statistics and Newton,
  is the nearest this buffer-less datapath comes to N + 1; the two passes of
  successive vectors are not overlapped.
* **Number formats** (all of the table above except "INT8"), the table word
  width, the number of divider stages, the maximum vector length of 2048 and
  the cut-off of the exponential beyond the table are choices made here.
* **The input scale of Softmax** (1 LSB = 1/8) is what makes the two published
  descriptions of the split agree: one writes the coarse factor as `e^-frac`,
  the other as `e^-(R·frac)`; with this scale both are the same.
* **1/C** is an input; how it would be produced is not described.
* **The divider inside the Newton loop** (`S_max / (r·var)`) is written as a
  plain combinational division. Its internal structure is not described.
* **γ and β** are not applied (the described datapath ends at (x − mean)/σ).
* **Zero variance** is handled by a one-LSB floor; no ε is described.
* The handshakes (valid/ready in, valid-only out, two LayerNorm passes) and the
  reset are choices made here.

The accuracy results reported for the method (GLUE, SQuAD, perplexity) were
obtained with a floating-point software model, not with these fixed-point
formats, and are not reproduced by this RTL. The vocabulary-sized output
Softmax of a language model (about 50 000 entries) does not fit in 2048-entry
buffers, and the 7-bit output fraction would round most of its probabilities
to zero.

## Verification

Every module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. References are
computed independently in the testbench with real arithmetic (`$exp`, `$sqrt`):

| testbench | what it checks |
|---|---|
| `tb_sm_ram` | random writes, read-back one clock later, reads do not disturb |
| `tb_sm_max_unit` | maximum of random, all-negative and first-is-largest vectors in both `max_ram` entries, one entry loading while the other is read |
| `tb_sm_exp_unit` | every (max, x) pair: exact match to the table model, 1 % to `e^x`, zero beyond the table |
| `tb_sm_fxp_div` | quotient digits equal `⌊128·2^24/Z⌋`; `p` within 1 LSB of `y·128/Z` |
| `tb_softmax_unit` | 60+ random vectors (MAX_LEN = 64): each output within 1 LSB, within 0.03 of the exact softmax, Σp within N/2 + 1 LSB of 128, latency 2N + 2, back-to-back vectors completing every N cycles, input stalls, over-long vector split |
| `tb_ln_stats` | mean and variance against real arithmetic, lengths up to 2048, constant vectors |
| `tb_corn_init_est` | guess is the right power of two, within √2 of the answer |
| `tb_corn_ln` | 3000 variances over 2^-16 … 2^14: within 0.3 %, r²·var within 0.6 % of 1, done after two steps |
| `tb_layernorm_unit` | 80 vectors (MAX_LEN = 128), with gaps: each output within 1 LSB, output deviation within 6 % of 1, 3-clock hand-over (2 clocks with `in_ready` low), saturation, constant vector, over-long vector |
| `tb_nongemm_top` | both units concurrently at full size: attention rows of 128, 384, 512 and 2048, LayerNorm over 768 and 2048, four back-to-back rows of 512 completing 512 clocks apart, every mechanism above (including Softmax stage overlap) exercised at least once |

`tb_nongemm_top` runs the top with all parameters at their defaults and takes
well under a second.

To run one with Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/nl_pkg.sv tb/tb_softmax_unit.sv \
          --top-module tb_softmax_unit -Mdir obj_softmax
./obj_softmax/Vtb_softmax_unit
```

Replace the testbench name for the others; `-y rtl` lets Verilator find the
modules by file name, and `nl_pkg.sv` must come first.

## Changing it

* Vector length: `MAX_LEN` of each unit (or `SM_MAX_LEN` / `LN_MAX_LEN` on the
  top). Accumulator and address widths follow. For Softmax, raise
  `DIV_STAGES` by one for each doubling beyond 2048 to keep the precision of
  `D_max/Z`.
* Table precision: `EXP_F` in `nl_pkg` together with the two table functions
  (entries are `round(e^-f · 2^EXP_F)` and `round(e^-(r/8) · 2^EXP_F)`).
* Output resolution: `SM_P_FRAC` (Softmax; keep it below `EXP_F`) and
  `LN_OUT_F` (LayerNorm).
