# MC2RAM: Metropolis-Hastings sampling inside SRAM

MC2RAM draws samples from a Gaussian mixture density

    F(x) = sum_j p_j * prod_i N(x_i; mu_ij, sigma_ij^2)

with the Metropolis-Hastings (MH) random walk. Each step makes a candidate
`x_cand = x + R` from a random step `R`. It accepts the candidate when
`F(x_cand)/F(x) > U`, where `U` is uniform on (0,1).

The costly part of each step is evaluating the exponents of every mixture
component. The design keeps that work in the memory that holds the mixture:

    E_j(x) = sum_i (x_i - mu_ij)^2 / sigma_ij^2

For a proposal `x + R` this changes by

    dE_j = R.(R/sigma_j^2) + 2 (x - mu_j).(R/sigma_j^2)

That is two scalar products per component, over vectors whose operands are
already in the array. The SRAM rows hold `mu_ij`, `1/sigma_ij^2`, the current
sample `x_i`, and a column of random-number cells that makes `R_i` in place.
The scalar products are formed as analog currents on the bit lines and
digitised by a column ADC. Only the few numbers `dE_j` leave the array. A small
central layer works in the log domain. It turns them into `ln F` with a
log-add table, compares the difference against `ln U` and tells the banks
whether to write `x + R` back.

This repository holds synthesizable SystemVerilog of the whole digital part:
- the sequencing;
- the arithmetic of the current-mode product and of the log domain;
- the DAC calibration loop;
- behavioural models of the four analog parts: RNG cell, row DAC, op-amp with
  hold cell, and two-step flash ADC.

## Organisation

```
mc2ram_top
 ├─ mc2_bank  x NUM_BANKS (2)         one in-SRAM compute bank
 │   ├─ sram_array                    ROWS x 36 cells, R/W port, product port
 │   │   └─ rng_cell  x ROWS*4        random step R_i, one cell per bit
 │   ├─ dac_operand_buffer            R_i, 1/sigma_ij^2 per row -> DAC codes
 │   ├─ row_dac  x ROWS               current DAC with calibration mirrors
 │   ├─ dac_calibration               trims every row DAC against a reference
 │   ├─ column_mux                    one column current to the converter
 │   ├─ tia_hold                      op-amp (I->V) and hold cell
 │   ├─ two_step_adc                  coarse + fine flash, 2-cycle latency
 │   ├─ partial_term_acc              ADC REG, shift/sign, adder, Output REG
 │   └─ bank_ctrl                     per-iteration sequencer
 ├─ central_proc                      sum of banks, log density, MH decision
 ├─ log_add_lut                       ln(e^a + e^b) with a 64-entry table
 └─ uniform_rng                       U and ln U
```

`mc2_pkg` holds the number formats, the column map of a row and the tag
carried with each conversion.

Dimensions are split across banks. Bank `b` holds `n_rows[b]` consecutive
dimensions, one per row. Every bank runs the same schedule in lockstep, and
the central layer adds their `dE_j`. At the default sizes (2 banks of 32 rows)
the sampler holds up to 64 dimensions of a two-component mixture.

## Number formats

All values are fixed-point integers. None of these widths is given by the
source design; they were chosen so that the products line up without
rounding.

| quantity | format | range |
|---|---|---|
| `x_i`, `mu_ij` | 8-bit two's complement, 4 fraction bits | -8 .. +7.9375 |
| `R_i` | 4-bit two's complement in units of the x LSB | -7/16 .. +7/16 |
| `1/sigma_ij^2` | 4-bit unsigned, 2 fraction bits | 0 .. 3.75 |
| `v_ij = R_i / sigma_ij^2` | sign + 7-bit magnitude, 6 fraction bits | |
| `E_j`, `ln F`, `ln U`, `c_j` | 32-bit signed, 10 fraction bits (Q10) | |

With these formats, `(x-mu)^2/sigma^2`, `R.v` and `(x-mu).v` all have exactly
10 fraction bits, so dE_j is an integer in Q10.

`R` is made symmetric. The RNG word `1000` (-8) is read as 0, so `R` takes the
values -7..+7. A plain 4-bit two's-complement word has mean -1/2 LSB. That
skews the proposal, and the MH chain no longer samples the intended density:
in the two-dimensional test mixture the sample mean moved by about -1.5 per
dimension.

## The in-memory scalar product

For `V.W` the stored operand `W` sits in the array, one bit per column. The
other operand `V` drives the rows. Each row has a current DAC whose code is
`|v_i|`. A cell that stores '1' passes its row current onto the column's
product bit line. The column current is therefore

    I(c) = sum_i |v_i| * bit_c(W_i)

in units of one DAC LSB current. One column at a time is selected and
converted. The op-amp turns the current into a voltage, the hold cell keeps it,
and the ADC digitises it. The digital back end then weights each code by its
column's bit position and adds it to the output register.

### Signs: two phases per column

A current cannot be negative, but both `v_i` and the stored words are signed.
The design handles this by sign phases and bit weights:

- **Phase +:** only rows with `v_i > 0` are driven. **Phase −:** only rows
  with `v_i < 0` are driven, with the DAC code `|v_i|`. Each column is
  converted once per phase. The negative-phase result is subtracted.
- **Bit weight:** a stored two's-complement word has a negative MSB weight.
  The MSB column's result is subtracted.
- **μ term:** `(x - mu)` is computed as the `x` product minus the `mu` product.
  The `mu` columns therefore carry one more sign inversion.

Every conversion travels through the ADC pipeline with a tag (`conv_tag_t`).
The tag holds the left shift and whether to subtract:

| column | shift | subtract |
|---|---|---|
| `R` bit b | b + r_shift + DAC_SHIFT | MSB xor phase− |
| `x` bit b | b + 1 + r_shift + DAC_SHIFT | MSB xor phase− |
| `mu_j` bit b | b + 1 + r_shift + DAC_SHIFT | not (MSB xor phase−) |

In the shift column:
- The `+1` is the factor 2 of the cross term.
- `r_shift` undoes the op-amp gain setting.
- `DAC_SHIFT` undoes the low bits the DAC buffer drops when `DAC_BITS` < 7.

### Schedule of one bank iteration

`bank_ctrl` steps through these states:

1. **GEN**, 1 cycle. Every RNG cell resolves one new bit, which gives a fresh
   `R_i` in every row. The DAC buffer and the hold cell are cleared.
2. **COPY**, `n_rows` + 1 cycles. Rows are read through the normal R/W port.
   `R_i` and `1/sigma_ij^2` go into the DAC-operand buffer. The controller
   sets `ovf` when some `x_i + R_i` leaves the range of x. Such a candidate is
   rejected whatever its density.
3. **CONV**, for each component j: clear the output register, then issue one
   conversion per cycle. That is 4 R columns + 8 x columns + 8 mu_j columns,
   times 2 phases, which makes 40 conversions. **DRAIN** then lets the last 5
   results through the hold, ADC and ADC register. This costs 46 cycles per
   component, and `dE_j` is captured at its end.
4. **WAIT**: `done` is high and `dE` and `ovf` are held until the central
   layer answers. On accept, the rows are rewritten with `x + R`, in 2 cycles
   per row: read, then write.

From `start` to `done` a bank takes `1 + n_rows + 1 + 46*M` cycles, which is
95 for one row and M = 2. The testbenches check this count exactly.

### Range and saturation

The op-amp gain is set by `r_shift`. At `r_shift = 0`, one DAC LSB of current
gives one ADC LSB. The 6-bit ADC clips at 63 LSB and raises `adc_over`. A
column whose current exceeds full scale is then under-counted.

With many rows and large `1/sigma^2`, raise `r_shift`. This trades resolution,
since low bits are lost in the hold cell, against range. The testbench
deliberately runs a six-dimensional mixture at `r_shift = 0` to exercise
clipping. The reference model reproduces the clipped results bit for bit.

## Central layer and log domain

`central_proc` keeps `E_j` of the current sample and `ln F` of the current
sample. For each iteration it:

1. starts all banks and waits for all `done`;
2. forms `E_j^cand = E_j + sum_banks dE_j`;
3. computes `ln F = LSE_j (c_j - E_j/2)` for both the current and the
   candidate sample with the log-add unit, one component per cycle.
   `c_j = ln p_j - sum_i ln sigma_ij` is loaded by the host in Q10;
4. accepts when there is no overflow and `ln F(cand) - ln F(x) > ln U`;
5. sends `update/accept` to the banks, waits for the write-back, and pulses
   `sample_valid` with `sample_accept` and `sample_ovf`.

`E_j` of the initial sample is loaded by the host (`e_init`, `e_load`). After
that it is only ever updated incrementally.

`log_add_lut` computes `ln(e^a + e^b) = max + ln(1 + e^-|a-b|)`. The
correction comes from a 64-entry table indexed by `|a-b|` in steps of 1/8.
Entry k is

    round(1024 * ln(1 + exp(-(k + 0.5)/8)))

which is held in `rtl/log_add_lut.hex`. When the difference is beyond the
table (at least 8), the correction is taken as zero and `sat` is raised.

`uniform_rng` is a 16-bit Galois LFSR. Its taps are 0xB400, its reset value is
0xACE1, and it advances once per decision. `ln U` is formed from a leading-one
detector plus Mitchell's approximation `log2(1+f) ≈ f`, scaled by ln 2
(710/1024):

    ln U = ((k*1024 + f - 16*1024) * 710) >> 10   (Q10)

## DAC calibration

Each row DAC mirrors its code with binary-weighted transistors. Process spread
makes the real mirror ratio differ from nominal. The model gives every DAC a
ratio of `(64 + DAC_MISMATCH + cal)/64`, with a default mismatch of -3/64.
`cal` is the number of small calibration mirrors switched in (`CAL_BITS` = 4).

`cal_start` starts `dac_calibration` in every bank. For each row in turn it:
- drives the full-scale test code on that row only;
- compares the mirror current with the reference `2^DAC_BITS - 1`;
- switches in one more calibration mirror per comparison until the current
  reaches the reference.

Each step takes 2 cycles: settle, then compare. With the default mismatch,
every row ends at `cal = 3`, which is an exact ratio.

## Behavioural models

Four files model analog circuits. Each says so in its first comment.

- `rng_cell`: each metastable cross-coupled cell resolves to a random bit
  when clocked. A per-cell 32-bit xorshift generator stands in for thermal
  noise. Seeds differ by bank, row and bit.
- `row_dac`: an integer current, `code * ratio / 64`.
- `tia_hold`: `V = I * R` as a shift with 8 fraction bits. The hold cell has a
  sample switch and a reset switch.
- `two_step_adc`: a thermometer coarse flash (ceil(n/2) bits). The coarse level
  is subtracted, and a fine flash (floor(n/2) bits) converts the residue on the
  next cycle. The result arrives 2 cycles after the sample, and codes above
  full scale clip.

Not modelled:
- channel-length modulation in the mirrors;
- leakage;
- op-amp offset and finite gain;
- comparator offsets;
- noise in the current path.

## Timing summary (default parameters, 2-D two-component mixture)

| phase | cycles |
|---|---|
| bank iteration (`start` to `done`) | 95 |
| one MH step, reject | 107 |
| one MH step, accept (adds write-back) | 109 |
| 500 steps in one run | about 53,900 |
| calibration of all rows | 2 cycles per comparison, cal+1 comparisons per row: 256 for 32 rows at cal = 3, banks in parallel |

## Where this design departs from the source

- **Throughput.** The source design reports 500 samples in about 2000 cycles,
  which is 4 cycles per sample. It does not say how its column conversions are
  scheduled. Here one column ADC per bank converts one column per cycle. That
  gives 80 conversions per step for M = 2, and about 108 cycles per sample.
  Faster variants would need several ADCs per bank, or fewer bit columns.
- **ADC comparators.** The source quotes 10 comparators for a 6-bit two-step
  ADC. A 3 + 3 split with thermometer flashes needs 7 + 7. This design follows
  the 6-bit precision.
- **Number formats, `r_shift`, `c_j` and `E_j(0)` loading, and the symmetric
  R** are choices of this design. The source gives none of them.
- **Mixture weights.** The source keeps `mu`, `sigma` and `p` in the SRAM
  banks. Here `p_j` and the `sigma` normalisation are folded into one
  constant per component, `c_j`, which the host loads into the central
  layer. The banks hold only what their scalar products need.
- **Power gating.** The source switches off the op-amp and the row DAC bias
  once the hold cell has its sample. This saves power but does not change
  any logic value, so it is not modelled.
- **Analog internals** (op-amp, hold-cell transistors, bias generation) exist
  only as the behavioural models above.

## Verification

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/mc2_ref_pkg.sv` is an independent
reference model. It covers the quantised bit-column product, including DAC
truncation and ADC clipping, plus the log-add, the LFSR and `ln U`.

`tb_mc2ram_top` runs the whole sampler at its default parameters. The test
first calibrates all 64 DACs and checks that each ends at code 3. It then runs
these workloads, checking every iteration against the reference:

- the two-dimensional mixture `mu = (1,-1), (-1,1)`, `sigma = I`,
  `p = (0.5, 0.5)`, for 500 steps. Here no quantisation occurs, so `E_j` must
  also equal the exact value for the current `x`;
- the same mixture at mean distance 5;
- a sample at the edge of the range, which produces overflow rejects;
- a six-dimensional mixture with ADC clipping;
- 500 steps in one run, with the cycle count printed.

The checks cover the random step read back from the RNG columns, the decision,
`x` after write-back, and `E_j`. The test fails if any of these never
happens: accept, reject, overflow reject, ADC saturation, log-add saturation,
negative-phase conversions, both banks contributing, calibration changing the
DACs.

### Sweeps

`tb_mc2ram_sweep` runs the evaluation experiments. It uses eleven complete
samplers with 8 rows per bank, simulated in parallel:
- ADC precision 3 to 8 bits, with an 8-bit DAC;
- DAC precision 3 to 7 bits, with a 6-bit ADC;
- on the 8/6-bit point only: mean distance 1 to 5, and mixtures of 2 to 6
  dimensions.

Each sampler draws 500 samples. Every step is checked against the reference
model at that precision. The test prints a KL divergence of the post-burn-in
samples from the mixture, computed on a 1×1 grid of the first two
coordinates.

Read the KL numbers with care:
- **Precision makes little difference for this mixture.** With unit
  variances every row operand is `4*R_i`, a multiple of 4. Dropping up to two
  LSBs in the DAC, or in the op-amp range setting, therefore loses nothing.
  Only the 3- and 4-bit DACs change the chain.
- **Wide means give high KL.** At mean distance 3 or more the chain stays in
  its starting mode for all 500 samples. The step is at most ±7/16, so it
  cannot cross between modes in that time.
- **The KL values are rough.** A few hundred correlated samples give only an
  approximate figure.

## Simulating

Verilator 5, run from the repository root, because `log_add_lut` reads
`rtl/log_add_lut.hex` by that relative path:

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/mc2_pkg.sv tb/mc2_ref_pkg.sv \
    $(ls rtl/*.sv | grep -v mc2_pkg) tb/tb_mc2ram_top.sv \
    --top-module tb_mc2ram_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

For a block testbench, replace the last file and the top module name, for
example with `tb/tb_mc2_bank.sv` and `tb_mc2_bank`. Every register that is read
has a reset. The array's storage cells do not, as in an SRAM: the host writes
them before use. `+verilator+rand+reset+2` starts all other state at random
values. The full-size end-to-end test takes about half a minute.

The main parameters of `mc2ram_top` are:
- `ROWS` (32), `NUM_BANKS` (2), `M` (2);
- `DAC_BITS` (8), `ADC_BITS` (6);
- `CAL_BITS` (4), `DAC_MISMATCH` (-3).

Changing `M` changes the column map in `mc2_pkg` automatically. The width of
a column current (`CUR_W` = 16 in `mc2_pkg`) must hold `ROWS * 127`.
