# VECOM tile: a ReRAM matrix-vector unit that stays exact with many wordlines on

A ReRAM crossbar multiplies a vector by a matrix in one analog step. Each
cell's conductance holds a weight, each wordline carries an input bit, and
each bitline sums the currents of its cells. Two device problems limit how
many wordlines can be switched on together:

* **Conductance variation.** A programmed cell misses its target by a
  random factor, and high levels miss by the most. The errors of all
  activated cells add up on the bitline. Past some number of activated
  wordlines (NAW), the ADC can no longer tell neighbouring sums apart.
* **Offset current.** A cell in the high-resistance state (HRS, level 00)
  still conducts G00. Every activated cell adds that current, whatever it
  stores. With a low on/off resistance ratio (R-ratio) this offset swamps
  the signal.

This RTL implements one processing tile that uses the two VECOM remedies
("Variation-resilient Encoding and Offset Compensation", after Jang, Nguyen
and Yang, *VECOM: Variation-Resilient Encoding and Offset Compensation
Schemes for Reliable ReRAM-Based DNN Accelerator*):

1. **VECOM encoding.** Weights are re-encoded so that the bits that matter
   most sit on the low, less variable conductance levels.
2. **Conductance offset mapping (COM).** Cells are programmed so that
   subtracting one all-HRS reference column removes the offset current
   exactly, even for multi-level cells.

The tile holds a 128 x 128 matrix of signed 8-bit weights in 2-bit
multi-level cells (MLC) and multiplies it by 128 unsigned 8-bit
activations. NAW can be selected per multiplication, from 1 to 128.

## Storing a weight: the VECOM encoding

A conventional crossbar stores a signed 8-bit weight `w` as `w + 128`,
split into four 2-bit cells: [7:6], [5:4], [3:2] and [1:0]. In trained
networks almost all weights lie in [-64, 63], so the [7:6] cell nearly
always holds 01 or 10. Level 10 is a high, strongly varying conductance.
VECOM changes the mapping in two steps (`vecom_encoder`):

**Bias control.** The stored value is `u = w + 64`, not `w + 128`. Common
weights now put 00 or 01 in the MSB cell. Weights below -64 would become
negative; they are clipped to `u = 0`, which means they are stored as -64.
Outliers above 63 still use MSB level 10.

**Redundant mapping of [5:4].** The [5:4] slice `v` of `u` is spread over
two cells, `v = 3*origin + redun`:

| `u[5:4]` | Origin cell | Redun cell |
|---|---|---|
| 00 | 00 | 00 |
| 01 | 00 | 01 |
| 10 | 00 | 10 |
| 11 | 01 | 00 |

The Origin cell never goes above level 01. The shift-and-add stage gives it
three times the weight of the Redun cell. Each weight therefore occupies
five cells instead of four, in five separate crossbars, one per slice:

| array | content | weight in shift-and-add |
|---|---|---|
| MSB | `u[7:6]` | 64 |
| Origin | 0 or 1 | 48 (= 3 x 16) |
| Redun | 0, 1 or 2 | 16 |
| B32 | `u[3:2]` | 4 |
| B10 | `u[1:0]` | 1 |

Check: `64*msb + 48*orig + 16*redun + 4*b32 + b10 = u` for every `u`. The
fifth array is the 25 % area cost of the scheme.

## Programming a cell: conductance offset mapping

Let `G_LSB` be the conductance step of one level and `G00` the HRS
conductance. Suppose level `k` were programmed to `k*G_LSB`, and the
bitline current minus the reference-column current (`N*G00` for `N`
activated rows) were taken as the result. Each non-HRS cell would then come
out `G00` short. That is the error a plain reference column makes with
MLCs.

`com_target_map` avoids it by programming every level as

    G'(k) = k*G_LSB + G00        (level 00 is just G00)

On any bitline, `sum(G') - N*G00 = sum(k*G_LSB)` holds exactly, whatever
the mix of levels and for any bits per cell. The rule costs nothing at run
time: it only moves the targets that write-and-verify programming aims at.

The model's units are integers: `G_LSB = 64` and `G00 = G_HRS = 32`.
The top level is then `G'(3) = 224`, an R-ratio of 224/32 = 7. This is the
lowest ratio at which the scheme was reported to hold accuracy.

Every crossbar has one extra **reference column** (column 128), programmed
to HRS. The MSB crossbar has one more column, the **bias column** (column
129). It is programmed to level 01 in every row, so after offset
subtraction its ADC code is the number of ones among the activated input
bits. The shift-and-add stage multiplies that count by 64 and subtracts it,
which removes the bias from the result.

## Running a multiplication

`y[j] = sum_i x[i] * max(w[i][j], -64)` is computed bit-serially:

```
for b in 0..7                         (input bit, LSB first)
  for g in 0 .. 128/NAW - 1           (wordline group)
    wl[r] = x[r][b] for rows r in group g, else 0
    every column of the 5 arrays, plus the bias column:
        code = round((I_bitline - I_reference) / G_LSB)   SAR, log2(NAW)+2 bits
    y[j] += (64*c_msb + 48*c_orig + 16*c_redun + 4*c_b32 + c_b10 - 64*c_bias) << b
```

With NAW activated 2-bit cells, a column sum is at most `3*NAW`, so
`log2(NAW)+2` bits are enough. The SAR ADC resolves one bit per clock. A
step takes one cycle to drive the wordlines, `log2(NAW)+2` cycles to
convert and one cycle to accumulate. From the clock edge that accepts
`start` to the `done` pulse:

    cycles = 8 * (128/NAW) * (log2(NAW) + 4)

| NAW | ADC bits | cycles |
|---|---|---|
| 128 | 9 | 88 |
| 64 | 8 | 160 |
| 32 | 7 | 288 |
| 16 | 6 | 512 |
| 8 | 5 | 896 |
| 1 | 2 | 4096 |

This is the throughput argument for the scheme. Raising NAW from 8 to 128
cuts the time of a multiplication tenfold, provided the encoding and offset
compensation keep the codes correct at that NAW. Whether they do is a
question of device statistics, which this RTL does not settle (see
"Trust and limits").

## Block structure

```
vecom_tile
 +- weight_programmer        host writes -> five crossbar write ports
 |   +- vecom_encoder        bias 64 + clip, Origin/Redun split
 |   +- com_target_map x5    level -> G' = k*G_LSB + G00
 +- mac_controller           bit / group / ADC / accumulate sequence
 +- wl_driver                activation buffer, bit-serial wordlines, NAW groups
 +- reram_crossbar x5        [behavioural] cells, reference col, (bias col)
 +- sar_comparator x5 (+1)   [behavioural] I_bl - I_ref vs DAC level
 +- sar_adc_logic            SAR registers of all 641 column ADCs
 +- shift_add                slice weights, bias removal, shift, accumulate
vecom_pkg                    sizes, slice weights, bias, level struct
```

`reram_crossbar` and `sar_comparator` stand in for analog circuits. They
are written as integer arithmetic, which both verilator and synthesis
accept, but their numbers are currents and conductances, not logic. Every
other module is ordinary synchronous logic. All modules use a single clock
and a synchronous, active-high reset. The ReRAM cells and the activation
buffer are not reset; they must be written before they are read.

## Interface of `vecom_tile`

| port | dir | width | use |
|---|---|---|---|
| `clk`, `rst` | in | 1 | clock, synchronous reset |
| `prog_valid` | in | 1 | write one cell position this cycle |
| `prog_row` | in | 7 | row |
| `prog_col` | in | 8 | 0..127 weight column, 128 reference column (all arrays), 129 bias column (MSB array) |
| `prog_w` | in | 8 signed | weight (ignored for columns 128/129) |
| `prog_var` | in | 5 x 11 signed | per-array deviation of the written cell, in conductance units; 0 for ideal cells |
| `clipped_count` | out | 32 | weights clipped since reset |
| `x_we`, `x_addr`, `x_data` | in | 1, 7, 8 | write one activation |
| `start` | in | 1 | begin a multiplication; accepted only while `busy` is low |
| `naw_log2` | in | 3 | NAW = 2^naw_log2, sampled with `start` |
| `busy`, `done` | out | 1 | running / one-cycle completion pulse |
| `y` | out | 128 x 32 signed | results, valid from `done` until the next `start` |

To load the tile, write the 128 x 130 cell positions, one per cycle: the
weights plus the two extra columns. A write lands in the cells two clock
edges after `prog_valid`. Write the activations, pulse `start` and wait for
`done`.

`prog_var` is not a chip pin. It is how a testbench tells the behavioural
crossbar by how much a real cell would miss its target, for example with
values drawn from the log-normal model `G = G0 * exp(theta)`.

## What follows the source paper and what is this design's own

Taken from the paper:
* the 128 x 128 crossbar with 2-bit cells;
* 8-bit weights and activations, fed bit-serially through 1-bit DACs;
* bias 64 with clipping of negative biased values;
* the Origin/Redun split with the x3 weight;
* slice-wise arrays;
* one extra HRS column per array with current subtraction;
* the targets `G + G00`;
* a bias-count column of 01 cells;
* SAR ADCs of `log2(NAW)+2` bits.

This design's own choices, where the paper gives no detail:
* All 01 and 10 patterns of [5:4] go to the Redun array. The paper says
  only "a minor portion", but only this split leaves the Origin array with
  levels 00 and 01 alone, as described.
* Conductance units (64 per level, G00 = 32) and evenly spaced levels.
* One SAR register per column, all converting in parallel at one bit per
  clock. The paper's baseline architecture shares one ADC per crossbar;
  sharing would multiply every cycle count above by the number of columns
  per ADC.
* NAW restricted to powers of two, contiguous row groups, LSB-first input
  bits, unsigned activations.
* One bias column for the tile, in the MSB array, compensated by that
  array's reference column.
* The programming command format, a registered write path and the
  clipped-weight counter.
* Write-and-verify is not modelled: a cell takes target plus deviation at
  once.
* The start/busy/done handshake and the one-cycle drive and accumulate
  overheads per step.

Not built: the chip around the tile (many tiles, buffers, interconnect),
write-and-verify pulse circuits, analog detail such as IR drop, sneak
currents and ADC noise, cells with other than 2 bits, and 4-bit weight
mode.

## Trust and limits

With ideal cells (`prog_var = 0`) the tile is exact. Every output equals
`sum x*max(w,-64)` for every NAW, at full size and at reduced size. With a
deviation of at most `d` units per cell, each ADC code stays exact as long
as the accumulated error stays below half a level:
`NAW*d + NAW*d(ref) < G_LSB/2 = 32`. The reduced-size test checks this for
`d = 1` and NAW up to 8. Beyond that bound, codes are off by the rounded
error, and the 64 / 48 weights in shift-and-add magnify errors in the
upper slices. That is why those slices are kept on low levels. The
accuracy of a network under variation depends on device statistics
outside this RTL.

`tb_vecom_naw_sweep` shows the effect at full size. Each cell gets
`G = G' * exp(theta)`, with `theta ~ N(0, sigma^2)`. The weights are
bell-shaped with a standard deviation of 24, and the activations are
uniform in 0..255. The table gives the mean absolute deviation of an
output from the exact product. Outputs themselves are of the order of
10^4 to 10^5.

| sigma | NAW 8 | NAW 16 | NAW 32 | NAW 64 | NAW 128 |
|---|---|---|---|---|---|
| 0 | 0 | 0 | 0 | 0 | 0 |
| 0.02 | 5 | 35 | 104 | 439 | 9370 |
| 0.08 | 10515 | 12166 | 22171 | 18018 | 19518 |

These numbers come from one random draw with this model's conductance
scale (G00 = half a level step). They show how the mechanism behaves. They
are not a prediction of network accuracy.

One tile holds 16,384 weights. Networks such as ResNet-18 (about 11
million weights) need hundreds of tiles or reprogramming between layers;
neither is modelled.

## Simulating

Every file in `rtl/` and `tb/` starts with a comment on its function and
timing. Each testbench checks its block against values it computes
independently, prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends a run that hangs. For example:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/vecom_pkg.sv tb/tb_vecom_tile.sv --top-module tb_vecom_tile -o sim
./obj_dir/sim
```

| testbench | what it shows |
|---|---|
| `tb_vecom_encoder` | all 256 weights: slices, Origin/Redun ranges, clipping, exact rebuild |
| `tb_com_target_map` | targets for MLC and a 4-bit-per-cell instance; exact reference subtraction |
| `tb_reram_crossbar` | bitline, reference and bias currents against a cell-by-cell model, clamping |
| `tb_sar_comparator` | subtraction and rounding threshold |
| `tb_sar_adc_logic` | codes for resolutions 1..9, MSB-first order, `res`-cycle latency |
| `tb_wl_driver` | wordline selection for every NAW, never more than NAW rows on |
| `tb_shift_add` | slice weights, bias removal, shifting, clear |
| `tb_mac_controller` | step order and cycle count for NAW 1..128 |
| `tb_weight_programmer` | enables, targets, extra columns, clip counter |
| `tb_vecom_tile` | 16 x 8 tile end to end, every NAW, clipping, Origin use, bias and offset subtraction, deviated cells |
| `tb_vecom_tile_full` | full 128 x 128 tile at default parameters, NAW 128 (88 cycles) and 16 (512 cycles) |
| `tb_vecom_naw_sweep` | full tile with log-normal cell variation, NAW 8..128: outputs match a cell-by-cell prediction of every ADC code |

The full-size test takes about ten seconds, the variation sweep under a minute. To change the geometry, set
`ROWS` and `COLS` on `vecom_tile`; `ROWS` must be a power of two. The ADC
width follows `ROWS` automatically. `G_LSB` and `G_HRS` set the
conductance scale and the R-ratio; widen `G_BITS` if
`3*G_LSB + G_HRS` plus deviations no longer fits.
