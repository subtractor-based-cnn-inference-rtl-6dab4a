# Subtractor-based convolution accelerator

A convolution output is a dot product of a kernel with a window of the
input. If two weights of the same kernel are (nearly) opposite, `Kb ≈ -Ka`,
their two products can be folded into one:

    I1*Ka + I2*Kb  =  Ka * (I1 - I2)        (exact when Kb = -Ka)

which costs one subtraction, one multiplication and one addition instead of
two multiplications and two additions. Since trained CNN weights are spread
roughly symmetrically around zero, many such pairs exist once a small
tolerance — the *rounding size* — is allowed. A larger rounding size finds
more pairs and removes more multipliers, at the price of a larger
approximation error.

This RTL implements both halves of the scheme:

* a **weight preprocessor** that sorts a kernel, splits it at zero, finds
  the pairs and produces a *modified weight list* (pairs first, uncombined
  weights after, every entry carrying its original position in the kernel);
* a **modified convolution unit** that walks this list for every output
  position and computes pairs with a subtraction and single weights with
  an ordinary multiply-add.

All arithmetic is IEEE 754 binary32.

## Top level: `subconv_accel`

```
            w_* (kernel, one weight/cycle)           fm_* (input map)
                     |                                      |
              +------v--------------------+          +------v----------------+
              | weight_preprocessor       |  list    | modified_conv         |
              |  weight_sorter            |--------->|  feature map buffer   |--> out_* (to subsampling)
              |  combination_finder       | n_comb   |  sub -> mul -> acc    |
              +---------------------------+ n_total  +-----------------------+
                     ^ start                                ^ start
                     +------------ controller (IDLE/PRE/CONV)
```

One `start` computes **one output channel** of a convolution layer: the
host first loads that channel's kernel (`w_clear`, then `w_valid`/`w_value`/
`w_loc` once per weight) and the input feature map (`fm_we`/`fm_addr`/
`fm_wdata`, address `c*H*W + y*W + x`), sets `cfg_in_h`, `cfg_in_w`, `cfg_k`
and `rounding`, and pulses `start`. The controller runs the combination
step, then the convolution; the outputs stream out on `out_valid`/
`out_data`/`out_oy`/`out_ox` in row-major order and `done` comes with the
last one. For a whole layer the host repeats this per output channel.

The load ports must be idle while `busy` is high (checked by an assertion).
The counters `cnt_sub`, `cnt_mul`, `cnt_add` count operations since reset,
and `n_comb`, `stat_*` report what the preprocessing found.

Default sizes (`subconv_pkg`) cover the three convolution layers of LeNet-5:
`N_MAX = 400` weights per kernel (16 channels × 5 × 5) and a
`FMAP_WORDS = 1176` word input buffer (6 × 14 × 14). Layer shapes up to
6-bit rows/columns and kernels up to 7×7 are accepted by the ports.

### Timing

Counting clock edges from the one that takes `start`:

| phase | edges |
|---|---|
| sorting | none after `start`: done while the kernel is loaded, one weight per cycle |
| combination search | `count − pairs` (one pointer step per edge) |
| hand-over | 2 (preprocessor `done`, convolution start) |
| each output position | `pairs + uncombined + 1` |

With rounding size 0 no pair is ever formed (see below), so the unit then
is an ordinary convolution taking `count + 1` edges per output.

## Weight preprocessing

### Sorting and splitting (`weight_sorter`)

The kernel is sorted in ascending numeric order by an insertion array: on
every loaded weight all stored entries compare themselves with it in
parallel; those greater shift down one place and the new weight drops into
the gap. Ties keep their load order. The sort key is the binary32 pattern
with negative numbers bit-inverted and positive numbers' sign bit set, so an
unsigned integer compare gives the numeric order.

The sorted array is split at `neg_count`, the number of negative weights:

```
 index:   0 ............ neg_count-1 | neg_count ........... count-1
 value:   most negative ... closest to 0 | smallest positive ... largest
                                ^ PN starts here      ^ PP starts here
```

Zero counts as positive. Each entry is `{value, loc, flag}` with
`loc = {c[3:0], ky[2:0], kx[2:0]}`, the weight's place in the kernel, and
`flag ∈ {U, C, N}` (unprocessed, combined, not combined).

### Finding pairs (`combination_finder`)

This is the core of the method. Two pointers walk the two lists in order of
increasing magnitude — `PP` upward through the positive part, `PN` downward
through the negative part — and each clock edge makes one decision:

| condition (binary32) | meaning | action |
|---|---|---|
| `PP ≥ abs(PN) + r` | negative weight too small to match anything left | `PN` → N, advance `PN` |
| `PP ≤ abs(PN) − r` | positive weight too small | `PP` → N, advance `PP` |
| otherwise (`abs(PP − abs(PN)) < r`) | match | both → C, store pair, advance both |

Because both lists are sorted by magnitude, a weight rejected once can never
match a later partner, so one linear pass suffices. When one list runs out,
the remainder of the other is flagged N. `|PN| ± r` is computed by two
binary32 adders, so the window is exactly the one a binary32 software model
would use.

With `r = 0` the two conditions cover every case (`PP ≥ |PN|` or
`PP < |PN|`), so no pair is formed even for exactly opposite weights; the
smallest useful rounding size is one that exceeds the gap between them.

The result is written as it is found into one output array:

```
 list[0]            PP of pair 0   (flag C)
 list[1]            PN of pair 0   (flag C)
 ...
 list[n_comb-1]     PN of last pair
 list[n_comb]       uncombined     (flag N)   <- filled from the bottom up
 ...
 list[n_total-1]    first weight rejected
```

Pairs are written from the top, rejected weights from the bottom, so the
combined part and the uncombined part end up contiguous without a separate
merge pass. Within the uncombined part the order is the reverse of the
rejection order; nothing downstream depends on it.

## Modified convolution (`modified_conv`)

For each output position `(oy, ox)` of a stride-1, unpadded convolution the
unit walks the list, one step per clock:

* `idx < n_comb` (a pair): read `I1` under `list[idx]` and `I2` under
  `list[idx+1]`, compute `acc += list[idx].value * (I1 − I2)`, `idx += 2`;
* otherwise: `acc += list[idx].value * I1`, `idx += 1`.

The input under a weight at `loc = (c, ky, kx)` is read from
`c*H*W + (oy+ky)*W + (ox+kx)` in the feature-map buffer, which has two
combinational read ports. The datapath is one subtractor, a multiplexer
(difference for pairs, raw input for single weights), one multiplier and
one accumulating adder. `Ka` is the positive weight of the pair, so the
negative weight's own value is only used to decide whether it pairs.

Operation counting matches the usual accounting for this method: per output,
`pairs` subtractions, `pairs + uncombined` multiplications and as many
additions (the first addition into the zeroed accumulator is counted).
Without pairing a kernel of `n` weights costs `n` multiplications and `n`
additions.

## Floating-point units (`fp_addsub`, `fp_mul`)

Combinational binary32 adder/subtractor and multiplier, round to nearest
even. Simplifications: subnormal inputs read as zero, subnormal results
flush to zero, overflow gives infinity, Inf/NaN inputs are not handled.
An exact cancellation gives +0. These are adequate for network weights and
activations, which are far from those ranges.

## How far to trust it

Every block has a self-checking testbench; results are compared bit for bit
against an independent reference (`tb/ref_model_pkg.sv`, `tb/fp_ref_pkg.sv`)
that works in `real` arithmetic and rounds to binary32 after each operation.

| testbench | what it checks |
|---|---|
| `tb_fp_addsub`, `tb_fp_mul` | 20–25 k random and directed operands, including exact ties |
| `tb_weight_sorter` | order, locations, split point, reload after clear |
| `tb_combination_finder` | list, flags, counts and cycle count for rounding sizes 0, 0.0001, 0.05, 0.3, one-signed kernels, empty kernel |
| `tb_weight_preprocessor` | loading through the port plus the above |
| `tb_modified_conv` | every output value and position, spacing between outputs, operation counters |
| `tb_subconv_accel` | end to end, **default sizes**: one output channel of each LeNet-5 convolution shape, rounding 0.05, 0, 0.3, 0.0001; exact outputs, counters, total cycle count; each mechanism (pairing, both rejection rules, leftovers, rounding 0) must occur |

| `tb_lenet_conv` | workload: every output channel of LeNet-5's three convolution layers, at 13 rounding sizes from 0 to 0.3; counters against the reference; full output check at 0.05 |

The end-to-end test also prints the RMS deviation of the approximate
outputs from the exact convolution. Its weights are random, not those of a
trained network, so these numbers say nothing about classification
accuracy.

Not verified: timing closure at any clock frequency (the arithmetic is a
single combinational chain per step; a real implementation at 1 GHz would
pipeline it), and accuracy on a trained LeNet-5.

## Operation counts on LeNet-5

The three convolution layers of LeNet-5 (C1: 6 × 1×5×5 kernels on 32×32;
C3: 16 × 6×5×5 on 14×14; C5: 120 × 16×5×5 on 5×5) need
6·28·28·25 + 16·10·10·150 + 120·400 = 405 600 multiply-adds. All of them fit
the default sizes (C5's kernel fills the 400-entry list exactly, C3's input
fills the 1176-word buffer exactly). `tb_lenet_conv` runs every channel
with random bell-shaped weights (standard deviation about 0.2) and reads the
hardware counters:

| rounding size | additions | subtractions | multiplications | total |
|---|---|---|---|---|
| 0      | 405600 | 0      | 405600 | 811200 |
| 0.0001 | 400331 | 5269   | 400331 | 805931 |
| 0.005  | 296528 | 109072 | 296528 | 702128 |
| 0.01   | 273572 | 132028 | 273572 | 679172 |
| 0.025  | 248078 | 157522 | 248078 | 653678 |
| 0.05   | 232705 | 172895 | 232705 | 638305 |
| 0.1    | 223298 | 182302 | 223298 | 628898 |
| 0.3    | 220631 | 184969 | 220631 | 626231 |

Subtractions plus multiplications always equal 405 600: each pair trades two
multiply-adds for one subtraction and one multiply-add. With trained weights
the counts differ, but the shape is the same: most of the saving comes by a
rounding size of about 0.05, where roughly 40 % of the multiplications are
gone, and little is gained beyond 0.1 while the error keeps growing.

## Departures and choices

* The preprocessing is a software pass in the original method, run once
  before deployment. Here it is hardware, rerun for each kernel; its
  outputs are the same.
* The sort scope is one output channel's kernel (all its input channels),
  the natural scope since both weights of a pair must belong to the same
  dot product.
* The weight used for a pair is the positive one. Other choices (the
  negative one, the mean of magnitudes) would change only which weight is
  approximated.
* No bias, activation, stride or padding; the LeNet-5 shapes need none.
* The subsampling stage and the rest of the network are not included; the
  output stream is where subsampling would attach. The conventional
  convolution unit a full accelerator would keep alongside is not included
  either: rounding size 0 turns this unit into one.

## Using it

Files: `rtl/subconv_pkg.sv` (types, sizes) and one module per file in
`rtl/`; testbenches and reference packages in `tb/`. To simulate the
end-to-end test with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/subconv_pkg.sv tb/fp_ref_pkg.sv tb/ref_model_pkg.sv \
  rtl/fp_addsub.sv rtl/fp_mul.sv rtl/weight_sorter.sv rtl/combination_finder.sv \
  rtl/weight_preprocessor.sv rtl/modified_conv.sv rtl/subconv_accel.sv \
  tb/tb_subconv_accel.sv --top-module tb_subconv_accel -o sim
./obj_dir/sim
```

It runs in well under a minute and ends with a `TB_RESULT` line. The other
testbenches build the same way with their own top module.

To change sizes, edit `N_MAX` and `FMAP_WORDS` in `subconv_pkg` or override
`N`/`WORDS` on the modules; `loc_t` limits kernels to 16 input channels and
7×7.
