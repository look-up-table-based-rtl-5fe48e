# LUT-NA: a look-up-table multiply-accumulate engine for pruned CNNs

In a trained network the weights are constants. A multiplier for one fixed
weight `w` can therefore be replaced by a table of pre-computed products. A
plain table of `w * d` for every N-bit input `d` needs `2^N` entries, so that
approach stops scaling after a few bits. LUT-NA ("look-up-table neural
acceleration") uses divide and conquer instead. The data word is cut into
2-bit slices. Each slice needs only four products: `w*0`, `w*1`, `w*2` and
`w*3`. One 4-entry table, shared by all slices, plus one 4:1 mux per slice
and a shifted adder gives the exact product. There is no multiplier array
and no large table.

An approximate variant, A-LUT-NA, goes further. Pruned CNNs have mostly
small activations, and many of them are zero. So A-LUT-NA looks up only one
half of the data word: the upper half when it is non-zero, and otherwise the
lower half. The dropped lower half's contribution is taken as 0. Mixed
precision runs some layers of a network on the exact multiplier and the rest
on the approximate one. The split is a boundary layer `n`, chosen per network.

This repository holds synthesizable SystemVerilog for these multipliers and
their weight tables. It also holds a small weight-stationary MAC engine that
uses them, with a per-layer precision controller. The multipliers, tables and
layer rule follow the published LUT-NA scheme. The engine around them (lane
count, accumulator, pipeline, ports) is this design's own, because the
scheme describes the multiply side of the MAC only. Section 7 lists every
such choice.

## 1. Number format

Weights and activations are **sign-magnitude**: one sign bit plus an
`N`-bit magnitude. The default is `N = 8`, i.e. 9-bit words. This is the
resolution at which LTP-pruned (lottery-ticket-pruned) VGG and ResNet models
on CIFAR-10 reach their 32-bit baseline accuracy. A product has a sign bit
(the XOR of the operand signs) and a `2N`-bit magnitude (17 bits in all for
`N = 8`). All modules also work at `N = 4`, the size of the worked example
below. The approximate multiplier needs `N` to be a multiple of 4.

## 2. The exact multiplier (`lutna_mult`)

For `N = 8`, with `d = d7..d0`:

```
w * d = (w * d7d6) << 6  +  (w * d5d4) << 4  +  (w * d3d2) << 2  +  (w * d1d0)
           Z3                 Z2                  Z1                  Z0
```

Each `Zk` is an `N+2` = 10-bit entry chosen from the weight table by a 4:1
mux (`lut_mux4`) whose select is the slice `d[2k+1:2k]`. The 4:1 mux is a tree
of three 2:1 muxes. The four `Zk` are added at their offsets. A shift costs
no logic: the adder's inputs are just wired two bits apart.

| `N` | table cells | 1-bit 2:1 muxes | partial products |
|-----|-------------|-----------------|------------------|
| 4   | 4 x 6 = 24  | 2 x 18 = 36     | Z1, Z0 |
| 8   | 4 x 10 = 40 | 4 x 30 = 120    | Z3..Z0 |

The result is exact. The adder is written as a behavioural sum and left to
synthesis. The source scheme counts it as rows of half and full adders
(3 HA + 3 FA at 4 bits, 9 HA + 21 FA at 8 bits).

## 3. The storage-optimized table (`lut_store_opt`)

The four table entries are related. Only `2N+2` cells need to be stored:

| mux input | formed from | cells |
|-----------|-------------|-------|
| `w*00` | one cell holding 0, fanned out to all `N+2` bits | 1 |
| `w*01` | `{2'b00, w}`: `N` stored bits of `w` | N |
| `w*10` | `{1'b0, w, 1'b0}`: the same `w` cells wired one bit higher | 0 |
| `w*11` | `{w3[N+1:1], w[0]}`: 3w and w have the same LSB | N+1 |

That is 10 cells at `N = 4` and 18 at `N = 8`, against 24 and 40 for the
full table (`lut_store_full`). Four output bits are constant 0 by
construction. The write port takes the same four pre-computed entries as the
full table. Entry 2 is ignored, and only the stored bits of entries 0, 1 and
3 are kept.

## 4. The approximate multiplier (`alutna_mult`)

Split `d` into an upper half `dH = d[N-1:N/2]` and a lower half
`dL = d[N/2-1:0]`:

```
if (dH != 0)  p = (w * dH) << N/2      // lower half treated as 0
else          p =  w * dL              // exact
```

Only one half is looked up at a time, so only `N/4` mux trees are needed:
one at `N = 4` and two at `N = 8`. For `N = 8` one 10-cell adder combines
the two trees' outputs. This design shares those trees between the two
cases. A 2:1 steering mux feeds them the slices of `dH` or of `dL`, and the
sum is shifted left by `N/2` when `dH` was used.

The error is zero whenever `dH = 0`, which is the common case for activations
after ReLU in pruned networks. Otherwise the product is too small by
`w * dL`. That is less than `w * 2^(N/2)`, and at most 48% of the true
product (for `d = 0x1F`). Choosing 0 for the dropped half removes both its
storage and the adder. The source scheme chose 0 because 0 is the most
frequent 4-bit x 2-bit product for real activation statistics. An
intermediate variant with a fixed non-zero constant for the lower half is
described there but not built here.

The sign is `w_sign ^ d_sign`, as in the exact multiplier.

## 5. Mixed precision (`mp_ctrl`)

Where a network does most of its multiply work decides which layers get the
approximate multiplier:

| network (CIFAR-10, LTP-pruned) | order | boundary `n` |
|---|---|---|
| VGG11     | first `n` layers approximate, rest exact | 1 |
| VGG19     | first `n` layers approximate, rest exact | 4 |
| GoogleNet | first `n` layers approximate, rest exact | 69 |
| ResNet18  | first `n` layers exact, rest approximate | 36 |
| ResNet34  | first `n` layers exact, rest approximate | 48 |

With these boundaries, accuracy stays within about 1% of the baseline.
`mp_ctrl` stores `n` and the order (`cfg_approx_first`) and counts layers.
It outputs

```
approx = cfg_approx_first ? (layer < n) : (layer >= n)
```

`net_start` resets the count to 0, and `layer_done` advances it. The
counter saturates at 255. After reset, `n = 0` with approximate-first order,
so every layer is exact. Setting `n = 0` with exact-first order makes every
layer approximate.

## 6. The MAC engine (`lutna_top`)

```
             wr_* (lane, entry, data, sign)          cfg_*, net_start, layer_done
                  |                                          |
                  v                                          v
   in_mag[l] --> lutna_pe[l] (x LANES) <---- approx ----- mp_ctrl
   in_sign[l]    full table -> lutna_mult  \
                 opt. table -> alutna_mult --> mux --> sign-mag -> 2's compl.
                                                    |
                                        stage 1: product registers
                                                    |
                                  stage 2: sum of lanes + accumulator --> out_acc
```

* **PE (`lutna_pe`).** Holds one weight. The weight's sign sits in one cell,
  and its magnitude is stored as both tables. The PE contains both
  multipliers and forwards the product of the kind selected for the current
  layer. Carrying both lets one array serve the exact and the approximate
  layers in turn.
* **Parameters.** `N = 8`, `LANES = 16`, `ACC_W = 32`, `LAYER_W = 8`.
* **Programming a weight.** Write the four entries `w*0, w*1, w*2, w*3`
  (each `N+2` bits) with `wr_en`, `wr_lane` and `wr_entry`, one per clock.
  `wr_sign` carries the weight's sign on every write. The host computes the
  entries; the engine never multiplies. A write takes effect for vectors
  presented from the next cycle on. An assertion checks that `wr_lane < LANES`.
* **Vectors.** Each cycle with `in_valid`, one data word per lane is
  multiplied. The signed products are summed over the lanes and added into
  the accumulator. With `in_clear` set, the vector's sum replaces the
  accumulator instead. A dot product longer than `LANES` is built tile by
  tile: clear on the first tile, reprogram the weights, then send the next
  tiles without clear.
* **Timing.** `out_valid`/`out_acc` follow a vector by exactly 2 cycles
  (product register, then accumulator). One vector is accepted per cycle,
  and there are no stalls. The mode applied to a vector is the one in force
  in the cycle the vector is presented.
* **Reset.** `rst_n` is active low and synchronous. It clears the tables,
  the pipeline, the accumulator and the controller.

Accumulator range: a product is below `2^16`, so 32 bits hold a sum of more
than 32,000 full-scale products. The largest fan-in in the target CNNs
(3x3x512 = 4608) is well inside that.

## 7. What follows the source scheme and what is this design's choice

Follows the scheme:

* The 2-bit slicing and the shared 4-entry table.
* 4:1 muxes built as three 2:1 muxes.
* The shifted-add combination and the XOR sign.
* The storage-optimized table wiring.
* The approximation rule with the dropped half fixed at 0.
* The per-layer boundary rule and the five boundaries.

This design's choices:

* **Sign-magnitude integers.** One description of the scheme calls the 9-bit
  operands "floating point", but its datapath figures and worked example are
  sign-magnitude integers. The integer datapath is followed.
* **Sign of the 8-bit product.** One of the scheme's 8-bit figures labels the
  XOR inputs with the sign bits of the 4-bit example (`w4`, `d4`). The 8-bit
  sign bits `w8`/`d8` are used.
* **8-bit approximate slice selection.** The 8-bit approximate figure labels
  the two trees' selects `d3d2`/`d1d0` but weights them as `d7d6`/`d5d4`.
  Here the trees take the upper-half slices when `dH != 0`, and the
  lower-half slices otherwise. This is the 4-bit example's rule, scaled.
* **Non-zero test.** "Upper half non-zero" is tested on the data bits. A
  test on the partial product differs only when `w = 0`, where both give 0.
* **Shared approximate trees.** The trees are shared between the upper and
  lower case through a steering mux and an output shift. The scheme's mux
  counts leave this steering out.
* **Storage and writes.** The storage cells are flip-flops with a
  one-entry-per-clock write port and synchronous reset. The scheme speaks of
  SRAM cells.
* **The engine.** All of the engine is this design's own:
  * both multipliers in every PE;
  * 16 lanes;
  * conversion to two's complement and a 32-bit accumulator;
  * the 2-stage pipeline;
  * all port protocols;
  * the layer counter with saturation and its reset state.

  A purely spatial mapping, with one multiplier kind per layer's hardware,
  would need only one of the two multipliers per PE. That is where the
  scheme's area savings come from.

Not built:

* Computing the table entries from a trained weight, which is host software.
* The 4-bit intermediate approximation with a non-zero fixed lower product.
* Any memory system, data movement, activation function or requantisation
  between layers. The workload testbench performs the last two itself.

## 8. Files

| file | contents |
|---|---|
| `rtl/lutna_pkg.sv` | default width `DATA_N`, `mult_mode_e` |
| `rtl/lut_mux4.sv` | 4:1 mux as three 2:1 muxes |
| `rtl/lut_store_full.sv` | full 4-entry weight table |
| `rtl/lut_store_opt.sv` | storage-optimized weight table |
| `rtl/lutna_mult.sv` | exact D&C multiplier |
| `rtl/alutna_mult.sv` | approximate multiplier |
| `rtl/mp_ctrl.sv` | mixed-precision layer controller |
| `rtl/lutna_pe.sv` | one processing element |
| `rtl/lutna_top.sv` | MAC engine (top) |
| `tb/tb_<module>.sv` | self-checking testbench of each module |
| `tb/tb_workload_conv.sv` | two convolution layers in both mixed-precision orders |

## 9. Verification and simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and has a cycle watchdog.

* **Multipliers.** `tb_lutna_mult` and `tb_alutna_mult` try all 65,536
  weight/data pairs at `N = 8` and all pairs at `N = 4`, with random signs.
  They compare against `w*d` and against the approximation formula above.
* **Tables.** `tb_lut_store_opt` checks that the wired table reproduces
  `w*k` for every 8-bit weight.
* **Controller.** `tb_mp_ctrl` walks the five networks' real boundaries.
* **Engine.** `tb_lutna_top` runs the engine at its default parameters.
  It uses five small networks, two weight tiles per layer and back-to-back
  vectors. It checks every accumulator value and the 2-cycle latency, and
  counts these events, each of which must occur: exact and approximate
  vectors, approximated products, exact lower-half products in approximate
  mode, mode switches, clears, accumulations, negative products and weight
  reloads.
* **Workload.** `tb_workload_conv` runs two small convolution layers (fan-in
  27 and 36, 60% zero weights) with the VGG order and the ResNet order. It
  compares each output with a reference convolution. The trained CIFAR-10
  models are not included, so real accuracy is not reproduced here.

To run one testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_lutna_top \
          rtl/lutna_pkg.sv tb/tb_lutna_top.sv -o sim
./obj_dir/sim
```

Replace `tb_lutna_top` with any other testbench name. The include paths let
Verilator find each module in the file of the same name. All testbenches
finish in well under a second. Verilator's `-Wall` lint is clean except for
one note: `mp_ctrl` imports the package without using `DATA_N`.
