# CESA-PERL: an approximate adder with estimated block carries

An exact n-bit adder is slow because a carry may have to travel from bit 0 to
bit n-1. This adder cuts the operands into n/k blocks of k bits and adds all
blocks at the same time. Each block gets its carry in from a small estimator
that looks only at the top few bits of the block below it. Because the
estimate does not wait for any other carry, the delay is that of one k-bit
adder plus a few gates, whatever n is. The price is that the sum is
occasionally wrong, and the error is always a missing power of two at a block
boundary.

The design is the Carry Estimating Simultaneous Adder (CESA) and its
rectified form, CESA with Propagating Error Rectification Logic (CESA-PERL),
by Bhattacharjya, Mishra, Singh, Goswami and Banerjee (GLSVLSI 2020). This
RTL follows their description. Where they leave a point open, the choice is
stated below and in the file headers.

## How a block estimates its carry

Name the bit pairs of a block from the top: pair 1 is (A[k-1], B[k-1]), pair
2 is (A[k-2], B[k-2]), and so on. A pair *generates* if both bits are 1. It
*kills* if both are 0. It *propagates* if exactly one bit is 1. The carry out
of the block is decided by the highest pair that does not propagate.

* **CEU (carry estimate unit)** handles pairs 1 and 2:
  `c_ceu = A1·B1 + A2·B2·(A1 + B1)`.
  This is exact unless both pairs propagate. In that case it returns 0.
* **SU (selection unit)** flags that undecided case:
  `sel = (A1 ⊕ B1)·(A2 ⊕ B2)`.
  This happens for 4 of the 16 input combinations.
* **PERL (rectification logic)** has the same gates as the CEU, applied to
  pairs 3 and 4: `c_perl = A3·B3 + A4·B4·(A3 + B3)`.
  When pairs 1 and 2 both propagate, the block's carry out equals the carry
  out of pairs 3 and 4. PERL supplies that.
* **A 2:1 mux** makes the block's carry out:
  `c_out = sel ? c_perl : c_ceu`.

Taken together, the estimate equals the carry out of the block's top four
bits, added with a carry in of 0. It is wrong only when all four top pairs
propagate and a carry really arrives at the fourth pair from below. Without
PERL, the estimate is the carry out of the top two bits, with the same
reasoning. That is the basis of the reference models in the testbenches.

Two consequences are worth knowing:

* **The estimate never exceeds the true carry.** An approximate sum is
  therefore never larger than the exact one. Each wrong carry subtracts
  exactly 2^(i·k) for the block i it enters.
* **The carry into block 1 is exact when k = 4 with PERL (or k = 2
  without).** The estimate then sees every bit of block 0, whose carry in is
  0. An 8-bit adder with 4-bit blocks and PERL is exact on its 8 sum bits.
  Its only possible error is in the carry out of the adder.

The sub-adder inside each block is a plain ripple-carry adder, written bit by
bit as in the published per-bit loop. Its own carry out of bit k-1 is not
used. The next block takes the estimate instead.

## Structure

```
        block NB-1              block 1                 block 0
   +----------------+     +----------------+     +----------------+
   | sub_adder      |<-c--| sub_adder      |<-c--| sub_adder      |<-- 0
   | ceu perl su mux|     | ceu perl su mux|     | ceu perl su mux|
   +----------------+     +----------------+     +----------------+
        |      |               |                       |
      cout  sum[N-1:N-K]    sum[2K-1:K]            sum[K-1:0]
```
Each block's `ceu`, `perl`, `selection_unit` and `carry_mux` see only that
block's own operand bits; their output `c` is the carry into the block on the
left.

| Module            | Role                                                        |
|-------------------|-------------------------------------------------------------|
| `ceu`             | Carry estimate from bit pairs k-1, k-2                      |
| `perl`            | Same estimator on bit pairs k-3, k-4                        |
| `selection_unit`  | Flags when pairs k-1 and k-2 both propagate                 |
| `carry_mux`       | Chooses between `c_ceu` (sel = 0) and `c_perl` (sel = 1)    |
| `sub_adder`       | k-bit ripple-carry adder of one block                       |
| `summation_block` | One block: `sub_adder`, `ceu`, `perl`, `selection_unit`, `carry_mux` |
| `cesa_perl_adder` | Top: n/k blocks, carry into block 0 tied to 0               |

Everything is combinational. There is no clock, reset or state.

### Parameters of `cesa_perl_adder`

| Parameter | Default | Meaning |
|-----------|---------|---------|
| `N`       | 32      | Operand width. Must be a multiple of `K`. |
| `K`       | 8       | Block width. Must be at least 4 with PERL, or at least 2 without. |
| `PERL_EN` | 1       | 1 gives CESA-PERL. 0 gives plain CESA: no PERL, no SU, no mux, and the carry is `c_ceu`. |

Illegal combinations stop elaboration with `$error`.

The original evaluation uses (n, k) = (8,4), (16,4), (16,8), (32,4) and
(32,8), plus (32,16) and (32,2) in its application studies. It names no main
configuration. The default (32, 8) is the one its image-filtering study uses.
Its system-level studies are also 32-bit.

### Ports

| Port   | Dir | Width | Meaning |
|--------|-----|-------|---------|
| `a`, `b` | in | N | Unsigned operands |
| `sum`  | out | N | Approximate sum |
| `cout` | out | 1 | Estimated carry out of the top block |

The original description does not say how the adder's final carry out is
used. Here it is the top block's estimate, matching the carry that leaves the
top block in the published block diagram. The original error figures are
reproduced when only the n sum bits are compared (see below). The carry out
is therefore not part of the accuracy figures.

## Accuracy

`tb_error_metrics` runs 200,000 uniform random operand pairs through every
configuration. The table compares its error rates (ER: share of results whose
n-bit sum is wrong) with the published bar chart. Chart values are read off
the bar heights by eye, so they are approximate.

| (n,k)  | ER with PERL | chart, CESA-PERL | ER without PERL | chart, CESA |
|--------|-------------:|-----------------:|----------------:|------------:|
| (8,4)  | 0.00 %  | ~0 %   | 9.3 %  | ~19 % |
| (16,4) | 5.9 %   | ~6 %   | 29.6 % | ~30 % |
| (16,8) | 2.9 %   | ~3 %   | 12.2 % | ~48 % |
| (32,4) | 16.7 %  | ~16.5 % | 57.8 % | ~33 % |
| (32,8) | 8.9 %   | ~9 %   | 32.8 % | ~58 % |
| (32,16)| 3.1 %   |  –     | 12.6 % | –     |
| (32,2) | –       |  –     | 78.4 % | –     |

The rectified adder matches the chart in every configuration. The plain-CESA
chart does not agree with this RTL, nor with itself:

* The published text gives 85.94 % exact results (14.06 % ER) for 8-bit CESA.
  That is neither the chart's ~19 % nor the 9.4 % (= 1/4 · 3/8) that the
  equations give for (8,4).
* The (32,4) and (32,8) CESA bars look swapped.

The CESA results here come straight from the published equations. The
testbench also checks each rate against an independent estimate built from
carry probabilities, `predicted_er`.

## Application runs

**Gaussian smoothing** (`tb_gaussian_smoothing`). A 256×256 8-bit image is
generated: a gradient, a checkerboard and noise. It is filtered with a 5×5
kernel. The 25 products per pixel are accumulated through a 32-bit adder with
8-bit blocks. The kernel is the binomial one, (1 4 6 4 1)ᵀ(1 4 6 4 1)/256.
The original work only says its fractional kernel was rounded. A kernel
summing to 256 keeps every sum below 2^16, so only the carry into bit 8 can
be lost, and each loss costs one grey level. Against the exactly filtered
image:

* with PERL: PSNR 47.8 dB, 40 % of pixels off by a little;
* without PERL: PSNR 37.6 dB, 95 % of pixels off.

The published figures (36.1 dB and 32.0 dB) are for a different image and
kernel, so they are not comparable. With a kernel summing to 273 (weights up
to 41), sums cross 2^16. A lost carry at bit 16 then costs 240 grey levels,
and the PSNR falls to about 11 dB. The choice of kernel scale matters much
more than the adder.

**K-means** (`tb_kmeans`). There are 150 generated 2-D points in 3 touching
clusters, with coordinates around 300–700. The run does 10 iterations. The
additions in distances and centroid sums are approximate. Against exact
K-means:

| Block size | Points clustered differently |
|------------|------------------------------|
| 16         | 0                            |
| 8          | 3                            |
| 4          | 58                           |

The original reports 0, 0 and 1 point on its own data set. Centroid sums of
about 30,000 lose 2^12 or 2^16 on a wrong carry, so the outcome depends
strongly on the size of the data values.

## Departures and open points

* **Operand format.** Operands are unsigned. Signed and floating-point
  support is named as future work in the original.
* **`adx` / `adxi` instructions.** The original proposes these to expose the
  adder to software. No encoding or processor is given, so they are not
  implemented.
* **Carry out.** The meaning of `cout` and the ripple structure of the
  sub-adder are this design's choices, as explained above.
* **Evaluation out of scope.** Timing, area and power are not evaluated.
  The original uses a 45 nm standard-cell library for them.

## Simulating

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=<n> failures=<n>`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb --top-module tb_cesa_perl_adder \
    tb/tb_cesa_perl_adder.sv -o sim && obj_dir/sim
```

| Testbench | What it runs |
|-----------|--------------|
| `tb_ceu`, `tb_perl`, `tb_selection_unit`, `tb_carry_mux` | Exhaustive checks of the small units |
| `tb_sub_adder` | Exhaustive check of the 8-bit sub-adder |
| `tb_summation_block` | Exhaustive checks of blocks at K = 8 and K = 4 with PERL, and K = 2 without |
| `tb_cesa_perl_adder` | The default 32-bit adder end to end: directed and 250,000 random vectors |
| `tb_error_metrics` | ER, MED and MRED for 13 configurations |
| `tb_gaussian_smoothing`, `tb_kmeans` | The application runs above |

In `tb_cesa_perl_adder`, part of the random input is biased so that block
tops propagate. The run counts CEU-decided carries, PERL selections, carries
PERL corrects, exact results and approximated results, and fails if any count
is zero. `tb/adder_metrics.sv` is a helper that collects statistics for one
configuration.

To change the configuration, override `N`, `K` and `PERL_EN` on
`cesa_perl_adder`. The testbenches' integer models take the same parameters.
