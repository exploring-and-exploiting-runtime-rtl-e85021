# R2F2: a floating-point multiplier whose exponent/mantissa split changes at run time

Scientific codes such as PDE solvers keep to 32- or 64-bit floating point because their
values span a wide range overall. At any given moment, though, the operands of a given
multiplication tend to sit in a narrow band that drifts slowly as the simulation runs.
Standard half precision (E5M10) does not work for them: 5 exponent bits overflow or
underflow, and a fixed wider exponent takes bits the mantissa needs. R2F2 keeps the total
width (16 bits here) and leaves a few *flexible* bits whose role is decided at run time.
Each flexible bit belongs either to the exponent or to the mantissa. A small controller
moves bits toward the exponent when a product overflows, and toward the mantissa when the
exponent has room to spare.

This repository holds synthesizable SystemVerilog for the multiplier, its precision
controller and the single-precision conversions around it, with self-checking testbenches
for each block and two workload testbenches: a 1D heat-equation solver, and all seven
precisions of the original resource table, compared against fixed 5-bit-exponent
formats of the same width.

## The number format

A word `<EB, MB, FX>` has `1 + EB + MB + FX` bits:

```
 MSB                                                   LSB
 | s | e (EB fixed exponent) | m (MB fixed mantissa) | f (FX flexible) |
```

A precision value `k` (0..FX) gives the *top* `k` flexible bits to the exponent and the
other `FX-k` to the mantissa. This is the same as a mask of `k` ones written over the
flexible region from its MSB. So:

* exponent = `{e, f[FX-1 -: k]}`: `EB+k` bits with bias `2^(EB+k-1) - 1`;
* fraction = `{m, f[FX-k-1:0]}`: `MB+FX-k` bits behind an implicit 1.

Both operands and the product use the same `k`. Exponent 0 means zero (there are no
subnormals). The all-ones exponent is reserved, as in IEEE. The default `<3,9,3>` ranges
from a 3-bit exponent with a 12-bit fraction (range about 2^-2..2^4) up to a 6-bit
exponent with a 9-bit fraction (about 2^-30..2^32).

## Datapath of one multiplication (`r2f2_mul`)

The core takes the sign as an XOR, multiplies the mantissas, then adds the exponents.
The exponent needs the mantissa carry, so it comes after the mantissa. For FX = 3:

| cycle | mantissa unit (`mant_mul`) | exponent unit (`exp_add`) |
|---|---|---|
| 0 | accept the pair | |
| 1..FX | fixed product; flexible bit j of both operands in cycle j | |
| FX+1 | normalise, round, mantissa carry `mc` | |
| FX+2 | | fixed-region sum and masked flexible-region sum |
| FX+3 | | combine, overflow/underflow, assemble result register |

The result is valid FX+3 edges after the pair is accepted. A new pair can be accepted in
the rounding cycle, so the core sustains one multiplication every FX+1 cycles. That is 4
cycles for FX = 3, the initiation interval of the original implementation.

### Mantissa: bit-serial flexible bits with truncation

This is the least obvious part. With `A = 1.a1..aMB | x1..xFX` (flexible bits left-aligned
under the fixed ones), the product falls into three parts:

* the fixed product `(1.a)(1.b)`, computed at once (`res`, 2MB+2 bits);
* for each flexible position j, computed in cycle j into a second accumulator (`res'`):
  `y_j * (A's bits above j) + x_j * (B's bits above j) + x_j*y_j`;
* `res << FX + res'` at the end.

Only the partial products with weight at least `2^-(2MB+FX)` are computed. That means
FX bits below the fixed product, where the exact product would need 2(FX-k). In the RTL
each of the two terms is the other operand, masked to the bits above position j and
shifted right by j. The right shift drops exactly the partial products that lie below
the cut-off. Dropping them makes the product a slight underestimate: the error is below
one unit of the final rounding position, and rounding usually hides it.
`tb_mant_mul` checks the unit bit-exactly against a plain double loop over all
partial-product pairs with `i + j <= 2MB+FX`.

The product lies in [1,4). If it is 2 or more, `mc` is set. Otherwise it is shifted left
by one. Then it is rounded half up to `MB+FX-k` bits. A rounding overflow also sets `mc`;
this can only happen when the product was below 2. Flexible bits that belong to the
exponent are zero in the aligned mantissa, so the serial loop always takes FX cycles
whatever k is.

### Exponent: masked addition, no bit selection

The two regions are added as they stand in the word, so there is no multiplexer to pick
out the exponent bits. The flexible regions are ANDed with the mask and added; that puts
the exponent's LSB at flexible bit FX-k. The bias is rewritten as
`BIAS = 2^(EB+k-1) - 1`, so `e1 + e2 - BIAS + mc` becomes `e1 + e2 - 2^(EB+k-1) + 1 + mc`.
The `-2^(EB+k-1)` is always a single 1 at the MSB of the *fixed* exponent, whatever k is.
The `+1` and `mc` are added at the exponent LSB. The first cycle forms the fixed-region
sum and the flexible-region sum. The second adds the flexible carries (at most two bits)
into the fixed sum.

Overflow is a carry out of the fixed region or an all-ones result. Underflow is a borrow
(negative sum) or an all-zero result.

## Precision adjustment (`precision_adjust`, `redundancy_detect`, `r2f2_top`)

`r2f2_top` takes IEEE single-precision operands. For each pair it:

1. converts both operands to R2F2 with the current `k` (`fp32_to_r2f2`, round half up);
2. multiplies them (`r2f2_mul`);
3. on overflow or underflow, either of the product or of an operand's conversion:
   increments `k` and repeats the pair from step 1. If `k` is already FX, it returns a
   signed infinity or zero and raises `saturated`;
4. otherwise checks redundancy. A biased exponent is redundant when the two bits after
   its MSB are both the inverse of the MSB, as in `1 00 xxx` or `0 11 xxx`. Dropping the
   bit after the MSB then leaves the value unchanged. If both operands and the product
   are redundant, `k` is decremented for the *next* pair;
5. converts the product back to single precision (`r2f2_to_fp32`, exact).

The bits examined always lie in the fixed exponent (EB = 3), so this check does not
depend on k.

Pairs go through one at a time (`in_ready` is high only when the unit is idle), because
the precision used for one pair depends on the outcome of the previous pair. A pair with
no retry takes FX+6 cycles (9 for the default), from the accepting edge to `out_valid`.
A product retry adds FX+5 cycles and a conversion retry adds 1. `k`, `mask`, `n_inc` and
`n_dec` show the current precision and how often it was widened and narrowed.

`out_valid` is a one-cycle pulse with no back-pressure. Reset (`rst_n`, asynchronous,
active low) clears everything and sets `k` to `K_INIT` (default FX, the widest exponent).

## Files

| file | contents |
|---|---|
| `rtl/r2f2_pkg.sv` | default precision `<3,9,3>`, `RED_BITS = 2`, the `fp32_t` struct |
| `rtl/fp32_to_r2f2.sv`, `rtl/r2f2_to_fp32.sv` | combinational format conversions |
| `rtl/mant_mul.sv` | serial mantissa multiplier, normalise and round |
| `rtl/exp_add.sv` | two-cycle exponent adder with overflow/underflow |
| `rtl/r2f2_mul.sv` | multiplier core (sign, mantissa, exponent, assembly) |
| `rtl/redundancy_detect.sv`, `rtl/precision_adjust.sv` | the adjustment loop |
| `rtl/r2f2_top.sv` | top: single precision in and out, with retry |
| `tb/tb_<block>.sv` | one self-checking testbench per block |
| `tb/tb_heat1d.sv` | heat-equation workload, about 1.5M multiplications |
| `tb/tb_r2f2_configs.sv` | all seven precisions of the resource table |
| `tb/r2f2_tb_pkg.sv` | reference decode/encode and real-number helpers |

Parameters: `EB`, `MB`, `FX` on every module. The top also has `RED_BITS` and `K_INIT`.
The requirements are `EB >= RED_BITS + 1`, `EB + FX <= 8` and `MB + FX <= 22`, so that
every value of every precision fits in single precision.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself. For example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/r2f2_pkg.sv tb/r2f2_tb_pkg.sv tb/tb_r2f2_top.sv --top-module tb_r2f2_top
./obj_dir/Vtb_r2f2_top
```

`tb_r2f2_top` runs the top at its default parameters. It makes every mechanism happen at
least once and checks the latency. Its mechanisms are:

* plain pairs;
* product retries;
* conversion retries;
* narrowing;
* saturation to infinity and to zero;
* zero operands.

`tb_heat1d` takes about 10 s. It solves `u' = u + r (u[i-1] + u[i+1] - 2u[i])` on 64
points for 12000 steps, starting from `500 sin(pi x)`. Both multiplications run on R2F2,
each on its own `r2f2_top`, as each multiplication in a loop body would have its own
multiplier in hardware. The additions are in single precision. The field decays from 500
to 0.29 and stays within 1.5% of a double-precision run of the same scheme.

## How far it follows the original design, and where it departs

These points are taken from the original description of R2F2:

* the format and the mask semantics;
* the mantissa schedule (fixed region at once, one flexible bit per cycle, FX extra bits
  kept);
* exponent addition in two cycles, with the masked flexible regions and the bias folded
  in as `-2^(|e|-1) + 1`;
* the exponent starting after the mantissa (cycle 5 when FX = 3);
* widen-and-redo on overflow or underflow, and narrow-for-next-time on redundancy,
  judged on the two bits after the exponent MSB;
* the evaluated precisions.

These are this design's own choices, made where the description is silent:

* The mask is always contiguous from the top of the flexible region, so it is carried as
  the count `k`.
* The mantissa's flexible bits are left-aligned before multiplying.
* The original describes the second serial cycle in two ways. Its formula uses only the
  fixed bits of the other operand. Its bit diagram also keeps the cross terms of earlier
  flexible bits (`qm`, `np`). This design keeps every partial product above the
  `2^-(2MB+FX)` cut-off, as the diagram does.
* Rounding is round half up, subnormals are flushed to zero, and the all-ones and
  all-zero exponents are reserved.
* Redundancy must hold for both operands and the product.
* An operand that cannot be represented is handled like a product overflow.
* Saturation returns infinity or zero.
* `k` resets to FX.
* The handshakes and the one-at-a-time issue at the top are this design's own.

Where it does not reproduce the published numbers:

* **Latency.** The original reports 12 cycles and an initiation interval of 4 for the
  whole multiplier built with high-level synthesis, conversions included. The core here
  sustains the interval of 4. Its latency is 6 edges, and the whole top takes 9 cycles
  per pair. The remaining cycles in the published figure belong to how that tool
  scheduled the conversions, which is not described.
* **Adjustment counts.** In the heat-equation run the original reports 5 widenings and
  23 narrowings in 1.5M multiplications. Here, with the rules as described, the same
  scale of run gives about 11K of each. The second multiplier's operands cross the
  redundancy threshold and back as the stencil sweeps from the boundaries (small values)
  to the centre. The published counts suggest some hysteresis or a per-variable mask
  that the description does not give. Results stay correct either way: every widening
  redoes the product.
* **Accuracy against fixed half precision.** `tb_r2f2_configs` draws operands twenty
  pairs at a time from narrow intervals spread over 0.0001..10000. Over all pairs, the
  mean relative error of `<3,9,3>` is about 0.04%. For E5M10 it is about 44%, because
  every product outside E5M10's range is counted as 100% error. Over only the pairs that
  E5M10 can hold, the two are about equal (0.026% against 0.027%). The same holds for
  `<3,8,3>` against E5M9 and `<3,7,3>` against E5M8. The large average reduction
  published for R2F2 is reproduced here only where it comes from the range. The
  published gain within E5M10's range is not reproduced. How the original chose the
  interval widths, and how it kept the precision between intervals, is not described.
* **Area.** The resource figures (LUT/FF counts on an FPGA) are not reproduced or
  checked.
* **The division.** The shallow-water experiment puts one sub-equation on R2F2,
  `q1*q1/q3 + 0.5 g q3*q3`. The division in it is not part of this design, and
  momentum values near 1e5 would saturate the widest 16-bit range (about 4.3e9).
