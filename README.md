# E2AFS: a multiplier-free approximate square root for binary16

E2AFS takes the square root of an IEEE-754 half-precision (binary16) number using
no multiplier and no iteration: only a few shifts, two small adders and a
constant or two. Write the operand as

    M = 2^r (1 + Y),    r = exp - 15,   Y = mantissa / 1024,   0 <= Y < 1

so that `sqrt(M) = 2^(r/2) sqrt(1 + Y)`. Two cheap substitutions make both factors
hardware friendly:

* **The exponent factor.** If r is even, `2^(r/2)` is simply the result exponent
  r/2. If r is odd, the design rewrites it as `2^((r-1)/2) * sqrt(2)` and replaces
  `sqrt(2)` with 1.5. That is 6.1 % too high, but multiplying by 1.5 costs only one
  shift and one add (`T + T/2`).
* **The mantissa factor.** `sqrt(1 + Y)` is replaced by a straight line. For even r
  the line is `1 + Y/2`, the first two terms of the binomial series. For odd r the
  line is `1 + Y/4` instead. It deliberately reads low, to cancel most of the 1.5
  overestimate.

The curve `sqrt(1 + Y)` bends away from both lines as Y grows. So the range of Y is
split at 0.5, the point where the mantissa MSB becomes 1, and a constant offset is
added in the upper half:

| r    | Y < 0.5                  | Y >= 0.5                           |
|------|--------------------------|------------------------------------|
| even | 2^(r/2) (1 + Y/2)        | 2^(r/2) (1 + Y/2 - 0.045)          |
| odd  | 2^((r-1)/2) 1.5 (1 + Y/4)| 2^((r-1)/2) 1.5 (1 + (Y + 0.333)/4)|

The result needs no normalisation step. For odd r, `1.5 (1 + (Y+0.333)/4)` is at
most 2047/1024 on the 10-bit grid. Every region's mantissa therefore stays in
[1, 2), and the result is just `{0, r2, fraction}`.

## Datapath

```
 in_m ──► [input reg] ──► normalize ──┬─ e ──► parity detect ── odd ──┐
                                      │                               ▼
                                      ├─ y ──► threshold cmp ── hi ─► second level ── T ─┐
                                      │                                                  ▼
                                      ├─ r ───────────────────────────────────────► first level
                                      │                                              │ r2, S
                                      └─ sign, class ──────────────────────► reconstruct ◄─┘
                                                                                  │
                                                                  [output reg] ◄──┘ ──► out_sqrt
```

| module | role |
|---|---|
| `e2afs_normalize` | splits M into sign, biased exponent e, r = e − 15 and the mantissa y; flags zero/subnormal, infinity, NaN and negative operands |
| `e2afs_parity_detect` | r odd? Computed from the biased field as `e[0] xor 1`, so it does not wait for the subtractor |
| `e2afs_threshold_cmp` | Y ≥ 0.5? With the default threshold 512 this is the mantissa MSB. Parameter `THRESH` allows other breakpoints, e.g. 522 for 0.51 |
| `e2afs_second_level` | builds the mantissa term T (1 integer bit, 10 fraction bits) for the four regions above, without the 1.5 |
| `e2afs_first_level` | halves the exponent as `(r − odd) >>> 1`, adds the bias back, and for odd r forms `S = T + (T >> 1)` |
| `e2afs_reconstruct` | concatenates `{0, r2, S[9:0]}`; substitutes the results for special operands |
| `e2afs_core` | the combinational datapath: the six units above |
| `e2afs_io_reg` | W-bit register with a valid bit; loads only when valid |
| `e2afs_top` | input register → `e2afs_core` → output register |
| `e2afs_pkg` | `fp16_t` struct, class flags, widths, the constants 46 / 341 / 512 |

The flow of the published method draws the two adder/shifter levels as parallel
inputs to the reconstruction block. This RTL chains them instead: the second-level
term T goes into the first-level unit. The reason is that for odd r the
compensation `+0.333` sits inside the factor that is multiplied by 1.5, so it must
be added before the 1.5 scaling.

## Bit-level arithmetic

All mantissa quantities are fixed point with 10 fraction bits (value × 1024).
Shifts drop the bits shifted out. Nothing is rounded.

* even r: `T = 1024 + (y >> 1)`, minus 46 when `y[9]` is set (0.045 × 1024 = 46.08).
* odd r:  `T = 1024 + ((y + (y[9] ? 341 : 0)) >> 2)`, where 0.333 × 1024 ≈ 341.
  Then `S = T + (T >> 1)`.
* result exponent: `r2 = ((r − odd) >>> 1) + 15`. This is r/2 or (r−1)/2,
  re-biased. The shift is arithmetic, so operands below 1 (negative r) work too.

Worked example: M = `0x785A` = 0 11110 0001011010 (35648).
* r = 15 is odd, and Y = 90/1024 < 0.5.
* T = 1024 + 22 = 1046, and S = 1046 + 523 = 1569 = 1.1000100001b.
* r2 = 7 + 15 = 22.
* The result is `0x5A21` = 0 10110 1000100001 = 196.125. The exact root is 188.8.

How the constant is added in the odd-r, Y ≥ 0.5 region changes the low bits of the
result. Adding 341 to y before the shift, as the formula is written, gives these
figures over all 30,720 positive normal operands:
* MED (mean error distance) 0.4024
* MRED (mean relative error distance) 1.5264e-2
* NMED (MED divided by the largest exact output, √65504) 0.1572e-2

These equal the published accuracy to every printed digit. Adding the numerically
equivalent 0.125 after the ×1.5 gives MED 0.4030 instead. The published MSE (1.414)
and maximum error distance (9.98) are not reproduced exactly. This RTL gives MSE
1.447 and a maximum error of 10.98, at M near 65,504.

Accuracy properties worth knowing before using the unit:

* The relative error lies between −2.7 % and +6.1 %. The worst case is odd r
  with Y = 0 (M = 2, 8, 0.5, ...), where 1.5 stands in for √2 exactly.
* The result is exact for even powers of two (M = 1, 4, 0.25, ...).
* The output is **not monotonic** at the Y = 0.5 breakpoint:
  * For even r it steps down by about 3.5 % (the −0.045 is switched in).
  * For odd r it steps up by about 7.5 % (the +0.333 is switched in).

  Algorithms that only compare distances are hardly affected; the K-means test
  below made identical cluster assignments with the unit and with an exact root.

## Special operands

The method covers positive normal numbers only. Everything else is handled by this
RTL's own rule, which follows IEEE-754 square root except for subnormals:

| operand | result |
|---|---|
| +0, −0, and subnormals of either sign | zero of the same sign (subnormals are flushed) |
| +inf | +inf |
| NaN, −inf, negative normal | quiet NaN `0x7E00` |

`e2afs_reconstruct` applies this rule with priority NaN/negative > zero > inf > normal.

## Interface and timing of `e2afs_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk` | in | 1 | clock |
| `rst_n` | in | 1 | active-low, asynchronous; clears valids and registers |
| `in_valid` | in | 1 | `in_m` holds an operand this cycle |
| `in_m` | in | 16 | binary16 operand |
| `out_valid` | out | 1 | `out_sqrt` holds a result |
| `out_sqrt` | out | 16 | binary16 approximate square root |

One operand per clock is accepted; there is no back-pressure. A result appears two
cycles after its operand. Both registers hold their contents while `in_valid` is
low, so an idle unit does not toggle its datapath. The critical path is the
combinational `e2afs_core` between the registers. On the mantissa side it is an
11-bit constant add, a shift, and the 11-bit ×1.5 add, plus a few multiplexers. The
exponent side (subtract 15, shift, add 15) is shorter. `e2afs_core` can also be used on its own as a
purely combinational unit.

The registers, the valid handshake, the two-cycle latency and the reset are choices
of this implementation. The method names an input-operand block and an output block
and reports a clocked critical path, but does not describe them.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. Reference values come from
`tb/e2afs_ref_pkg.sv`. That package computes the approximation table in real
arithmetic, independently of the RTL's shifts and constants. A result is accepted
within 3 ulp of that value, and special operands must match exactly.

| testbench | what it does |
|---|---|
| `tb_e2afs_normalize` | all 65,536 patterns; fields and class flags |
| `tb_e2afs_parity_detect` | all 32 exponents |
| `tb_e2afs_threshold_cmp` | all 1,024 mantissas, at 0.5 and 0.51 |
| `tb_e2afs_second_level` | all mantissas × both parities, against the real table (< 1 LSB); worked example |
| `tb_e2afs_first_level` | r from −15 to 16 × term range; exponent halving and ×1.5 exact |
| `tb_e2afs_reconstruct` | 20,000 random class/exponent/mantissa combinations |
| `tb_e2afs_io_reg` | random valid gaps; latency, hold, reset |
| `tb_e2afs_core` | all 65,536 operands; also checks that MED, MRED and NMED over the positive normals match 0.4024 / 1.5264e-2 / 0.1572e-2, and checks the worked example |
| `tb_e2afs_top` | all 65,536 operands in random order with random idle cycles, plus one mid-stream reset; checks the two-cycle latency every cycle; counts each region, special class, hold and reset and fails if one never occurs |
| `tb_e2afs_sobel` | Sobel edge detection on a generated 64×64 image (see below) |
| `tb_e2afs_kmeans` | K-means colour quantization with K = 20 on a generated 32×32 RGB image (see below) |

The two application tests:

* **Sobel.** The magnitude `sqrt(Gx² + Gy²)` can reach 2,080,800, which is above the
  binary16 maximum of 65,504. The operand is therefore scaled by 1/64 and the root
  by 8. The edge map made with the unit reaches a PSNR of 45.8 dB against an
  exact-root edge map. The method reports 45.0–47.1 dB on standard photographs.
* **K-means.** The squared distances are scaled by 1/4, for the same range reason.
  The unit and an exact root give the same clustering and the same PSNR of the
  quantized image, 24.7 dB. The method reports 25.6 dB for its photograph.

To run one test with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/e2afs_pkg.sv tb/e2afs_ref_pkg.sv rtl/e2afs_*.sv tb/tb_e2afs_top.sv \
    --top-module tb_e2afs_top -o sim && ./obj_dir/sim
```

Substitute any other testbench name. Each one runs in well under a second.

## Changing the design

* `THRESH` on `e2afs_threshold_cmp` moves the breakpoint. Only 512 reduces to the
  MSB; other values cost a 10-bit comparator.
* `C_EVEN` and `C_ODD` on `e2afs_second_level` are the two compensation constants,
  in units of 2^-10.
* `e2afs_pkg` fixes the binary16 format. The shift-and-add scheme works for wider
  formats, but the bound that keeps the odd-r mantissa below 2 must then be checked
  again. `e2afs_first_level` asserts it in simulation.
