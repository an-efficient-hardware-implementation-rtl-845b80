# Point multiplication on NIST B-163 with a hybrid Karatsuba multiplier

This core computes Q = kP on the binary elliptic curve NIST B-163
(y² + xy = x³ + x² + b over GF(2¹⁶³)). It runs the Montgomery ladder in projective
(X, Z) coordinates. Each key bit costs six clocks. In those clocks, one modular
multiplier, one squarer and one adder work in parallel. One extended Euclidean
inversion at the end returns the affine result (x, y).

Most of the area and the critical path are in the field multiplier. The design's
main idea is a *hybrid* multiplier. Karatsuba splitting is used for the large
operand sizes, where it saves gates. At 41 bits the splitting stops and a plain
schoolbook multiplier takes over, because at that size it is about as small as
Karatsuba and has a much shallower XOR tree. The multiplier is combinational, so
one full 163×163-bit modular product is made every clock.

The RTL is SystemVerilog (IEEE 1800-2017). It simulates with Verilator 5 and
elaborates in Yosys through its slang front end.

## Field arithmetic

A field element is a 163-bit vector. Bit i is the coefficient of xⁱ (polynomial
basis). The reduction polynomial is F(x) = x¹⁶³ + x⁷ + x⁶ + x³ + 1. Addition is XOR
(`gf_adder`).

### The hybrid Karatsuba multiplier (`hybrid_karatsuba`, `kara_overlap`, `poly_mult`)

One Karatsuba level splits each operand into halves of H bits:
a = A_H·x^H + A_L, and b the same way. It then needs three H-bit products instead
of four:

    M2 = A_H·B_H      M1 = (A_H + A_L)(B_H + B_L)      M0 = A_L·B_L
    a·b = M2·x^2H + (M2 + M1 + M0)·x^H + M0

`kara_overlap` does the second line. Two XOR stages form the middle term. The
*overlap* then adds the three (2H−1)-bit terms where their powers of x coincide:

- M2 spans x^(4H−2) down to x^(2H).
- The middle term spans x^(3H−2) down to x^H.
- M0 spans x^(2H−2) down to x⁰.

If the operand size is odd, a zero is appended at the MSB so that both halves have
the same size. This is why 163 becomes two halves of 82.

`hybrid_karatsuba` is recursive. An N-bit instance instantiates three instances of
itself of ⌈N/2⌉ bits. Once N ≤ `POLY_N`, the instance is a `poly_mult` instead.
`poly_mult` is a flat AND array with XOR trees: N² AND gates and (N−1)² XOR gates.

| configuration | operand sizes per level | base multipliers |
|---|---|---|
| default, `POLY_N = 41` | 163 → 82 → 41 | 9 × 41-bit schoolbook |
| `POLY_N = 2` (all Karatsuba) | 163 → 82 → 41 → 21 → 11 → 6 → 3 → 2 | 2187 × 2-bit |

With ideal gates, a Karatsuba multiplier has a depth of T_AND + (3⌈log₂n⌉ − 1)·T_XOR.
A schoolbook multiplier has a depth of T_AND + ⌈log₂n⌉·T_XOR. Stopping after k
Karatsuba levels gives a depth of T_AND + 3k·T_XOR + ⌈log₂(n/2ᵏ)⌉·T_XOR. For the
default (k = 2, 41-bit base), that is one AND and 12 XOR levels, plus the
reduction. On a Virtex-7, the 41-bit size was found to be where the schoolbook
multiplier stops having the better area-delay product:

- 41-bit schoolbook: 694 LUTs, 9.7 ns.
- 41-bit Karatsuba: 695 LUTs, 10.6 ns.
- 82-bit schoolbook: 2599 LUTs, against 2306 for 82-bit Karatsuba.

Those figures are from the source study and were not re-measured here.

`gf_mult` adds a reduction stage (`gf_reduce`) after the product. Going from the
top, each coefficient of x^i with i ≥ 163 is folded back into the taps x^(i−163)·
(x⁷ + x⁶ + x³ + 1). For this fixed pentanomial the result is an XOR network.

### Squarer (`gf_squarer`)

In characteristic two, squaring only moves bits: (Σ aᵢxⁱ)² = Σ aᵢx²ⁱ. The input bits
are spread to the even positions, and the same reduction is applied. No AND gates
are needed. Every output bit is a fixed XOR of input bits. These equations are
produced by elaboration, not written out by hand.

### Inverter (`gf_inverter`)

This is the only multi-cycle field unit. It is a binary extended Euclidean
algorithm in "division step" form:

- It works from the low end of the polynomials (it divides by x).
- A signed counter `delta` stands in for the degree comparison of the textbook
  algorithm, so no wide comparator is needed.

State: polynomials f (164 bits) and g (163 bits), and cofactors d and e. The
invariant is f ≡ d·a and g ≡ e·a (mod F). The start state is f = F, g = a,
d = 0, e = 1, delta = 1. Each clock does one step:

| condition | f, g | d, e | delta |
|---|---|---|---|
| delta > 0 and g₀ = 1 | g, (g + f)/x | e, (e + d)/x | 1 − delta |
| g₀ = 1 otherwise | f, (g + f)/x | d, (e + d)/x | delta + 1 |
| g₀ = 0 | f, g/x | d, e/x | delta + 1 |

Why this works:

- f always has constant term 1. So (g + f) and g/x are exact divisions, and the gcd
  is preserved.
- The cofactor division by x is taken mod F: if the constant term is 1, F is added
  first.
- When g reaches 0, f equals gcd(F, a) = 1, so d = a⁻¹.
- For deg F = m and deg a < m, g reaches 0 within 2m steps. For m = 163 that is 326
  steps. A software model over thousands of random inputs reached the bound 326
  and never exceeded it.

The unit stops as soon as g = 0, so its latency depends on the data. An assertion
checks the 2m bound during simulation.

Handshake: pulse `start` while `busy` is low. `done` pulses `steps + 2` clocks later.
`inv` then holds a⁻¹ until the next `start`. Inverting 0 returns 0.

## The point multiplication

### Ladder step

The core keeps A = sP and B = (s+1)P as (X1, Z1) and (X2, Z2). The key is scanned
from the bit below its leading one down to bit 0. For a key bit of 1:

    Z1 ← (X1·Z2 + X2·Z1)²       X1 ← xP·Z1 + X1·Z2·X2·Z1      (addition, uses the new Z1)
    Z2 ← X2²·Z2²                 X2 ← X2⁴ + b·Z2⁴              (doubling of B)

For a key bit of 0, the same formulas apply with indices 1 and 2 exchanged. Six
multiplications, five squarings and three additions are scheduled on the three
units in six clocks. This is the core's inner loop (micro-program entries 3 to 8):

| clock | adder | multiplier | squarer |
|---|---|---|---|
| 1 | – | T1 ← X2·Z1 | T2 ← X2² |
| 2 | – | T3 ← X1·Z2 | T4 ← Z2² |
| 3 | X1·Z2 + X2·Z1 (not stored) | T5 ← T3·T1 | Z1 ← (adder output)² |
| 4 | – | T1 ← Z1·xP | T3 ← T4² = Z2⁴ |
| 5 | X1 ← T1 + T5 | T3 ← b·T3 | T5 ← T2² = X2⁴ |
| 6 | X2 ← T3 + T5 | Z2 ← T2·T4 | – |

In clock 3 the squarer takes the adder's output in the same clock. That is the one
place where two units are chained.

For a key bit of 0, the datapath does not use a second schedule. It exchanges the
register addresses X1↔X2 and Z1↔Z2 while a micro-instruction with `swap_en` is
active. The temporaries are not swapped.

### Initialisation and recovery

Before the loop, three clocks set X1 = xP, Z1 = 1, Z2 = xP², X2 = xP⁴ + b.

After the loop, the affine result is

    x = X1/Z1
    y = (xP + x)·[(X1 + xP·Z1)(X2 + xP·Z2) + (xP² + yP)·Z1·Z2]·(xP·Z1·Z2)⁻¹ + yP

Only one inversion is needed: of xP·Z1·Z2. Then 1/Z1 = xP·Z2·(xP·Z1·Z2)⁻¹.

The recovery is split around the inversion:

- Two clocks form Z1·Z2 and xP·Z1·Z2.
- The inversion starts.
- While it runs, five more clocks compute everything in the bracket.
- After the inverse arrives, six clocks finish x and y.

### Cases the formulas do not cover

The top handles these with flags, because the ladder formulas would divide by zero:

| case | detected by | output |
|---|---|---|
| k = 0 | the leading-one search | `inf` = 1 |
| kP = ∞, e.g. k = n, the group order | Z1 = 0 after the ladder | `inf` = 1 |
| (k+1)P = ∞, i.e. kP = −P | Z2 = 0 after the ladder | (xP, xP + yP) |

P must be a point of the curve with xP ≠ 0. The design does not check either
condition.

### Timing

For a scalar whose leading one is bit t−1, start to `done` takes 6(t−1) + L + 15
clocks. L is the inverter's busy time: at most 2m + 1 = 327.

For a full 163-bit key this is 972 ladder clocks, plus up to 327 for the
inversion, plus 15 for start, the leading-one search, initialisation and recovery.
That is 1314 clocks in the worst case. The source study reports 1298 clocks, which
equals 162·6 + 326: the ladder plus a worst-case inversion. The 16-clock
difference is the overhead around those two parts.

## Blocks and files

| file | role |
|---|---|
| `rtl/ecc_pkg.sv` | field and curve constants (M, F, b, G, n), register names, the micro-instruction type |
| `rtl/poly_mult.sv` | N-bit schoolbook carry-less multiplier (default 41) |
| `rtl/kara_overlap.sv` | middle-term XOR and overlap of one Karatsuba level |
| `rtl/hybrid_karatsuba.sv` | recursive Karatsuba with a schoolbook base (163 → 82 → 41) |
| `rtl/gf_reduce.sv` | reduction modulo F(x) |
| `rtl/gf_mult.sv` | modular multiplier = hybrid Karatsuba + reduction |
| `rtl/gf_squarer.sv` | XOR-only squarer |
| `rtl/gf_adder.sv` | XOR adder |
| `rtl/gf_inverter.sv` | sequential Euclidean inverter, ≤ 2m steps |
| `rtl/ecpm_datapath.sv` | register file (3 write ports), the three units, role swap |
| `rtl/ecpm_control.sv` | leading-one search and the 23-entry micro-program (init, ladder, recovery) |
| `rtl/ecpm_top.sv` | top: control + datapath + inverter, result selection |

Top-level interface (`ecpm_top`):

- Inputs: `clk`; `rst_n`, an asynchronous active-low reset; `start`; `k[162:0]`;
  `xp`; `yp`.
- Outputs: `busy`, `done`, `x_out`, `y_out`, `inf`.
- Hold `k`, `xp` and `yp` until the clock after `start`; they are captured then.
- The outputs are valid from the `done` pulse until the next `start`.

The micro-instruction (`uop_t`) has one field group per unit: an enable, the
source registers and a destination register. It also has `sqr_from_add`, which
feeds the adder output to the squarer, and `swap_en`. The register file holds 19
writable 163-bit registers. The names ZERO, ONE, B and INV read as constants or as
the inverter's output. Assertions check that no two units write the same register
in one clock and that constants are never written.

## Simulation

Every testbench is self-checking and prints `TB_RESULT checks=N failures=M`. A
testbench is built with, for example:

    verilator --binary --timing --assert -y rtl -y tb rtl/ecc_pkg.sv tb/gf_ref_pkg.sv \
              tb/ecpm_top_tb.sv --top-module ecpm_top_tb
    ./obj_dir/Vecpm_top_tb

Replace `ecpm_top_tb` with any other `*_tb`.

`tb/gf_ref_pkg.sv` holds bit-serial reference arithmetic that shares no algorithm
with the RTL:

- a shift-and-add multiply;
- Fermat inversion, a^(2^m−2);
- affine double-and-add point multiplication.

| testbench | what it checks |
|---|---|
| `poly_mult_tb`, `kara_overlap_tb`, `hybrid_karatsuba_tb` | products against the reference: the default hybrid, the all-Karatsuba chain, and a small odd size that pads at every level |
| `mult_sizes_tb` | the sizes of the design study (6, 11, 21, 41, 82, 163 bits), as Karatsuba and as schoolbook multipliers |
| `gf_mult_tb`, `gf_squarer_tb`, `gf_adder_tb` | field operations |
| `gf_inverter_tb` | a·a⁻¹ = 1, agreement with Fermat, and latency ≤ 2m + 2 |
| `ecpm_datapath_tb` | micro-instructions, chaining, constants, role swap, zero flags |
| `ecpm_control_tb` | sequencing against an inverter model: 6 clocks per key bit, swap = inverted key bit, one inversion, no early use of its result, exact latency |
| `ecpm_top_tb` | full-size end-to-end run (about 2 s in Verilator), described below |

`ecpm_top_tb` runs at the default parameters. It compares kG against known
multiples of the base point: k = 1, 2, 3, a 25-bit k, a 163-bit k, n−1 (giving −G),
n (giving ∞) and 0. It also compares random 163-bit keys and a second base point
against the affine reference. It checks that the ladder takes exactly 6 clocks per
key bit. It fails unless ladder steps with both key-bit values, an inversion, an
infinity result and a −P result all occur.

## Changing the design

- **Base size of the multiplier:** set `POLY_N` of `hybrid_karatsuba` or `gf_mult`.
  For the datapath, set `POLY_N_P` of `ecpm_datapath`, or change `ecc_pkg::POLY_N`.
  Any value from 2 to 163 gives a correct multiplier; only area and depth change.
- **Other field sizes:** the field units take `M` and `FPOLY` as parameters and were
  tested only at 163 and at small sizes (the multipliers). The point-multiplication
  part (`ecpm_*`, the curve constants) is written for B-163 through `ecc_pkg`. A
  different binary curve needs new constants in the package. The micro-program
  does not depend on m.
- **Pipelining:** the multiplier path is one combinational stage, so the clock
  period is set by the multiplier, the reduction and the register-file multiplexers.
  Registers inside `gf_mult` would need the micro-program re-timed to the new
  latency.

## How this relates to the published design

This RTL follows these parts of the published design:

- the hybrid multiplier structure (163 → 82 → 41, MSB zero padding, 41-bit
  schoolbook base);
- the overlap recombination;
- the XOR-only squarer;
- single-clock multiplication and squaring;
- the projective Montgomery ladder and its six-clock schedule with three parallel
  units;
- an extended Euclidean inverter bounded by 2m clocks;
- the B-163 parameters.

The following are this design's own choices. The published description does not
detail them:

- the reduction circuit;
- the inverter's step rule;
- the register file and micro-instruction format;
- the role swap used for key bits of 0;
- the leading-one search;
- the schedules for initialisation and recovery, and running the recovery in
  parallel with the inversion;
- the handshakes and reset;
- the handling of k = 0, kP = ∞ and kP = −P.

Not reproduced: the FPGA figures, which were measured on a Virtex-7: 213 MHz,
14195 LUTs, 0.98 W and 6.09 µs. They depend on the vendor's tools and device and
have not been measured for this RTL. The cycle count differs by the 16 clocks of
overhead explained under Timing.

Lint note: when `hybrid_karatsuba` is linted alone as the top module, Verilator
reports the nets of its recursive sub-products as undriven. That warning comes
from linting the recursion by itself. Instantiated from `gf_mult`, the module
lints without it, and it simulates and synthesises correctly.
