# A 16-bit inversion S-box over a normal-basis tower field

This is synthesizable SystemVerilog for a 16-bit substitution box (S-box) for
block ciphers. The S-box works like the AES S-box, but on 16 bits. The input
is taken as an element `x` of GF(2^16) and inverted (`0` maps to `0`). The
result then goes through a sparse linear output map:

    S(x) = AT(x^-1)            S^-1(y) = (AT^-1(y))^-1

Inverting directly in GF(2^16) is expensive. Here it is done in a *tower*:
GF(2^16) is built as a quadratic extension of GF(2^8), which is a quadratic
extension of GF(2^4), then of GF(2^2), then of GF(2). One inversion at each
level needs a few multiplications and one inversion one level down. At the
bottom, the GF(2^4) inverter is a 4-input, 4-output truth table.
Every level uses a *normal basis* `{r, r^q}`. Squaring is then cheap. The
conjugate `r^q` is the other basis element, so the "Frobenius swap" is just
a swap of the two halves.

The whole S-box is one combinational path with no clock and no state. The
design reaches the figures expected of a GF(2^16) inversion, and the security
testbench measures them on the RTL: nonlinearity 32512, differential
uniformity 4, algebraic degree 15.

## The field tower and the bit layout

| level     | bits   | basis                    | defining polynomial | element                         |
|-----------|--------|--------------------------|---------------------|---------------------------------|
| GF(2^2)   | [1:0]  | {alpha, alpha^2}         | x^2 + x + 1         | a0*alpha + a1*alpha^2           |
| GF(2^4)   | [3:0]  | {beta, beta^4}           | x^2 + x + alpha     | a_l*beta + a_h*beta^4           |
| GF(2^8)   | [7:0]  | {gamma, gamma^16}        | x^2 + x + lambda    | a_l*gamma + a_h*gamma^16        |
| GF(2^16)  | [15:0] | {delta, delta^256}       | x^2 + x + mu        | a_l*delta + a_h*delta^256       |

`a_l` is always the low half of the vector and `a_h` the high half. The
constants are `lambda = alpha^2*beta` (4'b0010) and `mu = beta + lambda*gamma`
(8'h31). The unit element of every level is all ones. In the polynomial
representation of GF(2^16) modulo `p(x) = x^16 + x^5 + x^3 + x^2 + 1`, with
`omega` a root of `p`, the basis generators are:

- `alpha = omega^21845`
- `beta = omega^4369`
- `gamma = omega^14392`
- `delta = omega^45049`

The S-box's own input and output use the normal basis
`{theta^(2^i)}`, with `theta = omega^1091`. Bit `i` of the vector is the
coefficient of `theta^(2^i)`.

The types and the two trivial GF(2^2) helpers (squaring is a swap;
multiplication by alpha is one XOR) are in `rtl/gf_pkg.sv`.

## How the inversion collapses level by level

For `A = a_l*r + a_h*r^q` in a level with defining polynomial `x^2 + x + c`,
the product `A * A^q` lies in the subfield:

    Delta = c*(a_l + a_h)^2 + a_l*a_h
    A^-1  = Delta^-1 * (a_h*r + a_l*r^q)
    i_l   = Delta^-1 * a_h          i_h = Delta^-1 * a_l

**The output halves are crossed**: the low half of the result is built from
the high half of the input. Getting this wrong gives a circuit that looks
right and inverts nothing (the fault test of `gf256_inv` is that mistake).

`gf65536_inv` (16 bits) and `gf256_inv` (8 bits) both have this shape:

```
a_l ^ a_h --> [square, times c] --+
                                  +--> Delta --> [inverse, next level down] --+--> x a_h --> i_l
a_l, a_h ---> [multiply] ---------+                                           +--> x a_l --> i_h
```

The squaring and the multiplication by the constant are both linear over
GF(2). Each pair is therefore merged into one XOR network:

- `gf16_sq_mul_lambda` has three XORs and a wire.
- `gf256_sq_mul_mu` computes `mu*a^2` with one 3- to 6-input XOR per output
  bit.

Multipliers (`gf4_mul`, `gf16_mul`, `gf256_mul`) use the three-product
(Karatsuba-like) form of the normal-basis product:

    C = [(a_l+a_h)(b_l+b_h)*c + a_l*b_l]*r + [(a_l+a_h)(b_l+b_h)*c + a_h*b_h]*r^q

In `gf16_mul` the middle product, its input adders and the multiplication by
alpha are merged into one four-NAND network that yields `alpha*(X*Y)`
directly. `gf4_mul` writes its AND terms as NANDs. This is exact, because
`f ^ e == ~f ^ ~e`.

`gf16_inv` is not recursive. It gives the four output bits of the GF(2^4)
inverse as minimised two-level Boolean functions of the four input bits.

Every stage maps zero to zero, so `S(0) = 0` without any special case.

## Basis conversion and the output map

`nb_to_tower` (normal basis to tower) and `tower_to_nb` are 16x16 binary
matrices. Each one holds its matrix as 16 row literals. Each literal is written
column 0 first, so it can be compared with a printed matrix digit by digit.
Output bit `r` is the XOR of the input bits `c` for which row `r` has a one.
This orientation was checked against the basis change computed from the field
elements above, and the two matrices are inverses of each other. Each row is
written as an XOR tree. Logic sharing across rows is left to synthesis.

`affine` (AT) and `affine_inv` (AT^-1) are linear maps with no constant. Each
output bit is the XOR of three bits of the *other* byte. Pairs of input bits
that two outputs share are XORed once, which gives 24 two-input XORs, two
levels deep. The matrices use the convention `A = (a15, ..., a0)` as the
column vector, so row 0 gives `b15`.

## Module map

```
sbox16_top                 forward and inverse S-box side by side
 ├─ sbox16                 S  = AT . M_TN . Inv . M_NT
 │   ├─ nb_to_tower        M_NT
 │   ├─ gf65536_inv        I16
 │   │   ├─ gf256_sq_mul_mu    mu*(a_l+a_h)^2
 │   │   ├─ gf256_mul  x3      (a_l*a_h, two output products)
 │   │   │   ├─ gf16_mul x3
 │   │   │   │   └─ gf4_mul x2
 │   │   │   └─ gf16_mul_lambda
 │   │   └─ gf256_inv          I8
 │   │       ├─ gf16_sq_mul_lambda
 │   │       ├─ gf16_mul x3
 │   │       └─ gf16_inv       I4
 │   ├─ tower_to_nb        M_TN
 │   └─ affine             AT
 └─ sbox16_inv             S^-1 = M_TN . Inv . M_NT . AT^-1
     └─ affine_inv, nb_to_tower, gf65536_inv, tower_to_nb
```

`sbox16_top` has ports `fwd_in -> fwd_out = S(fwd_in)` and
`inv_in -> inv_out = S^-1(inv_in)`, all 16 bits. The two paths share nothing.
Putting both in one top with separate ports is a choice of this RTL. A
cipher that needs only one direction instantiates `sbox16` or `sbox16_inv`
alone. To pipeline the S-box, the natural cut points are the ports of
`gf256_inv` inside `gf65536_inv`.

## Departures from the source description

The source publication for this design gives most of its equations in
flattened form. Several of its printed equations and drawings contradict
each other. Every point below was settled by checking against arithmetic
done independently in GF(2^16):

- **Output halves of the GF(2^8) and GF(2^16) inverters.** The drawings show
  the output multipliers uncrossed, while the formula crosses them. The
  formula is the correct one and is what is built.
- **Constant in the GF(2^8) multiplier.** The drawing labels it "mu", but
  the defining polynomial and the 4-bit width make it lambda. Lambda is
  built.
- **`b0` of the output map.** The written equation `a14^a13^a8` disagrees
  with the matrix `a14^a12^a8`. The matrix is built, since only it is
  undone by the printed inverse matrix.
- **Merged `mu*a^2` table.** Its derivation column lists the same terms for
  `k5` and `k6`. The final expressions differ and are correct, and they are
  used.
- **Separate S8 squarer and the separate "multiply by mu" block.** The
  source also gives standalone forms of these, and of the `beta`,
  `alpha*beta` and `lambda^2` multipliers that make up the latter. The
  inverter never uses them: it uses the merged `mu*a^2` block, and it uses
  `lambda*a^2` instead of a separate GF(2^4) squarer. They are therefore not
  part of this RTL. Several of their printed bit-level equations also do not
  reproduce the operations they name, for example s0/s1 of the S8 table
  being swapped.
- **Gate-level form.** The source reports hand-optimised XOR networks, for
  example 57 and 60 XORs for the two basis conversions and 17 XORs for the
  merged `mu*a^2` block. It also reports NAND/NOR mappings and gate counts
  (484 XOR + 166 NAND/NOR for the S-box, about 1135 GE in 65 nm). This RTL
  gives the same functions at the Boolean level and lets synthesis choose
  gates, so its cell counts are not those figures.

## Verification

Each module has a self-checking testbench in `tb/`. The expected values come
from `tb/gf_ref_pkg.sv`, which does the arithmetic with plain polynomials
modulo `p(x)` and builds the tower and normal basis elements as powers of
`omega`. It never uses the tower circuits. A tower or normal-basis vector is
checked by mapping it into the polynomial field, for example
`to_poly(mul(a,b)) == to_poly(a)*to_poly(b)`.

Every testbench covers its whole input space: all operand pairs for the 2-,
4- and 8-bit multipliers, and all 65536 inputs for the 16-bit blocks.

- `tb_sbox16_top` runs the full design end to end. It checks every `S(x)`
  against the field inverse and checks `S^-1(S(x)) = x`. It checks that `S`
  is a permutation. It also counts the zero input and the inputs whose tower
  form has a zero half (the cases where one operand of the `a_l*a_h`
  product is zero).
- `tb_sbox16_security` reads the S-box table out of the RTL and measures
  three figures:
  - differential uniformity: 24 rows of the difference table all peak at 4;
  - nonlinearity: the Walsh spectra of 24 components give 32512;
  - algebraic degree: the algebraic normal form of every output bit has
    degree 15.

  Transparency order and the DPA signal-to-noise figure are not measured.

The S-box has six fixed points, among them zero and the all-ones vector
(the unit element).

To run a testbench with Verilator, for example the end-to-end one:

```
verilator --binary --timing --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb \
    rtl/gf_pkg.sv tb/gf_ref_pkg.sv tb/tb_sbox16_top.sv --top-module tb_sbox16_top
./obj_dir/Vtb_sbox16_top
```

Each testbench prints `TB_RESULT checks=N failures=M`. Every run, including
the full-table security measurements, finishes in well under a second of
simulation time.
