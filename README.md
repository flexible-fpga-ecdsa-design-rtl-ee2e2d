# Flexible ECDSA point-multiplication accelerator for B-233 and B-283

This is synthesizable SystemVerilog for an elliptic-curve accelerator that
serves ECDSA on the two NIST binary curves B-233 and B-283. The same datapath
works for both fields, GF(2^233) and GF(2^283): the curve is chosen by a
command at run time. The host does the cheap integer work of ECDSA: hashing,
u1 = e/s and u2 = r/s mod n, drawing the nonce k, and comparing r with
x_T mod n. The accelerator does the expensive part, which is scalar
multiplication of curve points.

The design is organised around three ideas:

* **One field multiplier, built with 4-segment Karatsuba.** A 283-bit
  product is split into nine 71 x 71-bit partial products. One partial product
  is computed per clock cycle by a single classical (schoolbook) partial
  multiplier. The result is accumulated and reduced in the same cycle, so a
  field product takes 9 cycles. Products can follow each other with no gap.
* **Squaring and addition happen beside the multiplier.** In a binary field,
  squaring is nearly free: the bits are spread apart and then reduced. So an
  ALU does squarings and additions in one cycle each, at the same time as
  the multiplier works.
* **Montgomery ladder in Lopez-Dahab projective coordinates.** Every scalar
  bit costs exactly six field products. The sequence of operations does not
  depend on the bit's value. With the multiplier never idle, each bit takes
  54 cycles.

The work follows a published FPGA design whose authors studied its resistance
to horizontal collision-correlation side-channel attacks. This code is an
independent re-implementation from that description. It is not the authors'
VHDL. The section "How far this follows the published design" lists the
places where details had to be chosen.

## What the accelerator computes

`ecdsa_accel` takes four commands. A command is accepted when `cmd_valid`
and `cmd_ready` are both high:

| `cmd`        | operands         | result `(x_out, y_out)` |
|--------------|------------------|-------------------------|
| `CMD_SEL_EC` | `cmd_ec`         | none; selects B-233 (0) or B-283 (1) for the commands that follow |
| `CMD_KG`     | `k`              | k * G (signature generation: x is r before the reduction mod n) |
| `CMD_KPUB`   | `k`, `pub_x/y`   | k * Pub |
| `CMD_VERIFY` | `k` = u1, `k2` = u2, `pub_x/y` | u1 * G + u2 * Pub (signature verification: x is x_T) |

`done` pulses for one cycle when the command ends. `err` is set when a case
was met that the hardware does not handle: the point at infinity, a point
with x = 0, or two equal x coordinates in the final addition of a
verification. Each of these happens only with negligible probability for
honest inputs. Two observation outputs show the rhythm of the ladder:
`slot_start` marks the first cycle of each scalar-bit slot, and `mul_start`
marks the issue of each field product. The base points G and the coefficients b of both curves
(FIPS 186-4) are stored in `curve_rom`. Both curves have a = 1.

**Preconditions.**
* Bit l-1 of every scalar must be 1, with l = 233 or 283. The ladder starts
  from that bit and then processes bits l-2 down to 0.
* For a scalar below the group order n, the host adds n or 2n to set that
  bit. This does not change the point, because n * P is the point at
  infinity.
* The operand inputs are not registered. Hold them stable until `done`.

## The flexible field multiplier (`flex_mult`)

Each 283-bit operand is cut into four 71-bit segments:
A = A3 t^213 + A2 t^142 + A1 t^71 + A0. A B-233 operand simply has zeros
above bit 232. This gives the same segmentation for both fields.

Two nested levels of 2-segment Karatsuba give nine partial products. Step s
uses the operands below; B is split the same way:

| step | 0 | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 |
|------|---|---|---|---|---|---|---|---|---|
| operand of A | A0 | A1 | A0+A1 | A2 | A3 | A2+A3 | A0+A2 | A1+A3 | A0+A1+A2+A3 |
| added at t^(71 j) for j in | 0,1,2,3 | 1,2,3,4 | 1,3 | 2,3,4,5 | 3,4,5,6 | 3,5 | 2,3 | 3,4 | 3 |

The second row follows from expanding the two Karatsuba levels. For the low
half, AL*BL = P0 + (P0+P1+P2) t^71 + P1 t^142. The high half and the mixed
term are built the same way. The mixed term is added at t^142.

Each cycle:
1. `kmul_operands` forms the two 71-bit operands of the current step.
2. `pmul_classical` multiplies them into a 141-bit carry-less product.
3. `kmul_accum` XORs that product into the accumulator at each of its
   shifts, and reduces the sum modulo f(t) of the selected curve.

The reduction folds the part above degree l back onto the low terms of f:
* f = t^233 + t^74 + 1 for B-233, which takes three folds.
* f = t^283 + t^12 + t^7 + t^5 + 1 for B-283, which takes two folds.

So the accumulator always holds a reduced field element. It is also the
output register.

Timing of `flex_mult`:

```
cycle      t      t+1 .. t+9            t+10
start      1      (1 again at t+9 for back-to-back)
           load   steps 0..8 (en=1)     done=1, c = a*b mod f
```

A start given in step 8 (when `ready` is high) loads the next operands. The
product then stays visible in `c` for one cycle, while the next product
runs its step 0. Step 0 overwrites the accumulator instead of adding to it.
This is how the ladder gets one product every 9 cycles.

## The kP core and its 54-cycle slot (`kp_core`, `kp_ctrl`)

`kp_core` connects five blocks: the controller, a register file of fifteen
283-bit registers, a bus, the ALU (add, square, copy) and the multiplier.
The bus gives two operand lines, read from two register ports, to both the
ALU and the multiplier. A single result line writes back one value per
cycle. That value is the ALU result, a product, or an external value
(x, y of P, or b).

A job runs these phases:
1. **Load (3 cycles).** x, y and b are written into the register file.
2. **Initialisation (5 cycles).** X1 = x, Z1 = 1, Z2 = x^2, X2 = x^4 + b.
3. **Ladder.** One 54-cycle slot per bit k_i, for i = l-2 down to 0.
4. **Drain (2 cycles).**
5. **Post-processing.**

In a slot, let *a* be the ladder point that receives the addition and *d*
the point that is doubled. If k_i = 1, then a = 1 and d = 2; if k_i = 0,
they swap. With M1..M6 the six products:

```
M1 = X_pd * Z_pa      M2 = X_pa * Z_pd       M3 = b * Z_d^4
M4 = M1 * M2          M5 = x * Z_a'          M6 = X_d^2 * Z_d^2
Z_a' = (M1 + M2)^2    X_a' = M5 + M4         X_d' = X_d^4 + M3     Z_d' = M6
```

Here pa and pd are the roles from the previous bit. The product with b is
always the 3rd and the product with x the 5th.

The hard part is running the products back to back. M6 of one slot is
written back only in cycle 1 of the next slot, yet the next slot's first
product must be issued in cycle 0. The fix is to order the slot's two
cross-products by the roles of the *previous* slot, not the current one:
* M1 needs only values written early in the previous slot (X_pd at cycle
  29, Z_pa at cycle 21).
* M2, issued 9 cycles later, is the one that reads Z_pd = M6.

Both cross-products are needed whatever the bit is, so this reordering is
free.

Cycle plan of a slot. A product issued in cycle c runs in c+1..c+9 and is
written back in c+10. T0..T5 are temporaries.

| cycle | bus / ALU | multiplier |
|---|---|---|
| 0 | | issue M1 = X_pd * Z_pa |
| 1 | Z_pd <= M6 of previous slot | |
| 2..5 | T2 = Z_d^2, T3 = T2^2, T4 = X_d^2, T5 = T4^2 | |
| 9 | | issue M2 = X_pa * Z_pd |
| 10 | T0 <= M1 | |
| 18 | | issue M3 = b * T3 |
| 19 | T1 <= M2 | |
| 20, 21 | Z_a = T0 + T1, Z_a = Z_a^2 | |
| 27 | | issue M4 = T0 * T1 |
| 28, 29 | T3 <= M3, X_d = T5 + T3 | |
| 36 | | issue M5 = x * Z_a |
| 37 | T5 <= M4 | |
| 45 | | issue M6 = T4 * T2 |
| 46, 47 | T0 <= M5, X_a = T0 + T5 | |

The plan uses six products, five squarings and three additions per bit. It
never needs both read ports for the ALU and the multiplier in the same cycle,
and never two write-backs in one cycle.

**Post-processing.** After the ladder, a small micro-program (`prog()` in
`kp_ctrl`) runs one instruction at a time. It converts the result to affine
coordinates:

* x1 = X1 / Z1
* y1 = y + (x + x1) [(X1 + x Z1)(X2 + x Z2) + (x^2 + y) Z1 Z2] / (x Z1 Z2)

This needs a single inversion, of x Z1 Z2. The inversion uses Fermat's
little theorem: a^(2^l - 2), computed as l-2 steps of "square, then multiply
by a", followed by one final squaring. That is about 12 cycles per step.

For the second job of a verification, the program then adds the point from
the first job to the new one with the affine formulas:
* lambda = (y1 + y2)/(x1 + x2)
* x3 = lambda^2 + lambda + x1 + x2 + 1
* y3 = lambda (x1 + x3) + x3 + y1

Measured cycle counts in simulation:

| operation | B-233 | B-283 |
|---|---|---|
| k*G or k*Pub | 15 435 | 18 735 |
| verification (two jobs plus the addition) | 33 677 | 40 877 |

## Registers

| name | contents |
|---|---|
| R_X, R_Y, R_B | the input point and the curve coefficient b |
| R_X1, R_Z1, R_X2, R_Z2 | the two ladder points |
| R_T0..R_T5 | temporaries |
| R_XR, R_YR | the result, kept for the addition of a verification |
| R_ONE | reads as the field element 1; not a register |

All field elements are stored reduced: bits at and above l are zero.

## How far this follows the published design

Taken from the description:
* The two curves and their field polynomials.
* Algorithm 1, a Montgomery ladder in Lopez-Dahab coordinates whose scalar
  has its top bit set.
* The block structure:
  * kP core: controller, bus, ALU with addition and squaring, one flexible
    multiplier, 283-bit registers.
  * Multiplier: input registers, partial-operand calculation, 71 x 71
    classical partial multiplier with a 141-bit product, accumulation with
    reduction every cycle, output register, multiplier controller.
* The timing: 9 cycles per product, 6 products and 54 cycles per scalar bit,
  the product with b 3rd and the product with x 5th.
* The command set and the stored parameters.

Choices made here, where the description gives no detail:
* The order of the nine Karatsuba steps. The description refers to a fixed
  plan published elsewhere.
* 71-bit segments for B-233 as well.
* Full reduction in every cycle. The description speaks of "partial
  reduction" without defining it.
* The number of registers and the bus structure.
* The exact cycle plan of a slot.
* Inversion by Fermat's theorem.
* Affine conversion and point addition on the same datapath.
* Running a verification as two ladder jobs plus one addition.
* Synchronous active-low reset.
* The command encoding and the valid/ready/done handshake.

Not built:
* The described modification of the ladder initialisation from the authors'
  earlier work, which is not specified.
* Any side-channel countermeasure. The published multiplier was studied
  without countermeasures too.
* The prime-field (P-224, P-256) unified multiplier, which is mentioned only
  as future work.
* Handling of degenerate points; they are flagged instead.

Size: without its memories, a coarse synthesis of `ecdsa_accel` gives about
5 400 flip-flop bits. The description reports 6 369 flip-flops for its whole
design on a Spartan-6, and 2 631 for its multiplier alone. Here the
multiplier has 855: two input registers and the accumulator. So the
published multiplier keeps more state than this one, most likely for
pipelining, which is not described. The 15 x 283 register file is close to
what the published totals leave for the rest of the design.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Reference values never come from the
design itself. They come from:
* `tb_gf_pkg`: bit-serial GF(2^l) multiplication, reducing after every
  shift, and a shift-and-add carry-less product.
* `tb_vec_pkg`: known answers from an independent affine double-and-add
  model of both curves. These are k*G, k*Pub, and a complete ECDSA
  signature (r, s) with its u1, u2 and x_T.

| testbench | what it shows |
|---|---|
| `tb_ecdsa_accel` | End-to-end test through the commands: curve switching, k*G and k*Pub on B-283, and signature verification on B-283 and B-233 (x_T mod n = r). An unsupported doubling must raise `err`. Every slot must be 54 cycles long. |
| `tb_kp_core` | k*G on both curves, u1*G + u2*Pub, and the err flag. Checks 54 cycles and 6 products per slot, and l-1 slots per job. |
| `tb_kp_ctrl` | The controller driving a behavioural datapath. Checks the results, that the 3rd product uses b and the 5th uses x, that no product is issued while one is running, and that no invalid product is written back. |
| `tb_flex_mult` | Random and corner products on both fields. Latency is 10 cycles from start. Four products run back to back. |
| `tb_mult_experiment` | The multiplier experiment of the side-channel study: 20 x {a*b, c*d, a*e, f*g} for 233- and 283-bit operands, every product checked. It also prints correlation coefficients of a toggle-count activity profile. These are an illustration, not a side-channel claim. |
| `tb_kmul_operands`, `tb_kmul_accum`, `tb_pmul_classical`, `tb_kmul_ctrl`, `tb_gf_sqr`, `tb_gf_add`, `tb_flex_alu`, `tb_kp_regfile`, `tb_kp_bus`, `tb_curve_rom` | The blocks one by one. The Karatsuba recombination is checked against a full product. `tb_curve_rom` checks that G lies on each curve. |

The design has no size parameters that a test would need to shrink. The
end-to-end test runs the real 283-bit design in a few seconds.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
  rtl/ecc_pkg.sv tb/tb_gf_pkg.sv tb/tb_vec_pkg.sv tb/tb_ecdsa_accel.sv \
  --top-module tb_ecdsa_accel -Mdir obj -o sim && obj/sim
```

Replace `tb_ecdsa_accel` with the name of any other testbench.

## Files

| file | block |
|---|---|
| `rtl/ecc_pkg.sv` | Shared types, constants, `gf_reduce`, register names, opcodes and commands. |
| `rtl/ecdsa_accel.sv` | Top level: command decoder and job sequencing. |
| `rtl/curve_rom.sv` | Stored G and b of both curves. |
| `rtl/kp_core.sv` | The kP accelerator. |
| `rtl/kp_ctrl.sv` | The controller: ladder schedule and post-processing program. |
| `rtl/kp_regfile.sv`, `rtl/kp_bus.sv` | The register bank and the bus. |
| `rtl/flex_alu.sv`, `rtl/gf_add.sv`, `rtl/gf_sqr.sv` | The ALU with addition and squaring. |
| `rtl/flex_mult.sv`, `rtl/kmul_ctrl.sv`, `rtl/kmul_operands.sv`, `rtl/pmul_classical.sv`, `rtl/kmul_accum.sv` | The field multiplier. |
