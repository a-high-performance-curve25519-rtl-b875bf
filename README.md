# Unified Curve25519 / Curve448 scalar-multiplication accelerator

This RTL computes the X25519 and X448 functions: given the x-coordinate `x_P`
of a point on Curve25519 (prime 2^255 - 19) or Curve448 (prime
2^448 - 2^224 - 1) and a scalar `k`, it returns the x-coordinate `x_Q` of
`Q = k·P`. Both curves run on one datapath. That datapath is a finite-field
arithmetic unit (FFAU) with four 256-bit Karatsuba multipliers:

- Curve25519: the four multipliers work as four independent lanes.
- Curve448: all four multipliers are ganged to form one 448-bit
  multiplication.

Every field operation the datapath performs has the same shape:

    R = (A ± B) × (C ± D)  mod p

The scalar multiplication uses a Montgomery ladder with t = 255 or t = 448
iterations. Optionally, the starting point is re-randomised in projective
coordinates with a Trivium-generated λ, which counters differential power
analysis (DPA). A Fermat inversion and one multiplication end the operation.

The design follows the architecture of the published accelerator "A
High-Performance Curve25519 and Curve448 Unified Elliptic Curve Cryptography
Accelerator". That publication gives the block diagram, the restructured
ladder, the multiplier structure and the cycle counts. The rest is this
design's own work:

- the register and operand encodings,
- the instruction schedule,
- the inversion chain for Curve448,
- the reduction algorithm,
- the control FSM,
- the handshake.

The section *Departures and open points* lists each such choice.

| Operation                    | Cycles | At 100 MHz |
|------------------------------|-------:|-----------:|
| Curve25519                   |   1032 |   10.32 µs |
| Curve25519 with randomisation|   1038 |   10.38 µs |
| Curve448                     |   4944 |   49.44 µs |
| Curve448 with randomisation  |   5401 |   54.01 µs |

The simulated cycle counts match the published ones exactly. The 100 MHz
column uses the published clock frequency. This RTL has not been timed.

## The ladder as (A ± B) × (C ± D) instructions

One ladder iteration normally takes 8 additions or subtractions and 11
multiplications. These are regrouped into 11 instructions of the
(A ± B)(C ± D) form. In the instructions below:

- `0` and `1` are constants.
- `A` is the ladder constant: 121665 for Curve25519 and 39081 for Curve448.
- T6 to T9 are temporaries.

```
T6 = (X2+Z2)(X2+Z2)    T7 = (X2-Z2)(X2-Z2)    T8 = (X3-Z3)(X2+Z2)   T9 = (X3+Z3)(X2-Z2)
X3 = (T8+T9)(T8+T9)    X3 = (X3+0)(Z1+0)      Z3 = (T8-T9)(T8-T9)   Z3 = (Z3+0)(X1+0)
X2 = (T6+0)(T7+0)      Z2 = (A+0)(T6-T7)      Z2 = (Z2+T6)(T6-T7)
```

Afterwards (X2:Z2) holds 2·R0 and (X3:Z3) holds R0 + R1.

The conditional swap of the ladder is never done by moving data. When the
scalar bit k_i is 1, the controller swaps the register addresses
(X2,Z2) ↔ (X3,Z3) in the instruction. The same registers are written either
way, so timing and data movement do not depend on k.

**Curve25519: three cycles per iteration.** The 11 instructions form three
groups of independent instructions, issued on the four lanes:

| Cycle | Lane 0          | Lane 1          | Lane 2          | Lane 3          |
|-------|-----------------|-----------------|-----------------|-----------------|
| 0     | T6              | T7              | T8              | T9              |
| 1     | X3=(T8+T9)²     | Z3=(T8−T9)²     | X2=T6·T7        | Z2=A(T6−T7)     |
| 2     | X3=X3·Z1        | Z3=Z3·X1        | Z2=(Z2+T6)(T6−T7)| idle           |

**Curve448: one instruction per cycle, in the order listed above.** That gives
11 cycles per iteration.

- Without randomisation, Z1 = 1, so the instruction X3 = X3·Z1 does nothing.
  The controller skips it, and an iteration takes 10 cycles.
- With randomisation, Z1 = λ and the instruction is needed, so an iteration
  takes 11 cycles.
- On Curve25519 the same multiplication is kept even though it does nothing,
  because it fits in a cycle that is used anyway.

The instructions live in two small combinational LUTs:

- `lut_c25519_ladder` holds three entries of four lanes.
- `lut_c448_ladder` holds eleven entries of one lane, one of them flagged
  "needed only with randomisation".

## Operation schedule

`ecsm_fsm` steps through the phases below. Each phase issues one FFAU
instruction per cycle.

| Phase   | Cycles (25519 / 448)           | Work                                           |
|---------|--------------------------------|------------------------------------------------|
| LOAD    | 1                              | X1, X3 ← x_P; X2, Z1, Z3 ← 1; Z2 ← 0; load k   |
| RNG     | 4 / 7 (randomisation only)     | 64-bit PRNG words → register R11 (λ)           |
| RAND1   | 1 (randomisation only)         | X2, Z1, Z3 ← (λ+0)(1+0), which also reduces λ  |
| RAND2   | 1 (randomisation only)         | X1, X3 ← (λ+0)(X1+0) = λ·x_P                   |
| LADDER  | 255·3 / 448·10 (448·11 with randomisation) | ladder iterations, MSB of k first  |
| INV     | 265 / 462                      | Z2 ← Z2^(p−2)                                  |
| FINAL   | 1                              | X2 ← X2·Z2, so x_Q = X2                        |
| DONE    | (not counted)                  | `done` pulse                                   |

These add up to the table's totals:

- Curve25519: 1 + 765 + 265 + 1 = 1032, and 1038 with the 4 + 2 cycles of
  randomisation.
- Curve448: 1 + 4480 + 462 + 1 = 4944, and 1 + 7 + 2 + 4928 + 462 + 1 = 5401
  with randomisation.

The published totals are reproduced. How the published design spends its
extra randomisation cycles is not known, and this split is one that fits.

**Inversion.** Inversion uses Fermat's little theorem, computing z^(p−2). It
is stored as a short list of entries. Each entry means: "dst ← s1·s2, then
square dst in place rep−1 more times". Each multiplication is issued as
(s1+0)(s2+0) and takes one cycle.

- **Curve25519** uses the usual chain of 254 squarings and 11
  multiplications, in 22 entries.
- **Curve448** uses 447 squarings and 15 multiplications, in 30 entries.
  1. A binary method computes z^111 (111 = 1101111b).
  2. Repeated squaring and multiplication then build z^(2^222−1) and
     z^(2^223−1).
  3. The final steps build the exponent 2^448 − 2^224 − 3.

Both totals, 265 and 462, are the published operation counts.

## The FFAU

`ffau` holds the following units:

- eight 255-bit adder/subtractors (`addsub`, W = 255),
- two 193-bit ones (W = 193),
- four `kara_mul` multipliers of 256 × 256 bits,
- the reduction unit.

`opsel[2j]` selects A−B and `opsel[2j+1]` selects C−D for lane j.

**Subtraction stays positive without a modular correction.** Each adder is
given a bias, and computes x + bias − y.

- On Curve25519 the bias is p. With both inputs below p the adder output
  is below 2^256, so it fits the 256-bit multiplier port.
- On Curve448, each 448-bit operand is split into a 255-bit low part
  (Add255) and a 193-bit high part (Add193). Both parts use an all-ones
  bias, so the 448-bit bias is 2^448 − 1 = p + 2^224. The excess 2^224 is
  then subtracted from the 450-bit operand.

**The Curve448 product.** On Curve448, the two operands are split at
φ = 2^224, giving 225-bit halves. The four multipliers form a0b0, a1b0, a0b1
and a1b1. The identity φ² = φ + 1 (mod p) then gives:

    A·B ≡ (a1b1 + a0b0) + (a1b0 + a0b1 + a1b1)·φ   (mod p)

Careful with the φ coefficient: the published formula prints a0b0 in it,
where a1b1 is correct. This design follows the algebra.

**`reduce_unit`** handles both primes:

- **Curve25519.** Each of the four 512-bit products is folded twice with
  2^255 ≡ 19, then conditionally reduced by p.
- **Curve448.** The coefficients are combined into one 676-bit value and
  folded three times with 2^448 ≡ 2^224 + 1, then conditionally reduced by p.

All results leave the FFAU fully reduced.

### Karatsuba multiplier

`kara_mul` is the Mul256 block: a 2b × 2b Karatsuba step with b = 128.
Inside, it uses three `kara_mul_1l` (Mul128) blocks, each the same step with
b = 64, so there are two Karatsuba levels. The 64 × 64 products at the bottom
are written as `*` and left to synthesis.

One level works as follows:

- Two Mul_b blocks form x0y0 and x1y1.
- Two (b+1)-bit adders form x0 + x1 and y0 + y1.
- `kara_csa` is the 3:2 compressor. It folds x1y1·2^b + (x0y0 >> b) − x0y0 −
  x1y1 into a single value, with one carry-propagating adder after the
  compressor. The low b bits of x0y0 pass straight through.
- `kara_muladd` adds the middle product (x0+x1)(y0+y1) to that value. The
  middle product is formed by a b × b multiplier, plus the cross terms of the
  two carry bits.

## Registers, scalar and PRNG

`regfile` holds 12 × 448-bit registers with 16 read ports and 4 write lanes.

- Read sources 12, 13 and 14 are the constants 0, 1 and A.
- A 64-bit chunk-write port places PRNG words into R11.
- The ladder uses X1, Z1, X2, Z2, X3, Z3 and T6 to T9. R11 receives λ.
- The inversion reuses these registers, and R10, as scratch space.

`kreg` holds the 448-bit scalar and shifts it left once per iteration.
`kbit` is taken from bit 447 (Curve448) or bit 254 (Curve25519).

`prng` wraps a `trivium` core that makes 64 keystream bits per clock.

- The key and IV are 80 bits each. `prng_init` loads them: key bit 0 goes
  into state bit s1, and IV bit 0 into s94.
- The core then runs the 1152 warm-up rounds in 18 cycles.
- After that, `prng_ready` rises and a word is produced only when one is
  taken.
- If an operation with randomisation starts before `prng_ready`, it waits in
  the RNG phase.

**Clock gating is written as enables.** The `ps_mode` input turns on two
power-saving gates:

- During Curve25519, the upper 193 bits of every register are held
  (`hi_en = curve448 | !ps_mode`).
- With randomisation off, the PRNG is held (`cg_en = secure_mode | !ps_mode`).

A synthesis flow maps such enables to integrated clock-gating cells.

## Interface and timing

Top module: `ecc_unified`. It has no parameters. All resets are synchronous
and active high.

| Port | Dir | Width | Meaning |
|------|-----|------:|---------|
| `clock`, `reset` | in | 1 | clock; reset of FSM, registers and k-reg |
| `prng_reset` | in | 1 | reset of the PRNG |
| `prng_init`, `prng_K`, `prng_IV` | in | 1, 80, 80 | load the Trivium key and IV |
| `prng_ready` | out | 1 | PRNG warm-up finished |
| `curve_sel` | in | 1 | 0 = Curve25519, 1 = Curve448 |
| `secure_mode` | in | 1 | 1 = randomised projective coordinates |
| `ps_mode` | in | 1 | enable the clock-gating enables |
| `xP`, `k` | in | 448 | input coordinate and scalar (Curve25519 uses bits 254..0) |
| `start` | in | 1 | one-cycle pulse to begin |
| `busy` | out | 1 | high from the cycle after `start` to the cycle before `done` |
| `done` | out | 1 | one-cycle pulse; `xQ` is valid from then until the next `start` |
| `xQ` | out | 448 | result, fully reduced; upper bits zero on Curve25519 |

Timing and usage rules:

- Hold `xP`, `k`, `curve_sel` and `secure_mode` stable from `start` until
  `done`.
- `k` is used as given, with bit t−1 processed first. Apply X25519 or X448
  scalar clamping before passing it in.
- Byte-string decoding, as in RFC 7748, is left to the caller.

## Verification

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog.

- **`tb_kara_mul`, `tb_addsub`, `tb_reduce_unit`, `tb_ffau`:** random and
  edge operands, compared with wide-integer results computed in the
  testbench.
- **`tb_regfile`, `tb_kreg`:** port behaviour, clock-gate holding and chunk
  writes.
- **`tb_trivium`, `tb_prng`:** compared with a bit-serial Trivium model
  written from the cipher specification.
- **LUT testbenches:**
  - The ladder LUTs are checked by executing the instructions on random
    field values against a plain Montgomery ladder step.
  - The inverter LUTs are checked by tracking exponents symbolically. They
    must reach p−2 with exactly 265 or 462 operations.
- **`tb_controller`, `tb_ecsm_fsm`:** decoding, swapping, skipping, stalls and
  phase lengths.
- **`tb_ecc_unified`:** runs the whole accelerator at its default size. It
  covers five operations:
  - the X25519 example k = clamped 9, u = 9,
  - the X448 test vector of RFC 7748,
  - randomised runs on both curves,
  - a run that starts while the PRNG is still warming up.

  It checks `x_Q` and the exact cycle counts listed above. It also counts
  that each mechanism occurred at least once: the swap for each k_i, the
  Curve448 skip, randomisation, the PRNG stall, a curve switch, and both
  clock-gate holds.

To simulate with Verilator, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl +libext+.sv \
    rtl/ecc_pkg.sv tb/tb_ecc_unified.sv --top-module tb_ecc_unified
./obj_dir/Vtb_ecc_unified
```

Any other testbench is run the same way. The full-size run of
`tb_ecc_unified` covers about 13,500 clock cycles and simulates in well under a
second.

## Departures and open points

- **φ formula.** The Curve448 φ-coefficient is written with a1b1, not with
  the a0b0 that is printed in the source; see *The FFAU*.
- **`ps_mode`.** Only the top-level diagram shows this input, without a
  description. Here it turns on the two clock-gating enables.
- **Clock gates.** They are modelled as enables, not as gating cells.
- **Not specified by the source, chosen here:**
  - the start/busy/done handshake,
  - the cycle breakdown of the randomisation phase,
  - the Curve448 inversion chain,
  - the reduction algorithm and the bias-based subtraction,
  - the assignment of the eight `opsel` lines,
  - the register allocation,
  - reset behaviour,
  - the Trivium key/IV bit order.
- **λ = 0 is not excluded.** The probability is 2^−255 or 2^−448.
- **Adder sharing in the reduction unit.** The source reuses one set of
  adders for both primes. Here the two reductions are described separately
  behind a mode multiplexer, and any sharing is left to synthesis.
- **Bottom-level multipliers.** The 64 × 64 multipliers at the bottom of the
  Karatsuba tree are behavioural.
- **Not reproduced:** area, power and the 100 MHz timing.
