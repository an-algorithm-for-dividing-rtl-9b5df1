# Quaternion divider with eight multipliers

Dividing one quaternion by another, done directly, costs sixteen real multiplications for
the numerator, four squarings and four divisions. This RTL implements a fully parallel
quaternion divider that forms the same numerator with **eight** multipliers, following the
factorised algorithm of A. Cariow and G. Cariowa, "An algorithm for dividing quaternions".
The trade is eight multipliers for extra adders: 31 additions in all, against 15 for the
direct method. Multipliers grow with the square of the word width and adders only
linearly, so for wide words the trade pays.

The divider computes the left quotient

    y = r^-1 q = conj(r) q / |r|^2

of a dividend `q = q0 + i q1 + j q2 + k q3` and a divisor `r = r0 + i r1 + j r2 + k r3`:

    y0 = ( r0 q0 + r1 q1 + r2 q2 + r3 q3) / R
    y1 = ( r0 q1 - r1 q0 - r2 q3 + r3 q2) / R
    y2 = ( r0 q2 + r1 q3 - r2 q0 - r3 q1) / R
    y3 = ( r0 q3 - r1 q2 + r2 q1 - r3 q0) / R      with R = r0^2 + r1^2 + r2^2 + r3^2

## Why eight multiplications are enough

Written as a matrix-vector product, the numerator is `Q4 X`, with `X = [r0 r1 r2 r3]^T` and
`Q4` a 4x4 matrix made from the `q` components. After the real part is negated and the
divisor components r1..r3 are negated, that matrix becomes

    T - 2 S

where `T` is the symmetric block-Toeplitz matrix

    | q0 q1 q2 q3 |
    | q1 q0 q3 q2 |
    | q2 q3 q0 q1 |
    | q3 q2 q1 q0 |

and `S` holds only four non-zero entries (q0 at (0,0), q2 at (1,3), q3 at (2,1), q1 at
(3,2)). Matrices of the form of `T` are diagonalised by the 4-point Hadamard transform
`H4 = (H2 (x) I2)(I2 (x) H2)`, with `H2 = [[1,1],[1,-1]]`. So `T x = H4 diag(s0..s3) H4 x`,
and the four diagonal entries come from `q` with additions only. That part costs four
multiplications. The sparse part `2 S x` costs four more, because it has only four entries.

In the datapath this becomes eight lanes. The eight coefficients depend only on `q`. The
divisor side feeds eight values `u_i` (with `x' = (r0, -r1, -r2, -r3)`):

| lane | coefficient s_i             | divisor-side value u_i       |
|------|-----------------------------|------------------------------|
| 0    | (q0 + q1 + q2 + q3) / 4     | x'0 + x'1 + x'2 + x'3        |
| 1    | (q0 - q1 + q2 - q3) / 4     | x'0 - x'1 + x'2 - x'3        |
| 2    | (q0 + q1 - q2 - q3) / 4     | x'0 + x'1 - x'2 - x'3        |
| 3    | (q0 - q1 - q2 + q3) / 4     | x'0 - x'1 - x'2 + x'3        |
| 4    | 2 q0                        | x'0                          |
| 5    | 2 q2                        | x'3                          |
| 6    | 2 q3                        | x'1                          |
| 7    | 2 q1                        | x'2                          |

After the eight products `m_i = s_i u_i`, the output side does the same two Hadamard layers
on lanes 0..3 in the reverse order and subtracts lanes 4..7:

    z0 = (m0 + m1 + m2 + m3) - m4        z1 = (m0 - m1 + m2 - m3) - m5
    z2 = (m0 + m1 - m2 - m3) - m6        z3 = (m0 - m1 - m2 + m3) - m7

and finally `y0 = -z0 / R`, `y1..y3 = z1..z3 / R`.

**Lane order of 5..7.** The source's prose gives `s5 = 2q1, s6 = 2q2, s7 = 2q3`. The
8x8 matrices it prints give the order in the table above, `2q2, 2q3, 2q1`. Only the
matrix order gives the correct quotient, so that order is used here. The same holds for
the reordering of the divisor values in lanes 4..7. There, the printed 8x8 matrix is
followed and not the separately printed 4x4 permutation. The testbenches check the
result against the direct formulas, so an error in this ordering would show up.

## Datapath

    q ──► qdiv_coef_gen ──s[8]──┐
                                ├─► qdiv_mult_bank ──m[8]──► qdiv_post_add ──z[4]──┐
    r ──► qdiv_pre_add  ──u[8]──┘                                                  ├─► qdiv_eta_scale ──► y[4]
    r ──► qdiv_norm ───────────────────────────────────────────────────R──────────┘

| module           | what it holds                                              | adders | multipliers |
|------------------|------------------------------------------------------------|--------|-------------|
| `hadamard2`      | one H2 butterfly: a+b, a-b                                 | 2      | –           |
| `qdiv_coef_gen`  | s0..s7: two butterfly layers on q, plus copies of q         | 8      | –           |
| `qdiv_pre_add`   | u0..u7: sign change, two butterfly layers, a permutation    | 8      | –           |
| `qdiv_mult_bank` | eight independent signed multipliers                        | –      | 8           |
| `qdiv_post_add`  | two butterfly layers, then upper minus lower lanes          | 12     | –           |
| `qdiv_norm`      | R: four squarers, a two-level adder tree                    | 3      | 4 squarers  |
| `qdiv_eta_scale` | four dividers z_i / R, sign change on the real lane         | –      | 4 dividers  |
| `qdiv_seq_div`   | one restoring divider (used four times)                     |        |             |
| `qdiv_top`       | operand registers, sequencer, handshakes                    |        |             |

The 31 additions match the source's count. Negations (the sign changes) and the factors
1/4 and 2 are not counted as adders. The coefficient generator depends only on `q`. If
the same dividend is divided by many divisors, its eight outputs could be computed once
and reused.

## Number format and word widths

The source treats the components as real numbers and gives no word width. Here each
component is a signed two's-complement number of `DATA_W` bits (default 16). `q` and `r`
must share the same binary point, which cancels in the quotient. Each quotient component
has `QUO_FRAC` fraction bits (default 16) and is truncated toward zero. Its width is
`2*DATA_W + 2 + QUO_FRAC` bits (50 at the defaults). That is wide enough for the largest
quotient, which occurs when |r| is one unit in the last place, so no result saturates.

Widths inside the datapath (functions in `qdiv_pkg`):

- **Coefficients.** Every `s_i` is held multiplied by 4, so it has two extra fraction
  bits. The 1/4 of lanes 0..3 then costs nothing and rounds nothing. The factor 2 of
  lanes 4..7 becomes a left shift by 3. The width is `DATA_W + 3` bits.
- **Divisor-side values.** `DATA_W + 3` bits. This covers the negation of the most
  negative value and the growth through two butterfly layers.
- **Products.** `2*DATA_W + 6` bits. The output butterflies widen them further.
  `qdiv_post_add` then removes the factor 4: the two low bits are always zero. It keeps
  `2*DATA_W + 2` bits, which is enough because quaternion norms multiply, so
  `|z_i| <= |q| |r| <= 2^(2*DATA_W)`.
- **Norm R.** Unsigned, `2*DATA_W + 1` bits.

Every result is exact up to the final division. The only rounding is the truncation of
the quotient.

## Division and the zero divisor

The source counts four real divisions. `qdiv_eta_scale` therefore has four dividers
(`qdiv_seq_div`), one per component, all dividing by `R`. Forming `1/R` once and
multiplying would add multipliers that the algorithm does not count. Each divider:

- is a radix-2 restoring divider on magnitudes, producing one quotient bit per clock;
- takes `2*DATA_W + 2 + QUO_FRAC` steps (50 at the defaults);
- gives the quotient the sign of the numerator.

The real lane divides `-z0` (the "-eta" of the algorithm). A divisor of zero gives an
all-zero quotient and sets `out_dbz`.

The divider circuit, the truncation and the zero-divisor behaviour are choices of this
design. The source does not specify them.

## Interface and timing of `qdiv_top`

| port        | dir | width                         | meaning                                        |
|-------------|-----|-------------------------------|------------------------------------------------|
| `clk`       | in  | 1                             | clock, rising edge                             |
| `rst_n`     | in  | 1                             | asynchronous reset, active low                 |
| `in_valid`  | in  | 1                             | an operand pair is offered                     |
| `in_ready`  | out | 1                             | the divider is idle and takes it               |
| `q[4]`      | in  | `DATA_W` each                 | dividend q0..q3                                |
| `r[4]`      | in  | `DATA_W` each                 | divisor r0..r3                                 |
| `out_valid` | out | 1                             | the quotient is offered                        |
| `out_ready` | in  | 1                             | the consumer takes it                          |
| `y[4]`      | out | `2*DATA_W+2+QUO_FRAC` each    | quotient y0..y3, `QUO_FRAC` fraction bits      |
| `out_dbz`   | out | 1                             | the divisor was zero                           |

Both sides use a valid/ready handshake, and a transfer happens on a clock edge where both
are high. The divider handles one operation at a time, using a four-state sequencer:

1. **IDLE.** `in_ready` is high and the operands are registered on acceptance.
2. **MUL.** One cycle: the combinational adders and the eight multipliers settle, and the
   four dividers load numerators and norm.
3. **DIV.** The dividers run.
4. **OUT.** The quotient is offered and held unchanged until `out_ready`.

`out_valid` rises `2*DATA_W + 2 + QUO_FRAC + 2` clock edges after the accepting edge: 52
at the defaults. A new pair can be offered in the cycle after the result is taken.
Assertions check two rules: a result held under back-pressure does not change, and the
four divider lanes stay in lock step.

The source describes the arithmetic data flow only. The handshakes, the register
placement, the latency and the sequential dividers are this design's own. A
higher-throughput variant would pipeline the multiplier stage and use pipelined
dividers. The eight-lane datapath would stay the same.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. The reference
values are computed independently of the factorisation:

- **`tb_hadamard2`, `tb_qdiv_mult_bank`, `tb_qdiv_norm`.** Checked against plain 64-bit
  arithmetic, with corner values (-2^15, 2^15-1, 0) and random operands.
- **`tb_qdiv_coef_gen`, `tb_qdiv_pre_add`.** Checked against the closed forms in the
  table above.
- **`tb_qdiv_post_add`.** Fed with products the testbench computes itself, and checked
  against the direct numerators. This confirms that the factorisation closes.
- **`tb_qdiv_eta_scale`.** Checks the quotients, the zero divisor, the hold after `done`,
  and the latency.
- **`tb_qdiv_top`.** Runs the whole divider at its default parameters. It makes 20,006
  divisions: identities (q/q = 1, q/1 = q), extreme operands, zero divisors and random
  operands, under random input gaps and random output back-pressure. It compares every
  quotient with the direct formulas and checks the 52-cycle latency. It counts how often
  back-pressure, refused offers and zero divisors occurred, and fails if any of them
  never did.

Each testbench ends by printing `TB_RESULT checks=<n> failures=<n>`. To run one with
Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl +libext+.sv \
        rtl/qdiv_pkg.sv tb/tb_qdiv_top.sv --top-module tb_qdiv_top
    ./obj_dir/Vtb_qdiv_top

The full end-to-end test runs in about a second.

## Changing it

- **`DATA_W`** (on `qdiv_top`) sets the component width. All internal widths follow from
  it. The testbench reference uses 64-bit integers, so widths above about 22 bits need a
  wider reference model.
- **`QUO_FRAC`** sets the quotient's fraction bits. The latency grows by one cycle per
  bit.
- The block modules are combinational, and their widths are parameters. Registers can be
  added between `qdiv_coef_gen`/`qdiv_pre_add`, `qdiv_mult_bank` and `qdiv_post_add` to
  pipeline the datapath. The sequencer in `qdiv_top` would then wait correspondingly
  longer in its MUL state.

## What is and is not from the source

From the source: the decomposition into eight lanes, the coefficient formulas, the
butterfly structure on both sides of the multipliers, the sign changes, the use of the
norm `R` with the real lane negated, and the operation counts (8 multiplications, 31
additions, 4 squarings, 4 divisions). Where its prose and its printed matrices disagree
(lanes 5..7), the matrices are followed, as explained above.

Chosen here: the number format and all word widths, the exact scaling by 4, the
sequential restoring dividers, the truncation and zero-divisor rule, the handshakes, the
register placement and the latency. The direct (schoolbook) method is not built. It
serves only as the reference model in the testbenches.
