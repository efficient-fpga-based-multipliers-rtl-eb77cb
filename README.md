# Multipliers for F(3^97) and F(3^(6·97))

Pairing-based cryptography in characteristic three, for example the Tate
pairing by the Duursma–Lee method, needs fast multiplication in two fields.
One is the prime-degree extension F(3^97). The other is its degree-6
extension F(3^(6·97)). This RTL provides both:

* `gf397_lfsr_mult` is a digit-serial LFSR multiplier for F(3^97). It handles
  D coefficients of one operand per clock and reduces modulo the field
  polynomial as it goes. Its D×D digit multipliers use Karatsuba steps on top
  of small schoolbook multipliers, so they take less area than plain
  schoolbook multipliers of the same size.
* `gf3_6m_mult` multiplies in F(3^(6·97)). It does this with 15
  multiplications in F(3^97) instead of the 18 that the usual nested
  Karatsuba construction needs. All 15 run in turn on one `gf397_lfsr_mult`,
  in a three-stage pipeline. While one product is being computed, an input
  stage forms the operands of the next product, and an output stage adds the
  previous product into the result.

The architecture follows a published design of FPGA-based multipliers for
these two fields: the LFSR structure, the
Karatsuba digit multipliers, the 5-point formula and the three-stage
structure. The schedule, the control and the interfaces are this
implementation's own choices, and so is the exact way the 15 products are
formed (see "Where this departs from the paper"). This RTL is an
independent implementation, not the original authors' code.

## Arithmetic and encoding

**F3.** Each coefficient is two bits `(a1,a0)`: 0 = `00`, 1 = `01`,
2 = `10`. The code `11` is never produced. With `t = (a0|b1) ^ (a1|b0)`:

    a + b = ((a0|b0) ^ t, (a1|b1) ^ t)
    a * b = ((a1&b0) | (a0&b1), (a0&b0) | (a1&b1))
    -a    = (a0, a1)            (a bit swap, no logic)

Each of the first two is one 4-input LUT per output bit. These functions are
in `gf3_pkg` (`f3_add`, `f3_mul`, `f3_neg`), and every datapath uses them.
`gf3_cell` wraps them as a module. The schoolbook multipliers build their
coefficient products from arrays of these cells.

**F(3^97)** is F3[x]/(x^97 + x^16 + 2), in polynomial basis. An element is
`f397_t`, a packed array of 97 two-bit coefficients; index i holds the
coefficient of x^i. Reduction uses x^97 = 2x^16 + 1.

**F(3^(2·97))** is F(3^97)[s]/(s^2 + 1). An element is the struct
`f3_2m_t {im, re}`, meaning re + im·s. Multiplying by s maps (re, im) to
(−im, re), which is only a permutation of bits.

**F(3^(6·97))** is F(3^(2·97))[r]/(r^3 − r − 1). At the ports an element is
given as six F(3^97) coefficients in this order:

    alpha = a0 + a1·s + a2·r + a3·r·s + a4·r^2 + a5·r^2·s

Inside the design, word w of the memories is a(2w) + a(2w+1)·s, the
coefficient of r^w.

## The F(3^97) LFSR multiplier

    b(x) ──► register B (NW digits) ── top digit ──┐
    a(x) ──► register A (words A_0 .. A_NW-1)      │
                │  each word                       │
                ▼                                  ▼
          NW digit multipliers  A_i · digit   (gf3_poly_mult)
                │  NW products of 2D-1 coefficients
                ▼
          overlap circuit: Σ product_i · x^(iD)   (gf3_overlap)
                │
                ▼
          feedback circuit: c ← (c·x^D + Σ) mod f  (gf3_lfsr_feedback)
                │
                └──► register C (97 coefficients) ─┘ (back into the feedback)

Operand a is cut into NW = ceil(97/D) words of D coefficients. The top word
is padded with zeros. Operand b is padded with leading zeros to NW·D
coefficients and is read one digit per clock, most significant digit first.
So after step j, C holds a · (top j digits of b) mod f, which is Horner's
rule in x^D. One step has four parts:

1. Every word A_i is multiplied by the current digit. This gives NW partial
   products of 2D−1 coefficients each.
2. The overlap circuit adds each product's powers x^D … x^(2D−2) to the next
   product's powers x^0 … x^(D−2). The result is the whole polynomial
   a(x)·digit(x).
3. The feedback circuit shifts C up by D, which is multiplication by x^D,
   and adds the overlap sum. This gives powers up to x^(96+D).
4. Each power x^(97+k) is folded back as x^k − x^(16+k). Since 16 + D − 1 < 97,
   one fold always suffices. This holds for every D up to 81.

The result is fully reduced after the last step. No separate reduction
stage follows, and this is one reason the design is small at small D.

**Digit multiplier.** `gf3_poly_mult` picks a method with `LEVELS`:

| D  | method (paper's name) | `LEVELS` | structure                               | multiply cycles |
|----|-----------------------|----------|-----------------------------------------|-----------------|
| 1  | single F3 product     | 0        | one `f3_mul`                            | 97              |
| 2  | C2                    | 0        | 2×2 schoolbook                          | 49              |
| 4  | C4                    | 0        | 4×4 schoolbook                          | 25              |
| 7  | K C4                  | 1        | one Karatsuba step, three 4×4 schoolbook | 14              |
| 14 | K K C4                | 2        | 14 → 7 → 4, nine 4×4 schoolbook          | 7               |

A Karatsuba step computes a·b = a1b1·X^2 + ((a0+a1)(b0+b1) − a0b0 − a1b1)·X + a0b0
with X = x^H and H = ceil(N/2). If N is odd, the high half is padded with
one zero. Logic fed by a padded zero is removed by synthesis constant
propagation, so no hand pruning is needed. Each level is its own module
(`gf3_pm_classic`, `gf3_pm_kara1`, `gf3_pm_kara2`, built from
`gf3_kara_split` and `gf3_kara_join`). Verilator does not elaborate a
module that instantiates itself, so recursion was not used.

For reference, the paper reports these results on a Virtex-II Pro XC2VP20-6
(they were not reproduced here): 327, 800, 1716, 2954 and 4006 slices, and
300, 174, 125, 111 and 72 MHz, for D = 1, 2, 4, 7 and 14.

**Interface and timing.** Pulse `start` while `busy` is low. On that edge,
`a` and `b` are loaded and C is cleared. Then exactly NW multiply cycles
follow. `done` pulses in the cycle after the last one, and `c` holds the
product until the next `start`. The default is D = 14 with `LEVELS` = 2,
which takes 7 multiply cycles. An assertion flags a `start` while `busy` is
high.

## The F(3^(6·97)) multiplier

### The 15 products

Write alpha = A0 + A1·r + A2·r^2 with each A_w in F(3^(2·97)), and likewise
beta. Their product over r has degree 4, so it is determined by its values
at five points. F3 offers only 0, 1 and −1, so the points used are 1, s, −1,
−s and infinity:

    E_p   = alpha(p) · beta(p),   alpha(p) = A0 + p·A1 + p^2·A2   (p = 1, s, -1, -s)
    E_inf = A2 · B2

Interpolation, followed by reduction with r^3 = r + 1 and r^4 = r^2 + r,
gives the three result words directly:

    C0 = -E_1 + (1+s)·E_s          + (1-s)·E_-s - E_inf
    C1 = -E_1            + E_-1                 + E_inf
    C2 =  E_1 -      E_s + E_-1 -      E_-s     + E_inf

Each E_p is a product in F(3^(2·97)) of x = x0 + x1·s and y = y0 + y1·s.
Karatsuba computes it from three products in F(3^97):

    L = x0·y0,   S = (x0+x1)·(y0+y1),   H = x1·y1
    E_p = (L - H) + (S - L - H)·s  =  (1-s)·L + s·S + (-1-s)·H

That makes 5 × 3 = 15 products in F(3^97). Product k = 3p + t, where p is
the point in the order 1, s, −1, −s, infinity, and t is L, S or H. Product k
enters word w with the scalar (weight of E_p in C_w) × (weight of part t in
E_p). Every such scalar is one of ±1, ±s, ±1±s or 0. The tables live in
`gf3_pkg`: `in_coef`, `prod_opsel` and `out_coef`. They are computed by
constant functions from the formulas above, not typed in by hand.

### Pipeline

    operand memory A ─► scaler ─► accumulator ─┐
                                               ├─► part select (re / re+im / im) ─► gf397_lfsr_mult
    operand memory B ─► scaler ─► accumulator ─┘                                        │
                                                                                        ▼
                   result memory ◄── accumulator ◄── scaler ◄──────────────── product register

* **Scaler** (`gf3_2m_scaler`). This is a left mux choosing s·x or −s·x, a
  right mux choosing x or −x, and a final mux that passes the left output,
  the right output, or their sum. The paper's figure has the same three
  scalar boxes, two muxes and a "hatched" mux. A zero selection is added
  here, and it means no term. All three scalers in the design are this one
  module.
* **Input stage** (`gf3_6m_input_stage`). Over three cycles it reads A0, A1
  and A2 (and B0, B1, B2 in parallel) and accumulates alpha(p) and beta(p).
  The F(3^97) multiplier then takes the real part, the sum of the parts, or
  the imaginary part, for the three products L, S and H of that point.
* **Output stage** (`gf3_6m_output_stage`). It latches each finished product
  and runs three read-modify-write steps, word_w ← word_w + scalar·P, one
  per result word. Each step takes two cycles (read and add, then write),
  and the steps are pipelined.
* **Memories** (`gf3_2m_regfile`). These are three 3-word register files:
  operand A, operand B and result. Each has one synchronous write port, one
  asynchronous read port and a clear.
* **Controller** (`gf3_6m_ctrl`). It divides the work into 17 slots. In slot
  j, the multiplier computes product j−1, the input stage prepares product j
  (only when j starts a new point), and the output stage adds product j−2.
  A slot lasts max(3, NW) + 2 cycles when it has a multiplication, and
  5 cycles otherwise.

**Interface and timing of `gf3_6m_mult`.** Pulse `start` while `busy` is
low. `alpha` and `beta` are copied into the operand memories over the next
three cycles, so hold them stable while `busy` is high. `done` is high for
one cycle once `gamma` is final, and `gamma` keeps its value until the next
start. A new `start` may come in the cycle right after `done`. The latency,
from the edge that samples `start` to the edge that samples `done`, is
9 + 15·(max(3,NW) + 2) + 5 clock edges. With the default D = 14 this is
149 edges. The F(3^97) multiplier is busy for 105 of them. The paper gives
no cycle count for this multiplier.

## Where this departs from the paper

* **The six products at s and −s.** The paper's appendix writes products
  such as P3 = (a0 + s·a2 − a4)(b0 + s·b2 − b4). That is a product of two
  F(3^(2·97)) values, not of two F(3^97) values, so as printed it does not
  give 15 multiplications in F(3^97). This design instead follows the
  statement that the paper derives from its 5-point formula combined with
  Karatsuba, which is the scheme above. For the points 1, −1 and infinity,
  the nine products are the same as the appendix's P0–P2, P6–P8 and
  P12–P14. Their output coefficients into c2 and c3 also match the appendix,
  and the controller testbench checks this. For s and −s, the products are
  the Karatsuba parts of alpha(s)·beta(s) and alpha(−s)·beta(−s).
* **Sign of P0 in c5.** The appendix writes c5 = P0 + P1 − P2 + …. Working
  the algebra through gives −P0 instead, because the imaginary part of E_1
  is P1 − P0 − P2. The design follows the algebra, and the end-to-end test
  checks the whole product against a schoolbook reference.
* **Part select.** The input accumulators hold F(3^(2·97)) values. This is
  what makes the ±s boxes of the paper's input stage meaningful, since
  multiplying by s is then a permutation. The multiplier, however, takes
  F(3^97) operands. A re / re+im / im select between the two is added, and
  it is not in the paper's figure.
* **Only r^3 = r + 1.** The paper notes that a tower built with z^3 − z + 1
  instead needs slightly different formulas. Only the z^3 − z − 1 tower is
  built.
* **One multiplier.** The paper notes that the 15 products are independent
  and could use several multipliers in parallel. Only the single-multiplier
  structure is built.
* **Choices the paper leaves open.** These include the handshakes, the load
  cycle of the LFSR multiplier, synchronous active-low reset (`rst_n`), the
  memory ports, the controller schedule and the host interface.
* **Digit size for D = 7.** The paper's text calls the D = 7 method "K C2",
  but its table says K C4. Only K C4 fits seven coefficients (4 + 3, padded
  to 8), so K C4 is what is built.

## Files

| file | contents |
|------|----------|
| `rtl/gf3_pkg.sv` | types, F3/F(3^97)/F(3^(2·97)) functions, schedule tables |
| `rtl/gf3_cell.sv` | one F3 add/multiply/negate cell |
| `rtl/gf3_pm_classic.sv`, `gf3_kara_split.sv`, `gf3_kara_join.sv`, `gf3_pm_kara1.sv`, `gf3_pm_kara2.sv`, `gf3_poly_mult.sv` | digit multipliers |
| `rtl/gf3_overlap.sv`, `rtl/gf3_lfsr_feedback.sv`, `rtl/gf397_lfsr_mult.sv` | F(3^97) LFSR multiplier |
| `rtl/gf3_2m_scaler.sv`, `gf3_6m_input_stage.sv`, `gf3_6m_output_stage.sv`, `gf3_2m_regfile.sv`, `gf3_6m_ctrl.sv`, `gf3_6m_mult.sv` | F(3^(6·97)) multiplier (top: `gf3_6m_mult`) |
| `tb/tb_gf3_ref_pkg.sv` | integer mod-3 reference model of all three fields |
| `tb/tb_*.sv` | one self-checking testbench per module |

## Verification

Every testbench checks its module against an independent integer model (plain
`% 3` arithmetic, schoolbook products, top-down reduction). Each ends by
printing `TB_RESULT checks=N failures=M`, and each has a watchdog.

* `tb_gf3_cell`: all nine input pairs.
* `tb_gf3_poly_mult`: 300 random vectors, plus all-twos, for K K C4 (N = 14),
  K C4 (N = 7) and C4.
* `tb_gf397_lfsr_mult`: all five digit sizes of the table. It runs corner
  operands (0, 1, x^96·x^96, all twos) and 40 random products for each size,
  and checks the cycle count ceil(97/D) every time.
* `tb_gf3_6m_ctrl`: runs the controller against a multiplier model. It
  checks the slot schedule, the operand-part order, the step counts, the
  nine appendix coefficients and the latency.
* `tb_gf3_6m_mult`: runs the whole design at its default parameters. It
  covers zero, one, (r^2·s)^2, all twos and 12 random products started back
  to back, and checks every result and the 149-edge latency. It also fails
  if any pipeline mechanism never occurs: input steps during a
  multiplication, output steps during a multiplication, back-to-back starts,
  each input scalar, and each of the eight output scalars.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
        rtl/gf3_pkg.sv tb/tb_gf3_ref_pkg.sv tb/tb_gf3_6m_mult.sv \
        --top-module tb_gf3_6m_mult -o sim && obj_dir/sim

The F(3^(6·97)) model is large, since it contains 63 4×4 schoolbook
multipliers with their adders. Building it takes about six minutes of C++
compilation, and simulating it takes well under a second.

Not verified: timing closure and area on an FPGA. The slice counts and clock
rates quoted above are the paper's figures, not results from this RTL.
