# KyberMat: a streaming matrix-vector polynomial multiplier for Kyber

Kyber's encryption spends most of its arithmetic on one operation:
multiplying a k x k matrix of polynomials by a k-vector of polynomials,
`p = A^T r`. Every polynomial has 256 coefficients mod q = 3329. The ring is
Z_q[x]/(x^256 + 1). k is 2, 3 or 4 for Kyber-512, -768 and -1024.

This RTL implements the two-parallel, low-latency KyberMat architecture of
Tan, Lao and Parhi ("KyberMat: Efficient Accelerator for Matrix-Vector
Polynomial Multiplication in CRYSTALS-Kyber Scheme via NTT and Polyphase
Decomposition"). It has three ideas:

* **Polyphase split plus NTT.** q = 3329 has no 512-th root of unity, so a
  256-point negacyclic NTT does not exist. Each polynomial is split into its
  even and odd coefficients, `r(x) = r_e(x^2) + x*r_o(x^2)`. Each half is a
  128-coefficient polynomial in `y = x^2` modulo `y^128 + 1`, and that ring
  does have a full NTT (root 17).
* **A fast two-parallel filter in the NTT domain.** The product of two split
  polynomials has the same form as a two-parallel FIR filter:
  `p_e = r_e a_e + y r_o a_o` and `p_o = r_e a_o + r_o a_e`. In the NTT domain
  the delay `y` becomes a point-wise product with the constant vector
  `gamma = NTT(y)`. The transposed fast filter does this with three
  point-wise products per matrix entry instead of four.
* **Sub-structure sharing across the matrix.** The expensive `gamma * r_o`
  product depends only on the vector entry, not on the matrix row. It is
  computed once per vector entry (k products instead of k^2), and all k rows
  reuse it. The row sums are also taken before the even/odd halves are
  recombined, which saves additions.

The hardware is a pure feed-forward pipeline. It takes one new
matrix-vector product every 64 clock cycles and delivers the first result
coefficients 222 cycles after the first input (k = 2).

## What is computed

Notation: `r_j` is vector entry j. `A(i,j)` is a matrix entry, given in NTT
domain. `X-hat[m]` is NTT-domain position m of a 128-point half.

The 128-point transform of a half `x` is

    X-hat[m] = sum_{t=0}^{127} x[t] * g_m^t  (mod 3329),   g_m = 17^(2*brv7(m) + 1)

where `brv7` reverses 7 bits. This is exactly Kyber's NTT order: in Kyber's
256-entry NTT-domain array, entry `2m` is `A_e-hat[m]` and entry `2m+1` is
`A_o-hat[m]`. `g_m` is also the value of `NTT(y)` at position m. It is the
"pre-computed NTT(0,1,0,...,0)" constant.

For every NTT-domain position, the matrix stage computes this for each
vector entry j and each output row i:

    f_j  = { r_o - r_e,   r_e,        g*r_o - r_e }     (one product by g per j)
    g_ji = { a_e,         a_e + a_o,  a_o }             from A(j,i)
    s_i  = sum_j  g_ji o f_j                            (three products per (i,j))
    p_e,i = s_i[1] + s_i[2]        p_o,i = s_i[1] + s_i[0]

Expanding gives `p_e,i = sum_j (a_e r_e + g a_o r_o)` and
`p_o,i = sum_j (a_e r_o + a_o r_e)` with `a = A(j,i)`. These are the two
halves of `sum_j A(j,i) * r_j`, so `p = A^T r`.

## Block structure

    r_in --split--> 2k x ntt_r2mdc --> matvec_ntt --> 2k x intt_r2mdc --merge--> p_out
                                          ^
                                       ahat_in  (A already in NTT domain)

| Module | Role |
|---|---|
| `kybermat_top` | Wires the three stages together. The polyphase split and merge are only wiring. |
| `ntt_r2mdc` | 128-point forward NTT. R2MDC pipeline: 7 butterfly stages and 6 delay-commutators. |
| `intt_r2mdc` | 128-point inverse NTT, including the 1/128 scaling. Same organisation, reversed order. |
| `ntt_bf_ct`, `intt_bf_gs` | One pipelined butterfly stage (Cooley-Tukey / Gentleman-Sande) with its twiddle selection. |
| `r2mdc_commutator` | Two delay lines and a 2x2 switch between butterfly stages. |
| `matvec_ntt` | The matrix stage: an upper and a lower data-path (`matvec_lane`), plus the NTT(y) constant ROM. |
| `matvec_lane` | One data-path of the equations above for one NTT-domain position per cycle. |
| `ntt_x2_rom` | `g_m` for positions 2j and 2j+1. |
| `mod_mult` | Five-stage pipelined modular multiplier. |
| `mod_addsub` | Modular adder or subtractor. |
| `kyber_pkg` | q, the 12-bit `coeff_t` type, modular helper functions, and the constant functions that compute the twiddle and `g_m` tables. |

No table is stored in a file. `zeta_k = 17^brv7(k)` and
`g_m = 17^(2*brv7(m)+1)` are computed by constant functions at elaboration
time.

## Interface and stream format

Everything moves in **frames** of 64 cycles. One frame carries one complete
vector `r` (k polynomials) at 4 coefficients per polynomial per cycle.

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | Clock; synchronous active-low reset. |
| `in_valid` | in | 1 | Marks the 64 cycles of an input frame. |
| `r_in[i][0..3]` | in | K x 4 x 12 | In frame cycle l: `r_i[2l]`, `r_i[2l+1]`, `r_i[2l+128]`, `r_i[2l+129]`. |
| `ahat_req` | out | 1 | High while NTT results reach the matrix stage (64 cycles per frame). |
| `ahat_in[i][j][0..3]` | in | K x K x 4 x 12 | In the j-th `ahat_req` cycle of a frame: Kyber NTT-domain coefficients `4j..4j+3` of `A(i,j)`. |
| `out_valid` | out | 1 | Marks the 64 cycles of an output frame. |
| `p_out[i][0..3]` | out | K x 4 x 12 | In output cycle l: `p_i[2l]`, `p_i[2l+1]`, `p_i[2l+128]`, `p_i[2l+129]`. |

Rules:

* There is no back-pressure. The design is a real-time pipeline.
* Frames may follow each other directly. The gap between frames must be a
  whole multiple of 64 cycles. Each stage starts a free-running phase
  counter at the first valid sample it sees. A gap that is not a multiple
  of 64 would put the following frames out of phase with the commutators.
* `A` is not delayed inside the design. The source of `A` must present each
  frame's matrix in the cycles `ahat_req` marks. `ahat_req` follows
  `in_valid` by exactly 105 cycles, so the source can also schedule it
  ahead of time.
* All values must be reduced (< 3329).

Timing with the default parameters (K = 2, five-stage multipliers):

| Path | Cycles |
|---|---|
| `in_valid` to `ahat_req` (NTT latency) | 105 = 7 x (5+1) + 63 |
| matrix stage | 12 = 2 x 5 + K |
| `ahat_req` to `out_valid` | 12 + 105 |
| first input to first output | 222 (223 for K=3, 224 for K=4) |
| first input to last output of a frame | 285 |
| block processing time (new product every) | 64 |

The steady-state rate is `4k` input coefficients per cycle.

## The R2MDC NTT processors

This is the least obvious part of the design.

A 128-point NTT has 7 butterfly layers. Layer s pairs elements
`64 >> s` positions apart. The processor streams two elements per cycle, so
a 128-point transform takes 64 cycles. It has one butterfly per layer,
which makes 7 multipliers per processor. Between layers, a delay-commutator
regroups the two streams so the next butterfly receives partners that are
half as far apart.

**Input.** The input pairs are `(x[l], x[l+64])`. These are already partners
for layer 0, so there is no commutator in front of the first butterfly.

**The commutator (`r2mdc_commutator`, parameter S).** It works over a
period of 2S cycles. In that period the upper input carries a block `y[0..2S-1]`
and the lower input carries a block `z[0..2S-1]`. The lower input goes
through an S-word delay line into a 2x2 switch. The switch is straight for
the first S cycles of the period and crossed for the last S. The switch's
upper output goes through another S-word delay. The result is:

* period cycles S..2S-1: pairs `(y[a], y[a+S])`;
* cycles 0..S-1 of the next period: pairs `(z[a], z[a+S])`.

That is exactly the next layer's butterfly pairs, emitted in natural order.
The forward processor uses S = 32, 16, 8, 4, 2, 1. That is 63 cycles of
delay in total.

**Forward butterflies (`ntt_bf_ct`).** These follow Kyber's reference
Cooley-Tukey form: `t = zeta*v`, `u' = u+t`, `v' = u-t`. Each stage counts
its input pairs from the first valid one. Pair c of layer s belongs to
block `c >> (6-s)` and uses `zeta_k` with `k = 2^s + block`. The output is
positions `(2j, 2j+1)` in cycle j, in Kyber's NTT-domain order.

**Inverse processor.** It runs the mirror image:

* Gentleman-Sande butterflies `u' = (u+v)/2`, `v' = zeta*(v-u)/2`.
* Twiddle index `k = (128 >> s) - 1 - block`, Kyber's descending order.
* Commutators with S = 1, 2, 4, ..., 32.

It takes the `(2j, 2j+1)` pairs in the order the forward processor makes
them. It returns `(x[l], x[l+64])`, the same layout the forward processor
accepts.

**Scaling.** The 1/128 of the inverse transform comes from halving inside
each butterfly. Halving mod q is `x>>1` for even x and `(x+q)>>1` for odd x.
No multiplier is needed.

**Valid flag.** A valid bit travels through the same delay lines as the
data, so `out_valid` is exact. Each butterfly costs 6 cycles: the
multiplier's 5 and one add/subtract register.

## The matrix stage

`matvec_ntt` processes positions 2j (upper lane) and 2j+1 (lower lane) of
every polynomial in each cycle. It takes the 6-bit pair index from a
counter in the top. The two lanes are identical. They differ only in the
`g` constant, and the lower one is `q - upper`.

Schedule of one lane, in cycles after its inputs:

| Cycle | Work |
|---|---|
| 0..5 | `g*r_o,j` for every j (K multipliers). Meanwhile `f_0 = r_o - r_e` and `a_e + a_o` are formed and delayed. |
| 5 | `f_2 = g*r_o - r_e` (not registered) feeds the product multipliers. |
| 5..10 | `3K^2` point-wise products `beta = g_ji o f_j`. |
| 10..9+K | Row sums over j, as a chain of K-1 registered modular additions. |
| 10+K | `p_e = s1 + s2` and `p_o = s1 + s0`, registered. |

The latency is therefore 10 + K: 12, 13 and 14 for Kyber-512/768/1024. These
equal the per-level pipeline depths quoted in the source publication. The
adder chain, rather than a tree, is what makes the depth grow by one per
level.

Operator count of the matrix stage, for both lanes together:

* 6K^2 + 2K modular multipliers (28 for K = 2);
* 8K^2 + 2K modular adders/subtractors (36 for K = 2).

Both match the source.

## Modular arithmetic

`mod_mult` uses Barrett reduction. For `z = a*b < q^2`, the quotient
estimate `(z * 20158) >> 26` is at most one below `floor(z/q)`, so one
conditional subtraction finishes the job. The five register stages are:

1. product
2. product times the Barrett constant
3. quotient times q
4. subtraction
5. correction

`mod_addsub` is one add or subtract followed by one conditional correction.

## Where this RTL departs from, or adds to, the source

* **Decided here, not taken from the source:**
  * butterfly type and twiddle order (taken from Kyber's reference NTT);
  * the reduction method;
  * where the 1/128 is applied;
  * register placement inside the stages;
  * the reset, valid and frame rules;
  * the port layout and the way `A` is supplied.
* **NTT-domain element pairing differs.** The source's top-level figure
  labels each NTT output pair like the time-domain pair (elements l and
  l+64). Here the forward processor emits positions 2j and 2j+1 in one
  cycle, which is the natural output of the Cooley-Tukey R2MDC. The matrix
  stage and the inverse processor use the same order, so the result is
  unaffected.
* **Matrix indexing.** The source's algorithm listing writes the products as
  `g_ji o f_i` summed over j, which would not compute `A^T r`. Its
  worked-example figure and its defining equation `u = A^T r + e` do. This
  RTL computes `p_i = sum_j A(j,i) r_j`.
* **Latency.** The source reports 222 cycles for this configuration and
  defines latency as first input to last output. This RTL has 222 cycles
  from first input to first output and 285 to last output. The source's own
  pipeline split is not known, so the first number agreeing is not evidence
  of an identical pipeline.
* **Not built:**
  * The four-parallel variant, which uses 64-point NTTs on four polyphase
    components and 16 data-paths.
  * The original-form (non-transposed) structure. It is an equivalent
    alternative with the same operator count.
* **Not modelled:** clock frequency, FPGA resource use, and the noise
  addition `+ e_1` of Kyber, which lies outside the multiplier.

## Verification

Every testbench is self-checking. Each ends with a
`TB_RESULT checks=N failures=M` line and has a watchdog. The reference
values are computed independently of the datapath structure, in
`tb/tb_ref_pkg.sv`:

* transforms are evaluated directly from their defining sums (O(n^2));
* polynomial products use schoolbook negacyclic multiplication.

| Testbench | What it checks |
|---|---|
| `tb_mod_mult` | 4000 products (corner values and random) against `(a*b) % q`, each exactly 5 cycles after its operands. |
| `tb_mod_addsub` | Adder and subtractor on corner and random residues. |
| `tb_ntt_x2_rom` | All 128 `g_m`: each equals its evaluation point and is a root of `y^128+1`; the lower equals q minus the upper. |
| `tb_r2mdc_commutator` | S = 1, 4, 32: the pair sequence, latency S, and the output count, across an idle period. |
| `tb_ntt_r2mdc`, `tb_intt_r2mdc` | Five random frames (back to back and after an idle frame) against the direct transform. Latency 105. |
| `tb_matvec_ntt` | K = 2 and 3, random data and random valid every cycle, against the unshared equations. Latency 10+K. |
| `tb_kybermat_top` | Default parameters: four complete products `A^T r` (random A and r), checked coefficient by coefficient against schoolbook. Also checks latency 222, `ahat_req` latency 105, 64-cycle frame spacing, and that both back-to-back streaming and an idle frame occurred. |
| `tb_kybermat_levels` | The same end-to-end check at K = 3 and K = 4. |

`tb/kyber_e2e_driver.sv` is the shared stimulus and checker for the two
end-to-end benches.

To simulate a testbench with Verilator (5.x), run from the directory that
holds `rtl/` and `tb/`:

    verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
      -Irtl -y rtl -y tb +libext+.sv \
      rtl/kyber_pkg.sv tb/tb_ref_pkg.sv tb/tb_kybermat_top.sv \
      --top-module tb_kybermat_top -o sim
    ./obj_dir/sim

Replace the last testbench file and the top-module name to run another
bench. The unit benches finish in well under a second once built. The
K = 4 build takes a couple of minutes.

## Changing the design

* `K` on `kybermat_top` selects the security level. It scales the number of
  NTT and iNTT processors (2K each) and the matrix stage.
* `MUL_LAT` (default 5, minimum 5) sets the multiplier depth everywhere. All
  latencies above move with it: NTT latency `7*(MUL_LAT+1)+63`, matrix stage
  `2*MUL_LAT+K`.
* The butterflies find their twiddles from a pair counter. A processor for
  another transform size would need new stage counts, commutator lengths
  and twiddle indexing in `ntt_r2mdc`, `intt_r2mdc` and the butterfly
  modules.
