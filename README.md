# X-Rel: an approximate TMR system whose voter ignores what the application cannot see

Triple modular redundancy (TMR) runs three copies of a module and lets a
majority voter pick the output. A word-wise voter is strict: the three words
must match exactly, so two copies that differ only in their least significant
bits count as a disagreement. That happens when the copies are diverse
implementations, when they are approximate, or when a soft error flips a low
bit. In error-tolerant applications such as image, signal and vision
processing, those low bits are below what the application can notice.

X-Rel starts from a quality bound. The user states how much the voted output
may deviate from the exact value, as a fraction `Q_DUBV` of full scale. From
this bound follows a number `k` of low bits that can be ignored. The voter then
votes only on the upper `N-k` bits and copies the `k` low bits from module 1.
The same `k` then sets how far the three modules may be approximated. Their
arithmetic drops input LSBs as long as the module's error stays within a
bound derived from `k`. The
result is a smaller, faster voter and cheaper modules. It also tolerates
low-bit disagreements that a strict voter would reject.

This repository holds SystemVerilog for:

* the X-Rel voter;
* the truncated arithmetic used in the approximate modules;
* the four benchmark datapaths the method was evaluated on: an 8-tap FIR, a
  64-tap FIR, an 8 x 8 matrix multiply and a 3 x 3 smoothing filter;
* a top level that triplicates each benchmark behind X-Rel voters.

## 1. From a quality bound to the number of relaxed bits

For an `N`-bit voter output and a bound `Q_DUBV` (in percent):

```
MTED = (2^N - 1) * Q_DUBV / 100        maximum tolerable error distance
k    = floor(log2(MTED))               relaxed low bits
```

Rounding `MTED` down to a power of two guarantees that any value in the `k`
low bits stays within the bound. `xrel_pkg::k_from_qdubv()` computes this at
elaboration time. `Q_DUBV` is passed as an integer in units of 0.001 %
(`QDUBV_MPCT`; 12.5 % is `12500`), so that bounds as small as 0.006 % can be
written. Two corners are this design's own choice:

* a bound with `MTED < 1` gives `k = 0`, an ordinary exact voter;
* `k` is capped at `N-1`, so at least one bit is always voted.

For `N = 16` the bound maps to `k` as follows. The testbench checks every row.

| Q_DUBV below (%) | 0.006 | 0.012 | 0.024 | 0.048 | 0.097 | 0.195 | 0.390 | 0.781 | 1.562 | 3.125 | 6.25 | 12.5 |
|---|---|---|---|---|---|---|---|---|---|---|---|---|
| k | 1 | 2 | 3 | 4 | 5 | 6 | 7 | 8 | 9 | 10 | 11 | 12 |

A smaller example: `N = 8` and `Q_DUBV = 10 %` give `MTED = 25` and `k = 4`.

**Defaults.** The defaults are `N = 16` and `Q_DUBV = 12.5 %`, so `k = 12`.
That is the benchmark width and the loosest bound of the published sweep. With
these defaults only 4 bits are voted, which makes the relaxation easy to see in
simulation. For a tighter design, set `QDUBV_MPCT` lower, e.g. 1000 (1 %) for
`k = 9`.

## 2. The voter (`xrel_voter`, `tmr_word_voter`)

```
 OM1[N-1:0] --+-- OM1[N-1:k] --+
 OM2[N-1:0] ----- OM2[N-1:k] --+--> tmr_word_voter (N-k bits) --> out[N-1:k], error, status
 OM3[N-1:0] ----- OM3[N-1:k] --+
              +-- OM1[k-1:0] ------------------------------------> out[k-1:0]
```

`tmr_word_voter` compares whole words and checks the cases in this order:

| condition on the upper bits | out | status | error |
|---|---|---|---|
| OM1 = OM2 = OM3 | OM1 | `VOTE_AGREE` | 0 |
| OM1 = OM2 != OM3 | OM1 | `VOTE_M3_FAULT` | 0 |
| OM2 = OM3 != OM1 | OM2 | `VOTE_M1_FAULT` | 0 |
| OM1 = OM3 != OM2 | OM3 | `VOTE_M2_FAULT` | 0 |
| all different | OM1, or 0 with `ZERO_ON_ERROR=1` | `VOTE_NO_MAJORITY` | 1 |

Both voters are purely combinational. The status enum (`xrel_pkg::vote_status_e`)
reports which module was out-voted; its encoding is this design's own. An
assertion checks that whenever `error` is low, the output equals at least two
inputs.

**Output on "no majority".** The source describes this case in two ways. Its
voter pseudo-code keeps OM1 and raises `error`. Its error-injection evaluation
says the output is set to zero. `ZERO_ON_ERROR` selects between the two:

* `0` (the default) keeps OM1;
* `1` clears the whole word, including the forwarded low bits.

**What the voter does and does not tolerate.**

* Any disagreement confined to the `k` low bits is accepted.
* One module with corrupted upper bits is out-voted. The output is then within
  `2^k` of the correct value, because its low bits are OM1's.
* If two modules carry the same corruption in their upper bits, that corruption
  wins, silently. Every majority voter has this false-positive case.
* Noise in OM1's low bits reaches the output unfiltered, within the bound.

Which module supplies the low bits is arbitrary. Module 1 is used, as in the
source.

Lint reports `om2[k-1:0]` and `om3[k-1:0]` as unused. That is intended: it is
the whole point of the voter.

## 3. Approximate modules: truncated arithmetic

The modules are approximated by truncation. A node that drops `j` input LSBs
is built as a narrower operator, and its result is shifted back:

* `trunc_adder #(W, J)`: a `(W-J)`-bit adder on `a[W-1:J]` and `b[W-1:J]`. The
  sum has `J` zero LSBs.
* `trunc_multiplier #(AW, BW, J)`: an `(AW-J) x (BW-J)` multiplier. The product
  has `2J` zero LSBs.

Both are exact when `J = 0`. Operands are unsigned.

`dot_product` is the data-flow graph shared by all four benchmarks:

* `TERMS` multipliers feed a linear chain of `TERMS-1` adders;
* each node has its own truncation, given as a packed parameter array of
  `xrel_pkg::trunc_t` (`MUL_J[i]`, `ADD_J[i]`);
* the full sum is `ACC_W = DW + CW + clog2(TERMS)` bits wide, and the module
  output is its `N` most significant bits (zero-extended if `ACC_W <= N`).

**How much to truncate.** The method's own answer is an integer linear
program, solved offline. It minimises the energy summed over the graph's nodes.
Its constraint keeps the output error variance, `sum(ES_i^2 * v_i)`, below
`N/(N-1) * (2^k - 1)^2`. Here `ES_i` is node `i`'s error sensitivity and `v_i`
its error variance. The solver and its per-node solutions are not part of this
RTL, and no solutions are published.

The defaults keep that constraint but simplify the choice: every multiplier
of a module drops the same number of input LSBs `j`, and no adder is truncated.
`xrel_pkg::mul_trunc_var()` picks the largest `j` for which the module's mean
squared output error, computed in closed form for uniformly distributed
operands, stays within the bound:

```
(TERMS * v_mul(j) + TERMS*(TERMS-1) * mu_mul(j)^2) / 4^SHIFT  <=  N/(N-1) * (2^k - 1)^2
                                                     (SHIFT = ACC_W - N)
```

Here `v_mul(j)` is one truncated multiplier's mean squared error and
`mu_mul(j)` its mean error. The second term is this design's addition.
Truncation always makes a product smaller, so the errors of all nodes have
the same sign and their means add up. Summing the per-node `v_i` alone, as the
plain propagation rule does, underestimates the module's mean squared error
at the defaults: about 6 times for the 8-tap FIR and about 45 times for the
64-tap FIR. Simulation matches the formula within a few per cent.

Resulting truncation per benchmark (8-bit operands, `N = 16`):

| k | 1-6 | 7 | 8 | 9 | 10 | 11 | 12 |
|---|---|---|---|---|---|---|---|
| 8-tap FIR and MM (8 terms) | 0 | 0 | 1 | 2 | 3 | 4 | 5 |
| 64-tap FIR | 0 | 1 | 1 | 2 | 3 | 4 | 5 |
| smoothing filter (9 terms) | 0 | 1 | 2 | 3 | 3 | 4 | 6 |

At the default `k = 12` the modules' measured mean squared error is
1.4-1.7e7 against a bound of 1.79e7, so most of the error budget is used. The
authors' per-node solutions use it at every `k`: their module errors sit just
under the bound from `k = 1` up. With one `j` for all multipliers, the modules
here stay exact up to `k = 6`, because a single dropped multiplier bit
already costs more than the bound allows there.

A bound on variance still lets single outputs exceed `2^k`. For designs that
must stay within `2^k` on every sample, `xrel_pkg::mul_trunc_worst()` gives
the largest uniform `j` with

```
TERMS * (2^j - 1) * (2^DW + 2^CW)  <=  (2^k - 1) * 2^SHIFT
```

That rule allows only `j = 3` at `k = 12`. To use real per-node solutions, pass
`MUL_J` and `ADD_J` arrays to the benchmark modules.

## 4. Benchmark modules

All benchmarks use 8-bit unsigned data and coefficients and produce an
`N = 16`-bit output. Those widths are this design's choice; the source gives
only `N`.

| module | computes | timing | sum width, bits dropped |
|---|---|---|---|
| `fir_filter #(TAPS)` | `y[n] = sum coef[t] * x[n-t]` | `x_in` shifts into the delay line on a clock edge with `in_valid`; `y` follows combinationally | 8 taps: 19, 3; 64 taps: 22, 6 |
| `matmul #(DIM=8)` | `C = A x B`, 64 dot products of length 8 | combinational | 19, 3 |
| `smooth3x3` | `sum w[i] * win[i]` over a 3 x 3 window | combinational | 20, 4 |

Notes on the benchmark modules:

* FIR coefficients and smoothing weights are inputs, not constants.
* With a binomial kernel whose weights sum to 16, dropping 4 bits divides by
  16, so `smooth3x3` returns the smoothed pixel.
* The FIR delay line is reset asynchronously by `rst_n`.
* Line buffers that would build the smoothing window from a pixel stream are
  not included.

## 5. The system top (`xrel_top`)

Each benchmark is instantiated three times with identical truncation. Each
output goes through an X-Rel voter, and the voted result is registered:

```
inputs -+-> module 1 -- OM1 ^ noise[0] --+
        +-> module 2 -- OM2 ^ noise[1] --+--> xrel_voter --> reg --> *_y, *_err, *_status, *_ovalid
        +-> module 3 -- OM3 ^ noise[2] --+
```

The matrix multiply has one voter per element, 64 in all.

**Noise masks.** The `*_noise` inputs are XORed onto the module outputs. They
sit where the method's evaluation puts its noise sources, and let a test
bench flip any bits it likes. In normal use, tie them to zero.

**Timing.** The clock edge is rising; `rst_n` is an asynchronous, active-low
reset.

* FIR (`fs_*` is 8 taps, `fl_*` is 64 taps): the sample and its noise masks are
  taken on an edge with `*_valid = 1`. The voted result appears with
  `*_ovalid` on the next edge.
* Matrix multiply (`mm_*`) and smoothing (`sm_*`): operands and masks must be
  stable while `*_valid = 1`. The result is registered on that same edge.

**Parameters.** `N`, `QDUBV_MPCT` (or `K` directly), `DW`, `CW`,
`FIR_S_TAPS`, `FIR_L_TAPS`, `MM_DIM` and `ZERO_ON_ERROR`. There is also one
truncation value per benchmark (`FIR_S_MJ`, `FIR_L_MJ`, `MM_MJ`, `SMT_MJ`);
each defaults to the variance rule above.

Placing all four benchmarks side by side in one top is an arrangement for
demonstration and test. The method treats each as a separate TMR design.

## 6. Verification

Each block has a self-checking testbench in `tb/`. Each checks its block
against reference models written independently in `tb/xrel_ref_pkg.sv`:

* the truncation model masks each operand's low bits;
* the voter model counts how many inputs share each input's upper bits.

| testbench | what it checks |
|---|---|
| `tb_trunc_adder`, `tb_trunc_multiplier` | the multiplier exhaustively for 8 x 8 bits, the adder randomly, at several `J` |
| `tb_tmr_word_voter` | the two 4-bit worked examples and all 512 input combinations of a 3-bit voter, both error behaviours |
| `tb_xrel_voter` | the `k` table above; all vote cases at N=8/k=4, N=16/k=12 and N=16/k=0; output within `2^k` whenever one module is corrupted |
| `tb_dot_product` | per-node truncation, and the worst-case rule (`j = 3` at `k = 12`) with its per-sample error bound |
| `tb_fir_filter` | 8-tap exact and 64-tap truncated filters against a model delay line, with gaps in `in_valid`, reset |
| `tb_matmul`, `tb_smooth3x3` | all outputs against the model; a flat window passes through a binomial kernel unchanged |
| `tb_xrel_top` | end to end at the default size (see below) |
| `tb_xrel_variance_study` | the default variance rule for `k = 1..12` on all three graph shapes (see below) |
| `tb_xrel_noise_study` | voter behaviour under random bit flips on a 196,608-value image (see below) |
| `tb_xrel_fir32_study` | an 8-tap FIR at 32-bit data, coefficients and output, voted under bit flips (see below) |

**End-to-end test.** `tb_xrel_top` runs all four benchmarks at the default
size for 400 cycles. Inputs are random, and so are the noise patterns:

* no noise;
* noise in the low bits only;
* one module corrupted;
* three different upper parts;
* independent bit flips at 5 %.

It checks every registered result, its status and error flag, and its latency.
It checks that each module's predicted mean squared error is within the bound,
and that the measured one matches the prediction. It also checks that a voted
output stays within `2^k` of the module value when at most one module's upper
bits are corrupted. It also checks
that every mechanism occurs: agreement, each module out-voted, no majority,
low-bit disagreement accepted, truncation changing a module output, idle
cycles. It runs in about 20 s.

**Variance study.** `tb_xrel_variance_study` builds, for every `k` from 1 to
12, an 8-term, a 64-term and a 9-term dot product truncated by the default
rule. It drives each with 6,000 random operand sets and compares it with an
exact instance. It checks four things for every case:

* the measured mean squared error is within `N/(N-1) * (2^k - 1)^2`;
* it is within 10 % of the closed-form prediction;
* one more dropped bit would break the bound;
* `j` never falls as `k` grows.

It prints the table of `j` and measured error against the bound. It also
compares the bound with the published values for `N = 16`. They agree to the
three printed digits except at `k = 10`, printed as 1.17E+06 where the
formula gives 1.12E+06; that row is reported, not failed.

**Noise study.** `tb_xrel_noise_study` generates a 256 x 256 x 3 image of
8-bit channels, flips each bit of the three voter inputs with probability
`P_f`, and compares X-Rel voters (N = 8, k = 1..7) with a strict voter (k = 0).
Both output zero on an error. The results, with the seed used here:

| P_f | strict TMR MSE | X-Rel k=4: MSE, errors | MSE ratio, k = 1 .. 7 |
|---|---|---|---|
| 1 % | 319 | 80, 657 (strict: 2,868) | 0.75 0.55 0.38 0.25 0.14 0.10 0.19 |
| 5 % | 5,132 | 1,634, 13,731 (strict: 46,188) | 0.82 0.64 0.47 0.32 0.19 0.10 0.08 |
| 10 % | 11,846 | 4,866, 41,711 (strict: 107,626) | 0.87 0.72 0.57 0.41 0.26 0.14 0.08 |

X-Rel always has the lower MSE, and the test checks this. The ratios are
higher than the 0.01 to 0.14 the method's authors report on photographs. For most
`k` the ratio here grows with `P_f`, where the authors see it fall. The image, the seed
and the error accounting all differ, so treat these numbers as a sanity check,
not a reproduction.

**32-bit filter study.** `tb_xrel_fir32_study` builds three 8-tap
`fir_filter` replicas with 32-bit data, coefficients and output, and checks
them against a 67-bit reference sum. Their outputs get independent bit flips
and go to N = 32 voters with `k` = 0 (strict), 1, 2, 4 and 8, each with both
error behaviours. The input and coefficients are uniform random 32-bit words:
a signed input range maps onto this unsigned filter as offset binary. PSNR
over 4,000 samples (peak `2^32 - 1`):

| P_f | on error | strict | k=1 | k=2 | k=4 | k=8 |
|---|---|---|---|---|---|---|
| 1 % | zero | 20.0 | 20.2 | 20.5 | 21.0 | 22.0 |
| 1 % | OM1 | 28.5 | 28.7 | 28.9 | 29.2 | 29.8 |
| 5 % | zero | 12.9 | 13.0 | 13.0 | 13.1 | 13.5 |
| 5 % | OM1 | 18.1 | 18.1 | 18.1 | 18.2 | 18.3 |

The test checks that X-Rel never does worse than the strict voter and raises
fewer errors. As in the authors' filter results, X-Rel is ahead and gains a
little with each step of `k`. The absolute values are far lower than the
54-70 dB they report: every wrong word here counts at full 32-bit scale, and
their PSNR definition and signal are not known.

**Fault tests.** Each block was also run against a deliberately broken copy,
for example low bits taken from OM2 instead of OM1, or the FIR shifting
without `in_valid`. Every testbench failed, as it should.

**Running a testbench** with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/xrel_pkg.sv tb/xrel_ref_pkg.sv tb/tb_xrel_top.sv --top-module tb_xrel_top
./obj_dir/Vtb_xrel_top
```

Each testbench ends with `TB_RESULT checks=<n> failures=<m>`. The RTL and the
testbenches build without warnings under Verilator's default warning set.
With `-Wall`, lint lists the voter's unused `om2`/`om3` low bits and the
operand and sum bits the truncated operators drop; both are intended.

## 7. Departures from the source and limits

Followed from the source:

* the bound-to-`k` arithmetic;
* the structure of the voter: truncation, an `(N-k)`-bit word-wise voter, and
  OM1's `k` low bits forwarded;
* the voter's decision order;
* truncation as the approximation technique, applied to node inputs;
* the benchmark set and `N = 16`.

This design's own choices:

* all data widths, signedness (unsigned), output scaling, coefficient ports,
  graph shapes (multiply, then a linear add chain), the top-level arrangement,
  the noise-mask ports, the output register and all timing;
* the default truncation rule: one `j` for all multipliers, chosen against the
  source's variance bound, with a bias term the source's propagation rule
  lacks. It replaces the unpublished ILP solutions.

Not built:

* the ILP optimiser, and the error-sensitivity estimation that feeds it (both
  are design-time software);
* the compared baseline voters (IDMR, ITDMR);
* other ways of forming the `k` low output bits that the source names as
  alternatives to forwarding OM1's (a `k`-bit majority detector, or a
  constant);
* redundancy at the level of single operators;
* the 32-bit filter configuration inside the system top (its defaults are
  8-bit data and `N = 16`); the 32-bit filter study builds the modules and
  voters in a testbench instead.

The source gives no area, timing or energy numbers that apply to this
particular RTL. Nothing here has been synthesised to a cell library.

## 8. Files

`rtl/xrel_pkg.sv` (types, `k` and truncation arithmetic), `trunc_adder.sv`,
`trunc_multiplier.sv`, `tmr_word_voter.sv`, `xrel_voter.sv`, `dot_product.sv`,
`fir_filter.sv`, `matmul.sv`, `smooth3x3.sv`, `xrel_top.sv`. The testbenches are
in `tb/` and share `tb/xrel_ref_pkg.sv`.
