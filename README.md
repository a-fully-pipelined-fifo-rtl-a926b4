# Fully pipelined FIFO-based NTT polynomial multiplier

This design multiplies two polynomials of degree below N = 256 in the ring
Z_Q[x]/(x^N + 1), with Q = 1 049 089 (21-bit coefficients). That kind of
multiplication is the costliest operation in Ring-LWE cryptography. The
number theoretic transform (NTT) does the work in O(N log N). The whole
computation is one pipeline with no memories in the data path: every
transform stage holds its waiting coefficients in shift registers (the
"FIFOs"). Each stage starts a butterfly as soon as both of its operands have
arrived. When polynomials are sent back-to-back, one product leaves every
N/2 = 128 clocks, because a pair of coefficients enters and a pair leaves in
every clock.

The architecture follows the published FIFO-based pipelined NTT multiplier
of Heidarpur, Mirhassani and Chang. Its datapath figures are followed
register by register: the Karatsuba multiplier, the shift-and-add Barrett
reduction, the butterfly, the twiddle-free first stage, and the two-block
FIFO stage with its truth table. Where the publication is silent, wrong, or
self-contradictory, this RTL makes its own choices, listed in
[Departures and choices](#departures-and-choices).

## The computation

The multiplier uses the negative wrapped convolution. Let phi be a primitive
2N-th root of unity mod Q, and w = phi^2.

1. **Weighting**: a_i <- a_i * phi^i and b_i <- b_i * phi^i (`phi_mul`).
2. **Forward NTT** of each weighted operand (`ntt`, two instances).
3. **Element-wise product** of the two transforms (`pointwise_mul`).
4. **Inverse NTT** of the product (`intt`).
5. **Unweighting**: c_i <- C_i * phi^-i * N^-1 (`phi_mul` with `INVERSE=1`).

Because phi^N = -1, the result is the product reduced mod x^N + 1, with no
extra reduction step and no zero padding.

The constants are derived from Q - 1 = 2^9 * 2049, so a 2N-th root exists
for N up to 256. The design takes phi = 7^((Q-1)/2N). For N = 256 this gives
phi = 207 929 and w = 462 262. All ROM contents come from constant functions
in `ntt_pkg`: the powers of phi, N^-1 * phi^-i, and every stage's twiddle
factors. No data files are read.

## Arithmetic units

**Karatsuba multiplier** (`ka_mul`, 6 clocks). Each 21-bit operand is split
into an 11-bit low part and a 10-bit high part. The unit forms three narrow
products, LL, HH and (aL+aH)(bL+bH), and combines them as
HH*2^22 + (mid)*2^11 + LL. The register names r0..r18 and the stage in which
each operation sits follow the published data-flow graph.

**Barrett reduction** (`barrett_red`, 3 clocks). It uses k = 40 and
u = 2^20 - 2^9. This u is one subtractor cheaper than the minimal value
2^20 - 2^9 - 1. Since Q = 2^20 + 2^9 + 1, the quotient estimate is
q = (I - floor(I/2^11)) >> 20, and I - q*Q needs only shifted subtractions
on 23 bits. Two facts matter here, and the published text gets both wrong:

* r1 = I - floor(I/2^11) can reach 0x1001FFBFF80, so bit 40 is **not**
  always zero. The design keeps q as 21 bits, r1[40:20], and adds
  q + q[2:0]<<20. The published shortcut, the concatenation
  {r1[22:20], r1[39:20]}, gives wrong results for the largest products.
* u/2^40 is slightly larger than 1/Q, so q can be one too large. The
  intermediate remainder therefore lies in [-Q, Q), and the last stage adds Q
  when it is negative. The published figure shows this; the published text
  says "subtract Q when >= Q", which never happens.

`mod_mul` is the Karatsuba multiplier followed by the Barrett reduction,
with a latency of 9 clocks. It is used for weighting, for the element-wise
product, and inside every butterfly.

**Butterfly** (`butterfly`, 11 clocks). It computes o1 = aj + w*ai and
o2 = aj - w*ai (mod Q). ai goes through `mod_mul` while aj waits in a delay
line. One clock adds and subtracts. The next clock holds both the raw and the
corrected value of each result, and the output muxes pick one of them. The
unit accepts new operands every clock.

**Stage 1** (`ntt_stage1`, 1 clock). When w = 1 the butterfly needs only
modular addition and subtraction. This unit is the first stage of both the
forward and the inverse transform.

## Data order

A polynomial is carried as N/2 pairs, one pair per clock:

| interface | pair in clock t |
|---|---|
| `polymul_top` input and output, `ntt` input, `intt` output | (x_t, x_{t+N/2}) |
| `ntt` output, `pointwise_mul`, `intt` input | transform positions (2t, 2t+1) |

The forward transform is the decimation-in-time Cooley-Tukey NTT. It takes
its input in natural order and produces its output in bit-reversed order:
position p holds X_brv(p) = sum_j x_j w^(j*brv(p)). Forward stage s pairs
coefficients N/2^s apart (128, 64, ..., 1). Stage s uses the twiddle
w^(brv(g, s-1) * N/2^s) for group g, so stage 1 needs only w = 1. Both
forward transforms produce the same order, so the element-wise product needs
no reordering.

The inverse transform runs the other way, from bit-reversed to natural
order. Inverse stage s pairs coefficients 2^(s-1) apart (1, 2, ..., 128) and
uses w^-(j * N/2^s) for offset j within the group. Its stage 1 is again the
w = 1 unit, and its stage 8 uses 128 different twiddles. The output is in the
same pair format as the multiplier's input.

## The FIFO stage

`fifo_stage` implements every transform stage after the first, forward or
inverse. It is the core of the design.

It contains two shift registers of depth D, block I and block II. A counter
of period 2D drives `sel`. Count the input clocks in windows of 2D:

| window half | sel | block I loads | block II | butterfly gets (ai, aj) |
|---|---|---|---|---|
| first D clocks | 1 | fs_o1 | loads fs_o2 | (block I out, block II out): pair left over from the previous window |
| second D clocks | 0 | fs_o2 | holds | (fs_o1, block I out) |

Within a window, call the pairs that arrive in the first half (A_j, B_j) and
those in the second half (C_j, E_j), for j = 0..D-1. The butterfly receives
(A_j, C_j) in the second half of the same window. It receives (B_j, E_j) in
the first half of the next window, while the next polynomial's data is
already streaming in. This one re-pairing does two jobs. It turns pairs 2D
apart into pairs D apart, which a forward stage needs (D = N/2^s: 64 in
stage 2, down to 1 in stage 8). It also turns pairs D apart into pairs 2D
apart, which an inverse stage needs (D = 2^(s-2): 1 in stage 2, up to 64 in
stage 8). Each stage holds 2D coefficients and adds a delay of D + 11 clocks.
Over the 7 FIFO stages of each transform the delay sums to 205 clocks,
stage 1 included.

The published design gates block II's clock with `sel`. Here that gate is a
clock enable, the usual form for an FPGA.

A window's last D pairs sit in the blocks until the next window. If no
polynomial follows, a `pend` flag keeps the counter running for D more clocks
to flush them, and the counter then returns to 0. Hence the flow-control
rule:

* A polynomial is N/2 pairs on consecutive clocks.
* The next polynomial either follows immediately, or after at least D idle
  clocks. At the top level that means at least N/4 = 64 idle clocks.

Two assertions in `fifo_stage` check this rule: no gap inside a window, and
every burst starts on a window boundary.

## Top level and timing

`polymul_top` wires the five steps as shown in the block diagram of the
computation: two weighting units, two forward NTTs, the element-wise
multiplier, one inverse NTT, and the unweighting unit. There is no
back-pressure. `in_valid` marks each input pair and `out_valid` each output
pair.

| quantity | N = 256 |
|---|---|
| throughput, back-to-back | one product per 128 clocks |
| first input pair to first output pair | 9 + 205 + 9 + 205 + 9 = 437 clocks |
| coefficient width / modulus | 21 bits / 1 049 089 |
| butterflies | 7 per forward NTT (x2), 7 in the inverse NTT, plus three w = 1 stages |

The published clock counts, N + log N - 2 per transform and 2N + 2 log N - 1
for the first product, assume single-cycle butterflies. Here each butterfly
takes 11 clocks, so the first-product latency differs (437 against 527). The
steady-state rate of N/2 clocks per product is the same.

`rst` is synchronous and active high. It clears only counters and valid
bits. Data registers are not reset.

The only parameter is `LOGN` (default 8), on `polymul_top`, `ntt`, `intt`,
`phi_mul` and `fifo_stage`. Values 4 to 8 give N = 16 to 256. Larger N has
no 2N-th root of unity for this Q. The modulus and the reduction circuit are
fixed, because the Barrett shift-and-add network is specific to
Q = 2^20 + 2^9 + 1.

## Departures and choices

Where this RTL follows the publication:

* The Karatsuba, Barrett, butterfly and stage-1 datapaths, with their
  register names and pipeline cuts.
* The FIFO stage's blocks, `sel`, muxes and truth table.
* The forward stage depths (64, 32, ..., 1).
* The ROM of phi powers with an incrementing address.
* Use of the same multiplier for the element-wise product.

Where it departs, or fills a gap:

* **Barrett**: bit 40 of r1 is kept, and the correction adds Q to a negative
  remainder (see above).
* **Butterfly**: its reduction includes the final correction, which costs one
  more clock than the published figure (11 instead of 10). The difference is
  aj - w*ai. The published text says the product minus aj, which would give a
  wrong transform.
* **Stage 1** has an output register; the published figure draws it as
  combinational.
* **Twiddle counts**: the published text says 4 twiddle values in stage 2 and
  8 in stage 3. The transform needs 2 and 4 (2^(s-1) in stage s), and that is
  what is built. All twiddles come from per-stage constant tables. The
  publication uses registers and muxes for the early stages and a memory for
  the later ones, which a synthesis tool derives from these tables.
* **Register counts**: the publication lists 16, 8, 4, 2, 1 registers for
  stages 4 to 8. Here stage s holds 2D, that is 32, 16, 8, 4, 2.
* **Inverse NTT**: the publication only sketches it, as holding times of
  2..64 clocks in stages 2..7, none in stage 8, and 128 twiddles in stage 8.
  This design uses the same FIFO stage with holding times 1..64 in stages
  2..8, which is what re-pairing the bit-reversed stream needs.
* **Scaling**: the 1/N factor of the inverse transform is folded into the
  unweighting ROM.
* **Not given by the publication, chosen here**: the roots phi and w, the
  valid/flow-control scheme, and the reset.
* **Two lanes per step**: each weighting and element-wise unit has two
  multipliers, because a pair of coefficients arrives every clock.

The publication reports FPGA results: slices, DSPs, BRAMs and 234 MHz on a
Spartan-6. Those depend on the vendor flow, and nothing here reproduces
them.

## Files

`rtl/`:

* `ntt_pkg.sv`: constants, the coefficient type, and the table generators.
* `ka_mul.sv`, `barrett_red.sv`, `mod_mul.sv`: the arithmetic units.
* `butterfly.sv`, `ntt_stage1.sv`, `fifo_stage.sv`: the transform stages.
* `ntt.sv`, `intt.sv`: the two transforms.
* `phi_mul.sv`, `pointwise_mul.sv`: weighting and element-wise product.
* `polymul_top.sv`: the top level.

`tb/` has one self-checking testbench per module, `tb_<module>.sv`:

* They compare against models written from the mathematical definitions
  (`tb_ref_pkg.sv`): a direct O(N^2) NTT and inverse, and a schoolbook
  negacyclic product.
* `tb_polymul_top` runs the multiplier at its default size. It multiplies
  four polynomial pairs: three back-to-back, then one after an idle gap. One
  pair is x^255 * x = -1, which checks the wrap-around sign. The testbench
  also checks the 437-clock latency and the 128-clock product interval.
* `tb_polymul_sizes` repeats the end-to-end check for N = 16, 32, 64 and 128.
* `tb_fifo_stage` checks five forward and inverse stage configurations,
  including their latency and the flush after a gap.

Every testbench ends by printing `TB_RESULT checks=<n> failures=<n>`.

To simulate with Verilator (5.x), for example the full multiplier:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_polymul_top \
    rtl/ntt_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/*.sv
./obj_dir/Vtb_polymul_top
```

The packages must come first on the command line, as shown. Each testbench
finishes in well under a second.
