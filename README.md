# Fast-filter polynomial multiplier for R_q = Z_q[x]/(x^n + 1)

Lattice cryptosystems such as Saber spend most of their time on one operation:
multiplying two polynomials of degree < n in the ring Z_q[x]/(x^n + 1). Here
q is a power of two, so reducing a coefficient means keeping its low bits. If
you forget the reduction, a polynomial product is a convolution, the same thing
an FIR filter computes. This RTL builds the multiplier the way a DSP engineer
builds a fast FIR filter:

* **A length-n multiplier is a systolic FIR filter.** The coefficients of B are
  the filter taps and stay put (weight-stationary). The coefficients of A
  stream through one per cycle. A small shift register and one switch per tap
  fold in the ring's rule x^n = -1 on the fly. The result leaves already
  reduced, one coefficient per cycle, with no idle cycles between products.
* **Fast parallel filtering makes it wider.** Split A and B into even and odd
  halves. Their product then takes three half-length multiplications
  (U = A0·B0, V = A1·B1, W = (A0+A1)(B0+B1)) instead of four. A handful of
  adders recombine the halves. Each half-length multiplication is again a
  systolic array that reduces modulo y^(n/2) + 1 (y = x^2) by itself, so the
  recombination needs only one extra wrap-around term.
* **The top level applies the split twice.** The result is a 4-parallel
  multiplier: nine systolic arrays of length n/4 that together take four
  coefficients of A per cycle and return four coefficients of the product per
  cycle. One n = 256 product streams in 64 cycles. Back-to-back products
  complete at one per 64 cycles.

The default configuration is the one used for Saber at medium security:
n = 256, q = 2^13, and B (the secret) with coefficients in [-4, 4]. A's
coefficients are 13-bit residues.

## Arithmetic conventions

* A **residue** (`coef_t`) is a 13-bit value mod q. Additions and subtractions
  simply wrap.
* An **operand** (`coef_sm_t`) travelling through an array is
  sign-magnitude: a sign bit and a 13-bit magnitude. This makes negation free:
  the wrap-around x^n = -1 needs the negative of an earlier coefficient, and
  that is a sign-bit flip.
* A **weight** b[j] is sign-magnitude with a `BMAG`-bit magnitude (3 bits for
  [-4, 4]). The middle arrays of the parallel multipliers hold sums of
  weights, so their weights are one or two bits wider.
* A tap computes `prod = (|a|·|b|) mod q`. It adds prod to the incoming
  partial sum, or subtracts it when the signs of a and b differ.

## The systolic array (`fir_polymult`)

For n = 4 the negacyclic product is

    p[3] = a3 b0 + a2 b1 + a1 b2 + a0 b3
    p[2] = a2 b0 + a1 b1 + a0 b2 - a3 b3
    p[1] = a1 b0 + a0 b1 - a3 b2 - a2 b3
    p[0] = a0 b0 - a3 b1 - a2 b2 - a1 b3

The array has n taps in a row; tap j holds b[j]. A partial sum enters tap 0 as
zero. It moves one tap to the right per cycle (a register after every tap but
the last), so it leaves the last tap as a finished coefficient. A enters
**highest degree first** (a[n-1], a[n-2], ..., a[0]), and the product leaves
in the same order.

Consider the partial sum for p[n-1-k]. It passes tap j exactly k+j cycles
after its polynomial started. If k+j < n, the operand tap j needs is the
coefficient entering at that moment. Otherwise the product term has wrapped
past x^n. The operand is then the negative of the coefficient that entered n
cycles earlier, which by then belongs to the *next* polynomial's time slot.

So each tap chooses between two sources:

* the **input node** (the coefficient entering now), or
* the **n-stage shift register** on the input, whose output is negated.

Let phase = 0..n-1 be the position in the current polynomial (phase 0 is
a[n-1]). Tap j takes the input node in phases j..n-1 and the negated shift
register in phases 0..j-1. Tap 0 always takes the input node. For n = 4:

| tap | input node in phases | negated shift register in phases |
|-----|----------------------|----------------------------------|
| 1   | 1, 2, 3              | 0                                |
| 2   | 2, 3                 | 0, 1                             |
| 3   | 3                    | 0, 1, 2                          |

An (n-1)-bit register `ctrl_sw` produces the switch controls. It clears to
all zeros in phase 0. Each later cycle it shifts left and brings in a 1 at the
LSB, so bit j-1 is set exactly in phases j and later. In the same cycle that
one tap still finishes polynomial l, its neighbour already starts l+1. That is
why products can follow each other with no gap, and why the weights must not
change while any product is in flight.

All tap operands pass through one register stage after the switches. This
keeps the fan-out of the input node and of the shift register off the critical
path, which is then one multiplier plus one adder. With that stage, the first
result comes **n cycles** after the first input. One product takes
**2n-1 cycles** from its first input to its last output; L back-to-back
products take **n(L+1)-1**.

## The 2-parallel multiplier (`fast2_polymult`)

With y = x^2, write A = A0(y) + A1(y)·x and B = B0(y) + B1(y)·x, each half of
length K = n/2. Then

    P0 = U + V·y   mod (y^K + 1)
    P1 = W - U - V

where U = A0·B0, V = A1·B1 and W = (A0+A1)(B0+B1). All three come out of
length-K systolic arrays, already reduced mod y^K + 1. The pre-adder A0+A1
wraps mod q. The weights B0+B1 are summed in hardware (`weight_preadd`).

P1 is two subtractions and a register. P0 is harder. Multiplying V by y is a
shift toward higher degrees, and the stream emits high degrees first, so it
asks for each value one cycle early, which a causal circuit cannot do. The
circuit delays U by one cycle instead, which puts u[i] next to v[i-1]. The one
term left over is v[K-1], which wraps to -v[K-1] in p0[0]. For n = 8 (K = 4),
counting cycles from the first input:

| cycle      | 4    | 5            | 6            | 7            | 8                 |
|------------|------|--------------|--------------|--------------|-------------------|
| U, V out   | u3 v3| u2 v2        | u1 v1        | u0 v0        | (next product)    |
| U delayed  |      | u3           | u2           | u1           | u0                |
| V term     |      | v2           | v1           | v0           | -v3 (held)        |
| P0 out     |      | p0[3]        | p0[2]        | p0[1]        | p0[0]             |

A hold register catches v[K-1] in the cycle it appears (phase 0). One period
later, again in phase 0, a switch feeds its negative to the P0 adder in place
of V. At that moment V is already showing the next product's v[K-1], which the
register catches in the same cycle. The streams keep running with no idle
slot. The outputs come K+1 cycles after the inputs: n cycles from first input
to last output.

## The 4-parallel multiplier (`fast4_polymult`)

Apply the split again. Lane r (r = 0..3) carries the coefficients whose index
is r mod 4:

    lane 0: A00 = a0, a4, a8, ...     lane 1: A10 = a1, a5, a9, ...
    lane 2: A01 = a2, a6, ...         lane 3: A11 = a3, a7, ...

Three 2-parallel multipliers of length n/2 produce six sub-products of length
K = n/4:

| block  | lane inputs         | weights             | outputs |
|--------|---------------------|---------------------|---------|
| upper  | A00, A01            | B00, B01            | C0, C1  |
| middle | A00+A10, A01+A11    | B00+B10, B01+B11    | C2, C3  |
| lower  | A10, A11            | B10, B11            | C4, C5  |

Six adders recombine them (with y = x^4):

    P0 = C0 + C5·y  mod (y^K + 1)     (same delay-and-hold trick as above)
    P1 = C2 - C0 - C4
    P2 = C1 + C4
    P3 = C3 - C1 - C5

Those four lines follow from multiplying out the polyphase parts. Published
descriptions of this structure give P1 = C2 - C1 - C4 and
P3 = C3 - C0 - C5. That version fails already for B(x) = 1, and it does not
match the lane definitions above, so it is not what this RTL builds. The
rewiring is confined to two adders in `fast4_polymult.sv`.

P1 to P3 are registered. P0 is C0 delayed plus C5, with -c5[K-1] held from
one period earlier. The C streams lag the inputs by one cycle, so the hold
and release happen in phase 1 of the counter. The outputs come **K+2 cycles**
after the inputs.

## Control and interface (`polymult_ctrl`, `fast4_polymult_top`)

One free-running phase counter (0..K-1 from reset) times every switch in the
design. Each systolic array keeps its own `ctrl_sw` register, stepped by that
counter. The control unit also delays `in_valid` by K+2 cycles to make
`out_valid`, and marks the first output group of each product with
`out_first`.

Using the top:

1. **Load B.** Pulse `b_wr_en` with `b_wr_addr = i`, `b_wr_sign` and
   `b_wr_mag`, one coefficient per cycle, in any order. Internally the weight
   store is kept by lane: b[4k+r] goes to lane r, position k.
2. **Stream A.** Start in a cycle where `phase0` is high. Hold `in_valid`
   high for K = n/4 cycles. In cycle k, lane r of `a_in` carries
   a[4(K-1-k)+r], i.e. a[n-4..n-1] first and a[0..3] last. The next product
   may start in the very next cycle, or after any number of whole idle
   periods. An assertion flags `in_valid` changing anywhere but at phase 0.
3. **Read P.** K+2 cycles later, `out_valid` rises together with `out_first`.
   Group k of the output again carries p[4(K-1-k)+r] on lane r.

Latency, measured from the first input cycle to the last output cycle:
N/2 + 1 cycles for one product (129 at n = 256), and N(L+1)/4 + 1 for L
back-to-back products. Throughput is four coefficients per cycle.

Do not write B while a product is in flight. The array's taps work on two
consecutive products at once, so a new weight would corrupt both. Wait K+2
cycles after the last input before reloading.

## Parameters and size

| parameter | default | meaning |
|-----------|---------|---------|
| `N` (top, `fast4_polymult`, `fast2_polymult`, `fir_polymult`) | 256 | ring degree; a multiple of 4 and at least 16 for the top |
| `BMAG` | 3 | weight magnitude bits (|b| ≤ 7) |
| `QW` (package constant) | 13 | q = 2^QW |

Any N that is a multiple of 4 works. For example, N = 180 gives K = 45 and is
tested. Coarse synthesis of the default top gives about 7.8k word-level cells
and about 24.7k flip-flop bits. Most of those bits are the nine shift
registers and operand buffers of the 64-tap arrays plus the 1024-bit weight
store.

Cycle counts for the workloads used to evaluate this architecture, all
simulated with checked results:

| workload | products | cycles (first in → last out) |
|----------|----------|------------------------------|
| n = 256, Saber key generation count | 9 | 641 |
| n = 256, Saber encapsulation count | 12 | 833 |
| n = 256, Saber decapsulation count | 15 | 1025 |
| n = 180 | 9 | 451 |
| n = 180 | 1 | 91 |

Published figures for this architecture are one cycle higher in every row
(642, 834, 1026, 452, 92). That is consistent with counting both the first
and the last cycle.

The two smaller building blocks were run through the same counts on their own:

| configuration | n | products | cycles here | published |
|---------------|---|----------|-------------|-----------|
| serial (`fir_polymult`) | 256 | 1 / 9 / 12 / 15 | 511 / 2559 / 3327 / 4095 | 511 / 2560 / 3328 / 4096 |
| 2-parallel (`fast2_polymult`) | 256 | 1 / 9 / 12 / 15 | 256 / 1280 / 1664 / 2048 | 255 / 1281 / 1665 / 2049 |
| 2-parallel (`fast2_polymult`) | 180 | 1 / 9 | 180 / 900 | 181 / 901 |

Here the serial counts follow n(L+1)-1 and the 2-parallel ones (n/2)(L+1).
Apart from the single serial product, the published multi-product counts are
again one higher. The published single-product counts for the parallel
versions break that pattern: 255 for 2-parallel and 127 for 4-parallel at
n = 256, where this RTL takes 256 and 129. They are lower than the published
general formula n(1+L)/M + ceil(log2 M) gives (258 and 130). In this RTL the
gap to n/M cycles is the post-processing delay: one stage per level of
splitting.

In Saber's matrix-vector products the secret changes every third
multiplication. With this weight-stationary datapath, each change costs a
drain of K+2 cycles plus a 256-cycle reload. None of the counts above include
it.

## Where the RTL makes its own choices

* **Interface:** the weight store with its one-word write port,
  `in_valid`/`phase0`/`out_valid`/`out_first`, and all reset behaviour
  (asynchronous, active low, every register cleared).
* **One shared phase counter** for all arrays, instead of one counter per
  array.
* **Pre-added weights** (B0+B1 and so on) are formed combinationally from the
  stored weights.
* **No registers between the sub-multipliers and the post-processing
  adders.** This is what gives the latencies above. As a consequence, the P0
  output of the 2-parallel block is an adder output that feeds the 4-parallel
  adders directly. The longest path is therefore a tap (multiply and add) plus
  three adders, not a tap alone. A register stage at the sub-multiplier
  outputs would shorten it at the cost of one cycle of latency per level.
* **The multiplier** is written as a 13 × BMAG-bit magnitude product, and
  synthesis reduces it to a few adders.
* **Not built:**
  * the 3-parallel variant of the same idea, which splits by index mod 3 and
    uses six sub-multipliers;
  * higher iterated parallelism such as 6, 8 or 12;
  * the rest of a Saber implementation: hashing, sampling, packing and key
    encapsulation control;
  * the host link.

## Verification

Every testbench compares against a schoolbook negacyclic product
(`tb/polymult_ref_pkg.sv`) computed straight from the definition. Each one
prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it covers |
|-----------|----------------|
| `tb_mod_tap` | tap arithmetic, both signs, registered and combinational forms |
| `tb_weight_preadd` | all pairs of 4-bit sign-magnitude weights, including -0 |
| `tb_fir_polymult` | n = 16 array, signed A operands, 3 back-to-back products + idle junk + 1 more; response n and latency n(L+1)-1 |
| `tb_fast2_polymult` | n = 16, same pattern; v wrap-around exercised; latency |
| `tb_fast4_polymult` | n = 32, same pattern; c5 wrap-around exercised; latency |
| `tb_polymult_ctrl` | counter, phase0, valid/first delay over random valid periods |
| `tb_fast4_polymult_top` | default n = 256: shuffled weight load, 3 back-to-back products, idle restart, weight reload with extreme values; counts each mechanism |
| `tb_workloads` | the 9/12/15-product runs at n = 256 and the n = 180 runs, on the 4-parallel top |
| `tb_arch_workloads` | the same counts on the serial and 2-parallel multipliers (driver in `tb_arch_run.sv`) |

To run one with Verilator (from the directory holding `rtl/` and `tb/`):

    verilator --binary --timing --assert -Wno-fatal \
      rtl/polymult_pkg.sv tb/polymult_ref_pkg.sv \
      rtl/mod_tap.sv rtl/weight_preadd.sv rtl/fir_polymult.sv \
      rtl/fast2_polymult.sv rtl/fast4_polymult.sv rtl/polymult_ctrl.sv \
      rtl/fast4_polymult_top.sv tb/tb_fast4_polymult_top.sv \
      --top-module tb_fast4_polymult_top
    ./obj_dir/Vtb_fast4_polymult_top

For `tb_workloads`, also add `tb/tb_workload_run.sv`. For
`tb_arch_workloads`, add `tb/tb_arch_run.sv`. Every run finishes in
well under a second.

## Files

| file | contents |
|------|----------|
| `rtl/polymult_pkg.sv` | widths, residue and sign-magnitude types, helpers |
| `rtl/mod_tap.sv` | one tap: multiply, add/subtract, optional delay |
| `rtl/fir_polymult.sv` | length-N systolic negacyclic multiplier |
| `rtl/weight_preadd.sv` | pre-adder for weight vectors |
| `rtl/fast2_polymult.sv` | 2-parallel multiplier |
| `rtl/fast4_polymult.sv` | 4-parallel multiplier |
| `rtl/polymult_ctrl.sv` | phase counter and valid alignment |
| `rtl/fast4_polymult_top.sv` | top: weight store, control, 4-parallel datapath |
| `tb/*.sv` | testbenches, reference model, workload driver |
