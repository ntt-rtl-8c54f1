# A fully unrolled, constant-optimized NTT for ML-DSA (Dilithium)

The number-theoretic transform (NTT) dominates the run time of lattice-based
post-quantum schemes such as ML-DSA (Dilithium) and ML-KEM (Kyber). In these
schemes the ring is fixed by the standard: the modulus Q, the length N and all
twiddle factors are known before the hardware is built. This RTL builds on that
fact. It follows the architecture of "@NTT: Algorithm-Targeted NTT hardware
acceleration via Design-Time Constant Optimization" (Nabeel, Hafez, Maniatakos).
Every multiplication in the transform has one operand that is a design-time
constant, so it becomes a network of wired shifts and adders/subtractors. With
multipliers that cheap, the whole signal-flow graph fits in hardware:
N/2 · log2 N butterflies and one pipeline register set per stage. The
accelerator then takes a new N-point polynomial on every clock cycle and
returns a finished transform on every cycle after a fixed latency.

Default build: Q = 8380417, N = 256, 8 stages (Dilithium).
- 1024 butterflies and 256 normalization multipliers.
- One transform per clock.
- Latency of 37 cycles.

Setting four parameters gives the Kyber build from the same RTL:
- 3329 for Q;
- 7 stages;
- 896 butterflies;
- latency of 33 cycles.

## The transform that is unrolled

The flow is the Cooley–Tukey decimation-in-time graph. Coefficients enter in
natural order and results leave in bit-reversed order:

```
stage s = 0 .. S-1,   len = N >> (s+1)
  group g = 0 .. 2^s - 1, twiddle zeta[k], k = 2^s + g
    for j in group:  t = zeta[k] * a[j+len] mod Q
                     a[j+len] = a[j] - t,  a[j] = a[j] + t   (mod Q)
zeta[k] = psi^brv_S(k) mod Q
```

Here `brv_S` reverses the low S bits, and psi is a primitive 2^(S+1)-th root
of unity:
- Dilithium uses psi = 1753 with S = 8.
- Kyber uses psi = 17 with S = 7. Its last stage pairs elements at distance 2.

This is the ordering of the two schemes' reference transforms. In an 8-point
picture, the twiddles are numbered w1 (stage 1), w2 w3 (stage 2) and
w4 … w7 (stage 3).

With the default parameters, forward result i is the input polynomial
evaluated at psi^(2·brv(i)+1). Those points are the roots of X^256 + 1.
For Kyber, results 2m and 2m+1 are the two coefficients of the input reduced
modulo X^2 − psi^(2·brv7(m)+1).

`ntt_stage` builds one column of this graph. Butterfly i of stage s:
- belongs to group g = i / len;
- reads A from position 2·len·g + (i mod len) and B from len positions
  further;
- writes X and Y back to the same two positions.

All of `zeta[k]`, its modular inverse and the Barrett constant are computed
by constant functions in `ntt_pkg` while the design elaborates. The hardware
holds no twiddle memory, twiddle generator or constant register.

## The butterfly and its Barrett pipeline

`ntt_butterfly` computes X = A + B·w and Y = A − B·w (mod Q). The product
B·w mod Q comes from `barrett_const_modmul`. It has four pipeline cuts, with
n = ⌈log2 Q⌉ and R = ⌊4^n / Q⌋:

```
 B ─► Mult1 (×w or ×w⁻¹, mux on iNTT) ─┃─► >>(n−1) ─► Mult2 (×R) ─┃─► >>(n+1) ─► Mult3 (×Q) ─┃─► Sub1 ─► %Q ─┃─► B·w mod Q
 A ─────────────────────────────────── ┃ ────────────────────────── ┃ ─────────────────────────── ┃ ─────────────── ┃─► Add1/%Q ─► X
                                                                                                                  └─► Sub2/%Q ─► Y
```

How the reduction works:
- The product P = B·w is below Q² < 4^n.
- The quotient estimate ⌊⌊P / 2^(n−1)⌋ · R / 2^(n+1)⌋ is at most 2 below
  ⌊P/Q⌋.
- So P − estimate·Q lies in [0, 3Q), and the first `%Q` is two conditional
  subtractions.
- Only the low n+2 bits of Mult3 and Sub1 are built, because that range
  fits in n+2 bits.

The 2Q correction is needed for Kyber: for example, 3200 × 3303 mod 3329. A
random search over Dilithium products found no case that needs it, but the
correction is kept because the bound allows it.

A is delayed by the same four registers. Add1/Sub2 and their single-step
corrections (−Q on overflow, +Q on borrow) come after the last cut and are not
registered. In the chained design, stage s's adders therefore share a cycle
with stage s+1's Mult1. Each stage adds 4 cycles.

The mux in front of Mult1 chooses between the forward twiddle and its inverse.
Both are constants, so both products are built as shift-add networks and the
mux selects the result. This pair is what the paper calls the
multiple-constant multiplication (MCM) of Mult1.

## Constant multipliers as shifts and adds

`shift_add_mult` multiplies by a constant C with no multiplier. C is recoded
into canonical signed digits: no two adjacent digits are non-zero. For
example, 13 = 16 − 4 + 1, so x·13 = (x≪4) − (x≪2) + x. Each non-zero digit
after the first costs one adder or subtractor, and shifts are wires.

Cost for Dilithium:
- R = 8396807 takes 3 adders.
- Q = 8380417 takes 2.
- A twiddle takes about 7.2 on average.

Cost for Kyber:
- R takes 4.
- Q takes 3.
- A twiddle takes about 3.4.

**Departure from the paper:** the publication finds adder graphs with fewer
adders than signed-digit form, and shares adders between the forward and
inverse constants. It uses a multiple-constant-multiplication search in the
style of Voronenko and Püschel. That search and its results are not published
with the architecture. The signed-digit form is always correct and needs no
external tool, but it uses more adders than an optimized graph. Only
`shift_add_mult` would need replacing to add such graphs. Synthesis tools may
also re-extract the sum as a multiply-accumulate, which loses some of the
intended structure.

## Inverse transform mode

Each vector carries its own mode bit (`in_intt`), so forward and inverse
transforms can alternate cycle by cycle. In inverse mode the RTL does three
things:
1. It loads the input in bit-reversed order: element j is taken from position
   brv_log2N(j). This is a wiring permutation in front of the input register.
2. It makes every butterfly use the modular inverse of its forward twiddle.
3. It multiplies every output by 2^−S mod Q in `ntt_norm`. For Dilithium this
   is N^−1 = 8347681. In forward mode the same unit multiplies by 1, which
   keeps the latency equal in both modes.

**Caution:** this is the inverse procedure as the publication states it, and
the RTL implements it as stated. For the negacyclic rings of Dilithium and
Kyber it does **not** undo the forward mode. A reference model shows that a
forward result, fed back in inverse mode, does not return the original
coefficients under any of the four combinations of bit-reversed input and
output order.

The procedure is the standard one for a cyclic transform. A negacyclic
inverse also has to remove the psi^j twist: the reference implementations use
Gentleman–Sande butterflies with the inverse twiddles taken in reverse order.
Treat inverse mode as the published procedure, not as a verified
NTT⁻¹ for these rings. Changing it would touch:
- the twiddle choice in `ntt_stage` (which constant feeds C1);
- the permutation in `ntt_top`;
- possibly a per-element twist folded into the constants of `ntt_norm`.

## Interface and timing of `ntt_top`

| port | dir | width | meaning |
|---|---|---|---|
| clk | in | 1 | clock; everything is single-edge, rising |
| rst_n | in | 1 | synchronous, active low; clears only the valid pipeline |
| in_valid | in | 1 | `in_coef` holds a polynomial this cycle |
| in_intt | in | 1 | apply the inverse procedure to it |
| in_coef | in | N × n | coefficients, each < Q, natural order |
| out_valid | out | 1 | `out_coef` holds a result |
| out_intt | out | 1 | mode of that result |
| out_coef | out | N × n | result (forward: bit-reversed order), registered |

Latency:
- The total is LATENCY = 1 + 4·S + 4 cycles: 37 for Dilithium and 33 for
  Kyber.
- `out_valid` repeats `in_valid` exactly LATENCY cycles later.
- In cycle terms: inputs sampled at rising edge e appear after edge
  e + LATENCY − 1.

Throughput and control:
- A polynomial can be accepted on every cycle.
- There is no back-pressure and no stall.
- Idle cycles (`in_valid` = 0) are bubbles that travel through the pipeline.
- Data registers have no reset, so outputs are only meaningful while
  `out_valid` is high.
- Coefficients ≥ Q are outside the design's contract.

## Parameters and configurations

`ntt_top`, `ntt_stage` and `ntt_norm` take these parameters:
- `Q`, the modulus;
- `N`, the number of points, a power of two;
- `STAGES`, with 1 ≤ STAGES ≤ log2 N;
- `PSI`, the primitive 2^(STAGES+1)-th root of unity.

The word width n = ⌈log2 Q⌉, R, all twiddles and the normalization factor are
derived from these. `ntt_pkg` holds named values for both standard rings:

| ring | Q | N | STAGES | PSI | n | butterflies | latency |
|---|---|---|---|---|---|---|---|
| ML-DSA (Dilithium), default | 8380417 | 256 | 8 | 1753 | 23 | 1024 | 37 |
| ML-KEM (Kyber) | 3329 | 256 | 7 | 17 | 12 | 896 | 33 |

The design is tied to its ring, which is the point of the architecture. A
build holds exactly one (Q, N, psi) and cannot transform in another ring.
FN-DSA (Falcon), with Q = 12289 and N = 512 or 1024, would be another
elaboration. That needs a primitive 2^(S+1)-th root of unity modulo 12289,
which is not among the named constants. The design relies on Q being prime
(inverses via Fermat) and on Q² < 2^64 (elaboration arithmetic).

For scale, the publication reports the following with its optimized adder
graphs:
- Dilithium: 1.45 mm² at 1 GHz in a 28 nm process, and about 311k LUTs at
  305 MHz on an UltraScale+ FPGA.
- Kyber: 0.62 mm² and about 143k LUTs at 451 MHz.

The signed-digit multipliers here are expected to be somewhat larger.

## Files

Listed bottom-up:

| file | contents |
|---|---|
| `rtl/ntt_pkg.sv` | elaboration-time arithmetic: n, R, powmod, inverse, bit reversal, twiddles, signed-digit recoding; ring constants |
| `rtl/shift_add_mult.sv` | constant multiplier from shifts and adds |
| `rtl/barrett_const_modmul.sv` | 4-stage Barrett modular multiplier by one of two constants |
| `rtl/ntt_butterfly.sv` | radix-2 butterfly with forward/inverse twiddle |
| `rtl/ntt_stage.sv` | one stage: N/2 butterflies, pairing, twiddle assignment, valid/mode side band |
| `rtl/ntt_norm.sv` | per-element multiplication by 1 or 2^−S |
| `rtl/ntt_top.sv` | input permutation and register, S stages, normalization |
| `tb/ntt_ref_pkg.sv` | independent reference arithmetic (repeated products, extended Euclid, loop model of the flow, evaluation by definition) |
| `tb/tb_*.sv` | one self-checking testbench per module, plus `tb_ntt_top_kyber` |

## Verification

Every testbench is self-checking and ends with a line
`TB_RESULT checks=N failures=M`. The expected values come from
`tb/ntt_ref_pkg.sv`, which shares no code with the RTL. The testbenches check
the following:
- **`tb_shift_add_mult`** compares against `*` for six constants:
  - R, Q and 13;
  - 2^24 − 1, which is all subtractions;
  - 1;
  - Q with a truncated output.
- **`tb_barrett_const_modmul`** streams 3000 operands per cycle, at the
  Dilithium and Kyber sizes.
  - It checks every result at exactly 4 cycles.
  - It includes the Kyber operand that needs the 2Q correction.
- **`tb_ntt_butterfly`** runs random and corner operands with a random mode.
  It checks the 4-cycle latency and counts Add1 wraps and Sub2 borrows.
- **`tb_ntt_stage`** checks stages 1 and 3 of a 16-point, 4-stage flow
  against a one-stage model. It includes idle cycles and side-band timing.
- **`tb_ntt_norm`** checks both modes with the mode changing per cycle.
- **`tb_ntt_top`** runs the full-size default build (Dilithium, 1024
  butterflies).
  - It sends 48 cycles of stimulus: back-to-back forward transforms,
    back-to-back alternating modes, then random traffic with gaps.
  - It checks every output word against the loop model and the latency
    (37).
  - It checks forward results at sampled points against evaluation of the
    polynomial by definition.
  - It counts forward, inverse, back-to-back, mode-switch and idle events;
    an event that never happened is a failure.
- **`tb_ntt_top_kyber`** is the same test on the Kyber elaboration.
  Forward results are checked against reduction modulo the quadratic
  factors.

All testbenches pass. Each module's testbench was also shown to fail on a
deliberately broken copy of that module.

Not verified:
- timing closure or area (no synthesis to gates was done);
- the inverse procedure as a true inverse (see above; it is not one for these
  rings).

Simulating with Verilator, for example the full-size test:

```
verilator --binary --timing --top-module tb_ntt_top -y rtl -y tb \
          rtl/ntt_pkg.sv tb/ntt_ref_pkg.sv tb/tb_ntt_top.sv
./obj_dir/Vtb_ntt_top
```

Building the full-size model takes a few minutes, because 1024 butterflies
elaborate to about 3000 constant multipliers. The simulation itself takes a
fraction of a second. The lower-level testbenches build in seconds.

## Where this RTL departs from, or adds to, the publication

These follow the publication:
- the butterfly operators and their order;
- the Barrett shift amounts (n−1, n+1) and R = ⌊4^n/Q⌋;
- the four pipeline cuts per multiplier;
- the twiddle mux;
- the unrolled stage structure and twiddle numbering;
- the inverse procedure;
- the per-element N⁻¹ multiplier;
- one transform per cycle.

These are this design's own choices:
- signed-digit constant multipliers instead of optimized shared adder
  graphs;
- the delay line for A;
- unregistered butterfly outputs (the cut after `%Q` is the last one);
- the %Q circuits and internal word widths;
- an input register;
- normalization on the outputs, with a multiply-by-1 forward bypass;
- 2^−S instead of N⁻¹ when S < log2 N;
- valid/mode side band, and reset on valid bits only;
- psi values and twiddle exponents, taken from the Dilithium and Kyber
  reference transforms.
