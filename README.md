# CRT-based bit-serial BCH encoder

A systematic encoder for a long binary BCH code computes the parity
`Rem_g(m(x)·x^(n-k))`, the remainder of the shifted message modulo the
generator polynomial `g(x)`. The textbook circuit is a single division LFSR
for `g(x)`. Its feedback bit drives one XOR for every nonzero coefficient of
`g`, and that can be hundreds of loads for a long code (deg g = 121 for
BCH(2047,1926), 507 for BCH(8191,7684)). That fanout sets the clock period.

This design uses the Chinese Remainder Theorem to replace the one long division
with `r` short ones. The generator of a BCH code is a product of distinct
irreducible minimal polynomials, `g = w_1 ··· w_r`, each of degree at most
`T` (about log2 N). They are pairwise coprime, so

    Rem_g(f) = Σ_i  w_i'(x) · Rem_{w_i}( u_i(x) · f(x) ),
    w_i' = g / w_i ,      u_i · w_i' ≡ 1  (mod w_i),   deg u_i < deg w_i .

Each term is produced by its own branch: multiply by `u_i`, divide by `w_i`,
multiply the remainder by `w_i'`. An XOR then sums the `r` branch outputs. No
division feedback now drives more than `deg w_i ≤ T` XORs. The multipliers are
built in direct form, so none of their nodes has a fanout that grows with the
polynomial degree. Their cost is XOR trees of logarithmic depth.

The architecture follows H. Chen, *CRT-Based High Speed Parallel Architecture
for Long BCH Encoding*. That work names the four steps and bounds their XOR
counts. The circuit forms, the sequencing, the interface and the timing below
belong to this implementation.

The default build is the (2047, 1926) code that corrects 11 errors:

- T = 11, with primitive polynomial x^11 + x^2 + 1.
- r = 11 branches, each for a factor of degree 11.
- 121 parity bits.

Every constant is computed at elaboration from three parameters, so the same
RTL builds other narrow-sense binary BCH codes.

## The constants

`rtl/crt_bch_pkg.sv` holds constant functions that derive everything from
`(T, PRIM, ERRS)`:

| quantity | how it is computed |
|---|---|
| cosets | cyclotomic cosets `{j·2^s mod N}` of `j = 1 … 2·ERRS`. A coset is kept when `j` is its smallest member. Branch `i` belongs to the `i`-th kept `j` in increasing order (1, 3, 5, … when T is prime). |
| `w_i` | minimal polynomial `Π (x + α^e)` over the coset, multiplied out in GF(2^T) |
| `g` | `Π w_i` |
| `w_i'` | `Π_{j≠i} w_j` |
| `u_i` | `(w_i' mod w_i)^(2^d − 2)` in the field GF(2)[x]/w_i, where d = deg w_i. This is the same polynomial the extended Euclidean algorithm gives. |

The encoder calls `all_w` once and hands the packed set of minimal polynomials
(`wset_t`, 17 bits per polynomial) to every branch. Each branch derives its own
`w_i'` and `u_i` from it. The package supports at most:

- T ≤ 16 (`MAX_T`);
- deg g < 640 (`PW`);
- r ≤ 64 (`MAX_R`).

For the default code all eleven factors have degree 11 and

    g(x) = 0x25f6d4664d093a23bf2aa0c4af17939   (bit k = coefficient of x^k)

For the (15,5) code over GF(16) with x^4+x+1 the functions give
`g = x^10+x^8+x^5+x^4+x^2+x+1`, with factors `x^4+x+1`, `x^4+x^3+x^2+x+1` and
`x^2+x+1`.

## One branch (`crt_branch`)

```
               stage A (one bit per cycle)                  stage B (after hand-over)
a_bit ──► gf2_mul_lfsr ──► gf2_div_lfsr ──rem[deg w_i]──► crt_lift ──► b_bit
           × u_i(x)          mod w_i(x)      (b_load)      × w_i'(x)
           T-1 stages        deg w_i bits                  shift reg + deg w_i' stages
```

* **Step 1, `gf2_mul_lfsr` (multiply by u_i).** A direct-form constant
  multiplier. A delay line holds the last `DEG` input bits, and the output is
  the XOR of the bits at the nonzero taps. The multiplicand goes in highest
  coefficient first, and the product comes out in the same cycle, also highest
  first. `u_i` is padded to T−1 stages in every branch, which only adds leading
  zero coefficients, so all branches take streams of the same length.
* **Step 2, `gf2_div_lfsr` (divide by w_i).** A Galois-form remainder LFSR,
  `rem ← (rem·x + in) mod w_i`. It takes the Step-1 output combinationally in
  the same cycle. The feedback fanout is at most `deg w_i`.
* **Step 3, `crt_lift` (multiply by w_i').** At the hand-over the remainder is
  loaded into a shift register. It is shifted out highest bit first, followed
  by zeros, into a second `gf2_mul_lfsr` with taps `w_i'`. Because
  `deg w_i + deg w_i' = deg g` in every branch, every branch emits exactly
  `NK = deg g` product coefficients. The streams of all branches therefore line
  up bit for bit with no buffering.
* **Step 4, `crt_sum`.** XORs the `r` aligned bits of a cycle and registers the
  result. That XOR is the GF(2) sum of the `r` products, i.e. the parity
  coefficient.

## Stream timing (`crt_bch_ctrl`)

Stage A must see `m(x)·x^(n-k)`, highest coefficient first, followed by T−1
zeros. The zeros push the last product bits out of the `u_i` multipliers.
Times below are for a code word whose first message bit is accepted in
cycle 0 with no input stalls:

| cycles | phase | what happens |
|---|---|---|
| 0 … K−1 | `S_MSG` | K message bits accepted (`in_valid & in_ready`). A cycle without `in_valid` freezes stage A. |
| K … K+NK+T−2 | `S_ZERO` | NK + T − 1 zero bits, `in_ready` low |
| K+NK+T−1 | `S_DONE` | remainders final. `b_load` copies them into the Step-3 registers, and `a_clr` clears stage A. |
| K+NK+T … | `S_MSG` | next message accepted |
| K+NK+T … K+2·NK+T−1 | stage B | Steps 3–4, one coefficient per cycle |
| K+NK+T+1 … K+2·NK+T | output | `par_valid`: parity `c_(NK−1)` first, `par_last` on `c_0` |

With stalls, the first parity bit comes exactly NK + T + 2 cycles after the
cycle that accepts the last message bit. A code word occupies stage A for
N + T cycles, and stage B works on it while stage A already takes the next
message. NK < N + T, so stage B is always idle before the next load; an
assertion in the controller checks this.

Throughput is K bits per N + T cycles, e.g. 1926 bits per 2058 cycles at the
default size. The n − k zero cycles are inherent in feeding `m(x)·x^(n-k)`
through Step 1. The architecture accepts this: it trades some extra cycles for
a shorter clock period.

## Interface (`crt_bch_encoder`)

| port | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock; asynchronous active-low reset of all state |
| `in_valid`, `in_ready`, `in_bit` | in/out/in | message bits `m_(K−1)` first, one per handshake. A code word is exactly K bits. Hold `in_bit` while `in_valid & !in_ready`. |
| `par_valid`, `par_bit`, `par_last` | out | NK parity bits on consecutive cycles, `c_(NK−1)` first. There is no back-pressure. |

The code word is the message followed by the parity bits. The encoder does
not echo the message. Because parity output overlaps the next message's
input, a serial code-word stream needs an external buffer of NK bits.

Parameters: `T` (field degree), `PRIM` (primitive polynomial, including the
x^T term) and `ERRS` (designed correction capability; the zeros are
α^1 … α^(2·ERRS)). N, r, NK and K are derived from them. The elaboration
reports an error if g(x) has fewer than two factors, because then there is
nothing to split.

## Sizes

Counted from the nonzero coefficients of the computed constants (two-input
XORs, datapath flip-flops):

| code | T | r | NK | XOR (Step 1/2/3/4) | XOR bound from the source | flip-flops |
|---|---|---|---|---|---|---|
| (15, 5) | 4 | 3 | 10 | 24 (2/8/12/2) | 60 | ≈ 50 |
| (2047, 1926), default | 11 | 11 | 121 | 720 (46/48/616/10) | 1595 | ≈ 1560 (1577 after synthesis, with control) |
| (8191, 7684) | 13 | 39 | 507 | 10310 (212/282/9778/38) | 20865 | ≈ 20750 |

Step 3 dominates: the `w_i'` multipliers hold `deg g − deg w_i` flip-flops
each. The bound column is r·deg g + 2r(t+1), the form that gives the source's
figures for the two long codes. The source's general expression,
2r(t+1) + r(deg g + 2), is larger by 2r.

## What bounds the clock

* Division feedback: at most `deg w_i ≤ T` loads.
* Multipliers: XOR trees of depth ⌈log2(nz+1)⌉ over the nonzero taps. This is
  at most about 4 levels in Step 1 and about 7 levels in Step 3 at the default
  size.
* Stage A's critical path: the Step-1 XOR tree, then one XOR into the divider.
* Not bounded by T: the shared controls. `a_bit` reaches 2r loads: every
  branch's Step-1 tap network and delay line. `a_en`, `a_clr`, `b_en` and
  `b_load` go to every flip-flop of their stage. The CRT argument does not
  cover these broadcast nets. In a real layout they need a buffer tree, or a
  pipeline register per group of branches.

## Departures and choices

These points follow the source:

- the CRT decomposition;
- the order of the four steps;
- Step 1 working on `m(x)·x^(n-k)` itself.

These are choices made here:

* **Multiplier form.** Direct-form (FIR) multipliers. The source says only
  "multiplication LFSR", which is usually drawn in transposed form, where the
  input bit fans out to every tap.
* **Step 2 to Step 3.** The remainder is handed over in parallel. Step 3 then
  runs as a separate pipeline stage overlapping the next message.
* **Step 4 cost.** One XOR tree of r inputs, i.e. r − 1 XORs, instead of the
  "summation LFSR" with up to r(t+1) XORs in the source's count.
* **Constants.** The primitive polynomials x^11+x^2+1 and x^13+x^4+x^3+x+1 are
  not given in the source. Any primitive polynomial gives a valid code of the
  same parameters, with different constants.
* **Inverse u_i.** Computed by exponentiation in GF(2)[x]/w_i rather than by
  the extended Euclidean algorithm. The result is the same.
* **Interface.** Bit-serial valid/ready input, serial parity output,
  asynchronous reset, and the extra hand-over cycle.

Not implemented: folding x^(n-k) into the constants (using `Rem_{w_i}(u_i·x^(n-k))`
in place of `u_i`) would remove the n − k zero cycles, but it is not part of
the described architecture. Parallel (several bits per cycle) input is also
not implemented.

## Files

| file | content |
|---|---|
| `rtl/crt_bch_pkg.sv` | constant functions and types |
| `rtl/gf2_mul_lfsr.sv` | Steps 1 and 3: constant multiplier |
| `rtl/gf2_div_lfsr.sv` | Step 2: remainder LFSR |
| `rtl/crt_lift.sv` | Step 3: remainder register plus `w_i'` multiplier |
| `rtl/crt_sum.sv` | Step 4 |
| `rtl/crt_bch_ctrl.sv` | sequencer |
| `rtl/crt_branch.sv` | one branch (Steps 1–3) |
| `rtl/crt_bch_encoder.sv` | top |
| `tb/tb_bch_ref_pkg.sv` | independent reference: g from its roots, direct-division parity, syndromes |
| `tb/tb_*.sv` | self-checking testbenches, described below |

## Verification

Every testbench prints `TB_RESULT checks=N failures=M` and has a cycle
watchdog.

| testbench | what it checks |
|---|---|
| `tb_gf2_mul_lfsr` | 30 random products, idle cycles and clear-over-enable |
| `tb_gf2_div_lfsr` | remainder after every input bit, against a table of `x^i mod w` |
| `tb_crt_lift` | 20 remainders × 121 coefficients against `w_1'` fixed in the bench |
| `tb_crt_sum` | 400 random cycles |
| `tb_crt_bch_ctrl` | cycle-exact model at K = 5, NK = 10, T = 4 with random `in_valid` |
| `tb_crt_bch_pkg` | the published (15,5) factors and g; fixed g for the default code; for all branches of three codes, `w·w' = g`, `u·w' ≡ 1 mod w`, `deg u < deg w` |
| `tb_crt_bch_encoder` | **default size**, five code words (all-zero, all-one, random) |
| `tb_crt_bch_encoder_ex1` | (15,5) code, 40 code words; branches of unequal degree |
| `tb_crt_bch_encoder_ex3` | (8191,7684) code, three code words |

In the three end-to-end benches the driver inserts random stalls and keeps
`in_valid` high while the encoder is busy. Each bench checks:

- every parity bit, against a plain long division by a g(x) built from its
  roots;
- that every code word has all 2·ERRS syndromes zero;
- the NK + T + 2 latency, and that the NK parity bits come on consecutive
  cycles;
- that stalls, held-valid cycles and parity/input overlap each occurred.

All benches pass. The default-size run takes well under a second. The
(8191,7684) build spends about ten seconds evaluating the constant functions.

To run a bench with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal \
    -y rtl -y tb rtl/crt_bch_pkg.sv tb/tb_bch_ref_pkg.sv \
    --top-module tb_crt_bch_encoder tb/tb_crt_bch_encoder.sv
./obj_dir/Vtb_crt_bch_encoder
```

To build another code, set `T`, `PRIM` and `ERRS` on `crt_bch_encoder`. In a
copy of `tb_crt_bch_encoder_ex1.sv`, change the local parameters `T`, `PRIM`,
`ERRS`, `NK` and `G_EXPECTED`. `G_EXPECTED` can be taken from
`crt_bch_pkg::gen_poly`. The syndrome check does not depend on it.
