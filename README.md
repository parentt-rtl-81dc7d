# PaReNTT: a feed-forward RNS + NTT multiplier for long polynomials

Homomorphic-encryption schemes such as BGV, BFV and CKKS spend most of their
time multiplying polynomials of degree n−1 modulo `x^n + 1` with large
coefficients, here n = 4096 and a 180-bit coefficient modulus `q`. This RTL
does that with two ideas, both taken from the PaReNTT architecture:

1. **Residue arithmetic.** `q` is the product of six 30-bit primes `q_i`.
   Each 180-bit coefficient is split into its six residues. Six independent
   30-bit polynomial multipliers run side by side. An inverse CRT puts the
   180-bit result back together. No arithmetic wider than 30×30 bits is needed
   on the main datapath.
2. **A fully feed-forward two-parallel NTT pipeline.** Each 30-bit
   multiplier is a forward NTT for each operand, a point-wise product and an
   inverse NTT, all streaming two coefficients per clock. The forward and
   inverse transforms use different folding orders. As a result, the
   bit-reversed order the forward NTT produces is exactly the order the inverse
   NTT wants. No reorder buffer sits between them, and a new multiplication can
   start every n/2 cycles.

The primes have a special shape, `q_i = 2^30 − β_i` with
`β_i = 2^v1 ± 2^v2 − 1`. Because of it, reducing a 180-bit number modulo
`q_i` needs no wide multipliers, only shifters and adders ("SAUs") plus
Barrett reduction.

## Data flow and interface

```
 a_lo,a_hi ─┬─ residual_unit x6 ─┐                                      ┌─ inverse_crt ─ p_lo
 b_lo,b_hi ─┘  (per lane, per q_i)├─ poly_mult x6 (one per prime q_i) ──┤
                                  ┘  NTT(a), NTT(b) → ⊙ → iNTT          └─ inverse_crt ─ p_hi
```

`parentt_top` (default `N = 4096`):

| port | width | meaning |
|---|---|---|
| `clk`, `rst_n` | 1 | clock; asynchronous active-low reset (resets only the valid/first tags) |
| `in_valid`, `in_first` | 1 | a coefficient pair is present / it is the first pair of a block |
| `a_lo`, `a_hi`, `b_lo`, `b_hi` | 180 | coefficients `u` and `u + n/2` of both operands, `u = 0 … n/2−1` |
| `out_valid`, `out_first` | 1 | same tags at the output |
| `p_lo`, `p_hi` | 180 | coefficients `u` and `u + n/2` of `a·b mod (x^n+1, q)`, natural order |

A block is n/2 consecutive valid cycles, starting with `in_first`. Blocks may
follow each other with no gap. There is no back-pressure, because every unit
is a fixed-latency pipeline. Latencies, with m = log2 n:

| unit | latency (cycles) | at n = 4096 |
|---|---|---|
| PE (NTT or iNTT butterfly) | 3 | 3 |
| NTT unit, iNTT unit | 3m + n/2 − 1 | 2083 |
| `poly_mult` | 2·(3m + n/2 − 1) + 1 = n + 6m − 1 | 4167 |
| `residual_unit` | 3 | 3 |
| `inverse_crt` | 2 + ⌈log2 6⌉ = 5 | 5 |
| `parentt_top` | n + 6m + 7 | 4175 |

Without pipeline registers the latency would be n, which is the figure quoted
for the architecture. Each pipeline register adds one cycle to that.

## The NTT and the iNTT pipelines (the part that takes some thought)

The transform is the negative-wrapped NTT:
`Ã_k = Σ_j a_j ψ^((2k+1)j) mod q_i`, where ψ is a primitive 2n-th root of
unity. Multiplying Ã and B̃ point by point and transforming back gives the
negacyclic product directly, so no zero padding and no separate pre- or
post-twist are needed.

**Forward NTT (`ntt_unit`, `ntt_pe`).**
- A chain of m Cooley–Tukey butterflies. Each butterfly computes
  `x0 + w·x1` and `x0 − w·x1`.
- Between stage s and stage s+1 sits a **delay-switch-delay (DSD)** with
  `D = 2^(m−s−2)` registers per set.
- Input pairs arrive in natural order, `(a_u, a_{u+n/2})`.
- Stage s pairs elements that are `n/2^(s+1)` apart. The DSD after stage s
  re-pairs the stream for stage s+1 by holding one lane for D cycles and
  swapping the lanes on alternate groups of D cycles.
- Output pair u is `(Ã_r, Ã_{r+n/2})` with `r = bitrev_{m−1}(u)`.
- Each PE has its own twiddle ROM with 2^s entries, filled at elaboration.
  Stage s, group g uses `ψ^((n/2^(s+1))·(2·bitrev_s(g)+1))`.

**Inverse NTT (`intt_unit`, `intt_pe`).**
- A chain of m Gentleman–Sande butterflies, each computing
  `(x0+x1)/2` and `(x0−x1)/2 · w`.
- DSDs with `D = 2^s`.
- This is the same pipeline shape as the forward NTT, folded the other way
  round. It therefore consumes exactly the bit-reversed order that the forward
  NTT produces, and its output comes out in natural order
  `(p_u, p_{u+n/2})`.
- At cycle u of a block the stage-s PE works on node `y = bitrev_{m−1}(u)`.
  Its twiddle is `ψ^(−2^s(2j+1))` with `j = y mod (n/2^(s+1))`. That ROM has
  n/2^(s+1) entries.
- The factor n^−1 is spread over the stages as one halving per output:
  - even x: `x/2 = x >> 1`;
  - odd x: `x/2 = (x >> 1) + (q+1)/2`.
  This costs a shift, an adder and a mux instead of a multiplier.

**DSD (`dsd`).**
- Two D-deep register sets and two muxes.
- The select signal is the MSB of a counter modulo 2D that restarts on
  `in_first`.
- While it is 0 the lanes pass straight through; while it is 1 they are
  swapped.
- The unit's latency is D.

Every unit carries a `valid`/`first` tag pair alongside the data. The
counters that drive twiddle addresses and DSD selects restart from
`in_first`, so blocks can be streamed back to back or with gaps.

## Residual coefficients: 180 bits → six 30-bit residues

The `residual_unit` computes `a mod q_i` for one prime as follows.
- Split `a` into six 30-bit segments `z_0 … z_5`. Then
  `a ≡ Σ z_k·β^k (mod q_i)`, because `2^30 ≡ β (mod q_i)`.
- Multiplying by β is a **shift-add unit** (`sau`): `x·β = (x<<v1) ± (x<<v2) − x`.
  The word length grows by v1+1 bits per SAU.
- The six segments form two blocks of three (d = 2, t' = 3). Within a block,
  segment k passes through k chained SAUs, and the block's terms are added.
- Block 0's sum goes straight to the final adder. Block 1's sum is first
  reduced by Barrett and then multiplied by the constant `[β^3]_{q_i}` in a
  single 30×30 multiplier, so both partial sums have bounded width.
- A last Barrett reduction of width μ = 75 bits produces the residue.
- Three register stages.

For this to fit in μ = 75 bits, each prime must satisfy
`30 + 2(v1+1) + 2 ≤ 75`. Barrett reduction (`barrett_reduce`) computes
`qh = (x·⌊2^W/q⌋) >> W`, forms `qh·q` with shifts and adds (using the special
form of q), subtracts, and does one conditional subtraction of q.

## The primes

| i | q_i | v1 | v2 | β_i | ψ (2n-th root, n = 4096) |
|---|---|---|---|---|---|
| 0 | 1073479681 | 19 | 18 | 2^19 − 2^18 − 1 | 371836615 |
| 1 | 1073184769 | 19 | 15 | 2^19 + 2^15 − 1 | 587512727 |
| 2 | 1073233921 | 19 | 14 | 2^19 − 2^14 − 1 | 424392583 |
| 3 | 1073643521 | 17 | 15 | 2^17 − 2^15 − 1 | 521398294 |
| 4 | 1073692673 | 16 | 14 | 2^16 − 2^14 − 1 | 510015274 |
| 5 | 1073668097 | 16 | 13 | 2^16 + 2^13 − 1 | 1047115509 |

- Every q_i is ≡ 1 mod 8192 (= 2n), so the NTT exists.
- Each ψ is `g^((q−1)/8192)` for the smallest generator g. For smaller n,
  the RTL uses `ψ^(4096/n)`.
- These six are exactly the primes of this shape that meet the word-length
  bound above. They were found by exhaustive search, since the source
  architecture does not list its primes.
- Their product Q is a 180-bit number (`parentt_pkg::Q`).
- Everything derived from Q is computed at elaboration:
  - the CRT constants `q*_i = Q/q_i` and `q~_i = (q*_i)^−1 mod q_i`;
  - the twiddle tables;
  - `[β^3]_{q_i}`.

  No data files are read.

## Inverse CRT

`inverse_crt` takes the six residues of one output coefficient and returns
`Σ [p_i·q~_i]_{q_i} · q*_i mod Q`. The steps are:
- Each term is a 30×30 modular multiply followed by a 30×150-bit integer
  multiply.
- The six terms are added in a three-level binary tree of mod-Q adders. Each
  adder is an add followed by a conditional subtraction of Q.
- The latency is 5 cycles. Two instances serve the two output lanes.

## Where this RTL departs from, or adds to, the source architecture

- **Primes.** The source states one prime constraint as
  `⌈(μ−1)/n_β⌉ > v1 > v2`. Its own word-length derivation instead requires
  `μ ≥ v + n_β(v1+1) + 1`. This RTL follows the word-length rule, which
  yields six primes. The source's prime-count table gives eight for this
  setting, so the two counts differ.
- **iNTT halving mux.** The drawing of the iNTT butterfly labels the mux
  inputs the other way round from what the arithmetic needs. The RTL follows
  the arithmetic: odd values take the `+(q+1)/2` path.
- **Pipelining.** The architecture can be pipelined at any depth. The depths
  chosen here are 3 per PE, 1 after the point-wise product, 3 in the residual
  unit and 5 in the inverse CRT. Barrett, SAU and the modular multiplier are
  combinational and are registered by the blocks around them.
- **Twiddle storage** is one small constant table per PE, computed at
  elaboration. The source does not describe how twiddles are stored.
- **Inverse CRT** is drawn for four residues in the source. It is generalized
  here to six with an adder tree.
- **Interface and reset.** The external ordering (lane 0 = coefficient u,
  lane 1 = u+n/2) and the valid/first tags are this design's choices. Only the
  tags are reset.
- **Not included.** The alternative four-prime, 45-bit configuration and its
  residual unit (an extra Barrett unit inside the SAU chain) are not included.
  Neither are the baseline designs used only for comparison.

## Files

- `rtl/parentt_pkg.sv`: widths, the prime table, the modular helper functions
  used at elaboration, and the latency constants.
- `rtl/barrett_reduce.sv`, `rtl/mod_mult.sv`, `rtl/sau.sv`: arithmetic.
- `rtl/ntt_pe.sv`, `rtl/intt_pe.sv`, `rtl/dsd.sv`, `rtl/ntt_unit.sv`,
  `rtl/intt_unit.sv`: transforms.
- `rtl/poly_mult.sv`: one residue polynomial multiplier.
- `rtl/residual_unit.sv`, `rtl/inverse_crt.sv`: conversion into and out of
  residue form.
- `rtl/parentt_top.sv`: the whole multiplier.
- `tb/`: one self-checking bench per module. Each compares against a model
  computed directly in the bench (`%`, schoolbook sums, direct DFT sums) and
  ends by printing `TB_RESULT checks=… failures=…`.

## Simulating

Compile the package first:

```
verilator --binary --timing --assert -Irtl --top-module tb_parentt_top \
    rtl/parentt_pkg.sv $(ls rtl/*.sv | grep -v pkg) tb/tb_parentt_top.sv
./obj_dir/Vtb_parentt_top
```

Test coverage:
- `tb_parentt_top` runs the whole multiplier at n = 16 on three
  back-to-back blocks. It checks every output against a schoolbook negacyclic
  product taken modulo Q, and checks the latency. It also counts, and
  requires to occur, each of these: back-to-back blocks, DSD pass and swap
  cycles, odd and even halving in the iNTT, Barrett correction steps, and the
  fixed latency.
- `tb_parentt_top_full` runs the default n = 4096 design on two back-to-back
  blocks. It checks every output coefficient modulo each of the six primes
  against a schoolbook product, checks that it is below Q, and checks the
  latency and the n/2-cycle block spacing. It takes about a minute to build
  and seconds to run.

## Changing it

- **N** is a parameter of `parentt_top`. It may be any power of two up to
  4096 with the existing primes. The benches use 16, 32 and 4096.
- **Other primes or other t, v:** edit `MODULI`, `T`, `V`, `TP`, `DBLK` and
  `MU` in the package. Each prime must satisfy `q ≡ 1 mod 2·NMAX`. The widest block sum
  plus the final addition must also fit in MU bits; the residual unit checks
  this at elaboration.
- **Pipeline depth:** `PE_LAT`, `RES_LAT` and `ICRT_LAT` in the package
  describe the register stages built into the modules. Change them together
  with the modules.
