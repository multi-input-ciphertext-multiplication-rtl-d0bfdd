# A pipelined three-input ciphertext multiplier for RNS-CKKS

Homomorphic encryption lets a server compute on encrypted numbers. In the
CKKS scheme multiplication is the expensive operation. Multiplying two
ciphertexts gives a result with three polynomials. That result must be
*relinearized* back to two polynomials with an evaluation key, and then
*rescaled* to remove the extra scale factor. Products of many ciphertexts are
normally built from a tree of two-input multipliers, and every node repeats
this whole sequence.

This design multiplies **three** ciphertexts in one pass. The product
`(a0 + a1 s)(b0 + b1 s)(c0 + c1 s)` gives four polynomials `d0 + d1 s + d2 s^2 + d3 s^3`.
Two evaluation keys (`ek2` for `s^2`, `ek3` for `s^3`) relinearize them back
to two polynomials. Two rescaling steps then follow, because the product
carries the scale factor twice. The datapath is arranged so that as few
number-theoretic transforms (NTTs) as possible sit on the path and in the
area:

* the ModDown step of key switching is merged into the key sums, so each
  output needs one inverse transform instead of several;
* the first rescaling works on coefficient-domain data that relinearization
  already produces, so it needs no transform at all;
* only the last rescaling (`RS*`) transforms back to the NTT domain.

The design also contains the *multi-RS* unit, which performs several
rescalings of an NTT-domain polynomial together. It uses `MU` inverse and
`L-MU` forward transforms, where separate rescalings need `L` inverse and
`L-MU` forward transforms. The top level uses it with two levels on
`d0..d3`. That gives the output a three-input group produces inside a larger
multi-input multiplier tree.

Everything is a fixed-latency pipeline that takes **two coefficients per
clock** in every RNS channel, with no stalls. The default parameters are
N = 2^16 coefficients, 64-bit residues, and L = 24 ciphertext moduli plus
K = 24 key-switching moduli.

## Data representation

A ciphertext polynomial is held in RNS form. It has one residue polynomial
per modulus `q_0 .. q_{L-1}`, and each of these is called a *channel*. All
channels are processed in parallel, in lock-step. The key-switching basis
`p_0 .. p_{K-1}` only exists inside relinearization.

A polynomial of one channel is streamed as a **frame** of N/2 cycles,
marked by `in_sof` on its first cycle and `in_valid` on all of them. There are
two stream orders. The transforms convert between them without any
reordering buffer:

| domain | cycle `c` carries | produced by | consumed by |
|---|---|---|---|
| coefficient ("standard") | `a[c], a[c + N/2]` | `intt` | `ntt` |
| NTT (bit-reversed) | `A[2c], A[2c+1]` of the bit-reversed NTT array | `ntt` | `intt` |

In the NTT domain a polynomial product is an element-by-element product, so
any two NTT-domain frames in the same order can be multiplied pair by pair.
The evaluation keys are stored in this same order.

Frames may follow each other back to back. Otherwise the gap between them
must be at least N/4 idle cycles: the delay-commutators restart their
switching phase at `in_sof`, and a shorter gap would mix two frames. The
`valid` and `sof` flags travel through every unit in a shift register beside
the data. Only this control state is reset (`rst_n`, asynchronous, active
low). Data registers and memories are not reset.

## Modular arithmetic

All moduli must satisfy `2^(W-1) <= q < 2^W`, so that every modular addition
needs only one conditional correction. The testbenches pick NTT-friendly
primes `q = 1 mod 2N` at the top of the W-bit range.

* `modmul` is a Barrett multiplier in three stages, with one W x W
  multiplier per stage. The stages are: the product `x = a*b`; the quotient
  estimate `((x >> (W-1)) * mu) >> (W+1)`, with `mu = floor(2^(2W)/q)`;
  and `x - q3*q` followed by at most two subtractions of q. The modulus and
  `mu` travel with the operands, so the modulus may change from one cycle to
  the next.
* `modarith.svh` holds the combinational modular add, subtract, reduce and
  halve functions. Halving adds q to an odd value, then shifts right.

## Number theoretic transforms (`ntt`, `intt`, `ntt_pe`, `commutator`, `delay_line`)

The transforms are the hardest part of the design, and they dominate its
area. Each one is a chain of `log2 N` butterfly ranks (`ntt_pe`) joined by
delay-commutators (`commutator`). Every rank receives one butterfly pair per
clock on its two lanes.

**Forward (Cooley-Tukey).** Rank `s` (0 .. log2N-1) pairs array indices that
differ by `N/2^(s+1)`. It computes `y0 = x0 + w x1` and `y1 = x0 - w x1` with
the twiddle `w = psi^bitrev(k)`, where `k = 2^s + (c >> (log2N-1-s))` for
the pair at frame position `c`. Here `psi` is a primitive 2N-th root of
unity, which makes the transform negacyclic (modulo `x^N + 1`). Rank `s`
therefore reads only `2^s` distinct twiddles and owns a memory of exactly
that size. A commutator with delay `2^(log2N-2-s)` follows every rank except
the last.

**Inverse (Gentleman-Sande).** This is the mirror image. Rank `r` pairs
indices that differ by `2^r`. It computes `y0 = (x0 + x1)/2` and
`y1 = w (x0 - x1)/2` with `w = psi^-bitrev(k)`, and it owns `N/2^(r+1)`
twiddles. The commutator after rank `r` has delay `2^r`. Each rank halves its
outputs, so the final factor `1/N` is spread over the ranks and needs no
extra multiplier.

**Commutator.** The lower lane is delayed by `D = 2^Q`. A 2x2 switch then
crosses the lanes while bit `Q` of the frame position is 1, and the upper
lane is delayed by `D` after the switch. The effect is that the lane bit of
the array index trades places with bit `Q` of the position. That is what the
next rank needs.

**Delays.** Every delay of two or more cycles is a `delay_line`: a memory
of `D-1` words with one rotating address, plus an output register. This is
the cyclic-memory form of the delay elements, which maps to SRAM, rather
than a register chain.

**Latency.** One PE has five stages: operand and twiddle register, three
Barrett stages, and one adder stage. For the inverse transform the adder
comes first. The N/2-1 cycles of commutator delay add to this, so one
transform takes `ntt_lat(N) = N/2 - 1 + 5 log2 N` cycles (`he_pkg`).

**Twiddle loading.** A broadcast bus (`tw_we`, `tw_addr`, `tw_data`) writes
table index `k` = 1..N-1. The value is `psi^bitrev(k)` for the forward
transform or `psi^-bitrev(k)` for the inverse one. A transform sends index
`k` to the rank whose range contains it. In the composite blocks, `tw_inv`
selects whether a write goes to the inverse or to the forward transforms.
`tw_q[j]` or `tw_p[i]` supplies the value for each channel, so one pass of
N-1 writes per direction loads every transform of the chip.

## Three-input product (`pm3`)

The product uses two levels of Karatsuba, with 8 modular multipliers per
coefficient instead of the 12 of the schoolbook form:

```
F0 = a0 b0,  F2 = a1 b1,  P = (a0 + a1)(b0 + b1),  F1 = P - F0 - F2
d0 = F0 c0,  d3 = F2 c1,  G = F1 c1,  H = F2 c0,  M = (P - F2)(c0 + c1)
d1 = M - d0 - G,   d2 = G + H
```

The latency is 9 cycles: input adders, multiplier, subtractors, multiplier,
output adders. The inputs and `d0..d3` are in the NTT domain.

## Relinearization with merged ModDown (`relin3`, `modup`, `bconv`, `evk_mem`)

Textbook key switching raises `d2` and `d3` to the basis `Q u P` (ModUp) and
multiplies them with the keys. It then divides by `P` (ModDown) and adds the
result to `d0, d1`. This unit rearranges the computation so that each of the
two outputs needs only one inverse transform per channel.

* **Q part, channel j:** `C_l = d_l + d2 * EVK2_l + d3 * EVK3_l`, followed
  by `INTT_{q_j}`. The q-part keys are stored already multiplied by
  `P^-1 mod q_j` (`EVK = P^-1 * ek`). The `P^-1` factor of ModDown has
  therefore been applied before the sum, and `d_l` can be added in the NTT
  domain.
* **P part, channel i:** `~d_t = ModUp(d_t)` for t = 2, 3 (`modup`: L inverse
  transforms, basis conversion, K forward transforms). Then
  `Cp_l = ~d2 * EK2_l + ~d3 * EK3_l`, then `INTT_{p_i}`, then a *scaled*
  basis conversion back to Q. That conversion uses `c1_i = (P/p_i)^-1 mod p_i`
  and `c2_ji = p_i^-1 mod q_j`, which equals `P^-1` times the ordinary
  conversion.
* **Output:** `c*_l = cq_l - cp_l (mod q_j)`, in the coefficient domain.

`bconv` computes `y_i = sum_j [x_j c1_j]_{q_j} * c2_ij mod p_i` for one
coefficient in 7 cycles. That is two multiplier ranks plus a one-stage
modular sum. The same unit serves ModUp and the scaled conversion; only its
constants differ. There is one unit per lane.

The q path is shorter than the p path. Its results wait in cyclic delay
memories of `UP_LAT + 7` cycles. Keys are held in one `evk_mem` per channel
(`L + K` of them). Each word holds the two coefficients of one stream
position for the four key polynomials `ek2_0, ek2_1, ek3_0, ek3_1`. A
per-path position counter reads each memory in step with the data. At the
defaults the key memories hold 48 x 32768 words of 512 bits, which is 96 MiB.

The latency is `3 ntt_lat(N) + 21 = 1.5 N + 18 + 15 log2 N` cycles. The unit
uses 2K forward transforms, 4L + 2K inverse transforms and 8L + 8K key
multipliers.

## Rescaling (`rs`, `rs_star`, `multi_rs`)

* `rs` divides by the last modulus in the coefficient domain:
  `out_j = (c_j - c_{L-1}) * q_{L-1}^-1 mod q_j`. It takes 4 cycles and
  needs no transform, because relinearization already delivers coefficient
  data.
* `rs_star` (RS*) is the last rescaling: `rs` followed by a forward
  transform of every remaining channel, so the product leaves in the NTT
  domain. It takes `4 + ntt_lat(N)` cycles.
* `multi_rs` rescales an NTT-domain polynomial by the top `MU` moduli at
  once:
  1. inverse-transform only the `MU` channels being dropped;
  2. rescale among them in `MU-1` coefficient-domain rounds;
  3. form the correction `b_e = sum_k g[e][k] a_k` for every kept channel,
     with `g[e][k] = (q_{L-MU} ... q_{L-MU+k})^-1 mod q_e`, and
     forward-transform it;
  4. output `g[e][MU-1] * A_e - B_e`, where `A_e` is the kept channel's NTT
     data, delayed in a cyclic memory.

  This uses `MU` inverse and `L-MU` forward transforms, where separate
  rescalings use `L` inverse and `L-MU` forward transforms. The latency is
  `2 ntt_lat(N) + 4(MU-1) + 5`.

## Top level (`cmult3_top`)

```
ct1, ct2, ct3 --> pm3 --d0..d3--> relin3 --> rs --> rs_star --> ct_out  (L-2 channels, NTT domain)
                       \--d0..d3--> 4 x multi_rs (MU = 2) -----> grp_out (4 polys, L-2 channels)
```

| output | latency (cycles after the input frame) | at N = 2^16 |
|---|---|---|
| `ct_out` | `2N + 34 + 20 log2 N` | 131 426 (0.33 ms at 2.5 ns) |
| `grp_out` | `2 ntt_lat(N) + 18` | 65 712 |

`grp_out` is the product of the three inputs before relinearization, brought
back to the working scale by one two-level rescaling. In a larger
multi-input tree this is the form in which a three-input group result is
passed on.

**Configuration.** These values are static while frames flow. The host
computes them:

| port | value |
|---|---|
| `q, p` / `muq, mup` | moduli / `floor(2^(2W)/m)` |
| `up_c1[j]`, `up_c2[i][j]` | `(Q/q_j)^-1 mod q_j`, `(Q/q_j) mod p_i` |
| `dn_c1[i]`, `dn_c2[j][i]` | `(P/p_i)^-1 mod p_i`, `p_i^-1 mod q_j` |
| `rs_qinv[j]`, `rss_qinv[j]` | `q_{L-1}^-1 mod q_j`, `q_{L-2}^-1 mod q_j` |
| `mrs_rsc[1][0]` | `q_{L-1}^-1 mod q_{L-2}` (other entries unused for MU = 2) |
| `mrs_g[e][0]`, `mrs_g[e][1]` | `q_{L-2}^-1`, `(q_{L-2} q_{L-1})^-1 mod q_e` |
| twiddle bus | `psi_j^(+-bitrev(k))` for k = 1..N-1, in two passes (`tw_inv` = 0 and 1) |
| key bus | word `c` of channel `m`: `key[m][e][2c], key[m][e][2c+1]`; `m < K` holds `ek^(m)`, `m = K + j` holds `P^-1 ek^(K+j)` |

**Unit counts at the top level.** These match the paper's complexity table
for the improved three-input multiplier. There are 2K + 2L - 4 forward and
4L + 2K inverse transforms. There are four basis-conversion units, each
counted as two lanes. There are 32L + 8K - 12 modular multipliers outside the
transforms and conversions. The `multi_rs` path adds 8 inverse and
4(L-2) forward transforms on top of this.

## Where this RTL departs from the paper

* **PM latency** is 9 clocks instead of 8, and rs plus RS* take
  `0.5N + 7 + 5 log2 N` instead of `0.5N + 8 + 5 log2 N`. The total,
  `2N + 34 + 20 log2 N`, is the paper's.
* **The input ciphertext buffer** (3 x 2 x L x N x w bits, about 72 MB) is not
  built. The three inputs arrive as streams on ports. The paper gives only
  its size.
* **Multi-input trees** (4 to 12 and 17 inputs) are not built. Those trees
  need extended relinearization with more keys and a partition controller.
  Only `multi_rs` and the three-input group output exist.
* **Figure label.** The paper's 2-RS figure labels the inverse transform of
  channel L-2 with modulus `q_{L-1}`. This RTL transforms each channel with
  its own modulus, as the algorithm text does.
* **Own choices** cover everything the paper leaves open: the stream order
  and flags, the commutator schedule, the halving inverse butterfly, the
  twiddle and key load buses, the key word layout, the alignment delay
  memories, reset of control state only, and configuration on ports.

## Simulation

Run the testbenches with Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing -Irtl -Itb tb/he_ref_pkg.sv rtl/he_pkg.sv \
    $(ls rtl/*.sv | grep -v he_pkg) tb/tb_cmult3_top.sv --top-module tb_cmult3_top
./obj_dir/Vtb_cmult3_top
```

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a
watchdog. `he_ref_pkg` is a plain software model used as the reference: a
prime search, textbook NTT and INTT, basis conversion, rescaling and
relinearization, written with 128-bit products and `%`. It is independent of
the hardware structure. The testbenches are:

| testbench | sizes | checks |
|---|---|---|
| `tb_modmul` | W = 64 | 2000 random and corner-case products against `%`; latency 3 |
| `tb_ntt`, `tb_intt` | N = 32, W = 30 | four frames (three back to back, one after a gap) against the textbook transform; latency |
| `tb_bconv` | 4 -> 3 moduli | every cycle against the formula; latency 7 |
| `tb_modup` | N = 16, L = K = 4 | three frames; latency |
| `tb_pm3` | L = 3 | every cycle against the schoolbook product; flags; latency 9 |
| `tb_relin3` | N = 16, L = K = 4 | three frames against textbook ModUp / key product / ModDown; latency |
| `tb_evk_mem` | N = 64 | write, scrambled read-back, partial overwrite |
| `tb_rs`, `tb_rs_star` | 4 channels | formula; flags; latency |
| `tb_multi_rs` | N = 16, L = 5, MU = 2 | against two separate rescalings; latency |
| `tb_cmult3_top` | N = 16, W = 30, L = K = 4 | end to end: both outputs, both latencies, and a count of ModUp, relinearization, rs, RS*, multi-RS frames, back-to-back frames and a frame after an idle gap |

The largest configuration simulated end to end is N = 16 with four q and
four p channels. N = 32 was used for the standalone transforms. All the RTL
is parameterised and elaborates at the full size (N = 2^16, W = 64,
L = K = 24), but no testbench runs the full-size top. At that size the top
contains about 400 transforms and several thousand 64-bit multipliers.
Verilator turns it into roughly 320 C++ files, close to 1 GB of source,
which takes hours to compile. The reference package can find 64-bit
NTT-friendly primes (deterministic Miller-Rabin), but running
`tb_cmult3_top` with the full-size parameters has not been tried.
