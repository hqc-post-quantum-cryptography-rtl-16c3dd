# GMD soft-decision Reed-Solomon decoding for HQC-128 decryption

HQC decryption ends with decoding a concatenated code: every 8-bit symbol of a
Reed-Solomon (RS) codeword was sent as a first-order Reed-Muller RM(128,8)
codeword, repeated three times. The usual hardware decodes the RM part to hard
symbols and then runs a hard-decision RS decoder, which needs RS(46,16) to
reach the failure rate HQC-128 asks for. The RM decoder, however, also knows how
sure it is of each symbol: the size of the winning Hadamard correlation
(`max1`). A generalized minimum-distance (GMD) RS decoder uses that: it tries
t+1 decodings, the k-th with the 2k least reliable symbols declared erased, and
keeps one that works. With GMD, a shorter RS(36,16) code is enough, which cuts the
HQC-128 ciphertext/key polynomial length from 17669 to 13829 bits.

This repository holds synthesizable SystemVerilog for the decryption back end
that does this. It starts from c' = v - u·y (the sparse polynomial product is
an input) and returns the 128-bit message. It follows the architecture of
J. Cai and X. Zhang, "HQC Post-Quantum Cryptography Decryption with Generalized
Minimum-Distance Reed-Solomon Decoder". Where that description stops short,
this design makes its own choices. They are listed in
[Departures and own choices](#departures-and-own-choices).

## Data flow

```
 c' segment (3 x 128 bits) ──► rm_decoder ──┬─ symbol r_l ──► rs_buffer ─────────────────────────────┐
   (36 per word, l = 0..35)                 └─ max1 ───────► rel_sorter (20 least reliable l)         │
                                                                  │ alpha_0..alpha_19                 │
 rs_buffer ──► rs_syndrome ──► rs_kes ──┬─────────────── trial 0 ─┼──►┐                               │
                                        └─► gmd_erasure_add ──────┘   mux ─► gmd_poly_sel ─► rs_mag_comp ─► cw / msg
                                              trials 1..10 ───────────►┘     (first success)   (r_l + e_l)
```

`hqc_gmd_decrypt` is the top level. It decodes one word at a time: 36 RM
decodings, then the RS decoder, then `done`.

| Size | Value |
|---|---|
| RM code, copies | RM(128,8), m = 3 (384 bits per RS symbol) |
| RS code | RS(36,16) over GF(2^8), t = 10, generator roots alpha^1..alpha^20 |
| Field | GF(2^8), p(x) = x^8+x^4+x^3+x^2+1, alpha = 0x02 |
| GMD trials | 11 (trial k erases the 2k least reliable symbols) |
| Parallelism | KES folded by 3; erasure addition L_e = 6 lanes; Chien search L_c = 3 points/cycle |

## RM stage

`rm_combine` maps each bit to +1 (for '1') or -1 (for '0') and adds the three
copies coordinate by coordinate. The result is 128 values in [-3, 3].
`rm_fht` computes their Hadamard transform
F[k] = Σ_j x_j (-1)^popcount(j&k). One constant-geometry butterfly stage of 128
adders/subtractors is used seven times, so a transform takes 8 clock edges
(load + 7).
`rm_peak` is a comparison tree that finds the largest |F[k]|. The decoded
symbol is {F[k] > 0, k}. With the +1-for-'1' mapping, the first bit is the
RM message bit of the all-ones row. The bench's encoder is
bit_j = s[7] xor parity(s[6:0] & j). The magnitude `max1` (0..384) is the
symbol's reliability. `rm_decoder` wraps the three blocks with a valid/ready
handshake and returns one symbol 9 clock edges after it accepts a segment.

`rel_sorter` is an insertion machine with 20 cells. Each cell is a register,
a comparator and a multiplexer, and the cells stay sorted by `max1`, smallest
first. After the 36th symbol, cell i holds the position of the i-th least
reliable symbol. That position is the erasure alpha_i added in iteration i of
the erasure addition. On equal reliabilities, the earlier position comes first.

## RS decoder

### Syndromes and key equation

`rs_syndrome` runs 20 Horner loops, S_j ← S_j·alpha^j + r_l. It reads r_35
first from the buffer, so it takes 36 cycles.

`rs_kes` is an inversionless Berlekamp-Massey solver. Its outputs are exactly
what the one-pass GMD step needs:

```
for r = 0..2t-1:
    Lambda <- gamma*Lambda + Delta*P                 (P = X*B)
    if Delta != 0 and 2L <= r:  P <- X*Lambda_old ; L <- r+1-L ; gamma <- Delta
    else                        P <- X*P
    Delta <- sum_i Lambda_i * S_(r+1-i)               (discrepancy of the next step)
```

After the last step, P is X·B(X), the starting value of the erasure
addition's second polynomial. The 21 coefficients are folded onto 7
processing elements. Each iteration takes 3 cycles, handling the high
coefficients first so that X·(...) reads values not yet overwritten. The
whole solve takes 60 cycles.

### One-pass erasure addition (the core of the GMD decoder)

The decoder does not run 11 separate decodings. `gmd_erasure_add` starts from
the error-only pair (Lambda, P) and adds one erasure per iteration, least
reliable first. With a_i = alpha_i^-1 and alpha_i = alpha^(pos_i):

```
evaluate:  Lam_i = Lambda(a_i),  Bv_i = P(a_i)
case 1 (Lam_i = 0, or Bv_i != 0 and L_Lam >= L_P):
    Lambda <- Bv_i*Lambda + Lam_i*P        P <- (X + a_i)*P                 L_P  += 1
case 2 (otherwise):
    Lambda <- (X + a_i)*Lambda             P <- alpha_i*Bv_i*X*Lambda + Lam_i*P   L_Lam += 1
```

Both updates give both polynomials a root at a_i. After iteration 2k-1,
Lambda is the errata locator of trial k. Two details are easy to get wrong:

* **Initial lengths.** L_Lam starts at the BM length L. L_P starts at
  **2t + 1 - L**. With 2t - L instead, every trial that needs erasures succeeds
  one trial late, and the 2t-erasure trial fails. Simulation of the algorithm
  on random error/erasure patterns settled this. The initial value is not
  stated with the algorithm.
* **Scaling.** The case-2 update of P is multiplied by alpha_i, which keeps a
  multiplier out of the critical path. Lambda and P then carry different
  unknown scale factors. The roots do not change. The magnitude computation
  below does not depend on the scale.

Hardware. The polynomials are stored as four chunks of six coefficients. The
chunks are padded with zero coefficients above X^20 and processed most
significant chunk first.

* **Evaluation.** Evaluation is a 6-lane Horner loop per polynomial:
  acc ← acc·a^6 + Σ_m c_m·a^m. The powers of a_i come from a table indexed by
  the position. It takes 4 cycles and 12 multipliers.
* **Update.** Each lane has four multipliers: Bv·Lambda_j, Lam·P_j,
  a·(Lambda_j or P_j), and (alpha·Bv)·Lambda_(j-1), which makes 24
  multipliers. There are two pipeline stages: products, then sums written back.
* **Overlap.** Evaluation for iteration i+1 reads each chunk the cycle after
  it is written back. An iteration therefore takes 4 + 2 = 6 cycles, and the
  whole run takes 4 + 20·6 = 124 cycles. A new trial locator appears every 12
  cycles.

### Polynomial selection

`gmd_poly_sel` runs a Chien search (`chien_eval`: constant multipliers, 3
points per cycle, 12 cycles) on each trial locator. The trial-0 locator comes
directly from the solver, the others from the erasure addition. A trial
succeeds when the number of roots among the 36 positions equals the degree of
Lambda. The first successful trial is kept. The search also keeps the values
Lambda_odd(alpha^-l) for that trial.

Note that the 2t-erasure trial always succeeds (any 20 erasures define a
codeword). A word beyond the GMD radius therefore usually ends in a wrong
codeword rather than in `dec_ok = 0`. `dec_ok = 0` happens only when no trial
passes, including the last.

### Magnitudes and correction

`rs_mag_comp` uses Forney's formula:

```
Omega(X) = Lambda(X) * S(X) mod X^20,   S(X) = sum_j S_(j+1) X^j
e_l      = Omega(alpha^-l) * alpha^-l / Lambda_odd(alpha^-l)     at every root position l
```

Scaling Lambda scales Omega in the same way, so the alpha_i scaling of the
erasure addition cancels. The steps are:

1. Omega is built in 20 cycles, one Lambda coefficient per cycle, on 20
   multipliers.
2. Omega is evaluated by a second Chien engine in 12 cycles.
3. e_l is computed one position per cycle (one inverter, two multipliers) and
   r_l + e_l is streamed out, reading r_l from the buffer.

The block takes 70 cycles in all.

## Latency

Cycle counts per block, as checked by the testbenches (start edge included
where noted):

| Block | Cycles | Reference figure |
|---|---|---|
| RM decoding, per symbol | 9 | – |
| Syndromes | 36 (+1 start) | 36 |
| Key equation | 60 (+1) | 60 |
| Erasure addition | 124 (+1) | 124 |
| Last polynomial selection | 12 (+1) | 12 |
| Magnitudes + correction | 70 | 36 |

From the acceptance of the last segment to `done`, the top takes 316 clock
edges: 9 + 37 + 61 + 125 + 13 + 1 + 70. The reference RS
decoder needs 268 cycles. The difference is the Forney step (Omega and its
evaluation) and one cycle per hand-over.

## Departures and own choices

* **Key equation.** The reference uses the "enhanced parallel" BM form, which
  needs two multipliers per processing element. Its recursion is not
  reproduced here. This solver computes the next discrepancy with a third
  multiplier per element: 21 multipliers instead of 14, at the same 60 cycles.
* **Magnitudes.** The reference uses the Horiguchi-Kötter formula with B(X) and
  gamma, modified for the scaled GMD polynomials, but that modification is not
  published. Forney's formula is used instead, with Omega evaluated by a second
  Chien engine rather than by reusing the selection engine. This costs 20
  general multipliers and 34 cycles.
* **Sorter.** The sorter is unfolded: one insertion per cycle. A folded sorter
  would be smaller, since RM decoding leaves several cycles per symbol.
* **FHT.** The FHT reuses one butterfly stage seven times.
* **Chunk padding and pipeline placement.** The coefficient chunk padding and
  the exact placement of the two update pipeline registers are this design's
  own.
* **Own choices with no reference value.** These include:
  * the handshakes and the one-word-at-a-time sequencing;
  * the bit order inside a segment;
  * the sign-bit polarity and tie rules;
  * taking the first successful trial;
  * the message position: the top 16 RS symbols, systematic, as in the HQC
    specification.
* **Not included.** The polynomial multiplication v - u·y and the key and
  ciphertext memories are not included. They are existing shift-and-add
  designs, and c' enters the top as a port.
* **Polynomial size.** The erasure addition stores 24 coefficients per
  polynomial but passes only X^0..X^20 on. A locator that can be correct has
  degree at most 2t, so nothing is lost.

## Files

| File | Content |
|---|---|
| `rtl/hqc_pkg.sv` | sizes, `gf_t`, GF(2^8) multiply/inverse, antilog table |
| `rtl/rm_combine.sv`, `rm_fht.sv`, `rm_peak.sv`, `rm_decoder.sv` | RM stage |
| `rtl/rel_sorter.sv` | reliability insertion sorter |
| `rtl/rs_buffer.sv` | received-word buffer |
| `rtl/rs_syndrome.sv`, `rs_kes.sv` | error-only front of the RS decoder |
| `rtl/gmd_erasure_add.sv` | one-pass erasure addition |
| `rtl/chien_eval.sv`, `gmd_poly_sel.sv` | Chien engine and polynomial selection |
| `rtl/rs_mag_comp.sv` | magnitudes and correction |
| `rtl/hqc_gmd_decrypt.sv` | top level |
| `tb/tb_<block>.sv` | one self-checking bench per block; `tb/tb_gf_pkg.sv` reference GF arithmetic |

## Simulating

Every bench prints `TB_RESULT checks=N failures=M` and stops itself. Example
with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/hqc_pkg.sv tb/tb_gf_pkg.sv rtl/*.sv tb/tb_hqc_gmd_decrypt.sv \
    --top-module tb_hqc_gmd_decrypt -o sim && ./obj_dir/sim
```

`tb_hqc_gmd_decrypt` runs the whole design at its default sizes. It encodes
random messages (RS, then RM ×3) and corrupts symbols in controlled ways:

* noisy symbols: bit flips;
* "weak" errors: two of the three copies carry a wrong symbol, so the decoded
  symbol is wrong but has a low `max1`;
* "strong" errors: all copies are wrong.

The bench computes the RM decisions by direct correlation and predicts the
first trial k with at most t-k errors outside the 2k least reliable symbols.
It checks `dec_ok`, `win_trial`, the message and the latency. It also counts
error-only successes, erasure-trial successes, uncorrectable words and input
stalls, and requires each to occur.

The block benches compare against independent computations: direct Hadamard
sums, linear searches, a stable sort, direct polynomial evaluation, root sets
of locators built from known positions, and an RS encoder. Each also checks
its block's cycle count.

To change sizes, override the top's parameters (`N_RS`, `K_RS`, `M_REP`,
`N_RM`, `LE`, `LC`, `FOLD`). The field and the symbol width are fixed at
GF(2^8) by `hqc_pkg`. The package constants only set the defaults.
