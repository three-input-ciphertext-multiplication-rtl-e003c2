# Three-input ciphertext multiplier for RNS-CKKS

This is a fully pipelined hardware block that multiplies **three** CKKS
ciphertexts in a single pass. It follows the method and block diagram of
"Three-Input Ciphertext Multiplication for Homomorphic Encryption" (Akherati,
Tang, Zhang).

Given ct^t = (c0^t, c1^t) for t = 1..3, each held as residues modulo
q_0 .. q_{L-1}, the block outputs (c0*, c1*). The output is relinearized and
rescaled twice, so it has L-2 residues. All of this happens in one stream, and
a new ciphertext triple is accepted every N/2 clock cycles.

## The idea

The triple product of the linear forms c0^t + c1^t·s has four terms:

- D0 = c0¹c0²c0³
- D1 = the terms linear in s
- D2 = the terms in s²
- D3 = c1¹c1²c1³ (the term in s³)

Karatsuba-style sharing computes all four with **8 modular multiplications**
per coefficient, instead of 12 (`poly_mult3`).

Two evaluation keys relinearize both high terms at once:

- evk = (evk_0, evk_1)
- evk' = (evk'_0, evk_1)

The two keys share evk_1. Because of that, the two key products can be
summed **before** the inverse NTT:

- C0 = D2·evk_0 + D3·evk'_0
- C1 = (D2 + D3)·evk_1

As a result, only **two** ModDown units are needed, one for C0 and one for C1.

## Data path (`ct_mult3`)

| stage | units | purpose |
|---|---|---|
| input NTT | 6L transforms (L 6-lane `ntt`) | six input polynomials per q_j into the NTT domain |
| triple product | L `poly_mult3` | D0..D3 per modulus, 8 multipliers each |
| INTT | 4L transforms (L 4-lane `intt`) | d0, d1 to the output adders; d2, d3 to ModUp |
| ModUp | 2 `mod_up` | extend d2, d3 to the K special moduli p_i |
| NTT_p | 2K transforms (K 2-lane `ntt`) | back into the NTT domain |
| key MAC | K+L `relin_mac` | C0, C1 per modulus (p_i and q_j) |
| INTT | 2(K+L) transforms (K+L 2-lane `intt`) | C0, C1 to the coefficient domain |
| ModDown | 2 `mod_down` | divide by P, dropping the special moduli |
| output adders | 2L | c0* = d0 + ModDown(C0), c1* = d1 + ModDown(C1) |
| rescale | 4 `rescale` | L → L-1 → L-2 residues for c0* and c1* |

On the q_j branch of the key MAC, D2 and D3 come straight from `poly_mult3`
through a delay line. That delay is 2X + 7 cycles: it makes them meet the p_i
branch, which goes INTT → ModUp → NTT. The d0 and d1 outputs are delayed by
2X + 22 cycles so that they meet the ModDown outputs.

### Latency

An (I)NTT of length N takes X = N/2 - 1 + 5·log2 N cycles: N/2 - 1 cycles in
the commutators and 5 pipeline stages in each of the log2 N butterfly
processing elements.

Latency of the whole block, from an input beat to the matching output beat:

    4X + 39 = 2N + 20·log2 N + 35 cycles

For N = 4096 that is 8467 cycles. The source gives 2N + 20·log2 N + 32. The
three extra cycles come from:

- the register on the key-memory read;
- a fourth pipeline stage in the key MAC;
- a register after the output adders.

## Stream format and NTT

Every polynomial travels as a frame of N/2 *beats* (`he_pkg::beat_t`). Each
beat has a valid bit, a frame index c and two W-bit words. Input beat c holds
coefficients (a[c], a[c+N/2]).

Frames may follow each other back to back, or with gaps of at least N/2
cycles. All 6L input streams must be in lock step.

- **`ntt`** is a 2-parallel, feed-forward, multi-path delay commutator (MDC)
  pipeline. It chains log2 N Cooley–Tukey processing elements (`ntt_pe`) with
  delay-switch-delay `commutator`s between them.
  - It computes the negacyclic transform with psi merged into the twiddles.
  - Output beat c holds the bit-reversed-order values (A[2c], A[2c+1]).
- **`intt`** is the mirror image, built from Gentleman–Sande elements
  (`intt_pe`).
  - It takes bit-reversed input and returns natural order in the input format.
  - Each stage halves its outputs, so together they fold in the 1/N factor.
- Each butterfly stage takes its twiddle factors from a `twiddle_rom`.
  - The ROM has N/2 entries and is addressed by the frame index.
  - Its contents are computed while the design is built.
- **Twiddle sharing.** Transforms over the same modulus whose frames run in
  lock step read the same twiddle sequence in the same cycles. `ntt` and
  `intt` therefore take a `LANES` parameter: one block transforms LANES
  streams, and each stage has a single ROM that feeds every lane.
  - The top uses 6-lane NTTs for the inputs of each q_j.
  - It uses 4-lane INTTs for D0..D3.
  - It uses 2-lane NTTs for the ModUp outputs of each p_i.
  - It uses 2-lane INTTs for C0 and C1 of each modulus.
  - An assertion checks that the lanes stay in lock step.
- **`mod_mult`** is the modular multiplier: a W×W product followed by Barrett
  reduction.
  - It has 3 pipeline stages, with mu = floor(2^(2W)/q).
  - The final correction uses two parallel conditional subtractions, so its
    output is always fully reduced.

## RNS conversions

- **`fbc`** does fast basis conversion in 7 cycles. It multiplies each residue
  by its (q̂_j)^-1, multiplies again by q̂_j mod the target modulus, and sums
  the results in a registered adder tree.
- **`mod_up`** applies one `fbc` per special modulus.
- **`mod_down`** does the following:
  1. it converts the p-part to the q basis;
  2. it subtracts the result from the delayed q-part;
  3. it multiplies by P^-1 mod q_j.

  It takes 10 cycles.
- **`rescale`** drops the last modulus: it computes (c_j - c_last)·q_last^-1
  mod q_j and takes 4 cycles.

## Evaluation-key interface

Keys are held outside the block, in a synchronous memory.

1. When `evk_rd_en` is high with `evk_rd_idx = c`, the NTT-domain key words
   for positions 2c and 2c+1 must appear on `evk0`, `evk0p` and `evk1` one
   cycle later.
2. This applies to every modulus m:
   - m < K is p_m;
   - m ≥ K is q_{m-K}.

## Parameters and moduli

| parameter | default | meaning |
|---|---|---|
| `LOG_N` | 12 | log2 of the ring degree N |
| `L` | 3 | number of ciphertext moduli q_j |
| `K` | 3 | number of special moduli p_i |
| `he_pkg::W` | 30 | residue width |

The source does not give concrete primes. This design uses the six largest
30-bit primes that are ≡ 1 mod 8192. They support negacyclic NTTs of any size
up to N = 4096.

- q_0..q_2 = 1073692673, 1073668097, 1073651713
- p_0..p_2 = 1073643521, 1073569793, 1073479681

## Departures from the source

- Twiddle ROMs are shared only among transforms that run in lock step. The
  source also lets blocks share them when they read the same sequence at
  different times, by holding the words in registers. That scheme is **not
  built** here. In this pipeline, the only blocks that read the same sequence
  at different times are the INTTs of D0..D3 and the INTTs of C0/C1 over the
  same q_j. They run 2X + 12 cycles apart, which is longer than the N/2-word
  ROM itself, so registers holding the words would cost more than the ROM
  they replace.
- The latency is three cycles longer, as explained above.
- The source gives only the delay needed for D2 and D3 on the q branch of the
  key MAC. The delay lengths used here are this design's own.
- The source does not give the Barrett reduction details. This design uses a
  single-estimate Barrett step with two corrections.
- The evaluation-key memory and the host interface are outside this design.
- This design uses 30-bit moduli with L = K = 3. The general setting, where Q
  is hundreds of bits wide, would need more moduli and larger parameters.

## File list

`rtl/`:

- `he_pkg` (types, moduli, constant functions)
- `mod_mult`
- `delay_line`
- `sb_pipe`
- `word_pipe`
- `twiddle_rom`
- `ntt_pe`
- `intt_pe`
- `commutator`
- `ntt`
- `intt`
- `poly_mult3`
- `fbc`
- `mod_up`
- `mod_down`
- `relin_mac`
- `rescale`
- `ct_mult3` (top)

`tb/` holds a self-checking testbench for each block, plus:

- `tb_ref_pkg`: the software reference models (direct NTT, negacyclic
  convolution);
- `tb_ct_mult3`: end-to-end test at N = 16, which checks three ciphertext
  triples (two back to back, one after a gap) against a coefficient-domain
  schoolbook model, and checks the latency and the number of key reads;
- `tb_ct_mult3_full`: the same test at the default size, N = 4096.

## Simulating

    verilator --binary --timing --assert -Irtl -Itb \
        rtl/he_pkg.sv tb/tb_ref_pkg.sv tb/tb_ntt.sv --top-module tb_ntt
    ./obj_dir/Vtb_ntt

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`.

## Verification status

- Every block passes its own testbench against an independent software model.
- Each testbench was also shown to catch a deliberately broken copy of its
  block.
- The end-to-end test at N = 16 passes 123 checks, with the expected latency
  of 147 cycles.
  - Two ciphertext triples run back to back.
  - A third follows after an idle gap.
- The default-size test (N = 4096, L = K = 3) passes 10,243 checks, with the
  expected latency of 8467 cycles and 2048 key reads.
  - Building the simulator takes several minutes.
  - The run itself takes about half a minute.
- A generic synthesis run of the full design at the default size gives about
  181,000 flip-flop bits. It also gives about 19.6 Mbit of memory bits: twiddle
  ROMs, and the long delay lines that align d0/d1 and the q-branch D2/D3.
- Not covered: timing closure on any technology, a real key memory, or
  parameter sets other than those listed above.
