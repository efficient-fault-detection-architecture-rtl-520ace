# A BCH-protected sequential multiplier for GF(2^m)

Finite-field multipliers in cryptographic and coding hardware are large.
A fault in their gates, whether natural (soft errors) or deliberate (fault-injection
attacks), gives a wrong product without any sign that something went wrong. This design
puts a multiple-bit error-correcting code around a low-area multiplier. The
product of a GF(2^45) multiplier is treated as a 45-bit message and encoded
with the binary BCH(63,45) code. The codeword is stored in a FIFO. On the way
out, a BCH decoder finds and corrects up to three flipped bits, and flags words
that have more errors.

Two ideas keep the checker cheap and fast:

* **Re-encoding instead of a full syndrome pass.** The decoder sends the
  message half of the received word back through the encoder, which is idle
  at that point. The recomputed parity XOR the received parity is
  `r(x) mod g(x)`, an 18-bit polynomial. All syndromes are evaluated on that
  remainder instead of on the 63-bit word.
* **Affine splitting of the error locator (Berlekamp–Rumsey–Solomon).** The
  error-locator polynomial is split into an *affine* part, whose value at any
  field element is an XOR of table entries, and a small remainder evaluated
  by a Chien search.

The RTL is SystemVerilog-2017 and synthesizable. All sizes are parameters. The
defaults are the 45-bit / BCH(63,45) configuration, and a 16-bit / BCH(31,16)
configuration is also tested.

```
 a,b ──► gf2m_serial_mult ──► bch_encoder ──► (⊕ fault_mask) ──► codeword_fifo ──► bch_decoder ──► product,
         (45 clocks)            ▲   │ parity                                          │         err_detected,
                                │   └──────────────── re-encoding ────────────────────┤         uncorrectable,
                                └──────────────────── message half ───────────────────┘         num_errors
```

## 1. The multiplier: NAND-only Horner iteration

`gf2m_serial_mult` computes `C = A·B mod f(x)` in the polynomial basis, with
the most significant bit of B first:

```
P(0) = 0
P(k) = (x·P(k-1) mod f)  xor  b[M-k]·A        k = 1 .. M,   C = P(M)
```

Each clock performs one step. A is held in parallel, B is shifted out one bit
per clock, and C is read in parallel. Two combinational modules implement the
step:

* `gf_nand_g` forms `x·P mod f`. It shifts P up by one bit and, if the bit
  that falls off (`p[M-1]`) is set, XORs in the low part of `f`.
* `gf_nand_h` adds the partial product `b·A`.

Both are written with two-input NAND gates only. An AND is built from two NANDs.
An XOR uses the four-NAND identity
`a ⊕ b = (a ↑ (a ↑ b)) ↑ ((a ↑ b) ↑ b)`, where `↑` is NAND. Each logic level
is therefore a row of M NAND gates. `f(x)` is a constant parameter, so
synthesis removes the gates where `f_j = 0`.

Timing: a `start` pulse while idle captures `a` and `b`. `busy` is high for M
clocks. `done` pulses exactly M clocks after the start edge, and `c` then
holds the product until the next start.

The default field polynomial is `x^45 + x^4 + x^3 + x + 1`. For the 16-bit
configuration it is `x^16 + x^5 + x^3 + x + 1`. Both were checked to be
irreducible. They are choices of this design: any irreducible `f` can be
passed as `F_LOW` (f without its `x^M` term).

## 2. The code: systematic BCH(63,45), t = 3

The code field is GF(2^6), built from the primitive polynomial `x^6 + x + 1`
(α = x). The generator polynomial is the LCM of the minimal polynomials of
α, α², …, α⁶:

```
g(x) = 0x782CF = x^18 + x^17 + x^16 + x^15 + x^9 + x^7 + x^6 + x^3 + x^2 + x + 1
```

Its degree of 18 gives K = 63 − 18 = 45 message bits, which is exactly the
multiplier width. The code corrects any 3 bit errors in the 63-bit word and
detects most heavier patterns.

`bch_pkg::gen_poly()` computes `g(x)` while the design is elaborated, as the
product of `(x + α^j)` over the cyclotomic cosets of 1…2t. Changing `BCH_M`,
`PRIM` or `T` therefore re-derives the code. The top module refuses to
elaborate when the multiplier width `M` differs from the resulting K.

`bch_encoder` is a one-level parallel encoder. The parity is linear in the
message, so message bit *i* selects a constant row `x^(18+i) mod g(x)`, and
the parity is the XOR of the selected rows. The rows are also computed at
elaboration. The codeword is `{message, parity}`: bit *j* of the 63-bit
vector is the coefficient of `x^j`, so the message occupies bits 62…18.

## 3. Decoding a stored product

`bch_decoder` is a small state machine that takes one word at a time from the
FIFO and drives four steps.

### 3.1 Re-encoding and syndromes (`REENC`, 1 clock)

The decoder raises `enc_req` and presents the received message half. When
`enc_gnt` comes back, the shared encoder's parity XOR the received parity is
`b(x) = r(x) mod g(x)`. Every α^i with i ≤ 2t is a root of `g`, so

```
S_i = r(α^i) = b(α^i),      i = 1 .. 6
```

`bch_syndrome` evaluates the three odd syndromes S1, S3, S5 in parallel.
Each one is a constant GF(2^6) matrix applied to the 18 remainder bits. The
even syndromes follow from `S_2j = S_j²`, because the code is binary. The
syndromes are registered in the grant clock.

**Encoder sharing.** In `ft_gf_mult_top` the encoder's input is a
multiplexer. A product that has just finished always wins: it is encoded and
written into the FIFO in the clock it completes, or in the first later clock
the FIFO has room. A re-encoding request that arrives in such a clock waits
one clock. No second encoder exists.

### 3.2 Clean words skip the rest (`CHECK`)

If all syndromes are zero, the word is a codeword and the stored message goes
straight out with `err_detected = 0`. A clean product leaves the decoder two
clocks after the decoder takes it.

### 3.3 Error-locator polynomial (`KES`, t clocks)

`bch_fibm` runs an inversion-free Berlekamp–Massey iteration reduced for
binary codes. Every second BM step has a zero discrepancy, so only t = 3
steps remain, one per clock. With `S_0 = 1`, step r = 0…t−1 does the
following:

```
δ      = Σ σ_i · S_(2r+1-i)
σ(x)  ← γ·σ(x) + δ·x·λ(x)
if δ ≠ 0 and k ≥ 0:   λ ← x·σ_old,   γ ← δ,   k ← −k,    L ← 2r+1−L
else:                 λ ← x²·λ,                k ← k+2
```

The result is a non-zero multiple of the error locator
`σ(x) = Π(1 + X_l·x)`, which is all the root search needs. `L` is the length
of the shortest LFSR that generates the syndromes. When more than t errors
are present, L can exceed t. The T+1 stored coefficients are then not the
whole polynomial, so `too_long` is raised.

### 3.4 Root search: BRS affine split plus Chien (`ROOTS`, ⌈63/PAR⌉ clocks)

This is the least familiar part of the design. Write

```
σ(x) = A(x) + B(x)
A(x) = σ0 + σ1·x + σ2·x² + σ4·x⁴ (+ σ8·x⁸ …)     ← exponents 0 and powers of two
B(x) = σ3·x³ + σ5·x⁵ + σ6·x⁶ + σ7·x⁷ …            ← everything else
```

Squaring is linear in characteristic 2, so `L(y) = A(y) + σ0` is a
*linearized* polynomial: `L(y1 + y2) = L(y1) + L(y2)`. If
`y = Σ y_k α^k` in the standard basis, then

```
A(y) = σ0 + Σ_k y_k · L(α^k),     k = 0 .. m-1
```

Once per word the block computes the m = 6 table entries
`L(α^k) = Σ_{j∈{1,2,4,…}} σ_j α^(jk)` and stores them in registers. After
that, the affine part at any candidate is an XOR of the table entries picked
by the candidate's own bits. No multiplier is needed per candidate.

The remaining terms of B are evaluated Chien-style. Each lane keeps
`σ_j·α^(j·i)` and multiplies it each clock by the constant `α^(j·PAR)`. A
candidate α^i is a root when `A(α^i) = B(α^i)`.

For t = 3, B has a single term (σ3·x³). The same module handles larger t; it
is tested at degree 6, where A carries σ0, σ1, σ2, σ4 and B carries σ3, σ5, σ6.

`PAR` = 7 lanes test the candidates i = 1…63 in 9 clocks. A root α^i marks
codeword bit `(63 − i) mod 63`, so i = 63 covers bit 0. The block also counts
the roots.

For illustration, the quadratic `y² + α³y + α⁴` over GF(2³) with
`x³ + x² + 1` has L(1) = α², L(α) = α + 1 and L(α²) = α². Its roots are
011 and 110. The testbench runs this case through the block.

### 3.5 Correction and failure detection (`FIX`, `OUT`)

If `too_long` is clear and the number of roots equals L, the decoder applies
the following:

* It flips the marked message bits.
* It reports `num_errors = L`. Errors in the parity half are counted but need
  no correction.

Otherwise it raises `uncorrectable` and passes the stored message unchanged.
With four or more errors, a word lying within distance 3 of another codeword
is mis-corrected; no distance-7 code can avoid that. The end-to-end tests see
about one such word for every four uncorrectable words.

## 4. Interfaces and timing of the top (`ft_gf_mult_top`)

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset |
| `in_valid` / `in_ready` | in / out | 1 | operand handshake. `in_ready` is low while multiplying and while a finished product waits for FIFO space |
| `a`, `b` | in | M | operands |
| `fault_mask` | in | NK + M | XORed into each codeword as it is written to the FIFO. It models faults in the stored result and exercises the corrector. Tie it to 0 in use |
| `out_valid` / `out_ready` | out / in | 1 | result handshake; results come out in operand order |
| `product` | out | M | corrected product |
| `err_detected` | out | 1 | some syndrome was non-zero |
| `uncorrectable` | out | 1 | more than t errors; `product` is the stored value |
| `num_errors` | out | clog2(T+1) | bits corrected, including parity bits |

Latency, when the FIFO is empty and the decoder is idle:

* A clean word: `out_valid` rises **M + 4** clocks after the clock that
  accepts the operands. That is M for the multiplication, 1 to encode and
  write, 1 for the decoder to take the word, and 2 to decode.
* A word with errors: **T + ⌈N/PAR⌉ + 3** clocks more, which is 15 for the
  defaults (49 vs. 64 clocks in total).

One product is accepted every M + 1 clocks at most. The decoder needs at most
17 clocks per word, so with the defaults it keeps up, and the 4-entry FIFO
only fills when `out_ready` is held low.

## 5. Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 45 | multiplier width; at most the code's K (M < K shortens the code, see below) |
| `F_LOW` | `45'h1B` | field polynomial of the multiplier without `x^M` |
| `BCH_M` | 6 | code field GF(2^BCH_M), N = 2^BCH_M − 1 (up to 8) |
| `T` | 3 | correctable errors |
| `PRIM` | `7'b1000011` | primitive polynomial of the code field (x^6 + x + 1) |
| `PAR` | 7 | candidates tested per clock in the root search |
| `FIFO_DEPTH` | 4 | stored codewords |

The 16-bit configuration is
`M=16, F_LOW=16'h2B, BCH_M=5, PRIM=6'b100101, T=3`, which gives BCH(31,16)
with `g(x) = 0x8FAF`.

**Shortened codes for t = 4 and 5.** Over GF(2^6) a 4-error code has only
39 message bits and a 5-error code 36, so a 45-bit product with t > 3 needs a
length-127 code over GF(2^7). When `M < K` the top shortens the code to
(NK + M, M). The product is the low M bits of a K-bit message whose top
K − M bits are zero. Only the NK + M low codeword bits are stored, so the
FIFO and `fault_mask` are that wide. The decoder sees the word padded with
zeros back to N bits. An error located in a padding position cannot be real,
so the decoder (parameter `KU = M`) flags such a word as uncorrectable. The
two configurations are:

| t | parameters | code |
|---|---|---|
| 4 | `BCH_M=7, PRIM=8'b10001001, T=4` | BCH(127,99), g = 0x1C9C26B9, shortened to (73,45) |
| 5 | `BCH_M=7, PRIM=8'b10001001, T=5` | BCH(127,92), g = 0xCA76024D7, shortened to (80,45) |

With N = 127 and `PAR = 7`, the root search takes 19 clocks, so a word with
errors takes T + 22 clocks more than a clean one.

## 6. How far this follows the source architecture

The following come from the architecture this RTL implements:

* The block structure (multiplier → encoder → FIFO → three-stage decoder).
* The MSB-first interleaved multiplier made of NAND gates.
* Systematic encoding.
* Re-encoding that reuses the idle encoder.
* Parallel odd syndromes with squaring for the even ones.
* A BM-family key-equation solver.
* The BRS affine split combined with a Chien search.
* The sizes 45/BCH(63,45) and 16/BCH(31,16).

The following are this design's own choices or fill gaps:

* **Serial, not bit-parallel.** The architecture is described both as a
  "bit-parallel" multiplier and, in its block diagram, as a bit-serial
  sequential one, repeated m times. The RTL follows the sequential form: one
  Horner step per clock.
* **NAND level count.** The source module pair is described as four NAND
  levels each. The networks here use five levels for G and five for H,
  because an AND is two NANDs and the XOR cell is three levels.
* **t = 3, not 5.** The results are quoted for "5-error" correction, but the
  codes named, BCH(31,16) and BCH(63,45), correct 3 errors. A 45-bit message
  does not fit a 4- or 5-error code of length 63. The defaults follow the
  named codes. For t = 4 and 5, the shortened length-127 codes of section 5
  are this design's choice, since no code is named for those results. The
  decoder alone is also tested at `T = 5` with BCH(63,36), which carries 36
  message bits.
* **Key-equation solver.** The source names a specific low-complexity BM
  variant ("FiBM") without describing it. The RTL uses the standard
  inversion-free, odd-step-skipping formulation above. The solver has the
  same role and the same t-iteration count, but its datapath is not that
  variant's.
* **Syndromes.** These are evaluated directly from `r mod g` rather than
  from the remainders `r mod φ_i` by the minimal polynomials. The results are
  identical.
* **Decoding failure.** Detection through `L > t` or a root count different
  from L is added. The source does not discuss words with more than t errors.
* **Unspecified details.** The following are assumptions: the FIFO depth, all
  handshakes, the reset style, `PAR`, the primitive and field polynomials, and
  the `fault_mask` injection point. The source does not say where faults
  enter.
* **Root-search range.** The root search tests the 63 non-zero elements. Zero
  can never be a root of a locator with `σ0 ≠ 0`.

No area, power or delay figures are reproduced here. Those depend on a cell
library and synthesis flow.

## 7. Simulation

Every testbench is self-checking. Each one prints
`TB_RESULT checks=<n> failures=<n>`, and each has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/bch_pkg.sv tb/tb_ref_pkg.sv tb/tb_ft_gf_mult_top.sv --top-module tb_ft_gf_mult_top
./obj_dir/Vtb_ft_gf_mult_top
```

The reference arithmetic in `tb/tb_ref_pkg.sv` is independent of the RTL:

* Products are computed in full and then reduced.
* BCH parity is computed by long division by literal generator polynomials.
* Syndromes are Horner evaluations of the whole word.

| testbench | what it covers |
|---|---|
| `tb_gf2m_serial_mult` | 300+ random and corner products at M = 45 and 16, latency exactly M, start ignored while busy |
| `tb_bch_encoder` | BCH(63,45) and BCH(31,16) parity against long division; codewords divisible by g |
| `tb_codeword_fifo` | random traffic against a queue model, full/empty, write into full FIFO during a read |
| `tb_bch_syndrome` | S1…S6 from `r mod g` against direct evaluation, 0–5 errors |
| `tb_bch_fibm` | locator roots are exactly the error positions (0–3 errors), degree and L, latency T; L > t for 4–6 errors |
| `tb_bch_brs_chien` | locators built from known positions, random polynomials against brute force, the GF(2³) example, degree-6 locators, latency 9 |
| `tb_bch_decoder` | 500 words with 0–5 errors, random grant and output stalls, latency 2 / 17 clocks |
| `tb_bch_decoder_t5` | the same for a 5-error code, BCH(63,36) with `T = 5`: 0–5 errors corrected, 6–7 flagged or miscorrected within distance 5 |
| `tb_ft_gf_mult_top` | 400 products at the default size with 0–5 injected errors, bursty output stalls |
| `tb_ft_gf_mult_16` | the same at 16 bits / BCH(31,16) |
| `tb_ft_gf_mult_short` | the 45-bit multiplier with the shortened codes for t = 4 and t = 5 (two instances of `tb_ft_short_env`, 300 products each, 0 to t + 2 injected errors) |

The end-to-end tests count each mechanism and fail if one never
occurs:

* decoding skipped for a clean word;
* a corrected word;
* an uncorrectable word;
* a re-encoding request held off by an encoding;
* the FIFO full with a product waiting;
* operand back-pressure.

One phase of the output stall pattern is timed against the multiplier's
counter, so that the decoder requests re-encoding in the clock a product
completes.

## 8. Files

`rtl/`:

* `bch_pkg.sv`: GF arithmetic, generator polynomial, encoder rows.
* `gf_nand_g.sv`, `gf_nand_h.sv`, `gf2m_serial_mult.sv`: the multiplier.
* `bch_encoder.sv`, `codeword_fifo.sv`: encoding and storage.
* `bch_syndrome.sv`, `bch_fibm.sv`, `bch_brs_chien.sv`: the decoder stages.
* `bch_decoder.sv`: the decoder controller.
* `ft_gf_mult_top.sv`: the top.

`tb/` holds one testbench per module, the end-to-end tests listed above, `tb_ft_short_env.sv` (one shortened-code run) and `tb_ref_pkg.sv`.
