# BCH error correction for multilevel NOR flash: serial encoder and pipelined 4-parallel decoder

Multilevel flash cells hold several bits per transistor, with little voltage margin between
levels. A page read back from such a cell array contains a few random bit errors, so the flash
controller stores every page as a codeword of a binary BCH code and corrects it on the way out.
This RTL implements such an ECC block for a 256-bit NOR-flash page. It follows the architecture
in S. Nabipour and J. Javidan, *Enhancing Data Storage Reliability and Error Correction in
Multilevel NOR and NAND Flash Memories through Optimal Design of BCH Codes*. The write path is a
serial LFSR encoder. The read path is a decoder with four ideas:

* The syndrome and Chien-search units are **P-parallel** (P = 4 bits per clock), so each takes
  ceil(n/P) clocks instead of n.
* Only the odd syndromes are computed. The even ones come from **squaring**, using S_2i = S_i².
* The constant multipliers of the Chien search are built with **XOR sharing**: an XOR pair that
  several output bits need is built once and reused.
* The three decoder stages (syndrome, Berlekamp–Massey, Chien) form a **pipeline** and work on
  three successive words at once. A new word enters every ceil(n/P) clocks rather than every
  ceil(n/P) + 2t + ceil(n/P).

Everything is SystemVerilog-2017 and synthesizable, except the testbenches. Each file in `rtl/`
opens with a comment on what it does, its interface and its timing.

## The code

| quantity | value | where it comes from |
|---|---|---|
| field | GF(2⁹), primitive polynomial x⁹ + x⁴ + 1 | m = 9 from the paper; this design picked the polynomial |
| correctable errors t | 3 (`T`) | paper |
| message bits k | 256 (`K`) | paper (16 words of 16 bits) |
| parity bits n − k | 27 = deg g(x) | computed |
| codeword bits n | 283 | computed; the paper quotes 274 |
| parallel factor P | 4 (`P`) | paper |

The generator polynomial is g(x) = LCM(φ₁, φ₃, φ₅), where φᵢ is the minimal polynomial of αⁱ.
`gf_pkg::bch_gen_poly(T)` computes it while the design elaborates: it walks the cyclotomic
cosets {i·2ʲ mod 511} and multiplies out Π(x + α^c). For T = 3 the result is
g(x) = 0xD612B79, of degree 27.

**Why n = 283 and not 274.** The paper gives n = 274 and 18 redundancy bits in one table. It also
says, several times, that the decoder corrects 3 errors. Over GF(2⁹) each odd syndrome root adds
a degree-9 minimal polynomial. With 18 parity bits the code therefore corrects only 2 errors. This
RTL keeps t = 3, which gives 27 parity bits and n = 283. Setting `T = 2` gives exactly the
paper's code (n = 274, 18 parity bits). That configuration is tested end to end.

## Word layout on the wire

* A codeword c(x) = c_{n−1}x^{n−1} + … + c₀ is sent highest degree first. The 256 message bits
  come first, unchanged (systematic code), then the 27 parity bits.
* The encoder sends and receives one bit per clock.
* The decoder takes beats of P bits. Bit P−1 of a beat has the highest degree.
* n is not a multiple of P, so the first beat of a word starts with ceil(n/P)·P − n zero bits. For
  the default code that is 1 zero bit, and a word is 71 beats. These zeros are shortening zeros:
  they change no syndrome, and the Chien search masks their lanes.
* The decoder gives the corrected word back in the same beat layout, padding included.

## Write path: `bch_encoder`

The encoder is a textbook division circuit. It computes r(x) = x^{n−k}v(x) mod g(x) in an
(n−k)-stage shift register. Stage i is fed through an XOR with g_i times the feedback, where the
feedback is the incoming bit XOR the last stage.

* For the k message clocks, the feedback path is closed and the message bit goes straight to the
  output.
* For the next n−k clocks, the feedback is opened and the register shifts out the remainder.
  `in_ready` is low during this phase.

One codeword takes n = 283 clocks.

## Read path: `bch_decoder`

```
 in ─┬─► bch_syndrome ─► bch_bm ─► bch_chien ─► bch_corrector ─► out
     │   (71 clk/word)   (6 clk)   (71 clk/word)      ▲ XOR
     └─► sram_fifo (received beats) ──────────────────┘
```

### Syndromes (`bch_syndrome`)

There are t Horner accumulators, one for each odd i:

S_i ← S_i · α^{iP} ⊕ Σ_{j<P} d_j · α^{ij}

Here d_j is bit j of the beat. Each accumulator has one general multiplier with a constant
operand, plus constant taps selected by the input bits. When the last beat arrives, the odd
syndromes and their squares (S₂ = S₁², S₄ = S₂², S₆ = S₃²) are latched into a result register,
together with a flag that says whether all syndromes are zero.

### Error locator (`bch_bm`)

The solver is an inversionless Berlekamp–Massey that runs the full 2t iterations, one per clock.
Each clock it:

* computes Δ = Σ σ_i S_{r+1−i}, with multiplexers selecting S_{r+1−i};
* computes σ ← γσ + Δβ;
* updates β, γ and the degree L.

It uses 3(t+1) multipliers of type `gf_mult`, a Mastrovito matrix multiplier. The result is σ(x)
times a non-zero constant, which has the same roots. No division is needed. When the syndromes
are all zero, the word has no error: the solver skips the iterations and hands on σ = 1 at once.

### Chien search (`bch_chien`) and XOR sharing (`xor_share_cmult`)

This is the largest and least obvious part of the decoder.

**What it tests.** An error at position l gives a root of σ at α^{−l} = α^{511−l}. Bits leave the
FIFO highest degree first. The exponent to test therefore rises by one per bit.

**Lane order.** Let E0 = 511 − P·ceil(n/P). Lane i (1…P) of beat b tests the exponent
E0 + bP + i, and its result drives bit P−i of the error beat.

**Registers.** Register R_j holds σ_j·α^{j(E0+bP)}. It is preloaded with σ_j·α^{j·E0} and
multiplied by α^{jP} every clock.

**Multiplier groups.** For each j, a group of P constant multipliers forms
R_j·α^{j}, R_j·α^{2j}, …, R_j·α^{Pj}. These are the P lane terms. The last one doubles as the
register update. Each lane XORs σ₀ with its t terms and compares the sum with zero.

**How the sharing works.** All P multipliers of one group share the input R_j. Their P·m output
bits are each an XOR of some of the m input bits. `xor_share_cmult` writes this as a 0/1 matrix:
one row per output bit, one column per input bit. It then repeats these steps while elaborating:

1. Count, for every pair of columns, the rows that contain both.
2. Take the pair with the most such rows.
3. Add a new column equal to the XOR of the pair, and let those rows use it instead of the two
   originals.
4. Stop when no pair is shared by more than one row.

Each new column becomes one XOR gate, and each row becomes an XOR of its remaining columns. The
whole algorithm is a constant function (`cse_run`), so it adapts to any `J` and `P`. The gate
count with and without sharing is available as `XOR_COUNT` and `XOR_COUNT_PLAIN`.

**Gate counts for this design** (T = 3, P = 4, three groups of four multipliers):

| multipliers of the Chien search | XOR gates |
|---|---|
| plain matrices | 72 |
| sharing inside each multiplier | 60 (−17 %) |
| sharing across each group (built) | 24 (−67 %) |

The paper reports 554 / 424 / 309 for its whole Chien block. Those figures cover more of the
block than these multipliers, so the two sets of numbers measure different things. The paper's
worked example of eqs. (12)–(17) could not be reproduced bit for bit: its four products match no
primitive degree-9 polynomial, and two of its rewritten products are identical.

### FIFO and correction

`sram_fifo` is a plain memory array with synchronous read, as an SRAM macro would behave. It
holds 4·ceil(n/P) = 284 beats of 4 bits. That is enough for every word that can be in flight:

* one being received;
* one whose syndromes wait for the solver;
* one in the solver;
* one in the Chien search.

The Chien search launches the FIFO read of beat b in the same clock that it presents error
beat b. `bch_corrector` delays the error beat by one clock to meet the read data, XORs the two
(the finite-field adder), and registers the result. It also counts the bits it flipped in each
word (`out_nerr`, valid with `out_eop`).

### Pipeline, handshakes and timing

Each stage holds its result until the next stage takes it, using valid/ready:

* The solver takes new syndromes only when idle.
* The Chien search takes a new σ when idle, or in the last beat of the current word, so words
  follow back to back.
* The syndrome unit holds back only the last beat of a word, and only while its previous result
  has not been taken. This is the only input stall. A full FIFO also stalls the input.

With the default sizes, the solver needs 6 clocks per word and the other two stages 71 each, so
the input never stalls. The input stall happens only when ceil(n/P) is shorter than the solver's
2t clocks.

| measured at the default sizes | clocks |
|---|---|
| first beat in → first corrected beat out | ceil(n/P) + 2t + 4 = 81 |
| same, error-free word (solver skipped) | ceil(n/P) + 4 = 75 |
| one word alone, first beat in → last beat out | 71 + 6 + 71 + 3 = 151 |
| spacing of words in a continuous stream | ceil(n/P) = 71 |

For comparison, the paper quotes 143 clocks without pipelining and 68 with it, for n = 274. With
`T = 2` (n = 274) this RTL streams one word every 69 clocks. The extra clock over 68 comes from
rounding 274/4 up.

## Where this RTL goes beyond or departs from the paper

* **t against n.** Here t = 3 and n = 283. The paper's n = 274 gives only t = 2 (see *The code*).
* **Solver form.** The paper mentions a division in its BM solver, yet its critical path
  (mux + multiplier + adder + flip-flop) has no divider. This RTL uses the inversionless form,
  with 2t iterations as the paper counts.
* **Input pause.** One passage of the paper says the input must pause for 2t clocks after each
  word. Its timing figure and its throughput figure do not have that pause. This RTL pauses only
  when the solver is actually still busy.
* **Design choices the paper does not give:**
  * the primitive polynomial;
  * the bit order and padding;
  * every handshake;
  * the FIFO depth and its synchronous read;
  * the register preload of the Chien search;
  * the tie-break of the XOR-sharing search (lowest column pair first);
  * the per-word error count;
  * synchronous active-low reset.
* **Not built:**
  * the non-pipelined decoder, which the paper uses only as a comparison;
  * the NAND variant over GF(2¹³) with 4096-bit sectors, which the paper only mentions: the field
    is fixed at m = 9 in `gf_pkg`;
  * the flash array itself, which connects through the `enc_out_*` and `dec_in_*` ports.
* **Latency against error count.** The paper reports a decoding time that grows with the number
  of errors. Here only the error-free case is faster, because it skips the solver. Words with 1, 2
  or 3 errors take the same time: the solver always runs its 2t iterations, and the Chien search
  always scans the whole word.
* **Uncorrectable words.** A word with more than t errors is not flagged. It comes out with
  whatever bits the Chien search marked. `bch_bm` does output the locator degree `out_deg`, and
  comparing it with `out_nerr` would detect most such words, but the decoder does not use it.

## Files

| file | contents |
|---|---|
| `rtl/gf_pkg.sv` | field constants, GF(2⁹) functions, BCH generator polynomial |
| `rtl/gf_mult.sv` | Mastrovito general multiplier |
| `rtl/xor_share_cmult.sv` | shared constant-multiplier group |
| `rtl/bch_encoder.sv` | serial LFSR encoder |
| `rtl/bch_syndrome.sv`, `rtl/bch_bm.sv`, `rtl/bch_chien.sv`, `rtl/sram_fifo.sv`, `rtl/bch_corrector.sv` | decoder stages |
| `rtl/bch_decoder.sv` | the pipelined decoder |
| `rtl/bch_ecc_top.sv` | encoder + decoder (top) |
| `tb/tb_ref_pkg.sv` | independent reference models: GF arithmetic by long division, g(x) constants, encoder, syndromes |
| `tb/tb_<block>.sv` | one self-checking bench per block |
| `tb/tb_ecc_harness.sv`, `tb/tb_bch_ecc_top.sv` | end-to-end benches in three configurations; each mechanism must occur |
| `tb/tb_bch_ecc_full.sv` | end-to-end at the default sizes, top without parameter overrides |

## Simulating

Every bench prints `TB_RESULT checks=N failures=F` and stops itself. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/gf_pkg.sv tb/tb_ref_pkg.sv tb/tb_bch_ecc_top.sv --top-module tb_bch_ecc_top
./obj_dir/Vtb_bch_ecc_top
```

Replace the bench name to run another one. All benches finish in well under a second. The
end-to-end bench also prints the measured latencies and how often each mechanism occurred.

## Changing the design

* `T`, `K` and `P` are parameters of `bch_ecc_top` and of every block below it. The parity
  length, n, the beat count, the FIFO depth and all constant tables follow from them.
* T may go up to 7 (the degree register of `bch_bm` is 4 bits wide). The reference generator
  polynomials in the benches cover T ≤ 4.
* `K + 9T` must stay below 511.
* The field is set by `GF_M` and `GF_POLY` in `gf_pkg`. The RTL derives everything else from
  them, but only m = 9 has been simulated. The benches' reference model hard-codes x⁹ + x⁴ + 1
  and the generator polynomials, and would need the same edit.
