# BCH decoder with an early-stopped Berlekamp-Massey solver

A binary BCH decoder spends most of its locator-solving time proving that
nothing more is to be found. For a long code that corrects many errors
(here 16383 bits, up to t = 72 errors, over GF(2^14)) the Berlekamp-Massey
(BM) solver runs t iterations whatever the error count, although a word with
e errors has its error-locator polynomial complete after about e iterations.
Flash memory, the target of this decoder, mostly sees few errors per word.

The decoder therefore stops the solver as soon as KAPPA consecutive
iterations (default 6) have produced a zero discrepancy, the rule known as
*ES version 3*. For e errors that is normally after e + KAPPA iterations
(8 instead of 72 for two errors). The price is a small chance of stopping
too early: a word whose discrepancies happen to vanish KAPPA times in a row
before the locator is complete. For the default code and KAPPA = 6 this
probability has been estimated below 10^-118 at a raw bit error rate of
2.5 x 10^-3; smaller KAPPA values make it much larger (for a 1024-bit,
t = 17 code the estimate grows from about 10^-26 at KAPPA = 6 to about
10^-12 at KAPPA = 1), which is why KAPPA of at least 4 is advised.
A premature stop is not necessarily detected: the locator it leaves may well have as many roots as
its degree (a one-error locator always has its one root), and the word is
then miscorrected silently. The decoder's only defence is a KAPPA large
enough to make the event negligible.

The RTL below is plain synthesizable SystemVerilog, parameterised in the
code size, and comes with self-checking testbenches for every block.

## Decoding a word

A word goes through the usual four steps of binary BCH decoding; error
values need no computation because every located bit is simply inverted.

| step | block | what it does |
|------|-------|--------------|
| 1 | `bch_syndrome` | syndromes S_1..S_2T while the word streams in |
| 2 | `bch_bm_es` with `bch_es3_check` | error locator Lambda(x), stopped early |
| 3 | `bch_chien` | roots of Lambda(x), i.e. the error positions |
| 4 | `bch_decoder` | flips the error bits as the word streams out of `bch_buffer` |

`bch_decoder` runs these as two overlapping stages:

```
            +-------------+         +-----------+    +-----------+
in_data --->| bch_syndrome|--syn--->| bch_bm_es |--->| bch_chien |--mask--+
   |        +-------------+         +-----------+    +-----------+        |
   |        +--------------------------------------------------+          v
   +------->| bch_buffer: bank A (being filled) / bank B (read)|---> XOR ---> out_data
            +--------------------------------------------------+
            |<------- input stage ------->|<------------ output stage ------------>|
```

The input stage writes a word into one buffer bank and accumulates its
syndromes. When the word is complete and the output stage is idle, the
syndromes are handed over (the solver copies them), the banks swap and the
next word can enter at once. The output stage solves for Lambda, then reads
its bank back one beat per clock while the Chien search produces the
matching error mask. If the input stage completes a word while the output
stage is still busy, it holds `in_ready` low until the hand-over.

### Beat format

A word of N bits is carried in NB = ceil(N/P) beats of P bits, highest code
position first: bit b of beat k is code position (NB-1-k)·P + b. For the
default N = 16383, P = 8 there are 2048 beats and the top bit of the first
beat is a pad position that must be sent as 0 and comes back as 0.
Position p is the coefficient of x^p in the received polynomial, so in a
systematic codeword the message occupies the high positions and the parity
the low ones.

### Timing

* Input: one beat per clock when `in_valid` and `in_ready` are high; a word
  takes NB clocks.
* Output stage, per word: 1 clock for the hand-over, `iters` clocks in the
  solver, 1 clock to load the Chien search, then NB beats. Consecutive
  `out_last` beats are NB + iters + 2 clocks apart when the input keeps up
  (checked by the testbenches).
* With e errors, iters = min(e + KAPPA, T) in practice; it is exactly the
  first iteration j >= KAPPA that closes KAPPA zero discrepancies, or T.
* At the defaults this is 2058 clocks per word for two errors and at most
  2122, i.e. about 875 to 850 Mbit/s at 110 MHz. The early stop thus buys
  throughput as well as solver activity. Whether the logic reaches 110 MHz
  on a given FPGA has not been established here.

## The solver and its stopping rule

`bch_bm_es` is the part that differs from a textbook decoder, and the part
worth reading first.

### Odd steps only

The general BM algorithm makes 2T steps, step k consuming syndrome S_k. For
a binary code the discrepancy of every even step is zero (because
S_2i = S_i^2), so only the T odd steps do any work. Iteration j = r + 1
(r = 0..T-1) consumes S_(2r+1) and the skipped even step is folded into the
correction polynomial B(x), which moves by x^2 instead of x. The counting of
zero discrepancies is done over these T iterations; counting over the 2T
steps would see each skipped even step as a free zero.

### Inversion-free update

Each iteration is one clock:

```
d       = sum_{i=0..T} Lambda_i * S_(2r+1-i)
Lambda <= gamma * Lambda + d * x * B
if d != 0 and L <= r:   B <= x * Lambda (old),  L <= 2r + 1 - L,  gamma <= d
else:                   B <= x^2 * B
```

Starting from Lambda = B = 1, L = 0, gamma = 1. The factor gamma replaces
the division by the previous discrepancy, so Lambda is only known up to a
non-zero scale, which changes neither its roots nor which discrepancies are
zero. The term S_(2r+1-i) comes from a window register `sw[i]` that shifts
by two syndromes per iteration, fed from a copy of S_2..S_2T taken at start;
the discrepancy thus needs T+1 general GF(2^M) multipliers and the update
2(T+1) more (219 at T = 72). L is the register length: the degree the
locator must have if the word is correctable.

### Early stop (`bch_es3_check`)

A counter tracks the current run of zero discrepancies, saturating at KAPPA
and cleared by a non-zero one. In the clock where the run reaches KAPPA the
`stop` output is high and that iteration becomes the last. Because a run of
KAPPA needs KAPPA iterations, the rule "start checking at iteration
j = KAPPA" is implicit. If the run never reaches KAPPA the solver ends after
iteration T and `early_stop` stays low.

With e <= T errors the first e discrepancies are non-zero in nearly all
words, the locator is complete after iteration e, and every later
discrepancy is zero: the solver ends after e + KAPPA iterations. Words with
a chance zero among the first e discrepancies may take longer, and in the
extremely rare case that KAPPA chance zeros come in a row before the
locator is complete, the solver stops with a wrong locator (the failure
mode discussed above).

### Root search and the failure flag

`bch_chien` keeps C_i = Lambda_i · alpha^(-i·q) for the base position q of
the current beat and evaluates Lambda(alpha^(-q-b)) for the P bits b of the
beat at once; all multiplications there have constant factors. A position is
in error when the value is zero. Pad positions are never reported. After
the last beat, `fail` is raised when the number of roots differs from L:
too many errors for the code, or a premature stop that happened to leave a
locator with fewer roots than its degree. In a shortened code (N below
2^M - 1) a root that points beyond the word is never visited, so such a
word is flagged by the same count.

## Interface of `bch_decoder`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; asynchronous reset, active low |
| `in_valid`, `in_ready` | in/out | 1 | beat handshake |
| `in_data` | in | P | received beat |
| `out_valid` | out | 1 | corrected beat valid (no back-pressure) |
| `out_data` | out | P | corrected beat |
| `out_last` | out | 1 | last beat of a word; the status below is valid with it |
| `out_nerr` | out | clog2(N+1) | bits corrected |
| `out_fail` | out | 1 | uncorrectable word; its bits were flipped anyway |
| `out_iters` | out | clog2(T+1) | solver iterations made |
| `out_early_stop` | out | 1 | the solver ended by the stopping rule |

The output has no ready signal: the sink must accept a beat every clock of
the output stage. Because the status is known only at the last beat, bits of
an uncorrectable word have already been flipped when `out_fail` rises; the
consumer should discard such a word.

## Parameters

| parameter | default | meaning |
|-----------|---------|---------|
| `M` | 14 | field degree, GF(2^M) (up to 16) |
| `PRIM` | 16'h0443 | primitive polynomial x^M + PRIM, i.e. x^14 + x^10 + x^6 + x + 1 |
| `T` | 72 | correctable errors (at least 2) |
| `N` | 16383 | code length in bits; smaller values give a shortened code |
| `P` | 8 | bits per clock |
| `KAPPA` | 6 | zero discrepancies in a row that end the solver |

`N` must not exceed 2^M - 1. All parameters of `bch_decoder` are passed
down to the blocks. PRIM holds the polynomial without its x^M term; for the
smaller codes that the testbenches also run, GF(2^5) uses x^5 + x^2 + 1
(`16'h0005`) and GF(2^10) uses x^10 + x^3 + 1 (`16'h0009`). The testbench
model `bch_tb_pkg` builds its own tables from the same polynomial, given in
full to its `init()`. The code's generator polynomial does not appear in the
decoder; for t = 72 it has degree 1001 rather than 14·72 = 1008, because the
cyclotomic coset of alpha^129 has only 7 elements, so the code carries
15382 message bits.

Size at the defaults after generic synthesis: about 43 000 word-level cells,
7 200 flip-flops and a 2 x 2048 x 8-bit memory. Most of the logic is the
solver's 219 general multipliers and the Chien search's 72 x 8 constant
multipliers.

## Files

| file | content |
|------|---------|
| `rtl/bch_pkg.sv` | default field and sizes; GF(2^m) multiply, square, powers of alpha for any field up to m = 16 |
| `rtl/bch_gf.svh` | included inside each module: the element type and short forms of the package functions bound to the module's M and PRIM |
| `rtl/bch_syndrome.sv` | P-bit parallel syndrome accumulator |
| `rtl/bch_es3_check.sv` | zero-discrepancy run counter, stop request |
| `rtl/bch_bm_es.sv` | odd-step inversion-free BM with early stop |
| `rtl/bch_chien.sv` | P-bit parallel Chien search with failure flag |
| `rtl/bch_buffer.sv` | two-bank word buffer |
| `rtl/bch_decoder.sv` | top level: two-stage pipeline and correction |
| `tb/bch_tb_pkg.sv` | reference model: table-based field arithmetic, syndromes, textbook 2T-step Berlekamp-Massey with inverses, generator polynomial, systematic encoder |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the full-size, sweep, failure-case and multi-code testbenches below |
| `tb/bch_dec_runner.sv` | helper for `tb_bch_decoder_codes`: streams and checks words through one decoder configuration |

## Verification

Every testbench prints `TB_RESULT checks=<n> failures=<n>` and stops itself
after a fixed number of clocks if the design hangs. Expected values come
from `bch_tb_pkg`, which shares no code with the RTL: it multiplies through
logarithm tables, runs the full 2T-step Berlekamp-Massey with field
inversions and applies the stopping rule to its odd-step discrepancies.

| testbench | size | what is checked |
|-----------|------|-----------------|
| `tb_bch_es3_check` | KAPPA = 6 | `stop` in every clock of 20 000 random zero/non-zero sequences with clears |
| `tb_bch_syndrome` | defaults | all 144 syndromes of codeword + 0..100 errors, `done` timing |
| `tb_bch_bm_es` | T = 72, KAPPA = 6 | iterations (e + KAPPA for e <= 66), latency, `early_stop`, L, Lambda against the reference, roots at every error, for 0..80 errors |
| `tb_bch_chien` | N = 300, T = 8 | every mask bit, pad positions, `nroots`, `fail` with wrong degrees |
| `tb_bch_buffer` | N = 64 | random reads and writes on both banks |
| `tb_bch_decoder` | N = 300, T = 8 | 30 words end to end: data, counts, iterations, word spacing; early stop, full run, input stall and failure flag must each occur |
| `tb_bch_decoder_full` | defaults | three 16383-bit blocks with 2, 40 and 72 errors back to back, then one with 80 errors (flagged) |
| `tb_bch_bm_es_sweep` | T = 72, KAPPA = 6 | iterations for every error count 0..75 (e + KAPPA up to 66 errors, then T); prints the share of solver clocks saved, from 92 % with no errors down to 0 % |
| `tb_bch_bm_es_failcase` | T = 8, KAPPA = 2 and 3 | syndromes with discrepancies non-zero, 0, 0, non-zero: KAPPA = 2 stops at iteration 3 with a wrong one-error locator, KAPPA = 3 solves them correctly |
| `tb_bch_decoder_codes` | GF(2^5) n = 31, t = 3, KAPPA = 2; GF(2^10) n = 1023, t = 17, KAPPA = 4; GF(2^10) n = 1001, t = 17, KAPPA = 6, P = 5 | 20 words per code end to end, as `tb_bch_decoder`, with the field set through M and PRIM; then the t = 17 code shortened to N = 1001 at P = 5 (12 words, 4 pad bits) |

All pass. The full-size end-to-end run takes a few seconds. To run one with
Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl \
    rtl/bch_pkg.sv tb/bch_tb_pkg.sv tb/tb_bch_decoder_full.sv \
    --top-module tb_bch_decoder_full -o sim
./obj_dir/sim
```

The same pattern works for any testbench (`-y rtl` finds the modules it
uses). `verilator --lint-only -Wall -Irtl rtl/bch_pkg.sv rtl/<module>.sv`
lints a module on its own.

Not verified: a premature stop at KAPPA = 6 on a real received word, far
too rare to meet in simulation (the failure mechanism itself is shown at
KAPPA = 2 on constructed syndromes); timing closure at any clock rate; fields
other than GF(2^5), GF(2^10) and GF(2^14), and P other than 8 at full size
(P = 5 is run only on the 1001-bit code).

## What follows the published technique and what is this design's own

From the technique's description: the code (GF(2^14), t = 72, length 16383),
the decoding steps, the ES version 3 stopping rule, KAPPA = 6, and the
e + KAPPA iteration count. Two other stopping rules that combine the
zero-run test with a degree test (versions 1 and 2) exist in the same
work as comparisons and are not built.

This design's own choices, where the description is silent:

* the odd-step, inversion-free form of BM and its one-iteration-per-clock
  datapath (the description speaks both of 2t iterations and of stopping at
  e + KAPPA; the odd-step form is the one in which the latter holds);
* the primitive polynomials of the three fields;
* 8 bits per clock, chosen so that the decoder exceeds the 480 Mbit/s of a
  USB 2.0 link at 110 MHz, the rate of the published FPGA test;
* the two-bank buffer and two-stage pipeline, the beat format and the
  streaming handshake;
* the failure test (root count differs from L) and flipping bits before
  that test is known;
* asynchronous active-low reset.
