# A hyperdimensional language classifier with Sobol letter vectors

Hyperdimensional computing (HDC) represents every symbol by a very long
binary vector, a *hypervector*, and relies on randomly drawn hypervectors
being nearly orthogonal. A classical HDC text classifier therefore starts
with a pseudo-random generator (software `rand`, or LFSRs in hardware) for
each letter. This design replaces that generator with low-discrepancy
**Sobol sequences**: letter *k* takes one dimension of a Sobol sequence,
and each of that dimension's first D points x_i becomes one bit of the
letter's hypervector:

```
bit i of letter k  =  1 (+1)  if x_i <  T
                      0 (-1)  if x_i >= T
```

Here T is a single threshold shared by all letters. The Sobol dimensions
are chosen offline so that the resulting letter hypervectors are as
uncorrelated as possible, which is measured by the stochastic
cross-correlation (SCC). Because the sequences are deterministic, the
whole alphabet can be rebuilt at any time from a few descriptor words and
one comparator per lane, with no random state to store or reseed.

Around this alphabet generator, the RTL builds the complete language
classifier:

```
 descriptors ─► Sobol generator ─► Sobol RAM ─► threshold T ─► item memory (28 letters)
                                                                    │
 characters ─► symbol map ─────────────────────────────────────────►│ letter HV
                                                                    ▼
                    n-gram: L1 ^ rot(L2) ^ rot²(L3) ^ rot³(L4)
                                          ▼
                    accumulate ones per dimension, majority vote
                                          ▼
                 text HV ─► train: store as class HV
                           infer: Hamming search over 21 classes ─► class
                 item memory ─► SCC probe (pairwise letter correlation)
```

The default configuration is the one the classifier is evaluated at:
D = 8192 bits, 28 symbols (a–z, space and one catch-all), 4-grams,
21 language classes and T = 0.38.

## 1. Sobol points in hardware

A Sobol dimension is fixed by a primitive polynomial of degree s over GF(2),
with coefficients a_1 … a_{s−1}, and by s odd starting integers m_1 … m_s
(m_k < 2^k). The remaining direction integers follow from

```
m_k = 2·a_1·m_{k−1} ⊕ 4·a_2·m_{k−2} ⊕ … ⊕ 2^{s−1}·a_{s−1}·m_{k−s+1} ⊕ 2^s·m_{k−s} ⊕ m_{k−s}
```

The direction numbers are v_k = m_k / 2^k. Point i is the XOR of the v_k
for which bit k−1 of i is set. This is the *natural* ordering, not the
Gray-code ordering that many software generators use. The two orderings
give the same set of points for each power-of-two block, but in a
different order. The order matters here because point i becomes bit i of
a hypervector. The natural order gives the sequences usually shown for
the first two dimensions: 0, ½, ¼, ¾, ⅛, ⅝, ⅜, ⅞ and
0, ½, ¾, ¼, ⅝, ⅛, ⅜, … . Both are checked in the testbenches.

**Number format.** For i < 2^SB, at most SB fraction bits are ever
non-zero, so with SB = clog2(D) = 13 every point is an exact 13-bit code.
Each v_k is stored as `m_k << (SB−k)`.

**Descriptor (`sobol_desc_t`).** The descriptor holds `s` (5 bits), `a`
and `m[0..15]`, coded as in the Joe–Kuo direction-number tables. The
coefficient a_1 is the most significant of the s−1 used bits of `a`, and
`m[k−1]` holds m_k. The very first Sobol dimension (van der Corput, the
bit-reversed index) has no polynomial. It is loaded as s = SB with all
m_k = 1, which makes every v_k = 2^−k.

**Generator (`sobol_generator`).** On `start` the generator expands the
descriptor into the SB direction numbers in a single combinational
function and registers them. It then emits one row of LANES = 64 points per
cycle: point r·LANES + l appears in lane l. Each lane has its own XOR tree
over the set bits of its index. The first row arrives two cycles after
`start`, and the D/LANES = 128 rows follow back to back.

## 2. Threshold and alphabet generation

`threshold_compare` holds T as the integer `t_code = ceil(T·2^SB)`.
Because points are multiples of 2^−SB, the test "x < T" is exactly
`code < t_code`. At D = 8192, T = 0.38 gives t_code = 3113, and T = 0.70
gives 5735. `t_code` has SB+1 bits, so T = 1.0 (all +1) can be expressed.

`sobol_hv_encoder` is the encoding module. It holds a K-entry descriptor
register file, the generator, the Sobol block RAM (`sobol_bram`: K·D/LANES
= 3584 words of 64×13 bits) and 64 comparators. A command runs in up to
two phases:

| phase  | what happens                                               | cycles                 |
|--------|------------------------------------------------------------|------------------------|
| FILL   | (only if `cmd_fill`) generator runs once per letter; rows written to RAM | K·(D/LANES + 2) = 3640 |
| ENCODE | every RAM word is read, thresholded and written into the item memory as a 64-bit slice of (letter, row) | K·D/LANES + 2 = 3586 |

From `gen_start` to `gen_done`, a complete generation takes 7226 cycles. A
re-threshold with `gen_fill = 0` takes 3586 cycles: it re-reads the stored
numbers with a new T without running the generator again, which is how
T is tuned.

The RAM read is registered, so the item-memory write (symbol, row) is the
read address delayed by one cycle. This alignment is the one subtle point
of the module, and its fault test breaks exactly that.

## 3. From characters to a text hypervector

**Symbol map.** a–z and A–Z map to symbols 0–25, space maps to 26, and
every other byte maps to 27.

**Item memory** (`item_memory`). This is a 28 × 8192-bit register array.
It is written in 64-bit slices by the encoder. It has two kinds of read
port, both registered:
- one full-hypervector port for the text path;
- a two-symbol slice port for the SCC probe.

**n-grams** (`ngram_encoder`). The encoder keeps the last N letter
hypervectors and forms

```
G = L1 ⊕ π(L2) ⊕ π²(L3) ⊕ … ⊕ π^{N−1}(LN)
```

L1 is the newest letter. π is a rotation by one position that moves bit i
to bit i+1. Internally, register j holds letter t−j already rotated j
times, so a new letter shifts the registers and rotates each by one more
place. No barrel shifter is needed. Each letter accepted gives one n-gram
one cycle later. The first N−1 letters of a text give no output, so a text
of L characters yields L−N+1 n-grams.

**Accumulate and sign** (`acc_sign`). These are 8192 counters of 24 bits,
each counting the n-grams with a 1 in its dimension, plus a counter of the
n-grams themselves. On `finalize`, dimension d of the text hypervector is

```
1  if 2·count[d] > total      (strict majority of +1)
0  otherwise                  (a tie counts as −1)
```

This is the population-count form of adding ±1 values and taking the
sign. The tie rule is this design's own choice. Ties are common: any
dimension of a text with an even number of n-grams can split evenly. The
top-level testbench checks that ties happen and are resolved as above.

## 4. Training and search

`assoc_search` stores up to C = 21 class hypervectors.

**Training.** A text in `MODE_TRAIN` makes its text hypervector the class
hypervector of `text_class`. This takes one write, and `train_done`
pulses five cycles after `text_end`.

**Inference.** A text in `MODE_INFER` is compared with one class per
cycle by Hamming distance: an XOR and a 8192-bit popcount. The smallest
distance wins, and a tie goes to the lower class. For binary ±1 vectors a
smaller Hamming distance is the same as a larger cosine similarity, so
this ranks the classes exactly as cosine similarity would. `result_valid`
comes C + 5 = 26 cycles after `text_end`, with the class and its distance.

Each class holds the hypervector of **one** training text, and texts are
not bundled. To train on a corpus, send the corpus of a class as a single
long text. The counters allow 2^24 − 1 n-grams. N-grams that span the joins
between sentences are then counted as well.

## 5. SCC probe

The stochastic cross-correlation of two bit-vectors X, Y is computed from
four counts:
- a: positions with (1,1);
- b: positions with (1,0);
- c: positions with (0,1);
- d: positions with (0,0).

With n = a+b+c+d:

```
            ad − bc
SCC = ─────────────────────────────────────      if ad > bc
       n·min(a+b, a+c) − (a+b)(a+c)

            ad − bc
SCC = ─────────────────────────────────────      otherwise
       (a+b)(a+c) − n·max(a−d, 0)
```

SCC is 0 for independent streams and ±1 for maximally (anti)correlated
ones. Examples: a = 1, b = 2, c = 2, d = 3 gives −1/9; a = 3, b = c = 0,
d = 5 gives +1.

`scc_unit` consumes one 64-bit slice pair per cycle and counts a, b, c and
d with per-lane adders. When the last slice arrives, it spends one cycle
forming the numerator magnitude and the denominator. It then runs a
restoring division that produces one quotient bit per cycle over FRAC+1
cycles. The result is `scc_q = ±floor(|ad−bc|·2^FRAC / den)`, a signed
fixed-point number with FRAC = 16 fraction bits (so 65536 means 1.0). A
zero denominator gives 0.

In the top, `scc_start` with two symbols streams their slices out of the
item memory. `scc_done` follows D/LANES + FRAC + 4 = 148 cycles later.
The probe lets a host verify a set of loaded descriptors and a threshold
by measuring the pairwise SCC of the letters actually produced. It can
also be used to rank candidate dimensions.

## 6. Top level: `hdc_classifier_top`

| group     | signals | behaviour |
|-----------|---------|-----------|
| setup     | `desc_we`, `desc_sel`, `desc_in`, `t_code` | write descriptor of letter `desc_sel`; hold `t_code` stable during generation |
| generate  | `gen_start`, `gen_fill` → `gen_busy`, `gen_done` | taken while idle; `char_ready` is low while it runs |
| text      | `text_start`, `text_mode`, `text_class`, `char_valid`, `char_data`, `text_end` → `char_ready` | all taken only while `char_ready` = 1; one character per cycle |
| result    | `train_done`, `result_valid`, `result_class`, `result_dist`, `text_ngrams` | `train_done` at +5, `result_valid` at +C+5 cycles after `text_end` |
| probe     | `scc_start`, `scc_x_sym`, `scc_y_sym` → `scc_busy`, `scc_done`, `scc_value`, `scc_a..d` | not started during generation |

Reset is asynchronous and active low. The memories (Sobol RAM, item
memory, class memory, descriptor file) are not reset. They must be
written, by a generation and by training, before they are used.

A typical run goes as follows:
1. Load 28 descriptors.
2. Set `t_code` = 3113.
3. Pulse `gen_start` with `gen_fill` = 1.
4. For each class, send `text_start` (`MODE_TRAIN`, class), the
   characters, then `text_end`.
5. Classify texts the same way in `MODE_INFER`.

**Which Sobol dimensions to load.** For D = 8192 and T = 0.38, the chosen
dimensions (1-based, the first being van der Corput) are:

```
2 5 12 15 23 36 48 51 53 54 63 73 66 79 97 115 88 98 104 109 159 148 147 123 126 130 188 172
```

They are listed in `hdc_tb_pkg::SOBOL_IDX_D8192` (testbench package). Their polynomials and
starting integers come from the Joe–Kuo direction-number table and must be
supplied by the host. This RTL does not contain that table.

**Sizes at the default parameters.**
- Sobol RAM: 2.98 Mbit.
- Item memory: 229 kbit.
- Class memory: 172 kbit.
- Accumulator: 197 kbit of counters.
- Datapath: 8192-bit rotate/XOR registers and an 8192-bit popcount.

The accumulator is by far the largest block of logic. A synthesis run of
it alone is slow at D = 8192.

## 7. Where this design departs from, or adds to, the classifier it follows

- **Sobol sequences generated on chip.** The evaluated encoder reads
  pre-computed Sobol numbers from block RAM. Here the same RAM is filled
  by an on-chip generator from compact descriptors. The read-and-compare
  path is unchanged.
- **Dimension selection is offline.** Choosing the least-correlated
  dimensions is a design-time search over a matrix of |SCC| values. It is
  not hardware, and is not implemented. The SCC probe provides the
  measurement it is built on.
- **Rotation direction and n-gram order.** These are assumed: π moves
  bit i to i+1, and the newest letter is unrotated. Either convention
  gives an equally valid encoder, but class hypervectors trained under one
  convention cannot be used with the other.
- **Majority tie rule.** A tie gives −1 (see §3).
- **Similarity.** Hamming distance is used in place of cosine similarity.
  The ranking is identical for binary vectors, and a tie goes to the lower
  class.
- **Training.** Training is one text per class (see §4). The reference
  classifier bundles all training texts of a class.
- **Headline classification.** The short-headline experiments use 5-grams at
  D = 4096 and 8192 with 3 classes. This needs the parameter `N = 5`
  (and `D = 4096` for the smaller size). The default build is N = 4.
- **Other dimensions D = 16 … 4096.** These need a rebuild with that `D`.
  LANES must divide D, so lower LANES for D < 64. The threshold code and
  the chosen dimensions depend on D.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each compares against
reference models in `tb/hdc_tb_pkg.sv` that are written directly from the
definitions with integer arithmetic: the Sobol recurrence, the threshold
rule, the n-gram, the majority vote and the SCC formula. Each testbench
also checks the cycle counts given above and prints
`TB_RESULT checks=… failures=…`.

| testbench | what it covers |
|-----------|----------------|
| `tb_sobol_generator` | reference sequences of the first two dimensions, random valid descriptors, first row two cycles after start |
| `tb_sobol_bram` | random writes and reads, read latency |
| `tb_threshold_compare` | the T = 0.5 example on the first dimension, random numbers and thresholds |
| `tb_sobol_hv_encoder` | full fill + encode and re-threshold with a second T; every written bit against the model; command length |
| `tb_item_memory` | slice writes, full and slice reads, read latency |
| `tb_ngram_encoder` | warm-up, rotation, mid-stream clear, gaps in the input |
| `tb_acc_sign` | random n-gram streams, majority with ties, n-gram count, clear, latency |
| `tb_assoc_search` | random classes, noisy copies and random queries, latency |
| `tb_scc_unit` | the two worked examples, random, correlated and anti-correlated pairs, latency |
| `tb_hdc_classifier_top` | full size (D = 8192): generation at T = 0.38, SCC probes, training 21 classes, inference, re-threshold at T = 0.70 and retraining; counts that every mechanism, including majority ties and input stalls, occurred |

The block testbenches run at reduced D (256 or 64) to stay quick. The
top-level testbench runs at the default parameters. To build and run
one with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/hdc_pkg.sv tb/hdc_tb_pkg.sv tb/tb_hdc_classifier_top.sv \
  --top-module tb_hdc_classifier_top -Mdir obj_top
./obj_top/Vtb_hdc_classifier_top
```

The full-size top level takes about a minute to compile and about a
second to simulate.

The test texts are synthetic: each class prefers its own random handful
of letters. They exercise the datapath and are checked bit-exactly against
the model, but they say nothing about accuracy on real language data.
