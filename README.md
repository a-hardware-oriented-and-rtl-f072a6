# A memory-efficient CTC beam-search decoder in SystemVerilog

A network trained with Connectionist Temporal Classification (CTC) outputs, at
every time step, a score for each label plus one extra "blank" label. To turn
that sequence of score vectors into a sentence, the decoder has to search over
label paths. A path's sentence is what remains after merging repeated labels
and deleting blanks. Prefix beam search does this well. The textbook version,
however, keeps (K+1)·W candidate sentences of up to T labels each. With K
labels, beam width W and T time steps, that is far too much on-chip storage
for long utterances. Checking the candidates against a dictionary costs a
large table as well.

This design makes both parts small. It does so in three ways:

* **The beam holds no sentences for the next step.** The candidate set B
  (the beam for the next step) holds only probabilities and a dictionary
  pointer. Each candidate records which current beam entry it came from (A1)
  and which label it added (A2). Sentences live only in the W entries of the
  current beam B̂. After each step they are rebuilt in place, mostly by
  appending one label. Sentence storage is therefore W·T labels instead of
  (K+2)·W·T.
* **Probabilities are renormalised with a shift.** The probabilities are
  fixed-point fractions (30 bits), and products of them shrink towards zero.
  When the best entry falls below a power-of-two limit P_l, every probability
  is shifted left by the same amount.
* **The dictionary is a preorder binary trie of 22-bit words.** Each node
  stores its character, one bit that says whether its first child is the
  end-of-word mark, and a 16-bit relative link to its next sibling. A small
  state machine, the LM visitor, walks this trie. For every label k it
  answers whether the current word prefix can still be extended by k.

A low-cost softmax sits in front of the beam search. It replaces e^x by
2^(λx), evaluates 2^v on [0,1) as the straight line v + d, and evaluates the
logarithm from a leading-one position.

```
 y_i (8 bit, 28 per frame)
   │
   ▼
 softmax ──p(28×30 bit)──► beam_search ──res_label──► decoded sentence
                               ▲  │ DP (19 bit)
             Pr(k|y) 1 bit,    │  ▼
             T_S 19 bit      lm_visitor ──addr 19 / data 22──► lm_memory
```

`ctc_decoder` is the top. It instantiates the four blocks shown above. The
neural network that produces y_i is not part of the design.

## Labels and number formats

| quantity | format |
|---|---|
| network output y_i | 8-bit two's complement: sign, 5 integer, 2 fractional bits |
| label index | 5 bits: 0 = blank, 1–26 = a–z, 27 = word end '_' |
| probability | 30-bit unsigned fraction (value = code / 2^30), q = 30 |
| dictionary pointer (SL, DP, T_S) | 19-bit node address. The root is 0; 2^19−1 means "invalid". |
| dictionary word | 22 bits: `[21:17]` character, `[16]` first child is '_', `[15:0]` relative sibling link |

The softmax receives the 28 outputs of a frame in label order, blank first.
The shared constants, the types and the two probability operators
(`prob_mul`, a truncated 30×30 product, and `prob_add`, a saturating sum) are
in `rtl/ctc_pkg.sv`.

## Softmax (`softmax`, `exp_unit`, `log_unit`, `sort_block`)

The softmax computes p_i = exp(y_i − y_max − ln Σ_j exp(y_j − y_max)). Each
pass takes one label per cycle:

1. **Load, 28 cycles.** y_i is shifted into register group 1. A
   combinational `sort_block` in max mode finds y_max.
2. **Accumulate, 28 cycles.** y_i − y_max is stored, 9 bits wide. The first
   `exp_unit` (bias d1) adds its value into F. F has 22 bits, 16 of them
   fractional.
3. **Log, 1 cycle.** `log_unit` forms ln F and registers it.
4. **Output, 28 cycles.** The second `exp_unit` (bias d2) evaluates
   y_i − y_max − ln F and writes p_i as a 30-bit fraction.

`out_valid` rises 2·28 + 1 edges after the last input is accepted. The frame
is held until `out_ack`.

**`exp_unit`** works as follows:
* It multiplies x by λ. λ is a 4-bit number with 3 fractional bits: 1.5 by
  default, 1.0 for text recognition.
* It splits the product z into its floor u and its fraction v.
* It forms the mantissa v + d with 20 fractional bits and shifts that by u.
* Overflow saturates to all ones, and underflow gives zero.

**`log_unit`** works as follows:
* The leading one of F gives ω. The bits below it, read as a fraction, give
  κ − 1.
* ln F ≈ (ω + κ − 1)/λ. The division is a multiplication by 1/λ = 0.625.

Default constants:

| parameter | value |
|---|---|
| LAMBDA | 1.5 |
| INV_LAMBDA | 0.625 |
| D1 | 0.1011110111₂ |
| D2 | 0.1111110010₂ |

For the scene-text setting, override these to λ = 1/λ = 1,
d1 = 0.1010111111₂ and d2 = 0.1111111111₂.

The approximation is coarse. The outputs do not sum to exactly one; the
testbench accepts sums from 0.5 to 1.6. The decoder only needs the ranking
to be roughly right.

## Beam search (`beam_search`)

This block holds most of the design's logic and most of its subtlety.

### Storage

All arrays have W entries.

| array | contents per entry |
|---|---|
| B̂ (current beam) | Pr⁻ (ends in blank), Pr⁺ (ends in a label), Pr, SL, Sentence (up to T_MAX labels) plus its length, valid bit |
| B (next beam) | Pr⁻, Pr⁺, Pr, SL, valid bit |
| B1, B2 | for B̂(i): the index of the B̂ entry equal to B̂(i) without its last label, and that label |
| B3 | the extension probability that such a prefix entry computes for B̂(i) |
| A1, A2 | for B(j): its source entry in B̂, and the appended label (0 = sentence unchanged) |
| d, c | one bit each: "slot of B̂ already claimed" and "B entry already placed" |

### One frame, step by step

1. **PREFIX, W² cycles.** Every ordered pair (i, j) of B̂ is compared. If
   B̂(i) is B̂(j) plus one label, then B1(i) = j and B2(i) is that label. A
   later step needs this when B̂(j) is extended with B2(i), because the result
   is then the same sentence as B̂(i). Its probability must go to B̂(i)'s
   "stay" term and must not become a new entry.
2. **EXTEND, 28 cycles per valid entry.** The LM visitor is started with
   DP = SL(i). It returns one (k, Pr(k|y), T_S) triple per cycle for
   k = 1…27. For each k the block computes
   Temp = Pr(k|y) · p_k · (Pr⁻ if k repeats the last label, else Pr). Then:
   * If some B̂(m) has B1(m) = i and B2(m) = k, Temp is stored in B3(m).
   * Independently, Temp replaces the smallest entry of B if it is larger.
     The smallest entry comes from the shared `sort_block` in min mode.
3. **STAY, W cycles.** Each B̂(i) gets its "same sentence" probabilities:
   * Temp⁻ = Pr · p_blank
   * Temp⁺ = Pr⁺ · p_last + B3(i)

   B may already hold the extension of B̂(B1(i)) by B2(i), which is the
   same sentence as B̂(i). That is the case when A1 = B1(i) and A2 = B2(i).
   If so, that entry is overwritten with the stay values; Temp⁺ already
   contains its probability through B3. Otherwise the new entry competes
   for the smallest slot like an extension does.
4. **UPDATE, 2W + 1 cycles.** B is copied back into B̂ without ever storing a
   sentence for B (see the next section).
5. **ADJUST, 1 cycle.** The sorting block (max mode) and the shared
   leading-one detector find the leading one of the largest Pr. If it lies
   below index(P_l), every probability of B̂ is shifted left by the gap. P_l
   is the power of two with 1/(4W) < P_l ≤ 1/(2W), so 2^-4 for W = 8. This
   keeps the best entry at P_l or above, and keeps the sum of the beam below
   one.

The frame is acknowledged W² + 28·(valid entries) + 4W + 3 cycles after it
is first seen; the testbench checks this count. After the frame flagged
`frame_last`, the most probable entry is streamed out one label per cycle.
An empty result is a single beat with `res_empty`. The beam then restarts
from the empty sentence with Pr⁻ = 1 − 2^-30.

### Rebuilding sentences without storing them (UPDATE)

Every entry of B is a copy of some B̂(A1) with at most one label appended.
The block rebuilds B̂ in two passes:

* **Pass 1.** For each B entry whose source slot A1 is not yet claimed:
  * write the entry into B̂(A1), appending A2 in place if A2 ≠ 0;
  * set d(A1) and c(j).

  Most entries are placed here at the cost of one label write.
* **Pass 2.** For each B entry not yet placed:
  * the leading-one detector, applied to the inverted and bit-reversed d,
    finds the first unclaimed slot;
  * the whole sentence of B̂(A1) is copied into it, using that sentence's
    length before this frame's appends;
  * the label is appended.

The copy in pass 2 is the only full-sentence move. The hardware does it in
one cycle, as a wide array assignment.

### Where this follows the published algorithm, and where not

* The published listing copies "B̂(i).Sentence" in the second pass. Its own
  worked example only works if the source B̂(A1(i)) is copied. That is what
  this RTL does.
* The listing with all improvements writes A2 = k for an entry that keeps its
  sentence. The update step defines A2 = 0 for that case, and the RTL uses 0.
* Valid bits on B̂ and B are this design's own. Early in a sequence there are
  fewer than W distinct prefixes. Without valid bits, empty slots would match
  as prefixes or be copied back.
* Probability products truncate and sums saturate. The rounding behaviour is
  this design's choice.
* The step-per-cycle schedule is this design's own. So are the single shared
  sorting block and leading-one detector, and the frame handshake.

## Compressed dictionary and the LM visitor (`lm_memory`, `lm_visitor`)

### Trie layout

The dictionary is a trie over a–z plus the word end '_'. Each node's
children are stored as a chain: the node points to its first child, and each
child points to its next sibling. Together these form a binary trie. The
nodes are written in preorder, so a node's first child is always the next
word in memory. That child link therefore needs only the bit `[16]`, which
says whether the first child is the word end (then it is not stored). The
sibling link is the distance to the sibling:
* 0 means there is no sibling;
* 0xFFFF means the only remaining sibling is the word end.

Each node is 22 bits, with the root at address 0. The full-size memory has
425,984 words, enough for a 191,735-word English dictionary (425,983 nodes,
1.12 MB). `lm_memory` is a plain synchronous array with one read port and a
load port. Reads are registered.

### Visitor

`lm_visitor` follows the published LM-visitor procedure:
* On `start` it reads DP.
* If bit 16 is clear, it steps to DP + 1, the first child. Otherwise it
  notes that only the word end follows.
* For k = 1…26 it compares the current node's character with k, one label
  per cycle:
  * On a match it reports Pr = 1 and T_S = the node address, and then
    follows the sibling link (or notes "no more" or "only '_' left").
  * Otherwise it reports Pr = 0 and T_S = invalid.
* For k = 27 (the word end) it reports Pr = 1 and T_S = 0 (back to the root,
  the next word starts), unless the prefix cannot end here.

The first answer comes two cycles after `start`, and there are 27 answers in
all. Because siblings are sorted, one pass over k walks each sibling chain
exactly once.

The loader's job is to write the dictionary image through `lm_wr_*` before
decoding. The testbench package `tb/tb_dict_pkg.sv` has a builder that shows
the exact construction: sort the words with '_' ranked after 'z', then
allocate nodes in order of first appearance and link each new node from the
previous node at its depth.

## Top level (`ctc_decoder`)

| port | meaning |
|---|---|
| `y_in`, `y_valid`, `y_ready`, `y_last` | 28 beats per frame. `y_last` marks the final beat of a sequence. |
| `lm_wr_en`, `lm_wr_addr`, `lm_wr_data` | dictionary load, while idle |
| `res_valid`, `res_label`, `res_last`, `res_empty` | decoded sentence |

The softmax and the beam search alternate on frames, because the
probabilities are not double-buffered. The "last frame" flag travels with the
frame held in the softmax.

| parameter | default |
|---|---|
| W | 8 |
| T_MAX | 1800 (the speech task's longest input) |
| LM_DEPTH | 425,984 |
| LAMBDA, INV_LAMBDA, D1, D2 | as above |

Storage at the defaults:
* the B̂ sentences take 8 × 1800 × 5 = 72,000 bits;
* the dictionary takes 9.37 Mbit.

## Known departures and limits

* **No apostrophe.** The experiments the method was evaluated on add an
  apostrophe label (K = 28), but no encoding for it is defined. This design
  has K = 27, so transcripts with apostrophes cannot be produced.
* **DP width.** The block diagram prints the DP(i) bus as 5 bits. DP is a
  dictionary address, so it is 19 bits here.
* **d1 value.** Two values are given for the speech-task d1: an 11-bit
  0.10111110111 and, in the table of tried settings, a 10-bit 0.1011110111.
  The 10-bit value is used, matching the format of d2.
* **Sentence overflow.** A sentence longer than T_MAX labels triggers an
  assertion in simulation. Choose T_MAX to be at least the number of frames.
* **Full-sentence copy.** The copy in UPDATE is a single-cycle array move.
  At T_MAX = 1800 it is wide logic. A serial copy would trade it for
  T_MAX cycles.

## Verification

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=N failures=M`:

| testbench | what it checks against |
|---|---|
| `tb_lod`, `tb_sort_block` | every single-bit input plus random inputs, compared with a software loop |
| `tb_exp_unit`, `tb_log_unit` | the same formula in real arithmetic, with tolerances |
| `tb_softmax` | a real-number model of the same steps (y_max, EXP with d1, F, LOG, EXP with d2), argmax, a sum near 1, latency of 2N+1 edges |
| `tb_lm_memory` | random write/read against a shadow array |
| `tb_lm_visitor` | every node of a small dictionary: Pr(k\|y) and T_S for all 27 labels, against the word list |
| `tb_beam_search` | a real-number model of the original prefix beam search (the W best prefixes, merged paths), with every extension allowed; the decoded sentences are compared. It also checks the frame cycle count and that merge, evict, copy and shift all occur. |
| `tb_ctc_decoder` | the whole chip at its default parameters, dictionary loaded through the port. It decodes six sequences (e.g. "fate fat", a spelling corrected by the dictionary, "consequence", an all-blank input). It also counts LM rejections, word ends returning to the root, merges, evictions, sentence copies and probability shifts, and fails if any never happens. |
| `tb_workloads` | the two evaluated settings at full input length. The speech setting (defaults) decodes 1800 frames into a 600-label sentence of dictionary words. The scene-text setting (λ = 1, its own d1 and d2, T_MAX = 25) decodes a word from 25 frames. Both results and both cycle budgets are checked. |

Both end-to-end testbenches run the full-size configuration (W = 8,
T_MAX = 1800, a 425,984-word dictionary memory). Each finishes in seconds. In
the 1800-frame run, a frame takes about 404 clock cycles on average. That
time includes the 28 input beats, the softmax, and the beam search with a
full beam.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/ctc_pkg.sv tb/tb_dict_pkg.sv tb/tb_ctc_decoder.sv -y rtl \
  --top-module tb_ctc_decoder -Mdir obj && ./obj/Vtb_ctc_decoder
```

Replace the testbench name to run any other. Only the testbenches that build
dictionaries need `tb/tb_dict_pkg.sv`.
