# Majority-logic decoding of RM(2,5) at its information positions

This is a hard-decision decoder for the Reed–Muller code RM(2,5): length 32,
dimension 16, minimum distance 8, correcting up to three errors. It is a
two-step majority-logic decoder, built from parity trees and 4-of-6 threshold
gates with no iteration or state. Its delay is therefore small and fixed, which
suits safety-critical control loops and memory protection.

The main idea is to correct only what the receiver needs. Under systematic
encoding the 16 information bits appear unchanged at 16 positions of the
32-bit codeword. A decoder that repairs only those 16 positions still gets the
message right whenever the whole word holds at most three errors. It needs far
fewer majority gates than one that repairs all 32 positions:

| | first step | second step | total |
|---|---|---|---|
| all 32 positions (classic two-step decoder) | 48 | 32 | 80 |
| information positions only (this design) | 30 | 16 | **46** |

30 is the proven minimum number of first-step gates for RM(2,5), over every
possible choice of information set. The 30 flats used here are the published
family for the information set {0,…,15}.

The RTL adds two things around the decoder: the matching systematic
encoder, and a checker that tests whether the "at most three errors" premise
actually held.

## Positions are points of a 5-dimensional space

Each of the 32 positions is a point of the binary space Z₂⁵. The positions are
numbered through the field GF(32) = GF(2)[x]/(1 + x² + x⁵), where α⁵ = α² + 1:

* position j (0 ≤ j ≤ 30) is the field element αʲ, read as a 5-bit vector;
* position 31 is the zero vector.

Everywhere in the RTL, **bit j of a 32-bit word is position j**. This ordering
is not the lexicographic one. It makes positions 0..30 a cyclic code once
position 31 is deleted (see *Punctured code* below).

The code has a geometric description that the decoder rests on:

* a *d-flat* is an affine subspace of dimension d: 2ᵈ points closed under
  a + b + c;
* RM(2,5) is spanned by the indicator words of all flats of dimension ≥ 3;
* RM(2,5) is self-dual, so the parity of any codeword over any 3-flat is 0.

## Step 1: is the number of errors on a 2-flat odd?

A first-step unit (`flat_checksum`) belongs to one 2-flat U, a set of four
positions. There are seven 3-flats that contain U: each is U ∪ (U + w) for a
direction w outside U's own direction space. Any two of them meet exactly in U,
and together they cover all 32 points. For each such 3-flat V, the parity of
the received word over V (a *check sum*) is the error parity on U plus the
error parity on V \ U, because codewords contribute 0.

The unit uses six of the seven check sums. It leaves out the one 3-flat that
contains position 31 (the zero vector), for the reason given under *Punctured
code*. Suppose at most three errors are present:

* if the errors on U are odd in number, at most two errors remain outside U;
  they disturb at most two check sums, so at least 4 of 6 read 1;
* if they are even in number, the errors outside U touch at most three of
  the six disjoint sets V \ U, so at most 3 of 6 read 1.

A 4-of-6 majority gate (`maj_gate`) therefore outputs the error parity on U.
Each check sum is an 8-input XOR. The six masks are not stored: the package
function `rm25_pkg::check_masks` derives them from the four points of U at
elaboration time, using GF(32) arithmetic.

## Step 2: is information position j wrong?

The second-step unit of position j (`info_bit_corrector`) takes six 2-flats
that contain j and meet pairwise *only* in j:

* an error at j makes all six 2-flats odd;
* each error elsewhere lies in at most one of them.

With at most three errors in total, at least four of the six are odd exactly
when j is wrong. A second 4-of-6 gate decides, and an XOR flips the bit.

The whole difficulty is choosing few 2-flats so that every information
position gets its six. A 2-flat can serve every information position it
contains, so the aim is to pack information positions densely into the flats.
The family used (`rm25_pkg::FLAT_POS`, kept in the published order) is:

* 9 flats lying wholly in the information set: {0,1,8,12} {0,4,5,7}
  {1,6,7,13} {1,9,11,15} {2,4,9,12} {2,6,10,15} {2,7,8,14} {3,5,10,13}
  {4,6,11,14};
* 18 flats with three information positions: {0,2,13,25} {0,3,9,17}
  {0,10,11,26} {0,14,15,18} {1,3,14,26} {1,4,10,18} {2,5,11,19} {3,4,8,22}
  {3,6,12,20} {3,7,11,16} {4,13,15,17} {5,6,9,22} {5,8,15,26} {5,12,14,28}
  {7,10,12,27} {8,9,10,19} {9,13,14,16} {11,12,13,22};
* 3 flats with two information positions: {1,2,17,22} {6,8,24,25} {7,15,25,30}.

Every flat is used at each information position it holds: 9·4 + 18·3 + 3·2 =
96 = 16 × 6 votes. The function `rm25_pkg::flats_at_pos` gives the six flats
of a position; for example, position 0 uses flats 0, 1, 9, 10, 11 and 12. No
flat contains position 31, nor positions 21, 23 or 29.

The decoder (`rm25_info_decoder`) is these 30 + 16 units wired together. It is
purely combinational: an 8-input XOR, a 6-input threshold, another 6-input
threshold and an XOR.

## Encoder

`rm25_sys_encoder` multiplies the information vector by the systematic
generator matrix for information positions {0..15}. The matrix is stored in
`rm25_pkg::GEN_ROWS`, one 32-bit row per information bit:

* columns 0..15 of the matrix form the identity;
* codeword bit j (16 ≤ j ≤ 31) is the XOR of the information bits whose row
  has a 1 in column j.

## Checking the three-error premise

The decoder's output is only guaranteed when at most three errors hit the
*whole* word, including parity positions that are never corrected. To check
this afterwards, `codeword_checker` does the following:

* it re-encodes the corrected information;
* it counts the Hamming distance between that codeword and the received
  word (`distance`);
* it sets `ok` when the distance is at most 3.

On RM(2,5), four errors are always caught. No codeword is within distance 3 of
such a word, because the transmitted codeword is 4 away and any other codeword
is at least 4 away. Five or more errors may be decoded to a wrong codeword
without a flag, as with any bounded-distance decoder.

## Punctured code

Deleting position 31 from RM(2,5) gives a cyclic [31,16,7] code, which also
corrects three errors. The check sums never read position 31 (see Step 1), so
the same decoder serves the punctured code unchanged, whatever value bit 31
carries. Only the checker needs to know the mode: with `punctured = 1` it
leaves bit 31 out of the distance. With d = 7, four errors on the punctured
code are no longer guaranteed to be flagged.

## Top level: `rm25_codec_top`

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset (clears the valid flags only) |
| `enc_valid_i`, `enc_info_i` | in | 1, 16 | word to encode |
| `enc_valid_o`, `enc_word_o` | out | 1, 32 | codeword, one clock later |
| `dec_valid_i`, `dec_word_i` | in | 1, 32 | received word |
| `dec_punctured_i` | in | 1 | the word belongs to the [31,16,7] punctured code |
| `dec_valid_o`, `dec_result_o` | out | 1, 39 | `{info[15:0], err_pos[15:0], distance[5:0], ok}` one clock later |

Each path has one register stage at its output:

* a word can be applied every clock;
* the result appears on the next rising edge;
* there is no back-pressure.

`err_pos` shows which information bits were flipped.

Hierarchy:

```
rm25_codec_top
├── rm25_sys_encoder                  (encode path)
├── rm25_info_decoder
│   ├── flat_checksum ×30  → maj_gate (4 of 6)
│   └── info_bit_corrector ×16 → maj_gate (4 of 6)
└── codeword_checker
    └── rm25_sys_encoder              (re-encoding)
```

`rm25_pkg` holds the types, the code constants, the flat list, the generator
matrix and the elaboration-time functions.

## What follows the published method and what is added

Taken from the published method:

* the two-step procedure and the 4-of-6 thresholds;
* the choice of information set {0..15};
* the 30 2-flats;
* the generator matrix;
* the use of the six 3-flats that avoid the zero vector;
* the suitability for the punctured code;
* the idea of validating the result by re-encoding and comparing distances.

Choices made here, where the method is silent:

* threshold gates built as population counts;
* the order of the six check sums within a unit (increasing direction w);
* the checker's distance output and the punctured-mode input;
* the one-cycle registered wrapper, its valid-only reset, and the port list.

Not built:

* the full 80-gate decoder, which is only a point of comparison;
* decoders for the other six classes of 16-position information sets. Their
  30-flat families are said to exist but are not listed.

The design is fixed to RM(2,5): the flat family is specific to this code and
information set. Other Reed–Muller codes need their own families.

## Verification

Every module has a self-checking testbench in `tb/`. The shared reference model
`tb/tb_rm_ref_pkg.sv` does not reuse the design's tables. It builds RM(2,5)
from its algebraic definition: the evaluations of the 16 Boolean monomials of
degree ≤ 2 on the points αʲ. Random codewords are random sums of those 16
words. Code membership is orthogonality to all 16, since the code is self-dual.

| testbench | what it checks |
|---|---|
| `tb_maj_gate` | all inputs, at 4-of-6 and at 2-of-3 |
| `tb_flat_checksum` | for all 30 units: recovers every check-sum mask by applying single-bit words, and checks it is an affine 3-flat containing the unit's 2-flat and avoiding position 31, distinct from the other five; then 2000 noisy codewords against the true error parity |
| `tb_info_bit_corrector` | all 128 input combinations |
| `tb_rm25_info_decoder` | every error pattern of weight 0–3 over all 32 positions (5489 patterns, each on a fresh random codeword), then 3000 punctured-mode words with bit 31 random |
| `tb_rm25_sys_encoder` | systematic on 0..15; output is a codeword; re-encoding a reference codeword's information reproduces it |
| `tb_codeword_checker` | distance and accept flag for 0–6 errors in both modes; wrong information rejected |
| `tb_rm25_codec_top` | end to end at the default configuration: 4000 encodes, then 4000 decodes with 0–4 errors, punctured words and random idle cycles, each result checked to arrive exactly one clock later. It also counts how often each case occurred (clean, information-bit correction, parity-only errors, four-error detection, punctured word, idle cycle, back-to-back words) and fails if any never occurred. |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with Verilator 5:

```
verilator --binary --timing -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/rm25_pkg.sv tb/tb_rm_ref_pkg.sv tb/tb_rm25_codec_top.sv \
    --top-module tb_rm25_codec_top -o sim && ./obj_dir/sim
```

The other testbenches run the same way; `tb_maj_gate` and
`tb_info_bit_corrector` need only the `rm25_pkg` package. Building a testbench
takes about ten seconds; each simulation then finishes in well under a second.

## Changing it

* **Another information set, or another flat family for {0..15}:** replace
  `FLAT_POS` and the information positions. The check-sum masks and the
  second-step wiring follow automatically. The family must give each
  information position six flats meeting pairwise only there, which
  `tb_flat_checksum` and `tb_rm25_info_decoder` check.
* **Another information set:** also replace `GEN_ROWS`. It must be the
  systematic generator matrix for that set; the encoder testbench checks
  this.
* **Pipelining:** for a faster clock, a register between the step-1 outputs
  (`flat_odd`) and the step-2 gates splits the path roughly in half.
