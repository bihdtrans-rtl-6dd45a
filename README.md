# BiHDTrans inference pipeline in SystemVerilog

BiHDTrans classifies a multivariate time series with a one-layer transformer
that lives entirely in a binary hyperdimensional (HD) space. Every time step
of N sensor values becomes one D-bit hypervector; self-attention is done with
bitwise binding (XNOR), bit counting and thresholds instead of matrix
products, softmax and floating point; and the class is found by comparing the
final token's hypervector with K stored class prototypes by Hamming distance.
Because the D dimensions of a hypervector are independent and identically
distributed, the hardware never needs a whole hypervector at once: it streams
hypervectors through the pipeline DP dimensions ("a word") per clock cycle,
and only the attention score of a head has to wait for that head's words to
be summed.

This RTL implements the FPGA inference datapath of the BiHDTrans paper
(Zhang, Liu, Shen, Wang, "BiHDTrans: binary hyperdimensional transformer for
efficient multivariate time series classification"): the six blocks A-F of its
hardware figure, with their counters C1-C5. Training (the prototypes and
binding hypervectors are learned offline as a binarized network) is not
hardware and is not included; its results are loaded through a configuration
port.

## The computation

Bipolar values {-1,+1} are stored as bits {0,1}. Binding (element-wise
product) is then XNOR, and the bipolar sum of n bits of which c are 1 is
2c - n, so every `sign` or `bool` becomes a comparison of a bit count with a
threshold.

For a window of L samples f^t = (f_1^t .. f_N^t), t = 1..L:

| step | equation | block |
|---|---|---|
| map | F_i = position hypervector of feature i; V_i^t = level hypervector of the quantized value f_i^t | A `item_memory` |
| encode | H_e^t = sign(rho^t(sum_i F_i XNOR V_i^t)) | B `hd_encoder` |
| project | H_q = H_e XNOR BV_q, H_k = H_e XNOR BV_k, H_v = H_e XNOR BV_v | C `qkv_store` |
| score | b_{t,i} = 1 if H_q^t . H_k^i > 0 over the head's dimensions, else 0 | D `attn_score` |
| attend | H_a^t = sign(sum_i b_{t,i} H_v^i), H_c^t = H_a^t XNOR BV_a | E `attn_bundle` |
| classify | label = argmax_k matches(H_c^L, C_k) = argmin_k Hamming distance | F `hd_classifier` |

rho^t is a cyclic rotation by t positions. The D dimensions are split into NH
heads of DH = D/NH dimensions; the attention score of each head uses only that
head's dimensions, and BV_q, BV_k, BV_v, BV_a are D-bit vectors whose slices
serve the heads. There is no feed-forward block after attention.

Default sizes: D = 10000, NH = 10 (DH = 1000), DP = 128, N = 12, L = 25,
K = 9. The first five follow the paper (its JapaneseVowels hardware
configuration); K = 9 is the class count of that dataset, and the feature
format (8-bit unsigned, quantized to 16 levels) is this design's choice.

## Word layout

Every hypervector is held as NCH = NH * CPH words of DP bits, where
CPH = ceil(DH / DP) words cover one head; word address = head * CPH + chunk.
When DP does not divide DH (1000 / 128 at the defaults) the last word of each
head has DH - (CPH-1)*DP real bits (104) and padding above them. All tables
and registers carry the padding bits, but no count ever includes them: the
attention lanes and the classifier mask them out. At the defaults NCH = 80,
so a hypervector is 10240 stored bits of which 10000 are real.

All tables are indexed by this word address, so the whole pipeline is a
stream of words in address order 0..NCH-1 per token.

## Blocks

### A: item memory (`item_memory`)
Holds N position hypervectors and 2^LVL_B level hypervectors. The level of a
feature is its top LVL_B bits (a uniform quantizer over the unsigned input
range). One read returns, for a word address, the N position words and the N
level words selected by the N features (one-cycle read latency).

### B: encoder (`hd_encoder`)
Per cycle: N XNORs per dimension, an adder tree over the N match bits of each
of the DP dimensions, and the threshold count >= ceil(N/2) (bipolar sum >= 0;
a tie gives +1).

The permutation is the least obvious part. Rotating a D-bit vector by t moves
bits across word boundaries, and t grows with the time step. Write
t = q*DP + r. Output word a then consists of the top r bits of source word
a-q-1 and the low DP-r bits of source word a-q (indices modulo NCH). So the
encoder reads the source words in the order -q-1, -q, ..., NCH-1-q: NCH+1 reads
per time step, one more than a plain pass. Each output word is a funnel shift
by r of the current and previous binarized words. Since sign is element-wise,
rotating after the threshold is the same as rotating before it. q and r are
kept as counters (the start address moves down by one whenever r wraps), so
no division is needed. The rotation runs over the NCH*DP stored bits,
padding included. That is exact when DP divides DH. Otherwise it is an
equally valid random-like permutation of a slightly larger space.

A time step takes NCH+1 cycles, and the next one can start right behind it. A
step's words leave the encoder 3 cycles after their first read.

### C: query/key/value store (`qkv_store`, `hv_fifo`)
Each encoded word is XNORed with the BV_q, BV_k and BV_v words of its address.
Keys and values go into register files at token index C1 (a counter advanced
by each token's last word). The files are organised so that one read returns
word a of all L tokens at once, since the next two blocks work on all L
tokens in parallel. Queries go into a FIFO (`hv_fifo`) deep enough for all L
of them.

### D: attention scores (`attn_score`)
Counter C2 pops query words from the FIFO. Each word is XNORed with the same
word of all L keys. L adder trees count the matches, and L accumulators add
them over the CPH words of a head. Counter C3 marks the head's last word; then
b_i = (2*matches_i > DH), which is "dot product > 0". The mask row (L bits) is
emitted for one cycle. Heads are scored in order, one word per cycle.

Two modes, chosen by `last_only`:
* `last_only = 1`: only the final token is scored. This is the classification
  setting, since only the final token's output is used. Earlier query words
  are popped and dropped as soon as they arrive, while encoding is still
  going on. The final query waits for `keys_ready`, which means all L keys
  are stored.
* `last_only = 0`: every token is scored in order, starting once all keys are
  stored. All L token outputs end up in the token register.

### E: selective bundling (`attn_bundle`)
For a mask row of head h, this block reads the head's CPH value words, one per
cycle. Each holds word a of all L values. For every dimension it counts the
selected values that are 1 (c) and compares 2c >= S, where S is the number
of selected tokens. That is sign(sum) with sign(0) = +1, so an empty row gives
all +1. The result is XNORed with BV_a to give H_c. The word is streamed to the
classifier and also stored in the token register at index C4 (the row's
token), which can be read through the `hr_*` port. E needs CPH cycles per row,
the same rate at which D produces rows. E therefore works on head h while D
scores head h+1, and an assertion checks that no row arrives while E is busy.

### F: classifier (`hd_classifier`)
Each H_c word is XNORed with the same word of all K prototypes, the matches
are counted by K adder trees, and the counts are accumulated over the NCH words
of a token. The accumulation is controlled by counter C5, which also tracks
the position within the head so that padding is masked. The similarities are
the match counts over the D real dimensions. The label is the class with the
most matches (least Hamming distance), with ties going to the lower index.

### Top (`bihdtrans_top`)
Wires A-F together. The window ends when the final token's prediction leaves
F: `done` pulses with `label` and `sims`, the counters are cleared, and the
next window's samples are accepted. Status outputs `stall_empty` (D wants a
query word but the FIFO is empty), `stall_keys` (a query is waiting for the
keys) and `drop` (a query word is being dropped) expose the attention unit's
flow control.

## Interface and timing

* Configuration: `cfg_we`, `cfg_sel` (`bihd_pkg::cfg_sel_e`: position, level,
  BV_q, BV_k, BV_v, BV_a, class), `cfg_row` (feature, level or class),
  `cfg_addr` (word address), `cfg_data` (DP bits). One word per cycle. Write
  the tables while no window is in flight. Bit b of word a is dimension
  (a mod CPH)*DP + b of head a / CPH. Padding bits may hold anything.
* Samples: `in_valid`/`in_ready`, `in_feat` packed as N fields of FEAT_W bits.
  A sample is taken at most once every NCH+1 cycles, at most L per window.
* Result: `done`, `label`, `sims`.

Measured cycle counts, from the cycle the last sample is accepted to `done`:

| mode | formula | defaults |
|---|---|---|
| `last_only = 1` | (NCH+1) + 3 + NCH + CPH + 5 | 177 cycles (1.77 us at 100 MHz) |
| `last_only = 0` | (NCH+1) + 3 + L*NCH + CPH + 5 | 2097 cycles |

If the samples arrive back to back, the encoder adds L*(NCH+1) = 2025 cycles
before that point. The paper reports 1.58 us for its JapaneseVowels design at
100 MHz. Measured from the last sample, the value above is close to that. The
paper does not say from which event its latency is measured, nor how it
overlaps encoding with the arrival of the samples, so the match cannot be
confirmed.

## Sizes of the other configurations

The paper evaluates seven datasets with different (N, L, d). The RTL is
parameterized on all of them (`D`, `NH`, `DP`, `N`, `L`, `K`, `FEAT_W`,
`LVL_B` on `bihdtrans_top`). At its defaults it holds only the JapaneseVowels
configuration. The others need the top elaborated with their numbers:

| dataset | N | L | d | classes* |
|---|---|---|---|---|
| JapaneseVowels (default) | 12 | 25 | 128 | 9 |
| Heartbeat | 61 | 405 | 16 | 2 |
| SpokenArabicDigits | 13 | 93 | 100 | 10 |
| FaceDetection | 144 | 2 | 10 | 2 |
| PEMS-SF | 963 | 144 | 1 | 7 |
| RacketSports | 6 | 30 | 200 | 4 |
| Epilepsy | 3 | 207 | 80 | 4 |

\*Class counts are those of the public datasets; the paper does not list them.

The reduced-dimension variants (D = 8100 down to 1600) likewise need the `D`
parameter. Note that CFG_ROW_W = 10 and CFG_ADDR_W = 14 in `bihd_pkg`, which
is enough for PEMS-SF (963 features, 10000 words at d = 1).

`tb/tb_bihd_workloads.sv` runs six of these configurations side by side,
through `tb/bihd_window_run.sv`. It also runs JapaneseVowels at D = 8100 and
D = 3600, with d kept at 128. Each run loads random tables and classifies one
random window with only the final token attending. It compares the label, the
similarities, the final token's H_c and the latency with the reference model.
Measured latencies from the last accepted sample to `done` (cycles):

| dataset | words per hypervector | latency |
|---|---|---|
| JapaneseVowels | 80 | 177 |
| SpokenArabicDigits | 100 | 219 |
| RacketSports | 50 | 114 |
| Epilepsy | 130 | 282 |
| FaceDetection | 1000 | 2109 |
| Heartbeat | 630 | 1332 |
| JapaneseVowels, D = 8100 | 70 | 156 |
| JapaneseVowels, D = 3600 | 30 | 72 |

These follow 2*NCH + CPH + 9 cycles, where NCH is the number of words per
hypervector and CPH the number of words per head. Going from D = 10000 to 8100
and to 3600 cuts this latency by 12 % and 59 %. The reported FPGA latencies
fall by 17.2 % and 49.8 %, but their measurement window is not given.
PEMS-SF is not simulated: loading its 963 position rows alone takes about ten
million cycles.

At the defaults the storage is about 1.56 Mbit: the K and V register files
(2 x 25 x 80 x 128), the query FIFO and the token register (25 x 80 x 128
each), the level, position, binding and class tables (41 x 80 x 128).

## Where this design chooses for itself

The paper gives the block structure, the equations and the counter roles.
These points are this design's own:
* sign(0) = +1 in the encoder and in the attention output; the attention mask
  uses "> 0" as the paper states.
* The rotation direction of rho^t (towards higher indices) and rotating over
  the padded word space.
* The feature format and the quantizer (top LVL_B bits of an unsigned value).
* The padding of heads whose size is not a multiple of DP.
* Loadable tables and the configuration port; the one-cycle read latencies;
  the FIFO depth.
* The last-only mode dropping the earlier queries during encoding. The paper
  describes both reading every query and "computing attention only for the
  final token".
* The classifier takes the maximum similarity rather than sorting; ties go to
  the lower index. The paper's text says "highest similarity" while its
  figure prints "arg min"; these agree if the figure means Hamming distance.
* The token vector is called H_c here (H_v in the paper's hardware section).

## Files

`rtl/`: `bihd_pkg.sv` (sizes, table selector, helper functions),
`adder_tree.sv`, `item_memory.sv`, `hd_encoder.sv`, `hv_fifo.sv`,
`qkv_store.sv`, `attn_score.sv`, `attn_bundle.sv`, `hd_classifier.sv`,
`bihdtrans_top.sv`.

`tb/`: one self-checking testbench per module (`tb_<module>.sv`), the
bit-level reference model `bihd_ref_pkg.sv` (a class written directly from the
equations above), `tb_bihdtrans_top.sv` (end to end at reduced size: D = 60,
3 heads of 20, DP = 8, N = 4, L = 12, K = 4) and `tb_bihdtrans_full.sv` (end to
end at the default size, both modes) and `tb_bihd_workloads.sv` with its
runner `bihd_window_run.sv` (six dataset sizes and two reduced dimensions). Every testbench prints
`TB_RESULT checks=<n> failures=<n>`.

The reduced end-to-end test compares the label, all K similarities and every
word of every scored token's H_c with the model over 8 windows in both modes.
It also checks the latency formulas. It requires each flow mechanism to occur:
input back-pressure, FIFO-empty stall, wait for keys, dropped queries,
permutation across word boundaries and wrap-around, encoder ties and empty
mask rows.

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
  rtl/bihd_pkg.sv tb/bihd_ref_pkg.sv rtl/adder_tree.sv rtl/item_memory.sv \
  rtl/hd_encoder.sv rtl/hv_fifo.sv rtl/qkv_store.sv rtl/attn_score.sv \
  rtl/attn_bundle.sv rtl/hd_classifier.sv rtl/bihdtrans_top.sv \
  tb/tb_bihdtrans_full.sv --top-module tb_bihdtrans_full -o sim
./obj_dir/sim
```

The full-size build takes about half a minute and the run under a second. For
a single block, compile `bihd_pkg.sv`, `adder_tree.sv`, the block (plus
`hv_fifo.sv` for `qkv_store`) and its testbench. Simulation is two-state;
everything that is read is reset or loaded first.

## Known limits

* The latency against the paper's figures is only comparable for the default
  configuration, and only if their measurement starts at the last sample.
* Six of the seven dataset sizes are simulated (see above). PEMS-SF and the
  reduced-dimension variants other than D = 8100 and 3600 have not been run.
* `rst_n` is used asynchronously in the logic and synchronously as the
  `disable iff` of the assertions, which Verilator's lint points out
  (SYNCASYNCNET). This is harmless.
