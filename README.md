# QubitHD: a hyperdimensional classifier accelerator with stochastic binarization

Hyperdimensional (HD) classifiers map each input to a very long vector, a *hypervector*
of D = 10,000 elements, and learn one class hypervector per class by adding up the
encoded training samples. A query is classified by finding the class hypervector that is
most similar to it. If the class hypervectors are reduced to one bit per element (+1/-1),
similarity becomes a Hamming distance (XOR and popcount), which is very cheap in hardware.
The cost is accuracy: a plain sign rule discards how far each element was from zero.

QubitHD keeps the cheap binary model but makes it *right on average*. Each element x of a
class hypervector is binarized with

    qbin(x) = +1                                   if x >  b
            = +1 with probability 1/2 + x/(2b),    if -b <= x <= b   (otherwise -1)
            = -1                                   if x < -b

so that inside the cutoff band the expected binary value is x/b, proportional to x. The
cutoff b is a fixed fraction of the standard deviation of the class hypervector. The
non-binary model is kept and is retrained against the predictions of the binary model;
after every retraining round the binary model is drawn again. The randomness also keeps
retraining from stalling, so fewer rounds are needed.

This repository holds synthesizable SystemVerilog for an accelerator that runs the whole
flow: encoding, one-shot training, stochastic binarization, retraining with a
convergence test, and binary inference.

## The algorithm as the hardware runs it

Values +1/-1 are stored as one bit, **0 = +1 and 1 = -1** (the sign-bit convention).
Multiplying two bipolar values is then an XOR of their bits.

1. **Encoding.** A sample has n features f_1..f_n (unsigned, 8 bits). Each feature is
   discretized to one of 16 levels (its top 4 bits). Feature i selects the level
   hypervector L[q_i] and is bound to its position hypervector ID_i. The n bound vectors
   are summed:

       H_j = sum_i L[q_i]_j * ID_i_j,     H_j in [-n, n]

   H is the non-binary query. Its sign gives the binary query, with H_j >= 0 giving +1.
2. **One-shot training.** For every training sample, C[label] += H. C is the non-binary
   model, k rows of D signed integers.
3. **Stochastic binarization.** Every row of C is turned into a row of the binary model
   C^bin with qbin (see below).
4. **Retraining round.** Each training sample is encoded and searched against C^bin. The
   predicted class is the one at the smallest Hamming distance. If it differs from the
   label: C[label] += alpha*H and C[predicted] -= alpha*H, and the sample counts as an
   error. At the end of the round, the error count E is compared with the count of the
   previous round. `converged` is raised when |E - E_prev| < eps. C is then binarized
   again.
5. **Inference.** The query is encoded and searched against C^bin.

## Block structure

```
             host                                    qubithd_top
  im_*  ───────────────► item_memory (ID + level vectors)
                               │ 2 reads/clock
  smp_* ──► feature buffer ─► hd_encoder ──H chunk──► query buffer (sdp_ram) ──► model_update ──► class_memory (C)
                               │ binary chunk                                        ▲   │
                               ▼                                                     │   ▼
                         hamming_search ◄── binary_memory (C^bin) ◄── stochastic_binarizer
                               │                    │                (prng_lanes, isqrt)
  res_* ◄──── controller ◄─────┘         mr_* ◄─────┘
  cmd_* ────►
```

The hypervector is processed in **chunks** of LANES = 100 dimensions, so D = 10,000 is
100 chunks. Every memory is one chunk wide:

| memory | contents | organisation at default sizes |
|---|---|---|
| `item_memory` | ID vectors (n_max = 784) and level vectors (16) | 78,400 + 1,600 words x 100 bits |
| `class_memory` | non-binary model C | 26 x 100 words x (100 x 32 bits), 1 read + 1 write port |
| `binary_memory` | binary model C^bin | 100 words x (26 classes x 100 bits); per-class write |
| query buffer (`sdp_ram`) | H of the current sample | 100 words x (100 x 11 bits) |

### Encoder (`hd_encoder`)

The encoder goes through the chunks in order. For each chunk it reads one feature per
clock, together with that feature's ID word and level word. Each lane counts how often
the bound product is -1. After the n-th feature, H = n - 2*count. A chunk is done every
n clocks, so a sample takes n*D/LANES clocks: 61,700 for n = 617. The finished chunk is
written to the query buffer and goes straight to the search unit, so the search overlaps
the encoding.

### Associative search (`hamming_search`)

For each query chunk it reads that chunk of all k classes in one word of the binary
memory. It adds popcount(q XOR C_k) to k distance counters. After the last chunk it scans
the k counters, one per clock, for the minimum. On a tie the lower class index wins.

### Model update (`model_update`)

This unit does read-modify-write over one row of C (ADD), or over two rows one after the
other (RETRAIN: +alpha*H on the label row, -alpha*H on the predicted row). It handles one
chunk per clock: the class memory has separate read and write ports, so it reads chunk
c+1 while it writes chunk c. Sums saturate at the 32-bit signed range. It also clears
the whole model.

### Stochastic binarizer (`stochastic_binarizer`)

This is the part that differs from a plain HD accelerator. For each class in turn:

1. **Statistics pass.** It reads the row's 100 chunks and accumulates sum(x) and
   sum(x^2): 46 and 78 bits wide at the defaults.
2. **Standard deviation.** E[x] and E[x^2] are computed by multiplying the sums with a
   fixed-point reciprocal, round(2^32/D), so no divider is needed. Then
   sigma = isqrt(E[x^2] - E[x]^2). The root is taken by a digit-by-digit unit (`isqrt`),
   one result bit per clock, 32 clocks.
3. **Cutoff.** b = floor(sigma * b_frac / 256). b_frac is a run-time 8-bit value, so
   b/sigma runs from 0 to 255/256. The source text asks for b to be "smaller than
   sigma" in most cases. The chip reports b on `cut_valid/cut_class/cut_value`.
4. **Binarization pass.** It reads the row again. Each lane has its own 32-bit xorshift
   generator (`prng_lanes`) that gives 16 fresh random bits u per chunk. The lane forms
   r = floor(u * 2b / 2^16), which is close to uniform on [0, 2b). The element becomes
   +1 when r < x + b. Then P(+1) = (x + b)/(2b) = 1/2 + x/(2b), to within 2^-16. Elements
   above b or below -b take the deterministic value. If b = 0 the rule reduces to the sign
   rule, so b_frac = 0 gives the plain deterministic binarization used by earlier binarized
   HD methods.

One class takes about 2*CHUNKS + 40 clocks, so the 26 classes take about 6,300 clocks. This
cost is paid once per retraining round, not once per sample.

The generators are seeded from the `SEED` parameter at reset. Successive binarizations
keep drawing new numbers, so each round draws a different binary model.

### Controller (in `qubithd_top`)

The controller is a small state machine: idle → loading features → encoding/searching →
model update → result. Commands run from idle:

| command | action |
|---|---|
| `CMD_CLEAR` | write zeros to all of C (K_MAX*CHUNKS clocks) |
| `CMD_BINARIZE` | run the stochastic binarizer over classes 0..k-1 |
| `CMD_END_PASS` | latch the round's error count, update `converged`, then binarize |

`converged` is only raised from the second closed round on, since a single round has no
change to measure. The host decides whether to send another round.

## Using the top level

Set `cfg_num_features` (n, 1..784), `cfg_num_classes` (k, 2..26), `cfg_alpha`, `cfg_b_frac`
and `cfg_eps`. Keep them stable while the chip works. Then:

1. **Load the item memory.** Write n ID vectors and 16 level vectors, one 100-bit chunk per
   clock, with `im_we`, `im_sel` (0 = ID, 1 = level), `im_vec` and `im_chunk`. The chip
   does not generate them. The testbench makes the ID vectors random and the level
   vectors correlated: level q differs from level 0 in q*D/30 positions. Other schemes
   work as well.
2. Send `CMD_CLEAR`, then every training sample with `OP_TRAIN`, then `CMD_BINARIZE`.
3. **Retraining rounds.** Send every training sample with `OP_RETRAIN`, then `CMD_END_PASS`.
   Repeat until `converged`.
4. **Inference.** Send samples with `OP_INFER`.

A sample goes in on `smp_*`, one feature per valid/ready beat. The beat with `smp_last`
carries `smp_op` and `smp_label`. Each sample returns one result on `res_*` (valid/ready),
with the predicted class, its Hamming distance, the label and a correct flag. Commands use
`cmd_valid/cmd_ready` and are taken only while no sample is offered. While the chip is
idle, `mr_en/mr_chunk` read the binary model back: all classes of one chunk appear on
`mr_data` one clock later. This is how a trained binary model is exported.

**Cycle counts** at the defaults, for one sample with n features: n load beats, then
n*100 encode clocks, then k + about 3 search clocks. After that the model update takes
101 clocks for `OP_TRAIN` and 201 for a retraining miss. Encoding dominates. At a clock
of, say, 200 MHz a 617-feature sample takes about 0.3 ms. The FPGA inference times quoted
for QubitHD (about 0.25 µs per query) need all D dimensions, or many features, handled
in parallel. Here LANES sets the trade-off: raising it shortens encoding in proportion,
and the memories become wider to match.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `D` | 10000 | hypervector length (the standard HD size, used by QubitHD) |
| `LANES` | 100 | dimensions per clock; must divide D |
| `N_MAX` | 784 | most features per sample (largest of the evaluated data sets, MNIST) |
| `K_MAX` | 26 | most classes (ISOLET) |
| `FEAT_W` | 8 | feature width |
| `LEVEL_BITS` | 4 | 16 discretization levels |
| `CW` | 32 | width of a non-binary model element |
| `SEED` | 1 | seed of the random generators |

Shared types and constants (operation and command codes, default sizes) are in
`rtl/qhd_pkg.sv`.

These defaults hold all five data sets the method was evaluated on: ISOLET (617
features, 26 classes), UCIHAR (561, 12), MNIST (784, 10), FACE (608, 2) and EXTRA
(225, 4). The largest one-shot class element, about 3.2e8 for FACE's 522,441 samples, fits
in 32 bits. Data sets are streamed from the host, so their size needs no on-chip storage.

## What comes from the method and what is this design's own

Taken from the QubitHD description: D = 10,000; the encoder structure (discretization,
level and ID vectors, bind, bundle, compare); the sign rule bin(x) = +1 for x >= 0; one-shot
training by summation; the retraining rule with a learning rate; retraining on the binary
model's predictions; Hamming distance and minimum-distance search; the qbin rule, with b a
fixed fraction of sigma; rebinarizing once per round; and the |dE| < eps stopping test. The
data-set sizes set N_MAX and K_MAX.

This design's choices, where the description is silent:

- The whole micro-architecture: chunked processing, memory organisation, one feature per
  clock, sequential minimum scan, and the valid/ready interfaces.
- Feature width (8 bits), 16 levels, and level selection by the top feature bits.
- Naming of the two vector sets. The method's prose calls the random per-position vectors
  "base hypervectors", while its encoder diagram labels them ID vectors and uses "base
  vectors" for the value side. This design follows the diagram. A feature's value selects a
  level vector, and that is bound to the ID vector of its position. The prose gives no
  construction for the level vectors, so they are loaded like the ID vectors.
- The model element width (32 bits) and saturating arithmetic.
- An integer learning rate alpha (8 bits). No value for alpha is given.
- Sigma taken per class hypervector. The description says only "the standard deviation
  of the data". Sigma is computed with a reciprocal multiply and an integer square root.
- The random source (per-lane xorshift32) and the 16-bit resolution of the probability.
- E counted as misclassified retraining samples per round, with convergence reported from
  the second round.
- The encoded data set is not stored on chip. The method's flow draws an "encoded
  dataset" that retraining goes over. Here the host streams the raw samples each round
  and they are encoded again. This gives the same H, at the cost of the encoding time
  per round.
- The ID and level hypervectors are generated off chip and loaded.
- Tie-break to the lowest class index.

Not reproduced: the published energy and timing figures. They belong to the authors' FPGA
build, whose micro-architecture is not described. The same holds for the model sizes
quoted for QubitHD. For ISOLET, for example, 65.0 KB is quoted, while the binary model
here is 26 x 10,000 bits = 32.5 KB.

## Verification

Each block has a self-checking testbench in `tb/`. Each ends with the line
`TB_RESULT checks=N failures=M`.

| testbench | checks |
|---|---|
| `tb_item_memory`, `tb_class_memory`, `tb_binary_memory` | write/read-back against a copy, one-clock read latency, per-class writes |
| `tb_hd_encoder` | every H element and binary bit against a bipolar reference, chunk order, latency n*CHUNKS+2 |
| `tb_hamming_search` | argmin and distance against a reference, ties, exact matches, latency |
| `tb_model_update` | whole model after CLEAR/ADD/RETRAIN with random alpha, saturation, clock counts |
| `tb_stochastic_binarizer` | b against a floating-point sigma; deterministic elements; over 30 draws, a z-test that P(+1) = 1/2 + x/2b; draws differ between runs; b = 0 sign rule |
| `tb_qubithd_top` | end to end at reduced size (D = 800, 40 lanes, 12 features, 5 classes) |
| `tb_qubithd_full` | end to end with all parameters at their defaults, in ISOLET's shape (617 features, 26 classes, 52 training samples, a quarter of them mislabelled so that retraining has misses) |
| `tb_qubithd_workloads` | four full-size chips side by side, in the shapes of UCIHAR (561 features, 12 classes), MNIST (784, 10), FACE (608, 2) and EXTRA (225, 4) |

The two end-to-end testbenches share `tb_qubithd_core`. It keeps an independent model of
the whole algorithm: its own encoder, non-binary model, retraining rule and Hamming
search on the binary model it reads back from the chip. It checks every prediction and
distance, each round's error count and `converged`, and each class's cutoff. After every
binarization it also checks every element that qbin makes deterministic. It counts how
often each mechanism happened (clear, one-shot training, binarization, stochastic
elements, retraining miss, retraining hit, convergence, inference) and fails if one never
did. The data are synthetic: random class prototypes plus noise, with the feature and class
counts of the real data sets but far fewer samples. The full-size ISOLET run takes
about two minutes and the workload run about three and a half.

Running a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/qhd_pkg.sv tb/tb_qubithd_top.sv \
          --top-module tb_qubithd_top -o sim && ./obj_dir/sim
```

Replace `tb_qubithd_top` with any other testbench name. The testbenches use `$urandom`
only and need no data files.

## Limits

- Throughput is far below the published FPGA figures at the default LANES (see above).
- The stochastic rule draws with 16-bit resolution. E[qbin(x)] equals x/b only to about
  2^-16.
- Sigma is taken over the whole row, including its mean. A row with a large offset gets a
  cutoff measured around that offset, while the band itself is centred on zero, as qbin
  defines it.
- Memories have no reset. Before the first search, C must be cleared and binarized.
- The encoder has no back-pressure. This needs nothing from the host, because the search
  unit and the query buffer take a chunk in every clock.
