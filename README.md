# Streaming hyperdimensional encoder and logistic-regression learner

Click-through and similar tabular data mix a few numeric columns with many
categorical columns, and each categorical column can take millions of values.
The classic way to map such a record into a high-dimensional ("hyperdimensional",
HD) vector keeps a random codebook vector for every symbol, so memory grows
with the alphabet. This design needs no codebook. Each categorical symbol is
hashed a few times, and every hash output switches on one coordinate of a
D-dimensional sparse binary vector, as in a Bloom filter. The numeric columns go
through a fixed random projection, and the projection is sparsified by a
threshold. The two codes are merged into one embedding. A logistic-regression
model is then trained on that embedding by mini-batch stochastic gradient
descent. All of this happens in hardware, one record at a time, as the records
stream in.

The RTL is one streaming pipeline sized like the FPGA design it follows:

- D = 10,000 dimensions;
- N = 13 numeric and S = 26 categorical features (the Criteo click-log layout);
- P = 5 partitions with R = 64 lanes each.

In steady state it finishes one record every 72 clock cycles.

```
            in_valid/in_ready
 record ──┬──────────────────────────────┐
          │                              │
   ┌──────▼───────┐               ┌──────▼───────┐
   │ cat_encoder  │  S*K/P + 3    │ num_encoder  │  NCH + 2 cycles
   │ Murmur3 x P  │  cycles       │ P*R lanes of │
   │ Bloom vector │               │ Phi row MACs │
   └──────┬───────┘               └──────┬───────┘
          │ vec_c [D]                    │ vec_n [D]
          └──────────┬───────────────────┘
              ┌──────▼────────┐  OR / SUM / categorical only / concat,
              │embed_combiner │  also the one-deep hand-off
              └──────┬────────┘  register between the two stages
                     │ emb [D]
              ┌──────▼────────┐  dot, sigmoid, gradient,
              │  lr_update    │  batch update of theta
              └──────┬────────┘  2*NCH + 6 cycles
                     ▼
        out_valid, out_dot, out_prob
```

NCH = ceil(D / P / R) is the number of chunks a D-long vector is cut into when
P*R coordinates are handled per cycle. At the defaults it is 32: each partition
holds 2,000 coordinates, and 2,000 / 64 = 31.25. The last chunk of each
partition therefore uses only 16 of its 64 lanes.

## Partitioning: why everything is cut into P pieces

The key structural idea is that all three D-long vectors are cut the same way
into P contiguous partitions of D/P coordinates:

- the categorical code;
- the numeric code, which is also the rows of the projection matrix Phi;
- the model theta.

Inside a partition, R consecutive coordinates form a chunk, and lane j of
partition pp owns coordinates `pp*D/P + c*R + j`, for c = 0 .. NCH-1. With
this layout every unit works on P*R coordinates per cycle, and no unit ever
needs a coordinate from another partition.

For the categorical encoder, partitioning is what makes hashing parallel. A
hash output is data dependent, so two hashes computed in the same cycle could
address the same memory. The K hash functions are therefore split over the
partitions, Q = K/P per partition. Hash function `pp*Q + q` may write only into
partition pp, and so each partition receives at most one write per cycle,
whatever the data.

## Categorical encoding (`cat_encoder`, `murmur3_hash`)

A symbol is a 32-bit identifier. Identifiers are assumed unique across
features, so the same value in two columns must be given two different IDs
before it enters. The hash is MurmurHash3 (x86, 32-bit) of that one 4-byte word
under a per-function 32-bit seed, and the seeds are a configuration input.
`murmur3_hash` is a 3-stage pipeline that accepts one key per cycle:

1. The first stage multiplies the key by c1, rotates it and multiplies by c2.
2. The second stage mixes the result into the seed and applies the length and
   the first finalisation steps.
3. The third stage finishes the avalanche.

The 32-bit hash h is mapped onto the D/P coordinates of its partition by a
multiply-high, `floor(h * D/P / 2^32)`. A multiply-high takes one multiplier,
and a modulo by a number other than a power of two would need a divider.

Each record issues S*Q (symbol, hash) pairs per partition, one per cycle, and
all partitions issue at the same time. With the default K = 5, Q = 1, and the
26 symbols take 26 cycles. Three more cycles drain the hash pipeline. `done`
rises S*Q + 3 cycles after `start` is sampled, which is 29 cycles at the
defaults.

The vector is a register array that is cleared when `start` is sampled:

- **OR mode** (`COUNT = 0`): each hash sets its coordinate to 1.
- **Counting mode** (`COUNT = 1`, used for SUM combining): each hash increments
  its coordinate. The counters are CNT_W bits wide and saturate. CNT_W is
  ceil(log2(S*Q+1)), so at the defaults they never saturate.

## Numeric encoding (`num_encoder`)

z = Phi · x_n is computed for a D × N matrix Phi of PHI_W-bit signed elements
and N signed X_W-bit features. Coordinate i of the code is 1 when
|z_i| >= thr, and 0 otherwise. The threshold stands in for keeping the k
largest coordinates, which would need a sort. Choose thr so that the wanted
fraction of coordinates is set. thr is a runtime input, sampled at `start`.

Each of the P*R lanes has its own memory of NCH words, and each word holds one
whole row of Phi (N × PHI_W bits). Per chunk the pipeline is:

1. read the row;
2. do N multiplies and their sum in one cycle;
3. take the absolute value, compare with thr and store the bit.

`done` rises NCH + 2 cycles after `start` (34 at the defaults). Phi is written
by the host one row per cycle through `phi_we / phi_row / phi_data`. Element 0
of the row is in the low bits of `phi_data`.

## Combining the two codes (`embed_combiner`)

MODE selects how the two embeddings become one, coordinate by coordinate:

| MODE          | embedding                   | width                     |
|---------------|-----------------------------|---------------------------|
| `CMB_OR`      | vec_c OR vec_n (binary)     | 1 bit                     |
| `CMB_SUM`     | count of hashes + vec_n     | CNT_W + 1 bits (6 at defaults) |
| `CMB_NOCOUNT` | vec_c only (numeric ignored)| 1 bit                     |
| `CMB_CONCAT`  | [vec_n, vec_c != 0], 2D long | 1 bit                    |

In concatenation mode, the numeric code fills coordinates 0 .. D-1 and the
categorical code fills D .. 2D-1. The learner is then built for 2D coordinates
in 2P partitions. Each half gets its own P·R lanes, and the two halves are
processed in parallel. So a pass still takes NCH chunks, but the model and the
lanes double.

The result goes into a register, loaded on `load`. This register is also the
buffer between the encoding stage and the learning stage: once it is loaded,
the encoders may start on the next record while the learner works on this one.

## The learner (`lr_update`)

The model is Pr(y = 1) = σ(θ · φ). For every record the learner runs these
passes:

| pass | work | cycles |
|------|------|--------|
| DOT  | read NCH chunks of θ and φ; P partition sums of R products; accumulate | NCH + 3 |
| SIG  | σ of the dot product; error e = y − σ | 1 |
| GRAD | g += e·φ in every lane; on the last record of a batch, θ += (g + e·φ) >>> LR_SHIFT, then g = 0 | NCH + 1 |

`done` rises 2·NCH + 6 = 70 cycles after `start`. If the record's `learn` bit
is 0, GRAD is skipped: the learner only predicts and takes NCH + 4 cycles. The
dot product and the probability are reported for every record, computed with
θ as it was before that record's update.

θ and g are kept in per-lane memories of NCH words each, laid out like the
encoders' lanes. For binary embeddings, "θ × φ" only selects θ where φ is 1.
In SUM mode it is a small multiply.

### Number formats

- **θ:** TH_W = 16-bit two's complement with FRAC = 10 fraction bits, so the
  range is about ±32. The update saturates instead of wrapping.
- **σ and e:** FRAC fraction bits. σ is in [0, 1], and e = y − σ is in [−1, 1].
- **dot:** 40 bits. It cannot overflow for these sizes.
- **g:** the gradient sum of one batch. It is wide enough for BATCH records of
  the largest embedding value, so it never overflows.
- **Learning rate:** 2^−LR_SHIFT applied to the summed gradient of a batch.
  The defaults are a batch of 32 records and LR_SHIFT = 7.

### Sigmoid

The sigmoid is the PLAN piecewise-linear approximation, which uses only shifts
and adds. For |x| below 1 it is x/4 + 0.5. For |x| from 1 to 2.375 it is
x/8 + 0.625. For |x| from 2.375 to 5 it is x/32 + 0.84375. From 5 on it is 1.
Negative x use σ(−x) = 1 − σ(x). Its largest error against the true logistic
function is about 0.019.

### Other learner signals

- **clear** zeroes θ and g, one chunk per cycle, and restarts the batch.
- **theta_rd_idx / theta_rd_data** read any coordinate of θ while the learner
  is idle, with a latency of 2 cycles.

## Pipeline and handshakes (`hdc_fpga_top`)

Records enter through a valid/ready handshake (`in_valid`, `in_ready`). A
record is taken at a rising edge where both are high. After that:

1. Both encoders start together, and each raises `done` when finished.
2. When both have finished and the learner is free, the combiner register is
   loaded (the *hand-off*), and the learner starts in the next cycle.
3. The encoders are free for the next record as soon as the hand-off happens.
4. If the encoders finish while the learner is still busy, they hold their
   vectors and wait. This is a *stall*, counted in `n_stall_cycles`. While
   they wait, `in_ready` stays low, which is the input back-pressure.

So the encoders and the learner overlap, and the slower of the two sets the
rate. At the defaults that is the learner:

- one record completes every 2·NCH + 8 = **72 cycles**;
- the latency from acceptance to `out_valid` is about 105 cycles.

At 130 MHz, 72 cycles per record is 1.8 M records/s.

`out_valid` pulses once per record, in order, with `out_dot`, `out_prob`
(unsigned, FRAC fraction bits) and the record's label `out_y`. `idle` is high
when nothing is in flight. Do configuration (seeds, thr, Phi rows, `clear`)
only while `idle` is high. A `clear` raised while busy waits until the design
is idle, and it blocks new input. `batch_pos`, `n_inputs` and `n_batches`
report progress.

A typical session is:

1. Write the D rows of Phi.
2. Set the seeds and thr.
3. Pulse `clear` and wait for `idle`.
4. Stream records.
5. Read θ back.

## Parameters

All defaults are the sizes of the published FPGA design, apart from the ones
marked *chosen*, which the design had to fix itself.

| parameter | default | meaning |
|-----------|---------|---------|
| D         | 10000   | embedding dimension (multiple of P) |
| P         | 5       | partitions |
| R         | 64      | lanes per partition |
| N         | 13      | numeric features |
| S         | 26      | categorical features |
| K         | 5       | hash functions, a multiple of P (*chosen*) |
| MODE      | CMB_OR  | combining mode |
| PHI_W     | 8       | Phi element width, signed (*chosen*) |
| X_W       | 16      | numeric feature width, signed (*chosen*) |
| TH_W/FRAC | 16/10   | θ format (*chosen*) |
| BATCH     | 32      | mini-batch size (*chosen*) |
| LR_SHIFT  | 7       | learning rate 2^-7 (*chosen*) |

The categorical-only configuration of the reference design used R = 128. Set it
with `.MODE(CMB_NOCOUNT), .R(128)`. The concatenation build used a 20,000-long
model with R = 32: `.MODE(CMB_CONCAT), .R(32)` with D = 10000. In that mode
`theta_rd_idx` addresses all 2D coordinates.

## Where this RTL departs from the reference design

- **K = 5 hash functions.** The hardware value of K is not given. It must be a
  multiple of P, and K = 5 (one hash per partition) gives the encoding time the
  reference reports for the categorical encoder: about 30 cycles for 26
  symbols.
- **Timing is faster than the reference.** The reference quotes about 86 cycles
  per record for the OR design: 1.51 M records/s at 130 MHz. This RTL takes 72
  cycles per record.
  - The reference's encoders write into FIFOs. Here the vectors stay in
    registers, and a single hand-off register replaces the FIFO.
  - As a result, the numeric encoder needs 34 cycles instead of 48, and the
    gradient pass 33 instead of 34. The dot pass matches, at 35 cycles.
- **SUM mode is as fast as OR.** The reference's SUM design needs a
  read-modify-write for every hash, which makes categorical encoding slower
  there. Here the counters are registers, so SUM costs no extra cycles.
- **Both halves of a concatenation are D long.** The reference's FPGA build
  of this mode (20,000 coordinates) has equal halves, and that build is
  supported. Its R = 32 is a parameter override. Halves of different lengths,
  which the reference uses only in software experiments, are not supported.
- **Only the FPGA-style pipeline is given.** The in-memory (ReRAM crossbar)
  implementation of the same encoders is not included.
- **The hash-to-coordinate map is this design's own.** It is a multiply-high
  rather than a modulo.
- **Several details are this design's own choices:** the sigmoid approximation,
  all widths, the batch size and learning rate, the prediction-only mode, the
  configuration ports and the clear and read-back functions.

## Capacity

At the defaults the design keeps these values on chip:

- Phi: 10,000 × 13 × 8 bits = 1.04 Mbit;
- θ: 10,000 × 16 bits;
- g: 10,000 × 20 bits;
- four D-long vectors: the categorical code, the numeric code, the embedding,
  and the register copy.

No memory depends on the number of distinct symbols. A 32-bit ID covers an
alphabet of 4.3 × 10^9. The full Criteo log has about 1.9 × 10^8 distinct
values and 4.3 × 10^9 records, which is about 40 minutes per pass at 130 MHz
and 72 cycles per record.

## Verification

Each block has a self-checking testbench in `tb/`. The testbenches share the
reference functions in `tb/hdc_ref_pkg.sv`:

- Murmur3, written independently of the RTL;
- the bucket map computed by division rather than by multiply-high;
- the sigmoid written as arithmetic on integers.

| testbench | what it checks |
|-----------|----------------|
| `tb_murmur3_hash` | published MurmurHash3 vectors, 200 random keys and seeds streamed back to back, latency 3 and the tag side-band |
| `tb_cat_encoder` | full-size OR encoder and a small counting encoder (Q = 2, collisions) against the model, over several records; latency S·Q + 3 |
| `tb_num_encoder` | full-size projection loaded in shuffled row order; every bit against \|Φ_i·x\| >= thr, including thr = 0; latency NCH + 2 |
| `tb_embed_combiner` | all four modes, including SUM widths and the layout of the concatenation |
| `tb_lr_update` | small learner against a model: dot, σ, batch update, saturation, predict-only, clear, read-back, latencies |
| `tb_hdc_fpga_top_small` | end to end in SUM mode at D = 200, R = 8, S = 8, batch 4 |
| `tb_hdc_fpga_top_concat` | the same test in concatenation mode (a 400-long model) |
| `tb_hdc_fpga_top` | end to end at every default size (OR mode) |

The three end-to-end tests stream random records back to back. Each one compares:

- every dot product, probability and label against a complete software model;
- all of θ at the end, and again after a second `clear`.

They also count each mechanism and fail if one never happens:

- input back-pressure;
- an encoder stall behind the learner;
- batch updates;
- prediction-only records;
- a coordinate set by both encoders;
- a set coordinate in the partly used last chunk;
- a hash collision (in the reduced-size tests).

Most gaps between results must equal the steady-state interval of 2·NCH + 8
cycles. A prediction-only record can briefly let the encoders set the pace.

The full-size test builds slowly: the D-long register vectors make compilation
take several minutes. It then runs in a few seconds.

To simulate with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -j 0 --top-module tb_hdc_fpga_top_small \
    -y rtl -y tb +libext+.sv -Irtl -Itb \
    rtl/hdc_pkg.sv tb/hdc_ref_pkg.sv tb/tb_hdc_fpga_top_small.sv
./obj_dir/Vtb_hdc_fpga_top_small
```

Every testbench ends by printing `TB_RESULT checks=<n> failures=<m>`, and each
has a watchdog. To change sizes, override the top's parameters. D must be a
multiple of P, and K must be a multiple of P. R need not divide D/P.
