# LogHD inference engine

A conventional hyperdimensional-computing (HDC) classifier stores one
D-dimensional prototype hypervector per class. It classifies a query by
comparing the encoded query with all C prototypes, so memory and work both
grow as C·D.

LogHD ("Robust Compression of Hyperdimensional Classifiers via Logarithmic
Class-Axis Reduction", Yun et al.) shrinks the *class* axis and leaves D alone.
Each class gets a unique length-n code over an alphabet of k symbols, with
n ≥ ⌈log_k C⌉. Only n **bundle** hypervectors are stored. Bundle j is the sum
of all class prototypes, each weighted by its code symbol in position j.

A query is turned into an n-entry **activation vector**, its cosine similarity
to each bundle. Each class also stores its **expected activation profile**,
the mean activation vector of its training examples. The predicted class is
the one whose profile is nearest in squared Euclidean distance:

    A_j   = cos(M_j, φ(x_q))                 j = 1..n
    ŷ     = argmin_c  Σ_j (A_j − P_c,j)²      c = 1..C

Keeping the full dimension D keeps HDC's tolerance of bit errors in the stored
model, while the model shrinks from C to about log_k C hypervectors.

This repository holds synthesizable SystemVerilog for the inference side of
LogHD, that is, the computation above. The defaults are the configuration
used for LogHD's hardware comparison:

- 26 classes (the ISOLET speech data set)
- k = 2
- D = 10,000
- so n = ⌈log₂ 26⌉ = 5 bundles

That is 5 stored hypervectors where a conventional classifier would store 26.

The method fixes only *what* is computed. Everything below that is this
design's own: the lane count, memory banking, fixed-point formats, handshakes
and state machine. Training (code selection, bundling, profile estimation,
refinement) and the input encoder φ happen elsewhere. The engine receives an
encoded query and a trained model.

## Block structure

```
              bw_* (load)                         pw_* (load)
                  |                                   |
             +----v-----+                        +----v------+
  q_data --->|bundle_mem|  n rows of LANES       |profile_mem|  one profile
  (LANES     | n banks  |---------+              | C entries |  per cycle
   per beat) +----^-----+         |              +----^-----+--------+
     |            | row address   v                   | class        v
     |       +----+---------------------------------+ |      +---------------+
     +-reg-->|           similarity_unit            | |      |profile_decoder|
             | n dot products, LANES MACs each/cycle|-+----->| (A-P)^2 sums, |--> res_class
             | shift + saturate -> A (n x 8 bit)    | act    | running argmin|    res_dist
             +--------------------------------------+        +---------------+
                           ^          loghd_ctrl (FSM) sequences all of it
```

| file | role |
|---|---|
| `rtl/loghd_pkg.sv` | Default sizes, `clog_k` (n = ⌈log_k C⌉), width helpers, FSM state type |
| `rtl/bundle_mem.sv` | n banks of ⌈D/LANES⌉ words × LANES elements; one row of every bank per cycle |
| `rtl/profile_mem.sv` | C profiles of n entries; one whole profile per cycle |
| `rtl/similarity_unit.sv` | n dot-product accumulators, then rescaling to the activation format |
| `rtl/profile_decoder.sv` | Squared Euclidean distance of one profile per cycle, running minimum |
| `rtl/loghd_ctrl.sv` | Sequencer: query beats, then C profile reads, then the result handshake |
| `rtl/loghd_top.sv` | Top level: wires the above and exposes the load, query and result ports |

## One inference, cycle by cycle

The query φ(x_q) streams in on `q_data`, LANES = 100 elements per beat. Lane
i of beat r carries dimension r·LANES + i. There are ROWS = ⌈D/LANES⌉ = 100
beats. The stream uses a valid/ready handshake (`q_valid`/`q_ready`), and a
beat counts when both are high.

1. **Accumulate (ROWS beats).** Each accepted beat is registered, and the
   bundle memory reads the matching row of all n bundles at the same time.
   One cycle later the similarity unit adds, for every bundle, the sum of
   that beat's LANES products to its accumulator. The first beat loads the
   accumulator instead of adding to it. That is 5 × 100 = 500
   multiply-accumulates per cycle at the defaults.
2. **Wait (1 cycle).** The last beat's multiply-accumulate completes.
3. **Decode (C cycles).** The controller reads profiles 0 … C−1 on
   consecutive cycles. One cycle later the decoder computes
   Σ_j (A_j − P_c,j)² for that class with all n terms in parallel. It keeps
   the class only if its distance is strictly smaller than the best so far,
   so ties go to the lower class index.
4. **Finish (1 cycle).** The last compare completes.
5. **Output.** `res_valid` rises and stays high with `res_class`, `res_dist`,
   `res_act` (the activation vector) and `res_acc` (the raw dot products)
   until `res_ready` is seen. The next query's first beat can be accepted in
   the following cycle.

With `q_valid` held high, `res_valid` rises ROWS + C + 2 cycles after the
first beat is accepted. That is 128 cycles at the defaults. The next query
can start 129 cycles after the previous one started. The decode of one query
does not overlap the accumulation of the next; the accumulators are needed
during decode.

## Number formats and how to prepare a model

This is the part a user of the engine has to get right.

**Cosine without division.** LogHD scores with cosine similarity, and it
normalizes the query, the prototypes and the bundles to unit length. With both
vectors normalized, the two norms in the cosine are constants. The engine
therefore computes plain dot products and no square roots or divisions. For
this to stay true after quantization, scale all bundles to the *same* L2
norm before rounding them to 8 bits: the largest common norm at which every
element of every bundle still fits in [−127, 127]. Scaling each bundle to its
own peak instead would give each activation coordinate its own factor. The
encoder should likewise deliver queries of (near) constant norm. All
activations are then the true cosines times one common factor, up to
rounding.

**Element formats.**

- Bundles `W = 8`, query `QW = 8`, profiles and activations `PW = 8`, all
  two's complement.
- The accumulator is `W + QW + ⌈log₂(ROWS·LANES)⌉` = 30 bits wide, so it
  cannot overflow.
- LogHD evaluates 1-, 2-, 4- and 8-bit models; 8 bits is used here.
  Lower-precision models fit by sign extension. A 1-bit bipolar model is
  stored as ±1.

**Activation scale (`act_shift`).** Raw dot products are far larger than an
8-bit profile entry. The similarity unit therefore maps each accumulator to
the profile format: it shifts right arithmetically by `act_shift` (0–31, a
run-time input) and saturates to [−128, 127]. Choose `act_shift` when the
model is built. The largest activation seen on training data should land
somewhat below 127; the testbenches use the smallest shift that brings it
under 100.

**Profiles.** Compute the profiles *through the same arithmetic*:

    P_c,j = mean over training examples of class c of  sat8( dot(M_j, φ(x)) >>> act_shift )

computed with the quantized bundles as they will be stored. Then the
activations and the profiles share one scale by construction.

**Loading.**

- `bw_en`/`bw_bundle`/`bw_row`/`bw_data` write one row (LANES elements) of
  one bundle. Element i of the row is in bits [8i+7 : 8i].
- `pw_en`/`pw_class`/`pw_data` write one whole profile. Entry j is in
  `pw_data[j]`.
- Both memories can be written at any time. A write made during a query
  affects that query, so load between queries.
- Dimensions beyond D in the last row should be zero.

## Running smaller models on the default engine

The bundle count N and class count C are fixed when the engine is built. A
model with fewer classes, fewer bundles or a smaller D still runs on it
unchanged:

- **Fewer bundles (n < N):** load the unused bundles with zeros. Their
  activation is 0 for every query. Put 0 in the matching profile entries and
  they add nothing to any distance.
- **Smaller D:** load the unused dimensions of bundles and queries as zero.
- **Fewer classes (C′ < C):** fill every unused profile slot with a copy of
  class 0's profile. A copy's distance always equals class 0's, and the
  decoder keeps the lower index on a tie, so an unused slot is never returned.

This covers the model shapes LogHD is evaluated with at the smallest budgets:

- ISOLET with k = 3 (n = 3)
- UCIHAR, 12 classes (n = 4 or 3)
- PAMAP2 and PAGE, 5 classes (n = 3, 2, or 1 with k = 5)
- dimensions from 2,000 to 10,000

Larger models need N raised. This applies to models with extra redundant
bundles beyond 5, and to the sweeps that grow n towards C.

## Parameters

Every module takes its defaults from `loghd_pkg`.

| parameter | default | origin |
|---|---|---|
| `D` | 10000 | LogHD's fixed hypervector dimension |
| `C` | 26 | ISOLET, the data set of the hardware comparison |
| `K` | 2 | alphabet of that comparison |
| `EPS` | 0 | redundant bundles (LogHD allows 0–2) |
| `N` | ⌈log_K C⌉ + EPS = 5 | LogHD's bundle count |
| `W`, `QW`, `PW` | 8 | this design's choice (largest evaluated precision) |
| `LANES` | 100 | this design's choice |

Synthesized with the defaults, the top level holds 400,000 bits of bundle
memory, 1,040 bits of profile memory and about 1,000 flip-flops. Most of the
flip-flops are the 800-bit query register and the five 30-bit accumulators.
The datapath is 500 8×8 multipliers feeding five adder trees, plus five
9-bit squarers. There is no pipelining inside the adder trees. A
timing-driven implementation would probably register the tree, which adds
one cycle of latency.

## What differs from, or goes beyond, the method

- **Micro-architecture.** The method reports an ASIC's speed and energy but
  describes none of its internals. The lane count, banking, one
  profile per cycle, handshakes, the state machine and the latency are all
  this design's.
- **Cosine as a dot product** (see above). Exact only for pre-normalized,
  per-vector-scaled operands.
- **Activation rescaling** by a shift and saturation is an addition; the
  method works in floating point.
- **Metric.** Only the Euclidean metric LogHD adopts is built. Cosine or
  Mahalanobis decoding in activation space, mentioned as alternatives, is not.
- **Ties** go to the lowest class index. The method does not say.
- **No training hardware.** LogHD trains in software. The following are
  offline steps and not part of this RTL:
  - the load-balancing codebook selection
  - bundle construction
  - profile estimation
  - perceptron-style bundle refinement
- **No encoder.** The encoder φ is not specified by the method and is
  outside the engine.
- **Bit-flip robustness** is a property of the stored model, not a
  mechanism. The engine simply computes on whatever the memories hold.
  Faults can be emulated by writing corrupted words through the load ports,
  as one testbench does.
- **Hybrid LogHD + feature sparsification** is not built. A sparsified model
  runs correctly with pruned coordinates stored as zero, but saves no memory.

## Testbenches

Each testbench checks its block against values computed independently in the
testbench. Each has a watchdog and ends with a `TB_RESULT checks=… failures=…`
line.

| testbench | what it checks |
|---|---|
| `tb_bundle_mem` | Random fill of every row; reads of all banks one cycle after `rd_en`; data holds while idle |
| `tb_profile_mem` | Random profiles; read-back latency and hold |
| `tb_similarity_unit` | Dot products against integer sums, with gaps between beats; activations for a sweep of shifts, including saturation at both ends |
| `tb_profile_decoder` | 200 rounds of argmin against a reference, including forced ties and extreme values |
| `tb_loghd_ctrl` | Cycle-by-cycle order of rows and profiles; one-cycle offsets of MAC and decoder controls; no beat taken while decoding; `res_valid` held; latency ROWS + C + 2 |
| `tb_loghd_top` | Full default size, end to end, on a synthetic LogHD model (details below) |
| `tb_loghd_workloads` | Default engine running the smaller model shapes and bit-flip injection (details below) |

**`tb_loghd_top`** builds its synthetic model as follows:

- random bipolar class prototypes
- greedy minimax-load code selection with symbol weight s/(k−1)
- weighted superposition, then 8-bit normalization
- profiles from noisy training samples

It then checks, for 40 queries with 25 % of signs flipped:

- class, distance, activations and raw dot products against a reference
- accuracy ≥ 90 %

It also counts how often each mechanism occurs, and fails if any never does:

- query-stream stalls
- result back-pressure
- activation saturation
- a profile reload between queries
- back-to-back queries with the latency check

**`tb_loghd_workloads`** runs the smaller model shapes from the previous
section, mapped as described there. It also runs the 26-class model with
bit flips written into the stored bundles and profiles at 0.5 % and 2 % per
bit. It checks exact agreement with a reference on the stored (possibly
corrupted) state, and that no unused class slot is ever returned. Accuracy
under flips is reported, not required.

To run one with Verilator 5, from the repository root:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_loghd_top \
    -y rtl -y tb +libext+.sv -Irtl rtl/loghd_pkg.sv tb/tb_loghd_top.sv
./obj_dir/Vtb_loghd_top
```

Replace `tb_loghd_top` with any testbench name. The full-size testbenches
finish in well under a second of simulation time once built.

## Changing the design

- **Different C, k or D:** override the parameters of `loghd_top`. `N`
  follows automatically from `C`, `K` and `EPS`.
- **Throughput:** `LANES` sets how much of D is processed per cycle; latency
  is ⌈D/LANES⌉ + C + 2 cycles.
- **Precision:** `W`, `QW` and `PW` set the element widths. The accumulator
  and distance widths follow from them.
- **Constraints:** `loghd_top` stops elaboration if `K < 2` or if
  `N < ⌈log_K C⌉`.
