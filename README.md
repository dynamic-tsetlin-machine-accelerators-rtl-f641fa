# A tiled Tsetlin Machine accelerator for on-chip training

A Tsetlin Machine (TM) learns with propositional logic, not with multiply-accumulate arithmetic:
- Each *clause* is an AND over a chosen subset of the input's Boolean literals (every feature and its complement).
- Each literal of each clause is owned by a small saturating counter, a *Tsetlin automaton* (TA). It decides whether the literal is included.
- Classes are scored by adding up clause outputs. Vanilla TMs use a fixed +1/−1 polarity per clause. Coalesced TMs (CoTM) share one pool of clauses among all classes and use a signed weight per clause and class.
- Training is a set of probabilistic increments and decrements of those counters and weights.

This design runs **both** TM variants, for inference and for training, on **one fixed piece of hardware whose model size is chosen at run time**. The core does not hold a whole model in logic. It works through the model in fixed-size tiles:

* a **clause matrix** of X literals × Y clauses evaluates one slice of a group of Y clauses per clock;
* a **weight matrix** of M clauses × N classes adds one window of M clause outputs into N class sums per clock;
* a **weight update matrix** (M lanes) and a **TA update matrix** (X × Y automata) apply feedback at the same rates during training.

Model state lives in two RAMs: TA states, one clause-matrix tile per row, and CoTM weights, one weight-matrix tile per row. Feature count, clause count, class count, TM type, threshold T and specificity s are all programmed over a 32-bit AXI4-Stream. Partial tiles at the edges of the model are handled by four masks, so any size up to the build-time capacity runs without reconfiguring.

The default parameters are the large configuration of the original work, called DTM-L here:
- a 32 × 27 clause matrix;
- an 8 × 4 weight matrix;
- 24-bit LFSR random numbers;
- 12-bit weights;
- 16-bit class sums.

## 1. The TM arithmetic the hardware implements

For a data point with Boolean features f[0..F−1], the literals are interleaved. Literal 2i is f[i] and literal 2i+1 is ¬f[i].

A TA with L_TA-bit state *includes* its literal when its state's MSB is 1.

Clause k outputs 1 when every included literal is 1.

| | Vanilla TM | CoTM |
|---|---|---|
| Clauses | c per class, h·c in total | c shared by all h classes |
| Class sum | Σ over the class's clauses of ±clause; even index +1, odd index −1 | Σ over all clauses of w[class][k]·clause |

The predicted class is the argmax of the class sums.

Training on a labelled point runs two *rounds*:
1. The target class y, with y_c = 1.
2. A *negated* class, drawn at random among the other classes, with y_c = 0.

Each round does the following:

1. **Class-level probability.** Recompute the class sum s of the round's class and clip it to [−T, T]. The clause update probability is (T − s)/2T for the target class and (T + s)/2T for the negated class. In hardware it is held as P = (T ∓ s)·2^(L_R−1), with L_R the random-number width. A clause is *selected* when P ≥ rand·T, with rand uniform on L_R bits.
2. **Clause-level feedback.** Each selected clause gets Type I or Type II feedback from the sign of its weight (CoTM) or its polarity (Vanilla):
   - target class: positive clause → Type I, negative clause → Type II;
   - negated class: the reverse.

   For CoTM, a selected clause that outputs 1 also moves its weight for this class by +1 (target) or −1 (negated), saturating at the weight range.
3. **TA-level feedback.** With p = 1/s, held as p_ta = ⌊2^L_R / s⌋:

   | feedback | clause | literal | TA change |
   |---|---|---|---|
   | Type I | 0 | any | −1 with probability p |
   | Type I | 1 | 0 | −1 with probability p |
   | Type I | 1 | 1 | +1 with probability 1−p (always, if *boost true positive* is on) |
   | Type II | 1 | 0 | +1 if the TA currently excludes |
   | none | | | no change |

   States saturate at 0 and 2^L_TA − 1.

## 2. Tiling: slices, groups, windows and the four masks

Let f be the feature count, c the clause count (per class for Vanilla), h the class count. The controller derives:

| symbol | value | meaning |
|---|---|---|
| a | ⌈2f / X⌉ | literal slices per clause group |
| b | ⌈c / Y⌉ | clause groups per class |
| p | ⌈c / M⌉ | clause windows per class-sum pass |
| q | ⌈h / N⌉ | class groups |

The clause matrix works on one group of Y clauses at a time. It ANDs a slices, one per cycle, into a Y-bit register. It then writes the Y clause outputs into the **clause buffer**, which holds one class's worth of clauses. The weight matrix reads that buffer M clauses at a time.

So a CoTM inference costs a·b clause-matrix cycles and p·q weight-matrix cycles. A Vanilla inference costs a·b·h and p·h.

Tiles at the edge of the model are masked:

| mask | where | value | effect |
|---|---|---|---|
| literal mask | last slice, positions ≥ 2f | 1 | ORed into the literals, so a masked literal never falsifies a clause; inverted, it blocks TA updates there |
| clause buffer mask | last group, clauses ≥ c | 0 | ANDed into the clause outputs written to the clause buffer |
| clause mask | last window, clauses ≥ c | 0 | a remainder clause adds nothing to a class sum and gets no feedback |
| class mask | class indices ≥ h | −2^15 (16'h8000) | a remainder class can never win the argmax |

### RAM layout

- **TA RAM:** one row is a whole clause-matrix tile, X·Y·L_TA bits; the TA for clause i, literal j of the slice sits at bit (i·X + j)·L_TA.
  - Slice k of clause group g is row (g_base + g)·a + k.
  - g_base is 0 for CoTM and class·b for Vanilla, where each class has its own clauses.
- **Weight RAM:** one row is a whole weight-matrix tile, N·M·W_BITS bits.
  - Window w of class group Q is row Q·p + w.
  - Lane (n, m) holds the weight of class Q·N + n for clause w·M + m.
- **Depths:** 4096 TA rows and 1024 weight rows by default.

## 3. Job flow and timing

The controller (`dtm_controller`) runs one job at a time. Each phase issues one RAM row per cycle. RAM data arrive a cycle later, so every phase feeds a two-stage pipeline and drains it before the next phase begins. That costs a few cycles per phase on top of the counts below.

| phase | cycles | work |
|---|---|---|
| INIT | a·b·(1 or h) TA rows, p·q weight rows | every used TA row gets states 2^(L_TA−1)−1 or 2^(L_TA−1) at random; CoTM weights get ±1 at random; waits until every random-number lane is seeded |
| CL | a·b | clause matrix; clause buffer written at the end of each group |
| CS | p per class group | weight matrix into the class-sum buffer |
| AM | q | argmax over masked class-sum groups (inference only) |
| PROB | 1–2 | clipped class sum → clause update probability |
| WU | p | weight update matrix: feedback into the clause feedback buffer, CoTM weights written back |
| TA | a per group with feedback, 1 per group without | read, update and write back TA rows; a clause group whose feedback is all zero is **skipped** |
| NEG | 1 | negated class drawn; the second round repeats CL–CS–PROB–WU–TA for it |
| OUT | ≥1 | result word on the output stream; waits for tready |

Inference visits the phases in this order:
- CoTM: CL → CS → AM → OUT.
- Vanilla: CL → CS once per class, then AM → OUT.

Training runs CL → CS → PROB → WU → TA for the target class, then NEG and the same again for the negated class, then OUT.

While a job runs, the input stream is stalled: tready is held low from the cycle the job is started until the controller is idle again.

## 4. Stream protocol

Every input word carries an opcode in bits [31:28] (`dtm_pkg::opcode_e`).

| opcode | name | payload |
|---|---|---|
| 1 | FEATURES | [15:0] feature count f |
| 2 | CLAUSES | [15:0] clause count c (per class for Vanilla, total for CoTM) |
| 3 | CLASSES | [7:0] class count h, [9:8] TM type (1 Vanilla, 2 CoTM) |
| 4 | THRESHOLD | [15:0] T |
| 5 | SPEC | [15:0] s; the decoder stores ⌊2^24/s⌋ (2^24−1 for s ≤ 1) |
| 6 | SEED | [27:0] master PRNG seed |
| 7 | FLAGS | [0] boost true positive |
| 8 | INIT | initialise TA states and weights |
| 9 | DATA | [0] train, [15:8] target class; followed by ⌈f/32⌉ feature words, feature i in bit i mod 32 of word ⌊i/32⌋ |
| 0 | NOP | ignored |

The output stream carries one word per data point:
- inference: `{1'b0, 7'b0, class_sum[15:0], class[7:0]}`;
- training: `{1'b1, 15'b0, negated_class[7:0], target_class[7:0]}`.

`seed_req` is high until a seed has been programmed. `busy` is high while a job runs.

A typical session looks like this:
1. SEED, then FEATURES, CLAUSES, CLASSES, THRESHOLD, SPEC and FLAGS.
2. INIT, then wait for `busy` to fall.
3. DATA words, each followed by its feature words.

## 5. Random numbers

Each cycle of the TA phase needs X·Y fresh random numbers: 864 at the defaults. Full-period generators that large are expensive, so `prng_cluster` uses short LFSRs that are reseeded often:
- **Slaves.** X·Y + M + 1 slave LFSRs of L_LFSR bits each: one per TA update block, one per weight update lane, one for the negated class draw.
- **Master.** A 32-bit xorshift master hands out seeds through a round-robin arbiter, one seed per cycle.
- **Reseeding.** A slave requests a new seed when it has stepped through its full period of 2^L − 1 states, and keeps running until it gets one.
- **Idle.** Slaves step only while the controller is busy.
- **After reset.** All slaves request seeds. The cluster reports `ready` once all have been served, about X·Y + M + 1 cycles after the master seed is programmed.

## 6. Where this design departs from, or interprets, its source

- **Type II condition.** The published TA update listing asks for an *included* TA ("action == 1") and, in the same branch, a state below the include boundary. Both cannot hold at once. This design follows the TM rule: Type II raises an *excluded* TA of a 0-literal in a clause that fired.
- **Clause-level feedback polarity.** The published listing assigns Type I to non-negative weights when y_c = 0. The text and the standard TM assign Type I to positive clauses of the *target* class. The latter is implemented.
- **Negated class draw.** The listing computes `c_rand % (classes − 2)`, which can never reach the last class. This design uses `c_rand % (classes − 1)` and skips over the target.
- **Reseed interval.** Two intervals appear in the source: "after 2L cycles" and "after 2^L_LFSR cycles". The full LFSR period, 2^L − 1, is used.
- **No overlap between phases.** The source overlaps the clause matrix of one class with the weight matrix of the previous one. It also loads the next data point during computation. Here the phases run back to back. Every phase has the tile cycle count above, but a job takes longer than in a pipelined implementation. `dtm_controller` and the top are therefore only a partial implementation of the control flow.
- **Own choices:**
  - TA width (8 bits);
  - RAM depths and feature/clause/class capacity (784 / 2048 / 16);
  - instruction and result word formats;
  - initial TA and weight values;
  - LFSR taps (maximal-length Fibonacci polynomials) and xorshift constants;
  - tie-breaking in the argmax (lowest index wins);
  - weight saturation;
  - the mapping of random-number lanes to consumers.
- **Not built:** the SoC processor and DMA, which sit on the far side of the stream ports.

## 7. Capacity at the default parameters

| workload | sizes | needs | fits |
|---|---|---|---|
| KWS-6, CoTM, 2000 / 1000 / 500 clauses | 377 features, 6 classes | a = 24; TA rows 1800 / 912 / 456; weight rows 500 / 250 / 126 | yes |
| KWS-6, Vanilla, 700 / 500 / 300 clauses per class | 377 features, 6 classes | TA rows 3744 / 2736 / 1728 | yes (4096 rows) |
| MNIST-type images | 784 features, 10 classes | a = 49; CoTM up to 2048 clauses (clause buffer) | depends on clause count |

The feature count of 377 is the input width of the BNN used for the same data set.

## 8. Files

| file | block |
|---|---|
| `rtl/dtm_pkg.sv` | types: TM type, feedback codes, opcodes, `cfg_t`, LFSR tap table |
| `rtl/dtm_top.sv` | top: wiring, random-lane split, RAM write muxes, initial values |
| `rtl/instr_fetch.sv` | stream decoder, configuration registers, feature word writes, stall |
| `rtl/dtm_controller.sv` | phase FSM, counters, masks, RAM addressing, skip, result word |
| `rtl/feature_buffer.sv` | feature store, literal slices and literal mask |
| `rtl/clause_matrix.sv` | X × Y clause AND matrix with slice accumulation |
| `rtl/clause_buffer.sv` | one class of clause outputs |
| `rtl/weight_matrix.sv` | M × N class-sum matrix (CoTM weights or Vanilla polarity) |
| `rtl/class_sum_buffer.sv` | class sums and class mask |
| `rtl/argmax.sv` | comparison tree with running maximum |
| `rtl/clause_update_control.sv` | negated class and clause update probability |
| `rtl/weight_update_matrix.sv` | clause selection, feedback type, weight update |
| `rtl/clause_feedback_buffer.sv` | clause feedback store with any-feedback flag |
| `rtl/ta_update_matrix.sv` | X × Y TA update blocks |
| `rtl/dtm_ram.sv` | simple dual-port synchronous RAM (TA RAM and weight RAM) |
| `rtl/prng_cluster.sv`, `master_prng.sv`, `prng_arbiter.sv`, `slave_prng.sv` | random-number cluster |

## 9. Verification

Every block has a self-checking testbench in `tb/`. Each compares against values the testbench works out itself, and each prints `TB_RESULT checks=N failures=M`.

Build and run any of them with plain Verilator:

    verilator --binary --timing --assert -Irtl rtl/dtm_pkg.sv tb/tb_dtm_top.sv --top-module tb_dtm_top
    ./obj_dir/Vtb_dtm_top

**End-to-end test, reduced size (`tb_dtm_top`).**
- **Configuration:** 8 × 5 clause matrix, 4 × 2 weight matrix, 8-bit LFSRs.
- **Runs:** a CoTM model, then a Vanilla model, each with remainder tiles in every mask. Each is trained for 30 epochs on a small learnable data set, then run for inference.
- **Reference model:** each inference is compared, class and class sum, with a model that reads the TA and weight RAMs.
- **Cycle counts:** the clause-matrix and weight-matrix counts are checked against a·b and p·q (CoTM) and a·b·h and p·h (Vanilla).
- **Training checks:** each training step is checked for its result word and for bounded TA movement. Accuracy must beat chance.
- **Mechanisms:** stream stall, output back-pressure, slave reseeding, clause-group skipping, weight and TA write-back, and both TM types are each counted and must occur.

**Full-size test (`tb_dtm_full`).**
- **Configuration:** every default parameter, with an MNIST-shaped CoTM model of 784 features, 54 clauses and 10 classes.
- **Initialisation:** checks the initial TA and weight values.
- **Inference:** three inferences are checked against the RAM-based reference, including the a·b = 98 and p·q = 21 cycle counts.
- **Training:** two training steps, then a further inference.
- **Speed:** building it takes about ten minutes, because of the 6912-bit TA rows and 873 LFSRs; the simulation itself takes seconds.

**Fault copies.** Each unit testbench was also run against a deliberately broken copy of its block, and each fails there.

**Not verified.** Timing closure, FPGA resource use and learning accuracy on real data sets are not covered by these tests.
