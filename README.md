# BitStopper attention accelerator in SystemVerilog

Sparse attention accelerators usually find the important tokens in two steps.
First a cheap predictor guesses which Query–Key pairs matter. Then the real
computation fetches and processes only those. The predictor still has to read
every Key from DRAM, so memory traffic hardly drops.

This design merges the two steps. It reads Keys **one bit plane at a time**,
starting with the most significant (sign) plane. After each plane it knows an
interval that must contain the token's final score. A token is dropped, and
the rest of its bits are never fetched, once the top of its interval falls
below a threshold. The threshold follows the best score seen so far. Tokens
that survive all twelve planes have an exact score at no extra cost. The
partial scores become the final scores, so nothing is computed twice. Only
those tokens' Value vectors are fetched and used for softmax × V.

Three mechanisms make this work in hardware. Each has its own RTL:

* **Bit-serial scoring with bit margins.** For each plane, the bounds on what
  the unread bits can still add come from the Query alone.
* **Adaptive threshold.** The threshold is the best guaranteed score so far,
  minus a tolerance α·radius.
* **Asynchronous planes.** Each lane handles whichever plane comes back from
  DRAM next, for any of its in-flight tokens. A small per-lane scoreboard
  holds the partial scores in between.

The defaults are the published configuration:

* 32 PE lanes, each taking one 64-bit Key plane per cycle.
* 64-dimensional heads with 12-bit Q, K and V.
* A 64-entry × 45-bit scoreboard per lane.
* An 8 kB Q buffer, a 256 kB K buffer and a 64 kB V buffer.
* A 64-way 12×12-bit MAC array.
* An 18-bit-in, 18-bit-out table-based softmax.

## 1. Bit-plane arithmetic

A 12-bit two's-complement Key element is k = −c11·2^11 + Σ_{i<11} c_i·2^i.
Plane r (r = 0 is the sign bit c11, r = 11 is c0) is the 64-bit vector of
that bit over the 64 dimensions. Its contribution to the dot product is

    ΔA^r = w_r · Σ_d q_d · K^r_d,     w_0 = −2^11,   w_r = 2^(11−r) for r ≥ 1

The running partial score is A^r = A^{r−1} + ΔA^r. `brat` (the bit-serial
ANDer tree) computes this. It ANDs each Query element with its Key bit, adds
the 64 products in an adder tree, negates the sum for the sign plane, shifts
it by the plane weight, and adds the stored partial score when the scoreboard
reports a hit.

**Margins.** After planes 0..r, bits r+1..11 are still unknown and can only
add non-negative weight, at most 2^(11−r) − 1 per element. Let P be the sum of
the positive Query elements and N the sum of the negative ones. The final
score then lies in

    [A^r + M^{r,min},  A^r + M^{r,max}],
    M^{r,max} = P · (2^(11−r) − 1),   M^{r,min} = N · (2^(11−r) − 1)

The bounds depend only on the Query. `bit_margin_gen` computes P and N once per
Query and fills a twelve-entry table of (M^{r,min}, M^{r,max}) pairs. This
takes two cycles. At r = 11 both margins are zero and the score is exact.

## 2. Threshold and pruning

`lats_module` adds M^{r,min} to every partial score the lanes report. That
sum is a lower bound on the token's final score. The module keeps the
running maximum of these lower bounds for the current Query and sets

    η = max(lower bounds) − α · radius

* α is a Q1.8 input, so 256 means 1.0. The preferred setting is about 0.6,
  which is 154.
* radius is given in the integer units of the dot product. Software converts
  a real-valued radius with the quantisation scales. The published default
  radius is 5 in real score units.

A lane keeps a token only if

    A^r + M^{r,max} > η

(`pruning_engine`). The test is strict. A kept token requests its next plane.
A token that passes plane 11 becomes a final score. A dropped token is
evicted from the scoreboard.

This rule never prunes a token whose exact score is within α·radius of the
largest exact score. Lower bounds only grow as bits arrive, so the running
maximum never exceeds the true maximum. The upper bound never falls below the
true score. Before the first report of a Query, η is the most negative value,
so nothing is pruned.

A lower bound is only exact once all twelve planes are known. So once the QK
phase ends, the maximum register holds exactly the largest final score. The
softmax uses it as its reference.

Where this departs from the published description:

* The published threshold equation takes the maximum of the scores of the
  current bit round. The accompanying text and figure take it over the lower
  bounds. This design uses the lower bounds.
* Planes arrive out of order, so there are no global rounds. The maximum is
  kept across all planes of the Query and is never reset between planes.

## 3. The PE lane and out-of-order planes

`pe_lane` has two pipeline stages and accepts one plane per cycle:

1. **Stage 1.** The scoreboard is looked up with the token index, and the
   BRAT forms the new partial score. Both happen in the same cycle. The
   result is registered, which is the 32-bit register of the lane.
2. **Stage 2.** The pruning engine decides. The scoreboard is updated, or its
   entry evicted. The lane may also report the score to the LATS module,
   request plane r+1, or output the final score.

Each scoreboard entry is {valid, token tag, plane index, score}: 1 + 8 + 4 + 32
= 45 bits.

* Token j always lives in lane j mod 32, so the tag is j / 32.
* Lookup is associative and combinational.
* A new token takes the lowest free entry.

Planes of different tokens may reach a lane in any order. Planes of the same
token come in sequence, because plane r+1 is requested only after plane r
has been processed. A lane holds a plane back only when its next-plane
request or final-score output is back-pressured.

The **scheduler** keeps the lanes busy. For each lane it issues sign-plane
requests for the lane's Keys j = l, l+32, l+64, … as long as fewer than
`WINDOW` (default 64) of that lane's tokens are in flight. Each retirement,
pruned or final, frees room for the next Key. This overlaps DRAM latency
across up to 64 tokens per lane. Setting WINDOW to the scoreboard depth means
the scoreboard can never overflow; an assertion checks this.

## 4. Memory side

The **memory controller** has one Key request port per lane, each carrying
one 64-bit plane.

* Each cycle and each lane, it grants either the lane's next-plane request
  or the scheduler's request for a new Key. The lane's request wins, so
  tokens that are already in flight finish first.
* Keys are stored bit-plane-major. Plane r of Key j is the 64-bit word at
  `k_base + r*seq_len + j`.
* Requests carry the tag {j, r}. Replies may come back in any order and go
  into that lane's bank of the **K buffer**. There are 32 FIFO banks of 1024
  planes each, 256 kB in total.

Value vectors are single 768-bit words at `v_base + j`.

* They are read in order for tokens that reached a final score.
* A Value is requested only when its reply will find room in the V buffer.
* Value fetches start while the QK phase is still running.

The DRAM itself (HBM2 in the published system, 8 channels) and its PHY are
outside this RTL. The top brings out plain valid/ready request and response
ports for them. `tb/dram_model.sv` is a behavioural memory with random,
out-of-order Key latency, used by the testbenches.

## 5. V-PU: softmax, MAC and normalisation

Final scores from the 32 lanes are collected round-robin, one per cycle, into
the Score-FIFO. Their token indices go into the IDX-FIFO, which feeds the
Value fetch. A lane whose final score is not taken waits.

Once all tokens have retired, the maximum m is final. Each cycle the V-PU then
pops one score a together with its Value vector:

* **softmax** (18-bit in, 18-bit out):
  * x = ((m − a)·sm_scale) >> 24, saturated to Q8.10.
  * sm_scale folds in the quantisation scales, 1/√d and log2 e.
  * The exponent is base 2, p = 2^(−x). The integer part of x is a right
    shift. The top six fraction bits index a 64-entry table
    lut[f] = round(2^17·2^(−f/64)).
  * p is Q1.17. The MAC array uses the 12-bit weight w = p >> 6.
* **mac_array:** 64 accumulators of 40 bits, acc[k] += w·V_j[k]. The weight
  sum Σw is kept alongside.
* **Normalisation:** a restoring divider forms 2^32 / Σw in 33 cycles. Then
  out[k] = sat12((acc[k]·recip + 2^31) >> 32), an arithmetic shift.
  * The output has the same scale as V.
  * It leaves through a two-entry Output-FIFO as one 64 × 12-bit vector.

The published design names these units but not their formats, sequencing
or division method. All of those are this design's choices.

## 6. Top level and one Query's timeline

`bitstopper_top` connects the scheduler, `qk_pu`, the memory controller and
the `vpu`. `qk_pu` contains the Q buffer, bit margin generator, K buffer, 32
lanes and LATS module.

The host does three things:

1. It writes Queries into the Q buffer (85 slots of 96 B).
2. It pulses `start` with `q_idx`, `seq_len`, `k_base`, `v_base`, `alpha`,
   `radius` and `sm_scale`. These are latched at start.
3. It takes the output from `out_valid/out_ready/out_vec`, and sees `done`.

One Query goes through four steps:

1. **Read Q and build margins.** Q_i is read, the lanes, scoreboards and
   LATS maximum are cleared, and the margin table is built in a few cycles.
2. **QK phase.** Sign planes are requested, and planes stream back and are
   scored. Surviving tokens request further planes, pruned tokens free their
   slot, and final scores flow to the V-PU. Value fetches run in parallel.
3. **V phase.** One surviving token per cycle, then division and
   normalisation, about 33 + 64 cycles.
4. **Output.** The output vector is delivered and `done` pulses.

Queries run one after another. Event outputs (`ev_*`) flag pruning, final
scores, window stalls, lanes waiting on memory and collector stalls. They are
for performance counting.

## 7. What follows the published design and what does not

Follows it:

* BESF: bit-serial, MSB-first Key planes, with partial scores reused as the
  final scores.
* The margin formulas.
* The LATS threshold with α and radius.
* The strict pruning comparison.
* The scoreboard fields and 45-bit entry.
* Out-of-order plane processing.
* The block set of the architecture figure, and every size in the hardware
  table.

This design's own choices:

* Pipeline depths and all handshakes.
* The token-to-lane map (j mod 32), taken from the scoreboard example, which
  holds tokens 0 and 32 in one lane.
* The scheduler's window policy.
* The address map and request priority.
* The K-buffer and V-buffer organisation. The published 320 kB total is
  split as 256 kB for K and 64 kB for V.
* The softmax formats and table.
* The deferred normalisation with a divider.
* Query-serial operation.

Not built:

* HBM2 channels and PHY, and the SRAM macros. Buffers are plain arrays.
* Heads wider than 64 dimensions. Llama2-7B has 128-dimensional heads. They
  would need two passes whose partial scores are added, and there is no
  logic for that.
* The host-side quantisation that produces α, radius and sm_scale.

## 8. Files

| file | role |
|---|---|
| `rtl/bs_pkg.sv` | sizes and widths |
| `rtl/brat.sv`, `rtl/scoreboard.sv`, `rtl/pruning_engine.sv`, `rtl/pe_lane.sv` | the PE lane |
| `rtl/bit_margin_gen.sv`, `rtl/lats_module.sv` | margins and threshold |
| `rtl/q_buffer.sv`, `rtl/k_buffer.sv`, `rtl/sync_fifo.sv` | buffers |
| `rtl/qk_pu.sv` | QK processing unit |
| `rtl/scheduler.sv`, `rtl/memory_controller.sv` | control and DRAM requests |
| `rtl/softmax.sv`, `rtl/mac_array.sv`, `rtl/vpu.sv` | Value processing unit |
| `rtl/bitstopper_top.sv` | top level |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/dram_model.sv` | behavioural DRAM for testbenches |

## 9. Simulation

Every testbench prints `TB_RESULT checks=N failures=M` and stops on a
watchdog. For example:

    verilator --binary --timing --assert --top-module tb_bitstopper_top \
        -Irtl -Itb rtl/bs_pkg.sv rtl/*.sv tb/dram_model.sv tb/tb_bitstopper_top.sv
    ./obj_dir/Vtb_bitstopper_top +verilator+rand+reset+2

Replace the top module and testbench file to run another test.

What the unit testbenches check:

* Each checks its module against an independent reference, usually a
  per-element integer model in the testbench.
* Several run at reduced parameters for speed:
  * The scheduler uses 4 lanes and a window of 3.
  * The V-PU uses 4 lanes and a V buffer of 4.
  * The QK-PU uses 4 lanes and 120 Keys.
  * The scoreboard uses 8 entries.
  * The memory controller uses 2 lanes.
* The lane, K buffer, softmax, MAC array, margin generator and LATS module
  run at their default sizes.

`tb_bitstopper_top` runs the whole design at its default parameters, with 32
lanes. It runs five Queries: 1024, 2048 and 4096 Keys at α = 0.6, 1000 Keys at
α = 1.0 and 2048 Keys at α = 0.2. The Keys have a few "hot" tokens. It checks:

* Every final score equals the exact dot product.
* No token within α·radius of the maximum is lost.
* The LATS maximum equals the largest exact score.
* The output vector equals a reference built from the surviving tokens.
* The QK phase never beats one plane per lane per cycle.

It also counts each mechanism and fails if one never happens: pruning,
tokens reaching the last plane, out-of-order replies, lanes waiting on
memory, window stalls, collector stalls, and Value fetches overlapping the QK
phase. On that data the Queries fetch about a quarter to a third of all Key
planes.

What the tests do not show:

* The workloads use random data with planted strong tokens, not real model
  activations. Pruning rates on real attention will differ.
* No timing or area results come with this RTL.
