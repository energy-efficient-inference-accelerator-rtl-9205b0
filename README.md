# A dataflow inference accelerator for end-to-end memory networks

A memory network answers a question about a short story. Each sentence of the
story is embedded and stored in an external memory. The question is embedded
into a read key. The network then reads the memory a few times ("hops"): it
scores every stored sentence against the key, turns the scores into attention
weights with a softmax, and adds the weighted sentences into a read vector.
A small recurrent controller combines that vector with the key to form the
next key. After the last hop an output layer picks the answer word, the one
with the largest logit.

This RTL builds that network as a dataflow pipeline of dedicated modules. Data
moves directly from one module to the next; there is no shared memory and no
instruction stream. The host sends the trained model and the stories as one
stream of 32-bit words and gets one answer word back per question.

The second idea is **inference thresholding** in the output layer. The output
layer is the slowest part, because it computes one logit per vocabulary word
one after another. Each label `i` has a threshold `theta_i`, computed offline
from the training set. The labels are visited in an order chosen offline, and
the search stops at the first label whose logit exceeds its own threshold.
If no logit does, the result is the ordinary argmax.

## The computation

With `E` the embedding size, `L` the number of memory slots and `I` the
number of labels (the vocabulary):

| step | formula | module |
|---|---|---|
| sentence embedding | `m_i = sum_{w in S_i} W_emb[:,w]` (bag of words, no multiplications) | INPUT & WRITE |
| first key | `k^1 = sum_{w in q} W_emb_q[:,w]` | INPUT & WRITE |
| attention | `a_i = exp(M_a,i . k^t) / sum_j exp(M_a,j . k^t)` over the valid slots | MEM |
| read vector | `r^t = sum_i a_i M_c,i` | MEM |
| controller | `h^t = r^t + W_r k^t`, `k^(t+1) = h^t` | READ |
| answer | `argmax_i W_o,i . h`, or the first `a` in order `A` with `W_o,a . h > theta_a` | OUTPUT |

Every sentence is stored twice. The `W_emb_a` embedding goes into the
*address memory* and is matched against the key. The `W_emb_c` embedding
goes into the *content memory* and is the part that is read out.

## Block diagram

```
 host stream ──► FIFO_IN ──► CONTROL ─────────── weight-load bus (all tables) ───────┐
  (in_valid/          │  FIFO control +                                              │
   in_data/           │  inference control                                           │
   in_ready)          │ word indices                                                 │
                      ▼                                                              │
               INPUT & WRITE                                                         │
        demux ─► W_emb_a ─► + ─► accu ──► Address Memory ┐                           │
              ─► W_emb_c ─► + ─► accu ──► Content Memory │  MEM                      │
              ─► W_emb_q ─► + ─► accu ─┐                 │  score tree ─► exp ─► sum │
                                       │  key k^t ──────►│  div ─► attention a_i     │
                                       ▼                 │  a_i x M_c,i ─► r^t       │
                              READ: mux(q, h) ─► key ────┘                           │
                                    W_r x k (tree) ─► + r^t ─► h^t ──┐ (recurrent)    │
                                                                     ▼               │
                              OUTPUT: W_o x h (tree) ─► compare / thresholds ◄───────┘
                                                                     │
 host ◄── FIFO_OUT ◄── CONTROL ◄── answer word ◄─────────────────────┘
  (out_valid/out_data/out_ready)
```

| file | block |
|---|---|
| `rtl/mann_pkg.sv` | number format, default sizes, opcodes, weight-load bus type, saturation helpers |
| `rtl/stream_fifo.sv` | FIFO_IN and FIFO_OUT |
| `rtl/mann_control.sv` | CONTROL: stream decoding, table loading, hop sequencing, answer push |
| `rtl/embedding_unit.sv` | one embedding table with its adder and accumulator |
| `rtl/input_write.sv` | INPUT & WRITE: demultiplexer, three embedding units, slot writer |
| `rtl/dot_product.sv` | E multipliers and an adder tree (used by MEM, READ and OUTPUT) |
| `rtl/exp_unit.sv` | fixed-point exponential |
| `rtl/frac_divider.sv` | sequential softmax divider |
| `rtl/mem_module.sv` | MEM: address and content memories and the soft read |
| `rtl/read_module.sv` | READ: key multiplexer and controller `h = r + W_r k` |
| `rtl/output_module.sv` | OUTPUT: sequential logits, argmax, inference thresholding |
| `rtl/mann_accel.sv` | top level |

## Default configuration

| parameter | default | meaning |
|---|---|---|
| `EMB` | 20 | embedding size `E` |
| `SLOTS` | 50 | memory slots `L` |
| `VOCAB` | 177 | vocabulary and number of labels `I` |
| `HOPS` | 3 | memory reads per question |
| `FIFO_IN_DEPTH` / `FIFO_OUT_DEPTH` | 512 / 16 | stream queues |

The source description names `E`, `L` and `I` but prints no values. The
defaults are the usual end-to-end memory network settings for the 20 bAbI
question-answering tasks (1k training set, joint vocabulary). All of them
are parameters of `mann_accel`.

## Number format

All weights and activations are 16-bit signed fixed point with 8 fractional
bits (Q8.8). A dot product keeps the full 32-bit products and sums them in
40 bits. Results go back to Q8.8 by an arithmetic right shift of 8 bits
(rounding towards minus infinity), then saturate. The embedding accumulators
and `r + W_r k` also saturate. The source gives no number format; this one is
this design's choice.

The softmax uses wider formats:

* **exp** (`exp_unit`). It computes `e^x = 2^n * 2^f` with
  `n = floor(x log2 e)`, and `2^f ~ 1 + f(0.6565 + 0.3435 f)`. The result is
  unsigned Q16.16 (32 bits). The input is clamped to [-16, 11]: `e^11` still
  fits in 32 bits, and below `e^-16` the result is 0. The relative error is
  under 0.5% wherever the result is above 1/16. There is no max-subtraction
  before the exp, exactly as in the formula. Scores above 11 therefore
  saturate, so the embeddings should keep scores within about ±11.
* **sum**. It is 38 bits wide, enough for 50 maximal exp values.
* **div** (`frac_divider`). Because `exp_i <= sum`, the quotient lies in
  [0, 1]. A restoring divider makes one integer bit and then 8 fraction bits,
  one bit per cycle. The quotient is truncated, so the attention weights are
  Q0.8 and their sum can fall a few LSBs short of 1.
* **logits** (W_o h) are compared in full precision (16 fractional bits).
  A threshold is Q8.8 and is shifted up to match.

## Host stream protocol

Every word is 32 bits. Bit 31 set marks a control word, with the opcode in
[30:24] and an argument in [15:0]. Any other word is data, with its payload
in [15:0]. The source only says that control signals are embedded in the
data stream. The opcodes, the order of table elements and the answer format
below are this design's own.

| opcode | value | followed by |
|---|---|---|
| `OP_LOAD_EMB_A`, `_EMB_C`, `_EMB_Q` | 01, 02, 03 | `VOCAB x EMB` elements: for each word index, its `EMB` embedding elements |
| `OP_LOAD_WR` | 04 | `EMB x EMB` elements of `W_r`, row-major |
| `OP_LOAD_WO` | 05 | `VOCAB x EMB` elements of `W_o`, one row per label |
| `OP_LOAD_THETA` | 06 | `VOCAB` thresholds (Q8.8), indexed by label |
| `OP_LOAD_ORDER` | 07 | `VOCAB` labels: the visiting order `A` |
| `OP_NEW_STORY` | 10 | nothing; all memory slots become invalid |
| `OP_SENTENCE` n | 11 | n word indices of one story sentence |
| `OP_QUESTION` n | 12 | n word indices of the question |
| `OP_INFER` f | 13 | nothing; runs the hops and the search, with thresholding if f[0] = 1 |

Each inference pushes one word into FIFO_OUT:
`{1'b0, early, n_cmp[13:0], label[15:0]}`. Here `n_cmp` is the number of
logits computed and `early` says whether a threshold stopped the search.
Unknown opcodes and stray data words are skipped. Word indices of `VOCAB` or
above add nothing to a sentence. Tables can be reloaded at any time between
commands. For example, new thresholds for another value of the thresholding
constant can be sent without touching the rest of the model.

The memory is a ring. Sentences fill slots 0, 1, 2, and so on. After `SLOTS`
sentences the oldest slot is overwritten, so a long story keeps its most
recent `SLOTS` sentences. Only the valid slots take part in the softmax. With
no valid slot the read vector is zero.

## How one question runs

1. **Embedding.** CONTROL sends one word index per cycle to INPUT & WRITE.
   Each embedding unit reads the table row of that word (a registered read)
   and adds it into its accumulator. After the last word of a sentence
   CONTROL pulses `commit`. When the pipeline has drained, both sums go into
   the next slot of the address and content memories. CONTROL takes no new
   control word while INPUT & WRITE is busy.
2. **Hop t.** CONTROL starts READ. READ loads its key register with the
   question embedding on hop 1 and with its own previous `h` afterwards.
   One cycle later CONTROL starts MEM with that key. The two modules then
   work in parallel:
   * MEM runs three sequential passes over the `n` valid slots:
     * SCORE, one slot per cycle: the dot product, the exp, the exp
       register file and the running sum.
     * NORM, one slot per divider run of 9 cycles, plus 1 cycle to start the
       next: the attention register file.
     * READC, one slot per cycle: the attention weight times the content row,
       added into an `EMB`-wide accumulator.

     A read takes `n*(FRAC+4) + 6` cycles, which is 606 cycles for 50 slots.
   * READ computes `W_r k` one row per cycle, `EMB+2` cycles in all. It keeps
     the result until MEM returns `r`, then forms `h = r + W_r k`.
3. **Answer.** After `HOPS` hops CONTROL starts OUTPUT with `h`. OUTPUT is a
   three-stage pipeline:
   * stage 0 reads the next label from the order table, or takes the natural
     order when thresholding is off;
   * stage 1 reads that label's `W_o` row and its threshold;
   * stage 2 computes the logit in the adder tree, keeps the running maximum
     and compares the logit with the threshold.

   One logit completes per cycle. A full search takes `VOCAB+5` cycles.
   An early exit stops the pipeline at the first logit above its threshold.
   The answer is then pushed into FIFO_OUT. CONTROL waits there while
   FIFO_OUT is full.

At the defaults, one question over a full memory takes about
`3 x 612 + 185 ~ 2,020` cycles, or about 20 µs at 100 MHz. Loading the whole
model takes about 15,000 stream words, one per cycle.

## Inference thresholding: what the hardware does and what it does not

The hardware runs only the last step of the method: the ordered search with
its early exit. The thresholds `theta_i` and the order `A` are tables loaded
from the host. They are computed offline on the training set, as follows:

* Run the trained network and record histograms of `z_i` for the inputs
  where `i` is the predicted label.
* Estimate `p(z_i | y = i)` from those histograms by kernel density
  estimation, and apply Bayes' rule to get `p(y = i | z_i)`.
* Set `theta_i` to the smallest `z_i` whose posterior reaches the
  thresholding constant `rho`.
* Sort the labels by the silhouette coefficient of their logit
  distributions, in descending order, to get the visiting order `A`.

None of this is in the RTL. To turn the early exit off, send `OP_INFER 0`,
or set every threshold to `32767`, the largest Q8.8 value. To search without
reordering, load the identity order.

The comparison is strict (`z > theta`). Among equal maxima, the first one
visited wins.

## Interfaces and timing of the top

`mann_accel` has one clock and a synchronous active-low reset `rst_n`. The
input side is `in_valid`/`in_data`/`in_ready`: a word enters FIFO_IN in a
cycle where both `in_valid` and `in_ready` are high. The output side is
`out_valid`/`out_data`/`out_ready`, a first-word-fall-through read of
FIFO_OUT. `busy` is high while any module is working. Internally the modules
talk through start/done pulses and one weight-load bus, the struct `wload_t`
of valid, target, row, column and data. Each module keeps only the writes
addressed to its own tables. All tables are plain arrays. A synthesis tool
can map them to block RAM, because every read is registered except the small
exp and attention register files.

Some output bits never change at the defaults: `out_data[31]` and the upper
bits of the `n_cmp` and `label` fields.

## Where this RTL departs from, or adds to, the source

* **Taken from the source.** The module partition and the data flow between
  the modules. The bag-of-words embedding that reads only the table columns
  of the words present. The separate address and content memories. The exp,
  exp register, sum, divider and attention register structure of the MEM
  module. The recurrent READ module with its key multiplexer. The sequential
  output layer. The thresholded search with an index order and the strict
  `z > theta` test.
* **Added where the source is silent.** The number formats, the exp
  approximation and the divider algorithm. The stream word format and
  opcodes. The FIFO depths. All sizes. The slot ring policy. The pipelining,
  including the overlap of `W_r k` with the memory read. The answer word
  format.
* **Not included.** The host computer and the PCIe link, and the offline
  computation of thresholds and order. The FPGA clock rates (25 to 100 MHz)
  used in the measurements were not checked by timing analysis of this RTL.
* **Simplifications.**
  * The softmax does not subtract the maximum score; it clamps instead.
  * Attention weights have 8 fractional bits, so slots with attention below
    1/256 contribute nothing.

## Verification

Each block has a self-checking testbench in `tb/`. Each one compares the
block against integer reference models in `tb/mann_ref_pkg.sv`, which do not
share code with the RTL, and ends by printing
`TB_RESULT checks=N failures=M`.

| testbench | what it checks |
|---|---|
| `tb_stream_fifo` | random push/pop against a queue model; flags, count, fall-through data |
| `tb_dot_product` | random and extreme vectors against 64-bit sums |
| `tb_exp_unit` | every Q8.8 input in [-16, 11] against `$exp` and the integer model; clamping |
| `tb_frac_divider` | random operands against `floor(num*256/den)`; 9-cycle latency |
| `tb_embedding_unit` | random sentences, repeated and out-of-range words, foreign table writes |
| `tb_input_write` | slot order, slot ring wrap, `n_slots`, question path |
| `tb_mem_module` | soft read for 0, 1, some and all 50 slots; latency `n*(FRAC+4)+6`; a dominant slot |
| `tb_read_module` | key selection per hop; `h = r + W_r k` with `r` arriving early or late |
| `tb_output_module` | argmax, early exits, thresholded full scans; `VOCAB+5`-cycle full search |
| `tb_mann_control` | load addressing, word routing, commits, busy interlock, hop order, answer packing, FIFO_OUT full |
| `tb_mann_accel` | the whole accelerator at its default size: random model and stories, every answer against the reference network |
| `tb_babi_task1` | a bAbI-task-1-style workload ("mary went to the kitchen ... where is mary?") with a hand-written model that solves it; answers must be the true place; run with and without a useful index order |

`tb_mann_accel` runs at the default parameters. It counts each mechanism and
fails if any of them never happens:

* recurrent hops;
* early exits;
* thresholded searches with no early exit;
* conventional searches;
* the memory ring wrapping around, with a 62-sentence story;
* FIFO_IN back-pressure, caused by a table reload queued behind inferences;
* FIFO_OUT filling up while the reader holds `out_ready` low. This is seen
  from outside: after the hold, 16 answers come out in consecutive cycles.

`tb_babi_task1` generates 25 stories in which four people each go to one of
six places, and asks where one of them is. Its model is written by hand, not
trained:

* the address and question embeddings mark the person;
* the content embedding marks the place;
* `W_r` is the identity;
* each place label reads its place's dimension;
* only the place labels have reachable thresholds, and they come first in
  the index order.

After those 25 stories the order table is reloaded with the identity order
(label i in position i), and 10 more stories follow on the same model. The
early exit then comes only when the search reaches the true place label,
which sits at positions 11 to 16.

Every answer is correct. On average a question costs:

| setting | logits computed |
|---|---|
| thresholding, place labels ordered first | about 3.5 |
| thresholding, identity order | about 13 |
| no thresholding | 177 |

The first row shows the early exit at work. The gap between the first two
rows is what the index order buys.

To run a testbench with Verilator, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/mann_pkg.sv tb/mann_ref_pkg.sv tb/tb_mann_accel.sv --top-module tb_mann_accel
./obj_dir/Vtb_mann_accel
```

Replace `tb_mann_accel` with any other testbench name. Omit
`tb/mann_ref_pkg.sv` for `tb_stream_fifo` and `tb_mann_control`, which do not
use it. To lint a module, run `verilator --lint-only -Wall -Irtl -y rtl
rtl/mann_pkg.sv rtl/<module>.sv`.

Some lint warnings remain. They report table indices wider than the table
depth: a 16-bit row field indexes a 177-row table. Every such write is
guarded by a range check. They also report package constants that a given
module does not use.

## Changing the design

* **Sizes.** Set `EMB`, `SLOTS`, `VOCAB` and `HOPS` on `mann_accel`. The
  stream counts follow the parameters. `VOCAB` is limited to 65,536 by the
  16-bit row field, and `EMB` to 255 by the 8-bit column field of the
  weight-load bus.
* **Precision.** `DATA_W`, `FRAC` and the accumulator and exp widths are in
  `mann_pkg`. `tb/mann_ref_pkg.sv` hard-codes Q8.8 and must change with
  them.
* **A different exp or divider.** `exp_unit` is combinational and
  `frac_divider` uses a start/done handshake. Either can be replaced behind
  the same ports. The MEM module's latency then changes, but nothing else
  depends on it.
