# ToPick: attention for text generation that stops reading keys it does not need

When a language model generates text, every new token attends over the whole
key/value cache of its sequence. The query is a single vector, so the work is a
matrix-vector product and the time goes into reading K and V from DRAM. Most
cached tokens end up with a softmax probability close to zero. This design
finds those tokens *while their keys are still arriving* and stops fetching
them: first the rest of the key, and then the whole value vector.

This is synthesizable SystemVerilog for one attention head of the accelerator
described in *Token-Picker: Accelerating Attention in Text Generation with
Minimized Memory Transfer via Probability Estimation* (DAC 2024). It has 16
processing lanes, a 64-dimensional head, 12-bit Q/K/V and contexts of up to 2048
tokens. The block structure, the pruning rule and the sizes follow that paper.
The number formats, the exp/ln arithmetic, the flow control and the memory
interface are this implementation's own choices. They are marked as such below
and in each file's header.

## 1. The pruning rule

A token's probability is `p_i = exp(s_i) / sum_j exp(s_j)`. Two facts make it
possible to bound `p_i` from above before all scores are known:

* **Missing tokens only lower p.** Every term of the denominator is positive.
  A denominator built from only the tokens seen so far is therefore too small,
  and the resulting estimate is too large.
* **Missing key bits have a known range.** Keys are 12-bit two's-complement
  numbers, fetched as three 4-bit chunks, most significant first. Once chunk
  `b` (0, 1 or 2) has arrived, the `u = 4*(2-b)` low bits of every element are
  unknown. They can only add a value between 0 and `2^u - 1` to the element.
  With the query known in full, the true score therefore lies in
  `[s^b + M_min^b, s^b + M_max^b]`. Here `s^b` is the score with the unknown
  bits set to zero, `M_max^b = P * (2^u - 1)` and `M_min^b = N * (2^u - 1)`,
  where `P` is the sum of the positive query elements and `N` the sum of the
  negative ones. These margins depend only on the query, so they are computed
  once per operation.

Putting the largest possible score in the numerator and the smallest possible
scores in the denominator gives an upper bound `p''`. If `p'' <= thr`, the token
is dropped for good. In the log domain the test is

    s_i^b + M_max^b - ln(denominator) <= ln(thr)

and it costs one adder and one comparator per lane. The denominator holds
`exp(s_j^b + M_min^b)` for every token `j` that is still alive. When a token
moves to its next chunk, its term is replaced. When a token is pruned, its term
is removed. The denominator is therefore always a lower bound on the final sum
over the surviving tokens. At the end of step 0 it equals the softmax
denominator of the kept tokens, and step 1 reuses it.

The bound is safe, so no token whose true probability is above `thr` is ever
dropped. The exp and ln units add a small error (see section 5). The end-to-end
test checks that no token with `p > 4*thr` is pruned.

## 2. Step 0 in a lane: out-of-order chunk processing

The hardest part of the design is what happens inside one lane
(`rtl/pe_lane.sv`) while a chunk's DRAM latency is outstanding.

Token `i` belongs to lane `i mod 16`. Each lane fetches the first chunks of its
tokens in this order: token 0 first (on lane 0), then from the newest token
backwards. Recent tokens and the first token usually carry most of the
probability mass. Visiting them first makes the denominator large early, and
that makes later tokens prunable sooner.

Every returned chunk carries its tag (token, chunk index). The lane processes
one chunk per cycle in whatever order chunks arrive:

1. The BW aligner places the 4-bit chunk at its bit position. The first chunk
   is sign-extended; the other two are zero-extended. The 64 multipliers and
   the adder tree then form `ps = q . k^b`.
2. The scoreboard is searched by token index. For chunk 1 or 2 it returns the
   previous partial score and partial exp. The new score is
   `s^b = s^{b-1} + (ps >>> 6)`.
3. The **RPDU** applies the test above, using the margin pair of chunk `b` and
   the current `ln(denominator)` from the DAG.
4. The **PEC** computes `exp(s^b + M_min^b)`, or 0 if the token was pruned. It
   sends the difference from the previous chunk's value to the DAG.
5. The request port gets one of these:
   * **Not pruned, chunks left:** the next chunk of the same token. The
     scoreboard stores `(s^b, exp)` for it.
   * **Pruned:** the scoreboard entry is freed and no V is ever fetched.
   * **Not pruned after the last chunk:** the token is kept. `(i, s_i)` goes
     into the Probability Generator's FIFO.
   * **Pruned, kept, or no chunk this cycle:** the slot is free, so the lane
     requests the first chunk of its next token.

While a token's next chunk is in flight, the multipliers work on other tokens'
first chunks. The lanes therefore stay busy, and no lane waits for a specific
chunk. This design adds one flow-control rule: a lane never has more than 32
tokens in flight, counting from the first-chunk request until the token is
pruned or kept. A token in flight needs at most one scoreboard entry, so the
32-entry scoreboard cannot overflow. When memory latency exceeds what 32 tokens
can cover, the lane stalls its first-chunk requests, and `n_stall` counts the
stalled cycles.

Each scoreboard entry is 67 bits: valid, a 10-bit token field, a 24-bit partial
score and a 32-bit partial exp. The token field holds the lane-local index
`i / 16`, which is unique for contexts of up to 16384 tokens.

## 3. The denominator loop (DAG) and step 1

Each cycle, the DAG (`rtl/dag.sv`) adds the 16 lanes' deltas to a 48-bit
accumulator. It then takes the natural log and broadcasts the result to all
lanes. A delta presented in cycle `n` is in `den` after edge `n` and in
`ln_den` after edge `n+1`. A lane therefore always prunes against a denominator
one to two cycles old. Because the denominator only grows with new evidence,
this delay can only make pruning slightly less aggressive; it can never make
it unsafe.

After every lane has finished step 0, the controller waits three cycles for
`ln_den` to settle. Then it starts step 1. Each lane's Probability Generator
(`rtl/prob_gen.sv`) pops its kept tokens one at a time and computes
`p_i = exp(s_i - ln(den))` as a 12-bit Q1.11 value. It requests the token's
three V chunks on three consecutive cycles. The MUX network broadcasts `p_i`
to the lane's 64 multipliers. Each returned V chunk adds `p_i * v_i^b` to 64
per-dimension accumulators; this step bypasses the adder tree. A top-level
adder sums the 16 lanes' accumulators into `o_t`, with 11 fractional bits.

## 4. Blocks

| Module | Role |
|---|---|
| `topick_top` | One head: all blocks below, the cross-lane `o_t` adder, and the event counters |
| `controller` | Runs MARGIN, STEP0, SETTLE, STEP1, DONE; maps lane requests to DRAM byte addresses or to the on-chip buffers; counts K and V chunks |
| `operand_buffer` | 512 B, holds `q_t`; written 32 bits at a time |
| `margin_generator` | Sign filter, two 64-input sums, and the CM LUT of three `(M_min, M_max)` pairs |
| `mux_network` | Per lane, selects operand A (`q_t` in step 0, `p_i` in step 1) and the chunk source (DRAM or on-chip buffer) |
| `pe_lane` (x16) | Step 0 and step 1 datapath, request generation, scoreboard, RPDU, PEC, Probability Generator |
| `mult_adder_tree` | BW aligner, 64 signed 12x12 multipliers, and the adder tree |
| `scoreboard` | 32 x 67-bit associative store of partial results |
| `rpdu` | Request/prune decision |
| `pec` | Partial exp and its delta |
| `prob_gen` | Kept-token FIFO (128 entries), `p_i`, V requests, and the `p_i` queue |
| `dag` | Delta adder, denominator accumulator, and `ln` |
| `kv_buffer` (x16) | One lane's 12 KB of the 192 KB K buffer and 12 KB of the 192 KB V buffer |
| `exp_unit`, `ln_unit` | Fixed-point `e^x` and `ln(x)` |
| `topick_pkg` | Sizes, formats, request/response structs |

Not included: the HBM2 memory (8 channels of 128 bits at 2 GHz) and its
controller. The top exposes one request port and one response port per lane
instead. Sixteen lanes, each taking one 256-bit chunk per cycle at 500 MHz,
need 256 GB/s. That equals the eight HBM2 channels at 32 GB/s each.

## 5. Number formats and arithmetic (choices of this implementation)

| Quantity | Format |
|---|---|
| Q, K, V elements | signed 12-bit integers; K and V are split into chunks of bits 11-8, 7-4 and 3-0 |
| dot product | 30-bit exact |
| score | signed 24-bit, 8 fractional bits, in natural-log units: `score = (q.k) >>> 6`. The host must fold `1/sqrt(d_h)` and the quantisation scales into `q_t` so that this holds |
| margins | same scale as scores; `M_min` rounded down, `M_max` rounded up |
| exp values | unsigned 32-bit, 16 fractional bits; saturate at `e^11.09`, flush below `e^-11.09` |
| denominator | unsigned 48-bit, 16 fractional bits |
| `p_i` | signed 12-bit Q1.11, saturating at 2047/2048 |
| `o_t` | per-lane 32-bit accumulators; 36-bit sum with 11 fractional bits |

`exp_unit` computes `2^(x log2 e)`. It splits the exponent into an integer
shift and a fraction, and evaluates `2^f` from a 16-segment piecewise-linear
table with entries `round(2^(i/16) * 2^15)`. The error is below 0.1 %.
`ln_unit` finds the leading one, looks up `log2(1+m)` in a 16-segment table
with entries `round(log2(1+i/16) * 2^15)`, and multiplies by ln 2. Its error is
within 2/256.

The score keeps only 24 bits, and each chunk's contribution is truncated by the
6-bit shift before it is added. The stored score can therefore differ from
`(q.k)/64` by up to 3 LSB (3/256 of a natural-log unit). Because of this
rounding, and the exp/ln error, the bound in section 1 holds to within about
0.02 in log-probability, not exactly.

Scores above about 11 saturate the exp unit. The host is expected to scale Q
so that scores stay in range; the design does not subtract a running maximum.

## 6. Phases and interfaces

**Generation phase** (`prompt_mode = 0`). The lanes' requests go out on
`mem_req[l]`. Each request carries a tag (`is_v`, token, chunk) and the byte
address `base + (token*3 + chunk) * 32`. The base is 0 for K and 196608 for V,
and each chunk vector is one 32-byte word. The memory must return each chunk
on `mem_resp[l]` with the same tag. Any latency works, and K chunks may return
in any order. V chunks of a lane must return in request order; an assertion in
`pe_lane` checks this.

**Prompt phase** (`prompt_mode = 1`). K and V are first written into the
lanes' on-chip buffers through the `kvb_wr_*` port. Word `local_token*3 +
chunk` goes to lane `token mod 16`. Requests are then served by the buffers
with one cycle of latency, and nothing is sent to DRAM. Each query is one
operation; causal attention for prompt query `j` uses `n_tok = j+1`. The paper
says only that K/V are preloaded for reuse across queries. Running the same
pruning flow on buffered data is this implementation's reading. The paper's
remark that the generation phase runs 12 x 4-bit products, and its listing of
12 x 12-bit multipliers, suggest that the prompt phase may multiply whole
12-bit K elements. Here both phases use the same chunked 12 x 4-bit path, so a
prompt query takes three K chunk cycles per kept token instead of one.

**Operation.**
1. Write `q_t` into words 0-23 of the operand buffer (element `d` at bits
   `12d+11:12d`).
2. Set `n_tok` (1-2048) and `ln_thr` (score format).
3. Pulse `start`, then wait for `done`.

`o_t`, `den`, `k_chunks`, `v_chunks`, `cycles`, `n_pruned`, `n_kept` and
`n_stall` stay valid until the next start. `thr` is a run-time input. The
paper's configurations ToPick, ToPick-0.3 and ToPick-0.5 are different
thresholds, specified only by their perplexity cost, so no value is built in.

## 7. Sizes and what fits

All defaults are the paper's sizes: 16 lanes, 64 multipliers per lane, a 32
x 67-bit scoreboard, 192 KB K and 192 KB V buffers, and a 2048-token context.
One operation handles one head of dimension 64.

| Model | Context | Head dim | Fits |
|---|---|---|---|
| GPT2-Medium/Large/XL | up to 1024 | 64 | yes |
| OPT-1.3B | 2048 | 64 | yes |
| OPT-2.7B, OPT-6.7B/13B, LLaMA-2-7B/13B | 2048 | 80 / 128 | no |

Contexts are from the paper; head dimensions are from the models' public
configurations. The paper does not say how heads wider than the 64 multipliers
are handled, and this design does not split them.

On the synthetic test data (2048 tokens, `thr = e^-9`, a few dominant tokens),
one generation-phase operation took about 500 cycles at 8-cycle memory latency.
It fetched 4020 of 6144 K chunks and kept 617 of 2048 tokens. At 48-cycle
latency it took about 880 cycles, limited by the 32-token in-flight window.
These numbers describe the test data only. They are not a reproduction of the
paper's results on real models.

`tb_workloads` runs one generation-phase operation at each context length of
the evaluated models: 512, 768 and 1024 tokens (the prompt/ending lengths of
the GPT2-Medium comparison), 1024 (GPT2-Large/XL) and 2048 (OPT-1.3B). Each
length uses fresh synthetic data. The total K+V traffic, relative to fetching
every chunk, fell from 0.59 at 512 tokens to 0.40 at 2048 tokens on that data.

## 8. Where this departs from, or goes beyond, the paper

* The paper's text states the prune test as `s_max - ln(den) <= ln(thr)`. The
  RPDU box in its lane diagram reads "a'' <= thr?". The text's form is
  implemented.
* Step 1 uses the multipliers with per-dimension accumulators and bypasses the
  adder tree. The paper only says that the multiplier-adder tree performs the
  weighted sum.
* The Probability Generator does not re-check kept tokens against the final
  denominator. A token kept early, against a smaller denominator, is still
  used; its `p_i` is simply small.
* The controller's address map, the per-lane memory ports, the in-order rule
  for V, the 32-token in-flight limit, and the 128-entry FIFO are this
  implementation's choices.
* The whole per-chunk datapath is one cycle deep, after a registered input.
  The paper reports 500 MHz in a 65 nm library; reaching that would need
  pipelining, which is not done here.
* The prompt phase reuses the chunked 12 x 4-bit path instead of full 12 x 12
  products (see section 6).
* The on-chip buffers are plain arrays. SRAM macros, the HBM2 device and the
  memory controller are outside the RTL.

## 9. Simulation

Each `tb/tb_<module>.sv` is a self-checking testbench. It prints
`TB_RESULT checks=N failures=M` and has a cycle watchdog. `tb_topick_top`
runs the full-size design through three operations:
1. generation phase at memory latency 8;
2. generation phase at latency 48, which forces in-flight stalls;
3. prompt phase from the on-chip buffers.

It compares `o_t` with a floating-point softmax attention and checks that no
clearly relevant token was pruned. It checks that every kept token fetched its
three V chunks exactly once. It also counts early pruning, pruning at the last
chunk, first-chunk requests issued while downstream chunks are pending, stalls,
step switches, and prompt-phase runs, and fails if any of them never happened.
`tb/dram_model.sv` is the behavioural memory it uses. `tb_workloads` runs the
same checks at the context lengths of section 7 and prints the traffic for
each.

With Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/topick_pkg.sv \
        tb/tb_topick_top.sv --top-module tb_topick_top -Mdir obj
    ./obj/Vtb_topick_top

The same command works for any other testbench (replace the name). The
full-size end-to-end test runs in well under a second.
