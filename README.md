# SpAtten in SystemVerilog: attention with cascade pruning and progressive quantization

Attention layers in Transformer models such as BERT and GPT-2 do little arithmetic for each byte they read. In the generation stage of a model like GPT-2 the Q·K products are matrix-vector work, and the keys and values of every earlier token must come from DRAM again for every new token. SpAtten is an accelerator that cuts this traffic in four ways:

* **Cascade token pruning.** Every token keeps an importance score: the sum of all the attention probabilities it has received, over heads, layers and generation steps. Before each head, the least important tokens are dropped. A dropped token stays dropped for the rest of the sentence, so its Q, K and V are never read again.
* **Cascade head pruning.** Every head keeps an importance score: the accumulated magnitude of its outputs. At the end of each layer the weakest heads are dropped for all later layers.
* **Local V pruning.** For each query only the V vectors with the largest probabilities are fetched and multiplied.
* **Progressive quantization.** Q, K and V are stored as a most-significant part (4 to 12 bits) and a 4-bit least-significant part. At first only the MSBs are read. If the probabilities of a query come out flat (their maximum is below a threshold), the LSBs of Q and K are read and the scores are computed again. The V vectors of that query are then read at full precision too.

Pruning at run time needs a fast ranking engine, and progressive quantization needs a memory path that can change its bit width per request. Those two parts, and the controller that ties the steps together, take most of the design.

This RTL implements all four mechanisms, at the sizes the SpAtten paper gives, and tests each unit and the whole chip by simulation.

## Data path of one query

For each head `h` of a layer, in order:

1. **Token top-k.** Rank the alive tokens by cumulative importance and keep `max(1, n·tok_keep/256)` of them. The surviving token ids are stored in order in `alive_ids`.
2. **K fetch.** Fetch K of every alive token into the Key SRAM. Slot `i` of the SRAM holds K of `alive_ids[i]`.
3. **Per query.** Every alive token is a query in summarization mode; only `cfg.q_token` is in generation mode.
   * Fetch Q into the query register.
   * **Q·K** (`qk_unit`). One Key SRAM line holds 512/D keys. The 512 multipliers and a reconfigurable adder tree turn it into 512/D scores per cycle. That is 8 scores per cycle at D = 64.
   * **Softmax** (`softmax`). 8 lanes, row buffered in a 128-deep FIFO.
   * **Progressive quantization check** (`pq_determiner`). If every probability is below `thres`, raise `need_lsb`. The controller then fetches the Q LSBs and the LSBs of all alive K and OR-merges them into what is stored. It reruns Q·K and softmax once. After the first LSB fetch in a head the K LSBs are already on chip, so later queries of that head fetch only their Q LSBs.
   * **Score accumulation and local V top-k.** The probabilities stream 8 per cycle into:
     * `token_score_acc`, which adds them to the tokens' cumulative scores;
     * the second top-k engine, which keeps `v_keep/256` of them.
   * **V fetch.** Fetch the kept V vectors, MSB and then LSB if the query needed LSBs, into the Value SRAM in the order they were kept.
   * **Prob·V** (`av_unit`). One Value SRAM line and its probabilities per cycle. The adder tree is folded so that it forms D trees of 512/D inputs. The output is D 12-bit elements of attention_out.
   * **Head score.** `head_score_acc` adds Σ|attention_out| to the head's score.
4. **Head top-k.** After the last head of the layer, the token top-k engine is reused to keep `head_keep/256` of the alive heads.

The steps run one after another. Each unit is pipelined inside, but a fetch does not overlap with the computation of another query. The paper overlaps them in a coarse-grained pipeline. This design does not, so its cycle count per query is higher than the paper's. Every rate-setting unit still works at the paper's rate:
* 16 top-k elements per cycle;
* 8 scores per cycle;
* 8 softmax lanes;
* one SRAM line per cycle.

## The top-k engine

`topk_engine` finds the k largest of n values (n ≤ 1024) with a randomized quick-select that handles 16 elements per cycle.

**Load.** The values arrive 16 per cycle with a mask. A zero eliminator compacts each beat, and the beat is appended both to FIFO_L and to a copy of the input.

**Partition.** Each pass reads the current FIFO 16 entries per cycle and compares them with a pivot, using a '<' comparator array and a '>' comparator array. Each result is compacted by a zero eliminator and appended to FIFO_L or FIFO_R. The pivot is a pseudo-random element of the current FIFO, at position (LFSR · size) >> 16. Elements equal to the pivot are counted. Between passes a START step compares size(FIFO_R) + count(= pivot) with the number of elements still to be found. It then decides whether the k-th largest value is the pivot (done), lies in FIFO_R, or lies in FIFO_L (the target shrinks by the number kept).

**Filter.** Once the k-th largest value `kth` is known, the input copy is read once more, 16 per cycle. Every element `> kth` passes, and so do the first few `= kth` elements (a counter), until exactly k have passed. The survivors leave in their original order, each with its index. The controller uses that order directly as the new `alive_ids`.

`k ≥ n` passes everything without any partition pass; `k = 0` passes nothing.

The zero eliminator (`zero_eliminator`) is the paper's structure. A prefix sum counts the invalid entries in front of every element. Then log₂N shift layers each move an element left by 2^s when bit s of its count is set.

## Memory path: from a fetch command to SRAM

A fetch command names (kind ∈ {Q, K, V}, plane ∈ {MSB, LSB}, head, token, destination slot).

**DRAM layout.** This is the design's own choice. Each of the six planes starts at word address `plane << 24`. Vector `v = head·1024 + token` of a plane occupies `D/64` segments of 64 elements. A segment of b-bit fields is b/2 words of 128 bits; LSB planes use b = 4. The word address is `(v·D/64 + seg)·b/2`, and the HBM channel is the address's low 4 bits, so consecutive words go to consecutive channels.

* **`qkv_fetcher`.** Hands segments round-robin to 32 fetch ports. Each port pushes the segment's words into its 64-deep address FIFO. A word is tagged {port, reorder slot}, and a port never has more than 64 words in flight. For every segment, a descriptor (kind, plane, destination) is queued on the port.
* **`addr_xbar`.** Has 32 address FIFOs. Each of the 16 channels picks, round-robin, one port whose FIFO head addresses it.
* **`data_xbar`.** Returned words go by tag into 32 per-port reorder buffers of 64 words. Each buffer is released strictly in slot order, so a port sees its words in request order even though the 16 channels answer independently.
* **`bitwidth_converter`** (one per port). Collects b/2 words and unpacks 64 fields. An MSB field becomes a signed 12-bit value `msb << (12−b)`. An LSB field becomes the bits just below: `lsb << (8−b)` for b ≤ 8, `lsb >> 2` for b = 10, and nothing for b = 12.
* **Write arbiter** (in the top). Takes one converted segment per cycle, guided by the port's descriptor. It writes the segment to the query register, the Key SRAM or the Value SRAM, OR-merging if it is an LSB segment.
* **`kv_sram`.** 256 lines of 8 × 64 × 12 bits. That is 196 KB each for the Key and Value SRAMs, matching the paper's size. The SRAM writes one segment at a time and reads a full line with one cycle of latency.

The channel interface of the top (`ch_valid/ch_ready/ch_req`, `ch_rvalid/ch_rdata/ch_rtag`) is the boundary to the 16 HBM channels. HBM itself is outside the chip. The testbench model (`tb/hbm_model.sv`) answers each channel in order after a random latency and stalls `ch_ready` at random.

## Softmax arithmetic

The paper gives the softmax's function but not its insides, so this implementation is this design's own:

* **Scaling.** `t = score·scale / 2^16`, clamped to [−16, 16).
* **Exponential.** `e^t = 2^n · 2^f`, where `n = floor(t·log₂e)`. `2^f` is a fifth-order Taylor series in Horner form with 16-bit fixed-point coefficients. Each exponential is stored in the row FIFO as an 18-bit mantissa and a 6-bit exponent.
* **Sum.** The row sum is kept in 60-bit fixed point with 24 fraction bits.
* **Reciprocal.** At the end of the row, a 32-step restoring divider computes `2^31 / s`, where `s` is the sum normalized to 16 bits.
* **Output.** Every buffered exponential is then multiplied by that reciprocal and shifted back, giving a 12-bit probability in Q0.12 (4096 = 1.0), at 8 per cycle.

Against double-precision softmax the error is at most 1/4096 in the unit test. The 32-cycle division is the only part of a row that is not at full rate.

`in_ready` falls while a row is being divided and read out. The controller never sends the next row before the previous one is finished, and a row of at most 1024 scores fits the 128-deep × 8 FIFO. The top checks with an assertion that the softmax never refuses a score.

## Configuration (`cfg_t`, in `spatten_pkg`)

| field | meaning |
|---|---|
| `dlog` | D = 64 << dlog (64, 128, 256) |
| `msb_bits` | MSB width in DRAM: 4, 6, 8, 10 or 12 |
| `pq_en`, `thres` | progressive quantization on/off; threshold on the max probability (Q0.12, e.g. 410 ≈ 0.1) |
| `scale`, `qk_shift` | score = sat12(Σ q·k >>> qk_shift); softmax input = score·scale/2^16 |
| `gen_mode`, `q_token` | generation mode: one query (`q_token`) per head; otherwise every alive token is a query |
| `n_tokens`, `n_heads` | sentence size, taken at `new_sentence` |
| `tok_keep`, `head_keep`, `v_keep` | kept fractions in 1/256 (256 = no pruning) |

Host protocol: pulse `new_sentence` once per sentence. Then pulse `start_layer` once per layer and wait for `layer_done`. Each query produces one `out_valid` beat carrying the head, the query token and 512 output elements, of which the first D are valid. The `ev_*` outputs pulse when a token prune, head prune, V prune or LSB fetch happens.

## Sizes and workloads

The defaults are the paper's numbers:
* 16 HBM channels × 128 bits;
* 32 fetch ports with 64-deep FIFOs;
* 512 12-bit multipliers in each of Q·K and Prob·V;
* 196 KB Key and Value SRAMs;
* softmax with 8 lanes and a 128-deep FIFO;
* top-k with 16 lanes;
* context up to 1024 tokens and 16 heads.

BERT-Base and BERT-Large (12 or 16 heads, D = 64, fewer than 100 tokens on GLUE) and GPT-2 Small and Medium (up to 992 + 32 = 1024 tokens) all fit.

## Where this design departs from the paper

* **No overlap.** Fetch and compute are not overlapped, as described above. This leaves throughput below the paper's figures.
* **Bit widths below 12.** The on-chip datapath is 12 bits. With 12+4 storage the LSB fetch is carried out but adds nothing; with 10+4 only the upper two LSBs are kept.
* **K after an LSB fetch.** The K LSBs of a head are fetched at most once. Later queries of that head then run Q·K against full-precision K. This is harmless, because more precision can only help.
* **Softmax internals and DRAM layout** are this design's own (see above), as are the widths of the importance scores: 20-bit token scores and 24-bit head scores, both saturating.
* **Head importance** is accumulated over the queries of every layer and ranked at the end of each layer.
* **Not built.** The FC layers outside attention and the HBM device are not part of this RTL.

## Verification

Each unit has a self-checking testbench in `tb/`. Each compares the unit against values computed independently in the testbench:
* bit-exact sums for Q·K, Prob·V and the score accumulators;
* a real-number softmax;
* scoreboards for the crossbars and the fetcher;
* a software reference for the top-k.

Where the paper implies a rate, the testbenches check it:
* `qk_unit`: 8 scores per cycle, back to back, with the first beat 4 cycles after `start`;
* `av_unit`: output 3 cycles after the last beat;
* `softmax`: 8 probabilities per cycle on output;
* `topk_engine`: 16 elements per filter cycle.

`tb_spatten_top` runs the whole chip at its default sizes against the HBM model:
* **Generation mode.** Every output element is compared with a double-precision attention computed from the same DRAM image. This is done once with MSBs only and once with the LSB path forced. The largest error seen is 4 LSBs of a 12-bit output.
* **Summarization with pruning.** Two layers with all three pruning mechanisms and progressive quantization. The test checks:
  * the number of queries per head follows the keep fractions;
  * no pruned token returns;
  * the second layer runs only the heads kept by the first.

The test counts token prunes, head prunes, V prunes, LSB fetches and channel stalls, and fails if any count is zero.

Run a test with plain Verilator, for example:

```
verilator --binary --timing --assert -y rtl -y tb rtl/spatten_pkg.sv tb/tb_spatten_top.sv --top-module tb_spatten_top
obj_dir/Vtb_spatten_top
```

Each test ends with a line `TB_RESULT checks=N failures=M`.
