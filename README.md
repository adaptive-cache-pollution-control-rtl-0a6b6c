# Adaptive Cache Pollution Control (ACPC): a learned-priority L2 cache for LLM inference

Serving a large language model sends a cache three very different kinds of traffic:
model weights that stream past once per token, embedding rows looked up from a large table,
and key/value (KV) cache entries that come back at every decoding step. A prefetcher tuned for
regular strides cannot tell these apart. It fills the cache with lines that are never used,
and these evict lines that would have been hit again. This is cache pollution.

ACPC attacks pollution in the replacement policy rather than in the prefetcher:

1. A small **temporal convolutional network (TCN)** looks at the recent sequence of accesses.
   For each access it predicts the probability `y_hat` that the line will be reused soon.
2. The cache stores `y_hat` with the line. On a miss, a **priority-aware replacement module
   (PARM)** ranks the lines of the set by

       P_i = alpha * U_i + (1 - alpha) * f_i,    U_i = exp(y_hat_i) / sum_j exp(y_hat_j)

   Here `U` is the softmax-normalised prediction and `f` is the line's normalised access
   frequency. PARM evicts the line with the lowest `P`.
3. A new line enters with its own prediction. A prefetch the network does not trust therefore
   starts with a low priority and is the first line to go. It cannot displace lines that are
   in use.
4. An **online learning** loop watches whether predicted lines were in fact reused. It nudges
   the network's weights by gradient descent on the cross-entropy loss.

This repository gives synthesizable SystemVerilog for the whole mechanism, wrapped around a
512 KB, 8-way, 64-byte-line L2 cache. It also gives a self-checking testbench for every
module. The published description of ACPC fixes the network shape, the equations and the
cache size. It does not fix number formats, channel counts, cache organisation, handshakes or
how the learning runs in hardware. Those are choices made here, and each is marked in the
source and listed below.

## Block diagram

```
              req_* (address, type, prefetch?)            cfg_* (weights, alpha, learning)
                  |                                              |
                  v                                              v
   +----------------------------+   pred_req: tag, type,   +----------------+
   | acpc_cache (512 KB L2)     |   prefetch?, hit,        | feature_encoder|
   |  tag/metadata/data arrays  |---- reuse distance ----->|  x_t (4 x Q7.8)|
   |  controller FSM            |                          +-------+--------+
   |  +----------------------+  |                                  v
   |  | parm                 |  |   pred_valid, y_hat      +----------------+
   |  |  utility_softmax     |  |<-------------------------| tcn_predictor  |
   |  |  P = aU + (1-a)f     |  |                          |  conv d=1,2,4  |
   |  |  lowest-P victim     |  |                          |  FC+ReLU, FC   |
   |  +----------------------+  |                          |  sigmoid_pwl   |
   +----------------------------+                          +-------+--------+
        |              ^                                           | y_hat, layer vectors
        v              |                                           v
   mem_req_*      mem_resp_*                               +----------------+
   (line fetch from the memory below)                      | online_trainer |--> weight writes
                                                           +----------------+   (conv3, FC1, FC2)
```

`acpc_top` connects these parts. The cores, the prefetcher, L3 and DRAM are outside it. They
reach the design through `req_*` (demand reads and prefetches) and `mem_*` (line fetches).

## Life of one access

Only one access is in flight at a time. Edge 0 below is the clock edge that accepts the
request (`req_valid && req_ready`).

| edge | what happens |
|------|--------------|
| 0 | The cache reads the set's metadata (all 8 ways in one wide word) and bumps the global access time stamp. |
| 1 | Tag compare. On a hit, the hit way's data is read. The access goes to the predictor: line tag, type, prefetch flag, hit flag, and the reuse distance (time stamp now minus the line's time stamp). PARM computes the victim for the set from the metadata just read. |
| 2..6 | The predictor's five registered stages: conv1, conv2, conv3, FC1, FC2. The sigmoid is combinational after FC2. |
| 6 | `y_hat` is valid. |
| 7, hit | The line gets the new `y_hat` and time stamp. A demand hit also increments the access counter and clears the prefetch flag. The response (`resp_valid`, `resp_hit=1`, the line) appears after this edge. |
| 7, miss | The controller raises `mem_req_valid` for the line. When `mem_resp_valid` arrives, it writes the data and sets the victim way's metadata: valid, tag, the new `y_hat`, count 0, prefetch flag = request was a prefetch, time stamp. The response follows on the same edge. |

So a hit takes 7 cycles, and a miss takes 8 cycles plus the memory's latency. Prefetches get
a response too, carrying the line, which the requester may ignore. While
a set still has an invalid way, the lowest invalid way is filled and nothing is evicted. This
is how the design takes cache occupancy into account.

After reset the controller clears the metadata of all 1024 sets, one set per cycle.
`req_ready` stays low during those 1024 cycles.

## The reuse predictor

`tcn_predictor` runs one prediction per access, and a new one may start every cycle. The
network has this shape:

| stage | shape | notes |
|-------|-------|-------|
| conv1 | 4 -> 8 channels, kernel 3, dilation 1, ReLU | taps x[t], x[t-1], x[t-2] |
| conv2 | 8 -> 8, kernel 3, dilation 2, ReLU | taps t, t-2, t-4 |
| conv3 | 8 -> 8, kernel 3, dilation 4, ReLU | taps t, t-4, t-8 |
| FC1   | 8 -> 8, ReLU | its output is also sent to the learning unit |
| FC2   | 8 -> 1 | |
| sigmoid | piecewise linear, 4 segments | `y_hat` = 8-bit fraction, 255 stands for 1 |

The three layers, kernel 3, dilations 1, 2 and 4, the two FC layers, the ReLU and the sigmoid
come from the ACPC description. The channel counts are choices made here. The convolutions are
causal. The "time" axis is the access sequence: each layer keeps a shift register of its
`(K-1)*dilation` previous input vectors and advances it only when a new access arrives. The
receptive field is 15 accesses. Before the first access the history is zero. Dropout is a
training-only operation and needs no hardware.

**Number formats.** Activations are signed 16-bit with 8 fraction bits (Q7.8). Weights are
signed 8-bit with 6 fraction bits (Q1.6), so they lie in about ±2. Biases use the activation
format. Products are summed in 32 bits, shifted back by 6 and saturated to 16 bits. All
multiply-accumulates of a layer run in parallel: 96 + 192 + 192 + 64 + 8 multipliers.

**Features** (`feature_encoder`, each value a Q7.8 number in [0, 1]):

| x | meaning | encoding |
|---|---------|----------|
| 0 | address | line tag XOR-folded to 8 bits, /256 |
| 1 | instruction type | `itype_e` code / 4: weight, embedding, KV, other |
| 2 | prefetch | 1 for a prefetch request |
| 3 | temporal locality | hit: 1 - msb(reuse distance)/16, a log scale; miss: 0 |

The ACPC description asks for address, instruction type and temporal locality. The exact
encodings and the extra prefetch flag are choices made here.

**Sigmoid.** It uses the PLAN piecewise-linear segments, whose slopes are all powers of two:
|z| < 1: 0.25|z| + 0.5; < 2.375: 0.125|z| + 0.625; < 5: 0.03125|z| + 0.84375; otherwise 1.
Negative inputs use 1 - sigmoid(|z|). The maximum error is about 0.02.

## From prediction to victim

`parm` is combinational. It works on the metadata of the set being accessed.

* **Utility, `utility_softmax`.** The sum runs over the valid lines of the set, because those
  are the lines competing for eviction. `exp(y)` for y in [0, 1) is a 4th-order Taylor
  polynomial in Q16, with error below 1 %. The sum `S` is inverted once as `2^32 / S`, and each
  `U_i = exp(y_i) * (2^32/S) >> 16`. The result is Q1.16, and the valid `U_i` add up to about
  1.
* **Frequency.** Each line has a 4-bit saturating counter of demand hits, with `f = count/15`.
  It starts at 0 when the line is inserted. There is no ageing.
* **Priority.** `P = (alpha*U + (65536-alpha)*f) >> 16`, where `alpha` is a 16-bit register
  holding alpha * 65536. Its reset value is 0.5, and it is writable at any time.
* **Victim.** If the set has an invalid way, PARM takes the lowest invalid way and evicts
  nothing. Otherwise it takes the way with the lowest `P`. Ties go to the lowest way number.

The ACPC text speaks of a "reuse-priority queue". Taking the minimum over the set on every
miss gives the same head element, without keeping a sorted structure.

One consequence of the softmax is worth knowing. Because `U` is normalised over about 8 lines,
its values sit near 1/8, while `f` ranges over the whole of [0, 1]. With alpha = 0.5 the
frequency term therefore dominates once lines have been hit a few times. The prediction
mainly decides among lines that are new or rarely hit, which is exactly where prefetch
pollution happens. Raise alpha to give the prediction more weight.

## Online learning (`online_trainer`)

Training the network happens offline, and its weights are loaded through `cfg_*`. On top of
that, the learning unit adapts the network while it runs:

* **Labels.** Each finished prediction enters a 16-entry window. With it go its line address,
  its `y_hat`, and the vectors the learning step needs: conv3's three input taps `x3[k]`,
  FC1's input `c` (the conv3 output) and FC1's output `h`. Each new access marks the window
  entries of the same line as reused. The entry that drops out of the window retires with
  label `y = 1` if its line was reused within the next 16 accesses, and `y = 0` otherwise.
* **Gradient.** For a sigmoid output with cross-entropy loss, the gradient at the output is
  `y_hat - y`. With `e = 256*y - y_hat`, the unit back-propagates through the last three
  layers and accumulates over a batch of 64 retired predictions:
  * FC2: `G2_j = sum e * h_j` and `Gb2 = sum e`;
  * back through FC1's ReLU: `d_j = e * w2_j` if `h_j > 0`, else 0;
  * FC1: `G1_jo = sum d_j * c_o` and `Gb1_j = sum d_j`;
  * back through conv3's ReLU: `q_o = sum_j d_j * w1_jo` if `c_o > 0`, else 0;
  * conv3: `G3_oik = sum q_o * x3[k]_i` and `Gb3_o = sum q_o`.

  The weights used are those current when the prediction retires.
* **Update.** At the end of each batch it rewrites the three layers through the configuration
  port, one word per cycle, 281 words in all:
  * `w2 += G2 >> (10 + s)` and `b2 += Gb2 >> s`;
  * `w1 += G1 >> (16 + s)` and `b1 += Gb1 >> (6 + s)`;
  * `w3 += G3 >> (22 + s)` and `b3 += Gb3 >> (12 + s)`.

  Here `s = lr_shift`. The fixed shifts convert each product to the Q1.6 weight or Q7.8 bias
  format, so every layer steps by `2^-s` times its batch-summed gradient. Weights saturate to
  8 bits and biases to 16. Host writes always take precedence, and the unit's writes wait for
  a free cycle. The next batch keeps accumulating while an update is being written.

**Departure.** The ACPC description back-propagates the error through the whole network. This
RTL updates conv3, FC1 and FC2. conv1 and conv2 keep their loaded weights. Back-propagating
into them would need the activations of up to 14 earlier accesses for every prediction in the
window, and the description gives no hardware for it. The loss value itself is never
computed, because only its gradient is needed.

## Configuration map (`cfg_we`, `cfg_addr[9:0]`, `cfg_wdata[15:0]`)

| address | contents |
|---------|----------|
| 0-95 | conv1 weights, index `(o*4 + i)*3 + k`, k = 0 is the newest tap (`cfg_wdata[7:0]`) |
| 96-103 | conv1 biases (16 bits) |
| 104-295 / 296-303 | conv2 weights `(o*8 + i)*3 + k` / biases |
| 304-495 / 496-503 | conv3 weights / biases |
| 504-567 / 568-575 | FC1 weights `o*8 + i` / biases |
| 576-583 / 584 | FC2 weights / bias |
| 1020 | alpha × 65536 (reset 0x8000) |
| 1021 | [0] learning enable (reset 1), [7:4] learning-rate shift (reset 4) |

All weights are zero after reset, so every prediction is 0.5 until weights are loaded.

## Statistics

`stats` (`cache_stats_t`) holds seven 32-bit counters: accesses, demand hits, demand misses,
prefetch fills, prefetched lines later used by a demand access, polluting evictions (a
prefetched line evicted before any demand use) and all evictions. The cache hit rate is
hits / (hits + misses). The prefetch pollution ratio is polluting evictions / prefetch
fills. `train_labels_pos`, `train_labels_neg` and `train_updates` monitor the learning unit.

## Choices made here, and differences from the ACPC description

* **Cache organisation.** 64-byte lines, 8 ways, 1024 sets, 48-bit addresses, one request in
  flight, and a response pulse without back-pressure are all choices made here. The
  description fixes only the 512 KB L2 size of its evaluation system. Parameters `SETS`,
  `WAYS`, `LINE_BYTES` and `ADDR_W` change the geometry.
* **No writes.** The cache handles demand reads and prefetches only. It holds no dirty data
  and silently drops evicted lines.
* **Fewer features.** The description's trace records also carry a token-embedding hash, the
  context window length and semantic features. A cache cannot see these, so they are not used.
* **Eviction arrow.** The block diagram of the description draws a "cache eviction" path out
  of the TCN, separate from the "cache insertion" path out of PARM. Here both eviction and
  insertion are decided in the cache and PARM, using the stored predictions.
* **Occupancy.** The description says priorities also depend on cache occupancy but not how.
  Here occupancy enters only through the free-way-first rule.
* **Learning.** Only conv3 and the two fully connected layers adapt; conv1 and conv2 do not
  (see above).
* **Baselines.** LRU, RRIP and DNN predictors appear in the description only as comparison
  points and are not included.

## Files

| file | contents |
|------|----------|
| `rtl/acpc_pkg.sv` | formats, sizes, `itype_e`, `cache_stats_t`, configuration map, `sat_act` |
| `rtl/acpc_top.sv` | top level and control registers |
| `rtl/acpc_cache.sv` | L2 arrays, controller, counters |
| `rtl/parm.sv`, `rtl/utility_softmax.sv` | replacement priority and victim |
| `rtl/tcn_predictor.sv`, `rtl/tcn_conv_layer.sv`, `rtl/fc_layer.sv`, `rtl/sigmoid_pwl.sv` | predictor |
| `rtl/feature_encoder.sv` | features |
| `rtl/online_trainer.sv` | online learning |
| `tb/tb_<module>.sv` | one self-checking testbench per module |

## Simulation

Each testbench prints `TB_RESULT checks=N failures=M` and ends by itself, with a watchdog.
With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -y rtl +libext+.sv \
    rtl/acpc_pkg.sv tb/tb_acpc_top.sv --top-module tb_acpc_top
./obj_dir/Vtb_acpc_top
```

Replace `tb_acpc_top` with any other testbench name. What the testbenches check:

* **Layers, sigmoid, softmax, PARM.** Random stimulus is compared with reference arithmetic
  written separately in each testbench. The sigmoid, softmax and priorities are compared
  with exact real-number maths, within stated tolerances.
* **`tb_tcn_predictor`.** It loads random weights through the configuration port and
  recomputes the whole network from the full access history. It checks exactly the vectors
  brought out for learning (conv3's input taps, FC1's input and output), `y_hat` against the
  exact sigmoid, and the 5-cycle latency.
* **`tb_online_trainer`.** It back-propagates each label itself and predicts every label and
  every one of the 281 weight writes of each update (address and value), with random stalls.
* **`tb_acpc_cache`.** A 4-set, 4-way cache runs against a full reference model of the
  replacement policy, with a random predictor delay and random memory timing. It checks
  hit/miss, data, reuse distance, victim choice and all counters, under three alpha settings.
* **`tb_acpc_top`.** The full-size design runs end to end with a hand-made network that trusts
  demand reads and distrusts prefetches. It checks:
  * six hot lines fill free ways;
  * a 40-line prefetch scan through their set evicts only prefetched lines, and every hot read
    still hits, with a 7-cycle hit latency;
  * alpha can be switched;
  * a 2,300-access decode-like stream (streamed weights with next-line prefetch, embedding
    lookups, a growing KV cache) makes the learning unit label predictions and rewrite the
    trained layers.

  It runs in a few seconds.

* **`tb_acpc_workload`.** A decode-like stream runs twice through the full-size design. The
  stream per token is: all KV lines so far; 24 streamed weight lines, each followed by a
  prefetch that is never used; and 3 embedding lookups. The traffic is confined to 16 sets, so
  the cache is full and contended within a short run. The first run has the predictor off:
  all weights are zero, so every `y_hat` is 0.5 and only the access counters rank lines. The
  second run is ACPC with the demand/prefetch network and online learning. Over 40 tokens, the
  results are:

  | run | demand hit rate | KV hit rate | evictions of non-prefetched lines |
  |-----|-----------------|-------------|-----------------------------------|
  | predictor off | 0.333 | 0.727 | 1192 |
  | ACPC | 0.382 | 0.837 | 1052 |

  The testbench checks that ACPC is at least as good on all three numbers.

Each testbench also failed as it should when its module was replaced by a copy with one
deliberate fault.

These are synthetic streams. The trace sets the ACPC authors used (GPT-3, LLaMA-2 and T5
inference, 2.3 billion records) are not reproduced here, so their hit rates and throughput
figures are not verified by this RTL.
