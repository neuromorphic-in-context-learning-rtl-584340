# A spiking-transformer MIMO detector that learns the channel from its context

A receiver on a MIMO link must undo a channel it does not know. The usual
approach estimates the channel from pilot symbols and then equalizes. The
detector here does neither explicitly. A transformer is pre-trained off-line
on many random channels. At run time it receives the pilots as part of its
input sequence, together with the received vector to be detected, and it
outputs the transmitted symbols directly. The weights never change on the
device. This is *in-context learning*: the context of pilots selects the
input-output mapping.

The RTL in this repository implements the *spiking* version of that
transformer, as proposed by Song, Simeone and Rajendran in "Neuromorphic
In-Context Learning for Energy-Efficient MIMO Symbol Detection". Every
activation is a binary spike, repeated over `T` time steps. So:

* a matrix-vector product `W x` with a spike vector `x` is just the sum of the
  columns of `W` whose input spiked. It needs no multiplier.
* the attention products `Q·K` and `A·V` are AND gates followed by counters.
  Their normalized results are turned back into spikes by Bernoulli sampling.
  This is stochastic computing.

Nothing in the datapath multiplies. The only multiply anywhere is a 16x16
scaling of a random number inside the attention unit.

The RTL implements inference only. Training is off-line, and the weights are
written into on-chip memory through a load port.

## Configuration

The default parameters are the main configuration of the published
evaluation, except for the values in the right-hand column, which the
description leaves open and which this design chooses:

| from the description | value | this design's choice | value |
|---|---|---|---|
| transmit / receive antennas `NT`, `NR` | 2 / 2 | feed-forward width `DH` | 1024 (= 4·DE) |
| constellation `K` | 4 (QPSK) | probability width `PW` | 8 bits |
| quantizer | 4-bit mid-tread over [-4, 4) | membrane width `VW` | 20 bits, saturating |
| context pairs `N_CTX` | 20, so `M = 41` tokens | LIF threshold `VTH` | 64 (in weight units) |
| token width `DT = max(NT, 2NR)` | 4 | leak `β` | 1 − 2⁻⁴ (`LEAK_SHIFT = 4`) |
| embedding `DE`, layers `L`, heads `NH` | 256, 4, 8 | output accumulator `OW` | 20 bits |
| head width `DK = DE/NH` | 32 | random source | xorshift32 per lane |
| time steps `T` | 4 | | |
| classes `K^NT` | 16 | | |
| weights | INT8 | | |

All of these are in `rtl/snn_pkg.sv`, and every module takes them as
parameters.

## Inputs: tokens and spikes

The sequence has `M = 2N+1` tokens: `y_1, s_1, …, y_N, s_N, y`. The `y_i` are
received pilot vectors, the `s_i` are the known pilot symbols, and the last
`y` is the query. Each token is `DT = 4` numbers in [0, 1):

* **Received vector.** There are `2·NR = 4` quantizer codes, ordered
  `[Re(y_1), Re(y_2), Im(y_1), Im(y_2)]`. Code `c` stands for the level
  `−4 + 0.5c`, so the normalization `(y − l_min)/(l_max − l_min)` is exactly
  `c/16`.
* **Pilot symbol.** There are `NT = 2` QPSK indices `k`, normalized to `k/4`.
  The remaining two entries are zero padding.

`token_normalizer` does this conversion as tokens are written.
`bernoulli_encoder` stores the 41×4 probabilities. At every time step it draws
one spike per entry, with `P(1) = p`.

## The time-step loop

```
            per time step t = 1..T (a sequencer in snn_icl_detector)
 tokens ──► bernoulli_encoder ──X(4×41)──► embedding lif_layer W_e (256×4)
                                               │ E_0 (256×41)
                                               ▼
                      decoder_layer 1 … decoder_layer L   (E_1 … E_L)
                                               │
                                               ▼
                      output_layer  scores[m][c] += Σ_i W_O[c][i]·E_L[i][m]
 after step T: answer = argmax_c scores[M-1][c]   (the query token)
```

The units run strictly one after another, and each finishes a whole time step
for all 41 tokens before the next one starts. Spike matrices are passed as
registered `M × width` arrays. All neuron state lives in the units:
membranes persist from step to step, and `start` clears them.

## LIF layers: one cycle per input spike

`lif_layer` is the workhorse. It is instantiated 21 times at the default size:
the embedding, plus Q, K, V, W_1 and W_2 in each of the four decoder layers.
For each token it does three things:

1. It scans the token's input spikes, lowest index first. For each spike it
   reads that input's weight column from `weight_mem`: all NOUT INT8 weights
   in one word, with a one-cycle read latency. It adds the column to NOUT
   parallel accumulators. An input that did not spike costs nothing: the
   layer is event-driven.
2. It updates every neuron of the token as
   `V = V_prev − (V_prev >>> LEAK_SHIFT) + I`. If `V ≥ VTH`, the neuron emits a
   spike and `V` becomes 0. Otherwise `V` is kept, saturated to 20 bits.
3. It writes the updated membrane word back. There is one word per token.

A token costs `popcount(input) + 2` cycles, and `done` comes one cycle after
the last token. The membrane memory has no reset. Instead, a valid bit per
token is cleared at the start of an inference, and a word whose bit is clear
reads as zero. This keeps the membranes a plain memory, which maps onto SRAM.

## Stochastic spiking attention

`mssa` replaces softmax attention. For head `h`, the layer's Q, K and V spike
matrices are split into 32-bit slices, one per token. For every query token
`m` and key token `m'`:

```
Ã[m][m'] = popcount(Q_h[:,m] AND K_h[:,m'])   if m' ≤ m   (causal mask)
         = 0                                   otherwise
A[m][m'] = 1 with probability Ã[m][m'] / DK
F̃[d][m]  = popcount(A[m][:] AND V_h[d][:])     (sum over all M keys)
G[h·DK+d][m] = 1 with probability F̃[d][m] / M
```

`A` is the spiking analogue of the normalized attention matrix. `F̃` counts
how many attended keys carry a value spike in row `d`. Both normalizations are
fixed (divide by `DK`, divide by `M`), so there is no softmax and no data-
dependent division.

**Hardware.** One cycle computes one complete attention row, meaning one head
and one query token. That takes 41 AND-popcounts of 32 bits and 41 Bernoulli
draws to form `A[m][:]`. It then takes 32 AND-popcounts of 41 bits and 32
draws to form the 32 output bits of that head. Heads are the outer loop and
tokens the inner one, so a time step takes `NH·M = 328` cycles plus one for
`done`.

**Bernoulli draws.** There are `M + DK = 73` generator lanes, one per
attention column and one per output row. Each is a 32-bit xorshift
(13, 17, 5), and all lanes advance once per row. A draw with probability
`c/n` compares `((r mod 2^16)·n) >> 16`, which is uniform on `[0, n)`,
against `c`. That is exact for `n = DK = 32` and within 2⁻¹⁶ of `c/n` for
`n = M = 41`.

**Mask direction.** The published pseudo-code writes the mask condition as
`m ≤ m'`. The same pseudo-code calls it a causal mask, the model is a
decoder-only transformer, and the answer is read from the last token, which
under `m ≤ m'` could attend only to itself. This design therefore keeps keys
`m' ≤ m`: each token sees itself and everything before it. The query, being
last, sees the whole context.

## Decoder layer

`decoder_layer` runs four phases:

1. The three LIF layers W_Q, W_K and W_V run in parallel on `E_{l−1}`. Each is
   256×256: the eight heads' 32×256 matrices stacked, with head `h` owning
   output rows `32h … 32h+31`.
2. `mssa` computes `G`.
3. LIF layer W_1 (1024×256) computes the hidden spikes.
4. LIF layer W_2 (256×1024) computes `E_l = LIF(W_2 LIF(W_1 G))`.

The description also mentions residual connections and layer normalization
around the sub-layers. However, its layer equation contains neither, and it
defines neither for spike matrices. None is built here (see *Departures*).

## Output and answer

`output_layer` adds `W_O` (16×256, INT8) times the last layer's spikes into a
score per token and class. It uses the same one-column-per-spike scheme as
the LIF layers, and the scores accumulate over the `T` steps. The time
average used in the description differs only by the factor `1/T`, which does
not change the largest entry.

The answer is the class with the largest score of the query token, with ties
going to the lowest index. `answer_sym[j]` is base-K digit `j` of the class
index, that is, class = Σ_j s_j·4^j. The description does not fix this
mapping. It is whatever one-hot labelling the weights were trained with.

## Using the top, `snn_icl_detector`

| port | meaning |
|---|---|
| `tok_we, tok_idx, tok_is_sym, tok_code[4][4]` | write token `tok_idx` (pilot `i`: y at `2i`, s at `2i+1`; query at 40) |
| `w_we, w_layer, w_mat, w_row, w_col, w_data` | write one INT8 weight. `w_layer` 0 = W_e (256×4), 1..4 = decoder layers (`w_mat` = `MAT_Q/K/V/W1/W2`), 5 = W_O (16×256). `w_row` is the output index and `w_col` the input index |
| `start` → `busy` … `done` | one inference. At `start`, membranes and scores are cleared and all generators reseeded, so the same tokens and weights always give the same answer |
| `answer`, `answer_sym`, `score_last[16]` | valid from `done` until the next `start` |

Weights are loaded once, one per cycle (about 2.9 M cycles at the default
size). After that, each new task needs only its 41 tokens.

**Cycle budget.** An inference takes the following number of cycles:

```
T × [ (M+1)                                    encoder
    + Σ_tokens (p_x + 2)                       embedding
    + L × ( Σ(p_E + 2) + NH·M + 1              Q/K/V, attention
          + Σ(p_G + 2) + Σ(p_H + 2) + 8 )      W_1, W_2, hand-overs
    + Σ(p_EL + 2) + a few ]                    output layer
```

Each `p` is a per-token spike count at that layer's input. With random test
weights and a random channel, one full-size inference took 670,753 cycles. The
count depends on how often the trained network spikes.

**Memory.** The weights take 2,888,704 bytes
(4·256 + 4·(3·256² + 2·256·1024) + 16·256). The membranes take 21 memories, one per
LIF layer, each of 41 words of NOUT × 20 bits.

## Departures from the published description

* **Causal mask.** Keys `m' ≤ m` are kept, where the printed pseudo-code
  writes `m ≤ m'` (see above).
* **Residual connections and layer normalization.** Not built. The layer
  equation is followed instead of the prose.
* **Feed-forward width.** `D_h` is not given a value. 4·DE is assumed.
* **Number formats.** The energy study assumes INT8 weights and INT8
  pre-activations. Weights are INT8 here. Input currents and membranes are
  wider (up to 19 bits, saturating 20-bit membrane), because no rescaling rule
  for INT8 pre-activations is given.
* **Unspecified values.** The threshold, the leak, the random-number source,
  the normalization of pilot symbols (`k/K`) and the class-to-symbol mapping
  are not specified and are this design's choices.
* **Schedule.** Everything about the schedule is this design's own: the
  token-serial, unit-serial processing, one cycle per spike and one cycle per
  attention row. The description gives the arithmetic, not a
  micro-architecture.
* **Front end.** The receiver's quantizer is an ADC in front of the detector
  and is not part of this RTL. `tok_code` takes its 4-bit output.
* **Model sizes.** Only the (L=4, DE=256) model is the default. The smaller
  and larger models of the energy study, (2, 64), (4, 128) and (8, 512), need
  the RTL re-parameterized. A smaller model cannot simply run on the default
  instance, because the head width `DK` sets the attention's normalization.

## Verification

Each module has a self-checking testbench in `tb/`. Expected values come from
`tb/snn_ref_pkg.sv`, a behavioural model that evaluates the equations densely
(every input visited, plain integers, no cycles). It shares only the
random-number convention with the RTL, so the comparison is bit-exact.

| testbench | what it checks |
|---|---|
| `tb_token_normalizer` | every code in every entry, both token kinds |
| `tb_weight_mem` | write/read-back, one-cycle read latency |
| `tb_bernoulli_encoder` | spike frequencies within 5σ of the probabilities, zero probability never spikes, M+1 cycle step, repeatability after reseed |
| `tb_lif_layer` | outputs over 12 steps vs. the reference, saturation, clear, exact cycle count per step |
| `tb_mssa` | bit-exact rows vs. the reference, directed all-ones and mask cases, NH·M+1 cycles |
| `tb_decoder_layer` | E_l bit-exact over 8 steps, exact cycle budget |
| `tb_output_layer` | scores, argmax, cycle budget, clearing between inferences |
| `tb_snn_icl_detector` | reduced size end to end (M=5, DE=16, DH=32, L=2, NH=2, T=3), three inferences on random channels. It counts skipped zero inputs, neuron fires, leak, masked attention pairs, zero padding and time steps, and fails if any of them never occurred |
| `tb_snn_icl_detector_full` | the top with every parameter at its default: all 2.9 M weights loaded through the port, one inference, answer and all 16 scores equal to the reference (about 5.5 minutes in Verilator) |

The end-to-end benches generate a random Rayleigh 2×2 channel, QPSK pilots
and a noisy query, and quantize with the 4-bit mid-tread quantizer. Their
weights are random, not trained, so the detected class is not expected to
equal the transmitted one. They verify the hardware against the equations,
not the detection accuracy.

Run a testbench with plain Verilator from the repository root, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mssa \
  -y rtl -y tb +libext+.sv -Irtl -Itb rtl/snn_pkg.sv tb/snn_ref_pkg.sv tb/tb_mssa.sv
./obj_dir/Vtb_mssa
```

Each bench ends with `TB_RESULT checks=N failures=F`. The two end-to-end
benches share their body through `tb/detector_tb_body.svh`.

## Files

`rtl/snn_pkg.sv` holds the sizes, formats, the weight-matrix selector and the
random-number helpers. The other files in `rtl/` each hold one module:
`token_normalizer`, `bernoulli_encoder`, `weight_mem`, `lif_layer`, `mssa`,
`decoder_layer`, `output_layer`, and the top `snn_icl_detector`. Each file
opens with a description of its function, interface and timing.
