# Early-fusion hyperdimensional classifier with generated item memory

This is synthesizable SystemVerilog for a hyperdimensional-computing (HDC)
classifier for emotion recognition from many physiological channels. The input is
a stream of extracted features, for example 214 of them for GSR, ECG and EEG. The
output is a two-class label, such as high or low valence or arousal.

A conventional HDC encoder keeps three random hypervectors per feature channel in
an item memory: an item vector iM and two feature-projection vectors PFP and NFP.
With more than 200 channels that is over 600 vectors of 10,000 bits. This design
keeps almost none of them. Every vector it needs comes from a single seed,
generated by an elementary cellular automaton (rule 90). It can also reuse a
small bank of vectors combinatorially, so that each generated vector serves
several channels. The modalities are fused right after spatial encoding ("early
fusion"), so only one temporal encoder is needed.

## Datapath

```
 features ──► hds_mapper ──► spatial_encoder ──► sensor_fusion ──► temporal_encoder ──► assoc_memory ──► label
 (1/cycle)    iM, FP per     SE = iM ^ FP,       majority over     n-gram of 3          train: bundle
              channel, from  majority over the   the M modality    fused vectors        infer: Hamming
              seed + rule 90 channels of a       vectors                                min distance
                             modality
```

All vectors are D bits wide (default 10,000). The three HDC operations are these:

* **Binding** is a bitwise XOR.
* **Bundling** is a per-dimension majority vote.
* **Permutation** ρ^k is a cyclic shift by k positions: bit i of ρ^k(x) is bit
  (i+k) mod D of x.

Channels arrive one per clock cycle in a fixed order: all channels of modality 0,
then all of modality 1, and so on. One pass over all channels is a *sample*.
`hdc_top` counts channels itself from the parameter `MOD_CH`, the channel count
of each modality.

## Where the channel vectors come from (`hds_mapper`)

This is the unusual part of the design. For channel c of modality m, the mapper
delivers two vectors: iM(c), and FP, which is PFP if the feature is > 0 and NFP
if it is ≤ 0. Only the feature's sign is used. The spatial encoder binds the two.
Binding two pseudo-random vectors gives a vector that is dissimilar to both. So
a channel's bound vector is unique as long as one of its two inputs differs from
every other channel's. The mapper exploits this in two modes, selected per
sample by `mode_i`.

### The generator

`ca_rule90` holds one D-bit vector and replaces it in one cycle with
`next = ρ^{+1}(v) XOR ρ^{-1}(v)`. In other words, each cell becomes the XOR of
its two cyclic neighbours. Successive states act as fresh pseudo-random vectors.
An all-zero state stays zero, so the seed must be non-zero. Below, r^k(seed)
means the k-th iterate of this step applied to the seed. Each step counts as one
*vector request*; `gen_count_o` counts them.

### Rule-90 mode (`MAP_RULE90`)

* The first 2·M iterates of the seed are stored in `vector_bank`:
  * word 2m = r^{2m+1}(seed) is PFP of modality m;
  * word 2m+1 = r^{2m+2}(seed) is NFP of modality m.

  Every channel of a modality shares its FP pair.
* Each channel's iM is the next iterate: iM(c) = r^{2M+c+1}(seed), counting c
  across all modalities. It is produced in the same cycle the channel is
  accepted, and it becomes the automaton's new state.
* At the first channel of every sample the chain restarts from the last stored
  FP word. Channel c therefore always gets the same iM, which is what makes the
  scheme usable: the channel order is fixed.
* Storage: 2·M FP words plus the seed register, 7 vectors for M = 3. The
  automaton holds the working vector. The request rate is 1 per channel.
* After `init_i`, or after hybrid-mode samples have overwritten the bank, the
  first rule-90 sample waits 2·M + 1 cycles while the FP pairs are regenerated.

### Hybrid mode (`MAP_HYBRID`): combinatorial pairs with burst refill

The bank of V words (V = 2·M + 1 = 7 by default) is filled in a *burst* of V
consecutive rule-90 steps. `pair_scheduler` then hands out channel sets
{iM, PFP, NFP} drawn from the bank. For each iM word a = 0, 1, …, the PFP/NFP
pair walks through the later words two at a time, as long as both words exist:
(a+1, a+2), (a+3, a+4), …. With words A..G this gives:

| channel | iM | PFP | NFP |   | channel | iM | PFP | NFP |
|--------:|:--:|:---:|:---:|---|--------:|:--:|:---:|:---:|
| 1 | A | B | C | | 6 | C | D | E |
| 2 | A | D | E | | 7 | C | F | G |
| 3 | A | F | G | | 8 | D | E | F |
| 4 | B | C | D | | 9 | E | F | G |
| 5 | B | E | F | | | | | |

A bank of v words yields TFC(v) = Σ_{n=1}^{v-2} ⌊(v−n)/2⌋ sets: 9 for v = 7 and
25 for v = 11. When the bank is exhausted, the next channel waits while V more
steps refill it. The refill continues from the last vector generated, which is
still in the automaton. Each sample's first burst starts from the seed, so the
channel sets repeat from sample to sample. A burst stalls the input for V + 1
cycles.

Cost per sample:

| configuration | channels | bursts | vector requests | rate | cycles per sample |
|---|---:|---:|---:|---:|---:|
| AMIGOS, V = 7 | 214 | 24 | 168 | 0.785 | 214 + 24·8 = 406 |
| DEAP, V = 11 | 238 | 10 | 110 | 0.462 | 238 + 10·12 = 358 |
| either, rule-90 mode | 214 / 238 | – | 214 / 238 | 1 | 214 / 238 |

The asymptotic rates V/TFC(V) are 7/9 = 0.78 and 11/25 = 0.44. The cycle
counts assume the input never pauses. So hybrid mode trades input cycles for
fewer rule-90 steps. The vector storage is the same in both modes.

## Encoding and classification

* **spatial_encoder** XORs iM and FP, then bundles the channels of one modality
  with one counter per dimension (`hv_bundler`). Output bit d is 1 when more than
  half of the channels had a 1 there; a tie gives 0. The modality vector appears
  one cycle after the modality's last channel. One encoder serves all modalities
  in turn.
* **sensor_fusion** takes the majority of the M modality vectors. Each modality
  weighs the same whatever its channel count. With M odd there are no ties.
* **temporal_encoder** computes TE(j) = SE(j) ⊕ ρ¹(SE(j−1)) ⊕ ρ²(SE(j−2)) for
  the default n-gram N = 3. It produces no output until N samples have passed
  since reset or since `te_restart_i`. The restart lets a host keep n-grams from
  spanning two recordings or two classes.
* **assoc_memory** holds one 16-bit saturating signed counter per class and
  dimension.
  * Training adds +1 for a 1 bit and −1 for a 0 bit. The class vector bit is
    (counter > 0), the majority of that class's training vectors.
  * Inference XORs the query with each class vector and counts the ones,
    1000 bits per cycle. The nearest class wins, and the lower index wins a tie.
    A search takes D/CHUNK = 10 cycles. The distances are output as well.
  * `am_clear_i` empties all classes. Training and inference use the same
    hardware.

## Using `hdc_top`

| port | dir | meaning |
|---|---|---|
| `seed_i`, `init_i` | in | load a (non-zero) seed; also resets channel counting |
| `mode_i` | in | `MAP_RULE90` or `MAP_HYBRID`, sampled at a sample's first channel |
| `feat_valid_i`, `feat_ready_o`, `feat_i` | in/out/in | signed feature stream, valid/ready; hold valid while ready is low |
| `train_i`, `label_i` | in | sampled at a sample's last channel: train class `label_i`, or classify |
| `am_clear_i`, `te_restart_i` | in | empty class memory / n-gram history |
| `te_valid_o`, `te_o` | out | encoded n-gram, 4 cycles after a sample's last channel |
| `pred_valid_o`, `pred_label_o`, `pred_dist_o` | out | inference result, D/CHUNK cycles after `te_valid_o` |
| `gen_busy_o`, `gen_count_o` | out | the mapper is generating (input stalled); vector requests so far |

A typical session:

1. Reset, then pulse `init_i` with a seed.
2. Stream samples with `train_i = 1` and the class label.
3. Pulse `te_restart_i` between recordings or classes.
4. Stream samples with `train_i = 0` and read `pred_label_o`.

`assoc_memory` asserts that a new vector never arrives during a search. This
holds whenever a sample has more channels than the search has cycles.

Parameters, with their defaults:

| parameter | default | meaning |
|---|---|---|
| `D` | 10000 | hypervector dimension |
| `M` | 3 | number of modalities |
| `MOD_CH` | '{32, 77, 105} | channels per modality (GSR, ECG, EEG) |
| `V` | 2·M+1 = 7 | vector bank words |
| `NGRAM` | 3 | n-gram size |
| `NC` | 2 | classes |
| `ACW` | 16 | class counter width |
| `CHUNK` | 1000 | popcount bits per cycle; must divide D |
| `FEAT_W` | 16 | feature width |

For the DEAP feature set, use `M = 5`, `MOD_CH = '{10, 192, 7, 17, 12}` and
`V = 11`. Smaller D trades accuracy for area almost linearly. The published
study reports a loss under about 2 % down to D = 3000 for AMIGOS and
D = 2000 for DEAP.

## What is specified and what is chosen here

The following come straight from the method: the four-block datapath with early
fusion, the sign-selected FP multiplexer, the binding, bundling and n-gram
equations, rule 90 as ρ^{+1} ⊕ ρ^{-1}, the storage of 2·M FP vectors plus a
seed, the combinatorial set order and its TFC count, burst refill of the bank,
Hamming-distance inference, and the AMIGOS/DEAP sizes.

The following are this implementation's own choices:

* One channel per cycle with a valid/ready handshake. Generation runs at one
  rule-90 step per cycle, plus one decision cycle per generation run.
* Majority ties resolve to 0, both in bundling and in class vectors.
* The permutation direction convention (bit i ← bit i+k).
* The FP word layout and the restart of the iM chain at every sample.
* In hybrid mode, a separate seed register, so each sample's first bank can be
  regenerated. The bank holds V words besides the seed.
* The next burst seeds from the most recently generated vector. A drawing of
  the scheme shows the seed taken from the bank's sixth word instead. Taken
  literally, that would regenerate a vector already in the bank.
* Refill is lazy: it happens when the next channel needs it.
* A single spatial encoder is time-shared by all modalities, because channels
  arrive one at a time. The system drawing shows one encoder per modality; the
  result is the same.
* The bank is regenerated from the seed at every sample, even when it is large
  enough (TFC(V) ≥ channels) that one bank would serve every sample. So the
  smallest rate is V/channels, not zero. For example, a 31-word bank covers all
  214 AMIGOS channels at 31/214 = 0.14 requests per channel. This is how
  "combinatorial pairs alone" runs here: hybrid mode with a large V.
* Class memory uses signed counters, with a 16-bit width.
* The popcount is chunked, 1000 bits per cycle.
* Features are 16-bit two's complement, and only the sign is used.

The following are not part of the RTL:

* Sensors, analog front ends, pre-processing and feature extraction. The design
  starts at the feature stream.
* The encoding schemes this design improves on, which keep stored iM/FP vectors
  per channel or per modality.

## Verification

Each block has a self-checking testbench in `tb/`. Each compares the block with
a model written from the equations and ends with a `TB_RESULT` line.

| testbench | covers |
|---|---|
| `tb_ca_rule90` | rule-90 steps against a bit-by-bit model, load, hold |
| `tb_vector_bank` | both read ports, write timing |
| `tb_pair_scheduler` | the set table above for V = 7; TFC(7/11/32) = 9/25/240; no repeated pairs |
| `tb_hds_mapper` | every iM/FP vector in both modes, mode switches, stall cycles, vector-request counts |
| `tb_spatial_encoder`, `tb_sensor_fusion` | majority bundling including ties, latency |
| `tb_temporal_encoder` | n-gram, shift direction, warm-up, restart |
| `tb_assoc_memory` | counters with saturation, class vectors, distances, latency, clear |
| `tb_hdc_top` | whole design at D = 256, 3/4/6 channels: training and inference in both modes |
| `tb_hdc_top_full` | same sequence at the default (AMIGOS, D = 10,000) size |
| `tb_hdc_top_deap` | same sequence in the DEAP configuration at D = 2000 |

The three end-to-end benches share a reference model (`tb/hdc_model.svh`) and a
stimulus body (`tb/hdc_top_tb_body.svh`). They check three things:

* every encoded n-gram, every label and every distance;
* each sample's stall cycles and vector-request count;
* that each mechanism happened at least once: FP generation, burst refill, mode
  switch, n-gram warm-up and restart, training, inference, clear, input gaps,
  and zero-valued features.

Their class-patterned stimuli (15 % sign flips) are all classified correctly at
full size.

To run a testbench with Verilator 5, for example the full-size one (about 20 s
of build and 16 s of simulation):

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Itb \
    rtl/hdc_pkg.sv tb/tb_hdc_top_full.sv --top-module tb_hdc_top_full -o sim
./obj_dir/sim
```

`-y rtl` lets Verilator find each module in `rtl/<name>.sv`. To run any other
bench, replace the testbench file and the top module. The code uses
`logic`, packages, enums, `always_ff`/`always_comb` and a few concurrent
assertions. It needs no vendor primitives; the vector bank is a plain register
array.
