# ULEEN inference accelerator in SystemVerilog

This is a synthesizable implementation of an inference engine for a
*weightless neural network*: a classifier that contains no multipliers and no
weights, only lookup tables. Each table is a small binary Bloom filter. An
input sample is turned into a long bit vector, the bit vector is cut into
short tuples, each tuple is hashed, and the hashed tuple is looked up in a
per-class Bloom filter that answers "seen during training" or not. The class
whose filters answer "yes" most often (after a learned per-class bias) is the
prediction. Because every step is a table lookup, an XOR tree, an adder tree
or a compare, the whole classifier evaluates in a fixed, small number of clock
cycles per sample.

The default build is the largest published model of this kind for MNIST
handwritten digits (called ULN-L): 784 pixels, 10 classes, an ensemble of six
submodels, fed by a 192-bit input bus. It accepts a new sample every 13 clock
cycles, which at 500 MHz is 38.5 million inferences per second.

## 1. The model the hardware evaluates

**Thermometer encoding.** Each input value (a pixel) is represented by `T`
bits of a thermometer code: a value of level `c` sets the lowest `c` bits.
With `T = 7`, a pixel becomes 7 bits and a sample becomes
`784 * 7 = 5488` bits. The thresholds that map a pixel to a level are chosen
during training and applied before data reach the chip.

**Compressed input.** A thermometer code of `T` bits carries only
`T+1` distinct values, so the bus carries the level as a binary count of
`CW = clog2(T+1)` bits (3 bits for `T = 7`) and the chip expands it again.
This is optional (`COMPRESSED`); without it each value travels as its `T` raw
bits.

**Filters.** A submodel with `n` inputs per filter reorders the 5488 sample
bits by a fixed permutation and cuts them into `N_F = ceil(5488/n)` tuples of
`n` bits (the tail of the last tuple is padded with zeros). For every class
there is one Bloom filter per tuple. A filter with `E` entries is a table of
`E` bits addressed by `K = 2` hashes of its tuple; it answers 1 only if both
addressed bits are 1.

**H3 hashing.** Each hash is an H3 function: `n` random parameters of
`log2(E)` bits, one per tuple bit; the hash is the XOR of the parameters whose
tuple bit is 1. All filters of a submodel (all tuples, all classes) use the
same `K` parameter sets, so the hash of a tuple is computed once and shared by
all classes.

**Ensemble, pruning, bias.** The class score is the number of filters that
answered 1, summed over the six submodels, plus a signed per-class bias.
Training removes the least useful 30 % of the filters of every class
(pruning); a removed filter always answers 0, and the bias compensates for the
difference. The prediction is the class with the highest score.

| submodel | inputs/filter `n` | entries `E` | filters per class `N_F` | hash units |
|---|---|---|---|---|
| 0 | 12 | 64  | 458 | 92 |
| 1 | 16 | 128 | 343 | 69 |
| 2 | 20 | 128 | 275 | 55 |
| 3 | 24 | 256 | 229 | 46 |
| 4 | 28 | 256 | 196 | 40 |
| 5 | 32 | 512 | 172 | 35 |

In total there are 16,730 filters (1,673 per class) with 3,052,800 table bits
(372.7 KiB). With 30 % of the filters pruned, the useful content is about
261 KiB. All tables are flip-flops; the design has no RAM macros.

## 2. Data path

```
in_data (192 b) -> uleen_decompress -> uleen_pingpong -> 6 x uleen_submodel -> uleen_popcount -> uleen_bias -> uleen_argmax -> out_class
                                                        |- uleen_hash_block (uleen_param_rf, H3 uleen_hash_unit x H, partials)
                                                        |- 10 x uleen_discriminator (N_F x uleen_lookup)
                       uleen_ctrl sequences all of them in lockstep
```

* `uleen_decompress` turns the 64 3-bit counts of a beat into 64 thermometer
  codes (bit `b` of value `v` is `count_v > b`).
* `uleen_pingpong` collects 13 beats into one 5488-bit sample. It has two
  halves: while one half is being hashed the other fills from the bus. Value
  `v` is bits `[v*T +: T]` of the sample; beat `b` carries values
  `64b .. 64b+63`.
* `uleen_hash_block` (one per submodel) holds the H3 parameters
  (`uleen_param_rf`), a bank of `H` hash units and the *partials* buffer that
  collects every hash of the sample.
* `uleen_discriminator` is one class of one submodel: `N_F` lookup units
  (`uleen_lookup`), each a Bloom-filter table, a keep (pruning) flag and a
  1-bit accumulator.
* `uleen_popcount` counts the responses of each class over all submodels with
  a two-level adder tree (64-bit groups, then the group counts).
* `uleen_bias` adds the signed class bias; `uleen_argmax` picks the winner.

## 3. Sharing the hash units over one sample period

This is the part that sets the throughput, and the least obvious.

A sample needs `N_F * K` hashes per submodel (916 for submodel 0). Building
one hash unit per hash would be wasteful, because a new sample arrives only
every 13 cycles anyway. So each submodel has only
`H = ceil(N_F*K / HC)` hash units, and the hash jobs of a sample are issued
over `HC` cycles. Job `j` means "filter `j/K`, hash function `j%K`"; in issue
cycle `c` unit `u` computes job `c*H + u`. Every unit has one register stage, and
its result is written into the partials buffer at `[j/K][j%K]` one cycle later.

The controller (`uleen_ctrl`) runs this schedule per sample:

| state | cycles | what happens |
|---|---|---|
| HASH   | `HC` | issue the hash jobs; on the last cycle, release the ping-pong half |
| DRAIN  | 1    | last hash results enter the partials buffer |
| LOOKUP | `K`  | lookup step `k`: every lookup unit reads its table at hash `k`; step 0 loads the accumulator, later steps AND into it |

`HC` defaults to `BEATS - K - 1 = 10`, so hashing, draining and looking up
take exactly the 13 cycles the bus needs to deliver the next sample. Since the
sample is released at the end of HASH, the next sample can be completely
received by the time LOOKUP finishes and hashing of it begins at once:
at full input rate there is no idle cycle anywhere.

All lookup units of all classes and submodels do their `K` steps in the same
cycles. The filter response is `acc & keep`, so a pruned filter contributes
nothing regardless of its table.

## 4. Output pipeline, stalls and timing

Behind the lookups are three registers: popcounts, biased scores, and the
chosen class (with the scores, on `out_resp`). Each stage loads when it is
empty or when its content moves on, so the pipeline holds up to three results
while `out_ready` is low. When all of them are full and the lookup
accumulators hold a fourth result, the controller waits in DRAIN (the
`stall` output is high), the ping-pong buffer fills up and `in_ready` falls:
back pressure reaches the bus without losing a sample.

Timing at the defaults. The formulas (`BEATS` cycles per sample, `HC+8`
cycles latency) are checked cycle-exactly by the end-to-end benches on the
reduced and the ULN-S builds:

* **Throughput:** one sample per `BEATS = 13` cycles
  (`ceil(784*3/192)`), i.e. 38.5 M inferences/s at 500 MHz.
* **Latency:** `HC + 8 = 18` cycles from the clock edge that accepts the last
  beat of a sample to the rising of `out_valid`, when the design is idle
  (31 cycles from the first beat). Published measurements of a generated
  ULN-L accelerator report 28 cycles from start to result; this pipeline
  is a little deeper.

With the smaller ULN-S/ULN-M models (T = 2 and 3) a sample takes 9 beats and
the same scheme gives 9 cycles per sample.

## 5. Loading a model

The trained model is written through a configuration port before samples are
sent (`cfg_we`, `cfg_addr` of type `uleen_pkg::cfg_addr_t`, 64-bit
`cfg_wdata`). One write per cycle; writes take effect at once.

| `target` | `sm` | `cls` | `idx` | `sub` | data |
|---|---|---|---|---|---|
| `CFG_LUT`  | submodel | class | filter | 64-entry word | bit `i` = table entry `64*sub+i` |
| `CFG_KEEP` | submodel | class | filter | – | bit 0 = 1 keep, 0 pruned |
| `CFG_HASH` | submodel | – | tuple bit `i` | hash function `k` | low `log2(E)` bits = H3 parameter |
| `CFG_BIAS` | – | class | – | – | low 16 bits = signed bias |

After reset keep flags are 1, H3 parameters and biases are 0; the tables are
not reset and must be written. The tuple of filter `f` of submodel `s` takes,
as its bit `b`, sample bit `(A_s * (f*n + b) + 11*s + 5) mod 5488`, where
`A_s = uleen_pkg::perm_mult(5488, s)` is a number coprime to 5488; positions
`f*n+b >= 5488` read 0. A training flow must use this same order when it
exports tables for this hardware.

## 6. Parameters

The top module `uleen_top` is parameterized; the defaults build ULN-L.

| parameter | default | meaning |
|---|---|---|
| `INPUTS` | 784 | input values per sample |
| `T` | 7 | thermometer bits per value |
| `M` | 10 | classes |
| `K` | 2 | hash functions per filter |
| `BUS_W` | 192 | input bus width |
| `COMPRESSED` | 1 | bus carries binary counts instead of thermometer codes |
| `NUM_SM` | 6 | submodels |
| `SM_INPUTS` | 12,16,20,24,28,32 | tuple width per submodel |
| `SM_ENTRIES` | 64,128,128,256,256,512 | Bloom filter entries per submodel (powers of two) |
| `HC` | `BEATS-K-1` | hash issue cycles per sample |

The configuration address fields (`uleen_pkg`) limit a build to 8 submodels,
16 classes, 1024 filters or tuple bits per submodel and 1024 table entries.
Class responses are 16-bit signed. Another model (for example ULN-S:
`T=2, NUM_SM=3, SM_INPUTS='{12,16,20}, SM_ENTRIES='{64,64,64}`) is a new
build with new parameters; the hardware holds exactly one model shape.

## 7. Where this departs from the published design

* **Hash gates.** The published design describes its hash units both as H3
  functions and as "AND and OR only" logic. H3 needs XOR, and OR would not be
  a universal hash, so the units here are AND + XOR.
* **Run-time configuration.** The original flow generates RTL with the trained
  tables built in as constants. Here tables, keep flags, hash parameters and
  biases are registers written through a port, which makes one netlist usable
  for any model of the same shape but costs area. Pruned filters keep their
  storage.
* **Input order.** The trained permutation of input bits is replaced by the
  fixed formula above.
* **Latency.** 18 cycles from the last beat (31 from the first) against 28
  published; the throughput matches.
* **Interfaces.** The valid/ready handshakes, the stall rule, reset values and
  the argmax tie rule (lowest class index wins) are this design's own.
* **Not included:** the bus interface in front of the decompression (here a
  plain valid/ready beat port), the thermometer encoder (done off chip), and
  everything used only in training (counting and continuous Bloom filters,
  bleaching, pruning selection).

## 8. Simulating

Every block has a self-checking bench in `tb/` that prints
`TB_RESULT checks=<n> failures=<n>`. With Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/uleen_pkg.sv tb/tb_uleen_top.sv --top-module tb_uleen_top
./obj_dir/Vtb_uleen_top
```

(Verilator finds the other `rtl/*.sv` files through `-Irtl`.)

* Block benches (`tb_uleen_decompress`, `tb_uleen_pingpong`,
  `tb_uleen_hash_unit`, `tb_uleen_param_rf`, `tb_uleen_hash_block`,
  `tb_uleen_lookup`, `tb_uleen_discriminator`, `tb_uleen_submodel`,
  `tb_uleen_popcount`, `tb_uleen_bias`, `tb_uleen_argmax`, `tb_uleen_ctrl`)
  compare each block with a model computed in the bench from the same random
  stimulus, and the controller bench checks its period and latency.
* `tb_uleen_top` runs a reduced build (40 inputs, 3 bits, 4 classes, two
  submodels) end to end: it writes a random model, sends 60 random samples
  with random bus gaps and random `out_ready`, computes every prediction and
  score with its own software model (its own H3, Bloom lookup, pruning, bias
  and argmax), checks throughput (one sample per `BEATS` cycles at full rate)
  and latency (`HC+8`), and fails if any of these never happened: input stall,
  back-pressure stall, hashing overlapped with input, a pruned filter whose
  table said yes, a prediction changed by the bias.
* `tb_uleen_top_uln_s` runs the same procedure on a build with the ULN-S
  model shape at full MNIST size (784 inputs x 2 bits, 10 classes, three
  submodels of 12/16/20 inputs and 64 entries, 3,080 filters, 192-bit bus):
  40 samples, one result every 9 cycles at full rate, latency `HC+8 = 14`
  cycles. This is the largest build that has been simulated.
* The default ULN-L build (16,730 filters, 3 Mbit of tables) has not been
  simulated end to end: each filter is its own parameterized instance, and
  Verilator's C++ for the whole design takes well over half an hour to
  compile on one core. Its blocks are each tested at their ULN-L sizes where
  that is cheap (hash unit, lookup unit, decompression, ping-pong buffer at
  784 x 7 bits), and the same RTL runs at the ULN-S size above.
