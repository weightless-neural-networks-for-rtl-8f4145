# BTHOWeN inference accelerator in SystemVerilog

A weightless neural network classifies by looking things up instead of multiplying. Each class
has a *discriminator*. A discriminator is a bank of small Boolean tables, and each table sees a
few bits of the binary-encoded input. A table answers 1 if it saw that bit pattern often enough
during training. The class response is the number of tables that answer 1. The predicted class is
the discriminator with the largest response.

BTHOWeN is a WiSARD-style network. Each table is a **Bloom filter**: its n input bits are hashed
k times into an m-bit address of a 2^m-entry, 1-bit table, and the filter answers 1 only when all
k addressed entries are set. The hashes come from the **H3** family. An H3 hash is only a XOR of
parameter words selected by the input bits, so it needs no arithmetic. All filters share one set of
H3 parameters. As a result, the hash of "filter f" is identical in every discriminator, so the
hardware computes each hash once and broadcasts it to all classes.

This RTL implements the inference accelerator of the BTHOWeN paper (Susskind et al., *Weightless
Neural Networks for Efficient Edge Inference*). The default parameters are that paper's MNIST
"Medium" model:

| parameter        | default | meaning                                               |
|------------------|---------|-------------------------------------------------------|
| `NUM_CLASSES`    | 10      | discriminators                                        |
| `INPUT_BITS`     | 2352    | encoded input bits (784 pixels × 3 thermometer bits)  |
| `FILTER_INPUTS`  | 28      | input bits per Bloom filter (n)                       |
| `FILTER_ENTRIES` | 2048    | 1-bit entries per filter (2^m, m = 11)                |
| `NUM_HASHES`     | 2       | H3 hash functions per filter (k)                      |
| `HASH_UNITS`     | 5       | physical hash units shared by all 84 filters          |
| `BUS_WIDTH`      | 64      | input bus width                                       |
| `WRITE_WIDTH`    | 64      | table load word (this design's choice)                |
| `MAP_STRIDE`     | 1009    | input permutation stride (this design's choice)       |

So the defaults give 84 filters per discriminator and 840 tables of 2048 bits in total. That is
1.72 Mbit, the 210 KiB the model is quoted at. One classification takes 37 cycles, because
2352 bits on a 64-bit bus take 37 words.

## What is not on the chip

Training happens offline. The offline flow does four things:

- It fits a Gaussian to every input feature and encodes each feature with a thermometer code whose
  thresholds split that Gaussian into equal-probability regions.
- It trains *counting* Bloom filters. On every presentation it increments only those of the k
  addressed counters that hold the minimum value.
- It picks a bleaching threshold b.
- It binarizes the counters: an entry becomes 1 if its counter is at least b.

The accelerator receives the result of this flow: binary tables, H3 parameters, and samples that
are already thermometer-encoded. It does not encode and it does not train.
`tb/tb_bthowen_harness.sv` contains a small model of the training step (minimum-increment counting,
then bleaching), which the testbenches use to build realistic tables.

## Block structure

```
 in_data ──► deserializer ──► input_mapping ──► hash_engine ──┬─► discriminator 0 ─┐
 (64 b/cycle)  (2 buffers)    (fixed permutation)  (5 × H3)   ├─► discriminator 1 ─┼─► argmax ──► result_class
                                                    ▲          │        ...          │
                                     hash_params ───┘          └─► discriminator 9 ─┘
                                                                 (84 lookups + popcount each)
```

| file | role |
|------|------|
| `rtl/bthowen_pkg.sv` | default sizes, the input permutation, index-width helpers |
| `rtl/bthowen_deserializer.sv` | double-buffered bus-to-sample converter, valid/ready input |
| `rtl/bthowen_input_mapping.sv` | fixed pseudo-random assignment of input bits to filters (wiring only) |
| `rtl/bthowen_hash_params.sv` | register file of the k × n H3 parameters |
| `rtl/bthowen_h3_hasher.sv` | one combinational H3 hash unit |
| `rtl/bthowen_hash_engine.sv` | time-multiplexed hash units, central hash register, sequencing |
| `rtl/bthowen_lookup.sv` | one filter table with its AND accumulator |
| `rtl/bthowen_popcount.sv` | count of ones |
| `rtl/bthowen_discriminator.sv` | 84 lookups + popcount + response register |
| `rtl/bthowen_argmax.sv` | index of the largest response, lowest index on a tie |
| `rtl/bthowen_top.sv` | everything wired together, result register |

## How one sample flows through

**Deserializer.** Word w of a sample carries bits `[64w+63:64w]`, least significant first. The
unused high bits of the last word are ignored. The front buffer collects the next sample while
the back buffer holds the sample that is being classified. When the last word arrives and the back
buffer is free, or is being freed in that same cycle, the word goes straight into the back buffer.
This direct path is what lets a bus that sends one word every cycle run without a single stall.
The deserializer stalls the bus (`in_ready_o` low) only when a complete sample is waiting and the
previous one has not been released. An assertion checks the bus rule that a refused word stays
offered, unchanged.

**Input mapping.** Filter f receives mapped bits `[28f+27:28f]`, and mapped bit i is input bit
`(i·1009) mod 2352`. Because 1009 is coprime to 2352, this mapping is a permutation. A model
trained with another pseudo-random mapping can still run on this hardware: the host applies the
inverse of this permutation composed with the model's mapping before sending. The mapping is plain
wiring and costs no logic.

**Hash engine, the part that sets the timing.** The 84 filters need 84 × 2 = 168 hashes per sample,
but only 5 hash units exist. The engine therefore works through the filters in groups:

- In group cycle g, unit u hashes filter `5g+u` with parameter set j.
- There are G = ⌈84/5⌉ = 17 group cycles per parameter set.
- Each result goes into a central *partial* register.
- In the last group cycle of set j, the complete set of 84 hashes, the last group included, is
  copied into the *broadcast* register.
- All 840 lookup units then read their tables in the same cycle, in lockstep, flagged `first`
  (j = 0) and/or `last` (j = k−1).
- The next parameter set is hashed while the lookups read.

A sample occupies the engine for k·G = 34 cycles. That is less than the 37 cycles the bus needs to
deliver the next sample, so the hash units are never the bottleneck at the default size. In
general the accelerator takes max(⌈INPUT_BITS/BUS_WIDTH⌉, k·G) cycles per sample. With one hash
unit per filter this becomes max(bus words, k), the 1/k rate of a Bloom-filter lookup that reads
one address per cycle. Hashing starts in the very cycle a sample appears in the back buffer. The
engine releases the buffer in the cycle it hashes the last group, and a waiting sample then follows
with no gap.

**Lookup.** Each filter has a 2048 × 1 table, stored as 32 words of 64 bits. The upper 5 address
bits select a word and the lower 6 select the bit. The first read of a sample loads the read bit
into the response register. Every later read ANDs its bit into that register. After the k-th read
the register holds the Bloom filter's answer.

**Popcount, response, argmax.** Each discriminator counts its 84 answers and registers the count
(7 bits). The argmax compares the ten counts in order, and a later class wins only if its count is
strictly larger. The top registers the class and all ten responses.

### Cycle accounting (default size)

Take the cycle in which the bus delivers the last word of a sample, with the engine idle, as cycle A:

| cycle | event |
|-------|-------|
| A | last word accepted, sample moves into the back buffer |
| A+1 … A+34 | 2 × 17 hash group cycles |
| A+18 | broadcast of hash set 0, first table reads |
| A+35 | broadcast of hash set 1, second table reads |
| A+36 | filter answers valid |
| A+37 | discriminator responses valid |
| A+38 | `result_valid_o`, `result_class_o`, `responses_o` |

The latency is therefore k·G + 4 = 38 cycles after the last word. On a continuous bus one result
follows every 37 cycles. `result_valid_o` is a one-cycle pulse and cannot be back-pressured.

## Loading a model

Load the model after reset and before the first sample is sent. The load ports are not interlocked
with inference.

- **H3 parameters:** `hp_wr_en_i` writes `hp_wr_value_i` (m bits) as parameter
  `hp_wr_index_i` (0 … n−1) of hash function `hp_wr_set_i` (0 … k−1). Reset clears the parameters.
  Hash function j maps an n-bit filter input x to the XOR of the parameters p_j[i] over all i where
  x[i] = 1.
- **Tables:** `lut_wr_en_i` writes `lut_wr_data_i` as entries
  `[lut_wr_addr_i·64 +: 64]` of filter `lut_wr_filter_i` in class `lut_wr_class_i`. Set an entry
  to 1 if the trained counter at that address reached the bleaching threshold. Reset does not
  clear the tables.

A full default model is 56 parameter writes plus 26,880 table writes.

A model trained with smaller sizes also runs on the default build:

- Give it fewer input bits per filter by setting the unused parameters to zero.
- Give it smaller tables by keeping the high parameter bits at zero and the unused table half at
  zero.
- Give it k = 1 by loading the same parameters into both sets.
- Give it fewer filters or classes by leaving their tables at zero. An all-zero class never wins
  against a lower-indexed class.

Of the published models, MNIST-Small, MNIST-Medium, Ecoli, Iris and Shuttle fit the default build
this way. The others need a build with more hash functions (Satimage, Vehicle, Vowel, Wine,
MNIST-Large), with more classes (Letter, Vowel), or with larger filters (MNIST-Large). All sizes
are parameters: a build for such a model is a parameter change.

## Where this RTL departs from, or goes beyond, the published design

- The published accelerator compiled each trained model into the FPGA logic. Here the tables and
  the H3 parameters are loadable through write ports, so one build serves every model of its size.
- The bus handshake (valid/ready), the bit order on the bus, the table word width, the reset
  behaviour, the tie rule (lowest class wins) and the form of the input permutation are choices of
  this design. The published description does not fix them.
- The timing details of the time-multiplexed hash units are this design's: the group order, the
  bypass of the last group into the broadcast register, and the release of the sample buffer in
  the last group cycle. The published design fixes only the principle: shared hash units, a central
  register of partial results, and a simultaneous broadcast.
- The popcount and argmax are the simplest circuits that compute them: an adder chain and a
  compare chain. They are not pipelined.
- Thermometer encoding, training and bleaching are not hardware here (see above).

## Verification

Every module has a self-checking testbench in `tb/`. Each one compares the module against values
computed independently in the testbench and ends with a line `TB_RESULT checks=N failures=M`.

| testbench | what it establishes |
|-----------|---------------------|
| `tb_bthowen_h3_hasher` | H3 definition on random and one-hot inputs |
| `tb_bthowen_popcount`, `tb_bthowen_argmax` | counts; first-maximum rule on frequent ties |
| `tb_bthowen_hash_params` | random writes, reset, out-of-range indices ignored |
| `tb_bthowen_input_mapping` | mapping is a permutation matching the formula; padding reads zero |
| `tb_bthowen_lookup` | AND of 1–4 reads, response one cycle after the last read |
| `tb_bthowen_discriminator` | every filter answer and the count, two cycles after the last broadcast |
| `tb_bthowen_deserializer` | sample integrity; no stall and one sample per 4 cycles with a fast consumer; stalls with a slow one |
| `tb_bthowen_hash_engine` | hashes, first/last flags, broadcast and release cycles, k·G period |
| `tb_bthowen_top` | two reduced builds end to end: one bus-limited, one hash-limited (stalling) |
| `tb_bthowen_top_full` | the default build end to end |
| `tb_bthowen_workloads` | seven builds at the sizes of the published small-dataset models |

The two end-to-end tests use `tb_bthowen_harness`, which builds a trained model as described
above. It uses one prototype per class, noisy training copies, counting-filter training and a
bleaching threshold of 2. The harness loads the model, streams samples without gaps, and checks
every class response and predicted class against its own reference model. It also checks the
first-sample latency (k·G+4), the spacing of the results (max(words, k·G)), and that noisy
prototypes are classified correctly. It counts the mechanisms and fails if one never occurs: bus
stalls (required in the hash-limited build and forbidden in the others), samples received while
the previous one is hashed, and tied responses. The default-size test needs about 40 s of
build and run time.

`tb_bthowen_workloads` builds the accelerator at the sizes of the published Ecoli, Iris, Shuttle,
Wine, Vehicle, Satimage and Vowel models (classes, encoded input bits, filter inputs, entries, k,
hash units, 64-bit bus) and runs each through the harness. For all but Vowel it also requires the
results to come at the published cycles per inference: 2, 1, 2, 3, 5 and 5. The formula
max(bus words, k·G) reproduces every published cycle count except Vowel's. Vowel's 150 encoded
bits need 3 words on a 64-bit bus and its k = 4 table reads need 4 cycles, so this design takes 4,
against the published 2. The Letter and MNIST-Small builds are left out because their C++ build is
slow; the formula gives their published 4 and 25 cycles. This testbench takes about 4–6 minutes,
almost all of it compiling.

To simulate with Verilator, for example the full-size test:

```
verilator --binary --timing --assert -Irtl -Itb rtl/bthowen_pkg.sv tb/tb_bthowen_top_full.sv \
          --top-module tb_bthowen_top_full -o sim && obj_dir/sim
```

Any other testbench is built the same way with its own name. Verilator finds the other modules
through `-Irtl -Itb`.
