# PiC-BNN: a binary neural network evaluated inside a content-addressable memory

## The idea

In a binary neural network (BNN), weights and activations are +1 or -1 and are
stored as bits 1 and 0. A neuron then computes

    out_j = sign( sum_i XNOR(W_ji, X_i) (as +1/-1)  +  C_j )

where `C_j` is the constant left over when batch normalisation is folded into
the layer at inference time. A NOR-type content-addressable memory (CAM) does
most of this work in one step. Store the weights of neuron `j` in CAM row `j`
and drive the input activations onto the searchlines. Every cell whose stored
bit differs from its searchline bit opens a path that discharges the row's
matchline (ML). The ML voltage at a fixed sampling instant therefore reflects
the number of mismatches: it acts as an analog POPCOUNT. Each row's sense
amplifier compares that voltage with a reference, so the row computes a
threshold on its Hamming distance (HD) to the query:

    out_j = 1  if  HD(query, row_j) <= T

If `T` is set to half the word width, this is the majority of the row's XNOR
outputs, which is the sign of the dot product. The batch-normalisation constant
is stored in the same row as extra cells: their query bits are fixed, and their
+1s (matching cells) and -1s (mismatching cells) add up to `C_j`. The whole
neuron, batch normalisation included, is a single search.

The output layer of a classifier is where BNNs usually fall back to full
precision, because one binary output per class rarely names a single winner.
This array does without that. It runs the output layer many times on the same
hidden vector and changes only the threshold `T` between passes: 0, 2, 4, ...,
64, which is 33 passes. It counts how often each class answered 1, and the class
with the most votes is the prediction. In silicon, `T` is set by three analog
voltages: the sense-amplifier reference `Vref`, the gate voltage `Veval` of an
extra transistor in each cell's discharge path, and `Vst`, which sets the
sampling time. Retuning them is slow. Each threshold is therefore applied to a
whole batch of images before moving on to the next one.

## Array organisation

The 128-kbit array consists of four banks. Each bank has 64 rows of 512 cells.
The banks can be combined into three logical arrangements (rows x word width):

| `cfg` | arrangement | banks per word (G) | row groups |
|-------|-------------|--------------------|------------|
| 0 | 256 x 512  | 1 | 4 |
| 1 | 128 x 1024 | 2 | 2 |
| 2 | 64 x 2048  | 4 | 1 |

Bank `b` belongs to row group `b / G` and holds slice `b % G` of the word
(bits `(b % G)*512 ... +511`). Logical row `r` is row `r % 64` of the banks of
group `r / 64`. Writes and reads use physical addressing (`bank_sel`,
`row_sel`), so software maps logical rows onto banks with that rule. A wide
word is evaluated as one matchline: the mismatch counts of its G bank rows are
summed, and a single sense decision is taken on the sum. Logical row `r`
appears on `act_out[r]`. Rows that do not exist in the current arrangement
read as 0.

## How the analog part is modelled

The matchline and the sense amplifier are analog circuits. The RTL replaces them
with an exact digital equivalent of their intended function:

- `picbnn_cell_row`: each cell's pull-down is `(D & SLbar) | (~D & SL)`. It is
  high on a mismatch and low when both searchlines are low.
- `picbnn_bank`: the ML of each row is represented by the number of open
  pull-downs (`$countones`), i.e. the row's Hamming distance to the query.
- `picbnn_mlsa` (a behavioural model): at the sense edge it outputs
  `row_en[r] && count[r] <= tol`. The threshold `tol` stands for the effect of
  the three voltages together. A tie reads as 1.
- `picbnn_vbias_lut` holds the ten measured voltage settings and the threshold
  each one gives:

| Vref mV | Veval mV | Vst mV | HD threshold |
|---|---|---|---|
| 1200 | 1200 | 1200 | 0 |
| 750 | 950 | 1200 | 4 |
| 775 | 600 | 1200 | 8 |
| 1175 | 350 | 1150 | 12 |
| 950 | 525 | 1100 | 16 |
| 1025 | 475 | 1000 | 20 |
| 950 | 500 | 1025 | 24 |
| 775 | 600 | 1100 | 28 |
| 1175 | 400 | 1150 | 32 |
| 1000 | 475 | 725 | 36 |

  Other settings have no known threshold (`vbias_known = 0`). The
  multi-threshold sequence needs thresholds the table lacks, such as 2, 6 or
  64. The sequencer therefore asks for a threshold by number (`retune_tol`).
  Finding the voltages that give that threshold is the host's job, and the
  sense model then uses the requested threshold.

Not modelled: the ML precharge devices, the replica-row delay that produces the
sense enable, the off-chip voltage sources, and the pads. The first two are
implied by the one-cycle search: every search starts with a charged ML and
ends at the sense edge. Noise, process, voltage and temperature spread, and the
real shape of the voltage-to-threshold relation are absent too. As a result,
the model is deterministic where silicon is statistical. This matters for
accuracy studies: the model shows the ideal behaviour of the scheme, not the
measured chip.

## Mapping a layer onto rows

These are conventions of the test software, not of the hardware. They are
shown here because a layer only gives correct results if its rows are laid out
consistently.

*Hidden layer (majority at a fixed threshold).* Take a word of width `W`
(1024 for the 128 x 1024 arrangement) and `n` inputs. The row holds the `n`
weights followed by `k = W - n` constant cells: `(k + C)/2` cells hold 1 and
the rest hold 0. The query holds the input bits followed by `k` ones. Each 1
cell then matches (+1) and each 0 cell mismatches (-1), so together they sum
to `C`. With `T = W/2`, the row outputs 1 exactly when
`n - 2*HD_weights + C >= 0`. Every row uses the same threshold, whatever its
`C`. `C` must have the parity of `k` and satisfy `|C| <= k`.

*Output layer (swept threshold).* The row holds the weights, then `|C|`
constant cells, then padding. Constant cells hold 1 (match) for `C > 0` and 0
(mismatch) for `C < 0`. Padding cells hold 1. The query holds the hidden
vector, then ones (`oq_const`). The row's distance is
`HD_weights + max(0, -C)`. As the threshold is swept from 0 to 64, classes
close to the input answer 1 early and often.

With the MNIST-sized network (784 -> 128 -> 10), the hidden layer fills the
whole array in the 128 x 1024 arrangement. The output layer cannot be stored
next to it. The sequencer therefore stops after the hidden layer, and the host
rewrites the array with the output layer in the 256 x 512 arrangement. A layer
with 4096 inputs is wider than the widest word (2048) and does not fit a
single search.

## Timing of a search

```
edge k     : hs_valid/query captured into each bank's search data register,
             threshold captured
cycle k..k+1: searchlines driven, matchlines evaluate, counts joined
edge k+1   : sense amplifiers capture the decisions
after k+1  : act_out valid, act_valid high for one cycle
```

A new search can be issued every cycle. `cfg` must stay constant from the
request until its result is captured. The result of a read (`rd_en`) appears
one cycle after the request. Searches and writes to different rows may overlap.

## Batched multi-threshold inference (`picbnn_infer_ctrl`, `picbnn_vote`)

1. The host loads `BATCH` query words into the image buffer (`img_we`). Each
   word holds the input bits followed by the constant-cell inputs. The host
   sets `hid_tol` (normally `W/2`), `oq_const` and `n_cls`, and pulses
   `seq_start`.
2. Hidden layer: one search per image, in consecutive cycles. Each returned
   vector is kept as that image's hidden activations.
3. `reload_req` stays high until `reload_ack`. In this window the host writes
   the output-layer weights and changes `cfg`.
4. For each level `l = 0 .. NLEVELS-1`: `retune_req` with
   `retune_tol = l*STEP` stays high until `retune_ack`. This is when the host
   sets the voltages. Then one search per image follows, with
   `query = hidden | oq_const` and threshold `l*STEP`. Each result adds one
   vote to every class `c < n_cls` that answered 1.
5. `seq_done` rises. `votes[i][c]` holds the counts, and `top1[i]` / `top2[i]`
   hold the best and second-best class. A tie goes to the lower class index.

One image needs `1 + NLEVELS` = 34 searches. At 25 MHz, the 560 k
inferences/s reported for the silicon correspond to about 45 cycles per image.
With 8 images per batch and a retune that takes 3 cycles, the RTL uses 409
cycles per batch, about 51 cycles per image. Larger batches or faster retuning
bring this closer to 34.

## What is taken from the published design and what is not

Taken from it: four banks of 64 x 512, the three arrangements, the bitcell's
compare function, threshold sensing with the majority point at equal numbers of
matches and mismatches, the batch-normalisation constant stored as cells, the
ten voltage settings, the sweep 0, 2, ..., 64 (33 passes), the vote, and the
per-threshold batching.

Choices of this RTL:

- Bank joining by summing mismatch counts, and the slice order.
- The `cfg` encoding.
- Synchronous writes and a one-cycle registered read.
- The two-edge search pipeline.
- Tie handling (a tie reads as 1 in the sense amplifier and goes to the lower
  index in the vote).
- The weight reload between layers.
- The handshakes, the state machine, and the batch size of 8.
- The vote counters and Top-1/Top-2 logic. Counting the votes is part of the
  published procedure, but where it runs is not stated.
- No searchline masking.

## Where this RTL departs from the published description

- **Bank orientation.** The published text gives the arrangements once as
  "512 x 256, 1024 x 128, 2048 x 64" and once as fully connected layers of
  "64 x 2048, 128 x 1024, 256 x 512", and it labels a bank "64 x 512". This RTL
  reads a bank as 64 rows of 512-bit words. The other reading, 512 rows of
  64 bits, could not hold a 784-input layer in one search.
- **Sense amplifiers.** In the published floorplan the sense amplifiers sit
  inside each bank. Here there is one set after the bank-joining logic, so
  that a word spanning several banks gets a single decision. How the silicon
  forms wide words is not described.
- **Read path.** The read path sits in the write-driver block, because the
  floorplan shows no separate read circuitry.
- **Threshold as a number.** The three analog voltages appear only through the
  threshold they produce. For thresholds outside the ten measured settings, the
  design has no voltage values and assumes the host can find them.
- **Layer-to-layer flow.** How the hidden and output layers share the array
  (rewriting the weights in between) and whether the vote is counted on chip
  are not described. Both are this design's answers.
- **The 4096-input layer.** The published hand-gesture network has a
  4096-input first layer, which is wider than any arrangement. Its mapping is
  not described and is not supported here.

## Files and parameters

| module | role | main parameters (default) |
|---|---|---|
| `picbnn_pkg` | arrangement enum, widths | |
| `picbnn_cell_row` | one word line of bitcells | `COLS` (512) |
| `picbnn_write_driver` | row decode, write data, read-out | `ROWS` (64), `COLS` (512) |
| `picbnn_sl_driver` | search data register, SL / SLbar | `COLS` (512) |
| `picbnn_bank` | 64 x 512 bank, per-row mismatch counts | `ROWS`, `COLS` |
| `picbnn_array_cfg` | arrangement, query slicing, ML joining | `NB` (4), `ROWS`, `COLS` |
| `picbnn_mlsa` | sense amplifiers (behavioural model) | `NROWS` (256), `LCW` (12) |
| `picbnn_vbias_lut` | voltage setting -> threshold | |
| `picbnn_infer_ctrl` | batched multi-threshold sequence | `BATCH` (8), `NLEVELS` (33), `STEP` (2) |
| `picbnn_vote` | vote counters, Top-1 / Top-2 | `BATCH`, `NCLS` (32), `VW` (6) |
| `picbnn_top` | the whole array | all of the above |

All defaults are the published sizes, except for `BATCH`, `NCLS` and `VW`,
which are not published.

## Simulating

Every testbench in `tb/` checks itself and ends with a line
`TB_RESULT checks=N failures=M`. For example:

```
verilator --binary --timing --assert -Irtl -Itb rtl/picbnn_pkg.sv \
    tb/tb_picbnn_top_full.sv --top-module tb_picbnn_top_full
./obj_dir/Vtb_picbnn_top_full
```

- `tb_picbnn_top_full` runs the array at its default size. It maps a random
  784 -> 128 -> 10 network with batch-normalisation constants, and checks
  read-back, host searches in all three arrangements, a search at a threshold
  taken from the voltage table, and a complete batched inference. Every vote
  count and every Top-1/Top-2 class is compared with a reference computed
  directly from the network. It builds in about 30 s and runs in under a
  second.
  Each image is assigned a class whose weights lie 16 bits from the image's
  hidden vector. The test checks that this class wins the vote.
- `tb_picbnn_top` does the same on 16 x 64 banks with 20 classes. This is the
  class count of the hand-gesture output layer.
- The other testbenches each test one module against a model of its own.

The weights in the tests are random. Their votes exercise the mechanism, not
the accuracy: no trained MNIST or hand-gesture network is included.
