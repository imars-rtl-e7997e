# iMARS in SystemVerilog: a recommendation engine built from memory arrays

A recommendation system answers "which few items should this user see?" in two
stages. A **filtering** stage turns the user's profile into a user embedding and
picks a few hundred candidate items whose embeddings lie near it. A **ranking**
stage then scores each candidate with a small neural network, giving a
click-through rate (CTR), and keeps the k best. Most of the work is not
arithmetic. It is reading rows of large embedding tables, adding them up, and
searching for near neighbours. All of that is limited by memory bandwidth.

This design does that work inside the memory. Every table sits in
**configurable memory arrays** (CMAs), 256 × 256-bit arrays that can act as:

- a RAM;
- an adder that accumulates the rows it reads;
- a content-addressable memory (CAM) that compares a key with every row at once
  and reports the rows within a Hamming radius.

The fully connected layers run on **crossbar arrays**, which compute a whole
matrix-vector product in one step. The RTL here models the digital behaviour of
these arrays clock by clock and builds all the logic around them.

## Data format

An embedding has 32 dimensions, each a signed 8-bit integer. One embedding is
therefore one 256-bit word (dimension *d* in bits `[8d+7:8d]`). One word is also:

- one CMA row;
- one input of each adder tree;
- one beat of the on-chip bus.

Every vector addition is lane-wise. Each 8-bit lane adds modulo 256 and does not
carry into the next lane (`imars_pkg::vadd`). Because of this the order of
additions never changes a result, so the different adder trees always agree
bit for bit. A model must be quantised so that its pooled sums stay in range.

## The memory hierarchy

```
imars_top
 ├─ cma_bank × B (32)        one embedding table per bank
 │   ├─ cma_mat × M (4)
 │   │   ├─ cma × C (32)     256 rows × 256 bits: RAM / accumulate / CAM
 │   │   └─ intra_mat_adder_tree   sums the C accumulators of the mat
 │   ├─ ibc_net              moves mat sums four at a time (128 bytes)
 │   └─ intra_bank_adder_tree  fan-in 4, output fed back for later groups
 ├─ imars_ctrl               bank counter + mat-group counter
 ├─ rsc_bus                  256-bit word-serial bus with destination tag
 ├─ inter_bank_adder         8-slot × 256-bit feature buffer (ADD or concat)
 ├─ lsh_unit                 hashes the user embedding into a 256-bit signature
 ├─ item_buffer              FIFO of candidate item indices
 ├─ ctr_buffer               a CMA holding (CTR, item) pairs; top-k by CAM search
 ├─ dnn_stack × 2            filtering crossbar bank: dense stack, predictor stack
 └─ dnn_stack × 2            ranking crossbar bank:   dense stack, predictor stack
      └─ xbar × 3            256 × 128 crossbar with column mux and 8 ADCs
```

### Pooling a table in place

A sparse feature is a list of indices into one table. For example, the movies a
user watched are indices into the movie-embedding table. The model needs the
sum of those rows. Each table lives in its own bank. An index *i* maps to:

- row `i % 256`;
- CMA `(i / 256) % 32`;
- mat `i / (256·32)`.

A bank therefore holds 32768 rows.

The lookups work like this:

1. `OP_LOOKUP` reads the row and adds it into the accumulator next to that
   CMA's sense amplifiers. Many lookups into one CMA cost no data movement.
2. `OP_ACC_CLR` clears all accumulators of a bank before a new pooling.
3. At the end, each mat's adder tree sums its 32 accumulators.

That leaves the M mat sums, which are combined by a fixed schedule:

- The IBC network delivers them in groups of four: mats 1–4, then 5–8, and so
  on.
- The intra-bank tree adds the four inputs plus its own previous output. Its
  `first` flag zeroes that feedback.

Only one group is needed at the default M = 4. Larger M values are supported and
tested (M = 8 and M = 10).

### The item table and near-neighbour search

Filtering must find the items whose embedding lies near the user embedding.
This uses locality-sensitive hashing:

- Each item stores a 256-bit signature: the signs of its embedding projected on
  256 random hyperplanes.
- Two vectors with a small angle between them have signatures with a small
  Hamming distance.

The bank holding the item table (`cfg.itet_bank`) runs in **pair mode**. Each
item takes two CMAs:

- the embedding sits in an even CMA;
- the signature sits in the odd CMA next to it.

So item *i* maps to:

- row `i % 256`;
- CMA `2·((i/256) % 16) + sig`;
- mat `i / (256·16)`.

A bank then holds 16384 items.

The search runs as follows:

1. A CAM search goes to every odd CMA at once.
2. Each row compares its Hamming distance over the masked columns with the
   threshold `thr`.
3. Rows at or under the threshold set their match bit.
4. A priority encoder in each CMA, then in each mat and in the bank, reports
   the lowest matching index.
5. `OP_POP` retires that match, so the candidates stream out one per clock in
   index order.

Rows that were never written are never valid, so they never match.

### The CTR buffer and top-k

The CTR buffer is one more CMA. For each candidate it stores:

- the CTR as a thermometer code in bits [126:0], with the CTR clamped to 0..127
  (a CTR of *c* sets the lowest *c* bits);
- the item index in bits [255:240].

Against an all-ones key over the thermometer bits, the Hamming distance of a
row is exactly `127 − CTR`. Top-k becomes a sweep of the threshold:

1. Search with threshold t.
2. Pop every match, keeping already-reported rows out (`OP_SEARCH_C`).
3. Raise t by one.
4. Repeat until k items are out.

Items therefore come out best first. Items with equal CTR come out in row order.

## Moving results: CTRL, the RSC bus and the feature buffer

After the lookups, `imars_ctrl` walks through the banks the stage uses
(`cfg.filt_mask` or `cfg.rank_mask`). It keeps two counters: the current bank
and the current mat group. For each active bank it does three things:

1. It steps the IBC groups through the intra-bank tree.
2. It waits for the bank's result.
3. It puts the result on the RSC bus.

A pass takes B + 3 + k·(⌈M/4⌉ + 3) clocks for k active banks. The testbench
checks this number exactly.

`rsc_bus` carries one 256-bit word per clock, registered. Each word has a
destination tag, which is a slot of the feature buffer. The sources are:

- banks 0..B−1;
- source B: the filtering dense-feature output;
- source B+1: the ranking dense-feature output.

An assertion checks that every request names an existing source.

`inter_bank_adder` is the 8-slot feature buffer (8 × 256 bits = the 256 int8
inputs of a crossbar). A word sent to an empty slot is stored. A word sent to a
slot that already holds data is added into it. Slot assignments in the
configuration therefore choose the pooling:

- Several tables pointed at one slot are **ADD**-pooled.
- Tables pointed at different slots are **concatenated**.

## The crossbar banks

`xbar` is a behavioural model of a 256 × 128 crossbar:

- int8 weights, loaded 32 columns at a time;
- 256 int8 inputs;
- 128 exact 32-bit dot products, read out through a column multiplexer into
  8 ADCs, 16 conversion clocks in all.

The ADC is ideal. No analog noise or limited resolution is modelled.

`dnn_stack` chains three crossbars as up to three fully connected layers. Each
layer has a `layer_cfg_t` with four fields:

- `en`: the layer is in use;
- `shift`: requantise by an arithmetic right shift;
- `relu`: apply ReLU after saturating to int8;
- `out_n`: the number of outputs in use (the rest read 0).

Timing:

- an enabled layer takes 19 clocks;
- a disabled layer takes 1 clock;
- finishing takes 1 more clock.

Each crossbar bank has two stacks:

- a dense-feature stack for the continuous inputs;
- a predictor stack that reads the feature buffer.

## One query, step by step

`imars_top` runs a query from `start` to `done`:

| step | what happens |
|---|---|
| 1a | Sparse-list entries of the filtering banks are looked up and pooled. CTRL moves each bank result into its feature slot. |
| 1b | The filtering dense stack runs on `dense_f`. `cfg.dense_f_nw` of its output words go over the bus into the feature buffer. |
| 1c | The filtering predictor reads the feature buffer. Its first output word is the user embedding (`user_emb`). |
| 1d | `lsh_unit` hashes the user embedding. The item bank is searched with radius `cfg.nns_thr`. Up to `cfg.nns_max` matches go into the item buffer. If more are found than the buffer holds, `cand_overflow` is set. |
| 2c | The ranking dense stack runs once on `dense_r`. |
| 2a, 2b | For each candidate: the ranking tables and the candidate's own item embedding are looked up and pooled. The dense words are added to the feature buffer. |
| 2d | The ranking predictor gives the CTR (lane 0 of its first output). The CTR is written with the item index into the CTR buffer. |
| 2e | The CTR buffer streams the `cfg.topk` best items on `topk_valid`/`topk_idx`/`topk_ctr`. |

Setting `cfg.skip_filter` gives a ranking-only model such as DLRM. It has no item
table and no filtering stage. Steps 1a–1d are skipped and one sample is scored.

Everything is loaded through one host port while the engine is idle. `hw_tgt`
chooses what is written:

| `hw_tgt` | writes | address fields |
|---|---|---|
| `HW_ET` | an embedding-table row | `hw_sig` picks the signature half in the item bank |
| `HW_XBAR` | crossbar weights | `hw_sel` = stack·4 + layer; `hw_addr` = group·256 + row |
| `HW_LSH` | a hyperplane | `hw_addr[7:0]` |
| `HW_SPARSE` | a sparse-list entry | bank in `hw_bank`, index in `hw_data[15:0]` |

## Sizes

| parameter | default | meaning |
|---|---|---|
| `B` | 32 | CMA banks (one table each) |
| `M` | 4 | mats per bank |
| `C` | 32 | CMAs per mat |
| `ROWS` | 256 | rows per CMA (columns fixed at 256) |
| `NADC` | 8 | ADCs per crossbar |
| `IB_DEPTH` | 128 | item-buffer entries |
| `SP_DEPTH` | 128 | sparse-list entries |

B, M, C, the 256 × 256 CMA and the 256 × 128 crossbar are the published
configuration. NADC, IB_DEPTH, SP_DEPTH and the three layers per stack are this
design's choices.

At the defaults the engine holds 4096 CMAs (32 MiB of table storage) and 12
crossbars.

The defaults can hold the published workloads:

- **YoutubeDNN on MovieLens 1M.** Filtering uses 5 user tables plus the item
  table and a 128-64-32 network. Ranking uses 6 tables and 128-1. The largest
  table has 6040 rows. The item bank takes up to 16384 items; MovieLens 1M has
  about 3700 movies.
- **DLRM on Criteo.** This ranking-only model has 26 tables of at most about
  30,000 rows each, within 32768 per bank. Its bottom MLP is 256-128-32 and its
  top MLP 256-64-1. Every layer fits one crossbar.

Layers wider than 256 inputs or 128 outputs are not supported.

## Where this departs from the published design

- **Analog parts are digital models.**
  - The FeFET cells, sense amplifiers and the dummy reference cell that sets
    the CAM threshold become a register array and an integer comparison.
  - The crossbar is a behavioural model with an ideal ADC.
  - No clock generator is included; the design uses the `clk` input.
- **Only the function of many blocks is published, not their insides.** This
  design chose all of the following:
  - the wrap-around lane arithmetic;
  - the index-to-CMA mapping and the even/odd pairing in the item bank;
  - the priority order (lowest index first);
  - the thermometer coding of the CTR and the threshold sweep for top-k;
  - the slot scheme of the feature buffer;
  - requantisation between layers;
  - the LSH unit that hashes the query;
  - the host port and the sequencer;
  - all cycle timings.
- **Every CMA operation takes one clock.** The published figures are
  nanosecond latencies per array (write 10 ns, read 0.3 ns, addition 8.1 ns,
  search 0.2 ns), not cycle counts.
- **Two published descriptions differ, and this design follows the block
  diagram.**
  - The text routes filtering pooling through the intra-mat and intra-bank
    trees only, while the diagram also marks the inter-bank tree. Here every
    bank result passes through the inter-bank adder.
  - The text names the dense network of step 1b a sparse-feature stack, while
    the diagram calls it the dense-feature stack.
- **The ranking stage's dense features are computed once per query** and reused
  for every candidate.

## Verifying and simulating

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`). Each one:

- compares against an independent reference model written in the testbench;
- checks cycle counts wherever the design has fixed timing;
- has a watchdog;
- ends with `TB_RESULT checks=N failures=M`.

`tb_imars_top` runs the whole engine at a small size (4 banks, 8 mats, 4 CMAs,
16 rows). It runs three queries:

1. A normal query.
2. A query whose candidates overflow the item buffer.
3. A ranking-only query.

It checks these results against a reference model of the whole flow:

- the user embedding;
- the candidate count;
- each top-k item and its CTR.

It counts each mechanism and fails if any of them never happens. The mechanisms
are:

- in-memory lookups;
- second IBC rounds;
- ADD pooling and concatenation;
- dense-feature transfers;
- near-neighbour hits;
- item-buffer overflow;
- top-k sweeps;
- ranking-only mode.

`tb_imars_full` runs the same flow with every parameter at its default. It
writes 512 items into the item table and only the table rows the query reads.

With plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl \
    rtl/imars_pkg.sv tb/tb_imars_top.sv --top-module tb_imars_top -o sim
./obj_dir/sim
```

Use the same command with another testbench name to run that testbench.
`tb_imars_full` takes several minutes to compile, because the default engine has
4096 CMA instances.
