# RAPIDNN in-memory DNN accelerator: SystemVerilog model

## The idea

A trained network is rewritten before it ever reaches the hardware. Every weight is
replaced by the nearest of a few weight clusters (w = 16). Every neuron input is replaced
by the nearest of a few input clusters (u = 64). The activation function is replaced by a
64-row table. After this, a neuron can only ever multiply one of w weights by one of u
inputs, so all w·u = 1024 products are computed offline and stored in memory. What is left
for the chip to do at run time is:

* **count** how often each (weight, input) pair occurs in a neuron;
* **scale** each stored product by its count using shifts;
* **add** the scaled products inside the memory crossbar;
* **look up** the activation and the next layer's input code with a nearest-value search.

No multiplier is needed anywhere. Values move between layers as 6-bit cluster codes, not
as 32-bit numbers.

This RTL describes the digital behaviour of that accelerator. Memristor cells, NOR
evaluation in the crossbar and the current-sensing CAM are modelled by the logic function
they perform. The step counts of the in-memory adder are kept cycle-exact, so the
latencies reflect the crossbar's NOR program.

## Organisation

```
rapidnn_top
 ├─ data_block          raw input samples and written-back results (host visible)
 ├─ am_block (u_in_enc) input encoder: raw value -> input cluster code ("virtual" first layer)
 ├─ broadcast_buffer    input buffer, feeds tile 0
 ├─ controller          registers and the layer pipeline
 └─ tile × N_TILES      one layer each
     ├─ rna × N_RNA     one neuron each
     │   ├─ weighted_accum
     │   │   ├─ counter_bank        w·u occurrence counters
     │   │   ├─ sequence_detector   one per product row
     │   │   └─ inmem_adder         carry-save NOR adder tree
     │   ├─ am_block  activation table (q = 64 rows) ─┐ each one an ndcam
     │   └─ am_block  encoding / pooling (u rows)    ─┘ plus a data array
     └─ broadcast_buffer    the layer's encoded outputs, double banked
```

`rapidnn_pkg` holds the sizes, the configuration bus types and the register map.

## A neuron step by step (`rna`, `weighted_accum`)

### Loading

The tile streams the layer's input codes into every RNA's input buffer at once.

Each RNA also holds w **weight index buffers**, filled at configuration time. Buffer k
lists the indexes of the inputs whose weight is cluster k. This is how the network's
weights are stored: the weight values themselves live only in the products table.

### Counting

Each cycle, every weight buffer yields one index. The input code at that index selects
counter {k, x}. The w increments of one cycle always hit w different counters, so there
are no conflicts. Counting takes as many cycles as the longest weight buffer.

### Scaling

A count is not used as a multiplier. The sequence detector rewrites it in signed binary
digits (non-adjacent form):

* 9 becomes 8 + 1;
* 15 becomes 16 − 1;
* any run of ones becomes 2^k − 2^j.

Then, for all 1025 product rows at once, the shifted product is added or subtracted for
one digit position per cycle. This takes CNT_W + 1 = 13 cycles. Row 1024 carries the bias.

### Addition

`inmem_adder` models how the crossbar adds 1025 rows using nothing but NOR. Rows are
taken three at a time, and each triple becomes a sum row and a carry row. This is one
carry-save stage: an 11-NOR full-adder program plus two cycles that write the results back
as the next stage's rows, 13 cycles in total, for all triples in parallel. The program is
listed in the file header.

1025 rows need 14 such stages. The two remaining rows are then added bit-serially: 13
cycles per bit, 32 bits.

### Activation and encoding

The sum is searched in the activation AM. Its nearest key's data is the activation value
z. z is searched in the encoding AM, whose data is the input cluster code handed to the
next layer.

### Pooling neurons

A pooling neuron uses none of the above arithmetic. Its inputs (the codes named in weight
buffer 0) are written as keys into the encoding AM. The AM is then searched with the
largest (max pooling) or smallest (min pooling) signed value, and the nearest stored code
is the result. This works because the codebooks are sorted before codes are assigned, so
code order equals value order.

Average pooling needs no special mode. It is an ordinary neuron whose products are the
cluster values divided by the window size.

### Latency

Let L be the longest weight buffer.

* Neuron: L + 13 + 13·(14 + 32) + 5 cycles in `weighted_accum`, then 2·5 + 1 cycles for
  the two lookups.
* Pooling neuron: L + 8 cycles.

## The nearest-distance CAM (`ndcam`, `am_block`)

This is the least conventional block. In the circuit, the access transistors of the
bit-i cell are twice as large as those of bit i−1. A mismatch therefore discharges the
match line with a current weighted by 2^i, and the row that discharges slowest wins. That
is, the winner is the row with the smallest binary-weighted mismatch, key XOR query, read
as a number.

Because 32 binary weights cannot be told apart in one match line, the search runs as four
8-bit stages from the MSB down. Rows that tie for the minimum in stage i enable their
rows in stage i+1. The result appears 4 cycles after the search, with one new search
accepted per cycle. Ties left after the last stage go to the lowest row.

Three points where this design departs from, or adds to, a plain reading:

* **Distance metric.** The text calls the search "smallest absolute distance" and also
  "single cycle". The RTL follows the described circuit instead: XOR distance and four
  pipeline stages. For values that share their high bits, XOR distance and absolute
  distance agree. Where they do not, e.g. 0111 vs 1000, the XOR result can differ from a
  true nearest-value search. Table contents should be chosen with that in mind.
* **Signed keys.** `am_block` flips the sign bit of keys and queries, so that two's
  complement values are ordered like unsigned numbers.
* **Row validity.** Unwritten rows never match.

An AM lookup costs NSTAGE + 1 = 5 cycles: the four CAM stages plus the data read.

## Tiles, buffers and the layer pipeline (`tile`, `broadcast_buffer`, `controller`)

### Tiles and buffers

A tile computes one layer: all its RNAs start together. When all are done, their codes
are shifted bit-serially (6 cycles, MSB first) into the tile's buffer. The next tile reads
that buffer, one entry per cycle, broadcast to all of its RNAs.

Each buffer has two banks. A layer writes one bank while the next layer reads the other,
and every pipeline step swaps them.

### The controller's pipeline step

The controller runs one pipeline step as five phases:

| phase | work |
|------|------|
| ENC  | read sample b's raw inputs from the data block, encode them with the input AM, write the codes into the input buffer |
| LOAD | stream entry i of every tile's source buffer into that tile, up to its fan-in |
| RUN  | start every layer tile and wait for all |
| WB   | write the last layer's outputs of sample b−L−1 to the data block |
| SWAP | swap all buffer banks |

In step b, tile t works on sample b−1−t. S samples through L layers finish after S+L+1
steps. The step time is set by the slowest layer.

### Host interface

Everything is written through `cfg_i` (`top_cfg_t`), with three address spaces:

* **SP_RNA** addresses tile, RNA, table and row. The tables are CFG_PROD, CFG_WIDX,
  CFG_WLEN, CFG_ACT_KEY/VAL, CFG_ENC_KEY/VAL and CFG_MODE.
* **SP_ENC** loads the input encoder.
* **SP_CTRL** sets the registers: layer count, raw inputs per sample, sample count, input
  and output base, and per tile its fan-in and active RNAs.

While `busy_o` is low, the host reads and writes the data block through `host_*`. A pulse
on `start_i` runs the network, and `done_o` pulses at the end.

## Sizes

The defaults are the published configuration:

| parameter | value |
|---|---|
| w, u | 16, 64 |
| activation and encoding tables | 64 rows |
| counters | 12 bits |
| values | 32 bits |
| layer fan-in / buffer depth | 1024 |
| tiles | 32 |

There is one exception: `N_RNA`, the RNAs per tile, defaults to **8 instead of 1024**.
Each RNA holds its own 1024-row product table, counters, 1025-row adder and 16 × 1024
index buffers. Elaborating 32 × 8 RNAs already needs about 10 GB in lint; 32 × 1024 would
need over a terabyte. `N_RNA` is a parameter, so a larger build only needs a
larger machine.

Things the model does not do:

* **Large layers.** A layer is limited to the RNAs of one tile and a fan-in of 1024.
  Splitting larger layers over tiles, or running a layer's neurons in several passes, is
  not implemented.
* **The published benchmarks.** At the default size none of them fit. The MNIST, ISOLET
  and HAR networks (fan-in ≤ 784, 512 neurons per layer) would fit tiles of 1024 RNAs. The
  CIFAR and ImageNet networks need more neurons per layer and larger fan-in than any tile
  offers.
* **Variable code width.** Codes are always log2(u) = 6 bits wide. A smaller codebook
  (a shallower level of a hierarchical codebook) simply uses a subset of the codes and
  table rows.
* **Building the tables offline.** Clustering, retraining and filling the tables happen
  before the hardware runs and are outside this RTL.

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. Run, for example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb --top-module tb_rna rtl/rapidnn_pkg.sv tb/tb_rna.sv
./obj_dir/Vtb_rna
```

| testbench | what it checks |
|---|---|
| tb_sequence_detector | all 4096 counts: digits reconstruct the count, no two adjacent digits |
| tb_counter_bank | random increments against a model, clear |
| tb_inmem_adder | 40 operands of 16 bits (ramp, all ones = −1, random), exact latency formula |
| tb_ndcam | random tables and queries against an XOR-distance reference; enables; 4-cycle latency |
| tb_am_block | signed keys, valid rows, data read, 5-cycle latency |
| tb_weighted_accum | random neurons (w = 4, u = 8, fan-in 64) against a direct Σ W·X + b; latency; pool stream |
| tb_rna | full neuron against a reference built from the configuration; max and min pooling with latency |
| tb_broadcast_buffer | serial and parallel writes, bank swap |
| tb_tile | 4 RNAs, outputs in the buffer, done timing |
| tb_data_block | random read and write |
| tb_controller | the controller with stub tiles, encoder and memory: phase order, fan-in loads, S+L+1 steps, write-back addresses and data |
| tb_rapidnn_top | end to end (see below) |

### End-to-end test

`tb_rapidnn_top` runs a 3-layer network through 3 tiles of 2 RNAs with w = 4, u = 8 and
fan-in 8. It checks every output code against a reference model of the whole network.
The network includes a max-pool neuron, a min-pool neuron and repeated inputs (counts
above 1). The test counts each mechanism and fails if any of them never happened:

* encoder searches;
* buffer swaps;
* every controller phase;
* pool searches of both kinds;
* adder carry-save and ripple stages.

### Largest simulated size

This is the largest simulated whole design: 6 RNAs with reduced codebooks. A simulation
of the top at its default size was not run. The C++ model of even a few full-size RNAs
takes many minutes to build, and 256 of them are out of reach.

The single-block testbenches run at reduced w, u and fan-in as well. Only
`sequence_detector` and `am_block` run at their full default sizes; `ndcam` runs at full
key width with 16 rows.
