# Mesorasi NPU with an aggregation unit: RTL

## The idea: aggregate after the MLP, not before

Point-cloud networks such as PointNet++ and DGCNN are built from modules of
three steps:

- **N** (neighbour search) finds K neighbours for each of N_out centroid points.
- **A** (aggregation) gathers each centroid's neighbours and subtracts the
  centroid from each of them.
- **F** (feature computation) runs a shared MLP on every gathered row. A max
  over the K rows then reduces the result to one feature vector per centroid.

Done in that order, the MLP runs on N_out × K rows. Most of those rows are the
same input points seen from different centroids.

Delayed aggregation swaps the order:

1. The MLP runs once per *input* point. This gives the point feature table
   (PFT), with N_in rows and M_out columns.
2. Aggregation is then done on features instead of coordinates:

       out[c] = max_{n in nbrs(c)} PFT[n] - PFT[c]

The swap is exact without the MLP's non-linearity and approximate with it.
Pulling the subtraction out of the max is always exact.

The swap moves work from the systolic array to an irregular gather over a
table of about 0.5–1 MB. This RTL is an NPU (neural processing unit) built for
that pattern:

- a 16×16 output-stationary systolic array runs the MLP layers;
- an **aggregation unit (AU)** does the gather, max and subtract from a banked
  on-chip copy of the PFT, driven by the neighbour index table (NIT) that the
  neighbour search produces.

Neighbour search runs elsewhere, on a GPU or a dedicated engine. Here the NIT
is an input stream to the NPU.

## Block map

```
                 host port (load inputs/weights, read results)
                          |
   mlp_cfg/start -> +-----v------------------------------------------+
                    |   global_buffer  1.5 MB, 12 x 128 KB banks,   |
                    |   one port, 16-word lines, word write mask    |
                    +----^-----------------------------^------------+
                         | (port owned by whichever engine is busy)
               +---------+---------+        +----------+-----------------------+
               |    mlp_engine     |        |       aggregation_unit           |
               |  systolic_array   |        | nit_buffer (2 x 128 entries)     |
               |   16x16 mac_pe    |        | agu (32 x 32-input selectors)    |
               |  bn_relu_unit x16 |        | pft_buffer (32 banks x 512 words)|
               +-------------------+        | reduction_max (33 inputs)        |
                                            | shift_register top / bottom      |
   au_cfg/start, NIT stream --------------> | sub_unit (256 subtractors)       |
                                            +----------------------------------+
```

`mesorasi_npu` is the top. It has no parameters. A host (a CPU plus DMA in a
real system-on-chip) does the following through plain ports:

- loads the point matrix, the weights and the batch-norm constants into the
  global buffer;
- starts MLP layers one after another; each layer writes its output where the
  next layer reads its input, and the last layer's output is the PFT;
- starts the AU and streams the NIT into it;
- reads the module's output back. The output has the same layout as an MLP
  input, so it can feed the next module directly.

Only one engine uses the global-buffer port at a time. Assertions in the top
check that the two engines are never busy together and that the host stays off
the port while either engine runs.

## Data layout in the global buffer

The buffer is addressed in lines of 16 words of 32 bits: 15 address bits for
24 576 lines. A matrix with n rows is stored in row blocks of 16 rows. Each
line holds one column of one row block:

| what | line address | contents |
|---|---|---|
| X (n × k), layer input | `x_base + rb*k + c` | X[16rb..16rb+15][c] |
| W (k × m), weights | `w_base + c*(m/16) + cb` | W[c][16cb..16cb+15] |
| Y (n × m), layer output / PFT | `y_base + rb*m + c` | Y[16rb..16rb+15][c] |
| BN scale, bias | `bn_base + 2cb`, `+1` | 16 scales, 16 biases |
| AU output (n_out × m) | `out_base + (e/16)*m + c` | row e = e-th NIT entry |

`mlp_cfg_t` and `au_cfg_t` in `mesorasi_pkg` hold the bases and sizes.
Sizes are in units of 16 where the layout needs it: `n_rb` row blocks and
`n_cb` column blocks.

## MLP engine

`mlp_engine` computes `Y = relu(bn(X*W))` in 16×16 output tiles. For each
tile it does four things in order:

1. Reads the BN scale and bias lines.
2. Clears the accumulators and feeds k steps. Each step reads one X line and
   one W line, which takes two cycles because the global buffer has one port.
3. Lets the array drain for 2·16 cycles. The skew registers at the array edges
   delay row i and column j by i and j cycles.
4. Writes 16 result lines through sixteen `bn_relu_unit`s.

Each `bn_relu_unit` computes:

    t = acc >>> shift               (fixed-point rescale, cfg.shift)
    u = ((t * scale) >>> 8) + bias  (batch norm folded to scale/bias, Q8 scale)
    y = relu_en ? max(u, 0) : u

A tile takes `3 + 2k + 48` cycles. The PE matches a TPU PE: two operand
registers and a multiply-accumulate into a 64-bit accumulator.

### Max pooling

A layer can also be max pooled. Setting `pool_rb` in the config to a nonzero
value turns this on. Points are then pooled in groups of `pool_rb` row blocks,
that is `16·pool_rb` points. Setting `pool_rb = n_rb` gives a global max over
the whole cloud, as a classifier head needs.

In this mode:

1. The tile loop runs column blocks outermost.
2. Each `bn_relu_unit` also outputs the maximum of its 16 lanes.
3. The engine keeps a running maximum of that value per channel over the
   group, instead of writing Y.
4. When a group ends, it writes the 16 maxima as output row g. The layout is
   the usual Y layout, with a one-word masked write per channel: 16 cycles per
   group and column block.

## Aggregation unit

This is the part of the design that needs the most explanation.

### Storage

- **NIT buffer.** Two halves of 128 entries each. An entry holds up to 64
  12-bit neighbour indices plus the centroid's 12-bit index. That is
  780 bits, within a 98-byte entry. One half fills from the input stream
  while the AU reads the other. `nit_last` closes a half early.
- **PFT buffer.** 32 single-ported banks of 512 32-bit words (64 KB in
  total).
  - Point i lives in bank `i mod 32`, at row `i div 32`. This is
    interleaving on the low bits of the index.
  - Column j of the current partition is at word `row*cols + j`.
  - Banks have their own addresses. Their outputs are **not** routed back to
    the neighbour that asked for them. Every word goes into the max, and max
    does not care about order, so no output crossbar is needed.

### Column partitioning

A PFT of 1024 points × 128 features is 512 KB, eight times the PFT buffer. So
the AU works on `cols` columns at a time, and `cols × ceil(n_in/32)` must fit
in 512 words. Max works per column, so each partition gives a complete slice
of the output columns.

For each of the `m_out/cols` partitions, the AU:

1. **Fills** the PFT buffer from the global buffer. This reads one line per
   (row block, column) and writes its 16 words into the banks of those 16
   points. It takes `ceil(n_in/16)*cols + 1` cycles.
2. **Runs** all NIT entries. The NIT is streamed again for every partition.
3. Writes each entry's `cols` results into its slice of the output.

### Rounds

The AGU takes an entry's neighbours in windows of 32. In each round, every
bank's 32-input selector picks the first pending neighbour that maps to that
bank. So a round reads at most one word per bank, and the neighbours it picks
have no conflicts.

The round then sweeps the columns. Each cycle, the 32 bank words for column j,
plus the partial maximum of column j, enter the 33-input max unit. The
partial maximum comes from the tap of the top shift register. The result
shifts back into that register. In the first round of an entry the feedback
input is disabled.

Neighbours that lost a bank conflict wait for the next round. When a window
is empty, the next window starts.

After the last round, the centroid's row is read one column per cycle. Its
bank is selected by a 32-to-1 multiplexer into the bottom shift register.
Then the 256 subtractors form `top − bottom`. The result is latched and
written to the global buffer, one word per cycle, while the next entry is
already running.

### Timing

An entry takes `(rounds + 1) × cols` cycles. There is no gap between entries.

- With no conflicts and k ≤ 32, rounds = 1.
- In general, a window takes as many rounds as the largest number of its
  neighbours that share a bank.

### Statistics

The AU counts four things:

- rounds actually used (`stat_rounds`);
- rounds needed with no conflicts (`stat_ideal_rounds`);
- entries;
- partitions.

Their ratio is the conflict overhead.

## Measured behaviour

The top-level testbench `tb_mesorasi_npu` runs with all parameters at their
defaults. It runs the first PointNet++ classification module at full size:

- 1024 points with 3 coordinates;
- MLP 3→64→64→128 with ReLU;
- 512 centroids with 32 neighbours each;
- output 512 × 128.

After that it runs two more steps:

- a 128→128 layer with global max pooling on the aggregation output;
- a second aggregation with 64 neighbours per entry.

Every output word is compared with a model computed inside the testbench.

| step | cycles |
|---|---|
| layer 3→64 | 14 593 |
| layer 64→64 | 45 825 |
| layer 64→128 | 91 649 |
| layer 128→128 on the K=32 aggregation output, global max pool | 78 721 |
| aggregation, K=32, 8 partitions of 16 columns | 310 321 (14 520 rounds, 4 096 without conflicts) |
| aggregation, K=64, 128 entries | 143 409 (7 352 rounds, 2 048 without conflicts) |

`tb_workloads` uses the same top to run other networks' shapes. Each run is
one 16→M_out layer followed by one aggregation pass. The sizes are typical
values for these networks, not measured ones.

| shape | points / centroids / K / M_out / cols | aggregation cycles | rounds (conflict-free) |
|---|---|---|---|
| PointNet++ classification, module 2 | 512 / 128 / 64 / 256 / 32 | 275 505 | 7 288 (2 048) |
| DGCNN / LDGCNN classification | 1024 / 1024 / 20 / 64 / 16 | 248 601 | 10 924 (4 096) |
| DGCNN segmentation | 2048 / 2048 / 40 / 64 / 8 | 836 913 | 85 144 (32 768) |
| PointNet++ segmentation, module 1 | 2048 / 512 / 32 / 128 / 8 | 319 841 | 28 688 (8 192) |

The testbench draws neighbour indices uniformly at random. That gives about
3.5× the conflict-free number of rounds. Neighbours of real point clouds are
spatially local, and with low-bit interleaving they spread better. The figure
reported for real data is about 1.5×. The conflict overhead measured here is
therefore an upper estimate.

The test also counts each mechanism and fails if any of them never happens:

- ReLU clipping;
- multi-layer chaining;
- max-pooling writes;
- partitions;
- conflict rounds;
- a second 32-index window;
- NIT half swaps;
- NIT stalls;
- port hand-overs.

## Where this RTL departs from, or adds to, the source design

- **Number format.** 32-bit two's-complement integers, 64-bit accumulators,
  and a fixed-point rescale in the BN step. The source gives 4-byte words but
  no number format.
- **Max pooling.** The source only names the NPU's BN/ReLU/max-pooling stage.
  Here, pooling works on whole 16-point row blocks, so groups are multiples
  of 16 points. The reduction over each centroid's neighbours is done by the
  AU, not by this stage.
- **Global-buffer ports.** There is one port, shared by time. That follows
  the remark that NPU buffers usually have one wide port. The line width,
  the layouts and the host port are this design's own.
- **NIT entries.** An entry also carries the centroid's index. The source's
  entry has 64 × 12-bit indices in 98 bytes and does not say where the
  centroid comes from.
- **Bottom shift register.** It is written but its serial tap is unused. The
  subtractors read all 256 words in parallel, as the source's "256
  subtraction units" imply.
- **Output row.** The AU writes entry e to output row e. It relies on the NIT
  being in centroid order.
- **NIT source.** The NIT arrives as a valid/ready stream. The DRAM, DMA and
  neighbour search engine that would produce it are not part of this RTL.
- **Neighbour limit.** Entries hold at most 64 neighbours. A network that
  returns 128 neighbours (as reported for F-PointNet) would need two entries
  and a step that merges their maxima. This RTL does not have that step.
- **Partial-max storage.** The partial maximum kept between rounds is stored
  only in the top shift register, so `cols` ≤ 256.
- **Sizes.** All sizes are the source's defaults. Nothing was scaled down:
  - 16×16 array;
  - 1.5 MB global buffer;
  - 64 KB PFT buffer;
  - 2 × 128 NIT entries;
  - 256-word shift registers.

## Files

One module per file in `rtl/`. The package is `rtl/mesorasi_pkg.sv`. Each
block has a self-checking testbench `tb/tb_<block>.sv`, and every testbench
ends with a `TB_RESULT checks=… failures=…` line.

To simulate one of them with Verilator 5:

    verilator --binary --timing --assert -Irtl rtl/mesorasi_pkg.sv rtl/*.sv \
        tb/tb_mesorasi_npu.sv --top-module tb_mesorasi_npu
    ./obj_dir/Vtb_mesorasi_npu

The full-size top test takes about 40 s to build and 10 s to run.
`tb_workloads` is built the same way and runs in about 30 s.
Testbenches of the smaller blocks override parameters to keep runs short. For
example, the AU test uses an 8-entry NIT buffer.

To change the design point:

- edit `mesorasi_pkg`: `PFT_BANKS`, `PFT_BANK_WORDS`, `MAX_K`, `NIT_ENTRIES`,
  `SR_LEN`, `SA_DIM`, `GB_BANKS`;
- or override the parameters of `aggregation_unit` and `mlp_engine`.
