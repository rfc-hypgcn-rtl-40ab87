# RFC-HyPGCN in SystemVerilog

Skeleton-based action recognition networks such as 2s-AGCN repeat one
pattern ten times. First a graph product mixes the 25 body joints. Then a 1x1
spatial convolution runs, and after it a 9x1 temporal convolution along the
frames. This accelerator does two things to that network. Pruning removes
most of the work before it reaches hardware, and the hardware skips the work
that was pruned.

- **Input-channel pruning in the spatial stage.** The design multiplies the
  graph by each input channel separately, then weights the products by the
  convolution. A pruned input channel is then never read, so its graph
  product is skipped along with its convolution.
- **Cavity pruning in the temporal stage.** Every 9x1 kernel keeps a fixed,
  repeating pattern of taps. Small processing elements with fewer
  multipliers than kept weights handle it, and hand out work dynamically.
- **Compressed intermediate storage.** The network is built as a layer
  pipeline: all ten blocks work at once on different frames. Data between
  stages is stored compressed (RFC, runtime sparse feature compression):
  after ReLU about half of it is zero, and only the non-zero values are kept.

The RTL covers the ten convolution blocks, the compressed junctions between
them, and input skipping. The final pooling and fully connected classifier are
not built: the last block's output leaves on a valid/ready port.

## Data and configuration

- **Number format.** Every feature, weight and graph entry is a signed 16-bit
  Q8.8 number (`rfc_pkg::data_t`). Products accumulate in 40 bits. Each stage
  output is shifted back by 8 bits and saturated.
- **Feature order.** A feature tensor streams as one *vector* per
  (frame, joint), holding all channels. Frames are in time order and joints run
  0..24 inside each frame.
- **Loading.** Graph, weights, batch-norm scale/shift and keep lists are
  written once before a clip. They go over a single broadcast port, `cfg`:
  write enable, block number, table select and address, plus 16-bit data.

The address layout of each table:

| table (`cfg.sel`) | address |
|---|---|
| `CFG_GRAPH`   | `(k*25 + p)*25 + w` for G_k(p, w), k < 3 |
| `CFG_SWEIGHT` | `(k*KEPT + i)*OUT + oc` (only kept input channels) |
| `CFG_SBN`, `CFG_TBN` | `2*oc` scale, `2*oc+1` shift |
| `CFG_SKEEP`   | i-th kept SCM input channel |
| `CFG_TWEIGHT` | `((j*G + g)*9 + r)*NQ_MAX + q` for kept filter j, bank g, row r, kept tap q |
| `CFG_TKEEP`   | output channel of the j-th kept TCM filter |

The graph is A_k + B_k. The input-dependent attention graph C_k of 2s-AGCN is
dropped, as the pruned model drops it.

## The compressed junction (RFC)

This is the least conventional part. A junction (`rfc_junction`) sits between
every two compute stages, and the ReLU of the network is applied inside it. A
C-channel vector is cut into C/16 *banks* of 16 channels. Each bank goes
through three units.

- **Encoder.** `relu_encoder` is a 4-stage pipeline.
  - ReLU clears the negative values and builds a 16-bit *data-hot* code, with
    bit i set when channel i is positive.
  - The non-zero values are packed into the high slots: the highest non-zero
    channel goes to slot 15, the next to slot 14, and so on.
  - The packed bank is seen as four *mini-banks* of four slots. A 4-bit
    *mbhot* code says which ones hold data: for n non-zero values the first
    ceil(n/4) are used. Bit 3 is mini-bank 0.
  - Example: a hot code of `0001_1100_0000_0111` has six non-zero values, so
    mbhot is `1100`.
- **Bank storage.** `rfc_bank_storage` holds four mini-bank memories that are
  each four data wide.
  - Their depths are 4, 3, 2 and 1 times `BRAM_DEPTH`. Mini-bank m is only
    written by vectors with more than 4m non-zero values, and dense vectors are
    rare, so the tail mini-banks are shallow.
  - Each mini-bank has its own write and read pointer, which advance only when
    its mbhot bit is set. The data-hot and mbhot codes go into a FIFO of depth
    4·`BRAM_DEPTH`.
  - A store or a load takes one cycle. Mini-banks that are not enabled read as
    zero.
- **Decoder.** `rfc_decoder` is also four pipeline stages. Stage s takes
  compact slots 15-4s down to 12-4s and puts each one at the highest
  data-hot bit not yet used, which restores the sparse bank.

**Overflow.** If a dense run fills a tail mini-bank first, the vector is
truncated: its data in that mini-bank and the ones after it are dropped. The
hot and mbhot codes are trimmed to match, so the decoder reproduces the
truncated vector exactly, and `ovf` pulses. This is the price of sizing the
mini-banks for typical sparsity. A designer chooses the depth ratio from
measured per-layer sparsity. The fixed 4:3:2:1 ratio here is an assumption.

**Flow control.** `in_ready` stays high while the vector FIFO has room.
Vectors are read out of storage into an 8-entry output FIFO, which the
downstream consumer pops. When idle, a vector takes 11 cycles from input to
output: 4 to encode, 1 to store, 1 to read, 4 to decode and 1 in the FIFO.

## Spatial module (SCM)

`scm` loads one frame (25 vectors) and keeps only the pruned-in input
channels, listed by `CFG_SKEEP`. Its feature buffer holds one line of 25 joint
values per kept channel.

For each output joint w it walks the three graphs k, and for each k the kept
channels i. Each cycle it forms one graph product,
`sum_p feat[i][p] * G_k(p, w)`: one line times one graph column. It rounds the
product to Q8.8 and broadcasts it to `OUT/4` Mult-PEs (`mult_pe`). Each
Mult-PE has four multipliers, which multiply the product by the weights of
four output channels and accumulate.

After the last (k, i) for joint w, the sums pass through folded batch norm.
The same-width shortcut is then added: when the input and output widths are
equal, the input vector. The result is emitted. Pruned channels cost nothing,
and a frame takes `25 + 25*(3*KEPT + 3)` cycles.

## Temporal module (TCM) and the Dyn-Mult-PE

`tcm` keeps a sliding window of nine frames of features and their hot codes.
The window is 9 x 25 x C, and frame f sits in slot f mod 9. For every output
frame (stride 1 or 2, with zero padding of 4 frames at the clip ends) and
joint v, it issues one job per kept filter j and per 16-channel bank g. A job
goes to nine Dyn-Mult-PEs at once, one per kernel row (tap) r.

**Cavity pattern.** The pruning pattern cav-70-1 repeats every eight filters.
In it, three of the nine rows keep three taps of every eight and six rows keep
two. Across a 16-channel sub-filter, that is six kept weights in three rows
and four in the other six. A row's Dyn-Mult-PE therefore has six or four
queues, each tied to one kept weight. The exact positions of the kept taps in
`rfc_pkg::CAV70_1` are this design's choice; only their counts are fixed.

**Inside a Dyn-Mult-PE** (`dyn_mult_pe`):

- The feature hot code is ANDed with the weight mask, so zero features and
  pruned weights never take a queue.
- The surviving entries are served by `ND` multipliers, fewer than the number
  of queues. The first `ND` waiting queues are served each cycle.
- A job with n products takes `max(1, ceil(n/ND))` cycles. While it needs
  more than one, `dyn_stall` is high and the whole row group waits.
- The defaults are ND = 4 for six queues and ND = 3 for four.

**Result.** The nine row sums are added and accumulated over the banks of
filter j. The total is written to output channel `CFG_TKEEP[j]`.

**Filters.** Filters that were pruned (coarse pruning) are never computed: the
output is zero before the shortcut. The filters kept in block b are exactly the
input channels the SCM of block b+1 keeps.

**Per output frame.** Batch norm is applied and the centre input frame is
added as the shortcut. One output frame costs `25*KEPT_OC*C/16` jobs plus the
stall cycles plus 3.

## Putting it together

- **`conv_block`.** It chains SCM, junction and TCM.
- **`rfc_hypgcn_top`.**
  - **Input skipping.** It drops every odd frame of the raw clip, so 300
    frames become 150. `in_ready` stays high for dropped frames and
    `skip_cnt` counts them.
  - **Block chain.** Ten blocks run with 3→64, 64→64 (x3), 64→128,
    128→128 (x2), 128→256 and 256→256 (x2) channels. Stride 2 is used in
    blocks 5 and 8. Each block is followed by a junction.
  - **Concurrency.** All blocks run at the same time on different frames.
  - **Counters.** `ovf_cnt` and `dyn_stall_cnt` count overflows and PE stalls.
- **Kept input channels.** The defaults for each block
  (`BLK_KEPT = 3,38,48,51,54,61,64,77,13,20`) are read from a bar chart of
  the least aggressive pruning setting. They are estimates; set them to your
  own pruned model.

## Where this RTL departs from, or goes beyond, the original description

- **Not specified originally; chosen here:**
  - the bit width (Q8.8)
  - the valid/ready handshakes and the configuration bus
  - the mini-bank depth unit (512) and its 4:3:2:1 ratio
  - the truncation policy on overflow
  - the decoder's insides
  - the queue depth (1) and dispatch order of the Dyn-Mult-PE
  - the tap positions of cav-70-1
  - the number of Mult-PEs per SCM (one per four output channels)
  - one set of nine Dyn-Mult-PEs per TCM
  - which half of the frames input skipping drops
  - the junction's output FIFO
- **The DSP count "4/6".** The original gives the DSP count per Dyn-Mult-PE
  as "4/6". It is read here as 4 multipliers for a six-queue PE, and 3 for a
  four-queue PE by the same ratio. Both are parameters (`ND6`, `ND4`).
- **The worked encoding example.** The original says its example hot code
  holds five non-zero values, but the code has six ones. The RTL counts the
  ones. Both readings give mbhot `1100`.
- **Throughput.** It is not tuned to the published frame rate. The number of
  PEs per layer, used originally to balance the pipeline, was not given.
- **Not built:** the pooling/FC classifier and the DRAM input path. The
  top's `in_*` and `out_*` ports stand in for them.

## Simulating

Each testbench is self-checking: it prints
`TB_RESULT checks=N failures=M`. The reference models in `tb/tb_ref_pkg.sv`
compute the SCM and TCM directly from their definitions, with the same
rounding. For example:

    verilator --binary --timing --assert rtl/rfc_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv \
        tb/tb_rfc_hypgcn_top.sv --top-module tb_rfc_hypgcn_top
    ./obj_dir/Vtb_rfc_hypgcn_top

| testbench | what it checks |
|---|---|
| `tb_relu_encoder` | packing, hot and mbhot codes against a model; the worked example |
| `tb_rfc_decoder` | random compact banks decode to the original |
| `tb_rfc_bank_storage` | storage against a queue model, including overflow truncation |
| `tb_rfc_junction` | 11-cycle latency, backpressure, full, forced overflow |
| `tb_mult_pe` | accumulate and restart |
| `tb_dyn_mult_pe` | sums and the exact cycle count and stalls of each job |
| `tb_scm` | outputs with channel skipping and shortcut; frame time |
| `tb_tcm` | outputs of a pruned, masked TCM over two clips; stalls; compute cycles |
| `tb_conv_block` | a block with stride 2 against SCM→ReLU→TCM |
| `tb_rfc_hypgcn_top` | a two-block network end to end, with one clip compared against the reference and one driven into overflow; counts input skips, channel skips, pruned filters, stride, PE stalls, overflows and sparse vectors, and fails if any never happened |

**Sizes.** The end-to-end test runs at a reduced size: two blocks of 16
channels, 12 raw frames and 64-word mini-bank units. The largest simulated
configuration is the 32-channel TCM and junction tests. A full-size run is
not included: ten blocks of up to 256 channels over 150 frames need on the
order of a million cycles of a very wide design, which is beyond a practical
Verilator run. All default-size modules are checked only by compilation.
