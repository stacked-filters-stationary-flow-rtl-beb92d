# A sparse CNN layer engine with stacked stationary filters

Pruned convolutional networks keep only a third of their weights or less, but
a processor gains nothing from that unless it can skip the zeros without
searching for them. This design does it by choosing the loop order and the
weight layout together:

* **Stacked filters stationary (SFS) flow.** A batch of `m` filters is held
  on chip, one input channel at a time. For that channel a `K x K` window of
  input features is taken, and every window element `V[r][c]` is multiplied
  with the *column* of `m` weights that the batch's filters have at kernel
  position `(r, c)`. The `m` results go to `m` different output channels of
  the same output pixel. Input channels form the outermost loop, so the
  output pixels hold partial sums until the last channel is done.
* **Relative-indexed compressed sparse filter (CSF) format.** Because a
  window element meets a whole column of weights, the weights are stored
  column by column: all `m` filters at position 11, then all at 12, and so
  on. Zeros are dropped. Each kept weight carries a small *relative index*,
  the number of zeros dropped just before it. A column's entries are
  therefore read in order, one after another, and the filter each one
  belongs to is found by adding. No pointer chasing is needed.

The RTL here is a complete layer engine built around this idea. The kernel
size is 3 (`K = 3`), the batch size is 16 (`m = 16`), data are 8-bit signed
and sums are 32-bit. It covers one convolution layer: the filters and the
input map are loaded, the engine runs, and it writes out the output map
after activation, optional pooling and requantisation.

## The CSF stream and how it is decoded

Take one filter batch `n` and one input channel `chi`. Its `K*K*m` weights
are listed in position order

    pos = (r*K + c)*m + j        kernel row r, kernel column c, filter j

Only the nonzero weights are stored, as pairs `(value, rel)`, where `rel`
counts the zeros since the previous stored pair. Decoding is just a running
sum:

    pos_i = pos_(i-1) + 1 + rel_i        (pos_(-1) = -1)
    column = pos_i div m   (kernel position r*K + c)
    filter = pos_i mod m

`rel` is `IDXW = 3` bits wide. A run of more than 7 zeros is broken by a
*padding entry* `(0, 7)`. That entry stands for a real zero weight 8
positions on, so it is multiplied like any other entry and adds nothing.
Choosing `IDXW` per layer trades index bits against padding entries. The
SFS order makes zero runs short, so few padding entries are needed.

Example, `m = 4`, one column `0 5 0 0` followed by the column `0 0 0 -3`:

| stored entry | rel | decoded pos | column | filter |
|--------------|-----|-------------|--------|--------|
| 5            | 1   | 1           | 0      | 1      |
| -3           | 5   | 7           | 1      | 3      |

The stream in memory has no column pointers, because the running position
marks the column boundaries. When the local filter buffer loads a stream
(`local_filter_buffer.sv`), it splits the stream into `K*K` per-column lists
so that all kernel positions can be read at once. Each list entry keeps its
value and a relative index *re-based to its column*: 1 for the `5`, and 3
(not 5) for the `-3`. Each column also gets an entry count (the "relative
column pointer"). An entry that decodes past the last column is dropped and
sets `lfb_overflow`.

## Datapath

    host ports ─► global feature buffer ─(K rows / cycle)─► line buffer (K x W_MAX)
                                                               │ leftmost K columns
                                                               ▼
    host ports ─► global filter buffer ─(1 entry / cycle)─► local filter buffer   window registers
                  (CSF streams + start table)                (K*K column lists)    (K*K values)
                                                               │ per lane            │ per lane
                                                               ▼                     ▼
                                         lane k = 0..K*K-1:  walk column k, decode filter j
                                                               ▼
                                                       computation FIFO k
                                                               ▼
                                                       PE lane k: w * V[k]
                                                               ▼
                                       local output registers: m accumulators, adder per filter
                                                               │ read-modify-write per position
                                                               ▼
                                       global output buffer (partial sums, one word per pixel)
                                                               ▼
                                       NL (ReLU) ─► Pool (2x2 max) ─► output format ─► out_*

### Main process unit: where the sparsity is used

`main_process_unit.sv` computes the `m` outputs of one output pixel for one
input channel. It has `K*K = 9` lanes, one per window element. When `start`
is given, lane `k` steps through the entries of column `k`, one per cycle.
For each entry it forms the absolute filter index `j = j_prev + 1 + rel` and
pushes `(weight, V[k], j)` into its computation FIFO. The lane's multiplier
pops the FIFO every cycle. One cycle later its product reaches the local
output registers, and accumulator `j` adds it there. Several lanes can hit
the same filter in the same cycle, so every accumulator has its own adder
over all 9 lanes.

Zero weights cost nothing: a lane only visits kept entries. The lanes start
together on every pixel, and the pixel is done when the longest column is
done. With `L` the largest column count, `done` comes `L + 3` cycles after
`start` (1 cycle when every column is empty). The testbenches check this
latency for every pixel. Lanes with short columns sit idle while the longest
one finishes. On random weights at AlexNet conv3 density (35 % kept) the
lanes are busy about 50 % of the time. The 97 % figure below counts
something else: how many of the MACs actually performed use nonzero weights.

### Line buffer and window

The line buffer holds `K` input rows of `W_MAX = 32` values and shifts left
by one column for each column that enters on the right. For output row `y`,
the controller loads rows `S*y .. S*y+K-1` of the current channel. It reads
one `K`-value column per cycle from the `K`-port global feature buffer, and
fills the columns past the real width `W` with zeros, so that column 0 ends
up leftmost. The window registers copy the leftmost `K x K` block. Moving to
the next output column means shifting `S` (stride) more columns.

### Partial sums and post-processing

After a pixel is done, the controller writes the `m` accumulator values to
word `y*W' + x` of the global output buffer. From the second input channel
on it first adds the word already stored there. (It reads that word while
the lanes are still working, so the write takes no extra cycle.) After the
last channel of a batch, the buffer is read in pooling order. Each value
then goes through ReLU (if `relu_en`), a 2x2 stride-2 max pool (if
`pool_en`), and an arithmetic right shift by `out_shift` with saturation to
8 bits. One output word of `m` channels leaves on `out_valid / out_addr /
out_data` per output pixel. The next filter batch then starts again from the
first input channel.

## Sequencing (`center_controller.sv`)

For `n` in `0 .. M'-1`, then for `chi` in `0 .. C-1`:

1. Read the start table entries `t = n*C + chi` and `t+1`. Clear the local
   filter buffer and stream entries `start[t] .. start[t+1]-1` into it, one
   per cycle.
2. For each output row `y`, load the line buffer (`W_MAX` cycles). Then, for
   each output column `x`: load the window, start the main process unit and
   read the old partial sum. On `done`, write the new partial sum, then
   shift `S` columns.
3. After the last channel, run the post-processing pass over the batch's
   `H' x W'` map (`W' = (W-K)/S + 1`).

A position therefore takes about `L + 3` cycles plus 3 cycles of control
(window load, start, write-back) plus `S` shift cycles. Each output row also
costs `W_MAX + 2` cycles of line-buffer loading, and each channel costs
about 3 cycles plus one cycle per stream entry. The controller does not
overlap these steps.

## Using the engine

Parameters (all in `sfs_top`, defaults in `sfs_pkg`): `K = 3`,
`M_BATCH = 16`, `FW = WW = 8`, `IDXW = 3`, `ACCW = 32`, `W_MAX = H_MAX = 32`,
`C_MAX = 256`, `NB_MAX = 24` (up to 384 filters per layer),
`FILT_DEPTH = 2^19` CSF entries, `FIFO_DEPTH = 4`. Together they hold one
3x3 layer of AlexNet's size (conv3: 256 channels, 384 filters, 15x15 padded
input).

Before `start`, and while `busy` is low, load the following:

* **Features** through `feat_wr_*`: `V[chi][row][x]` at word
  `(chi*H + row)*W + x`. Border zero padding, if the layer has any, must
  already be part of the map.
* **CSF entries** through `filt_wr_*`: the streams of all `(n, chi)` pairs,
  each in the order above, in any placement.
* **Stream start table** through `tbl_wr_*`: entry `t = n*C + chi` gives the
  first address of stream `t`, and entry `M'*C` gives the end of the last
  stream. Streams must be laid out in order, because stream `t` ends where
  stream `t+1` starts.
* **`cfg`** (`layer_cfg_t`): `c`, `h`, `w`, `s`, `nb` (= `M'`), `relu_en`,
  `pool_en`, `out_shift`. It is sampled at `start`.

A fully connected layer with `9*C` inputs runs as a layer with `H = W = 3`
and `S = 1`. Its one output pixel holds the `m` outputs of each batch. The
inputs are laid out as `C` channels of 3x3, and each filter's weights are
laid out the same way.

Results: output word `n*HP*WP + py*WP + px` holds output channels
`n*m .. n*m+m-1` of pixel `(py, px)`. Here `HP x WP` is the pooled size, or
`H' x W'` without pooling. `done` pulses when the layer is finished.

## Verification

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`).
Each compares the module against values worked out independently, and each
ends with a `TB_RESULT checks=.. failures=..` line. In particular:

* `tb_local_filter_buffer` encodes random weights, with padding entries, and
  rebuilds the dense weights from the column lists.
* `tb_main_process_unit` checks both the sums and the `L+3` latency on
  random sparse columns.
* `tb_sfs_top` runs the whole engine at its default sizes on four layers
  and one malformed stream. The layers cover several batches, stride 1 and
  2, pooling on and off, ReLU, saturation, padding entries, rows narrower
  than `W_MAX`, and a fully connected layer. The malformed stream must raise
  the overflow flag. It counts each of these events and fails if
  one never happened.
* `tb_alexnet_conv` runs AlexNet conv3 and one group each of conv4 and conv5
  at the engine's default sizes. The weights are random at the pruned
  densities (35 % / 37 % / 37 %) and the results are checked against a
  reference convolution. It finishes in under a minute of simulation. It
  reports about 318,700 CSF entries for conv3, 96.9-97.5 % of performed MACs
  on nonzero weights (the rest are padding entries) and 50 % lane occupancy.

To run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/sfs_pkg.sv \
        tb/tb_sfs_top.sv --top-module tb_sfs_top -o sim
    ./obj_dir/sim

## Where this design goes beyond, or departs from, the proposal

The flow, the CSF format, the split of the engine into global buffers, line
buffer, window registers, local filter buffer, per-position computation
FIFOs, PE lanes, local output registers, global output buffer and the NL,
pool and output-format stages all follow the proposal. The proposal gives
no sizes, widths, protocols or timing, so the following are this design's
own choices:

* All sizes and widths: `m = 16`, 8-bit data, 32-bit sums, 3-bit relative
  index (the proposal picks 1 to 5 bits per layer), and buffer depths.
* One MAC per lane per cycle, and all lanes start together on each output
  pixel.
* The local output registers keep one row of `m` accumulators. The proposal's
  drawing shows several rows labelled "output feature offset", which
  suggests several pixels in flight, but their use is not described.
* The start table that locates a channel's stream; re-basing relative
  indices to the column start in the local buffer; the overflow flag.
* NL is ReLU, Pool is 2x2/2 max pooling, and "output data format" is
  shift-and-saturate. The proposal only names these stages. AlexNet's 3x3
  stride-2 pooling is not supported.
* No border padding in hardware, no tiling of maps wider than `W_MAX`, and
  no overlap of filter loading, row loading and computing.
* The kernel size is fixed at 3 by the datapath, so 1x1, 5x5, 7x7 and 11x11
  layers (AlexNet conv1/conv2, SqueezeNet conv1) do not run as they are. Fully
  connected layers of real size (more than `C_MAX` = 256 channels of 3x3, or
  more than 384 outputs) must be split by the host.
* The off-chip memories are outside the design. Their side of the buffers is
  the host write ports and the `out_*` port.
