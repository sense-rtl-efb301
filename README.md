# Sense: a sparse-CNN accelerator on a weight-oriented systolic array

Pruned CNNs have zero weights and, after ReLU, many zero activations. A dense
systolic array wastes its MACs on them and moves them through memory. This
design skips zeros on both sides. It runs the sparse data on an N x N
systolic array (32 x 32 by default) without losing the array's regular
structure, using three ideas:

1. **Weight-oriented dataflow.** Each PE holds one non-zero weight at a time.
   Every non-zero IFM element of its input channel streams past. Each product
   is added into a small per-PE partial-sum (Psum) buffer at the address
   `(I_row - W_row) * W_o + (I_col - W_col)`, computed from the two
   elements' positions. Zeros never reach a multiplier, and no index
   matching is needed: every pair of non-zeros meets exactly once.
2. **Load balancing by channel clustering.** A PE row's run time is set by
   its number of non-zeros. When a layer's outputs are written back, the
   channels are counted and ranked by non-zero count. The next layer then
   feeds channels with similar counts to the rows of one pass, so rows finish
   at about the same time.
3. **Adaptive reuse order.** Per layer, the order of the tile loops is either
   Reuse-IFM-First (RIF: keep an input tile, cycle through output-channel
   groups) or Reuse-Weight-First (RWF: keep weights, cycle through tiles).
   The order with fewer DRAM reads is chosen from a closed-form estimate.

All data in DRAM is stored **compressed as blocks**: a 16-bit `data_length`,
a bitmap (one bit per element, 16 bits per word, element 0 in bit 0), then
the non-zero elements (NZEs) in order.

## Data path at a glance

```
 DRAM (32-bit word port)
   |  compressed IFM blocks (one per input channel of the pass)
   |  compressed kernels   (one per input/output channel pair)
   v
 I&W buffer, one per PE row ---- bitmap decoder -> (row, col) of every NZE
   |  ping-pong banks: one is loaded while the other feeds the array
   v  token stream: N_PE weight tokens, then the row's IFM NZEs, repeated
 PE array N_PE x N_PE   row r = input channel, column c = output channel
   |  drain: Psum buffers summed up each column (sparse)
   |  or plain column sums (dense)
   v
 per column: post-processing (ReLU, 2x2 max pool) -> output buffer
   (ping-pong) -> compression module (bitmap block)
   v
 channel clustering: per-channel FIFOs, NZE counters, merge-sort ranking
   v
 DRAM (compressed OFM blocks, channel index table for the next layer)
```

`top_controller` sequences this for one CONV layer per `start` pulse.
`dataflow_cfg` is a separate combinational helper. It computes the DRAM cost
of RIF and RWF for a layer and gives the choice to put in the configuration.

## The PE and its address arithmetic (`pe`, `psum_buffer`)

This is the core of the design and the least obvious part.

A PE row carries a **token pipeline**. A token is either a *weight* tagged
with a destination column, or an *IFM NZE* with its tile coordinates
`(r, c)`. Tokens move one PE to the right per cycle. A weight token is
latched only by the PE whose `COL` parameter matches, so a sequence of N
weight tokens loads one non-zero weight into every PE of the row. The IFM
NZEs that follow are used by every PE of the row, each with its own weight.

For an IFM token the PE computes

```
prow = I_row - W_row,   pcol = I_col - W_col
valid = 0 <= prow < H_o  and  0 <= pcol < W_o
addr  = prow * W_o + pcol          (6 bits: 64-entry buffer)
```

The MAC is **gated** when the location is invalid or either operand is
zero. A gated MAC writes nothing to the buffer. Otherwise the product is
added into the Psum buffer with a one-cycle read-modify-write: the buffer is
a 64 x 16-bit LUT-style RAM with asynchronous read and synchronous write.

Worked example (checked in `tb_pe`): a 3 x 3 output tile (`W_o = H_o = 3`),
IFM values 10, 20, 30, 40 on the diagonal (0,0)..(3,3), and weights 10 at
(0,0) and 20 at (1,1). The first weight contributes 100, 200, 300 at
addresses 0, 4, 8. The second contributes 400, 600, 800 at 0, 4, 8. The
totals are 500, 800 and 1100, from 6 valid MACs.

Arithmetic is 16-bit two's complement. The 32-bit product is cut to bits
`[FRAC+15:FRAC]` (parameter `FRAC`, default 0 = integer), and Psums wrap at
16 bits.

**Drain.** All input channels of one output block are handled by the
different rows and by successive passes. Each PE's buffer therefore holds
part of the same output tile. To read the tile out, drain tokens
(an address) enter every column from the bottom. Each PE adds its buffer
entry at that address to the sum coming from below, passes it up, and
clears the entry. The top of the column gives the finished output element,
so the buffers are empty again for the next output block. Each PE also keeps
a valid bit per buffer entry. This makes a never-written entry read 0 after
reset.

**Dense mode.** When sparsity is low, the buffer and address unit are
switched off. The products of a column are summed through the `psum_in ->
psum_out` chain, like a classic output-stationary column sum. Rows get their
tokens with a skew of `r` cycles (registers in `pe_array`) so that the
partial sums line up. The bottom PE (`CHAIN_HEAD`) computes the output
address, which travels up with the sum. Dense mode needs blocks stored with
an all-ones bitmap.

## I&W buffer (`iw_buffer`, `bitmap_decoder`)

Each PE row has one I&W buffer. It has two banks, used ping-pong: the
controller loads one while the other feeds the array. A bank holds:

- the IFM NZEs of one input channel, with their locations
  (up to `IMAX = 256`, enough for a 16 x 16 tile);
- for each of the N_PE columns, that channel's kernel NZEs with locations
  (up to `KMAX = 32` per kernel).

Loading takes the compressed block as 16-bit halves: the length, then the
bitmap words, then the NZEs. The `bitmap_decoder` turns bitmap bits into
`(row, col)` pairs for a tile of the given width. It takes one cycle per
bit, plus one cycle per 16-bit word.

Replay is the weight-oriented loop. For weight step `f` = 0 ..
`N_NZEW_MAX-1`, the buffer sends the f-th NZE of every column's kernel as N
weight tokens. A kernel with fewer NZEs sends a zero weight. Then it sends
all IFM NZEs of the row. `N_NZEW_MAX` (most NZEs in any kernel) is part of
the layer configuration, because weights are known offline. The longest IFM
list of the pass is measured during loading, and every row is padded to it
so that all rows stay in step. A pass takes
`N_NZEW_MAX * (N_PE + N_NZEI_MAX)` cycles. The loader also reports each
bank's IFM length, which is where clustering pays off: similar lengths mean
little padding.

## PE array (`pe_array`)

The array is N_PE x N_PE PEs. Row pipelines run left to right. Drain,
address and Psum chains run bottom to top. Each column's top output feeds
that column's post-processing. `mac_en` of every PE is exported, so the top
level can count the MACs actually performed.

## Output side (`post_pro`, `output_buffer`, `compre_module`)

- **`post_pro`** takes the drained tile in raster order. It applies optional
  ReLU and optional 2 x 2, stride-2 max pooling (odd edges are dropped). For
  pooling it keeps one line of partial maxima.
- **`output_buffer`** has two banks of 64 x 16 bits. One fills while the
  other is read out. While a bank is read, the buffer counts its non-zeros
  for the clustering unit. A dense-mode accumulate port adds column sums
  from successive input groups into one bank.
- **`compre_module`** turns the element stream back into a compressed block:
  the length, the bitmap words, then the NZEs. The output is 16-bit halves
  with ready/valid handshaking.

## Channel clustering (`channel_clustering`, `merge_sorter`)

The N_PE compression modules produce output channels in parallel. The
clustering unit has a crossbar and one FIFO per column. They pack each
channel's 16-bit halves in pairs into 32-bit words and send the words to
DRAM round-robin, each channel to its own address range.

Each column also writes its output block's NZE count into an **NZE number
buffer**. This buffer is banked per column: column c only ever writes
channels `g*N_PE + c`, so each bank has one write port. Counts from several
tiles add up.

At the end of a layer, each group of N_PE channels is ranked by a bottom-up
**merge sort**: descending count, with ties kept in channel order. It needs
`N log2 N` comparison steps for N keys. The result goes into the **channel
index buffer**. When the next layer is started with `use_cluster`, the
controller maps "row r of input group e" to channel `index[e*N_PE + r]`.
The array then processes channels of similar density together. Ranking is
within groups of N_PE channels, not across the whole layer. Channels that
don't exist (layer width not a multiple of N_PE) count 0 and rank last.

## Controller and reuse (`top_controller`, `dataflow_cfg`)

The loop nest, outer to inner, is

```
a < T_oc_outer, b < T_row, c < T_col, d < T_oc_inner, e < T_ic :
    one pass = stream the bank of (tile b,c; input group e; output group) through the array
```

RIF uses `T_oc_outer = 1, T_oc_inner = T_oc`. RWF uses the reverse. After
the last input group `e` of an output block, the controller drains the
array, post-processes and compresses the block, and writes it back.

Two processes share the ping-pong banks:

- the **loader** prepares pass p+1;
- the **computer** runs pass p.

Each bank remembers which IFM tile/group and which weight group it holds. If
the next pass that uses the bank needs the same data, the load is skipped.
This tag check is how the RIF or RWF order turns into fewer DRAM reads.
`stat_ifm_reuse` and `stat_w_reuse` count the loads skipped.

`dataflow_cfg` evaluates, with I_mem / W_mem the IFM / weight size of a
layer in elements:

```
D_RIF = W_mem * T_row * T_col + I_mem
D_RWF = I_mem * T_oc + W_mem     (or I_mem + W_mem if all weights fit on chip)
```

It chooses the smaller one; a tie chooses RIF.

## Memory layout and interface (`sense_top`)

Memory is reached through a simple word port, not an AXI bus:

- **Read:** `mem_rd_en` with `mem_rd_addr`. One word comes back later with
  `mem_rd_valid`. One request is outstanding at a time.
- **Write:** `mem_wr_en` with address and data. The write is accepted when
  `mem_wr_ready` is high.

All addresses are 32-bit word addresses. Each half of a 32-bit word holds
16 bits. Block placement is given by base and stride fields of
`layer_cfg_t` (see `sense_pkg`):

- IFM block (tile t, channel i) at `i_base + (t*C_i + i) * i_stride`
- kernel (o, i) at `w_base + (o*C_i + i) * w_stride`
- OFM block (tile t, channel o) at `o_base + (t*C_o + o) * o_stride`

The OFM blocks of one layer are in the format the next layer reads. The
only thing the host must re-tile between layers is the halo (see
departures). `stat_*` outputs count passes, loads, reuse hits and MACs.

## Departures from the original design and limits

- **Convolution only, stride 1.** Fully connected layers (an outer-product
  mode where the Psum address is the weight row) are not built. Neither are
  strides above 1.
- **Output tiles are independent.** The host must provide IFM tiles
  including their halo (`H_o + K_h - 1` rows). OFM blocks are written per
  tile without the overlap the next layer needs.
- **Post-processing** is ReLU plus 2 x 2 / 2 max pooling inside one tile.
  Dense-mode results bypass it.
- **Weights travel on the IFM row pipeline** as column-tagged tokens. A
  weight step therefore costs N_PE cycles. The original description does
  not say how weights reach the PEs.
- **Reuse is by bank tags** with strict bank alternation. It skips reloads
  whenever the next pass in the same bank needs the same IFM or weights. It
  is not a full scheduling of which data stays resident.
- **No overlap of output and compute.** Drain, compression and write-back
  happen between output blocks, not in parallel with the next block.
- **Per-PE worked example.** The original text gives addresses "4 and 9"
  and sums "400, 600, 400" for a 3 x 3 example, which do not match its own
  address formula. This design follows the formula (addresses 0, 4, 8).
- **RIF cost formula.** The formula there multiplies by `T_row * T_row`,
  while the text says `T_col * T_row`; `T_col * T_row` is used. One table
  row (a large late layer) lists values the formulas do not reproduce; the
  choice is the same either way.
- **Not included:** the DDR controller, the AXI bus, and the offline
  software (pruning, N_NZEW_MAX, data layout). The default build has
  fixed-point position `FRAC = 0` and no timing closure; the 200 MHz target
  is not verified.

## Files

| file | contents |
|---|---|
| `rtl/sense_pkg.sv` | widths, token/drain/config types |
| `rtl/psum_buffer.sv`, `rtl/pe.sv`, `rtl/pe_array.sv` | PE and array |
| `rtl/bitmap_decoder.sv`, `rtl/iw_buffer.sv` | per-row input buffer |
| `rtl/post_pro.sv`, `rtl/output_buffer.sv`, `rtl/compre_module.sv` | per-column output path |
| `rtl/merge_sorter.sv`, `rtl/channel_clustering.sv` | ranking and write-back packing |
| `rtl/dataflow_cfg.sv`, `rtl/top_controller.sv`, `rtl/sense_top.sv` | control and top level |
| `tb/tb_<module>.sv` | self-checking testbench per module |
| `tb/tb_sense_top.sv` | end-to-end, small array (4 x 4), several layers and modes |
| `tb/tb_sense_full.sv` | end-to-end at the default 32 x 32 size |

## Simulating

Each testbench is self-checking. It prints
`TB_RESULT checks=<n> failures=<m>` and ends with `$finish`. A watchdog stops
it if it hangs. Tested with Verilator 5.

```sh
# one block, e.g. the PE
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/sense_pkg.sv rtl/*.sv tb/tb_pe.sv --top-module tb_pe -Mdir obj_pe
./obj_pe/Vtb_pe

# the full-size end-to-end test (32 x 32 array; build takes a few minutes)
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/sense_pkg.sv rtl/*.sv tb/tb_sense_full.sv --top-module tb_sense_full -Mdir obj_full -j 4
./obj_full/Vtb_sense_full
```

`rtl/sense_pkg.sv` appears twice in these commands, once explicitly and
once through the glob. Verilator accepts this. To avoid it, list the package
first and then the other files by name. Add `+verilator+rand+reset+2` at run
time to start from random register contents.

What the end-to-end tests cover:

- **Reference model.** The behavioural DRAM model generates random sparse
  IFMs (about half zeros) and pruned kernels. It compresses them into
  blocks, and computes the expected outputs with a reference convolution
  (16-bit wrap, ReLU, pooling).
- **Block-by-block comparison.** After each layer, every OFM block is read
  back from memory, decompressed and compared with the reference.
- **Channel ranking.** The ranking is checked against the measured NZE
  counts.
- **Mechanism counts.** The testbench counts how often each mechanism
  fired. These include IFM and weight reuse, RIF and RWF, clustered input
  order, ReLU clipping, pooling, dense mode, gated MACs and empty rows.

## Changing the design

- **Array size:** `N_PE` on `sense_top`; COLIDW in the package limits it to
  64.
- **Tile and kernel capacity:** `IMAX`, `KMAX`. Coordinates are 4 bits
  (`LOCW`), so tiles are at most 16 x 16. The Psum buffer has
  `PSUM_DEPTH = 64` entries, so `H_o * W_o <= 64`.
- **Maximum layer width:** `MAX_CH`.
- **Fixed-point scaling of products:** `FRAC`.
