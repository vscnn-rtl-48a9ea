# VSCNN: a convolution accelerator that skips zero vectors

Pruned CNNs and ReLU activations leave many zeros in weights and activations.
Skipping individual zeros ("fine-grained" sparsity) makes an accelerator
irregular: every nonzero needs its own index, the multiplier array needs a
crossbar, and the results arrive in scrambled order. This design takes a
coarser unit. Activations and weights are handled as short one-dimensional
**vectors**: 7 vertically adjacent activations of one image column, and one
column (3 taps) of a 3x3 kernel. A vector that is entirely zero is simply not
stored, so it is never fetched and never costs a cycle. Everything that is
computed is still a dense 7x3 outer product on a regular PE grid, and one small
index per vector tells the accumulator where its results go. Dense networks
run through exactly the same hardware with every vector stored.

The RTL here implements that architecture in SystemVerilog, in the
configuration of eight PE blocks of 7 rows x 3 columns (168 multipliers) with
16-bit data. It is synthesizable, self-checking testbenches cover every
module, and an end-to-end testbench compares whole layers against a
convolution computed in the testbench.

## 1. The vector outer product

Take a 3x3 convolution, stride 1, zero padding 1:

    O[y][x] = sum over dy, dx of I[y+dy-1][x+dx-1] * W[dy][dx]

Fix one input column `x` and one kernel column `dx`. Every product
`I[yi][x] * W[dy][dx]` belongs to output column `xo = x - dx + 1` and output
row `yo = yi - dy + 1`. So the products of one input column vector and one
kernel column vector all land in a single output column, and the ones that
belong to the same output row are exactly those with the same `yi - dy`.

A PE block is a 7 x 3 grid. Row `r` receives input element `I[y0+r]`
(broadcast along the row), column `c` receives weight `W[c][dx]` (broadcast
down the column), and PE(r,c) forms their product. Products with equal
`r - c` share an output row, and they lie on a diagonal of the grid. Each PE
therefore adds its product to the partial sum of its upper-left neighbour
and passes the result on diagonally. All of this happens within one clock
cycle. The diagonals end either in the right column or on the bottom row,
which gives 7 + 2 = 9 partial outputs per cycle:

| block output `j` | taken from | output row |
|---|---|---|
| 0 .. 6 | right column, row `j` | `y0 + j - 1` |
| 7 | bottom of column 1 | `y0 + 7 - 1` |
| 8 | bottom of column 0 | `y0 + 8 - 1` |

Outputs 0, 7 and 8 are incomplete: they are missing products whose input
rows lie in the neighbouring 7-row tiles. These partial outputs are not thrown
away. The accumulator adds them into the right rows, so the missing pieces
arrive when the neighbouring tile's vector is processed. At the image edge the
same rows fall outside the image (row -1, row `H`) or into padding columns
(`xo = -1` or `xo = W`), and the accumulator drops them.

PEs in the first row and first column have no upper-left neighbour and hold
only a multiplier. The others hold a multiplier and an adder (`vs_pe`,
`vs_pe_block`).

### Worked example: 5x5 input, one channel

With a 5x5 image (one row tile; rows 5 and 6 of the tile are zero padding) and
input columns A..E and kernel columns WA..WC, the dense schedule is:

| cycle | 1 | 2 | 3 | 4 | 5 | 6 | 7 | ... | 15 |
|---|---|---|---|---|---|---|---|---|---|
| input vector | A | A | A | B | B | B | C | ... | E |
| weight vector | WA | WB | WC | WA | WB | WC | WA | ... | WC |
| output column | B | A | (none) | C | B | A | D | ... | D |

This takes 15 cycles. If input column B and kernel column WC are all zero,
they are not stored, and the schedule becomes A/WA, A/WB, C/WA, C/WB, D/WA,
D/WB, E/WA, E/WB. That is 8 cycles, with output columns B, A, D, C, E, D, (F,
dropped), E. The end-to-end testbench checks both cycle counts.

## 2. Vectors in memory: the index system

The sparsity mechanism lives entirely in how the buffers are filled and
walked.

**Input buffer** (`vs_input_sram`). Each entry (`in_entry_t`) holds one input
vector: 7 activations and the tag `{last, ch, x, ty}`. Here `ch` is the input
channel, `x` the column and `ty` the row tile, covering rows `7*ty .. 7*ty+6`.
Entries are sorted by channel, then column, then row tile. `last` marks the
final stored vector of a channel. In sparse operation only vectors with a
nonzero element are stored. In dense operation all of them are.

**Weight buffer** (`vs_weight_sram`). Each entry (`wt_entry_t`) holds one kernel
column `dx` of one (filter, channel) pair: 3 taps `W[0..2][dx]` and the tag
`{last, ch, dx}`. A filter's entries are contiguous and sorted by channel.
`last` marks the final stored column of a (filter, channel) pair. A pointer
table gives each filter's first entry. Filter `k` occupies
`[ptr[k], ptr[k+1])`.

**Output buffer** (`vs_output_sram`). Finished output vectors are written in
the input buffer's format, channel = filter number. In sparse operation
all-zero output vectors are dropped, and the `last` flags are set on the fly.
The output list of one layer can therefore be copied verbatim into the input
buffer for the next layer.

**Block scheduler** (`vs_lane_sched`, one per PE block). It walks the input
list and its filter's weight list side by side, like a merge join on the
channel. Each cycle it does exactly one thing:

* The current weight vector's channel is below the input's: skip the weight
  vector (idle cycle).
* The channels are equal: issue the pair with `xo = x - dx + 1` and `ty`.
  Then step to the next weight vector. After the channel's last weight
  vector, step to the next input vector instead, and rewind the weight
  pointer to the first weight vector of the channel. If the input vector was
  the channel's last, move on past the channel.
* Otherwise the input's channel has no stored weights: skip the input vector
  (idle cycle).
* Either list is used up: done.

An input vector is therefore held while each stored kernel column of its
channel is applied to it in turn, as in the table above. Idle cycles occur
only where one side has vectors of a channel and the other has none.

## 3. Eight blocks, eight filters

The array (`vs_pe_array`) has eight blocks. Each block has its own 7-element
input bus and 3-element weight bus (56 x 16 and 24 x 16 bits in all). Each
block computes a different filter, with its own scheduler and its own plane
of the partial-sum buffer. The blocks never write the same partial sum, and
each skips its own zero weight vectors independently. They only meet at the
end of a pass, when the controller waits for the slowest block. A layer with
more than 8 filters takes `ceil(K/8)` passes. Each pass reads the whole input
list again.

A register after the array hands 8 x 9 partial outputs (72 x 16 bits) with
their indices to the accumulator (`vs_accumulator`). The accumulator adds
each one into its (filter, row, column) word in a single read-modify-write
cycle, saturating at 16 bits. It drops rows outside `0..H-1` and columns
outside `0..W-1`.

## 4. Number format

Activations and weights are signed 16-bit Q8.8. Inside a block the products
and diagonal sums are exact (36 bits). Each of the 9 block outputs is then
shifted right by 8 and saturated to 16 bits, because the array-to-accumulator
bus is 16 bits wide. Consequently every issued vector pair rounds its
contribution toward minus infinity once. The testbench reference model does
the same. Accumulation saturates at 16 bits.

Post processing (`vs_post_proc`) turns each finished 7-element vector into
`sat16((v * scale) >>> shift)` and applies ReLU if enabled. It also detects
whether the vector has any nonzero element. `scale` and `shift` are per-layer
registers. With scale = 256 and shift = 8 the data passes unchanged.

## 5. Layer sequence and timing

The system controller (`vs_sys_ctrl`) runs a layer as follows, and repeats
the pass steps for each group of 8 filters:

1. **CLEAR**: at the start of a layer the partial-sum buffer is swept to
   zero, one column per cycle (56 cycles). Later passes find it already
   empty, because the drain clears every word it reads, so they wait only
   one cycle.
2. **LSTART**, 1 cycle: the schedulers load their pointers. Block `b` gets
   filter `k_base + b`. Blocks without a filter finish at once.
3. **COMPUTE**: each scheduler issues up to one vector pair per cycle. The
   pass ends when all eight have finished, about (pairs of the busiest
   block) + 2 cycles.
4. **FLUSH**, 3 cycles: an issued pair passes the op register, the array
   register and the accumulator write.
5. **DRAIN**: one 7-element vector per cycle (block, then column, then row
   tile) goes from the accumulator through post processing into the output
   buffer. The words read are cleared on the same clock edge. This takes (filters in the pass) x W x ceil(H/7) cycles.
6. **PFLUSH**, 2 cycles.

When all passes are done the controller enters DONE (`done_o` high), and one
cycle later the last `last` flag is set. `comp_cyc_o` counts the COMPUTE
cycles of the layer and `ops_o` the vector pairs issued. Their ratio is the
multiplier-array utilisation.

Drain does not overlap with compute. For a layer with few input channels the
drain time is comparable to the compute time.

## 6. Using the design

Top module: `vscnn_top`. The memory controller and off-chip memory are not
part of the RTL. Whatever plays their role does the following:

1. Writes the input vectors to the input buffer (`in_wr_*`) and the weight
   vectors to the weight buffer (`wt_wr_*`), in the order and with the flags
   of section 2.
2. Writes the pointer table (`ptr_wr_*`), entries `0..K`.
3. Sets the registers through `cfg_wr_*`: 0 = width, 1 = height,
   2 = filters, 3 = number of stored input vectors, 4 = scale, 5 = shift,
   6 = flags (bit 0 ReLU, bit 1 sparse output).
4. Pulses `start_i` and waits for `done_o`, plus one cycle.
5. Reads `out_count_o` entries through `out_rd_addr_i` / `out_rd_data_o`.

All buffers are plain arrays with combinational read ports. A silicon
implementation would replace them with SRAM macros: the 8 read ports of the
input and weight buffers would become banks or copies, and the partial-sum
buffer's 9-word read-modify-write per block would become a banked SRAM.

### Sizes (package `vscnn_pkg`)

| parameter | default | meaning |
|---|---|---|
| `N_BLK`, `PE_ROWS`, `PE_COLS` | 8, 7, 3 | array shape |
| `DATA_W`, `FRAC` | 16, 8 | data width, fraction bits |
| `MAX_W`, `MAX_H` | 56, 56 | largest layer held by the partial-sum buffer |
| `IN_DEPTH`, `WT_DEPTH`, `OUT_DEPTH` | 16384 | vectors per buffer |
| `MAX_K` | 512 | filters / channels (index width) |

The array shape and the 16-bit width are those of the original architecture.
The buffer sizes are this implementation's own choice, since no sizes were
published. With these defaults, the partial-sum buffer limits one run to 56x56
outputs, and the input buffer limits it to 16384 stored vectors (for example,
16384 / (56 x 8) = 36 dense channels at 56x56). Larger VGG-16 layers must be
split by the host into spatial tiles (with a one-pixel halo) and filter groups.
That splitting is not part of the RTL.

### Simulating

Every testbench in `tb/` is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and has a cycle watchdog. With Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl rtl/vscnn_pkg.sv \
        tb/tb_vscnn_top.sv --top-module tb_vscnn_top -o sim
    ./obj_dir/sim

| testbench | what it checks |
|---|---|
| `tb_vs_pe`, `tb_vs_pe_block`, `tb_vs_pe_array` | products, diagonal sums and output order against the `r - c` rule, rounding, saturation, register stage |
| `tb_vs_lane_sched` | the 5x5 example (15 pairs in 15 cycles dense, 8 in 8 sparse), random channel lists with empty channels on either side |
| `tb_vs_accumulator` | tile-straddling accumulation, dropping of padding rows and columns, saturation, clear sweep, clear-on-read |
| `tb_vs_post_proc`, `tb_vs_output_sram` | normalisation, ReLU, zero detection, compression and `last` flags |
| `tb_vs_input_sram`, `tb_vs_weight_sram`, `tb_vs_config_ctx`, `tb_vs_sys_ctrl` | storage, register map, pass / drain sequencing and cycle counts |
| `tb_vscnn_top` | the 5x5 example dense and sparse; a 9x12 layer with 5 channels and 11 filters (two row tiles, two passes, one empty channel, one all-zero filter), sparse with ReLU and dense. Every mechanism listed in its header must occur. |
| `tb_vscnn_full` | one 56x56 layer, 16 channels, 16 filters, sparse and dense, at default sizes |

The top-level testbenches build in under a minute and simulate in seconds.

In `tb_vscnn_full`, 45 % of the input vectors and 40 % of the kernel columns
are zero. The sparse run needs 16928 compute cycles and the dense run needs
43012 for the same result. This ratio reflects the synthetic sparsity of the
test, not a measured network.

## 7. What follows the original architecture and what does not

Taken from the architecture:

* broadcast 1-D input vectors along PE rows and 1-D weight vectors down PE
  columns
* diagonal accumulation in the same cycle, and the 9-output order
* the 8 x 7 x 3 array and the 16-bit buses
* skipping by not storing zero vectors, with an index per vector
* index-driven accumulation in a local partial-sum buffer
* post processing with activation, normalisation and zero detection
* compressed output
* one flow for dense and sparse

Choices of this implementation, where no detail was available:

* Each block computes its own filter, with independent schedulers. How the
  eight blocks share work was not specified.
* The vector tag layout, the `last` flags, the pointer table and the
  merge-join scheduler, including its idle cycles on unmatched channels.
* Loop order: channel, then column, then row tile, then kernel column.
* Q8.8 format, rounding at the block edge, saturation everywhere.
* Normalisation as scale-and-shift. ReLU is the only activation.
* Buffer sizes, the register map, controller states, and drain that does not
  overlap compute.
* In dense mode the output keeps all-zero vectors. In sparse mode it drops
  them.

Not implemented:

* The alternative 4 x 14 x 3 arrangement, which would chain two blocks
  vertically.
* Filter sizes other than 3x3 and strides other than 1. The original
  architecture supports these by remapping, which is not specified further.
* Off-chip transfers and host-side tiling of large layers.

One discrepancy in the source material: its timing table lists output columns
C and B for the cycles in which input column C meets kernel columns WA and WB.
Its detailed data-flow chart, and the formula `xo = x - dx + 1`, give D and C.
This RTL follows the formula.
