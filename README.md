# Lupulus: a grid of 3x3 PE groups for convolution layers

Lupulus computes the convolutional and fully connected layers of a neural
network with a single level of on-chip memory. It is built around three
ideas:

- **Processing elements (PEs) hold only weights.** Each PE keeps a small
  scratch-pad memory (SPM) of weights, multiplies them with input pixels
  that are broadcast to it, and passes partial sums to its neighbour.
- **Partial sums are stored once per group.** PEs come in groups of 3x3,
  and each group has one accumulator memory. No partial sums are held in
  the PEs.
- **Small multiplexers change how the groups connect.** With them the same
  grid runs 3x3 kernels at full use, larger kernels by merging groups, and
  1x1 kernels (and fully connected layers) by chaining accumulators
  vertically.

This RTL implements the configuration the design was published in:

- 15 x 12 PEs, arranged as 5 x 4 groups of 3 x 3.
- 8-bit signed inputs and weights, and 16-bit signed partial sums.
- 32 B of weights per PE.
- One 256 B input buffer per PE row.
- About 2 kB of partial sums per group.
- Double-buffered input buffers and SPMs.

In total it has 60 kB of on-chip memory and performs 180 multiply-accumulates
per cycle.

```
                 instructions
                      |
               +------v-------+   START/WAIT/SWAP, configuration records
               |    global    |----------------------------------------+
               |  controller  |---------------+                        |
               +--------------+               |                        |
  ext. read   +--------------+  +-----------+ | +-----------+          |
  port A <--->| input buffer |->| 15 input  | | |   mesh    |          |
              | fetch unit   |  | buffers   |-+>|  network  |--+       |
              +--------------+  | (2 banks) |   | (row_sel) |  | x,pad |
  ext. read   +--------------+  +-----------+   +-----------+  v       v
  port B <--->| SPM fetch    |---- weights ---->+-----------------------------+
              | unit         |                  | processing grid: 5 x 4      |
              +--------------+                  | groups of 3x3 PEs, each     |
                                                | with an accumulator memory  |
                         +--------------+ cmds  |                             |
  results (out_*) <------| grid         |------>|                             |
                         | controller   |<------| drain read port             |
                         +--------------+       +-----------------------------+
```

## The processing element

A PE has two pipeline stages:

```
  prod     <= (pad ? 0 : x) * spm[rd_bank][w_addr]     // 8 x 8 -> 16 bit, signed
  psum_out <= prod + psum_in                           // 16 bit, wraps
```

- `x` is the pixel on the PE's row, and every PE in that row sees the same
  pixel in the same cycle.
- `w_addr` is a single byte address that the grid controller gives to every
  PE for the whole pass. A pass therefore uses one weight per PE, for one
  input channel and one kernel tap of every kernel in the grid.
- The SPM has two banks of 32 bytes. It is written 32 bits at a time by the
  SPM fetch unit, always into the bank the PEs are not reading.

## How a row of PEs convolves

In *convolution mode* (`MODE_CONV`) the PEs of a row form a chain. PE `k`
adds its product to the partial sum of PE `k-1`. The pixels move along the
row one column per cycle, and they reach all PEs of the row at the same
time. With weights `w_0 .. w_{L-1}` in a chain of `L` PEs, the value that
leaves the last PE is:

```
  out(c) = sum_k  w_k * x(c - (L-1) + k)       (with the 2-cycle pipeline skew)
```

Once column `c >= L-1` has been sent, `out` is the complete 1-D convolution
for output position `j = c - (L-1)`. Each PE row of a group carries one
kernel row, fed from the input row that kernel row needs. The group's
accumulator adds the chain ends of its three PE rows. The result is one
3x3 output pixel, for one input channel, per cycle.

- **Other input channels and larger kernels** take further passes with
  other weight addresses and other input rows. Their results are added onto
  the same accumulator words.
- **Horizontal padding** comes from the grid controller, which marks
  columns outside `[pad_left, pad_left + img_w)` as padding. A padded pixel
  reaches the PEs as 0, so padding is never stored.
- **Vertical padding** uses the mesh: the row-select code `ZERO_ROW` feeds
  a PE row with zeros.
- **Stride** is handled by the grid controller, which writes only every
  `stride`-th output. The pipeline still runs at one column per cycle.

In *pointwise mode* (`MODE_PW`, for 1x1 kernels and fully connected layers)
the chain is cut and every PE works alone:

- Each PE column of a group holds one kernel.
- Each PE row receives a different input channel.
- The accumulator adds its three PE rows column by column, and stores three
  results per cycle, one per kernel.

### Mechanisms that span groups

Two mechanisms connect one group to its neighbours. Both are set per group
by bit masks (group index = `group_row * 4 + group_col`):

| mechanism | mask | effect |
|---|---|---|
| merge | `merge_mask` | Each PE row of this group continues the partial-sum chain of the group on its left. A 5-tap kernel row uses the 3 PEs of one group and 2 of the next, with the sixth weight 0. The chain length `chain_len` tells the grid controller when the outputs are complete. Only the last group of a chain should store. |
| forward | `fwd_mask` | The accumulator adds the column sums of the group below it before storing. In pointwise mode, 5 group rows sum 15 input channels in one pass. In convolution mode, kernels taller than 3 place their lower kernel rows in the group row below. |

Forwarding is combinational. A chain of forwarding groups adds up in the
same cycle, and there is no extra pipeline stage.

`store_mask` selects which groups write their accumulator. Groups that only
feed a merge or a forward do not write.

## The accumulators

Each group has 3 lanes of 341 words of 16 bits (2046 B). The lanes let
pointwise mode store three results in one access.

| mode | output `k` of a pass goes to |
|---|---|
| MODE_CONV | word `acc_base + k/3`, lane `k % 3` (the lanes rotate) |
| MODE_PW   | word `acc_base + k`, all lanes (lane = PE column = kernel) |

Every write is a read-modify-write, and the memory is read one cycle before
the write.

- The command of a pass's first contribution has `first` set (`acc_first`).
  It then overwrites the word instead of adding, so no clearing pass is
  needed.
- The controller never writes the same word in two consecutive cycles, so
  no bypass path is needed. An assertion checks this.

Results leave through a second read port. A *drain* reads `count` words of
one group, word `i` at `base + i/3`, lane `i % 3`. It sends them on the
`out_*` valid/ready port, which stands for the write-back to external
memory. A drain and a compute pass never run at the same time. When the
accumulators are full, the PEs therefore wait while the results are written
out.

## Timing of a pass

The grid controller sends one column per cycle. The data path from sending
a column to the accumulator write is four registers:

1. input buffer read
2. mesh output register
3. PE product
4. PE sum

The accumulate commands are delayed by the same four cycles. A pass of
`n_cols` columns takes `n_cols + 7` cycles from its start pulse to its done
pulse. For example, a 3x3 pass over a 224-pixel row with one column of
padding on each side is 226 + 7 = 233 cycles. The full-size testbench checks
this count on every pass.

## Memories and fetch units

- **Input buffers.** There are 15 of them, one per PE row. Each has 2 banks
  of 64 x 32-bit words, is written a word at a time, and is read one byte
  per cycle with one cycle of latency. One buffer row holds one row of one
  channel of the feature map.
- **Mesh network.** It is a registered crossbar. PE row `i` reads buffer
  `row_sel[i]`, or zero for `ZERO_ROW`. Several PE rows may name the same
  buffer (one-to-many, used by 3x3 kernels so that kernels in different
  group rows share the input rows). In pointwise mode each row names its
  own buffer (one-to-one).
- **Input buffer fetch unit.** It runs a two-level loop over `n_rows` x
  `words_per_row`:
  - It reads external byte address `ext_base + r*row_stride + 4*w`.
  - It writes buffer `first_row + r`, word `dst_word + w`.
- **SPM fetch unit.** It runs a two-level loop over `n_pe` x
  `words_per_pe`:
  - It reads consecutive external words.
  - It writes PE `first_pe + p` (row-major over the grid), SPM word
    `dst_word + w`.

Both fetch units send requests (valid/ready plus a byte address) ahead of
the responses, and take 32-bit responses in request order. They always
write the bank that is not being read.

## Instruction set and register map

The global controller takes a 48-bit instruction `{op[3:0], arg[11:0],
data[31:0]}` on a valid/ready port.

| op | meaning |
|---|---|
| `SET`  (1) | write configuration register `arg` with `data` |
| `START`(2) | start the units in `arg[3:0]`: bit 0 input fetch, 1 SPM fetch, 2 grid pass, 3 drain. The instruction is held while a named unit still runs, and while a grid pass and a drain would overlap. |
| `WAIT` (3) | hold the stream until the units in `arg[3:0]` are done |
| `SWAP` (4) | flip the bank read by the grid: `arg[0]` input buffers, `arg[1]` SPMs. A `SWAP` acts at once, so the program must `WAIT` for the units using the banks first. |

Each unit copies its configuration when it starts. The program may
therefore set up the next pass while the current one runs. `running[3:0]`
shows which units are busy.

Configuration registers (`lup_pkg`):

| address | register |
|---|---|
| 0x00-0x05 | input fetch: ext_base, row_stride, n_rows, words_per_row, first_row, dst_word |
| 0x08-0x0C | SPM fetch: ext_base, first_pe, n_pe, words_per_pe, dst_word |
| 0x10 | grid: mode (0 conv, 1 pointwise) |
| 0x11-0x13 | grid: n_cols, pad_left, img_w |
| 0x14-0x17 | grid: ibuf_base, chain_len, stride, n_out |
| 0x18-0x1A | grid: w_addr, acc_base, acc_first |
| 0x1B-0x1D | grid: merge_mask, fwd_mask, store_mask |
| 0x20+i | grid: row_sel of PE row i |
| 0x30-0x32 | drain: group, base, count |

A typical layer loop runs these steps:

1. Fetch the input rows and the weights into the idle banks.
2. `WAIT` for the fetches, then `SWAP`.
3. For each input channel and kernel row set, `SET` the pass registers and
   `START` a grid pass. At the same time, fetch the next data into the idle
   banks.
4. `START` drains when an output block is complete.

## Departures from the published design, and limits

- **Accumulator size.** It is 3 x 341 x 16 bit = 2046 B instead of 2048 B,
  so that three lanes can be written in one access. On-chip memory is
  60120 B instead of 60160 B.
- **Peak rate.** The published figure is 380 operations per cycle. The 15 x
  12 grid gives 180 MACs, which is 360 operations per cycle. The grid size
  was kept.
- **Memory total.** The published memory total is stated once as 60.16 kB
  and once as 60.61 kB. The component sizes add up to the first.
- **Invented interfaces.** The instruction format, register map, fetch-loop
  depth (two levels), memory request protocol and drain port are this
  design's own. The original only describes these units by their role.
- **No on-chip post-processing.** There is no activation function, pooling,
  requantization or bias. Results leave as 16-bit partial sums.
- **External memory.** The external memory, its single shared channel, and
  the write path from the `out_*` port back to memory are outside the RTL.
  The two read ports would share one channel in a system.
- **Unchecked latencies.** The published per-layer latencies come from an
  analytical model with an offline schedule and are not reproduced here.
- **Overflow.** 16-bit partial sums wrap on overflow, and nothing detects
  it.

## Files and simulation

`rtl/lup_pkg.sv` holds the types, the register map and the instruction
format. Each other file in `rtl/` holds one module:

| module | purpose |
|---|---|
| `lup_pe` | PE with its SPM |
| `lup_accumulator` | group accumulator |
| `lup_pe_group` | 3x3 PEs, partial-sum muxes and accumulator |
| `lup_grid` | the array of groups, with merge and forward wiring |
| `lup_input_buffer`, `lup_mesh` | input side |
| `lup_grid_ctrl` | pass sequencing and drain |
| `lup_ibuf_fetch`, `lup_spm_fetch`, `lup_loop2` | fetch units and their loop counter |
| `lup_global_ctrl` | instruction dispatch |
| `lup_top` | the whole accelerator |

Each module `M` has a self-checking testbench `tb/tb_M.sv`. It ends by
printing `TB_RESULT checks=N failures=M`. `tb/tb_lup_extmem.sv` is the
behavioural external memory: two read ports, random ready and a fixed
latency.

`tb_lup_top` runs the whole chip at its default size:

- a 3x3 layer with padding, with the next layer fetched during compute;
- a 5x5 stride-2 layer that merges two groups and forwards from the group
  row below;
- a 15-channel 1x1 layer across all group rows.

It drains the results under random back-pressure and compares them with a
model in the testbench. It checks the pass timing, and fails if any
mechanism (padding, zero rows, merge, forward, stride skip, stalls, bank
swap, overlap of fetch and compute, back-pressure) never happened.

`tb_lup_workloads` runs slices of two benchmark layers at full size:

- **VGG-16 conv1_1.** Two output rows of 224 pixels, for 20 kernels at
  once (one per group) over 3 channels: 6 passes, then 8960 results
  drained.
- **AlexNet conv1.** One output row (55 pixels) of an 11x11, stride-4
  kernel over 227-pixel rows. The kernel spans 4 merged groups across and
  4 forwarding group rows down. Each channel's 11 rows are fetched into the
  idle bank while the previous channel computes.

The whole testbench takes about 25,000 cycles, and 2,112 of them are
compute passes. Most of the rest is the drain through the single 16-bit
output port, which shows why the write-out dominates when it does not
overlap with compute.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/lup_pkg.sv tb/tb_lup_top.sv \
          --top-module tb_lup_top -Mdir obj_top
./obj_top/Vtb_lup_top
```

Replace `tb_lup_top` with any other testbench name. Every register is reset
and every memory word is written before it is read, so the result does not depend on
`+verilator+rand+reset+2`. The full-size testbench runs in about 2000
cycles.
