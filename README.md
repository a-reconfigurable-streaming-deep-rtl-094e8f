# A streaming CNN accelerator built from 3x3 convolution units

This is an accelerator for the convolution and pooling layers of a convolutional neural network, sized for small embedded devices. Its central idea is to move each input datum as few times as possible:

- A layer's input image is streamed once per filter from an on-chip buffer bank, eight rows at a time.
- It passes through a small column buffer that turns eight rows into ten overlapping rows, so eight 3x3 convolution units work side by side.
- The partial sums are accumulated in an on-chip scratchpad. Nothing goes back to DRAM until a finished output feature is read back.

Any kernel from 1x1 to 23x23 runs on the same 3x3 hardware. A large kernel is cut into 3x3 sub-filters. Each sub-filter's output image is added to the result at a shifted position.

All arithmetic is 16-bit fixed point. The RTL uses Q8.8: 8 integer bits and 8 fraction bits.

Everything is SystemVerilog (IEEE 1800-2017) in `rtl/`, with a self-checking testbench per block in `tb/`. The default sizes are the published chip's:

| Resource | Size |
|---|---|
| Processing engines (multipliers) | 144, in 16 convolution units (CUs) |
| Buffer bank (single port) | 96 KB, delivering 256 bits per cycle |
| Scratchpad (dual port) | 16 KB |
| Command FIFO | 128 words |

## Data organisation

**Buffer bank** (`buffer_bank`). The bank has two *sets*:

- One holds the current layer's input.
- The other receives the layer's output.
- The roles swap from layer to layer. The mode word's `in_set` bit says which set is the input.

Each set has two banks:

- Index 0 holds the even-numbered channels.
- Index 1 holds the odd-numbered ones.

A bank is 1536 words of 128 bits. One word is eight vertically adjacent pixels of one column of one channel, one 16-bit lane per row. Channel `c` of an `H x W` image occupies `ceil(H/8)*W` words in bank `c % 2`. Row group `g` (rows `8g .. 8g+7`), column `x` is at word

    (c/2) * ceil(H/8) * W  +  g * W  +  x

Output features are written with the same layout, so a layer's output is directly the next layer's input.

Because every bank is single-ported, access is shared as follows:

- While the accelerator is idle, the host port owns all four banks. It loads an input image and reads back a result.
- While the accelerator is busy, the input set serves the row fetcher and the output set serves the readout block.

**Scratchpad** (`pingpong_buffer`). The scratchpad is two sub-buffers:

- One is being accumulated into.
- The other is being pooled and read out.

Each sub-buffer is 16 dual-port memories of 256 x 16 bits. Output position `(X, Y)` of a feature is stored at:

- row lane `X % 8`
- address `(X/8) * OW + Y`

Addresses 256 to 511 are the upper eight memories. In 1x1 mode the second feature of a pair starts at address 256.

## A pass: one channel pair through one 3x3 filter

All work is done in *passes*. A pass streams:

- two input channels, the even one `2cp` and the odd one `2cp+1`,
- through one 3x3 (sub-)filter per channel,

and adds the result into the scratchpad. The steps are:

1. **Row fetch** (`row_fetch`) walks the image row group by row group. For each group it walks column by column, and reads one word from each bank of the input set per clock. That gives 16 pixels: 8 rows of the even channel and 8 of the odd one. Reads outside the image (negative or too large row or column) give zero, which provides zero padding at no cost.
2. **Column buffer** (`col_buffer`). Eight rows only feed six full 3x3 windows. For each channel the column buffer keeps the bottom two rows of the previous group in a two-row FIFO, one word per column. It puts them in front of the eight new rows, so the CUs see ten rows: two old and eight new. CU `k` gets rows `k, k+1, k+2` of these ten. It produces output row `8g + k - 2` of the pass. For the first group the FIFO reads as zero.
3. **CU engine** (`cu_engine`, `conv_unit`, `pe`). There are 16 CUs: eight per channel. Each CU is a 3x3 array of PEs. The rows enter on the right and move one PE left per clock through the PEs' data registers, so after three columns the CU holds a full 3x3 window. The adder sums the nine products and rounds the sum to Q8.8. An adder per row then merges the even-channel CU and the odd-channel CU. Result: one 16-bit partial sum per output row per clock.
4. **Accumulator** (`accumulator`) reads the old value at the target position, adds, and writes back. Reads and writes go to the sub-buffer currently given to convolution. On the first pass of a feature it adds the bias instead of the old value, so the scratchpad needs no clear.

The pipeline accepts one column per clock with no bubbles inside a pass. A 3x3 pass over row groups `g_lo..g_hi` and output columns `q_lo..q_hi` therefore takes `(g_hi-g_lo+1) * (q_hi-q_lo+3)` cycles. The two extra columns fill the PE window at the start of each group.

Between passes there are a few cycles of pipeline drain (`DRAIN = 6`) and one cycle to load the next weights. Peak throughput is 144 multiply-accumulates per clock.

**1x1 mode.** Only two PEs per CU are used, PE(1,0) and PE(2,0). Each receives the same pixel, multiplied by the weights of two *different* output features. The CU adder is bypassed. The engine then delivers two features per pass (outputs A and B), each the sum of the even-channel and odd-channel products. The pixel enters the centre row, and output row `p = 8g + k` comes straight from the bank (no FIFO rows are needed).

**Weights.** The weights arrive on a 64-bit stream (`wt_*`, from a DMA engine) in the pre-fetch controller (`prefetch_ctrl`). While one pass runs, the packet for the next pass fills a shadow register. The update at the start of the next pass moves it into the CUs in one clock. A packet is 20 words in five beats, in this order:

1. bias A
2. bias B
3. nine even-channel weights, row-major
4. nine odd-channel weights, row-major

In 1x1 mode the two features' weights sit at positions (1,0) and (2,0). Packets must arrive in the order the sequencer uses them (see below). If a packet is late, the pass waits. That is a *weight stall*, counted in `stat_wstall`.

## Large kernels, padding and stride: where the sums land

Filter decomposition cuts a `K x K` kernel into `ceil(K/3)^2` sub-filters of 3x3, padding the kernel with zeros. Sub-filter `(i, j)` has *shift address* `(a, b) = (3i, 3j)`. Each sub-filter is run as an ordinary 3x3 pass. Its result `D(p, q)` belongs at output position

    X = (p + sr) / s,   Y = (q + sc) / s,    sr = pad - a,  sc = pad - b

where `s` is the stride. A result counts only where `p + sr` and `q + sc` are non-negative multiples of `s`, and `X`, `Y` fall inside the output. This one rule covers three things:

- the summation of sub-images by shift address,
- zero padding of the layer,
- strides 2 and 4.

Two blocks apply it:

- `row_fetch` streams only the row groups and columns that can produce a counted result. It tags each column with its group and column.
- `accumulator` turns the tag into `(X, Y)` for each of the eight rows.

For strides above 1, the multipliers of columns that produce nothing are switched off (EN_Ctrl low) to save power. When the first useful row group is not group 0, one extra group is streamed first so that the column-buffer FIFO holds the right rows.

Average pooling has no hardware of its own. A `K x K` average pool is a `K x K` convolution with stride `K`, one output feature per channel and weight `1/K^2` on its own channel (zero on the other). The host programs it like any convolution layer. The window can be any size from 1 to 23. The pooling stride must be one of the convolution strides (1, 2 or 4), so a 3x3 average pool with stride 3 is not possible. As in any convolution, every output feature scans all input channels, even though only one of them has nonzero weights.

## The ACCU buffer: accumulate, pool, read out

`accu_buffer` contains the accumulator, the ping-pong scratchpad, the max pool and the readout. When the sequencer has run all passes of a feature, it *swaps*:

- the sub-buffer holding the finished feature goes to the post side;
- the other sub-buffer goes to the accumulator, which starts on the next feature at once.

On the post side a small sequencer runs:

1. Max pooling, if enabled: `max_pool`, with four `max_pool_unit`s.
2. Readout: `readout`, eight words per clock into the output set, with ReLU if enabled.

In 1x1 mode both steps run once for each of the two features.

The pooling works as follows:

- Each max-pool unit compares up to three row values of one column with its feedback register, one column per clock. After the last column of the window it outputs the maximum.
- Windows are 2x2 or 3x3, with a pool stride equal to the window (no overlap).
- For 2x2, four units each take a pair of row lanes. For 3x3, two units each take a band of three rows.
- Results are written back into the same sub-buffer, at the pooled position. The readout then copies the smaller feature.

Writing in place is safe because a pooled position is never ahead of the window being read.

The post job must finish before the next swap. If convolution of the next feature is faster than pooling and readout of the previous one, the sequencer waits. That is a *post stall*, counted in `stat_pstall`. For realistic layers the convolution of one feature takes many passes, so post stalls are rare.

## Command program

The accelerator runs a program of 16-bit commands from a 128-word FIFO (`cmd_fifo`). Bits 15:12 are the opcode and bits 11:0 the payload.

| Opcode | Name | Payload |
|---|---|---|
| 1 / 2 | IN_H / IN_W | input image height / width |
| 3 / 4 | OUT_H / OUT_W | convolution output height / width (before pooling) |
| 5 / 6 | NCH / NFEAT | input channels / output features |
| 7 | MODE | [0] 1x1 mode, [2:1] stride code (0, 1, 2 for stride 1, 2, 4), [3] ReLU, [4] max pool, [5] pool size 3, [6] input set, [11:7] padding |
| 8 | CLR_SHIFT | empty the shift-address list |
| 9 | SHIFT | append shift address: [4:0] row `a`, [9:5] column `b` |
| A | RUN | run the layer |
| F | END | stop (`halted` goes high) |

`cmd_decoder` executes RUN as the following loops:

    for each output feature f          (two at a time in 1x1 mode)
      for each shift address (a, b)    (a single (0,0) if the list is empty)
        for each channel pair cp
          wait for weights, update, stream one pass, drain
      wait for the post side, swap, post job writes feature f

The output features are written to the output set. Feature `f` goes to bank `f % 2`, at the slot of the pooled size. The layer ends when the last post job is done. `busy` then drops and the host may use the buffer bank again.

The usual flow per layer is:

1. Load the input through the host port.
2. Send the configuration commands and RUN.
3. Stream the weight packets.
4. Wait for `busy` to fall.

## Top level

`cnn_accel_top` connects the blocks above. Its ports:

- `cmd_valid/cmd_data/cmd_ready`: the command stream.
- `wt_valid/wt_data/wt_ready`: the 64-bit weight stream.
- `host_*`: the host port of the buffer bank (one 128-bit word per access, read data one clock later).
- `busy`, `halted`: status.
- `stat_wstall`, `stat_pstall`, `stat_passes`: counters.

The DRAM, the DMA engine and the AXI control bus of a full system are outside this block. The command stream, the weight stream and the host port stand in for them.

## Capacity

- **Buffer bank.** One set holds 24576 words of 16 bits (48 KB). An image needs `ceil(H/8)*W` words per channel in its bank.
  - The traffic-sign network of the original evaluation fits. Its largest tensor is 64 features of 16x16 after pooling: 1024 of 1536 words per bank.
  - Full-size ImageNet layers (224x224 and up) do not fit. They would need tiling through DRAM, which is not built.
- **Scratchpad.** One sub-buffer holds a feature of up to 512 addresses (`ceil(OH/8)*OW`), or two features of up to 256 addresses each in 1x1 mode. A 55x55 output fits in 385 addresses.
- **Kernels and strides.** Kernels up to 23x23 (64 shift addresses) and strides 1, 2 and 4 are supported. Sizes are 12-bit fields.

## Where this design departs from the published one, or fills gaps

Choices where the original description is silent:

- Q8.8 fixed point, with round-to-nearest and saturation at each CU adder and each accumulation.
- The command set and its encoding.
- The weight packet layout.
- The buffer-bank and scratchpad address maps.
- Applying the shift address when sums are accumulated.
- The row walk and its priming group.
- Host access only while idle.
- `DRAIN`.

Differences from the published design:

- **1x1 PEs.** One figure of the original marks other PEs for 1x1 mode. This design follows the text, PE(1,0) and PE(2,0).
- **Stride handling.** With stride 2 or 4 the original stores the CU outputs as they come, so only rows R0, R2, … (or R0, R4) of the scratchpad hold valid data. A MUX in front of the max pool then picks the valid rows. Here every output position is stored compacted, so the max pool needs no stride cases.
- **Pool buffer.** The original max pool has an internal buffer for windows whose data are not ready yet. Here pooling starts only once a feature is complete, so that buffer is not needed and not built.
- **Out of scope.** Fully-connected layers are not done by this engine, and neither is tiling of images larger than the buffer bank.

## Verification

Each block has a testbench `tb/tb_<block>.sv`. It drives the block with random or directed stimulus, compares against a model written independently in the testbench, and prints `TB_RESULT checks=N failures=M`. Each has a watchdog. `tb/tb_ref_pkg.sv` holds the shared rounding, saturation and command-encoding helpers.

`tb_cnn_accel_top` runs the whole accelerator at its default size through six layers:

- a 5x5 kernel decomposed into four sub-filters, with padding, max pooling and ReLU;
- 1x1 mode with an odd number of features;
- average pooling as a convolution;
- an 11x11 stride-4 kernel with the priming group;
- 3x3 with 3x3 max pooling;
- a 1x1 layer whose post side is slower than its convolution.

It compares every output pixel with a direct model of the layer equations. It checks the cycle count of every pass against the one-column-per-clock formula above. It also counts each mechanism (decomposition, padding, stride, priming, weight stall, post stall, 1x1 pairs, odd channel counts, pooling 2 and 3) and fails any that never occurred.

`tb_traffic_sign` runs the three convolution layers of a small traffic-sign classifier (a LeNet-5 variant) at full size, each layer reading the previous layer's output where it was left in the buffer bank:

- 3 to 64 features on 32x32 with 2x2 pooling,
- 64 to 16 features on 16x16 with 2x2 pooling,
- 16 to 16 features on 8x8.

All kernels are 5x5. The test checks all 18,432 output pixels. It takes about 211,000 clocks (0.42 ms at 500 MHz):

| Layer | Clocks |
|---|---|
| First | 83,192 |
| Second | 110,672 |
| Third | 12,337 |

The first layer uses the engine poorly. With three input channels, the second channel pair is half empty. A 5x5 kernel is computed as 6x6, which is 36/25 of the work.

Peak rate is 144 multiply-accumulates per clock: 144 GOPS at 500 MHz, counting two operations per MAC. The published chip quotes 152 GOPS without giving its counting.

To simulate a block with Verilator:

    verilator --binary --timing --assert -Irtl -Itb rtl/cnn_pkg.sv tb/tb_ref_pkg.sv \
        tb/tb_cnn_accel_top.sv --top-module tb_cnn_accel_top
    ./obj_dir/Vtb_cnn_accel_top

Replace `tb_cnn_accel_top` with any other testbench name. The simulator is two-state, and all state that is read is reset.
