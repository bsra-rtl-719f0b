# BSRA: a block-based super-resolution accelerator with pixel attention

This is synthesizable SystemVerilog for an accelerator that upscales images 2x with a small CNN. The CNN is called HPAN (hardware-efficient pixel attention network). The accelerator has two main ideas:

* **Whole-model fusion through block convolution.** The low-resolution image is cut into independent 40x48 tiles. Every layer pads each tile with zeros and never looks at its neighbours. This means one tile can go through *all* layers of the network on chip. Off-chip traffic is then only the input tile, the weights and the 80x96 output tile.
* **One PE array design for both convolution and pixel attention.** Each PE array holds a 6x6 block of one channel, one pixel per multiplier. The multiplicands can be kernel weights, which are broadcast down each PE line and rotated across the lines every cycle. They can also be an attention mask, which gives each PE its own value. The same 32x36 multipliers therefore run the convolutions and the element-wise attention product.

The RTL follows a published architecture description: a system diagram, a PE-array figure, a three-stage accumulator figure and a data-flow example. Much of the control, the memory organisation and all number-format splits are this implementation's own. The sections below and the opening comment of each file say which parts are which.

## The network (HPAN)

| # | layer | kernel | channels | output |
|---|---|---|---|---|
| 0 | conv | 5x5 | 1 -> 32 | clamp |
| 1 | CPAB-1 conv | 1x1 | 32 -> 32 | clamp -> f1 |
| 2 | CPAB-1 mask conv | 1x1 | 32 -> 32 | clamp, sigmoid(x/256) = mask; output f1 * mask |
| 3 | CPAB-1 conv | 3x3 | 32 -> 32 | clamp |
| 4-6 | CPAB-2 | as 1-3 | | |
| 7 | transposed conv, stride 2 | 9x9 | 32 -> 1 | clamp -> SR pixels |

*CPAB* means clamping pixel attention block. *Clamp* saturates a value to [-255, +255]. There are no biases. With 32 channels the network has 25·32 + 2·(32·32 + 32·32 + 9·32·32) + 81·32 = 25,920 weights. The description of the network gives exactly this count, and the channel count of 32 was derived from it. The transposed convolution is taken to be the usual FSRCNN-style layer: stride 2, padding 4, and an output exactly twice the input size.

Two points differ from, or go beyond, the network's written formula:
* The mask is computed as sigmoid(clamp(x)/256). The formula writes the clamp after the sigmoid, where it would have no effect. The network diagram draws it before the sigmoid, and this RTL follows the diagram.
* Every layer output is clamped, including the transposed convolution and the attention product. For the attention product the clamp changes nothing, because the mask is below 1.

## Number formats (`bsra_pkg`)

| quantity | format |
|---|---|
| activation | signed 18 bit, 9 fraction bits (±255 fits) |
| weight, mask | signed 11 bit, 9 fraction bits; the mask lies in 138..374 (0.27..0.73) |
| product | 29 bit, 18 fraction bits |
| partial sum | 42 bit, 18 fraction bits (no overflow for a 9x9 kernel over 32 channels) |

The 11-bit weight and 18-bit activation widths come from the published results. The fraction-bit split is this implementation's choice. A partial sum becomes an activation by an arithmetic right shift of 9 bits, which rounds toward minus infinity, followed by saturation. Input pixels are 8-bit integers: pixel value p becomes activation p.

## Datapath

```
bsra_ctrl ──token──► [fetch] ──► processing_core ────────────► acc_stage3 ──► clamp_unit ──► feature_mem (write-back)
    │                  ▲ ▲      (32 x pe_array + acc_stage12)   ▲   │                      └─► out_* (SR pixels)
    │ addresses        │ │                                      │   ▼                      └─► sigmoid_unit ─► mask reg ─┐
    ▼                  │ │                                    psum_buf                                                 │
 feature_mem ──────────┘ weight_mem                                                                                    │
      ▲                                           mask into mult_mux of the attended array ◄───────────────────────────┘
```

The pipeline has one stage per cycle: issue (t), memory read (t+1), PE products (t+2), stage-1 sums (t+3), stage-2 sums (t+4), and stage-3 results (t+5). A result is written back to feature memory at the end of cycle t+5. A token (`tok_t`) travels next to the data and tells each stage what to do. Its operation is one of conv, tconv, attention or drain. It also carries what happens to the result: discard, write to feature memory, use as a mask, or output.

### PE array and the rotating weights (`pe_array`, `mult_mux`, `pe`)

A PE array has six PE lines (image columns) of six PEs (image rows). It holds one 6x6 block of one input channel. For one kernel row r, the six PE lines hold kernel columns `(j - s) mod k` in cycle s = 0..k-1. So for k = 3 the lines start as 0,1,2,0,1,2, then become 2,0,1,2,0,1, then 1,2,0,1,2,0. This is a circular right shift of the weights by one line per cycle. After k cycles each pixel of the block has been multiplied by each weight of the row. After k·k cycles it has been multiplied by the whole kernel. Then the next block is loaded. Blocks go down the tile first, then to the right. All 32 arrays work at once, one input channel each, with the same rotation. Each array gets the kernel row of its own channel from its own weight-memory bank.

For attention, the mask (36 values, one per pixel) goes only to the array that holds the attended channel. The other arrays get zero. The channel adder tree then passes that one channel's products through unchanged.

### Accumulator (`acc_stage12`, `acc_stage3`, `psum_buf`)

* Stage 1 adds groups of eight arrays at every position. Stage 2 adds the four group sums. A register follows each stage. The result is 36 channel sums per cycle.
* Stage 3 is the *selective adder*, and it is the least obvious part of the design. In one cycle, position (i, j) of block (by, bx) holds input pixel (a, b) = (6·by+i, 6·bx+j) times weight (r, c), with c = (j − s) mod k. That product belongs to output pixel (a − r + P, b − c + P) for a convolution with P = (k−1)/2. For the transposed convolution it belongs to (2a + r − P, 2b + c − P). Several PE lines of one row can hit the same output pixel in the same cycle: with a 3x3 kernel, three adjacent lines hold columns 0, 1 and 2 of the same output pixel. Stage 3 therefore sums, in every PE row, the positions that share a destination. The first of them adds the merged value to the partial sum buffer, and the others are disabled. Products whose destination is outside the tile are dropped. Together with the zero pixels outside the tile, this dropping is the block convolution.
* `psum_buf` holds one output channel: 40x48 partial sums, or 80x96 for the transposed convolution. It has 36 read ports and 36 write ports. An assertion checks that two enabled write ports never share an address.
* A *drain* token reads a 6x6 block of the buffer, clears it and passes it on. Before the first layer, the controller drains the whole buffer once with the output discarded, so the buffer starts at zero.

### Memories (`feature_mem`, `weight_mem`)

Both memories have 32 banks. A feature-memory word is one 6x6 block of one channel, so one read delivers a block of all 32 channels. Each bank holds two regions. Each layer reads one region and writes the other, and the layers alternate. The first 1x1 conv of a CPAB (f1) goes to one region. The attention product overwrites the region of that CPAB's input, which is no longer needed. A weight-memory word is one kernel row (up to nine weights). Layer l, output channel o, row r of input channel c is word `wbase(l) + o·k(l) + r` of bank c, so each bank needs 489 words.

### Controller (`bsra_ctrl`) and the order of work

For each layer, for each output channel o:
1. **Conv phase.** The loops are block column, block row, kernel row r, and rotation step s. This is k²·56 cycles for a 40x48 tile.
2. **Drain phase.** The controller drains every block of the channel. The result is clamped and written to bank o of the destination region. For the transposed convolution, the 14x16 blocks of the 80x96 plane are sent to `out_*` instead.
3. **Mask layers** (the second 1x1 conv of a CPAB) work block by block instead. The controller drains a block. Six cycles later the clamped and sigmoided block is ready in the mask register. The controller then issues an attention token that multiplies the same block of f1 (channel o) by the mask and writes the product back. Each block takes 7 cycles.

After each layer the controller waits 7 cycles for the pipeline to empty. Only then does the next layer read what this layer wrote.

## Interface and use

While `busy` is low, the host does three things:
* It writes kernel rows through `wt_we/wt_bank/wt_addr/wt_data`.
* It writes the 8-bit LR tile one 6x6 block per cycle through `in_we/in_blk/in_pix`. Block index = by·8 + bx, and pixels outside the 40x48 tile must be 0.
* It pulses `start`.

The SR tile then comes out as 6x6 blocks (`out_valid`, `out_by`, `out_bx`, `out_pix`, `out_vld`), with 9 fraction bits and clamped. `done` pulses at the end. A tile takes exactly 123,320 cycles. The end-to-end test checks this count: 1 start cycle + 224 clear + 84,224 conv-phase cycles + 4,536 transposed-conv cycles + 8,960 drains + 25,088 mask-layer cycles + 224 output drains + 63 for flushes and layer set-up.

Parameters: `NCH` (channels, a multiple of 8), `TILE_H` and `TILE_W`. The defaults are 32, 40 and 48.

Simulation with Verilator 5:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv rtl/bsra_pkg.sv tb/tb_bsra_top.sv --top-module tb_bsra_top
obj_dir/Vtb_bsra_top
```

Each testbench prints `TB_RESULT checks=N failures=M`. The testbenches are:
* `tb_bsra_top`: 8 channels, 12x12 tile.
* `tb_bsra_top_full`: default size. It runs about 140k cycles including loading.
* One testbench per block.

The end-to-end testbenches compare every SR pixel with a bit-exact integer reference of the network written in the testbench. They also count each mechanism and fail if one never occurs. The mechanisms are weight rotation, selective-adder merging, border drops, clamping at +255 and at −255, mask waits, attention, the transposed convolution and layer switches. The sigmoid testbench checks all 2^18 input codes against `$exp` within one LSB.

## Departures from the described chip, and limits

* **Throughput.** The described chip reaches 30 frames/s of full-HD output at 471 MHz. That is 8,100 tiles of 40x48 per second, or about 58,000 cycles per tile. This implementation needs 123,320 cycles, about 14 frames/s at 471 MHz. Two things cost the most:
  * The first layer has a single input channel, so only one of the 32 arrays is busy for 44,800 cycles.
  * The mask-layer handshake is serial, 7 cycles per block.

  How the described chip maps the first layer, or overlaps attention with convolution, is not known.
* **Memory size.** The feature memory is 2 x 32 x 56 blocks x 36 x 18 bit, about 258 KiB, against 232 KB reported for the whole chip. The psum buffer is 7,680 x 42 bit, and the weight memory stores 32 x 489 rows x 99 bit. The reported buffers must be organised more tightly, and how is not described.
* **Selective adder.** The accumulator figure shows a "−" and a "+" after the two selective adders, with no explanation. Both are implemented as accumulation into the partial sums.
* **Not built.** The off-chip memory, its memory controller and the system bus are only drawn in the architecture description. The top-level load and output ports stand in for them.
* **Image quality** (PSNR) depends on trained weights, which are not available. The testbenches use random weights and check bit-exactness against the reference, not image quality.
