# CNN training engine on one reusable MAC array

All three phases of CNN training run on a single 8 x 8 x 16 array of 16-bit
fixed-point multiply-accumulate units:

- the forward pass (FP);
- the backward pass (BP), which propagates local gradients;
- weight update (WU), which computes kernel gradients and applies SGD with momentum.

The phases differ only in what is fed to the array's rows and columns. A
weight buffer stores the kernels as a circulant matrix. The same storage can
therefore be read normally for FP and transposed, with the kernels flipped,
for BP, without a second copy.

## How it works

The engine is built from a library of blocks. A host, standing in for the
schedule a compiler would emit, runs one layer operation at a time. It gives
the engine a layer descriptor (`layer_cfg_t` in `train_pkg`) naming:

- the operation: convolution, pooling, upsampling, loss, or weight update;
- the phase;
- the sizes;
- the DRAM base addresses.

The global controller takes each operation through four phases:

1. **Load.** The DMA manager turns the descriptor into up to four DRAM
   descriptors. The DMA engine reads the words. The data scatter places them
   in the input buffer, the transposable weight buffer, the local-gradient
   buffer, or the four weight-update buffers. The four weight-update buffers
   hold old weights, momentum, old gradients and current gradients.
2. **Compute.** The loop sequencer (`conv_controller`) steps through input
   maps and kernel positions, one position per clock.
   - The data router gives each of the 64 MAC columns its pixel, and applies
     zero padding and stride.
   - The weight router gives each of the 16 MAC rows its weight, taken from
     the transposable buffer in FP and BP, or from the local-gradient buffer
     in WU.
   - Pooling, upsampling, loss and weight update use their own units on the
     same step pipeline.
3. **Drain.** The pipeline empties.
4. **Store.** The data gather reads the output buffer and writes the results
   back to DRAM in the layout the next operation expects.

### Transposable weight buffer

Kernel block (input row r, output map j) is stored in column buffer
(j + r) mod 16. Its word address within that column is r*16 + ky*4 + kx.

- **FP read.** All 16 columns use the same address. The data is rotated by r
  so that MAC row f receives kernel (r, f).
- **BP read.** The address translator gives column c the address of row
  (c - j) mod 16. The data is rotated by j, and (ky, kx) is mirrored. MAC row
  i then receives kernel (i, j), rotated by 180 degrees. This is the
  transposed weight matrix the BP convolution needs.

The weight image in DRAM uses the same layout: word e belongs to column
e mod 16, address e / 16. The data gather writes weight gradients and new
weights straight back into this layout, through the write side of the address
translator.

### Load balancing for kernel gradients

A WU convolution produces kernel gradients of only kw x kw outputs per map
pair, which leaves most of the 8 x 8 plane idle. The MAC load balancer
splits the plane into kw x kw groups, at most four, each working on a
different input map. Input map (step * groups + group) goes to group `group`.

For 3 x 3 kernels, four groups use 3 x 3 x 16 x 4 MACs. The 16 kernel
gradients of three input maps are then finished in one pass of 64 steps
instead of three passes.

### Training-specific units

- **ReLU and scaling.** In FP, the ReLU unit keeps a 1-bit activation
  gradient per pixel in an on-chip buffer. In BP, the same unit multiplies
  gradients by those bits.
- **Max pooling (2 x 2).** Each window's maximum is stored with a 2-bit index
  of its position, also kept on chip.
- **Upsampling.** The index steers each gradient to one position of its 2 x 2
  window through a demultiplexer. The gradient is gated by the activation
  gradient when the pooled layer follows a ReLU.
- **Loss.** The loss unit computes the Euclidean gradient (a - y), or the
  square-hinge gradient -2y * max(0, 1 - ya).
- **Weight update.**
  - Each image's kernel gradients are added to the running sum kept in DRAM.
    The first image of a batch starts the sum afresh.
  - At the end of the batch, new weights are computed as
    w + beta*m - alpha*g, with alpha and beta in unsigned Q0.16.
  - The new weights are written only when the batch-done flag is set.

### Numbers

- Data is 16-bit signed fixed point. Each layer descriptor carries the shift
  that brings the 40-bit accumulators back to 16 bits. The narrowing rounds
  half-up and saturates.
- The DRAM port moves one 16-bit word per request, with a request/grant
  handshake and in-order read data.

## Interface of the top (`cnn_train_top`)

| Port | Direction | Meaning |
|---|---|---|
| `clk`, `rst_n` | in | clock, asynchronous active-low reset |
| `start`, `cfg_in` | in | start pulse and layer descriptor |
| `busy`, `done` | out | operation running / finished (one-cycle pulse) |
| `phase_id` | out | 0 idle, 1 load, 2 compute, 3 drain, 4 store |
| `dram_req`, `dram_we`, `dram_addr`, `dram_wdata` | out | DRAM request |
| `dram_gnt`, `dram_rvalid`, `dram_rdata` | in | DRAM grant and read data |

Default parameters:

- POX = 8, POY = 8, POF = 16. This is the paper's 1X array.
- The input buffer holds 64 maps of 10 x 10 pixels.
- The weight buffer holds 256 kernel rows of up to 4 x 4 kernels.
- The output buffer holds 16 words.
- The activation-gradient and index buffers hold 64 words.
- The weight-update buffers hold 4096 words.

## Where this design differs from the paper, or fills a gap

- **Broadcast array.** The MAC array broadcasts weights along rows and pixels
  along columns in the same cycle. It does not pass them from PE to PE as in
  a systolic array. The sums are the same.
- **No double buffering.** Load, compute and store run one after another, so
  DRAM latency is not hidden.
- **One tile per image.** An image must fit one tile: at most 8 x 8 outputs,
  with padding made at the tile edge. Larger maps would need halo pixels from
  neighbouring tiles, and those are not read. The CIFAR-10 networks' 32 x 32
  and 16 x 16 layers therefore cannot run as they stand. Their 8 x 8 and
  4 x 4 layers, including the fully connected layer, can.
- **Gradient path.** Each image's kernel gradients go to DRAM. The separate
  weight-update operation then adds them to the batch sum and, at the end of
  the batch, applies the update. This is done element by element, in chunks
  of up to 4096 words.
- **Batch averaging.** The 1/batch factor is folded into alpha.
- **Sign of the momentum term.** The momentum term is added, as the
  momentum equation prints it.
- **Input buffer.** One multi-ported memory serves all 64 MAC columns. The
  figure instead shows a FIFO per load-balancer group. The group-to-map
  assignment is the same.
- **Power-of-two POF.** POF must be a power of two.
- **Own choices.** The following are this design's choices:
  - word formats, descriptor fields and DRAM layouts;
  - the loss gradient formulas;
  - tie handling in pooling (the earlier pixel wins);
  - the rounding mode.
- **Not built:**
  - the RTL compiler, which is software;
  - the DRAM itself (the testbenches use a behavioural model with random
    grant stalls);
  - bias update.

## Verification

Every block has its own self-checking testbench in `tb/`. Each compares the
block against values computed independently, for example:

- the figure's circulant layout and its BP address table 0 1 2 3;
- the load balancer's four 3 x 3 groups on the 8 x 8 array;
- the momentum update in 64-bit arithmetic.

`tb_cnn_train_top` runs the whole engine at its default size against the
behavioural DRAM. It chains:

1. FP convolution (3 to 16 maps, 3 x 3, pad 1, ReLU);
2. 2 x 2 max pooling;
3. Euclidean and square-hinge loss;
4. upsampling with activation-gradient scaling;
5. BP convolution with the transposed, flipped kernels;
6. WU convolution with and without load balancing;
7. a two-image momentum weight update.

It checks every word written back to DRAM, about 15,700 checks. It also checks
the compute cycle counts: 66 cycles with load balancing against 194 without.
It counts each mechanism and fails if one never occurs:

- FP, BP and WU convolutions;
- pooling with a non-zero index;
- upsampling with zeroed positions;
- both loss types;
- gradient accumulation and the new-weight write;
- ReLU clipping;
- padding;
- DRAM stalls.
