# DeepDive-style accelerator for depthwise-separable CNNs

Depthwise-separable networks such as MobileNet-V2 have three kinds of
convolution, and they behave very differently. Depthwise 3x3 convolutions
do little arithmetic per byte moved. Pointwise 1x1 convolutions are dense
matrix products. There is a single normal 3x3 convolution, on the image.
One shared array of multipliers serves all three badly.

This design gives each kind of operator its own datapath. It then groups
the operators into four **compute units (CUs)** that follow the network's
structure:

| CU | Operator chain (fused by element streams) | Runs |
|---|---|---|
| Head | normal 3x3 conv (8-bit image) -> depthwise 3x3 -> pointwise | once per image |
| Body | pointwise expansion -> depthwise 3x3 (stride 1/2) -> pointwise projection -> residual add | once per inverted residual block |
| Tail | pointwise -> global average pool | once |
| Classifier | fully connected layer (a pointwise operator on a 1x1 map) | once |

Inside a CU the intermediate feature maps never go to memory. Each operator
hands its output to the next as a stream of 4-bit elements, one element per
cycle, with valid/ready flow control. Only the CU's input, its output and
its parameters cross the memory port.

A host processor places the weights and quantization records in shared
memory. For each block of the network it programs a CU through registers,
starts it and waits for its interrupt. The Body CU is reused for every
inverted residual block, with a different shape each time.

The default parameters size every buffer and multiplier array for
MobileNet-V2 at width multiplier 0.75 with 224x224 inputs. Weights and
activations are 4 bits, except the first convolution, which is 8 bits.

## Data formats

**Streams.** A feature map travels in HWC order: all channels of pixel
(0,0), then all channels of pixel (0,1), and so on in raster order. One
element moves per beat, on `valid`/`ready` with the usual rule: the element
moves in a cycle where both are high. Activations are unsigned; weights are
signed two's complement.

**Memory.** The memory port carries 64-bit words with word addresses.
Tensors are packed little-end first. Element `i` of a tensor with 2^lg-bit
elements is in word `base + i / (64 >> lg)`, at bit `(i % (64 >> lg)) << lg`.
So a word holds 16 4-bit activations, 8 8-bit image pixels, or one 64-bit
record.

**Quantization record.** Each output channel has one 64-bit record
(`dd_pkg::qparam_t`):

| bits | field | meaning |
|---|---|---|
| 63:32 | bias | signed, added to the accumulator |
| 31:16 | mult | unsigned fixed-point scale |
| 15:8 | shift | right shift |
| 7:0 | zp | output zero point |

The output is
`clip(((acc + bias) * mult [+ 2^(shift-1) if rounding]) >>> shift + zp, 0, 2^BW - 1)`.
The lower clip bound gives ReLU. With a suitable scale, the upper bound
gives ReLU6. Rounding or truncation is chosen per CU by the ROUND register.
Batch norm is assumed to be folded into the weights, bias and scale offline.

## The operators

### Depthwise / normal KxK convolution (`conv_kxk`)

This is the hardest part of the design. One module covers both cases; the
`DEPTHWISE` parameter picks one at synthesis time.

*Line buffer.* The buffer has 4 row slots (K+1 rounded up to a power of two).
Each slot holds W_MAX pixels, and each pixel is one wide word with all N_MAX
channels. Incoming elements go into slot `y mod 4` at pixel x, channel c. The
input is accepted while its row is less than 4 rows past the oldest row
that the current output row still needs. So the next row streams in while
the current output row is computed.

*Window.* The window is K x K x N_MAX registers. Each load reads one column
(K rows, all channels) from the line buffer and shifts it in from the right.
Rows or columns outside the image read as zero, which gives padding K/2.
When the window has its K columns it is "full", and one job is issued.
- At stride 1, the next job needs one more column.
- At stride 2, it needs two.
- At the end of an output row, the column counter restarts at -1 (the
  padding column).

An output row starts only when every input row it needs is in the line
buffer.

*Multiply and reduce.* A job multiplies the whole window by the weights in
one cycle (K*K*N_MAX multipliers). Then one pipelined adder tree per channel
sums the K*K products.
- **Depthwise:** the N channel sums go into a scratchpad. A serializer feeds
  them, one per cycle, to the approximator. The next job waits until the
  scratchpad is empty.
- **Normal:** a second adder tree sums over the input channels. The window
  stays in place for M cycles, with one output channel issued per cycle,
  each using its own weight row. Output pixels therefore come out one by
  one, so the depthwise stage after it can start early.

*Output.* Results pass through the approximator/clip unit into a 16-entry
FIFO. A job is issued only when the FIFO has room for it, counting results
still in the pipeline. A stalled consumer therefore never loses data, and
no pipeline stage needs a stall input.

Latency from job issue to FIFO:
- Depthwise: 1 + ceil(log2 9) + 1 + 1 cycles, plus the serializer.
- Normal: the same plus ceil(log2 N_MAX) for the channel tree.

### Pointwise convolution (`pw_conv`)

The input scratchpad holds one pixel's N channels and has two banks. While
one pixel is being computed, the next one arrives. For each output channel,
N_MAX multipliers form the dot product of the pixel with one weight row in
a single cycle. An adder tree sums it and the approximator requantizes it.
The result is one output element per cycle. A pixel therefore takes
max(N, M) cycles, because the input also moves one element per cycle.
Channels at or above N contribute zero, so any N up to N_MAX works. The
Classifier CU uses the same module with 16-bit outputs.

### Average pool (`avg_pool`)

The input arrives channel-fastest, so the pool keeps one accumulator per
channel and adds each element as it passes. After the last pixel, it
streams out one value per channel, scaled by a record (mult/shift set by the
host to about 1/(h*h)). This replaces an explicit reshape of the feature map.

### Residual add (`residual_add`)

This is a combinational join of the projection output with a second stream:
the block's input tensor, read again from memory by the CU. The sum is
requantized with one record (the AUXQ registers). With residual disabled,
the projection output passes straight through.

## Compute-unit frame (`cu_shell`)

Every CU has the same frame around its operator chain.

- **Registers (`cu_regs`)**, 16 words:

  | index | name | notes |
  |---|---|---|
  | 0 | CTRL | write: bit0 start, bit1 clear done, bit2 interrupt enable |
  | 1 | STATUS | bit0 busy, bit1 done |
  | 2 | IN_ADDR | |
  | 3 | OUT_ADDR | |
  | 4 | RES_ADDR | |
  | 5 | PRM_ADDR | |
  | 6 | H | input height = width |
  | 7 | N | input channels |
  | 8 | M | output channels |
  | 9 | E | expanded / intermediate channels |
  | 10 | STRIDE | Head: [1:0] conv, [3:2] depthwise. Body: [1:0] depthwise, bit4 residual enable |
  | 11 | ROUND | |
  | 12 | AUXQ_LO | extra record (residual or pool scale), low half |
  | 13 | AUXQ_HI | high half |

  `irq = done & enable`.
- **Sequencer:** IDLE -> LOAD -> RUN -> DONE.
  - LOAD copies all parameters into the operators' scratchpads.
  - RUN starts the operators, the input reader, the residual reader and the
    output writer together.
  - DONE comes when the writer has had its last word accepted.
- **DMA:** the parameter loader, two read channels (`mem_to_stream`) and one
  write channel (`stream_to_mem`) share the CU's memory port through a
  round-robin arbiter (`mem_arbiter`).

**Parameter segments.** A CU's parameters lie one after another from
PRM_ADDR. Each segment starts on a fresh word.

| CU | segments in order |
|---|---|
| Head | conv weights (8-bit, row m, column (c*3+ky)*3+kx), conv records (E), depthwise weights (4-bit, column (c*3+ky)*3+kx), depthwise records (E), pointwise weights (row m, column c), pointwise records (M) |
| Body | expansion weights (E x N), records (E), depthwise weights (E*9), records (E), projection weights (M x E), records (M) |
| Tail | pointwise weights (M x N), records (M); the pool record is in AUXQ |
| Classifier | weights (M x N), records (M) |

## Memory port and register bus

The top (`deepdive_top`) has plain ports:
- a register bus: `reg_we`, `reg_addr[5:0]`, `reg_wdata`, `reg_rdata`.
  Address bits [5:4] select the CU: 0 Head, 1 Body, 2 Tail, 3 Classifier.
- one interrupt per CU;
- one memory port.

On the memory port, a requester holds `req/we/addr/wdata` until `gnt` is
high in the same cycle. Reads return later, in request order, as one-cycle
`rvalid` pulses that must always be accepted. Arbiters route read data back
by a tag FIFO. One arbiter sits inside each CU, and one in the top joins the
four CUs. These two buses stand in for the AXI-Lite and AXI HP ports that a
processor SoC would provide. A bridge to AXI is not part of this RTL.

A host runs one layer like this:
1. Write the registers of the chosen CU.
2. Write CTRL = 5 (start, interrupt enable).
3. Wait for `irq[cu]`.
4. Write CTRL = 2 (clear).

Different CUs may run at the same time; the end-to-end test runs the Head
on one image while the Body works on the previous one.

## Sizes and what fits

Defaults (MobileNet-V2, width 0.75, 224x224):

| CU | sizes |
|---|---|
| Head | conv 3 -> 24 on a 224-wide image, depthwise 24 channels / 112 wide, pointwise 24 -> 16 |
| Body | input 120, expanded 720, output 240, maps up to 112 wide |
| Tail | 240 -> 1280 |
| Classifier | 1280 -> 1000 |

These fit every MobileNet-V2 variant at width 0.75, 0.5 and 0.35, with
input sizes 224 down to 96. Width 1.0 does not fit: it needs 960 depthwise
channels and 320 projection outputs. EfficientNet's squeeze-and-excitation
blocks are not built. 6-bit datapaths need the BW parameters of the CU
instances changed.

## Where this RTL departs from the source design

- **Depthwise throughput.** The depthwise operator finishes about one output
  pixel every N+7 cycles, not one window per cycle. A second channel-sum
  scratchpad would remove the wait.
- **Head input path.** The Head reads the image through the same streaming
  read channel as the other CUs, rather than through a separate
  memory-to-memory buffer.
- **Residual source.** The residual operand is re-read from memory.
- **Choices of this design:** the quantization record format, the register
  map, the bus protocols, the segment layout, the buffer depths and the
  credit scheme.
- **Not included.** The host processor, DRAM, memory controller, SMMU and
  vendor interconnect are outside this RTL; the testbench models the host
  and the memory. The training/quantization flow and the generator that
  sizes the CUs are software and are not included.
- **Synthesis.** The RTL is written to be synthesizable and lints clean
  apart from style warnings. Full-size synthesis is large: the Body CU's
  depthwise stage alone has 6480 multipliers. No FPGA timing closure has
  been attempted.

## Verification

Each testbench in `tb/` is self-checking and prints
`TB_RESULT checks=N failures=F`. `tb/dd_tb_pkg.sv` holds independent
reference models (convolution, pointwise, average, residual,
requantization) and data generators. `tb/ddr_model.sv` is a memory that
withholds grants at random and returns reads after a fixed latency.

| testbench | covers |
|---|---|
| tb_adder_tree | sums and latency for several sizes |
| tb_approx_clip | requantization over random records, both rounding modes |
| tb_stream_fifo | ordering under random valid/ready, full/empty |
| tb_conv_kxk | depthwise (4-bit) and normal (8-bit) instances: strides 1/2, odd and even sizes, random back-pressure; cycle bound per layer |
| tb_pw_conv | random shapes up to the maxima; one output element per cycle |
| tb_avg_pool | random maps; drain timing |
| tb_residual_add | join handshake rules and values |
| tb_dma | read channel, write channel and arbiter with three requesters |
| tb_param_loader | every scratchpad write of three segments |
| tb_cu_regs | register read/write, start pulse, done, interrupt |
| tb_deepdive_top | end to end, see below |

`tb_deepdive_top` runs the top with all defaults. It pushes one 16x16 RGB
image through Head, two Body invocations, Tail and Classifier:
- one Body invocation uses the residual, the other uses stride 2;
- a second image goes through the Head concurrently with the first Body.

It compares every output tensor with the reference chain. It also checks
that these events actually happened:
- memory grant stalls;
- CU contention for memory;
- concurrent CUs;
- back-pressure inside a fused chain;
- residual transfers;
- stride-2 rows;
- one interrupt per start.

It runs in well under a second of simulation after about a minute of
compilation.

To run one testbench with plain verilator, from the directory that holds
`rtl/` and `tb/`:

    verilator --binary --timing --assert -Wno-fatal rtl/dd_pkg.sv tb/dd_tb_pkg.sv \
        tb/tb_deepdive_top.sv -y rtl -y tb --top-module tb_deepdive_top
    obj_dir/Vtb_deepdive_top
