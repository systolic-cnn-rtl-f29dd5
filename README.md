# Systolic-CNN accelerator in SystemVerilog

This is a single-precision CNN inference accelerator built around a
one-dimensional systolic array of processing elements (PEs). Three
architectural parameters size it:

- `PE_NUM` is the number of PEs. Each PE computes a different output channel.
- `VEC_FAC` is the number of input channels handled per cycle. It is the
  SIMD width of every inner product.
- `REUSE_FAC` is the number of inner-product (IP) units per PE. Each IP unit
  computes a neighbouring output pixel from the same, shifted input stream.

The defaults are the Arria 10 configuration, PE_NUM = 16, VEC_FAC = 16 and
REUSE_FAC = 4. That is 1024 fp32 multiply-accumulates per cycle. The hardware
has no knowledge of any particular network. A host describes each layer at run
time with a `layer_cfg_t` record and pulses `start`:

- convolution, or fully connected in batch mode;
- optional element-wise residual sum (ELTWISE) and ReLU;
- or a pooling layer.

One layer then runs to a `done` pulse. Feature maps and weights live in
off-chip memory. It is reached through four ports: IFM read, weight read,
residual read and output write.

```
            +-------------+   weights    +--------------------------------------+
  wt port ->|weight_loader|--(wr bus)--> | PE_0 -> PE_1 -> ... -> PE_{PE_NUM-1} |
            +-------------+              |   (conv_engine, deskew of outputs)   |
            +-------------+  window+ctrl |                                      |
 ifm port ->| ifm_buffer  |------------->|                                      |
            +-------------+              +-----------------+--------------------+
                  ^ en (stall)                             | PE_NUM results / cycle
                  |                                        v
            +-----+------------------------------------------------+
 res port ->| mem_write: FIFO -> ELTWISE add -> ReLU -> lane mask   |-> ofm port
            +-------------------------------------------------------+
            +------+  (uses ifm port and ofm port when cfg.op = OP_POOL)
            | pool |
            +------+            layer_ctrl sequences all of the above
```

## Memory layout

- Memory is word-addressed. One word holds `VEC_FAC` fp32 values: 512 bits at
  the defaults.
- **Feature maps.** A map of C channels, H rows and W columns occupies
  `ceil(C/VEC_FAC)*H*W` words. The word for channel group g, row y, column x
  is at `base + (g*H + y)*W + x`.
- **Unused channels.** Channels beyond C in the last group must be zero. This
  includes the 3-channel input image.
- **Weights.** Output channel o has `NV = CG*k*k` words, starting at
  `wt_base + o*NV`. Word `(g*k + ky)*k + kx` holds the VEC_FAC input-channel
  weights of tap (ky, kx) for channel group g.
- **Output channels.** A group of PE_NUM output channels is written into lanes
  `(grp*PE_NUM) % VEC_FAC` onward of the output word. A lane write mask is used
  for this. It also blanks lanes past `out_c`.

## IFM buffer (`ifm_buffer`)

This is the reader of input feature maps. It also holds the shift-register
IFM buffer of REUSE_FAC words of VEC_FAC values.

**Load order.** The design works on output blocks of `rw` neighbouring pixels
in one output row. For each block it loads the input in this order:

1. for each channel group;
2. for each kernel row;
3. `rw + k - 1` consecutive pixels along the row, one word per cycle.

Once `rw` words are in the buffer, each further word completes one kernel tap
for all `rw` outputs at once. IP unit r reads buffer entry `rw-1-r`. Every IP
unit of a PE uses the same weight word.

**Padding and stride.**
- Pixels that fall in the zero padding are never read. A zero word is shifted
  in instead.
- For stride S > 1, the row walk runs once per phase s < min(S, k) and visits
  only pixels `(x0+t)*S + s`. This keeps the buffer at REUSE_FAC words for
  every stride.

**Latency.** Read requests run ahead of the buffer by up to 16 words. Two
small FIFOs hold the requests still in flight and the returned data. This hides
memory latency. When no word is ready, a bubble goes down the array instead.

## Systolic PE array (`conv_engine`, `pe`, `ip_unit`)

**conv_engine.** It chains PE_NUM PEs. Each PE registers the window and its
control word and passes them to the next PE one cycle later. PE n therefore
works n cycles behind PE 0. A deskew delay of `PE_NUM-1-n` cycles on each
output realigns the results into one vector of PE_NUM values.

**pe.** A PE holds:
- a weight cache of WBUF_DEPTH words, 1024 by default, with a registered read;
- REUSE_FAC IP units;
- an output multiplexer.

The multiplexer sends the `rw` results of a block one per cycle. The first
result goes straight out; the others wait in hold registers.

**ip_unit.** An IP unit holds:
- VEC_FAC fp32 multipliers, followed by a register;
- a binary adder tree with a register after every level;
- an accumulator with a one-cycle fp32 add.

The accumulator restarts on `first` and reports on `last`. It accepts a new
term every cycle. Inner products of any length therefore fold into it without
moving partial sums.

**Timing.** An IP unit's result appears `2 + log2(VEC_FAC)` cycles after its
last term. A PE result appears `4 + log2(VEC_FAC)` cycles after its window.
The whole array adds `PE_NUM + 3 + log2(VEC_FAC)` cycles.

**Fully connected layers.** They run as 1×1 convolutions over a one-row map
whose `rw` columns are the images of a batch, with `rw ≤ REUSE_FAC`. In this
way the IP units of a PE share each weight word across the images.

## Weight loader (`weight_loader`)

Before each group of PE_NUM output channels, one read port loads the group's
weights PE by PE, `NV` words each, into the weight caches.

## Write-back (`mem_write`)

This unit takes the PE_NUM-wide output vectors into an 8-entry FIFO. For each
vector it then:

1. optionally reads the residual word and adds it lane by lane (ELTWISE);
2. optionally clamps negative values to zero (ReLU);
3. writes the result with the group's lane mask.

Its `space` output is the global enable `en` of the IFM buffer and the PE
array. When the FIFO is full, or memory refuses writes, the whole convolution
datapath freezes in place. The top reports this on `stall`.

## Pooling (`pool`)

This is a separate memory-to-memory layer, selected by `cfg.op = OP_POOL`.
- Window `k`, stride and border come from the configuration.
- Taps outside the map are skipped.
- Max pooling compares with `fp32_max`.
- Average pooling sums the taps and multiplies by the host-given
  `pool_scale`, for example 1/9.

## Layer controller (`layer_ctrl`) and top (`systolic_cnn_top`)

For a convolution layer, the controller loops over the output-channel groups.
For each group it:

1. starts the weight loader and waits for it to finish;
2. starts the IFM pass and the write-back together;
3. moves on once both have finished.

For a pooling layer it starts only the pool unit. `busy` is high for the whole
layer and `done` pulses once at the end.

## Arithmetic (`fp32_mul`, `fp32_add`, `fp32_max`)

- IEEE-754 single precision, rounded to nearest even.
- Subnormal inputs and results are flushed to zero.
- Any NaN or invalid operation gives `0x7FC00000`.
- The units are combinational. The pipelining sits in `ip_unit`.

## Departures from the published design

- **LRN is not implemented.** The published design only names this kernel.
  Its formula, constants and hardware approximation are not given.
- **Pooling is a separate layer.** The published block diagram draws it
  inline, after the convolution, while the text calls it a separate kernel.
  Here it is a memory-to-memory pass.
- **Weights are loaded, then used.** Fully connected layers load their
  weights into the PE caches like convolutions do. They are not streamed
  every cycle. Loading a group's weights does not overlap its computation.
- **One weight read port.** Weights are loaded PE by PE through one port,
  where the paper uses several load-store units in sequence. The paper does
  not give their number.
- **Stride phases.** Strides are handled by the phase scheme above, which the
  paper does not describe.
- **Loop order.** The channel-group loop sits inside each output block, so the
  accumulators hold complete sums. The paper's pseudo-code draws the channel
  loop outside.
- **No bias.** Bias addition is not present, since it is not described. Real
  networks need it, so AlexNet, ResNet and RetinaNet would need a bias stage
  added to `mem_write`.
- **ELTWISE is a two-input sum.** It reads a second map at `res_base`.
- **Parameter limits.** VEC_FAC must be a power of two, and PE_NUM must divide
  VEC_FAC. The 16/16 and 16/32 configurations both satisfy this.
- **Fixed sizes.** Weight cache 1024 words per PE, FIFO depths 16 and 8, and
  the memory handshake and layouts are this design's choices.

## Simulation

Every testbench is self-checking. It prints
`TB_RESULT checks=N failures=M` and ends with `$finish`. Build and run one
with plain verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/scnn_pkg.sv tb/fp_ref_pkg.sv tb/tb_systolic_cnn_top.sv \
    --top-module tb_systolic_cnn_top -o sim
./obj_dir/sim
```

| testbench | what it checks |
|---|---|
| `tb_fp32_arith` | add, multiply, max against a double-precision reference on random operands, cancellation-prone pairs and special values |
| `tb_ip_unit` | folded inner products of random length, latency |
| `tb_pe` | one PE with random windows, batch widths and bubbles |
| `tb_conv_engine` | a small array against per-PE reference sums |
| `tb_ifm_buffer` | window contents and control with padding, stride 2, partial blocks, batch width 2, random stalls |
| `tb_weight_loader` | every cache write, PE order, partly empty last group |
| `tb_mem_write` | ELTWISE, ReLU, masks, back-pressure |
| `tb_pool` | max and average pooling with borders |
| `tb_layer_ctrl` | group sequencing and the pooling path |
| `tb_systolic_cnn_top` | reduced array (4 PEs, VEC_FAC 4, REUSE_FAC 3) running conv with ReLU, stride 2 with ELTWISE, FC with and without batch, both poolings, with and without memory back-pressure; counts that every mechanism occurs and checks one word per cycle |
| `tb_systolic_cnn_full` | default-sized accelerator: 3×3 conv 32→20 channels with ReLU and an FC layer in batch 4 |

The testbenches use a behavioural memory (`tb/dram_model.sv`) with fixed
latency and optional random back-pressure. The reference arithmetic is in
`tb/fp_ref_pkg.sv`.
