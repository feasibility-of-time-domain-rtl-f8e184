# DEN16: a streaming fixed-point speech denoiser for FPGA

A hearing aid has about 10 ms between a sound reaching the microphone and
the processed sound reaching the ear. A time-domain denoising network can
work within that limit only if each small hop of audio is processed as it
arrives. It also cannot wait on external memory for each of its 1.4 million
weights.

DEN16 is an accelerator built around that constraint. It runs a causal
SuDoRM-RF++-style denoiser (an encoder, four multi-rate U-ConvBlocks, a mask
head and an overlap-add decoder) in 16-bit fixed point. It keeps almost every
parameter in on-chip memory. Only one part of one layer stays in DDR: the
mask-matrix rows that are used once per frame. The accelerator reads those
rows on demand while the mask is being computed.

This repository gives synthesizable SystemVerilog for the accelerator core.
It includes:

* the AXI4-Lite control slave;
* the AXI4 read master that reaches the DDR parameter buffer;
* the AXI4-Stream audio ports;
* a self-checking testbench for every unit and for the whole core, with the
  full-size core tested against an independent integer model.

## What one frame computes

Audio is 16 kHz, Q4.12 samples. Every `STRIDE = 20` new samples (1.25 ms)
make one frame. For frame `f` the core computes, with all arithmetic in
Q4.12:

| stage | operation | size (defaults) |
|---|---|---|
| encoder | `e[c] = relu(b[c] + Σ_k W[c][k]·x[20f+20-41+k])` | 1 → 512 channels, 41 taps |
| bottleneck | `v0 = B·e + b` (1×1 conv) | 512 → 256 |
| U-ConvBlock ×4 | `p = prelu(P·v + b)`, `z = pyramid(p)`, `v' = v + R·prelu(z) + b` | 256 → 512 → 256 |
| mask head | `m[r] = b[r] + Σ_i M[r][i]·prelu(v4[i])` | 256 → 512 |
| final PReLU | `l[c] = prelu(m[c]) · e[c]` | 512 |
| decoder | `y[20f+k] += Σ_c D[c][k]·l[c]`, overlap-add, plus one bias | 512 → 1, 41 taps |

Each frame's 20 finished output samples leave on the AXI4-Stream master.
They are samples `20f .. 20f+19`, which no later frame changes. The last
sample of a run carries `tlast`.

### Number format

Every value, weight and activation is a signed 16-bit word with 12 fraction
bits, in the range [-8, 8).

* A product is formed at full 32-bit width, shifted right by 12 (flooring),
  and cut to 16 bits.
* Sums wrap at 16 bits.

There is no rounding and no saturation anywhere. This is the cheapest
fixed-point mode, and the reference models in `tb/` restate it in plain
integer code (`rmul`, `rprelu` in `tb_util_pkg`). Because the sums wrap, the
order of accumulation does not change any result. The reference models
therefore do not have to copy the hardware's lane order.

## The multi-rate temporal pyramid

The pyramid in `dw_pyramid` is the least conventional unit. It gives each
U-ConvBlock a receptive field of many frames at low cost. For every one of
the 512 channels it holds four causal depthwise FIR filters of 6 taps:

* Level 0 filters the block's projection output every frame.
* Level `l ≥ 1` filters the outputs of level `l-1`, but only at frames where
  `f mod 2^l == 2^l − 1`. That is a stride-2 decimation of the level below.
  Level 1 therefore runs every 2nd frame, level 2 every 4th and level 3 every
  8th.
* Between its updates, each level's last output is held. This is
  nearest-neighbour upsampling back to the frame rate.
* The fused output is `y0 + hold1 + hold2 + hold3`.

The state per channel is small:

* four histories, one per level, each as deep as the taps;
* three hold registers.

Level `l`'s history is pushed only when level `l-1` produces a value.
Because of that, each filter sees its own decimated time axis and is never
recomputed. A `clr` pulse at the start of each run clears the state, which
takes `C` cycles with `busy` high.

Three points are this design's own choices:

* **Update phase.** A level fires on the last frame of each group of `2^l`
  frames, so the newest input it needs is always ready.
* **Number of taps.** The kernel is described as "11, effectively 6". The
  RTL stores and applies the 6 effective causal taps.
* **History depth.** The per-level history depth equals the tap count.

## Where the parameters live

All parameters form one linear array of 16-bit words in DDR. Its base address
is written by the host. The order below is fixed by the offset functions in
`den16_pkg`. Each unit takes its words from a shared write bus during the
preload, by index range (`BASE` parameter).

| group | words (defaults) | kept |
|---|---|---|
| encoder W[512][41], b[512] | 21,504 | on chip |
| bottleneck W[256][512], b[256] | 131,328 | on chip |
| 4 × U-ConvBlock: projection W, b and PReLU slopes; pyramid W[4][512][6], b[4][512]; residual PReLU slopes, W, b | 4 × 278,272 | on chip |
| final PReLU slopes [512] | 512 | on chip |
| decoder W[512][41], bias | 20,993 | on chip |
| mask b[512], slopes[256], rows 0–31 | 8,960 | on chip (first array) |
| mask rows 32–281 | 64,000 | on chip (second array) |
| mask rows 282–511 | 58,880 | **DDR, read every frame** |

The preload copies the first 1,360,385 words. The remaining 58,880 words are
never copied.

The split of the mask matrix into 32 / 250 / 230 rows is taken from the
published design. There the three parts sit in block RAM, LUT RAM and DDR.
Here the first two parts are two separate arrays. Which FPGA memory primitive
each array maps to (URAM, BRAM or LUTRAM) is left to synthesis. The RTL has no
vendor attributes.

## Control: preload and inference

The host programs the core through AXI4-Lite (`axi_lite_ctrl`):

| offset | register |
|---|---|
| 0x00 | bit 0 start (write 1), bit 1 done (cleared by reading), bit 2 idle |
| 0x10 | mode: 0 = preload, 1 = inference |
| 0x18 | byte address of the parameter array in DDR |
| 0x20 | number of frames for an inference run |

**Mode 0 (preload).** The parameter loader reads words `0 .. 1,360,384` in
bursts and broadcasts each word with its index. When the last word is in, the
run reports done.

**Mode 1 (inference).** The core first clears the pyramid and overlap-add
state. It then processes the requested number of frames from the input
stream, and reports done after the last output sample.

Input flow control keeps the input at most one frame ahead of the frame being
computed: `s_axis_tready` drops once a whole next frame is buffered. The
output port waits on `m_axis_tready`. Both kinds of stall are normal
operation.

## Schedule and timing

The stages of a frame run one after another under a small sequencer in
`den16_top`. Each stage writes its results straight into the input buffer of
the next stage while it computes, so no separate transfer step exists. Every
matrix stage uses four MAC lanes, `mac4`: four Q4.12 products are added to
the accumulator each cycle.

| stage | cycles at the defaults |
|---|---|
| encoder | 512/4 × 41 + 6 = 5,254 |
| bottleneck | 256 × 512/4 + 2 = 32,770 |
| each U-ConvBlock | 2 × 256 × 512/4 + 7 = 65,543 |
| mask head, 282 cached rows | 282 × (256/4 + 1) = 18,330 |
| mask head, 230 DDR rows | 230 × (256 + DDR latency) |
| decoder | 41 × 512/4 + 2, then 20 output beats |

The stage work sums to about 3.83e5 cycles per frame. With the test DDR model
the measured period is 398,860 cycles. At 800 frames per second, real-time
operation therefore needs a clock of about 320 MHz with four lanes. `LANES`
is a parameter of every matrix unit, and more lanes shorten the frame in
proportion.

Most DDR traffic in inference comes from the mask tail: 230 rows of 256
words each per frame. `axi_rd_master` reads each row as 16-bit INCR bursts of
up to 256 beats. It splits a burst wherever it would cross a 4 KB boundary,
and keeps up to four bursts in flight.

## Module map

```
den16_top
├── axi_lite_ctrl        control registers
├── param_loader         preload broadcast + on-demand mask-row reads
│   └── axi_rd_master    AXI4 read bursts, 4 KB split, 4 outstanding
├── encoder              circular sample history, 1→512 conv, ReLU
├── pw_conv              bottleneck 1×1 (512→256)
├── uconv_block ×4
│   ├── pw_conv          projection 256→512, PReLU after
│   ├── dw_pyramid       4-level multi-rate depthwise pyramid + fusion
│   └── pw_conv          PReLU before, residual 512→256; + skip
├── mask_head            PReLU + 256→512 with three-way row storage
├── final_prelu          PReLU, times the encoder output
└── decoder_ola          transposed conv, 65-word overlap-add ring, AXIS out
```

`den16_pkg` holds:

* the Q4.12 type and the `fmul`/`prelu`/`relu` functions;
* the parameter-bus struct;
* the layout functions that every unit and every testbench share.

Every unit's handshake is the same: write the input vector with
`in_valid/in_idx/in_data`, pulse `start`, and collect `out_valid/out_idx/
out_data` until `done`. Each file begins with a description of its timing.

## Testing it

Each unit has a self-checking testbench `tb/tb_<unit>.sv`. It runs at reduced
sizes, compares against an integer reference computed inside the testbench,
checks the cycle counts listed above, and has a watchdog. Three whole-core
tests are:

* `tb_den16_top`: the core at small sizes (16/8/16 channels, 9 taps, stride 4,
  10 frames). It drives the core through the AXI4-Lite port exactly as a host
  would, with preload and then inference.
  * It randomises AXI read latency, arready, input gaps and output
    back-pressure.
  * It checks every output sample and `tlast` against the reference network.
  * It counts these mechanisms and fails if any never happened: preload
    bursts, the mode switch, input stalls, output back-pressure, DDR mask-row
    reads, more than one read in flight, a 4 KB burst split, a level-3 pyramid
    update, and wrap-around of the overlap-add ring.
* `tb_den16_full`: the same test with the core at its default sizes. It runs
  a full preload of 1.36 M words and 8 frames, and takes about 10 s of
  simulation on a desktop machine.
* `axi_mem_model` is the behavioural DDR read slave used by these tests. It
  holds no data: word `i` of the parameter array is the hash `pgen(i)`, which
  the reference models compute too.

To run one with Verilator 5 (2-state, timing enabled), list the packages
first:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
  rtl/den16_pkg.sv tb/tb_util_pkg.sv \
  $(ls rtl/*.sv | grep -v _pkg) $(ls tb/*.sv | grep -v tb_util_pkg) \
  --top-module tb_den16_full -Mdir obj && ./obj/Vtb_den16_full
```

Each test ends by printing `TB_RESULT checks=N failures=M`.

The test parameters are small hashed values (about ±0.125). The outputs
therefore test the datapath bit for bit, but they are not meaningful audio.
No trained weights are included.

## How far this follows the published DEN16 design

These points follow the published design:

* the stage order and sizes: 512 basis functions, kernel 41, stride 20, four
  U-ConvBlocks of 256/512 channels, a four-level pyramid, one mask and an
  overlap-add decoder with a 65-word ring;
* Q4.12 arithmetic with truncation and wrap-around;
* grouped 4-lane MACs in the 1×1 stages;
* circular buffers for the encoder history and the decoder state;
* the mode 0 / mode 1 preload and inference flow under AXI4-Lite control;
* AXI4-Stream audio and an AXI4 master to a linear parameter buffer;
* the three-way split of the mask matrix, with its tail read from DDR on
  demand.

These are this design's own choices:

* the exact parameter layout and register map;
* ReLU and a bias in the encoder;
* one scalar decoder bias;
* the pyramid's update phase and tap count, as described above;
* one mask row fetched at a time, with no prefetch;
* AXI burst limits of 256 beats and 4 outstanding bursts;
* stages that run one at a time within a frame, and frames that do not
  overlap. Only the input of the next frame is buffered while the current
  frame is computed.

Not built:

* DMA engines, the host software and the DDR itself. The core exposes the
  AXI ports they connect to.
* The 32-bit floating-point variants and the two-speaker separation variants
  of the network.
* Mapping onto specific FPGA memory types.
* The published latency, 9.7 ms to the first sample. It depends on a clock
  frequency and a degree of loop unrolling that are not given, and it is not
  reproduced here.
