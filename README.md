# REQ-YOLO accelerator: block-circulant CONV layers in the frequency domain

This is a SystemVerilog implementation of an FPGA accelerator for the convolution
layers of tiny YOLO. The weights are compressed so that the whole network can live
in on-chip memory.

The central idea is that each 16x16 block of a layer's weight matrix (output
channels by input channels, for one kernel position) is constrained to be
*circulant*. A circulant block is fully defined by one 16-element vector `w`. Its
product with a 16-channel input vector `x` is a circular convolution, which is
computed as

    y = IFFT( FFT(x) o FFT(w) )        (o = element-wise complex product)

Only `FFT(w)` is stored, and only its first 9 bins are kept. Because `w` is real,
bins 9..15 are the complex conjugates of bins 7..1. The sum over all input blocks
and kernel positions is taken in the frequency domain, so each output vector needs
one IFFT, not one per term:

    y_ob = IFFT( sum over jb, ky, kx of FFT(x[jb, ky, kx]) o FFT(w[ob, jb, ky, kx]) )

The stored spectra are then quantised to 6 bits, in one of two ways chosen per layer:

* **Mode 1, equal-distance.** A code is a 6-bit two's-complement level from -32 to
  31. It is multiplied like an ordinary integer, on DSP multipliers. The FFT
  butterflies multiply by twiddle factors in Q1.14.
* **Mode 2, mixed powers of two.** A code is `s ppp qq`, with 1 sign bit, a 3-bit
  primary field and a 2-bit secondary field. A field value `c` stands for `2^(c-1)`,
  and `c = 0` stands for no term. The weight is therefore `±(2^(p-1) + 2^(q-1))`,
  and a product is two shifts and an add. In this mode the butterflies also use
  shift-add twiddles: each twiddle is replaced by the nearest `±2^-a ± 2^-b`. No
  multipliers are used anywhere on this path.

Every PE holds one datapath of each kind. A layer uses one of them.

## Data organisation

| item | format |
|---|---|
| feature vector | 16 channels x 16-bit signed, one 256-bit buffer word |
| feature map in a buffer | block-major: vector `(jb, r, c)` at address `(jb*H + r)*W + c` |
| weight word (108 bits) | 9 complex codes; bin `k` at bits `[12k +: 12]`, real code in the upper 6 bits. Imaginary codes of bins 0 and 8 must be 0 |
| weight bank `p` | holds output blocks `ob = g*NUM_PE + p`; word `w_base + (g*CB + jb)*K*K + ky*K + kx` |
| BN table entry (512 bits) | channel `c`: `{scale[15:0], bias[15:0]}` at bits `[32c +: 32]`; entry `bn_base + g` in PE `p` serves output block `g*NUM_PE + p` |
| output map | written to the other buffer, block-major like the input; the pooled size is used when pooling is on |

Internal widths:
- FFT output: 21 bits.
- MAC accumulators: 40 bits.
- IFFT output: 41 bits.

BN computes `sat16(((y*scale) >>> 8) + bias)`. Leaky ReLU then multiplies negative
values by `205/2048` (about 0.1). A layer without BN (the last one) takes the IFFT
result, rounded and saturated to 16 bits.

## Processing element

```
 x (16 ch) ──> 1-2 decoder ──> FFT1 (Q1.14 mult.) ──> MAC1 (level mult.) ──> IFFT1 ──┐
                          └──> FFT2 (shift-add)   ──> MAC2 (shift-add)   ──> IFFT2 ──┤
 weight word ──> weight decoder ──> (levels / shift amounts) ───────────────────────┘
                                                                     Mux1 ─> BN + leaky ReLU ─> Mux2 ─> y
                                                                        └───── saturate ────────┘
```

A PE accepts one *term* per cycle. A term is an input vector plus the weight word for
one (input block, kernel position). `first` and `last` frame the terms of one output
vector.

- **FFT** (`fft16`): fully pipelined radix-2 decimation in time, 4 stages, 4 cycles.
  Twiddles `W^0` and `W^4 = -j` use no multiplier. The others come from a shared
  twiddle register bank. That bank holds both forms of each twiddle and resets to the
  standard values.
- **MAC** (`cmac`): computes only bins 0..8, accumulating from `first`. One cycle
  after `last` it presents the 16-bin sum, filling bins 9..15 by conjugate mirroring.
  The sum is held while the next output vector accumulates.
- **IFFT** (`ifft16`): implemented as conjugate → the same FFT kernel → real part,
  then divided by 16 with rounding (4 cycles).
- **BN** (`bn_unit`): 1 cycle.

The result appears 10 cycles after the `last` term.

A `pe_controller` delays the weight word and the framing flags by the FFT latency. It
also latches the mode and the BN/bypass choice at the start of a layer.

## Array, buffers and control

`req_yolo_top` holds:
- `NUM_PE = 32` PEs (`compute_unit`). Each PE feeds a 2x2 / stride-2 max-pooling unit.
- 32 weight banks of 4096 x 108 bits.
- Two ping-pong feature buffers A and B of 65,536 x 256 bits.
- The global controller.
- The store unit.
- The twiddle register bank.

All PEs receive the same input vector in the same cycle. Each PE reads its own weight
bank, so the array computes 32 output blocks of one pixel at once.

The **global controller** walks a layer in this order, outermost first:
1. group `g` of 32 output blocks;
2. output pixel;
3. position inside the 2x2 pooling window (when pooling is on);
4. input block `jb`;
5. kernel position `ky`, `kx`.

3x3 kernels use zero padding of 1. Padding terms do not read the buffer and feed
zeros. Addresses leave the controller registered, and the term flags follow one cycle
later, in step with the memory read data.

Two stall rules keep the back end safe:

1. **Gap stall.** The store unit writes the 32 vectors of a batch one per cycle.
   Batch-closing terms are therefore held until at least `NUM_PE` cycles have passed
   since the previous one. This only bites when a layer has very few terms per output
   vector (1x1 kernels with one input block).
2. **Drain stall.** At the end of each group the controller waits until every batch
   of the group has been written. The BN table address (`bn_base + g`) therefore only
   changes when the pipeline is empty.

The **store unit** writes vector `p` of a batch to address
`(g*32 + p)*HW + pixel`. It drops the vectors of PEs past the layer's last output
block, which happens in a partial last group.

Ping-pong. With `cfg.src_b = 0` a layer reads A and writes B, and `src_b = 1` swaps
them. A network therefore alternates `src_b` from layer to layer, and the maps never
leave the chip.

### Host interface and layer protocol

The host side stands in for the PCIe link and host CPU, which are not part of the RTL.

While `busy` is low, the host may:
- write weight words (`hw_*`), BN entries (`hb_*`), twiddles (`ht_*`) and feature
  vectors (`hf_we`, `hf_wbuf` chooses A or B);
- read feature vectors (`hf_re`; data on `hf_rdata` one cycle later).

Host accesses while `busy` is high are ignored.

A layer is started by presenting a `layer_cfg_t` on `cfg_in` with a one-cycle
`start`. The configuration holds:
- height and width;
- input and output block counts (up to 64 each);
- 3x3 or 1x1 kernel;
- mode;
- BN enable;
- pooling enable;
- source buffer;
- weight base;
- BN base.

`busy` rises, and `done` pulses when the last vector has been stored. `stall_gap`,
`stall_drain`, `pad_term` and `skip_block` are activity outputs for monitoring.

Cycle count of a layer: about `groups * pixels * CB * K*K` cycles. Small layers add
the two stalls and about 45 cycles of pipeline drain per group.

## How far it goes, and where it departs from the paper

Followed from the paper:
- block size 16 with FFT → MAC → IFFT per PE;
- storing only `N/2+1` spectrum bins;
- the two quantisation modes with their 6-bit code layouts;
- the two FFT flavours (multiplier and shift-add) and the trivial-twiddle rule;
- the PE structure with its two muxes (bypassable BN);
- the register bank for twiddles;
- BRAM-resident weights;
- one input vector per cycle;
- the layer order of tiny YOLO (3x3 CONV with 2x2 pooling, 1x1 linear last layer).

This design's own choices:
- all fixed-point widths and rounding;
- the code-to-shift mapping (inferred from the paper's two decoding examples);
- the BN parameter format;
- the leaky slope constant;
- the loop order, the stall rules, the buffer layout and the host protocol;
- the number of PEs. 32 was sized so that the largest layer runs near the paper's
  reported latency; the paper does not give the count.

The paper notes that the FFT and IFFT can share one kernel per mode. Here each mode
has separate FFT and IFFT instances of the same kernel. The input stream therefore
never pauses for an IFFT, at the cost of two more kernels per PE.

Not built:
- the host CPU, host memory and PCIe link;
- the DSP48E1 low-bit packing;
- the design-space exploration and ADMM training flows, which are software;
- **2x2 max pooling with stride 1**, which tiny YOLO uses after its sixth CONV layer.
  Only stride 2 is built.

At the default sizes:
- the weights of the whole network fit in the weight banks (2,080 of 4,096 words per
  bank);
- every feature map except the 416x416 network input fits one buffer;
- the first layer therefore has to be split by the host (for example into row bands).

Numerical behaviour:
- Mode 1 matches a floating-point reference within a few LSBs. The difference comes
  from FFT rounding and the Q1.14 twiddles.
- Mode 2 is exact with respect to its own approximate twiddles. Those twiddles
  themselves differ from the true ones by up to 6% (`cos(pi/4)` becomes `0.75`). The
  training flow is expected to absorb that, as the paper's is.

## Verification

Each module has a self-checking testbench `tb/tb_<module>.sv`. Each testbench prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog.

The references are in `tb/tb_ref_pkg.sv`: a floating-point FFT with the same twiddle
values, weight-code decoding, and BN. They are written independently of the RTL.

`tb_req_yolo_top` runs three chained layers at 2 PEs. Between them they cover:
- 3x3 kernels with padding;
- mode 1 with BN and pooling;
- a partial group;
- mode 2 with bypass;
- a 1x1 single-block layer that forces the gap stall;
- reading buffer A and reading buffer B.

It counts each of these mechanisms and fails if one never happens.

`tb_req_yolo_full` runs one full layer on the top at its default size (32 PEs):
8x8x32 → 4x4x640, 3x3, mode 2, BN, pooling, with two groups of which the second is
partial. It checks all 10,240 output values.

Simulate any testbench with plain Verilator, for example:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb -Irtl -Itb \
    rtl/req_yolo_pkg.sv tb/tb_ref_pkg.sv tb/tb_req_yolo_top.sv --top-module tb_req_yolo_top
./obj_dir/Vtb_req_yolo_top
```

The full-size testbench builds and runs in about a minute.

Yosys synthesis of the full 32-PE top is slow, because each PE carries four FFT
kernels and two 9-bin complex MACs. The arithmetic is written as plain `*`, `+` and
shifts, so a synthesis tool maps it onto DSP slices or LUTs as it sees fit.
