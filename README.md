# ShiftCNN convolution pipeline in SystemVerilog

ShiftCNN computes convolutional layers without multipliers. Every weight is
quantized to a sum of `N` signed powers of two (or zero). Each of these
powers of two comes from a small codebook addressed by a `B`-bit index.
Weights can take only a few distinct values. So the pipeline forms every possible
weight-times-input product once per input element, using only shifts and
negations. It then builds each output by *selecting* products with the weight
indices and *adding* them. The number of product operations falls by a factor
of roughly `C~ * H_f * W_f / P`. All remaining work is additions.

This RTL implements the convolutional-layer datapath and its control:
the shift arithmetic unit (ShiftALU), the precomputed-term buffer, one index
multiplexer per input channel, a pipelined adder tree, and the
bias/accumulate stage. The four tensor memories (input, weights, bias,
output) stay outside the top module, behind simple one-cycle read ports.

Default configuration (all parameter defaults):

| symbol | meaning | default |
|---|---|---|
| `C` | input channels processed in parallel (parallelization level; equal to the layer's input channel count) | 128 |
| `N` | codebooks, i.e. powers of two summed per weight | 2 |
| `B` | bits per weight index | 4 |
| `M = 2^B - 1` | codebook entries | 15 |
| `P = M + 2(N-1)` | precomputed terms per input element, zero included | 17 |
| `K = floor(P/2)` | distinct magnitudes `2^0 .. 2^-(K-1)` | 8 |
| `XW` | input element width | 8 |
| `PW` | precomputed term width | 16 |
| `ACCW` | bias / output tensor width | 32 |

## 1. Weight representation

A weight is `w = sum over n = 1..N of C_n[idx(n)]`. Codebook `n` holds zero
and `+-2^-(n-1), +-2^-n, ..., +-2^-(n + floor(M/2) - 2)`. With `N = 2, B = 4`:

* `C_1 = {0, +-1, +-1/2, ..., +-1/64}`
* `C_2 = {0, +-1/2, ..., +-1/128}`

Each weight therefore takes `N * B = 8` bits of index. An index is a `B`-bit
two's-complement number in `[-floor(M/2), +floor(M/2)]`, which is `[-7, 7]` for
`B = 4`. Its meaning is:

| `idx(n)` | weight contribution |
|---|---|
| 0 | 0 |
| `v != 0` | `sgn(v) * 2^-(abs(v) + n - 2)` |
| `-2^(B-1)` (`4'b1000`) | unused code, treated as 0 |

This is the encoding produced by the ShiftCNN quantization procedure. That
procedure runs offline on floating-point weights. It greedily picks, per
codebook, the nearest power of two of the remaining residual, rounding in the
log domain at `log2(1.5)`. It stores `sgn * (2 - n - exponent)` and sets the
index to zero when that falls outside the codebook. The procedure is not part
of the hardware.

All products of an input `x` with any codebook entry are among the
`P - 1 = 2K` values `+-x * 2^-s`, `s = 0 .. K-1`. Zero is the `P`-th value.

## 2. Fixed-point formats

* Input elements: `XW = 8`-bit signed, dynamic fixed point. The radix point
  is a per-layer convention outside this datapath.
* Precomputed terms: `PW = 16`-bit signed. The input is placed with `K - 1 = 7`
  extra fraction bits: `term = x * 2^(K-1-s)` as an integer. Every shift is
  therefore exact. Negating `-128 * 2^7` still fits, because `XW + K <= PW`
  (an elaboration-time assertion checks this).
* Adder tree output: `PW + clog2(C) = 23` bits, full precision.
* Bias and output tensor: `ACCW = 32` bits. They use the same scale, so an output is
  `bias + sum(x * w) * 2^(K-1)`. No rounding or saturation happens anywhere.
  The output scale and any later requantization belong to the next layer.

## 3. Datapath

```
 input tensor ──x──> shift_alu ──16 terms──> precomp_buffer (16 x C x 16 bit)
                                                 │ C x 16 terms
 weight memory ──C indices──> C x term_mux <─────┘
                                  │ C x 16 bit
                                  v
                           adder_tree (clog2 C levels, registered)
                                  │ 23 bit
 bias memory ──> [bias | Y old] ──+──> accumulate_unit ──> output tensor
                      ^                                        │
                      └────────────── read back ───────────────┘
```

**shift_alu** passes `x` through and feeds it into a chain of `K - 1`
arithmetic right-shift-by-one stages. Each of the `K` values also goes
through a negation. The output order is `terms[2s] = +x*2^-s`,
`terms[2s+1] = -x*2^-s`. It is combinational.

**precomp_buffer** is `P - 1` shift registers of length `C`. In each cycle of
the fill phase it takes all 16 terms of one channel. After `C` shifts, channel
`c` sits at index `c`. All `C x 16` terms are visible at once.

**term_mux** (one per channel) turns that channel's index `idx(n)` into the
term with shift `s = abs(idx) + n - 2` and the index's sign, or into zero.
Sixteen terms plus zero need more than `B` select bits. The multiplexer
therefore also takes the codebook number `n` from the control loop.

**adder_tree** adds the `C` multiplexer outputs in `clog2(C)` levels. Each
level ends in a register. It accepts a new set of operands every cycle.

**accumulate_unit** adds the tree sum to one of two values. It uses the bias
of the output channel for the first contribution to an output element, and
otherwise the element's current value read back from the output tensor. It
writes the result back.

## 4. Schedule: scatter accumulation

The control loop (`conv_controller`) runs one pass over the input pixels in
raster order:

```
for each input pixel (h, w):
    FILL: read X[0..C-1][h][w], one channel per cycle, into the ShiftALU   (C cycles)
    COMP: for oc in 0..C~-1, n in 1..N, fh in 0..H_f-1, fw in 0..W_f-1:      (C~*N*H_f*W_f cycles)
              read the C indices W[oc][0..C-1][fh][fw] of codebook n
              Y[oc][h - fh + pad_h][w - fw + pad_w] += sum over c of select(P[c], idx)
```

Only one pixel's precomputed terms exist at a time. The buffer therefore holds
`(P-1) * C` entries instead of a whole precomputed tensor. The price is
that each input pixel *scatters* its contributions. Tap `(fh, fw)` of input
pixel `(h, w)` belongs to output pixel `(h - fh + pad_h, w - fw + pad_w)`,
with `pad = floor((K_f - 1) / 2)`. This gives "same" padding with stride 1, so
the output has the input's height and width. Partial sums are read back from
the output tensor and added to. A tap whose output pixel lies outside the
tensor still takes its cycle but does not write. Zero padding is therefore
implicit.

The bias is added to the first contribution an output element receives, in
processing order. That is the contribution from codebook `n = 1`, tap
`fh = 0` (or input row 0), and tap `fw = 0` (or input column 0). The
controller computes this `first` flag. The bias multiplexer in front of the
output adder uses it.

**Cycle count.** A layer of shape `C~ x H x W` with an `H_f x W_f` kernel takes

    H * W * (C + C~ * N * H_f * W_f)  +  clog2(C) + 2

cycles from the cycle in which `start` is sampled to the `done` pulse. Only
`C * H * W` of these are ShiftALU cycles. In a conventional design each of the
`C~ * H_f * W_f * C * H * W` multiplications would be a product operation.

## 5. Pipeline timing and the read-back bypass

Consider an operation issued by the controller in cycle `t`:

| cycle | action |
|---|---|
| `t` | weight-index read (`w_rd_*`) |
| `t+1` | indices arrive; `C` multiplexers; adder tree input |
| `t+L` | output-tensor read (`y_rd_*`) or bias read (`b_rd_*`), `L = clog2(C)` |
| `t+L+1` | tree sum arrives; accumulate; output-tensor write (`y_wr_*`) |

The output-tensor read is delayed to `t+L`, so it happens as late as
possible. Only the operation immediately before can then still have an
unwritten result for the same element. This happens with `1 x 1` kernels,
where the codebooks `n = 1, 2` of one output channel hit the same element in
consecutive cycles. The accumulate unit keeps the value it wrote in the
previous cycle. It uses that value instead of the stale read when the
addresses match.

Input elements read in cycle `t` arrive in `t+1` and enter the buffer at the
end of `t+1`. The fill of the next pixel begins in the cycle after the last
operation of the current one. The buffer changes only after the last
operation's multiplexers have used it.

## 6. Interfaces of `shiftcnn_top`

All memory ports are synchronous reads with one cycle of latency. The output
tensor must be *read-first*: a read and a write of the same element in the
same cycle return the old value. Addresses are structures from
`shiftcnn_pkg`:

| port group | direction | contents |
|---|---|---|
| `start`, `cfg` | in | one-cycle start pulse while idle; `cfg` = `{out_ch, height, width, kh, kw}` sampled with it |
| `busy`, `done` | out | `busy` high during the layer; `done` one-cycle pulse after the last write |
| `x_rd_en`, `x_rd_addr {h, w, c}`, `x_rd_data` | out/out/in | input tensor, 8-bit element |
| `w_rd_en`, `w_rd_addr {oc, n, fh, fw}`, `w_rd_data[C][B]` | out/out/in | the `C` indices of one filter tap and codebook; `n` is zero-based |
| `b_rd_en`, `b_rd_addr`, `b_rd_data` | out/out/in | bias of one output channel |
| `y_rd_en`, `y_rd_addr {oc, h, w}`, `y_rd_data` | out/out/in | output tensor read-back |
| `y_wr_en`, `y_wr_addr`, `y_wr_data` | out | output tensor write |

Layer limits from the address widths: up to 4095 output channels, feature
maps up to 255 x 255, and kernels up to 7 x 7. The input channel count of a
layer must equal `C`. Fewer channels can be padded with zeros in the input
memory (zero inputs contribute nothing). The remaining widths, `OC_W`, `HW_W`,
`K_W`, `NI_W` and `CI_W`, are package constants.

## 7. Sizes of the networks the architecture targets

With the defaults, a layer fits when its input channel count is at most 128
(zero-padded up to 128) and its stride is 1. The figures below are the
well-known shapes of these public networks; they are not taken from this design.

* SqueezeNet v1.1 has 3x3 and 1x1 kernels, but layers with 256 and 512 input
  channels, and a stride-2 first layer. Its stride-1 layers with up to 128
  input channels fit.
* GoogleNet, ResNet-18 and ResNet-50 have up to 832, 512 and 2048 input
  channels, and stride-2 7x7 stems. The same partial coverage applies.

`tb/tb_workload_layers.sv` runs four such stride-1 layers at the default
size. It uses random data, not trained weights, and checks every output.

| layer | in -> out channels, map, kernel | cycles | ShiftALU cycles |
|---|---|---|---|
| SqueezeNet v1.1 fire9 expand3x3 | 64 -> 256, 13x13, 3x3 | 800,393 | 21,632 |
| GoogleNet inception(3a) 5x5 | 16 -> 32, 28x28, 5x5 | 1,354,761 | 100,352 |
| ResNet-18 conv2_x | 64 -> 64, 56x56, 3x3 | 4,014,089 | 401,408 |
| ResNet-50 conv2_x 1x1, map cut to 14x14 | 64 -> 256, 14x14, 1x1 | 125,449 | 25,088 |

ShiftALU cycles are `C * H * W`. They count 128 channels because narrower
inputs are zero-padded. The much larger total is the selection-and-add
loop, one cycle per `(oc, n, fh, fw)`. With one adder tree, additions
dominate the run time, just as they dominate power.

Processing `C > 128` would need several passes over channel groups. In such
passes the bias is selected only in the first pass. The read-back path
already supports this, but the controller does not sequence it. Stride 2 is
not implemented either.

## 8. Where this design goes beyond the published description

The architecture, the ShiftALU structure, the shift-register organization of
the precomputed buffer, the index multiplexers, the adder tree, the
bias/feedback multiplexer and the loop order follow the ShiftCNN description.
The default sizes are those of its FPGA evaluation: `C = 128`, `N = 2`,
`B = 4`, 8-bit inputs and 16-bit terms.

This implementation chose the following itself:

* the index encoding in the hardware: two's complement, plus `n` as an extra
  multiplexer select;
* the fixed-point alignment: 7 fraction bits; a 32-bit bias and output;
* the scatter interpretation of the loop nest and the rule for the bias;
* the register after every adder-tree level;
* the read timing of the output tensor and the one-entry bypass;
* the memory port protocol, the start/busy/done handshake, the runtime layer
  shape and the address widths.

The ShiftALU is combinational. The buffer acts as its pipeline register.

Storage cost is worth knowing. At the defaults the precomputed buffer alone
is 16 x 128 x 16 = 32,768 bits of registers. The published FPGA figures for
this configuration (about 2,200 flip-flops and 4,000 LUTs) are far smaller.
That build must have mapped the shift registers into LUT-based shift
registers or other memory. Here the buffer is written as plain registers,
and a synthesis tool may map it the same way.

The same pipeline covers smaller weight fields through its parameters. A
ternary model (`N = 1, B = 2`, weights `{0, +-1}`) gives `K = 1`: one
pass-through value and one sign flip. The binary corner case (`B = 1`, no
zero in the codebook) would need the 1-bit index to be read as a sign, not
as a two's-complement number. This decoder does not do that. Only the
default configuration and `C = 4 / 8` have been simulated.

Not implemented: the tensor memories themselves, weight quantization
(an offline step), channel-group passes for `C_layer > C`, and strides
other than 1.

## 9. Files

| file | content |
|---|---|
| `rtl/shiftcnn_pkg.sv` | constants, `num_m`/`num_p`/`num_mag`, address and operation structs |
| `rtl/shift_alu.sv` | shift arithmetic unit |
| `rtl/precomp_buffer.sv` | precomputed-term shift-register buffer |
| `rtl/term_mux.sv` | per-channel index multiplexer |
| `rtl/adder_tree.sv` | pipelined adder tree |
| `rtl/accumulate_unit.sv` | bias/read-back multiplexer, output adder, bypass |
| `rtl/conv_controller.sv` | loop control and address generation |
| `rtl/shiftcnn_top.sv` | the pipeline |
| `tb/tb_*.sv` | one self-checking testbench per module |
| `tb/tb_shiftcnn_top.sv` | end-to-end test at `C = 8`: five layer shapes, including 1x1, 5x5 and non-square kernels |
| `tb/tb_shiftcnn_full.sv` | end-to-end test with all defaults (`C = 128`) |
| `tb/tb_workload_layers.sv` | four network-shaped layers at the default size (section 7) |

The end-to-end testbenches model the memories. They compare every output
element with a direct convolution that uses ordinary multiplication. They
check the cycle count formula and count each mechanism: bias selection,
read-back, bypass, out-of-range taps, zero and negative indices.

## 10. Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert rtl/shiftcnn_pkg.sv rtl/*.sv tb/tb_shiftcnn_top.sv \
          --top-module tb_shiftcnn_top -o sim
./obj_dir/sim
```

Replace `tb_shiftcnn_top` with any other testbench name. Each testbench prints
`TB_RESULT checks=<n> failures=<m>`. To try another configuration, change the
parameters `C`, `N`, `B` of `shiftcnn_top`. `P` and `K` follow from `N` and `B`.
Keep `XW + K <= PW`.
