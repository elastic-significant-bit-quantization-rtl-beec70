# ESB convolution accelerator in SystemVerilog

Elastic significant bit (ESB) quantisation keeps only the leading `k+1`
significant bits of every weight and activation. Those bits are stored in a
tiny floating-point code, ESB(b,k): one sign bit, `b-k-1` exponent bits and
`k` fraction bits. Since each operand has at most `k+1` significant bits, a
product of two operands needs only a `(k+1) x (k+1)`-bit multiply, an
exponent add and a shift. That is small enough to put thousands of
multipliers on an FPGA. This RTL implements the accelerator built around
that multiplier. It has:

- a `Tm x Tn` array of ESB multiply-accumulate units;
- ping-pong input and output buffers;
- a post-processing pipeline that pools, applies ReLU, applies the fused
  batch-norm/de-normalisation `a*x + b`, and re-quantises each result to an
  ESB code for the next layer.

The default build is ESB(4,1) with `Tn = 32` and `Tm = 96`. That is
3072 multipliers. At 145 MHz it would do `2*32*96*145e6 = 890.88` GOP/s.

## The ESB(b,k) code

A `b`-bit code has the layout `{sign, exponent[b-k-2:0], fraction[k-1:0]}`,
with the sign in the MSB. The all-ones exponent is reserved:

| exponent field   | value                              |
|------------------|------------------------------------|
| `e` (not all-ones) | `(-1)^s * 2^e * 1.f`             |
| all-ones         | `(-1)^s * 0.f` (subnormal, zero included) |

So the largest normal exponent is `EMAX = 2^(b-k-1) - 2`, and the largest
magnitude is `C = (2 - 2^-k) * 2^EMAX`. ESB(4,1) has 15 distinct values:
0, ±0.5, ±1, ±1.5, ±2, ±3, ±4 and ±6. The quantiser never produces
"negative zero": zero is always sign 0.

`rtl/esb_pkg.sv` gives the field widths as functions of `b` and `k`:

- `esb_ew`: exponent width.
- `esb_emax`: largest normal exponent.
- `esb_prod_w`: product width.

It also holds the per-layer configuration struct `layer_cfg_t`.

## Multiplying two codes (`esb_mul`, `esb_mac`)

Each operand is taken apart into three pieces:

- a sign;
- a significand `{ζ, f}`, where the hidden bit `ζ` is 1 for a normal code
  and 0 for a subnormal one;
- an effective exponent `e*ζ`, which is 0 for subnormals.

The product is

    p = (-1)^(s_w ^ s_a) * ({ζ_w,f_w} * {ζ_a,f_a}) << (e_w*ζ_w + e_a*ζ_a)

Both significands are scaled by `2^k`, so `p` is an exact integer in units
of `2^-2k`. No rounding happens anywhere in the MAC path. The signed product
width is `2(k+1) + 2*EMAX + 1`, which is 9 bits for ESB(4,1).

`esb_mac` is one MAC unit. It has `Tn` of these multipliers and a balanced
binary adder tree. Its output width is the product width plus `clog2(Tn)`.
Both blocks are purely combinational.

## Projecting onto the ESB grid (`esb_quant`)

A real value `v` is projected in three steps:

1. Saturate it to `±C` and raise the `clipped` flag.
2. Find its leading-one position `n`. `n` is clamped at 0, so magnitudes
   below 1 use the fixed grid `2^-k`, which is the subnormal range.
3. Keep `k+1` bits from `n` downward, rounding half away from zero. If
   rounding carries into a new bit, the exponent goes up by one. If that
   overflows past `C`, the result saturates.

The input is fixed point with `FRAC` fraction bits (14 by default). The
rounding rule is this design's choice. The projection itself only asks for
"a rounding".

## Tiles, trips and phases (`esb_conv`)

A layer is cut into output tiles. Each tile is `TH x TW` output pixels by
`Tm` output channels. The input channels are cut into slices of `Tn`.

- One **trip** processes one input slice for one output tile. Its
  `K*K*oh*ow` **phases** each take one cycle. In each phase all
  `Tm x Tn` multipliers work on the same input pixel and the same kernel
  tap.
- The loop order is kernel row `ky`, kernel column `kx`, output row `y`,
  output column `x`. The innermost loop is over pixels, so a set of weights
  stays fixed for `oh*ow` cycles. The weights are fetched from an external
  synchronous memory, one tap per request, and arrive one cycle later.
- For each phase the module:
  1. reads the input word at `(y*S+ky)*TIW + x*S+kx`, where `S` is the
     convolution stride;
  2. reads the `Tm` accumulators of pixel `(y,x)`;
  3. adds the `Tm` MAC sums;
  4. writes the accumulators back.
- On the first slice of a tile (`clear`), the first tap writes the sums
  rather than adding them.
- A trip takes `K*K*oh*ow + 2` cycles from `start` to `done`. A full tile
  needs `n_cin_tiles` trips.

Each input bank holds the whole input window of one output tile:
`TIH x TIW` pixels with `TIH = (TH-1)*S_MAX + K_MAX`. That is 59 x 59 at the
default sizes, so an 11 x 11, stride-4 kernel fits.

## Ping-pong buffering and the tile controller (`esb_accel`)

Both buffers come in two banks:

- **Input (`esb_in_buf`).** The host loads the next slice into one bank
  while the convolution module reads the other. The banks swap after every
  trip.
- **Output (`esb_out_buf`).** The convolution module accumulates a tile in
  one bank while the post-processing module drains the other. The banks swap
  after every tile.

Loading, computing and post-processing therefore overlap. The top
controller keeps a full/empty flag for each bank and handles three kinds of
wait:

- A trip **stalls** when its input slice has not been loaded yet.
- A new tile **waits** while both output banks are still full.
- Post-processing **waits** for a finished output bank.

The host side has four interfaces:

| interface | signals | rule |
|-----------|---------|------|
| load  | `ld_valid, ld_addr, ld_data, ld_last` / `ld_ready` | a write is accepted only while `ld_ready` is high. `ld_last` closes the slice. |
| tile  | `tile_valid` / `tile_ready`, `coef_a`, `coef_b` | the coefficients are sampled in the accepting cycle and stay with that output bank. |
| weight | `wt_rd_en, wt_ky, wt_kx, wt_slice` → `wt_data` | data one cycle after the request. |
| store | `st_valid, st_tile, st_oy, st_ox, st_m, st_code` | one ESB code per cycle. |

`cfg` is static for a layer. It carries:

- the kernel size, convolution stride and tile output size;
- the number of input slices per tile (`n_cin_tiles`, up to 1023);
- the pooling window `p` and pooling stride `s`.

## Post-processing (`esb_post`, `esb_mp_relu`, `esb_bn_dn`)

The pipeline has three register stages and emits one output per cycle. It
walks pooled row, pooled column, then channel, with the channel innermost.
A tile gives `ceil(oh/s) * ceil(ow/s) * Tm` codes in
`ceil(oh/s)*ceil(ow/s)*Tm + 3` cycles.

1. **MP&ReLU.** It reads up to `P_MAX^2` accumulators of one channel at
   once and takes the maximum of the valid ones, then clamps it at 0.
   Pooling comes before ReLU, which gives the same result as the opposite
   order and saves work. A window that runs past the tile edge is cut to
   its part inside the tile, and `ev_partial` pulses.
2. **BN and DN.** This stage computes `y = a*x + b` with per-channel signed
   coefficients: 18 bits, 14 of them fraction. Offline, `a` and `b` absorb
   four things:
   - the `2^-2k` unit of the accumulator;
   - the layer scale;
   - batch normalisation;
   - division by the next layer's quantisation step.
3. **ESB quant.** This stage projects `y` onto the ESB grid as above.
   `ev_clip` marks saturation.

## Sizes

| parameter | default | origin |
|-----------|---------|--------|
| `B`, `K` | 4, 1 | main ESB(4,1) configuration |
| `TN`, `TM` | 32, 96 | main configuration |
| `TH`, `TW` | 13, 13 | chosen: the 13 x 13 maps of AlexNet conv3–5 |
| `K_MAX`, `S_MAX` | 11, 4 | chosen: AlexNet conv1 |
| `P_MAX` | 3 | chosen: 3 x 3 pooling |
| `AW` | 24 | chosen: accumulator bits |
| `CW`, `CF` | 18, 14 | chosen: coefficient bits / fraction bits |

The other ESB(b,k) settings of the evaluation are parameter changes of the
same RTL, for example ESB(3,0), ESB(5,2) or ESB(8,5) with their own
`Tn`/`Tm`. The multiplier and quantiser tests run several of them.

The 24-bit accumulator holds the largest AlexNet sum. For example, conv3
is `3*3*256 = 2304` products of at most 144 units each, which is
`331776 < 2^23`. Fully-connected layers run as 1 x 1 convolutions on a 1 x 1 tile. Each
trip is then one phase plus two cycles of overhead, so the MACs are busy a
third of the time. Every phase needs `Tm x Tn` fresh weights.

Layer maps larger than a tile are cut into tiles of one size, since `cfg`
is static for a layer. For example, a 55 x 55 map becomes 5 x 5 tiles of
11 x 11, and a 32 x 32 map becomes 4 x 4 tiles of 8 x 8. Choosing a tile
size that the pooling stride divides keeps pooling windows inside tiles.

## Where this RTL departs from the published design

- **Pooling windows across tiles.** The original design caches a window
  that a tile edge cuts and finishes it on the next trip. This RTL instead
  pools over the part of the window inside the tile. Pooled outputs on tile
  seams can differ from an untiled layer. Choose tile sizes that the
  pooling grid divides to avoid this.
- **Output staging buffer.** The original design has a separate buffer for
  the quantised codes before they are written back. Here the codes stream
  straight out on `st_*`.
- **BN/DN arithmetic.** The original converts the accumulator to floating
  point before `a*x + b`. Here the same affine map is done exactly in fixed
  point.
- **Input bank size.** This is the full input window of a tile, not
  `Th x Tw x Tn`, so strided and large kernels need no halo reloading.
- **Weight supply.** Weights come from an external memory port. The
  routing between buffers and MACs is plain wiring inside `esb_conv`.
- **Controller, handshakes and reset.** These are this design's own.
  Control state is reset asynchronously, active low. The memories are not
  reset.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator 5, for
example:

    verilator --binary --timing --assert --top-module tb_esb_accel \
        -y rtl -y tb +libext+.sv -Irtl -Itb rtl/esb_pkg.sv tb/tb_esb_accel.sv -o sim
    ./obj_dir/sim

The testbenches:

- `tb_esb_mul` compares the multiplier exhaustively with a reference that
  decodes both codes to real numbers. It runs ESB(4,1), (2,0), (5,2) and
  (8,5).
- `tb_esb_quant` compares the quantiser with a nearest-value search over
  the whole code set.
- `tb_esb_conv` and `tb_esb_post` work at small tile sizes. They also check
  the trip and tile cycle counts given above.
- `tb_esb_accel` runs four small layers end to end:
  - 3x3 and 1x1 kernels, strides 1 and 2;
  - 1, 2 and 3 input slices;
  - pooling 1, 2 and 3.

  The host model is random, with gaps in loading. It checks every stored
  code against a reference layer computed in the testbench. It also counts
  each mechanism and fails if one never happened: input stall,
  load/compute overlap, compute/post overlap, full-output-bank wait, cut
  pooling window, saturation and ReLU zero.
- `tb_esb_accel_full` runs the top with every parameter at its default,
  ESB(4,1) and 32 x 96 MACs. The layer is one 13 x 13 output tile of a 3 x 3
  convolution over two input slices, with 3 x 3 / 2 pooling.
  It stores 9416 codes, every one checked. It builds in under a minute and
  runs in seconds.
- `tb_esb_accel_alexnet` also runs at the default size, on two
  AlexNet-shaped layers with two output tiles each:
  - an 11 x 11, stride-4 kernel over one slice, on 11 x 11 tiles with
    3 x 3 / 2 pooling, like conv1;
  - a 3 x 3 kernel over eight slices, which is 256 input channels, on the
    whole 13 x 13 map, like conv3.

The small and full-size end-to-end tests share one body,
`tb/esb_accel_tb_body.svh`. A new layer shape is a new entry in a
testbench's `LAYERS` list, given as
`{k_size, conv_stride, out_h, out_w, n_cin_tiles, pool_p, pool_s}`.
