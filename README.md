# An ODEBlock accelerator for ODENet inference on a low-cost FPGA

A residual network (ResNet) stacks many building blocks. Each one adds a
learned correction to its input: `z_{t+1} = z_t + f(z_t, theta_t)`. That update
is one step of the Euler method for the ODE `dz/dt = f(z, t, theta)`. An ODENet
keeps a single block and runs it `M` times with one shared set of weights
`theta`. This trades parameter memory for repeated execution, which suits an
FPGA with a few hundred kilobytes of on-chip RAM. It fits better still when
the network is reshaped so that one layer does most of the work. The reduced
ODENet "rODENet-3" runs the 64-channel, 8x8 stage (`layer3_2` of a CIFAR
ResNet) `(N-8)/2` times. It runs `layer1` only once and drops `layer2_2`.

This RTL is that repeated block, the **ODEBlock**. It runs on the
programmable logic of a Zynq-class device. A processor runs the other layers
(the first convolution, the two down-sampling blocks, pooling and the
classifier). It loads the block's input and weights, starts `M` Euler steps
and reads the result back. One Euler step is

```
  z  <-  z + h * f(z),     f(z) = BN2( conv2( ReLU( BN1( conv1(z) ) ) ) )
```

Both convolutions are 3x3 with stride 1, over `C` input and `C` output
channels of an `H x W` map. BN is batch normalisation. The defaults
(`C=64, H=W=8`, 16 multiply-add lanes) are the `layer3_2` configuration with
16-way convolution parallelism (called `conv_x16` in the source
publication). The same RTL builds the other two blocks that were offloaded:
`layer1` (16 ch, 32x32) and `layer2_2` (32 ch, 16x16).

## Number format

All data is **32-bit signed fixed point, Q20**: 11 integer bits, a sign bit
and 20 fractional bits, covering about ±2048 with a step of about 1e-6. The
format comes from the source design. The rounding rules below are this
implementation's own:

* Products are exact Q40 values in 64-bit accumulators.
* A value goes back to Q20 by an arithmetic right shift of 20 (rounding
  towards minus infinity) and then **saturates** to the 32-bit range.
* Division truncates towards zero. A square root is the floor of the
  integer square root.

The testbench package `tb/ode_ref_pkg.sv` follows these rules. Every
end-to-end test compares the hardware bit for bit with it.

## Datapath and memory organisation

```
           host port (load z, theta; read result)
                |            |               |
          +-----v----+  +----v-----+   +-----v------+
          | buffer z |  | param    |   | buffer R   |
          | (input)  |  | BRAM     |   | (result)   |
          +--+----+--+  | W banks  |   +--^-----+---+
   conv1 src |    | z   | gamma/   |      |     | copy R->z between steps
             v    |     | beta     |      |     v
       +-----------+    +--+----+--+      |   (to z)
       |conv_engine|<------+    |         |
       | P lanes   |--> buffer T          |
       +-----------+    (temp)            |
       +-----------+                      |
       | bn_unit   |<--- gamma/beta ------+
       | ÷  √  MAC |  BN1+ReLU in T, BN2+Euler in R
       +-----------+
```

There are three feature-map buffers (`fmap_bram`), each holding `C*H*W`
words:

* **z**: the block input and the Euler state.
* **T**: the map between the two convolutions.
* **R**: the second convolution's output. The Euler step overwrites it with
  `z + h*f`.

`ode_ctrl` runs them in this order:

| step  | reads       | writes          | unit                          |
|-------|-------------|-----------------|-------------------------------|
| CONV1 | z, weights 0 | T              | `conv_engine`                 |
| BN1   | T, BN set 0 | T (in place)    | `bn_unit` with `relu`         |
| CONV2 | T, weights 1 | R              | `conv_engine`                 |
| BN2   | R, z, BN set 1 | R (in place) | `bn_unit` with `euler_update` |
| COPY  | R           | z               | `ode_ctrl`, skipped after the last step |

### Why the buffers are banked by channel

The convolution's parallelism is across **output channels**. Lane `l` of
`P` computes output channel `g*P + l`. For each output pixel the engine
visits every input channel `ic` and every tap `(ky, kx)`, one per cycle:

* One input value `x[ic][y+ky-1][x+kx-1]` is read and broadcast to all
  lanes.
* Each lane reads its own weight `w[g*P+l][ic][ky][kx]`.

Two layouts make this work:

* **Weights.** Weights are split into `P` banks by output channel
  (`oc % P`). All lanes read the same address, each in its own bank, at

  ```
  conv*(C/P)*C*9 + (oc/P)*C*9 + ic*9 + ky*3 + kx
  ```

* **Feature maps.** Maps are split into `P` banks by channel (`c % P`),
  with channel `c`'s pixel `p` at address `(c/P)*H*W + p`. A convolution
  reads one word per cycle: it drives the shared address and picks bank
  `ic % P`. When a pixel is finished, the `P` lanes write output channels
  `g*P..g*P+P-1` in **one** cycle, one word per bank at one address.

The copy from R to z also moves `P` words per cycle.

Every read is synchronous, one cycle, like block RAM. The convolution has
two pipeline stages:

1. addresses are issued;
2. data arrives and the multiply-add units (`mac_unit`) accumulate.

The write-back follows one cycle later. Taps outside the image (one pixel of
zero padding keeps the map `H x W`) feed zero and still take their cycle.
There is no bias, because BN follows each convolution.

### Cycle budget

```
convolution : (C/P) * H*W * C * 9 + 3
BN (each)   : about C * (2*H*W + 240)    serial divider (66) x3, root (34)
copy        : (C/P) * H*W + 2
```

At the defaults one Euler step takes about **342k cycles**. Two
convolutions account for 295k of them. At 100 MHz that is 3.4 ms. Fewer
lanes raise the convolution time in inverse proportion, as the source
design also reports. With a single lane (`P=1`) the convolutions take about 99%
of a step, the share the source design gives for its single-unit version.
`cycles` on the top reports the exact count of the
last run. At the defaults the end-to-end test measured 2,054,995 cycles for
six steps.

## Batch normalisation: statistics in hardware

The block normalises with the statistics of the map it is working on: one
image, per channel. It does not use stored running averages. So the
hardware needs a mean, a variance and a standard deviation. For each channel
`bn_unit` works as follows:

1. **Statistics pass.** One pass over the `H*W` values. Two multiply-add
   units accumulate `S1 = sum(x * 1.0)` and `S2 = sum(x*x)`.
2. **Scale and shift.**
   * `mean = (S1>>20) / N` and `E[x²] = (S2>>20) / N` use the serial
     divider `fx_divider`, with `N = H*W`.
   * `var = max(0, E[x²] - mean²) + eps`, with `eps = 1e-5`.
   * `sigma = isqrt(var << 20)` uses the serial root `fx_sqrt`.
   * `scale = (gamma << 20) / sigma` is one more division, once per channel.
3. **Normalise pass.** A second pass computes
   `y = ((x - mean)*scale >> 20) + beta` and writes it back in place, one
   word per cycle. After BN1, `relu` clamps negative values to zero. After
   BN2, `euler_update` reads `z` at the same address and writes
   `z + (h*y >> 20)`. The Euler add and the ReLU never need a pass of
   their own.

The BN parameters are kept next to the weights in `param_bram`. Each BN has
a scale `gamma` and a shift `beta` per channel.

## Using the block

Top: `odeblock_top #(C, H, W, P)`. `C` must be a multiple of `P`. Clocking
and reset: one clock and an asynchronous active-low reset `rst_n`. Memory
contents are not reset.

Host port, word addressed, with `addr = {region[1:0], offset}` and
`offset` of `$clog2(max(2*C*C*9, C*H*W))` bits, wide enough for all
weights and for a whole map:

| region | contents | offset |
|---|---|---|
| 0 | input z (write/read) | `c*H*W + y*W + x` |
| 1 | weights (write) | `conv*C*C*9 + oc*C*9 + ic*9 + ky*3 + kx` |
| 2 | BN parameters (write) | `bn*2C + c` for gamma, `bn*2C + C + c` for beta |
| 3 | result (read) | `c*H*W + y*W + x` |

`host_we` writes `host_wdata`. `host_re` returns `host_rdata` with
`host_rvalid` one cycle later. The port is ignored while `busy` is high.

To run the block:

1. Load z, the weights and the BN parameters.
2. Pulse `start` with `iters = M` and the step size `h` (Q20).
3. Wait for the one-cycle `done` pulse.
4. Read region 3.

`iter` shows the current step. `iters = 0` returns at once and changes
nothing.

## Modules

| file | role |
|---|---|
| `rtl/ode_pkg.sv` | Q20 types, saturation helpers, step and region enums, eps |
| `rtl/odeblock_top.sv` | buffers, units, port steering by step, host port, handshake assertions |
| `rtl/ode_ctrl.sv` | step sequencer, iteration loop, R->z copy, cycle counter |
| `rtl/conv_engine.sv` | 3x3 convolution with `P` lanes |
| `rtl/mac_unit.sv` | one multiply-add unit (Q20 x Q20 into 64 bits) |
| `rtl/bn_unit.sv` | batch normalisation with fused ReLU / Euler update |
| `rtl/fx_divider.sv`, `rtl/fx_sqrt.sv` | serial divider (66 cycles) and square root (34 cycles) |
| `rtl/relu.sv`, `rtl/euler_update.sv` | the two element-wise steps |
| `rtl/fmap_bram.sv`, `rtl/param_bram.sv` | banked feature-map and parameter memories |

## Simulating

Each module has a self-checking testbench `tb/tb_<module>.sv`. It prints
`TB_RESULT checks=N failures=F` and uses `tb/ode_ref_pkg.sv` as the golden
model where arithmetic is involved. To build and run one:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/ode_pkg.sv tb/ode_ref_pkg.sv tb/tb_odeblock_top.sv --top-module tb_odeblock_top
./obj_dir/Vtb_odeblock_top
```

The end-to-end testbenches:

* **`tb_odeblock_top`** runs a reduced block: 8 channels, 4x4, 4 lanes,
  3 steps.
* **`tb_odeblock_full`** runs the default size with no overrides: 64
  channels, 8x8, 16 lanes. It does 6 Euler steps, the `layer3_2` load of
  rODENet-3 with N = 20.
* **`tb_odeblock_layers`** builds the `layer1` and `layer2_2` sizes with
  16 lanes and runs one step of each, through the helper
  `tb/odeblock_layer_run.sv`. One step takes 368,205 cycles for `layer1`
  and 343,181 for `layer2_2`.

Each loads random data through the host port and compares every result word
with the model. Each also checks the cycle count and counts the design's
mechanisms: Euler iterations, copies, ReLU clamping, and host writes blocked
while busy. The reduced test runs in seconds; the default-size ones take
a minute or two with Verilator.

## How far to trust it, and where it departs from the source design

* The **structure** follows the published design: the five steps, the BRAM
  for z, result and theta, the `M`-step loop, Q20, and a division and a
  square-root unit for BN. So do the **sizes**: channel counts, map sizes
  and 16 lanes. The **insides** are this implementation's own, because the
  source describes them only by function. That covers the banking, the
  pipelines, the handshakes, the serial divider and root, the fused ReLU and
  Euler update, the R->z copy, padding, eps, and rounding and saturation.
* **Speed.** The source design reports 1.64M cycles per `layer3_2`
  execution with 16 lanes, about five cycles per multiply-add. This
  pipeline does one per cycle per lane: about 342k cycles per step. The
  source does not say why its version is slower, so its figure is not
  reproduced.
* **ReLU.** The source says multiply-add units serve the convolution and
  ReLU steps. Here ReLU is a comparison fused into the first BN's write-back
  and needs no multiply-add unit.
* **Lane count.** `P` may be any divisor of `C` (1 to 64 for `layer3_2`). The
  source built 1, 4, 8, 16 and 32 lanes and used 16, because 32 missed its
  100 MHz timing. No timing analysis was done for this RTL.
* **Map sizes.** One passage of the source gives the map sizes of
  `layer1`/`layer2_2`/`layer3_2` as 8x8/16x16/32x32. Its network table gives
  32x32/16x16/8x8. This RTL follows the table, the usual CIFAR ResNet layout.
* **Missing parts.**
  * The processor-to-logic link (AXI and DMA) is not part of this design. The
    source did not complete it either and assumed one cycle per word.
  * The processor, DRAM and software layers are not modelled. The host port
    stands in for them.
* **BRAM fit.** At the defaults the memories hold 2.76 Mbit: 2.36 Mbit of
  weights and three 128 Kbit maps. That should map to roughly 104 of the 140
  36-Kbit block RAMs of an XC7Z020. No FPGA place and route was run.
* **Overflow.** The BN statistics accumulate `x²` in 64 bits. Channels of
  64 values with magnitudes near the Q20 limit (±2048) would overflow that
  sum. Normal activations are far below this.
