# A unified logarithmic layer kernel for compact CNN inference

A CNN accelerator usually needs a different number format for each layer,
because weights and activations span very different ranges from layer to
layer. This design removes that need. Every weight and every activation of
every layer is normalised to the range [-1, 1], and one layer-specific
power-of-two scale factor brings each layer's output back into that range.
With the same formats everywhere, one small kernel computes every
convolutional and fully-connected layer:

* weights are 4-bit logarithmic codes, so a "multiplication" is a shift;
* activations are 8-bit fixed point with 7 fraction bits;
* biases are 16-bit fixed point with 15 fraction bits;
* after the dot product come ReLU, a shift by the layer scale 2^i, and a
  requantisation back to 8 bits.

The RTL here is that kernel: 128 shift-and-add processing elements plus the
per-lane output stage. It follows the arithmetic of the published method,
*A Very Compact Embedded CNN Processor Design Based on Logarithmic Computing*
(Lu, Chin, Wu, Tsay). The publication gives the number formats, the order of
operations and the PE count. It does not give the kernel's interface, timing,
dataflow or memory system, so those are this design's own choices. The
sections below say which is which.

## 1. Number formats

| quantity | bits | encoding | value |
|---|---|---|---|
| weight `w` | 4 | `{sign, e[2:0]}` | (-1)^sign · 2^-e, so ±1 … ±2^-7 (no zero code) |
| activation `a` | 8 | two's complement, 7 fraction bits (Q1.7) | code / 128, range ±127/128 |
| bias `b` | 16 | two's complement, 15 fraction bits (Q1.15) | code / 32768 |
| layer scale `f` | 5 | signed exponent `i` | 2^i, i = -16 … +15 |
| accumulator | 32 | two's complement, 15 fraction bits | exact sum |

Zero cannot be encoded as a weight: the logarithmic quantiser maps every
weight to the nearest ±2^-e and clamps small ones to ±2^-7. Weights and
biases are quantised offline, during training, and the kernel receives them
already in these formats.

## 2. What one layer computes

For layer *l*, with normalised weights W̄, inputs Â and bias b̂:

    Z  = Σ a·w + b                      (dot product, one per output value)
    A' = Q8( g(Z) · 2^i )               (g = ReLU or identity)

Here 2^i is the layer scale. The software that trains and exports the network
chooses it: it is the product of the layer's weight normalisation factor and
the previous layer's activation normalisation factor, divided by this layer's
activation normalisation factor, rounded to a power of two. The scale can
only be applied after g() because ReLU and the identity are homogeneous of
degree 1 (g(αx) = α·g(x)). An activation function without this property would
need one shift before g() and a second shift after it. This kernel does not
provide that two-shift form.

`Q8` is the activation quantiser:

* |x| ≤ 2^-8: the result is 0 (`zero_o`);
* otherwise |x| is rounded to the nearest multiple of 2^-7, with halves going
  away from zero;
* a result above 127/128 is clamped to 127/128 (`sat_o`);
* finally the sign of x is restored.

The method as published writes the saturation level as 1 − 2^-9, which a
7-fraction-bit code cannot hold. Clamping to the largest code gives exactly
the same codes as "round, then clamp to ±127".

## 3. The datapath, bit by bit

The kernel keeps every intermediate value exact and rounds only once, in the
quantiser. This is the hardest part to follow, so here it is step by step:

1. **Shift instead of multiply** (`log_mult`). a·2^-e is formed as
   `a <<< (7 − e)`, a 16-bit result with 14 fraction bits. The shifted value is
   negated when the weight's sign bit is set. No bits are lost.
2. **Accumulate** (`log_pe`). The product is aligned to 15 fraction bits (one
   more left shift) and added to a 32-bit accumulator. On the first beat of a
   pass, the accumulator starts from the bias instead of its old value. The
   bias is already in Q1.15, so adding it costs no cycle. The 16 integer bits
   hold any dot product of up to 65 535 terms. The longest dot product in the
   networks listed below has 25 088 terms.
3. **ReLU** (`relu_unit`), applied to the 32-bit accumulator value.
4. **Scale** (`scale_unit`). The value is shifted left by `i + 16` into a
   64-bit word read with 31 fraction bits. A right shift by up to 16 keeps
   all its bits, and a left shift by up to 15 cannot overflow.
5. **Requantise** (`act_quantizer`). Take the magnitude, add half an output
   LSB (2^23 at 31 fraction bits), shift right by 24, compare against the
   zero limit 2^-8 and the clamp 127, then restore the sign.

## 4. Kernel organisation and dataflow

`pe_array` holds 128 PEs, the number given for the chip. On each beat, one
activation is broadcast to all PEs, and each PE receives its own 4-bit
weight. A pass of N beats therefore yields 128 dot products of length N, one
per lane. In a convolution, the 128 lanes are 128 output channels of one
output pixel, and the N beats are that pixel's receptive field,
(input channel × kernel rows × kernel columns). In a fully-connected layer,
the lanes are 128 outputs and the beats are the inputs. A layer with more
than 128 outputs takes several passes, one per group of 128. The broadcast
dataflow is this design's choice: the publication gives only the PE count.

Each of the 128 lanes has its own ReLU, scale and quantiser. The output
register is separate from the accumulators. A new pass can therefore begin on
the cycle after the previous pass's last beat, while the previous results are
still being quantised.

## 5. Interface and timing (`lcnn_core`)

| signal | dir | meaning |
|---|---|---|
| `cfg_we_i`, `cfg_i` | in | write the layer configuration `{relu_en, scale_exp[4:0]}` |
| `in_valid_i` | in | a beat is present on `act_i` and `wgt_i[128]` |
| `in_first_i` | in | first beat of a pass; `bias_i[128]` is sampled on this beat |
| `in_last_i` | in | last beat of a pass; may coincide with `in_first_i` |
| `out_valid_o` | out | one-cycle pulse; `act_o[128]` and the flags then hold the results |
| `clipped_o`, `zero_o`, `sat_o` | out | per lane: ReLU clipped, flushed to zero, saturated |
| `busy_o` | out | a pass has started and not yet received its last beat |

The rules:

* The kernel accepts one beat per cycle.
* `in_valid_i` may drop between beats for any number of cycles. The
  accumulators hold their values meanwhile.
* A pass uses the configuration held in the register when its first beat
  arrives. The next layer's configuration can therefore be written during
  the current pass, as long as it is written no later than the cycle before
  the next pass's first beat.
* Two assertions check the framing: a beat outside a pass must carry
  `in_first_i`, and `in_first_i` must not appear inside a pass.

```
cycle        k-1     k       k+1     k+2
in_valid     1       1       0/1     ..
in_last      0       1       (the next pass may start in k+1)
done_q                       1
out_valid                            1      act_o valid from here on
```

The results appear two cycles after the cycle that carries the last beat. A
pass of N beats with no pauses thus takes N + 2 cycles from its first beat to
its results. Back-to-back passes overlap those two cycles, so sustained
throughput is 128 shift-and-adds per cycle. At the 200 MHz clock reported for
the FPGA version, that is 51.2 GOPS peak (counting a multiply-accumulate as
two operations). The FPGA version reports 48.23 GOPS for Yolov2, about 29.5
GOP per frame in 0.611 s. This kernel would need at least 0.58 s for the same
frame.

Reset is asynchronous and active low. It clears the accumulators, the
configuration and the output registers.

## 6. What is not in this RTL

The kernel computes the convolution, ReLU, scaling and requantisation of
one layer and nothing around them. The publication describes none of the
following, so none is built:

* **Storage.** There are no weight, activation or bias buffers. The FPGA
  version used on-chip block RAM whose organisation is not given. Weights,
  activations and biases enter through the stream ports.
* **Layer sequencing.** Loop order, tiling and the address generation that
  turns a layer into passes are not included. `tb/lcnn_workload_tb.sv` shows
  one straightforward mapping.
* **Other layer operations.** Pooling, residual additions (ResNet), the
  reorg layer and leaky ReLU (Yolov2) are not included. The workload
  testbench does max-pooling itself.
* **Offline steps.** The weight and bias quantisers, the choice of the
  layer scales and the quantisation-aware training all run in software.

## 7. Choices made here where the method is silent

* The weight code puts the sign in bit 3, with 1 meaning negative.
* The accumulator is 32 bits with 15 fraction bits and wraps on overflow.
* The scale exponent is signed, 5 bits. The published training procedure
  quantises the scale with the same 4-bit logarithmic code as the weights,
  which would allow only 2^0 … 2^-7. The wider signed range covers that
  range and also allows left shifts.
* Rounding is exact, done once, with halves going away from zero.
* ReLU can be switched off per layer, for output layers with no activation.
* The stream interface, the per-pass configuration latch, the two-cycle
  latency and the asynchronous reset are all this design's own.

## 8. Applicability to the evaluated networks

| network | longest dot product | fits 65 535-term accumulator |
|---|---|---|
| LeNet-5 | 400 (FC 400→120) | yes |
| AlexNet | 9 216 (FC6) | yes |
| VGG16 | 25 088 (FC6) | yes |
| ResNet-18 / 34 | 4 608 (3×3×512) | yes |
| Yolov2 | 11 520 (3×3×1280 after reorg) | yes |
| Tiny-Yolov2 | 9 216 (3×3×1024) | yes |

The layer sizes are the standard ones for these networks. Each network also
needs the operations of section 6 around the kernel.

## 9. Files

| file | contents |
|---|---|
| `rtl/lcnn_pkg.sv` | formats, sizes, `logw_t` and `layer_cfg_t` |
| `rtl/log_mult.sv` | shift-and-negate product |
| `rtl/log_pe.sv` | one PE: product plus accumulator with bias preload |
| `rtl/pe_array.sv` | 128 PEs with broadcast activation |
| `rtl/relu_unit.sv` | ReLU or identity |
| `rtl/scale_unit.sv` | exact shift by 2^i |
| `rtl/act_quantizer.sv` | Q8 requantiser |
| `rtl/lcnn_core.sv` | top: array, 128 output stages, configuration, control |
| `tb/lcnn_ref_pkg.sv` | real-number reference of the equations above |
| `tb/*_tb.sv` | one self-checking testbench per module, plus the two below |
| `tb/lcnn_core_tb.sv` | end-to-end kernel test at full size, with random passes |
| `tb/lcnn_workload_tb.sv` | LeNet-5 layer by layer, plus the longest VGG16 and Yolov2 dot products; weights come from a hash, not from training, so it checks the arithmetic, not accuracy |

Every testbench compares against `lcnn_ref_pkg`. The reference computes in
double-precision reals directly from the equations in section 2, which is
exact for these operand sizes. Every testbench ends by printing
`TB_RESULT checks=N failures=M`.

`lcnn_core_tb` also counts how often each mechanism occurs and fails if any
never occurs. The mechanisms are: input pauses, back-to-back passes,
one-beat passes, a configuration written during a pass, ReLU clipping, ReLU
bypass with negative results, left and right scale shifts, flush to zero and
saturation. It also checks the two-cycle latency of every result.

To simulate with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb \
    rtl/lcnn_pkg.sv tb/lcnn_ref_pkg.sv tb/lcnn_core_tb.sv \
    --top-module lcnn_core_tb -o sim
./obj_dir/sim
```

Replace `lcnn_core_tb` with any other testbench name. Each testbench finishes
within seconds, and the workload testbench within about half a minute. The
RTL is parameterised through `lcnn_pkg`. The lane count is also a parameter
of `lcnn_core` and `pe_array` (`N_PE`, default 128).
