# AON-CiM: a layer-serial analog compute-in-memory accelerator for always-on inference

Always-on perception tasks are small networks that run all the time:
- keyword spotting (KWS), which listens for a wake word;
- visual wake words (VWW), which detects whether a person is in the frame.

They must run on a few milliwatts. This accelerator stores every weight of such a network in a single analog compute-in-memory (CiM) array. The array holds 1024 rows × 512 columns of phase-change-memory (PCM) cells.

A matrix-vector product happens in the array itself, not in a digital datapath:
- Input activations become pulse trains on the rows.
- Each column's current sums code × conductance over all rows.
- An ADC per column group digitises the result.

Everything around the array is digital, and that digital part is what this RTL implements. The array itself is a behavioural model.

The central architectural idea is **layer-serial** execution. A conventional analog accelerator places every layer on its own array and streams activations between the arrays. That needs many arrays, many ADCs and DACs, and a programmable interconnect. Here the network runs one layer at a time on the one array. Activations simply circulate:

```
        +---------------------------------------------------------------+
        |                                                               |
  act_sram (read bank) --> im2col --> cim_macro --> act_proc --> act_sram (write bank)
        ^                 gathers     DACs, array,   scale, bias,        |
        |                 one pixel's 4:1 mux,       residual, ReLU,     |
        |                 input vector 128 ADCs      requantise, pool    |
        +------------------ banks swap after every layer ----------------+
```

`layer_seq` runs a small program of layer descriptors and drives this loop.

## Files

| file | contents |
|---|---|
| `rtl/aon_pkg.sv` | geometry, datapath widths, activation modes, scale format, layer descriptor |
| `rtl/cim_macro.sv` | behavioural model of the array with its PWM DACs, bitline mux, ADCs and write drivers |
| `rtl/act_sram.sv` | 2 × 64 KB activation SRAM, 16 byte lanes, unaligned 16-byte access |
| `rtl/im2col.sv` | receptive-field gather with zero padding and stride |
| `rtl/act_proc.sv` | activation pipeline: two scalings, bias, residual add, ReLU, clip, global average pool |
| `rtl/layer_seq.sv` | layer-serial sequencer and performance counters |
| `rtl/aon_cim_top.sv` | top level |
| `tb/tb_ref_pkg.sv` | golden model of one layer, written loop by loop from the definitions |
| `tb/tb_<block>.sv` | self-checking unit testbenches |
| `tb/tb_aon_cim_top.sv` | end-to-end six-layer program that exercises every mechanism |
| `tb/tb_kws_full.sv` | the full keyword-spotting network at the default size |

## The array and its cycle

`cim_macro` stores each weight as a pair of conductance codes (g+, g−). The effective weight is g+ − g−, so both signs are available; in this model these are 7-bit codes from a signed 8-bit weight.

A *CiM cycle* is one matrix-vector product:
- Each active row's DAC emits |x| unit pulses with the polarity of x.
- x is the activation code, clipped to ±(2^(b−1)−1) for b = 8, 6 or 4 bits.
- The duration of the pulse train sets the cycle time. The cycle is 130, 34 or 10 ns for 8, 6 or 4 bits, which is 127, 31 or 7 pulses of 1 ns plus about 3 ns of overhead.
- At the 1.25 ns digital clock (800 MHz) this is **104, 28 and 8 clocks**.

There are 512 bitlines but only 128 ADCs: a 4:1 analog mux connects one group of 128 columns at a time. A *mux phase* p connects columns p·128 … p·128+127, and ADC a sees column p·128+a.

A layer whose output channels sit in columns [col0, col0+cols) needs one CiM cycle per phase it touches. A layer stored in columns 112..195, for example, costs two cycles per output pixel.

The ADC gain is fixed at calibration (`adc_shift`, a power of two) and is the same for every layer. Each layer's own range is restored digitally, by the first scaling in `act_proc`. DAC rows and ADC columns outside the active layer are gated: they do not drive and they read 0.

The model is ideal. It has no programming noise, read noise or drift. In a real PCM array those effects are handled by noise-aware training and a global drift-compensation scale, which here would be folded into each layer's `s_layer`.

## Layer-serial placement

Because a layer's weights occupy a rectangle of rows × columns, several layers can be packed side by side. For a convolution:
- rows = kh·kw·C_in, in the order row0 + (kh·k_w + kw)·C_in + c;
- columns = C_out, starting at col0.

`tb_kws_full.sv` shows a packing of the KWS model that uses 57.4 % of the cells:

| layer | rows × cols | array rows | array columns | mux phases |
|---|---|---|---|---|
| conv1 | 40 × 84 | 756..795 | 0..83 | 0 |
| conv2 | 756 × 112 | 0..755 | 0..111 | 0 |
| conv3 | 1008 × 84 | 0..1007 | 112..195 | 0, 1 |
| conv4 | 756 × 84 | 0..755 | 196..279 | 1, 2 |
| conv5 | 756 × 84 | 0..755 | 280..363 | 2 |
| fc | 84 × 12 | 0..83 | 364..375 | 2 |

A fully connected layer is a 1×1 convolution on a 1×1 input.

## Activation storage and IM2COL

Activations are 8-bit signed codes, one per byte, stored HWC and unpadded: (y, x, c) is at base + (y·W + x)·C + c.

The SRAM has two 64 KB banks:
- Bank `rd_bank` feeds IM2COL; the other bank receives the layer's output.
- The sequencer flips `rd_bank` after every layer. The first layer reads bank 0, so after N layers the result is in bank N mod 2.
- Each bank is 16 byte-wide lanes, with byte A in lane A mod 16. Any 16 consecutive bytes can therefore be read or written in one clock at any alignment; the lane rotation is undone on the output.
- A second read port reads the *write* bank. It supplies the residual operand: in a two-layer residual block, the block input is still in the bank that the block's second layer writes.

`im2col` builds the input vector for one output pixel. For each kernel tap (kh, kw) the C channels form one contiguous byte run, fetched 16 bytes per clock. Taps outside the input are zero padding: no read is made and zeros are written. Padding is given as top/left offsets; bottom/right follow from the bounds check.

A pixel costs Σ_taps ceil(C/16) clocks + 2. The vector register is the unit's "small buffer". The array copies it when a CiM cycle starts, so IM2COL can immediately begin the next pixel.

## Activation processing

One phase delivers 128 ADC words. `act_proc` handles them 16 lanes at a time, which takes 8 clocks. It accepts the next phase during the last of those 8 clocks, so it keeps up with the 10 ns (8-clock) cycle of 4-bit mode.

Per word, with col its array column and f = col − col0 its output channel:

```
v = round(adc · s_layer.mant · s_ch[col].mant / 2^(s_layer.shift + s_ch[col].shift)) + bias[col]
v = v + residual[pix, f]            (if the layer has a residual)
v = max(v, 0)                       (if ReLU)
out = clip(v, ±(2^(b−1)−1))         (b of the layer's mode)
```

A scale is a 16-bit signed mantissa with a power-of-two exponent.
- `s_layer` is per layer. It undoes the fixed ADC gain and can carry drift compensation.
- `s_ch` and `bias` are per column (a 512-entry table). They hold a folded batch normalisation.

Rounding is half-up. Outputs are written to out_base + pix·cols + f, and the write mask drops words of columns that belong to other layers.

With `pool` set, outputs are summed per channel instead of stored. After the layer, `pool_flush` writes round(sum · s_pool), with s_pool ≈ 1/(H·W), to out_base + f. This is the global average pooling that both models use before their classifier.

## Sequencing and the pipeline

`layer_seq` keeps three stages busy at once:
- IM2COL gathers pixel n+1;
- the array runs the phases of pixel n;
- `act_proc` stores pixel n−1.

ADC results are handed over with a valid/ready handshake. If `act_proc` is not ready, the result is held and the next CiM cycle waits.

At the end of a layer the sequencer does three things:
1. It waits for the pipeline to drain.
2. It flushes the pooling sums if the layer pools.
3. It swaps the banks and loads the next descriptor.

An `LT_END` descriptor ends the program.

Three counters make the timing visible:
- `n_cim_ops`: CiM cycles;
- `n_starve`: clocks in which the array was idle inside a layer because no vector was ready;
- `n_layers`: finished layers.

### Where this departs from the intended performance

The intent of the architecture is that the array never waits, even at 4 bits. In this RTL that holds for 8-bit layers, but not always for 6- and 4-bit layers. IM2COL fetches 16 bytes per clock, so a 3×3×84 pixel takes 56 clocks, while a 4-bit CiM cycle is 8 clocks.

Closing that gap needs more IM2COL bandwidth, for example a wider SRAM port, or a line buffer that reuses the overlapping taps of neighbouring pixels. The gap is measured by `n_starve`.

In the full KWS run at 8 bits the array is idle for only 289 of 129,442 clocks. One inference takes about 162 µs at 800 MHz.

## Other departures and own choices

- **DAC/ADC resolution.** The precision modes are treated as symmetric b-bit codes for both DAC and ADC. A DAC resolution one bit above the ADC, to exploit non-negative post-ReLU inputs, is not modelled. The 130/34/10 ns cycle times match 127/31/7 pulses, which is what this design follows.
- **Arithmetic.** The floating-point scalings are implemented as mantissa × 2^−shift fixed-point operations.
- **Pooling.** Only global average pooling is built; max pooling and strided pooling are not.
- **Control plane.** There is no controller, which the original design leaves unspecified. The descriptor format, handshakes, host ports and counters are this design's own. Weight programming writes one row per clock, a stand-in for the real, much slower PCM programming.
- **Sizes.** Every parameter default is the full-size value: 1024 × 512 array, 128 ADCs, 2 × 64 KB SRAM.

## Simulation

Every testbench is self-checking and ends with a line `TB_RESULT checks=N failures=M`. With Verilator 5:

```
verilator --binary --timing --assert --top-module tb_kws_full \
    rtl/aon_pkg.sv tb/tb_ref_pkg.sv rtl/*.sv tb/tb_kws_full.sv
./obj_dir/Vtb_kws_full
```

Replace the top module and the last file to run another testbench; the unit testbenches need only their own `rtl/` file plus the package.

- `tb_aon_cim_top` runs six layers that cover everything above. It uses:
  - all three modes and the switches between them;
  - padding, stride 2, a two-phase layer, a residual add, pooling and an FC layer in phase 3.
  It compares every SRAM byte with `tb_ref_pkg`, and counts a failure for any mechanism that never occurred. It also checks:
  - that every CiM cycle lasts 104/28/8 clocks;
  - that `act_proc` takes a phase every 8 clocks.
- `tb_kws_full` runs the complete KWS network on the default-size design: 1,241 CiM cycles, 82,322 checks, a few seconds of simulation. Its largest tensor is 49×10×84 = 41,160 bytes.

The VWW network fits the array and the SRAM but has no testbench:
- Weights: 67.5 % of the array.
- Activations: its largest tensor is 30,000 bytes.
- Its fused-MBConv residual blocks map onto the residual port, with the residual tensor being the block input that is still held in the write bank.

To place a different network, follow these steps:
1. Choose row0/col0 rectangles that do not overlap.
2. Program the weights in the row order given above.
3. Write one descriptor per layer, using `conv()` in `tb_ref_pkg` as a template.
4. Check with `run_layer()` in `tb_ref_pkg`.
