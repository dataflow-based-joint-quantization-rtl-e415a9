# Bit-shift requantization datapath for jointly quantized DNNs

A quantized neural network stores weights, biases and activations as small
integers. Whenever a 32-bit convolution result must be turned back into an
8-bit activation it has to be rescaled, and in common schemes that rescaling
is a 32-bit multiplication by a scaling factor or a codebook lookup. This
design removes that cost. Every tensor's scale is a power of two, `2^-N`,
where `N` (the *fractional bit*) is chosen per tensor and per layer offline.
Rescaling then becomes a bit shift, followed by rounding to nearest and
clipping to the 8-bit range.

The second idea is to quantize as rarely as possible. Layers that follow one
another without leaving the chip are grouped into one *unified module*:
convolution, optional residual addition and optional ReLU. Only the module's
final result is quantized. Everything in between stays a 32-bit integer.

The RTL here implements that datapath. A unit computes one output activation
of such a module. Internally it aligns the bias, multiplies and accumulates,
adds the aligned shortcut, applies ReLU and requantizes with a shift. The
fractional-bit search that picks each layer's `N` values runs offline in
software, and its only output that reaches the hardware is a set of shift
amounts.

## The arithmetic

Take a convolution with integer inputs `X^I` (scale `2^-N_x`), weights `W^I`
(scale `2^-N_w`) and bias `B^I` (scale `2^-N_b`). One output element is

    O_int32 = B^I * 2^(N_x+N_w-N_b) + sum over (k,i,j) of X^I * W^I

and it has the scale `2^-(N_x+N_w)`. To give it the output scale `2^-N_o`:

    O^I = clip( round( O_int32 / 2^(N_x+N_w-N_o) ) )

So the hardware needs three shift amounts per layer, and no fractional bits.
They are kept, one word (`jq_cfg_t`) per layer, in the unit's shift table:

| field in `jq_cfg_t` | value                | meaning                                         |
|---------------------|----------------------|-------------------------------------------------|
| `bias_shift`        | `N_x + N_w - N_b`    | signed; left shift of the bias, or a rounded right shift when negative |
| `sc_shift`          | `N_x + N_w - N_s`    | signed; aligns a shortcut with scale `2^-N_s`   |
| `out_shift`         | `N_x + N_w - N_o`    | right shift of the requantizer, 0..15           |
| `nbits`             | 2..8                 | output width (8, 7 and 6 bits are the cases of interest) |
| `x_unsigned`        | 0/1                  | inputs came out of a ReLU and are 0..255        |
| `mode`              | see below            | which unified module this is                    |

In ResNet-50 the requantization shifts lie between 1 and 10, and most of
them cluster around 3 and 8.

Rounding is "add half, then arithmetic shift", so ties go towards +infinity
(`-0.5` becomes `0`, `1.5` becomes `2`). Clipping saturates to
`[-2^(n-1), 2^(n-1)-1]`. In a module that ends in a ReLU the result is known
to be non-negative, so the clip range is `[0, 2^n-1]` instead. The full
8-bit code is spent on positive values, and the next layer reads those
activations as unsigned (`x_unsigned = 1`).

## The four unified modules

| `mode`           | dataflow                                  | output range |
|------------------|-------------------------------------------|--------------|
| `MODE_CONV`      | conv → quantize                           | signed       |
| `MODE_CONV_RELU` | conv → ReLU → quantize                    | unsigned     |
| `MODE_RES_RELU`  | conv → + aligned shortcut → ReLU → quantize | unsigned   |
| `MODE_RES`       | conv → + aligned shortcut → quantize      | signed       |

The residual modes add the shortcut before anything is quantized. The
shortcut operand `sc_i` is 32 bits wide and can be one of two things. It can
be a stored 8-bit activation, sign- or zero-extended, with its own scale
`2^-N_s`. Or it can be the accumulator of a shortcut convolution, with scale
`2^-(N_x'+N_w')`. Either way `sc_shift` moves it onto the main accumulator's
scale, and the sum saturates at 32 bits. Batch normalization needs no
hardware, because it is folded into the weights and biases.

## Blocks

| file                   | what it does |
|------------------------|--------------|
| `rtl/jq_pkg.sv`        | Word sizes, the `jq_mode_e` enum, the `jq_cfg_t` layer configuration, and the mode helpers. |
| `rtl/shift_quantizer.sv` | 32-bit → n-bit requantizer: round, shift, clip, with saturation flags. It has one register stage. It is also the stand-alone "bit-shifting" quantization operation (32-bit in, 8-bit out, shifts 1..10). |
| `rtl/align_shifter.sv` | Signed alignment shift. Left shifts saturate and right shifts round. Used for the bias (8-bit input) and for the shortcut (32-bit input). Combinational. |
| `rtl/conv_mac.sv`      | 8×8-bit multiply into a 32-bit accumulator that wraps. Activations can be signed or unsigned. Loading the bias and the first product can happen in the same clock. |
| `rtl/residual_add.sv`  | Saturating 32-bit addition of the aligned shortcut. |
| `rtl/relu.sv`          | `max(0, x)` on the 32-bit value, enabled per mode. |
| `rtl/shift_table.sv`   | Per-layer store of `jq_cfg_t` words: 256 entries, one write port, asynchronous read. |
| `rtl/jq_unit.sv`       | Top. The shift table plus a control FSM (`IDLE → ACC → POST`) around the blocks above. |

## Using `jq_unit`

One operation produces one output activation `O^I[l,m,n]`:

0. Before a layer is used, write its configuration into the shift table with
   `cfg_wr_en_i`, `cfg_wr_layer_i` and `cfg_wr_data_i`. The table has
   `LAYERS = 256` entries, enough for the 156 weight layers of ResNet-152.
   A write is visible from the next clock. Entries are not reset.
1. While `ready_o` is high, assert `start_i` for one clock with `layer_i` and
   `bias_i`. The layer's configuration is read from the table on that
   clock, and the aligned bias goes into the accumulator.
2. Stream the receptive field: `C*H*W` pairs `(x_i, w_i)` with `x_valid_i`,
   and `x_last_i` on the last pair. One pair is taken per clock while
   `x_ready_o` is high. Gaps are allowed. Zero padding is just `x_i = 0`.
3. In a residual mode the unit then raises `sc_ready_o` and waits, for as
   long as needed, until `sc_valid_i` brings `sc_i`.
4. The result appears on `q_o` with `q_valid_o` for one clock. The status
   flags `sat_hi_o`, `sat_lo_o`, `relu_o`, `add_sat_o` and `bias_sat_o`
   come with it.

Timing: with L pairs, no gaps and no shortcut stall, `q_valid_o` rises L+2
clocks after the `start_i` clock. The unit is ready again on the clock in
which the result is being registered, so back-to-back operations take L+2
clocks each. There is one multiplier. For a 3×3×512 ResNet window
(L = 4608) the worst-case sum is 4608·255·128 ≈ 1.5·10^8, well inside 32 bits.

Apart from the shift table, the unit keeps no feature maps, weights or
biases. The caller streams them in, typically from on-chip buffers.

## Where this RTL makes its own choices

These points are not fixed by the scheme, and were decided here:

- **Parallelism and dataflow.** There is one multiply-accumulate per clock,
  and one output element per operation. A real accelerator would replicate
  `conv_mac` and share one requantizer per lane. Nothing in the scheme
  depends on that choice.
- **Memories.** Activation, weight and bias storage is not part of this RTL,
  and the unit's stream ports are where it would connect. The shift table's
  depth (256), its word format and its asynchronous read are this design's
  own choices.
- **Clipping versus truncation.** The stand-alone requantizer could be read
  as keeping the rightmost 8 bits after the shift. This RTL saturates
  instead, following the `min/max` definition of the quantizer.
- **Rounding ties** go upward, and right-shifted biases are rounded the same
  way.
- **Overflow.** The MAC accumulator wraps at 32 bits. Left-shift alignment
  and the residual add saturate.
- **Shortcut convolutions.** Aligning two convolution outputs is done with
  the same signed shift as for an activation shortcut. No more elaborate
  scheme is implemented.
- **Run-time output width** (`nbits`), so that the 7- and 6-bit variants run
  on the same hardware.
- **Handshakes, latency and reset.** Ready/valid handshakes, a single output
  register, and an active-low asynchronous reset.

## Verification

Each testbench in `tb/` checks its results against integer arithmetic in
`tb/jq_ref_pkg.sv`. That package uses multiplication and floor division
instead of shifts, so it does not share the RTL's implementation.

| testbench            | what it covers |
|----------------------|----------------|
| `tb_shift_quantizer` | Ties, both range ends, every shift 0..15, widths 2..8, 3000 random values with shifts 1..10, one-clock latency. |
| `tb_align_shifter`   | Bias and shortcut variants, shifts −32..31, rounding ties, saturation. |
| `tb_conv_mac`        | Dot products up to 4608 long with extreme operands, a 200 000-term sum that wraps, signed and unsigned activations, gaps, and a bias load fused with the first product. |
| `tb_residual_add`, `tb_relu` | Exhaustive corners and random values. |
| `tb_shift_table`     | Fill all 256 entries, read back in random order, then overwrite entries one at a time. |
| `tb_jq_unit`         | 1500 random operations over all four modes, at the default sizes. It checks the exact result, the status flags and the L+2 latency. It counts, and requires at least once each: every mode, a ReLU clamp, clipping high and low, bias and shortcut shifts in both directions, a saturated add, a shortcut stall, stream gaps, 6- and 7-bit outputs, unsigned inputs, and reuse of a stored table entry. |
| `tb_jq_resblock`     | A scaled-down ResNet bottleneck: 16×8×8 input, 1×1 conv → 3×3 conv → 1×1 conv plus identity shortcut, ReLU throughout. Each layer's shifts are written to the table once, and the block runs as 1536 chained operations, each layer's outputs feeding the next. |

To run one with Verilator:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -y rtl -y tb +libext+.sv -Irtl -Itb \
        rtl/jq_pkg.sv tb/jq_ref_pkg.sv tb/tb_jq_unit.sv --top-module tb_jq_unit
    ./obj_dir/Vtb_jq_unit

Each testbench prints `TB_RESULT checks=N failures=M` and stops. A watchdog
ends it with a failure if it hangs.

## Limits

These tests check that the RTL computes the integer equations exactly. They
say nothing about network accuracy, which depends on the offline choice of
fractional bits. That search evaluates a small grid of candidate `N_w`,
`N_b` and `N_o` values per layer, and keeps the combination that minimises
the reconstruction error of the layer output. It is not hardware and is not
included here. The RTL has not been mapped to a standard-cell library or timed.
