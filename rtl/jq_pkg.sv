// jq_pkg: types and constants shared by the joint-quantization datapath.
//
// The datapath keeps every tensor as a small integer and every scale as a
// power of two, so a change of scale is a bit shift. The constants below are
// the word sizes of that scheme: 8-bit activations, weights and biases, a
// 32-bit convolution accumulator, and shift fields wide enough for the shift
// amounts a layer needs. The layer configuration struct carries the only
// per-layer numbers the hardware needs: three shift amounts, the output bit
// width, the signedness of the input activations and the module type.
//
// From the paper: 8-bit data, 8-bit biases, 32-bit accumulation, the four
// module types (plain convolution, convolution + ReLU, residual add + ReLU,
// residual add) and the requantization shift range of 1..10 bits.
// This design's own choices: the field widths of the shift amounts (4 bits
// unsigned for the output shift, 6 bits signed for the alignment shifts) and
// the encoding of the mode.
package jq_pkg;

  // Bit width of activations, weights and biases (n_bits, including sign).
  localparam int unsigned NBITS   = 8;
  // Convolution accumulator width.
  localparam int unsigned ACC_W   = 32;
  // Output (requantization) shift field: 0..15, the paper's range is 1..10.
  localparam int unsigned SHIFT_W = 4;
  // Signed alignment shift field for bias and shortcut: -32..31.
  localparam int unsigned ALIGN_W = 6;
  // Field holding the run-time output bit width (2..NBITS).
  localparam int unsigned NB_W    = $clog2(NBITS + 1);

  // The four unified modules of the joint quantization scheme.
  typedef enum logic [1:0] {
    MODE_CONV      = 2'd0,  // convolution, quantized directly
    MODE_CONV_RELU = 2'd1,  // convolution, ReLU, then quantization
    MODE_RES_RELU  = 2'd2,  // convolution + shortcut, ReLU, then quantization
    MODE_RES       = 2'd3   // convolution + shortcut, then quantization
  } jq_mode_e;

  // Per-layer configuration: bit-shift values, not fractional bits.
  typedef struct packed {
    jq_mode_e                   mode;
    // N_x + N_w - N_b: left shift (positive) or right shift (negative) of the bias.
    logic signed [ALIGN_W-1:0]  bias_shift;
    // N_x + N_w - N_s: alignment of the shortcut operand to the accumulator.
    logic signed [ALIGN_W-1:0]  sc_shift;
    // N_x + N_w - N_o: right shift that requantizes the result.
    logic [SHIFT_W-1:0]         out_shift;
    // Output bit width n_bits (2..NBITS).
    logic [NB_W-1:0]            nbits;
    // Input activations are unsigned (they came out of a ReLU module).
    logic                       x_unsigned;
  } jq_cfg_t;

  function automatic logic mode_has_relu(jq_mode_e m);
    return (m == MODE_CONV_RELU) || (m == MODE_RES_RELU);
  endfunction

  function automatic logic mode_has_shortcut(jq_mode_e m);
    return (m == MODE_RES_RELU) || (m == MODE_RES);
  endfunction

endpackage
